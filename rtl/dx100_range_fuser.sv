// dx100_range_fuser: the DX100 Range Fuser (RNG instruction).
//
// Flattens many short range loops into one long loop:
//   idx = 0
//   for i in tile:  if TC[i]:  for j = TS1[i] .. TS2[i]-1:
//       TD1[idx] = i;  TD2[idx] = j;  idx++
// For each outer iteration i the unit reads TC[i], TS1[i] and TS2[i] through
// its scratchpad port (waiting on finish bits while their producers run), then
// emits one (i, j) pair every two cycles (TD1 write, TD2 write). It ends when
// TS1's producer has ended and all its elements are consumed, or when TILE
// pairs have been written (the destination tiles are full). The sizes of TD1
// and TD2 then equal the number of pairs.
// The loop follows the paper. The per-element reads, two-cycle emission and
// stopping at a full tile are this design's choices.
module dx100_range_fuser
  import dx100_pkg::*;
#(
  parameter int unsigned TILE   = 16384,
  parameter int unsigned NTILES = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              issue_valid,
  input  issue_t            issue,
  output logic              done,
  output spd_req_t          spd_req,
  input  logic              spd_gnt,
  input  spd_rsp_t          spd_rsp,
  input  idx_t              size [NTILES],
  input  logic [NTILES-1:0] wr_pending
);
  typedef enum logic [2:0] {S_IDLE, S_TC, S_S1, S_S2, S_CHK, S_E1, S_E2} state_t;
  state_t state;
  issue_t cur;
  idx_t   i, idx;
  word_t  j, jend;
  logic   cond, f_tc, f_s1, f_s2;

  logic [3:0] wsel;
  assign wsel = i[3:0];

  // element availability / end of input
  logic in_end, avail;
  always_comb begin
    in_end = !wr_pending[cur.ins.ts1] && i >= size[cur.ins.ts1];
    avail  = (f_s1 || !wr_pending[cur.ins.ts1])
          && (f_s2 || !wr_pending[cur.ins.ts2])
          && (!cur.ins.tc_en || f_tc || !wr_pending[cur.ins.tc]);
  end

  always_comb begin
    spd_req = '0;
    spd_req.line = 12'(i >> 4);
    case (state)
      S_TC: begin spd_req.valid = 1'b1; spd_req.tile = cur.ins.tc;  end
      S_S1: begin spd_req.valid = 1'b1; spd_req.tile = cur.ins.ts1; end
      S_S2: begin spd_req.valid = 1'b1; spd_req.tile = cur.ins.ts2; end
      S_E1, S_E2: begin
        spd_req.valid       = 1'b1;
        spd_req.tile        = (state == S_E1) ? cur.ins.td1 : cur.ins.td2;
        spd_req.line        = 12'(idx >> 4);
        spd_req.wmask[idx[3:0]] = 1'b1;
        spd_req.fmask[idx[3:0]] = 1'b1;
        spd_req.wdata[idx[3:0]] = (state == S_E1) ? word_t'(i) : j;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; i <= '0; idx <= '0; j <= '0; jend <= '0;
      cond <= 1'b0; f_tc <= 1'b0; f_s1 <= 1'b0; f_s2 <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (issue_valid) begin
          cur <= issue; i <= '0; idx <= '0;
          state <= issue.ins.tc_en ? S_TC : S_S1;
        end
        S_TC: if (spd_gnt) begin
          cond <= spd_rsp.rdata[wsel] != '0; f_tc <= spd_rsp.rfinish[wsel]; state <= S_S1;
        end
        S_S1: if (spd_gnt) begin
          j <= spd_rsp.rdata[wsel]; f_s1 <= spd_rsp.rfinish[wsel]; state <= S_S2;
        end
        S_S2: if (spd_gnt) begin
          jend <= spd_rsp.rdata[wsel]; f_s2 <= spd_rsp.rfinish[wsel]; state <= S_CHK;
        end
        S_CHK: begin
          if (in_end || int'(i) >= TILE) begin
            done <= 1'b1; state <= S_IDLE;
          end else if (!avail) begin
            state <= cur.ins.tc_en ? S_TC : S_S1;
          end else if ((cur.ins.tc_en && !cond) || j >= jend) begin
            i <= i + 1'b1;
            state <= cur.ins.tc_en ? S_TC : S_S1;
          end else begin
            state <= S_E1;
          end
        end
        S_E1: if (spd_gnt) state <= S_E2;
        S_E2: if (spd_gnt) begin
          idx <= idx + 1'b1;
          j   <= j + 1'b1;
          if (int'(idx) + 1 >= TILE) begin
            done <= 1'b1; state <= S_IDLE;
          end else if (j + 1 >= jend) begin
            i <= i + 1'b1;
            state <= cur.ins.tc_en ? S_TC : S_S1;
          end else state <= S_E1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
