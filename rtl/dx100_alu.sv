// dx100_alu: the DX100 ALU unit (ALUV and ALUS instructions).
//
// TD[i] = TS1[i] OP TS2[i]   (ALUV)     TD[i] = TS[i] OP RS   (ALUS)
// for every element i of the source tile, optionally conditioned on TC[i].
// LANES elements (one scratchpad line) are processed per group: the unit reads
// the condition line, the first and second source lines through its scratchpad
// port, checks the finish bits, and writes the LANES results in one cycle.
// A group whose source elements are not yet produced (finish bit 0 while the
// producer is still running, wr_pending) is read again until they are; the
// unit ends when the producer of TS1 has ended and every element below the
// tile's size has been written. Elements whose condition is 0 get result 0.
// Throughput: one group per 3 (ALUS, unconditioned) to 4 cycles when the
// port is granted every cycle.
// Operations and data types follow the paper's ISA; only the 32-bit integer
// types (u32, i32) are implemented. Lanes (16) follow the paper's
// configuration; sharing one port and writing 0 for false conditions are this
// design's choices.
module dx100_alu
  import dx100_pkg::*;
#(
  parameter int unsigned LANES  = 16,
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
  typedef enum logic [2:0] {S_IDLE, S_TC, S_S1, S_S2, S_WR} state_t;
  state_t state;
  issue_t cur;
  logic [11:0] line;
  line_t       tcd, s1d, s2d;
  logic [LANES-1:0] tcf, s1f, s2f;

  localparam int unsigned NLINES = TILE / LANES;

  // group completion check
  logic [LANES-1:0] need, okm;
  logic             fin_all, ready_grp;
  line_t            res;
  always_comb begin
    idx_t sz;
    logic pend;
    int unsigned base;
    sz   = size[cur.ins.ts1];
    pend = wr_pending[cur.ins.ts1];
    base = int'(line) * LANES;
    fin_all = (!pend && base >= int'(sz)) || int'(line) >= NLINES;
    for (int w = 0; w < LANES; w++) begin
      need[w] = pend ? 1'b1 : (base + w < int'(sz));
      okm[w]  = s1f[w]
              && (!cur.ins.tc_en || tcf[w] || !wr_pending[cur.ins.tc])
              && (cur.ins.opcode != OP_ALUV || s2f[w] || !wr_pending[cur.ins.ts2]);
    end
    ready_grp = (need & ~okm) == '0;
    for (int w = 0; w < LINE_WORDS; w++) begin
      word_t b;
      b = (cur.ins.opcode == OP_ALUV) ? s2d[w] : cur.r1[31:0];
      res[w] = (w < LANES && (!cur.ins.tc_en || tcd[w] != '0))
               ? alu_apply(cur.ins.op, cur.ins.dtype, s1d[w], b) : '0;
    end
  end

  always_comb begin
    spd_req = '0;
    spd_req.line = line;
    case (state)
      S_TC: begin spd_req.valid = 1'b1; spd_req.tile = cur.ins.tc;  end
      S_S1: begin spd_req.valid = 1'b1; spd_req.tile = cur.ins.ts1; end
      S_S2: begin spd_req.valid = 1'b1; spd_req.tile = cur.ins.ts2; end
      S_WR: begin
        spd_req.valid = !fin_all && ready_grp;
        spd_req.tile  = cur.ins.td1;
        spd_req.wdata = res;
        spd_req.wmask = LINE_WORDS'(need);
        spd_req.fmask = LINE_WORDS'(need);
      end
      default: ;
    endcase
  end

  state_t first_rd;
  assign first_rd = cur.ins.tc_en ? S_TC : S_S1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; line <= '0; done <= 1'b0;
      tcd <= '0; s1d <= '0; s2d <= '0; tcf <= '0; s1f <= '0; s2f <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (issue_valid) begin
          cur   <= issue;
          line  <= '0;
          state <= issue.ins.tc_en ? S_TC : S_S1;
        end
        S_TC: if (spd_gnt) begin
          tcd <= spd_rsp.rdata; tcf <= spd_rsp.rfinish[LANES-1:0]; state <= S_S1;
        end
        S_S1: if (spd_gnt) begin
          s1d <= spd_rsp.rdata; s1f <= spd_rsp.rfinish[LANES-1:0];
          state <= (cur.ins.opcode == OP_ALUV) ? S_S2 : S_WR;
        end
        S_S2: if (spd_gnt) begin
          s2d <= spd_rsp.rdata; s2f <= spd_rsp.rfinish[LANES-1:0]; state <= S_WR;
        end
        S_WR: begin
          if (fin_all) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (!ready_grp) begin
            state <= first_rd;
          end else if (spd_gnt) begin
            line  <= line + 1'b1;
            state <= first_rd;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
