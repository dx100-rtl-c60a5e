// dx100_stream_unit: the DX100 Stream Access unit (SLD, SST).
//
//   i = 0
//   for (idx = F; idx < G; idx += S) { if TC[i]: SLD: TD[i] = BASE[idx]
//                                                SST: BASE[idx] = TS[i];  i++ }
// F, G and S come from registers RS1..RS3. The controller part walks the loop,
// one iteration per cycle, reading the condition tile a line at a time. The
// address generator forms the line address and word offset (wid) of
// BASE + 4*idx; consecutive iterations that fall in the same line are merged
// into one Request Table entry, which records for each wid the iteration i it
// serves (an MSHR-like table of RT_ENTRIES lines). Closed entries are
// translated (TLB port) and sent to the cache as line reads, tagged with the
// entry number. When a line returns, the word modifier walks the entry's
// words, one per cycle: SLD writes each word to TD[i]; SST reads TS[i] into
// the line and then writes the line back. An SST iteration is only entered
// once TS[i] is finished (the generator re-reads TS's finish bits while its
// producer runs), so a returned line never waits for a producer and never
// holds up the shared response path. Iterations whose condition is 0 only
// set TD[i]'s finish bit (SLD). The unit ends when the loop is done and the
// table is empty.
// Follows the paper: loop form, Request Table with wid/i, Word Modifier roles,
// all streaming traffic through the cache. This design's choices: one word
// per cycle in the word modifier, entry closes when the line changes or a wid
// repeats, 32-bit elements only.
module dx100_stream_unit
  import dx100_pkg::*;
#(
  parameter int unsigned TILE       = 16384,
  parameter int unsigned NTILES     = 32,
  parameter int unsigned RT_ENTRIES = 128
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
  input  logic [NTILES-1:0] wr_pending,
  output logic              tlb_valid,
  output logic [VA_W-1:0]   tlb_va,
  input  paddr_t            tlb_pa,
  input  logic              tlb_hit,
  output logic              mreq_valid,
  output mem_req_t          mreq,
  input  logic              mreq_ready,
  input  logic              mrsp_valid,
  input  mem_rsp_t          mrsp,
  output logic              mrsp_ready,
  output logic [31:0]       stat_reqs
);
  localparam int unsigned EW = $clog2(RT_ENTRIES);

  typedef enum logic [2:0] {G_IDLE, G_RDTC, G_RDTS, G_RUN, G_WAIT} gstate_t;
  typedef enum logic [1:0] {W_IDLE, W_WORDS, W_WB} wstate_t;
  gstate_t gs;
  wstate_t ws;
  issue_t  cur;
  logic [63:0] idx;
  idx_t    i;
  line_t   tcl;
  logic [LINE_WORDS-1:0] tcf, tsf;
  logic [11:0] tcl_line, tsf_line;

  // Request Table
  logic [RT_ENTRIES-1:0] e_v, e_closed, e_sent;
  logic [VA_W-7:0]       e_line [RT_ENTRIES];
  paddr_t                e_pa   [RT_ENTRIES];
  logic [LINE_WORDS-1:0] e_wm   [RT_ENTRIES];
  idx_t                  e_i    [RT_ENTRIES][LINE_WORDS];

  logic          open_v;
  logic [EW-1:0] open_e;

  // ---------------- address generator ----------------
  logic [VA_W-1:0] va;
  logic [3:0]      wid, w;
  logic            loop_end, tc_have, avail, cond, ts_have, ts_av;
  assign va  = cur.ins.base[VA_W-1:0] + {idx[VA_W-3:0], 2'b00};
  assign wid = va[5:2];
  assign w   = i[3:0];
  always_comb begin
    loop_end = (idx >= cur.r2) || int'(i) >= TILE;
    tc_have  = !cur.ins.tc_en || (tcl_line == 12'(i >> 4));
    avail    = !cur.ins.tc_en || tcf[w];
    cond     = !cur.ins.tc_en || tcl[w] != '0;
    ts_have  = cur.ins.opcode != OP_SST || (tsf_line == 12'(i >> 4));
    ts_av    = cur.ins.opcode != OP_SST || tsf[w] || !wr_pending[cur.ins.ts1];
  end

  logic          have_free;
  logic [EW-1:0] free_e;
  logic          have_send;
  logic [EW-1:0] send_e;
  always_comb begin
    have_free = 1'b0; free_e = '0; have_send = 1'b0; send_e = '0;
    for (int e = RT_ENTRIES-1; e >= 0; e--) begin
      if (!e_v[e]) begin have_free = 1'b1; free_e = EW'(e); end
      if (e_v[e] && e_closed[e] && !e_sent[e]) begin have_send = 1'b1; send_e = EW'(e); end
    end
  end

  logic joins;
  assign joins = open_v && e_line[open_e] == va[VA_W-1:6] && !e_wm[open_e][wid];

  // ---------------- word modifier ----------------
  logic [EW-1:0]         we_e;
  line_t                 wline;
  logic [LINE_WORDS-1:0] wleft;
  logic [3:0]            wcur;
  idx_t                  wi;
  logic                  ts_ok;
  logic                  wb_v;
  always_comb begin
    wcur = '0;
    for (int k = LINE_WORDS-1; k >= 0; k--) if (wleft[k]) wcur = 4'(k);
  end
  assign wi    = e_i[we_e][wcur];
  assign ts_ok = spd_rsp.rfinish[wi[3:0]] || !wr_pending[cur.ins.ts1];
  assign mrsp_ready = (ws == W_IDLE);

  logic gen_port;
  always_comb begin
    spd_req  = '0;
    gen_port = 1'b0;
    if (ws == W_WORDS) begin
      spd_req.valid = 1'b1;
      spd_req.line  = 12'(wi >> 4);
      if (cur.ins.opcode == OP_SLD) begin
        spd_req.tile = cur.ins.td1;
        spd_req.wmask[wi[3:0]] = 1'b1;
        spd_req.fmask[wi[3:0]] = 1'b1;
        spd_req.wdata[wi[3:0]] = wline[wcur];
      end else spd_req.tile = cur.ins.ts1;
    end else if (gs == G_RDTC || gs == G_RDTS) begin
      spd_req.valid = 1'b1; spd_req.line = 12'(i >> 4);
      spd_req.tile  = (gs == G_RDTC) ? cur.ins.tc : cur.ins.ts1;
      gen_port = 1'b1;
    end else if (gs == G_RUN && !loop_end && tc_have && avail && !cond && cur.ins.opcode == OP_SLD) begin
      spd_req.valid = 1'b1; spd_req.tile = cur.ins.td1; spd_req.line = 12'(i >> 4);
      spd_req.fmask[w] = 1'b1;
      gen_port = 1'b1;
    end
  end

  // ---------------- memory requests ----------------
  assign tlb_va    = {e_line[send_e], 6'b0};
  assign tlb_valid = have_send && !wb_v;
  always_comb begin
    mreq = '0;
    mreq.to_cache = 1'b1;
    if (wb_v) begin
      mreq.addr  = e_pa[we_e];
      mreq.write = 1'b1;
      mreq.tag   = 8'(we_e);
      mreq.data  = wline;
    end else begin
      mreq.addr = {tlb_pa[PA_W-1:6], 6'b0};
      mreq.tag  = 8'(send_e);
    end
    mreq_valid = wb_v || (have_send && tlb_hit);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gs <= G_IDLE; ws <= W_IDLE; cur <= '0; idx <= '0; i <= '0; done <= 1'b0;
      tcl <= '0; tcf <= '0; tcl_line <= '1; tsf <= '0; tsf_line <= '1; open_v <= 1'b0; open_e <= '0;
      e_v <= '0; e_closed <= '0; e_sent <= '0; we_e <= '0; wline <= '0; wleft <= '0;
      wb_v <= 1'b0; stat_reqs <= '0;
      for (int e = 0; e < RT_ENTRIES; e++) begin
        e_line[e] <= '0; e_pa[e] <= '0; e_wm[e] <= '0;
        for (int k = 0; k < LINE_WORDS; k++) e_i[e][k] <= '0;
      end
    end else begin
      done <= 1'b0;
      // ---------------- loop / address generator ----------------
      case (gs)
        G_IDLE: if (issue_valid) begin
          cur <= issue; idx <= issue.r1; i <= '0; open_v <= 1'b0; tcl_line <= '1; tsf_line <= '1;
          gs  <= G_RUN;
        end
        G_RDTC: if (spd_gnt && ws != W_WORDS) begin
          tcl <= spd_rsp.rdata; tcf <= spd_rsp.rfinish; tcl_line <= 12'(i >> 4); gs <= G_RUN;
        end
        G_RDTS: if (spd_gnt && ws != W_WORDS) begin
          tsf <= spd_rsp.rfinish; tsf_line <= 12'(i >> 4); gs <= G_RUN;
        end
        G_RUN: begin
          if (loop_end) begin
            if (open_v) e_closed[open_e] <= 1'b1;
            open_v <= 1'b0;
            gs <= G_WAIT;
          end else if (!tc_have || !avail) begin
            gs <= G_RDTC;
          end else if (cond && (!ts_have || !ts_av)) begin
            gs <= G_RDTS;                                // wait for TS[i]'s producer
          end else if (!cond) begin
            if (cur.ins.opcode != OP_SLD || (spd_gnt && ws != W_WORDS)) begin
              i <= i + 1'b1; idx <= idx + cur.r3;
            end
          end else if (joins) begin
            e_wm[open_e][wid]   <= 1'b1;
            e_i[open_e][wid]    <= i;
            i <= i + 1'b1; idx <= idx + cur.r3;
          end else if (open_v) begin
            e_closed[open_e] <= 1'b1;
            open_v <= 1'b0;
          end else if (have_free) begin
            e_v[free_e] <= 1'b1; e_closed[free_e] <= 1'b0; e_sent[free_e] <= 1'b0;
            e_line[free_e] <= va[VA_W-1:6];
            e_wm[free_e] <= LINE_WORDS'(1) << wid;
            e_i[free_e][wid] <= i;
            open_v <= 1'b1; open_e <= free_e;
            i <= i + 1'b1; idx <= idx + cur.r3;
          end
        end
        G_WAIT: if (e_v == '0 && ws == W_IDLE && !wb_v) begin
          done <= 1'b1; gs <= G_IDLE;
        end
        default: gs <= G_IDLE;
      endcase
      // ---------------- send ----------------
      if (!wb_v && have_send && tlb_hit && mreq_ready) begin
        e_sent[send_e] <= 1'b1;
        e_pa[send_e]   <= {tlb_pa[PA_W-1:6], 6'b0};
        stat_reqs      <= stat_reqs + 1;
      end
      // ---------------- word modifier ----------------
      case (ws)
        W_IDLE: if (mrsp_valid) begin
          we_e  <= EW'(mrsp.tag);
          wline <= mrsp.data;
          wleft <= e_wm[EW'(mrsp.tag)];
          ws    <= W_WORDS;
        end
        W_WORDS: if (spd_gnt && (cur.ins.opcode == OP_SLD || ts_ok)) begin
          logic [LINE_WORDS-1:0] nl;
          if (cur.ins.opcode == OP_SST) wline[wcur] <= spd_rsp.rdata[wi[3:0]];
          nl = wleft;
          nl[wcur] = 1'b0;
          wleft <= nl;
          if (nl == '0) begin
            if (cur.ins.opcode == OP_SST) ws <= W_WB;
            else begin ws <= W_IDLE; e_v[we_e] <= 1'b0; end
          end
        end
        W_WB: begin
          if (!wb_v) wb_v <= 1'b1;
          else if (mreq_ready) begin wb_v <= 1'b0; e_v[we_e] <= 1'b0; ws <= W_IDLE; end
        end
        default: ws <= W_IDLE;
      endcase
    end
  end

  a_tag: assert property (@(posedge clk) disable iff (!rst_n)
    (mrsp_valid && mrsp_ready) |-> e_sent[EW'(mrsp.tag)]);
endmodule
