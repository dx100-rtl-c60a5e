// dx100_indirect_unit: the DX100 Indirect Access unit (ILD, IST, IRMW).
//
//   for i in tile:  if TC[i]:  idx = TS1[i]
//       ILD: TD[i] = BASE[idx]   IST: BASE[idx] = TS2[i]   IRMW: BASE[idx] OP= TS2[i]
//
// Instead of issuing the accesses in iteration order, the unit sorts them by
// DRAM location and touches each line once. It alternates two phases:
//  Fill: one iteration per cycle. The address generator reads TC and TS1 a
//   line at a time through the scratchpad port, forms BASE + 4*idx, translates
//   it (TLB port) and decodes it into channel/bank group/bank (the slice),
//   row RO, column CO and word WO. The slice's Row Table entry for (RO, CO)
//   receives i as its new tail and the Word Table entry i links to the old
//   tail, so all iterations touching one line form a list (coalescing). A
//   column seen for the first time records the cache-presence bit H returned
//   by the directory snoop port.
//  Drain (when the tile is exhausted or a slice is full): every slice offers
//   its unsent columns, a row at a time (row-buffer hits); the request
//   generator takes one per cycle in channel/bank-group interleaved order and
//   sends a line read to the cache (H=1) or directly to memory (H=0). Each
//   returning line is matched to its column, the word list is walked from the
//   tail, one word per cycle: ILD writes the word to TD[i]; IST/IRMW merge
//   TS2[i] into the line, which is then written back on the same path.
//   The drain ends when every slice is empty; filling then resumes.
// Iterations whose condition is 0 set TD[i]'s finish bit only (ILD).
// An iteration enters the tables only once its TC, TS1 and (IST/IRMW) TS2
// elements are finished, so a returning line never waits for a producer: the
// response path, shared with the Stream unit, cannot be held up by a tile
// that is itself waiting for memory.
// Follows the paper: the three stages, Row/Word Table roles, H-bit routing,
// interleaved arbitration. This design's choices: fill and drain do not overlap,
// a drain runs the tables empty, for IST the latest iteration wins when several
// store to one word, only 32-bit element types are handled. IRMW is limited,
// as in the paper, to associative and commutative operations (checked by an
// assertion), since its updates are applied in DRAM order.
module dx100_indirect_unit
  import dx100_pkg::*;
#(
  parameter int unsigned TILE    = 16384,
  parameter int unsigned NTILES  = 32,
  parameter int unsigned NSLICES = 32,
  parameter int unsigned ROWS    = 64,
  parameter int unsigned COLS    = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              issue_valid,
  input  issue_t            issue,
  output logic              done,
  // scratchpad
  output spd_req_t          spd_req,
  input  logic              spd_gnt,
  input  spd_rsp_t          spd_rsp,
  input  idx_t              size [NTILES],
  input  logic [NTILES-1:0] wr_pending,
  // address translation and directory snoop
  output logic              tlb_valid,
  output logic [VA_W-1:0]   tlb_va,
  input  paddr_t            tlb_pa,
  input  logic              tlb_hit,
  output logic              snoop_valid,
  output paddr_t            snoop_addr,
  input  logic              snoop_hit,
  // memory requests and responses
  output logic              mreq_valid,
  output mem_req_t          mreq,
  input  logic              mreq_ready,
  input  logic              mrsp_valid,
  input  mem_rsp_t          mrsp,
  output logic              mrsp_ready,
  // statistics
  output logic [31:0]       stat_fill,      // words inserted
  output logic [31:0]       stat_coalesced, // words joining an existing column
  output logic [31:0]       stat_reqs,      // line requests sent
  output logic [31:0]       stat_drains     // drains forced by a full slice
);
  localparam int unsigned SW = $clog2(NSLICES);

  typedef enum logic [2:0] {P_IDLE, P_RDTC, P_RDS1, P_RDS2, P_FILL, P_DRAIN} phase_t;
  typedef enum logic [1:0] {R_IDLE, R_WALK, R_WB} rstate_t;
  phase_t  ph;
  rstate_t rs;
  issue_t  cur;
  idx_t    i;
  line_t   tcl, s1l;
  logic [LINE_WORDS-1:0] tcf, s1f, s2f;
  logic    fill_done;

  // ---------------- slices ----------------
  logic [NSLICES-1:0] sl_fill_v, sl_ok, sl_prev_v, sl_rq_v, sl_rq_g, sl_rsp_v, sl_rsp_hit, sl_h, sl_empty;
  idx_t               sl_prev [NSLICES];
  idx_t               sl_tail [NSLICES];
  logic [RO_W-1:0]    sl_rq_ro [NSLICES];
  logic [CO_W-1:0]    sl_rq_co [NSLICES];
  logic [NSLICES-1:0] sl_rq_h;

  dram_coord_t fc, rc;
  logic [3:0]  w;
  logic        in_end, avail, cond;
  logic [VA_W-1:0] va;
  word_t       idxw;

  assign w    = i[3:0];
  assign idxw = s1l[w];
  assign va   = cur.ins.base[VA_W-1:0] +
                ((cur.ins.dtype == DT_I32) ? {{(VA_W-34){idxw[31]}}, idxw, 2'b00}
                                           : {{(VA_W-34){1'b0}},     idxw, 2'b00});
  assign tlb_va     = va;
  assign tlb_valid  = (ph == P_FILL) && !in_end && avail && cond;
  assign fc         = addr_decode(tlb_pa);
  assign snoop_addr = {tlb_pa[PA_W-1:6], 6'b0};
  assign snoop_valid = tlb_valid;

  always_comb begin
    in_end = (!wr_pending[cur.ins.ts1] && i >= size[cur.ins.ts1]) || int'(i) >= TILE;
    avail  = s1f[w] && (!cur.ins.tc_en || tcf[w]) &&
             (cur.ins.opcode == OP_ILD || s2f[w] || !wr_pending[cur.ins.ts2]);
    cond   = !cur.ins.tc_en || tcl[w] != '0;
  end

  logic do_fill;
  assign do_fill = tlb_valid && tlb_hit;
  always_comb begin
    sl_fill_v = '0;
    if (do_fill) sl_fill_v[fc.slice[SW-1:0]] = 1'b1;
  end

  // request generator
  logic [NSLICES-1:0] rg_gnt;
  logic [SW-1:0]      rg_idx;
  logic               rg_v;
  logic               wb_v;
  dx100_request_generator #(.NSLICES(NSLICES)) u_rg (
    .clk, .rst_n, .req(ph == P_DRAIN ? sl_rq_v : '0),
    .out_ready(mreq_ready && !wb_v), .gnt(rg_gnt), .gnt_idx(rg_idx), .gnt_valid(rg_v));
  assign sl_rq_g = rg_gnt;

  // response lookup
  assign rc = addr_decode(mrsp.addr);
  assign mrsp_ready = (ph == P_DRAIN) && (rs == R_IDLE);
  always_comb begin
    sl_rsp_v = '0;
    if (mrsp_valid && mrsp_ready) sl_rsp_v[rc.slice[SW-1:0]] = 1'b1;
  end

  for (genvar s = 0; s < NSLICES; s++) begin : g_slice
    dx100_row_table_slice #(.ROWS(ROWS), .COLS(COLS)) u_slice (
      .clk, .rst_n,
      .fill_valid(sl_fill_v[s]), .fill_ro(fc.ro), .fill_co(fc.co), .fill_h(snoop_hit), .fill_i(i),
      .fill_ok(sl_ok[s]), .fill_prev_v(sl_prev_v[s]), .fill_prev_i(sl_prev[s]),
      .rq_valid(sl_rq_v[s]), .rq_ro(sl_rq_ro[s]), .rq_co(sl_rq_co[s]), .rq_h(sl_rq_h[s]),
      .rq_grant(sl_rq_g[s]),
      .rsp_valid(sl_rsp_v[s]), .rsp_ro(rc.ro), .rsp_co(rc.co),
      .rsp_hit(sl_rsp_hit[s]), .rsp_tail(sl_tail[s]), .rsp_h(sl_h[s]), .empty(sl_empty[s]));
  end

  logic fill_ok_cur;
  assign fill_ok_cur = sl_ok[fc.slice[SW-1:0]];

  // ---------------- word table ----------------
  idx_t       node;
  logic       wt_v, wt_pv;
  logic [3:0] wt_wo;
  idx_t       wt_prev;
  logic       walk_step;
  dx100_word_table #(.TILE(TILE)) u_wt (
    .clk, .rst_n,
    .wr_en(do_fill && fill_ok_cur), .wr_i(i), .wr_wo(fc.wo),
    .wr_prev_v(sl_prev_v[fc.slice[SW-1:0]]), .wr_prev(sl_prev[fc.slice[SW-1:0]]),
    .rd_i(node), .rd_clr(walk_step), .rd_v(wt_v), .rd_wo(wt_wo), .rd_prev_v(wt_pv), .rd_prev(wt_prev));

  // ---------------- word modifier ----------------
  line_t                 rline;
  paddr_t                raddr;
  logic                  rh;
  logic [LINE_WORDS-1:0] written;
  logic                  ts2_ok;
  word_t                 ts2_val;

  assign ts2_val = spd_rsp.rdata[node[3:0]];
  assign ts2_ok  = spd_rsp.rfinish[node[3:0]] || !wr_pending[cur.ins.ts2];
  assign walk_step = (rs == R_WALK) && spd_gnt && (cur.ins.opcode == OP_ILD || ts2_ok);

  // scratchpad port: the response walk, else the fill
  always_comb begin
    spd_req = '0;
    if (rs == R_WALK) begin
      spd_req.valid = 1'b1;
      spd_req.line  = 12'(node >> 4);
      if (cur.ins.opcode == OP_ILD) begin
        spd_req.tile = cur.ins.td1;
        spd_req.wmask[node[3:0]] = 1'b1;
        spd_req.fmask[node[3:0]] = 1'b1;
        spd_req.wdata[node[3:0]] = rline[wt_wo];
      end else begin
        spd_req.tile = cur.ins.ts2;
      end
    end else if (ph == P_RDTC || ph == P_RDS1 || ph == P_RDS2) begin
      spd_req.valid = 1'b1;
      spd_req.tile  = (ph == P_RDTC) ? cur.ins.tc : (ph == P_RDS1) ? cur.ins.ts1 : cur.ins.ts2;
      spd_req.line  = 12'(i >> 4);
    end else if (ph == P_FILL && !in_end && avail && !cond && cur.ins.opcode == OP_ILD) begin
      spd_req.valid = 1'b1;
      spd_req.tile  = cur.ins.td1;
      spd_req.line  = 12'(i >> 4);
      spd_req.fmask[w] = 1'b1;
    end
  end

  // memory request path: write-back first, then the request generator
  mem_req_t wb_req;
  always_comb begin
    mreq = '0;
    if (wb_v) mreq = wb_req;
    else begin
      mreq.addr     = addr_compose(SLICE_W'(rg_idx), sl_rq_ro[rg_idx], sl_rq_co[rg_idx]);
      mreq.to_cache = sl_rq_h[rg_idx];
      mreq.tag      = 8'h80;
    end
    mreq_valid = wb_v || rg_v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_IDLE; rs <= R_IDLE; cur <= '0; i <= '0; done <= 1'b0; fill_done <= 1'b0;
      tcl <= '0; s1l <= '0; tcf <= '0; s1f <= '0; s2f <= '0; node <= '0; rline <= '0; raddr <= '0;
      rh <= 1'b0; written <= '0; wb_v <= 1'b0; wb_req <= '0;
      stat_fill <= '0; stat_coalesced <= '0; stat_reqs <= '0; stat_drains <= '0;
    end else begin
      done <= 1'b0;
      if (rg_v && mreq_ready && !wb_v) stat_reqs <= stat_reqs + 1;
      // ---------------- fill / phase control ----------------
      case (ph)
        P_IDLE: if (issue_valid) begin
          cur <= issue; i <= '0; fill_done <= 1'b0;
          ph  <= issue.ins.tc_en ? P_RDTC : P_RDS1;
        end
        P_RDTC: if (spd_gnt && rs == R_IDLE) begin
          tcl <= spd_rsp.rdata; tcf <= spd_rsp.rfinish; ph <= P_RDS1;
        end
        P_RDS1: if (spd_gnt && rs == R_IDLE) begin
          s1l <= spd_rsp.rdata; s1f <= spd_rsp.rfinish;
          ph  <= (cur.ins.opcode == OP_ILD) ? P_FILL : P_RDS2;
        end
        P_RDS2: if (spd_gnt && rs == R_IDLE) begin
          s2f <= spd_rsp.rfinish; ph <= P_FILL;
        end
        P_FILL: begin
          if (in_end) begin
            fill_done <= 1'b1; ph <= P_DRAIN;
          end else if (!avail) begin
            ph <= cur.ins.tc_en ? P_RDTC : P_RDS1;       // wait for the producer
          end else if (!cond) begin
            if (cur.ins.opcode != OP_ILD || spd_gnt) begin
              i <= i + 1'b1;
              if (w == 4'hF) ph <= cur.ins.tc_en ? P_RDTC : P_RDS1;
            end
          end else if (tlb_hit) begin
            if (fill_ok_cur) begin
              stat_fill <= stat_fill + 1;
              if (sl_prev_v[fc.slice[SW-1:0]]) stat_coalesced <= stat_coalesced + 1;
              i <= i + 1'b1;
              if (w == 4'hF) ph <= cur.ins.tc_en ? P_RDTC : P_RDS1;
            end else begin
              stat_drains <= stat_drains + 1;
              ph <= P_DRAIN;                               // a slice is full
            end
          end else begin
            i <= i + 1'b1;                                 // untranslatable: dropped
            if (w == 4'hF) ph <= cur.ins.tc_en ? P_RDTC : P_RDS1;
          end
        end
        P_DRAIN: if (sl_empty == '1 && rs == R_IDLE && !wb_v && !(mrsp_valid && mrsp_ready)) begin
          if (fill_done) begin done <= 1'b1; ph <= P_IDLE; end
          else ph <= cur.ins.tc_en ? P_RDTC : P_RDS1;
        end
        default: ph <= P_IDLE;
      endcase
      // ---------------- response / word modifier ----------------
      case (rs)
        R_IDLE: if (mrsp_valid && mrsp_ready && sl_rsp_hit[rc.slice[SW-1:0]]) begin
          rline   <= mrsp.data;
          raddr   <= mrsp.addr;
          rh      <= sl_h[rc.slice[SW-1:0]];
          node    <= sl_tail[rc.slice[SW-1:0]];
          written <= '0;
          rs      <= R_WALK;
        end
        R_WALK: if (walk_step) begin
          if (cur.ins.opcode == OP_IST) begin
            if (!written[wt_wo]) rline[wt_wo] <= ts2_val;
            written[wt_wo] <= 1'b1;
          end else if (cur.ins.opcode == OP_IRMW) begin
            rline[wt_wo] <= alu_apply(cur.ins.op, cur.ins.dtype, rline[wt_wo], ts2_val);
          end
          if (wt_pv) node <= wt_prev;
          else if (cur.ins.opcode == OP_ILD) rs <= R_IDLE;
          else rs <= R_WB;
        end
        R_WB: if (!wb_v) begin
          wb_v              <= 1'b1;
          wb_req.addr       <= raddr;
          wb_req.write      <= 1'b1;
          wb_req.to_cache   <= rh;
          wb_req.tag        <= 8'h80;
          wb_req.data       <= rline;
          rs                <= R_IDLE;
        end
        default: rs <= R_IDLE;
      endcase
      if (wb_v && mreq_ready) wb_v <= 1'b0;
    end
  end

  a_rsp_known: assert property (@(posedge clk) disable iff (!rst_n)
    (mrsp_valid && mrsp_ready) |-> sl_rsp_hit[rc.slice[SW-1:0]]);
  a_list: assert property (@(posedge clk) disable iff (!rst_n) (rs == R_WALK) |-> wt_v);
  // the unit reorders the updates of IRMW, so only operations that are
  // associative and commutative give the program-order result
  a_irmw_op: assert property (@(posedge clk) disable iff (!rst_n)
    (issue_valid && issue.ins.opcode == OP_IRMW) |->
      issue.ins.op inside {ALU_ADD, ALU_MUL, ALU_MIN, ALU_MAX, ALU_AND, ALU_OR, ALU_XOR});
endmodule
