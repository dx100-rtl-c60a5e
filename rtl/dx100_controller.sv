// dx100_controller: receives, dispatches, issues and retires DX100 instructions.
//
// Receive: a core sends a 192-bit instruction as three 64-bit stores (word
// index 0, 1, 2); the third store completes it and places it in a QDEPTH-deep
// queue (instr_ready low while the queue is full).
// Dispatch (one per cycle, in order): the head of the queue enters a free
// scoreboard entry unless one of its destination tiles is already used, as a
// source or a destination, by a valid scoreboard entry (this avoids WAW, WAR
// and RAW hazards without renaming, as the paper describes) or the coherency
// agent is still busy. Dispatch clears the ready bits of all the instruction's
// tiles and asks the coherency agent to invalidate their cached lines.
// Issue (one per cycle, out of order): the oldest un-issued entry whose unit is
// idle, and for which no older un-issued entry writes one of its source tiles,
// issues: its registers are read, its destination tiles' finish bits and sizes
// are cleared and the tiles are marked as being written (wr_pending), which
// units use to tell "not produced yet" from "end of tile".
// In-place updates (a tile both source and destination, e.g. T5 = T5 + 7):
// the tile is neither cleared nor marked as being written, so the unit reads
// its finished elements; instead a later reader of that tile does not issue
// until the in-place instruction has retired.
// Retire: a unit's done pulse frees its entry; the ready bit of a tile returns
// to 1 once no valid entry uses it.
// Units: 0 stream, 1 indirect, 2 ALU, 3 range fuser.
// The scoreboard, its hazard rule and the ready-bit protocol follow the paper;
// the queue, the scoreboard size and the issue rule are this design's choices.
module dx100_controller
  import dx100_pkg::*;
#(
  parameter int unsigned SB_ENTRIES = 8,
  parameter int unsigned QDEPTH     = 4,
  parameter int unsigned NTILES     = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction words from the core interface
  input  logic              instr_we,
  input  logic [1:0]        instr_widx,
  input  logic [63:0]       instr_wdata,
  output logic              instr_ready,
  // register file reads at issue
  output logic [4:0]        rf_raddr [3],
  input  logic [63:0]       rf_rdata [3],
  // issue to units
  output logic [3:0]        issue_valid,
  output issue_t            issue,
  input  logic [3:0]        unit_done,
  // scratchpad bookkeeping
  output logic [1:0]        clr_valid,
  output tile_t [1:0]       clr_tile,
  output logic [NTILES-1:0] ready_clr,
  output logic [NTILES-1:0] ready_set,
  output logic [NTILES-1:0] wr_pending,
  // coherency agent
  output logic              inv_start,
  output logic [NTILES-1:0] inv_tiles,
  input  logic              coh_busy,
  output logic              idle
);
  localparam int unsigned SBW = $clog2(SB_ENTRIES);

  // ---------------- per-opcode tile sets ----------------
  function automatic logic [NTILES-1:0] tmask(tile_t t);
    logic [NTILES-1:0] m;
    m = '0;
    m[t] = 1'b1;
    return m;
  endfunction

  function automatic logic [NTILES-1:0] dst_of(instr_t i);
    case (i.opcode)
      OP_ILD, OP_SLD, OP_ALUV, OP_ALUS: return tmask(i.td1);
      OP_RNG:                           return tmask(i.td1) | tmask(i.td2);
      default:                          return '0;
    endcase
  endfunction

  function automatic logic [NTILES-1:0] src_of(instr_t i);
    logic [NTILES-1:0] m;
    m = i.tc_en ? tmask(i.tc) : '0;
    case (i.opcode)
      OP_ILD, OP_SST, OP_ALUS:        m |= tmask(i.ts1);
      OP_IST, OP_IRMW, OP_ALUV, OP_RNG: m |= tmask(i.ts1) | tmask(i.ts2);
      default: ;
    endcase
    return m;
  endfunction

  function automatic logic [1:0] unit_of(opcode_t o);
    case (o)
      OP_SLD, OP_SST:           return 2'd0;
      OP_ILD, OP_IST, OP_IRMW:  return 2'd1;
      OP_ALUV, OP_ALUS:         return 2'd2;
      default:                  return 2'd3;
    endcase
  endfunction

  // ---------------- receive ----------------
  logic [127:0] wbuf;
  instr_t       q [QDEPTH];
  logic [$clog2(QDEPTH+1)-1:0] qcount;
  logic         q_push, q_pop;
  instr_t       q_in;

  assign instr_ready = (qcount != QDEPTH[$bits(qcount)-1:0]);
  assign q_in   = instr_t'({instr_wdata, wbuf});
  assign q_push = instr_we && instr_widx == 2'd2 && instr_ready;

  // ---------------- scoreboard ----------------
  logic              sb_v   [SB_ENTRIES];
  logic              sb_iss [SB_ENTRIES];
  logic [15:0]       sb_age [SB_ENTRIES];
  instr_t            sb_ins [SB_ENTRIES];
  logic [NTILES-1:0] sb_src [SB_ENTRIES];
  logic [NTILES-1:0] sb_dst [SB_ENTRIES];

  logic              disp_ok;
  logic [SBW-1:0]    free_e;
  logic              have_free;
  logic [NTILES-1:0] in_use;
  logic [NTILES-1:0] head_dst, head_src;

  always_comb begin
    have_free = 1'b0;
    free_e    = '0;
    in_use    = '0;
    for (int e = SB_ENTRIES-1; e >= 0; e--)
      if (!sb_v[e]) begin
        have_free = 1'b1;
        free_e    = SBW'(e);
      end
    for (int e = 0; e < SB_ENTRIES; e++)
      if (sb_v[e]) in_use |= sb_src[e] | sb_dst[e];
    head_dst = dst_of(q[0]);
    head_src = src_of(q[0]);
    disp_ok  = (qcount != 0) && have_free && ((head_dst & in_use) == '0) && !coh_busy;
  end
  assign q_pop = disp_ok;

  // issue selection
  logic [3:0]     unit_busy;
  logic           iss_ok;
  logic [SBW-1:0] iss_e;

  always_comb begin
    logic [15:0] best_age;
    iss_ok   = 1'b0;
    iss_e    = '0;
    best_age = '0;
    for (int e = 0; e < SB_ENTRIES; e++) begin
      logic blocked;
      blocked = !sb_v[e] || sb_iss[e] || unit_busy[unit_of(sb_ins[e].opcode)];
      for (int f = 0; f < SB_ENTRIES; f++)
        if (sb_v[f] && sb_age[f] > sb_age[e] && (sb_dst[f] & sb_src[e]) != '0 &&
            (!sb_iss[f] || (sb_dst[f] & sb_src[f] & sb_src[e]) != '0))
          blocked = 1'b1;
      if (!blocked && (!iss_ok || sb_age[e] > best_age)) begin
        iss_ok   = 1'b1;
        iss_e    = SBW'(e);
        best_age = sb_age[e];
      end
    end
  end

  assign rf_raddr[0] = sb_ins[iss_e].rs1;
  assign rf_raddr[1] = sb_ins[iss_e].rs2;
  assign rf_raddr[2] = sb_ins[iss_e].rs3;

  always_comb begin
    issue.ins   = sb_ins[iss_e];
    issue.r1    = rf_rdata[0];
    issue.r2    = rf_rdata[1];
    issue.r3    = rf_rdata[2];
    issue_valid = '0;
    clr_valid   = '0;
    clr_tile[0] = sb_ins[iss_e].td1;
    clr_tile[1] = sb_ins[iss_e].td2;
    if (iss_ok) begin
      issue_valid[unit_of(sb_ins[iss_e].opcode)] = 1'b1;
      clr_valid[0] = sb_dst[iss_e][sb_ins[iss_e].td1] && !sb_src[iss_e][sb_ins[iss_e].td1];
      clr_valid[1] = sb_ins[iss_e].opcode == OP_RNG && !sb_src[iss_e][sb_ins[iss_e].td2];
    end
  end

  // retire: find the issued entry of each finishing unit
  logic [NTILES-1:0] ret_tiles, still_used;
  logic              ret_v [SB_ENTRIES];
  always_comb begin
    ret_tiles  = '0;
    still_used = '0;
    for (int e = 0; e < SB_ENTRIES; e++) begin
      ret_v[e] = sb_v[e] && sb_iss[e] && unit_done[unit_of(sb_ins[e].opcode)];
      if (ret_v[e]) ret_tiles |= sb_src[e] | sb_dst[e];
      else if (sb_v[e]) still_used |= sb_src[e] | sb_dst[e];
    end
    if (disp_ok) still_used |= head_src | head_dst;
    ready_set = ret_tiles & ~still_used;
    ready_clr = disp_ok ? (head_src | head_dst) : '0;
    inv_start = disp_ok;
    inv_tiles = head_src | head_dst;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbuf       <= '0;
      qcount     <= '0;
      unit_busy  <= '0;
      wr_pending <= '0;
      for (int k = 0; k < QDEPTH; k++) q[k] <= '0;
      for (int e = 0; e < SB_ENTRIES; e++) begin
        sb_v[e] <= 1'b0; sb_iss[e] <= 1'b0; sb_age[e] <= '0;
        sb_ins[e] <= '0; sb_src[e] <= '0; sb_dst[e] <= '0;
      end
    end else begin
      // receive
      if (instr_we && instr_widx == 2'd0) wbuf[63:0]   <= instr_wdata;
      if (instr_we && instr_widx == 2'd1) wbuf[127:64] <= instr_wdata;
      if (q_pop) for (int k = 0; k < QDEPTH-1; k++) q[k] <= q[k+1];
      if (q_push) q[int'(qcount) - (q_pop ? 1 : 0)] <= q_in;
      qcount <= qcount + (q_push ? 1 : 0) - (q_pop ? 1 : 0);
      // retire
      for (int e = 0; e < SB_ENTRIES; e++)
        if (ret_v[e]) begin
          sb_v[e]   <= 1'b0;
          sb_iss[e] <= 1'b0;
        end
      wr_pending <= (wr_pending & ~ret_tiles_dst()) | (iss_ok ? sb_dst[iss_e] & ~sb_src[iss_e] : '0);
      unit_busy <= unit_busy & ~unit_done;
      // issue
      if (iss_ok) begin
        sb_iss[iss_e] <= 1'b1;
        unit_busy[unit_of(sb_ins[iss_e].opcode)] <= 1'b1;
      end
      // dispatch
      if (disp_ok) begin
        for (int e = 0; e < SB_ENTRIES; e++) if (sb_v[e]) sb_age[e] <= sb_age[e] + 1'b1;
        sb_v[free_e]   <= 1'b1;
        sb_iss[free_e] <= 1'b0;
        sb_age[free_e] <= '0;
        sb_ins[free_e] <= q[0];
        sb_src[free_e] <= head_src;
        sb_dst[free_e] <= head_dst;
      end
    end
  end

  function automatic logic [NTILES-1:0] ret_tiles_dst();
    logic [NTILES-1:0] m;
    m = '0;
    for (int e = 0; e < SB_ENTRIES; e++) if (ret_v[e]) m |= sb_dst[e];
    return m;
  endfunction

  always_comb begin
    idle = (qcount == 0);
    for (int e = 0; e < SB_ENTRIES; e++) if (sb_v[e]) idle = 1'b0;
  end

  // a unit reports done only while it holds an issued instruction
  property p_done_has_entry(int u);
    @(posedge clk) disable iff (!rst_n) unit_done[u] |-> unit_busy[u];
  endproperty
  for (genvar u = 0; u < 4; u++) begin : g_chk
    a_done: assert property (p_done_has_entry(u));
  end

endmodule
