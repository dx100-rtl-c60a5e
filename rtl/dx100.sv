// dx100: top level of the DX100 programmable data-access accelerator.
//
// DX100 sits beside the memory controllers of a multicore, shared by its
// cores, and executes bulk memory accesses a tile (16K elements) at a time:
// streaming loads and stores, indirect loads, stores and read-modify-writes
// (A[B[i]]), element-wise ALU operations and range-loop fusion. Its Indirect
// Access unit sorts a tile's accesses by DRAM bank, row and column before
// issuing them (reorder, coalesce, interleave), which is where the memory
// bandwidth comes from.
// Blocks: Controller (instruction receive, scoreboard, issue, retire),
// Register File, Scratchpad (32 x 16K words, 4 ports), Stream Access,
// Indirect Access, ALU, Range Fuser, Coherency Agent and Interface (core,
// cache and memory sides, TLB). Scratchpad ports: 0 core, 1 Stream,
// 2 Indirect, 3 ALU and Range Fuser (ALU first).
// External parts appear as ports: the cores' memory-mapped accesses (core_*),
// the LLC (cache_*), the memory controllers (mem_*), the coherency directory
// snoop (snoop_*) and back-invalidations of cached scratchpad lines (inv_*).
// All traffic is valid/ready; a line request carries a tag that its
// response returns.
module dx100
  import dx100_pkg::*;
#(
  parameter int unsigned NTILES      = 32,
  parameter int unsigned TILE        = 16384,
  parameter int unsigned NREGS       = 32,
  parameter int unsigned LANES       = 16,
  parameter int unsigned SB_ENTRIES  = 8,
  parameter int unsigned RT_ENTRIES  = 128,
  parameter int unsigned NSLICES     = 32,
  parameter int unsigned ROWS        = 64,
  parameter int unsigned COLS        = 8,
  parameter int unsigned TLB_ENTRIES = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        core_req_valid,
  input  logic        core_req_write,
  input  paddr_t      core_req_addr,
  input  line_t       core_req_wdata,
  output logic        core_req_ready,
  output logic        core_rsp_valid,
  output line_t       core_rsp_data,
  output logic        cache_req_valid,
  output mem_req_t    cache_req,
  input  logic        cache_req_ready,
  input  logic        cache_rsp_valid,
  input  mem_rsp_t    cache_rsp,
  output logic        cache_rsp_ready,
  output logic        mem_req_valid,
  output mem_req_t    mem_req,
  input  logic        mem_req_ready,
  input  logic        mem_rsp_valid,
  input  mem_rsp_t    mem_rsp,
  output logic        mem_rsp_ready,
  output logic        snoop_valid,
  output paddr_t      snoop_addr,
  input  logic        snoop_hit,
  output logic        inv_valid,
  output paddr_t      inv_addr,
  input  logic        inv_ready,
  output logic        tlb_miss,
  output logic        idle,
  output logic [31:0] stat_ind_words,
  output logic [31:0] stat_ind_coalesced,
  output logic [31:0] stat_ind_reqs,
  output logic [31:0] stat_ind_drains,
  output logic [31:0] stat_str_reqs
);
  spd_req_t spd_req [4];
  spd_rsp_t spd_rsp [4];
  idx_t     size [NTILES];
  logic [NTILES-1:0] ready, ready_clr, ready_set, wr_pending, inv_tiles;
  logic [1:0]  clr_valid;
  tile_t [1:0] clr_tile;

  dx100_scratchpad #(.NTILES(NTILES), .TILE(TILE), .NPORTS(4)) u_spd (
    .clk, .rst_n, .req(spd_req), .rsp(spd_rsp), .clr_valid, .clr_tile,
    .ready_clr, .ready_set, .ready, .size);

  // register file: ports 0..2 controller, 3 core
  logic [$clog2(NREGS)-1:0] rf_raddr [4];
  logic [63:0]              rf_rdata [4];
  logic                     rf_we;
  logic [$clog2(NREGS)-1:0] rf_addr;
  logic [63:0]              rf_wdata;
  logic [4:0]               c_raddr [3];
  logic [63:0]              c_rdata [3];
  dx100_regfile #(.NREGS(NREGS), .RW(64), .NRD(4)) u_rf (
    .clk, .rst_n, .we(rf_we), .waddr(rf_addr), .wdata(rf_wdata), .raddr(rf_raddr), .rdata(rf_rdata));
  for (genvar k = 0; k < 3; k++) begin : g_rf
    assign rf_raddr[k] = ($clog2(NREGS))'(c_raddr[k]);
    assign c_rdata[k]  = rf_rdata[k];
  end
  assign rf_raddr[3] = rf_addr;

  // controller
  logic        instr_we, instr_ready, coh_busy, inv_start;
  logic [1:0]  instr_widx;
  logic [63:0] instr_wdata;
  logic [3:0]  issue_valid, unit_done;
  issue_t      issue;
  dx100_controller #(.SB_ENTRIES(SB_ENTRIES), .NTILES(NTILES)) u_ctrl (
    .clk, .rst_n, .instr_we, .instr_widx, .instr_wdata, .instr_ready,
    .rf_raddr(c_raddr), .rf_rdata(c_rdata), .issue_valid, .issue, .unit_done,
    .clr_valid, .clr_tile, .ready_clr, .ready_set, .wr_pending,
    .inv_start, .inv_tiles, .coh_busy, .idle);

  // coherency agent
  logic coh_rd_valid;
  logic [$clog2(NTILES*TILE/16)-1:0] coh_rd_line;
  dx100_coherency_agent #(.NTILES(NTILES), .TILE(TILE)) u_coh (
    .clk, .rst_n, .rd_valid(coh_rd_valid), .rd_line(coh_rd_line),
    .start(inv_start), .tiles(inv_tiles), .busy(coh_busy),
    .inv_valid, .inv_addr, .inv_ready);

  // interface
  logic            tlb_valid [2];
  logic [VA_W-1:0] tlb_va [2];
  paddr_t          tlb_pa [2];
  logic            tlb_hit [2];
  logic     s_req_valid, s_req_ready, s_rsp_valid, s_rsp_ready;
  logic     i_req_valid, i_req_ready, i_rsp_valid, i_rsp_ready;
  mem_req_t s_req, i_req;
  mem_rsp_t s_rsp, i_rsp;
  dx100_interface #(.NTILES(NTILES), .TILE(TILE), .NREGS(NREGS), .TLB_ENTRIES(TLB_ENTRIES)) u_if (
    .clk, .rst_n, .core_req_valid, .core_req_write, .core_req_addr, .core_req_wdata,
    .core_req_ready, .core_rsp_valid, .core_rsp_data,
    .spd_req(spd_req[0]), .spd_rsp(spd_rsp[0]), .size, .ready,
    .rf_we, .rf_addr, .rf_wdata, .rf_rdata(rf_rdata[3]),
    .instr_we, .instr_widx, .instr_wdata, .instr_ready,
    .coh_rd_valid, .coh_rd_line,
    .tlb_valid, .tlb_va, .tlb_pa, .tlb_hit, .tlb_miss,
    .s_req_valid, .s_req, .s_req_ready, .s_rsp_valid, .s_rsp, .s_rsp_ready,
    .i_req_valid, .i_req, .i_req_ready, .i_rsp_valid, .i_rsp, .i_rsp_ready,
    .cache_req_valid, .cache_req, .cache_req_ready, .cache_rsp_valid, .cache_rsp, .cache_rsp_ready,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_rsp_valid, .mem_rsp, .mem_rsp_ready);

  // stream access
  dx100_stream_unit #(.TILE(TILE), .NTILES(NTILES), .RT_ENTRIES(RT_ENTRIES)) u_str (
    .clk, .rst_n, .issue_valid(issue_valid[0]), .issue, .done(unit_done[0]),
    .spd_req(spd_req[1]), .spd_gnt(1'b1), .spd_rsp(spd_rsp[1]), .size, .wr_pending,
    .tlb_valid(tlb_valid[0]), .tlb_va(tlb_va[0]), .tlb_pa(tlb_pa[0]), .tlb_hit(tlb_hit[0]),
    .mreq_valid(s_req_valid), .mreq(s_req), .mreq_ready(s_req_ready),
    .mrsp_valid(s_rsp_valid), .mrsp(s_rsp), .mrsp_ready(s_rsp_ready), .stat_reqs(stat_str_reqs));

  // indirect access
  dx100_indirect_unit #(.TILE(TILE), .NTILES(NTILES), .NSLICES(NSLICES), .ROWS(ROWS), .COLS(COLS)) u_ind (
    .clk, .rst_n, .issue_valid(issue_valid[1]), .issue, .done(unit_done[1]),
    .spd_req(spd_req[2]), .spd_gnt(1'b1), .spd_rsp(spd_rsp[2]), .size, .wr_pending,
    .tlb_valid(tlb_valid[1]), .tlb_va(tlb_va[1]), .tlb_pa(tlb_pa[1]), .tlb_hit(tlb_hit[1]),
    .snoop_valid, .snoop_addr, .snoop_hit,
    .mreq_valid(i_req_valid), .mreq(i_req), .mreq_ready(i_req_ready),
    .mrsp_valid(i_rsp_valid), .mrsp(i_rsp), .mrsp_ready(i_rsp_ready),
    .stat_fill(stat_ind_words), .stat_coalesced(stat_ind_coalesced),
    .stat_reqs(stat_ind_reqs), .stat_drains(stat_ind_drains));

  // ALU and Range Fuser share scratchpad port 3
  spd_req_t alu_req, rng_req;
  dx100_alu #(.LANES(LANES), .TILE(TILE), .NTILES(NTILES)) u_alu (
    .clk, .rst_n, .issue_valid(issue_valid[2]), .issue, .done(unit_done[2]),
    .spd_req(alu_req), .spd_gnt(1'b1), .spd_rsp(spd_rsp[3]), .size, .wr_pending);
  dx100_range_fuser #(.TILE(TILE), .NTILES(NTILES)) u_rng (
    .clk, .rst_n, .issue_valid(issue_valid[3]), .issue, .done(unit_done[3]),
    .spd_req(rng_req), .spd_gnt(!alu_req.valid), .spd_rsp(spd_rsp[3]), .size, .wr_pending);
  assign spd_req[3] = alu_req.valid ? alu_req : rng_req;
endmodule
