// Self-checking test of dx100_stream_unit with a small scratchpad (8 tiles
// x 256 words), identity address translation and the memory model:
// unit-stride SLD (words coalesced into lines: one request per line),
// strided conditional SLD, SST of a tile followed by a check of memory.
module tb_dx100_stream_unit;
  import dx100_pkg::*;
  localparam int NT = 8, TL = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  spd_req_t req [2]; spd_rsp_t rsp [2];
  logic [1:0] clr_valid; tile_t [1:0] clr_tile;
  logic [NT-1:0] ready, wr_pending; idx_t size [NT];
  logic issue_valid, done; issue_t issue;
  logic tlb_valid; logic [VA_W-1:0] tlb_va;
  logic mreq_valid, mreq_ready, mrsp_valid, mrsp_ready; mem_req_t mreq; mem_rsp_t mrsp;
  logic [31:0] stat_reqs;
  dx100_scratchpad #(.NTILES(NT), .TILE(TL), .NPORTS(2)) u_spd (
    .clk, .rst_n, .req, .rsp, .clr_valid, .clr_tile, .ready_clr('0), .ready_set('0), .ready, .size);
  dx100_stream_unit #(.TILE(TL), .NTILES(NT), .RT_ENTRIES(8)) dut (
    .clk, .rst_n, .issue_valid, .issue, .done, .spd_req(req[1]), .spd_gnt(1'b1), .spd_rsp(rsp[1]),
    .size, .wr_pending, .tlb_valid, .tlb_va, .tlb_pa(tlb_va[PA_W-1:0]), .tlb_hit(1'b1),
    .mreq_valid, .mreq, .mreq_ready, .mrsp_valid, .mrsp, .mrsp_ready, .stat_reqs);
  logic     m_rv [2], m_rr [2], m_sv [2], m_sr [2];
  mem_req_t m_req [2]; mem_rsp_t m_rsp [2];
  assign m_rv[0] = mreq_valid; assign m_req[0] = mreq; assign mreq_ready = m_rr[0];
  assign mrsp_valid = m_sv[0]; assign mrsp = m_rsp[0]; assign m_sr[0] = mrsp_ready;
  assign m_rv[1] = 0; assign m_req[1] = '0; assign m_sr[1] = 1;
  tb_mem_model #(.LAT(15), .STALL(20)) u_mem (.clk, .rst_n, .req_valid(m_rv), .req(m_req),
    .req_ready(m_rr), .rsp_valid(m_sv), .rsp(m_rsp), .rsp_ready(m_sr));

  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic word_t rd(tile_t t, int i); return u_spd.mem[(int'(t) * TL + i) / 16][i % 16]; endfunction
  task automatic run(opcode_t o, int td, int ts, logic tce, int tc, longint base,
                     longint f, longint g, longint s);
    issue = '0; issue.ins.opcode = o; issue.ins.dtype = DT_U32; issue.ins.td1 = 5'(td);
    issue.ins.ts1 = 5'(ts); issue.ins.tc_en = tce; issue.ins.tc = 5'(tc); issue.ins.base = 64'(base);
    issue.r1 = 64'(f); issue.r2 = 64'(g); issue.r3 = 64'(s);
    clr_valid = {1'b0, o == OP_SLD}; clr_tile[0] = 5'(td); issue_valid = 1; @(negedge clk);
    clr_valid = '0; issue_valid = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    int r0;
    req[0] = '0; clr_valid = '0; clr_tile = '0; wr_pending = '0; issue_valid = 0; issue = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    // SLD B[i], i = 0..199 from 0x10000
    run(OP_SLD, 1, 0, 0, 0, 'h10000, 0, 200, 1);
    check(size[1] == 200, "SLD size");
    for (int i = 0; i < 200; i++) check(rd(1, i) == u_mem.init_word(40'h10000 + 40'(4 * i)), "SLD data");
    check(stat_reqs == 13, "200 words coalesced into 13 line requests");
    // condition tile 2: every third element
    for (int l = 0; l < 4; l++) begin
      req[0] = '0; req[0].valid = 1; req[0].tile = 2; req[0].line = 12'(l); req[0].wmask = '1; req[0].fmask = '1;
      for (int w = 0; w < 16; w++) req[0].wdata[w] = 32'((l * 16 + w) % 3 == 0);
      @(negedge clk);
    end
    req[0] = '0;
    r0 = int'(stat_reqs);
    run(OP_SLD, 3, 0, 1, 2, 'h20040, 5, 5 + 3 * 64, 3);
    check(size[3] == 64, "strided SLD size");
    for (int i = 0; i < 64; i++) if (i % 3 == 0)
      check(rd(3, i) == u_mem.init_word(40'h20040 + 40'(4 * (5 + 3 * i))), "strided conditional SLD");
    // SST tile 1 to 0x30000 + 4*(2..201)
    run(OP_SST, 0, 1, 0, 0, 'h30000, 2, 202, 1);
    for (int i = 0; i < 200; i++)
      check(u_mem.get_word(40'h30000 + 40'(4 * (i + 2))) == rd(1, i), "SST data in memory");
    check(u_mem.get_word(40'h30000 + 40'(4 * 1)) == u_mem.init_word(40'h30004), "SST leaves neighbours");
    check(u_mem.writes[0] == 13, "SST writes 13 lines");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
