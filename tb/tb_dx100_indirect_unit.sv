// Self-checking test of dx100_indirect_unit with a small scratchpad (8 tiles
// x 256 words), identity address translation, a snoop that reports a line
// as cached when address bits 6 and 11 differ, and the memory model (port 0
// = cache, port 1 = DRAM). Small Row Tables (4 rows x 2 columns per slice)
// so that scattered indices fill slices and force drains.
//  1. ILD with 256 indices inside 64 lines: data, one request per distinct
//     line (coalescing), no drain, H routing of every request, cycle budget.
//  2. Conditional ILD with indices spread over 16 MB: data, untouched
//     elements where the condition is 0, forced drains, and DRAM row-buffer
//     hits at least those of issuing the same lines in iteration order.
//  3. IST with many iterations storing to the same words: last one wins.
//  4. IRMW ADD with repeated indices spread over rows (several drains).
module tb_dx100_indirect_unit;
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
  logic snoop_valid; paddr_t snoop_addr;
  logic mreq_valid, mreq_ready, mrsp_valid, mrsp_ready; mem_req_t mreq; mem_rsp_t mrsp;
  logic [31:0] stat_fill, stat_coalesced, stat_reqs, stat_drains;
  dx100_scratchpad #(.NTILES(NT), .TILE(TL), .NPORTS(2)) u_spd (
    .clk, .rst_n, .req, .rsp, .clr_valid, .clr_tile, .ready_clr('0), .ready_set('0), .ready, .size);
  dx100_indirect_unit #(.TILE(TL), .NTILES(NT), .ROWS(4), .COLS(2)) dut (
    .clk, .rst_n, .issue_valid, .issue, .done, .spd_req(req[1]), .spd_gnt(1'b1), .spd_rsp(rsp[1]),
    .size, .wr_pending, .tlb_valid, .tlb_va, .tlb_pa(tlb_va[PA_W-1:0]), .tlb_hit(1'b1),
    .snoop_valid, .snoop_addr, .snoop_hit(snoop_addr[6] ^ snoop_addr[11]),
    .mreq_valid, .mreq, .mreq_ready, .mrsp_valid, .mrsp, .mrsp_ready,
    .stat_fill, .stat_coalesced, .stat_reqs, .stat_drains);
  logic     m_rv [2], m_rr [2], m_sv [2], m_sr [2];
  mem_req_t m_req [2]; mem_rsp_t m_rsp [2];
  assign m_rv[0] = mreq_valid && mreq.to_cache;  assign m_req[0] = mreq;
  assign m_rv[1] = mreq_valid && !mreq.to_cache; assign m_req[1] = mreq;
  assign mreq_ready = mreq.to_cache ? m_rr[0] : m_rr[1];
  assign mrsp_valid = m_sv[0] || m_sv[1];
  assign mrsp       = m_sv[0] ? m_rsp[0] : m_rsp[1];
  assign m_sr[0] = mrsp_ready; assign m_sr[1] = mrsp_ready && !m_sv[0];
  tb_mem_model #(.LAT(20), .STALL(10)) u_mem (.clk, .rst_n, .req_valid(m_rv), .req(m_req),
    .req_ready(m_rr), .rsp_valid(m_sv), .rsp(m_rsp), .rsp_ready(m_sr));

  // every read request must go where the snoop said the line is
  int route_err = 0, reads_seen = 0;
  always @(posedge clk) if (rst_n && mreq_valid && mreq_ready && !mreq.write) begin
    reads_seen++;
    if (mreq.to_cache != (mreq.addr[6] ^ mreq.addr[11])) route_err++;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic word_t rd(tile_t t, int i); return u_spd.mem[(int'(t) * TL + i) / 16][i % 16]; endfunction
  task automatic wr_tile(int t, word_t v [TL]);
    for (int l = 0; l < TL / 16; l++) begin
      req[0] = '0; req[0].valid = 1; req[0].tile = 5'(t); req[0].line = 12'(l);
      req[0].wmask = '1; req[0].fmask = '1;
      for (int w = 0; w < 16; w++) req[0].wdata[w] = v[l * 16 + w];
      @(negedge clk);
    end
    req[0] = '0;
  endtask
  int cyc;
  task automatic run(opcode_t o, int td, int ts1, int ts2, logic tce, int tc, longint base, aluop_t op);
    issue = '0; issue.ins.opcode = o; issue.ins.dtype = DT_U32; issue.ins.op = op;
    issue.ins.td1 = 5'(td); issue.ins.ts1 = 5'(ts1); issue.ins.ts2 = 5'(ts2);
    issue.ins.tc_en = tce; issue.ins.tc = 5'(tc); issue.ins.base = 64'(base);
    clr_valid = {1'b0, o == OP_ILD}; clr_tile[0] = 5'(td); issue_valid = 1; @(negedge clk);
    clr_valid = '0; issue_valid = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  word_t idx [TL], val [TL], cnd [TL], pat [TL];
  word_t exp_mem [paddr_t];
  initial begin
    int r0, d0, lines, rb_base, rh0;
    bit seen [paddr_t];
    req[0] = '0; clr_valid = '0; clr_tile = '0; wr_pending = '0; issue_valid = 0; issue = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);

    // 1. ILD, 256 indices inside 1024 words (64 lines)
    for (int i = 0; i < TL; i++) idx[i] = $urandom_range(0, 1023);
    wr_tile(1, idx);
    lines = 0;
    for (int i = 0; i < TL; i++) begin
      paddr_t a;
      a = 40'h100000 + 40'(4 * idx[i]);
      if (!seen.exists({a[PA_W-1:6], 6'b0})) begin seen[{a[PA_W-1:6], 6'b0}] = 1; lines++; end
    end
    run(OP_ILD, 2, 1, 0, 0, 0, 'h100000, ALU_ADD);
    for (int i = 0; i < TL; i++)
      check(rd(2, i) == u_mem.init_word(40'h100000 + 40'(4 * idx[i])), $sformatf("ILD data %0d", i));
    check(stat_reqs == 32'(lines), $sformatf("one request per distinct line: %0d vs %0d", stat_reqs, lines));
    check(stat_coalesced == 32'(TL - lines), "coalesced words");
    check(stat_drains == 0, "no forced drain for 64 lines");
    check(u_mem.reads[0] > 0 && u_mem.reads[1] > 0, "requests went to both cache and DRAM");
    check(route_err == 0 && reads_seen == lines, "H bit routes each request");
    $display("ILD 256 words / %0d lines: %0d cycles", lines, cyc);
    check(cyc <= 2 * TL + 4 * lines + 100, "ILD within one word per cycle per stage plus latency");

    // 2. conditional ILD over 16 MB
    for (int i = 0; i < TL; i++) begin
      idx[i] = $urandom_range(0, (1 << 22) - 1); cnd[i] = word_t'($urandom_range(0, 3) != 0);
      pat[i] = 32'hDEAD0000 + i;
    end
    wr_tile(1, idx); wr_tile(3, cnd); wr_tile(4, pat);
    d0 = int'(stat_drains);
    rh0 = u_mem.row_hits;
    run(OP_ILD, 4, 1, 0, 1, 3, 'h1000000, ALU_ADD);
    for (int i = 0; i < TL; i++)
      if (cnd[i] != 0) check(rd(4, i) == u_mem.init_word(40'h1000000 + 40'(4 * idx[i])), "cond ILD data");
      else check(rd(4, i) == pat[i], "cond ILD leaves element");
    check(int'(stat_drains) > d0, "scattered indices force drains");
    begin
      logic [RO_W-1:0] orow [32]; bit ov [32];
      rb_base = 0;
      for (int i = 0; i < TL; i++) if (cnd[i] != 0) begin
        dram_coord_t c; c = addr_decode(40'h1000000 + 40'(4 * idx[i]));
        if (ov[c.slice] && orow[c.slice] == c.ro) rb_base++;
        ov[c.slice] = 1; orow[c.slice] = c.ro;
      end
    end
    $display("row-buffer hits: reordered %0d, iteration order %0d, drains %0d",
             u_mem.row_hits - rh0, rb_base, int'(stat_drains) - d0);
    check(u_mem.row_hits - rh0 >= rb_base, "reordering keeps at least the in-order row hits");

    // 3. IST, indices 0..63 repeated: the last iteration stores
    for (int i = 0; i < TL; i++) begin idx[i] = $urandom_range(0, 63); val[i] = $urandom; end
    wr_tile(1, idx); wr_tile(5, val);
    run(OP_IST, 0, 1, 5, 0, 0, 'h200000, ALU_ADD);
    for (int k = 0; k < 64; k++) begin
      word_t e; e = u_mem.init_word(40'h200000 + 40'(4 * k));
      for (int i = 0; i < TL; i++) if (idx[i] == word_t'(k)) e = val[i];
      check(u_mem.get_word(40'h200000 + 40'(4 * k)) == e, $sformatf("IST word %0d", k));
    end

    // 4. IRMW ADD, 120 addresses over 16 MB, each hit several times
    begin
      word_t pool [120];
      for (int k = 0; k < 120; k++) pool[k] = $urandom_range(0, (1 << 22) - 1);
      for (int i = 0; i < TL; i++) begin idx[i] = pool[$urandom_range(0, 119)]; val[i] = i + 1; end
      wr_tile(1, idx); wr_tile(5, val);
      d0 = int'(stat_drains);
      run(OP_IRMW, 0, 1, 5, 0, 0, 'h3000000, ALU_ADD);
      for (int k = 0; k < 120; k++) begin
        word_t e; e = u_mem.init_word(40'h3000000 + 40'(4 * pool[k]));
        for (int i = 0; i < TL; i++) if (idx[i] == pool[k]) e += val[i];
        if (k == 0 || pool[k] != pool[k - 1])
          check(u_mem.get_word(40'h3000000 + 40'(4 * pool[k])) == e, $sformatf("IRMW word %0d", k));
      end
      $display("IRMW drains %0d", int'(stat_drains) - d0);
      check(int'(stat_drains) > d0, "IRMW across several drains");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
