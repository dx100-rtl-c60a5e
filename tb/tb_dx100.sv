// End-to-end test of the whole accelerator (dx100) at its full configuration
// (32 tiles of 16K elements, 64x8 Row Tables in 32 slices, 128-entry Request
// Table, 256-entry TLB), driven only through its memory-mapped core port, with
// the memory model behind the Cache and Memory interfaces.
// A core fills the TLB (identity mapping of 2 MB pages), the registers and
// some tiles, then sends a gather/scatter kernel as 192-bit instructions:
//   I0 SLD  T1 = B[0:N:1]              indices (random, 64 MB range)
//   I1 ILD  T2 = A[T1[i]]
//   I2 ALUS T3 = T2 + 7
//   I3 ALUS T4 = T1 < 2^23             condition
//   I4 IST  A2[T1[i]] = T3[i] if T4[i]
//   I5 IRMW H[T5[i]] += T3[i]          T5 written by the core, 256 bins
//   I6 SST  C[0:N:1] = T3
//   I7 RNG  (T6, T7) = ranges T8[i] .. T9[i]-1
//   I8 SLD  T1 = B[0:N:1] again        must wait for I1, I3, I4 (tile reuse)
//   I9 ALUS T5 = T5 + 7                must wait for I5; invalidates the
//                                      core's cached copy of T5
// It then polls the ready bits until every tile is ready, and checks all
// results against a reference computed here, reading tiles through the
// scratchpad window. Each mechanism the design relies on is counted and must
// occur at least once: Row Table coalescing, forced drains, requests sent to
// the cache and directly to DRAM by the H bit, DRAM row-buffer hits, a
// dispatch held by tile reuse, a consumer issued while its producer runs,
// a back-invalidation, and ready-bit polling.
module tb_dx100;
  import dx100_pkg::*;
  localparam int N = 4096, TL = 16384;
  localparam paddr_t SPD = 40'h04_0000_0000, CTL = 40'h04_0020_0000;
  localparam paddr_t B_A = 40'h100000, A_A = 40'h1000000, A2_A = 40'h6000000,
                     H_A = 40'hC000000, C_A = 40'hD000000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", m); end
  endtask

  logic core_req_valid, core_req_write, core_req_ready, core_rsp_valid;
  paddr_t core_req_addr; line_t core_req_wdata, core_rsp_data;
  logic cache_req_valid, cache_req_ready, cache_rsp_valid, cache_rsp_ready;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mem_req_t cache_req, mem_req; mem_rsp_t cache_rsp, mem_rsp;
  logic snoop_valid, snoop_hit, inv_valid, inv_ready, tlb_miss, idle;
  paddr_t snoop_addr, inv_addr;
  logic [31:0] stat_ind_words, stat_ind_coalesced, stat_ind_reqs, stat_ind_drains, stat_str_reqs;

  dx100 u_dut (
    .clk, .rst_n, .core_req_valid, .core_req_write, .core_req_addr, .core_req_wdata, .core_req_ready,
    .core_rsp_valid, .core_rsp_data,
    .cache_req_valid, .cache_req, .cache_req_ready, .cache_rsp_valid, .cache_rsp, .cache_rsp_ready,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_rsp_valid, .mem_rsp, .mem_rsp_ready,
    .snoop_valid, .snoop_addr, .snoop_hit, .inv_valid, .inv_addr, .inv_ready, .tlb_miss, .idle,
    .stat_ind_words, .stat_ind_coalesced, .stat_ind_reqs, .stat_ind_drains, .stat_str_reqs);
  assign snoop_hit = snoop_addr[6] ^ snoop_addr[11];

  logic     m_rv [2], m_rr [2], m_sv [2], m_sr [2];
  mem_req_t m_req [2]; mem_rsp_t m_rsp [2];
  assign m_rv = '{cache_req_valid, mem_req_valid};
  assign m_req = '{cache_req, mem_req};
  assign cache_req_ready = m_rr[0]; assign mem_req_ready = m_rr[1];
  assign cache_rsp_valid = m_sv[0]; assign cache_rsp = m_rsp[0];
  assign mem_rsp_valid = m_sv[1]; assign mem_rsp = m_rsp[1];
  assign m_sr = '{cache_rsp_ready, mem_rsp_ready};
  tb_mem_model #(.LAT(30), .STALL(10)) u_mem (.clk, .rst_n, .req_valid(m_rv), .req(m_req),
    .req_ready(m_rr), .rsp_valid(m_sv), .rsp(m_rsp), .rsp_ready(m_sr));

  // ---- mechanism counters ----
  int n_ind_cache = 0, n_ind_mem = 0, n_disp_hold = 0, n_overlap = 0, n_inv = 0, n_poll = 0;
  paddr_t inv_seen [$];
  always @(posedge clk) if (rst_n) begin
    if (cache_req_valid && cache_req_ready && cache_req.tag[7] && !cache_req.write) n_ind_cache++;
    if (mem_req_valid && mem_req_ready && !mem_req.write) n_ind_mem++;
    if (u_dut.u_ctrl.qcount != 0 && !u_dut.u_ctrl.disp_ok && !u_dut.coh_busy) n_disp_hold++;
    for (int k = 0; k < 4; k++)
      if (u_dut.issue_valid[k] && u_dut.wr_pending[u_dut.issue.ins.ts1] &&
          u_dut.issue.ins.opcode != OP_SLD) n_overlap++;
    if (inv_valid && inv_ready) begin n_inv++; inv_seen.push_back(inv_addr); end
  end
  always @(posedge clk) inv_ready <= $urandom_range(0, 3) != 0;

  initial begin
    repeat (600000) @(posedge clk);
    failures++; $display("watchdog: simulation did not end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- core-side accesses ----
  task automatic cwr(paddr_t a, line_t d);
    core_req_valid = 1; core_req_write = 1; core_req_addr = a; core_req_wdata = d;
    #1; while (!core_req_ready) begin @(negedge clk); #1; end
    @(negedge clk); core_req_valid = 0;
  endtask
  task automatic cwr64(paddr_t a, logic [63:0] v);
    line_t d; d = '0; d[1:0] = v; cwr(a, d);
  endtask
  task automatic crd(paddr_t a, output line_t d);
    core_req_valid = 1; core_req_write = 0; core_req_addr = a;
    @(negedge clk); core_req_valid = 0;
    d = core_rsp_data;
  endtask
  task automatic send(instr_t ins);
    logic [191:0] b; b = ins;
    cwr64(CTL + 40'h480, b[63:0]); cwr64(CTL + 40'h488, b[127:64]); cwr64(CTL + 40'h490, b[191:128]);
  endtask
  function automatic instr_t mk(opcode_t o, int td1, int td2, int ts1, int ts2, logic tce, int tc,
                                aluop_t op, int rs1, int rs2, int rs3, paddr_t base);
    instr_t i; i = '0;
    i.opcode = o; i.dtype = DT_U32; i.op = op; i.td1 = 5'(td1); i.td2 = 5'(td2);
    i.ts1 = 5'(ts1); i.ts2 = 5'(ts2); i.tc_en = tce; i.tc = 5'(tc);
    i.rs1 = 5'(rs1); i.rs2 = 5'(rs2); i.rs3 = 5'(rs3); i.base = 64'(base);
    return i;
  endfunction
  task automatic wr_tile(int t, word_t v [], int n);
    for (int l = 0; l < n / 16; l++) begin
      line_t d;
      for (int w = 0; w < 16; w++) d[w] = v[l * 16 + w];
      cwr(SPD + 40'((t * TL + l * 16) * 4), d);
    end
  endtask
  function automatic word_t spd(int t, int i); return u_dut.u_spd.mem[(t * TL + i) / 16][i % 16]; endfunction

  word_t bidx [], t5 [], t8 [], t9 [];
  initial begin
    line_t r;
    int cyc0, npairs;
    word_t t2 [N], t3 [N];
    core_req_valid = 0; core_req_write = 0; core_req_addr = '0; core_req_wdata = '0;
    bidx = new[N]; t5 = new[N]; t8 = new[64]; t9 = new[64];
    for (int i = 0; i < N; i++) begin bidx[i] = $urandom_range(0, (1 << 24) - 1); t5[i] = $urandom_range(0, 255); end
    for (int l = 0; l < N / 16; l++) begin
      line_t d;
      for (int w = 0; w < 16; w++) d[w] = bidx[l * 16 + w];
      u_mem.mem[B_A + 40'(l * 64)] = d;
    end
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);

    // TLB: identity map of the first 128 pages (256 MB)
    for (int p = 0; p < 128; p++) cwr64(CTL + 40'h1000 + 40'(8 * p), {1'b1, 31'(p), 32'(p)});
    // registers: r0 = 0, r1 = N, r2 = 1, r3 = 7, r4 = 2^23
    cwr64(CTL + 40'h80 + 8 * 0, 0); cwr64(CTL + 40'h80 + 8 * 1, N); cwr64(CTL + 40'h80 + 8 * 2, 1);
    cwr64(CTL + 40'h80 + 8 * 3, 7); cwr64(CTL + 40'h80 + 8 * 4, 1 << 23);
    crd(CTL + 40'h80 + 8 * 1, r);
    check(r[1:0] == 64'(N), "register read back");
    // tiles written by the core: T5 (bins), T8/T9 (ranges)
    wr_tile(5, t5, N);
    for (int i = 0; i < 64; i++) begin t8[i] = $urandom_range(0, 100); t9[i] = t8[i] + $urandom_range(0, 7); end
    wr_tile(8, t8, 64); wr_tile(9, t9, 64);
    crd(SPD + 40'((5 * TL + 32) * 4), r);        // the core caches a line of T5
    check(r[3] == t5[35], "scratchpad read through the core port");
    crd(CTL + 40'h8, r);                        // sizes of tiles 4..7
    check(r[0][31:16] == 16'(N), "size of T5 seen by the core");

    cyc0 = $time / 10;
    send(mk(OP_SLD,  1, 0, 0, 0, 0, 0, ALU_ADD, 0, 1, 2, B_A));
    send(mk(OP_ILD,  2, 0, 1, 0, 0, 0, ALU_ADD, 0, 0, 0, A_A));
    send(mk(OP_ALUS, 3, 0, 2, 0, 0, 0, ALU_ADD, 3, 0, 0, 0));
    send(mk(OP_ALUS, 4, 0, 1, 0, 0, 0, ALU_LT,  4, 0, 0, 0));
    send(mk(OP_IST,  0, 0, 1, 3, 1, 4, ALU_ADD, 0, 0, 0, A2_A));
    send(mk(OP_IRMW, 0, 0, 5, 3, 0, 0, ALU_ADD, 0, 0, 0, H_A));
    send(mk(OP_SST,  0, 0, 3, 0, 0, 0, ALU_ADD, 0, 1, 2, C_A));
    send(mk(OP_RNG,  6, 7, 8, 9, 0, 0, ALU_ADD, 0, 0, 0, 0));
    send(mk(OP_SLD,  1, 0, 0, 0, 0, 0, ALU_ADD, 0, 1, 2, B_A));
    send(mk(OP_ALUS, 5, 0, 5, 0, 0, 0, ALU_ADD, 3, 0, 0, 0));
    // poll the ready bits (16 bits per tile, four tiles per 8-byte word)
    forever begin
      bit all; all = 1;
      for (int k = 0; k < 8; k++) begin
        crd(CTL + 40'h40 + 40'(8 * k), r);
        for (int t = 0; t < 4; t++) if (r[t / 2][16 * (t % 2)] !== 1'b1) all = 0;
      end
      n_poll++;
      if (all && idle) break;
      repeat (50) @(negedge clk);
    end
    $display("kernel took %0d cycles, %0d ready polls", $time / 10 - cyc0, n_poll);

    // ---- results ----
    for (int i = 0; i < N; i++) begin
      t2[i] = u_mem.init_word(A_A + 40'(4 * bidx[i]));
      t3[i] = t2[i] + 7;
      check(spd(1, i) == bidx[i], "SLD T1");
      check(spd(2, i) == t2[i], "ILD T2");
      check(spd(4, i) == word_t'(bidx[i] < (1 << 23)), "ALUS condition T4");
      check(spd(5, i) == t5[i] + 7, "ALUS T5 after the IRMW read it");
      check(u_mem.get_word(C_A + 40'(4 * i)) == t3[i], "SST C");
    end
    for (int l = 0; l < N / 16; l++) begin
      crd(SPD + 40'((3 * TL + l * 16) * 4), r);
      for (int w = 0; w < 16; w++) check(r[w] == t3[l * 16 + w], "ALUS T3 read by the core");
    end
    begin
      word_t e [paddr_t];
      word_t h [256];
      for (int i = 0; i < N; i++)
        if (bidx[i] < (1 << 23)) e[A2_A + 40'(4 * bidx[i])] = t3[i];
      foreach (e[a]) check(u_mem.get_word(a) == e[a], "IST A2");
      for (int k = 0; k < 256; k++) h[k] = u_mem.init_word(H_A + 40'(4 * k));
      for (int i = 0; i < N; i++) h[t5[i]] += t3[i];
      for (int k = 0; k < 256; k++) check(u_mem.get_word(H_A + 40'(4 * k)) == h[k], "IRMW H");
    end
    npairs = 0;
    for (int i = 0; i < 64; i++)
      for (word_t j = t8[i]; j < t9[i]; j++) begin
        check(spd(6, npairs) == word_t'(i) && spd(7, npairs) == j, "RNG pairs");
        npairs++;
      end
    check(u_dut.u_spd.size[6] == idx_t'(npairs), "RNG size");
    check(!tlb_miss, "no TLB miss");

    // ---- mechanisms ----
    $display("indirect words %0d coalesced %0d requests %0d drains %0d; stream requests %0d",
             stat_ind_words, stat_ind_coalesced, stat_ind_reqs, stat_ind_drains, stat_str_reqs);
    $display("indirect reads via cache %0d, direct to DRAM %0d; row-buffer hits %0d; dispatch held %0d cycles;",
             n_ind_cache, n_ind_mem, u_mem.row_hits, n_disp_hold);
    $display("consumers issued behind a running producer %0d; back-invalidations %0d",
             n_overlap, n_inv);
    check(stat_ind_coalesced > 0, "mechanism: Row Table coalescing");
    check(stat_ind_drains > 0, "mechanism: forced drain of a full slice");
    check(n_ind_cache > 0, "mechanism: H=1 requests through the cache");
    check(n_ind_mem > 0, "mechanism: H=0 requests straight to DRAM");
    check(u_mem.row_hits > 0, "mechanism: DRAM row-buffer hits");
    check(n_disp_hold > 0, "mechanism: dispatch held by tile reuse");
    check(n_overlap > 0, "mechanism: consumer issued while its producer runs");
    check(n_inv > 0, "mechanism: back-invalidation of core-cached scratchpad lines");
    check(inv_seen.size() > 0 && inv_seen[0] == SPD + 40'((5 * TL + 32) * 4), "invalidated line address");
    check(n_poll > 1, "mechanism: ready-bit polling");
    check(stat_str_reqs == 3 * (N / 16), $sformatf("stream: one request per line, %0d", stat_str_reqs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
