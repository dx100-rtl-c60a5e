// Self-checking test of dx100_interface with a small scratchpad (8 tiles x
// 256 words) and a register array standing in for the register file:
// memory-mapped scratchpad writes and reads (one-cycle read response,
// coherency marking), size and ready windows, register and instruction
// windows (back-pressure while the instruction queue is full), TLB fill and
// translation with the sticky miss flag, and the routing of unit requests
// and responses between the Cache and Memory interfaces.
module tb_dx100_interface;
  import dx100_pkg::*;
  localparam int NT = 8, TL = 256;
  localparam paddr_t SPD = 40'h04_0000_0000, CTL = 40'h04_0020_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic core_req_valid, core_req_write, core_req_ready, core_rsp_valid;
  paddr_t core_req_addr; line_t core_req_wdata, core_rsp_data;
  spd_req_t req [1]; spd_rsp_t rsp [1];
  logic [NT-1:0] ready; idx_t size [NT];
  logic rf_we; logic [4:0] rf_addr; logic [63:0] rf_wdata, rf_rdata;
  logic instr_we, instr_ready; logic [1:0] instr_widx; logic [63:0] instr_wdata;
  logic coh_rd_valid; logic [6:0] coh_rd_line;
  logic tlb_valid [2]; logic [VA_W-1:0] tlb_va [2]; paddr_t tlb_pa [2]; logic tlb_hit [2]; logic tlb_miss;
  logic s_req_valid, s_req_ready, s_rsp_valid, s_rsp_ready, i_req_valid, i_req_ready, i_rsp_valid, i_rsp_ready;
  mem_req_t s_req, i_req; mem_rsp_t s_rsp, i_rsp;
  logic cache_req_valid, cache_req_ready, cache_rsp_valid, cache_rsp_ready;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mem_req_t cache_req, mem_req; mem_rsp_t cache_rsp, mem_rsp;
  logic [63:0] rf [32];
  assign rf_rdata = rf[rf_addr];
  always @(posedge clk) if (rf_we) rf[rf_addr] <= rf_wdata;

  dx100_scratchpad #(.NTILES(NT), .TILE(TL), .NPORTS(1)) u_spd (
    .clk, .rst_n, .req, .rsp, .clr_valid('0), .clr_tile('0), .ready_clr(8'h04), .ready_set('0), .ready, .size);
  dx100_interface #(.NTILES(NT), .TILE(TL), .NREGS(32), .TLB_ENTRIES(16)) dut (
    .clk, .rst_n, .core_req_valid, .core_req_write, .core_req_addr, .core_req_wdata, .core_req_ready,
    .core_rsp_valid, .core_rsp_data, .spd_req(req[0]), .spd_rsp(rsp[0]), .size, .ready,
    .rf_we, .rf_addr, .rf_wdata, .rf_rdata, .instr_we, .instr_widx, .instr_wdata, .instr_ready,
    .coh_rd_valid, .coh_rd_line, .tlb_valid, .tlb_va, .tlb_pa, .tlb_hit, .tlb_miss,
    .s_req_valid, .s_req, .s_req_ready, .s_rsp_valid, .s_rsp, .s_rsp_ready,
    .i_req_valid, .i_req, .i_req_ready, .i_rsp_valid, .i_rsp, .i_rsp_ready,
    .cache_req_valid, .cache_req, .cache_req_ready, .cache_rsp_valid, .cache_rsp, .cache_rsp_ready,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_rsp_valid, .mem_rsp, .mem_rsp_ready);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic cwr(paddr_t a, line_t d);
    core_req_valid = 1; core_req_write = 1; core_req_addr = a; core_req_wdata = d;
    @(negedge clk); core_req_valid = 0;
  endtask
  task automatic crd(paddr_t a, output line_t d);
    core_req_valid = 1; core_req_write = 0; core_req_addr = a;
    @(negedge clk); core_req_valid = 0;
    check(core_rsp_valid, "read answered after one cycle");
    d = core_rsp_data;
  endtask
  int coh_cnt = 0;
  always @(posedge clk) if (coh_rd_valid) coh_cnt++;

  initial begin
    line_t d, r;
    core_req_valid = 0; core_req_write = 0; core_req_addr = '0; core_req_wdata = '0; instr_ready = 1;
    tlb_valid = '{0, 0}; tlb_va = '{'0, '0};
    s_req_valid = 0; s_req = '0; i_req_valid = 0; i_req = '0; s_rsp_ready = 1; i_rsp_ready = 1;
    cache_req_ready = 1; mem_req_ready = 1; cache_rsp_valid = 0; cache_rsp = '0; mem_rsp_valid = 0; mem_rsp = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    // scratchpad: tile 2 line 3, then read it back
    for (int w = 0; w < 16; w++) d[w] = $urandom;
    cwr(SPD + 40'(2 * TL * 4 + 3 * 64), d);
    crd(SPD + 40'(2 * TL * 4 + 3 * 64), r);
    check(r == d, "scratchpad line read back");
    check(coh_cnt == 1, "read marked for back-invalidation");
    check(size[2] == 64, "core write finishes elements, size = 4 lines");
    // size window: tile 2 is field 2 of the first 8 bytes
    crd(CTL, r);
    check(r[1][15:0] == 16'd64, "size window");
    crd(CTL + 40'h40, r);
    check(r[0][15:0] == 16'h1 && r[1][0] == 1'b0 && r[1][16] == 1'b1, "ready window (tile 2 busy)");
    // registers
    for (int k = 0; k < 32; k++) begin
      line_t x; x = '0; x[0] = $urandom; x[1] = k;
      cwr(CTL + 40'h80 + 40'(8 * k), x);
    end
    for (int k = 0; k < 32; k++) begin
      crd(CTL + 40'h80 + 40'(8 * k), r);
      check(r[1] == word_t'(k) && r[0] == rf[k][31:0], "register window");
    end
    // instruction words and back-pressure
    core_req_valid = 1; core_req_write = 1; core_req_addr = CTL + 40'h490; core_req_wdata = '0;
    core_req_wdata[0] = 32'hCAFE; #1;
    check(instr_we && instr_widx == 2 && instr_wdata[31:0] == 32'hCAFE && core_req_ready, "instruction word 2");
    instr_ready = 0; #1;
    check(!core_req_ready && !instr_we, "instruction write held while queue full");
    @(negedge clk); core_req_valid = 0; instr_ready = 1;
    // TLB: page 5 (2 MB pages) -> frame 0x33
    d = '0; d[1] = {1'b1, 31'd5}; d[0] = 32'h33;
    cwr(CTL + 40'h1000 + 40'(8 * 7), d);
    tlb_valid = '{1, 0}; tlb_va[0] = {27'd5, 21'h1ABCD}; #1;
    check(tlb_hit[0] && tlb_pa[0] == {19'h33, 21'h1ABCD}, "TLB translation");
    check(!tlb_miss, "no miss yet");
    tlb_va[0] = {27'd6, 21'h0}; #1;
    check(!tlb_hit[0], "TLB miss on unmapped page");
    @(negedge clk); tlb_valid = '{0, 0}; #1;
    check(tlb_miss, "sticky miss flag");
    // routing: indirect to memory and stream to cache in the same cycle
    s_req_valid = 1; s_req.addr = 40'h1000; s_req.tag = 8'd5;
    i_req_valid = 1; i_req.addr = 40'h2000; i_req.tag = 8'h80; i_req.to_cache = 0; #1;
    check(cache_req_valid && cache_req.addr == 40'h1000 && s_req_ready, "stream to cache");
    check(mem_req_valid && mem_req.addr == 40'h2000 && i_req_ready, "indirect H=0 to memory");
    i_req.to_cache = 1; #1;
    check(cache_req_valid && cache_req.addr == 40'h2000 && !s_req_ready && i_req_ready && !mem_req_valid,
          "indirect H=1 wins the cache port");
    cache_req_ready = 0; #1;
    check(!i_req_ready, "cache back-pressure");
    s_req_valid = 0; i_req_valid = 0; cache_req_ready = 1;
    // responses by tag
    cache_rsp_valid = 1; cache_rsp.tag = 8'd5; #1;
    check(s_rsp_valid && !i_rsp_valid && cache_rsp_ready, "cache response to stream");
    cache_rsp.tag = 8'h80; #1;
    check(!s_rsp_valid && i_rsp_valid && cache_rsp_ready, "cache response to indirect");
    mem_rsp_valid = 1; mem_rsp.addr = 40'h2000; #1;
    check(i_rsp_valid && i_rsp.addr == 40'h2000 && mem_rsp_ready && !cache_rsp_ready,
          "memory response first, cache response held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
