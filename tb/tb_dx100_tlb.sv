// Self-checking test of dx100_tlb: entries loaded, hits on both ports with
// the page offset kept, misses for unmapped pages and invalidated entries.
module tb_dx100_tlb;
  import dx100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic we; logic [7:0] widx; logic [63:0] wdata;
  logic [VA_W-1:0] va [2]; paddr_t pa [2]; logic hit [2];
  dx100_tlb #(.ENTRIES(256), .PAGE_BITS(21)) dut (.clk, .rst_n, .we, .widx, .wdata, .va, .pa, .hit);
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; widx = 0; wdata = 0; va[0] = 0; va[1] = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    // map virtual page 0x1000+e to physical page 0x200+3e
    for (int e = 0; e < 256; e++) begin
      we = 1; widx = 8'(e); wdata = {1'b1, 4'b0, 27'(32'h1000 + e), 13'b0, 19'(32'h200 + 3 * e)};
      @(negedge clk);
    end
    we = 0;
    for (int k = 0; k < 40; k++) begin
      int e; logic [20:0] o;
      e = $urandom_range(0, 255); o = 21'($urandom);
      va[k % 2] = {27'(32'h1000 + e), o}; #1;
      check(hit[k % 2] && pa[k % 2] == {19'(32'h200 + 3 * e), o}, "translation");
    end
    va[0] = {27'h7777, 21'h5}; #1; check(!hit[0], "miss on unmapped page");
    we = 1; widx = 8'd7; wdata = '0; @(negedge clk); we = 0;
    va[1] = {27'(32'h1007), 21'h40}; #1; check(!hit[1], "miss after invalidation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
