// Self-checking test of dx100_request_generator: with all 32 slices asking,
// grants follow slice order 0,1,2,... so channel (bit 0) alternates every
// grant and bank group (bits 2:1) changes every two; no grant without
// out_ready; idle slices are skipped; grants stay one-hot.
module tb_dx100_request_generator;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic [31:0] req, gnt; logic out_ready, gv; logic [4:0] gi;
  dx100_request_generator #(.NSLICES(32)) dut (.clk, .rst_n, .req, .out_ready, .gnt, .gnt_idx(gi), .gnt_valid(gv));
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int prev;
    req = '0; out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    req = '1; #1;
    check(gnt == '0, "no grant without out_ready");
    out_ready = 1;
    prev = -1;
    for (int k = 0; k < 64; k++) begin
      #1;
      check(gnt == (32'b1 << (k % 32)) && gi == 5'(k % 32), "round robin order");
      if (prev >= 0) check(gi[0] != 1'(prev), "channel alternates");
      prev = int'(gi[0]);
      @(negedge clk);
    end
    req = 32'h8000_0101; #1;  // slices 0, 8, 31
    check(gi == 0, "first after 31 is 0"); @(negedge clk); #1;
    check(gi == 8, "skip idle slices"); @(negedge clk); #1;
    check(gi == 31, "then 31"); @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
