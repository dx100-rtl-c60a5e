// Self-checking test of dx100_regfile: reset to zero, writes, four reads.
module tb_dx100_regfile;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic we; logic [4:0] waddr; logic [63:0] wdata;
  logic [4:0] raddr [4]; logic [63:0] rdata [4];
  dx100_regfile #(.NREGS(32), .RW(64), .NRD(4)) dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr, .rdata);
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; waddr = 0; wdata = 0;
    for (int k = 0; k < 4; k++) raddr[k] = 5'(k);
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(rdata[2] == 0, "reset value");
    for (int r = 0; r < 32; r++) begin
      we = 1; waddr = 5'(r); wdata = 64'h1234_0000_0000_0000 + 64'(r * r); @(negedge clk);
    end
    we = 0;
    for (int r = 0; r < 32; r += 4) begin
      for (int k = 0; k < 4; k++) raddr[k] = 5'(r + k);
      #1;
      for (int k = 0; k < 4; k++)
        check(rdata[k] == 64'h1234_0000_0000_0000 + 64'((r + k) * (r + k)), "register value");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
