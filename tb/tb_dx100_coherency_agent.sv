// Self-checking test of dx100_coherency_agent (8 tiles x 1024 words, 64
// lines per tile): lines read by cores are invalidated when an instruction
// using their tile dispatches, others are not; back-pressure on inv_ready.
module tb_dx100_coherency_agent;
  import dx100_pkg::*;
  localparam int NT = 8, TL = 1024, LPT = TL / 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic rd_valid, start, busy, inv_valid, inv_ready; logic [8:0] rd_line;
  logic [NT-1:0] tiles; paddr_t inv_addr;
  dx100_coherency_agent #(.NTILES(NT), .TILE(TL)) dut (.*);
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  paddr_t got [$];
  always @(posedge clk) if (rst_n && inv_valid && inv_ready) got.push_back(inv_addr);
  initial begin
    int lines [5] = '{3, 70, 100, 127, 200};  // tiles 0, 1, 1, 1, 3
    rd_valid = 0; rd_line = 0; start = 0; tiles = 0; inv_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    foreach (lines[k]) begin rd_valid = 1; rd_line = 9'(lines[k]); @(negedge clk); end
    rd_valid = 0;
    start = 1; tiles = 8'b0000_0110; @(negedge clk); start = 0;
    check(busy, "busy after start");
    fork
      repeat (10) begin inv_ready = 0; @(negedge clk); inv_ready = 1; @(negedge clk); end
    join_none
    while (busy) @(negedge clk);
    check(got.size() == 3, "three lines of tile 1 invalidated");
    if (got.size() == 3) begin
      check(got[0] == 40'h04_0000_0000 + 40'(70 * 64), "line 70");
      check(got[1] == 40'h04_0000_0000 + 40'(100 * 64), "line 100");
      check(got[2] == 40'h04_0000_0000 + 40'(127 * 64), "line 127");
    end
    got.delete();
    start = 1; tiles = 8'b0000_1111; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    check(got.size() == 2 && got[0] == 40'h04_0000_0000 + 40'(3 * 64) &&
          got[1] == 40'h04_0000_0000 + 40'(200 * 64), "tiles 0 and 3 then, tile 1 now clean");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
