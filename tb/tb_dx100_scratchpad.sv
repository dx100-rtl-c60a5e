// Self-checking test of dx100_scratchpad (8 tiles x 64 words, 4 ports):
// line writes with word masks, finish bits and size growth, tile clear,
// ready bits, and two ports writing different tiles in one cycle.
module tb_dx100_scratchpad;
  import dx100_pkg::*;
  localparam int NT = 8, TL = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  spd_req_t req [4];
  spd_rsp_t rsp [4];
  logic [1:0] clr_valid; tile_t [1:0] clr_tile;
  logic [NT-1:0] rclr, rset, ready;
  idx_t size [NT];
  dx100_scratchpad #(.NTILES(NT), .TILE(TL), .NPORTS(4)) dut (
    .clk, .rst_n, .req, .rsp, .clr_valid, .clr_tile, .ready_clr(rclr), .ready_set(rset), .ready, .size);

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < 4; p++) req[p] = '0;
    clr_valid = '0; clr_tile = '0; rclr = '0; rset = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(ready == '1, "ready bits reset to 1");
    check(size[3] == 0, "size reset");
    // port 1 writes line 2 of tile 3, words 0..4 with finish, word 5 data only
    req[1].valid = 1; req[1].tile = 3; req[1].line = 2;
    req[1].wmask = 16'h003F; req[1].fmask = 16'h001F;
    for (int w = 0; w < 16; w++) req[1].wdata[w] = 32'(1000 + w);
    // port 2 writes tile 5 line 0 all words
    req[2].valid = 1; req[2].tile = 5; req[2].line = 0; req[2].wmask = '1; req[2].fmask = '1;
    for (int w = 0; w < 16; w++) req[2].wdata[w] = 32'(w * 7);
    @(negedge clk);
    req[1] = '0; req[2] = '0;
    check(size[3] == 16'(2*16+5), "size follows highest finished element");
    check(size[5] == 16, "size of full line");
    req[0].tile = 3; req[0].line = 2;
    #1;
    for (int w = 0; w < 6; w++) check(rsp[0].rdata[w] == 32'(1000 + w), "read back tile 3");
    check(rsp[0].rfinish == 16'h001F, "finish bits tile 3");
    req[3].tile = 5; req[3].line = 0; #1;
    check(rsp[3].rdata[9] == 63, "port 3 reads tile 5");
    // clear tile 3
    clr_valid = 2'b01; clr_tile[0] = 3; @(negedge clk); clr_valid = '0; #1;
    check(rsp[0].rfinish == '0, "finish cleared");
    check(size[3] == 0, "size cleared");
    check(rsp[0].rdata[2] == 1002, "data kept on clear");
    // ready bits
    rclr = 8'b0010_1000; @(negedge clk); rclr = '0;
    check(ready == 8'b1101_0111, "ready cleared");
    rset = 8'b0000_1000; @(negedge clk); rset = '0;
    check(ready == 8'b1101_1111, "ready set");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
