// Self-checking test of dx100_range_fuser: random short ranges with a
// condition tile, compared with a reference model of the fused loop; also a
// run that fills the output tile, and the emission rate (2 cycles per pair).
module tb_dx100_range_fuser;
  import dx100_pkg::*;
  localparam int NT = 8, TL = 64;
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
  dx100_scratchpad #(.NTILES(NT), .TILE(TL), .NPORTS(2)) u_spd (
    .clk, .rst_n, .req, .rsp, .clr_valid, .clr_tile, .ready_clr('0), .ready_set('0), .ready, .size);
  dx100_range_fuser #(.TILE(TL), .NTILES(NT)) dut (
    .clk, .rst_n, .issue_valid, .issue, .done, .spd_req(req[1]), .spd_gnt(1'b1), .spd_rsp(rsp[1]),
    .size, .wr_pending);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr_tile(tile_t t, int n, ref word_t v [TL]);
    for (int l = 0; l < (n + 15) / 16; l++) begin
      req[0] = '0; req[0].valid = 1; req[0].tile = t; req[0].line = 12'(l);
      for (int w = 0; w < 16; w++) if (l * 16 + w < n) begin
        req[0].wmask[w] = 1; req[0].fmask[w] = 1; req[0].wdata[w] = v[l * 16 + w];
      end
      @(negedge clk);
    end
    req[0] = '0;
  endtask
  function automatic word_t rd(tile_t t, int i); return u_spd.mem[(int'(t) * TL + i) / 16][i % 16]; endfunction
  task automatic run(logic tce, output int cyc);
    issue = '0; issue.ins.opcode = OP_RNG; issue.ins.td1 = 4; issue.ins.td2 = 5;
    issue.ins.ts1 = 1; issue.ins.ts2 = 2; issue.ins.tc = 3; issue.ins.tc_en = tce;
    clr_valid = 2'b11; clr_tile[0] = 4; clr_tile[1] = 5; issue_valid = 1; @(negedge clk);
    clr_valid = '0; issue_valid = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask
  initial begin
    word_t lo [TL], hi [TL], cd [TL];
    int ei [$], ej [$];
    int n, cyc;
    req[0] = '0; clr_valid = '0; clr_tile = '0; wr_pending = '0; issue_valid = 0; issue = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    n = 12;
    for (int i = 0; i < TL; i++) begin
      lo[i] = 32'($urandom_range(0, 500)); hi[i] = lo[i] + 32'($urandom_range(0, 4));
      cd[i] = 32'($urandom_range(0, 1));
    end
    wr_tile(1, n, lo); wr_tile(2, n, hi); wr_tile(3, n, cd);
    for (int i = 0; i < n; i++) if (cd[i] != 0) for (int j = int'(lo[i]); j < int'(hi[i]); j++) begin
      ei.push_back(i); ej.push_back(j);
    end
    run(1, cyc);
    check(size[4] == idx_t'(ei.size()) && size[5] == idx_t'(ei.size()), "fused size");
    for (int k = 0; k < ei.size(); k++)
      check(rd(4, k) == word_t'(ei[k]) && rd(5, k) == word_t'(ej[k]), "fused (i,j)");
    check(cyc <= 2 * ei.size() + 5 * n + 4, "rate");
    // unconditioned, ranges of 8: 12*8 = 96 > 64, output tile fills up
    for (int i = 0; i < TL; i++) begin lo[i] = 32'(100 * i); hi[i] = lo[i] + 8; end
    wr_tile(1, n, lo); wr_tile(2, n, hi);
    run(0, cyc);
    check(size[4] == TL, "stops when the output tile is full");
    check(rd(4, 63) == 7 && rd(5, 63) == 707, "last pair of a full tile");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
