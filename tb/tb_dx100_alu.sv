// Self-checking test of dx100_alu on a small scratchpad (8 tiles x 64 words).
// ALUV ADD, ALUS MUL, signed ALUV LT with a condition tile, ALUS SHR on a
// tile whose producer is still running (the unit must wait on finish bits),
// and the group rate (at most 4 cycles per 16 elements).
module tb_dx100_alu;
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
  dx100_alu #(.LANES(16), .TILE(TL), .NTILES(NT)) dut (
    .clk, .rst_n, .issue_valid, .issue, .done, .spd_req(req[1]), .spd_gnt(1'b1), .spd_rsp(rsp[1]),
    .size, .wr_pending);

  word_t a [TL], b [TL], c [TL];
  initial begin
    repeat (5000) @(posedge clk);
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
  function automatic word_t rd(tile_t t, int i);
    return u_spd.mem[(int'(t) * TL + i) / 16][i % 16];
  endfunction
  task automatic run(opcode_t o, aluop_t op, dtype_t dt, tile_t td, tile_t s1, tile_t s2,
                     logic tce, tile_t tc, word_t r1, output int cyc);
    issue = '0; issue.ins.opcode = o; issue.ins.op = op; issue.ins.dtype = dt;
    issue.ins.td1 = td; issue.ins.ts1 = s1; issue.ins.ts2 = s2; issue.ins.tc_en = tce;
    issue.ins.tc = tc; issue.r1 = 64'(r1);
    clr_valid = 2'b01; clr_tile[0] = td; issue_valid = 1; @(negedge clk);
    clr_valid = '0; issue_valid = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    req[0] = '0; clr_valid = '0; clr_tile = '0; wr_pending = '0; issue_valid = 0; issue = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < TL; i++) begin
      a[i] = $urandom; b[i] = $urandom; c[i] = 32'(i % 3 == 0);
    end
    wr_tile(1, TL, a); wr_tile(2, TL, b); wr_tile(3, TL, c);
    run(OP_ALUV, ALU_ADD, DT_U32, 4, 1, 2, 0, 0, 0, cyc);
    for (int i = 0; i < TL; i++) check(rd(4, i) == a[i] + b[i], "ALUV ADD");
    check(size[4] == TL, "ALUV size");
    check(cyc <= 4 * (TL / 16) + 4, "ALUV rate: <= 4 cycles per 16 lanes");
    run(OP_ALUS, ALU_MUL, DT_U32, 5, 1, 0, 0, 0, 32'd77, cyc);
    for (int i = 0; i < TL; i++) check(rd(5, i) == a[i] * 77, "ALUS MUL");
    check(cyc <= 3 * (TL / 16) + 4, "ALUS rate: <= 3 cycles per 16 lanes");
    run(OP_ALUV, ALU_LT, DT_I32, 6, 1, 2, 1, 3, 0, cyc);
    for (int i = 0; i < TL; i++)
      check(rd(6, i) == ((c[i] != 0) ? 32'($signed(a[i]) < $signed(b[i])) : 0), "cond ALUV LT i32");
    // producer still running on tile 7: only 20 elements, written later
    wr_pending[7] = 1;
    fork
      run(OP_ALUS, ALU_SHR, DT_U32, 0, 7, 0, 0, 0, 32'd4, cyc);
      begin
        word_t v [TL];
        repeat (30) @(negedge clk);
        check(!done && size[0] == 0, "ALU waits for its producer");
        for (int i = 0; i < TL; i++) v[i] = 32'(i * 1000);
        wr_tile(7, 20, v);
        repeat (5) @(negedge clk);
        wr_pending[7] = 0;
      end
    join
    for (int i = 0; i < 20; i++) check(rd(0, i) == 32'(i * 1000) >> 4, "ALUS SHR after wait");
    check(size[0] == 20, "size follows producer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
