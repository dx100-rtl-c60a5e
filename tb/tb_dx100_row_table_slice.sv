// Self-checking test of dx100_row_table_slice with 4 rows x 2 columns:
// coalescing into an existing column (tail capture), new column, new row,
// "full" when a row's columns or all rows are used, request order (all
// columns of one row back to back), sent rows not matched by later fills,
// response lookup returning tails and freeing entries.
module tb_dx100_row_table_slice;
  import dx100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic fill_valid, fill_h, fill_ok, fill_prev_v, rq_valid, rq_h, rq_grant, rsp_valid, rsp_hit, rsp_h, empty;
  logic [RO_W-1:0] fill_ro, rq_ro, rsp_ro; logic [CO_W-1:0] fill_co, rq_co, rsp_co;
  idx_t fill_i, fill_prev_i, rsp_tail;
  dx100_row_table_slice #(.ROWS(4), .COLS(2)) dut (.*);
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic fill(int ro, int co, int i, bit h, output bit ok, output bit pv, output int pi);
    fill_valid = 1; fill_ro = RO_W'(ro); fill_co = CO_W'(co); fill_i = idx_t'(i); fill_h = h; #1;
    ok = fill_ok; pv = fill_prev_v; pi = int'(fill_prev_i);
    @(negedge clk); fill_valid = 0;
  endtask
  task automatic take(output int ro, output int co, output bit h);
    #1; ro = int'(rq_ro); co = int'(rq_co); h = rq_h;
    check(rq_valid, "request offered");
    rq_grant = 1; @(negedge clk); rq_grant = 0;
  endtask
  task automatic respond(int ro, int co, output bit hit, output int tail, output bit h);
    rsp_valid = 1; rsp_ro = RO_W'(ro); rsp_co = CO_W'(co); #1;
    hit = rsp_hit; tail = int'(rsp_tail); h = rsp_h;
    @(negedge clk); rsp_valid = 0;
  endtask
  initial begin
    bit ok, pv, h; int pi, ro, co;
    fill_valid = 0; fill_h = 0; fill_ro = 0; fill_co = 0; fill_i = 0;
    rq_grant = 0; rsp_valid = 0; rsp_ro = 0; rsp_co = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(empty && !rq_valid, "empty after reset");
    fill(16'h010A, 7'h42, 0, 1, ok, pv, pi); check(ok && !pv, "new row");
    fill(16'h010A, 7'h42, 1, 0, ok, pv, pi); check(ok && pv && pi == 0, "coalesce, tail 0");
    fill(16'h010A, 7'h42, 5, 0, ok, pv, pi); check(ok && pv && pi == 1, "coalesce, tail 1");
    fill(16'h010A, 7'h21, 3, 0, ok, pv, pi); check(ok && !pv, "new column");
    fill(16'h010A, 7'h11, 4, 0, ok, pv, pi); check(!ok, "row's columns full");
    fill(16'h40E1, 7'h0A, 6, 0, ok, pv, pi); check(ok && !pv, "second row");
    fill(16'h7101, 7'h0A, 7, 0, ok, pv, pi); check(ok, "third row");
    fill(16'hF0B1, 7'h0A, 8, 0, ok, pv, pi); check(ok, "fourth row");
    fill(16'h1111, 7'h0A, 9, 0, ok, pv, pi); check(!ok, "all rows full");
    // requests: both columns of row 0x010A back to back, then the others
    take(ro, co, h); check(ro == 16'h010A && co == 7'h42 && h, "req 1");
    take(ro, co, h); check(ro == 16'h010A && co == 7'h21 && !h, "req 2 same row");
    take(ro, co, h); check(ro == 16'h40E1, "req 3");
    take(ro, co, h); check(ro == 16'h7101, "req 4");
    take(ro, co, h); check(ro == 16'hF0B1, "req 5");
    #1; check(!rq_valid, "nothing left to send");
    // responses
    respond(16'h010A, 7'h42, ok, pi, h); check(ok && pi == 5 && h, "response tail 5");
    respond(16'h010A, 7'h42, ok, pi, h); check(!ok, "column freed");
    fill(16'h010A, 7'h42, 10, 0, ok, pv, pi); check(!ok, "sent row not matched, no free row");
    respond(16'h010A, 7'h21, ok, pi, h); check(ok && pi == 3, "response tail 3, row freed");
    fill(16'h010A, 7'h42, 10, 0, ok, pv, pi); check(ok && !pv, "fresh row after free");
    respond(16'h40E1, 7'h0A, ok, pi, h); check(ok && pi == 6, "tail 6");
    respond(16'h7101, 7'h0A, ok, pi, h); check(ok && pi == 7, "tail 7");
    respond(16'hF0B1, 7'h0A, ok, pi, h); check(ok && pi == 8, "tail 8");
    take(ro, co, h); check(ro == 16'h010A && co == 7'h42, "last request");
    respond(16'h010A, 7'h42, ok, pi, h); check(ok && pi == 10, "tail 10");
    #1; check(empty, "empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
