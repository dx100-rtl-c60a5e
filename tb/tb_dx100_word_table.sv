// Self-checking test of dx100_word_table: builds the linked lists of the
// paper's Word Table example (iterations 0..7 with their word offsets and
// previous iterations) and walks each list from its tail.
module tb_dx100_word_table;
  import dx100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic wr_en, wr_prev_v, rd_clr, rd_v, rd_prev_v; idx_t wr_i, wr_prev, rd_i, rd_prev;
  logic [3:0] wr_wo, rd_wo;
  dx100_word_table #(.TILE(64)) dut (.clk, .rst_n, .wr_en, .wr_i, .wr_wo, .wr_prev_v, .wr_prev,
    .rd_i, .rd_clr, .rd_v, .rd_wo, .rd_prev_v, .rd_prev);
  // example: WO and previous iteration (-1 = none)
  int wo_t [8]   = '{4, 15, 13, 7, 10, 6, 0, 12};
  int prev_t [8] = '{-1, -1, -1, -1, 2, 1, 0, 4};
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = 0; wr_i = 0; wr_wo = 0; wr_prev_v = 0; wr_prev = 0; rd_i = 0; rd_clr = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < 8; i++) begin
      wr_en = 1; wr_i = idx_t'(i); wr_wo = 4'(wo_t[i]);
      wr_prev_v = prev_t[i] >= 0; wr_prev = idx_t'(prev_t[i] < 0 ? 0 : prev_t[i]);
      @(negedge clk);
    end
    wr_en = 0;
    // walk from tail 7: 7 -> 4 -> 2 ; words 12, 10, 13
    begin
      int exp_i [3] = '{7, 4, 2};
      rd_i = 7;
      for (int k = 0; k < 3; k++) begin
        #1;
        check(rd_v && rd_i == idx_t'(exp_i[k]) && rd_wo == 4'(wo_t[exp_i[k]]), "list 7-4-2");
        check(rd_prev_v == (k < 2), "list end");
        rd_clr = 1; @(negedge clk); rd_clr = 0;
        if (k < 2) rd_i = rd_prev;
      end
    end
    rd_i = 7; #1; check(!rd_v, "entry cleared after walk");
    rd_i = 5; #1; check(rd_v && rd_wo == 6 && rd_prev_v && rd_prev == 1, "entry 5");
    rd_i = 3; #1; check(rd_v && rd_wo == 7 && !rd_prev_v, "entry 3 alone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
