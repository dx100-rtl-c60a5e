// Self-checking test of dx100_controller: instruction assembly from three
// 64-bit words, dispatch and issue, overlap of a consumer with its running
// producer, the destination-in-use hazard (WAW/WAR) holding dispatch until
// retire, a busy unit holding issue, ready bits and wr_pending, the queue
// filling while the coherency agent is busy.
module tb_dx100_controller;
  import dx100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic instr_we, instr_ready, inv_start, coh_busy, idle;
  logic [1:0] instr_widx; logic [63:0] instr_wdata;
  logic [4:0] rf_raddr [3]; logic [63:0] rf_rdata [3];
  logic [3:0] issue_valid, unit_done; issue_t issue;
  logic [1:0] clr_valid; tile_t [1:0] clr_tile;
  logic [31:0] ready_clr, ready_set, wr_pending, inv_tiles;
  dx100_controller #(.SB_ENTRIES(8), .QDEPTH(4), .NTILES(32)) dut (.*);
  always_comb for (int k = 0; k < 3; k++) rf_rdata[k] = 64'(rf_raddr[k]) * 10;

  // ready bits as the scratchpad would hold them
  logic [31:0] ready;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ready <= '1; else ready <= (ready & ~ready_clr) | ready_set;
  // issue log
  int iss_unit [$]; instr_t iss_ins [$]; logic [63:0] iss_r1 [$];
  always @(posedge clk) if (rst_n) for (int u = 0; u < 4; u++) if (issue_valid[u]) begin
    iss_unit.push_back(u); iss_ins.push_back(issue.ins); iss_r1.push_back(issue.r1);
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic send(instr_t ins);
    for (int k = 0; k < 3; k++) begin
      instr_we = 1; instr_widx = 2'(k); instr_wdata = ins[64*k +: 64];
      @(negedge clk);
    end
    instr_we = 0;
  endtask
  function automatic instr_t mk(opcode_t o, int td, int ts1, int ts2, int rs1);
    instr_t i; i = '0; i.opcode = o; i.td1 = 5'(td); i.ts1 = 5'(ts1); i.ts2 = 5'(ts2);
    i.rs1 = 5'(rs1); i.rs2 = 5'(rs1 + 1); i.rs3 = 5'(rs1 + 2); i.base = 64'hABCD_0000 + 64'(td);
    return i;
  endfunction
  task automatic done_pulse(int u);
    unit_done = '0; unit_done[u] = 1; @(negedge clk); unit_done = '0;
  endtask

  initial begin
    instr_we = 0; instr_widx = 0; instr_wdata = 0; unit_done = 0; coh_busy = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(idle, "idle after reset");
    send(mk(OP_SLD, 1, 0, 0, 4));                       // B -> tile 1
    repeat (3) @(negedge clk);
    check(iss_unit.size() == 1 && iss_unit[0] == 0, "SLD issued to stream unit");
    if (iss_ins.size() > 0) check(iss_ins[0].base == 64'hABCD_0001 && iss_r1[0] == 40, "operands and registers");
    check(wr_pending[1] && !ready[1], "tile 1 pending, not ready");
    send(mk(OP_ILD, 2, 1, 0, 0));                       // A[B] -> tile 2, reads tile 1
    repeat (3) @(negedge clk);
    check(iss_unit.size() == 2 && iss_unit[1] == 1, "ILD overlaps its running producer");
    send(mk(OP_ALUS, 1, 2, 0, 7));                      // writes tile 1: in use
    repeat (5) @(negedge clk);
    check(iss_unit.size() == 2, "destination in use: not dispatched");
    send(mk(OP_SST, 0, 6, 0, 1));                       // stream unit busy
    repeat (3) @(negedge clk);
    check(iss_unit.size() == 2, "stream unit busy: SST waits");
    done_pulse(0);                                      // SLD retires
    repeat (3) @(negedge clk);
    check(iss_unit.size() == 2, "in-order dispatch: SST waits behind blocked ALUS");
    check(!ready[1], "tile 1 still used by ILD");
    done_pulse(1);                                      // ILD retires
    repeat (5) @(negedge clk);
    check(iss_unit.size() == 4 && iss_unit[2] == 2 && iss_ins[2].td1 == 1, "ALUS dispatched once tile 1 free");
    check(iss_unit.size() == 4 && iss_unit[3] == 0 && iss_ins[3].opcode == OP_SST, "SST then issues");
    done_pulse(0); done_pulse(2);
    repeat (2) @(negedge clk);
    check(ready == '1 && wr_pending == '0 && idle, "all retired, all ready");
    // queue fills while the coherency agent is busy
    coh_busy = 1;
    for (int k = 0; k < 4; k++) send(mk(OP_ALUV, 10 + k, 20, 21, 0));
    check(!instr_ready, "queue full");
    coh_busy = 0;
    repeat (3) @(negedge clk);
    check(instr_ready, "queue drains");
    check(iss_unit.size() == 5, "ALU busy: one issued");
    for (int k = 0; k < 3; k++) begin done_pulse(2); repeat (2) @(negedge clk); end
    check(iss_unit.size() == 8, "all four issued in turn");
    done_pulse(2); repeat (2) @(negedge clk);
    check(idle, "idle after the queue test");
    // a reader does not pass an older writer of its source that waits to issue
    send(mk(OP_SLD, 1, 0, 0, 4));                       // stream unit busy
    send(mk(OP_SLD, 2, 0, 0, 4));                       // writes tile 2, must wait
    send(mk(OP_ILD, 3, 2, 0, 0));                       // reads tile 2, indirect unit idle
    repeat (3) @(negedge clk);
    check(iss_unit.size() == 9, "ILD held behind the un-issued SLD writing its index tile");
    done_pulse(0); repeat (3) @(negedge clk);
    check(iss_unit.size() == 11 && iss_unit[9] == 0 && iss_unit[10] == 1, "SLD, then ILD issue");
    done_pulse(0); done_pulse(1); repeat (2) @(negedge clk);
    // in-place update: tile 5 is not cleared; a later reader waits for it to retire
    send(mk(OP_ALUS, 5, 5, 0, 7));
    repeat (2) @(negedge clk);
    check(iss_unit.size() == 12 && !wr_pending[5], "in-place ALUS issued, tile 5 not marked written");
    send(mk(OP_SST, 0, 5, 0, 1));
    repeat (3) @(negedge clk);
    check(iss_unit.size() == 12, "reader of an in-place tile waits");
    done_pulse(2); repeat (3) @(negedge clk);
    check(iss_unit.size() == 13 && iss_unit[12] == 0, "reader issues after the in-place update");
    done_pulse(0); repeat (2) @(negedge clk);
    check(idle, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
