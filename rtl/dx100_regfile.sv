// dx100_regfile: DX100 scalar register file.
//
// NREGS registers of RW bits hold loop starts, ends and strides of streaming
// instructions and the scalar operand of ALUS. The cores write and read them
// through the memory-mapped register region; the controller reads up to three
// of them when an instruction issues. One write port, NRD combinational read
// ports; a write is visible in the next cycle. Registers reset to zero.
// The paper gives the count (32); the 64-bit width and the port count are
// this design's choice.
module dx100_regfile #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned RW    = 64,
  parameter int unsigned NRD   = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] waddr,
  input  logic [RW-1:0]            wdata,
  input  logic [$clog2(NREGS)-1:0] raddr [NRD],
  output logic [RW-1:0]            rdata [NRD]
);
  logic [RW-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  always_comb
    for (int k = 0; k < NRD; k++) rdata[k] = regs[raddr[k]];

endmodule
