// dx100_word_table: the Indirect Access unit's Word Table.
//
// One entry per tile iteration i: {V, WO, has-previous, Previous i}. The
// entries of the iterations that touch the same DRAM column form a linked list
// whose tail lives in the Row Table; following Previous i from the tail visits
// every word that must be taken from (or put into) that column's line.
// Write port (fill): entry i <- {1, wo, prev_v, prev}. Read port (response):
// combinational read of entry rd_i; rd_clr clears its V bit at the clock edge.
// Layout follows the paper; the explicit has-previous bit stands for the "-"
// of an empty link and is this design's encoding.
module dx100_word_table
  import dx100_pkg::*;
#(
  parameter int unsigned TILE = 16384
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wr_en,
  input  idx_t       wr_i,
  input  logic [3:0] wr_wo,
  input  logic       wr_prev_v,
  input  idx_t       wr_prev,
  input  idx_t       rd_i,
  input  logic       rd_clr,
  output logic       rd_v,
  output logic [3:0] rd_wo,
  output logic       rd_prev_v,
  output idx_t       rd_prev
);
  localparam int unsigned AW = $clog2(TILE);
  logic [TILE-1:0] v;
  logic [3:0]      wo     [TILE];
  logic            prev_v [TILE];
  idx_t            prev   [TILE];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      wo[AW'(wr_i)]     <= wr_wo;
      prev_v[AW'(wr_i)] <= wr_prev_v;
      prev[AW'(wr_i)]   <= wr_prev;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else begin
      if (rd_clr) v[AW'(rd_i)] <= 1'b0;
      if (wr_en)  v[AW'(wr_i)] <= 1'b1;
    end
  end

  assign rd_v      = v[AW'(rd_i)];
  assign rd_wo     = wo[AW'(rd_i)];
  assign rd_prev_v = prev_v[AW'(rd_i)];
  assign rd_prev   = prev[AW'(rd_i)];
endmodule
