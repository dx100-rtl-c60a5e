// dx100_coherency_agent: keeps core-cached scratchpad lines coherent.
//
// Scratchpad data is cacheable by the cores. The agent keeps one valid bit per
// 64-byte scratchpad line, set whenever a core reads that line. When the
// controller dispatches an instruction it passes the instruction's tiles
// (start, tiles); the agent then walks those tiles' lines, CHUNK valid bits
// per cycle, and for each set bit sends a back-invalidation of the line's
// host address (inv_valid/inv_addr, held until inv_ready) and clears it.
// busy stays high until all tiles are walked; the controller dispatches
// nothing meanwhile.
// The valid bit per line and invalidation at dispatch follow the paper; the
// walk order, chunk size and invalidation port are this design's choices.
module dx100_coherency_agent
  import dx100_pkg::*;
#(
  parameter int unsigned NTILES   = 32,
  parameter int unsigned TILE     = 16384,
  parameter logic [PA_W-1:0] SPD_BASE = 40'h04_0000_0000
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            rd_valid,
  input  logic [$clog2(NTILES*TILE/16)-1:0] rd_line,
  input  logic                            start,
  input  logic [NTILES-1:0]               tiles,
  output logic                            busy,
  output logic                            inv_valid,
  output paddr_t                          inv_addr,
  input  logic                            inv_ready
);
  localparam int unsigned LPT    = TILE / 16;              // lines per tile
  localparam int unsigned LINES  = NTILES * LPT;
  localparam int unsigned CHUNK  = (LPT < 32) ? LPT : 32;
  localparam int unsigned NCHUNK = LPT / CHUNK;
  localparam int unsigned LW     = $clog2(LINES);

  logic [LINES-1:0]  vb;
  logic [NTILES-1:0] todo;
  logic [$clog2(NCHUNK+1)-1:0] ch;
  logic [$clog2(NTILES)-1:0]   t;
  logic [CHUNK-1:0]  bits;
  logic [$clog2(CHUNK+1)-1:0]  first;
  logic [LW-1:0]     line;

  assign busy = todo != '0;
  always_comb begin
    t = '0;
    for (int k = NTILES-1; k >= 0; k--) if (todo[k]) t = ($bits(t))'(k);
    bits  = vb[(int'(t) * LPT + int'(ch) * CHUNK) +: CHUNK];
    first = '0;
    for (int k = CHUNK-1; k >= 0; k--) if (bits[k]) first = ($bits(first))'(k);
    line      = LW'(int'(t) * LPT + int'(ch) * CHUNK + int'(first));
    inv_valid = busy && bits != '0;
    inv_addr  = SPD_BASE + PA_W'({line, 6'b0});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vb <= '0; todo <= '0; ch <= '0;
    end else begin
      if (busy) begin
        if (bits != '0) begin
          if (inv_ready) vb[line] <= 1'b0;
        end else if (int'(ch) == NCHUNK - 1) begin
          ch <= '0;
          todo[t] <= 1'b0;
        end else ch <= ch + 1'b1;
      end else if (start) begin
        todo <= tiles;
        ch   <= '0;
      end
      if (rd_valid) vb[rd_line] <= 1'b1;
    end
  end
endmodule
