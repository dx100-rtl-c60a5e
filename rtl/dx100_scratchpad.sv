// dx100_scratchpad: the tile store shared by all DX100 units and the cores.
//
// NTILES tiles of TILE 32-bit elements (32 x 16K = 2 MB by default), NPORTS
// independent ports. Each port reads or writes one 16-word line of one tile per
// cycle; reads are combinational (data valid in the cycle of the request),
// writes take effect at the clock edge. Besides the data the scratchpad keeps,
// as the paper describes, a size and a ready bit per tile and a finish bit per
// element. A unit that produces element i sets its finish bit (fmask); a unit
// that consumes the tile can then use it before the producer has ended.
// clr_* (one per destination tile of an issuing instruction) clears a tile's
// finish bits and size. The size of a tile grows to the highest finished
// element + 1, so a consumer sees how far a producer has got.
// Ready bits: cleared by ready_clr, set by ready_set (controller, at dispatch
// and retire); the cores poll them to synchronise.
// Design choices: line-wide ports with word masks, combinational read, size
// tracking by highest finished element. Storage is line-wide: a data memory of
// 16-word lines with one write enable per word, and a finish memory of 16-bit
// masks per line. Clearing a whole tile in one cycle is done with one valid
// bit per finish line, kept in flip-flops: a clear resets the valid bits of
// the tile's lines, a line with its valid bit low reads as all-clear, and its
// first write after a clear rewrites the whole mask and sets the bit. Both
// memories therefore map onto SRAM macros with bit write enables.
// If two ports write the same word in one cycle the higher port number wins.
// The two memories are not reset; sizes, ready and line valid bits are.
module dx100_scratchpad
  import dx100_pkg::*;
#(
  parameter int unsigned NTILES = 32,
  parameter int unsigned TILE   = 16384,
  parameter int unsigned NPORTS = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  spd_req_t              req   [NPORTS],
  output spd_rsp_t              rsp   [NPORTS],
  input  logic      [1:0]       clr_valid,
  input  tile_t     [1:0]       clr_tile,
  input  logic [NTILES-1:0]     ready_clr,
  input  logic [NTILES-1:0]     ready_set,
  output logic [NTILES-1:0]     ready,
  output idx_t                  size  [NTILES]
);
  localparam int unsigned LPT = TILE / LINE_WORDS;   // lines per tile

  localparam int unsigned NL  = NTILES * LPT;

  line_t               mem   [NL];           // data lines
  logic [LINE_WORDS-1:0] fin [NL];           // finish bits per line
  logic [NL-1:0]       fv;                   // finish line written since its tile's last clear
  logic [NTILES-1:0]   clr_now;              // tiles cleared in this cycle

  function automatic int unsigned laddr(tile_t t, logic [11:0] l);
    return int'(t) * LPT + (int'(l) % LPT);
  endfunction

  always_comb begin
    clr_now = '0;
    for (int k = 0; k < 2; k++)
      if (clr_valid[k]) clr_now[clr_tile[k]] = 1'b1;
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      rsp[p].rdata   = mem[laddr(req[p].tile, req[p].line)];
      rsp[p].rfinish = fv[laddr(req[p].tile, req[p].line)]
                     ? fin[laddr(req[p].tile, req[p].line)] : '0;
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++)
      if (req[p].valid)
        for (int w = 0; w < LINE_WORDS; w++)
          if (req[p].wmask[w]) mem[laddr(req[p].tile, req[p].line)][w] <= req[p].wdata[w];
  end

  // finish memory: a stale line is rewritten whole, a current one bit by bit
  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++)
      if (req[p].valid && req[p].fmask != '0) begin
        if (!fv[laddr(req[p].tile, req[p].line)] || clr_now[req[p].tile]) begin
          fin[laddr(req[p].tile, req[p].line)] <= req[p].fmask;
        end else begin
          for (int w = 0; w < LINE_WORDS; w++)
            if (req[p].fmask[w]) fin[laddr(req[p].tile, req[p].line)][w] <= 1'b1;
        end
      end
  end

  // line valid bits, sizes and ready bits
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NTILES; t++) size[t] <= '0;
      fv    <= '0;
      ready <= '1;
    end else begin
      for (int t = 0; t < NTILES; t++)
        if (clr_now[t]) fv[t*LPT +: LPT] <= '0;
      for (int p = 0; p < NPORTS; p++)
        if (req[p].valid && req[p].fmask != '0) fv[laddr(req[p].tile, req[p].line)] <= 1'b1;
      for (int k = 0; k < 2; k++)
        if (clr_valid[k]) size[clr_tile[k]] <= '0;
      for (int p = 0; p < NPORTS; p++)
        if (req[p].valid && req[p].fmask != '0) begin
          idx_t top;
          top = '0;
          for (int w = 0; w < LINE_WORDS; w++)
            if (req[p].fmask[w])
              top = idx_t'((int'(req[p].line) % LPT) * LINE_WORDS + w + 1);
          if (top > size[req[p].tile] || (clr_valid[0] && clr_tile[0] == req[p].tile)
                                      || (clr_valid[1] && clr_tile[1] == req[p].tile))
            size[req[p].tile] <= top;
        end
      ready <= (ready & ~ready_clr) | ready_set;
    end
  end

endmodule
