// dx100_request_generator: picks which Row Table slice sends the next request.
//
// Each cycle at most one of NSLICES slices offering a request (req) is granted
// (gnt, one-hot), provided the downstream path can take it (out_ready);
// gnt_idx/gnt_valid name the slice on offer whether or not it is taken. The
// choice is round robin over the slice number, starting after the last slice
// granted. Slice numbers are {BA, BG, CH} with the channel in the least
// significant bit, so consecutive grants alternate first between channels and
// then between bank groups, which is the fixed interleaving order the paper
// describes. The slice's bank coordinates and its row and column are then
// composed into a line address by the caller (addr_compose).
module dx100_request_generator #(
  parameter int unsigned NSLICES = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NSLICES-1:0]         req,
  input  logic                       out_ready,
  output logic [NSLICES-1:0]         gnt,
  output logic [$clog2(NSLICES)-1:0] gnt_idx,
  output logic                       gnt_valid
);
  localparam int unsigned SW = $clog2(NSLICES);
  logic [SW-1:0] last;

  always_comb begin
    gnt_idx   = '0;
    gnt_valid = 1'b0;
    for (int k = NSLICES; k >= 1; k--) begin
      int unsigned s;
      s = (int'(last) + k) % NSLICES;
      if (req[s]) begin gnt_valid = 1'b1; gnt_idx = SW'(s); end
    end
  end

  always_comb begin
    gnt = '0;
    if (gnt_valid && out_ready) gnt[gnt_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= SW'(NSLICES - 1);
    else if (gnt_valid && out_ready) last <= gnt_idx;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
