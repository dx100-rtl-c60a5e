// tb_mem_model: behavioural model of the memory system seen by DX100 (the
// LLC on port 0, the DRAM controllers on port 1), for testbenches only.
// Both ports share one backing store. A line read is answered after LAT
// cycles, in order per port; a write updates the store at once and gets no
// response. Untouched memory holds init_word(address) = (address/4)*3 + 1.
// Per DRAM bank it remembers the last row read to count row-buffer hits
// (requests that find their bank's row open), and it counts requests whose
// channel differs from the previous request's.
module tb_mem_model
  import dx100_pkg::*;
#(
  parameter int LAT   = 20,
  parameter int STALL = 0       // percent of cycles a port refuses requests
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid [2],
  input  mem_req_t req [2],
  output logic     req_ready [2],
  output logic     rsp_valid [2],
  output mem_rsp_t rsp [2],
  input  logic     rsp_ready [2]
);
  line_t mem [paddr_t];
  typedef struct { mem_rsp_t r; longint t; } pend_t;
  pend_t q [2][$];
  longint now = 0;
  int reads [2], writes [2], row_hits = 0, ch_switches = 0;
  logic [RO_W-1:0] open_row [32];
  logic            open_v   [32];
  int last_ch = -1;

  function automatic word_t init_word(paddr_t a);
    return word_t'(a >> 2) * 3 + 1;
  endfunction
  function automatic line_t get_line(paddr_t a);
    line_t l;
    if (mem.exists(a)) return mem[a];
    for (int w = 0; w < 16; w++) l[w] = init_word(a + paddr_t'(4 * w));
    return l;
  endfunction
  function automatic word_t get_word(paddr_t a);
    line_t l;
    l = get_line({a[PA_W-1:6], 6'b0});
    return l[a[5:2]];
  endfunction

  always_ff @(posedge clk) now <= now + 1;
  initial begin
    for (int b = 0; b < 32; b++) open_v[b] = 0;
    reads = '{0, 0}; writes = '{0, 0};
  end

  for (genvar p = 0; p < 2; p++) begin : g_port
    logic stall;
    always_ff @(posedge clk) stall <= ($urandom_range(0, 99) < STALL);
    assign req_ready[p] = !stall;
    assign rsp_valid[p] = q[p].size() > 0 && q[p][0].t <= now;
    assign rsp[p]       = q[p].size() > 0 ? q[p][0].r : '0;
    always @(posedge clk) if (rst_n) begin
      if (rsp_valid[p] && rsp_ready[p]) void'(q[p].pop_front());
      if (req_valid[p] && req_ready[p]) begin
        dram_coord_t c;
        c = addr_decode(req[p].addr);
        if (int'(c.slice[0]) != last_ch && last_ch >= 0) ch_switches++;
        last_ch = int'(c.slice[0]);
        if (open_v[c.slice] && open_row[c.slice] == c.ro) row_hits++;
        open_v[c.slice] = 1; open_row[c.slice] = c.ro;
        if (req[p].write) begin
          mem[req[p].addr] = req[p].data;
          writes[p]++;
        end else begin
          pend_t e;
          e.r.addr = req[p].addr; e.r.tag = req[p].tag; e.r.data = get_line(req[p].addr);
          e.t = now + LAT;
          q[p].push_back(e);
          reads[p]++;
        end
      end
    end
  end
endmodule
