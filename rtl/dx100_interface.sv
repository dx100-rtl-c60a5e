// dx100_interface: DX100's Core, Cache and Memory interfaces.
//
// Core IF: the cores reach DX100 through memory-mapped accesses, one per cycle
// (core_req_*), each answered one cycle later for reads (core_rsp_*). The map:
//   0x4_0000_0000 + 2 MB   scratchpad data, 64-byte lines (cacheable; a read
//                          marks the line in the coherency agent, a write sets
//                          the words' finish bits)
//   0x4_0020_0000 + 64 B   tile sizes, 16 bits per tile, read only
//   0x4_0020_0040 + 64 B   tile ready bits, 16 bits per tile, read only
//   0x4_0020_0080 + 1 KB   register file, 8 bytes per register
//   0x4_0020_0480 + 24 B   instruction words 0..2 (write only)
//   0x4_0020_1000 + 2 KB   TLB entries, 8 bytes each (write only)
// Register, size, ready and instruction accesses use the low 64 bits of the
// line-wide data. A write to the instruction window waits (core_req_ready=0)
// while the controller's queue is full.
// Cache IF / Memory IF: line requests of the Stream unit always go to the
// cache; those of the Indirect unit go to the cache when their H bit is set
// and straight to the memory controllers otherwise. The Indirect unit wins the
// cache port when both ask. Responses go back by tag (bit 7 set: Indirect).
// The TLB lives here and serves both units.
// The first five regions and their addresses are those of the paper's memory
// map; the TLB window, response timing, access width and arbitration are this
// design's choices.
module dx100_interface
  import dx100_pkg::*;
#(
  parameter int unsigned NTILES = 32,
  parameter int unsigned TILE   = 16384,
  parameter int unsigned NREGS  = 32,
  parameter int unsigned TLB_ENTRIES = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  // core side
  input  logic              core_req_valid,
  input  logic              core_req_write,
  input  paddr_t            core_req_addr,
  input  line_t             core_req_wdata,
  output logic              core_req_ready,
  output logic              core_rsp_valid,
  output line_t             core_rsp_data,
  // scratchpad port 0 and tile status
  output spd_req_t          spd_req,
  input  spd_rsp_t          spd_rsp,
  input  idx_t              size [NTILES],
  input  logic [NTILES-1:0] ready,
  // register file
  output logic              rf_we,
  output logic [$clog2(NREGS)-1:0] rf_addr,
  output logic [63:0]       rf_wdata,
  input  logic [63:0]       rf_rdata,
  // controller
  output logic              instr_we,
  output logic [1:0]        instr_widx,
  output logic [63:0]       instr_wdata,
  input  logic              instr_ready,
  // coherency agent
  output logic              coh_rd_valid,
  output logic [$clog2(NTILES*TILE/16)-1:0] coh_rd_line,
  // translation for the two units (0 stream, 1 indirect)
  input  logic              tlb_valid [2],
  input  logic [VA_W-1:0]   tlb_va [2],
  output paddr_t            tlb_pa [2],
  output logic              tlb_hit [2],
  output logic              tlb_miss,
  // unit requests / responses
  input  logic              s_req_valid,
  input  mem_req_t          s_req,
  output logic              s_req_ready,
  output logic              s_rsp_valid,
  output mem_rsp_t          s_rsp,
  input  logic              s_rsp_ready,
  input  logic              i_req_valid,
  input  mem_req_t          i_req,
  output logic              i_req_ready,
  output logic              i_rsp_valid,
  output mem_rsp_t          i_rsp,
  input  logic              i_rsp_ready,
  // Cache IF
  output logic              cache_req_valid,
  output mem_req_t          cache_req,
  input  logic              cache_req_ready,
  input  logic              cache_rsp_valid,
  input  mem_rsp_t          cache_rsp,
  output logic              cache_rsp_ready,
  // Memory IF
  output logic              mem_req_valid,
  output mem_req_t          mem_req,
  input  logic              mem_req_ready,
  input  logic              mem_rsp_valid,
  input  mem_rsp_t          mem_rsp,
  output logic              mem_rsp_ready
);
  localparam paddr_t SPD_BASE  = 40'h04_0000_0000;
  localparam paddr_t CTRL_BASE = 40'h04_0020_0000;
  localparam longint unsigned SPD_BYTES = longint'(NTILES) * TILE * 4;
  localparam int unsigned LPT = TILE / 16;

  // ---------------- Core IF ----------------
  logic   is_spd, is_size, is_ready, is_rf, is_ins, is_tlb;
  paddr_t off, coff;
  assign off  = core_req_addr - SPD_BASE;
  assign coff = core_req_addr - CTRL_BASE;
  always_comb begin
    is_spd   = core_req_addr >= SPD_BASE && longint'(off) < SPD_BYTES;
    is_size  = core_req_addr >= CTRL_BASE && coff < 40'h40;
    is_ready = core_req_addr >= CTRL_BASE && coff >= 40'h40 && coff < 40'h80;
    is_rf    = core_req_addr >= CTRL_BASE && coff >= 40'h80 && coff < 40'h80 + 40'(NREGS * 8);
    is_ins   = core_req_addr >= CTRL_BASE && coff >= 40'h480 && coff < 40'h498;
    is_tlb   = core_req_addr >= CTRL_BASE && coff >= 40'h1000 && coff < 40'h1000 + 40'(TLB_ENTRIES * 8);
  end

  logic [31:0] spd_line;   // line number within the scratchpad
  assign spd_line = 32'(off >> 6);
  assign core_req_ready = !(is_ins && core_req_write && !instr_ready);

  logic acc;
  assign acc = core_req_valid && core_req_ready;

  always_comb begin
    spd_req = '0;
    if (acc && is_spd) begin
      spd_req.valid = 1'b1;
      spd_req.tile  = tile_t'(spd_line / LPT);
      spd_req.line  = 12'(spd_line % LPT);
      if (core_req_write) begin
        spd_req.wmask = '1;
        spd_req.fmask = '1;
        spd_req.wdata = core_req_wdata;
      end
    end
  end

  assign rf_addr      = ($bits(rf_addr))'((coff - 40'h80) >> 3);
  assign rf_we        = acc && core_req_write && is_rf;
  assign rf_wdata     = core_req_wdata[1:0];
  assign instr_we     = acc && core_req_write && is_ins;
  assign instr_widx   = 2'((coff - 40'h480) >> 3);
  assign instr_wdata  = core_req_wdata[1:0];
  assign coh_rd_valid = acc && !core_req_write && is_spd;
  assign coh_rd_line  = ($bits(coh_rd_line))'(spd_line);

  // status words: four 16-bit fields per 8 bytes
  logic [63:0] stat_word;
  always_comb begin
    int unsigned t0;
    t0 = int'((coff & 40'h3F) >> 1);
    stat_word = '0;
    for (int k = 0; k < 4; k++)
      if (t0 + k < NTILES)
        stat_word[16*k +: 16] = is_size ? 16'(size[t0 + k]) : {15'b0, ready[t0 + k]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      core_rsp_valid <= 1'b0;
      core_rsp_data  <= '0;
    end else begin
      core_rsp_valid <= acc && !core_req_write;
      core_rsp_data  <= '0;
      if (is_spd)                core_rsp_data <= spd_rsp.rdata;
      else if (is_rf)            core_rsp_data[1:0] <= rf_rdata;
      else if (is_size || is_ready) core_rsp_data[1:0] <= stat_word;
    end
  end

  // ---------------- TLB ----------------
  logic tlb_err;
  dx100_tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n,
    .we(acc && core_req_write && is_tlb),
    .widx(($clog2(TLB_ENTRIES))'((coff - 40'h1000) >> 3)),
    .wdata(core_req_wdata[1:0]),
    .va(tlb_va), .pa(tlb_pa), .hit(tlb_hit));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tlb_err <= 1'b0;
    else if ((tlb_valid[0] && !tlb_hit[0]) || (tlb_valid[1] && !tlb_hit[1])) tlb_err <= 1'b1;
  end
  assign tlb_miss = tlb_err;

  // ---------------- Cache IF / Memory IF ----------------
  logic i_to_cache;
  assign i_to_cache = i_req.to_cache;
  always_comb begin
    cache_req_valid = 1'b0;
    cache_req       = s_req;
    s_req_ready     = 1'b0;
    i_req_ready     = i_to_cache ? cache_req_ready : mem_req_ready;
    mem_req_valid   = i_req_valid && !i_to_cache;
    mem_req         = i_req;
    if (i_req_valid && i_to_cache) begin
      cache_req_valid = 1'b1;
      cache_req       = i_req;
    end else begin
      cache_req_valid = s_req_valid;
      s_req_ready     = cache_req_ready;
    end
    // responses
    s_rsp       = cache_rsp;
    s_rsp_valid = cache_rsp_valid && !cache_rsp.tag[7];
    if (mem_rsp_valid) begin
      i_rsp       = mem_rsp;
      i_rsp_valid = 1'b1;
      mem_rsp_ready   = i_rsp_ready;
      cache_rsp_ready = cache_rsp.tag[7] ? 1'b0 : s_rsp_ready;
    end else begin
      i_rsp       = cache_rsp;
      i_rsp_valid = cache_rsp_valid && cache_rsp.tag[7];
      mem_rsp_ready   = 1'b0;
      cache_rsp_ready = cache_rsp.tag[7] ? i_rsp_ready : s_rsp_ready;
    end
  end
endmodule
