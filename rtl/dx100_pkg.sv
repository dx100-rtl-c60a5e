// dx100_pkg: types and constants shared by the DX100 data-access accelerator.
//
// DX100 executes bulk ("tile"-granular) streaming, indirect, ALU and range-loop
// instructions on behalf of host cores. This package holds the eight-opcode ISA,
// the data types and ALU operations named by the ISA, the 192-bit instruction
// word, the scratchpad port bundle, the cache/memory request bundle and the
// mapping between physical addresses and DRAM coordinates.
//
// Follows the paper: opcode set, operand names (DTYPE BASE OP TD TS RS TC),
// operation names, 192-bit instruction carried by three 64-bit stores, 32 tiles
// of 16K 4-byte words, 64-byte lines. This design's own choices: the bit layout
// of the instruction, the DRAM address map (line offset 6b, CH 1b, BG 2b,
// BA 2b, CO 7b, RO 16b, one rank) and the shape of the port structs.
package dx100_pkg;

  localparam int unsigned NTILES_MAX = 32;      // tiles addressable by a 5-bit operand
  localparam int unsigned LINE_WORDS = 16;      // 64-byte line of 4-byte words
  localparam int unsigned PA_W       = 40;      // physical address width
  localparam int unsigned VA_W       = 48;      // virtual address width
  localparam int unsigned IDX_W      = 16;      // element index / tile size width

  typedef logic [IDX_W-1:0]  idx_t;
  typedef logic [4:0]        tile_t;
  typedef logic [31:0]       word_t;
  typedef logic [PA_W-1:0]   paddr_t;
  typedef word_t [LINE_WORDS-1:0] line_t;

  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_ILD  = 4'd1, OP_IST  = 4'd2, OP_IRMW = 4'd3,
    OP_SLD  = 4'd4, OP_SST  = 4'd5,
    OP_ALUV = 4'd6, OP_ALUS = 4'd7,
    OP_RNG  = 4'd8
  } opcode_t;

  typedef enum logic [2:0] {
    DT_U32 = 3'd0, DT_I32 = 3'd1, DT_F32 = 3'd2,
    DT_U64 = 3'd3, DT_I64 = 3'd4, DT_F64 = 3'd5
  } dtype_t;

  typedef enum logic [3:0] {
    ALU_ADD = 4'd0,  ALU_SUB = 4'd1,  ALU_MUL = 4'd2,  ALU_MIN = 4'd3,
    ALU_MAX = 4'd4,  ALU_AND = 4'd5,  ALU_OR  = 4'd6,  ALU_XOR = 4'd7,
    ALU_SHR = 4'd8,  ALU_SHL = 4'd9,  ALU_LT  = 4'd10, ALU_LE  = 4'd11,
    ALU_GT  = 4'd12, ALU_GE  = 4'd13, ALU_EQ  = 4'd14
  } aluop_t;

  // 192-bit instruction; word 0 is bits [63:0], word 1 the BASE address,
  // word 2 reserved. Unused operands of an opcode are ignored.
  typedef struct packed {
    logic [63:0] rsvd;
    logic [63:0] base;
    logic [11:0] pad;
    logic [4:0]  rs3;     // stride register (SLD/SST)
    logic [4:0]  rs2;     // loop end register (SLD/SST)
    logic [4:0]  rs1;     // loop start register (SLD/SST) or scalar (ALUS)
    logic        tc_en;   // 1: the instruction is conditioned on tile TC
    tile_t       tc;
    tile_t       ts2;
    tile_t       ts1;     // TS1, or TS of SST/ALUS
    tile_t       td2;
    tile_t       td1;     // TD, or TD1 of RNG
    aluop_t      op;
    dtype_t      dtype;
    opcode_t     opcode;
  } instr_t;

  // Instruction as handed to a functional unit, with its register operands read.
  typedef struct packed {
    instr_t      ins;
    logic [63:0] r1;
    logic [63:0] r2;
    logic [63:0] r3;
  } issue_t;

  // Scratchpad port: one line (16 words) of one tile per cycle.
  typedef struct packed {
    logic                  valid;
    tile_t                 tile;
    logic [11:0]           line;    // element index / 16
    logic [LINE_WORDS-1:0] wmask;   // words whose data is written
    logic [LINE_WORDS-1:0] fmask;   // words whose finish bit is set
    line_t                 wdata;
  } spd_req_t;

  typedef struct packed {
    line_t                 rdata;
    logic [LINE_WORDS-1:0] rfinish;
  } spd_rsp_t;

  // Line request towards the cache or the memory controllers.
  typedef struct packed {
    paddr_t      addr;     // line aligned
    logic        write;
    logic        to_cache; // 1: Cache IF (LLC), 0: Memory IF (DRAM controller)
    logic [7:0]  tag;
    line_t       data;
  } mem_req_t;

  typedef struct packed {
    paddr_t      addr;
    logic [7:0]  tag;
    line_t       data;
  } mem_rsp_t;

  // DRAM coordinates of a physical address.
  localparam int unsigned CO_W = 7;
  localparam int unsigned RO_W = 16;
  localparam int unsigned SLICE_W = 5;   // {BA, BG, CH}: channel in the LSB

  typedef struct packed {
    logic [RO_W-1:0]    ro;
    logic [CO_W-1:0]    co;
    logic [SLICE_W-1:0] slice;
    logic [3:0]         wo;
  } dram_coord_t;

  function automatic dram_coord_t addr_decode(paddr_t pa);
    dram_coord_t c;
    c.wo    = pa[5:2];
    c.slice = {pa[10:9], pa[8:7], pa[6]};   // BA, BG, CH
    c.co    = pa[17:11];
    c.ro    = pa[33:18];
    return c;
  endfunction

  function automatic paddr_t addr_compose(logic [SLICE_W-1:0] slice,
                                          logic [RO_W-1:0] ro, logic [CO_W-1:0] co);
    paddr_t pa;
    pa        = '0;
    pa[6]     = slice[0];
    pa[8:7]   = slice[2:1];
    pa[10:9]  = slice[4:3];
    pa[17:11] = co;
    pa[33:18] = ro;
    return pa;
  endfunction

  // One ALU lane on 32-bit integer types; also used by IRMW.
  function automatic word_t alu_apply(aluop_t op, dtype_t dt, word_t a, word_t b);
    logic sgn;
    logic lt;
    sgn = (dt == DT_I32);
    lt  = sgn ? ($signed(a) < $signed(b)) : (a < b);
    case (op)
      ALU_ADD: return a + b;
      ALU_SUB: return a - b;
      ALU_MUL: return a * b;
      ALU_MIN: return lt ? a : b;
      ALU_MAX: return lt ? b : a;
      ALU_AND: return a & b;
      ALU_OR:  return a | b;
      ALU_XOR: return a ^ b;
      ALU_SHR: return sgn ? word_t'($signed(a) >>> b[4:0]) : (a >> b[4:0]);
      ALU_SHL: return a << b[4:0];
      ALU_LT:  return {31'b0, lt};
      ALU_LE:  return {31'b0, lt | (a == b)};
      ALU_GT:  return {31'b0, ~lt & (a != b)};
      ALU_GE:  return {31'b0, ~lt};
      ALU_EQ:  return {31'b0, a == b};
      default: return '0;
    endcase
  endfunction

endpackage
