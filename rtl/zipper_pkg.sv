// zipper_pkg: types and constants shared by the ZIPPER accelerator blocks.
//
// Data: an embedding element is a 16-bit signed fixed-point number with 8
// fraction bits (Q8.8); one memory word of the unified embedding memory (UEM)
// holds LANES = 32 elements, matching the 32-wide SIMD cores. A 128-wide
// embedding is therefore 4 words. These widths are this design's choice.
//
// Instructions: the opcode set is the ISA of the architecture (computational
// ELW / GEMM / GOP, data-transfer, synchronization), plus WAIT and SIGNAL.S
// which the example programs use. The binary encoding (instr_t) is this
// design's own. An instruction names its row count indirectly (rows_sel), so
// the same program works on tiles of any size: the scheduler resolves it from
// the tile metadata into a micro-op (uop_t) with absolute UEM addresses.
package zipper_pkg;

  localparam int unsigned LANES  = 32;
  localparam int unsigned EW     = 16;           // element width, Q8.8
  localparam int unsigned FRAC   = 8;
  localparam int unsigned WORD_W = LANES * EW;   // 512-bit UEM word
  localparam int unsigned UAW    = 20;           // UEM word address width
  localparam int unsigned TAW    = 16;           // tile hub word address width
  localparam int unsigned OAW    = 32;           // off-chip word address width
  localparam int unsigned SIDW   = 4;            // stream id width
  localparam int unsigned META_W = 160;

  typedef logic [WORD_W-1:0] word_t;

  typedef enum logic [5:0] {
    OP_NOP      = 6'd0,
    // ELW (vector unit)
    OP_ADD      = 6'd1,
    OP_SUB      = 6'd2,
    OP_MUL      = 6'd3,
    OP_DIV      = 6'd4,
    OP_EXP      = 6'd5,
    OP_RELU     = 6'd6,
    OP_GEMV     = 6'd7,
    // GEMM (matrix unit)
    OP_GEMM     = 6'd8,
    // GOP (vector unit)
    OP_GTHR_SUM = 6'd10,
    OP_GTHR_MAX = 6'd11,
    OP_SCTR_OUTE= 6'd12,
    OP_SCTR_INE = 6'd13,
    // data transfer (memory controller)
    OP_LD_DST   = 6'd16,
    OP_LD_SRC   = 6'd17,
    OP_LD_EDGE  = 6'd18,
    OP_ST_DST   = 6'd19,
    // synchronization (scheduler)
    OP_WAIT     = 6'd24,
    OP_SIGNAL_S = 6'd25,
    OP_SIGNAL_E = 6'd26,
    OP_FCH_TILE = 6'd27,
    OP_FCH_PTT  = 6'd28,
    OP_UPD_PTT  = 6'd29,
    OP_CHK_PTT  = 6'd30
  } opcode_e;

  typedef enum logic [1:0] {
    ROWS_LIT  = 2'd0,   // rows_lit
    ROWS_SRC  = 2'd1,   // source vertices kept in the stream's tile
    ROWS_EDGE = 2'd2,   // edges of the stream's tile
    ROWS_DST  = 2'd3    // destination vertices of the current partition
  } rows_sel_e;

  typedef enum logic [1:0] {
    B_ROW    = 2'd0,    // operand B is a per-row vector
    B_SHARED = 2'd1,    // operand B is one vector shared by all rows
    B_SCALAR = 2'd2     // operand B is lane 0 of the row's first word
  } bmode_e;

  typedef enum logic [1:0] {
    FN_D = 2'd0,
    FN_S = 2'd1,
    FN_E = 2'd2
  } fn_e;

  typedef enum logic [1:0] {
    UC_SYNC = 2'd0,
    UC_MU   = 2'd1,
    UC_VU   = 2'd2,
    UC_MC   = 2'd3
  } uclass_e;

  // Program instruction, as stored in the scheduler's program memories.
  typedef struct packed {
    opcode_e    op;
    rows_sel_e  rows_sel;
    logic [15:0] rows_lit;
    logic [3:0] kw;        // words per row of operand A (data dimension / 32)
    logic [3:0] nw;        // words per output row for GEMM
    bmode_e     bmode;
    logic       a_rel;     // address relative to the stream pair's UEM slot
    logic       b_rel;
    logic       d_rel;
    logic [UAW-1:0] a_addr;
    logic [UAW-1:0] b_addr;
    logic [UAW-1:0] d_addr;
    logic [OAW-1:0] imm;   // off-chip base (data transfer)
  } instr_t;

  // Resolved micro-op handed from scheduler to dispatcher and units.
  typedef struct packed {
    opcode_e    op;
    logic [SIDW-1:0] sid;
    logic [1:0] slot;      // tile hub slot of the stream pair
    logic [15:0] rows;
    logic [3:0] kw;
    logic [3:0] nw;
    bmode_e     bmode;
    logic [UAW-1:0] a_addr;
    logic [UAW-1:0] b_addr;
    logic [UAW-1:0] d_addr;
    logic [OAW-1:0] imm;
    logic [31:0] gbase;    // first global vertex / edge id (LD.DST, ST.DST, LD.EDGE)
  } uop_t;

  // Tile metadata entry (one per tile, dense array in the tile hub).
  typedef struct packed {
    logic [31:0] topo_addr;  // off-chip word address of the tile topology block
    logic [31:0] edge_off;   // global id of the tile's first edge
    logic [31:0] dst_base;   // global id of the partition's first destination
    logic [15:0] num_dst;
    logic [15:0] num_edges;
    logic [15:0] num_src;
    logic [15:0] ptt;        // destination partition id
  } meta_t;

  // Tile hub slot layout (32-bit words).
  localparam int unsigned TH_EDGE_OFF = 0;      // {dst_local, src_local} per edge
  localparam int unsigned TH_SRC_OFF  = 8192;   // global source vertex ids
  localparam int unsigned TH_DOFF_OFF = 12288;  // per-destination edge offsets (num_dst+1)

  function automatic uclass_e op_class(opcode_e op);
    case (op)
      OP_GEMM: return UC_MU;
      OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_EXP, OP_RELU, OP_GEMV,
      OP_GTHR_SUM, OP_GTHR_MAX, OP_SCTR_OUTE, OP_SCTR_INE: return UC_VU;
      OP_LD_DST, OP_LD_SRC, OP_LD_EDGE, OP_ST_DST: return UC_MC;
      default: return UC_SYNC;
    endcase
  endfunction

  // Q8.8 helpers
  function automatic logic signed [EW-1:0] sat16(logic signed [47:0] v);
    if (v > 48'sd32767) return 16'sh7fff;
    if (v < -48'sd32768) return 16'sh8000;
    return v[EW-1:0];
  endfunction

endpackage
