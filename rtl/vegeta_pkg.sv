// vegeta_pkg: types and constants shared by the VEGETA sparse/dense tile engine.
//
// The numbers follow the engine's main configuration, VEGETA-S-2-2: a 16 x 8 array of
// sparse processing elements (SPEs), each holding ALPHA = 2 sparse processing units (SPUs)
// of BETA = 2 BF16 MAC lanes, 512 MACs in all, block size M = 4.  Tile registers are 1 KB
// (16 rows of 64 B), eight of them, aliased in pairs as 2 KB "ureg" and in fours as 4 KB
// "vreg"; metadata registers are 128 B (16 rows of 8 B).  Operands are BF16, the
// accumulator tile is FP32.
//
// Own choices, not given by the paper: the opcode encoding, the way register operands are
// written (index of the first 1 KB tile register plus a size), the 2-bit code of a row's N:4
// pattern (0 = 4:4, 1 = 2:4, 2 = 1:4), and the memory request format.
package vegeta_pkg;

  // ---- element formats -------------------------------------------------------------
  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  // ---- block size and array geometry (VEGETA-S-2-2) --------------------------------
  localparam int unsigned M          = 4;    // block size of N:M sparsity
  localparam int unsigned IDX_W      = 2;    // log2(M): bits of one metadata index
  localparam int unsigned BETA       = 2;    // reduction factor, M/2 for SPEs
  localparam int unsigned N_ROWS     = 16;   // 32 effectual MACs per output / BETA
  localparam int unsigned TOTAL_MACS = 512;
  localparam int unsigned T_N        = 16;   // columns of B (and C) per tile instruction
  localparam int unsigned C_ROWS     = 16;   // rows of the C tile of tile-wise instructions
  localparam int unsigned N_GROUPS   = TOTAL_MACS / (N_ROWS * 4); // 4-MAC column groups (8)
  localparam int unsigned MAX_RW_ROWS = 32;  // most rows of a row-wise sparse A tile

  // ---- register file geometry --------------------------------------------------------
  localparam int unsigned N_TREG     = 8;
  localparam int unsigned TREG_ROWS  = 16;
  localparam int unsigned ROW_BYTES  = 64;
  localparam int unsigned ROW_W      = ROW_BYTES * 8;          // 512 bits
  localparam int unsigned RF_ROWS    = N_TREG * TREG_ROWS;     // 128 rows of 64 B
  localparam int unsigned RF_ROW_AW  = $clog2(RF_ROWS);
  localparam int unsigned N_MREG     = 8;
  localparam int unsigned MROW_W     = 64;                     // 8 B metadata row
  localparam int unsigned MF_ROWS    = N_MREG * TREG_ROWS;     // 128 metadata rows
  localparam int unsigned BF_PER_ROW = ROW_W / 16;             // 32 BF16 per row
  localparam int unsigned FP_PER_ROW = ROW_W / 32;             // 16 FP32 per row

  typedef logic [M*16-1:0]      blk_t;     // one block of M BF16 input elements
  typedef logic [IDX_W-1:0]     idx_t;     // position of a non-zero inside its block
  typedef logic [ROW_W-1:0]     row_t;
  typedef logic [MROW_W-1:0]    mrow_t;
  typedef logic [RF_ROW_AW-1:0] rf_row_addr_t;

  // ---- sparsity modes ---------------------------------------------------------------
  typedef enum logic [1:0] {
    MODE_4_4 = 2'd0,   // TILE_GEMM, dense A
    MODE_2_4 = 2'd1,   // TILE_SPMM_U
    MODE_1_4 = 2'd2,   // TILE_SPMM_V
    MODE_ROW = 2'd3    // TILE_SPMM_R, row-wise N:4
  } mode_e;

  // Per-row (row-wise) or per-group pattern code.
  typedef enum logic [1:0] {
    PAT_4_4 = 2'd0,
    PAT_2_4 = 2'd1,
    PAT_1_4 = 2'd2,
    PAT_NONE = 2'd3    // row absent / group unused
  } pat_e;

  // ---- instruction set --------------------------------------------------------------
  typedef enum logic [3:0] {
    OP_TILE_LOAD_T  = 4'd0,
    OP_TILE_LOAD_U  = 4'd1,
    OP_TILE_LOAD_V  = 4'd2,
    OP_TILE_LOAD_M  = 4'd3,
    OP_TILE_STORE_T = 4'd4,
    OP_TILE_GEMM    = 4'd5,
    OP_TILE_SPMM_U  = 4'd6,
    OP_TILE_SPMM_V  = 4'd7,
    OP_TILE_SPMM_R  = 4'd8
  } opcode_e;

  // One decoded VEGETA instruction.  Register fields hold the architectural index of the
  // operand in its own class (treg 0-7, ureg 0-3, vreg 0-1, mreg 0-7).
  typedef struct packed {
    opcode_e     op;
    logic [2:0]  dst;      // dst (= src0) of GEMM/SPMM, destination of loads
    logic [2:0]  src1;     // A tile (treg) of GEMM/SPMM, source of TILE_STORE_T
    logic [2:0]  src2;     // B tile (treg/ureg/vreg by opcode)
    logic [2:0]  msrc;     // metadata register of A for sparse instructions
    logic [31:0] addr;     // byte address of the first row (loads / stores)
    logic [31:0] stride;   // byte distance between rows (loads / stores)
    logic [63:0] rowcfg;   // TILE_SPMM_R: 2-bit pat_e per A row, row 0 in bits 1:0
  } instr_t;

  // A tile-multiply operation as the engine sees it: registers already turned into
  // row ranges of the register file.
  typedef struct packed {
    mode_e                mode;
    logic [2:0]           c_treg;   // first 1 KB register of C (dst = src0)
    logic [2:0]           a_treg;   // A (non-zero values)
    logic [2:0]           b_treg;   // first 1 KB register of B
    logic [2:0]           mreg;     // metadata of A
    logic [63:0]          rowcfg;   // per-row pattern codes (row-wise only)
  } eng_op_t;

  // Number of 1 KB registers spanned by B and C of each mode.
  function automatic int unsigned b_size(mode_e m);
    case (m)
      MODE_4_4: return 1;
      MODE_2_4: return 2;
      MODE_1_4: return 4;
      default:  return 2;
    endcase
  endfunction

  function automatic int unsigned c_size(mode_e m);
    return (m == MODE_ROW) ? 2 : 1;
  endfunction

  // ---- memory side ------------------------------------------------------------------
  typedef struct packed {
    logic        we;
    logic [31:0] addr;     // byte address of a 64 B line
    row_t        wdata;
  } mem_req_t;

endpackage
