// vegeta_top: a VEGETA tile unit as seen by a host core: tile and metadata registers, a tile
// load/store unit and a VEGETA-S matrix engine behind one port for decoded instructions.
//
// Instructions (Table II of the ISA): TILE_LOAD_T/U/V, TILE_LOAD_M, TILE_STORE_T, TILE_GEMM,
// TILE_SPMM_U, TILE_SPMM_V and TILE_SPMM_R, in program order on instr_valid/instr_ready.
// GEMM/SPMM instructions go to the engine, which pipelines them (a new one every 16 cycles
// when independent; a dependent one on the same C tile starts early through output
// forwarding).  Loads and stores go to the load/store unit.  The host core's renamer and
// scheduler, which would let memory instructions overlap the engine, are not modelled: here a
// memory instruction waits until the engine is idle and a GEMM/SPMM waits until the
// load/store unit is idle, which keeps every register hazard safe.
//
// Register operands: treg 0-7, ureg 0-3 (= treg pairs), vreg 0-1 (= treg quads), mreg 0-7.
// GEMM/SPMM: dst (also src0) is a treg (a ureg for TILE_SPMM_R), src1 the A treg, src2
// the B treg/ureg/vreg, msrc the metadata register of A; rowcfg carries the per-row N:4
// codes of TILE_SPMM_R.  Memory: 64 B line requests, see vegeta_lsu.
// idle is high when nothing is in progress.  The counters report pipelining, forwarding
// and stall events of the engine.
//
// The instruction set and register classes follow the paper; the in-order hazard rule
// above, the instruction encoding and the memory port are this design's own choices.
module vegeta_top
  import vegeta_pkg::*;
#(
  parameter int unsigned ALPHA = 2,
  parameter bit          OF_EN = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction port
  input  logic        instr_valid,
  input  instr_t      instr,
  output logic        instr_ready,
  output logic        idle,
  // memory port
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_rsp_valid,
  input  row_t        mem_rsp_data,
  // event counters
  output logic [31:0] cnt_dep_stall,
  output logic [31:0] cnt_of,
  output logic [31:0] cnt_overlap,
  output logic [31:0] cnt_bank_stall,
  output logic [31:0] cnt_bypass,
  output logic [31:0] cnt_rw_err
);
  localparam int unsigned NC = TOTAL_MACS / (N_ROWS * ALPHA * BETA);
  localparam int unsigned NG = NC * ALPHA / 2;
  localparam int unsigned NW = 6 * NG;

  // ---------------- decode ----------------
  logic    is_mult;
  eng_op_t eop;
  always_comb begin
    is_mult = instr.op inside {OP_TILE_GEMM, OP_TILE_SPMM_U, OP_TILE_SPMM_V, OP_TILE_SPMM_R};
    eop.rowcfg = instr.rowcfg;
    eop.a_treg = instr.src1;
    eop.mreg   = instr.msrc;
    unique case (instr.op)
      OP_TILE_SPMM_U: begin eop.mode = MODE_2_4; eop.c_treg = instr.dst; eop.b_treg = {instr.src2[1:0], 1'b0}; end
      OP_TILE_SPMM_V: begin eop.mode = MODE_1_4; eop.c_treg = instr.dst; eop.b_treg = {instr.src2[0], 2'b00}; end
      OP_TILE_SPMM_R: begin eop.mode = MODE_ROW; eop.c_treg = {instr.dst[1:0], 1'b0}; eop.b_treg = {instr.src2[1:0], 1'b0}; end
      default:        begin eop.mode = MODE_4_4; eop.c_treg = instr.dst; eop.b_treg = instr.src2; end
    endcase
  end

  // ---------------- blocks ----------------
  logic eng_valid, eng_ready, eng_busy;
  logic lsu_valid, lsu_ready, lsu_busy, lsu_done;

  row_t         tiles [RF_ROWS];
  mrow_t        metas [MF_ROWS];
  logic         ew_en   [NW];
  rf_row_addr_t ew_row  [NW];
  logic [3:0]   ew_col  [NW];
  fp32_t        ew_data [NW];
  logic         ld_we, md_we;
  rf_row_addr_t ld_row, st_row;
  row_t         ld_data, md_data, st_data;
  logic [3:0]   md_line;

  assign eng_valid   = instr_valid && is_mult && !lsu_busy;
  assign lsu_valid   = instr_valid && !is_mult && !eng_busy;
  assign instr_ready = is_mult ? (eng_ready && !lsu_busy) : (lsu_ready && !eng_busy);
  assign idle        = !eng_busy && !lsu_busy;

  vegeta_tile_regfile #(.NW(NW)) u_rf (
    .clk, .ld_we, .ld_row, .ld_data, .md_we, .md_line, .md_data, .st_row, .st_data,
    .ew_en, .ew_row, .ew_col, .ew_data, .tiles, .metas);

  vegeta_lsu u_lsu (
    .clk, .rst_n, .instr_valid(lsu_valid), .instr, .instr_ready(lsu_ready),
    .busy(lsu_busy), .done(lsu_done),
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data),
    .ld_we, .ld_row, .ld_data, .md_we, .md_line, .md_data, .st_row, .st_data);

  vegeta_engine #(.ALPHA(ALPHA), .OF_EN(OF_EN)) u_engine (
    .clk, .rst_n, .op_valid(eng_valid), .op(eop), .op_ready(eng_ready), .busy(eng_busy),
    .tiles, .metas, .ew_en, .ew_row, .ew_col, .ew_data,
    .cnt_dep_stall, .cnt_of, .cnt_overlap, .cnt_bank_stall, .cnt_bypass, .cnt_rw_err);

  logic unused_done;
  assign unused_done = lsu_done;
endmodule
