// vegeta_tile_regfile: tile registers and metadata registers.
//
// Eight 1 KB tile registers treg0-7, each 16 rows of 64 B, kept as 128 rows of 512 bits.
// A 2 KB ureg k is tregs 2k and 2k+1 (rows 32k..32k+31) and a 4 KB vreg k is tregs 4k to
// 4k+3 (rows 64k..64k+63): the aliasing of the paper's Fig. 6 falls out of row addressing.
// Eight 128 B metadata registers mreg0-7, each 16 rows of 8 B (32 two-bit indices per
// row), kept as 128 rows of 64 bits.
//
// Ports:
//   ld_*   one 64 B tile row written per cycle (TILE_LOAD_T/U/V, one row per memory line)
//   md_*   one 64 B line written into eight consecutive metadata rows (TILE_LOAD_M)
//   st_*   one tile row read combinationally (TILE_STORE_T)
//   ew_*   NW independent FP32 element writes per cycle from the engine (C results)
//   tiles, metas  every row visible to the engine, which reads weights, inputs and C
//                 in place (flip-flop storage, so any slice can be read).
// Writes take effect at the clock edge; a read in the same cycle sees the old value.  The
// engine's element writes are applied after the row write, so they win on a clash.
// Sizes are the paper's; the port set and whole-array visibility are this design's choice.
module vegeta_tile_regfile
  import vegeta_pkg::*;
#(
  parameter int unsigned NW = 6 * N_GROUPS
) (
  input  logic          clk,
  input  logic          ld_we,
  input  rf_row_addr_t  ld_row,
  input  row_t          ld_data,
  input  logic          md_we,
  input  logic [3:0]    md_line,     // metadata rows 8*md_line .. 8*md_line+7
  input  row_t          md_data,
  input  rf_row_addr_t  st_row,
  output row_t          st_data,
  input  logic          ew_en   [NW],
  input  rf_row_addr_t  ew_row  [NW],
  input  logic [3:0]    ew_col  [NW],
  input  fp32_t         ew_data [NW],
  output row_t          tiles [RF_ROWS],
  output mrow_t         metas [MF_ROWS]
);
  row_t  trow [RF_ROWS];
  mrow_t mrow [MF_ROWS];

  always_ff @(posedge clk) begin
    if (ld_we) trow[ld_row] <= ld_data;
    for (int k = 0; k < NW; k++)
      if (ew_en[k]) trow[ew_row[k]][32*ew_col[k] +: 32] <= ew_data[k];
    if (md_we)
      for (int i = 0; i < 8; i++) mrow[{md_line, 3'(i)}] <= md_data[64*i +: 64];
  end

  assign st_data = trow[st_row];
  assign tiles   = trow;
  assign metas   = mrow;
endmodule
