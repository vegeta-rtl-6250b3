// vegeta_array: the VEGETA-S systolic array, N_ROWS x N_COLS SPE-ALPHA-2s.
//
// Weight stationary.  Every SPU column holds one row of the (compressed) A tile: SPU column
// r, array row p, lane l holds non-zero 2p+l of A row r (tile-wise instructions).  Input
// blocks of B enter each array row from the west through that row's input selector and move
// one SPE east per cycle; partial sums enter at the top (the C values, "output elements fed
// from the north") and move one SPE south per cycle.  Below the array a reduction unit per
// group of two SPUs adds the lanes (see vegeta_reduction_unit).
//
// Timing: an input that enters row p in cycle t is used by SPE column c in cycle t + c; a
// partial sum injected at the top of column c in cycle t leaves the bottom register in
// cycle t + N_ROWS and the reduction unit one (tile-wise) or two (row-wise) cycles later.
// The caller must skew inputs by row and partial sums by column accordingly.
//
// Weight load: each SPE column has a north weight bus; in a cycle with wl_en[c] the SPE in
// row wl_row[c] of that column latches the bus into bank wl_bank[c].
//
// The group-wise reduction signals (red_*) must be presented in the cycle the group's
// partial sums leave the bottom SPE.
//
// From the paper: geometry (Table III, VEGETA-S-2-2: 16 x 8 SPE-2-2), per-row input
// selector, adders at the bottom, the extra adder row for row-wise sparsity.  The weight bus
// with a row select is this design's choice; the paper says only that weights come from the
// north ports in N_ROWS cycles.
module vegeta_array
  import vegeta_pkg::*;
#(
  parameter int unsigned ALPHA  = 2,
  parameter int unsigned NR     = N_ROWS,
  parameter int unsigned NC     = TOTAL_MACS / (N_ROWS * ALPHA * BETA),
  parameter int unsigned NG     = NC * ALPHA / 2
) (
  input  logic  clk,
  input  logic  rst_n,
  // weight load, one bus per SPE column
  input  logic                  wl_en   [NC],
  input  logic [$clog2(NR)-1:0] wl_row  [NC],
  input  logic                  wl_bank [NC],
  input  bf16_t                 wl_w    [NC][ALPHA][BETA],
  input  idx_t                  wl_idx  [NC][ALPHA][BETA],
  // west inputs, one per array row
  input  logic         in_vld  [NR],
  input  logic         in_bank [NR],
  input  mode_e        in_mode [NR],
  input  logic [127:0] in_raw  [NR],
  // north partial sums, one set per SPE column
  input  logic  top_vld [NC],
  input  fp32_t top_ps  [NC][ALPHA][BETA],
  // reduction control, per group of 4 MAC columns
  input  logic  red_rowwise [NG],
  input  pat_e  red_pat     [NG],
  // results
  output logic  t_vld [NG],
  output fp32_t t_out [NG][2],
  output logic [3:0] r_vld [NG],
  output fp32_t r_out [NG][4]
);
  // east-west and north-south links: index [row][col]; column NC / row NR are the edges
  logic  h_vld  [NR][NC+1];
  logic  h_bank [NR][NC+1];
  blk_t  h_blk  [NR][NC+1][BETA];
  logic  v_vld  [NR+1][NC];
  fp32_t v_ps   [NR+1][NC][ALPHA][BETA];

  for (genvar p = 0; p < NR; p++) begin : g_row
    vegeta_input_selector u_sel (.mode(in_mode[p]), .raw(in_raw[p]), .lane(h_blk[p][0]));
    assign h_vld[p][0]  = in_vld[p];
    assign h_bank[p][0] = in_bank[p];

    for (genvar c = 0; c < NC; c++) begin : g_col
      vegeta_spe #(.ALPHA(ALPHA), .LANES(BETA)) u_spe (
        .clk, .rst_n,
        .wl_en(wl_en[c] && (wl_row[c] == ($clog2(NR))'(p))),
        .wl_bank(wl_bank[c]), .wl_w(wl_w[c]), .wl_idx(wl_idx[c]),
        .in_vld(h_vld[p][c]), .in_bank(h_bank[p][c]), .in_blk(h_blk[p][c]),
        .out_vld(h_vld[p][c+1]), .out_bank(h_bank[p][c+1]), .out_blk(h_blk[p][c+1]),
        .ps_vld_in(v_vld[p][c]), .ps_in(v_ps[p][c]),
        .ps_vld_out(v_vld[p+1][c]), .ps_out(v_ps[p+1][c]));
    end
  end

  for (genvar c = 0; c < NC; c++) begin : g_top
    assign v_vld[0][c] = top_vld[c];
    assign v_ps[0][c]  = top_ps[c];
  end

  // reduction units: group g = SPUs 2g and 2g+1, which sit in SPE column 2g / ALPHA
  for (genvar g = 0; g < NG; g++) begin : g_red
    localparam int unsigned C = (2 * g) / ALPHA;
    localparam int unsigned U = (2 * g) % ALPHA;
    fp32_t lanes [4];
    assign lanes[0] = v_ps[NR][C][U][0];
    assign lanes[1] = v_ps[NR][C][U][1];
    assign lanes[2] = v_ps[NR][C][U+1][0];
    assign lanes[3] = v_ps[NR][C][U+1][1];
    vegeta_reduction_unit u_red (
      .clk, .rst_n, .in_vld(v_vld[NR][C]), .rowwise(red_rowwise[g]), .pat(red_pat[g]),
      .lanes(lanes), .t_vld(t_vld[g]), .t_out(t_out[g]), .r_vld(r_vld[g]), .r_out(r_out[g]));
  end

  // the right-most SPE's east output has no consumer
  logic unused_east;
  always_comb begin
    unused_east = 1'b0;
    for (int p = 0; p < NR; p++)
      unused_east = unused_east ^ h_vld[p][NC] ^ h_bank[p][NC] ^ (^h_blk[p][NC][0])
                    ^ (^h_blk[p][NC][1]);
  end

  initial assert (ALPHA % 2 == 0 && ALPHA >= 2)
    else $error("row-wise groups of four MAC columns need an even ALPHA");
endmodule
