// vegeta_spe: sparse processing element SPE-ALPHA-BETA of the VEGETA-S array.
//
// ALPHA SPUs share the input that arrives from the west: BETA input blocks (already
// arranged by the row's input selector) plus a valid bit and the weight-bank tag.  The
// blocks are broadcast to all SPUs in the same cycle and registered once for the SPE to the
// east (the horizontal pipeline buffer, one per SPE rather than one per MAC).  From the
// north come ALPHA x BETA partial sums; the SPE adds its products and registers the
// ALPHA x BETA results for the SPE to the south.  So an input moves one SPE east per cycle
// and a partial sum one SPE south per cycle, the skewed systolic timing of the paper.
//
// Weights are loaded through wl_* (one SPE at a time is enabled by the engine's weight-load
// sequencer); see vegeta_spu for the banks.  Pipeline registers have no reset except the
// valid bits.  Structure from the paper (Sec. V-A, Fig. 9); the bank tag travelling with the
// data is this design's choice.
module vegeta_spe
  import vegeta_pkg::*;
#(
  parameter int unsigned ALPHA = 2,
  parameter int unsigned LANES = BETA
) (
  input  logic  clk,
  input  logic  rst_n,
  // weight load from the north
  input  logic  wl_en,
  input  logic  wl_bank,
  input  bf16_t wl_w   [ALPHA][LANES],
  input  idx_t  wl_idx [ALPHA][LANES],
  // west input, east output
  input  logic  in_vld,
  input  logic  in_bank,
  input  blk_t  in_blk  [LANES],
  output logic  out_vld,
  output logic  out_bank,
  output blk_t  out_blk [LANES],
  // north partial sums in, south partial sums out
  input  logic  ps_vld_in,
  input  fp32_t ps_in  [ALPHA][LANES],
  output logic  ps_vld_out,
  output fp32_t ps_out [ALPHA][LANES]
);
  fp32_t ps_next [ALPHA][LANES];

  for (genvar u = 0; u < ALPHA; u++) begin : g_spu
    vegeta_spu #(.LANES(LANES)) u_spu (
      .clk, .wl_en, .wl_bank,
      .wl_w(wl_w[u]), .wl_idx(wl_idx[u]),
      .bank_sel(in_bank), .blk(in_blk),
      .psum_in(ps_in[u]), .psum_out(ps_next[u]));
  end

  always_ff @(posedge clk)
    if (!rst_n) begin
      out_vld    <= 1'b0;
      ps_vld_out <= 1'b0;
    end else begin
      out_vld    <= in_vld;
      ps_vld_out <= ps_vld_in;
    end

  always_ff @(posedge clk) begin
    out_bank <= in_bank;
    out_blk  <= in_blk;
    ps_out   <= ps_next;
  end

  // the partial sums from the north must arrive with the input they are combined with
  assert property (@(posedge clk) disable iff (!rst_n) ps_vld_in |-> in_vld)
    else $error("partial sum arrived without its input");
endmodule
