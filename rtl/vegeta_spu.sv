// vegeta_spu: sparse processing unit (SPU-BETA), BETA MAC lanes working on one output.
//
// Each lane l keeps a stationary BF16 weight and its 2-bit metadata index (position of the
// non-zero inside its block of M = 4) in a weight buffer and a metadata buffer.  Each cycle
// lane l receives an input block of four BF16 elements, an M-to-1 mux picks the element the
// index points at, and the MAC adds element * weight to the lane's incoming partial sum.
// The lanes' partial sums stay separate; they are reduced below the array.
//
// Weight and metadata buffers are double banked so that the next instruction's weights can
// be loaded while the current one is still streaming (the paper's WL stage overlapping
// FF/FS of the previous instruction).  wl_en writes bank wl_bank; bank_sel chooses the
// bank the datapath uses, and comes with the input data.  Registers written on clk, the
// datapath itself is combinational; the SPE around it holds the pipeline registers.
//
// From the paper: BETA MACs per SPU, an M-to-1 mux per MAC selected by a metadata buffer
// beside each weight buffer.  Own choices: two banks, no reset of the buffers (they are
// always written before use).
module vegeta_spu
  import vegeta_pkg::*;
#(
  parameter int unsigned LANES = BETA
) (
  input  logic  clk,
  // weight load
  input  logic  wl_en,
  input  logic  wl_bank,
  input  bf16_t wl_w   [LANES],
  input  idx_t  wl_idx [LANES],
  // datapath
  input  logic  bank_sel,
  input  blk_t  blk      [LANES],
  input  fp32_t psum_in  [LANES],
  output fp32_t psum_out [LANES]
);
  bf16_t w_buf   [2][LANES];
  idx_t  idx_buf [2][LANES];
  bf16_t sel     [LANES];

  always_ff @(posedge clk)
    if (wl_en)
      for (int l = 0; l < LANES; l++) begin
        w_buf[wl_bank][l]   <= wl_w[l];
        idx_buf[wl_bank][l] <= wl_idx[l];
      end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_comb sel[l] = blk[l][16*idx_buf[bank_sel][l] +: 16];   // M-to-1 mux
    vegeta_mac u_mac (.a(sel[l]), .w(w_buf[bank_sel][l]), .acc_in(psum_in[l]),
                      .acc_out(psum_out[l]));
  end
endmodule
