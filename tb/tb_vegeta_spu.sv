// tb_vegeta_spu: self-checking test of one sparse processing unit (SPU-2).
//
// Loads random weights and 2-bit indices into both weight banks, then drives random input
// blocks and partial sums with either bank selected and checks each lane's output against
// a reference MAC on the element the index picks out of the block (exact product, one FP32
// rounding, computed with real arithmetic in tb_vegeta_util_pkg).  Also checks that loading
// one bank leaves the other untouched.
//
// The M-to-1 selection by metadata index follows the paper; the two weight banks are this
// design's.
module tb_vegeta_spu;
  import vegeta_pkg::*;
  import tb_vegeta_util_pkg::*;

  localparam int L = BETA;
  logic  clk = 1'b0;
  always #5 clk = ~clk;
  logic  wl_en, wl_bank, bank_sel;
  bf16_t wl_w [L];
  idx_t  wl_idx [L];
  blk_t  blk [L];
  fp32_t psum_in [L], psum_out [L];
  bf16_t mw [2][L];
  idx_t  mi [2][L];
  int checks = 0, failures = 0;

  vegeta_spu #(.LANES(L)) dut (.*);

  initial begin
    #1_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic bf16_t rbf();
    return {1'($urandom_range(0, 1)), 8'($urandom_range(110, 140)), 7'($urandom)};
  endfunction

  initial begin
    wl_en = 0; wl_bank = 0; bank_sel = 0;
    foreach (blk[l]) begin blk[l] = '0; psum_in[l] = '0; wl_w[l] = '0; wl_idx[l] = '0; end
    for (int it = 0; it < 400; it++) begin
      // load one bank (both banks in the first two iterations)
      @(negedge clk);
      wl_en = 1;
      wl_bank = (it < 2) ? 1'(it) : 1'($urandom_range(0, 1));
      foreach (wl_w[l]) begin wl_w[l] = rbf(); wl_idx[l] = idx_t'($urandom_range(0, 3)); end
      @(negedge clk);
      foreach (wl_w[l]) begin mw[wl_bank][l] = wl_w[l]; mi[wl_bank][l] = wl_idx[l]; end
      wl_en = 0;
      if (it == 0) continue;
      for (int k = 0; k < 4; k++) begin
        bank_sel = 1'($urandom_range(0, 1));
        foreach (blk[l]) begin
          for (int m = 0; m < 4; m++) blk[l][16*m +: 16] = rbf();
          psum_in[l] = {1'($urandom_range(0, 1)), 8'($urandom_range(115, 135)), 23'($urandom)};
        end
        #1;
        foreach (blk[l]) begin
          logic [31:0] want;
          want = ref_mac(blk[l][16*mi[bank_sel][l] +: 16], mw[bank_sel][l], psum_in[l]);
          checks++;
          if (psum_out[l] !== want) begin
            failures++;
            if (failures < 6) $display("FAIL lane %0d bank %0d got %h want %h", l, bank_sel,
                                       psum_out[l], want);
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
