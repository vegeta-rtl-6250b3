// tb_vegeta_spe: self-checking test of one sparse processing element (SPE-2-2).
//
// Loads weights into a random bank of both SPUs, then streams random inputs and partial
// sums.  Checks one cycle later: the input blocks, valid bit and bank tag passed east
// unchanged, and each of the ALPHA x BETA partial sums leaving south equal to the
// reference MAC of its own weight with the element its index picks from the shared
// (broadcast) input block.
//
// The broadcast of one input to all SPUs and the one-cycle hops follow the paper; the bank
// tag is this design's.
module tb_vegeta_spe;
  import vegeta_pkg::*;
  import tb_vegeta_util_pkg::*;

  localparam int A = 2, L = BETA;
  logic  clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic  wl_en, wl_bank, in_vld, in_bank, out_vld, out_bank, ps_vld_in, ps_vld_out;
  bf16_t wl_w [A][L];
  idx_t  wl_idx [A][L];
  blk_t  in_blk [L], out_blk [L];
  fp32_t ps_in [A][L], ps_out [A][L];
  bf16_t mw [2][A][L];
  idx_t  mi [2][A][L];
  int checks = 0, failures = 0;

  vegeta_spe #(.ALPHA(A), .LANES(L)) dut (.*);

  initial begin
    #1_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic bf16_t rbf();
    return {1'($urandom_range(0, 1)), 8'($urandom_range(110, 140)), 7'($urandom)};
  endfunction

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    wl_en = 0; wl_bank = 0; in_vld = 0; in_bank = 0; ps_vld_in = 0;
    foreach (in_blk[l]) in_blk[l] = '0;
    foreach (ps_in[u, l]) begin ps_in[u][l] = '0; wl_w[u][l] = '0; wl_idx[u][l] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      wl_en = 1;
      wl_bank = (it < 2) ? 1'(it) : 1'($urandom_range(0, 1));
      foreach (wl_w[u, l]) begin wl_w[u][l] = rbf(); wl_idx[u][l] = idx_t'($urandom_range(0, 3)); end
      @(negedge clk);
      foreach (wl_w[u, l]) begin mw[wl_bank][u][l] = wl_w[u][l]; mi[wl_bank][u][l] = wl_idx[u][l]; end
      wl_en = 0;
      if (it == 0) continue;
      for (int k = 0; k < 4; k++) begin
        blk_t  sb [L];
        fp32_t sp [A][L];
        logic  sv, sbank;
        sv = 1'($urandom_range(0, 1));
        sbank = 1'($urandom_range(0, 1));
        in_vld = sv; ps_vld_in = sv; in_bank = sbank;
        foreach (in_blk[l]) for (int m = 0; m < 4; m++) in_blk[l][16*m +: 16] = rbf();
        foreach (ps_in[u, l])
          ps_in[u][l] = {1'($urandom_range(0, 1)), 8'($urandom_range(115, 135)), 23'($urandom)};
        sb = in_blk; sp = ps_in;
        @(negedge clk);
        chk(out_vld == sv && ps_vld_out == sv && out_bank == sbank, "valid/bank east");
        foreach (sb[l]) chk(out_blk[l] == sb[l], "input passed east");
        foreach (sp[u, l])
          chk(ps_out[u][l] == ref_mac(sb[l][16*mi[sbank][u][l] +: 16], mw[sbank][u][l], sp[u][l]),
              "partial sum south");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
