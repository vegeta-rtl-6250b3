// tb_vegeta_array: self-checking test of the 16 x 8 SPE array with its reduction units.
//
// Runs one dense tile-wise product and one 2:4 product directly on the array ports, with
// the skew the engine uses: weights of A row r = SPU r (column r / ALPHA) are loaded into a
// bank, row p of every column at once; column j of B enters array row p at cycle j + p;
// C[r][j] enters the top of SPE column r / ALPHA at cycle j + r / ALPHA.  Results leave the
// group reduction units (t_out[g][k] = C row 2g + k) in column order and are checked
// against an integer matrix product (small integers, so FP32 is exact).  The 2:4 product
// uses the other weight bank.
//
// The skew and the mapping of A rows to SPU columns follow the paper; the weight-load bus
// and the bank tags are this design's.
module tb_vegeta_array;
  import vegeta_pkg::*;
  import tb_vegeta_util_pkg::*;

  localparam int A = 2, NR = N_ROWS, NC = TOTAL_MACS / (N_ROWS * A * BETA), NG = NC * A / 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic                  wl_en   [NC];
  logic [$clog2(NR)-1:0] wl_row  [NC];
  logic                  wl_bank [NC];
  bf16_t                 wl_w    [NC][A][BETA];
  idx_t                  wl_idx  [NC][A][BETA];
  logic in_vld [NR], in_bank [NR];
  mode_e in_mode [NR];
  logic [127:0] in_raw [NR];
  logic top_vld [NC];
  fp32_t top_ps [NC][A][BETA];
  logic red_rowwise [NG];
  pat_e red_pat [NG];
  logic t_vld [NG];
  fp32_t t_out [NG][2];
  logic [3:0] r_vld [NG];
  fp32_t r_out [NG][4];
  int checks = 0, failures = 0;

  vegeta_array #(.ALPHA(A), .NR(NR), .NC(NC), .NG(NG)) dut (.*);

  initial begin
    #1_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int Am [16][64], Bm [64][16], Cm [16][16];
  int nxt [NG];

  // collect results
  always @(posedge clk)
    if (rst_n)
      for (int g = 0; g < NG; g++)
        if (t_vld[g]) begin
          for (int k = 0; k < 2; k++) begin
            int r, s;
            r = 2 * g + k;
            s = Cm[r][nxt[g]];
            for (int kk = 0; kk < 64; kk++) s += Am[r][kk] * Bm[kk][nxt[g]];
            checks++;
            if (t_out[g][k] !== fp32_of_int(s)) begin
              failures++;
              if (failures < 8) $display("FAIL C[%0d][%0d] got %0f want %0d", r, nxt[g],
                                         fp32_to_real(t_out[g][k]), s);
            end
          end
          nxt[g]++;
        end

  task automatic run(mode_e mode, logic bank);
    int K;
    K = (mode == MODE_4_4) ? 32 : 64;
    foreach (Am[r, k]) Am[r][k] = 0;
    for (int r = 0; r < 16; r++)
      for (int b = 0; b < K / 4; b++)
        for (int i = 0; i < 4; i++)
          if (mode == MODE_4_4 || i == ((r + b) % 4) || i == ((r + b + 1) % 4)) Am[r][4*b+i] = rnz(3);
    foreach (Bm[k, j]) Bm[k][j] = (k < K) ? rnz(3) : 0;
    foreach (Cm[r, j]) Cm[r][j] = rnz(50);
    foreach (nxt[g]) nxt[g] = 0;
    // weight load: row p of all columns in one cycle
    for (int p = 0; p < NR; p++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        wl_en[c] = 1; wl_row[c] = 4'(p); wl_bank[c] = bank;
        for (int u = 0; u < A; u++)
          for (int l = 0; l < BETA; l++) begin
            int r, e, cnt;
            r = c * A + u;
            e = 2 * p + l;
            if (mode == MODE_4_4) begin
              wl_w[c][u][l] = bf16_of_int(Am[r][e]); wl_idx[c][u][l] = '0;
            end else begin
              // e-th non-zero of row r: block e / 2
              cnt = 0;
              for (int i = 0; i < 4; i++)
                if (Am[r][4*(e/2)+i] != 0) begin
                  if (cnt == e % 2) begin
                    wl_w[c][u][l] = bf16_of_int(Am[r][4*(e/2)+i]); wl_idx[c][u][l] = idx_t'(i);
                  end
                  cnt++;
                end
            end
          end
      end
    end
    @(negedge clk);
    foreach (wl_en[c]) wl_en[c] = 0;
    // feed: cycle t, array row p gets column j = t - p, SPE column c gets C column j = t - c
    for (int t = 0; t < 16 + NR; t++) begin
      for (int p = 0; p < NR; p++) begin
        int j;
        j = t - p;
        in_vld[p] = (j >= 0 && j < 16); in_bank[p] = bank; in_mode[p] = mode; in_raw[p] = '0;
        if (in_vld[p]) begin
          if (mode == MODE_4_4) begin
            in_raw[p][15:0] = bf16_of_int(Bm[2*p][j]); in_raw[p][31:16] = bf16_of_int(Bm[2*p+1][j]);
          end else
            for (int i = 0; i < 4; i++) in_raw[p][16*i +: 16] = bf16_of_int(Bm[4*p+i][j]);
        end
      end
      for (int c = 0; c < NC; c++) begin
        int j;
        j = t - c;
        top_vld[c] = (j >= 0 && j < 16);
        for (int u = 0; u < A; u++) begin
          top_ps[c][u][0] = top_vld[c] ? fp32_of_int(Cm[c*A+u][j]) : '0;
          top_ps[c][u][1] = '0;
        end
      end
      @(negedge clk);
    end
    foreach (in_vld[p]) in_vld[p] = 0;
    foreach (top_vld[c]) top_vld[c] = 0;
    repeat (NR + 4) @(negedge clk);
    foreach (nxt[g]) begin
      checks++;
      if (nxt[g] != 16) begin failures++; $display("FAIL group %0d gave %0d columns", g, nxt[g]); end
    end
  endtask

  initial begin
    foreach (wl_en[c]) begin wl_en[c] = 0; wl_row[c] = '0; wl_bank[c] = 0; top_vld[c] = 0; end
    foreach (wl_w[c, u, l]) begin wl_w[c][u][l] = '0; wl_idx[c][u][l] = '0; top_ps[c][u][l] = '0; end
    foreach (in_vld[p]) begin in_vld[p] = 0; in_bank[p] = 0; in_mode[p] = MODE_4_4; in_raw[p] = '0; end
    foreach (red_rowwise[g]) begin red_rowwise[g] = 0; red_pat[g] = PAT_4_4; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(MODE_4_4, 1'b0);
    run(MODE_2_4, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
