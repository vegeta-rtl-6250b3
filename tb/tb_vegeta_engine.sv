// tb_vegeta_engine: self-checking test of the VEGETA-S-2-2 engine against a model of the
// tile registers.
//
// The testbench holds the register rows itself (applying the engine's element writes each
// cycle).  It runs two dependent dense TILE_GEMMs on one C tile (output forwarding with the
// bypass), an independent GEMM between them in program order (pipelining), then a 2:4
// TILE_SPMM_U with metadata, and checks every C element against an integer reference
// (small integers, exact in FP32).  It also checks that the dependent GEMM's results
// include the first GEMM's (so the forwarded values were used) and that the counters saw
// forwarding, bypass and overlap.
//
// The instruction semantics (C += A x B with 4:4 / 2:4 sparse A) follow the paper; register
// placement of the operands is this design's.
module tb_vegeta_engine;
  import vegeta_pkg::*;
  import tb_vegeta_util_pkg::*;

  localparam int NW = 6 * N_GROUPS;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic op_valid = 1'b0, op_ready, busy;
  eng_op_t op = '0;
  row_t  tiles [RF_ROWS];
  mrow_t metas [MF_ROWS];
  logic ew_en [NW];
  rf_row_addr_t ew_row [NW];
  logic [3:0] ew_col [NW];
  fp32_t ew_data [NW];
  logic [31:0] cnt_dep_stall, cnt_of, cnt_overlap, cnt_bank_stall, cnt_bypass, cnt_rw_err;
  int checks = 0, failures = 0;

  vegeta_engine dut (.*);

  initial begin
    #1_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk)
    for (int k = 0; k < NW; k++)
      if (rst_n && ew_en[k]) tiles[ew_row[k]][32*ew_col[k] +: 32] <= ew_data[k];

  int Ad [16][32], Bd [32][16], C0 [16][16], C1 [16][16];
  int Au [16][64], Bu [64][16], C2 [16][16];

  task automatic issue(eng_op_t o);
    @(negedge clk);
    op = o; op_valid = 1;
    while (!op_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    op_valid = 0;
  endtask

  function automatic eng_op_t mk(mode_e m, int c, int a, int b, int mr);
    eng_op_t o;
    o = '0;
    o.mode = m; o.c_treg = 3'(c); o.a_treg = 3'(a); o.b_treg = 3'(b); o.mreg = 3'(mr);
    return o;
  endfunction

  task automatic check_c(string name, int treg, int exp [16][16]);
    int bad;
    bad = 0;
    for (int r = 0; r < 16; r++)
      for (int j = 0; j < 16; j++) begin
        checks++;
        if (tiles[16*treg + r][32*j +: 32] !== fp32_of_int(exp[r][j])) begin
          failures++; bad++;
          if (bad < 4) $display("FAIL %s C[%0d][%0d] got %0f want %0d", name, r, j,
                                fp32_to_real(tiles[16*treg + r][32*j +: 32]), exp[r][j]);
        end
      end
    $display("%s: %0d mismatches", name, bad);
  endtask

  initial begin
    int e0 [16][16], e1 [16][16], e2 [16][16];
    op_valid = 0; op = '0;
    foreach (tiles[r]) tiles[r] = '0;
    foreach (metas[r]) metas[r] = '0;
    foreach (Ad[r, k]) Ad[r][k] = rnz(3);
    foreach (Bd[k, j]) Bd[k][j] = rnz(3);
    foreach (C0[r, j]) begin C0[r][j] = rnz(50); C1[r][j] = rnz(50); C2[r][j] = rnz(50); end
    foreach (Au[r, k]) Au[r][k] = 0;
    for (int r = 0; r < 16; r++)
      for (int b = 0; b < 16; b++) begin
        Au[r][4*b + (r + b) % 4] = rnz(3);
        Au[r][4*b + (r + b + 2) % 4] = rnz(3);
      end
    foreach (Bu[k, j]) Bu[k][j] = rnz(3);
    // register contents: A dense t0, B dense t1, C t2 / t3; A 2:4 t7 + mreg 0, B ureg2 (t4, t5), C t6
    for (int r = 0; r < 16; r++) begin
      for (int k = 0; k < 32; k++) tiles[r][16*k +: 16] = bf16_of_int(Ad[r][k]);
      for (int j = 0; j < 16; j++) begin
        tiles[32 + r][32*j +: 32] = fp32_of_int(C0[r][j]);
        tiles[48 + r][32*j +: 32] = fp32_of_int(C1[r][j]);
        tiles[96 + r][32*j +: 32] = fp32_of_int(C2[r][j]);
      end
      begin
        int e;
        e = 0;
        for (int k = 0; k < 64; k++)
          if (Au[r][k] != 0) begin
            tiles[112 + r][16*e +: 16] = bf16_of_int(Au[r][k]);
            metas[r][2*e +: 2] = 2'(k % 4);
            e++;
          end
      end
    end
    for (int j = 0; j < 16; j++) begin
      for (int k = 0; k < 32; k++) tiles[16 + j][16*k +: 16] = bf16_of_int(Bd[k][j]);
      for (int k = 0; k < 64; k++) tiles[64 + 2*j + k/32][16*(k%32) +: 16] = bf16_of_int(Bu[k][j]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    issue(mk(MODE_4_4, 2, 0, 1, 0));
    issue(mk(MODE_4_4, 2, 0, 1, 0));   // dependent: forwarded
    issue(mk(MODE_4_4, 3, 0, 1, 0));
    issue(mk(MODE_2_4, 6, 7, 4, 0));
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int r = 0; r < 16; r++)
      for (int j = 0; j < 16; j++) begin
        int s, su;
        s = 0; su = 0;
        for (int k = 0; k < 32; k++) s += Ad[r][k] * Bd[k][j];
        for (int k = 0; k < 64; k++) su += Au[r][k] * Bu[k][j];
        e0[r][j] = C0[r][j] + 2 * s;
        e1[r][j] = C1[r][j] + s;
        e2[r][j] = C2[r][j] + su;
      end
    check_c("GEMM twice (forwarded)", 2, e0);
    check_c("GEMM", 3, e1);
    check_c("SPMM 2:4", 6, e2);
    checks++;
    if (cnt_of == 0 || cnt_bypass == 0 || cnt_overlap == 0) begin
      failures++;
      $display("FAIL counters of=%0d bypass=%0d overlap=%0d", cnt_of, cnt_bypass, cnt_overlap);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
