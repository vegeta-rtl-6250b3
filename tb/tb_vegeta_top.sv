// tb_vegeta_top: end-to-end test of the VEGETA tile unit at its full size (VEGETA-S-2-2,
// 16 x 8 SPEs, 512 MACs, no parameter overrides).
//
// A behavioural memory (64 B lines, random request back-pressure, three-cycle in-order read
// latency) holds the operand tiles.  A program of tile instructions loads them, runs
// TILE_GEMM (4:4), TILE_SPMM_U (2:4), TILE_SPMM_V (1:4) and TILE_SPMM_R (row-wise N:4 with
// all three row patterns), and stores the results.  Operands are small integers, so every
// FP32 result is exact whatever the order of the additions and the reference is a plain
// integer matrix product computed here from the uncompressed matrices.
//
// Mechanisms that must be seen (each one that never happens counts as a failure):
//   pipelining  - an instruction starts feeding while another is still in the array
//   OF          - a dependent instruction starts early through output forwarding
//   bypass      - a C element is taken from the writeback bus in the cycle it is written
//   dep stall   - a ready instruction waits for the C tile of an earlier one
//   bank stall  - a weight load waits for its weight bank
//   modes       - an instruction of each of 4:4, 2:4, 1:4 and row-wise runs
// The back-to-back dependent GEMMs must also start within N_ROWS + 1 cycles of each other
// (the paper's 2*N_ROWS + log2(BETA) output-forwarding start).
module tb_vegeta_top;
  import vegeta_pkg::*;
  import tb_vegeta_util_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        instr_valid = 1'b0;
  instr_t      instr;
  logic        instr_ready, idle;
  logic        mem_req_valid, mem_req_ready;
  mem_req_t    mem_req;
  logic        mem_rsp_valid;
  row_t        mem_rsp_data;
  logic [31:0] cnt_dep_stall, cnt_of, cnt_overlap, cnt_bank_stall, cnt_bypass, cnt_rw_err;

  vegeta_top dut (.*);

  int checks = 0, failures = 0;
  typedef row_t row_t_q [$];

  // ---------------- memory model ----------------
  row_t mem [int unsigned];
  row_t rsp_q [$];
  int   rsp_t [$];
  int   cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    mem_req_ready <= ($urandom_range(0, 3) != 0);
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req.we) mem[mem_req.addr >> 6] = mem_req.wdata;
      else begin
        rsp_q.push_back(mem.exists(mem_req.addr >> 6) ? mem[mem_req.addr >> 6] : '0);
        rsp_t.push_back(cyc + 3);
      end
    end
    if (rsp_q.size() > 0 && rsp_t[0] <= cyc) begin
      mem_rsp_valid <= 1'b1;
      mem_rsp_data  <= rsp_q.pop_front();
      void'(rsp_t.pop_front());
    end else begin
      mem_rsp_valid <= 1'b0;
    end
  end

  // ---------------- operand matrices ----------------
  int A_d [16][32];    // dense A, K = 32
  int A_u [16][64];    // 2:4 A, K = 64
  int A_v [16][128];   // 1:4 A, K = 128
  int A_r [32][64];    // row-wise A, K = 64
  int B_d [32][16], B_u [64][16], B_v [128][16], B_r [64][16];
  int C0 [16][16], C1 [16][16], C2 [16][16], C3 [16][16], CR [32][16];
  pat_e rowpat [32];

  // N non-zeros in every block of 4, at random distinct positions
  function automatic logic [3:0] rand_mask(int n);
    logic [3:0] m;
    int pos;
    m = '0;
    while ($countones(m) < n) begin
      pos = $urandom_range(0, 3);
      m[pos] = 1'b1;
    end
    return m;
  endfunction

  // write a tile given as rows of 64 B at addr, stride 64
  task automatic put_rows(int unsigned addr, row_t rows [$]);
    foreach (rows[i]) mem[(addr >> 6) + i] = rows[i];
  endtask

  // compressed A rows (values and metadata) of a tile-wise sparse A: nnz per block n,
  // k elements per row
  task automatic pack_sparse_row(input int vals [], input int n, output row_t vrow,
                                 output logic [63:0] mrow);
    int e;
    e = 0;
    vrow = '0;
    mrow = '0;
    for (int k = 0; k < vals.size(); k++)
      if (n == 4 || vals[k] != 0) begin
        vrow[16*e +: 16] = bf16_of_int(vals[k]);
        mrow[2*e +: 2]   = 2'(k % 4);
        e++;
      end
  endtask

  function automatic row_t bcol_row(int col [], int first);
    row_t r;
    r = '0;
    for (int i = 0; i < 32; i++) r[16*i +: 16] = bf16_of_int(col[first + i]);
    return r;
  endfunction

  // ---------------- addresses ----------------
  localparam int unsigned AD = 32'h0001_0000, BD = 32'h0001_0400, C0A = 32'h0001_0800,
                          C1A = 32'h0001_0C00;
  localparam int unsigned AU = 32'h0002_0000, MU = 32'h0002_0400, BU = 32'h0002_0800,
                          C2A = 32'h0002_1000;
  localparam int unsigned AV = 32'h0003_0000, MV = 32'h0003_0400, BV = 32'h0003_0800,
                          C3A = 32'h0003_1800;
  localparam int unsigned AR = 32'h0004_0000, MR = 32'h0004_0800, BR = 32'h0004_1000,
                          CRA = 32'h0004_1800;
  localparam int unsigned OUT0 = 32'h0008_0000, OUT1 = 32'h0008_0400, OUT2 = 32'h0008_0800,
                          OUT3 = 32'h0008_0C00, OUTR = 32'h0008_1000;

  logic [63:0] rowcfg_r;
  int n_rw_rows;

  task automatic build_data();
    row_t q [$];
    row_t vr;
    logic [63:0] mr;
    row_t mlines [$];
    int col [];
    int vals [];
    logic [3:0] msk;
    // ---- dense ----
    foreach (A_d[r, k]) A_d[r][k] = rnz(3);
    foreach (B_d[k, j]) B_d[k][j] = rnz(3);
    foreach (C0[r, j]) begin C0[r][j] = rnz(60); C1[r][j] = rnz(60); end
    q = {};
    for (int r = 0; r < 16; r++) begin
      vr = '0;
      for (int k = 0; k < 32; k++) vr[16*k +: 16] = bf16_of_int(A_d[r][k]);
      q.push_back(vr);
    end
    put_rows(AD, q);
    q = {};
    col = new[32];
    for (int j = 0; j < 16; j++) begin
      for (int k = 0; k < 32; k++) col[k] = B_d[k][j];
      q.push_back(bcol_row(col, 0));
    end
    put_rows(BD, q);
    put_rows(C0A, ctile(C0));
    put_rows(C1A, ctile(C1));
    // ---- 2:4 ----
    foreach (A_u[r, k]) A_u[r][k] = 0;
    for (int r = 0; r < 16; r++)
      for (int b = 0; b < 16; b++) begin
        msk = rand_mask(2);
        for (int i = 0; i < 4; i++) if (msk[i]) A_u[r][4*b+i] = rnz(3);
      end
    foreach (B_u[k, j]) B_u[k][j] = rnz(3);
    foreach (C2[r, j]) C2[r][j] = rnz(60);
    q = {}; mlines = {};
    vals = new[64];
    for (int r = 0; r < 16; r++) begin
      for (int k = 0; k < 64; k++) vals[k] = A_u[r][k];
      pack_sparse_row(vals, 2, vr, mr);
      q.push_back(vr);
      if (r % 8 == 0) mlines.push_back('0);
      mlines[r/8][64*(r%8) +: 64] = mr;
    end
    put_rows(AU, q);
    put_rows(MU, mlines);
    q = {};
    col = new[64];
    for (int j = 0; j < 16; j++) begin
      for (int k = 0; k < 64; k++) col[k] = B_u[k][j];
      q.push_back(bcol_row(col, 0));
      q.push_back(bcol_row(col, 32));
    end
    put_rows(BU, q);
    put_rows(C2A, ctile(C2));
    // ---- 1:4 ----
    foreach (A_v[r, k]) A_v[r][k] = 0;
    for (int r = 0; r < 16; r++)
      for (int b = 0; b < 32; b++) A_v[r][4*b + $urandom_range(0, 3)] = rnz(3);
    foreach (B_v[k, j]) B_v[k][j] = rnz(3);
    foreach (C3[r, j]) C3[r][j] = rnz(60);
    q = {}; mlines = {};
    vals = new[128];
    for (int r = 0; r < 16; r++) begin
      for (int k = 0; k < 128; k++) vals[k] = A_v[r][k];
      pack_sparse_row(vals, 1, vr, mr);
      q.push_back(vr);
      if (r % 8 == 0) mlines.push_back('0);
      mlines[r/8][64*(r%8) +: 64] = mr;
    end
    put_rows(AV, q);
    put_rows(MV, mlines);
    q = {};
    col = new[128];
    for (int j = 0; j < 16; j++) begin
      for (int k = 0; k < 128; k++) col[k] = B_v[k][j];
      for (int i = 0; i < 4; i++) q.push_back(bcol_row(col, 32 * i));
    end
    put_rows(BV, q);
    put_rows(C3A, ctile(C3));
    // ---- row-wise: groups 4:4 | 2:4 x2 | 1:4 x4 | 4:4 | 2:4 x2 | 1:4 x4 | 4:4 | 2:4 x2 ----
    begin
      pat_e gp [8];
      int r;
      gp = '{PAT_4_4, PAT_2_4, PAT_1_4, PAT_4_4, PAT_2_4, PAT_1_4, PAT_4_4, PAT_2_4};
      foreach (rowpat[i]) rowpat[i] = PAT_NONE;
      r = 0;
      foreach (gp[g]) begin
        int span;
        span = (gp[g] == PAT_4_4) ? 1 : (gp[g] == PAT_2_4) ? 2 : 4;
        for (int k = 0; k < span; k++) rowpat[r + k] = gp[g];
        r += span;
      end
      n_rw_rows = r;
      rowcfg_r = '0;
      foreach (rowpat[i]) rowcfg_r[2*i +: 2] = rowpat[i];
      foreach (A_r[rr, k]) A_r[rr][k] = 0;
      for (int rr = 0; rr < n_rw_rows; rr++)
        for (int b = 0; b < 16; b++) begin
          msk = rand_mask((rowpat[rr] == PAT_4_4) ? 4 : (rowpat[rr] == PAT_2_4) ? 2 : 1);
          for (int i = 0; i < 4; i++) if (msk[i]) A_r[rr][4*b+i] = rnz(3);
        end
      // values/metadata: group g uses treg rows 2g, 2g+1; weight e = p*4 + m of MAC column m
      begin
        row_t vrows [16];
        logic [63:0] mrows [16];
        foreach (vrows[i]) begin vrows[i] = '0; mrows[i] = '0; end
        r = 0;
        foreach (gp[g]) begin
          int span, nnz, rowi, slot, cnt;
          span = (gp[g] == PAT_4_4) ? 1 : (gp[g] == PAT_2_4) ? 2 : 4;
          for (int p = 0; p < 16; p++)
            for (int m = 0; m < 4; m++) begin
              int e, pos;
              e = p * 4 + m;
              if (span == 1) begin rowi = r; slot = m; end
              else if (span == 2) begin rowi = r + m / 2; slot = m % 2; end
              else begin rowi = r + m; slot = 0; end
              // slot-th non-zero of block p of A row rowi
              cnt = 0; pos = 0;
              for (int i = 0; i < 4; i++)
                if (A_r[rowi][4*p+i] != 0) begin
                  if (cnt == slot) pos = i;
                  cnt++;
                end
              vrows[2*g + e/32][16*(e%32) +: 16] = bf16_of_int(A_r[rowi][4*p+pos]);
              mrows[2*g + e/32][2*(e%32) +: 2]   = 2'(pos);
            end
          r += span;
        end
        q = {};
        foreach (vrows[i]) q.push_back(vrows[i]);
        put_rows(AR, q);
        mlines = {'0, '0};
        foreach (mrows[i]) mlines[i/8][64*(i%8) +: 64] = mrows[i];
        put_rows(MR, mlines);
      end
    end
    foreach (B_r[k, j]) B_r[k][j] = rnz(3);
    foreach (CR[rr, j]) CR[rr][j] = rnz(60);
    q = {};
    col = new[64];
    for (int j = 0; j < 16; j++) begin
      for (int k = 0; k < 64; k++) col[k] = B_r[k][j];
      q.push_back(bcol_row(col, 0));
      q.push_back(bcol_row(col, 32));
    end
    put_rows(BR, q);
    q = {};
    for (int rr = 0; rr < 32; rr++) begin
      vr = '0;
      for (int j = 0; j < 16; j++) vr[32*j +: 32] = fp32_of_int(CR[rr][j]);
      q.push_back(vr);
    end
    put_rows(CRA, q);
  endtask

  function automatic row_t_q ctile(int c [16][16]);
    row_t_q q;
    row_t vr;
    for (int r = 0; r < 16; r++) begin
      vr = '0;
      for (int j = 0; j < 16; j++) vr[32*j +: 32] = fp32_of_int(c[r][j]);
      q.push_back(vr);
    end
    return q;
  endfunction

  // ---------------- instruction issue ----------------
  task automatic issue(opcode_e op, int dst, int src1 = 0, int src2 = 0, int msrc = 0,
                       int unsigned addr = 0, logic [63:0] rowcfg = '0);
    @(negedge clk);
    instr_valid = 1'b1;
    instr = '{op: op, dst: 3'(dst), src1: 3'(src1), src2: 3'(src2), msrc: 3'(msrc),
              addr: addr, stride: 32'd64, rowcfg: rowcfg};
    while (!instr_ready) @(negedge clk);
    @(posedge clk);
    #1 instr_valid = 1'b0;
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (!(idle && !instr_valid)) @(posedge clk);
  endtask

  // ---------------- checking ----------------
  task automatic check_tile(string name, int unsigned addr, int nrows, int exp [32][16]);
    int bad;
    bad = 0;
    for (int r = 0; r < nrows; r++)
      for (int j = 0; j < 16; j++) begin
        logic [31:0] got, want;
        got  = mem.exists((addr >> 6) + r) ? mem[(addr >> 6) + r][32*j +: 32] : 32'hDEAD_BEEF;
        want = fp32_of_int(exp[r][j]);
        checks++;
        if (got !== want) begin
          failures++;
          if (bad < 5) $display("FAIL %s C[%0d][%0d] got %h (%0f) want %h (%0d)", name, r, j,
                                got, fp32_to_real(got), want, exp[r][j]);
          bad++;
        end
      end
    $display("%s: %0d mismatches", name, bad);
  endtask

  // ---------------- mechanism observation ----------------
  int n_mode [4];
  int ff_times [$];
  always @(posedge clk)
    if (rst_n && dut.u_engine.ff_start) begin
      n_mode[dut.u_engine.ff_op.mode]++;
      ff_times.push_back(cyc);
    end

  // ---------------- watchdog ----------------
  initial begin
    #400_000;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ---------------- main ----------------
  initial begin
    int exp [32][16];
    instr_valid = 1'b0;
    instr = '0;
    mem_rsp_valid = 1'b0;
    mem_rsp_data = '0;
    mem_req_ready = 1'b0;
    foreach (n_mode[i]) n_mode[i] = 0;
    build_data();
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // ---- phase 1: dense, pipelined and forwarded ----
    issue(OP_TILE_LOAD_T, 0, 0, 0, 0, AD);
    issue(OP_TILE_LOAD_T, 1, 0, 0, 0, BD);
    issue(OP_TILE_LOAD_T, 2, 0, 0, 0, C0A);
    issue(OP_TILE_LOAD_T, 3, 0, 0, 0, C1A);
    issue(OP_TILE_GEMM, 2, 0, 1);       // t2 += A*B
    issue(OP_TILE_GEMM, 2, 0, 1);       // t2 += A*B   (depends on the previous: OF)
    issue(OP_TILE_GEMM, 3, 0, 1);       // t3 += A*B   (independent: pipelined)
    issue(OP_TILE_GEMM, 3, 0, 1);       // t3 += A*B   (OF again)
    issue(OP_TILE_STORE_T, 0, 2, 0, 0, OUT0);
    issue(OP_TILE_STORE_T, 0, 3, 0, 0, OUT1);
    wait_idle();
    if (ff_times.size() >= 2) begin
      checks++;
      if (ff_times[1] - ff_times[0] > N_ROWS + 1) begin
        failures++;
        $display("FAIL forwarded GEMM started %0d cycles after its producer (want <= %0d)",
                 ff_times[1] - ff_times[0], N_ROWS + 1);
      end else
        $display("dependent GEMM fed %0d cycles after its producer", ff_times[1] - ff_times[0]);
    end

    // ---- phase 2: 2:4 (TILE_SPMM_U), two dependent ----
    issue(OP_TILE_LOAD_T, 0, 0, 0, 0, AU);
    issue(OP_TILE_LOAD_M, 0, 0, 0, 0, MU);
    issue(OP_TILE_LOAD_U, 1, 0, 0, 0, BU);      // ureg1 = t2, t3
    issue(OP_TILE_LOAD_T, 4, 0, 0, 0, C2A);
    issue(OP_TILE_SPMM_U, 4, 0, 1, 0);
    issue(OP_TILE_SPMM_U, 4, 0, 1, 0);
    issue(OP_TILE_STORE_T, 0, 4, 0, 0, OUT2);
    wait_idle();

    // ---- phase 3: 1:4 (TILE_SPMM_V) ----
    issue(OP_TILE_LOAD_T, 0, 0, 0, 0, AV);
    issue(OP_TILE_LOAD_M, 1, 0, 0, 0, MV);
    issue(OP_TILE_LOAD_V, 1, 0, 0, 0, BV);      // vreg1 = t4..t7
    issue(OP_TILE_LOAD_T, 1, 0, 0, 0, C3A);
    issue(OP_TILE_SPMM_V, 1, 0, 1, 1);
    issue(OP_TILE_STORE_T, 0, 1, 0, 0, OUT3);
    wait_idle();

    // ---- phase 4: row-wise (TILE_SPMM_R), two dependent ----
    issue(OP_TILE_LOAD_T, 0, 0, 0, 0, AR);
    issue(OP_TILE_LOAD_M, 2, 0, 0, 0, MR);
    issue(OP_TILE_LOAD_U, 1, 0, 0, 0, BR);      // ureg1 = t2, t3
    issue(OP_TILE_LOAD_U, 2, 0, 0, 0, CRA);     // ureg2 = t4, t5
    issue(OP_TILE_SPMM_R, 2, 0, 1, 2, 0, rowcfg_r);
    issue(OP_TILE_SPMM_R, 2, 0, 1, 2, 0, rowcfg_r);
    issue(OP_TILE_STORE_T, 0, 4, 0, 0, OUTR);
    issue(OP_TILE_STORE_T, 0, 5, 0, 0, OUTR + 1024);
    wait_idle();

    // ---- results ----
    foreach (exp[r, j]) exp[r][j] = 0;
    for (int r = 0; r < 16; r++)
      for (int j = 0; j < 16; j++) begin
        int s;
        s = 0;
        for (int k = 0; k < 32; k++) s += A_d[r][k] * B_d[k][j];
        exp[r][j] = C0[r][j] + 2 * s;
      end
    check_tile("GEMM 4:4 (t2)", OUT0, 16, exp);
    for (int r = 0; r < 16; r++)
      for (int j = 0; j < 16; j++) begin
        int s;
        s = 0;
        for (int k = 0; k < 32; k++) s += A_d[r][k] * B_d[k][j];
        exp[r][j] = C1[r][j] + 2 * s;
      end
    check_tile("GEMM 4:4 (t3)", OUT1, 16, exp);
    for (int r = 0; r < 16; r++)
      for (int j = 0; j < 16; j++) begin
        int s;
        s = 0;
        for (int k = 0; k < 64; k++) s += A_u[r][k] * B_u[k][j];
        exp[r][j] = C2[r][j] + 2 * s;
      end
    check_tile("SPMM 2:4", OUT2, 16, exp);
    for (int r = 0; r < 16; r++)
      for (int j = 0; j < 16; j++) begin
        int s;
        s = 0;
        for (int k = 0; k < 128; k++) s += A_v[r][k] * B_v[k][j];
        exp[r][j] = C3[r][j] + s;
      end
    check_tile("SPMM 1:4", OUT3, 16, exp);
    for (int r = 0; r < 32; r++)
      for (int j = 0; j < 16; j++) begin
        int s;
        s = 0;
        if (r < n_rw_rows)
          for (int k = 0; k < 64; k++) s += A_r[r][k] * B_r[k][j];
        exp[r][j] = CR[r][j] + 2 * s;
      end
    check_tile("SPMM row-wise", OUTR, 32, exp);

    // ---- mechanisms ----
    $display("counters: overlap=%0d of=%0d bypass=%0d dep_stall=%0d bank_stall=%0d rw_err=%0d",
             cnt_overlap, cnt_of, cnt_bypass, cnt_dep_stall, cnt_bank_stall, cnt_rw_err);
    $display("modes: 4:4=%0d 2:4=%0d 1:4=%0d row=%0d", n_mode[0], n_mode[1], n_mode[2], n_mode[3]);
    expect_seen("pipelining overlap", cnt_overlap);
    expect_seen("output forwarding", cnt_of);
    expect_seen("forwarding bypass", cnt_bypass);
    expect_seen("dependency stall", cnt_dep_stall);
    expect_seen("bank stall", cnt_bank_stall);
    expect_seen("mode 4:4", n_mode[MODE_4_4]);
    expect_seen("mode 2:4", n_mode[MODE_2_4]);
    expect_seen("mode 1:4", n_mode[MODE_1_4]);
    expect_seen("mode row-wise", n_mode[MODE_ROW]);
    checks++;
    if (cnt_rw_err != 0) begin
      failures++;
      $display("FAIL row-wise configuration error");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_seen(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never happened: %s", what);
    end
  endtask
endmodule
