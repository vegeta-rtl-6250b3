// tb_vegeta_workload_gemm: a transformer-style layer GEMM run through the full-size tile unit
// the way software tiles it, at a size a simulation can afford.
//
// C (MM x NN, FP32) += A (MM x KK, 2:4 sparse weights) x B (KK x NN, dense activations),
// with MM = 32, NN = 32, KK = 128: four 16 x 16 output tiles, each accumulated over two
// 64-deep K steps with TILE_SPMM_U.  The loop nest is the one a full BERT or GPT layer
// needs (only the trip counts differ): for every column block n, keep the two C tiles of
// that block in registers; for every K step load the two compressed A tiles, their
// metadata and the B tile, and issue the two SPMMs (independent, so they pipeline); store.
// Weights are stored compressed with 2-bit metadata, B transposed.  Operands are small
// integers so the FP32 result is exact and the reference is an integer product.  Also
// reports the engine cycles spent and checks that instructions overlapped.
// The tile sizes and instruction semantics follow the paper; the layer slice is this
// test's choice.
module tb_vegeta_workload_gemm;
  import vegeta_pkg::*;
  import tb_vegeta_util_pkg::*;

  localparam int MM = 32, NN = 32, KK = 128;
  localparam int MT = MM / 16, NT = NN / 16, KT = KK / 64;

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
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- memory model ----------------
  row_t mem [int unsigned];
  row_t rsp_q [$];
  int   rsp_t [$];
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
    end else mem_rsp_valid <= 1'b0;
  end

  initial begin
    #2_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  int A [MM][KK], B [KK][NN], C [MM][NN];

  // memory map: tile (i, k) of A at A_BASE + (i*KT + k) KB, its metadata at M_BASE + ...,
  // B tile (k, n) (2 KB) at B_BASE + (k*NT + n) 2 KB, C tile (i, n) at C_BASE / OUT_BASE
  localparam int unsigned A_BASE = 32'h0010_0000, M_BASE = 32'h0020_0000,
                          B_BASE = 32'h0030_0000, C_BASE = 32'h0040_0000,
                          O_BASE = 32'h0050_0000;

  function automatic int unsigned a_addr(int i, int k); return A_BASE + (i * KT + k) * 1024; endfunction
  function automatic int unsigned m_addr(int i, int k); return M_BASE + (i * KT + k) * 128;  endfunction
  function automatic int unsigned b_addr(int k, int n); return B_BASE + (k * NT + n) * 2048; endfunction
  function automatic int unsigned c_addr(int i, int n); return C_BASE + (i * NT + n) * 1024; endfunction
  function automatic int unsigned o_addr(int i, int n); return O_BASE + (i * NT + n) * 1024; endfunction

  task automatic build();
    foreach (A[r, k]) A[r][k] = 0;
    for (int r = 0; r < MM; r++)
      for (int b = 0; b < KK / 4; b++) begin
        int p0, p1;
        p0 = $urandom_range(0, 3);
        p1 = (p0 + $urandom_range(1, 3)) % 4;
        A[r][4*b+p0] = rnz(3);
        A[r][4*b+p1] = rnz(3);
      end
    foreach (B[k, j]) B[k][j] = rnz(3);
    foreach (C[r, j]) C[r][j] = rnz(100);
    for (int i = 0; i < MT; i++)
      for (int k = 0; k < KT; k++) begin
        row_t mline [2];
        mline[0] = '0; mline[1] = '0;
        for (int r = 0; r < 16; r++) begin
          row_t v;
          logic [63:0] md;
          int e;
          v = '0; md = '0; e = 0;
          for (int kk = 0; kk < 64; kk++)
            if (A[16*i + r][64*k + kk] != 0) begin
              v[16*e +: 16] = bf16_of_int(A[16*i + r][64*k + kk]);
              md[2*e +: 2]  = 2'(kk % 4);
              e++;
            end
          mem[(a_addr(i, k) >> 6) + r] = v;
          mline[r / 8][64*(r%8) +: 64] = md;
        end
        mem[m_addr(i, k) >> 6] = mline[0];
        mem[(m_addr(i, k) >> 6) + 1] = mline[1];
      end
    for (int k = 0; k < KT; k++)
      for (int n = 0; n < NT; n++)
        for (int j = 0; j < 16; j++)
          for (int h = 0; h < 2; h++) begin
            row_t v;
            v = '0;
            for (int q = 0; q < 32; q++) v[16*q +: 16] = bf16_of_int(B[64*k + 32*h + q][16*n + j]);
            mem[(b_addr(k, n) >> 6) + 2*j + h] = v;
          end
    for (int i = 0; i < MT; i++)
      for (int n = 0; n < NT; n++)
        for (int r = 0; r < 16; r++) begin
          row_t v;
          v = '0;
          for (int j = 0; j < 16; j++) v[32*j +: 32] = fp32_of_int(C[16*i + r][16*n + j]);
          mem[(c_addr(i, n) >> 6) + r] = v;
        end
  endtask

  task automatic issue(opcode_e op, int dst, int src1 = 0, int src2 = 0, int msrc = 0,
                       int unsigned addr = 0, int unsigned stride = 64);
    @(negedge clk);
    instr_valid = 1'b1;
    instr = '{op: op, dst: 3'(dst), src1: 3'(src1), src2: 3'(src2), msrc: 3'(msrc),
              addr: addr, stride: stride, rowcfg: '0};
    while (!instr_ready) @(negedge clk);
    @(posedge clk);
    #1 instr_valid = 1'b0;
  endtask

  int busy_cycles = 0;
  always @(posedge clk) if (rst_n && dut.u_engine.busy) busy_cycles++;

  initial begin
    instr_valid = 1'b0; instr = '0;
    mem_rsp_valid = 1'b0; mem_rsp_data = '0; mem_req_ready = 1'b0;
    build();
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // C tiles of column block n live in t6 (i = 0) and t7 (i = 1); A tiles in t0, t1;
    // metadata in m0, m1; the B tile in ureg1 (t2, t3)
    for (int n = 0; n < NT; n++) begin
      for (int i = 0; i < MT; i++) issue(OP_TILE_LOAD_T, 6 + i, 0, 0, 0, c_addr(i, n));
      for (int k = 0; k < KT; k++) begin
        for (int i = 0; i < MT; i++) begin
          issue(OP_TILE_LOAD_T, i, 0, 0, 0, a_addr(i, k));
          issue(OP_TILE_LOAD_M, i, 0, 0, 0, m_addr(i, k));
        end
        issue(OP_TILE_LOAD_U, 1, 0, 0, 0, b_addr(k, n));
        for (int i = 0; i < MT; i++) issue(OP_TILE_SPMM_U, 6 + i, i, 1, i);
      end
      for (int i = 0; i < MT; i++) issue(OP_TILE_STORE_T, 0, 6 + i, 0, 0, o_addr(i, n));
    end
    @(posedge clk);
    while (!(idle && !instr_valid)) @(posedge clk);

    for (int r = 0; r < MM; r++)
      for (int j = 0; j < NN; j++) begin
        int s;
        logic [31:0] got;
        s = C[r][j];
        for (int k = 0; k < KK; k++) s += A[r][k] * B[k][j];
        got = mem[(o_addr(r / 16, j / 16) >> 6) + r % 16][32*(j%16) +: 32];
        checks++;
        if (got !== fp32_of_int(s)) begin
          failures++;
          if (failures < 6) $display("FAIL C[%0d][%0d] got %0f want %0d", r, j, fp32_to_real(got), s);
        end
      end
    checks++;
    if (cnt_overlap == 0) begin failures++; $display("FAIL SPMMs never overlapped"); end
    $display("%0dx%0dx%0d 2:4 GEMM: %0d TILE_SPMM_U, engine busy %0d cycles, overlap=%0d",
             MM, NN, KK, MT * NT * KT, busy_cycles, cnt_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
