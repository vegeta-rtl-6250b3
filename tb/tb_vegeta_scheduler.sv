// tb_vegeta_scheduler: self-checking test of the stage scheduler, with and without output
// forwarding (two instances fed the same instruction stream).
//
// Checks the start times the paper's pipelining rules give (T_N = 16, N_ROWS = 16):
//   independent instructions: feeds N_ROWS after the weight load and 16 cycles apart;
//   a dependent tile-wise instruction with OF: feed N_ROWS + 1 cycles after its producer's
//     (the paper's 2*N_ROWS + log2(BETA) counted from the producer's weight load);
//   the same without OF: feed after the producer's last C write;
//   row-wise instructions never forward.
// Also that weight loads alternate banks, that a feed uses the bank its load wrote, and
// that the counters see the overlap, forwarding and stall events.
module tb_vegeta_scheduler;
  import vegeta_pkg::*;

  localparam int NR = N_ROWS, NC = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic    op_valid = 1'b0;
  eng_op_t op;
  logic    rdy [2], wls [2], wlb [2], ffs [2], ffb [2], bsy [2];
  eng_op_t wlo [2], ffo [2];
  logic [31:0] c_dep [2], c_of [2], c_ov [2], c_bk [2];
  int checks = 0, failures = 0;
  int cyc = 0;
  int ff_t [2][$];
  logic ff_bank_q [2][$], wl_bank_q [2][$];

  vegeta_scheduler #(.NR(NR), .NC(NC), .OF_EN(1'b1)) dut_of (
    .clk, .rst_n, .op_valid(op_valid && rdy[1]), .op, .op_ready(rdy[0]),
    .wl_start(wls[0]), .wl_bank(wlb[0]), .wl_op(wlo[0]), .ff_start(ffs[0]), .ff_bank(ffb[0]),
    .ff_op(ffo[0]), .busy(bsy[0]), .cnt_dep_stall(c_dep[0]), .cnt_of(c_of[0]),
    .cnt_overlap(c_ov[0]), .cnt_bank_stall(c_bk[0]));
  vegeta_scheduler #(.NR(NR), .NC(NC), .OF_EN(1'b0)) dut_nof (
    .clk, .rst_n, .op_valid(op_valid && rdy[0]), .op, .op_ready(rdy[1]),
    .wl_start(wls[1]), .wl_bank(wlb[1]), .wl_op(wlo[1]), .ff_start(ffs[1]), .ff_bank(ffb[1]),
    .ff_op(ffo[1]), .busy(bsy[1]), .cnt_dep_stall(c_dep[1]), .cnt_of(c_of[1]),
    .cnt_overlap(c_ov[1]), .cnt_bank_stall(c_bk[1]));

  initial begin
    #1_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < 2; i++) begin
      if (ffs[i]) begin ff_t[i].push_back(cyc); ff_bank_q[i].push_back(ffb[i]); end
      if (wls[i]) wl_bank_q[i].push_back(wlb[i]);
    end
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // issue a list of ops to both instances (they accept together)
  task automatic run(eng_op_t ops [$]);
    foreach (ff_t[i]) begin ff_t[i] = {}; ff_bank_q[i] = {}; wl_bank_q[i] = {}; end
    foreach (ops[k]) begin
      @(negedge clk);
      op = ops[k];
      op_valid = 1;
      while (!(rdy[0] && rdy[1])) @(negedge clk);
      @(posedge clk);
      @(negedge clk);
      op_valid = 0;
    end
    @(negedge clk);
    while (bsy[0] || bsy[1]) @(negedge clk);
  endtask

  function automatic eng_op_t mk(mode_e m, int c, int a, int b);
    eng_op_t o;
    o = '0;
    o.mode = m; o.c_treg = 3'(c); o.a_treg = 3'(a); o.b_treg = 3'(b);
    o.rowcfg = '1;
    if (m == MODE_ROW) o.rowcfg[1:0] = PAT_4_4;
    return o;
  endfunction

  initial begin
    eng_op_t ops [$];
    op_valid = 0; op = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. four independent GEMMs: feeds 16 apart in both
    ops = {mk(MODE_4_4, 4, 0, 1), mk(MODE_4_4, 5, 0, 1), mk(MODE_4_4, 6, 0, 1), mk(MODE_4_4, 7, 0, 1)};
    run(ops);
    for (int i = 0; i < 2; i++) begin
      chk(ff_t[i].size() == 4, "four feeds");
      for (int k = 1; k < ff_t[i].size(); k++)
        chk(ff_t[i][k] - ff_t[i][k-1] == T_N, $sformatf("independent spacing %0d", ff_t[i][k] - ff_t[i][k-1]));
      foreach (ff_bank_q[i][k]) chk(ff_bank_q[i][k] == wl_bank_q[i][k] && wl_bank_q[i][k] == 1'(k % 2) ^ wl_bank_q[i][0], "bank order");
    end
    // 2. dependent GEMM chain on one C tile
    ops = {mk(MODE_4_4, 4, 0, 1), mk(MODE_4_4, 4, 0, 1), mk(MODE_4_4, 4, 2, 3)};
    run(ops);
    for (int k = 1; k < 3; k++) begin
      chk(ff_t[0][k] - ff_t[0][k-1] == NR + 1, $sformatf("OF start distance %0d", ff_t[0][k] - ff_t[0][k-1]));
      chk(ff_t[1][k] - ff_t[1][k-1] == T_N + NC - 1 + NR + 1,
          $sformatf("no-OF start distance %0d", ff_t[1][k] - ff_t[1][k-1]));
    end
    // 3. dependent row-wise pair: no forwarding even with OF
    ops = {mk(MODE_ROW, 4, 0, 2), mk(MODE_ROW, 4, 1, 2)};
    run(ops);
    for (int i = 0; i < 2; i++)
      chk(ff_t[i][1] - ff_t[i][0] == T_N + NC - 1 + NR + 2, $sformatf("row-wise distance %0d", ff_t[i][1] - ff_t[i][0]));
    chk(c_of[0] > 0 && c_of[1] == 0, "OF counters");
    chk(c_ov[0] > 0 && c_dep[0] > 0 && c_dep[1] > 0, "overlap / dependency counters");
    $display("counters OF: dep=%0d of=%0d ov=%0d bank=%0d | no OF: dep=%0d of=%0d ov=%0d bank=%0d",
             c_dep[0], c_of[0], c_ov[0], c_bk[0], c_dep[1], c_of[1], c_ov[1], c_bk[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
