// tb_vegeta_reduction_unit: self-checking test of the reduction below a four-column group.
//
// Streams random lane partial sums (small integers, so sums are exact) with random
// tile-wise / row-wise flags and patterns, and checks: tile-wise results one cycle later
// (t_out[0] = l0 + l1, t_out[1] = l2 + l3) with t_vld; row-wise results two cycles later,
// with r_vld = 0001 / 0011 / 1111 for 4:4 / 2:4 / 1:4 and the sums of Fig. 11.
//
// The adder tree follows the paper's row-wise mapping figure; the register stages are this
// design's.
module tb_vegeta_reduction_unit;
  import vegeta_pkg::*;
  import tb_vegeta_util_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_vld, rowwise;
  pat_e pat;
  fp32_t lanes [4];
  logic t_vld;
  fp32_t t_out [2];
  logic [3:0] r_vld;
  fp32_t r_out [4];
  int checks = 0, failures = 0;

  vegeta_reduction_unit dut (.*);

  initial begin
    #1_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  typedef struct { logic vld, row; pat_e pat; int v [4]; } ent_t;
  ent_t hist [$];

  task automatic chk(logic [31:0] got, int want, string what);
    checks++;
    if (got !== fp32_of_int(want)) begin
      failures++;
      if (failures < 8) $display("FAIL %s got %h want %0d", what, got, want);
    end
  endtask

  initial begin
    ent_t e, e1, e2;
    in_vld = 0; rowwise = 0; pat = PAT_4_4;
    foreach (lanes[i]) lanes[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      // check outputs of the entries pushed 1 and 2 cycles ago
      if (hist.size() >= 1) begin
        e1 = hist[hist.size()-1];
        checks++;
        if (t_vld !== (e1.vld && !e1.row)) begin failures++; $display("FAIL t_vld"); end
        if (e1.vld && !e1.row) begin
          chk(t_out[0], e1.v[0] + e1.v[1], "t_out0");
          chk(t_out[1], e1.v[2] + e1.v[3], "t_out1");
        end
      end
      if (hist.size() >= 2) begin
        logic [3:0] wv;
        e2 = hist[hist.size()-2];
        wv = !(e2.vld && e2.row) ? 4'b0 : (e2.pat == PAT_4_4) ? 4'b0001 :
             (e2.pat == PAT_2_4) ? 4'b0011 : (e2.pat == PAT_1_4) ? 4'b1111 : 4'b0;
        checks++;
        if (r_vld !== wv) begin failures++; $display("FAIL r_vld %b want %b", r_vld, wv); end
        if (wv == 4'b0001) chk(r_out[0], e2.v[0] + e2.v[1] + e2.v[2] + e2.v[3], "r 4:4");
        if (wv == 4'b0011) begin
          chk(r_out[0], e2.v[0] + e2.v[1], "r 2:4 0");
          chk(r_out[1], e2.v[2] + e2.v[3], "r 2:4 1");
        end
        if (wv == 4'b1111) for (int k = 0; k < 4; k++) chk(r_out[k], e2.v[k], "r 1:4");
      end
      e.vld = ($urandom_range(0, 4) != 0);
      e.row = 1'($urandom_range(0, 1));
      e.pat = pat_e'($urandom_range(0, 3));
      foreach (e.v[k]) e.v[k] = rnz(1000);
      in_vld = e.vld; rowwise = e.row; pat = e.pat;
      foreach (lanes[k]) lanes[k] = fp32_of_int(e.v[k]);
      hist.push_back(e);
      if (hist.size() > 2) void'(hist.pop_front());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
