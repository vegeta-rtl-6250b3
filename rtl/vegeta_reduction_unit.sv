// vegeta_reduction_unit: reduction below one group of four MAC columns (two SPU-2s).
//
// Tile-wise instructions (BETA = 2): each SPU's two lane partial sums are added, one adder
// per SPU, registered once, so a result leaves log2(BETA) = 1 cycle after the bottom SPE:
// t_out[0] = l0 + l1 and t_out[1] = l2 + l3.
// Row-wise N:4 instructions use a second, registered adder row (paper Fig. 11) and the
// group's pattern code:
//   4:4  one A row uses all four columns:  r_out[0] = (l0 + l1) + (l2 + l3)
//   2:4  two A rows, two columns each:     r_out[0] = l0 + l1, r_out[1] = l2 + l3
//   1:4  four A rows, one column each:     r_out[k] = l_k
// r_vld[k] marks which outputs carry a result.  Row-wise results leave 2 cycles after the
// bottom SPE.  The adder tree follows Fig. 11; registering each adder row is this design's
// choice.
module vegeta_reduction_unit
  import vegeta_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_vld,
  input  logic  rowwise,
  input  pat_e  pat,
  input  fp32_t lanes [4],
  // tile-wise results, one cycle later
  output logic  t_vld,
  output fp32_t t_out [2],
  // row-wise results, two cycles later
  output logic [3:0] r_vld,
  output fp32_t r_out [4]
);
  fp32_t s01, s23, s_all;
  fp32_t st1_sum [2];
  fp32_t st1_lane [4];
  logic  st1_vld, st1_row;
  pat_e  st1_pat;

  vegeta_fp32_add u_add01 (.a(lanes[0]), .b(lanes[1]), .s(s01));
  vegeta_fp32_add u_add23 (.a(lanes[2]), .b(lanes[3]), .s(s23));
  vegeta_fp32_add u_add_all (.a(st1_sum[0]), .b(st1_sum[1]), .s(s_all));

  always_ff @(posedge clk)
    if (!rst_n) begin
      st1_vld <= 1'b0;
      st1_row <= 1'b0;
      r_vld   <= 4'b0;
    end else begin
      st1_vld <= in_vld;
      st1_row <= in_vld && rowwise;
      if (st1_vld && st1_row)
        unique case (st1_pat)
          PAT_4_4: r_vld <= 4'b0001;
          PAT_2_4: r_vld <= 4'b0011;
          PAT_1_4: r_vld <= 4'b1111;
          default: r_vld <= 4'b0000;
        endcase
      else
        r_vld <= 4'b0000;
    end

  always_ff @(posedge clk) begin
    st1_sum  <= '{s01, s23};
    st1_lane <= lanes;
    st1_pat  <= pat;
    unique case (st1_pat)
      PAT_4_4: r_out <= '{s_all, 32'd0, 32'd0, 32'd0};
      PAT_2_4: r_out <= '{st1_sum[0], st1_sum[1], 32'd0, 32'd0};
      default: r_out <= st1_lane;
    endcase
  end

  assign t_vld = st1_vld && !st1_row;
  assign t_out = st1_sum;
endmodule
