// vegeta_mac: one MAC unit of a processing unit, acc_out = a * w + acc_in.
//
// a (input element) and w (stationary weight) are BF16; the product is formed exactly in
// FP32 by vegeta_bf16_mul and added to the FP32 partial sum by vegeta_fp32_add (round to
// nearest even).  Purely combinational: the processing element that holds the MAC
// registers its result, so a partial sum advances one array row per cycle as the paper's
// systolic timing requires.  BF16 operands with FP32 accumulation follow the paper;
// rounding and flush-to-zero are this design's choices.
module vegeta_mac
  import vegeta_pkg::*;
(
  input  bf16_t a,
  input  bf16_t w,
  input  fp32_t acc_in,
  output fp32_t acc_out
);
  fp32_t prod;

  vegeta_bf16_mul u_mul (.a(a), .b(w), .p(prod));
  vegeta_fp32_add u_add (.a(prod), .b(acc_in), .s(acc_out));
endmodule
