// vegeta_input_selector: per-row input selector in front of a VEGETA-S array row.
//
// A row receives up to two input blocks per cycle, 128 bits = eight BF16 elements (bits
// 0:127), and must hand one block to each of the two MAC lanes of every SPU:
//   4:4 (TILE_GEMM):    lane 0 gets element 0 (bits 0:15), lane 1 element 1 (bits 16:31);
//                       the element sits in position 0 of the lane's block, the rest is 0
//   2:4 (TILE_SPMM_U):  both lanes get block 0 (bits 0:63)
//   1:4 (TILE_SPMM_V):  lane 0 gets block 0 (bits 0:63), lane 1 block 1 (bits 64:127)
//   row-wise N:4:       as 2:4, one block per row, every MAC picks from it
// These are the two multiplexers of the paper's Fig. 9, labelled 4:4/(2:4 or 1:4) and
// 4:4/2:4/1:4, with the bit ranges printed there.  Zero padding of the 4:4 lanes is this
// design's choice (the weights of a dense tile are loaded with index 0).  Combinational.
module vegeta_input_selector
  import vegeta_pkg::*;
(
  input  mode_e        mode,
  input  logic [127:0] raw,
  output blk_t         lane [BETA]
);
  always_comb begin
    unique case (mode)
      MODE_4_4: begin
        lane[0] = {48'd0, raw[15:0]};
        lane[1] = {48'd0, raw[31:16]};
      end
      MODE_1_4: begin
        lane[0] = raw[63:0];
        lane[1] = raw[127:64];
      end
      default: begin                  // MODE_2_4, MODE_ROW
        lane[0] = raw[63:0];
        lane[1] = raw[63:0];
      end
    endcase
  end
endmodule
