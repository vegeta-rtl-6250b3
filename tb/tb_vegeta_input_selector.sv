// tb_vegeta_input_selector: self-checking test of the per-row input selector.
//
// For random 128-bit raw inputs and each mode, checks the BETA = 2 lane blocks against the
// slices the mode defines: 4:4 gives each lane one element (lane 0 = raw[15:0], lane 1 =
// raw[31:16], index 0 of a zero-padded block), 2:4 and row-wise give both lanes the same
// block raw[63:0], 1:4 gives lane 0 raw[63:0] and lane 1 raw[127:64].
//
// The three selections follow the paper's description of the input selector; which block
// goes to which lane in 1:4 is this design's choice.
module tb_vegeta_input_selector;
  import vegeta_pkg::*;

  mode_e        mode;
  logic [127:0] raw;
  blk_t         lane [BETA];
  int checks = 0, failures = 0;

  vegeta_input_selector dut (.*);

  initial begin
    #1_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic chk(blk_t got, blk_t want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s mode %s got %h want %h", what, mode.name(), got, want);
    end
  endtask

  initial begin
    for (int it = 0; it < 500; it++) begin
      raw  = {$urandom, $urandom, $urandom, $urandom};
      mode = mode_e'(it % 4);
      #1;
      unique case (mode)
        MODE_4_4: begin
          chk(lane[0], {48'd0, raw[15:0]}, "lane0");
          chk(lane[1], {48'd0, raw[31:16]}, "lane1");
        end
        MODE_1_4: begin
          chk(lane[0], raw[63:0], "lane0");
          chk(lane[1], raw[127:64], "lane1");
        end
        default: begin
          chk(lane[0], raw[63:0], "lane0");
          chk(lane[1], raw[63:0], "lane1");
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
