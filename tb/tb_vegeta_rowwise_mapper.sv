// tb_vegeta_rowwise_mapper: self-checking test of the row-wise N:4 group mapper.
//
// Builds random row-pattern lists group by group (each group one 4:4 row, two 2:4 rows or
// four 1:4 rows, possibly fewer than eight groups), and checks each group's pattern and
// first row, the row count and that err stays low.  Then corrupts the list (mixed patterns
// inside a group, or more rows than eight groups hold) and checks that err is raised.
//
// The grouping rule follows the paper; the pattern codes are this design's.
module tb_vegeta_rowwise_mapper;
  import vegeta_pkg::*;

  localparam int NG = N_GROUPS;
  logic [63:0] rowcfg;
  pat_e        pat  [NG];
  logic [5:0]  base [NG];
  logic [5:0]  n_rows;
  logic        err;
  int checks = 0, failures = 0;

  vegeta_rowwise_mapper dut (.*);

  initial begin
    #1_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s rowcfg=%h", what, rowcfg); end
  endtask

  initial begin
    for (int it = 0; it < 1000; it++) begin
      pat_e gp [NG];
      int   gb [NG];
      int   ng, r, span;
      ng = $urandom_range(1, NG);
      rowcfg = '1;                      // all PAT_NONE
      r = 0;
      for (int g = 0; g < NG; g++) begin
        gp[g] = (g < ng) ? pat_e'($urandom_range(0, 2)) : PAT_NONE;
        gb[g] = r;
        span = (gp[g] == PAT_4_4) ? 1 : (gp[g] == PAT_2_4) ? 2 : (gp[g] == PAT_1_4) ? 4 : 0;
        for (int k = 0; k < span; k++) rowcfg[2*(r+k) +: 2] = gp[g];
        r += span;
      end
      #1;
      chk(!err, "err on a valid list");
      chk(n_rows == 6'(r), "n_rows");
      for (int g = 0; g < ng; g++) begin
        chk(pat[g] == gp[g], "pattern");
        chk(base[g] == 6'(gb[g]), "base");
      end
      // corrupt: change one row of a multi-row group, or append rows after a full array
      if (ng == NG && r < 32) begin
        rowcfg[2*r +: 2] = PAT_4_4;
        #1 chk(err, "no err on rows left over");
      end else begin
        for (int g = 0; g < ng; g++)
          if (gp[g] == PAT_1_4) begin
            rowcfg[2*(gb[g] + 3) +: 2] = PAT_2_4;
            #1 chk(err, "no err on a mixed group");
            break;
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
