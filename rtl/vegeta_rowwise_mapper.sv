// vegeta_rowwise_mapper: places the rows of a row-wise N:4 sparse A tile on the array.
//
// Input: one 2-bit pattern code per A row (pat_e: 4:4, 2:4, 1:4, or NONE for "no more
// rows"), row 0 in bits 1:0, up to 32 rows.  The array is cut into NG groups of four MAC
// columns (two SPU-2s).  Walking the rows in order, each group takes one 4:4 row, two 2:4
// rows or four 1:4 rows (paper Fig. 11: SPE-1-4, SPE-2-2 and SPE-4-1 mappings).  For each
// group the mapper gives its pattern and the index of its first A row, which is also the
// first C row it produces.  n_rows is H_A, the number of rows used.  err is raised when
// the rows that share a group do not have the same pattern (the paper's "pseudo row-wise"
// requirement), or when rows remain after the last group.  Combinational.
//
// From the paper: the mapping and the grouping rule.  The code values and the NONE
// terminator are this design's choices (the paper stores the per-row N:4 as 32 x 2 bits
// of extra metadata without giving an encoding).
module vegeta_rowwise_mapper
  import vegeta_pkg::*;
#(
  parameter int unsigned NG = N_GROUPS
) (
  input  logic [63:0] rowcfg,
  output pat_e        pat    [NG],
  output logic [5:0]  base   [NG],
  output logic [5:0]  n_rows,
  output logic        err
);
  always_comb begin
    int unsigned r;
    int unsigned span;
    pat_e        code;
    r   = 0;
    err = 1'b0;
    for (int g = 0; g < NG; g++) begin
      code    = (r < 32) ? pat_e'(rowcfg[2*r +: 2]) : PAT_NONE;
      pat[g]  = code;
      base[g] = 6'(r);
      unique case (code)
        PAT_4_4: span = 1;
        PAT_2_4: span = 2;
        PAT_1_4: span = 4;
        default: span = 0;
      endcase
      for (int k = 1; k < 4; k++)
        if (k < span && (r + k >= 32 || rowcfg[2*(r+k) +: 2] != code)) err = 1'b1;
      r = r + span;
    end
    n_rows = 6'(r);
    if (r < 32 && rowcfg[2*r +: 2] != PAT_NONE) err = 1'b1;
  end
endmodule
