// tb_vegeta_tile_regfile: self-checking test of the tile and metadata register file.
//
// Random row writes through the load port, eight-row metadata line writes, and up to NW
// single-element FP32 writes per cycle from the engine's writeback bus (to distinct
// elements), checked against a model of all 128 tile rows and 128 metadata rows through
// the store read port and the tiles/metas outputs.  When a row write and element writes
// hit the same row in one cycle, the element writes win.
//
// Register sizes and aliasing follow the paper; the port set is this design's.
module tb_vegeta_tile_regfile;
  import vegeta_pkg::*;

  localparam int NW = 6 * N_GROUPS;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic ld_we, md_we;
  rf_row_addr_t ld_row, st_row;
  row_t ld_data, md_data, st_data;
  logic [3:0] md_line;
  logic ew_en [NW];
  rf_row_addr_t ew_row [NW];
  logic [3:0] ew_col [NW];
  fp32_t ew_data [NW];
  row_t tiles [RF_ROWS];
  mrow_t metas [MF_ROWS];
  row_t  mt [RF_ROWS];
  mrow_t mm [MF_ROWS];
  int checks = 0, failures = 0;

  vegeta_tile_regfile #(.NW(NW)) dut (.*);

  initial begin
    #1_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic row_t rrow();
    row_t r;
    for (int i = 0; i < 16; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    ld_we = 0; md_we = 0; ld_row = '0; st_row = '0; ld_data = '0; md_data = '0; md_line = '0;
    foreach (ew_en[k]) begin ew_en[k] = 0; ew_row[k] = '0; ew_col[k] = '0; ew_data[k] = '0; end
    // initialise everything through the ports
    for (int r = 0; r < RF_ROWS; r++) begin
      @(negedge clk); ld_we = 1; ld_row = 7'(r); ld_data = rrow(); mt[r] = ld_data;
    end
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); ld_we = 0; md_we = 1; md_line = 4'(i); md_data = rrow();
      for (int k = 0; k < 8; k++) mm[8*i+k] = md_data[64*k +: 64];
    end
    @(negedge clk); md_we = 0;
    for (int it = 0; it < 2000; it++) begin
      logic used [RF_ROWS][16];
      foreach (used[r, c]) used[r][c] = 0;
      ld_we = 1'($urandom_range(0, 1));
      ld_row = 7'($urandom_range(0, RF_ROWS - 1));
      ld_data = rrow();
      md_we = ($urandom_range(0, 3) == 0);
      md_line = 4'($urandom);
      md_data = rrow();
      if (ld_we) mt[ld_row] = ld_data;
      if (md_we) for (int k = 0; k < 8; k++) mm[8*md_line+k] = md_data[64*k +: 64];
      foreach (ew_en[k]) begin
        ew_en[k] = 1'($urandom_range(0, 1));
        ew_row[k] = 7'($urandom_range(0, RF_ROWS - 1));
        ew_col[k] = 4'($urandom);
        ew_data[k] = $urandom;
        if (used[ew_row[k]][ew_col[k]]) ew_en[k] = 0;
        if (ew_en[k]) begin
          used[ew_row[k]][ew_col[k]] = 1;
          mt[ew_row[k]][32*ew_col[k] +: 32] = ew_data[k];
        end
      end
      @(negedge clk);
      ld_we = 0; md_we = 0;
      foreach (ew_en[k]) ew_en[k] = 0;
      st_row = 7'($urandom_range(0, RF_ROWS - 1));
      #1;
      checks++;
      if (st_data !== mt[st_row]) begin failures++; $display("FAIL store port row %0d", st_row); end
      if (it % 100 == 0) begin
        for (int r = 0; r < RF_ROWS; r++) begin
          checks++;
          if (tiles[r] !== mt[r]) begin failures++; $display("FAIL tile row %0d", r); end
        end
        for (int r = 0; r < MF_ROWS; r++) begin
          checks++;
          if (metas[r] !== mm[r]) begin failures++; $display("FAIL meta row %0d", r); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
