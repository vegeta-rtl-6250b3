// vegeta_engine: a VEGETA-S matrix engine (default VEGETA-S-2-2) next to the tile registers.
//
// Executes TILE_GEMM (4:4), TILE_SPMM_U (2:4), TILE_SPMM_V (1:4) and TILE_SPMM_R
// (row-wise N:4): C += A x B with A the (compressed) BF16 weight tile, B the BF16 input
// tile stored transposed (column j of B is row j of the register: 1, 2 or 4 consecutive
// 64 B rows for treg, ureg or vreg), C the FP32 accumulator tile.
//
// Around the array (vegeta_array) it has:
//   * the stage scheduler (vegeta_scheduler): WL and FF start times, pipelining, output
//     forwarding;
//   * a weight-load sequencer: during WL, in cycle W + p + c, array row p of SPE column c
//     latches its weights and metadata indices from the A tile and its metadata register
//     (tile-wise: SPU column r, row p, lane l holds non-zero 2p+l of A row r; row-wise: the
//     64 weights of group g are rows 2g, 2g+1 of the A register, ordered array row first,
//     then MAC column).  The skew by column lets the next instruction reuse a weight bank as
//     soon as the instruction two back has finished feeding;
//   * an input feeder: in cycle F + j + p array row p receives the part of B column j it
//     needs (4:4: elements 2p, 2p+1; 2:4 and row-wise: block p; 1:4: blocks 2p, 2p+1);
//   * an output feeder: in cycle F + j + c the C values of column j for the SPUs of SPE
//     column c are injected at the top (tile-wise: lane 0 of SPU r gets C[r][j]; row-wise:
//     per group as in vegeta_reduction_unit).  The value is taken from the bypass when the
//     same element is being written back in that cycle (output forwarding);
//   * a tag pipeline per SPE column that tells the reduction units and the writeback which
//     C element leaves the array, and the writeback itself: NW element writes per cycle.
// Latency from the read of C[r][j] to its write: N_ROWS + 1 cycles (tile-wise), N_ROWS + 2
// (row-wise).  A tile instruction occupies the array for WL + T_N + N_ROWS - 1 + N_COLS +
// reduction cycles; with pipelining a new one can start FF every 16 cycles.
//
// Follows the paper for the dataflow, stage lengths and forwarding; the data layouts
// inside the registers, the bank tags and the tag pipeline are this design's own.
// The register operands must not be overwritten while an instruction reads them (the
// host core's renamer guarantees this; vegeta_top simply orders loads after the engine).
module vegeta_engine
  import vegeta_pkg::*;
#(
  parameter int unsigned ALPHA = 2,
  parameter bit          OF_EN = 1'b1,
  parameter int unsigned NR    = N_ROWS,
  parameter int unsigned NC    = TOTAL_MACS / (N_ROWS * ALPHA * BETA),
  parameter int unsigned NG    = NC * ALPHA / 2,
  parameter int unsigned NW    = 6 * NG
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         op_valid,
  input  eng_op_t      op,
  output logic         op_ready,
  output logic         busy,
  // register file view and element write port
  input  row_t         tiles [RF_ROWS],
  input  mrow_t        metas [MF_ROWS],
  output logic         ew_en   [NW],
  output rf_row_addr_t ew_row  [NW],
  output logic [3:0]   ew_col  [NW],
  output fp32_t        ew_data [NW],
  // event counters
  output logic [31:0]  cnt_dep_stall,
  output logic [31:0]  cnt_of,
  output logic [31:0]  cnt_overlap,
  output logic [31:0]  cnt_bank_stall,
  output logic [31:0]  cnt_bypass,
  output logic [31:0]  cnt_rw_err
);
  localparam int unsigned GPC   = ALPHA / 2;                     // groups per SPE column
  localparam int unsigned WSPAN = NR + NC - 1;                   // weight-load sweep
  localparam int unsigned FSPAN = T_N + ((NR > NC) ? NR : NC) - 1; // feed sweep
  localparam int unsigned TD    = NR + 2;                        // tag pipeline depth

  typedef struct packed {
    logic    vld;
    eng_op_t op;
    logic    bank;
    logic [6:0] cnt;
  } wl_slot_t;

  typedef struct packed {
    logic    vld;
    eng_op_t op;
    logic    bank;
    logic [6:0] cnt;
  } ff_slot_t;

  typedef struct packed {
    logic       vld;
    logic [3:0] j;
    logic       rowwise;
    logic [2:0] c_treg;
  } tag_t;

  // ---------------- scheduler ----------------
  logic    wl_start, wl_bank, ff_start, ff_bank;
  eng_op_t wl_op, ff_op;

  vegeta_scheduler #(.NR(NR), .NC(NC), .OF_EN(OF_EN)) u_sched (
    .clk, .rst_n, .op_valid, .op, .op_ready,
    .wl_start, .wl_bank, .wl_op, .ff_start, .ff_bank, .ff_op, .busy,
    .cnt_dep_stall, .cnt_of, .cnt_overlap, .cnt_bank_stall);

  // ---------------- row-wise mapping of the instruction entering FF ----------------
  pat_e       map_pat  [NG];
  logic [5:0] map_base [NG];
  logic [5:0] map_rows;
  logic       map_err;
  vegeta_rowwise_mapper #(.NG(NG)) u_map (
    .rowcfg(ff_op.rowcfg), .pat(map_pat), .base(map_base), .n_rows(map_rows), .err(map_err));

  // ---------------- slots ----------------
  wl_slot_t   wls [2];
  ff_slot_t   ffs [2];
  pat_e       ff_pat  [2][NG];
  logic [5:0] ff_base [2][NG];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wls        <= '{default: wl_slot_t'(0)};
      ffs        <= '{default: ff_slot_t'(0)};
      cnt_rw_err <= '0;
    end else begin
      for (int s = 0; s < 2; s++) begin
        if (wls[s].vld) begin
          wls[s].cnt <= wls[s].cnt + 1;
          if (wls[s].cnt == 7'(WSPAN - 1)) wls[s].vld <= 1'b0;
        end
        if (ffs[s].vld) begin
          ffs[s].cnt <= ffs[s].cnt + 1;
          if (ffs[s].cnt == 7'(FSPAN - 1)) ffs[s].vld <= 1'b0;
        end
      end
      if (wl_start) begin
        if (!wls[0].vld) wls[0] <= '{vld: 1'b1, op: wl_op, bank: wl_bank, cnt: '0};
        else             wls[1] <= '{vld: 1'b1, op: wl_op, bank: wl_bank, cnt: '0};
      end
      if (ff_start) begin
        if (!ffs[0].vld) begin
          ffs[0]     <= '{vld: 1'b1, op: ff_op, bank: ff_bank, cnt: '0};
          ff_pat[0]  <= map_pat;
          ff_base[0] <= map_base;
        end else begin
          ffs[1]     <= '{vld: 1'b1, op: ff_op, bank: ff_bank, cnt: '0};
          ff_pat[1]  <= map_pat;
          ff_base[1] <= map_base;
        end
        if (ff_op.mode == MODE_ROW && map_err) cnt_rw_err <= cnt_rw_err + 1;
      end
    end
  end

  // ---------------- weight-load sequencer ----------------
  logic                  a_wl_en   [NC];
  logic [$clog2(NR)-1:0] a_wl_row  [NC];
  logic                  a_wl_bank [NC];
  bf16_t                 a_wl_w    [NC][ALPHA][BETA];
  idx_t                  a_wl_idx  [NC][ALPHA][BETA];

  always_comb begin
    int p, r, e, arow;
    p = 0; r = 0; e = 0; arow = 0;
    for (int c = 0; c < NC; c++) begin
      a_wl_en[c]   = 1'b0;
      a_wl_row[c]  = '0;
      a_wl_bank[c] = 1'b0;
      for (int u = 0; u < ALPHA; u++)
        for (int l = 0; l < BETA; l++) begin
          a_wl_w[c][u][l]   = '0;
          a_wl_idx[c][u][l] = '0;
        end
      for (int s = 0; s < 2; s++)
        if (wls[s].vld && int'(wls[s].cnt) >= c && int'(wls[s].cnt) - c < NR) begin
          p = int'(wls[s].cnt) - c;
          a_wl_en[c]   = 1'b1;
          a_wl_row[c]  = ($clog2(NR))'(p);
          a_wl_bank[c] = wls[s].bank;
          for (int u = 0; u < ALPHA; u++)
            for (int l = 0; l < BETA; l++) begin
              r = c * ALPHA + u;
              if (wls[s].op.mode == MODE_ROW) begin
                e    = p * 4 + (r % 2) * 2 + l;
                arow = 2 * (r / 2) + e / 32;
                e    = e % 32;
              end else begin
                e    = BETA * p + l;
                arow = r;
              end
              a_wl_w[c][u][l] = tiles[7'(int'(wls[s].op.a_treg) * 16 + arow)][16*e +: 16];
              a_wl_idx[c][u][l] = (wls[s].op.mode == MODE_4_4) ? '0 :
                  metas[7'(int'(wls[s].op.mreg) * 16 + arow)][2*e +: 2];
            end
        end
    end
  end

  // ---------------- input (B) feeder ----------------
  logic         a_in_vld  [NR];
  logic         a_in_bank [NR];
  mode_e        a_in_mode [NR];
  logic [127:0] a_in_raw  [NR];

  always_comb begin
    int j, base;
    j = 0; base = 0;
    for (int p = 0; p < NR; p++) begin
      a_in_vld[p]  = 1'b0;
      a_in_bank[p] = 1'b0;
      a_in_mode[p] = MODE_4_4;
      a_in_raw[p]  = '0;
      for (int s = 0; s < 2; s++)
        if (ffs[s].vld && int'(ffs[s].cnt) >= p && int'(ffs[s].cnt) - p < T_N) begin
          j    = int'(ffs[s].cnt) - p;
          base = int'(ffs[s].op.b_treg) * 16 + int'(b_size(ffs[s].op.mode)) * j;
          a_in_vld[p]  = 1'b1;
          a_in_bank[p] = ffs[s].bank;
          a_in_mode[p] = ffs[s].op.mode;
          unique case (ffs[s].op.mode)
            MODE_4_4: a_in_raw[p][31:0] = tiles[7'(base)][32*p +: 32];
            MODE_1_4: a_in_raw[p]       = tiles[7'(base + p / 4)][128*(p%4) +: 128];
            default:  a_in_raw[p][63:0] = tiles[7'(base + p / 8)][64*(p%8) +: 64];
          endcase
        end
    end
  end

  // ---------------- output (C) feeder with the forwarding bypass ----------------
  logic  a_top_vld [NC];
  fp32_t a_top_ps  [NC][ALPHA][BETA];
  tag_t  tag_in    [NC];
  tag_t  tag_sr    [NC][TD];
  pat_e       tag_pat  [NC][TD][GPC];
  logic [5:0] tag_base [NC][TD][GPC];
  pat_e       in_pat  [NC][GPC];
  logic [5:0] in_base [NC][GPC];
  logic [31:0] byp_hits;

  always_comb begin
    int j, cbase, g, nout, m;
    rf_row_addr_t row;
    fp32_t v;
    j = 0; cbase = 0; g = 0; nout = 0; m = 0; row = '0; v = '0;
    byp_hits = '0;
    for (int c = 0; c < NC; c++) begin
      a_top_vld[c] = 1'b0;
      tag_in[c]    = '0;
      for (int gi = 0; gi < GPC; gi++) begin
        in_pat[c][gi]  = PAT_NONE;
        in_base[c][gi] = '0;
      end
      for (int u = 0; u < ALPHA; u++)
        for (int l = 0; l < BETA; l++) a_top_ps[c][u][l] = '0;
      for (int s = 0; s < 2; s++)
        if (ffs[s].vld && int'(ffs[s].cnt) >= c && int'(ffs[s].cnt) - c < T_N) begin
          j     = int'(ffs[s].cnt) - c;
          cbase = int'(ffs[s].op.c_treg) * 16;
          a_top_vld[c] = 1'b1;
          tag_in[c]    = '{vld: 1'b1, j: 4'(j), rowwise: (ffs[s].op.mode == MODE_ROW),
                           c_treg: ffs[s].op.c_treg};
          if (ffs[s].op.mode != MODE_ROW) begin
            for (int u = 0; u < ALPHA; u++) begin
              row = 7'(cbase + c * ALPHA + u);
              a_top_ps[c][u][0] = tiles[row][32*j +: 32];
              for (int k = 0; k < NW; k++)
                if (ew_en[k] && ew_row[k] == row && int'(ew_col[k]) == j) begin
                  a_top_ps[c][u][0] = ew_data[k];
                  byp_hits = byp_hits + 1;
                end
            end
          end else begin
            for (int gi = 0; gi < GPC; gi++) begin
              g = c * GPC + gi;
              in_pat[c][gi]  = ff_pat[s][g];
              in_base[c][gi] = ff_base[s][g];
              unique case (ff_pat[s][g])
                PAT_4_4: nout = 1;
                PAT_2_4: nout = 2;
                PAT_1_4: nout = 4;
                default: nout = 0;
              endcase
              for (int k = 0; k < 4; k++)
                if (k < nout) begin
                  m   = (nout == 2) ? 2 * k : k;     // MAC column that starts this row
                  row = 7'(cbase + int'(ff_base[s][g]) + k);
                  v   = tiles[row][32*j +: 32];
                  for (int q = 0; q < NW; q++)
                    if (ew_en[q] && ew_row[q] == row && int'(ew_col[q]) == j) begin
                      v = ew_data[q];
                      byp_hits = byp_hits + 1;
                    end
                  a_top_ps[c][2*gi + m/2][m%2] = v;
                end
            end
          end
        end
    end
  end

  // tag pipeline: entry k is the tag of the partial sums injected k+1 cycles ago
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < NC; c++)
        for (int k = 0; k < TD; k++) tag_sr[c][k] <= '0;
      cnt_bypass <= '0;
    end else begin
      for (int c = 0; c < NC; c++) begin
        tag_sr[c][0] <= tag_in[c];
        for (int k = 1; k < TD; k++) tag_sr[c][k] <= tag_sr[c][k-1];
      end
      cnt_bypass <= cnt_bypass + byp_hits;
    end
  end

  always_ff @(posedge clk)
    for (int c = 0; c < NC; c++) begin
      tag_pat[c][0]  <= in_pat[c];
      tag_base[c][0] <= in_base[c];
      for (int k = 1; k < TD; k++) begin
        tag_pat[c][k]  <= tag_pat[c][k-1];
        tag_base[c][k] <= tag_base[c][k-1];
      end
    end

  // ---------------- array ----------------
  logic       red_rowwise [NG];
  pat_e       red_pat     [NG];
  logic       t_vld [NG];
  fp32_t      t_out [NG][2];
  logic [3:0] r_vld [NG];
  fp32_t      r_out [NG][4];

  always_comb
    for (int g = 0; g < NG; g++) begin
      red_rowwise[g] = tag_sr[g / GPC][NR-1].rowwise;
      red_pat[g]     = tag_pat[g / GPC][NR-1][g % GPC];
    end

  vegeta_array #(.ALPHA(ALPHA), .NR(NR), .NC(NC), .NG(NG)) u_array (
    .clk, .rst_n,
    .wl_en(a_wl_en), .wl_row(a_wl_row), .wl_bank(a_wl_bank), .wl_w(a_wl_w), .wl_idx(a_wl_idx),
    .in_vld(a_in_vld), .in_bank(a_in_bank), .in_mode(a_in_mode), .in_raw(a_in_raw),
    .top_vld(a_top_vld), .top_ps(a_top_ps),
    .red_rowwise, .red_pat, .t_vld, .t_out, .r_vld, .r_out);

  // ---------------- writeback: slots 6g..6g+1 tile-wise, 6g+2..6g+5 row-wise ----------------
  always_comb
    for (int g = 0; g < NG; g++) begin
      tag_t tt, tr;
      tt = tag_sr[g / GPC][NR];
      tr = tag_sr[g / GPC][NR+1];
      for (int k = 0; k < 2; k++) begin
        ew_en[6*g+k]   = t_vld[g];
        ew_row[6*g+k]  = 7'(int'(tt.c_treg) * 16 + 2 * g + k);
        ew_col[6*g+k]  = tt.j;
        ew_data[6*g+k] = t_out[g][k];
      end
      for (int k = 0; k < 4; k++) begin
        ew_en[6*g+2+k]   = r_vld[g][k];
        ew_row[6*g+2+k]  = 7'(int'(tr.c_treg) * 16 + int'(tag_base[g / GPC][NR+1][g % GPC]) + k);
        ew_col[6*g+2+k]  = tr.j;
        ew_data[6*g+2+k] = r_out[g][k];
      end
    end

  // the tags and the array results must line up
  for (genvar g = 0; g < NG; g++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     t_vld[g] |-> (tag_sr[g / GPC][NR].vld && !tag_sr[g / GPC][NR].rowwise))
      else $error("tile-wise result without its tag");
    assert property (@(posedge clk) disable iff (!rst_n)
                     (r_vld[g] != 4'b0) |-> (tag_sr[g / GPC][NR+1].vld && tag_sr[g / GPC][NR+1].rowwise))
      else $error("row-wise result without its tag");
  end

  logic unused;
  assign unused = ^map_rows ^ ^ffs[0].op.rowcfg ^ ^ffs[1].op.rowcfg ^ ^wls[0].op.rowcfg
                  ^ ^wls[1].op.rowcfg;
endmodule
