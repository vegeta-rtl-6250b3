// vegeta_scheduler: stage scheduler of the VEGETA engine (pipelining and output forwarding).
//
// A tile GEMM/SPMM passes through the stages WL (weight load, N_ROWS cycles), FF (feed
// first: C and B enter the top-left SPE, T_N = 16 cycles), FS (feed second, N_ROWS-1
// cycles), DR (drain, N_COLS cycles) and a reduction of one (tile-wise) or two (row-wise)
// cycles.  Several instructions may be in the array at once but never two in the same
// stage.  Because every stage has a fixed length this reduces to two start times:
//   * WL of a new instruction may start once the previous WL is over and the weight bank
//     it will write is free (the instruction that used that bank two instructions ago has
//     finished feeding; weights are double banked);
//   * FF may start once its WL is over and at least SPACING = max(T_N, N_ROWS-1, N_COLS)
//     cycles after the previous FF, so FS and DR cannot overlap either.
// C dependence (the new instruction's C tile is the C tile an earlier one is still
// producing): without output forwarding FF waits until the producer's last write.  With
// output forwarding (OF_EN) between tile-wise instructions FF may start N_ROWS + 1 cycles
// after the producer's FF: C elements are read in exactly the order they are written, so
// each one is read in the very cycle it is written back and the engine forwards it on a
// bypass.  Row-wise instructions wait for completion (their C layout differs).
// An A or B operand that an instruction in flight is still writing holds back WL.
//
// Interface: op_valid/op_ready handshake (accepted = WL starts that cycle; wl_* pulses
// then), ff_start pulse with the op and its weight bank when FF starts.  Counters: cycles
// the FF of a ready instruction was held by a C dependence, forwarded (OF) starts, starts
// that overlapped an instruction still in flight (pipelining), bank stalls.
//
// From the paper (Sec. V-C, Fig. 10): the stages, their lengths, the no-shared-stage rule,
// and the OF start of the dependent instruction at 2*N_ROWS + log2(BETA).  The bank rule,
// the in-flight table of four entries and the row-wise restriction are this design's.
module vegeta_scheduler
  import vegeta_pkg::*;
#(
  parameter int unsigned NR    = N_ROWS,
  parameter int unsigned NC    = 8,
  parameter bit          OF_EN = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    op_valid,
  input  eng_op_t op,
  output logic    op_ready,
  // weight-load start
  output logic    wl_start,
  output logic    wl_bank,
  output eng_op_t wl_op,
  // feed start
  output logic    ff_start,
  output logic    ff_bank,
  output eng_op_t ff_op,
  output logic    busy,
  // event counters
  output logic [31:0] cnt_dep_stall,
  output logic [31:0] cnt_of,
  output logic [31:0] cnt_overlap,
  output logic [31:0] cnt_bank_stall
);
  localparam int unsigned SPACING = (T_N > NR - 1) ? ((T_N > NC) ? T_N : NC)
                                                   : ((NR - 1 > NC) ? NR - 1 : NC);
  localparam int unsigned LAT_T = NR + 1;     // C read to C write, tile-wise
  localparam int unsigned LAT_R = NR + 2;     // row-wise (extra adder row)
  localparam int unsigned NFL   = 4;          // in-flight table entries

  typedef logic [31:0] time_t;

  typedef struct packed {
    logic    vld;
    eng_op_t op;
    logic    bank;
    time_t   w;
  } pend_t;

  typedef struct packed {
    logic     vld;
    logic [6:0] c_lo, c_hi;   // RF rows of C, inclusive
    logic     rowwise;
    time_t    f;
    time_t    done;           // cycle of the last C write
  } fl_t;

  time_t now;
  time_t wl_free_at, last_f;
  logic  have_last;
  logic  next_bank;
  logic  bank_pend [2];
  time_t bank_free_at [2];
  pend_t pend [2];
  fl_t   fl [NFL];

  function automatic logic [6:0] lo_row(logic [2:0] treg);
    return {treg, 4'd0};
  endfunction
  function automatic logic [6:0] hi_row(logic [2:0] treg, int unsigned n);
    return 7'(32'({treg, 4'd0}) + 16 * n - 1);
  endfunction
  function automatic logic overlap(logic [6:0] a_lo, a_hi, b_lo, b_hi);
    return (a_lo <= b_hi) && (b_lo <= a_hi);
  endfunction

  // ---------------- WL acceptance ----------------
  logic src_hazard, bank_ok, free_pend;
  logic [6:0] a_lo, a_hi, b_lo, b_hi, p_lo, p_hi;
  always_comb begin
    a_lo = lo_row(op.a_treg);
    a_hi = hi_row(op.a_treg, 1);
    b_lo = lo_row(op.b_treg);
    b_hi = hi_row(op.b_treg, b_size(op.mode));
    src_hazard = 1'b0;
    for (int i = 0; i < NFL; i++)
      if (fl[i].vld && now <= fl[i].done &&
          (overlap(a_lo, a_hi, fl[i].c_lo, fl[i].c_hi) ||
           overlap(b_lo, b_hi, fl[i].c_lo, fl[i].c_hi)))
        src_hazard = 1'b1;
    for (int i = 0; i < 2; i++) begin
      p_lo = lo_row(pend[i].op.c_treg);
      p_hi = hi_row(pend[i].op.c_treg, c_size(pend[i].op.mode));
      if (pend[i].vld && (overlap(a_lo, a_hi, p_lo, p_hi) || overlap(b_lo, b_hi, p_lo, p_hi)))
        src_hazard = 1'b1;
    end
    bank_ok   = !bank_pend[next_bank] && (now >= bank_free_at[next_bank]);
    free_pend = !pend[0].vld || !pend[1].vld;
    op_ready  = rst_n && (now >= wl_free_at) && bank_ok && free_pend && !src_hazard;
  end

  // ---------------- FF start ----------------
  // pending entries are kept in order: pend[0] is the older one
  logic       head_timing_ok, head_dep_ok, fl_free, head_of;
  logic [1:0] fl_slot;
  logic [6:0] h_lo, h_hi;
  always_comb begin
    h_lo = lo_row(pend[0].op.c_treg);
    h_hi = hi_row(pend[0].op.c_treg, c_size(pend[0].op.mode));
    head_timing_ok = pend[0].vld && (now >= pend[0].w + NR) &&
                     (!have_last || now >= last_f + SPACING);
    head_dep_ok = 1'b1;
    head_of     = 1'b0;
    for (int i = 0; i < NFL; i++)
      if (fl[i].vld && now <= fl[i].done && overlap(h_lo, h_hi, fl[i].c_lo, fl[i].c_hi)) begin
        if (OF_EN && !fl[i].rowwise && pend[0].op.mode != MODE_ROW) begin
          if (now < fl[i].f + LAT_T) head_dep_ok = 1'b0;
          else                       head_of     = 1'b1;
        end else begin
          head_dep_ok = 1'b0;
        end
      end
    fl_free = 1'b0;
    fl_slot = '0;
    for (int i = NFL - 1; i >= 0; i--)
      if (!fl[i].vld || now > fl[i].done) begin
        fl_free = 1'b1;
        fl_slot = 2'(i);
      end
    ff_start = head_timing_ok && head_dep_ok && fl_free;
    ff_bank  = pend[0].bank;
    ff_op    = pend[0].op;
  end

  assign wl_start = op_valid && op_ready;
  assign wl_bank  = next_bank;
  assign wl_op    = op;

  always_comb begin
    busy = pend[0].vld || pend[1].vld;
    for (int i = 0; i < NFL; i++)
      if (fl[i].vld && now <= fl[i].done) busy = 1'b1;
  end

  logic any_inflight;
  always_comb begin
    any_inflight = 1'b0;
    for (int i = 0; i < NFL; i++)
      if (fl[i].vld && now <= fl[i].done) any_inflight = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      now            <= '0;
      wl_free_at     <= '0;
      last_f         <= '0;
      have_last      <= 1'b0;
      next_bank      <= 1'b0;
      bank_pend      <= '{default: 1'b0};
      bank_free_at   <= '{default: '0};
      pend           <= '{default: pend_t'(0)};
      fl             <= '{default: fl_t'(0)};
      cnt_dep_stall  <= '0;
      cnt_of         <= '0;
      cnt_overlap    <= '0;
      cnt_bank_stall <= '0;
    end else begin
      now <= now + 1;
      // FF start: retire the head of the pending queue into the in-flight table
      if (ff_start) begin
        fl[fl_slot].vld     <= 1'b1;
        fl[fl_slot].c_lo    <= h_lo;
        fl[fl_slot].c_hi    <= h_hi;
        fl[fl_slot].rowwise <= (pend[0].op.mode == MODE_ROW);
        fl[fl_slot].f       <= now;
        fl[fl_slot].done    <= now + (T_N - 1) + (NC - 1) +
                               ((pend[0].op.mode == MODE_ROW) ? LAT_R : LAT_T);
        last_f    <= now;
        have_last <= 1'b1;
        bank_pend[pend[0].bank]    <= 1'b0;
        bank_free_at[pend[0].bank] <= now + T_N;
        if (head_of)      cnt_of      <= cnt_of + 1;
        if (any_inflight) cnt_overlap <= cnt_overlap + 1;
      end
      if (head_timing_ok && !head_dep_ok) cnt_dep_stall <= cnt_dep_stall + 1;
      if (op_valid && !bank_ok && now >= wl_free_at) cnt_bank_stall <= cnt_bank_stall + 1;

      // pending queue: shift on FF start, append on WL start
      begin
        pend_t q0, q1;
        q0 = pend[0];
        q1 = pend[1];
        if (ff_start) begin
          q0 = q1;
          q1 = '0;
        end
        if (wl_start) begin
          if (!q0.vld) q0 = '{vld: 1'b1, op: op, bank: next_bank, w: now};
          else         q1 = '{vld: 1'b1, op: op, bank: next_bank, w: now};
        end
        pend[0] <= q0;
        pend[1] <= q1;
      end
      if (wl_start) begin
        wl_free_at           <= now + NR;
        bank_pend[next_bank] <= 1'b1;
        next_bank            <= !next_bank;
      end
    end
  end

  // a bank is never written while an instruction still feeds from it
  assert property (@(posedge clk) disable iff (!rst_n) wl_start |-> !bank_pend[wl_bank])
    else $error("weight bank reused while pending");
endmodule
