// vegeta_lsu: tile load/store unit, the tile-register side of the load/store queue.
//
// Breaks a VEGETA memory instruction into 64 B line requests, as the paper describes for
// TILE_LOAD_T and TILE_STORE_T (16 requests of one cache line each):
//   TILE_LOAD_T / _U / _V  16 / 32 / 64 line reads into treg / ureg / vreg dst, row i from
//                          addr + i * stride
//   TILE_LOAD_M            two consecutive line reads (128 B) into mreg dst, each line
//                          filling eight 8 B metadata rows
//   TILE_STORE_T           16 line writes of treg src1 to addr + i * stride
// Memory interface: req_valid/req_ready handshake carrying mem_req_t, one request per
// cycle at most; read data returns in order on rsp_valid/rsp_data, any number of cycles
// later, and cannot be refused.  done pulses when the last response (load) or the last
// request (store) has been taken.  One instruction at a time (instr_valid/instr_ready).
// The line size and request counts follow the paper; the handshakes are this design's.
module vegeta_lsu
  import vegeta_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         instr_valid,
  input  instr_t       instr,
  output logic         instr_ready,
  output logic         busy,
  output logic         done,
  // memory
  output logic         req_valid,
  input  logic         req_ready,
  output mem_req_t     req,
  input  logic         rsp_valid,
  input  row_t         rsp_data,
  // register file
  output logic         ld_we,
  output rf_row_addr_t ld_row,
  output row_t         ld_data,
  output logic         md_we,
  output logic [3:0]   md_line,
  output row_t         md_data,
  output rf_row_addr_t st_row,
  input  row_t         st_data
);
  typedef enum logic [1:0] {S_IDLE, S_RUN} state_e;

  state_e      state;
  instr_t      cur;
  logic [6:0]  n_lines, sent, rcvd;
  logic [6:0]  base_row;
  logic        is_store, is_meta;

  function automatic logic [6:0] lines_of(opcode_e op);
    unique case (op)
      OP_TILE_LOAD_U: return 7'd32;
      OP_TILE_LOAD_V: return 7'd64;
      OP_TILE_LOAD_M: return 7'd2;
      default:        return 7'd16;
    endcase
  endfunction

  assign instr_ready = (state == S_IDLE) && rst_n;
  assign busy        = (state != S_IDLE);

  always_comb begin
    req_valid = (state == S_RUN) && (sent < n_lines);
    req.we    = is_store;
    req.addr  = is_meta ? cur.addr + 32'(sent) * 32'd64 : cur.addr + 32'(sent) * cur.stride;
    st_row    = base_row + sent;
    req.wdata = is_store ? st_data : '0;
    ld_we     = rsp_valid && (state == S_RUN) && !is_meta && !is_store;
    ld_row    = base_row + rcvd;
    ld_data   = rsp_data;
    md_we     = rsp_valid && (state == S_RUN) && is_meta;
    md_line   = {cur.dst, rcvd[0]};
    md_data   = rsp_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      sent     <= '0;
      rcvd     <= '0;
      n_lines  <= '0;
      is_store <= 1'b0;
      is_meta  <= 1'b0;
      base_row <= '0;
      cur      <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:
          if (instr_valid) begin
            cur      <= instr;
            n_lines  <= lines_of(instr.op);
            sent     <= '0;
            rcvd     <= '0;
            is_store <= (instr.op == OP_TILE_STORE_T);
            is_meta  <= (instr.op == OP_TILE_LOAD_M);
            unique case (instr.op)
              OP_TILE_LOAD_U:  base_row <= {instr.dst[1:0], 5'd0};
              OP_TILE_LOAD_V:  base_row <= {instr.dst[0], 6'd0};
              OP_TILE_STORE_T: base_row <= {instr.src1, 4'd0};
              default:         base_row <= {instr.dst, 4'd0};
            endcase
            state <= S_RUN;
          end
        default: begin
          if (req_valid && req_ready) sent <= sent + 1;
          if (rsp_valid) rcvd <= rcvd + 1;
          if (is_store ? (req_valid && req_ready && sent == n_lines - 1)
                       : (rsp_valid && rcvd == n_lines - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> (state == S_RUN && !is_store))
    else $error("memory response without an outstanding load");
endmodule
