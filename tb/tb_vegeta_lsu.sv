// tb_vegeta_lsu: self-checking test of the tile load/store unit.
//
// A behavioural memory (random request back-pressure, random in-order read latency of one
// to four cycles) serves line requests.  Random TILE_LOAD_T/U/V/M and TILE_STORE_T
// instructions with random registers, addresses and strides are run one after another;
// every register-file row or metadata line the unit writes is compared with the memory
// line it came from (row i of the destination from addr + i * stride), every store line
// with the register row it must carry, and the number of lines of each instruction with
// 16 / 32 / 64 / 2 / 16.
//
// The 64 B line split follows the paper; the request/response handshake is this design's.
module tb_vegeta_lsu;
  import vegeta_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic instr_valid = 1'b0, instr_ready, busy, done;
  instr_t instr;
  logic req_valid, req_ready, rsp_valid;
  mem_req_t req;
  row_t rsp_data;
  logic ld_we, md_we;
  rf_row_addr_t ld_row, st_row;
  row_t ld_data, md_data, st_data;
  logic [3:0] md_line;
  int checks = 0, failures = 0;

  vegeta_lsu dut (.*);

  initial begin
    #2_000_000 $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // memory: line content is a function of the address unless written
  row_t mem [int unsigned];
  function automatic row_t mem_rd(int unsigned a);
    row_t r;
    if (mem.exists(a)) return mem[a];
    for (int i = 0; i < 16; i++) r[32*i +: 32] = a * 32'h9E37_79B9 + i;
    return r;
  endfunction

  row_t rsp_q [$];
  int   rsp_t [$];
  int   cyc = 0;
  row_t rf [RF_ROWS];
  int   n_ld, n_md, n_st;
  logic [31:0] st_addr [$];
  row_t        st_dat [$];

  assign st_data = rf[st_row];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    req_ready <= ($urandom_range(0, 2) != 0);
    if (req_valid && req_ready) begin
      if (req.we) begin st_addr.push_back(req.addr); st_dat.push_back(req.wdata); end
      else begin
        rsp_q.push_back(mem_rd(req.addr));
        rsp_t.push_back(cyc + $urandom_range(1, 4) + ((rsp_t.size() > 0) ? 0 : 0));
      end
    end
    if (rsp_q.size() > 0 && rsp_t[0] <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_data  <= rsp_q.pop_front();
      void'(rsp_t.pop_front());
    end else rsp_valid <= 1'b0;
  end

  // capture register-file writes
  row_t ld_seen [RF_ROWS];
  logic ld_hit  [RF_ROWS];
  row_t md_seen [16];
  logic md_hit  [16];
  always @(posedge clk) begin
    if (ld_we) begin ld_seen[ld_row] = ld_data; ld_hit[ld_row] = 1; n_ld++; end
    if (md_we) begin md_seen[md_line] = md_data; md_hit[md_line] = 1; n_md++; end
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    instr_valid = 0; instr = '0; rsp_valid = 0; rsp_data = '0; req_ready = 0;
    foreach (rf[r]) for (int i = 0; i < 16; i++) rf[r][32*i +: 32] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      opcode_e op;
      int nl, base;
      op = opcode_e'($urandom_range(0, 4));
      instr = '0;
      instr.op = op;
      instr.dst = 3'($urandom);
      instr.src1 = 3'($urandom);
      instr.addr = {$urandom_range(0, 1023), 6'd0};
      instr.stride = {$urandom_range(1, 8), 6'd0};
      foreach (ld_hit[r]) ld_hit[r] = 0;
      foreach (md_hit[r]) md_hit[r] = 0;
      n_ld = 0; n_md = 0;
      st_addr = {}; st_dat = {};
      @(negedge clk);
      instr_valid = 1;
      while (!instr_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk);
      instr_valid = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      unique case (op)
        OP_TILE_LOAD_T: begin nl = 16; base = 16 * instr.dst; end
        OP_TILE_LOAD_U: begin nl = 32; base = 32 * instr.dst[1:0]; end
        OP_TILE_LOAD_V: begin nl = 64; base = 64 * instr.dst[0]; end
        OP_TILE_LOAD_M: begin nl = 2;  base = 2 * instr.dst; end
        default:        begin nl = 16; base = 16 * instr.src1; end
      endcase
      if (op == OP_TILE_STORE_T) begin
        chk(st_addr.size() == nl, "store line count");
        for (int i = 0; i < st_addr.size() && i < nl; i++) begin
          chk(st_addr[i] == instr.addr + i * instr.stride, "store address");
          chk(st_dat[i] == rf[base + i], "store data");
        end
      end else if (op == OP_TILE_LOAD_M) begin
        chk(n_md == nl && n_ld == 0, "metadata line count");
        for (int i = 0; i < nl; i++)
          chk(md_hit[base + i] && md_seen[base + i] == mem_rd(instr.addr + i * 64), "metadata line");
      end else begin
        chk(n_ld == nl && n_md == 0, "load line count");
        for (int i = 0; i < nl; i++)
          chk(ld_hit[base + i] && ld_seen[base + i] == mem_rd(instr.addr + i * instr.stride),
              "loaded row");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
