// tb_vta_fetch: self-checking test of instruction fetch and dispatch. A
// program of 40 random LOAD (to every buffer), STORE, GEMM and ALU
// instructions is placed in the DRAM model; queue consumers accept with
// random back-pressure (and the compute queue stays blocked for a while).
// Checks that each queue receives exactly its instructions, in program
// order and unmodified, that busy drops at the end, and that fetch takes at
// least four DRAM reads per instruction.
module tb_vta_fetch;
  import vta_pkg::*;
  localparam int NI = 40, BASE = 256;
  logic clk = 0, rst_n = 0;
  logic start, busy;
  logic [31:0] insn_base, insn_count;
  logic [0:0] rq_v, rq_r, rs_v, wq_v, wq_r;
  logic [31:0] rq_a [1], rs_d [1], wq_a [1], wq_d [1];
  logic ld_valid, ld_ready, cmp_valid, cmp_ready, st_valid, st_ready;
  logic [INSN_W-1:0] insn_out;
  logic [INSN_W-1:0] prog [NI];
  logic [INSN_W-1:0] exp_ld [$], exp_cmp [$], exp_st [$];
  int checks = 0, failures = 0, nreq = 0, cyc = 0;

  vta_fetch dut (.clk, .rst_n, .start, .insn_base, .insn_count, .busy,
    .mem_req_valid(rq_v[0]), .mem_req_ready(rq_r[0]), .mem_req_addr(rq_a[0]),
    .mem_rsp_valid(rs_v[0]), .mem_rsp_data(rs_d[0]),
    .ld_valid, .ld_ready, .cmp_valid, .cmp_ready, .st_valid, .st_ready, .insn_out);

  vta_dram_model #(.WORDS(4096)) dram (
    .clk, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_rsp_valid(rs_v), .rd_rsp_data(rs_d),
    .wr_req_valid(wq_v), .wr_req_ready(wq_r), .wr_req_addr(wq_a), .wr_req_data(wq_d));
  assign wq_v = '0; assign wq_a[0] = '0; assign wq_d[0] = '0;

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rq_v[0] && rq_r[0]) nreq++;
    if (ld_valid && ld_ready) begin
      check(exp_ld.size() > 0 && insn_out == exp_ld[0], "load queue order");
      if (exp_ld.size() > 0) void'(exp_ld.pop_front());
    end
    if (cmp_valid && cmp_ready) begin
      check(exp_cmp.size() > 0 && insn_out == exp_cmp[0], "compute queue order");
      if (exp_cmp.size() > 0) void'(exp_cmp.pop_front());
    end
    if (st_valid && st_ready) begin
      check(exp_st.size() > 0 && insn_out == exp_st[0], "store queue order");
      if (exp_st.size() > 0) void'(exp_st.pop_front());
    end
  end
  always @(negedge clk) begin
    ld_ready  <= $urandom_range(1, 0);
    st_ready  <= $urandom_range(1, 0);
    cmp_ready <= (cyc < 300) ? 1'b0 : 1'($urandom_range(1, 0));
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; insn_base = BASE; insn_count = NI;
    for (int i = 0; i < NI; i++) begin
      mem_insn_t m;
      logic [INSN_W-1:0] w;
      w = {$urandom, $urandom, $urandom, $urandom};
      m = mem_insn_t'(w);
      case ($urandom_range(3, 0))
        0: m.opcode = OP_LOAD;
        1: m.opcode = OP_STORE;
        2: m.opcode = OP_GEMM;
        default: m.opcode = OP_ALU;
      endcase
      m.sram_mem = mem_id_e'($urandom_range(4, 0));
      prog[i] = m;
      for (int k = 0; k < 4; k++) dram.mem[BASE/4 + i*4 + k] = m[k*32 +: 32];
      if (m.opcode == OP_STORE) exp_st.push_back(m);
      else if (m.opcode == OP_LOAD && (m.sram_mem == MEM_INP || m.sram_mem == MEM_WGT)) exp_ld.push_back(m);
      else exp_cmp.push_back(m);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check(busy, "busy after start");
    wait (!busy);
    repeat (2) @(negedge clk);
    check(exp_ld.size() == 0 && exp_cmp.size() == 0 && exp_st.size() == 0, "all dispatched");
    check(nreq == 4 * NI, "four DRAM beats per instruction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
