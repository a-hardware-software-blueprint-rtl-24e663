// tb_vta_compute: self-checking test of the compute module. Micro-ops and
// biases are loaded from a DRAM model; the input and weight buffers are
// modelled with a one-cycle read latency. The program runs:
//   K1 GEMM over 16 micro-ops in a 2 x 2 loop (64 distinct accumulators),
//      whose duration is checked against the one-micro-op-per-cycle rate;
//   K2 GEMM that accumulates into one entry repeatedly (interlock stalls);
//   K3..K5 ALU ADD with an immediate, MAX between two tensors, SHR by 3;
//   K6 GEMM with the reset flag.
// A reference model executes the same loop nest of the instruction
// semantics on plain arrays; register file and output buffer are compared
// with it at the end. Dependency tokens in both directions are checked.
module tb_vta_compute;
  import vta_pkg::*;
  localparam int NACC = 1 << LOG_ACC_BUFF_DEPTH;
  localparam int UOP_DB = 0, ACC_DB = 4;   // DRAM entry indices
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready;
  logic [INSN_W-1:0] cmd_data;
  logic l2c_valid, l2c_ready, c2l_valid, c2l_ready, s2c_valid, s2c_ready, c2s_valid, c2s_ready;
  logic [0:0] rq_v, rq_r, rs_v, wq_v, wq_r;
  logic [31:0] rq_a [1], rs_d [1], wq_a [1], wq_d [1];
  logic inp_re, wgt_re, out_we, busy, hazard_stall;
  logic [LOG_INP_BUFF_DEPTH-1:0] inp_raddr;
  logic [INP_ELEM_W-1:0] inp_rdata;
  logic [LOG_WGT_BUFF_DEPTH-1:0] wgt_raddr;
  logic [WGT_ELEM_W-1:0] wgt_rdata;
  logic [LOG_OUT_BUFF_DEPTH-1:0] out_waddr;
  logic [OUT_ELEM_W-1:0] out_wdata;

  logic [INP_ELEM_W-1:0] inp_mem [1 << LOG_INP_BUFF_DEPTH];
  logic [WGT_ELEM_W-1:0] wgt_mem [1 << LOG_WGT_BUFF_DEPTH];
  logic [OUT_ELEM_W-1:0] out_mem [NACC];
  logic [ACC_ELEM_W-1:0] acc_ref [NACC];
  logic [OUT_ELEM_W-1:0] out_ref [NACC];
  logic [NACC-1:0]       touched;
  uop_t                  uops [64];
  int checks = 0, failures = 0, c2l_tokens = 0, c2s_tokens = 0, stalls = 0, nreq = 0;

  vta_compute dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data,
    .l2c_valid, .l2c_ready, .c2l_valid, .c2l_ready, .s2c_valid, .s2c_ready, .c2s_valid, .c2s_ready,
    .mem_req_valid(rq_v[0]), .mem_req_ready(rq_r[0]), .mem_req_addr(rq_a[0]),
    .mem_rsp_valid(rs_v[0]), .mem_rsp_data(rs_d[0]),
    .inp_re, .inp_raddr, .inp_rdata, .wgt_re, .wgt_raddr, .wgt_rdata,
    .out_we, .out_waddr, .out_wdata, .busy, .hazard_stall);

  vta_dram_model #(.WORDS(4096)) dram (
    .clk, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_rsp_valid(rs_v), .rd_rsp_data(rs_d),
    .wr_req_valid(wq_v), .wr_req_ready(wq_r), .wr_req_addr(wq_a), .wr_req_data(wq_d));
  assign wq_v = '0; assign wq_a[0] = '0; assign wq_d[0] = '0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (inp_re) inp_rdata <= inp_mem[inp_raddr];
    if (wgt_re) wgt_rdata <= wgt_mem[wgt_raddr];
    if (out_we) out_mem[out_waddr] <= out_wdata;
    if (c2l_valid && c2l_ready) c2l_tokens++;
    if (c2s_valid && c2s_ready) c2s_tokens++;
    if (hazard_stall) stalls++;
    if (rq_v[0] && rq_r[0]) nreq++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- reference model of the instruction semantics ----------------
  function automatic logic [OUT_ELEM_W-1:0] narrow(logic [ACC_ELEM_W-1:0] v);
    logic [OUT_ELEM_W-1:0] r;
    for (int l = 0; l < BATCH*BLOCK_OUT; l++) r[l*OUT_WIDTH +: OUT_WIDTH] = v[l*ACC_WIDTH +: OUT_WIDTH];
    return r;
  endfunction

  task automatic ref_gemm(gemm_insn_t g);
    for (int i0 = 0; i0 < g.end0; i0++)
      for (int i1 = 0; i1 < g.end1; i1++)
        for (int u = g.uop_bgn; u < g.uop_end; u++) begin
          int x, y, z;
          logic [ACC_ELEM_W-1:0] r;
          x = (i0 * g.x0 + i1 * g.x1 + uops[u].acc_idx) % NACC;
          y = (i0 * g.y0 + i1 * g.y1 + uops[u].inp_idx) % (1 << LOG_INP_BUFF_DEPTH);
          z = (i0 * g.z0 + i1 * g.z1 + uops[u].wgt_idx) % (1 << LOG_WGT_BUFF_DEPTH);
          for (int b = 0; b < BATCH; b++)
            for (int o = 0; o < BLOCK_OUT; o++) begin
              int s;
              s = int'($signed(acc_ref[x][(b*BLOCK_OUT+o)*ACC_WIDTH +: ACC_WIDTH]));
              for (int i = 0; i < BLOCK_IN; i++)
                s += int'($signed(inp_mem[y][(b*BLOCK_IN+i)*INP_WIDTH +: INP_WIDTH])) *
                     int'($signed(wgt_mem[z][(o*BLOCK_IN+i)*WGT_WIDTH +: WGT_WIDTH]));
              r[(b*BLOCK_OUT+o)*ACC_WIDTH +: ACC_WIDTH] = g.reset ? 0 : s;
            end
          acc_ref[x] = r; out_ref[x] = narrow(r); touched[x] = 1'b1;
        end
  endtask

  task automatic ref_alu(alu_insn_t a);
    for (int i0 = 0; i0 < a.end0; i0++)
      for (int i1 = 0; i1 < a.end1; i1++)
        for (int u = a.uop_bgn; u < a.uop_end; u++) begin
          int x, y;
          logic [ACC_ELEM_W-1:0] r;
          x = (i0 * a.x0 + i1 * a.x1 + uops[u].acc_idx) % NACC;
          y = (i0 * a.y0 + i1 * a.y1 + uops[u].inp_idx) % NACC;
          for (int l = 0; l < BATCH*BLOCK_OUT; l++) begin
            int p, q, v;
            p = int'($signed(acc_ref[x][l*ACC_WIDTH +: ACC_WIDTH]));
            q = a.use_imm ? int'($signed(a.imm)) : int'($signed(acc_ref[y][l*ACC_WIDTH +: ACC_WIDTH]));
            case (a.alu_op)
              ALU_MIN: v = (p < q) ? p : q;
              ALU_MAX: v = (p > q) ? p : q;
              ALU_ADD: v = p + q;
              default: v = (q >= 0) ? (p >>> q) : (p <<< -q);
            endcase
            r[l*ACC_WIDTH +: ACC_WIDTH] = a.reset ? 0 : v;
          end
          acc_ref[x] = r; out_ref[x] = narrow(r); touched[x] = 1'b1;
        end
  endtask

  // ---------------- instruction builders ----------------
  function automatic mem_insn_t mk_load(mem_id_e id, int sb, int db, int n, bit popp);
    mem_insn_t m;
    m = '0; m.opcode = OP_LOAD; m.sram_mem = id; m.sram_base = sb; m.dram_base = db;
    m.y_size = 1; m.x_size = n; m.x_stride = n; m.dept.pop_prev = popp;
    return m;
  endfunction

  function automatic gemm_insn_t mk_gemm(int bgn, int en, int e0, int e1, int x0, int x1,
                                         int y0, int y1, int z0, int z1, bit rst);
    gemm_insn_t g;
    g = '0; g.opcode = OP_GEMM; g.uop_bgn = bgn; g.uop_end = en; g.end0 = e0; g.end1 = e1;
    g.x0 = x0; g.x1 = x1; g.y0 = y0; g.y1 = y1; g.z0 = z0; g.z1 = z1; g.reset = rst;
    return g;
  endfunction

  function automatic alu_insn_t mk_alu(alu_op_e op, bit ui, int imm, int bgn, int en, int e0, int e1,
                                       int x0, int x1, int y0, int y1);
    alu_insn_t a;
    a = '0; a.opcode = OP_ALU; a.alu_op = op; a.use_imm = ui; a.imm = imm;
    a.uop_bgn = bgn; a.uop_end = en; a.end0 = e0; a.end1 = e1;
    a.x0 = x0; a.x1 = x1; a.y0 = y0; a.y1 = y1;
    return a;
  endfunction

  task automatic send(logic [INSN_W-1:0] w);
    @(negedge clk); cmd_valid = 1; cmd_data = w;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 0;
  endtask

  // Runs one instruction to completion, returns the cycles it took.
  task automatic run(logic [INSN_W-1:0] w, output int cycles);
    cycles = 0;
    send(w);
    while (busy) begin @(posedge clk); cycles++; end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    gemm_insn_t g;
    alu_insn_t a;
    mem_insn_t m;
    cmd_valid = 0; cmd_data = '0; l2c_valid = 0; s2c_valid = 0; c2l_ready = 1; c2s_ready = 1;
    touched = '0;
    foreach (inp_mem[i]) for (int w = 0; w < INP_ELEM_W / 32; w++) inp_mem[i][w*32 +: 32] = $urandom;
    foreach (wgt_mem[i]) for (int w = 0; w < WGT_ELEM_W / 32; w++) wgt_mem[i][w*32 +: 32] = $urandom;
    // micro-op kernels
    for (int j = 0; j < 64; j++) uops[j] = '0;
    for (int j = 0; j < 16; j++) begin uops[j].acc_idx = j; uops[j].inp_idx = j; uops[j].wgt_idx = j % 4; end
    uops[16] = '{unused: 0, wgt_idx: 1, inp_idx: 3, acc_idx: 5};
    uops[17] = '{unused: 0, wgt_idx: 2, inp_idx: 4, acc_idx: 5};
    for (int j = 0; j < 8; j++) uops[20 + j].acc_idx = j;
    for (int j = 0; j < 4; j++) begin uops[28 + j].acc_idx = 8 + j; uops[28 + j].inp_idx = 40 + j; end
    uops[32].acc_idx = 0;
    uops[33].acc_idx = 60;
    for (int j = 0; j < 64; j++) dram.mem[UOP_DB + j] = uops[j];
    // biases: 64 register-file entries from DRAM entry ACC_DB
    for (int i = 0; i < 64; i++) begin
      for (int w = 0; w < ACC_ELEM_W / 32; w++) begin
        dram.mem[(ACC_DB + i) * (ACC_ELEM_W / 32) + w] = $urandom_range(2000, 0) - 1000;
        acc_ref[i][w*32 +: 32] = dram.mem[(ACC_DB + i) * (ACC_ELEM_W / 32) + w];
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // micro-op load waits for a load->compute token
    m = mk_load(MEM_UOP, 0, UOP_DB, 64, 1);
    send(m);
    repeat (30) @(posedge clk);
    check(nreq == 0 && busy, "waits for load->compute token");
    @(negedge clk); l2c_valid = 1;
    do @(posedge clk); while (!l2c_ready);
    @(negedge clk); l2c_valid = 0;
    while (busy) @(posedge clk);
    for (int j = 0; j < 64; j++) check(dut.u_uop_cache.mem[j] == uops[j], "micro-op cache contents");

    run(mk_load(MEM_ACC, 0, ACC_DB, 64, 0), cyc);

    // K1: 64 micro-ops, no collisions
    g = mk_gemm(0, 16, 2, 2, 16, 32, 1, 2, 0, 1, 0);
    stalls = 0;
    run(g, cyc); ref_gemm(g);
    $display("K1 GEMM of 64 micro-ops took %0d cycles", cyc);
    check(cyc <= 64 + 8, "GEMM issues one micro-op per cycle");
    check(stalls == 0, "no interlock stall without collisions");

    // K2: repeated accumulation into entry 5
    g = mk_gemm(16, 18, 3, 1, 0, 0, 10, 0, 3, 0, 0);
    stalls = 0;
    run(g, cyc); ref_gemm(g);
    check(stalls > 0, "interlock stalls on a register-file collision");

    // K3..K5 ALU
    a = mk_alu(ALU_ADD, 1, -7, 20, 28, 1, 1, 0, 0, 0, 0);
    run(a, cyc); ref_alu(a);
    a = mk_alu(ALU_MAX, 0, 0, 28, 32, 2, 1, 4, 0, 4, 0);
    run(a, cyc); ref_alu(a);
    a = mk_alu(ALU_SHR, 1, 3, 32, 33, 8, 8, 8, 1, 0, 0);
    run(a, cyc); ref_alu(a);
    $display("ALU SHR over 64 entries took %0d cycles", cyc);
    // K6: GEMM reset, pushes tokens to load and store and waits for store
    g = mk_gemm(33, 34, 1, 4, 0, 1, 0, 0, 0, 0, 1);
    g.dept.push_prev = 1; g.dept.push_next = 1; g.dept.pop_next = 1;
    send(g);
    repeat (20) @(posedge clk);
    check(c2l_tokens == 0 && c2s_tokens == 0, "waits for store->compute token");
    @(negedge clk); s2c_valid = 1;
    do @(posedge clk); while (!s2c_ready);
    @(negedge clk); s2c_valid = 0;
    while (busy) @(posedge clk);
    ref_gemm(g);
    check(c2l_tokens == 1 && c2s_tokens == 1, "tokens pushed to load and store");

    repeat (3) @(posedge clk);
    for (int i = 0; i < 64; i++) begin
      check(dut.u_reg_file.mem[i] == acc_ref[i], $sformatf("register file entry %0d", i));
      if (touched[i]) check(out_mem[i] == out_ref[i], $sformatf("output buffer entry %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
