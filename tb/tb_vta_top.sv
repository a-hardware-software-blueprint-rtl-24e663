// tb_vta_top: end-to-end test of the whole accelerator at its default
// parameters. A host program (written here into the DRAM model) computes
// a tiled fully-connected layer with requantisation and ReLU,
//   out[t][m][n] = relu((bias[t][m][n] + sum_k inp[t][m][k] x wgt[n][k]^T) >>> 2)
// narrowed to 8 bits, for T tiles of M x N output tensors over K input
// blocks. The instruction stream uses two buffer regions alternately
// (double buffering), so load, compute and store work on different tiles at
// the same time, ordered by tokens in all four dependency queues:
//   load  : LOAD WGT once; per tile LOAD INP (right-padded by one entry),
//           waiting for compute to free the region from tile 2 on.
//   compute: LOAD UOP once; per tile LOAD ACC (bias), GEMM, ALU SHR, ALU MAX.
//   store : STORE per tile, then frees the output region for compute.
// The results in DRAM are compared with values computed here from the same
// DRAM data. The test also counts that each mechanism occurred: dependency
// waits in load, compute and store, register-file interlock stalls, zero
// padding, fetch stalled by a full command queue, and load/compute overlap.
module tb_vta_top;
  import vta_pkg::*;
  localparam int T = 16, M = 2, K = 2, N = 2;
  localparam int WORDS = 65536;
  localparam int INSN_BYTE = 'h0;
  localparam int UOP_IDX = 'h1000 / 4, WGT_IDX = 'h2000 / 256, INP_IDX = 'h4000 / 32;
  localparam int ACC_IDX = 'h8000 / 128, OUT_IDX = 'h10000 / 32;
  localparam int INP_R = 8, ACC_R = 8;      // region sizes (entries)
  localparam int SHIFT = 2;

  logic clk = 0, rst_n = 0;
  logic start, done;
  logic [31:0] insn_base, insn_count;
  logic [2:0] rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [31:0] rd_req_addr [3], rd_rsp_data [3];
  logic [0:0] wr_req_valid, wr_req_ready;
  logic [31:0] wr_req_addr [1], wr_req_data [1];

  vta_top dut (.clk, .rst_n, .start, .insn_base, .insn_count, .done,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_req_valid(wr_req_valid[0]), .wr_req_ready(wr_req_ready[0]),
    .wr_req_addr(wr_req_addr[0]), .wr_req_data(wr_req_data[0]));

  vta_dram_model #(.WORDS(WORDS), .NRD(3), .NWR(1)) dram (
    .clk, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_req_valid, .wr_req_ready, .wr_req_addr, .wr_req_data);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, ninsn = 0, cycles = 0;
  int n_ld_wait = 0, n_cmp_wait = 0, n_st_wait = 0, n_hazard = 0, n_pad = 0;
  int n_qfull = 0, n_overlap = 0, n_gemm = 0, n_alu = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic put(logic [INSN_W-1:0] w);
    for (int k = 0; k < 4; k++) dram.mem[INSN_BYTE/4 + ninsn*4 + k] = w[k*32 +: 32];
    ninsn++;
  endtask

  function automatic mem_insn_t mk_mem(opcode_e op, mem_id_e id, int sb, int db, int n, int xpad1);
    mem_insn_t m;
    m = '0; m.opcode = op; m.sram_mem = id; m.sram_base = sb; m.dram_base = db;
    m.y_size = 1; m.x_size = n; m.x_stride = n; m.x_pad_1 = xpad1;
    return m;
  endfunction

  // ---------------- mechanism counters ----------------
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.u_load.state == dut.u_load.S_DEP && dut.u_load.insn.dept.pop_next && !dut.u_load.c2l_valid) n_ld_wait++;
    if (dut.u_compute.state == dut.u_compute.S_DEP && !dut.u_compute.deps_ok) n_cmp_wait++;
    if (dut.u_store.state == dut.u_store.S_DEP && dut.u_store.insn.dept.pop_prev && !dut.u_store.c2s_valid) n_st_wait++;
    if (dut.u_compute.hazard_stall) n_hazard++;
    if (dut.u_load.u_dma.pad_write) n_pad++;
    if (dut.u_fetch.state == dut.u_fetch.S_PUSH && !dut.u_fetch.dest_ready) n_qfull++;
    if (dut.u_load.u_dma.busy && dut.u_compute.state == dut.u_compute.S_EXEC) n_overlap++;
    if (dut.u_compute.u_gemm.out_valid) n_gemm++;
    if (dut.u_compute.u_alu.out_valid) n_alu++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mem_insn_t m;
    gemm_insn_t g;
    alu_insn_t a;
    uop_t u;
    start = 0; insn_base = INSN_BYTE; insn_count = 0;
    // ---- data ----
    for (int i = 0; i < N*K*WGT_ELEM_W/32; i++) dram.mem[WGT_IDX*64 + i] = $urandom;
    for (int i = 0; i < T*M*K*INP_ELEM_W/32; i++) dram.mem[INP_IDX*8 + i] = $urandom;
    for (int i = 0; i < T*M*N*ACC_ELEM_W/32; i++) dram.mem[ACC_IDX*32 + i] = $urandom_range(8000, 0) - 4000;
    // ---- micro-ops: per region r, GEMM kernel (2 uops) then ALU kernel (1 uop) ----
    for (int r = 0; r < 2; r++) begin
      for (int k = 0; k < K; k++) begin
        u = '0; u.acc_idx = r*ACC_R; u.inp_idx = r*INP_R + k; u.wgt_idx = k;
        dram.mem[UOP_IDX + r*4 + k] = u;
      end
      u = '0; u.acc_idx = r*ACC_R;
      dram.mem[UOP_IDX + r*4 + 2] = u;
    end
    // ---- program ----
    put(mk_mem(OP_LOAD, MEM_UOP, 0, UOP_IDX, 8, 0));
    put(mk_mem(OP_LOAD, MEM_WGT, 0, WGT_IDX, N*K, 0));
    for (int t = 0; t < T; t++) begin
      int r;
      r = t % 2;
      m = mk_mem(OP_LOAD, MEM_INP, r*INP_R, INP_IDX + t*M*K, M*K, 1);
      m.dept.pop_next = (t >= 2); m.dept.push_next = 1;
      put(m);
      m = mk_mem(OP_LOAD, MEM_ACC, r*ACC_R, ACC_IDX + t*M*N, M*N, 0);
      m.dept.pop_next = (t >= 2);
      put(m);
      g = '0; g.opcode = OP_GEMM; g.uop_bgn = r*4; g.uop_end = r*4 + K;
      g.end0 = M; g.end1 = N; g.x0 = N; g.x1 = 1; g.y0 = K; g.y1 = 0; g.z0 = 0; g.z1 = K;
      g.dept.pop_prev = 1;
      put(g);
      a = '0; a.opcode = OP_ALU; a.alu_op = ALU_SHR; a.use_imm = 1; a.imm = SHIFT;
      a.uop_bgn = r*4 + 2; a.uop_end = r*4 + 3; a.end0 = M*N; a.end1 = 1; a.x0 = 1;
      put(a);
      a.alu_op = ALU_MAX; a.imm = 0;
      a.dept.push_prev = (t < T - 2); a.dept.push_next = 1;
      put(a);
      m = mk_mem(OP_STORE, MEM_OUT, r*ACC_R, OUT_IDX + t*M*N, M*N, 0);
      m.dept.pop_prev = 1; m.dept.push_prev = (t < T - 2);
      put(m);
    end
    insn_count = ninsn;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    $display("%0d instructions, %0d tiles, finished after %0d cycles", ninsn, T, cycles);

    // ---- reference ----
    for (int t = 0; t < T; t++)
      for (int mm = 0; mm < M; mm++)
        for (int n = 0; n < N; n++) begin
          int oidx;
          oidx = OUT_IDX + t*M*N + mm*N + n;
          for (int b = 0; b < BATCH; b++)
            for (int o = 0; o < BLOCK_OUT; o++) begin
              int s, lane, word;
              logic [7:0] e, got;
              lane = b*BLOCK_OUT + o;
              s = int'(dram.mem[(ACC_IDX + t*M*N + mm*N + n)*32 + lane]);
              for (int k = 0; k < K; k++)
                for (int i = 0; i < BLOCK_IN; i++) begin
                  logic [31:0] iw, ww;
                  int ie, we;
                  iw = dram.mem[(INP_IDX + t*M*K + mm*K + k)*8 + (b*BLOCK_IN + i)/4];
                  ww = dram.mem[(WGT_IDX + n*K + k)*64 + (o*BLOCK_IN + i)/4];
                  ie = int'($signed(iw[((b*BLOCK_IN + i)%4)*8 +: 8]));
                  we = int'($signed(ww[((o*BLOCK_IN + i)%4)*8 +: 8]));
                  s += ie * we;
                end
              s = s >>> SHIFT;
              if (s < 0) s = 0;
              e = s[7:0];
              word = dram.mem[oidx*8 + lane/4];
              got = word[(lane%4)*8 +: 8];
              check(got == e, $sformatf("tile %0d m %0d n %0d lane %0d", t, mm, n, lane));
            end
        end

    $display("mechanisms: load dep waits %0d, compute dep waits %0d, store dep waits %0d",
             n_ld_wait, n_cmp_wait, n_st_wait);
    $display("  interlock stalls %0d, padding writes %0d, fetch stalls on full queue %0d, load/compute overlap %0d",
             n_hazard, n_pad, n_qfull, n_overlap);
    $display("  GEMM results %0d, ALU results %0d", n_gemm, n_alu);
    check(n_ld_wait > 0,  "load waited for a compute->load token");
    check(n_cmp_wait > 0, "compute waited for a dependency token");
    check(n_st_wait > 0,  "store waited for a compute->store token");
    check(n_hazard > 0,   "register-file interlock stall");
    check(n_pad == T,     "one padding entry per input tile");
    check(n_qfull > 0,    "fetch stalled by a full command queue");
    check(n_overlap > 0,  "load and compute ran concurrently");
    check(n_gemm == T*M*N*K, "GEMM count");
    check(n_alu == 2*T*M*N,  "ALU count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
