// tb_vta_conv2d: end-to-end workload test of the whole accelerator at its
// default parameters, running 2D convolution layers the way a compiler
// maps them onto the GEMM intrinsic. Each layer is
//   out[oc][oh][ow] = clamp(relu((bias + sum_{kh,kw,ic} inp[ic][oh*S+kh-P][ow*S+kw-P]
//                                 x wgt[oc][kh][kw][ic]^T) >>> SHIFT), 0, 127)
// where every "channel" index counts blocks of 16 channels, and every
// tensor entry holds BATCH x 16 values. The test layers are a 3x3 stride-1
// layer, a 3x3 stride-2 layer and a 1x1 stride-2 (downsampling) layer, all
// with two input-channel and two output-channel blocks. Those shapes are
// typical of ResNet convolution layers at a small spatial size.
//
// How a layer is mapped:
//   load   : one LOAD INP per input-channel block. The DMA adds the P-entry
//            zero border, so the buffer holds the padded (H+2P) x (W+2P)
//            image. Then one LOAD WGT for all the kernel taps.
//   compute: LOAD UOP, then LOAD ACC for the biases. A single GEMM follows,
//            whose two loops walk output rows and columns (x0 = OW, x1 = 1,
//            y0 = S*(W+2P), y1 = S). Its micro-ops enumerate the
//            (kh, kw, ic, oc) taps, with oc innermost so that consecutive
//            micro-ops write different accumulators. Then three ALU
//            instructions: SHR, MAX 0 and MIN 127.
//   store  : one STORE of all output entries.
// Consecutive layers reuse the same buffer addresses. The dependency
// tokens order them: RAW load->compute and compute->store, and WAR
// compute->load and store->compute.
// The outputs in DRAM are compared with a direct convolution computed here.
// The test also checks the number of GEMM operations and padding writes of
// each layer.
module tb_vta_conv2d;
  import vta_pkg::*;
  localparam int NL = 3;
  localparam int WORDS = 65536;
  localparam int SHIFT = 6;
  // Per-layer shape: H, W, CI, CO, KS, S, P. These are variables set at
  // time zero, and so are the tensor-shape bounds of the reference loops:
  // constant bounds would make the simulator unroll those loops.
  int LH [NL], LW [NL], LCI [NL], LCO [NL], LKS [NL], LS [NL], LP [NL];
  int nbatch, nbin, nbout;

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
  int n_gemm = 0, n_pad = 0, n_hazard = 0;
  int free_byte = 'h1000;            // DRAM allocation pointer (instructions below)
  // DRAM entry indices of each layer's tensors
  int uop_at [NL], wgt_at [NL], inp_at [NL], acc_at [NL], out_at [NL];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic put(logic [INSN_W-1:0] w);
    for (int k = 0; k < 4; k++) dram.mem[ninsn*4 + k] = w[k*32 +: 32];
    ninsn++;
  endtask

  // reserve n entries of 'bytes' each; returns the first entry index
  function automatic int alloc(int n, int bytes);
    int idx;
    free_byte = (free_byte + bytes - 1) / bytes * bytes;
    idx = free_byte / bytes;
    free_byte += n * bytes;
    return idx;
  endfunction

  function automatic int oh_of(int l);
    return (LH[l] + 2*LP[l] - LKS[l]) / LS[l] + 1;
  endfunction
  function automatic int ow_of(int l);
    return (LW[l] + 2*LP[l] - LKS[l]) / LS[l] + 1;
  endfunction

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.u_compute.u_gemm.out_valid) n_gemm++;
    if (dut.u_load.u_dma.pad_write) n_pad++;
    if (dut.u_compute.hazard_stall) n_hazard++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // emit the instructions of layer l
  task automatic emit_layer(int l);
    mem_insn_t m;
    gemm_insn_t g;
    alu_insn_t a;
    uop_t u;
    int hp, wp, oh, ow, nu, first, last;
    hp = LH[l] + 2*LP[l]; wp = LW[l] + 2*LP[l];
    oh = oh_of(l); ow = ow_of(l);
    first = int'(l == 0); last = int'(l == NL - 1);
    // micro-ops: taps (kh, kw, ic, oc) with oc innermost, then one ALU uop
    nu = 0;
    for (int kh = 0; kh < LKS[l]; kh++)
      for (int kw = 0; kw < LKS[l]; kw++)
        for (int ic = 0; ic < LCI[l]; ic++)
          for (int oc = 0; oc < LCO[l]; oc++) begin
            u = '0;
            u.acc_idx = oc*oh*ow;
            u.inp_idx = ic*hp*wp + kh*wp + kw;
            u.wgt_idx = ((oc*LKS[l] + kh)*LKS[l] + kw)*LCI[l] + ic;
            dram.mem[uop_at[l] + nu] = u;
            nu++;
          end
    u = '0;
    dram.mem[uop_at[l] + nu] = u;
    // load stream
    for (int ic = 0; ic < LCI[l]; ic++) begin
      m = '0; m.opcode = OP_LOAD; m.sram_mem = MEM_INP;
      m.sram_base = ic*hp*wp; m.dram_base = inp_at[l] + ic*LH[l]*LW[l];
      m.y_size = LH[l]; m.x_size = LW[l]; m.x_stride = LW[l];
      m.y_pad_0 = LP[l]; m.y_pad_1 = LP[l]; m.x_pad_0 = LP[l]; m.x_pad_1 = LP[l];
      m.dept.pop_next = (ic == 0) && !first;        // compute is done with the last layer's inputs
      put(m);
    end
    m = '0; m.opcode = OP_LOAD; m.sram_mem = MEM_WGT; m.sram_base = 0; m.dram_base = wgt_at[l];
    m.y_size = 1; m.x_size = LCO[l]*LKS[l]*LKS[l]*LCI[l]; m.x_stride = m.x_size;
    m.dept.push_next = 1;                           // inputs and weights are ready
    put(m);
    // compute stream
    m = '0; m.opcode = OP_LOAD; m.sram_mem = MEM_UOP; m.sram_base = 0; m.dram_base = uop_at[l];
    m.y_size = 1; m.x_size = nu + 1; m.x_stride = nu + 1;
    m.dept.pop_next = !first;                       // store has written the last layer's outputs
    put(m);
    m = '0; m.opcode = OP_LOAD; m.sram_mem = MEM_ACC; m.sram_base = 0; m.dram_base = acc_at[l];
    m.y_size = 1; m.x_size = LCO[l]*oh*ow; m.x_stride = m.x_size;
    put(m);
    g = '0; g.opcode = OP_GEMM; g.uop_bgn = 0; g.uop_end = nu;
    g.end0 = oh; g.end1 = ow; g.x0 = ow; g.x1 = 1; g.y0 = LS[l]*wp; g.y1 = LS[l];
    g.dept.pop_prev = 1; g.dept.push_prev = !last;
    put(g);
    a = '0; a.opcode = OP_ALU; a.uop_bgn = nu; a.uop_end = nu + 1;
    a.end0 = LCO[l]*oh*ow; a.end1 = 1; a.x0 = 1; a.use_imm = 1;
    a.alu_op = ALU_SHR; a.imm = SHIFT; put(a);
    a.alu_op = ALU_MAX; a.imm = 0;     put(a);
    a.alu_op = ALU_MIN; a.imm = 127; a.dept.push_next = 1; put(a);
    // store stream
    m = '0; m.opcode = OP_STORE; m.sram_mem = MEM_OUT; m.sram_base = 0; m.dram_base = out_at[l];
    m.y_size = 1; m.x_size = LCO[l]*oh*ow; m.x_stride = m.x_size;
    m.dept.pop_prev = 1; m.dept.push_prev = !last;
    put(m);
  endtask

  function automatic int inp_val(int l, int ic, int h, int w, int b, int i);
    logic [31:0] word;
    int e;
    if (h < 0 || h >= LH[l] || w < 0 || w >= LW[l]) return 0;
    e = inp_at[l] + (ic*LH[l] + h)*LW[l] + w;
    word = dram.mem[e*(INP_ELEM_W/32) + (b*BLOCK_IN + i)/4];
    return int'($signed(word[((b*BLOCK_IN + i)%4)*8 +: 8]));
  endfunction

  function automatic int wgt_val(int l, int e, int o, int i);
    logic [31:0] word;
    word = dram.mem[e*(WGT_ELEM_W/32) + (o*BLOCK_IN + i)/4];
    return int'($signed(word[((o*BLOCK_IN + i)%4)*8 +: 8]));
  endfunction

  task automatic check_layer(int l);
    int oh, ow, errs;
    oh = oh_of(l); ow = ow_of(l); errs = 0;
    for (int oc = 0; oc < LCO[l]; oc++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++)
          for (int b = 0; b < nbatch; b++)
            for (int o = 0; o < nbout; o++) begin
              int s, lane, ent;
              logic [31:0] word;
              logic [7:0] e, got;
              lane = b*BLOCK_OUT + o;
              ent = (oc*oh + y)*ow + x;
              s = int'(dram.mem[(acc_at[l] + ent)*(ACC_ELEM_W/32) + lane]);
              for (int kh = 0; kh < LKS[l]; kh++)
                for (int kw = 0; kw < LKS[l]; kw++)
                  for (int ic = 0; ic < LCI[l]; ic++)
                    for (int i = 0; i < nbin; i++)
                      s += inp_val(l, ic, y*LS[l] + kh - LP[l], x*LS[l] + kw - LP[l], b, i)
                         * wgt_val(l, wgt_at[l] + ((oc*LKS[l] + kh)*LKS[l] + kw)*LCI[l] + ic, o, i);
              s = s >>> SHIFT;
              if (s < 0) s = 0;
              if (s > 127) s = 127;
              e = s[7:0];
              word = dram.mem[(out_at[l] + ent)*(OUT_ELEM_W/32) + lane/4];
              got = word[(lane%4)*8 +: 8];
              checks++;
              if (got != e) begin
                failures++;
                if (errs++ < 8)
                  $display("FAIL layer %0d oc %0d y %0d x %0d lane %0d: got %0d expected %0d",
                           l, oc, y, x, lane, got, e);
              end
            end
  endtask

  initial begin
    int exp_gemm, exp_pad;
    LH  = '{8, 8, 8};  LW = '{8, 8, 8};
    LCI = '{2, 2, 2}; LCO = '{2, 2, 2};
    LKS = '{3, 3, 1};  LS = '{1, 2, 2};  LP = '{1, 1, 0};
    nbatch = BATCH; nbin = BLOCK_IN; nbout = BLOCK_OUT;
    start = 0; insn_base = 0; insn_count = 0;
    exp_gemm = 0; exp_pad = 0;
    for (int l = 0; l < NL; l++) begin
      int oh, ow, nw;
      oh = oh_of(l); ow = ow_of(l);
      nw = LCO[l]*LKS[l]*LKS[l]*LCI[l];
      uop_at[l] = alloc(nw + 1, 4);
      wgt_at[l] = alloc(nw, WGT_ELEM_W/8);
      inp_at[l] = alloc(LCI[l]*LH[l]*LW[l], INP_ELEM_W/8);
      acc_at[l] = alloc(LCO[l]*oh*ow, ACC_ELEM_W/8);
      out_at[l] = alloc(LCO[l]*oh*ow, OUT_ELEM_W/8);
      for (int i = 0; i < nw*WGT_ELEM_W/32; i++) dram.mem[wgt_at[l]*(WGT_ELEM_W/32) + i] = $urandom;
      for (int i = 0; i < LCI[l]*LH[l]*LW[l]*INP_ELEM_W/32; i++)
        dram.mem[inp_at[l]*(INP_ELEM_W/32) + i] = $urandom;
      for (int i = 0; i < LCO[l]*oh*ow*ACC_ELEM_W/32; i++)
        dram.mem[acc_at[l]*(ACC_ELEM_W/32) + i] = $urandom_range(16000, 0) - 4000;
      exp_gemm += LCO[l]*oh*ow*LKS[l]*LKS[l]*LCI[l];
      exp_pad  += LCI[l]*((LH[l] + 2*LP[l])*(LW[l] + 2*LP[l]) - LH[l]*LW[l]);
      emit_layer(l);
    end
    if (free_byte > WORDS*4) $fatal(1, "DRAM model too small");
    insn_count = ninsn;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    $display("%0d layers, %0d instructions, finished after %0d cycles", NL, ninsn, cycles);
    $display("GEMM operations %0d, padding writes %0d, interlock stalls %0d", n_gemm, n_pad, n_hazard);
    for (int l = 0; l < NL; l++) check_layer(l);
    check(n_gemm == exp_gemm, "GEMM operation count");
    check(n_pad == exp_pad, "padding write count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
