// vta_compute: the compute module.
//
// Owns the micro-op cache and the accumulator register file, and holds the
// GEMM core and the tensor ALU. It pops instructions from the compute
// command queue:
//  * LOAD into MEM_UOP or MEM_ACC: a 2D DMA from DRAM fills the micro-op
//    cache (kernels) or the register file (e.g. biases).
//  * GEMM / ALU: runs a micro-coded kernel. The micro-ops uop_bgn..uop_end-1
//    are executed inside a two-level loop (i0 < end0, i1 < end1); each
//    micro-op gives base indices that are offset by the affine function
//    i0*f0 + i1*f1 of the instruction's index factors:
//      GEMM: reg[x] = (reset ? 0 : reg[x] + inp[y] x wgt[z]^T)
//      ALU : reg[x] = (reset ? 0 : OP(reg[x], use_imm ? imm : reg[y]))
//    Every result is also written, narrowed to OUT_WIDTH by keeping the low
//    bits of each lane, into the output buffer at the same index, for the
//    store module.
// Dependency flags: pop_prev/push_prev talk to load (load->compute and
// compute->load queues), pop_next/push_next to store. Tokens are popped
// before the task and pushed after it.
//
// The loop nest, the affine index function, the micro-op fields and the
// one-GEMM-per-cycle rate follow the design description. The pipeline
// below, its read-after-write interlock, the narrowing by truncation and
// the sequencing are this design's own.
//
// Kernel pipeline: S0 reads the micro-op, S1 forms the indices and reads the
// buffers, S2 feeds the GEMM core (one cycle) or the tensor ALU
// (N/LANES cycles), and the unit's result is written back. If an S1 micro-op
// reads a register-file entry that an older micro-op has not yet written,
// S0/S1 stall until that write is done (hazard_stall). Without such
// collisions a GEMM kernel issues one micro-op per cycle.
module vta_compute
  import vta_pkg::*;
#(
  parameter int unsigned ALU_LANES = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  logic [INSN_W-1:0]     cmd_data,
  // dependency queues
  input  logic                  l2c_valid,
  output logic                  l2c_ready,
  output logic                  c2l_valid,
  input  logic                  c2l_ready,
  input  logic                  s2c_valid,
  output logic                  s2c_ready,
  output logic                  c2s_valid,
  input  logic                  c2s_ready,
  // DRAM read port (micro-ops and register-file loads)
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic [MEM_ADDR_W-1:0] mem_req_addr,
  input  logic                  mem_rsp_valid,
  input  logic [MEM_DATA_W-1:0] mem_rsp_data,
  // input and weight buffer read ports (data one cycle after re)
  output logic                          inp_re,
  output logic [LOG_INP_BUFF_DEPTH-1:0] inp_raddr,
  input  logic [INP_ELEM_W-1:0]         inp_rdata,
  output logic                          wgt_re,
  output logic [LOG_WGT_BUFF_DEPTH-1:0] wgt_raddr,
  input  logic [WGT_ELEM_W-1:0]         wgt_rdata,
  // output buffer write port
  output logic                          out_we,
  output logic [LOG_OUT_BUFF_DEPTH-1:0] out_waddr,
  output logic [OUT_ELEM_W-1:0]         out_wdata,
  output logic                          busy,
  output logic                          hazard_stall
);
  localparam int unsigned NLANE = BATCH * BLOCK_OUT;

  typedef enum logic [2:0] {S_IDLE, S_DEP, S_DISPATCH, S_LOAD, S_EXEC, S_PUSH} state_e;
  state_e state;

  logic [INSN_W-1:0] insn_raw;
  mem_insn_t         m_insn;
  gemm_insn_t        g_insn;
  alu_insn_t         a_insn;
  dep_flags_t        dept;
  logic              is_alu;

  assign m_insn = mem_insn_t'(insn_raw);
  assign g_insn = gemm_insn_t'(insn_raw);
  assign a_insn = alu_insn_t'(insn_raw);
  assign dept   = m_insn.dept;
  assign is_alu = (m_insn.opcode == OP_ALU);

  // ---------------- task sequencing and dependency tokens ----------------
  logic deps_ok, push_ok, exec_done, dma_done, dma_start;

  assign deps_ok   = (!dept.pop_prev || l2c_valid) && (!dept.pop_next || s2c_valid);
  assign push_ok   = (!dept.push_prev || c2l_ready) && (!dept.push_next || c2s_ready);
  assign cmd_ready = (state == S_IDLE);
  assign l2c_ready = (state == S_DEP) && deps_ok && dept.pop_prev;
  assign s2c_ready = (state == S_DEP) && deps_ok && dept.pop_next;
  assign c2l_valid = (state == S_PUSH) && push_ok && dept.push_prev;
  assign c2s_valid = (state == S_PUSH) && push_ok && dept.push_next;
  assign busy      = (state != S_IDLE);
  assign dma_start = (state == S_DISPATCH) && (m_insn.opcode == OP_LOAD);

  // ---------------- S0: loop counters, micro-op read ----------------
  logic                          issuing, issue;
  logic [LOOP_ITER_WIDTH-1:0]    i0, i1;
  logic [LOG_UOP_BUFF_DEPTH-1:0] upc;
  logic                          s1_valid, s1_adv, s1_hold;
  logic [LOOP_ITER_WIDTH-1:0]    s1_i0, s1_i1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      insn_raw <= '0;
      issuing  <= 1'b0;
      i0 <= '0; i1 <= '0; upc <= '0;
    end else begin
      case (state)
        S_IDLE:     if (cmd_valid) begin insn_raw <= cmd_data; state <= S_DEP; end
        S_DEP:      if (deps_ok) state <= S_DISPATCH;
        S_DISPATCH: begin
          if (m_insn.opcode == OP_LOAD) begin
            state <= S_LOAD;
          end else if (m_insn.opcode == OP_GEMM || m_insn.opcode == OP_ALU) begin
            i0      <= '0;
            i1      <= '0;
            upc     <= g_insn.uop_bgn;
            issuing <= (g_insn.end0 != 0) && (g_insn.end1 != 0) && (g_insn.uop_bgn < g_insn.uop_end);
            state   <= S_EXEC;
          end else begin
            state <= S_PUSH;   // unknown opcode: only the dependency tokens
          end
        end
        S_LOAD:     if (dma_done) state <= S_PUSH;
        S_EXEC: begin
          if (issue) begin
            if (upc + 1'b1 == g_insn.uop_end) begin
              upc <= g_insn.uop_bgn;
              if (i1 + 1'b1 == g_insn.end1) begin
                i1 <= '0;
                if (i0 + 1'b1 == g_insn.end0) issuing <= 1'b0;
                else                          i0 <= i0 + 1'b1;
              end else begin
                i1 <= i1 + 1'b1;
              end
            end else begin
              upc <= upc + 1'b1;
            end
          end
          if (exec_done) state <= S_PUSH;
        end
        S_PUSH:     if (push_ok) state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  assign issue = (state == S_EXEC) && issuing && !s1_hold;

  // ---------------- micro-op cache ----------------
  logic                          uop_we;
  logic [LOG_UOP_BUFF_DEPTH-1:0] uop_waddr;
  logic [UOP_ELEM_W-1:0]         uop_wdata;
  logic [LOG_UOP_BUFF_DEPTH-1:0] uop_raddr [1];
  logic [UOP_ELEM_W-1:0]         uop_rdata [1];
  uop_t                          uop;

  assign uop_raddr[0] = upc;
  assign uop          = uop_t'(uop_rdata[0]);

  vta_sram #(.WIDTH(UOP_ELEM_W), .DEPTH(1 << LOG_UOP_BUFF_DEPTH), .NRD(1)) u_uop_cache (
    .clk, .we(uop_we), .waddr(uop_waddr), .wdata(uop_wdata),
    .re(issue), .raddr(uop_raddr), .rdata(uop_rdata)
  );

  // ---------------- S1: affine indices, buffer reads, interlock ----------------
  logic [LOG_ACC_BUFF_DEPTH-1:0] dst_idx, src_idx;
  logic [LOG_INP_BUFF_DEPTH-1:0] inp_idx;
  logic [LOG_WGT_BUFF_DEPTH-1:0] wgt_idx;
  logic                          s2_valid, stall_s2, accept;
  logic [LOG_ACC_BUFF_DEPTH-1:0] s2_dst;
  logic                          x_valid;
  logic [LOG_ACC_BUFF_DEPTH-1:0] x_dst;
  logic                          alu_busy, alu_out_valid, gemm_out_valid, unit_out_valid;

  always_comb begin
    dst_idx = LOG_ACC_BUFF_DEPTH'(s1_i0 * g_insn.x0 + s1_i1 * g_insn.x1 + uop.acc_idx);
    inp_idx = LOG_INP_BUFF_DEPTH'(s1_i0 * g_insn.y0 + s1_i1 * g_insn.y1 + uop.inp_idx);
    src_idx = LOG_ACC_BUFF_DEPTH'(s1_i0 * a_insn.y0 + s1_i1 * a_insn.y1 + uop.inp_idx);
    wgt_idx = LOG_WGT_BUFF_DEPTH'(s1_i0 * g_insn.z0 + s1_i1 * g_insn.z1 + uop.wgt_idx);
  end

  function automatic logic collides(logic [LOG_ACC_BUFF_DEPTH-1:0] w,
                                    logic [LOG_ACC_BUFF_DEPTH-1:0] d,
                                    logic [LOG_ACC_BUFF_DEPTH-1:0] s, logic alu);
    return (w == d) || (alu && (w == s));
  endfunction

  assign hazard_stall = s1_valid &&
                        ((s2_valid && collides(s2_dst, dst_idx, src_idx, is_alu)) ||
                         (x_valid  && collides(x_dst,  dst_idx, src_idx, is_alu)));
  assign stall_s2 = s2_valid && is_alu && alu_busy;
  assign s1_adv   = s1_valid && !hazard_stall && !stall_s2;
  assign s1_hold  = s1_valid && !s1_adv;
  assign accept   = s2_valid && !stall_s2;

  assign inp_re    = s1_adv && !is_alu;
  assign inp_raddr = inp_idx;
  assign wgt_re    = s1_adv && !is_alu;
  assign wgt_raddr = wgt_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_i0    <= '0;
      s1_i1    <= '0;
      s2_valid <= 1'b0;
      s2_dst   <= '0;
      x_valid  <= 1'b0;
      x_dst    <= '0;
    end else begin
      if (!s1_hold) begin
        s1_valid <= issue;
        s1_i0    <= i0;
        s1_i1    <= i1;
      end
      if (!stall_s2) begin
        s2_valid <= s1_adv;
        if (s1_adv) s2_dst <= dst_idx;
      end
      if (accept) begin
        x_valid <= 1'b1;
        x_dst   <= s2_dst;
      end else if (unit_out_valid) begin
        x_valid <= 1'b0;
      end
    end
  end

  assign exec_done = (state == S_EXEC) && !issuing && !s1_valid && !s2_valid && !x_valid;

  // ---------------- register file ----------------
  logic                          acc_we;
  logic [LOG_ACC_BUFF_DEPTH-1:0] acc_waddr;
  logic [ACC_ELEM_W-1:0]         acc_wdata;
  logic [LOG_ACC_BUFF_DEPTH-1:0] acc_raddr [2];
  logic [ACC_ELEM_W-1:0]         acc_rdata [2];
  logic [ACC_ELEM_W-1:0]         gemm_res, alu_res, unit_res;

  assign acc_raddr[0] = dst_idx;
  assign acc_raddr[1] = src_idx;

  vta_sram #(.WIDTH(ACC_ELEM_W), .DEPTH(1 << LOG_ACC_BUFF_DEPTH), .NRD(2)) u_reg_file (
    .clk, .we(acc_we), .waddr(acc_waddr), .wdata(acc_wdata),
    .re({s1_adv, s1_adv}), .raddr(acc_raddr), .rdata(acc_rdata)
  );

  // ---------------- S2: functional units ----------------
  vta_gemm_core u_gemm (
    .clk, .rst_n,
    .in_valid (accept && !is_alu),
    .rst_acc  (g_insn.reset),
    .inp      (inp_rdata),
    .wgt      (wgt_rdata),
    .acc_in   (acc_rdata[0]),
    .out_valid(gemm_out_valid),
    .acc_out  (gemm_res)
  );

  vta_tensor_alu #(.N(NLANE), .LANES(ALU_LANES)) u_alu (
    .clk, .rst_n,
    .in_valid (accept && is_alu),
    .op       (a_insn.alu_op),
    .use_imm  (a_insn.use_imm),
    .imm      (a_insn.imm),
    .rst_acc  (a_insn.reset),
    .a        (acc_rdata[0]),
    .b_vec    (acc_rdata[1]),
    .busy     (alu_busy),
    .out_valid(alu_out_valid),
    .res      (alu_res)
  );

  assign unit_out_valid = gemm_out_valid || alu_out_valid;
  assign unit_res       = alu_out_valid ? alu_res : gemm_res;

  // ---------------- DMA for micro-op and register-file loads ----------------
  logic                          dma_busy, dma_we, dma_pad;
  logic [LOG_UOP_BUFF_DEPTH-1:0] dma_waddr;
  logic [ACC_ELEM_W-1:0]         dma_wdata;

  vta_dma_rd #(.ELEM_W(ACC_ELEM_W), .SRAM_AW(LOG_UOP_BUFF_DEPTH)) u_dma (
    .clk, .rst_n,
    .start      (dma_start),
    .insn       (m_insn),
    .elem_shift (elem_shift_of(m_insn.sram_mem)),
    .busy       (dma_busy),
    .done       (dma_done),
    .pad_write  (dma_pad),
    .req_valid  (mem_req_valid),
    .req_ready  (mem_req_ready),
    .req_addr   (mem_req_addr),
    .rsp_valid  (mem_rsp_valid),
    .rsp_data   (mem_rsp_data),
    .wr_en      (dma_we),
    .wr_addr    (dma_waddr),
    .wr_data    (dma_wdata)
  );

  assign uop_we    = dma_we && (m_insn.sram_mem == MEM_UOP);
  assign uop_waddr = dma_waddr;
  assign uop_wdata = dma_wdata[UOP_ELEM_W-1:0];

  // write-back: register file (results or DMA) and narrowed output buffer
  always_comb begin
    if (state == S_LOAD) begin
      acc_we    = dma_we && (m_insn.sram_mem == MEM_ACC);
      acc_waddr = LOG_ACC_BUFF_DEPTH'(dma_waddr);
      acc_wdata = dma_wdata;
    end else begin
      acc_we    = unit_out_valid;
      acc_waddr = x_dst;
      acc_wdata = unit_res;
    end
    out_we    = unit_out_valid;
    out_waddr = x_dst;
    for (int l = 0; l < int'(NLANE); l++)
      out_wdata[l*OUT_WIDTH +: OUT_WIDTH] = unit_res[l*ACC_WIDTH +: OUT_WIDTH];
  end

  // the GEMM core and the ALU never finish on the same cycle
  assert property (@(posedge clk) disable iff (!rst_n) !(gemm_out_valid && alu_out_valid));

endmodule
