// vta_top: the tensor accelerator.
//
// Four modules form a task pipeline. fetch reads the task-instruction
// stream from DRAM and dispatches each instruction into one of three
// command queues. load fills the input and weight buffers from DRAM;
// compute runs micro-coded GEMM and ALU kernels over those buffers and its
// own register file and writes results to the output buffer; store writes
// the output buffer back to DRAM. The shared buffers are one-way channels
// between neighbouring modules, and four dependency queues (load->compute,
// compute->load, compute->store, store->compute) carry tokens that order
// accesses to them, so load, compute and store run concurrently without
// read-after-write or write-after-read hazards. This organisation follows
// the design description; queue depths, the start/done control and the
// four separate DRAM ports are this design's own choices.
//
// Interface: pulse start with insn_base (byte address) and insn_count; done
// rises once every instruction has been fetched and executed and all
// command queues are empty. The DRAM is external: fetch, load and compute
// each have a read port (request/ready, then one response beat per
// request), store has a write port. The clock comes from outside.
module vta_top
  import vta_pkg::*;
#(
  parameter int unsigned CMD_Q_DEPTH = 32,
  parameter int unsigned DEP_Q_DEPTH = 32,
  parameter int unsigned ALU_LANES   = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [MEM_ADDR_W-1:0] insn_base,
  input  logic [31:0]           insn_count,
  output logic                  done,
  // DRAM read ports: 0 = fetch, 1 = load, 2 = compute
  output logic [2:0]            rd_req_valid,
  input  logic [2:0]            rd_req_ready,
  output logic [MEM_ADDR_W-1:0] rd_req_addr [3],
  input  logic [2:0]            rd_rsp_valid,
  input  logic [MEM_DATA_W-1:0] rd_rsp_data [3],
  // DRAM write port: store
  output logic                  wr_req_valid,
  input  logic                  wr_req_ready,
  output logic [MEM_ADDR_W-1:0] wr_req_addr,
  output logic [MEM_DATA_W-1:0] wr_req_data
);
  localparam int unsigned CW = $clog2(CMD_Q_DEPTH + 1);
  localparam int unsigned DW = $clog2(DEP_Q_DEPTH + 1);

  // ---------------- fetch and command queues ----------------
  logic              fetch_busy;
  logic [INSN_W-1:0] fetch_insn;
  logic              ldq_in_v, ldq_in_r, cpq_in_v, cpq_in_r, stq_in_v, stq_in_r;
  logic              ldq_out_v, ldq_out_r, cpq_out_v, cpq_out_r, stq_out_v, stq_out_r;
  logic [INSN_W-1:0] ldq_data, cpq_data, stq_data;
  logic [CW-1:0]     ldq_cnt, cpq_cnt, stq_cnt;

  vta_fetch u_fetch (
    .clk, .rst_n, .start, .insn_base, .insn_count,
    .busy         (fetch_busy),
    .mem_req_valid(rd_req_valid[0]),
    .mem_req_ready(rd_req_ready[0]),
    .mem_req_addr (rd_req_addr[0]),
    .mem_rsp_valid(rd_rsp_valid[0]),
    .mem_rsp_data (rd_rsp_data[0]),
    .ld_valid (ldq_in_v), .ld_ready (ldq_in_r),
    .cmp_valid(cpq_in_v), .cmp_ready(cpq_in_r),
    .st_valid (stq_in_v), .st_ready (stq_in_r),
    .insn_out (fetch_insn)
  );

  vta_fifo #(.WIDTH(INSN_W), .DEPTH(CMD_Q_DEPTH)) u_load_cmd_q (
    .clk, .rst_n, .in_valid(ldq_in_v), .in_ready(ldq_in_r), .in_data(fetch_insn),
    .out_valid(ldq_out_v), .out_ready(ldq_out_r), .out_data(ldq_data), .count(ldq_cnt));
  vta_fifo #(.WIDTH(INSN_W), .DEPTH(CMD_Q_DEPTH)) u_compute_cmd_q (
    .clk, .rst_n, .in_valid(cpq_in_v), .in_ready(cpq_in_r), .in_data(fetch_insn),
    .out_valid(cpq_out_v), .out_ready(cpq_out_r), .out_data(cpq_data), .count(cpq_cnt));
  vta_fifo #(.WIDTH(INSN_W), .DEPTH(CMD_Q_DEPTH)) u_store_cmd_q (
    .clk, .rst_n, .in_valid(stq_in_v), .in_ready(stq_in_r), .in_data(fetch_insn),
    .out_valid(stq_out_v), .out_ready(stq_out_r), .out_data(stq_data), .count(stq_cnt));

  // ---------------- dependency queues ----------------
  logic          l2c_in_v, l2c_in_r, l2c_out_v, l2c_out_r;
  logic          c2l_in_v, c2l_in_r, c2l_out_v, c2l_out_r;
  logic          c2s_in_v, c2s_in_r, c2s_out_v, c2s_out_r;
  logic          s2c_in_v, s2c_in_r, s2c_out_v, s2c_out_r;
  logic [0:0]    l2c_tok, c2l_tok, c2s_tok, s2c_tok;
  logic [DW-1:0] l2c_cnt, c2l_cnt, c2s_cnt, s2c_cnt;

  vta_fifo #(.WIDTH(1), .DEPTH(DEP_Q_DEPTH)) u_ld2cmp_q (
    .clk, .rst_n, .in_valid(l2c_in_v), .in_ready(l2c_in_r), .in_data(1'b1),
    .out_valid(l2c_out_v), .out_ready(l2c_out_r), .out_data(l2c_tok), .count(l2c_cnt));
  vta_fifo #(.WIDTH(1), .DEPTH(DEP_Q_DEPTH)) u_cmp2ld_q (
    .clk, .rst_n, .in_valid(c2l_in_v), .in_ready(c2l_in_r), .in_data(1'b1),
    .out_valid(c2l_out_v), .out_ready(c2l_out_r), .out_data(c2l_tok), .count(c2l_cnt));
  vta_fifo #(.WIDTH(1), .DEPTH(DEP_Q_DEPTH)) u_cmp2st_q (
    .clk, .rst_n, .in_valid(c2s_in_v), .in_ready(c2s_in_r), .in_data(1'b1),
    .out_valid(c2s_out_v), .out_ready(c2s_out_r), .out_data(c2s_tok), .count(c2s_cnt));
  vta_fifo #(.WIDTH(1), .DEPTH(DEP_Q_DEPTH)) u_st2cmp_q (
    .clk, .rst_n, .in_valid(s2c_in_v), .in_ready(s2c_in_r), .in_data(1'b1),
    .out_valid(s2c_out_v), .out_ready(s2c_out_r), .out_data(s2c_tok), .count(s2c_cnt));

  // ---------------- shared buffers ----------------
  logic                          inp_we, inp_re, wgt_we, wgt_re, out_we, out_re;
  logic [LOG_INP_BUFF_DEPTH-1:0] inp_waddr;
  logic [LOG_INP_BUFF_DEPTH-1:0] inp_raddr [1];
  logic [INP_ELEM_W-1:0]         inp_wdata;
  logic [INP_ELEM_W-1:0]         inp_rdata [1];
  logic [LOG_WGT_BUFF_DEPTH-1:0] wgt_waddr;
  logic [LOG_WGT_BUFF_DEPTH-1:0] wgt_raddr [1];
  logic [WGT_ELEM_W-1:0]         wgt_wdata;
  logic [WGT_ELEM_W-1:0]         wgt_rdata [1];
  logic [LOG_OUT_BUFF_DEPTH-1:0] out_waddr;
  logic [LOG_OUT_BUFF_DEPTH-1:0] out_raddr [1];
  logic [OUT_ELEM_W-1:0]         out_wdata;
  logic [OUT_ELEM_W-1:0]         out_rdata [1];

  vta_sram #(.WIDTH(INP_ELEM_W), .DEPTH(1 << LOG_INP_BUFF_DEPTH)) u_inp_buf (
    .clk, .we(inp_we), .waddr(inp_waddr), .wdata(inp_wdata),
    .re(inp_re), .raddr(inp_raddr), .rdata(inp_rdata));
  vta_sram #(.WIDTH(WGT_ELEM_W), .DEPTH(1 << LOG_WGT_BUFF_DEPTH)) u_wgt_buf (
    .clk, .we(wgt_we), .waddr(wgt_waddr), .wdata(wgt_wdata),
    .re(wgt_re), .raddr(wgt_raddr), .rdata(wgt_rdata));
  vta_sram #(.WIDTH(OUT_ELEM_W), .DEPTH(1 << LOG_OUT_BUFF_DEPTH)) u_out_buf (
    .clk, .we(out_we), .waddr(out_waddr), .wdata(out_wdata),
    .re(out_re), .raddr(out_raddr), .rdata(out_rdata));

  // ---------------- load, compute, store ----------------
  logic load_busy, compute_busy, store_busy, hazard_stall;

  vta_load u_load (
    .clk, .rst_n,
    .cmd_valid(ldq_out_v), .cmd_ready(ldq_out_r), .cmd_data(ldq_data),
    .c2l_valid(c2l_out_v), .c2l_ready(c2l_out_r),
    .l2c_valid(l2c_in_v),  .l2c_ready(l2c_in_r),
    .mem_req_valid(rd_req_valid[1]), .mem_req_ready(rd_req_ready[1]),
    .mem_req_addr (rd_req_addr[1]),
    .mem_rsp_valid(rd_rsp_valid[1]), .mem_rsp_data(rd_rsp_data[1]),
    .inp_we, .inp_waddr, .inp_wdata,
    .wgt_we, .wgt_waddr, .wgt_wdata,
    .busy(load_busy)
  );

  vta_compute #(.ALU_LANES(ALU_LANES)) u_compute (
    .clk, .rst_n,
    .cmd_valid(cpq_out_v), .cmd_ready(cpq_out_r), .cmd_data(cpq_data),
    .l2c_valid(l2c_out_v), .l2c_ready(l2c_out_r),
    .c2l_valid(c2l_in_v),  .c2l_ready(c2l_in_r),
    .s2c_valid(s2c_out_v), .s2c_ready(s2c_out_r),
    .c2s_valid(c2s_in_v),  .c2s_ready(c2s_in_r),
    .mem_req_valid(rd_req_valid[2]), .mem_req_ready(rd_req_ready[2]),
    .mem_req_addr (rd_req_addr[2]),
    .mem_rsp_valid(rd_rsp_valid[2]), .mem_rsp_data(rd_rsp_data[2]),
    .inp_re, .inp_raddr(inp_raddr[0]), .inp_rdata(inp_rdata[0]),
    .wgt_re, .wgt_raddr(wgt_raddr[0]), .wgt_rdata(wgt_rdata[0]),
    .out_we, .out_waddr, .out_wdata,
    .busy(compute_busy),
    .hazard_stall
  );

  vta_store u_store (
    .clk, .rst_n,
    .cmd_valid(stq_out_v), .cmd_ready(stq_out_r), .cmd_data(stq_data),
    .c2s_valid(c2s_out_v), .c2s_ready(c2s_out_r),
    .s2c_valid(s2c_in_v),  .s2c_ready(s2c_in_r),
    .mem_wr_valid(wr_req_valid), .mem_wr_ready(wr_req_ready),
    .mem_wr_addr (wr_req_addr),  .mem_wr_data (wr_req_data),
    .out_re, .out_raddr(out_raddr[0]), .out_rdata(out_rdata[0]),
    .busy(store_busy)
  );

  // ---------------- completion ----------------
  // done is registered; it drops on start and rises when the whole pipeline
  // has drained after the last instruction was dispatched.
  logic running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      done    <= 1'b0;
    end else if (start) begin
      running <= 1'b1;
      done    <= 1'b0;
    end else if (running && !fetch_busy && !load_busy && !compute_busy && !store_busy &&
                 ldq_cnt == 0 && cpq_cnt == 0 && stq_cnt == 0) begin
      running <= 1'b0;
      done    <= 1'b1;
    end
  end

endmodule
