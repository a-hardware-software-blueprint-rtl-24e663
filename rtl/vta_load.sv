// vta_load: the load module of the load-compute-store task pipeline.
//
// Pops LOAD instructions from the load command queue and moves input and
// weight tiles from DRAM into the input and weight buffers through a 2D
// strided DMA (vta_dma_rd). Before a task it waits for, and consumes, a
// token from the compute->load dependency queue if the instruction's
// pop_next flag is set (compute has finished reading the buffer region:
// write-after-read); after the task it pushes a token into the load->compute
// queue if push_next is set (the data is ready: read-after-write). Load has
// no upstream module, so pop_prev/push_prev are ignored. The role and the
// queues follow the hardware organisation; the flag-to-queue mapping and the
// sequencing are this design's own choices.
//
// Timing: one task at a time: pop insn (1 cycle), wait for a token, DMA,
// push token, back to idle. busy is low only while idle with an empty
// command queue input.
module vta_load
  import vta_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // command queue
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  logic [INSN_W-1:0]     cmd_data,
  // dependency queues
  input  logic                  c2l_valid,   // token from compute
  output logic                  c2l_ready,
  output logic                  l2c_valid,   // token to compute
  input  logic                  l2c_ready,
  // DRAM read port
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic [MEM_ADDR_W-1:0] mem_req_addr,
  input  logic                  mem_rsp_valid,
  input  logic [MEM_DATA_W-1:0] mem_rsp_data,
  // input and weight buffer write ports
  output logic                          inp_we,
  output logic [LOG_INP_BUFF_DEPTH-1:0] inp_waddr,
  output logic [INP_ELEM_W-1:0]         inp_wdata,
  output logic                          wgt_we,
  output logic [LOG_WGT_BUFF_DEPTH-1:0] wgt_waddr,
  output logic [WGT_ELEM_W-1:0]         wgt_wdata,
  output logic                          busy
);
  localparam int unsigned AW = (LOG_INP_BUFF_DEPTH > LOG_WGT_BUFF_DEPTH) ?
                               LOG_INP_BUFF_DEPTH : LOG_WGT_BUFF_DEPTH;

  typedef enum logic [2:0] {S_IDLE, S_DEP, S_START, S_XFER, S_PUSH} state_e;
  state_e    state;
  mem_insn_t insn;

  logic              dma_start, dma_busy, dma_done, dma_we, dma_pad;
  logic [AW-1:0]     dma_waddr;
  logic [WGT_ELEM_W-1:0] dma_wdata;

  assign cmd_ready = (state == S_IDLE);
  assign c2l_ready = (state == S_DEP) && insn.dept.pop_next;
  assign l2c_valid = (state == S_PUSH) && insn.dept.push_next;
  assign dma_start = (state == S_START);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      insn  <= '0;
    end else begin
      case (state)
        S_IDLE:  if (cmd_valid) begin
          insn  <= mem_insn_t'(cmd_data);
          state <= S_DEP;
        end
        S_DEP:   if (!insn.dept.pop_next || c2l_valid) state <= S_START;
        S_START: state <= S_XFER;
        S_XFER:  if (dma_done) state <= S_PUSH;
        S_PUSH:  if (!insn.dept.push_next || l2c_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  vta_dma_rd #(.ELEM_W(WGT_ELEM_W), .SRAM_AW(AW)) u_dma (
    .clk, .rst_n,
    .start      (dma_start),
    .insn       (insn),
    .elem_shift (elem_shift_of(insn.sram_mem)),
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

  assign inp_we    = dma_we && (insn.sram_mem == MEM_INP);
  assign inp_waddr = LOG_INP_BUFF_DEPTH'(dma_waddr);
  assign inp_wdata = dma_wdata[INP_ELEM_W-1:0];
  assign wgt_we    = dma_we && (insn.sram_mem == MEM_WGT);
  assign wgt_waddr = LOG_WGT_BUFF_DEPTH'(dma_waddr);
  assign wgt_wdata = dma_wdata;

endmodule
