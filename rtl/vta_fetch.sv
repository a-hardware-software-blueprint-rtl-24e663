// vta_fetch: instruction fetch and dispatch.
//
// After start, reads insn_count 128-bit task instructions from DRAM,
// starting at byte address insn_base, and pushes each into the command queue
// of the module that executes it: LOAD into the input or weight buffer goes
// to the load module; LOAD into the micro-op cache or the register file,
// GEMM and ALU go to the compute module (which owns those memories); STORE
// goes to the store module. Dispatch by instruction type follows the
// design description; the routing of micro-op and accumulator loads to
// compute, the start/count control and in-order blocking dispatch are this
// design's own choices. A full command queue stalls fetch.
//
// Timing: one instruction = four 32-bit DRAM reads, then one push cycle.
// busy is high from start until the last instruction has been pushed.
module vta_fetch
  import vta_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [MEM_ADDR_W-1:0] insn_base,
  input  logic [31:0]           insn_count,
  output logic                  busy,
  // DRAM read port
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic [MEM_ADDR_W-1:0] mem_req_addr,
  input  logic                  mem_rsp_valid,
  input  logic [MEM_DATA_W-1:0] mem_rsp_data,
  // command queues
  output logic                  ld_valid,
  input  logic                  ld_ready,
  output logic                  cmp_valid,
  input  logic                  cmp_ready,
  output logic                  st_valid,
  input  logic                  st_ready,
  output logic [INSN_W-1:0]     insn_out
);
  localparam int unsigned NBEATS = INSN_W / MEM_DATA_W;

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_PUSH} state_e;
  typedef enum logic [1:0] {Q_LD, Q_CMP, Q_ST} queue_e;
  state_e state;

  logic [31:0]           remaining;
  logic [MEM_ADDR_W-1:0] pc;
  logic [1:0]            beat;
  logic [INSN_W-1:0]     insn;
  mem_insn_t             minsn;
  queue_e                dest;
  logic                  dest_ready;

  assign minsn = mem_insn_t'(insn);
  always_comb begin
    if (minsn.opcode == OP_STORE)
      dest = Q_ST;
    else if (minsn.opcode == OP_LOAD && (minsn.sram_mem == MEM_INP || minsn.sram_mem == MEM_WGT))
      dest = Q_LD;
    else
      dest = Q_CMP;
  end

  assign busy          = (state != S_IDLE);
  assign mem_req_valid = (state == S_REQ);
  assign mem_req_addr  = pc + (MEM_ADDR_W'(beat) << $clog2(MEM_BEAT_BYTES));
  assign insn_out      = insn;
  assign ld_valid      = (state == S_PUSH) && (dest == Q_LD);
  assign cmp_valid     = (state == S_PUSH) && (dest == Q_CMP);
  assign st_valid      = (state == S_PUSH) && (dest == Q_ST);
  assign dest_ready    = (dest == Q_LD) ? ld_ready : (dest == Q_ST) ? st_ready : cmp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      remaining <= '0;
      pc        <= '0;
      beat      <= '0;
      insn      <= '0;
    end else begin
      case (state)
        S_IDLE: if (start && insn_count != 0) begin
          remaining <= insn_count;
          pc        <= insn_base;
          beat      <= '0;
          state     <= S_REQ;
        end
        S_REQ:  if (mem_req_ready) state <= S_WAIT;
        S_WAIT: if (mem_rsp_valid) begin
          insn[beat*MEM_DATA_W +: MEM_DATA_W] <= mem_rsp_data;
          beat  <= beat + 1'b1;
          state <= (beat == 2'(NBEATS - 1)) ? S_PUSH : S_REQ;
        end
        S_PUSH: if (dest_ready) begin
          remaining <= remaining - 1'b1;
          pc        <= pc + MEM_ADDR_W'(INSN_W / 8);
          beat      <= '0;
          state     <= (remaining == 1) ? S_IDLE : S_REQ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));

endmodule
