// vta_store: the store module of the load-compute-store task pipeline.
//
// Pops STORE instructions from the store command queue and writes a
// y_size x x_size block of output-buffer entries, read row by row from
// sram_base, to DRAM entry index dram_base + y*x_stride + x. Before a task
// it waits for a token from the compute->store dependency queue if pop_prev
// is set (the results are ready: read-after-write); afterwards it pushes a
// token to store->compute if push_prev is set (the output buffer region may
// be overwritten: write-after-read). Store has no downstream module, so
// pop_next/push_next are ignored. The role and queues follow the hardware
// organisation; ignoring the padding fields on a store, the flag mapping and
// the one-beat-at-a-time DRAM writes are this design's own choices.
//
// DRAM write port: wr_valid/wr_ready/wr_addr/wr_data, one 32-bit beat per
// handshake, entry beats written low word first.
// Timing: per entry one output-buffer read cycle plus OUT_ELEM_W/32 write
// handshakes.
module vta_store
  import vta_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  logic [INSN_W-1:0]     cmd_data,
  input  logic                  c2s_valid,   // token from compute
  output logic                  c2s_ready,
  output logic                  s2c_valid,   // token to compute
  input  logic                  s2c_ready,
  // DRAM write port
  output logic                  mem_wr_valid,
  input  logic                  mem_wr_ready,
  output logic [MEM_ADDR_W-1:0] mem_wr_addr,
  output logic [MEM_DATA_W-1:0] mem_wr_data,
  // output buffer read port (data one cycle after out_re)
  output logic                          out_re,
  output logic [LOG_OUT_BUFF_DEPTH-1:0] out_raddr,
  input  logic [OUT_ELEM_W-1:0]         out_rdata,
  output logic                          busy
);
  localparam int unsigned NBEATS = OUT_ELEM_W / MEM_DATA_W;
  localparam int unsigned SHIFT  = $clog2(OUT_ELEM_W / 8);

  typedef enum logic [2:0] {S_IDLE, S_DEP, S_ELEM, S_RD, S_WR, S_PUSH} state_e;
  state_e    state;
  mem_insn_t insn;

  logic [15:0]                   y, x;
  logic [LOG_OUT_BUFF_DEPTH-1:0] sram_ptr;
  logic [31:0]                   row_elem;
  logic [$clog2(NBEATS+1)-1:0]   beat;
  logic [OUT_ELEM_W-1:0]         data_q;

  assign cmd_ready = (state == S_IDLE);
  assign c2s_ready = (state == S_DEP) && insn.dept.pop_prev;
  assign s2c_valid = (state == S_PUSH) && insn.dept.push_prev;
  assign busy      = (state != S_IDLE);

  assign out_re    = (state == S_ELEM) && (y < insn.y_size) && (insn.x_size != 0);
  assign out_raddr = sram_ptr;

  assign mem_wr_valid = (state == S_WR);
  assign mem_wr_addr  = ((row_elem + 32'(x)) << SHIFT) + (32'(beat) << $clog2(MEM_BEAT_BYTES));
  assign mem_wr_data  = data_q[beat*MEM_DATA_W +: MEM_DATA_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      insn  <= '0;
      y <= '0; x <= '0; beat <= '0; sram_ptr <= '0; row_elem <= '0;
    end else begin
      case (state)
        S_IDLE: if (cmd_valid) begin
          insn  <= mem_insn_t'(cmd_data);
          state <= S_DEP;
        end
        S_DEP: if (!insn.dept.pop_prev || c2s_valid) begin
          y        <= '0;
          x        <= '0;
          sram_ptr <= LOG_OUT_BUFF_DEPTH'(insn.sram_base);
          row_elem <= insn.dram_base;
          state    <= S_ELEM;
        end
        S_ELEM: begin
          if (y >= insn.y_size || insn.x_size == 0) state <= S_PUSH;
          else                                    state <= S_RD;
        end
        S_RD: begin
          data_q <= out_rdata;
          beat   <= '0;
          state  <= S_WR;
        end
        S_WR: if (mem_wr_ready) begin
          if (beat == ($clog2(NBEATS+1))'(NBEATS - 1)) begin
            sram_ptr <= sram_ptr + 1'b1;
            if (x + 1'b1 == insn.x_size) begin
              x        <= '0;
              y        <= y + 1'b1;
              row_elem <= row_elem + 32'(insn.x_stride);
            end else begin
              x <= x + 1'b1;
            end
            state <= S_ELEM;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_PUSH: if (!insn.dept.push_prev || s2c_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_wr_valid && !mem_wr_ready |=> mem_wr_valid && $stable(mem_wr_addr) && $stable(mem_wr_data));

endmodule
