// vta_dma_rd: 2D strided DRAM-to-SRAM transfer with zero padding.
//
// Executes the memory part of a LOAD instruction. The SRAM receives a
// (y_pad_0 + y_size + y_pad_1) x (x_pad_0 + x_size + x_pad_1) block of
// tensor entries, stored row by row from sram_base. The inner y_size x
// x_size entries come from DRAM, entry (y, x) from entry index
// dram_base + y*x_stride + x; the padding border is written with zeros.
// Strided tile loads and the four padding amounts follow the instruction
// format; zero as the padding value, entry-indexed DRAM addresses and the
// beat-by-beat port are this design's own choices.
//
// DRAM read port: req_valid/req_ready/req_addr (byte address of one
// MEM_DATA_W beat), then rsp_valid/rsp_data. One request is outstanding at
// a time. An entry of 2**elem_shift bytes takes that many bytes / 4 beats,
// assembled little-endian (beat 0 is bits 31:0).
// SRAM write port: wr_en/wr_addr/wr_data, one whole entry per cycle.
// Timing: start (while !busy) latches insn; busy stays high until the last
// entry is written; done pulses on the cycle after. A padding entry takes
// one cycle, a DRAM entry (beats x (2 + DRAM latency)) cycles.
module vta_dma_rd
  import vta_pkg::*;
#(
  parameter int unsigned ELEM_W = WGT_ELEM_W,
  parameter int unsigned SRAM_AW = 10
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  mem_insn_t             insn,
  input  logic [3:0]            elem_shift,
  output logic                  busy,
  output logic                  done,
  output logic                  pad_write,
  // DRAM read port
  output logic                  req_valid,
  input  logic                  req_ready,
  output logic [MEM_ADDR_W-1:0] req_addr,
  input  logic                  rsp_valid,
  input  logic [MEM_DATA_W-1:0] rsp_data,
  // SRAM write port
  output logic                  wr_en,
  output logic [SRAM_AW-1:0]    wr_addr,
  output logic [ELEM_W-1:0]     wr_data
);
  localparam int unsigned NBEATS = ELEM_W / MEM_DATA_W;
  localparam int unsigned BW     = $clog2(NBEATS + 1);

  typedef enum logic [2:0] {S_IDLE, S_ELEM, S_REQ, S_WAIT, S_WRITE} state_e;
  state_e state;

  mem_insn_t               q;
  logic [15:0]             y, x, x_tot, y_tot;
  logic [SRAM_AW-1:0]      sram_ptr;
  logic [31:0]             row_elem;   // DRAM entry index of data column 0 of the current row
  logic [BW-1:0]           beat, nbeats;
  logic [ELEM_W-1:0]       buffer;
  logic                    is_pad;
  logic [31:0]             elem_idx;

  assign x_tot  = 16'(q.x_pad_0) + q.x_size + 16'(q.x_pad_1);
  assign y_tot  = 16'(q.y_pad_0) + q.y_size + 16'(q.y_pad_1);
  assign is_pad = (y < 16'(q.y_pad_0)) || (y >= 16'(q.y_pad_0) + q.y_size) ||
                  (x < 16'(q.x_pad_0)) || (x >= 16'(q.x_pad_0) + q.x_size);
  assign elem_idx = row_elem + 32'(x) - 32'(q.x_pad_0);
  assign req_addr = (elem_idx << elem_shift) + (32'(beat) << $clog2(MEM_BEAT_BYTES));
  assign req_valid = (state == S_REQ);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      wr_en     <= 1'b0;
      pad_write <= 1'b0;
      y <= '0; x <= '0; beat <= '0; nbeats <= '0;
      sram_ptr <= '0; row_elem <= '0;
    end else begin
      done      <= 1'b0;
      wr_en     <= 1'b0;
      pad_write <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          q        <= insn;
          y        <= '0;
          x        <= '0;
          sram_ptr <= SRAM_AW'(insn.sram_base);
          row_elem <= insn.dram_base;
          nbeats   <= BW'((1 << elem_shift) / MEM_BEAT_BYTES);
          state    <= S_ELEM;
        end
        S_ELEM: begin
          if (y >= y_tot || x_tot == 0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (is_pad) begin
            wr_en     <= 1'b1;
            pad_write <= 1'b1;
            wr_addr   <= sram_ptr;
            wr_data   <= '0;
            state     <= S_WRITE;
          end else begin
            beat   <= '0;
            buffer <= '0;
            state  <= S_REQ;
          end
        end
        S_REQ: if (req_ready) state <= S_WAIT;
        S_WAIT: if (rsp_valid) begin
          buffer[beat*MEM_DATA_W +: MEM_DATA_W] <= rsp_data;
          if (beat + 1'b1 == nbeats) begin
            wr_en   <= 1'b1;
            wr_addr <= sram_ptr;
            wr_data <= buffer;
            wr_data[beat*MEM_DATA_W +: MEM_DATA_W] <= rsp_data;
            state   <= S_WRITE;
          end else begin
            beat  <= beat + 1'b1;
            state <= S_REQ;
          end
        end
        S_WRITE: begin
          // advance to the next entry of the block
          sram_ptr <= sram_ptr + 1'b1;
          if (x + 1'b1 == x_tot) begin
            x <= '0;
            y <= y + 1'b1;
            if (y >= 16'(q.y_pad_0)) row_elem <= row_elem + 32'(q.x_stride);
          end else begin
            x <= x + 1'b1;
          end
          state <= S_ELEM;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The address must stay put while a request waits for the memory.
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid && !req_ready |=> req_valid && $stable(req_addr));

endmodule
