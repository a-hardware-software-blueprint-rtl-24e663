// vta_tensor_alu: element-wise tensor ALU of the compute module.
//
// Applies one operation to every one of the BATCH*BLOCK_OUT lanes of an
// accumulator tensor: res = OP(a, b) with b either the second tensor or a
// sign-extended immediate. The operations are MIN, MAX, ADD and SHR, from
// which activation (ReLU = MAX with 0), requantisation (SHR), bias addition
// and max pooling are composed. The number of arithmetic units, LANES, is a
// design knob (the exploration compares 32 against 16); with fewer units
// than tensor elements one tensor takes N/LANES cycles. The operation set,
// the shift semantics (a non-negative b shifts right arithmetically, a
// negative b shifts left by -b) and the timing are this design's choices.
//
// Interface: in_valid (only while !busy) with a, b_vec, op, use_imm, imm and
// rst_acc (result forced to zero). out_valid pulses with res.
// Timing: out_valid comes N/LANES cycles after in_valid; busy is high in the
// cycles between, during which no new tensor is accepted.
module vta_tensor_alu
  import vta_pkg::*;
#(
  parameter int unsigned N     = BATCH * BLOCK_OUT,
  parameter int unsigned LANES = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  alu_op_e                    op,
  input  logic                       use_imm,
  input  logic [ALUOP_IMM_WIDTH-1:0] imm,
  input  logic                       rst_acc,
  input  logic [N*ACC_WIDTH-1:0]     a,
  input  logic [N*ACC_WIDTH-1:0]     b_vec,
  output logic                       busy,
  output logic                       out_valid,
  output logic [N*ACC_WIDTH-1:0]     res
);
  localparam int unsigned CHUNKS = (N + LANES - 1) / LANES;
  localparam int unsigned CW     = (CHUNKS > 1) ? $clog2(CHUNKS) : 1;

  typedef logic signed [ACC_WIDTH-1:0] acc_t;

  function automatic acc_t alu1(alu_op_e f, acc_t x, acc_t y);
    acc_t ny;
    ny = -y;
    case (f)
      ALU_MIN: return (x < y) ? x : y;
      ALU_MAX: return (x > y) ? x : y;
      ALU_ADD: return x + y;
      default: return (y >= 0) ? (x >>> y[4:0]) : (x <<< ny[4:0]);
    endcase
  endfunction

  // Operands held for the chunks after the first.
  logic [N*ACC_WIDTH-1:0] a_q, b_q;
  alu_op_e                op_q;
  logic                   zero_q;
  logic [CW-1:0]          chunk;
  logic [N*ACC_WIDTH-1:0] a_sel, b_sel, b_in;
  alu_op_e                op_sel;
  logic                   zero_sel;
  logic                   active;
  logic [CW-1:0]          cur;

  always_comb begin
    for (int i = 0; i < N; i++)
      b_in[i*ACC_WIDTH +: ACC_WIDTH] = use_imm ? ACC_WIDTH'($signed(imm))
                                               : b_vec[i*ACC_WIDTH +: ACC_WIDTH];
  end

  assign active   = in_valid && !busy;
  assign a_sel    = busy ? a_q : a;
  assign b_sel    = busy ? b_q : b_in;
  assign op_sel   = busy ? op_q : op;
  assign zero_sel = busy ? zero_q : rst_acc;
  assign cur      = busy ? chunk : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      chunk     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (active || busy) begin
        if (cur == CW'(CHUNKS - 1)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
          chunk     <= '0;
        end else begin
          busy  <= 1'b1;
          chunk <= cur + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (active) begin
      a_q    <= a;
      b_q    <= b_in;
      op_q   <= op;
      zero_q <= rst_acc;
    end
    if (active || busy) begin
      for (int l = 0; l < LANES; l++) begin
        if (int'(cur) * LANES + l < N) begin
          res[(int'(cur)*LANES+l)*ACC_WIDTH +: ACC_WIDTH] <=
            zero_sel ? '0 :
            alu1(op_sel, a_sel[(int'(cur)*LANES+l)*ACC_WIDTH +: ACC_WIDTH],
                         b_sel[(int'(cur)*LANES+l)*ACC_WIDTH +: ACC_WIDTH]);
        end
      end
    end
  end

endmodule
