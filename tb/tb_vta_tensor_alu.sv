// tb_vta_tensor_alu: self-checking test of the tensor ALU with 32 units
// (one tensor per cycle) and with 16 units (two cycles per tensor). Random
// MIN/MAX/ADD/SHR operations with tensor and immediate operands, positive
// and negative shifts, and the reset flag; checks results and latencies.
module tb_vta_tensor_alu;
  import vta_pkg::*;
  localparam int N = BATCH * BLOCK_OUT;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  alu_op_e op;
  logic use_imm, rst_acc;
  logic [ALUOP_IMM_WIDTH-1:0] imm;
  logic [N*ACC_WIDTH-1:0] a, b_vec, res32, res16;
  logic busy32, busy16, ov32, ov16;
  int checks = 0, failures = 0;

  vta_tensor_alu #(.N(N), .LANES(32)) u32 (.clk, .rst_n, .in_valid, .op, .use_imm, .imm,
    .rst_acc, .a, .b_vec, .busy(busy32), .out_valid(ov32), .res(res32));
  vta_tensor_alu #(.N(N), .LANES(16)) u16 (.clk, .rst_n, .in_valid, .op, .use_imm, .imm,
    .rst_acc, .a, .b_vec, .busy(busy16), .out_valid(ov16), .res(res16));

  always #5 clk = ~clk;

  function automatic logic [N*ACC_WIDTH-1:0] ref_alu(alu_op_e f, logic ui,
      logic [ALUOP_IMM_WIDTH-1:0] im, logic z, logic [N*ACC_WIDTH-1:0] x, logic [N*ACC_WIDTH-1:0] y);
    logic [N*ACC_WIDTH-1:0] r;
    for (int i = 0; i < N; i++) begin
      int p, q, v;
      p = int'($signed(x[i*ACC_WIDTH +: ACC_WIDTH]));
      q = ui ? int'($signed(im)) : int'($signed(y[i*ACC_WIDTH +: ACC_WIDTH]));
      case (f)
        ALU_MIN: v = (p < q) ? p : q;
        ALU_MAX: v = (p > q) ? p : q;
        ALU_ADD: v = p + q;
        default: v = (q >= 0) ? (p >>> (q % 32)) : (p <<< ((-q) % 32));
      endcase
      r[i*ACC_WIDTH +: ACC_WIDTH] = z ? '0 : v;
    end
    return r;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N*ACC_WIDTH-1:0] e;
    in_valid = 0; op = ALU_ADD; use_imm = 0; imm = 0; rst_acc = 0; a = '0; b_vec = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      op      = alu_op_e'($urandom_range(3, 0));
      use_imm = $urandom_range(1, 0);
      rst_acc = (n % 25 == 7);
      imm     = (op == ALU_SHR) ? ALUOP_IMM_WIDTH'($signed($urandom_range(16, 0)) - 8)
                                : ALUOP_IMM_WIDTH'($urandom);
      for (int i = 0; i < N; i++) begin
        a[i*ACC_WIDTH +: ACC_WIDTH]     = ACC_WIDTH'($urandom);
        b_vec[i*ACC_WIDTH +: ACC_WIDTH] = (op == ALU_SHR) ? ACC_WIDTH'($urandom_range(40, 0) - 20)
                                                          : ACC_WIDTH'($urandom);
      end
      e = ref_alu(op, use_imm, imm, rst_acc, a, b_vec);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++; if (!ov32 || res32 !== e) begin failures++; $display("FAIL 32-lane op %0d", op); end
      checks++; if (ov16 || !busy16) begin failures++; $display("FAIL 16-lane not in 2nd chunk"); end
      a = '0; b_vec = '0;   // the 16-lane unit must use its held operands
      @(negedge clk);
      checks++; if (!ov16 || res16 !== e) begin failures++; $display("FAIL 16-lane op %0d", op); end
      checks++; if (busy16 || busy32) begin failures++; $display("FAIL busy after result"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
