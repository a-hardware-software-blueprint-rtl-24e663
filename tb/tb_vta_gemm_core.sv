// tb_vta_gemm_core: self-checking test of the GEMM intrinsic at its
// default (2,16)x(16,16) W8A8 shape with 32-bit accumulators. Streams one
// random matrix multiply per cycle, computes the expected
// acc + inp x wgt^T with plain loops, checks every result one cycle later
// (the one-per-cycle rate and latency), and checks the reset flag.
module tb_vta_gemm_core;
  import vta_pkg::*;
  localparam int B = BATCH, BI = BLOCK_IN, BO = BLOCK_OUT;
  localparam int NV = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid, rst_acc, out_valid;
  logic [B*BI*INP_WIDTH-1:0] inp;
  logic [BO*BI*WGT_WIDTH-1:0] wgt;
  logic [B*BO*ACC_WIDTH-1:0] acc_in, acc_out;
  logic [B*BO*ACC_WIDTH-1:0] expect_q [NV];
  int checks = 0, failures = 0;

  vta_gemm_core dut (.*);
  always #5 clk = ~clk;

  function automatic logic [B*BO*ACC_WIDTH-1:0] ref_gemm(
      logic [B*BI*INP_WIDTH-1:0] a, logic [BO*BI*WGT_WIDTH-1:0] w,
      logic [B*BO*ACC_WIDTH-1:0] c, logic z);
    logic [B*BO*ACC_WIDTH-1:0] r;
    for (int b = 0; b < B; b++)
      for (int o = 0; o < BO; o++) begin
        int s;
        s = int'($signed(c[(b*BO+o)*ACC_WIDTH +: ACC_WIDTH]));
        for (int i = 0; i < BI; i++)
          s += int'($signed(a[(b*BI+i)*INP_WIDTH +: INP_WIDTH])) *
               int'($signed(w[(o*BI+i)*WGT_WIDTH +: WGT_WIDTH]));
        r[(b*BO+o)*ACC_WIDTH +: ACC_WIDTH] = z ? '0 : ACC_WIDTH'(s);
      end
    return r;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; rst_acc = 0; inp = '0; wgt = '0; acc_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n <= NV; n++) begin
      @(negedge clk);
      if (n > 0) begin
        check_out(n - 1);
      end
      if (n < NV) begin
        in_valid = 1;
        rst_acc  = (n % 16 == 5);
        for (int k = 0; k < B*BI; k++)  inp[k*INP_WIDTH +: INP_WIDTH] = (n < 2) ? 8'h80 : INP_WIDTH'($urandom);
        for (int k = 0; k < BO*BI; k++) wgt[k*WGT_WIDTH +: WGT_WIDTH] = (n < 2) ? 8'h80 : WGT_WIDTH'($urandom);
        for (int k = 0; k < B*BO; k++)  acc_in[k*ACC_WIDTH +: ACC_WIDTH] = ACC_WIDTH'($urandom);
        expect_q[n] = ref_gemm(inp, wgt, acc_in, rst_acc);
      end else begin
        in_valid = 0;
      end
    end
    @(negedge clk);
    checks++; if (out_valid) begin failures++; $display("FAIL out_valid after stream"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out(int n);
    checks++;
    if (!out_valid || acc_out !== expect_q[n]) begin
      failures++;
      $display("FAIL result %0d", n);
    end
  endtask
endmodule
