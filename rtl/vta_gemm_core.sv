// vta_gemm_core: the GEMM tensor intrinsic.
//
// Computes acc_out = acc_in + inp x wgt^T for an input tile of BATCH x
// BLOCK_IN signed INP_WIDTH values, a weight tile of BLOCK_OUT x BLOCK_IN
// signed WGT_WIDTH values (stored transposed: row o holds the weights of
// output o) and an accumulator tile of BATCH x BLOCK_OUT signed ACC_WIDTH
// values. As in the design description it is built from parallel dot
// products, each summed by a binary reduction tree, and accepts one new
// matrix multiply every cycle. When rst_acc is high the result is zero
// (the RESET flag of a GEMM instruction).
//
// Packing (this design's choice): element (b,i) of inp sits at bit
// (b*BLOCK_IN+i)*INP_WIDTH, element (o,i) of wgt at (o*BLOCK_IN+i)*WGT_WIDTH,
// element (b,o) of acc at (b*BLOCK_OUT+o)*ACC_WIDTH. Sums wrap at ACC_WIDTH.
// Timing: one register stage; out_valid/acc_out follow in_valid by one
// cycle. BLOCK_IN must be a power of two for the tree.
module vta_gemm_core
  import vta_pkg::*;
#(
  parameter int unsigned B  = BATCH,
  parameter int unsigned BI = BLOCK_IN,
  parameter int unsigned BO = BLOCK_OUT
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic                          rst_acc,
  input  logic [B*BI*INP_WIDTH-1:0]     inp,
  input  logic [BO*BI*WGT_WIDTH-1:0]    wgt,
  input  logic [B*BO*ACC_WIDTH-1:0]     acc_in,
  output logic                          out_valid,
  output logic [B*BO*ACC_WIDTH-1:0]     acc_out
);
  typedef logic signed [ACC_WIDTH-1:0] acc_t;

  // Heap-ordered adder tree: leaves at [BI .. 2*BI-1], root at [1].
  function automatic acc_t dot(input logic [BI*INP_WIDTH-1:0] a,
                               input logic [BI*WGT_WIDTH-1:0] w);
    acc_t t [2*BI];
    t[0] = '0;
    for (int i = 0; i < BI; i++)
      t[BI+i] = acc_t'($signed(a[i*INP_WIDTH +: INP_WIDTH]) *
                       $signed(w[i*WGT_WIDTH +: WGT_WIDTH]));
    for (int k = BI - 1; k >= 1; k--)
      t[k] = t[2*k] + t[2*k+1];
    return t[1];
  endfunction

  logic [B*BO*ACC_WIDTH-1:0] sum;

  always_comb begin
    for (int b = 0; b < B; b++)
      for (int o = 0; o < BO; o++)
        sum[(b*BO+o)*ACC_WIDTH +: ACC_WIDTH] =
          rst_acc ? '0 :
          acc_in[(b*BO+o)*ACC_WIDTH +: ACC_WIDTH] +
          dot(inp[b*BI*INP_WIDTH +: BI*INP_WIDTH], wgt[o*BI*WGT_WIDTH +: BI*WGT_WIDTH]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) acc_out <= sum;
  end

endmodule
