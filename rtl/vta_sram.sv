// vta_sram: on-chip tensor buffer with one write port and NRD read ports.
//
// Every on-chip memory of the accelerator is an instance of this module:
// the input, weight and output buffers, the accumulator register file and
// the micro-op cache. Each entry holds one whole tensor (for example the
// BATCH x BLOCK_IN input tile), so one access moves one tensor per cycle.
// The array-per-buffer organisation follows the hardware organisation; the
// port count, registered reads and read-before-write on a same-address
// collision are this design's own choices.
//
// Interface: we/waddr/wdata write on the clock edge. For each read port r,
// re[r]/raddr[r] request a read; rdata[r] shows the entry on the next cycle
// and holds it while re[r] stays low. A read of an address written on the
// same cycle returns the old contents. Contents are not reset.
module vta_sram #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned NRD   = 1
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [NRD-1:0]           re,
  input  logic [$clog2(DEPTH)-1:0] raddr [NRD],
  output logic [WIDTH-1:0]         rdata [NRD]
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar r = 0; r < NRD; r++) begin : g_rd
    always_ff @(posedge clk) begin
      if (re[r]) rdata[r] <= mem[raddr[r]];
    end
  end

endmodule
