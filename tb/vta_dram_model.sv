// vta_dram_model: behavioural model of the off-chip DRAM, for simulation
// only (not synthesizable logic). A byte-addressed array of 32-bit words
// with NRD read ports and NWR write ports of the accelerator's memory
// protocol. Each read request is accepted after a random 0..STALL_MAX cycle
// wait and answered LAT cycles later; each write is accepted likewise.
// Testbenches fill and inspect mem[] directly.
module vta_dram_model #(
  parameter int unsigned WORDS     = 65536,
  parameter int unsigned NRD       = 1,
  parameter int unsigned NWR       = 1,
  parameter int unsigned LAT       = 2,
  parameter int unsigned STALL_MAX = 1
) (
  input  logic        clk,
  input  logic [NRD-1:0] rd_req_valid,
  output logic [NRD-1:0] rd_req_ready,
  input  logic [31:0] rd_req_addr [NRD],
  output logic [NRD-1:0] rd_rsp_valid,
  output logic [31:0] rd_rsp_data [NRD],
  input  logic [NWR-1:0] wr_req_valid,
  output logic [NWR-1:0] wr_req_ready,
  input  logic [31:0] wr_req_addr [NWR],
  input  logic [31:0] wr_req_data [NWR]
);
  logic [31:0] mem [WORDS];
  int unsigned nwrites;

  initial begin
    for (int i = 0; i < int'(WORDS); i++) mem[i] = '0;
    nwrites = 0;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    initial begin
      rd_req_ready[p] = 1'b0;
      rd_rsp_valid[p] = 1'b0;
      rd_rsp_data[p]  = '0;
      forever begin
        @(posedge clk);
        rd_rsp_valid[p] <= 1'b0;
        if (rd_req_valid[p]) begin
          automatic logic [31:0] a = rd_req_addr[p];
          repeat ($urandom_range(STALL_MAX, 0)) @(posedge clk);
          rd_req_ready[p] <= 1'b1;
          @(posedge clk);
          rd_req_ready[p] <= 1'b0;
          repeat (LAT - 1) @(posedge clk);
          rd_rsp_data[p]  <= mem[(a >> 2) % WORDS];
          rd_rsp_valid[p] <= 1'b1;
        end
      end
    end
  end

  for (genvar p = 0; p < NWR; p++) begin : g_wr
    initial begin
      wr_req_ready[p] = 1'b0;
      forever begin
        @(posedge clk);
        if (wr_req_valid[p]) begin
          repeat ($urandom_range(STALL_MAX, 0)) @(posedge clk);
          wr_req_ready[p] <= 1'b1;
          @(posedge clk);
          wr_req_ready[p] <= 1'b0;
          mem[(wr_req_addr[p] >> 2) % WORDS] = wr_req_data[p];
          nwrites++;
        end
      end
    end
  end

endmodule
