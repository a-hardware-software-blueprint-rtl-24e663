// vta_fifo: synchronous first-in first-out queue with a show-ahead output.
//
// Used for the three command queues that carry 128-bit task instructions
// from the fetch module to load, compute and store, and (with WIDTH = 1) for
// the four dependency-token queues between load, compute and store. The
// queues themselves follow the hardware organisation; depth, show-ahead
// behaviour and the valid/ready handshake are this design's own choices.
//
// Interface: push side in_valid/in_ready/in_data (a word enters on a cycle
// with both high); pop side out_valid/out_ready/out_data (out_data is the
// oldest word, removed on a cycle with both high). A full queue drops
// in_ready, which stalls the producer. count gives the occupancy.
// Timing: a word pushed on cycle t is visible at the output on cycle t+1.
module vta_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic             do_push, do_pop;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign do_push   = in_valid && in_ready;
  assign do_pop    = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= next_ptr(wr_ptr);
      if (do_pop)  rd_ptr <= next_ptr(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= in_data;
  end

  // The occupancy never exceeds the depth, and a full queue refuses words.
  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH));
  assert property (@(posedge clk) disable iff (!rst_n)
                   count == ($clog2(DEPTH+1))'(DEPTH) |-> !in_ready);

endmodule
