// tb_vta_fifo: self-checking test of the queue used for command and
// dependency queues. Random pushes and pops against a reference queue;
// checks data order, occupancy, the full (in_ready low) and empty
// (out_valid low) conditions and the one-cycle push-to-output latency.
module tb_vta_fifo;
  localparam int W = 8, D = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, fulls = 0, empties = 0;
  logic [W-1:0] model [$];

  vta_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && in_ready && count == 0, "empty after reset");
    // push one, visible next cycle
    in_valid = 1; in_data = 8'hA5;
    @(posedge clk); model.push_back(8'hA5);
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 8'hA5 && count == 1, "one-cycle latency");
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      check(count == model.size(), "count");
      check(in_ready == (model.size() < D), "in_ready");
      check(out_valid == (model.size() > 0), "out_valid");
      if (out_valid && model.size() > 0) check(out_data == model[0], "data order");
      if (model.size() == D) fulls++;
      if (model.size() == 0) empties++;
      in_valid  = ($urandom_range(2, 0) != 0) || cyc < 10 && cyc > 4;
      out_ready = (cyc < 10 || (cyc > 200 && cyc < 220)) ? 1'b0 : ($urandom_range(1, 0) != 0);
      in_data   = W'($urandom);
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    check(fulls > 0, "queue became full");
    check(empties > 0, "queue became empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
