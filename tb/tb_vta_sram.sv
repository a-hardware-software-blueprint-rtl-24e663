// tb_vta_sram: self-checking test of the on-chip buffer memory with two
// read ports. Writes random data, reads it back on both ports one cycle
// later, checks that a read colliding with a write returns the old data
// and that read data holds while re is low.
module tb_vta_sram;
  localparam int W = 24, D = 16;
  logic clk = 0;
  logic we;
  logic [$clog2(D)-1:0] waddr;
  logic [W-1:0] wdata;
  logic [1:0] re;
  logic [$clog2(D)-1:0] raddr [2];
  logic [W-1:0] rdata [2];
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  vta_sram #(.WIDTH(W), .DEPTH(D), .NRD(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; wdata = 0; raddr[0] = 0; raddr[1] = 0;
    // fill
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = i; wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    // random reads and writes
    for (int n = 0; n < 500; n++) begin
      logic [W-1:0] e0, e1;
      @(negedge clk);
      re = 2'b11; raddr[0] = $urandom_range(D-1, 0); raddr[1] = $urandom_range(D-1, 0);
      we = $urandom_range(1, 0); waddr = (n % 3 == 0) ? raddr[0] : $urandom_range(D-1, 0);
      wdata = W'($urandom);
      e0 = model[raddr[0]]; e1 = model[raddr[1]];
      @(posedge clk);
      if (we) model[waddr] = wdata;
      @(negedge clk);
      check(rdata[0] == e0, "port 0 read (old data on collision)");
      check(rdata[1] == e1, "port 1 read");
      re = 0; we = 0;
      @(posedge clk);
      @(negedge clk);
      check(rdata[0] == e0 && rdata[1] == e1, "read data held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
