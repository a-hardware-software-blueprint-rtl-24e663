// tb_vta_dma_rd: self-checking test of the 2D strided DMA. Two transfers
// from a randomly filled DRAM model: an 8-beat (32-byte) entry block of
// 3 x 4 entries with stride 6 and padding top 1, bottom 2, left 2,
// right 1; and an unpadded 1-beat (4-byte) block. Every SRAM write is
// compared with the entry computed independently from the DRAM contents,
// and the number of zero-padding writes is checked.
module tb_vta_dma_rd;
  import vta_pkg::*;
  localparam int EW = 256, AW = 10;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, pad_write;
  mem_insn_t insn;
  logic [3:0] elem_shift;
  logic [0:0] rq_v, rq_r, rs_v, wq_v, wq_r;
  logic [31:0] rq_a [1], rs_d [1], wq_a [1], wq_d [1];
  logic wr_en;
  logic [AW-1:0] wr_addr;
  logic [EW-1:0] wr_data;
  logic [EW-1:0] sram [1 << AW];
  logic [(1<<AW)-1:0] written;
  int checks = 0, failures = 0, pads = 0;

  vta_dma_rd #(.ELEM_W(EW), .SRAM_AW(AW)) dut (
    .clk, .rst_n, .start, .insn, .elem_shift, .busy, .done, .pad_write,
    .req_valid(rq_v[0]), .req_ready(rq_r[0]), .req_addr(rq_a[0]),
    .rsp_valid(rs_v[0]), .rsp_data(rs_d[0]),
    .wr_en, .wr_addr, .wr_data);

  vta_dram_model #(.WORDS(4096), .NRD(1), .NWR(1)) dram (
    .clk, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_rsp_valid(rs_v), .rd_rsp_data(rs_d),
    .wr_req_valid(wq_v), .wr_req_ready(wq_r), .wr_req_addr(wq_a), .wr_req_data(wq_d));
  assign wq_v = '0; assign wq_a[0] = '0; assign wq_d[0] = '0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (wr_en) begin sram[wr_addr] <= wr_data; written[wr_addr] <= 1'b1; end
    if (pad_write) pads++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_and_check(int sb, int db, int ys, int xs, int st,
                               int yp0, int yp1, int xp0, int xp1, int shift);
    int xt, yt, words, npad;
    insn = '0;
    insn.opcode = OP_LOAD; insn.sram_base = sb; insn.dram_base = db;
    insn.y_size = ys; insn.x_size = xs; insn.x_stride = st;
    insn.y_pad_0 = yp0; insn.y_pad_1 = yp1; insn.x_pad_0 = xp0; insn.x_pad_1 = xp1;
    elem_shift = shift;
    written = '0; pads = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    xt = xp0 + xs + xp1; yt = yp0 + ys + yp1; words = (1 << shift) / 4; npad = 0;
    for (int y = 0; y < yt; y++)
      for (int x = 0; x < xt; x++) begin
        logic [EW-1:0] e;
        int a;
        e = '0;
        if (y >= yp0 && y < yp0 + ys && x >= xp0 && x < xp0 + xs) begin
          a = (db + (y - yp0) * st + (x - xp0)) * words;
          for (int w = 0; w < words; w++) e[w*32 +: 32] = dram.mem[a + w];
        end else npad++;
        checks++;
        if (!written[sb + y*xt + x] || sram[sb + y*xt + x] !== e) begin
          failures++; $display("FAIL entry y=%0d x=%0d", y, x);
        end
      end
    checks++;
    if (pads != npad || $countones(written) != xt*yt) begin
      failures++; $display("FAIL pad count %0d/%0d or extra writes", pads, npad);
    end
  endtask

  initial begin
    start = 0; insn = '0; elem_shift = 5;
    repeat (2) @(posedge clk);
    for (int i = 0; i < 4096; i++) dram.mem[i] = $urandom;
    rst_n = 1;
    run_and_check(3, 5, 3, 4, 6, 1, 2, 2, 1, 5);
    run_and_check(100, 17, 2, 5, 9, 0, 0, 0, 0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
