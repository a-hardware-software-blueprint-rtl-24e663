// tb_vta_store: self-checking test of the store module. The output buffer
// is modelled with a one-cycle read latency and filled with random entries.
// Two STORE instructions: a 3 x 2 block with stride 5 that must wait for a
// compute->store token and then push a store->compute token, and a 1 x 4
// block with no flags. Checks DRAM contents, untouched DRAM words, the
// token handshakes and the number of DRAM write beats.
module tb_vta_store;
  import vta_pkg::*;
  localparam int WORDS = 8192;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready;
  logic [INSN_W-1:0] cmd_data;
  logic c2s_valid, c2s_ready, s2c_valid, s2c_ready, busy;
  logic [0:0] rq_v, rq_r, rs_v, wq_v, wq_r;
  logic [31:0] rq_a [1], rs_d [1], wq_a [1], wq_d [1];
  logic out_re;
  logic [LOG_OUT_BUFF_DEPTH-1:0] out_raddr;
  logic [OUT_ELEM_W-1:0] out_rdata;
  logic [OUT_ELEM_W-1:0] obuf [1 << LOG_OUT_BUFF_DEPTH];
  logic [31:0] expect_mem [WORDS];
  int checks = 0, failures = 0, tokens = 0, nwr = 0;

  vta_store dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data,
    .c2s_valid, .c2s_ready, .s2c_valid, .s2c_ready,
    .mem_wr_valid(wq_v[0]), .mem_wr_ready(wq_r[0]), .mem_wr_addr(wq_a[0]), .mem_wr_data(wq_d[0]),
    .out_re, .out_raddr, .out_rdata, .busy);

  vta_dram_model #(.WORDS(WORDS)) dram (
    .clk, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_rsp_valid(rs_v), .rd_rsp_data(rs_d),
    .wr_req_valid(wq_v), .wr_req_ready(wq_r), .wr_req_addr(wq_a), .wr_req_data(wq_d));
  assign rq_v = '0; assign rq_a[0] = '0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (out_re) out_rdata <= obuf[out_raddr];
    if (s2c_valid && s2c_ready) tokens++;
    if (wq_v[0] && wq_r[0]) nwr++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic mem_insn_t mk(int sb, int db, int ys, int xs, int st, bit popp, bit pushp);
    mem_insn_t m;
    m = '0;
    m.opcode = OP_STORE; m.sram_mem = MEM_OUT; m.sram_base = sb; m.dram_base = db;
    m.y_size = ys; m.x_size = xs; m.x_stride = st;
    m.dept.pop_prev = popp; m.dept.push_prev = pushp;
    return m;
  endfunction

  task automatic send(mem_insn_t m);
    @(negedge clk); cmd_valid = 1; cmd_data = m;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic expect_block(mem_insn_t m);
    for (int y = 0; y < m.y_size; y++)
      for (int x = 0; x < m.x_size; x++)
        for (int w = 0; w < OUT_ELEM_W / 32; w++)
          expect_mem[(m.dram_base + y * m.x_stride + x) * (OUT_ELEM_W / 32) + w] =
            obuf[m.sram_base + y * m.x_size + x][w*32 +: 32];
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mem_insn_t a, b;
    cmd_valid = 0; cmd_data = '0; c2s_valid = 0; s2c_ready = 1;
    for (int i = 0; i < (1 << LOG_OUT_BUFF_DEPTH); i++)
      for (int w = 0; w < OUT_ELEM_W / 32; w++) obuf[i][w*32 +: 32] = $urandom;
    for (int i = 0; i < WORDS; i++) expect_mem[i] = 0;
    a = mk(5, 20, 3, 2, 5, 1, 1);
    b = mk(300, 100, 1, 4, 4, 0, 0);
    expect_block(a); expect_block(b);
    repeat (2) @(posedge clk);
    rst_n = 1;
    send(a);
    repeat (40) @(posedge clk);
    check(nwr == 0 && busy, "waits for compute->store token");
    @(negedge clk); c2s_valid = 1;
    do @(posedge clk); while (!c2s_ready);
    @(negedge clk); c2s_valid = 0;
    send(b);
    wait (!busy); repeat (4) @(negedge clk);
    check(tokens == 1, "one store->compute token");
    check(nwr == (6 + 4) * OUT_ELEM_W / 32, "write beat count");
    for (int i = 0; i < WORDS; i++)
      if (expect_mem[i] != 0 || dram.mem[i] != 0) begin
        checks++;
        if (expect_mem[i] != dram.mem[i]) begin failures++; $display("FAIL dram word %0d", i); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
