// tb_vta_load: self-checking test of the load module. Three LOAD
// instructions: into the input buffer with padding and both dependency
// flags (wait for a compute->load token, push a load->compute token), into
// the weight buffer, and one into the input buffer with no flags. Checks
// that no DRAM request is made before the token arrives, that exactly the
// flagged tokens are pushed, and the buffer contents.
module tb_vta_load;
  import vta_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready;
  logic [INSN_W-1:0] cmd_data;
  logic c2l_valid, c2l_ready, l2c_valid, l2c_ready, busy;
  logic [0:0] rq_v, rq_r, rs_v, wq_v, wq_r;
  logic [31:0] rq_a [1], rs_d [1], wq_a [1], wq_d [1];
  logic inp_we, wgt_we;
  logic [LOG_INP_BUFF_DEPTH-1:0] inp_waddr;
  logic [INP_ELEM_W-1:0] inp_wdata;
  logic [LOG_WGT_BUFF_DEPTH-1:0] wgt_waddr;
  logic [WGT_ELEM_W-1:0] wgt_wdata;
  logic [INP_ELEM_W-1:0] inp [1 << LOG_INP_BUFF_DEPTH];
  logic [WGT_ELEM_W-1:0] wgt [1 << LOG_WGT_BUFF_DEPTH];
  int checks = 0, failures = 0, tokens = 0, nreq = 0;

  vta_load dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data,
    .c2l_valid, .c2l_ready, .l2c_valid, .l2c_ready,
    .mem_req_valid(rq_v[0]), .mem_req_ready(rq_r[0]), .mem_req_addr(rq_a[0]),
    .mem_rsp_valid(rs_v[0]), .mem_rsp_data(rs_d[0]),
    .inp_we, .inp_waddr, .inp_wdata, .wgt_we, .wgt_waddr, .wgt_wdata, .busy);

  vta_dram_model #(.WORDS(16384)) dram (
    .clk, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_rsp_valid(rs_v), .rd_rsp_data(rs_d),
    .wr_req_valid(wq_v), .wr_req_ready(wq_r), .wr_req_addr(wq_a), .wr_req_data(wq_d));
  assign wq_v = '0; assign wq_a[0] = '0; assign wq_d[0] = '0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (inp_we) inp[inp_waddr] <= inp_wdata;
    if (wgt_we) wgt[wgt_waddr] <= wgt_wdata;
    if (l2c_valid && l2c_ready) tokens++;
    if (rq_v[0] && rq_r[0]) nreq++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic mem_insn_t mk(mem_id_e id, int sb, int db, int ys, int xs, int st,
                                   int yp0, int yp1, int xp0, int xp1, bit popn, bit pushn);
    mem_insn_t m;
    m = '0;
    m.opcode = OP_LOAD; m.sram_mem = id; m.sram_base = sb; m.dram_base = db;
    m.y_size = ys; m.x_size = xs; m.x_stride = st;
    m.y_pad_0 = yp0; m.y_pad_1 = yp1; m.x_pad_0 = xp0; m.x_pad_1 = xp1;
    m.dept.pop_next = popn; m.dept.push_next = pushn;
    return m;
  endfunction

  task automatic send(mem_insn_t m);
    @(negedge clk); cmd_valid = 1; cmd_data = m;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic check_block(mem_insn_t m);
    int xt, words;
    xt = m.x_pad_0 + m.x_size + m.x_pad_1;
    words = (1 << elem_shift_of(m.sram_mem)) / 4;
    for (int y = 0; y < m.y_pad_0 + m.y_size + m.y_pad_1; y++)
      for (int x = 0; x < xt; x++) begin
        logic [WGT_ELEM_W-1:0] e, got;
        e = '0;
        if (y >= m.y_pad_0 && y < m.y_pad_0 + m.y_size && x >= m.x_pad_0 && x < m.x_pad_0 + m.x_size)
          for (int w = 0; w < words; w++)
            e[w*32 +: 32] = dram.mem[(m.dram_base + (y - m.y_pad_0) * m.x_stride + (x - m.x_pad_0)) * words + w];
        got = (m.sram_mem == MEM_INP) ? WGT_ELEM_W'(inp[m.sram_base + y*xt + x]) : wgt[m.sram_base + y*xt + x];
        check(got === e, $sformatf("buffer %0d entry y=%0d x=%0d", m.sram_mem, y, x));
      end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mem_insn_t a, b, c;
    cmd_valid = 0; cmd_data = '0; c2l_valid = 0; l2c_ready = 1;
    for (int i = 0; i < 16384; i++) dram.mem[i] = $urandom;
    a = mk(MEM_INP, 0, 10, 2, 3, 5, 1, 1, 1, 1, 1, 1);
    b = mk(MEM_WGT, 7, 3, 2, 2, 4, 0, 0, 0, 0, 0, 0);
    c = mk(MEM_INP, 40, 100, 1, 4, 4, 0, 0, 0, 0, 0, 0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    send(a);
    repeat (50) @(posedge clk);
    check(nreq == 0 && busy, "waits for compute->load token");
    @(negedge clk); c2l_valid = 1;
    do @(posedge clk); while (!c2l_ready);
    @(negedge clk); c2l_valid = 0;
    send(b);
    send(c);
    wait (!busy); repeat (3) @(negedge clk);
    check(tokens == 1, "one load->compute token");
    check_block(a); check_block(b); check_block(c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
