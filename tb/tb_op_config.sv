// tb_op_config: I/O writes of random values to every register followed by
// reads.  Checks read-back data, that each access gets one response with its
// ID, the decoding of the cfg record (including the regex program) and the
// one-cycle re-arm pulses.
module tb_op_config;
  import eci_pkg::*;
  logic clk = 0, rst_n = 0;
  logic io_valid, io_ready, io_rsp_valid, io_rsp_ready, sel_arm, rx_arm;
  eci_msg_t io_msg, io_rsp_msg;
  cfg_t cfg;
  int checks = 0, failures = 0;
  logic [63:0] model [64];
  int n_sel_arm = 0, n_rx_arm = 0;

  op_config dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (sel_arm) n_sel_arm++;
    if (rx_arm) n_rx_arm++;
  end

  task automatic access(input eci_op_e op, input int idx, input logic [63:0] v, output logic [63:0] rd);
    @(negedge clk);
    io_valid = 1; io_msg = '0; io_msg.vc = VC_IO_REQ; io_msg.op = op;
    io_msg.id = ID_W'(idx + 7); io_msg.line = LINE_W'(idx); io_msg.data[63:0] = v;
    do @(posedge clk); while (!io_ready);
    #1 io_valid = 0;
    while (!io_rsp_valid) @(posedge clk);
    #1;
    check(io_rsp_msg.op == OP_IO_RSP && io_rsp_msg.id == ID_W'(idx + 7), "I/O response");
    rd = io_rsp_msg.data[63:0];
  endtask

  initial begin
    logic [63:0] rd;
    io_valid = 0; io_msg = '0; io_rsp_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      model[i] = {$urandom, $urandom};
      access(OP_IO_WR, i, model[i], rd);
    end
    for (int i = 0; i < 64; i++) begin
      access(OP_IO_RD, i, 64'd0, rd);
      check(rd == model[i], $sformatf("read back %0d", i));
    end
    check(cfg.sel_base == model[R_SEL_BASE][ADDR_W-1:0], "sel_base");
    check(cfg.sel_rows == model[R_SEL_ROWS][31:0], "sel_rows");
    check(cfg.sel_x == model[R_SEL_X] && cfg.sel_y == model[R_SEL_Y], "sel x/y");
    check(cfg.rx_base == model[R_RX_BASE][ADDR_W-1:0] && cfg.rx_rows == model[R_RX_ROWS][31:0], "rx table");
    check(cfg.rx_prog.len == model[R_RX_CTRL][4:0] && cfg.rx_prog.anchored == model[R_RX_CTRL][8], "rx ctrl");
    for (int p = 0; p < RX_POS; p++)
      check(cfg.rx_prog.pos[p] == {model[R_RX_POS0+p][16], model[R_RX_POS0+p][15:8], model[R_RX_POS0+p][7:0]}, "rx pos");
    check(cfg.kvs_base == model[R_KVS_BASE][ADDR_W-1:0] && cfg.kvs_mask == model[R_KVS_MASK][31:0], "kvs");
    check(n_sel_arm == 1 && n_rx_arm == 1, $sformatf("arm pulses %0d %0d", n_sel_arm, n_rx_arm));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
