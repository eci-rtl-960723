// tb_wl_select: the SELECT pushdown workload through the whole design at
// selectivities 1%, 10% and 100%.
//
// 48 CPU threads are modelled as up to 48 outstanding Read-Shared requests.
// The ECI link back to the CPU is modelled by accepting one response every
// LINK cycles; with LINK = 12 the link carries one sixth of the DRAM line
// rate (one line per two cycles), the interconnect-to-DRAM ratio of the
// evaluated system.  The testbench measures cycles per scanned row and checks
// the expected bottleneck: below 1/6 selectivity the scan runs at the DRAM
// rate, at 100% it runs at the link rate.  All results are checked against
// the table.  Table size is scaled down (ROWS rows instead of 5.12 million).
module tb_wl_select;
  import eci_pkg::*;
  localparam int LAT = 30, LINK = 12, ROWS = 1200, THREADS = 48;
  localparam longint SBASE = 64'h100_0000;

  logic clk = 0, rst_n = 0;
  logic rx_valid, rx_ready, tx_valid, tx_ready;
  eci_msg_t rx_msg, tx_msg;
  logic dram_ar_valid, dram_ar_ready, dram_r_valid, dram_r_ready;
  axi_ar_t dram_ar;
  axi_r_t dram_r;
  logic proto_err;
  logic [31:0] err_cnt, vdown_cnt, read_cnt, unexpected_cnt;
  logic [31:0] sel_scanned, sel_matched, rx_scanned, rx_matched, kvs_hops;

  eci_memctrl_top dut (.*);
  dram_model #(.LAT(LAT)) u_mem (
    .clk, .rst_n, .ar_valid(dram_ar_valid), .ar_ready(dram_ar_ready), .ar(dram_ar),
    .r_valid(dram_r_valid), .r_ready(dram_r_ready), .r(dram_r)
  );
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [LINE_BITS-1:0] exp_q [$];
  int outstanding = 0, n_end = 0, n_res = 0;
  longint cyc = 0;

  // link model: one response every LINK cycles
  always @(posedge clk) cyc <= cyc + 1;
  assign tx_ready = (cyc % LINK == 0);

  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    outstanding--;
    if (tx_msg.op == OP_RSP_DATA) begin
      checks++;
      if (tx_msg.data == '0) n_end++;
      else if (exp_q.size() == 0 || tx_msg.data != exp_q[0]) begin failures++; $display("FAIL: row"); end
      else begin void'(exp_q.pop_front()); n_res++; end
    end
  end

  task automatic send(input eci_msg_t m);
    @(negedge clk);
    rx_valid = 1; rx_msg = m;
    #1;
    while (!rx_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    rx_valid = 0;
  endtask

  task automatic io_write(input int r, input logic [63:0] v);
    eci_msg_t m;
    m = '0; m.vc = VC_IO_REQ; m.op = OP_IO_WR; m.line = LINE_W'(r); m.data[63:0] = v;
    outstanding++;
    send(m);
  endtask

  task automatic run(input int pct);
    logic [LINE_BITS-1:0] d;
    longint t0, t1;
    int id, nexp;
    real cpr;
    exp_q.delete();
    for (int i = 0; i < ROWS; i++) begin
      for (int w = 0; w < LINE_BITS / 32; w++) d[w*32 +: 32] = $urandom;
      d[63:0]   = ($urandom_range(9999) < pct * 100) ? 64'd1001 + 64'($urandom_range(9999)) : 64'($urandom_range(1000));
      d[127:64] = 64'($urandom_range(999));
      if (d[63:0] > 1000) exp_q.push_back(d);
      u_mem.write_line(SBASE + i * 128, d);
    end
    nexp = exp_q.size();
    n_end = 0; n_res = 0;
    io_write(R_SEL_ARM, 64'd1);
    t0 = cyc;
    id = 0;
    // threads keep reading until each has seen the end marker once
    while (n_end < THREADS) begin
      if (outstanding < THREADS && n_res + outstanding < nexp + THREADS) begin
        eci_msg_t m;
        m = '0; m.op = OP_READ_SHARED; m.id = ID_W'(id); m.line = {REG_SELECT, 31'(id)};
        m.vc = m.line[0] ? VC_REQ_O : VC_REQ_E;
        id++;
        outstanding++;
        send(m);
      end else @(negedge clk);
      if (cyc - t0 > 200000) break;
    end
    t1 = cyc;
    while (outstanding != 0 && cyc - t1 < 10000) @(negedge clk);
    cpr = real'(t1 - t0) / ROWS;
    $display("selectivity %0d%%: %0d rows, %0d results, %0d cycles, %.2f cycles/row, %.3f results/cycle",
             pct, ROWS, n_res, t1 - t0, cpr, real'(n_res) / real'(t1 - t0));
    check(n_res == nexp && exp_q.size() == 0, "all results");
    check(sel_scanned == ROWS, "whole table scanned");
    if (pct * 6 < 100) check(cpr < 2.6, "DRAM-bound scan rate");
    else               check(cpr > 0.9 * LINK * pct / 100.0 && cpr < 1.2 * LINK * pct / 100.0 + 2.0, "link-bound scan rate");
  endtask

  initial begin
    rx_valid = 0; rx_msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    io_write(R_SEL_BASE, 64'(SBASE));
    io_write(R_SEL_ROWS, 64'(ROWS));
    io_write(R_SEL_X, 64'd1000);
    io_write(R_SEL_Y, 64'd1000);
    run(1);
    run(10);
    run(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
