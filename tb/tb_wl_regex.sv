// tb_wl_regex: the regular-expression pushdown workload through the whole
// design at selectivities 1%, 10% and 100%.
//
// Each row carries a string of 20 to 62 characters drawn from "a" to "c".
// The pattern "dcbad" is planted in the chosen fraction of rows, and a
// reference substring search decides which rows are expected.  The regex operator
// runs its 48 engines and may return matches out of order, so results are
// checked as a set, by the row number stored in the top bytes of each row.
//
// 48 CPU threads are modelled as up to 48 outstanding Read-Shared requests.
// The ECI link back to the CPU is modelled by accepting one response every
// LINK cycles; with LINK = 12 the link carries one sixth of the DRAM line
// rate (one line per two cycles), the interconnect-to-DRAM ratio of the
// evaluated system.  The testbench checks the expected bottleneck: with
// 48 engines the matching is faster than DRAM, so below 1/6 selectivity the
// scan runs at the DRAM rate and at 100% it runs at the link rate.  Table
// size is scaled down (ROWS rows instead of 5.12 million).
module tb_wl_regex;
  import eci_pkg::*;
  localparam int LAT = 30, LINK = 12, ROWS = 1200, THREADS = 48;
  localparam longint XBASE = 64'h200_0000;
  localparam byte PAT [5] = '{"d", "c", "b", "a", "d"};

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

  logic [LINE_BITS-1:0] xtab [ROWS];
  bit rx_exp [ROWS], rx_seen [ROWS];
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
      else begin
        int r;
        r = int'(tx_msg.data[LINE_BITS-1 -: 32]);
        if (r >= ROWS || !rx_exp[r] || rx_seen[r] || tx_msg.data != xtab[r]) begin failures++; $display("FAIL: row"); end
        else begin rx_seen[r] = 1; n_res++; end
      end
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
    nexp = 0;
    for (int i = 0; i < ROWS; i++) begin
      int n;
      bit hit;
      for (int w = 0; w < LINE_BITS / 32; w++) d[w*32 +: 32] = $urandom;
      n = $urandom_range(20, 62);
      for (int k = 0; k < 62; k++) d[k*8 +: 8] = (k < n) ? 8'("a" + $urandom_range(2)) : 8'd0;
      if ($urandom_range(9999) < pct * 100) begin
        int at;
        at = $urandom_range(0, n - 5);
        for (int k = 0; k < 5; k++) d[(at+k)*8 +: 8] = PAT[k];
      end
      d[LINE_BITS-1 -: 32] = 32'(i);
      hit = 0;
      for (int s = 0; s + 5 <= n; s++) begin
        bit ok;
        ok = 1;
        for (int k = 0; k < 5; k++) if (d[(s+k)*8 +: 8] != PAT[k]) ok = 0;
        if (ok) hit = 1;
      end
      xtab[i] = d; rx_exp[i] = hit; rx_seen[i] = 0;
      if (hit) nexp++;
      u_mem.write_line(XBASE + i * 128, d);
    end
    n_end = 0; n_res = 0;
    io_write(R_RX_ARM, 64'd1);
    t0 = cyc;
    id = 0;
    // threads keep reading until each has seen the end marker once
    while (n_end < THREADS) begin
      if (outstanding < THREADS && n_res + outstanding < nexp + THREADS) begin
        eci_msg_t m;
        m = '0; m.op = OP_READ_SHARED; m.id = ID_W'(id); m.line = {REG_REGEX, 31'(id)};
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
    $display("regex selectivity %0d%%: %0d rows, %0d results, %0d cycles, %.2f cycles/row, %.3f results/cycle",
             pct, ROWS, n_res, t1 - t0, cpr, real'(n_res) / real'(t1 - t0));
    check(n_res == nexp, "all results");
    check(rx_scanned == ROWS && rx_matched == 32'(nexp), "whole table scanned");
    if (pct * 6 < 100) check(cpr < 2.6, "DRAM-bound scan rate");
    else               check(cpr > 0.9 * LINK * pct / 100.0 && cpr < 1.2 * LINK * pct / 100.0 + 2.0, "link-bound scan rate");
  endtask

  initial begin
    rx_valid = 0; rx_msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    io_write(R_RX_BASE, 64'(XBASE));
    io_write(R_RX_ROWS, 64'(ROWS));
    io_write(R_RX_CTRL, 64'd5);
    for (int k = 0; k < 5; k++) io_write(R_RX_POS0 + k, {48'd0, 8'(PAT[k]), 8'(PAT[k])});
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
