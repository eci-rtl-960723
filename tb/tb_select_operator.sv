// tb_select_operator: a table of random rows in the DRAM model, scanned by
// reads from several "cores" that stall at random.  Checks that the matching
// rows come back exactly once each, in table order, each response carrying
// its request's ID and line number; that reads after the end get the all-zero
// marker; that the operator stays done until re-armed and then scans again;
// and that with enough readers the scan runs near the DRAM rate (one row per
// two cycles).
module tb_select_operator;
  import eci_pkg::*;
  localparam int ROWS = 400;
  localparam longint BASE = 64'h10_0000;
  logic clk = 0, rst_n = 0;
  logic [ADDR_W-1:0] base;
  logic [31:0] rows, scanned_cnt, matched_cnt;
  logic [63:0] x, y;
  logic arm, req_valid, req_ready, rsp_valid, rsp_ready, done;
  op_req_t req;
  op_rsp_t rsp;
  logic ar_valid, ar_ready, r_valid, r_ready;
  axi_ar_t ar;
  axi_r_t r;
  int checks = 0, failures = 0;
  logic [LINE_BITS-1:0] table_q [ROWS];
  logic [LINE_BITS-1:0] exp_q [$];
  op_req_t sent_q [$];
  int n_zero;

  select_operator dut (.*);
  dram_model #(.LAT(30)) u_mem (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) sent_q.push_back(req);
    if (rsp_valid && rsp_ready) begin
      checks++;
      if (sent_q.size() == 0 || rsp.id != sent_q[0].id || rsp.line != sent_q[0].line) begin
        failures++; $display("FAIL: response id/line");
      end else void'(sent_q.pop_front());
      if (rsp.data == '0) n_zero++;
      else begin
        checks++;
        if (exp_q.size() == 0 || rsp.data != exp_q[0]) begin failures++; $display("FAIL: result row"); end
        else void'(exp_q.pop_front());
      end
    end
  end

  task automatic fill(input int sel_pct);
    x = 64'd1000;
    y = 64'd1000;
    exp_q.delete();
    for (int i = 0; i < ROWS; i++) begin
      logic [LINE_BITS-1:0] d;
      for (int w = 0; w < LINE_BITS / 32; w++) d[w*32 +: 32] = $urandom;
      d[63:0]   = ($urandom_range(99) < sel_pct) ? 64'd1001 + 64'($urandom_range(5000)) : 64'($urandom_range(1000));
      d[127:64] = 64'($urandom_range(999));
      table_q[i] = d;
      u_mem.write_line(BASE + i * 128, d);
      if (d[63:0] > x && d[127:64] < y) exp_q.push_back(d);
    end
  endtask

  task automatic scan(input int reads, input int rdy_pct, output int cycles);
    n_zero = 0;
    cycles = 0;
    for (int k = 0; k < reads; ) begin
      @(negedge clk);
      req_valid = 1;
      req.id    = ID_W'(k);
      req.line  = LINE_W'(k * 3);
      rsp_ready = ($urandom_range(99) < rdy_pct);
      #1;
      if (req_ready) k++;   // accepted at the coming edge
      cycles++;
    end
    @(negedge clk);
    req_valid = 0;
    while (sent_q.size() != 0 && cycles < 200000) begin
      @(negedge clk); rsp_ready = ($urandom_range(99) < rdy_pct); cycles++;
    end
  endtask

  initial begin
    int cyc, nm;
    arm = 0; req_valid = 0; req = '0; rsp_ready = 0;
    base = ADDR_W'(BASE); rows = ROWS;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1: 10% selectivity, stalling readers
    fill(10);
    nm = exp_q.size();
    scan(nm + 5, 50, cyc);
    check(exp_q.size() == 0, "all matches returned");
    check(n_zero == 5, "end markers");
    check(done, "done after scan");
    check(scanned_cnt == ROWS && matched_cnt == 32'(nm), "scan counters");
    // still done: reads get zeros without a new scan
    n_zero = 0;
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); req_valid = 1; req.id = 8'hEE; rsp_ready = 1;
    end
    @(negedge clk); req_valid = 0;
    repeat (5) @(negedge clk);
    check(n_zero == 3 && sent_q.size() == 0, "done until re-armed");
    // 2: re-arm, 100% selectivity, always-ready readers: scan rate
    @(negedge clk); arm = 1; @(negedge clk); arm = 0;
    check(!done, "re-armed");
    fill(100);
    nm = exp_q.size();
    scan(nm + 1, 100, cyc);
    check(exp_q.size() == 0 && n_zero == 1, "full selectivity results");
    $display("%0d rows at 100%% selectivity in %0d cycles", ROWS, cyc);
    check(cyc < 2 * ROWS + 100, "scan rate near DRAM rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
