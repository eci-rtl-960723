// tb_regex_operator: a table of rows whose 62-byte string field is random
// text over {a,b,c,d}, with the literal "dcbad" planted in a chosen share of
// rows.  Reads drain the result FIFO.  Checks (with a plain substring search
// as reference) that exactly the matching rows come back, each once, with
// intact contents and the request's ID; that the end marker follows; and
// that the operator keeps up with DRAM when few rows match.
module tb_regex_operator;
  import eci_pkg::*;
  localparam int ROWS = 300, NE = 8;
  localparam longint BASE = 64'h20_0000;
  localparam string PAT = "dcbad";
  logic clk = 0, rst_n = 0;
  logic [ADDR_W-1:0] base;
  logic [31:0] rows, scanned_cnt, matched_cnt;
  rx_prog_t prog;
  logic arm, req_valid, req_ready, rsp_valid, rsp_ready, done;
  op_req_t req;
  op_rsp_t rsp;
  logic ar_valid, ar_ready, r_valid, r_ready;
  axi_ar_t ar;
  axi_r_t r;
  int checks = 0, failures = 0;
  logic [LINE_BITS-1:0] table_q [ROWS];
  bit expect_m [ROWS];
  bit seen [ROWS];
  op_req_t sent_q [$];
  int n_zero, n_exp, n_got;

  regex_operator #(.NUM_ENG(NE)) dut (.*);
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
      if (sent_q.size() == 0 || rsp.id != sent_q[0].id) begin failures++; $display("FAIL: id"); end
      else void'(sent_q.pop_front());
      if (rsp.data == '0) n_zero++;
      else begin
        int idx;
        idx = int'(rsp.data[LINE_BITS-1 -: 32]);
        checks++;
        if (idx >= ROWS || !expect_m[idx] || seen[idx] || rsp.data != table_q[idx]) begin
          failures++; $display("FAIL: result row %0d", idx);
        end else seen[idx] = 1;
        n_got++;
      end
    end
  end

  function automatic bit contains(logic [LINE_BITS-1:0] d);
    for (int s = 0; s + PAT.len() <= 62; s++) begin
      bit ok;
      ok = 1;
      for (int k = 0; k < PAT.len(); k++) if (d[(s+k)*8 +: 8] != PAT[k]) ok = 0;
      if (ok) begin
        for (int k = 0; k < s + PAT.len(); k++) if (d[k*8 +: 8] == 0) ok = 0;
        if (ok) return 1;
      end
    end
    return 0;
  endfunction

  task automatic run(input int sel_pct, output int cycles);
    n_exp = 0; n_got = 0; n_zero = 0;
    for (int i = 0; i < ROWS; i++) begin
      logic [LINE_BITS-1:0] d;
      int n;
      for (int w = 0; w < LINE_BITS / 32; w++) d[w*32 +: 32] = $urandom;
      n = $urandom_range(20, 62);
      for (int k = 0; k < 62; k++) d[k*8 +: 8] = (k < n) ? 8'("a" + $urandom_range(3)) : 8'd0;
      if ($urandom_range(99) < sel_pct) begin
        int at;
        at = $urandom_range(0, n - PAT.len());
        for (int k = 0; k < PAT.len(); k++) d[(at+k)*8 +: 8] = PAT[k];
      end
      d[LINE_BITS-1 -: 32] = 32'(i);
      table_q[i] = d;
      expect_m[i] = contains(d);
      seen[i] = 0;
      if (expect_m[i]) n_exp++;
      u_mem.write_line(BASE + i * 128, d);
    end
    cycles = 0;
    for (int k = 0; k < n_exp + 2; ) begin
      @(negedge clk);
      req_valid = 1; req.id = ID_W'(k); req.line = LINE_W'(k);
      rsp_ready = ($urandom_range(3) != 0);
      #1;
      if (req_ready) k++;   // accepted at the coming edge
      cycles++;
    end
    @(negedge clk);
    req_valid = 0;
    while (sent_q.size() != 0 && cycles < 100000) begin @(negedge clk); rsp_ready = 1; cycles++; end
    check(n_got == n_exp && n_zero == 2, $sformatf("all matches: got %0d of %0d, %0d end markers", n_got, n_exp, n_zero));
    check(scanned_cnt == ROWS && matched_cnt == 32'(n_exp), "counters");
  endtask

  initial begin
    int cyc;
    arm = 0; req_valid = 0; req = '0; rsp_ready = 1;
    base = ADDR_W'(BASE); rows = ROWS;
    prog = '0; prog.len = 5'(PAT.len());
    for (int k = 0; k < PAT.len(); k++) begin prog.pos[k].lo = PAT[k]; prog.pos[k].hi = PAT[k]; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(50, cyc);
    @(negedge clk); arm = 1; @(negedge clk); arm = 0;
    run(2, cyc);
    $display("%0d rows at low selectivity with %0d engines: %0d cycles", ROWS, NE, cyc);
    // one character per cycle per engine: about 41 characters per row here
    check(cyc < ROWS * 45 / NE + 200, "engine-bound scan rate");
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
