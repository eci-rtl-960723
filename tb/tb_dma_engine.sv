// tb_dma_engine: two jobs against the DRAM model.  The first, with a random
// consumer, checks that lines arrive whole, in address order, with the right
// contents and that the read port is never stalled.  The second, with an
// always-ready consumer, checks the rate: one line per two cycles (two
// 512-bit beats) after the DRAM latency.
module tb_dma_engine;
  import eci_pkg::*;
  localparam int LAT = 30;
  logic clk = 0, rst_n = 0;
  logic start, busy, ar_valid, ar_ready, r_valid, r_ready, line_valid, line_ready;
  logic [ADDR_W-1:0] base;
  logic [31:0] nlines;
  axi_ar_t ar;
  axi_r_t r;
  logic [LINE_BITS-1:0] line_data;
  int checks = 0, failures = 0;
  int got;

  dma_engine #(.BUF_LINES(32)) dut (.*);
  dram_model #(.LAT(LAT)) u_mem (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [LINE_BITS-1:0] pat(longint a);
    logic [LINE_BITS-1:0] d;
    for (int w = 0; w < LINE_BITS / 64; w++) d[w*64 +: 64] = 64'(a) ^ (64'(w) << 48);
    return d;
  endfunction

  always @(posedge clk) if (rst_n && r_valid) begin
    checks++;
    if (!r_ready) begin failures++; $display("FAIL: read data stalled"); end
  end

  task automatic run(input longint b, input int n, input int ready_pct, output int cycles);
    @(negedge clk);
    base = ADDR_W'(b); nlines = n; start = 1;
    @(negedge clk);
    start = 0;
    got = 0; cycles = 1;
    while (got < n && cycles < 100000) begin
      line_ready = ($urandom_range(99) < ready_pct);
      #1;
      if (line_valid && line_ready) begin
        check(line_data == pat(b + longint'(got) * 128), $sformatf("line %0d", got));
        got++;
      end
      @(negedge clk);
      cycles++;
    end
    check(got == n, "all lines");
    line_ready = 0;
    repeat (2) @(negedge clk);
    check(!busy, "idle at end");
  endtask

  initial begin
    int cyc;
    start = 0; base = '0; nlines = 0; line_ready = 0;
    for (int i = 0; i < 200; i++) u_mem.write_line(64'h4000 + i * 128, pat(64'h4000 + i * 128));
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(64'h4000, 50, 40, cyc);
    run(64'h4000 + 50 * 128, 128, 100, cyc);
    $display("128 lines in %0d cycles", cyc);
    check(cyc <= LAT + 2 * 128 + 10 && cyc >= 2 * 128, "rate: one line per 2 cycles");
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
