// tb_axi_arbiter: N masters issue two-beat reads of distinct addresses
// through the arbiter into the DRAM model.  Checks that every read is issued
// with the master's index as ID, that each master gets back exactly its own
// data in issue order, and that all reads complete.
module tb_axi_arbiter;
  import eci_pkg::*;
  localparam int N = 4, PER = 40;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] m_ar_valid, m_ar_ready, m_r_valid, m_r_ready;
  axi_ar_t [N-1:0] m_ar;
  axi_r_t m_r;
  logic s_ar_valid, s_ar_ready, s_r_valid, s_r_ready;
  axi_ar_t s_ar;
  axi_r_t s_r;
  int checks = 0, failures = 0;
  int issued [N], beats [N];

  axi_arbiter #(.N(N)) dut (.*);
  dram_model #(.LAT(8), .READY_PCT(60)) u_mem (
    .clk, .rst_n, .ar_valid(s_ar_valid), .ar_ready(s_ar_ready), .ar(s_ar),
    .r_valid(s_r_valid), .r_ready(s_r_ready), .r(s_r)
  );
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint addr_of(int m, int i);
    return longint'(m) * 64'h10_0000 + longint'(i) * 128;
  endfunction

  always_comb
    for (int m = 0; m < N; m++) begin
      m_ar_valid[m] = rst_n && issued[m] < PER;
      m_ar[m].id    = '1;
      m_ar[m].addr  = ADDR_W'(addr_of(m, issued[m]));
      m_ar[m].len   = 8'd1;
    end

  always @(posedge clk) if (rst_n) begin
    if (s_ar_valid && s_ar_ready) begin
      checks++;
      if (!(m_ar_ready[int'(s_ar.id)] && s_ar.addr == m_ar[int'(s_ar.id)].addr)) begin
        failures++; $display("FAIL: AR id/addr");
      end
    end
    for (int m = 0; m < N; m++) begin
      if (m_ar_valid[m] && m_ar_ready[m]) issued[m]++;
      if (m_r_valid[m] && m_r_ready[m]) begin
        int line, half;
        line = beats[m] / 2; half = beats[m] % 2;
        checks++;
        if (m_r.data[63:0] != 64'(addr_of(m, line) + half) || m_r.last != (half == 1)) begin
          failures++; $display("FAIL: master %0d beat %0d data %h", m, beats[m], m_r.data[63:0]);
        end
        beats[m]++;
      end
    end
  end

  initial begin
    m_r_ready = '1;
    repeat (2) @(posedge clk);
    for (int m = 0; m < N; m++)
      for (int i = 0; i < PER; i++) begin
        logic [LINE_BITS-1:0] d;
        d = '0;
        d[63:0] = 64'(addr_of(m, i));
        d[DRAM_W +: 64] = 64'(addr_of(m, i) + 1);
        u_mem.write_line(addr_of(m, i), d);
      end
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      bit all;
      @(negedge clk);
      m_r_ready = N'($urandom);
      all = 1;
      for (int m = 0; m < N; m++) if (beats[m] < 2 * PER) all = 0;
      if (all) break;
    end
    for (int m = 0; m < N; m++) check(beats[m] == 2 * PER, "all beats returned");
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
