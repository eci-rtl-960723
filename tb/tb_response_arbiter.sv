// tb_response_arbiter: N sources each send a numbered sequence of responses
// with random gaps while the sink randomly stalls.  Checks that every
// response arrives exactly once, in order per source, and that a source
// holding its response is never starved (fairness: all finish).
module tb_response_arbiter;
  import eci_pkg::*;
  localparam int N = 5, PER = 200;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready;
  op_rsp_t [N-1:0] in_data;
  logic out_valid, out_ready;
  op_rsp_t out_data;
  int checks = 0, failures = 0;
  int sent [N], got [N];

  response_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always_comb
    for (int k = 0; k < N; k++) begin
      in_data[k]      = '0;
      in_data[k].id   = ID_W'(k);
      in_data[k].line = LINE_W'(sent[k]);
      in_data[k].data = {LINE_BITS/32{32'(k * 1000 + sent[k])}};
    end

  initial begin
    in_valid = '0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (1) begin
      bit all;
      @(negedge clk);
      all = 1;
      for (int k = 0; k < N; k++) begin
        if (!in_valid[k] && sent[k] < PER) in_valid[k] = ($urandom_range(1) == 0);
        if (got[k] < PER) all = 0;
      end
      if (all) break;
      out_ready = ($urandom_range(3) != 0);
      #1;
      check(out_valid == (in_valid != 0), "out_valid");
      check(in_ready == ((out_valid && out_ready) ? (N'(1) << out_data.id) : '0), "ready to winner only");
      if (out_valid && out_ready) begin
        int k;
        k = int'(out_data.id);
        check(in_valid[k], "winner was valid");
        check(int'(out_data.line) == got[k], "order per source");
        check(out_data.data[31:0] == 32'(k * 1000 + got[k]), "payload");
        got[k]++;
      end
      @(posedge clk);
      for (int k = 0; k < N; k++) if (in_valid[k] && in_ready[k]) begin in_valid[k] = 0; sent[k]++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
