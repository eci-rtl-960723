// tb_request_dispatcher: a stream of requests to N sinks that are randomly
// busy.  Checks that every request reaches exactly one ready sink unchanged,
// that nothing is accepted while all sinks are busy, and that the load
// spreads round-robin when all sinks are free.
module tb_request_dispatcher;
  import eci_pkg::*;
  localparam int N = 6;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  op_req_t in_data, out_data;
  logic [N-1:0] out_valid, out_ready;
  int checks = 0, failures = 0;
  int hits [N];

  request_dispatcher #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; in_data = '0; out_ready = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(3) != 0);
      in_data   = op_req_t'({$urandom, $urandom});
      out_ready = (i < 1500) ? N'($urandom) : '1;
      #1;
      check(in_ready == (out_ready != 0), "in_ready");
      check($countones(out_valid) == ((in_valid && in_ready) ? 1 : 0), "one output");
      check((out_valid & ~out_ready) == 0, "only to ready sink");
      check(out_data == in_data, "data passes");
      if (i >= 1500) for (int k = 0; k < N; k++) if (out_valid[k]) hits[k]++;
    end
    for (int k = 0; k < N; k++) check(hits[k] > 0 && hits[k] >= hits[0] - 1 && hits[k] <= hits[0] + 1, "round robin balance");
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
