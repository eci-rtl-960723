// tb_sync_fifo: random push/pop against a reference queue; checks order,
// data, the full/empty flags and the count, and a simultaneous push and pop
// on a full FIFO.
module tb_sync_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [31:0] ref_q [$];

  sync_fifo #(.T(logic [31:0]), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      check(count == ref_q.size(), "count");
      check(out_valid == (ref_q.size() != 0), "out_valid");
      check(in_ready == (ref_q.size() < DEPTH || out_ready), "in_ready");
      if (out_valid) check(out_data == ref_q[0], "data order");
      in_valid  = ($urandom_range(99) < (i < 1000 ? 70 : 30));
      out_ready = ($urandom_range(99) < (i < 1000 ? 30 : 70));
      if (i >= 200 && i < 210) begin in_valid = 1; out_ready = (ref_q.size() == DEPTH); end
      in_data   = $urandom;
      #1;
      if (out_valid && out_ready) void'(ref_q.pop_front());
      if (in_valid && in_ready) ref_q.push_back(in_data);
    end
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
