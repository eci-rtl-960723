// tb_eci_home_stateless: a mix of Read-Shared, voluntary downgrades (clean
// and dirty), Read-Exclusive and upgrade requests.  Checks that only reads
// become operator requests (ID and line kept), that voluntary downgrades are
// absorbed without a reply, that the others raise the protocol error, and
// that operator results become data responses on the right parity channel.
module tb_eci_home_stateless;
  import eci_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, op_req_valid, op_req_ready, op_rsp_valid, op_rsp_ready;
  logic rsp_valid, rsp_ready, proto_err;
  eci_msg_t req_msg, rsp_msg;
  op_req_t op_req;
  op_rsp_t op_rsp;
  logic [31:0] err_cnt, vdown_cnt, read_cnt;
  int checks = 0, failures = 0;
  int n_read = 0, n_vd = 0, n_bad = 0;

  eci_home_stateless dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    req_valid = 0; req_msg = '0; op_req_ready = 0; op_rsp_valid = 0; op_rsp = '0; rsp_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!proto_err, "no error after reset");
    for (int i = 0; i < 2000; i++) begin
      int kind;
      @(negedge clk);
      kind = $urandom_range(9);
      req_valid     = 1;
      req_msg       = '0;
      req_msg.id    = ID_W'($urandom);
      req_msg.line  = LINE_W'({$urandom, $urandom});
      req_msg.op    = (kind < 6) ? OP_READ_SHARED : (kind == 6) ? OP_VDOWN_I : (kind == 7) ? OP_VDOWN_S :
                      (kind == 8) ? OP_READ_EXCL : OP_UPGRADE_SE;
      req_msg.dirty = (kind == 7) && ($urandom_range(3) == 0);
      op_req_ready  = ($urandom_range(1) == 0);
      op_rsp_valid  = ($urandom_range(1) == 0);
      op_rsp.id     = ID_W'($urandom);
      op_rsp.line   = LINE_W'({$urandom, $urandom});
      op_rsp.data   = {LINE_BITS/32{$urandom}};
      rsp_ready     = ($urandom_range(1) == 0);
      #1;
      if (req_msg.op == OP_READ_SHARED) begin
        check(op_req_valid && op_req.id == req_msg.id && op_req.line == req_msg.line, "read forwarded");
        check(req_ready == op_req_ready, "read back-pressure");
        if (op_req_ready) n_read++;
      end else begin
        check(!op_req_valid && req_ready, "non-read absorbed");
        if ((req_msg.op == OP_VDOWN_I || req_msg.op == OP_VDOWN_S) && !req_msg.dirty) n_vd++;
        else n_bad++;
      end
      check(rsp_valid == op_rsp_valid && op_rsp_ready == rsp_ready, "response handshake");
      check(rsp_msg.op == OP_RSP_DATA && rsp_msg.id == op_rsp.id && rsp_msg.line == op_rsp.line &&
            rsp_msg.data == op_rsp.data && rsp_msg.vc == (op_rsp.line[0] ? VC_RSPD_O : VC_RSPD_E), "response message");
    end
    @(negedge clk);
    req_valid = 0;
    @(negedge clk);
    check(read_cnt == 32'(n_read), "read count");
    check(vdown_cnt == 32'(n_vd), "voluntary downgrade count");
    check(err_cnt == 32'(n_bad) && proto_err, "protocol error count");
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
