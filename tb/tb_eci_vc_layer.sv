// tb_eci_vc_layer: random messages on all 14 virtual channels.  Checks that
// requests and voluntary downgrades reach the home-agent stream in order per
// channel and nothing else does, that I/O requests reach the I/O port, that
// the other channels are counted and consumed, and that outgoing responses
// take the even/odd data-response channel given by the line parity while I/O
// responses take the I/O response channel.
module tb_eci_vc_layer;
  import eci_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rx_valid, rx_ready, coh_valid, coh_ready, io_valid, io_ready;
  logic rsp_valid, rsp_ready, io_rsp_valid, io_rsp_ready, tx_valid, tx_ready;
  eci_msg_t rx_msg, coh_msg, io_msg, rsp_msg, io_rsp_msg, tx_msg;
  logic [31:0] unexpected_cnt;
  int checks = 0, failures = 0;
  eci_msg_t exp_q [4][$];
  int n_unexp = 0, n_io = 0, n_coh = 0, n_tx = 0;

  eci_vc_layer dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int qidx(logic [3:0] vc);
    case (vc)
      VC_REQ_E: return 0;
      VC_REQ_O: return 1;
      VC_VDN_E: return 2;
      VC_VDN_O: return 3;
      default:  return -1;
    endcase
  endfunction

  // receive side checks
  always @(posedge clk) if (rst_n) begin
    if (coh_valid && coh_ready) begin
      int q;
      q = qidx(coh_msg.vc);
      checks++;
      if (q < 0 || exp_q[q].size() == 0 || coh_msg != exp_q[q][0]) begin
        failures++; $display("FAIL: coherence stream vc=%0d", coh_msg.vc);
      end else void'(exp_q[q].pop_front());
      n_coh++;
    end
    if (io_valid && io_ready) begin
      checks++;
      if (io_msg.vc != VC_IO_REQ) begin failures++; $display("FAIL: io vc"); end
      n_io++;
    end
    if (rx_valid && rx_ready) begin
      int q;
      q = qidx(rx_msg.vc);
      if (q >= 0) exp_q[q].push_back(rx_msg);
      else if (rx_msg.vc != VC_IO_REQ) n_unexp++;
    end
    if (tx_valid && tx_ready) begin
      checks++;
      if (tx_msg.op == OP_RSP_DATA) begin
        if (tx_msg.vc != (tx_msg.line[0] ? VC_RSPD_O : VC_RSPD_E)) begin failures++; $display("FAIL: rsp vc"); end
      end else if (tx_msg.vc != VC_IO_RSP) begin failures++; $display("FAIL: io rsp vc"); end
      n_tx++;
    end
  end

  initial begin
    rx_valid = 0; rx_msg = '0; coh_ready = 0; io_ready = 0;
    rsp_valid = 0; rsp_msg = '0; io_rsp_valid = 0; io_rsp_msg = '0; tx_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (!rx_valid || rx_ready) begin
        rx_valid       = ($urandom_range(1) == 0);
        rx_msg         = '0;
        rx_msg.vc      = 4'($urandom_range(13));
        rx_msg.id      = ID_W'($urandom);
        rx_msg.line    = LINE_W'({$urandom, $urandom});
        rx_msg.op      = OP_READ_SHARED;
        if (qidx(rx_msg.vc) >= 0) rx_msg.line[0] = rx_msg.vc[0];
        rx_msg.data[31:0] = $urandom;
      end
      coh_ready = ($urandom_range(2) != 0);
      io_ready  = ($urandom_range(1) == 0);
      if (!rsp_valid || rsp_ready) begin
        rsp_valid    = ($urandom_range(1) == 0);
        rsp_msg      = '0;
        rsp_msg.op   = OP_RSP_DATA;
        rsp_msg.line = LINE_W'($urandom);
      end
      if (!io_rsp_valid || io_rsp_ready) begin
        io_rsp_valid  = ($urandom_range(3) == 0);
        io_rsp_msg    = '0;
        io_rsp_msg.op = OP_IO_RSP;
      end
      tx_ready = ($urandom_range(3) != 0);
    end
    @(negedge clk);
    rx_valid = 0; coh_ready = 1; rsp_valid = 0; io_rsp_valid = 0;
    repeat (20) @(posedge clk);
    for (int q = 0; q < 4; q++) check(exp_q[q].size() == 0, "all coherence messages delivered");
    check(unexpected_cnt == 32'(n_unexp), "unexpected count");
    check(n_io > 0 && n_coh > 0 && n_tx > 0 && n_unexp > 0, "all paths used");
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
