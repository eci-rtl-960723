// eci_home_stateless: the FPGA home node reduced to the read-only subset.
//
// When the CPU only reads FPGA-homed lines and the FPGA caches none of them,
// every line stays in the joint state "I*" (invalid at home, shared or
// invalid at the remote) and the home node needs no directory at all:
//  * Read-Shared (upgrade to shared) is turned into an operator request
//    {ID, line number}; the operator's result comes back as a response with
//    the 128-byte line as payload, carrying the same ID and line number.
//  * Voluntary downgrades to shared or invalid need no reply and are dropped.
//  * Everything else the CPU could send (Read-Exclusive, upgrade to
//    exclusive, a dirty downgrade, a home-initiated downgrade message) is
//    outside the subset: it is counted, flagged (sticky `proto_err`) and
//    dropped.
// Requests pass through in one cycle when the dispatcher is ready; responses
// are combinational from the operator side.  Behaviour follows the paper's
// specialization argument; error handling is this design's choice.
module eci_home_stateless
  import eci_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // coherence requests from VC layer
  input  logic        req_valid,
  output logic        req_ready,
  input  eci_msg_t    req_msg,
  // to the operators
  output logic        op_req_valid,
  input  logic        op_req_ready,
  output op_req_t     op_req,
  // from the operators
  input  logic        op_rsp_valid,
  output logic        op_rsp_ready,
  input  op_rsp_t     op_rsp,
  // responses to VC layer
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output eci_msg_t    rsp_msg,
  // statistics
  output logic        proto_err,
  output logic [31:0] err_cnt,
  output logic [31:0] vdown_cnt,
  output logic [31:0] read_cnt
);
  logic is_read, is_vdown, is_bad;

  always_comb begin
    is_read  = (req_msg.op == OP_READ_SHARED);
    is_vdown = (req_msg.op == OP_VDOWN_S || req_msg.op == OP_VDOWN_I) && !req_msg.dirty;
    is_bad   = !is_read && !is_vdown;
  end

  assign op_req_valid = req_valid && is_read;
  assign op_req.id    = req_msg.id;
  assign op_req.line  = req_msg.line;
  assign req_ready    = is_read ? op_req_ready : 1'b1;

  always_comb begin
    rsp_msg       = '0;
    rsp_msg.vc    = op_rsp.line[0] ? VC_RSPD_O : VC_RSPD_E;
    rsp_msg.op    = OP_RSP_DATA;
    rsp_msg.id    = op_rsp.id;
    rsp_msg.line  = op_rsp.line;
    rsp_msg.data  = op_rsp.data;
  end
  assign rsp_valid    = op_rsp_valid;
  assign op_rsp_ready = rsp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      proto_err <= 1'b0;
      err_cnt   <= '0;
      vdown_cnt <= '0;
      read_cnt  <= '0;
    end else if (req_valid && req_ready) begin
      if (is_read)  read_cnt  <= read_cnt + 1;
      if (is_vdown) vdown_cnt <= vdown_cnt + 1;
      if (is_bad) begin
        err_cnt   <= err_cnt + 1;
        proto_err <= 1'b1;
      end
    end
  end
endmodule
