// request_dispatcher: fans operator requests out to N parallel operators.
//
// Each request goes to one operator that can take it (out_ready high); among
// those the choice rotates round-robin so that work spreads evenly.  The
// transfer is combinational: in_ready is high in the cycle an operator is
// free, and exactly one out_valid follows in_valid.  The paper names this
// block in its parallel-operator figure; the round-robin policy is this
// design's choice.
module request_dispatcher
  import eci_pkg::*;
#(
  parameter int N = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  op_req_t        in_data,
  output logic [N-1:0]   out_valid,
  input  logic [N-1:0]   out_ready,
  output op_req_t        out_data
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic          any;
  logic [IW-1:0] idx;

  rr_arbiter #(.N(N)) u_rr (
    .clk, .rst_n, .req(out_ready), .advance(in_valid), .any, .idx
  );

  assign in_ready = any;
  assign out_data = in_data;
  always_comb begin
    out_valid = '0;
    if (in_valid && any) out_valid[idx] = 1'b1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(out_valid));
endmodule
