// response_arbiter: merges the result streams of N operators into one.
//
// Round-robin among the valid inputs; the selected input is passed through
// combinationally and acknowledged when the output is taken.  The paper names
// this block in its parallel-operator figure; round-robin is this design's
// choice.
module response_arbiter
  import eci_pkg::*;
#(
  parameter int N = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic    [N-1:0]     in_valid,
  output logic    [N-1:0]     in_ready,
  input  op_rsp_t [N-1:0]     in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output op_rsp_t             out_data
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic          any;
  logic [IW-1:0] idx;

  rr_arbiter #(.N(N)) u_rr (
    .clk, .rst_n, .req(in_valid), .advance(out_ready), .any, .idx
  );

  assign out_valid = any;
  assign out_data  = in_data[idx];
  always_comb begin
    in_ready = '0;
    if (any && out_ready) in_ready[idx] = 1'b1;
  end
endmodule
