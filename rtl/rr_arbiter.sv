// rr_arbiter: round-robin choice of one requester out of N.
//
// Combinational grant (one-hot) and index for the request vector; the search
// starts one past the last winner, which is updated when `advance` is high
// (the caller asserts it when the granted transfer actually happens).  Used by
// the dispatcher, the response arbiter, the AXI arbiter and the VC layer.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 req,
  input  logic                         advance,
  output logic                         any,
  output logic [(N>1?$clog2(N):1)-1:0] idx
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;
  logic [IW:0]   c;

  always_comb begin
    any = 1'b0;
    idx = '0;
    c   = '0;
    for (int k = 1; k <= N; k++) begin
      c = (IW+1)'(last) + (IW+1)'(k);
      if (c >= (IW+1)'(N)) c = c - (IW+1)'(N);
      if (!any && req[c]) begin
        any = 1'b1;
        idx = c[IW-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                last <= IW'(N - 1);
    else if (advance && any)   last <= idx;
  end
endmodule
