// axi_arbiter: shares one DRAM read port among N operators.
//
// Address channel: round-robin among masters with a pending read; the
// master's index becomes the AXI ID towards the DRAM controller (masters'
// own IDs are not kept, each master must accept its data in issue order).
// Read-data channel: each beat is routed to the master named by its ID.
// Only the read channels exist because every workload here is read-only.
// The paper names the block in its parallel-operator figure; the rest is
// this design's choice.
module axi_arbiter
  import eci_pkg::*;
#(
  parameter int N = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  // operator side
  input  logic    [N-1:0]     m_ar_valid,
  output logic    [N-1:0]     m_ar_ready,
  input  axi_ar_t [N-1:0]     m_ar,
  output logic    [N-1:0]     m_r_valid,
  input  logic    [N-1:0]     m_r_ready,
  output axi_r_t              m_r,
  // DRAM controller side
  output logic                s_ar_valid,
  input  logic                s_ar_ready,
  output axi_ar_t             s_ar,
  input  logic                s_r_valid,
  output logic                s_r_ready,
  input  axi_r_t              s_r
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic          any;
  logic [IW-1:0] idx;

  rr_arbiter #(.N(N)) u_rr (
    .clk, .rst_n, .req(m_ar_valid), .advance(s_ar_ready), .any, .idx
  );

  always_comb begin
    s_ar_valid = any;
    s_ar       = m_ar[idx];
    s_ar.id    = AXI_ID_W'(idx);
    m_ar_ready = '0;
    if (any && s_ar_ready) m_ar_ready[idx] = 1'b1;
  end

  always_comb begin
    m_r       = s_r;
    m_r.id    = '0;
    m_r_valid = '0;
    s_r_ready = 1'b0;
    if (s_r_valid && int'(s_r.id) < N) begin
      m_r_valid[IW'(s_r.id)] = 1'b1;
      s_r_ready              = m_r_ready[IW'(s_r.id)];
    end else if (s_r_valid) begin
      s_r_ready = 1'b1;  // beat for no master: drop it
    end
  end

  initial assert (N <= 2**AXI_ID_W);
endmodule
