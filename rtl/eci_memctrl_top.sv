// eci_memctrl_top: the FPGA as a coherent "smart memory controller".
//
// The CPU sees FPGA DRAM as memory of a second NUMA node.  Each coherent read
// of a 128-byte line it sends to the FPGA is not served from DRAM directly but
// by an operator that computes the line's contents from DRAM data; the result
// lands in the requesting core's cache like any other line.  Because the CPU
// only reads and the FPGA caches nothing, the FPGA home node keeps no
// per-line state (eci_home_stateless).
//
// Data path:  link -> eci_vc_layer -> eci_home_stateless -> address decode ->
//   region 0: select_operator            (SELECT ... WHERE a > X AND b < Y)
//   region 1: regex_operator             (NUM_REGEX_ENG matchers)
//   region 2: request_dispatcher -> NUM_KVS kvs_operator units (pointer chase)
//   region 3: unmapped, answered with an all-zero line
// -> response_arbiter -> home -> VC layer -> link.  All operators share the
// DRAM read port through axi_arbiter (IDs: 0 select, 1 regex, 2.. kvs).
// I/O writes and reads on the I/O virtual channel reach op_config, which
// holds the query constants, table locations and the regex program.
//
// The ECI link, transaction and physical layers and the DRAM controller are
// outside this module: its ports are the message streams towards the link
// layer and the DRAM controller's 512-bit read port.  Everything is in one
// clock domain (300 MHz in the paper's system).  Putting the three operators
// behind one home node, selected by address, is this design's choice; the
// paper runs them as separate experiments.
module eci_memctrl_top
  import eci_pkg::*;
#(
  parameter int NUM_KVS       = 32,
  parameter int NUM_REGEX_ENG = 48
) (
  input  logic        clk,
  input  logic        rst_n,
  // ECI messages from / to the link layer
  input  logic        rx_valid,
  output logic        rx_ready,
  input  eci_msg_t    rx_msg,
  output logic        tx_valid,
  input  logic        tx_ready,
  output eci_msg_t    tx_msg,
  // DRAM controller read port
  output logic        dram_ar_valid,
  input  logic        dram_ar_ready,
  output axi_ar_t     dram_ar,
  input  logic        dram_r_valid,
  output logic        dram_r_ready,
  input  axi_r_t      dram_r,
  // status
  output logic        proto_err,
  output logic [31:0] err_cnt,
  output logic [31:0] vdown_cnt,
  output logic [31:0] read_cnt,
  output logic [31:0] unexpected_cnt,
  output logic [31:0] sel_scanned,
  output logic [31:0] sel_matched,
  output logic [31:0] rx_scanned,
  output logic [31:0] rx_matched,
  output logic [31:0] kvs_hops
);
  localparam int NM = NUM_KVS + 2;   // DRAM masters
  localparam int NR = NUM_KVS + 3;   // response sources

  // ---------------- ECI front end ----------------
  logic     coh_valid, coh_ready, io_valid, io_ready, rsp_valid, rsp_ready;
  logic     io_rsp_valid, io_rsp_ready;
  eci_msg_t coh_msg, io_msg, rsp_msg, io_rsp_msg;
  logic     op_req_valid, op_req_ready, op_rsp_valid, op_rsp_ready;
  op_req_t  op_req;
  op_rsp_t  op_rsp;
  cfg_t     cfg;
  logic     sel_arm, rx_arm;

  eci_vc_layer u_vc (
    .clk, .rst_n, .rx_valid, .rx_ready, .rx_msg,
    .coh_valid, .coh_ready, .coh_msg, .io_valid, .io_ready, .io_msg,
    .rsp_valid, .rsp_ready, .rsp_msg, .io_rsp_valid, .io_rsp_ready, .io_rsp_msg,
    .tx_valid, .tx_ready, .tx_msg, .unexpected_cnt
  );

  eci_home_stateless u_home (
    .clk, .rst_n, .req_valid(coh_valid), .req_ready(coh_ready), .req_msg(coh_msg),
    .op_req_valid, .op_req_ready, .op_req, .op_rsp_valid, .op_rsp_ready, .op_rsp,
    .rsp_valid, .rsp_ready, .rsp_msg, .proto_err, .err_cnt, .vdown_cnt, .read_cnt
  );

  op_config u_cfg (
    .clk, .rst_n, .io_valid, .io_ready, .io_msg, .io_rsp_valid, .io_rsp_ready,
    .io_rsp_msg, .cfg, .sel_arm, .rx_arm
  );

  // ---------------- address decode ----------------
  logic       sel_req_valid, sel_req_ready, rx_req_valid, rx_req_ready;
  logic       kvs_req_valid, kvs_req_ready, nul_req_ready;
  logic [1:0] region;

  assign region = region_of(op_req.line);
  always_comb begin
    sel_req_valid = op_req_valid && region == REG_SELECT;
    rx_req_valid  = op_req_valid && region == REG_REGEX;
    kvs_req_valid = op_req_valid && region == REG_KVS;
    unique case (region)
      REG_SELECT: op_req_ready = sel_req_ready;
      REG_REGEX:  op_req_ready = rx_req_ready;
      REG_KVS:    op_req_ready = kvs_req_ready;
      default:    op_req_ready = nul_req_ready;
    endcase
  end

  // ---------------- operators ----------------
  logic    [NR-1:0] r_valid, r_ready;
  op_rsp_t [NR-1:0] r_data;
  logic    [NM-1:0] m_ar_valid, m_ar_ready, m_r_valid, m_r_ready;
  axi_ar_t [NM-1:0] m_ar;
  axi_r_t           m_r;

  select_operator #(.AXI_ID(0)) u_sel (
    .clk, .rst_n, .base(cfg.sel_base), .rows(cfg.sel_rows), .x(cfg.sel_x), .y(cfg.sel_y),
    .arm(sel_arm), .req_valid(sel_req_valid), .req_ready(sel_req_ready), .req(op_req),
    .rsp_valid(r_valid[0]), .rsp_ready(r_ready[0]), .rsp(r_data[0]),
    .ar_valid(m_ar_valid[0]), .ar_ready(m_ar_ready[0]), .ar(m_ar[0]),
    .r_valid(m_r_valid[0]), .r_ready(m_r_ready[0]), .r(m_r),
    .scanned_cnt(sel_scanned), .matched_cnt(sel_matched), .done()
  );

  regex_operator #(.NUM_ENG(NUM_REGEX_ENG), .AXI_ID(0)) u_rx (
    .clk, .rst_n, .base(cfg.rx_base), .rows(cfg.rx_rows), .prog(cfg.rx_prog),
    .arm(rx_arm), .req_valid(rx_req_valid), .req_ready(rx_req_ready), .req(op_req),
    .rsp_valid(r_valid[1]), .rsp_ready(r_ready[1]), .rsp(r_data[1]),
    .ar_valid(m_ar_valid[1]), .ar_ready(m_ar_ready[1]), .ar(m_ar[1]),
    .r_valid(m_r_valid[1]), .r_ready(m_r_ready[1]), .r(m_r),
    .scanned_cnt(rx_scanned), .matched_cnt(rx_matched), .done()
  );

  logic    [NUM_KVS-1:0] k_valid, k_ready;
  op_req_t               k_req;
  logic    [31:0]        k_hops [NUM_KVS];

  request_dispatcher #(.N(NUM_KVS)) u_disp (
    .clk, .rst_n, .in_valid(kvs_req_valid), .in_ready(kvs_req_ready), .in_data(op_req),
    .out_valid(k_valid), .out_ready(k_ready), .out_data(k_req)
  );

  for (genvar k = 0; k < NUM_KVS; k++) begin : g_kvs
    kvs_operator #(.AXI_ID(0)) u_kvs (
      .clk, .rst_n, .bucket_base(cfg.kvs_base), .bucket_mask(cfg.kvs_mask),
      .req_valid(k_valid[k]), .req_ready(k_ready[k]), .req(k_req),
      .rsp_valid(r_valid[2+k]), .rsp_ready(r_ready[2+k]), .rsp(r_data[2+k]),
      .ar_valid(m_ar_valid[2+k]), .ar_ready(m_ar_ready[2+k]), .ar(m_ar[2+k]),
      .r_valid(m_r_valid[2+k]), .r_ready(m_r_ready[2+k]), .r(m_r),
      .hops_cnt(k_hops[k])
    );
  end

  always_comb begin
    kvs_hops = '0;
    for (int k = 0; k < NUM_KVS; k++) kvs_hops += k_hops[k];
  end

  // unmapped region: one-entry responder with an all-zero line
  logic    nul_valid;
  op_req_t nul_req;
  assign nul_req_ready = !nul_valid;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nul_valid <= 1'b0;
      nul_req   <= '0;
    end else if (op_req_valid && region == REG_NONE && !nul_valid) begin
      nul_valid <= 1'b1;
      nul_req   <= op_req;
    end else if (r_ready[NR-1]) begin
      nul_valid <= 1'b0;
    end
  end
  assign r_valid[NR-1]     = nul_valid;
  assign r_data[NR-1].id   = nul_req.id;
  assign r_data[NR-1].line = nul_req.line;
  assign r_data[NR-1].data = '0;

  // ---------------- shared back end ----------------
  response_arbiter #(.N(NR)) u_rsp_arb (
    .clk, .rst_n, .in_valid(r_valid), .in_ready(r_ready), .in_data(r_data),
    .out_valid(op_rsp_valid), .out_ready(op_rsp_ready), .out_data(op_rsp)
  );

  axi_arbiter #(.N(NM)) u_axi_arb (
    .clk, .rst_n, .m_ar_valid, .m_ar_ready, .m_ar, .m_r_valid, .m_r_ready, .m_r,
    .s_ar_valid(dram_ar_valid), .s_ar_ready(dram_ar_ready), .s_ar(dram_ar),
    .s_r_valid(dram_r_valid), .s_r_ready(dram_r_ready), .s_r(dram_r)
  );
endmodule
