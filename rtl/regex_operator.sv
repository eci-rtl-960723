// regex_operator: regular-expression filter scan behind the ECI read path.
//
// Same request protocol as select_operator: the first read after arming
// starts a scan of the table (cfg base, row count), every read is answered
// with the next matching row from the result FIFO, and after the scan an
// all-zero line marks the end until `arm` re-arms the operator.
// Rows stream from DRAM and each row is handed, in the cycle it arrives, to an
// idle engine (round-robin among idle ones); the operator keeps the whole
// row next to the engine.  An engine that finds a match offers its row to the
// result FIFO (round-robin among finished engines); a mismatch frees the
// engine at once.  With NUM_ENG engines and one character per cycle per
// engine, the scan keeps up with one row per cycle as long as rows end
// within NUM_ENG characters on average.  Results leave in completion order.
// The string field is bytes 0..STR_BYTES-1 of the row.  Engine count, string
// size and FIFO results follow the paper; the rest is this design's choice.
module regex_operator
  import eci_pkg::*;
#(
  parameter int NUM_ENG   = 48,
  parameter int STR_BYTES = 62,
  parameter int REQ_DEPTH = 64,
  parameter int OUT_DEPTH = 32,
  parameter int BUF_LINES = 32,
  parameter int AXI_ID    = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ADDR_W-1:0]    base,
  input  logic [31:0]          rows,
  input  rx_prog_t             prog,
  input  logic                 arm,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  op_req_t              req,
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output op_rsp_t              rsp,
  output logic                 ar_valid,
  input  logic                 ar_ready,
  output axi_ar_t              ar,
  input  logic                 r_valid,
  output logic                 r_ready,
  input  axi_r_t               r,
  output logic [31:0]          scanned_cnt,
  output logic [31:0]          matched_cnt,
  output logic                 done
);
  localparam int EW = (NUM_ENG > 1) ? $clog2(NUM_ENG) : 1;
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_DONE} state_e;
  state_e state;

  logic                 q_valid, q_pop;
  op_req_t              q_head;
  logic                 dma_start, dma_busy, line_valid, line_ready;
  logic [LINE_BITS-1:0] line_data, res_data;
  logic                 res_push, res_push_ready, res_valid, res_pop;

  logic [NUM_ENG-1:0]   e_busy, e_done, e_match, e_start, e_ack, e_idle, e_hit;
  logic [LINE_BITS-1:0] e_row [NUM_ENG];
  logic                 idle_any, hit_any;
  logic [EW-1:0]        idle_idx, hit_idx;

  sync_fifo #(.T(op_req_t), .DEPTH(REQ_DEPTH)) u_req_q (
    .clk, .rst_n, .in_valid(req_valid), .in_ready(req_ready), .in_data(req),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_head), .count()
  );

  assign dma_start = (state == S_IDLE) && q_valid;

  dma_engine #(.BUF_LINES(BUF_LINES), .AXI_ID(AXI_ID)) u_dma (
    .clk, .rst_n, .start(dma_start), .base, .nlines(rows), .busy(dma_busy),
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .line_valid, .line_ready, .line_data
  );

  // hand rows to idle engines
  assign e_idle = ~e_busy & ~e_done;
  rr_arbiter #(.N(NUM_ENG)) u_dist (
    .clk, .rst_n, .req(e_idle), .advance(line_valid), .any(idle_any), .idx(idle_idx)
  );
  assign line_ready = idle_any;
  always_comb begin
    e_start = '0;
    if (line_valid && idle_any) e_start[idle_idx] = 1'b1;
  end

  for (genvar e = 0; e < NUM_ENG; e++) begin : g_eng
    regex_engine #(.STR_BYTES(STR_BYTES)) u_eng (
      .clk, .rst_n, .start(e_start[e]), .str(line_data[STR_BYTES*8-1:0]), .prog,
      .busy(e_busy[e]), .done(e_done[e]), .match(e_match[e]), .ack(e_ack[e]),
      .cycles()
    );
    always_ff @(posedge clk) if (e_start[e]) e_row[e] <= line_data;
  end

  // collect matches
  assign e_hit = e_done & e_match;
  rr_arbiter #(.N(NUM_ENG)) u_coll (
    .clk, .rst_n, .req(e_hit), .advance(res_push_ready), .any(hit_any), .idx(hit_idx)
  );
  assign res_push = hit_any;
  always_comb begin
    e_ack = e_done & ~e_match;             // mismatches free the engine at once
    if (hit_any && res_push_ready) e_ack[hit_idx] = 1'b1;
  end

  sync_fifo #(.T(logic [LINE_BITS-1:0]), .DEPTH(OUT_DEPTH)) u_res_q (
    .clk, .rst_n, .in_valid(res_push), .in_ready(res_push_ready), .in_data(e_row[hit_idx]),
    .out_valid(res_valid), .out_ready(res_pop), .out_data(res_data), .count()
  );

  always_comb begin
    rsp_valid = q_valid && (res_valid || state == S_DONE);
    rsp.id    = q_head.id;
    rsp.line  = q_head.line;
    rsp.data  = (state == S_DONE) ? '0 : res_data;
  end
  assign q_pop   = rsp_valid && rsp_ready;
  assign res_pop = q_pop && state != S_DONE;
  assign done    = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      scanned_cnt <= '0;
      matched_cnt <= '0;
    end else begin
      if (line_valid && line_ready) scanned_cnt <= scanned_cnt + 1;
      if (res_push && res_push_ready) matched_cnt <= matched_cnt + 1;
      unique case (state)
        S_IDLE: if (dma_start) begin
          state       <= S_SCAN;
          scanned_cnt <= '0;
          matched_cnt <= '0;
        end
        S_SCAN: if (!dma_busy && !line_valid && e_idle == '1 && !res_valid) state <= S_DONE;
        S_DONE: if (arm) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
