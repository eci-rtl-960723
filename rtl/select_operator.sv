// select_operator: SELECT pushdown behind the ECI read path.
//
// CPU cores read the operator's FIFO address; every read is one request
// {ID, line number} and gets exactly one 128-byte line back.  The first read
// after the operator is armed starts a scan of the table (cfg base, row
// count): rows stream from DRAM through the DMA engine into select_alu, one
// row per cycle when data is available, and rows that satisfy the predicate
// enter the result FIFO.  Pending reads (queued in the request FIFO) are
// answered first come first served with the next result row, so several cores
// can drain the scan concurrently and see interleaved results.  Once the
// table is scanned and every result handed out the operator is DONE and
// answers each further read with an all-zero line (which can never be a
// matching row since a > X fails for a = 0) until `arm` re-arms it.
// A response leaves in the cycle its request and its row are both at the
// FIFO heads.  Scan-on-read, FIFO results and first-come-first-served order
// follow the paper; the end marker and re-arming are this design's choices.
module select_operator
  import eci_pkg::*;
#(
  parameter int REQ_DEPTH = 64,
  parameter int OUT_DEPTH = 32,
  parameter int BUF_LINES = 32,
  parameter int AXI_ID    = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ADDR_W-1:0]    base,
  input  logic [31:0]          rows,
  input  logic [63:0]          x,
  input  logic [63:0]          y,
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
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_DONE} state_e;
  state_e state;

  logic                 q_valid, q_pop;
  op_req_t              q_head;
  logic                 dma_start, dma_busy, line_valid, line_ready, match;
  logic [LINE_BITS-1:0] line_data, res_data;
  logic                 res_push, res_push_ready, res_valid, res_pop;

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

  select_alu u_alu (.row(line_data), .x, .y, .match);

  assign res_push   = line_valid && match;
  assign line_ready = !match || res_push_ready;

  sync_fifo #(.T(logic [LINE_BITS-1:0]), .DEPTH(OUT_DEPTH)) u_res_q (
    .clk, .rst_n, .in_valid(res_push), .in_ready(res_push_ready), .in_data(line_data),
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
        S_SCAN: if (!dma_start && !dma_busy && !line_valid && !res_valid) state <= S_DONE;
        S_DONE: if (arm) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
