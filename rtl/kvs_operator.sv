// kvs_operator: one pointer-chasing lookup unit of the key-value store.
//
// The store is a hash table with separate chaining in FPGA DRAM.  The bucket
// array (at `bucket_base`) holds one 8-byte head pointer per bucket, sixteen
// to a 128-byte line; each list entry is one 128-byte line laid out as
// 8-byte key (bytes 0-7), 112-byte value, 8-byte next pointer (bytes
// 120-127), pointers being byte addresses and 0 ending a chain.
// A lookup request carries the key in the low LINE_W-2 bits of its line
// number (the top two bits select the operator).  The unit hashes the key
// (eci_pkg::kvs_hash, masked to the bucket count), reads the bucket's line,
// then reads entries one by one along the chain until the key matches, and
// answers with the matching entry, or an all-zero line if the chain ends.
// One lookup at a time; each step is one DRAM line read (two 512-bit beats),
// so a chain of length L costs L+1 dependent DRAM round trips.  Parallelism
// comes from many units behind the request dispatcher.  Chaining, the entry
// layout and key-in-address follow the paper; the hash, bucket packing and
// miss answer are this design's choices.
module kvs_operator
  import eci_pkg::*;
#(
  parameter int AXI_ID = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] bucket_base,
  input  logic [31:0]       bucket_mask,
  input  logic              req_valid,
  output logic              req_ready,
  input  op_req_t           req,
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output op_rsp_t           rsp,
  output logic              ar_valid,
  input  logic              ar_ready,
  output axi_ar_t           ar,
  input  logic              r_valid,
  output logic              r_ready,
  input  axi_r_t            r,
  output logic [31:0]       hops_cnt    // entry reads done so far
);
  typedef enum logic [1:0] {K_IDLE, K_BUCKET, K_ENTRY, K_RESP} state_e;
  state_e state;

  op_req_t              cur;
  logic [63:0]          key;
  logic [3:0]           slot;
  logic                 dma_start, dma_busy, line_valid;
  logic [ADDR_W-1:0]    dma_addr;
  logic [LINE_BITS-1:0] line_data, result;
  logic [63:0]          head, e_key, e_next;

  assign key       = 64'(cur.line[LINE_W-3:0]);
  assign head      = line_data[slot*64 +: 64];
  assign e_key     = line_data[63:0];
  assign e_next    = line_data[LINE_BITS-1 -: 64];
  assign req_ready = (state == K_IDLE);

  always_comb begin
    dma_start = 1'b0;
    dma_addr  = '0;
    if (state == K_IDLE && req_valid) begin
      dma_start = 1'b1;
      dma_addr  = bucket_base + (ADDR_W'(kvs_hash(64'(req.line[LINE_W-3:0]), bucket_mask) >> 4) << OFFS_W);
    end else if (state == K_BUCKET && line_valid && head != 0) begin
      dma_start = 1'b1;
      dma_addr  = head[ADDR_W-1:0];
    end else if (state == K_ENTRY && line_valid && e_key != key && e_next != 0) begin
      dma_start = 1'b1;
      dma_addr  = e_next[ADDR_W-1:0];
    end
  end

  dma_engine #(.BUF_LINES(1), .AXI_ID(AXI_ID)) u_dma (
    .clk, .rst_n, .start(dma_start), .base(dma_addr), .nlines(32'd1), .busy(dma_busy),
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .line_valid, .line_ready(state == K_BUCKET || state == K_ENTRY), .line_data
  );

  assign rsp_valid = (state == K_RESP);
  assign rsp.id    = cur.id;
  assign rsp.line  = cur.line;
  assign rsp.data  = result;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= K_IDLE;
      cur      <= '0;
      slot     <= '0;
      result   <= '0;
      hops_cnt <= '0;
    end else begin
      unique case (state)
        K_IDLE: if (req_valid) begin
          cur    <= req;
          slot   <= 4'(kvs_hash(64'(req.line[LINE_W-3:0]), bucket_mask));
          state  <= K_BUCKET;
        end
        K_BUCKET: if (line_valid) begin
          if (head == 0) begin
            result <= '0;
            state  <= K_RESP;
          end else begin
            state  <= K_ENTRY;
          end
        end
        K_ENTRY: if (line_valid) begin
          hops_cnt <= hops_cnt + 1;
          if (e_key == key) begin
            result <= line_data;
            state  <= K_RESP;
          end else if (e_next == 0) begin
            result <= '0;
            state  <= K_RESP;
          end
        end
        K_RESP: if (rsp_ready) state <= K_IDLE;
        default: state <= K_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) dma_start |-> !dma_busy);
endmodule
