// dma_engine: streams consecutive 128-byte lines out of FPGA DRAM.
//
// A job is started with a one-cycle `start` pulse naming a byte address
// (`base`, line aligned) and a line count.  The engine then issues one read
// burst of BEATS 512-bit beats per line on the AXI read-address channel,
// glues the beats of each line together (first beat = low half), and hands
// whole lines out on a valid/ready stream in address order.  A read is only
// issued when the line buffer has room for it, counting the reads still in
// flight, so the read-data channel is never stalled.  `busy` stays high until
// the last line has arrived from DRAM.  A line count of 0 finishes at once.
// The paper gives the DMA block and the 512-bit DRAM interface; one burst per
// line and the buffer size are this design's choices.
module dma_engine
  import eci_pkg::*;
#(
  parameter int BUF_LINES = 32,
  parameter int AXI_ID    = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ADDR_W-1:0]    base,
  input  logic [31:0]          nlines,
  output logic                 busy,
  // DRAM read port
  output logic                 ar_valid,
  input  logic                 ar_ready,
  output axi_ar_t              ar,
  input  logic                 r_valid,
  output logic                 r_ready,
  input  axi_r_t               r,
  // line stream
  output logic                 line_valid,
  input  logic                 line_ready,
  output logic [LINE_BITS-1:0] line_data
);
  localparam int CW = $clog2(BUF_LINES + 1);

  logic [ADDR_W-1:0]          base_q;
  logic [31:0]                n_q, issued, received;
  logic [$clog2(BEATS)-1:0]   beat;
  logic [LINE_BITS-DRAM_W-1:0] low;
  logic [CW-1:0]              buf_cnt;
  logic [CW:0]                inflight;
  logic                       push;
  logic [LINE_BITS-1:0]       push_line;

  assign busy     = (received != n_q);
  assign inflight = (CW+1)'(issued - received);
  assign ar_valid = (issued != n_q) && (inflight + buf_cnt < BUF_LINES);
  assign ar.id    = AXI_ID_W'(AXI_ID);
  assign ar.addr  = base_q + (ADDR_W'(issued) << OFFS_W);
  assign ar.len   = 8'(BEATS - 1);
  assign r_ready  = 1'b1;
  assign push     = r_valid && (beat == $clog2(BEATS)'(BEATS - 1));
  assign push_line = {r.data, low};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q   <= '0;
      n_q      <= '0;
      issued   <= '0;
      received <= '0;
      beat     <= '0;
      low      <= '0;
    end else begin
      if (start && !busy) begin
        base_q   <= base;
        n_q      <= nlines;
        issued   <= '0;
        received <= '0;
      end else begin
        if (ar_valid && ar_ready) issued <= issued + 1;
        if (push) received <= received + 1;
      end
      if (r_valid) begin
        beat <= push ? '0 : beat + 1'b1;
        if (!push) low <= r.data[LINE_BITS-DRAM_W-1:0];
      end
    end
  end

  sync_fifo #(.T(logic [LINE_BITS-1:0]), .DEPTH(BUF_LINES)) u_buf (
    .clk, .rst_n,
    .in_valid(push), .in_ready(), .in_data(push_line),
    .out_valid(line_valid), .out_ready(line_ready), .out_data(line_data),
    .count(buf_cnt)
  );

  initial assert (BEATS == 2);  // beat gluing above assumes two beats
  assert property (@(posedge clk) disable iff (!rst_n) r_valid |-> r.id == AXI_ID_W'(AXI_ID) || AXI_ID == 0);
endmodule
