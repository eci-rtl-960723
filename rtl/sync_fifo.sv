// sync_fifo: single-clock FIFO for the operator request and result queues.
//
// A circular buffer of DEPTH entries of type T with valid/ready on both sides:
// an entry is written when in_valid && in_ready and leaves when
// out_valid && out_ready.  out_data shows the oldest entry combinationally
// (first-word fall-through), so a written entry can be read the next cycle.
// A full FIFO accepts a write in the same cycle as a read.  The paper only
// draws these queues; depth, width and handshake are this design's choices.
module sync_fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  T                           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output T                           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T              mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic          do_wr, do_rd;

  assign out_valid = (count != 0);
  assign in_ready  = (count < DEPTH) || out_ready;
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= inc(wr_ptr);
      if (do_rd) rd_ptr <= inc(rd_ptr);
      count <= count + (do_wr ? 1'b1 : 1'b0) - (do_rd ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= DEPTH);
endmodule
