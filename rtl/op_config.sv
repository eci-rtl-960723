// op_config: operator configuration registers reached by ECI I/O accesses.
//
// An I/O write (OP_IO_WR) stores bits 63:0 of the payload in the register
// whose index is the message's line number; an I/O read (OP_IO_RD) returns the
// register's value.  Both are answered with one OP_IO_RSP carrying the same
// ID, one cycle later (the answer is held until taken).  Writes to the two ARM
// registers also give a one-cycle pulse that re-arms the SELECT or regex scan.
// The decoded registers are presented as one cfg_t record.  The paper says
// only that operators are configured over ECI (query constants, a regex);
// the register map in eci_pkg is this design's choice.
module op_config
  import eci_pkg::*;
#(
  parameter int NUM_REGS = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     io_valid,
  output logic     io_ready,
  input  eci_msg_t io_msg,
  output logic     io_rsp_valid,
  input  logic     io_rsp_ready,
  output eci_msg_t io_rsp_msg,
  output cfg_t     cfg,
  output logic     sel_arm,
  output logic     rx_arm
);
  logic [63:0] regs [NUM_REGS];
  logic        hit;
  int          ridx;

  assign ridx     = int'(io_msg.line[$clog2(NUM_REGS)-1:0]);
  assign hit      = (io_msg.line < NUM_REGS);
  assign io_ready = !io_rsp_valid || io_rsp_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_REGS; i++) regs[i] <= '0;
      io_rsp_valid <= 1'b0;
      io_rsp_msg   <= '0;
      sel_arm      <= 1'b0;
      rx_arm       <= 1'b0;
    end else begin
      sel_arm <= 1'b0;
      rx_arm  <= 1'b0;
      if (io_rsp_valid && io_rsp_ready) io_rsp_valid <= 1'b0;
      if (io_valid && io_ready) begin
        io_rsp_valid    <= 1'b1;
        io_rsp_msg      <= '0;
        io_rsp_msg.vc   <= VC_IO_RSP;
        io_rsp_msg.op   <= OP_IO_RSP;
        io_rsp_msg.id   <= io_msg.id;
        io_rsp_msg.line <= io_msg.line;
        if (io_msg.op == OP_IO_WR && hit) begin
          regs[ridx] <= io_msg.data[63:0];
          if (ridx == R_SEL_ARM) sel_arm <= 1'b1;
          if (ridx == R_RX_ARM)  rx_arm  <= 1'b1;
        end
        if (io_msg.op == OP_IO_RD && hit)
          io_rsp_msg.data[63:0] <= regs[ridx];
      end
    end
  end

  always_comb begin
    cfg              = '0;
    cfg.sel_base     = regs[R_SEL_BASE][ADDR_W-1:0];
    cfg.sel_rows     = regs[R_SEL_ROWS][31:0];
    cfg.sel_x        = regs[R_SEL_X];
    cfg.sel_y        = regs[R_SEL_Y];
    cfg.rx_base      = regs[R_RX_BASE][ADDR_W-1:0];
    cfg.rx_rows      = regs[R_RX_ROWS][31:0];
    cfg.rx_prog.len      = regs[R_RX_CTRL][4:0];
    cfg.rx_prog.anchored = regs[R_RX_CTRL][8];
    for (int i = 0; i < RX_POS; i++) begin
      cfg.rx_prog.pos[i].lo   = regs[R_RX_POS0 + i][7:0];
      cfg.rx_prog.pos[i].hi   = regs[R_RX_POS0 + i][15:8];
      cfg.rx_prog.pos[i].plus = regs[R_RX_POS0 + i][16];
    end
    cfg.kvs_base     = regs[R_KVS_BASE][ADDR_W-1:0];
    cfg.kvs_mask     = regs[R_KVS_MASK][31:0];
  end

  initial assert (NUM_REGS >= 34 && (NUM_REGS & (NUM_REGS - 1)) == 0);
endmodule
