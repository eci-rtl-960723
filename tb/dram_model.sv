// dram_model: behavioural model of the FPGA DRAM controller's read port
// (testbench only, not synthesizable).
//
// Accepts AXI read bursts on the address channel and returns their beats in
// issue order after LAT cycles, one 512-bit beat per cycle, each beat tagged
// with its request's ID.  Memory is sparse; unwritten beats read as zero.
// Testbenches fill it with write_line().  With READY_PCT < 100 the address
// channel is randomly back-pressured.  `reads` counts accepted bursts.
module dram_model
  import eci_pkg::*;
#(
  parameter int LAT       = 30,
  parameter int READY_PCT = 100
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    ar_valid,
  output logic    ar_ready,
  input  axi_ar_t ar,
  output logic    r_valid,
  input  logic    r_ready,
  output axi_r_t  r
);
  typedef struct {
    longint addr;
    int     id;
    int     len;
    longint due;
  } pend_t;

  logic [DRAM_W-1:0] mem [longint];
  pend_t             q [$];
  longint            cyc;
  int                beat;
  int                reads;

  task automatic write_line(input longint addr, input logic [LINE_BITS-1:0] d);
    mem[addr >> 6]       = d[DRAM_W-1:0];
    mem[(addr >> 6) + 1] = d[LINE_BITS-1:DRAM_W];
  endtask

  function automatic logic [DRAM_W-1:0] rd(longint a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar_ready <= 1'b0;
      r_valid  <= 1'b0;
      r        <= '0;
      cyc      = 0;
      beat     = 0;
      reads    = 0;
      q.delete();
    end else begin
      cyc++;
      if (ar_valid && ar_ready) begin
        pend_t p;
        p.addr = longint'(ar.addr);
        p.id   = int'(ar.id);
        p.len  = int'(ar.len);
        p.due  = cyc + LAT;
        q.push_back(p);
        reads++;
      end
      ar_ready <= ($urandom_range(99) < READY_PCT);
      if (!r_valid || r_ready) begin
        if (q.size() > 0 && q[0].due <= cyc) begin
          r_valid <= 1'b1;
          r.id    <= AXI_ID_W'(q[0].id);
          r.data  <= rd((q[0].addr >> 6) + beat);
          r.last  <= (beat == q[0].len);
          if (beat == q[0].len) begin
            beat = 0;
            void'(q.pop_front());
          end else begin
            beat++;
          end
        end else begin
          r_valid <= 1'b0;
        end
      end
    end
  end
endmodule
