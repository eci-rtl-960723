// regex_engine: one regular-expression matcher, one character per cycle.
//
// The pattern is a sequence of up to RX_POS positions, each a character range
// [lo, hi] (a literal has lo = hi, '.' is 1..255) that may carry a
// one-or-more repeat ('+').  Matching is the bit-parallel shift-and NFA: bit i
// of the state vector D is set when the text read so far ends with a match of
// positions 0..i.  Per character c:
//     M[i]  = lo_i <= c <= hi_i              (for i < len)
//     D'    = ((D << 1) | inject) & M  |  (D & M & plus)
// with inject = 1 at every character (search anywhere in the string) or only
// at the first character when the pattern is anchored.  The string field is
// STR_BYTES bytes, byte 0 first, ended early by a NUL byte.
// A job starts with `start` (string and program are sampled then); `done`
// rises and stays high, with `match`, until `ack`.  The engine stops at the
// first character that completes a match, at the end of the string, or, for
// an anchored pattern, as soon as no partial match is alive; so a string of n
// characters takes at most n cycles.  The paper uses an external open-source
// engine whose insides it does not give; this shift-and matcher is this
// design's simple stand-in with the paper's string size and rate.
module regex_engine
  import eci_pkg::*;
#(
  parameter int STR_BYTES = 62
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [STR_BYTES*8-1:0] str,
  input  rx_prog_t               prog,
  output logic                   busy,
  output logic                   done,
  output logic                   match,
  input  logic                   ack,
  output logic [7:0]             cycles   // characters consumed by the last job
);
  logic [STR_BYTES*8-1:0] s_q;
  rx_prog_t               p_q;
  logic [RX_POS-1:0]      d, d_next, m;
  logic [7:0]             pos;
  logic [7:0]             c;
  logic                   hit, dead, last;

  assign c = s_q[pos*8 +: 8];

  always_comb begin
    for (int i = 0; i < RX_POS; i++)
      m[i] = (i < int'(p_q.len)) && (c >= p_q.pos[i].lo) && (c <= p_q.pos[i].hi);
    d_next = ((d << 1) | RX_POS'(!p_q.anchored || pos == 0)) & m;
    for (int i = 0; i < RX_POS; i++)
      if (d[i] && m[i] && p_q.pos[i].plus) d_next[i] = 1'b1;
    hit  = (p_q.len != 0) && d_next[p_q.len - 1];
    dead = p_q.anchored && (d_next == '0);
    last = (pos == 8'(STR_BYTES - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      match  <= 1'b0;
      d      <= '0;
      pos    <= '0;
      s_q    <= '0;
      p_q    <= '0;
      cycles <= '0;
    end else if (start && !busy && !done) begin
      busy  <= 1'b1;
      s_q   <= str;
      p_q   <= prog;
      d     <= '0;
      pos   <= '0;
      match <= 1'b0;
    end else if (busy) begin
      if (c == 8'd0 || p_q.len == 0) begin      // end of string: no match
        busy   <= 1'b0;
        done   <= 1'b1;
        cycles <= pos;
      end else begin
        d   <= d_next;
        pos <= pos + 1'b1;
        if (hit || dead || last) begin
          busy   <= 1'b0;
          done   <= 1'b1;
          match  <= hit;
          cycles <= pos + 1'b1;
        end
      end
    end else if (done && ack) begin
      done <= 1'b0;
    end
  end
endmodule
