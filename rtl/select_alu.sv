// select_alu: the SELECT predicate  S.a > X AND S.b < Y  on one row.
//
// A row is one 128-byte cache line.  Attribute a is the unsigned 64-bit
// little-endian word in bytes 0-7 and b the one in bytes 8-15; the rest of
// the row is payload.  Purely combinational.  The predicate is the paper's;
// the field positions and the unsigned 64-bit type are this design's choice.
module select_alu
  import eci_pkg::*;
(
  input  logic [LINE_BITS-1:0] row,
  input  logic [63:0]          x,
  input  logic [63:0]          y,
  output logic                 match
);
  logic [63:0] a, b;
  assign a     = row[63:0];
  assign b     = row[127:64];
  assign match = (a > x) && (b < y);
endmodule
