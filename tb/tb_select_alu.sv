// tb_select_alu: random rows and constants, including the boundary cases
// a == X and b == Y, against the predicate a > X && b < Y.
module tb_select_alu;
  import eci_pkg::*;
  logic [LINE_BITS-1:0] row;
  logic [63:0] x, y;
  logic match;
  int checks = 0, failures = 0;

  select_alu dut (.*);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      logic [63:0] a, b;
      x = {$urandom, $urandom};
      y = {$urandom, $urandom};
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      if (i % 4 == 1) a = x;
      if (i % 4 == 2) b = y;
      if (i % 8 == 3) begin a = x + 1; b = y - 1; end
      for (int w = 0; w < LINE_BITS / 32; w++) row[w*32 +: 32] = $urandom;
      row[63:0]   = a;
      row[127:64] = b;
      #1;
      checks++;
      if (match !== (a > x && b < y)) begin
        failures++;
        $display("FAIL a=%h b=%h x=%h y=%h match=%b", a, b, x, y, match);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
