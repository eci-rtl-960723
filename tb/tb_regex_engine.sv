// tb_regex_engine: random patterns (ranges, literals, '+', anchored or not)
// on random strings over a small alphabet, some with the pattern planted.
// The expected result and the expected cycle count come from a recursive
// backtracking matcher written here independently of the NFA: a match ends
// at the earliest position where some substring (a prefix, if anchored)
// matches the whole pattern, and the engine must take exactly that many
// characters; a mismatch takes the string length (unanchored) or at most it.
module tb_regex_engine;
  import eci_pkg::*;
  localparam int SB = 62;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, match, ack;
  logic [SB*8-1:0] str;
  rx_prog_t prog;
  logic [7:0] cycles;
  int checks = 0, failures = 0;
  int n_match = 0, n_miss = 0, n_early = 0;

  regex_engine #(.STR_BYTES(SB)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit cm(int p, logic [7:0] c);
    return c >= prog.pos[p].lo && c <= prog.pos[p].hi;
  endfunction

  // does s[si..ei] (inclusive) match pattern positions p..len-1 entirely?
  function automatic bit full(int p, int si, int ei);
    if (p == int'(prog.len)) return si > ei;
    if (si > ei) return 0;
    if (!cm(p, str[si*8 +: 8])) return 0;
    if (full(p + 1, si + 1, ei)) return 1;
    if (prog.pos[p].plus) begin
      for (int k = si + 1; k <= ei; k++) begin
        if (!cm(p, str[k*8 +: 8])) break;
        if (full(p + 1, k + 1, ei)) return 1;
      end
    end
    return 0;
  endfunction

  function automatic int slen();
    for (int i = 0; i < SB; i++) if (str[i*8 +: 8] == 0) return i;
    return SB;
  endfunction

  initial begin
    start = 0; ack = 0; str = '0; prog = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int n, len, exp_end;
      bit exp_m;
      // pattern
      prog = '0;
      prog.len = 5'($urandom_range(1, 6));
      prog.anchored = ($urandom_range(3) == 0);
      for (int p = 0; p < int'(prog.len); p++) begin
        int kind;
        kind = $urandom_range(9);
        if (kind < 6) begin prog.pos[p].lo = 8'("a" + $urandom_range(3)); prog.pos[p].hi = prog.pos[p].lo; end
        else if (kind < 8) begin prog.pos[p].lo = "a"; prog.pos[p].hi = 8'("a" + $urandom_range(1, 3)); end
        else begin prog.pos[p].lo = 8'd1; prog.pos[p].hi = 8'd255; end
        prog.pos[p].plus = ($urandom_range(3) == 0);
      end
      // string over {a,b,c,d}, random length, pattern planted sometimes
      str = '0;
      n = $urandom_range(0, SB);
      for (int i = 0; i < n; i++) str[i*8 +: 8] = 8'("a" + $urandom_range(3));
      if (n > 8 && $urandom_range(1) == 0) begin
        int at;
        at = prog.anchored ? 0 : $urandom_range(0, n - 8);
        for (int p = 0; p < int'(prog.len); p++) str[(at+p)*8 +: 8] = prog.pos[p].lo;
      end
      len = slen();
      exp_m = 0; exp_end = -1;
      for (int e = 0; e < len && !exp_m; e++)
        for (int s = 0; s <= (prog.anchored ? 0 : e) && !exp_m; s++)
          if (full(0, s, e)) begin exp_m = 1; exp_end = e; end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      check(match == exp_m, $sformatf("match t=%0d", t));
      if (exp_m) begin
        check(int'(cycles) == exp_end + 1, $sformatf("cycles on match t=%0d %0d vs %0d", t, cycles, exp_end + 1));
        n_match++;
      end else if (!prog.anchored) begin
        check(int'(cycles) == len, "cycles on miss");
        n_miss++;
      end else begin
        check(int'(cycles) <= len, "anchored miss ends early");
        if (int'(cycles) < len) n_early++;
      end
      ack = 1;
      @(negedge clk);
      ack = 0;
      check(!done && !busy, "idle after ack");
    end
    check(n_match > 100 && n_miss > 100 && n_early > 20, "coverage");
    $display("matches %0d misses %0d early ends %0d", n_match, n_miss, n_early);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
