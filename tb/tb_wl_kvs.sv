// tb_wl_kvs: the key-value-store lookup workload through the whole design,
// sweeping the hash-chain length over 1, 4, 16 and 128.
//
// As in the evaluation, every lookup asks for the last key of its chain, so a
// lookup of chain length L reads the bucket line plus L entries.  64 CPU
// threads are modelled as up to 64 outstanding lookups, spread over the 32
// KVS units.  The link back to the CPU accepts one response every LINK = 12
// cycles (one sixth of the DRAM line rate).  Every returned entry is checked,
// and the measured lookup rate is checked against the smallest of three
// bounds: DRAM bandwidth (two cycles per line), unit latency (32 units, one
// DRAM round trip per line) and link bandwidth.  Short chains are
// link-bound; long chains are bound by DRAM round trips.
module tb_wl_kvs;
  import eci_pkg::*;
  localparam int LAT = 30, LINK = 12, NB = 64, THREADS = 64, LOOKUPS = 256;
  localparam longint BKT = 64'h300_0000, HEAP = 64'h400_0000;

  logic clk = 0, rst_n = 0;
  logic rx_valid, rx_ready, tx_valid, tx_ready;
  eci_msg_t rx_msg, tx_msg;
  logic dram_ar_valid, dram_ar_ready, dram_r_valid, dram_r_ready;
  axi_ar_t dram_ar;
  axi_r_t dram_r;
  logic proto_err;
  logic [31:0] err_cnt, vdown_cnt, read_cnt, unexpected_cnt;
  logic [31:0] sel_scanned, sel_matched, rx_scanned, rx_matched, kvs_hops;

  eci_memctrl_top dut (.*);
  dram_model #(.LAT(LAT)) u_mem (
    .clk, .rst_n, .ar_valid(dram_ar_valid), .ar_ready(dram_ar_ready), .ar(dram_ar),
    .r_valid(dram_r_valid), .r_ready(dram_r_ready), .r(dram_r)
  );
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign tx_ready = (cyc % LINK == 0);

  // expected entry per outstanding request id
  logic [LINE_BITS-1:0] want [256];
  bit pend [256];
  int outstanding = 0, n_ok = 0;
  int heap_n = 0;

  int io_rsp = 0;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready && tx_msg.op == OP_IO_RSP) io_rsp++;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready && tx_msg.op != OP_IO_RSP) begin
    checks++;
    if (!pend[tx_msg.id] || tx_msg.data != want[tx_msg.id]) begin failures++; $display("FAIL: lookup id %0d", tx_msg.id); end
    else n_ok++;
    pend[tx_msg.id] = 0;
    outstanding--;
  end

  task automatic send(input eci_msg_t m);
    @(negedge clk);
    rx_valid = 1; rx_msg = m;
    #1;
    while (!rx_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    rx_valid = 0;
  endtask

  task automatic io_write(input int r, input logic [63:0] v);
    eci_msg_t m;
    int n0;
    m = '0; m.vc = VC_IO_REQ; m.op = OP_IO_WR; m.line = LINE_W'(r); m.data[63:0] = v;
    n0 = io_rsp;
    send(m);
    while (io_rsp == n0) @(negedge clk);
  endtask

  task automatic run(input int L);
    logic [LINE_BITS-1:0] d;
    logic [LINE_BITS-1:0] bl [NB/16];
    logic [LINE_BITS-1:0] last_ent [NB];
    longint last_key [NB];
    longint head [NB];
    int cnt [NB];
    int filled, id, done_n, b;
    longint key, t0, t1;
    real rate, bound, b_dram, b_unit, b_link;

    // build NB buckets of exactly L entries each (keys pushed at the head,
    // so the first key inserted ends up last in its chain)
    for (int i = 0; i < NB; i++) begin head[i] = 0; cnt[i] = 0; end
    filled = 0;
    while (filled < NB) begin
      key = longint'($urandom) & ((64'd1 << 31) - 1);
      b = int'(kvs_hash(64'(key), 32'(NB - 1)));
      if (cnt[b] < L) begin
        for (int w = 0; w < 16; w++) d[w*64 +: 64] = {$urandom, $urandom};
        d[63:0] = 64'(key);
        d[LINE_BITS-1 -: 64] = 64'(head[b]);
        head[b] = HEAP + heap_n * 128;
        u_mem.write_line(HEAP + heap_n * 128, d);
        heap_n++;
        if (cnt[b] == 0) begin last_key[b] = key; last_ent[b] = d; end
        cnt[b]++;
        if (cnt[b] == L) filled++;
      end
    end
    for (int l = 0; l < NB / 16; l++) begin
      for (int s = 0; s < 16; s++) bl[l][s*64 +: 64] = 64'(head[l*16 + s]);
      u_mem.write_line(BKT + l * 128, bl[l]);
    end

    n_ok = 0;
    done_n = 0;
    id = 0;
    t0 = cyc;
    while (done_n < LOOKUPS) begin
      if (outstanding < THREADS && !pend[id]) begin
        eci_msg_t m;
        b = (done_n * 37) % NB;
        m = '0; m.op = OP_READ_SHARED; m.id = ID_W'(id);
        m.line = {REG_KVS, 31'(last_key[b])};
        m.vc = m.line[0] ? VC_REQ_O : VC_REQ_E;
        want[id] = last_ent[b]; pend[id] = 1;
        outstanding++;
        id = (id + 1) % 255;
        done_n++;
        send(m);
      end else @(negedge clk);
    end
    while (outstanding != 0 && cyc - t0 < 500000) @(negedge clk);
    t1 = cyc;
    rate   = real'(LOOKUPS) / real'(t1 - t0);
    b_dram = 1.0 / (2.0 * (L + 1));
    b_unit = 32.0 / ((L + 1) * (LAT + 4.0));
    b_link = 1.0 / LINK;
    bound = b_dram;
    if (b_unit < bound) bound = b_unit;
    if (b_link < bound) bound = b_link;
    $display("chain %0d: %0d lookups in %0d cycles, %.4f lookups/cycle (bounds: dram %.4f, units %.4f, link %.4f)",
             L, LOOKUPS, t1 - t0, rate, b_dram, b_unit, b_link);
    check(n_ok == LOOKUPS && outstanding == 0, "all lookups returned the right entry");
    check(rate <= 1.05 * bound, "rate within bound");
    check(rate >= 0.6 * bound, "rate near bound");
  endtask

  initial begin
    rx_valid = 0; rx_msg = '0;
    for (int i = 0; i < 256; i++) pend[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    io_write(R_KVS_BASE, 64'(BKT));
    io_write(R_KVS_MASK, 64'(NB - 1));
    check(io_rsp == 2, "configuration acknowledged");
    run(1);
    run(4);
    run(16);
    run(128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
