// tb_eci_memctrl_top: end-to-end test of the memory-controller design at its
// full default size (32 key-value units, 48 regex engines).
//
// The testbench plays the CPU side of the ECI link (messages after the VC
// layer's virtual-channel tagging) and the DRAM controller (dram_model with
// 30-cycle latency, about 100 ns at 300 MHz, and random address-channel
// back-pressure).  It configures the operators with I/O writes, reads one
// register back, fills DRAM with a SELECT table, a regex table and a chained
// hash table, and then:
//   * drains a SELECT scan with Read-Shared requests (results in table order,
//     then the all-zero end marker),
//   * drains a regex scan (set of matching rows, then the end marker),
//   * fires a burst of key lookups that keep many key-value units busy at once
//     (hits, including long chains, and misses),
//   * sends voluntary downgrades (absorbed), a Read-Exclusive (protocol
//     error), a read of the unmapped region, and a message on a channel the
//     node does not serve.
// Every response is checked against values computed here, and each mechanism
// is counted; one that never happens counts as a failure.
module tb_eci_memctrl_top;
  import eci_pkg::*;
  localparam int LAT = 30;
  localparam int SROWS = 240, XROWS = 240, NB = 64, NKEYS = 200;
  localparam longint SBASE = 64'h100_0000, XBASE = 64'h200_0000;
  localparam longint BKT = 64'h300_0000, HEAP = 64'h400_0000;
  localparam string PAT = "dcbad";

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
  dram_model #(.LAT(LAT), .READY_PCT(80)) u_mem (
    .clk, .rst_n, .ar_valid(dram_ar_valid), .ar_ready(dram_ar_ready), .ar(dram_ar),
    .r_valid(dram_r_valid), .r_ready(dram_r_ready), .r(dram_r)
  );
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- reference data ----------------
  logic [LINE_BITS-1:0] sel_exp [$];
  bit                   rx_exp [XROWS];
  logic [LINE_BITS-1:0] xtab [XROWS];
  longint               keys [NKEYS];
  logic [LINE_BITS-1:0] ent [NKEYS];
  longint               head [NB];
  int                   n_rx_exp;

  // ---------------- mechanism counters ----------------
  int m_sel_result = 0, m_sel_end = 0, m_rx_result = 0, m_rx_end = 0;
  int m_kvs_hit = 0, m_kvs_miss = 0, m_kvs_chain = 0, m_kvs_parallel = 0;
  int m_vdown = 0, m_proto_err = 0, m_io_rsp = 0, m_even = 0, m_odd = 0;
  int m_unmapped = 0, m_unexpected = 0, m_dram_stall = 0;

  // ---------------- response bookkeeping ----------------
  typedef enum int {K_SEL, K_RX, K_KVS_HIT, K_KVS_MISS, K_NUL, K_IO} kind_e;
  kind_e  pend_kind [256];
  int     pend_arg [256];
  bit     pend [256];
  int     n_pend = 0;
  int     next_id = 0;
  bit     rx_seen [XROWS];

  always @(posedge clk) if (rst_n) begin
    if (dram_ar_valid && !dram_ar_ready) m_dram_stall++;
    if (tx_valid && tx_ready) begin
      int id;
      id = int'(tx_msg.id);
      checks++;
      if (!pend[id]) begin failures++; $display("FAIL: response for unknown id %0d", id); end
      else begin
        pend[id] = 0;
        n_pend--;
        if (tx_msg.op == OP_RSP_DATA) begin
          checks++;
          if (tx_msg.vc != (tx_msg.line[0] ? VC_RSPD_O : VC_RSPD_E)) begin failures++; $display("FAIL: vc parity"); end
          if (tx_msg.line[0]) m_odd++; else m_even++;
        end
        unique case (pend_kind[id])
          K_SEL: begin
            checks++;
            if (tx_msg.data == '0) m_sel_end++;
            else if (sel_exp.size() == 0 || tx_msg.data != sel_exp[0]) begin failures++; $display("FAIL: select row"); end
            else begin void'(sel_exp.pop_front()); m_sel_result++; end
          end
          K_RX: begin
            checks++;
            if (tx_msg.data == '0) m_rx_end++;
            else begin
              int r;
              r = int'(tx_msg.data[LINE_BITS-1 -: 32]);
              if (r >= XROWS || !rx_exp[r] || rx_seen[r] || tx_msg.data != xtab[r]) begin failures++; $display("FAIL: regex row"); end
              else begin rx_seen[r] = 1; m_rx_result++; end
            end
          end
          K_KVS_HIT: begin
            checks++;
            if (tx_msg.data != ent[pend_arg[id]]) begin failures++; $display("FAIL: kvs hit"); end
            else m_kvs_hit++;
          end
          K_KVS_MISS: begin
            checks++;
            if (tx_msg.data != '0) begin failures++; $display("FAIL: kvs miss"); end
            else m_kvs_miss++;
          end
          K_NUL: begin
            checks++;
            if (tx_msg.data != '0) begin failures++; $display("FAIL: unmapped"); end
            else m_unmapped++;
          end
          K_IO: begin
            checks++;
            if (tx_msg.op != OP_IO_RSP || tx_msg.vc != VC_IO_RSP ||
                (pend_arg[id] >= 0 && tx_msg.data[63:0] != 64'(pend_arg[id]))) begin
              failures++; $display("FAIL: io response");
            end else m_io_rsp++;
          end
          default: ;
        endcase
      end
    end
  end

  // busy key-value units seen at once
  logic [31:0] kvs_busy;
  for (genvar k = 0; k < 32; k++) begin : g_busy
    assign kvs_busy[k] = !dut.g_kvs[k].u_kvs.req_ready;
  end
  always @(posedge clk) if (rst_n) begin
    if ($countones(kvs_busy) > m_kvs_parallel) m_kvs_parallel = $countones(kvs_busy);
  end

  // ---------------- driver ----------------
  task automatic send(input eci_msg_t m);
    @(negedge clk);
    rx_valid = 1; rx_msg = m;
    #1;
    while (!rx_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    rx_valid = 0;
  endtask

  task automatic request(input logic [3:0] vc, input eci_op_e op, input logic [LINE_W-1:0] line,
                         input kind_e kind, input int arg, input logic [63:0] data);
    eci_msg_t m;
    int guard;
    guard = 0;
    while ((pend[next_id] || n_pend > 200) && guard < 100000) begin @(negedge clk); guard++; end
    m = '0; m.vc = vc; m.op = op; m.id = ID_W'(next_id); m.line = line; m.data[63:0] = data;
    if (op == OP_READ_SHARED || op == OP_IO_RD || op == OP_IO_WR) begin
      pend[next_id] = 1; pend_kind[next_id] = kind; pend_arg[next_id] = arg; n_pend++;
    end
    next_id = (next_id + 1) % 256;
    send(m);
  endtask

  task automatic read_line(input logic [1:0] region, input logic [LINE_W-3:0] low, input kind_e kind, input int arg);
    logic [LINE_W-1:0] line;
    line = {region, low};
    request(line[0] ? VC_REQ_O : VC_REQ_E, OP_READ_SHARED, line, kind, arg, 64'd0);
  endtask

  task automatic io_write(input int r, input logic [63:0] v);
    request(VC_IO_REQ, OP_IO_WR, LINE_W'(r), K_IO, -1, v);
  endtask

  task automatic drain();
    int guard;
    guard = 0;
    while (n_pend != 0 && guard < 200000) begin @(negedge clk); guard++; end
    check(n_pend == 0, "all responses arrived");
  endtask

  function automatic int bucket_of(longint key);
    return int'(kvs_hash(64'(key), 32'(NB - 1)));
  endfunction

  function automatic int chain_pos(longint key);   // 1-based, 0 if absent
    longint p;
    int n;
    p = head[bucket_of(key)];
    n = 0;
    while (p != 0) begin
      n++;
      if (longint'(ent[int'((p - HEAP) / 128)][63:0]) == key) return n;
      p = longint'(ent[int'((p - HEAP) / 128)][LINE_BITS-1 -: 64]);
    end
    return 0;
  endfunction

  task automatic fill_dram();
    logic [LINE_BITS-1:0] d;
    logic [LINE_BITS-1:0] bl [NB/16];
    // SELECT table: 20% of rows match a > 1000 and b < 1000
    for (int i = 0; i < SROWS; i++) begin
      for (int w = 0; w < LINE_BITS / 32; w++) d[w*32 +: 32] = $urandom;
      d[63:0]   = ($urandom_range(99) < 20) ? 64'd1001 + 64'($urandom_range(9999)) : 64'($urandom_range(1000));
      d[127:64] = 64'($urandom_range(1100));
      if (d[63:0] > 1000 && d[127:64] < 1000) sel_exp.push_back(d);
      u_mem.write_line(SBASE + i * 128, d);
    end
    // regex table: "dcbad" planted in 15% of rows
    n_rx_exp = 0;
    for (int i = 0; i < XROWS; i++) begin
      int n;
      bit hit;
      for (int w = 0; w < LINE_BITS / 32; w++) d[w*32 +: 32] = $urandom;
      n = $urandom_range(20, 62);
      for (int k = 0; k < 62; k++) d[k*8 +: 8] = (k < n) ? 8'("a" + $urandom_range(3)) : 8'd0;
      if ($urandom_range(99) < 15) begin
        int at;
        at = $urandom_range(0, n - 5);
        for (int k = 0; k < 5; k++) d[(at+k)*8 +: 8] = PAT[k];
      end
      d[LINE_BITS-1 -: 32] = 32'(i);
      hit = 0;
      for (int s = 0; s + 5 <= n; s++) begin
        bit ok;
        ok = 1;
        for (int k = 0; k < 5; k++) if (d[(s+k)*8 +: 8] != PAT[k]) ok = 0;
        if (ok) hit = 1;
      end
      xtab[i] = d; rx_exp[i] = hit; rx_seen[i] = 0;
      if (hit) n_rx_exp++;
      u_mem.write_line(XBASE + i * 128, d);
    end
    // hash table: NB buckets, keys pushed at the head of their chain
    for (int b = 0; b < NB; b++) head[b] = 0;
    for (int i = 0; i < NKEYS; i++) begin
      int b;
      keys[i] = longint'($urandom) & ((64'd1 << 31) - 1);
      b = bucket_of(keys[i]);
      for (int w = 0; w < 16; w++) ent[i][w*64 +: 64] = {$urandom, $urandom};
      ent[i][63:0] = 64'(keys[i]);
      ent[i][LINE_BITS-1 -: 64] = 64'(head[b]);
      head[b] = HEAP + i * 128;
      u_mem.write_line(HEAP + i * 128, ent[i]);
    end
    for (int l = 0; l < NB / 16; l++) begin
      for (int s = 0; s < 16; s++) bl[l][s*64 +: 64] = 64'(head[l*16 + s]);
      u_mem.write_line(BKT + l * 128, bl[l]);
    end
  endtask

  initial begin
    int nsel;
    eci_msg_t m;
    rx_valid = 0; rx_msg = '0; tx_ready = 1;
    fill_dram();
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);

    // configuration over I/O
    io_write(R_SEL_BASE, 64'(SBASE));
    io_write(R_SEL_ROWS, 64'(SROWS));
    io_write(R_SEL_X, 64'd1000);
    io_write(R_SEL_Y, 64'd1000);
    io_write(R_RX_BASE, 64'(XBASE));
    io_write(R_RX_ROWS, 64'(XROWS));
    io_write(R_RX_CTRL, 64'd5);
    for (int k = 0; k < 5; k++) io_write(R_RX_POS0 + k, {48'd0, 8'(PAT[k]), 8'(PAT[k])});
    io_write(R_KVS_BASE, 64'(BKT));
    io_write(R_KVS_MASK, 64'(NB - 1));
    request(VC_IO_REQ, OP_IO_RD, LINE_W'(R_SEL_ROWS), K_IO, SROWS, 64'd0);
    drain();

    // SELECT scan: one read per expected result, plus two for the end
    nsel = sel_exp.size();
    for (int k = 0; k < nsel + 2; k++) read_line(REG_SELECT, (LINE_W-2)'(k), K_SEL, 0);
    // regex scan, overlapping with it
    for (int k = 0; k < n_rx_exp + 2; k++) read_line(REG_REGEX, (LINE_W-2)'(k), K_RX, 0);
    drain();
    check(sel_exp.size() == 0 && m_sel_result == nsel, "select results complete");
    check(m_rx_result == n_rx_exp, "regex results complete");
    check(sel_scanned == SROWS && sel_matched == 32'(nsel), "select counters");
    check(rx_scanned == XROWS && rx_matched == 32'(n_rx_exp), "regex counters");

    // key-value lookups, back to back
    for (int t = 0; t < 120; t++) begin
      int i;
      i = $urandom_range(NKEYS - 1);
      if (chain_pos(keys[i]) > 1) m_kvs_chain++;
      read_line(REG_KVS, (LINE_W-2)'(keys[i]), K_KVS_HIT, i);
    end
    for (int t = 0; t < 20; t++) begin
      longint k;
      k = longint'($urandom) & ((64'd1 << 31) - 1);
      if (chain_pos(k) == 0) read_line(REG_KVS, (LINE_W-2)'(k), K_KVS_MISS, 0);
    end
    drain();

    // protocol corner cases
    m = '0; m.vc = VC_VDN_E; m.op = OP_VDOWN_I; m.line = {REG_SELECT, 31'd8};  send(m);
    m = '0; m.vc = VC_VDN_O; m.op = OP_VDOWN_S; m.line = {REG_KVS, 31'd9};     send(m);
    m = '0; m.vc = VC_REQ_E; m.op = OP_READ_EXCL; m.line = {REG_KVS, 31'd4};   send(m);
    m = '0; m.vc = VC_IPI;   m.op = OP_IO_WR;                                  send(m);
    read_line(REG_NONE, 31'd77, K_NUL, 0);
    drain();
    repeat (5) @(posedge clk);
    m_vdown      = int'(vdown_cnt);
    m_proto_err  = proto_err ? int'(err_cnt) : 0;
    m_unexpected = int'(unexpected_cnt);
    check(vdown_cnt == 2 && err_cnt == 1 && unexpected_cnt == 1, "protocol counters");
    check(int'(read_cnt) == nsel + 2 + n_rx_exp + 2 + m_kvs_hit + m_kvs_miss + 1, "read count");

    $display("mechanisms: sel_result=%0d sel_end=%0d rx_result=%0d rx_end=%0d kvs_hit=%0d kvs_miss=%0d kvs_chain>1=%0d kvs_parallel=%0d",
             m_sel_result, m_sel_end, m_rx_result, m_rx_end, m_kvs_hit, m_kvs_miss, m_kvs_chain, m_kvs_parallel);
    $display("mechanisms: vdown=%0d proto_err=%0d io_rsp=%0d even=%0d odd=%0d unmapped=%0d unexpected_vc=%0d dram_stall=%0d",
             m_vdown, m_proto_err, m_io_rsp, m_even, m_odd, m_unmapped, m_unexpected, m_dram_stall);
    check(m_sel_result > 0, "mechanism: select result");
    check(m_sel_end == 2,   "mechanism: select end marker");
    check(m_rx_result > 0,  "mechanism: regex result");
    check(m_rx_end == 2,    "mechanism: regex end marker");
    check(m_kvs_hit > 0,    "mechanism: kvs hit");
    check(m_kvs_miss > 0,   "mechanism: kvs miss");
    check(m_kvs_chain > 0,  "mechanism: chain longer than one");
    check(m_kvs_parallel > 4, "mechanism: parallel kvs units");
    check(m_vdown > 0 && m_proto_err > 0 && m_unexpected > 0, "mechanism: protocol subset");
    check(m_io_rsp > 0,     "mechanism: config I/O");
    check(m_even > 0 && m_odd > 0, "mechanism: even and odd channels");
    check(m_unmapped > 0,   "mechanism: unmapped region");
    check(m_dram_stall > 0, "mechanism: DRAM back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
