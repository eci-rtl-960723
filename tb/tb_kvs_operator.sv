// tb_kvs_operator: builds a chained hash table in the DRAM model (64
// buckets, keys chained at the head of their bucket's list) and looks up
// present and absent keys.  The reference is a software copy of the table:
// it gives the expected entry (or a miss, answered with zeros) and the exact
// number of entries the unit must read (position in the chain).  The DRAM
// latency fixes the time per lookup: (hops + 1) read round trips.
module tb_kvs_operator;
  import eci_pkg::*;
  localparam int NB = 64, NKEYS = 300, LAT = 30;
  localparam longint BKT = 64'h100_0000, HEAP = 64'h200_0000;
  logic clk = 0, rst_n = 0;
  logic [ADDR_W-1:0] bucket_base;
  logic [31:0] bucket_mask, hops_cnt;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  op_req_t req;
  op_rsp_t rsp;
  logic ar_valid, ar_ready, r_valid, r_ready;
  axi_ar_t ar;
  axi_r_t r;
  int checks = 0, failures = 0;
  longint head [NB];
  longint keys [NKEYS];
  longint ent_addr [NKEYS];
  int depth [NKEYS];
  logic [LINE_BITS-1:0] ent [NKEYS];
  int n_hit = 0, n_miss = 0, max_hops = 0;

  kvs_operator dut (.*);
  dram_model #(.LAT(LAT)) u_mem (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int bucket_of(longint key);
    return int'(kvs_hash(64'(key), 32'(NB - 1)));
  endfunction

  task automatic build();
    logic [LINE_BITS-1:0] bl [NB/16];
    for (int b = 0; b < NB; b++) head[b] = 0;
    for (int i = 0; i < NKEYS; i++) begin
      int b;
      keys[i] = longint'({$urandom, $urandom}) & ((64'd1 << (LINE_W - 2)) - 1);
      b = bucket_of(keys[i]);
      ent_addr[i] = HEAP + i * 128;
      for (int w = 0; w < 16; w++) ent[i][w*64 +: 64] = {$urandom, $urandom};
      ent[i][63:0] = 64'(keys[i]);
      ent[i][LINE_BITS-1 -: 64] = 64'(head[b]);   // push at head
      head[b] = ent_addr[i];
      u_mem.write_line(ent_addr[i], ent[i]);
    end
    for (int i = 0; i < NKEYS; i++) begin         // depth = position from head
      longint p;
      depth[i] = 1;
      p = head[bucket_of(keys[i])];
      while (p != ent_addr[i]) begin
        depth[i]++;
        p = longint'(ent[int'((p - HEAP) / 128)][LINE_BITS-1 -: 64]);
      end
    end
    for (int l = 0; l < NB / 16; l++) begin
      for (int s = 0; s < 16; s++) bl[l][s*64 +: 64] = 64'(head[l*16 + s]);
      u_mem.write_line(BKT + l * 128, bl[l]);
    end
  endtask

  task automatic lookup(input longint key, input int exp_i, input int exp_hops);
    int h0, t0;
    h0 = int'(hops_cnt);
    @(negedge clk);
    req_valid = 1; req.id = ID_W'($urandom); req.line = {2'b10, (LINE_W-2)'(key)};
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
    t0 = 0;
    while (!rsp_valid && t0 < 10000) begin @(negedge clk); t0++; end
    check(rsp.id == req.id && rsp.line == req.line, "id/line");
    if (exp_i >= 0) check(rsp.data == ent[exp_i], "hit data");
    else            check(rsp.data == '0, "miss gives zeros");
    check(int'(hops_cnt) - h0 == exp_hops, $sformatf("hops %0d vs %0d", int'(hops_cnt) - h0, exp_hops));
    check(t0 >= (exp_hops + 1) * (LAT + 2) && t0 <= (exp_hops + 1) * (LAT + 8), $sformatf("latency %0d", t0));
    rsp_ready = 1;
    @(negedge clk);
    rsp_ready = 0;
  endtask

  initial begin
    req_valid = 0; req = '0; rsp_ready = 0;
    bucket_base = ADDR_W'(BKT); bucket_mask = NB - 1;
    build();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 150; t++) begin
      int i;
      i = $urandom_range(NKEYS - 1);
      lookup(keys[i], i, depth[i]);
      n_hit++;
      if (depth[i] > max_hops) max_hops = depth[i];
    end
    for (int t = 0; t < 40; t++) begin
      longint k;
      int len;
      longint p;
      k = longint'($urandom) | (64'd1 << 40);   // never inserted (keys above are random 31 bit)
      k = k & ((64'd1 << (LINE_W - 2)) - 1);
      len = 0;
      p = head[bucket_of(k)];
      while (p != 0) begin len++; p = longint'(ent[int'((p - HEAP) / 128)][LINE_BITS-1 -: 64]); end
      begin
        bit present;
        present = 0;
        for (int i = 0; i < NKEYS; i++) if (keys[i] == k) present = 1;
        if (!present) begin lookup(k, -1, len); n_miss++; end
      end
    end
    check(max_hops >= 3 && n_miss > 10, "long chains and misses covered");
    $display("hits %0d misses %0d longest chain walked %0d", n_hit, n_miss, max_hops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
