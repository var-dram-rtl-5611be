// tb_hw_trie: self-checking test of the hardware trie.
// A small pool (64 leaves, 128 nodes) is filled with random keys that share
// prefixes, against an associative-array reference.  Checks: insert result
// and its 5-cycle latency, value overwrite of an existing key, pipelined
// lookups on two ports with the 3-cycle latency (hits and misses), the leaf
// scan port, the full flag when the leaf pool runs out, and clear.
//
// Interface and timing: no ports; a 10-unit clock period, a watchdog that
// counts a failure and stops the run if it hangs, and a final line
// `TB_RESULT checks=N failures=M`.  Random stimulus uses $urandom.
// The 8-bit stride, 4 levels and 3-cycle lookup follow the paper; the
// 5-cycle insert and the scan port are this design's own and are checked
// as specified here.
module tb_hw_trie;
  import varram_pkg::*;

  localparam int unsigned LEAVES = 64, NODES = 128, VW = 25;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             clear = 0, ins_valid = 0, ins_ready, ins_done, ins_new, ins_full;
  logic [KEY_W-1:0] ins_key = '0;
  logic [VW-1:0]    ins_val = '0;
  logic             lk_valid [2];
  logic [KEY_W-1:0] lk_key   [2];
  logic             lk_done  [2];
  logic             lk_hit   [2];
  logic [VW-1:0]    lk_val   [2];
  logic [5:0]       sc_idx = '0;
  logic             sc_valid;
  logic [KEY_W-1:0] sc_key;
  logic [VW-1:0]    sc_val;
  logic [6:0]       leaf_count;
  logic [7:0]       node_count;

  hw_trie #(.LEAVES(LEAVES), .NODES(NODES), .VAL_W(VW), .LK_PORTS(2)) dut (
    .clk, .rst_n, .clear, .ins_valid, .ins_ready, .ins_key, .ins_val,
    .ins_done, .ins_new, .ins_full, .lk_valid, .lk_key, .lk_done, .lk_hit,
    .lk_val, .sc_idx, .sc_valid, .sc_key, .sc_val, .leaf_count, .node_count);

  logic [VW-1:0] ref_m [logic [KEY_W-1:0]];
  logic [KEY_W-1:0] keys [$];
  int checks = 0, failures = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Keys share their top symbols: 4 choices per level for levels 0-1.
  function automatic logic [KEY_W-1:0] rkey();
    return {8'($urandom_range(0, 3)), 8'($urandom_range(0, 3) * 64),
            8'($urandom), 8'($urandom)};
  endfunction

  task automatic do_insert(logic [KEY_W-1:0] k, logic [VW-1:0] v,
                           output logic nw, output logic full, output int lat);
    @(negedge clk);
    while (!ins_ready) @(negedge clk);
    ins_valid = 1; ins_key = k; ins_val = v;
    @(negedge clk);
    ins_valid = 0;
    lat = 1;
    while (!ins_done) begin @(negedge clk); lat++; end
    nw = ins_new; full = ins_full;
  endtask

  // Lookup a batch of keys back to back on one port, check in order.
  task automatic lookup_batch(int p, logic [KEY_W-1:0] ks [$]);
    int sent = 0, got = 0, cyc = 0;
    int issue_cyc [$];
    @(negedge clk);
    while (got < ks.size()) begin
      if (sent < ks.size()) begin
        lk_valid[p] = 1; lk_key[p] = ks[sent]; issue_cyc.push_back(cyc); sent++;
      end else begin
        lk_valid[p] = 0;
      end
      @(negedge clk);
      cyc++;
      if (lk_done[p]) begin
        automatic logic [KEY_W-1:0] k = ks[got];
        check(cyc - issue_cyc[got] == 3, "lookup latency is 3 cycles");
        check(lk_hit[p] == ref_m.exists(k), "lookup hit/miss");
        if (ref_m.exists(k) && lk_hit[p]) check(lk_val[p] == ref_m[k], "lookup value");
        got++;
      end
      if (cyc > 1000) break;
    end
    lk_valid[p] = 0;
  endtask

  initial begin
    logic nw, full;
    int lat, n_unique;
    logic [KEY_W-1:0] q [$];
    lk_valid[0] = 0; lk_valid[1] = 0; lk_key[0] = '0; lk_key[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // Fill with 40 keys (some repeated).
    for (int n = 0; n < 40; n++) begin
      automatic logic [KEY_W-1:0] k = rkey();
      automatic logic [VW-1:0] v = VW'($urandom);
      automatic logic existed = ref_m.exists(k);
      do_insert(k, v, nw, full, lat);
      check(lat == 5, "insert latency is 5 cycles");
      check(nw == !existed, "insert reports new key");
      check(!full, "no full flag while space remains");
      ref_m[k] = v;
      if (!existed) keys.push_back(k);
    end
    // Overwrite an existing key.
    do_insert(keys[3], 25'h1ABCDE, nw, full, lat);
    ref_m[keys[3]] = 25'h1ABCDE;
    check(!nw, "existing key not new");
    n_unique = keys.size();
    check(int'(leaf_count) == n_unique, "leaf count equals unique keys");

    // Lookups: all stored keys on port 0, misses and hits on port 1.
    lookup_batch(0, keys);
    q = {};
    for (int i = 0; i < 20; i++) q.push_back(i % 2 ? keys[i] : rkey() ^ 32'h0000_0001);
    lookup_batch(1, q);

    // Scan the leaf table.
    for (int i = 0; i < LEAVES; i++) begin
      sc_idx = 6'(i); #1;
      if (i < n_unique) begin
        check(sc_valid, "scan entry valid");
        check(ref_m.exists(sc_key) && sc_val == ref_m[sc_key], "scan key/value");
      end else begin
        check(!sc_valid, "scan past end invalid");
      end
    end

    // Fill up the leaf pool.
    while (int'(leaf_count) < LEAVES) begin
      automatic logic [KEY_W-1:0] k = rkey();
      if (!ref_m.exists(k)) begin
        do_insert(k, '0, nw, full, lat);
        if (full) break;
        ref_m[k] = '0;
      end
    end
    begin
      automatic logic [KEY_W-1:0] k;
      do k = rkey(); while (ref_m.exists(k));
      do_insert(k, '0, nw, full, lat);
      check(full, "insert into full trie reports full");
    end

    // Clear.
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    repeat (2) @(negedge clk);
    check(leaf_count == 0, "clear empties the leaf table");
    ref_m.delete();
    lookup_batch(0, keys);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
