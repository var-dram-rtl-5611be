// tb_varram_workload: the evaluated memory configurations, run on the
// controller at its default size (no parameter overrides).
//
// The evaluation uses 2 GB and 4 GB memories of 2 GB ranks with 8 banks
// each, and closes a few variation-affected banks.  This testbench runs
// four configurations in turn, with a reset between them:
//   2 GB (banks 0-7)  with 2 and 4 victim banks,
//   4 GB (banks 0-15) with 4 and 8 victim banks.
// Victims are drawn at random within the configuration's banks; the
// controller pairs them with the lowest-numbered healthy banks, which lie in
// the same range.  Each configuration runs a synthetic application: a
// footprint of words written over a few rows of every bank (so migrated
// words collide with native words of the target banks), then a mix of
// sequential streams (row hits) and random reuse with one write in three,
// during and after dynamic closing, including first writes to new
// victim-bank words once the banks are off.  Every read is compared with a
// reference memory.  Per configuration it reports requests, row hits,
// migrated words, collisions, stalled writes, INTERRUPTs and the share of
// bank-cycles spent powered down, the quantity the energy saving scales
// with.  The benchmarks' own address traces are not available, so the
// traffic mix is this testbench's own.
//
// Interface and timing: no ports; a 10-unit clock period, a watchdog, and a
// final `TB_RESULT checks=N failures=M` line.  Addresses, data and victim
// sets are drawn with $urandom.
module tb_varram_workload;
  localparam int WATCHDOG = 20000000;
  import varram_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_we = 0, resp_valid;
  dram_addr_t req_addr = '0;
  logic [DATA_W-1:0] req_wdata = '0, resp_rdata;
  logic var_valid = 0, dynamic = 0;
  logic [NBANKS-1:0] var_victim = '0;
  dram_cmd_e dram_cmd;
  dram_addr_t dram_addr, dram_addr2;
  logic [DATA_W-1:0] dram_wdata, dram_rdata;
  logic [NBANKS-1:0] vdd_bank;
  flag_t flag;
  logic banks_down;
  logic [31:0] st_victim_acc, st_interrupts, st_wstalls, st_copies, st_migrated,
               st_collisions, st_prio, st_back, st_closings, st_openings,
               st_reqs, st_row_hits;
  logic [31:0] wake_events [NBANKS];
  logic [ROW_W+COL_W:0] bank_words [NBANKS];
  logic [NBANKS-1:0] victim_map, bank_over;
  logic remap_busy, locked, reopen, trie_over, trie_full;

  int dram_errors, n_act, n_copy;
  dram_model u_dram (
    .clk, .init(!rst_n), .cmd(dram_cmd), .addr(dram_addr), .addr2(dram_addr2), .wdata(dram_wdata),
    .vdd_bank, .rdata(dram_rdata), .errors(dram_errors), .n_act, .n_copy);

  int checks = 0, failures = 0;
  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Host-visible reference memory.
  logic [DATA_W-1:0] ref_m [logic [ADDR_W-1:0]];
  dram_addr_t pool [$];
  int lat_max = 0;

  task automatic host(logic we, dram_addr_t a, logic [DATA_W-1:0] d = {$urandom(), $urandom()});
    int t = 0;
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid && t < 20000) begin @(negedge clk); t++; end
    if (t > lat_max) lat_max = t;
    check(resp_valid, "response");
    if (we) begin
      if (!ref_m.exists(a)) pool.push_back(a);
      ref_m[a] = d;
    end else begin
      check(resp_rdata == ref_m[a],
            $sformatf("read %h: %h expected %h (flag %0d)", a, resp_rdata, ref_m[a], flag));
    end
  endtask

  function automatic dram_addr_t mk(int rb, int row, int col);
    dram_addr_t a;
    a.rank = RANK_W'(rb >> BANK_W); a.bank = BANK_W'(rb);
    a.row = ROW_W'(row); a.col = COL_W'(col);
    return a;
  endfunction


  // Bank-cycles with the supply gated, for the energy estimate.
  longint gated_cyc = 0, run_cyc = 0;
  always @(posedge clk) begin
    run_cyc++;
    gated_cyc += longint'(NBANKS) - longint'($countones(vdd_bank));
  end

  int nbk, nv;
  logic [NBANKS-1:0] vic;

  function automatic logic is_vic(dram_addr_t a);
    return vic[rb_of(a)];
  endfunction

  task automatic read_all();
    foreach (pool[i]) host(0, pool[i]);
  endtask

  // Application traffic: streams along a row of a footprint bank, or random
  // reuse of written words; writes go to words already written or to victim
  // banks (a native word of a target bank that was never written may hold
  // relocated victim data once the banks are off).
  task automatic traffic(int n, logic new_victims);
    for (int i = 0; i < n; i++) begin
      if ($urandom_range(0, 3) == 0) begin
        automatic dram_addr_t a = pool[$urandom_range(0, pool.size() - 1)];
        for (int k = 0; k < 8; k++) begin
          automatic dram_addr_t b = a;
          b.col = a.col + COL_W'(k);
          if (ref_m.exists(b)) host(0, b);
        end
      end else if (new_victims && $urandom_range(0, 7) == 0) begin
        automatic int v;
        do v = $urandom_range(0, nbk - 1); while (!vic[v]);
        host(1, mk(v, $urandom_range(8, 11), $urandom_range(0, 127)));
      end else begin
        host($urandom_range(0, 2) == 0, pool[$urandom_range(0, pool.size() - 1)]);
      end
    end
  endtask

  task automatic run_config(int banks, int victims);
    longint g0, c0;
    logic [31:0] r0, h0;
    nbk = banks; nv = victims;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; repeat (5) @(negedge clk);
    ref_m.delete(); pool.delete();
    vic = '0;
    while ($countones(vic) < nv) vic[$urandom_range(0, nbk - 1)] = 1'b1;
    r0 = st_reqs; h0 = st_row_hits;
    // Footprint: rows 0-3, columns 0-63 of every bank in the memory.
    for (int i = 0; i < 24 * nbk; i++)
      host(1, mk($urandom_range(0, nbk - 1), $urandom_range(0, 3), $urandom_range(0, 63)));
    traffic(200, 0);
    // Dynamic closing under traffic.
    @(negedge clk);
    var_valid = 1; var_victim = vic; dynamic = 1;
    @(negedge clk);
    var_valid = 0;
    g0 = gated_cyc; c0 = run_cyc;
    while (!banks_down) traffic(1, 0);
    check(flag == FLAG_REMAP, "FLAG 10 when banks are down");
    check(victim_map == vic, "V holds the victim set");
    check(~vdd_bank == vic, "exactly the victim banks are gated");
    traffic(1500, 1);
    read_all();
    check(dram_errors == 0, "DRAM protocol clean");
    check(st_migrated > 0 && st_victim_acc > 0, "victim data migrated and served");
    $display("%0d GB, %0d banks down: reqs=%0d rowhits=%0d migrated=%0d collisions=%0d prio=%0d wstalls=%0d interrupts=%0d",
             nbk / 4, nv, st_reqs - r0, st_row_hits - h0, st_migrated, st_collisions, st_prio,
             st_wstalls, st_interrupts);
    $display("  powered-down share of bank-cycles after closing: %0d.%02d%% (%0d of %0d banks)",
             (gated_cyc - g0) * 100 / ((run_cyc - c0) * nbk),
             ((gated_cyc - g0) * 10000 / ((run_cyc - c0) * nbk)) % 100, nv, nbk);
  endtask

  int n_mig_total = 0, n_coll_total = 0, n_int_total = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_config(8, 2);  n_mig_total += st_migrated; n_coll_total += st_collisions; n_int_total += st_interrupts;
    run_config(8, 4);  n_mig_total += st_migrated; n_coll_total += st_collisions; n_int_total += st_interrupts;
    run_config(16, 4); n_mig_total += st_migrated; n_coll_total += st_collisions; n_int_total += st_interrupts;
    run_config(16, 8); n_mig_total += st_migrated; n_coll_total += st_collisions; n_int_total += st_interrupts;
    check(n_mig_total > 0,  "mechanism: migration");
    check(n_coll_total > 0, "mechanism: address collisions");
    check(n_int_total > 0,  "mechanism: INTERRUPT");
    $display("longest host wait %0d cycles", lat_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  varram_top dut (.*);
endmodule
