// tb_varram_top: end-to-end test of the VAR-DRAM controller with small
// tries (auxiliary 512 words, primary 128) so that the 90% occupancy test
// reopens the banks after a few hundred writes.
//
// The behavioural DRAM array is attached to the command bus and the gated
// supplies.  The host writes words into two victim banks (3 and 9), into
// the two banks they will be paired with (0 and 1, same rows and columns,
// so that migration meets address collisions) and elsewhere, then:
//   1 dynamic closing with host traffic running (writes to words not yet
//     migrated are stalled and migrated first), FLAG 00 -> 01 -> 10, banks
//     3 and 9 gated (the DRAM model wipes them);
//   2 every word is read back (translated, some through INTERRUPT), more
//     traffic including first writes to new victim words;
//   3 target bank 0 is filled past 90% of its (reduced, 128-word)
//     capacity: victim 3 alone wakes and is copied back, victim 9 stays
//     off; then healthy banks are filled until the auxiliary trie passes
//     90%: the banks wake, data is copied back, FLAG returns to 00, every
//     word reads back, and a new closing request is refused;
//   4 after a reset, static closing: FLAG 10 at once, no copies, new victim
//     words are placed in the target banks and read back.
// Every read is checked against a reference memory and the DRAM model
// checks the command protocol.  The test fails if any mechanism (row hits,
// migration, collisions, write stalls, write-table priority, RowClone
// copies, back-migration, INTERRUPT, victim accesses, static closing,
// target-bank overflow) never happened.
//
// Interface and timing: no ports; a 10-unit clock period, a watchdog, and a
// final `TB_RESULT checks=N failures=M` line, preceded by the count of
// every mechanism.  Addresses and data are drawn with $urandom.  The
// scenario follows the paper's closing, remapping and reopening steps;
// bank choices and traffic mix are this testbench's own.
module tb_varram_top;
  localparam bit OVF_TEST = 1'b1;
  localparam int WATCHDOG = 3000000;
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
  logic [7:0] bank_words [NBANKS];   // BANK_CAP_W = 7 below
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

  // Victim banks 3 and 9; the unit pairs them with banks 0 and 1.
  localparam int V0 = 3, V1 = 9;
  function automatic logic is_victim(dram_addr_t a);
    return int'(rb_of(a)) == V0 || int'(rb_of(a)) == V1;
  endfunction
  function automatic logic is_target(dram_addr_t a);
    return int'(rb_of(a)) == 0 || int'(rb_of(a)) == 1;
  endfunction

  task automatic read_all();
    foreach (pool[i]) host(0, pool[i]);
  endtask

  // Random traffic on the pool; writes only to victim words or to words the
  // pool already holds (target banks keep their native words).
  task automatic traffic(int n, logic new_victims);
    for (int i = 0; i < n; i++) begin
      automatic dram_addr_t a = pool[$urandom_range(0, pool.size() - 1)];
      if (new_victims && $urandom_range(0, 4) == 0) begin
        a = mk($urandom_range(0, 1) ? V0 : V1, $urandom_range(4, 7), $urandom_range(0, 63));
        host(1, a);
      end else begin
        host($urandom_range(0, 2) == 0, a);
      end
    end
  endtask

  int n_rowhit0, fill_row, fill_col, fill_bank;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);

    // ---------------------------------------------------------- warm-up
    for (int i = 0; i < 48; i++) host(1, mk(i % 2 ? V0 : V1, $urandom_range(0, 3), $urandom_range(0, 15)));
    for (int i = 0; i < 24; i++) host(1, mk(i % 2, $urandom_range(0, 3), $urandom_range(0, 15)));
    for (int i = 0; i < 24; i++) host(1, mk($urandom_range(16, 31), $urandom_range(0, 3), $urandom_range(0, 63)));
    read_all();
    check(flag == FLAG_NONE && st_victim_acc == 0, "no translation before closing");

    // ---------------------------------------------------------- dynamic closing
    @(negedge clk);
    var_valid = 1; var_victim = '0; var_victim[V0] = 1; var_victim[V1] = 1; dynamic = 1;
    @(negedge clk);
    var_valid = 0;
    repeat (5) @(negedge clk);
    check(victim_map == var_victim, "V holds the victim banks");
    check(flag == FLAG_MIGRATE, "FLAG 01 during migration");
    while (!banks_down) traffic(1, 1);
    check(flag == FLAG_REMAP, "FLAG 10 when banks are down");
    check(!vdd_bank[V0] && !vdd_bank[V1] && vdd_bank[0] && vdd_bank[1], "victim banks gated");
    check(st_closings == 1, "one closing");
    // Victim banks lost their contents: everything must come from targets.
    read_all();
    traffic(150, 1);
    read_all();
    check(st_victim_acc > 0 && st_interrupts > 0, "translated and interrupted accesses");

    // ---------------------------------------------------------- target overflow
    // New words in target bank 0, in rows far from the relocated victim
    // data, until it passes 90% of its capacity: victim 3, paired with it,
    // is reopened alone; victim 9 stays off and FLAG stays 10.
    if (OVF_TEST) begin
      automatic int col = 0;
      while (!vdd_bank[V0] && col < 1024) begin host(1, mk(0, 300, col)); col++; end
      while (remap_busy || victim_map[V0]) host(0, pool[$urandom_range(0, pool.size() - 1)]);
      $display("target overflow after %0d new words in bank 0", col);
      check(vdd_bank[V0] && !vdd_bank[V1] && flag == FLAG_REMAP && banks_down,
            "target overflow reopens its victim only");
      check(st_openings == 1 && victim_map[V1] && !locked, "one pair reopened");
      read_all();
      traffic(100, 0);
      read_all();
    end

    // ---------------------------------------------------------- reopening
    // Fill healthy, non-target banks with new words until the auxiliary
    // trie passes 90% and the unit reopens the banks.
    fill_bank = 16; fill_row = 100; fill_col = 0;
    while (flag != FLAG_NONE || banks_down || !locked) begin
      if (!trie_over && flag == FLAG_REMAP) begin
        host(1, mk(fill_bank, fill_row, fill_col));
        fill_col++;
        if (fill_col == 1024) begin fill_col = 0; fill_row++; end
        if (fill_row == 32768) begin fill_row = 100; fill_bank++; end
      end else begin
        // During wake-up and back-migration the host keeps reading.
        host(0, pool[$urandom_range(0, pool.size() - 1)]);
      end
    end
    check(st_openings == (OVF_TEST ? 2 : 1) && locked, "banks reopened");
    check(vdd_bank[V0] && vdd_bank[V1], "victim banks powered");
    check(wake_events[V0] == 1 && wake_events[V1] == 1, "one wake-up each");
    check(st_back >= st_migrated, "every migrated word copied back");
    read_all();
    // A second closing is refused after reopening.
    @(negedge clk); var_valid = 1; @(negedge clk); var_valid = 0;
    repeat (50) @(negedge clk);
    check(st_closings == 1 && flag == FLAG_NONE, "no closing after reopening");

    $display("dynamic: reqs=%0d rowhits=%0d victim=%0d interrupts=%0d wstalls=%0d copies=%0d",
             st_reqs, st_row_hits, st_victim_acc, st_interrupts, st_wstalls, st_copies);
    $display("dynamic: migrated=%0d collisions=%0d prio=%0d back=%0d closings=%0d openings=%0d",
             st_migrated, st_collisions, st_prio, st_back, st_closings, st_openings);
    check(st_row_hits > 0,   "mechanism: row hits");
    check(st_migrated > 0,   "mechanism: migration");
    check(st_collisions > 0, "mechanism: address collisions");
    check(st_wstalls > 0,    "mechanism: write stalls");
    check(st_prio > 0,       "mechanism: write-table priority");
    check(st_copies > 0 && n_copy == int'(st_copies), "mechanism: RowClone copies");
    check(st_back > 0,       "mechanism: back-migration");
    check(st_interrupts > 0, "mechanism: INTERRUPT");
    if (OVF_TEST) check(st_openings == 2, "mechanism: target-bank overflow");
    check(st_victim_acc > 0, "mechanism: victim accesses");

    // ---------------------------------------------------------- static closing
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1; repeat (5) @(negedge clk);
    // The reset emptied the tries: rewrite every word so that occupancy is
    // known again before the static closing.
    foreach (pool[i]) host(1, pool[i]);
    @(negedge clk);
    var_valid = 1; dynamic = 0;
    @(negedge clk);
    var_valid = 0;
    while (!banks_down) @(negedge clk);
    check(flag == FLAG_REMAP && st_closings == 1 && st_copies == 0, "static closing moves nothing");
    // Victim data is gone; only healthy words stay in the reference.
    begin
      dram_addr_t keep [$];
      foreach (pool[i]) if (is_victim(pool[i])) ref_m.delete(pool[i]); else keep.push_back(pool[i]);
      pool = keep;
    end
    // New victim words are given words of their own in the target banks.
    for (int i = 0; i < 40; i++) host(1, mk(i % 2 ? V0 : V1, $urandom_range(0, 3), $urandom_range(0, 15)));
    read_all();
    $display("static: victim=%0d interrupts=%0d wstalls=%0d migrated=%0d collisions=%0d",
             st_victim_acc, st_interrupts, st_wstalls, st_migrated, st_collisions);
    check(st_victim_acc > 0 && st_wstalls > 0, "mechanism: static-closing translation");

    check(dram_errors == 0, "DRAM protocol clean");
    $display("longest host wait %0d cycles", lat_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  varram_top #(
    .PRI_LEAVES(128), .PRI_NODES(256), .AUX_LEAVES(512), .AUX_NODES(1024),
    .BANK_CAP_W(7), .CHECK_PERIOD(16)
  ) dut (.*);
endmodule
