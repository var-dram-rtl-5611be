// tb_util_counter: self-checking test of the utilization compute unit.
// Small sizes: 16 words per bank, tries of 100/200 and 50/100 entries, a
// check every 8 cycles.  Random auxiliary-trie inserts (new and repeated
// keys) are fed in and the per-bank counts are compared with a reference.
// The 90% thresholds are checked at their exact edges (14 vs 15 words of a
// 16-word bank; 89 vs 90 of 100 trie leaves, and each other trie pool), and
// reopen must follow a change within one check period.
//
// Interface and timing: no ports; a 10-unit clock period, a watchdog that
// counts a failure and stops the run if it hangs, and a final line
// `TB_RESULT checks=N failures=M`.  Random stimulus uses $urandom.
// The 90% thresholds are the paper's; the check period is this design's.
module tb_util_counter;
  import varram_pkg::*;

  localparam int unsigned CAPW = 4, PER = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic aux_ins_fire = 0, aux_ins_done = 0, aux_ins_new = 0;
  logic [KEY_W-1:0] aux_ins_key = '0;
  logic [7:0] aux_leaves = '0;
  logic [8:0] aux_nodes = '0;
  logic [6:0] pri_leaves = '0;
  logic [7:0] pri_nodes = '0;
  logic [NBANKS-1:0] bank_over;
  logic trie_over, reopen;
  logic [CAPW:0] bank_count [NBANKS];

  util_counter #(.AUX_LEAVES(100), .AUX_NODES(200), .PRI_LEAVES(50),
                 .PRI_NODES(100), .BANK_CAP_W(CAPW), .THRESH_PCT(90),
                 .CHECK_PERIOD(PER)) dut (
    .clk, .rst_n, .aux_ins_fire, .aux_ins_key, .aux_ins_done, .aux_ins_new,
    .aux_leaves, .aux_nodes, .pri_leaves, .pri_nodes, .bank_over, .trie_over,
    .reopen, .bank_count);

  int ref_c [NBANKS];
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

  task automatic insert(int rb, logic is_new);
    dram_addr_t a;
    a.rank = RANK_W'(rb >> BANK_W); a.bank = BANK_W'(rb);
    a.row = ROW_W'($urandom); a.col = COL_W'($urandom);
    @(negedge clk);
    aux_ins_fire = 1; aux_ins_key = key_of(a);
    @(negedge clk);
    aux_ins_fire = 0;
    repeat ($urandom_range(2, 4)) @(negedge clk);
    aux_ins_done = 1; aux_ins_new = is_new;
    @(negedge clk);
    aux_ins_done = 0; aux_ins_new = 0;
    if (is_new) ref_c[rb]++;
  endtask

  // Waits up to one check period (+1) for reopen to reach `want`.
  task automatic expect_reopen(logic want, string what);
    int n = 0;
    while (reopen !== want && n <= PER + 1) begin @(negedge clk); n++; end
    check(reopen === want && n <= PER + 1, what);
  endtask

  initial begin
    for (int i = 0; i < NBANKS; i++) ref_c[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (PER * 2) @(negedge clk);
    check(!reopen && bank_over == '0 && !trie_over, "idle after reset");

    // Random traffic below the threshold.
    for (int n = 0; n < 120; n++) begin
      automatic int rb = $urandom_range(0, NBANKS - 1);
      if (ref_c[rb] < 14) insert(rb, ($urandom_range(0, 3) != 0));
    end
    for (int i = 0; i < NBANKS; i++)
      check(int'(bank_count[i]) == ref_c[i], $sformatf("bank %0d count", i));
    // Bring bank 5 to exactly 14 words: still below 90%.
    while (ref_c[5] < 14) insert(5, 1);
    repeat (PER + 2) @(negedge clk);
    check(!bank_over[5] && !reopen, "14/16 words is below threshold");
    insert(5, 0);
    repeat (PER + 2) @(negedge clk);
    check(!bank_over[5], "repeated key does not count");
    insert(5, 1);
    expect_reopen(1, "15/16 words raises reopen");
    check(bank_over[5] && !trie_over, "bank 5 flagged over");
    check(int'(bank_count[5]) == 15, "bank 5 count");

    // Trie occupancy thresholds, each pool on its own.
    rst_n = 0; #1; rst_n = 1;
    for (int i = 0; i < NBANKS; i++) ref_c[i] = 0;
    expect_reopen(0, "reset clears reopen");
    aux_leaves = 89; repeat (PER + 2) @(negedge clk);
    check(!reopen && !trie_over, "89% aux leaves below threshold");
    aux_leaves = 90; expect_reopen(1, "90% aux leaves raises reopen");
    check(trie_over, "trie_over with aux leaves");
    aux_leaves = 0; expect_reopen(0, "reopen falls with occupancy");
    aux_nodes = 180; expect_reopen(1, "90% aux nodes");
    aux_nodes = 179; expect_reopen(0, "89.5% aux nodes");
    pri_leaves = 45; expect_reopen(1, "90% primary leaves");
    pri_leaves = 44; expect_reopen(0, "88% primary leaves");
    pri_nodes = 90; expect_reopen(1, "90% primary nodes");
    pri_nodes = 0; expect_reopen(0, "primary nodes cleared");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
