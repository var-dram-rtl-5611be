// tb_power_mgmt_unit: self-checking test of the power management unit.
// The testbench plays the remapping unit (remap_done after a random delay),
// the sleep transistors (pwr_good returns a few cycles after sleep falls)
// and the utilization counter (reopen).  For random victim sets, with
// dynamic and static closing, it checks: the V entries written (lowest
// victim to lowest unused healthy bank, one pair per cycle), the single
// close command of the right kind, that no bank sleeps before the
// remapping acknowledgment, that exactly the paired victims sleep after it,
// the reopen sequence (sleep released, open only once every bank has power
// good, V cleared after the back-migration), and the lock against closing
// again.  A victim set with no victims must not start anything.  Further
// rounds raise bank_over on the targets one at a time, in random order:
// only the paired victim may wake, open_one names it after its power good,
// its V entry is cleared, the others stay closed, and after the last pair
// a full reopening follows.
//
// Interface and timing: no ports; a 10-unit clock period, a watchdog that
// counts a failure and stops the run if it hangs, and a final line
// `TB_RESULT checks=N failures=M`.  Random stimulus uses $urandom.
// The pairing rule and the lock after reopening are this design's reading
// of the paper's pairing requirement and "no more power-down" rule.
module tb_power_mgmt_unit;
  import varram_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic var_valid = 0, dynamic = 0, remap_done = 0, reopen = 0, open_one;
  logic [RB_W-1:0] open_rb;
  logic [NBANKS-1:0] bank_over = '0;
  logic [NBANKS-1:0] var_victim = '0, sleep, pwr_good;
  logic vm_clear, vm_wr_en, close_dyn, close_static, open, banks_down, locked;
  logic [RB_W-1:0] vm_wr_idx;
  vm_entry_t vm_wr_entry;
  logic [31:0] close_count, open_count;

  power_mgmt_unit dut (
    .clk, .rst_n, .var_valid, .var_victim, .dynamic, .vm_clear, .vm_wr_en,
    .vm_wr_idx, .vm_wr_entry, .close_dyn, .close_static, .open, .open_one, .open_rb,
    .remap_done, .sleep, .pwr_good, .reopen, .bank_over, .banks_down, .locked, .close_count,
    .open_count);

  // Supply model: pwr_good returns 5 cycles after sleep falls.
  int settle [NBANKS];
  always @(posedge clk) begin
    for (int i = 0; i < NBANKS; i++) begin
      if (sleep[i]) settle[i] <= 5;
      else if (settle[i] > 0) settle[i] <= settle[i] - 1;
    end
  end
  always_comb for (int i = 0; i < NBANKS; i++) pwr_good[i] = !sleep[i] && settle[i] == 0;

  int checks = 0, failures = 0;
  int n_dyn = 0, n_static = 0, n_open = 0, n_vm = 0, n_clr = 0, n_one = 0;
  int one_rb_log [$];
  logic [RB_W-1:0] wr_idx_log [$];
  vm_entry_t       wr_ent_log [$];
  int              wr_cyc_log [$];
  int cyc = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (close_dyn) n_dyn++;
      if (close_static) n_static++;
      if (open) n_open++;
      if (open_one) begin n_one++; one_rb_log.push_back(int'(open_rb)); end
      if (vm_clear) n_clr++;
      if (vm_wr_en) begin
        wr_idx_log.push_back(vm_wr_idx); wr_ent_log.push_back(vm_wr_entry);
        wr_cyc_log.push_back(cyc);
      end
    end
  end

  initial begin
    for (int i = 0; i < NBANKS; i++) settle[i] = 0;
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic reset_dut();
    rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
    n_dyn = 0; n_static = 0; n_open = 0; n_clr = 0; n_one = 0; one_rb_log = {};
    bank_over = '0;
    wr_idx_log = {}; wr_ent_log = {}; wr_cyc_log = {};
  endtask

  task automatic one_round(logic [NBANKS-1:0] vic, logic dyn, logic ovf = 1'b0);
    logic [NBANKS-1:0] vm_, hm, exp_paired;
    int ev [$], et [$];
    int npairs = 0, w;
    reset_dut();
    // Reference pairing.
    vm_ = vic; hm = ~vic; exp_paired = '0;
    begin
      for (int i = 0; i < NBANKS; i++) if (vic[i]) ev.push_back(i);
      for (int i = 0; i < NBANKS; i++) if (!vic[i]) et.push_back(i);
      npairs = ev.size() < et.size() ? ev.size() : et.size();
      @(negedge clk);
      var_valid = 1; var_victim = vic; dynamic = dyn;
      @(negedge clk);
      var_valid = 0;
      repeat (npairs + 4) @(negedge clk);
      check(wr_idx_log.size() == npairs, "number of V entries");
      for (int k = 0; k < npairs && k < wr_idx_log.size(); k++) begin
        check(wr_idx_log[k] == RB_W'(ev[k]), "victim order");
        check(wr_ent_log[k].victim && {wr_ent_log[k].tgt_rank, wr_ent_log[k].tgt_bank} == RB_W'(et[k]),
              "target pairing");
        if (k > 0) check(wr_cyc_log[k] == wr_cyc_log[k-1] + 1, "one pair per cycle");
        exp_paired[ev[k]] = 1'b1;
      end
    end
    if (npairs == 0) begin
      repeat (10) @(negedge clk);
      check(n_dyn == 0 && n_static == 0 && sleep == '0, "no victims: nothing happens");
      return;
    end
    check(n_dyn == (dyn ? 1 : 0) && n_static == (dyn ? 0 : 1), "one close command of the right kind");
    w = $urandom_range(1, 30);
    repeat (w) begin @(negedge clk); check(sleep == '0, "no sleep before acknowledgment"); end
    remap_done = 1; @(negedge clk); remap_done = 0;
    check(sleep == exp_paired, "paired victims sleep");
    check(banks_down && close_count == 1, "banks down, one closing counted");
    repeat ($urandom_range(1, 20)) @(negedge clk);
    check(sleep == exp_paired && n_open == 0, "stays closed until reopen");
    if (ovf) begin
      // Target-bank overflow: victims reopen one at a time, in the order
      // their targets overflow, and only the paired victim wakes.
      logic [NBANKS-1:0] still = exp_paired;
      int order [$];
      for (int k = 0; k < npairs; k++) order.push_back(k);
      order.shuffle();
      foreach (order[j]) begin
        automatic int k = order[j];
        int nv0 = wr_idx_log.size();
        bank_over[et[k]] = 1'b1;
        @(negedge clk);
        still[ev[k]] = 1'b0;
        check(sleep == still, "only the overflowed pair's victim wakes");
        w = 0;
        while (!open_one && w < 20) begin @(negedge clk); w++; end
        check(open_one && open_rb == RB_W'(ev[k]) && pwr_good[ev[k]], "open_one for that victim after power good");
        check(n_open == 0, "no full reopening");
        repeat ($urandom_range(1, 10)) @(negedge clk);
        check(n_one == j + 1, "one open_one per overflow");
        remap_done = 1; @(negedge clk); remap_done = 0;
        check(wr_idx_log.size() == nv0 + 1 && wr_idx_log[nv0] == RB_W'(ev[k]) && !wr_ent_log[nv0].victim,
              "V entry of that victim cleared");
        if (j + 1 < npairs) begin
          check(banks_down && sleep == still && open_count == j + 1, "other pairs stay closed");
          repeat ($urandom_range(1, 10)) @(negedge clk);
        end
      end
      // After the last pair the table is cleared by a full reopening.
      w = 0;
      while (!open && w < 20) begin @(negedge clk); w++; end
      check(open, "full reopening after the last pair");
    end else begin
    // Reopen.
    reopen = 1; @(negedge clk); reopen = 0;
    check(sleep == '0, "sleep released on reopen");
    w = 0;
    while (!open && w < 20) begin
      check(!(&pwr_good), "open waits for power good");
      @(negedge clk); w++;
    end
    check(open && (&pwr_good), "open issued after power good");
    end
    repeat ($urandom_range(1, 20)) @(negedge clk);
    check(n_clr == 0, "V kept during back-migration");
    remap_done = 1; @(negedge clk); remap_done = 0;
    @(negedge clk);
    check(n_clr == 1 && locked && open_count == (ovf ? npairs + 1 : 1), "V cleared and locked");
    // A further closing request is refused.
    var_valid = 1; var_victim = vic; @(negedge clk); var_valid = 0;
    repeat (npairs + 10) @(negedge clk);
    check(n_dyn + n_static == 1 && sleep == '0, "no closing after reopening");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    one_round(32'h0000_0000, 1'b1);
    one_round(32'h0000_0005, 1'b1);
    one_round(32'h8000_0001, 1'b0);
    one_round(32'hFFFF_FFF0, 1'b1);
    for (int n = 0; n < 16; n++) begin
      automatic logic [NBANKS-1:0] v = '0;
      repeat ($urandom_range(1, 8)) v[$urandom_range(0, NBANKS - 1)] = 1'b1;
      one_round(v, n % 3 != 0);
    end
    for (int n = 0; n < 8; n++) begin
      automatic logic [NBANKS-1:0] v = '0;
      repeat ($urandom_range(1, 6)) v[$urandom_range(0, NBANKS - 1)] = 1'b1;
      one_round(v, n % 2 == 0, 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
