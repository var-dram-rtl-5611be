// tb_addr_translator: self-checking test of the address translator.
// The translator is connected to a small real hardware trie (loaded by the
// testbench through its insert port) and to a testbench copy of the
// variation matrix.  Random addresses, drawn from stored trie keys, other
// victim-bank addresses and healthy-bank addresses, are sent under every
// FLAG value.  Each result is compared with a reference of the translation
// rules (including `pending` for a trie miss at FLAG 10), and the latency
// is checked: 1 cycle untranslated, 4 cycles through
// the trie, 7 cycles when INTERRUPT fires.
//
// Interface and timing: no ports; a 10-unit clock period, a watchdog that
// counts a failure and stops the run if it hangs, and a final line
// `TB_RESULT checks=N failures=M`.  Random stimulus uses $urandom.
// The 3 INTERRUPT stall cycles and the 3-cycle trie lookup are the
// paper's; the one-cycle decode step and the pending flag are this
// design's own.
module tb_addr_translator;
  import varram_pkg::*;

  localparam int unsigned VW = ROW_W + COL_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flag_t flag = FLAG_NONE;
  logic req_valid = 0, req_ready;
  dram_addr_t req_addr = '0;
  logic [RB_W-1:0] vm_idx;
  vm_entry_t vm_entry;
  logic lk_valid, lk_done, lk_hit;
  logic [KEY_W-1:0] lk_key;
  rowcol_t lk_val;
  logic done, translated, intr, pending;
  dram_addr_t eff_addr;

  vm_entry_t vm [NBANKS];
  assign vm_entry = vm[vm_idx];

  addr_translator dut (
    .clk, .rst_n, .flag, .req_valid, .req_ready, .req_addr, .vm_idx,
    .vm_entry, .lk_valid, .lk_key, .lk_done, .lk_hit, .lk_val, .done,
    .eff_addr, .translated, .intr, .pending);

  // Trie
  logic ins_valid = 0, ins_ready, ins_done, ins_new, ins_full;
  logic [KEY_W-1:0] ins_key = '0;
  logic [VW-1:0] ins_val = '0;
  logic t_lk_valid [1], t_lk_done [1], t_lk_hit [1];
  logic [KEY_W-1:0] t_lk_key [1];
  logic [VW-1:0] t_lk_val [1];
  logic [5:0] sc_idx = '0;
  logic sc_valid;
  logic [KEY_W-1:0] sc_key;
  logic [VW-1:0] sc_val;
  logic [6:0] leaf_count;
  logic [7:0] node_count;
  assign t_lk_valid[0] = lk_valid;
  assign t_lk_key[0]   = lk_key;
  assign lk_done = t_lk_done[0];
  assign lk_hit  = t_lk_hit[0];
  assign lk_val  = rowcol_t'(t_lk_val[0]);

  hw_trie #(.LEAVES(64), .NODES(128), .VAL_W(VW), .LK_PORTS(1)) u_trie (
    .clk, .rst_n, .clear(1'b0), .ins_valid, .ins_ready, .ins_key, .ins_val,
    .ins_done, .ins_new, .ins_full, .lk_valid(t_lk_valid), .lk_key(t_lk_key),
    .lk_done(t_lk_done), .lk_hit(t_lk_hit), .lk_val(t_lk_val), .sc_idx,
    .sc_valid, .sc_key, .sc_val, .leaf_count, .node_count);

  rowcol_t ref_t [logic [KEY_W-1:0]];
  dram_addr_t stored [$];
  int checks = 0, failures = 0;
  int n_int = 0, n_int_seen = 0, n_pend = 0, n_direct = 0, n_tr = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && intr) n_int_seen++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic dram_addr_t raddr(int rb);
    dram_addr_t a;
    a.rank = RANK_W'(rb >> BANK_W);
    a.bank = BANK_W'(rb);
    a.row  = ROW_W'($urandom);
    a.col  = COL_W'($urandom);
    return a;
  endfunction

  task automatic run_one(dram_addr_t a);
    int lat = 0;
    dram_addr_t exp_a;
    int exp_lat;
    logic exp_tr, exp_pend;
    vm_entry_t e = vm[rb_of(a)];
    logic hit = ref_t.exists(key_of(a));
    rowcol_t rc = rowcol_t'({a.row, a.col});
    if (!e.victim || flag == FLAG_NONE) begin
      exp_a = a; exp_lat = 1; exp_tr = 0; exp_pend = 0; n_direct++;
    end else if (flag[1] || hit) begin
      exp_tr = 1; exp_pend = !hit; n_tr++;
      if (hit && ref_t[key_of(a)] != rc) begin
        exp_a = '{rank: e.tgt_rank, bank: e.tgt_bank,
                  row: ref_t[key_of(a)].row, col: ref_t[key_of(a)].col};
        exp_lat = 7; n_int++;
      end else begin
        exp_a = '{rank: e.tgt_rank, bank: e.tgt_bank, row: a.row, col: a.col};
        exp_lat = 4;
      end
    end else begin
      exp_a = a; exp_lat = 4; exp_tr = 0; exp_pend = 1; n_pend++;
    end
    @(negedge clk);
    check(req_ready, "ready when idle");
    req_valid = 1; req_addr = a;
    @(negedge clk);
    req_valid = 0; req_addr = raddr($urandom_range(0, NBANKS - 1));
    lat = 1;
    while (!done && lat < 20) begin @(negedge clk); lat++; end
    check(lat == exp_lat, $sformatf("latency %0d expected %0d", lat, exp_lat));
    check(eff_addr == exp_a, "effective address");
    check(translated == exp_tr, "translated flag");
    check(pending == exp_pend, "pending flag");
  endtask

  initial begin
    logic [NBANKS-1:0] vic;
    rst_n = 0;
    vic = 32'h0000_0C05;   // banks 0, 2, 10, 11 are victims
    for (int i = 0; i < NBANKS; i++) begin
      vm[i].victim   = vic[i];
      vm[i].tgt_rank = RANK_W'((i + 16) >> BANK_W);
      vm[i].tgt_bank = BANK_W'(i + 16);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);

    // Load the trie: migrated victim addresses, half of them relocated.
    for (int n = 0; n < 40; n++) begin
      automatic int vb = n % 4 == 0 ? 0 : n % 4 == 1 ? 2 : n % 4 == 2 ? 10 : 11;
      automatic dram_addr_t a = raddr(vb);
      automatic rowcol_t v = rowcol_t'({a.row, a.col});
      if (n % 2) v.col = v.col + COL_W'($urandom_range(1, 5));
      if (ref_t.exists(key_of(a))) continue;
      @(negedge clk);
      while (!ins_ready) @(negedge clk);
      ins_valid = 1; ins_key = key_of(a); ins_val = VW'(v);
      @(negedge clk);
      ins_valid = 0;
      while (!ins_done) @(negedge clk);
      ref_t[key_of(a)] = v;
      stored.push_back(a);
    end

    for (int n = 0; n < 600; n++) begin
      automatic int kind = $urandom_range(0, 2);
      automatic dram_addr_t a;
      case ($urandom_range(0, 2))
        0: flag = FLAG_NONE;
        1: flag = FLAG_MIGRATE;
        default: flag = FLAG_REMAP;
      endcase
      if (kind == 0)      a = stored[$urandom_range(0, stored.size() - 1)];
      else if (kind == 1) a = raddr(n % 2 ? 2 : 11);
      else                a = raddr($urandom_range(0, NBANKS - 1));
      run_one(a);
    end
    check(n_int_seen == n_int, "one INTERRUPT pulse per corrected address");
    check(n_int > 0 && n_pend > 0 && n_direct > 0 && n_tr > 0, "all paths exercised");
    $display("direct=%0d translated=%0d interrupts=%0d pending=%0d",
             n_direct, n_tr, n_int, n_pend);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
