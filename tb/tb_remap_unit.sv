// tb_remap_unit: self-checking test of the remapping unit with two small
// real tries (auxiliary 256 leaves, primary 128 leaves).
// The testbench records written addresses through the unit's rec_* port
// (filling the auxiliary trie), plays the memory controller's copy engine
// on a word-level memory model, and plays the write-stall path by posting
// victim addresses into the write table while migration runs.
// Target-bank words that equal victim row/columns are written beforehand
// so that address collisions occur.  Checks:
//   dynamic closing: FLAG 00 -> 01 -> 10 with one done pulse; every written
//   victim address copied exactly once, into its V target bank, to a word
//   that was free (collisions resolved by the column increment), data
//   intact; collision count matches the reference; write-table entries are
//   migrated ahead of the scan and released with wp_done;
//   reopening: block_writes held, every migrated word copied back, primary
//   trie emptied, FLAG 10 -> 00, data intact in the victim banks;
//   first write after closing (FLAG 10): a write-table entry for a victim
//   address never written is given a free target word and a trie entry,
//   with no copy and no change of FLAG;
//   single-bank reopening first (bank 3): only its words copied back, FLAG
//   and table kept, writes held until V is cleared, bank 9 untouched;
//   static closing: FLAG 10 at once, nothing copied.
//
// Interface and timing: no ports; a 10-unit clock period, a watchdog that
// counts a failure and stops the run if it hangs, and a final line
// `TB_RESULT checks=N failures=M`.  Random stimulus uses $urandom.
// Collision handling by column increment, write-table priority and the
// copy-back on reopening follow the paper; the FLAG-10 first-write path
// and the one-word copy size are this design's own.
module tb_remap_unit;
  import varram_pkg::*;

  localparam int unsigned AL = 256, AN = 512, PL = 128, PN = 256;
  localparam int unsigned VW = ROW_W + COL_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic close_dyn = 0, close_static = 0, open = 0, open_one = 0;
  logic [RB_W-1:0] open_rb = '0;
  flag_t flag;
  logic busy, done, block_writes;
  logic [RB_W-1:0] vm_idx;
  vm_entry_t vm_entry;
  logic rec_valid = 0, rec_ready;
  dram_addr_t rec_addr = '0;
  logic wp_valid = 0, wp_ready, wp_done;
  dram_addr_t wp_addr = '0;
  logic cp_valid, cp_done = 0;
  dram_addr_t cp_src, cp_dst;
  logic aux_ins_valid, aux_ins_ready, aux_ins_done;
  logic [KEY_W-1:0] aux_ins_key;
  logic aux_lk_valid, aux_lk_done, aux_lk_hit;
  logic [KEY_W-1:0] aux_lk_key;
  logic [$clog2(AL)-1:0] aux_sc_idx;
  logic aux_sc_valid;
  logic [KEY_W-1:0] aux_sc_key;
  logic pri_clear, pri_ins_valid, pri_ins_ready, pri_ins_done;
  logic [KEY_W-1:0] pri_ins_key;
  rowcol_t pri_ins_val;
  logic pri_lk_valid, pri_lk_done, pri_lk_hit;
  logic [KEY_W-1:0] pri_lk_key;
  logic [$clog2(PL)-1:0] pri_sc_idx;
  logic pri_sc_valid;
  logic [KEY_W-1:0] pri_sc_key;
  rowcol_t pri_sc_val;
  logic [31:0] mig_count, coll_count, prio_count, back_count;

  vm_entry_t vm [NBANKS];
  assign vm_entry = vm[vm_idx];

  remap_unit #(.AUX_LEAVES(AL), .PRI_LEAVES(PL), .WT_DEPTH(4)) dut (.*);

  // Auxiliary trie
  logic a_lk_v [1], a_lk_d [1], a_lk_h [1];
  logic [KEY_W-1:0] a_lk_k [1];
  logic [0:0] a_lk_val [1];
  logic a_new, a_full;
  logic [0:0] a_sc_val;
  logic [$clog2(AL):0] a_lc;
  logic [$clog2(AN):0] a_nc;
  assign a_lk_v[0] = aux_lk_valid; assign a_lk_k[0] = aux_lk_key;
  assign aux_lk_done = a_lk_d[0];  assign aux_lk_hit = a_lk_h[0];
  hw_trie #(.LEAVES(AL), .NODES(AN), .VAL_W(1), .LK_PORTS(1)) u_aux (
    .clk, .rst_n, .clear(1'b0), .ins_valid(aux_ins_valid), .ins_ready(aux_ins_ready),
    .ins_key(aux_ins_key), .ins_val(1'b1), .ins_done(aux_ins_done), .ins_new(a_new),
    .ins_full(a_full), .lk_valid(a_lk_v), .lk_key(a_lk_k), .lk_done(a_lk_d),
    .lk_hit(a_lk_h), .lk_val(a_lk_val), .sc_idx(aux_sc_idx), .sc_valid(aux_sc_valid),
    .sc_key(aux_sc_key), .sc_val(a_sc_val), .leaf_count(a_lc), .node_count(a_nc));

  // Primary trie
  logic p_lk_v [1], p_lk_d [1], p_lk_h [1];
  logic [KEY_W-1:0] p_lk_k [1];
  logic [VW-1:0] p_lk_val [1];
  logic p_new, p_full;
  logic [VW-1:0] p_sc_val;
  logic [$clog2(PL):0] p_lc;
  logic [$clog2(PN):0] p_nc;
  assign p_lk_v[0] = pri_lk_valid; assign p_lk_k[0] = pri_lk_key;
  assign pri_lk_done = p_lk_d[0];  assign pri_lk_hit = p_lk_h[0];
  assign pri_sc_val = rowcol_t'(p_sc_val);
  hw_trie #(.LEAVES(PL), .NODES(PN), .VAL_W(VW), .LK_PORTS(1)) u_pri (
    .clk, .rst_n, .clear(pri_clear), .ins_valid(pri_ins_valid), .ins_ready(pri_ins_ready),
    .ins_key(pri_ins_key), .ins_val(VW'(pri_ins_val)), .ins_done(pri_ins_done),
    .ins_new(p_new), .ins_full(p_full), .lk_valid(p_lk_v), .lk_key(p_lk_k),
    .lk_done(p_lk_d), .lk_hit(p_lk_h), .lk_val(p_lk_val), .sc_idx(pri_sc_idx),
    .sc_valid(pri_sc_valid), .sc_key(pri_sc_key), .sc_val(p_sc_val),
    .leaf_count(p_lc), .node_count(p_nc));

  // Word memory and copy engine.
  logic [63:0] mem [logic [ADDR_W-1:0]];
  logic [ADDR_W-1:0] occupied [logic [ADDR_W-1:0]];   // every used word
  dram_addr_t moved [logic [ADDR_W-1:0]];             // victim -> destination
  int copies = 0, back_copies = 0, dup = 0;
  logic phase_back = 0;
  logic [63:0] orig [logic [ADDR_W-1:0]];

  int checks = 0, failures = 0;
  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cp_done <= 1'b0;
    if (rst_n && cp_valid && !cp_done && $urandom_range(0, 3) == 0) begin
      cp_done <= 1'b1;
      mem[cp_dst] = mem.exists(cp_src) ? mem[cp_src] : 64'hDEAD;
      if (!phase_back) begin
        copies++;
        if (moved.exists(cp_src)) dup++;
        moved[cp_src] = cp_dst;
        if (!vm[rb_of(cp_src)].victim)
          begin failures++; $display("FAIL: copy from a healthy bank"); end
        if (rb_of(cp_dst) != {vm[rb_of(cp_src)].tgt_rank, vm[rb_of(cp_src)].tgt_bank})
          begin failures++; $display("FAIL: copy not into the target bank"); end
        if (occupied.exists(cp_dst))
          begin failures++; $display("FAIL: copy onto an occupied word"); end
        occupied[cp_dst] = cp_dst;
        checks += 3;
      end else begin
        back_copies++;
        checks++;
        if (!(moved.exists(cp_dst) && moved[cp_dst] == cp_src))
          begin failures++; $display("FAIL: back copy does not match a migration"); end
      end
    end
  end

  // Primary-trie entries made while FLAG is 10 (no copy to observe).
  always @(posedge clk)
    if (rst_n && pri_ins_valid && pri_ins_ready && flag == FLAG_REMAP)
      moved[addr_of_key(pri_ins_key)] = '{rank: vm[rb_of(addr_of_key(pri_ins_key))].tgt_rank,
                                          bank: vm[rb_of(addr_of_key(pri_ins_key))].tgt_bank,
                                          row: pri_ins_val.row, col: pri_ins_val.col};

  int flag_seq [$];
  flag_t flag_prev = FLAG_NONE;
  int n_done = 0, n_wp_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (flag != flag_prev) flag_seq.push_back(int'(flag));
    flag_prev <= flag;
    if (done) n_done++;
    if (wp_done) n_wp_done++;
    if (phase_back && !block_writes && busy) begin
      failures++; $display("FAIL: writes not blocked while migrating back");
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic record(dram_addr_t a);
    @(negedge clk);
    rec_valid = 1; rec_addr = a;
    while (!rec_ready) @(negedge clk);
    @(negedge clk);
    rec_valid = 0;
  endtask

  function automatic dram_addr_t mk(int rb, int row, int col);
    dram_addr_t a;
    a.rank = RANK_W'(rb >> BANK_W); a.bank = BANK_W'(rb);
    a.row = ROW_W'(row); a.col = COL_W'(col);
    return a;
  endfunction

  dram_addr_t victims_q [$];
  int exp_coll = 0;

  initial begin
    int rb;
    for (int i = 0; i < NBANKS; i++) vm[i] = '0;
    // Victims 3 -> 20, 9 -> 21.
    vm[3] = '{victim: 1'b1, tgt_rank: 2'd2, tgt_bank: 3'd4};
    vm[9] = '{victim: 1'b1, tgt_rank: 2'd2, tgt_bank: 3'd5};
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // Written data: victim words (rows 0-3), target and other healthy words.
    for (int n = 0; n < 60; n++) begin
      automatic dram_addr_t a;
      case (n % 4)
        0: a = mk(3, $urandom_range(0, 3), $urandom_range(0, 15));
        1: a = mk(9, $urandom_range(0, 3), $urandom_range(0, 15));
        2: a = mk($urandom_range(20, 21), $urandom_range(0, 3), $urandom_range(0, 15));
        default: a = mk($urandom_range(0, 31), $urandom(), $urandom());
      endcase
      if (occupied.exists(a)) continue;
      occupied[a] = a;
      mem[a] = {$urandom(), $urandom()};
      orig[a] = mem[a];
      if (vm[rb_of(a)].victim) victims_q.push_back(a);
      record(a);
    end
    // The last two victims in the list are left for the write table.
    repeat (10) @(negedge clk);

    // ------------------------------------------------ dynamic closing
    check(flag == FLAG_NONE, "FLAG starts at 00");
    @(negedge clk); close_dyn = 1; @(negedge clk); close_dyn = 0;
    check(flag == FLAG_MIGRATE && busy, "FLAG 01 while migrating");
    // Post two write-table entries while the walk is young.
    begin
      automatic int t = 0;
      automatic dram_addr_t w1 = victims_q[victims_q.size() - 1];
      automatic dram_addr_t w2 = victims_q[victims_q.size() - 2];
      automatic int c0;
      wp_valid = 1; wp_addr = w1; @(negedge clk);
      wp_addr = w2; @(negedge clk);
      wp_valid = 0;
      c0 = copies;
      while (n_wp_done < 2 && t < 2000) begin @(negedge clk); t++; end
      check(n_wp_done == 2, "write table entries released");
      check(moved.exists(w1) && moved.exists(w2), "stalled writes migrated");
      check(copies - c0 <= 3, "write table served ahead of the scan");
      // A healthy write recorded during migration shares the aux port.
      record(mk(17, 100, 100));
      occupied[mk(17, 100, 100)] = mk(17, 100, 100);
    end
    while (flag != FLAG_REMAP) @(negedge clk);
    @(negedge clk);
    check(n_done == 1, "one done pulse");
    check(!busy, "idle after migration");
    check(flag_seq.size() == 2 && flag_seq[0] == 1 && flag_seq[1] == 2, "FLAG 00 -> 01 -> 10");
    check(dup == 0, "no address migrated twice");
    check(copies == victims_q.size() && mig_count == 32'(victims_q.size()),
          "every victim word migrated once");
    check(prio_count == 2, "two priority migrations");
    check(int'(p_lc) == victims_q.size(), "primary trie holds every migrated word");
    foreach (victims_q[i]) begin
      automatic dram_addr_t v = victims_q[i];
      if (moved.exists(v)) begin
        check(mem[moved[v]] == orig[v], "data moved intact");
        if ({moved[v].row, moved[v].col} != {v.row, v.col}) exp_coll++;
      end else check(0, "victim word not migrated");
    end
    check(exp_coll > 0, "collisions occurred");
    check(coll_count >= 32'(exp_coll), "collision count covers relocated words");
    $display("victim words=%0d copies=%0d relocated=%0d collisions=%0d",
             victims_q.size(), copies, exp_coll, coll_count);

    // ------------------------------------------------ first write after closing
    // A write to a victim address never written before gets its own word.
    begin
      automatic dram_addr_t nv = mk(9, 2, 15);
      automatic int t = 0, c0 = copies, w0 = n_wp_done;
      while (occupied.exists(nv)) nv.row++;
      @(negedge clk); wp_valid = 1; wp_addr = nv; @(negedge clk); wp_valid = 0;
      while (n_wp_done == w0 && t < 2000) begin @(negedge clk); t++; end
      check(n_wp_done == w0 + 1, "first write after closing released");
      check(copies == c0, "no copy from a closed bank");
      check(moved.exists(nv), "first write entered in the primary trie");
      if (moved.exists(nv)) begin
        check(!occupied.exists(moved[nv]), "first write given a free word");
        check(rb_of(moved[nv]) == 5'd21, "first write in the target bank");
        occupied[moved[nv]] = moved[nv];
        orig[nv] = 64'h0123_4567_89AB_CDEF;
        mem[moved[nv]] = orig[nv];
        victims_q.push_back(nv);
      end
      check(flag == FLAG_REMAP && n_done == 1, "FLAG stays 10, no done");
    end

    // ------------------------------------------------ reopening
    phase_back = 1;
    // Victim banks lost their contents while gated.
    foreach (victims_q[i]) mem.delete(victims_q[i]);
    // Target-bank overflow: bank 3 alone is reopened first.
    begin
      automatic int n3 = 0, t = 0;
      foreach (victims_q[i]) if (rb_of(victims_q[i]) == 5'd3) n3++;
      @(negedge clk); open_one = 1; open_rb = 5'd3; @(negedge clk); open_one = 0;
      check(block_writes, "writes blocked during single-bank back-migration");
      while (n_done == 1 && t < 20000) begin @(negedge clk); t++; end
      check(n_done == 2, "done after single-bank back-migration");
      check(back_copies == n3 && back_count == 32'(n3), "only bank 3 words copied back");
      check(flag == FLAG_REMAP && p_lc != 0, "FLAG stays 10, table kept");
      repeat ($urandom_range(2, 8)) @(negedge clk);
      check(block_writes, "writes held until V entry cleared");
      vm[3] = '0;
      repeat (3) @(negedge clk);
      check(!block_writes && !busy, "released after V entry cleared");
      foreach (victims_q[i])
        if (rb_of(victims_q[i]) == 5'd3)
          check(mem.exists(victims_q[i]) && mem[victims_q[i]] == orig[victims_q[i]],
                "bank 3 data back");
        else
          check(!mem.exists(victims_q[i]), "bank 9 still closed");
    end
    @(negedge clk); open = 1; @(negedge clk); open = 0;
    check(block_writes, "writes blocked during back-migration");
    while (flag != FLAG_NONE) @(negedge clk);
    @(negedge clk);
    check(n_done == 3, "done after back-migration");
    check(back_copies == victims_q.size() && back_count == 32'(victims_q.size()),
          "every migrated word copied back");
    check(p_lc == 0, "primary trie cleared");
    check(!block_writes && !busy, "writes released");
    foreach (victims_q[i])
      check(mem.exists(victims_q[i]) && mem[victims_q[i]] == orig[victims_q[i]],
            "data back in the victim bank");

    // ------------------------------------------------ static closing
    begin
      automatic int c0 = copies + back_copies;
      phase_back = 0;
      @(negedge clk); close_static = 1; @(negedge clk); close_static = 0;
      check(flag == FLAG_REMAP && done, "static closing: FLAG 10 at once");
      repeat (50) @(negedge clk);
      check(copies + back_copies == c0 && !busy, "static closing moves nothing");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
