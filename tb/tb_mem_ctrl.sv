// tb_mem_ctrl: self-checking test of the memory controller.
// Around the controller: the behavioural DRAM (protocol checks), a model of
// the address translator (victim bank 3 maps to bank 20 with the same
// row/column; a word of bank 3 counts as migrated once it has been copied),
// and a model of the remapping unit that copies the written words of bank 3
// in the background through the copy port and serves the write table.
// Three phases follow FLAG: 00 (no translation), 01 (migration running:
// background copies, writes to unmigrated victim words are stalled, copied
// with priority and retried), 10 (bank 3 gated, all its words served from
// bank 20).  A last phase raises block_writes.
// Checks: every read returns the last data written to that host address;
// bus timing is exact (PRE->ACT = tRP on a row miss, ACT->RD/WR = tRCD, RD->data = CL,
// COPY->cp_done = T_COPY) and ACT->PRE is at least tRAS, or the long victim
// tRAS for a row opened by a redirected access; no command reaches a gated
// bank; writes wait while block_writes is high; the statistics counters.
//
// Interface and timing: no ports; a 10-unit clock period, a watchdog that
// counts a failure and stops the run if it hangs, and a final line
// `TB_RESULT checks=N failures=M`.  Random stimulus uses $urandom.
// The two tRAS values (victim = tRAS + 18 ns) follow the paper; the
// DDR4-2400 cycle counts and the copy time are this design's choices.
module tb_mem_ctrl;
  import varram_pkg::*;

  localparam int unsigned T_RCD = 16, T_RP = 16, T_CL = 16, T_RAS = 39,
                          T_RAS_V = 61, T_COPY = 48;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_we = 0, resp_valid;
  dram_addr_t req_addr = '0;
  logic [DATA_W-1:0] req_wdata = '0, resp_rdata;
  logic tr_valid, tr_ready, tr_done = 0, tr_translated = 0, tr_interrupt = 0, tr_pending = 0;
  dram_addr_t tr_addr, tr_eff = '0;
  logic rec_valid, rec_ready, wp_valid, wp_ready, wp_done = 0, block_writes = 0;
  dram_addr_t rec_addr, wp_addr;
  logic cp_valid = 0, cp_done;
  dram_addr_t cp_src = '0, cp_dst = '0;
  logic [NBANKS-1:0] bank_on = '1;
  dram_cmd_e dram_cmd;
  dram_addr_t dram_addr, dram_addr2;
  logic [DATA_W-1:0] dram_wdata, dram_rdata;
  logic [31:0] st_reqs, st_row_hits, st_victim_acc, st_interrupts, st_wstalls, st_copies;

  mem_ctrl #(.T_RCD(T_RCD), .T_RP(T_RP), .T_CL(T_CL), .T_RAS(T_RAS),
             .T_RAS_V(T_RAS_V), .T_COPY(T_COPY)) dut (.*);

  int dram_errors, n_act, n_copy;
  dram_model #(.T_RCD(T_RCD), .T_RAS(T_RAS)) u_dram (
    .clk, .init(!rst_n), .cmd(dram_cmd), .addr(dram_addr), .addr2(dram_addr2), .wdata(dram_wdata),
    .vdd_bank(bank_on), .rdata(dram_rdata), .errors(dram_errors), .n_act, .n_copy);

  int checks = 0, failures = 0;
  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ translator
  flag_t flag = FLAG_NONE;
  logic migrated [logic [ADDR_W-1:0]];
  logic cur_tr = 0;
  localparam int VB = 3, TB_ = 20;

  function automatic dram_addr_t to_target(dram_addr_t a);
    dram_addr_t t = a;
    t.rank = RANK_W'(TB_ >> BANK_W); t.bank = BANK_W'(TB_);
    return t;
  endfunction

  assign tr_ready = 1'b1;
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && tr_valid) begin
        automatic dram_addr_t a = tr_addr;
        automatic logic vic = int'(rb_of(a)) == VB && flag != FLAG_NONE;
        automatic int lat = vic ? 4 : 1;
        automatic logic intr = vic && $urandom_range(0, 4) == 0;
        if (intr) lat = 7;
        repeat (lat - 1) @(posedge clk);
        #1;
        tr_done = 1;
        tr_interrupt = intr;
        if (vic && (flag == FLAG_REMAP || migrated.exists(a))) begin
          tr_eff = to_target(a); tr_translated = 1; tr_pending = 0;
        end else begin
          tr_eff = a; tr_translated = 0; tr_pending = vic;
        end
        cur_tr = tr_translated;
        @(posedge clk); #1;
        tr_done = 0; tr_interrupt = 0;
      end
    end
  end

  // ------------------------------------------------------------ remap model
  logic [DATA_W-1:0] ref_m [logic [ADDR_W-1:0]];
  dram_addr_t to_copy [$];
  int n_int = 0;
  always @(posedge clk) if (rst_n && tr_interrupt) n_int++;

  assign rec_ready = ($urandom_range(0, 1) == 0);
  assign wp_ready  = 1'b1;

  task automatic do_copy(dram_addr_t a);
    int t = 0;
    @(negedge clk);
    cp_valid = 1; cp_src = a; cp_dst = to_target(a);
    while (!cp_done && t < 5000) begin @(negedge clk); t++; end
    migrated[a] = 1'b1;
    cp_valid = 0;
  endtask

  logic wp_pending = 0;
  dram_addr_t wp_a;
  int n_wp = 0;
  always @(posedge clk) if (rst_n && wp_valid && wp_ready) begin
    wp_pending <= 1; wp_a <= wp_addr; n_wp++;
  end

  logic bg_on = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (wp_pending && !cp_valid) begin
        if (!migrated.exists(wp_a)) do_copy(wp_a);
        wp_pending = 0;
        @(negedge clk); wp_done = 1; @(negedge clk); wp_done = 0;
      end else if (bg_on && to_copy.size() > 0 && $urandom_range(0, 7) == 0) begin
        automatic dram_addr_t a = to_copy.pop_front();
        if (!migrated.exists(a)) do_copy(a);
      end
    end
  end

  // ------------------------------------------------------------ bus monitor
  int cyc = 0;
  int act_c [NBANKS], pre_c [NBANKS], rd_c = -1000, copy_c = -1000;
  logic longb [NBANKS];
  logic after_pre [NBANKS];
  logic col_pending [NBANKS];
  int n_rd_lat = 0, n_rcd = 0, n_rp = 0, n_ras_v = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      automatic int b = int'(rb_of(dram_addr));
      case (dram_cmd)
        CMD_ACT: begin
          // A row miss re-opens exactly tRP after its PRE; a bank closed
          // for a copy may stay idle longer.
          if (after_pre[b]) begin
            if (cyc - pre_c[b] == T_RP) n_rp++;
            check(cyc - pre_c[b] >= T_RP, $sformatf("PRE->ACT %0d", cyc - pre_c[b]));
          end
          act_c[b] = cyc; longb[b] = cur_tr; col_pending[b] = 1;
        end
        CMD_PRE: begin
          check(cyc - act_c[b] >= (longb[b] ? T_RAS_V : T_RAS), "ACT->PRE below tRAS");
          if (longb[b]) n_ras_v++;
          pre_c[b] = cyc; after_pre[b] = 1;
        end
        CMD_RD, CMD_WR: begin
          if (col_pending[b]) begin
            n_rcd++;
            check(cyc - act_c[b] == T_RCD, $sformatf("ACT->column %0d", cyc - act_c[b]));
          end
          col_pending[b] = 0;
          if (dram_cmd == CMD_RD) rd_c = cyc;
        end
        CMD_COPY: copy_c = cyc;
        default: ;
      endcase
      if (resp_valid && !req_we_q) begin
        n_rd_lat++;
        check(cyc - rd_c == T_CL, $sformatf("RD->data %0d", cyc - rd_c));
      end
      if (cp_done) check(cyc - copy_c == T_COPY, $sformatf("COPY->done %0d", cyc - copy_c));
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ host
  logic req_we_q = 0;
  dram_addr_t pool [$];

  task automatic host(logic we, dram_addr_t a);
    int t = 0;
    logic [DATA_W-1:0] d = {$urandom(), $urandom()};
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    req_we_q = we;
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid && t < 5000) begin @(negedge clk); t++; end
    check(resp_valid, "response");
    if (we) begin
      ref_m[a] = d;
    end else begin
      automatic logic [DATA_W-1:0] e = ref_m.exists(a) ? ref_m[a] : 64'h0;
      check(resp_rdata == e, $sformatf("read data %h expected %h", resp_rdata, e));
    end
  endtask

  function automatic dram_addr_t rnd_addr();
    dram_addr_t a;
    int rb;
    case ($urandom_range(0, 3))
      0: rb = VB;
      1: rb = TB_;
      default: rb = $urandom_range(0, 7);
    endcase
    a.rank = RANK_W'(rb >> BANK_W); a.bank = BANK_W'(rb);
    // Victim rows 0-3, target-bank native rows 8-11, others 0-3.
    a.row = ROW_W'($urandom_range(0, 3) + (rb == TB_ ? 8 : 0));
    a.col = COL_W'($urandom_range(0, 7));
    return a;
  endfunction

  task automatic traffic(int n);
    for (int i = 0; i < n; i++) begin
      automatic dram_addr_t a = (pool.size() > 0 && $urandom_range(0, 1)) ?
                                pool[$urandom_range(0, pool.size() - 1)] : rnd_addr();
      automatic logic we = !ref_m.exists(a) || $urandom_range(0, 2) == 0;
      if (!(flag == FLAG_REMAP && block_writes)) host(we, a);
      if (we) pool.push_back(a);
    end
  endtask

  initial begin
    for (int i = 0; i < NBANKS; i++) begin
      act_c[i] = -1000; pre_c[i] = 0; longb[i] = 0; after_pre[i] = 0; col_pending[i] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // FLAG 00
    traffic(200);
    check(st_victim_acc == 0 && st_copies == 0, "no translation at FLAG 00");

    // FLAG 01: migrate bank 3 in the background.
    flag = FLAG_MIGRATE;
    foreach (ref_m[k]) if (int'(rb_of(dram_addr_t'(k))) == VB) to_copy.push_back(dram_addr_t'(k));
    bg_on = 1;
    traffic(300);
    while (to_copy.size() > 0 || cp_valid) @(negedge clk);
    foreach (ref_m[k]) if (int'(rb_of(dram_addr_t'(k))) == VB && !migrated.exists(k)) do_copy(dram_addr_t'(k));
    bg_on = 0;
    check(st_wstalls > 0 && st_wstalls == 32'(n_wp), "writes to unmigrated words stalled via the write table");

    // FLAG 10: bank 3 gated.
    flag = FLAG_REMAP;
    repeat (300) @(negedge clk);
    bank_on[VB] = 0;
    traffic(300);
    check(st_victim_acc > 0, "redirected accesses counted");
    check(n_ras_v > 0, "long victim tRAS exercised");

    // block_writes: a write waits, a read passes.
    begin
      automatic dram_addr_t a = pool[0];
      automatic int t = 0;
      block_writes = 1;
      @(negedge clk);
      req_valid = 1; req_we = 1; req_addr = a; req_wdata = 64'h1234;
      repeat (100) begin @(negedge clk); check(!req_ready, "write held while blocked"); end
      req_valid = 0;
      host(0, pool[1]);
      block_writes = 0;
      host(1, a);
      host(0, a);
    end

    check(dram_errors == 0, "DRAM protocol clean");
    check(st_row_hits > 0, "row hits");
    check(32'(n_int) == st_interrupts, "interrupt count");
    check(st_copies == 32'(n_copy) && n_copy > 0, "copy count");
    check(n_rd_lat > 0 && n_rcd > 0 && n_rp > 0, "timing paths exercised");
    $display("reqs=%0d hits=%0d victim=%0d stalls=%0d copies=%0d ints=%0d dram_err=%0d",
             st_reqs, st_row_hits, st_victim_acc, st_wstalls, st_copies, st_interrupts, dram_errors);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
