// varram_top: the controller side of a VAR-DRAM memory system.
//
// VAR-DRAM powers down DRAM banks that process variation has made slow,
// after moving their data to healthy banks, and keeps serving their
// addresses from the new locations.  This top connects, as in the design's
// functional diagram:
//   * mem_ctrl         the memory controller with two tRAS values,
//   * addr_translator  the address decoder with DEMUX/MUX and INTERRUPT,
//   * var_matrix       V, the victim -> target bank pairs,
//   * hw_trie x2       the primary (translation) trie, two lookup ports, and
//                      the auxiliary (occupancy) trie,
//   * remap_unit       FLAG, migration, write table, reverse migration,
//   * util_counter     per-bank and per-trie utilization: a trie at 90%
//                      reopens every bank, a target bank at 90% its victim,
//   * power_mgmt_unit  pairing, closing, power gating and reopening,
//   * bank_power_gate  one sleep transistor model per bank.
// The variation sensors and the DRAM array itself are outside: the sensors'
// per-bank victim vector comes in on var_*, and the DRAM command bus, the
// gated bank supplies and the read data are ports.
//
// Host interface: req_valid/req_ready/req_we/req_addr/req_wdata, one word per
// request; resp_valid pulses when a write is done or read data is on
// resp_rdata.  DRAM interface: one command per cycle on dram_cmd with
// dram_addr (and dram_addr2, the copy destination, for CMD_COPY);
// dram_rdata must hold the word of the last RD by the time the controller
// samples it, CL cycles later.
//
// Status: FLAG, whether banks are down, the V victim map, the utilization
// tests, per-bank word counts and wake-ups, and event counters for every
// mechanism.  Three trie outputs stay unconnected on purpose: the
// auxiliary trie stores only a presence bit, so its lookup and scan values
// carry nothing, and the primary trie's "new key" result is not needed
// because the remapping unit looks every address up before inserting it.
//
// Lint note: rst_n is also read synchronously by the assertions'
// `disable iff`; this is simulation-only checking, not a second reset path.
module varram_top
  import varram_pkg::*;
#(
  parameter int unsigned PRI_LEAVES   = 1048576,
  parameter int unsigned PRI_NODES    = 16384,
  parameter int unsigned AUX_LEAVES   = 2097152,
  parameter int unsigned AUX_NODES    = 32768,
  parameter int unsigned BANK_CAP_W   = ROW_W + COL_W,
  parameter int unsigned CHECK_PERIOD = 64,
  parameter int unsigned T_RCD        = 16,
  parameter int unsigned T_RP         = 16,
  parameter int unsigned T_CL         = 16,
  parameter int unsigned T_RAS        = 39,
  parameter int unsigned T_RAS_V      = 61,
  parameter int unsigned T_COPY       = 48,
  parameter int unsigned WAKE_CYCLES  = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  // host
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  dram_addr_t         req_addr,
  input  logic [DATA_W-1:0]  req_wdata,
  output logic               resp_valid,
  output logic [DATA_W-1:0]  resp_rdata,
  // variation data from the sensors (or the manufacturer's list)
  input  logic               var_valid,
  input  logic [NBANKS-1:0]  var_victim,
  input  logic               dynamic,
  // DRAM array
  output dram_cmd_e          dram_cmd,
  output dram_addr_t         dram_addr,
  output dram_addr_t         dram_addr2,
  output logic [DATA_W-1:0]  dram_wdata,
  input  logic [DATA_W-1:0]  dram_rdata,
  output logic [NBANKS-1:0]  vdd_bank,
  // status
  output flag_t              flag,
  output logic               banks_down,
  output logic [31:0]        st_victim_acc,
  output logic [31:0]        st_interrupts,
  output logic [31:0]        st_wstalls,
  output logic [31:0]        st_copies,
  output logic [31:0]        st_migrated,
  output logic [31:0]        st_collisions,
  output logic [31:0]        st_prio,
  output logic [31:0]        st_back,
  output logic [31:0]        st_closings,
  output logic [31:0]        st_openings,
  output logic [31:0]        st_reqs,
  output logic [31:0]        st_row_hits,
  output logic [31:0]        wake_events [NBANKS],
  output logic [NBANKS-1:0]  victim_map,
  output logic               remap_busy,
  output logic               locked,
  output logic               reopen,
  output logic               trie_over,
  output logic [NBANKS-1:0]  bank_over,
  output logic               trie_full,
  output logic [BANK_CAP_W:0] bank_words [NBANKS]
);

  // ------------------------------------------------------------- signals
  logic [NBANKS-1:0] pwr_good, sleep;

  // V
  logic              vm_clear, vm_wr_en;
  logic [RB_W-1:0]   vm_wr_idx, vm_a_idx, vm_b_idx;
  vm_entry_t         vm_wr_entry, vm_a, vm_b;

  // translator <-> controller
  logic       tr_valid, tr_ready, tr_done, tr_translated, tr_interrupt, tr_pending;
  dram_addr_t tr_addr, tr_eff;

  // remapping unit <-> controller
  logic       rec_valid, rec_ready, wp_valid, wp_ready, wp_done, block_writes;
  logic       cp_valid, cp_done;
  dram_addr_t rec_addr, wp_addr, cp_src, cp_dst;

  // primary trie: port 0 translator, port 1 remapping unit
  logic                          pri_clear, pri_ins_valid, pri_ins_ready;
  logic                          pri_ins_done, pri_ins_new, pri_ins_full;
  logic [KEY_W-1:0]              pri_ins_key;
  rowcol_t                       pri_ins_val;
  logic                          pri_lk_valid [2];
  logic [KEY_W-1:0]              pri_lk_key   [2];
  logic                          pri_lk_done  [2];
  logic                          pri_lk_hit   [2];
  logic [ROW_W+COL_W-1:0]        pri_lk_val   [2];
  logic [$clog2(PRI_LEAVES)-1:0] pri_sc_idx;
  logic                          pri_sc_valid;
  logic [KEY_W-1:0]              pri_sc_key;
  logic [ROW_W+COL_W-1:0]        pri_sc_val;
  logic [$clog2(PRI_LEAVES):0]   pri_leaves;
  logic [$clog2(PRI_NODES):0]    pri_nodes;

  // auxiliary trie
  logic                          aux_ins_valid, aux_ins_ready, aux_ins_done;
  logic                          aux_ins_new, aux_ins_full;
  logic [KEY_W-1:0]              aux_ins_key;
  logic                          aux_lk_valid [1];
  logic [KEY_W-1:0]              aux_lk_key   [1];
  logic                          aux_lk_done  [1];
  logic                          aux_lk_hit   [1];
  logic [0:0]                    aux_lk_val   [1];
  logic [$clog2(AUX_LEAVES)-1:0] aux_sc_idx;
  logic                          aux_sc_valid;
  logic [KEY_W-1:0]              aux_sc_key;
  logic [0:0]                    aux_sc_val;
  logic [$clog2(AUX_LEAVES):0]   aux_leaves;
  logic [$clog2(AUX_NODES):0]    aux_nodes;

  // remapping unit <-> power management
  logic close_dyn, close_static, open_req, remap_done, open_one;
  logic [RB_W-1:0] open_rb;

  // A trie reports full until its next insert succeeds.
  assign trie_full = aux_ins_full || pri_ins_full;

  // ------------------------------------------------------------ blocks
  var_matrix u_vm (
    .clk, .rst_n, .clear(vm_clear),
    .wr_en(vm_wr_en), .wr_idx(vm_wr_idx), .wr_entry(vm_wr_entry),
    .rd_a_idx(vm_a_idx), .rd_a(vm_a),
    .rd_b_idx(vm_b_idx), .rd_b(vm_b),
    .victims(victim_map)
  );

  addr_translator u_tr (
    .clk, .rst_n, .flag,
    .req_valid(tr_valid), .req_ready(tr_ready), .req_addr(tr_addr),
    .vm_idx(vm_a_idx), .vm_entry(vm_a),
    .lk_valid(pri_lk_valid[0]), .lk_key(pri_lk_key[0]),
    .lk_done(pri_lk_done[0]), .lk_hit(pri_lk_hit[0]),
    .lk_val(rowcol_t'(pri_lk_val[0])),
    .done(tr_done), .eff_addr(tr_eff), .translated(tr_translated),
    .intr(tr_interrupt), .pending(tr_pending)
  );

  hw_trie #(
    .LEAVES(PRI_LEAVES), .NODES(PRI_NODES), .VAL_W(ROW_W + COL_W), .LK_PORTS(2)
  ) u_pri (
    .clk, .rst_n, .clear(pri_clear),
    .ins_valid(pri_ins_valid), .ins_ready(pri_ins_ready),
    .ins_key(pri_ins_key), .ins_val(pri_ins_val),
    .ins_done(pri_ins_done), .ins_new(pri_ins_new), .ins_full(pri_ins_full),
    .lk_valid(pri_lk_valid), .lk_key(pri_lk_key),
    .lk_done(pri_lk_done), .lk_hit(pri_lk_hit), .lk_val(pri_lk_val),
    .sc_idx(pri_sc_idx), .sc_valid(pri_sc_valid),
    .sc_key(pri_sc_key), .sc_val(pri_sc_val),
    .leaf_count(pri_leaves), .node_count(pri_nodes)
  );

  hw_trie #(
    .LEAVES(AUX_LEAVES), .NODES(AUX_NODES), .VAL_W(1), .LK_PORTS(1)
  ) u_aux (
    .clk, .rst_n, .clear(1'b0),
    .ins_valid(aux_ins_valid), .ins_ready(aux_ins_ready),
    .ins_key(aux_ins_key), .ins_val(1'b1),
    .ins_done(aux_ins_done), .ins_new(aux_ins_new), .ins_full(aux_ins_full),
    .lk_valid(aux_lk_valid), .lk_key(aux_lk_key),
    .lk_done(aux_lk_done), .lk_hit(aux_lk_hit), .lk_val(aux_lk_val),
    .sc_idx(aux_sc_idx), .sc_valid(aux_sc_valid),
    .sc_key(aux_sc_key), .sc_val(aux_sc_val),
    .leaf_count(aux_leaves), .node_count(aux_nodes)
  );

  remap_unit #(
    .AUX_LEAVES(AUX_LEAVES), .PRI_LEAVES(PRI_LEAVES)
  ) u_remap (
    .clk, .rst_n,
    .close_dyn, .close_static, .open(open_req), .open_one, .open_rb,
    .flag, .busy(remap_busy), .done(remap_done), .block_writes,
    .vm_idx(vm_b_idx), .vm_entry(vm_b),
    .rec_valid, .rec_addr, .rec_ready,
    .wp_valid, .wp_addr, .wp_ready, .wp_done,
    .cp_valid, .cp_src, .cp_dst, .cp_done,
    .aux_ins_valid, .aux_ins_ready, .aux_ins_key, .aux_ins_done,
    .aux_lk_valid(aux_lk_valid[0]), .aux_lk_key(aux_lk_key[0]),
    .aux_lk_done(aux_lk_done[0]), .aux_lk_hit(aux_lk_hit[0]),
    .aux_sc_idx, .aux_sc_valid, .aux_sc_key,
    .pri_clear, .pri_ins_valid, .pri_ins_ready, .pri_ins_key, .pri_ins_val,
    .pri_ins_done,
    .pri_lk_valid(pri_lk_valid[1]), .pri_lk_key(pri_lk_key[1]),
    .pri_lk_done(pri_lk_done[1]), .pri_lk_hit(pri_lk_hit[1]),
    .pri_sc_idx, .pri_sc_valid, .pri_sc_key, .pri_sc_val(rowcol_t'(pri_sc_val)),
    .mig_count(st_migrated), .coll_count(st_collisions),
    .prio_count(st_prio), .back_count(st_back)
  );

  util_counter #(
    .AUX_LEAVES(AUX_LEAVES), .AUX_NODES(AUX_NODES),
    .PRI_LEAVES(PRI_LEAVES), .PRI_NODES(PRI_NODES),
    .BANK_CAP_W(BANK_CAP_W), .CHECK_PERIOD(CHECK_PERIOD)
  ) u_util (
    .clk, .rst_n,
    .aux_ins_fire(aux_ins_valid && aux_ins_ready), .aux_ins_key,
    .aux_ins_done, .aux_ins_new,
    .aux_leaves, .aux_nodes, .pri_leaves, .pri_nodes,
    .bank_over, .trie_over, .reopen, .bank_count(bank_words)
  );

  power_mgmt_unit u_pmu (
    .clk, .rst_n,
    .var_valid, .var_victim, .dynamic,
    .vm_clear, .vm_wr_en, .vm_wr_idx, .vm_wr_entry,
    .close_dyn, .close_static, .open(open_req), .open_one, .open_rb, .remap_done,
    .sleep, .pwr_good, .reopen(trie_over), .bank_over,
    .banks_down, .locked,
    .close_count(st_closings), .open_count(st_openings)
  );

  for (genvar b = 0; b < NBANKS; b++) begin : g_pg
    bank_power_gate #(.WAKE_CYCLES(WAKE_CYCLES)) u_pg (
      .clk, .rst_n, .sleep(sleep[b]),
      .vdd_bank(vdd_bank[b]), .pwr_good(pwr_good[b]),
      .wake_events(wake_events[b])
    );
  end

  mem_ctrl #(
    .T_RCD(T_RCD), .T_RP(T_RP), .T_CL(T_CL),
    .T_RAS(T_RAS), .T_RAS_V(T_RAS_V), .T_COPY(T_COPY)
  ) u_mc (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata,
    .resp_valid, .resp_rdata,
    .tr_valid, .tr_ready, .tr_addr, .tr_done, .tr_eff, .tr_translated,
    .tr_interrupt, .tr_pending,
    .rec_valid, .rec_addr, .rec_ready,
    .wp_valid, .wp_addr, .wp_ready, .wp_done, .block_writes,
    .cp_valid, .cp_src, .cp_dst, .cp_done,
    .bank_on(pwr_good),
    .dram_cmd, .dram_addr, .dram_addr2, .dram_wdata, .dram_rdata,
    .st_reqs, .st_row_hits, .st_victim_acc, .st_interrupts, .st_wstalls,
    .st_copies
  );

endmodule
