// util_counter: the utilization compute unit.
//
// It keeps one counter per bank of the addresses that hold data there,
// counting every new key the auxiliary trie accepts (that trie holds all
// unique written addresses), and watches how full both tries are.  Every
// CHECK_PERIOD cycles it compares:
//   * each trie's leaf and node use against THRESH_PCT (90%) of its pool,
//     the preemptive signal that powered-down banks must reopen before the
//     device runs out of capacity;
//   * each bank's count against THRESH_PCT of the bank's capacity, the
//     target-bank overflow case (bank_over), on which the power management
//     unit reverse-migrates the victim paired with that bank.
// trie_over and bank_over are registered at each check; reopen, their OR,
// is a status summary.  The 90% thresholds are the paper's; the
// check period is this design's choice (the paper says only "periodically").
//
// Interface: aux_ins_fire/aux_ins_key mark an insert taken by the auxiliary
// trie; aux_ins_done with aux_ins_new tells whether that key was new.
// Occupancy counts come straight from the two tries.  Counts are never
// decremented: the tries release entries only by a full clear.
module util_counter
  import varram_pkg::*;
#(
  parameter int unsigned AUX_LEAVES   = 2097152,
  parameter int unsigned AUX_NODES    = 32768,
  parameter int unsigned PRI_LEAVES   = 1048576,
  parameter int unsigned PRI_NODES    = 16384,
  parameter int unsigned BANK_CAP_W   = ROW_W + COL_W,   // log2(words per bank)
  parameter int unsigned THRESH_PCT   = 90,
  parameter int unsigned CHECK_PERIOD = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          aux_ins_fire,
  input  logic [KEY_W-1:0]              aux_ins_key,
  input  logic                          aux_ins_done,
  input  logic                          aux_ins_new,
  input  logic [$clog2(AUX_LEAVES):0]   aux_leaves,
  input  logic [$clog2(AUX_NODES):0]    aux_nodes,
  input  logic [$clog2(PRI_LEAVES):0]   pri_leaves,
  input  logic [$clog2(PRI_NODES):0]    pri_nodes,
  output logic [NBANKS-1:0]             bank_over,
  output logic                          trie_over,
  output logic                          reopen,
  output logic [BANK_CAP_W:0]           bank_count [NBANKS]
);

  localparam int unsigned PER_W = $clog2(CHECK_PERIOD + 1);

  logic [RB_W-1:0]   pend_rb_q;
  logic [PER_W-1:0]  tick_q;

  // x * 100 >= cap * pct, in 64-bit arithmetic.
  function automatic logic at_thresh(longint unsigned x, longint unsigned cap);
    return (x * 100) >= (cap * THRESH_PCT);
  endfunction

  logic [NBANKS-1:0] bank_over_c;
  logic              trie_over_c;
  always_comb begin
    for (int i = 0; i < NBANKS; i++)
      bank_over_c[i] = at_thresh(longint'(bank_count[i]), 64'd1 << BANK_CAP_W);
    trie_over_c = at_thresh(longint'(aux_leaves), longint'(AUX_LEAVES)) ||
                  at_thresh(longint'(aux_nodes),  longint'(AUX_NODES))  ||
                  at_thresh(longint'(pri_leaves), longint'(PRI_LEAVES)) ||
                  at_thresh(longint'(pri_nodes),  longint'(PRI_NODES));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_rb_q <= '0;
      tick_q    <= '0;
      bank_over <= '0;
      trie_over <= 1'b0;
      reopen    <= 1'b0;
      for (int i = 0; i < NBANKS; i++) bank_count[i] <= '0;
    end else begin
      if (aux_ins_fire) pend_rb_q <= rb_of(addr_of_key(aux_ins_key));
      if (aux_ins_done && aux_ins_new)
        bank_count[pend_rb_q] <= bank_count[pend_rb_q] + 1'b1;
      if (tick_q == PER_W'(CHECK_PERIOD - 1)) begin
        tick_q    <= '0;
        bank_over <= bank_over_c;
        trie_over <= trie_over_c;
        reopen    <= trie_over_c || (|bank_over_c);
      end else begin
        tick_q <= tick_q + 1'b1;
      end
    end
  end

endmodule
