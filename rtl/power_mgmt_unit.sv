// power_mgmt_unit: the modified power management unit (control unit) that
// decides which banks are powered down and when they come back.
//
// Sequence, numbered as the actions of the design's functional diagram:
//   1  var_valid presents the variation data: one victim bit per bank.
//   2  The unit forms victim/target pairs: the lowest-numbered unpaired victim
//      bank is paired with the lowest-numbered healthy bank not yet used, one
//      pair per cycle, until victims or healthy banks run out (the design
//      requires as many targets as victims; an unpaired victim stays on).
//   3  Each pair is written into V, which the controller side reads.
//   4-6 Dynamic closing: close_dyn starts the remapping unit, whose FLAG
//      reaching 10 (remap_done) is the acknowledgment.  Static closing:
//      close_static sets FLAG to 10 at once and nothing migrates.
//   8  The paired victim banks get their sleep signal (power gating).
//   9  While the banks are off the unit watches the utilization counters'
//      reopen signal.  On reopen it removes sleep, waits until every bank
//      reports power good, has the remapping unit migrate data back (open),
//      clears V and then refuses further closings ("we refrain from powering
//      down any more banks").
//   Target-bank overflow: when a target bank's utilization test (bank_over)
//      fires, only the victim paired with it is woken; after power good the
//      unit asks for a single-bank back-migration (open_one, open_rb) and
//      then clears that V entry.  The other pairs stay closed.  When the
//      last pair has come back this way, a full reopening follows to clear
//      the translation table and return FLAG to 00.  This follows the
//      paper's "reverse migrate signal to the corresponding victim".
// The pairing order and the one-shot lock are this design's choices; the
// paper gives neither a pairing rule nor what happens after reopening
// beyond that lock.
//
// Timing: pairing takes one cycle per pair; all other steps wait on the
// handshakes named above.
//
// Lint note: rst_n is also read synchronously by the assertions'
// `disable iff`; this is simulation-only checking, not a second reset path.
module power_mgmt_unit
  import varram_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // 1: variation data
  input  logic               var_valid,
  input  logic [NBANKS-1:0]  var_victim,
  input  logic               dynamic,
  // 3: V write port
  output logic               vm_clear,
  output logic               vm_wr_en,
  output logic [RB_W-1:0]    vm_wr_idx,
  output vm_entry_t          vm_wr_entry,
  // 4-6: remapping unit
  output logic               close_dyn,
  output logic               close_static,
  output logic               open,
  output logic               open_one,
  output logic [RB_W-1:0]    open_rb,
  input  logic               remap_done,
  // 8: switching
  output logic [NBANKS-1:0]  sleep,
  input  logic [NBANKS-1:0]  pwr_good,
  // 9: counter data
  input  logic               reopen,
  input  logic [NBANKS-1:0]  bank_over,
  // status
  output logic               banks_down,
  output logic               locked,
  output logic [31:0]        close_count,
  output logic [31:0]        open_count
);

  typedef enum logic [3:0] {
    P_IDLE, P_PAIR, P_CMD, P_WMIG, P_CLOSED, P_WAKE, P_WOPEN, P_WAKE1, P_WOPEN1
  } pst_e;

  pst_e              st_q;
  logic [NBANKS-1:0] vmask_q, hmask_q, paired_q;
  logic              dyn_q;
  logic [RB_W-1:0]   tgt_q [NBANKS];   // target of each paired victim
  logic [RB_W-1:0]   pv_q;             // victim being reopened alone

  // Lowest paired victim whose target bank has overflowed.
  logic [RB_W-1:0] oi;
  logic            oany;
  always_comb begin
    oi = '0; oany = 1'b0;
    for (int i = NBANKS - 1; i >= 0; i--)
      if (paired_q[i] && bank_over[tgt_q[i]]) begin oi = RB_W'(i); oany = 1'b1; end
  end

  // Lowest set bit of each mask.
  logic [RB_W-1:0] vi, ti;
  logic            vany, tany;
  always_comb begin
    vi = '0; ti = '0; vany = 1'b0; tany = 1'b0;
    for (int i = NBANKS - 1; i >= 0; i--) begin
      if (vmask_q[i]) begin vi = RB_W'(i); vany = 1'b1; end
      if (hmask_q[i]) begin ti = RB_W'(i); tany = 1'b1; end
    end
  end

  // V is written when a pair is formed, and its entry is cleared when that
  // victim alone has been reopened.
  logic pair_wr, one_clr;
  assign pair_wr      = (st_q == P_PAIR) && vany && tany;
  assign one_clr      = (st_q == P_WOPEN1) && remap_done;
  assign vm_wr_en     = pair_wr || one_clr;
  assign vm_wr_idx    = one_clr ? pv_q : vi;
  assign vm_wr_entry  = one_clr ? '0 :
                        '{victim: 1'b1, tgt_rank: ti[RB_W-1:BANK_W],
                          tgt_bank: ti[BANK_W-1:0]};
  assign open_one     = (st_q == P_WAKE1) && pwr_good[pv_q];
  assign open_rb      = pv_q;
  assign close_dyn    = (st_q == P_CMD) && dyn_q;
  assign close_static = (st_q == P_CMD) && !dyn_q;
  assign open         = (st_q == P_WAKE) && (&pwr_good);
  assign banks_down   = (st_q == P_CLOSED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= P_IDLE;
      vmask_q     <= '0;
      hmask_q     <= '0;
      paired_q    <= '0;
      dyn_q       <= 1'b0;
      pv_q        <= '0;
      for (int i = 0; i < NBANKS; i++) tgt_q[i] <= '0;
      sleep       <= '0;
      locked      <= 1'b0;
      vm_clear    <= 1'b0;
      close_count <= '0;
      open_count  <= '0;
    end else begin
      vm_clear <= 1'b0;
      unique case (st_q)
        P_IDLE: if (var_valid && !locked) begin
          vmask_q  <= var_victim;
          hmask_q  <= ~var_victim;
          paired_q <= '0;
          dyn_q    <= dynamic;
          st_q     <= P_PAIR;
        end
        P_PAIR: begin
          if (vany && tany) begin
            vmask_q[vi]  <= 1'b0;
            hmask_q[ti]  <= 1'b0;
            paired_q[vi] <= 1'b1;
            tgt_q[vi]    <= ti;
          end else if (paired_q != '0) begin
            st_q <= P_CMD;
          end else begin
            st_q <= P_IDLE;
          end
        end
        P_CMD:  st_q <= P_WMIG;
        P_WMIG: if (remap_done) begin
          sleep       <= paired_q;
          close_count <= close_count + 1'b1;
          st_q        <= P_CLOSED;
        end
        P_CLOSED: if (reopen) begin
          sleep <= '0;
          st_q  <= P_WAKE;
        end else if (oany) begin
          // Target-bank overflow: only the victim paired with it reopens.
          sleep[oi] <= 1'b0;
          pv_q      <= oi;
          st_q      <= P_WAKE1;
        end
        P_WAKE1: if (pwr_good[pv_q]) st_q <= P_WOPEN1;
        P_WOPEN1: if (remap_done) begin
          paired_q[pv_q] <= 1'b0;
          open_count     <= open_count + 1'b1;
          // After the last pair, the full reopening clears the translation
          // table and returns FLAG to 00 (nothing is left to copy).
          if (paired_q == (NBANKS'(1) << pv_q)) st_q <= P_WAKE;
          else                                  st_q <= P_CLOSED;
        end
        P_WAKE: if (&pwr_good) st_q <= P_WOPEN;
        P_WOPEN: if (remap_done) begin
          vm_clear   <= 1'b1;
          locked     <= 1'b1;
          open_count <= open_count + 1'b1;
          st_q       <= P_IDLE;
        end
        default: st_q <= P_IDLE;
      endcase
    end
  end

  // Only paired victims are ever gated.
  a_sleep_paired: assert property (@(posedge clk) disable iff (!rst_n)
    (sleep & ~paired_q) == '0);

endmodule
