// remap_unit: the remapping unit.  It owns FLAG and carries out the
// migrate-and-remap procedure (Algorithm 2 of the design) when victim banks
// are closed during operation, and the reverse migration when they reopen.
//
// Dynamic closing (close_dyn): FLAG goes to 01.  The unit walks the leaf
// table of the auxiliary trie, which holds every address that has been
// written.  For each address in a victim bank (per V) it
//   1. looks the address up in the primary trie and skips it if it has
//      already moved ("the request is ignored"),
//   2. forms the destination {target rank, target bank, row, col} and looks
//      it up in the auxiliary trie; while the destination is occupied (an
//      address collision) the column is incremented, carrying into the row,
//      until a free word is found,
//   3. marks the destination occupied in the auxiliary trie,
//   4. asks the memory controller for a RowClone copy of the word,
//   5. enters victim -> destination row/column in the primary trie.
// Before every scheduled address the small write table is checked: a write
// that the controller stalled because it targets a not yet migrated victim
// address is migrated first (the paper's addr/flag_bit table) and wp_done
// releases it.  When the walk ends FLAG becomes 10, which is the
// acknowledgment to the controller and the power management unit.
//
// Static closing (close_static): FLAG goes straight to 10; nothing moves.
//
// With FLAG at 10 the write table is still served: a first write to a
// victim address that has no trie entry is given a free word in the target
// bank by steps 1-3 and 5 (no copy, the victim bank is off), so that it
// cannot land on data of the target bank and is carried back on reopening.
//
// Reopening (open): FLAG stays 10 while every entry of the primary trie is
// copied back from its target word to its victim address; then the primary
// trie is cleared and FLAG becomes 00.  During this walk block_writes is
// high and the controller holds writes back, so that no write lands on a
// target word that has already been copied back.  This hold is this design's
// choice: the paper does not say how writes are kept consistent while banks
// reopen.
//
// Reopening one bank (open_one, open_rb): when a target bank overflows, only
// the victim paired with it comes back.  The walk copies back just the
// entries of that victim bank; FLAG stays 10 and the table is kept (its
// stale entries are never consulted again, because the victim's V entry is
// then cleared).  Writes stay held after done until V shows the entry
// cleared, so that no write is translated to the old location.  A later
// full reopening copies only entries whose V entry is still a victim.
//
// The unit also forwards the controller's write addresses (rec_*) into the
// auxiliary trie when its own insert is not using it.
//
// Timing: each migrated address costs two 3-cycle trie lookups (plus one per
// collision), two inserts of 5 cycles and the copy.  The walk over the leaf
// table checks one entry per cycle when the entry is not a victim address.
//
// Lint note: rst_n is also read synchronously by the assertions'
// `disable iff`; this is simulation-only checking, not a second reset path.
module remap_unit
  import varram_pkg::*;
#(
  parameter int unsigned AUX_LEAVES = 2097152,
  parameter int unsigned PRI_LEAVES = 1048576,
  parameter int unsigned WT_DEPTH   = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // commands from the power management unit
  input  logic                          close_dyn,
  input  logic                          close_static,
  input  logic                          open,
  input  logic                          open_one,
  input  logic [RB_W-1:0]               open_rb,
  output flag_t                         flag,
  output logic                          busy,
  output logic                          done,
  output logic                          block_writes,
  // variation matrix read port
  output logic [RB_W-1:0]               vm_idx,
  input  vm_entry_t                     vm_entry,
  // write addresses to be recorded in the auxiliary trie
  input  logic                          rec_valid,
  input  dram_addr_t                    rec_addr,
  output logic                          rec_ready,
  // write table: stalled writes to not yet migrated victim addresses
  input  logic                          wp_valid,
  input  dram_addr_t                    wp_addr,
  output logic                          wp_ready,
  output logic                          wp_done,
  // RowClone copy requests to the memory controller
  output logic                          cp_valid,
  output dram_addr_t                    cp_src,
  output dram_addr_t                    cp_dst,
  input  logic                          cp_done,
  // auxiliary trie
  output logic                          aux_ins_valid,
  input  logic                          aux_ins_ready,
  output logic [KEY_W-1:0]              aux_ins_key,
  input  logic                          aux_ins_done,
  output logic                          aux_lk_valid,
  output logic [KEY_W-1:0]              aux_lk_key,
  input  logic                          aux_lk_done,
  input  logic                          aux_lk_hit,
  output logic [$clog2(AUX_LEAVES)-1:0] aux_sc_idx,
  input  logic                          aux_sc_valid,
  input  logic [KEY_W-1:0]              aux_sc_key,
  // primary trie
  output logic                          pri_clear,
  output logic                          pri_ins_valid,
  input  logic                          pri_ins_ready,
  output logic [KEY_W-1:0]              pri_ins_key,
  output rowcol_t                       pri_ins_val,
  input  logic                          pri_ins_done,
  output logic                          pri_lk_valid,
  output logic [KEY_W-1:0]              pri_lk_key,
  input  logic                          pri_lk_done,
  input  logic                          pri_lk_hit,
  output logic [$clog2(PRI_LEAVES)-1:0] pri_sc_idx,
  input  logic                          pri_sc_valid,
  input  logic [KEY_W-1:0]              pri_sc_key,
  input  rowcol_t                       pri_sc_val,
  // statistics
  output logic [31:0]                   mig_count,
  output logic [31:0]                   coll_count,
  output logic [31:0]                   prio_count,
  output logic [31:0]                   back_count
);

  localparam int unsigned AW = $clog2(AUX_LEAVES);
  localparam int unsigned PW = $clog2(PRI_LEAVES);

  typedef enum logic [3:0] {
    R_IDLE, R_SCAN, R_PCHK, R_PWAIT, R_ACHK, R_AWAIT, R_AINS, R_AINS_W,
    R_COPY, R_PINS, R_PINS_W, R_BSCAN, R_BCOPY, R_BCLR, R_BVM
  } rst_e;

  rst_e        st_q;
  flag_t       flag_q;
  logic [AW:0] sidx_q;
  logic [PW:0] bidx_q;
  logic              one_q;   // back-migration of one victim bank only
  logic [RB_W-1:0]   orb_q;   // that victim bank
  dram_addr_t  src_q, dst_q;
  logic        from_wt_q;        // current address came from the write table
  localparam int unsigned WTW = (WT_DEPTH > 1) ? $clog2(WT_DEPTH) : 1;
  logic [WTW-1:0] wti_q;         // its write-table slot
  logic        rec_busy_q;       // an auxiliary insert for rec_* is in flight

  // write table: {addr, flag_bit}
  dram_addr_t  wt_addr [WT_DEPTH];
  logic [WT_DEPTH-1:0] wt_flag;
  logic        wt_any;
  logic [WTW-1:0] wt_sel, wt_free;

  always_comb begin
    wt_any  = |wt_flag;
    wt_sel  = '0;
    wt_free = '0;
    for (int i = WT_DEPTH - 1; i >= 0; i--) begin
      if (wt_flag[i])  wt_sel  = WTW'(i);
      if (!wt_flag[i]) wt_free = WTW'(i);
    end
  end

  assign wp_ready = !(&wt_flag);
  assign flag     = flag_q;
  assign busy     = (st_q != R_IDLE);
  assign block_writes = (st_q == R_BSCAN) || (st_q == R_BCOPY) || (st_q == R_BCLR) ||
                        (st_q == R_BVM);

  // The address whose V entry is needed.
  dram_addr_t scan_addr;
  assign scan_addr  = addr_of_key(aux_sc_key);
  assign aux_sc_idx = sidx_q[AW-1:0];
  assign pri_sc_idx = bidx_q[PW-1:0];

  always_comb begin
    unique case (st_q)
      R_SCAN:           vm_idx = wt_any ? rb_of(wt_addr[wt_sel]) : rb_of(scan_addr);
      R_BSCAN, R_BCOPY: vm_idx = rb_of(addr_of_key(pri_sc_key));
      R_BVM:            vm_idx = orb_q;
      default:          vm_idx = rb_of(src_q);
    endcase
  end

  // Trie ports.
  assign pri_lk_valid = (st_q == R_PCHK);
  assign pri_lk_key   = key_of(src_q);
  assign aux_lk_valid = (st_q == R_ACHK);
  assign aux_lk_key   = key_of(dst_q);
  assign pri_ins_valid = (st_q == R_PINS);
  assign pri_ins_key   = key_of(src_q);
  assign pri_ins_val   = '{row: dst_q.row, col: dst_q.col};
  assign pri_clear     = (st_q == R_BCLR) && !one_q;

  // An entry is copied back if its victim bank is still closed (V) and, for
  // a single-bank reopening, belongs to that bank.
  logic back_sel;
  assign back_sel = vm_entry.victim &&
                    (!one_q || rb_of(addr_of_key(pri_sc_key)) == orb_q);

  // The auxiliary insert port is shared with the write recorder.
  logic own_ins;
  assign own_ins       = (st_q == R_AINS) && !rec_busy_q;
  assign aux_ins_valid = own_ins ? 1'b1 : (rec_valid && !rec_busy_q);
  assign aux_ins_key   = own_ins ? key_of(dst_q) : key_of(rec_addr);
  assign rec_ready     = !own_ins && !rec_busy_q && aux_ins_ready;

  // Copy port.
  always_comb begin
    cp_valid = 1'b0;
    cp_src   = src_q;
    cp_dst   = dst_q;
    if (st_q == R_COPY) begin
      cp_valid = 1'b1;
    end else if (st_q == R_BCOPY) begin
      cp_valid = 1'b1;
      cp_src   = '{rank: vm_entry.tgt_rank, bank: vm_entry.tgt_bank,
                   row: pri_sc_val.row, col: pri_sc_val.col};
      cp_dst   = addr_of_key(pri_sc_key);
    end
  end

  // Next free word after a collision: column first, carrying into the row.
  function automatic dram_addr_t next_word(dram_addr_t a);
    dram_addr_t n = a;
    {n.row, n.col} = {a.row, a.col} + 1'b1;
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= R_IDLE;
      flag_q     <= FLAG_NONE;
      sidx_q     <= '0;
      bidx_q     <= '0;
      one_q      <= 1'b0;
      orb_q      <= '0;
      src_q      <= '0;
      dst_q      <= '0;
      from_wt_q  <= 1'b0;
      wti_q      <= '0;
      rec_busy_q <= 1'b0;
      wt_flag    <= '0;
      for (int i = 0; i < WT_DEPTH; i++) wt_addr[i] <= '0;
      done       <= 1'b0;
      wp_done    <= 1'b0;
      mig_count  <= '0;
      coll_count <= '0;
      prio_count <= '0;
      back_count <= '0;
    end else begin
      done    <= 1'b0;
      wp_done <= 1'b0;

      // Auxiliary insert bookkeeping for recorded writes.
      if (rec_valid && rec_ready) rec_busy_q <= 1'b1;
      else if (aux_ins_done && rec_busy_q) rec_busy_q <= 1'b0;

      // Write table fill.
      if (wp_valid && wp_ready) begin
        wt_addr[wt_free] <= wp_addr;
        wt_flag[wt_free] <= 1'b1;
      end

      unique case (st_q)
        R_IDLE: begin
          if (close_static && flag_q == FLAG_NONE) begin
            flag_q <= FLAG_REMAP;
            done   <= 1'b1;
          end else if (close_dyn && flag_q == FLAG_NONE) begin
            flag_q <= FLAG_MIGRATE;
            sidx_q <= '0;
            st_q   <= R_SCAN;
          end else if (open && flag_q == FLAG_REMAP) begin
            bidx_q <= '0;
            one_q  <= 1'b0;
            st_q   <= R_BSCAN;
          end else if (open_one && flag_q == FLAG_REMAP) begin
            bidx_q <= '0;
            one_q  <= 1'b1;
            orb_q  <= open_rb;
            st_q   <= R_BSCAN;
          end else if (wt_any && flag_q == FLAG_REMAP) begin
            // A first write to a victim address after closing.
            st_q <= R_SCAN;
          end
        end

        // ------------------------------------------------ forward migration
        R_SCAN: begin
          if (wt_any) begin
            // storeContent checks the write table first.
            src_q     <= wt_addr[wt_sel];
            dst_q     <= '{rank: vm_entry.tgt_rank, bank: vm_entry.tgt_bank,
                           row: wt_addr[wt_sel].row, col: wt_addr[wt_sel].col};
            from_wt_q <= 1'b1;
            wti_q     <= wt_sel;
            st_q      <= R_PCHK;
          end else if (flag_q == FLAG_REMAP) begin
            st_q <= R_IDLE;
          end else if (aux_sc_valid) begin
            sidx_q <= sidx_q + 1'b1;
            if (vm_entry.victim) begin
              src_q     <= scan_addr;
              dst_q     <= '{rank: vm_entry.tgt_rank, bank: vm_entry.tgt_bank,
                             row: scan_addr.row, col: scan_addr.col};
              from_wt_q <= 1'b0;
              st_q      <= R_PCHK;
            end
          end else if (!rec_busy_q && !rec_valid) begin
            // Whole leaf table walked: victim banks may now be gated.
            flag_q <= FLAG_REMAP;
            done   <= 1'b1;
            st_q   <= R_IDLE;
          end
        end
        R_PCHK:  st_q <= R_PWAIT;
        R_PWAIT: if (pri_lk_done) begin
          if (pri_lk_hit) begin
            // Already migrated: the scheduled request is ignored.
            if (from_wt_q) begin
              wt_flag[wti_q] <= 1'b0;
              wp_done         <= 1'b1;
            end
            st_q <= R_SCAN;
          end else begin
            st_q <= R_ACHK;
          end
        end
        R_ACHK:  st_q <= R_AWAIT;
        R_AWAIT: if (aux_lk_done) begin
          if (aux_lk_hit) begin
            dst_q      <= next_word(dst_q);
            coll_count <= coll_count + 1'b1;
            st_q       <= R_ACHK;
          end else begin
            st_q <= R_AINS;
          end
        end
        R_AINS:   if (own_ins && aux_ins_ready) st_q <= R_AINS_W;
        // With the victim banks off (FLAG 10) there is nothing to copy.
        R_AINS_W: if (aux_ins_done) st_q <= (flag_q == FLAG_REMAP) ? R_PINS : R_COPY;
        R_COPY:   if (cp_done) st_q <= R_PINS;
        R_PINS:   if (pri_ins_ready) st_q <= R_PINS_W;
        R_PINS_W: if (pri_ins_done) begin
          mig_count <= mig_count + 1'b1;
          if (from_wt_q) begin
            wt_flag[wti_q] <= 1'b0;
            wp_done         <= 1'b1;
            prio_count      <= prio_count + 1'b1;
          end
          st_q <= R_SCAN;
        end

        // ------------------------------------------------ reverse migration
        R_BSCAN: begin
          if (!pri_sc_valid) st_q <= R_BCLR;
          else if (back_sel) st_q <= R_BCOPY;
          else               bidx_q <= bidx_q + 1'b1;
        end
        R_BCOPY: if (cp_done) begin
          bidx_q     <= bidx_q + 1'b1;
          back_count <= back_count + 1'b1;
          st_q       <= R_BSCAN;
        end
        R_BCLR: begin
          done <= 1'b1;
          if (one_q) begin
            st_q <= R_BVM;
          end else begin
            flag_q <= FLAG_NONE;
            st_q   <= R_IDLE;
          end
        end
        // One bank reopened: writes stay held until its V entry is cleared,
        // so that no write is still translated to the old location.
        R_BVM: if (!vm_entry.victim) st_q <= R_IDLE;
        default: st_q <= R_IDLE;
      endcase
    end
  end

  // FLAG only ever holds one of its three legal values.
  a_flag_legal: assert property (@(posedge clk) disable iff (!rst_n)
    flag_q inside {FLAG_NONE, FLAG_MIGRATE, FLAG_REMAP});
  // A copy request is held until the controller acknowledges it.
  a_cp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    cp_valid && !cp_done |=> cp_valid);

endmodule
