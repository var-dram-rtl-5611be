// addr_translator: the variation-aware address decoder in front of the
// memory controller (address decoder, DEMUX, V, hardware trie and MUX of the
// functional diagram; Algorithm 1 of the design).
//
// An incoming word address is resolved into rank, bank, row and column.  The
// DEMUX, selected by the MSB of FLAG, either passes the address straight on
// or sends it down the translated path.  On the translated path the victim
// bank's entry of V gives the target rank and bank (the paper's "simple
// translation"), and the primary trie is searched with the full address in
// parallel.  If the trie returns a row/column different from the incoming
// one (an address collision was resolved during migration), INTERRUPT is
// raised and the corrected address is used after 3 stall cycles, as the
// paper specifies.  The MUX, selected by the same FLAG MSB, picks the final
// address.
//
// While FLAG is 01 (migration in progress) translation is inactive in the
// paper.  This design still redirects a victim address that is already in the
// primary trie, since its data has moved; a victim address not yet migrated
// goes to the victim bank and is flagged `pending`, so that the controller
// can stall a write to it until the remapping unit has moved it.
//
// While FLAG is 10 a victim address that misses in the trie has never been
// written since the banks closed.  It is translated by the simple rule
// (target bank, same row and column), which is fine for a read, but it is
// also flagged `pending`: the controller sends such a write through the
// write table so that the remapping unit gives it a free word of its own
// and a trie entry.  Without this, the write could overwrite native data of
// the target bank and would be lost when the banks reopen.
//
// Interface: req_valid/req_ready/req_addr take one address at a time.
// done pulses with eff_addr, translated (a victim address was redirected;
// the controller then uses the victim tRAS), intr (the INTERRUPT signal)
// and pending.
// Timing, counted from the cycle the request is taken: 1 cycle when the
// address needs no trie search (FLAG 00 or a healthy bank), 4 cycles for a
// victim address (1 + the trie's 3-cycle lookup), 7 with an INTERRUPT.
//
// Lint note: rst_n is also read synchronously by the assertions'
// `disable iff`; this is simulation-only checking, not a second reset path.
module addr_translator
  import varram_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  flag_t           flag,
  // request
  input  logic            req_valid,
  output logic            req_ready,
  input  dram_addr_t      req_addr,
  // variation matrix read port
  output logic [RB_W-1:0] vm_idx,
  input  vm_entry_t       vm_entry,
  // primary trie lookup port
  output logic            lk_valid,
  output logic [KEY_W-1:0] lk_key,
  input  logic            lk_done,
  input  logic            lk_hit,
  input  rowcol_t         lk_val,
  // result
  output logic            done,
  output dram_addr_t      eff_addr,
  output logic            translated,
  output logic            intr,
  output logic            pending
);

  localparam int unsigned STALL = 3;

  typedef enum logic [1:0] {T_IDLE, T_LOOKUP, T_STALL} tst_e;
  tst_e       st_q;
  dram_addr_t a_q;
  logic [RB_W-1:0] t_q;   // target rank/bank from V
  logic [1:0] stall_q;
  rowcol_t    fix_q;

  logic victim_path;

  assign vm_idx      = rb_of(req_addr);
  assign req_ready   = (st_q == T_IDLE);
  assign victim_path = vm_entry.victim && (flag != FLAG_NONE);
  assign lk_valid    = req_valid && req_ready && victim_path;
  assign lk_key      = key_of(req_addr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= T_IDLE;
      a_q        <= '0;
      t_q        <= '0;
      stall_q    <= '0;
      fix_q      <= '0;
      done       <= 1'b0;
      eff_addr   <= '0;
      translated <= 1'b0;
      intr  <= 1'b0;
      pending    <= 1'b0;
    end else begin
      done      <= 1'b0;
      intr <= 1'b0;
      unique case (st_q)
        T_IDLE: if (req_valid) begin
          a_q <= req_addr;
          t_q <= {vm_entry.tgt_rank, vm_entry.tgt_bank};
          if (victim_path) begin
            st_q <= T_LOOKUP;
          end else begin
            // DEMUX output 0: untranslated path.
            done       <= 1'b1;
            eff_addr   <= req_addr;
            translated <= 1'b0;
            pending    <= 1'b0;
          end
        end
        T_LOOKUP: if (lk_done) begin
          if (flag[1]) begin
            // DEMUX output 1, MUX input 1: target rank/bank from V,
            // row/column from the trie when it holds the address.
            if (lk_hit && (lk_val != rowcol_t'({a_q.row, a_q.col}))) begin
              fix_q   <= lk_val;
              stall_q <= 2'(STALL - 1);
              st_q    <= T_STALL;
              intr <= 1'b1;
            end else begin
              // A miss is an address never written since the banks
              // closed: it has no word of its own yet (pending).
              done       <= 1'b1;
              eff_addr   <= '{rank: t_q[RB_W-1:BANK_W], bank: t_q[BANK_W-1:0],
                              row: a_q.row, col: a_q.col};
              translated <= 1'b1;
              pending    <= !lk_hit;
              st_q       <= T_IDLE;
            end
          end else if (lk_hit) begin
            // Migration in progress, this address has already moved.
            if (lk_val != rowcol_t'({a_q.row, a_q.col})) begin
              fix_q   <= lk_val;
              stall_q <= 2'(STALL - 1);
              st_q    <= T_STALL;
              intr <= 1'b1;
            end else begin
              done       <= 1'b1;
              eff_addr   <= '{rank: t_q[RB_W-1:BANK_W], bank: t_q[BANK_W-1:0],
                              row: a_q.row, col: a_q.col};
              translated <= 1'b1;
              pending    <= 1'b0;
              st_q       <= T_IDLE;
            end
          end else begin
            // Migration in progress, address still in the victim bank.
            done       <= 1'b1;
            eff_addr   <= a_q;
            translated <= 1'b0;
            pending    <= 1'b1;
            st_q       <= T_IDLE;
          end
        end
        T_STALL: begin
          if (stall_q == 2'd0) begin
            done       <= 1'b1;
            eff_addr   <= '{rank: t_q[RB_W-1:BANK_W], bank: t_q[BANK_W-1:0],
                            row: fix_q.row, col: fix_q.col};
            translated <= 1'b1;
            pending    <= 1'b0;
            st_q       <= T_IDLE;
          end else begin
            stall_q <= stall_q - 2'd1;
          end
        end
        default: st_q <= T_IDLE;
      endcase
    end
  end

  // The trie answers every lookup, and only lookups this block started.
  a_lookup_answered: assert property (@(posedge clk) disable iff (!rst_n)
    lk_done |-> st_q == T_LOOKUP);

endmodule
