// var_matrix: the variation matrix V, one entry per (rank, bank).
//
// Each entry says whether the bank is a victim (variation affected, to be
// powered down) and, if so, which healthy target rank and bank take its
// addresses.  The power management unit writes V one entry per cycle; the
// address decoder and the remapping unit read it combinationally.  V is a
// RANKS x BANKS array indexed by the flat bank number {rank, bank}, as in the
// design's description ("V is an M x N array").
//
// Interface: wr_en/wr_idx/wr_entry write an entry at the clock edge; clear
// zeroes all entries (no victims).  Two read ports: rd_a (translation) and
// rd_b (migration).  victims is the victim bit of every bank.
// Timing: writes take effect the cycle after; reads are combinational.
// Reset state (no victims) is this design's choice.
module var_matrix
  import varram_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  wr_en,
  input  logic [RB_W-1:0]       wr_idx,
  input  vm_entry_t             wr_entry,
  input  logic [RB_W-1:0]       rd_a_idx,
  output vm_entry_t             rd_a,
  input  logic [RB_W-1:0]       rd_b_idx,
  output vm_entry_t             rd_b,
  output logic [NBANKS-1:0]     victims
);

  vm_entry_t v_q [NBANKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NBANKS; i++) v_q[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < NBANKS; i++) v_q[i] <= '0;
    end else if (wr_en) begin
      v_q[wr_idx] <= wr_entry;
    end
  end

  assign rd_a = v_q[rd_a_idx];
  assign rd_b = v_q[rd_b_idx];

  always_comb begin
    for (int i = 0; i < NBANKS; i++) victims[i] = v_q[i].victim;
  end

endmodule
