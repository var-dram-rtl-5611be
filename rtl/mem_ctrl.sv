// mem_ctrl: the variation-aware memory controller.
//
// It takes one host request at a time (read or write of one 64-bit word),
// has the address translator compute the effective address, and drives the
// DRAM command bus with an open-page policy: a row stays open in its bank
// until another row of the same bank is needed.  A closed bank gets ACT,
// waits tRCD, then RD or WR; a read returns data CL cycles after RD.  PRE may
// only follow ACT after tRAS, and, as the design requires, the controller
// holds two tRAS values: the long one (T_RAS_V) for accesses redirected from
// a victim bank, whose trie lookup time is counted inside tRAS, and the
// nominal one (T_RAS) for all other accesses.
//
// Copies requested by the remapping unit (RowClone PSM copy of one word
// between two banks) are interleaved with host requests, alternating turns
// when both wait, so that migration runs in the background.  For a copy the
// controller precharges the source and destination banks, issues
// CMD_COPY with the source on dram_addr and the destination on dram_addr2,
// and waits T_COPY.
//
// A write whose translation comes back `pending` (a victim address not yet
// migrated while FLAG is 01) is put in the remapping unit's write table and
// stalled until wp_done; it is then translated again and lands in the target
// bank.  While such a write waits, the controller keeps serving copy
// requests (the write is parked), since the copy that moves the stalled
// address is what releases it.  Every completed write address is recorded in the auxiliary trie
// (rec_*).  While block_writes is high new writes are not accepted.
//
// Command spacing is exact: ACT follows PRE by tRP, RD/WR follows ACT by
// tRCD, read data reaches the host CL cycles after RD, cp_done comes T_COPY
// cycles after CMD_COPY, and PRE waits until the bank has been open tRAS.
// Timing parameters are DDR4-2400 clock counts (tRCD = tRP = CL = 16,
// tRAS = 32 ns = 39 clocks); the victim tRAS adds the 18 ns reported for
// variation-affected rows (22 clocks).  T_COPY is this design's assumption.
// Refresh is not issued by this controller.
//
// Lint note: rst_n is also read synchronously by the assertions'
// `disable iff`; this is simulation-only checking, not a second reset path.
module mem_ctrl
  import varram_pkg::*;
#(
  parameter int unsigned T_RCD   = 16,
  parameter int unsigned T_RP    = 16,
  parameter int unsigned T_CL    = 16,
  parameter int unsigned T_RAS   = 39,
  parameter int unsigned T_RAS_V = 61,
  parameter int unsigned T_COPY  = 48
) (
  input  logic               clk,
  input  logic               rst_n,
  // host port
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  dram_addr_t         req_addr,
  input  logic [DATA_W-1:0]  req_wdata,
  output logic               resp_valid,
  output logic [DATA_W-1:0]  resp_rdata,
  // address translator
  output logic               tr_valid,
  input  logic               tr_ready,
  output dram_addr_t         tr_addr,
  input  logic               tr_done,
  input  dram_addr_t         tr_eff,
  input  logic               tr_translated,
  input  logic               tr_interrupt,
  input  logic               tr_pending,
  // remapping unit
  output logic               rec_valid,
  output dram_addr_t         rec_addr,
  input  logic               rec_ready,
  output logic               wp_valid,
  output dram_addr_t         wp_addr,
  input  logic               wp_ready,
  input  logic               wp_done,
  input  logic               block_writes,
  input  logic               cp_valid,
  input  dram_addr_t         cp_src,
  input  dram_addr_t         cp_dst,
  output logic               cp_done,
  // bank power state (1 = powered)
  input  logic [NBANKS-1:0]  bank_on,
  // DRAM command bus
  output dram_cmd_e          dram_cmd,
  output dram_addr_t         dram_addr,
  output dram_addr_t         dram_addr2,
  output logic [DATA_W-1:0]  dram_wdata,
  input  logic [DATA_W-1:0]  dram_rdata,
  // statistics
  output logic [31:0]        st_reqs,
  output logic [31:0]        st_row_hits,
  output logic [31:0]        st_victim_acc,
  output logic [31:0]        st_interrupts,
  output logic [31:0]        st_wstalls,
  output logic [31:0]        st_copies
);

  typedef enum logic [4:0] {
    M_IDLE, M_TRQ, M_TRW, M_WP, M_WPW, M_BANK, M_PRE, M_PREW, M_ACT, M_ACTW,
    M_COL, M_CLW, M_REC, M_RESP, M_CSRC, M_CDST, M_CPRE, M_CPREW, M_COPY,
    M_COPYW
  } mst_e;

  mst_e               st_q;
  logic               we_q;
  dram_addr_t         a_q;       // host address
  dram_addr_t         e_q;       // effective address
  logic               long_q;    // access redirected from a victim bank
  logic [DATA_W-1:0]  wd_q;
  logic [7:0]         wait_q;
  logic               turn_q;    // 1: copy has priority next
  logic [RB_W-1:0]    cbank_q;   // bank being closed for a copy
  logic               cdst_q;    // closing the destination bank
  logic               park_q;    // a stalled write waits under the copy
  logic               pwpw_q;    // ... and was already in the write table
  logic               wpd_q;     // wp_done seen while parked

  logic [ROW_W-1:0]   open_row [NBANKS];
  logic [NBANKS-1:0]  open_v;
  logic [NBANKS-1:0]  ras_long;
  logic [7:0]         act_age  [NBANKS];

  logic [RB_W-1:0]    eb;
  assign eb = rb_of(e_q);

  function automatic logic ras_met(logic [7:0] age, logic lng);
    // act_age is 0 in the cycle after ACT and PRE is issued one cycle
    // after this test passes, so PRE lands exactly tRAS after ACT.
    return age >= 8'((lng ? T_RAS_V : T_RAS) - 2);
  endfunction

  logic take_copy, take_req;
  always_comb begin
    take_copy = 1'b0;
    take_req  = 1'b0;
    if (st_q == M_IDLE) begin
      if (cp_valid && !cp_done && (turn_q || !req_valid || (req_we && block_writes)))
        take_copy = 1'b1;
      else if (req_valid && !(req_we && block_writes))
        take_req = 1'b1;
    end else if (st_q == M_WP || st_q == M_WPW) begin
      // A parked write must not block the copy that releases it.
      take_copy = cp_valid && !cp_done;
    end
  end

  assign req_ready = take_req;
  assign tr_valid  = (st_q == M_TRQ);
  assign tr_addr   = a_q;
  assign rec_valid = (st_q == M_REC);
  assign rec_addr  = e_q;
  assign wp_valid  = (st_q == M_WP) && !take_copy;
  assign wp_addr   = a_q;

  always_comb begin
    dram_cmd   = CMD_NOP;
    dram_addr  = e_q;
    dram_addr2 = cp_dst;
    dram_wdata = wd_q;
    unique case (st_q)
      M_PRE:  dram_cmd = CMD_PRE;
      M_ACT:  dram_cmd = CMD_ACT;
      M_COL:  dram_cmd = we_q ? CMD_WR : CMD_RD;
      M_CPRE: begin
        dram_cmd  = CMD_PRE;
        dram_addr = '{rank: cbank_q[RB_W-1:BANK_W], bank: cbank_q[BANK_W-1:0],
                      row: '0, col: '0};
      end
      M_COPY: begin
        dram_cmd  = CMD_COPY;
        dram_addr = cp_src;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= M_IDLE;
      we_q       <= 1'b0;
      a_q        <= '0;
      e_q        <= '0;
      long_q     <= 1'b0;
      wd_q       <= '0;
      wait_q     <= '0;
      turn_q     <= 1'b0;
      cbank_q    <= '0;
      cdst_q     <= 1'b0;
      park_q     <= 1'b0;
      pwpw_q     <= 1'b0;
      wpd_q      <= 1'b0;
      open_v     <= '0;
      ras_long   <= '0;
      for (int i = 0; i < NBANKS; i++) begin
        open_row[i] <= '0;
        act_age[i]  <= '0;
      end
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      cp_done    <= 1'b0;
      st_reqs    <= '0;
      st_row_hits   <= '0;
      st_victim_acc <= '0;
      st_interrupts <= '0;
      st_wstalls    <= '0;
      st_copies     <= '0;
    end else begin
      resp_valid <= 1'b0;
      cp_done    <= 1'b0;
      for (int i = 0; i < NBANKS; i++)
        if (act_age[i] != 8'hFF) act_age[i] <= act_age[i] + 8'd1;
      // A gated bank loses its open row.
      open_v <= open_v & bank_on;
      if (tr_interrupt) st_interrupts <= st_interrupts + 1'b1;
      if (wp_done && park_q) wpd_q <= 1'b1;

      unique case (st_q)
        M_IDLE: begin
          if (take_copy) begin
            turn_q  <= 1'b0;
            cbank_q <= rb_of(cp_src);
            cdst_q  <= 1'b0;
            st_q    <= M_CSRC;
          end else if (take_req) begin
            turn_q  <= 1'b1;
            we_q    <= req_we;
            a_q     <= req_addr;
            wd_q    <= req_wdata;
            st_reqs <= st_reqs + 1'b1;
            st_q    <= M_TRQ;
          end
        end
        M_TRQ: if (tr_ready) st_q <= M_TRW;
        M_TRW: if (tr_done) begin
          e_q    <= tr_eff;
          long_q <= tr_translated;
          if (tr_pending && we_q) begin
            st_wstalls <= st_wstalls + 1'b1;
            st_q       <= M_WP;
          end else begin
            if (tr_translated) st_victim_acc <= st_victim_acc + 1'b1;
            st_q <= M_BANK;
          end
        end
        M_WP: begin
          if (take_copy) begin
            park_q  <= 1'b1;
            pwpw_q  <= 1'b0;
            cbank_q <= rb_of(cp_src);
            cdst_q  <= 1'b0;
            st_q    <= M_CSRC;
          end else if (wp_ready) begin
            st_q <= M_WPW;
          end
        end
        M_WPW: begin
          if (wp_done || wpd_q) begin
            wpd_q <= 1'b0;
            st_q  <= M_TRQ;
          end else if (take_copy) begin
            park_q  <= 1'b1;
            pwpw_q  <= 1'b1;
            cbank_q <= rb_of(cp_src);
            cdst_q  <= 1'b0;
            st_q    <= M_CSRC;
          end
        end
        M_BANK: begin
          if (open_v[eb] && open_row[eb] == e_q.row) begin
            st_row_hits <= st_row_hits + 1'b1;
            st_q <= M_COL;
          end else if (open_v[eb]) begin
            st_q <= M_PREW;
          end else begin
            st_q <= M_ACT;
          end
        end
        M_PREW: if (ras_met(act_age[eb], ras_long[eb])) st_q <= M_PRE;
        M_PRE: begin
          open_v[eb] <= 1'b0;
          wait_q     <= 8'(T_RP - 2);
          st_q       <= M_ACTW;
        end
        M_ACTW: begin
          // Wait tRP before the ACT.
          if (wait_q == 8'd0) st_q <= M_ACT;
          else wait_q <= wait_q - 8'd1;
        end
        M_ACT: begin
          open_v[eb]   <= 1'b1;
          open_row[eb] <= e_q.row;
          ras_long[eb] <= long_q;
          act_age[eb]  <= '0;
          wait_q       <= 8'(T_RCD - 2);
          st_q         <= M_CLW;
        end
        M_CLW: begin
          // Wait tRCD after ACT.
          if (wait_q == 8'd0) st_q <= M_COL;
          else wait_q <= wait_q - 8'd1;
        end
        M_COL: begin
          if (we_q) begin
            st_q <= M_REC;
          end else begin
            wait_q <= 8'(T_CL - 2);
            st_q   <= M_RESP;
          end
        end
        M_RESP: begin
          if (wait_q == 8'd0) begin
            resp_valid <= 1'b1;
            resp_rdata <= dram_rdata;
            st_q       <= M_IDLE;
          end else begin
            wait_q <= wait_q - 8'd1;
          end
        end
        M_REC: if (rec_ready) begin
          resp_valid <= 1'b1;
          st_q       <= M_IDLE;
        end
        // -------------------------------------------------- RowClone copy
        M_CSRC, M_CDST: begin
          if (open_v[cbank_q]) begin
            if (ras_met(act_age[cbank_q], ras_long[cbank_q])) st_q <= M_CPRE;
          end else if (!cdst_q) begin
            cbank_q <= rb_of(cp_dst);
            cdst_q  <= 1'b1;
            st_q    <= M_CDST;
          end else begin
            st_q <= M_COPY;
          end
        end
        M_CPRE: begin
          open_v[cbank_q] <= 1'b0;
          wait_q <= 8'(T_RP - 2);
          st_q   <= M_CPREW;
        end
        M_CPREW: begin
          if (wait_q == 8'd0) st_q <= cdst_q ? M_CDST : M_CSRC;
          else wait_q <= wait_q - 8'd1;
        end
        M_COPY: begin
          wait_q <= 8'(T_COPY - 2);
          st_q   <= M_COPYW;
        end
        M_COPYW: begin
          if (wait_q == 8'd0) begin
            cp_done   <= 1'b1;
            st_copies <= st_copies + 1'b1;
            // A parked write returns to where it waited.
            park_q    <= 1'b0;
            st_q      <= !park_q ? M_IDLE : pwpw_q ? M_WPW : M_WP;
          end else begin
            wait_q <= wait_q - 8'd1;
          end
        end
        default: st_q <= M_IDLE;
      endcase
    end
  end

  // The wait counters count down to the cycle of the next command.
  initial begin
    a_params: assert (T_RCD >= 2 && T_RP >= 2 && T_RAS >= 2 && T_CL >= 2 && T_COPY >= 2 &&
                      T_RAS_V >= T_RAS && T_RAS_V < 255 && T_COPY < 256);
  end

  // Commands never go to a power-gated bank.
  a_no_gated_access: assert property (@(posedge clk) disable iff (!rst_n)
    dram_cmd inside {CMD_ACT, CMD_RD, CMD_WR} |-> bank_on[rb_of(dram_addr)]);
  a_no_gated_copy: assert property (@(posedge clk) disable iff (!rst_n)
    dram_cmd == CMD_COPY |-> bank_on[rb_of(cp_src)] && bank_on[rb_of(cp_dst)]);

endmodule
