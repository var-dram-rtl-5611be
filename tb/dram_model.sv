// dram_model: behavioural model of the DRAM array for the testbenches.
//
// Stores 64-bit words sparsely (associative array keyed by the word
// address), keeps per-bank open-row state and checks the command protocol:
// ACT only to a precharged, powered bank; RD/WR only to the open row, at
// least T_RCD cycles after ACT; PRE no earlier than T_RAS after ACT.
// CMD_COPY copies one word from dram_addr to dram_addr2 (RowClone PSM),
// both banks precharged.  A bank whose supply (vdd_bank) drops loses its
// contents.  Read data appears on rdata the cycle after RD and holds.
// While `init` is high (the controller is in reset) all banks are
// precharged, as the initialisation sequence of a real device does.
// Every protocol violation increments `errors`.
// Timing is checked in clock cycles (T_RCD, T_RAS parameters).  The
// RowClone copy is modelled as an instant word copy; its duration is
// the controller's T_COPY.  The model is this design's own test aid.
module dram_model
  import varram_pkg::*;
#(
  parameter int unsigned T_RCD = 16,
  parameter int unsigned T_RAS = 39
) (
  input  logic              clk,
  input  logic              init,
  input  dram_cmd_e         cmd,
  input  dram_addr_t        addr,
  input  dram_addr_t        addr2,
  input  logic [DATA_W-1:0] wdata,
  input  logic [NBANKS-1:0] vdd_bank,
  output logic [DATA_W-1:0] rdata,
  output int                errors,
  output int                n_act,
  output int                n_copy
);

  logic [DATA_W-1:0] mem [logic [ADDR_W-1:0]];
  logic [ROW_W-1:0]  row_q  [NBANKS];
  logic              open_q [NBANKS];
  longint            act_t  [NBANKS];
  longint            cyc;
  logic [NBANKS-1:0] vdd_q;

  initial begin
    errors = 0; n_act = 0; n_copy = 0; cyc = 0; rdata = '0; vdd_q = '1;
    for (int i = 0; i < NBANKS; i++) begin
      open_q[i] = 1'b0; row_q[i] = '0; act_t[i] = 0;
    end
  end

  function automatic logic [DATA_W-1:0] peek(dram_addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  task automatic err(string s);
    errors++;
    $display("dram_model: %s at cycle %0d", s, cyc);
  endtask

  always @(posedge clk) begin
    automatic int b = int'(rb_of(addr));
    cyc++;
    // Power loss wipes a bank.
    for (int i = 0; i < NBANKS; i++) begin
      if (vdd_q[i] && !vdd_bank[i]) begin
        logic [ADDR_W-1:0] k;
        open_q[i] = 1'b0;
        if (mem.first(k)) begin
          do begin
            if (int'(rb_of(dram_addr_t'(k))) == i) mem.delete(k);
          end while (mem.next(k));
        end
      end
    end
    vdd_q = vdd_bank;
    // Initialisation (controller reset): all banks precharged.
    if (init) for (int i = 0; i < NBANKS; i++) open_q[i] = 1'b0;
    case (cmd)
      CMD_ACT: begin
        n_act++;
        if (!vdd_bank[b]) err("ACT to gated bank");
        if (open_q[b])    err("ACT to open bank");
        open_q[b] = 1'b1; row_q[b] = addr.row; act_t[b] = cyc;
      end
      CMD_PRE: begin
        if (open_q[b] && (cyc - act_t[b]) < longint'(T_RAS)) err("PRE before tRAS");
        open_q[b] = 1'b0;
      end
      CMD_RD, CMD_WR: begin
        if (!vdd_bank[b]) err("access to gated bank");
        if (!open_q[b] || row_q[b] != addr.row) err("access to closed row");
        if ((cyc - act_t[b]) < longint'(T_RCD)) err("column command before tRCD");
        if (cmd == CMD_WR) mem[addr] = wdata;
        else               rdata <= peek(addr);
      end
      CMD_COPY: begin
        automatic int b2 = int'(rb_of(addr2));
        n_copy++;
        if (!vdd_bank[b] || !vdd_bank[b2]) err("copy with gated bank");
        if (open_q[b] || open_q[b2]) err("copy with open bank");
        mem[addr2] = peek(addr);
      end
      default: ;
    endcase
  end

endmodule
