// bank_power_gate: behavioural model of one bank's sleep transistor.
//
// This is a behavioural model, not logic to synthesize: the real part is a
// header transistor between VDD and the bank selection logic of one DRAM
// bank, which cuts the bank's supply while `sleep` is high.  The model
// reproduces what the digital side sees of it: the gated supply (vdd_bank)
// falls as soon as sleep rises, and after sleep falls the supply takes
// WAKE_CYCLES clock cycles to settle before pwr_good is reported.  A gated
// bank loses its contents; the controller never addresses it.
// The wake-up time is an assumption: the design gives only the switch's
// area, leakage (8.89 nW) and wake-up energy (1.2 pJ).
module bank_power_gate #(
  parameter int unsigned WAKE_CYCLES = 12
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sleep,
  output logic vdd_bank,
  output logic pwr_good,
  output logic [31:0] wake_events
);

  localparam int unsigned CW = $clog2(WAKE_CYCLES + 1);
  logic [CW-1:0] settle_q;
  logic          sleep_q;

  assign vdd_bank = !sleep;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      settle_q    <= '0;
      pwr_good    <= 1'b1;
      sleep_q     <= 1'b0;
      wake_events <= '0;
    end else begin
      sleep_q <= sleep;
      if (sleep) begin
        pwr_good <= 1'b0;
        settle_q <= CW'(WAKE_CYCLES);
      end else if (settle_q != '0) begin
        settle_q <= settle_q - 1'b1;
        if (settle_q == CW'(1)) pwr_good <= 1'b1;
      end
      if (sleep_q && !sleep) wake_events <= wake_events + 1'b1;
    end
  end

endmodule
