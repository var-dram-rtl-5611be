// tb_bank_power_gate: self-checking test of the sleep-transistor model.
// Random sleep pulses of random length are applied.  Checks: the gated
// supply follows sleep at once; pwr_good falls one cycle after sleep rises;
// it returns exactly WAKE_CYCLES cycles after sleep falls (fewer if sleep
// comes back first, then it stays low); and wake_events counts each
// sleep-to-awake transition.
//
// Interface and timing: no ports; a 10-unit clock period, a watchdog that
// counts a failure and stops the run if it hangs, and a final line
// `TB_RESULT checks=N failures=M`.  Random stimulus uses $urandom.
// The wake-up time is this design's assumption; the paper gives none.
module tb_bank_power_gate;
  localparam int unsigned WAKE = 12;

  logic clk = 0, rst_n = 0, sleep = 0;
  always #5 clk = ~clk;
  logic vdd_bank, pwr_good;
  logic [31:0] wake_events;

  bank_power_gate #(.WAKE_CYCLES(WAKE)) dut (
    .clk, .rst_n, .sleep, .vdd_bank, .pwr_good, .wake_events);

  int checks = 0, failures = 0, wakes = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(pwr_good && vdd_bank && wake_events == 0, "powered after reset");
    for (int n = 0; n < 60; n++) begin
      automatic int on_len = $urandom_range(1, 10);
      // Sleep.
      sleep = 1; #1;
      check(!vdd_bank, "supply cut with sleep");
      @(negedge clk);
      check(!pwr_good, "pwr_good low one cycle after sleep");
      repeat (on_len - 1) begin @(negedge clk); check(!pwr_good, "pwr_good stays low"); end
      // Wake, then either wait for power good or sleep again early.
      sleep = 0; #1;
      check(vdd_bank, "supply restored");
      wakes++;
      if (n % 4 == 3) begin
        repeat ($urandom_range(1, WAKE - 1)) begin
          @(negedge clk); check(!pwr_good, "not settled yet");
        end
      end else begin
        for (int c = 1; c <= WAKE + 2; c++) begin
          @(negedge clk);
          check(pwr_good == (c >= WAKE), $sformatf("pwr_good at %0d cycles after wake", c));
        end
      end
    end
    @(negedge clk);
    check(wake_events == 32'(wakes), "wake event count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
