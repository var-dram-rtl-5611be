// tb_var_matrix: self-checking test of the variation matrix V.
// Writes random victim/target entries, reads them back on both read ports,
// checks the victim vector against a reference array, then clears V.
//
// Interface and timing: no ports; a 10-unit clock period, a watchdog that
// counts a failure and stops the run if it hangs, and a final line
// `TB_RESULT checks=N failures=M`.  Random stimulus uses $urandom.
// Expected values come from the testbench's own array; the entry format
// is the design's, the idea of a per-bank victim/target table the paper's.
module tb_var_matrix;
  import varram_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            clear, wr_en;
  logic [RB_W-1:0] wr_idx, ra, rb;
  vm_entry_t       wr_entry, da, db;
  logic [NBANKS-1:0] victims;
  vm_entry_t       ref_v [NBANKS];
  int checks = 0, failures = 0;

  var_matrix dut (.clk, .rst_n, .clear, .wr_en, .wr_idx, .wr_entry,
                  .rd_a_idx(ra), .rd_a(da), .rd_b_idx(rb), .rd_b(db), .victims);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; wr_en = 0; wr_idx = '0; wr_entry = '0; ra = '0; rb = '0;
    for (int i = 0; i < NBANKS; i++) ref_v[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(victims == '0, "reset: no victims");
    for (int n = 0; n < 100; n++) begin
      wr_idx   = RB_W'($urandom);
      wr_entry = vm_entry_t'($urandom);
      wr_en    = 1;
      ref_v[wr_idx] = wr_entry;
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < NBANKS; i++) begin
      ra = RB_W'(i);
      rb = RB_W'(NBANKS - 1 - i);
      #1;
      check(da == ref_v[i], "port a readback");
      check(db == ref_v[NBANKS - 1 - i], "port b readback");
      check(victims[i] == ref_v[i].victim, "victim vector");
    end
    clear = 1;
    @(negedge clk);
    clear = 0;
    check(victims == '0, "clear empties V");
    ra = 5; #1;
    check(da == '0, "cleared entry reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
