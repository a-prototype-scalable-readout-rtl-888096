// tb_va140_sequencer: self-checking test of the VA140 hold-and-readout sequence
// at the default timing (160 MHz system clock). It measures, in system clocks,
// the trigger-to-HOLDB delay (6.5 us = 1040), the CLKB period (200 ns = 32),
// the number of readout clocks (64) and the readout length (12.8 us = 2048),
// and checks SHIFT_IN_B, the conversion slots, DRESET, TEST_ON and that a
// trigger during a readout is ignored.
module tb_va140_sequencer;
  localparam int N_CARDS = 8, N_CH = 64;
  localparam real F_SYS_MHZ = 160.0;
  // expected numbers derived from the microsecond figures
  localparam int EXP_PEAK    = int'(6.5 * F_SYS_MHZ);    // 1040
  localparam int EXP_PERIOD  = int'(F_SYS_MHZ / 5.0);    // 32
  localparam int EXP_READOUT = int'(12.8 * F_SYS_MHZ);   // 2048

  logic clk = 0, rst_n = 0;
  always #3.125 clk = ~clk;

  logic trig = 0, busy, done, adc_start;
  logic [N_CARDS-1:0] test_on_mask = '0;
  logic [N_CARDS-1:0] holdb, clkb, shift_in_b, dreset, test_on;
  logic [5:0] slot;
  int checks = 0, failures = 0;

  va140_sequencer dut (.clk, .rst_n, .trig, .test_on_mask, .busy, .done,
                       .va_holdb(holdb), .va_clkb(clkb), .va_shift_in_b(shift_in_b),
                       .va_dreset(dreset), .va_test_on(test_on), .adc_start, .slot);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // cycle-level monitor
  int cyc = 0;
  int t_trig, t_hold, t_first_fall, t_last_fall, t_prev_fall, n_falls, n_starts;
  int n_bad_period, n_bad_slot, n_bad_start_phase, n_shiftin_low_falls, t_dreset, t_done;
  int t_release;
  logic clkb_d = 1, holdb_d = 1, dreset_d = 0, busy_d = 0;
  always @(posedge clk) begin
    cyc++;
    if (clkb_d && !clkb[0]) begin
      if (n_falls == 0) t_first_fall = cyc;
      else if (cyc - t_prev_fall != EXP_PERIOD) n_bad_period++;
      if (!shift_in_b[0]) n_shiftin_low_falls++;
      t_prev_fall = cyc; t_last_fall = cyc;
      n_falls++;
    end
    if (!busy_d && busy) t_trig = cyc;   // the cycle after the trigger was taken
    if (holdb_d && !holdb[0]) t_hold = cyc;
    if (!holdb_d && holdb[0]) t_release = cyc;
    if (!dreset_d && dreset[0]) t_dreset = cyc;
    if (done) t_done = cyc;
    if (adc_start) begin
      if (slot != 6'(n_starts)) n_bad_slot++;
      if (!clkb[0] || holdb[0]) n_bad_start_phase++;
      n_starts++;
    end
    // all cards see the same levels
    if (holdb != {N_CARDS{holdb[0]}} || clkb != {N_CARDS{clkb[0]}} ||
        shift_in_b != {N_CARDS{shift_in_b[0]}} || dreset != {N_CARDS{dreset[0]}}) n_bad_slot++;
    busy_d <= busy; clkb_d <= clkb[0]; holdb_d <= holdb[0]; dreset_d <= dreset[0];
  end

  task automatic one_event(input bit extra_trig);
    n_falls = 0; n_starts = 0; n_bad_period = 0; n_bad_slot = 0;
    n_bad_start_phase = 0; n_shiftin_low_falls = 0; t_done = 0;
    @(posedge clk) trig <= 1;
    @(posedge clk) trig <= 0;
    if (extra_trig) begin
      repeat (1500) @(posedge clk);
      trig <= 1; @(posedge clk) trig <= 0;
    end
    while (t_done == 0) @(posedge clk);
    repeat (5) @(posedge clk);
    check(t_hold - t_trig == EXP_PEAK, $sformatf("trigger to HOLDB %0d cycles, expected %0d", t_hold - t_trig, EXP_PEAK));
    check(n_falls == N_CH, $sformatf("%0d CLKB periods, expected %0d", n_falls, N_CH));
    check(n_bad_period == 0, $sformatf("%0d CLKB periods not %0d cycles", n_bad_period, EXP_PERIOD));
    check(t_last_fall + EXP_PERIOD - t_first_fall == EXP_READOUT,
          $sformatf("readout %0d cycles, expected %0d", t_last_fall + EXP_PERIOD - t_first_fall, EXP_READOUT));
    check(t_first_fall > t_hold, "first CLKB edge after HOLDB");
    check(n_shiftin_low_falls == 1, $sformatf("SHIFT_IN_B low at %0d CLKB edges, expected 1", n_shiftin_low_falls));
    check(n_starts == N_CH, $sformatf("%0d conversions, expected %0d", n_starts, N_CH));
    check(n_bad_slot == 0, "slot numbering and identical card pins");
    check(n_bad_start_phase == 0, "conversions only in the second half of a CLKB period while held");
    check(t_release > t_last_fall + EXP_PERIOD - 1, "HOLDB released after the last readout period");
    check(t_dreset == t_release, "DRESET raised when HOLDB is released");
    check(t_done > t_dreset && !busy && holdb[0] && clkb[0] && !dreset[0], "idle after done");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(!busy && holdb == '1 && clkb == '1 && shift_in_b == '1 && dreset == '0, "idle pins after reset");
    test_on_mask = 8'h5A;
    @(posedge clk);
    check(test_on == 8'h5A, "TEST_ON follows the mask");
    one_event(0);
    one_event(1);   // a trigger during the readout must not start a second sequence
    test_on_mask = 8'h00;
    one_event(0);
    check(test_on == 8'h00, "TEST_ON cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
