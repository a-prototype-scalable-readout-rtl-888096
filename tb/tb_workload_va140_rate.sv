// tb_workload_va140_rate: the VA140 readout at the rates of the prototype
// system, with the design at its default size.
//
// Phase 1 sends 12 external triggers at the 5 kHz counting-rate limit (one
// per 200 us = 32000 cycles at 160 MHz) while the TCP side accepts bytes at
// about 530 Mbit/s, the transfer speed measured for one card (the full flag
// is raised at random so that writes are allowed 41 % of the cycles:
// 0.41 x 1280 Mbit/s = 525 Mbit/s). Every trigger must be accepted and every
// event delivered intact. Phase 2 triggers back to back (every 3300 cycles,
// about 48 kHz) into the same throttled link: the buffer fills, triggers are
// refused, and every event that is accepted must still arrive intact and in
// order. Each received event is checked word by word against the channel
// levels the VA140 models held for the event number in its header.
module tb_workload_va140_rate;
  import tb_fec_pkg::*;

  localparam int N_CARDS = 8, N_CHIPS = 16, N_CH = 64;
  localparam int EVT_WORDS = 3 + N_CHIPS * N_CH;
  localparam real F_MHZ = 160.0;
  localparam int PERIOD_5KHZ = int'(F_MHZ * 1.0e6 / 5.0e3);   // 32000

  logic clk = 0, rst_n = 0;
  always #3.125 clk = ~clk;

  logic ext_trig_in = 0;
  logic [N_CARDS-1:0] va_holdb, va_clkb, va_shift_in_b, va_dreset, va_test_on;
  logic [N_CARDS-1:0] adc_cs_n, adc_sclk, adc_sdata_a, adc_sdata_b;
  logic tcp_open_ack = 1, tcp_tx_full = 0, tcp_tx_wr;
  logic [7:0] tcp_tx_data;
  logic [31:0] rbcp_addr = 0;
  logic rbcp_we = 0, rbcp_re = 0, rbcp_ack;
  logic [7:0] rbcp_wd = 0, rbcp_rd;
  logic busy, buf_overflow;

  fec_va140_top dut (.*);

  logic [N_CHIPS-1:0][11:0] aout;
  for (genvar c = 0; c < N_CARDS; c++) begin : g_card
    va140_model #(.CHIP(2*c)) u_va0 (.holdb(va_holdb[c]), .clkb(va_clkb[c]), .shift_in_b(va_shift_in_b[c]),
                                      .dreset(va_dreset[c]), .test_on(va_test_on[c]), .aout(aout[2*c]));
    va140_model #(.CHIP(2*c+1)) u_va1 (.holdb(va_holdb[c]), .clkb(va_clkb[c]), .shift_in_b(va_shift_in_b[c]),
                                        .dreset(va_dreset[c]), .test_on(va_test_on[c]), .aout(aout[2*c+1]));
    ad7356_model u_adc (.cs_n(adc_cs_n[c]), .sclk(adc_sclk[c]), .vin_a(aout[2*c]), .vin_b(aout[2*c+1]),
                        .bad_lead(1'b0), .sdata_a(adc_sdata_a[c]), .sdata_b(adc_sdata_b[c]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // throttled SiTCP sink: writes allowed in about 41 % of the cycles
  always @(posedge clk) tcp_tx_full <= ($urandom % 100) >= 41;

  // event parser
  int n_bytes = 0, n_events = 0, n_bad = 0, widx = 0, cur_evt = -1;
  int cyc = 0, n_backlog_cycles = 0, n_backlog_bytes = 0;
  logic have_hi = 0;
  logic [7:0] hi;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && !dut.buf_empty) begin
      n_backlog_cycles++;
      if (tcp_tx_wr) n_backlog_bytes++;
    end
    if (rst_n && tcp_tx_wr) begin
      n_bytes++;
      if (!have_hi) begin hi = tcp_tx_data; have_hi = 1; end
      else begin
        logic [15:0] w, e;
        have_hi = 0;
        w = {hi, tcp_tx_data};
        if (widx == 0) e = 16'hEB90;
        else if (widx == 1) begin
          e = 16'(n_events);               // events arrive in order, numbered from 0
          cur_evt = int'(w);
        end else if (widx == EVT_WORDS - 1) e = 16'h90E0;
        else begin
          int s, k;
          s = (widx - 2) / N_CHIPS; k = (widx - 2) % N_CHIPS;
          e = {4'(k), channel_code(cur_evt, k, s, 1'b0)};
        end
        if (w != e) begin
          n_bad++;
          if (n_bad < 6) $display("event %0d word %0d: got %h expected %h", n_events, widx, w, e);
        end
        widx++;
        if (widx == EVT_WORDS) begin widx = 0; n_events++; end
      end
    end
  end

  task automatic rbcp_write(input logic [7:0] a, input logic [7:0] d);
    @(posedge clk) begin rbcp_addr <= 32'(a); rbcp_wd <= d; rbcp_we <= 1; end
    @(posedge clk) rbcp_we <= 0;
  endtask
  task automatic rbcp_read16(input logic [7:0] a, output logic [15:0] v);
    for (int i = 0; i < 2; i++) begin
      @(posedge clk) begin rbcp_addr <= 32'(a + 8'(i)); rbcp_re <= 1; end
      @(posedge clk) rbcp_re <= 0;
      @(negedge clk) v[8*i +: 8] = rbcp_rd;
    end
  endtask

  task automatic trigger_every(input int n, input int period);
    for (int i = 0; i < n; i++) begin
      @(posedge clk) ext_trig_in <= 1;
      repeat (8) @(posedge clk);
      ext_trig_in <= 0;
      repeat (period - 9) @(posedge clk);
    end
  endtask

  initial begin
    logic [15:0] acc, rej;
    real mbps;
    repeat (5) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    rbcp_write(8'h00, 8'h03);

    // phase 1: 5 kHz
    trigger_every(12, PERIOD_5KHZ);
    rbcp_read16(8'h04, acc);
    rbcp_read16(8'h06, rej);
    mbps = 8.0 * n_backlog_bytes * F_MHZ / n_backlog_cycles;
    $display("5 kHz phase: %0d accepted, %0d rejected, %0d events received, link %0.0f Mbit/s while sending",
             acc, rej, n_events, mbps);
    check(acc == 12 && rej == 0, "all triggers at 5 kHz accepted");
    check(n_events == 12, "all 12 events delivered at 5 kHz");
    check(mbps > 480.0 && mbps < 580.0, "throttled link near 530 Mbit/s");

    // phase 2: back-to-back triggers
    trigger_every(40, 3300);
    repeat (100000) @(posedge clk);
    rbcp_read16(8'h04, acc);
    rbcp_read16(8'h06, rej);
    $display("burst phase: %0d accepted, %0d rejected in total, %0d events received", acc, rej, n_events);
    check(rej > 0, "full buffer refused triggers in the burst");
    check(int'(acc) == n_events, "every accepted event delivered");
    check(int'(acc) + int'(rej) == 52, "every trigger either accepted or counted as rejected");
    check(widx == 0, "no partial event left");
    check(n_bad == 0, $sformatf("%0d wrong words", n_bad));
    check(!buf_overflow, "no buffer overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (800000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
