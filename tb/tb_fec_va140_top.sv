// tb_fec_va140_top: end-to-end test of the FEC readout logic at its default
// size (8 cards, 16 VA140 chips, 64 slots, 8192-word buffer, 160 MHz).
//
// The bench surrounds the design with behavioural models of the 16 VA140
// chips and 8 AD7356 ADCs, a SiTCP-side byte sink with a full flag and a
// connection flag, and a register-bus host. It runs 14 accepted events and
// checks every byte sent against the event records it predicts from the
// channel levels it injected. It also checks the readout timing (6.5 us to
// HOLDB, 5 MHz CLKB, 12.8 us readout) and the dead time against the 5 kHz
// counting rate, and makes each mechanism happen: external and software
// triggers, a trigger rejected while busy, TEST_ON calibration levels, an ADC
// frame error flagged in the trailer, TCP back-pressure, a closed connection,
// a full buffer refusing a trigger, a disabled external trigger, and the
// counters read back over the register bus.
module tb_fec_va140_top;
  import tb_fec_pkg::*;

  localparam int N_CARDS = 8, N_CHIPS = 16, N_CH = 64;
  localparam int EVT_WORDS = 3 + N_CHIPS * N_CH;       // 1027
  localparam int BUF_DEPTH = 8192;
  localparam real F_MHZ = 160.0;

  logic clk = 0, rst_n = 0;
  always #3.125 clk = ~clk;

  logic ext_trig_in = 0;
  logic [N_CARDS-1:0] va_holdb, va_clkb, va_shift_in_b, va_dreset, va_test_on;
  logic [N_CARDS-1:0] adc_cs_n, adc_sclk, adc_sdata_a, adc_sdata_b;
  logic tcp_open_ack = 0, tcp_tx_full = 0, tcp_tx_wr;
  logic [7:0] tcp_tx_data;
  logic [31:0] rbcp_addr = 0;
  logic rbcp_we = 0, rbcp_re = 0, rbcp_ack;
  logic [7:0] rbcp_wd = 0, rbcp_rd;
  logic busy, buf_overflow;

  fec_va140_top dut (.*);

  // ---------------------------------------------------------------- models
  logic [N_CHIPS-1:0][11:0] aout;
  logic [N_CARDS-1:0] bad_lead = '0;
  for (genvar c = 0; c < N_CARDS; c++) begin : g_card
    va140_model #(.CHIP(2*c)) u_va0 (.holdb(va_holdb[c]), .clkb(va_clkb[c]), .shift_in_b(va_shift_in_b[c]),
                                      .dreset(va_dreset[c]), .test_on(va_test_on[c]), .aout(aout[2*c]));
    va140_model #(.CHIP(2*c+1)) u_va1 (.holdb(va_holdb[c]), .clkb(va_clkb[c]), .shift_in_b(va_shift_in_b[c]),
                                        .dreset(va_dreset[c]), .test_on(va_test_on[c]), .aout(aout[2*c+1]));
    ad7356_model u_adc (.cs_n(adc_cs_n[c]), .sclk(adc_sclk[c]), .vin_a(aout[2*c]), .vin_b(aout[2*c+1]),
                        .bad_lead(bad_lead[c]), .sdata_a(adc_sdata_a[c]), .sdata_b(adc_sdata_b[c]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------ expected records
  logic [15:0] expq[$];
  int n_expected_events = 0;
  task automatic expect_event(input logic [N_CARDS-1:0] test_on, input bit err);
    int e = n_expected_events;
    expq.push_back(16'hEB90);
    expq.push_back(16'(e));
    for (int s = 0; s < N_CH; s++)
      for (int k = 0; k < N_CHIPS; k++)
        expq.push_back({4'(k), channel_code(e, k, s, test_on[k/2])});
    expq.push_back(16'h90E0 | 16'(err));
    n_expected_events++;
  endtask

  // ------------------------------------------------------------ TCP sink
  int n_bytes = 0, n_words = 0, n_bad_words = 0, n_cal = 0, n_err_trailers = 0;
  int n_stall_cycles = 0, n_closed_cycles = 0, n_illegal_wr = 0;
  logic have_hi = 0;
  logic [7:0] hi;
  logic ok_d = 0;
  always @(posedge clk) if (rst_n) begin
    if (tcp_tx_wr) begin
      n_bytes++;
      if (!ok_d) n_illegal_wr++;
      if (!have_hi) begin hi = tcp_tx_data; have_hi = 1; end
      else begin
        logic [15:0] w, e;
        w = {hi, tcp_tx_data};
        have_hi = 0;
        n_words++;
        // slot-0 words of event 3, the TEST_ON event
        if ((n_words - 1) / EVT_WORDS == 3 && (n_words - 1) % EVT_WORDS >= 2 &&
            (n_words - 1) % EVT_WORDS < 2 + N_CHIPS && w[11:0] == CAL_CODE) n_cal++;
        if (w == 16'h90E1) n_err_trailers++;
        if (expq.size() == 0) begin
          n_bad_words++;
          if (n_bad_words < 6) $display("unexpected word %h", w);
        end else begin
          e = expq.pop_front();
          if (e != w) begin
            n_bad_words++;
            if (n_bad_words < 6) $display("word %0d: got %h expected %h", n_words, w, e);
          end
        end
      end
    end
    if (tcp_tx_full && !dut.buf_empty) n_stall_cycles++;
    if (!tcp_open_ack && !dut.buf_empty) n_closed_cycles++;
    ok_d <= tcp_open_ack && !tcp_tx_full;
  end

  logic random_full = 0;
  always @(posedge clk) tcp_tx_full <= random_full ? (($urandom % 2) == 0) : 1'b0;

  // --------------------------------------------------------- register host
  task automatic rbcp_write(input logic [7:0] a, input logic [7:0] d);
    @(posedge clk) begin rbcp_addr <= 32'(a); rbcp_wd <= d; rbcp_we <= 1; end
    @(posedge clk) rbcp_we <= 0;
    @(negedge clk) check(rbcp_ack, "register write acknowledged");
  endtask
  task automatic rbcp_read(input logic [7:0] a, output logic [7:0] d);
    @(posedge clk) begin rbcp_addr <= 32'(a); rbcp_re <= 1; end
    @(posedge clk) rbcp_re <= 0;
    @(negedge clk) begin check(rbcp_ack, "register read acknowledged"); d = rbcp_rd; end
  endtask

  // -------------------------------------------------------- timing monitor
  int cyc = 0, t_trig_pin = 0, t_hold = 0, t_first_clk = 0, t_last_clk = 0, t_idle = 0;
  int n_clk_in_evt = 0, n_bad_period = 0, t_prev_clk = 0;
  logic holdb_d = 1, clkb_d = 1, busy_d = 0, trig_d = 0;
  always @(posedge clk) begin
    cyc++;
    if (!trig_d && ext_trig_in) t_trig_pin = cyc;
    if (holdb_d && !va_holdb[0]) begin t_hold = cyc; n_clk_in_evt = 0; end
    if (clkb_d && !va_clkb[0]) begin
      if (n_clk_in_evt == 0) t_first_clk = cyc;
      else if (cyc - t_prev_clk != 32) n_bad_period++;
      t_prev_clk = cyc; t_last_clk = cyc; n_clk_in_evt++;
    end
    if (busy_d && !busy) t_idle = cyc;
    trig_d <= ext_trig_in; holdb_d <= va_holdb[0]; clkb_d <= va_clkb[0]; busy_d <= busy;
  end

  // ------------------------------------------------------------ stimulus
  int m_ext_acc = 0, m_sw_acc = 0, m_rej_busy = 0, m_rej_full = 0, m_ext_disabled = 0;

  task automatic ext_pulse();
    @(posedge clk) ext_trig_in <= 1;
    repeat (8) @(posedge clk);
    ext_trig_in <= 0;
  endtask

  task automatic wait_idle();
    repeat (10) @(posedge clk);
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  task automatic wait_drained(input int limit);
    int t = 0;
    while (expq.size() > 0 && t < limit) begin @(posedge clk); t++; end
    check(expq.size() == 0, $sformatf("all expected words received (%0d missing)", expq.size()));
  endtask

  logic [N_CARDS-1:0] cur_test_on = '0;

  initial begin
    logic [7:0] d, lo, hi8;
    int t0, dead;
    repeat (5) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    rbcp_read(8'h08, d);
    check(d == 8'hA1, "design identifier");
    tcp_open_ack <= 1;
    rbcp_write(8'h00, 8'h03);                 // run, external trigger enabled

    // event 0: external trigger, with timing checks
    expect_event(cur_test_on, 0);
    ext_pulse();
    m_ext_acc++;
    wait_idle();
    dead = t_idle - t_trig_pin;
    $display("event 0: trigger to HOLDB %0d cycles (%0.2f us), readout %0d cycles (%0.2f us), dead time %0.2f us",
             t_hold - t_trig_pin, (t_hold - t_trig_pin) / F_MHZ, t_last_clk + 32 - t_first_clk,
             (t_last_clk + 32 - t_first_clk) / F_MHZ, dead / F_MHZ);
    check(t_hold - t_trig_pin >= int'(6.5 * F_MHZ) && t_hold - t_trig_pin <= int'(6.5 * F_MHZ) + 5,
          "HOLDB 6.5 us after the trigger (within the synchroniser latency)");
    check(n_clk_in_evt == 64 && n_bad_period == 0, "64 CLKB periods of 200 ns");
    check(t_last_clk + 32 - t_first_clk == int'(12.8 * F_MHZ), "readout of 64 channels takes 12.8 us");
    check(dead < int'(F_MHZ * 1.0e6 / 5.0e3), "dead time below the 200 us of a 5 kHz counting rate");
    t0 = cyc;
    wait_drained(20000);
    check(cyc - t0 < 2 * EVT_WORDS + 50, $sformatf("event sent %0d cycles after the readout", cyc - t0));

    // event 1: software trigger
    expect_event(cur_test_on, 0);
    rbcp_write(8'h01, 8'h01);
    m_sw_acc++;
    wait_idle();
    wait_drained(20000);

    // event 2: a second trigger during the readout is rejected
    expect_event(cur_test_on, 0);
    ext_pulse();
    m_ext_acc++;
    repeat (2000) @(posedge clk);
    check(busy, "readout still running");
    ext_pulse();
    m_rej_busy++;
    wait_idle();
    wait_drained(20000);

    // event 3: TEST_ON on cards 0 and 2
    cur_test_on = 8'h05;
    rbcp_write(8'h02, 8'(cur_test_on));
    check(va_test_on == cur_test_on, "TEST_ON pins follow the register");
    expect_event(cur_test_on, 0);
    ext_pulse();
    m_ext_acc++;
    wait_idle();
    wait_drained(20000);
    cur_test_on = '0;
    rbcp_write(8'h02, 8'h00);

    // event 4: ADC 3 sends a bad frame
    bad_lead[3] = 1;
    expect_event(cur_test_on, 1);
    ext_pulse();
    m_ext_acc++;
    wait_idle();
    bad_lead[3] = 0;
    wait_drained(20000);

    // events 5, 6: TCP back-pressure
    random_full = 1;
    for (int i = 0; i < 2; i++) begin
      expect_event(cur_test_on, 0);
      ext_pulse();
      m_ext_acc++;
      wait_idle();
    end
    wait_drained(40000);
    random_full = 0;

    // events 7..13 fill the buffer while the connection is closed; the 8th trigger is refused
    tcp_open_ack <= 0;
    for (int i = 0; i < BUF_DEPTH / EVT_WORDS; i++) begin
      expect_event(cur_test_on, 0);
      ext_pulse();
      m_ext_acc++;
      wait_idle();
    end
    rbcp_read(8'h03, d);
    check(d[1] == 1'b1 && d[2] == 1'b0, $sformatf("status reports no room (status %h)", d));
    ext_pulse();
    m_rej_full++;
    repeat (100) @(posedge clk);
    check(!busy, "no readout started with a full buffer");
    check(n_bytes == 2 * 7 * EVT_WORDS, "nothing sent while the connection is closed");
    tcp_open_ack <= 1;
    wait_drained(200000);

    // external trigger disabled: the pin is ignored
    rbcp_write(8'h00, 8'h01);
    ext_pulse();
    m_ext_disabled++;
    repeat (100) @(posedge clk);
    check(!busy, "external trigger ignored while disabled");

    // counters over the register bus
    rbcp_read(8'h04, lo); rbcp_read(8'h05, hi8);
    check({hi8, lo} == 16'(m_ext_acc + m_sw_acc), $sformatf("accepted counter %0d, expected %0d", {hi8, lo}, m_ext_acc + m_sw_acc));
    rbcp_read(8'h06, lo); rbcp_read(8'h07, hi8);
    check({hi8, lo} == 16'(m_rej_busy + m_rej_full), $sformatf("rejected counter %0d, expected %0d", {hi8, lo}, m_rej_busy + m_rej_full));
    rbcp_write(8'h01, 8'h02);
    rbcp_read(8'h04, lo);
    check(lo == 0, "counters cleared");

    repeat (200) @(posedge clk);
    check(n_bad_words == 0, $sformatf("%0d wrong words of %0d", n_bad_words, n_words));
    check(n_words == n_expected_events * EVT_WORDS, $sformatf("%0d words for %0d events", n_words, n_expected_events));
    check(!buf_overflow, "buffer never overflowed");
    check(n_illegal_wr == 0, "no byte written against full or closed");
    begin
      int model_err = 0;
      model_err += g_card[0].u_va0.errors + g_card[1].u_va0.errors + g_card[7].u_va1.errors;
      check(model_err == 0, "VA140 protocol followed (64 clocks per hold, none outside hold)");
    end
    // mechanisms
    $display("mechanisms: ext=%0d sw=%0d rej_busy=%0d rej_full=%0d cal_words=%0d err_trailers=%0d stall_cycles=%0d closed_cycles=%0d ext_disabled=%0d",
             m_ext_acc, m_sw_acc, m_rej_busy, m_rej_full, n_cal, n_err_trailers, n_stall_cycles, n_closed_cycles, m_ext_disabled);
    check(m_ext_acc > 0 && m_sw_acc > 0, "both trigger sources used");
    check(m_rej_busy > 0 && m_rej_full > 0, "both rejection causes happened");
    check(n_cal == 4 && n_err_trailers == 1, $sformatf("calibration words %0d (4 expected), error trailers %0d", n_cal, n_err_trailers));
    check(n_stall_cycles > 0 && n_closed_cycles > 0, "back-pressure and closed connection happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
