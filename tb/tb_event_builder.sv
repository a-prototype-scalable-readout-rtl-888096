// tb_event_builder: self-checking test of the event formatter. Events with
// random samples (and one with an ADC frame error) are fed slot by slot at the
// readout's pace of one strobe per 32 cycles; every output word is compared
// with the expected event record built in the bench, and the event length
// (3 + 16*64 = 1027 words) and the busy window are checked.
module tb_event_builder;
  localparam int N_CHIPS = 16, N_CH = 64;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;

  logic evt_start = 0, smp_valid = 0, smp_err = 0, busy, wr_en;
  logic [N_CHIPS-1:0][11:0] smp_data = '0;
  logic [15:0] evt_number, wr_data;
  int checks = 0, failures = 0;

  event_builder dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [15:0] expq[$];
  int n_words = 0, n_bad = 0;
  always @(posedge clk) if (wr_en) begin
    n_words++;
    if (expq.size() == 0) n_bad++;
    else begin
      logic [15:0] e;
      e = expq.pop_front();
      if (e !== wr_data) begin
        n_bad++;
        if (n_bad < 5) $display("word %0d: got %h expected %h", n_words, wr_data, e);
      end
    end
  end

  task automatic run_event(input int num, input int err_slot);
    expq.push_back(16'hEB90);
    expq.push_back(16'(num));
    n_words = 0;
    @(posedge clk) evt_start <= 1;
    @(posedge clk) evt_start <= 0;
    for (int s = 0; s < N_CH; s++) begin
      repeat (31) @(posedge clk);
      for (int k = 0; k < N_CHIPS; k++) begin
        smp_data[k] <= 12'($urandom);
      end
      smp_err   <= (s == err_slot);
      smp_valid <= 1;
      @(posedge clk);
      smp_valid <= 0;
      smp_err   <= 0;
      for (int k = 0; k < N_CHIPS; k++) expq.push_back({4'(k), smp_data[k]});
    end
    expq.push_back(16'h90E0 | 16'(err_slot >= 0));
    repeat (N_CHIPS + 4) @(posedge clk);
    check(!busy, "idle after the event");
    check(n_words == 3 + N_CHIPS * N_CH, $sformatf("%0d words, expected %0d", n_words, 3 + N_CHIPS * N_CH));
    check(expq.size() == 0, "all expected words written");
    check(evt_number == 16'(num + 1), "event number incremented");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(!busy && evt_number == 0, "idle after reset");
    run_event(0, -1);
    run_event(1, 17);
    run_event(2, -1);
    check(n_bad == 0, $sformatf("%0d mismatched words", n_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
