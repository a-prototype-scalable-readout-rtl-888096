// tb_trigger_ctrl: self-checking test of trigger acceptance. Random requests
// (external edges and software pulses) are applied under random run, enable,
// busy and buffer-room conditions; a reference model in the bench predicts
// every accept and reject and the two counters.
module tb_trigger_ctrl;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;

  logic run_en = 0, ext_trig_en = 0, ext_trig_in = 0, sw_trig = 0, busy = 0, buf_has_room = 1, clear_counters = 0;
  logic trig_accept, trig_reject;
  logic [15:0] acc_count, rej_count;
  int checks = 0, failures = 0;

  trigger_ctrl dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference model: ext edge visible to the decision 2 cycles after the pin
  logic [2:0] m_sync = 0;
  logic m_acc = 0, m_rej = 0;
  int unsigned m_acc_cnt = 0, m_rej_cnt = 0, n_acc = 0, n_rej = 0;
  always @(posedge clk) if (rst_n) begin
    logic req, can;
    req = (ext_trig_en && m_sync[1] && !m_sync[2]) || sw_trig;
    can = run_en && !busy && buf_has_room && !m_acc;
    check(trig_accept == m_acc && trig_reject == m_rej, "accept/reject pulses");
    check(acc_count == 16'(m_acc_cnt) && rej_count == 16'(m_rej_cnt), "counters");
    m_acc <= req && can;
    m_rej <= req && run_en && !can;
    if (clear_counters) begin m_acc_cnt = 0; m_rej_cnt = 0; end
    else begin
      if (req && can) m_acc_cnt++;
      if (req && run_en && !can) m_rej_cnt++;
    end
    if (req && can) n_acc++;
    if (req && run_en && !can) n_rej++;
    m_sync <= {m_sync[1:0], ext_trig_in};
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // directed: a software trigger is accepted one cycle later
    @(posedge clk) begin run_en <= 1; sw_trig <= 1; end
    @(posedge clk) sw_trig <= 0;
    // directed: no acceptance while busy or while the buffer is full
    @(posedge clk) begin busy <= 1; sw_trig <= 1; end
    @(posedge clk) begin busy <= 0; buf_has_room <= 0; end
    @(posedge clk) begin sw_trig <= 0; buf_has_room <= 1; end
    repeat (4) @(posedge clk);
    // random
    for (int i = 0; i < 5000; i++) begin
      @(posedge clk);
      run_en         <= ($urandom % 8) != 0;
      ext_trig_en    <= ($urandom % 4) != 0;
      ext_trig_in    <= ($urandom % 3) == 0;
      sw_trig        <= ($urandom % 6) == 0;
      busy           <= ($urandom % 3) == 0;
      buf_has_room   <= ($urandom % 5) != 0;
      clear_counters <= ($urandom % 500) == 0;
    end
    @(posedge clk);
    check(n_acc > 100 && n_rej > 100, $sformatf("both outcomes exercised (%0d accepted, %0d rejected)", n_acc, n_rej));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
