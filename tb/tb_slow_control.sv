// tb_slow_control: self-checking test of the register file. Bus writes and
// reads are issued as SiTCP does (one-cycle WE/RE pulses); the bench checks the
// one-cycle ACK, the read data of every register against its own model, the
// command pulses and that out-of-range addresses change nothing.
module tb_slow_control;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;

  logic [31:0] rbcp_addr = 0;
  logic rbcp_we = 0, rbcp_re = 0, rbcp_ack;
  logic [7:0] rbcp_wd = 0, rbcp_rd;
  logic run_en, ext_trig_en, sw_trig, clear_counters;
  logic [7:0] test_on_mask;
  logic [3:0] status = 0;
  logic [15:0] acc_count = 0, rej_count = 0;
  int checks = 0, failures = 0;
  int n_sw = 0, n_clr = 0;

  slow_control dut (.*);

  always @(posedge clk) begin
    if (sw_trig) n_sw++;
    if (clear_counters) n_clr++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [7:0] d);
    @(posedge clk) begin rbcp_addr <= a; rbcp_wd <= d; rbcp_we <= 1; end
    @(posedge clk) rbcp_we <= 0;
    @(negedge clk) check(rbcp_ack, $sformatf("ack for write to %h", a));
    @(posedge clk);
    @(negedge clk) check(!rbcp_ack, "ack lasts one cycle");
  endtask

  task automatic rd(input logic [31:0] a, output logic [7:0] d);
    @(posedge clk) begin rbcp_addr <= a; rbcp_re <= 1; end
    @(posedge clk) rbcp_re <= 0;
    @(negedge clk) begin check(rbcp_ack, $sformatf("ack for read of %h", a)); d = rbcp_rd; end
  endtask

  task automatic expect_rd(input logic [31:0] a, input logic [7:0] e);
    logic [7:0] d;
    rd(a, d);
    check(d == e, $sformatf("read %h: got %h expected %h", a, d, e));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(!run_en && !ext_trig_en && test_on_mask == 0, "reset values");
    expect_rd(32'h08, 8'hA1);
    wr(32'h00, 8'h03);
    check(run_en && ext_trig_en, "CTRL written");
    expect_rd(32'h00, 8'h03);
    wr(32'h00, 8'h01);
    check(run_en && !ext_trig_en, "CTRL rewritten");
    wr(32'h02, 8'hC3);
    check(test_on_mask == 8'hC3, "TEST_ON written");
    expect_rd(32'h02, 8'hC3);
    wr(32'h01, 8'h01);
    wr(32'h01, 8'h02);
    wr(32'h01, 8'h03);
    check(n_sw == 2 && n_clr == 2, $sformatf("command pulses: %0d triggers, %0d clears", n_sw, n_clr));
    check(run_en && test_on_mask == 8'hC3, "commands leave CTRL and TEST_ON alone");
    expect_rd(32'h01, 8'h00);
    for (int i = 0; i < 20; i++) begin
      status = 4'($urandom); acc_count = 16'($urandom); rej_count = 16'($urandom);
      expect_rd(32'h03, {4'b0, status});
      expect_rd(32'h04, acc_count[7:0]);
      expect_rd(32'h05, acc_count[15:8]);
      expect_rd(32'h06, rej_count[7:0]);
      expect_rd(32'h07, rej_count[15:8]);
    end
    // out of range: acknowledged, no effect, reads zero
    wr(32'h0000_0100, 8'h00);
    wr(32'h0100_0002, 8'h00);
    check(run_en && test_on_mask == 8'hC3, "out-of-range writes ignored");
    expect_rd(32'h0000_0102, 8'h00);
    expect_rd(32'h0000_0020, 8'h00);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
