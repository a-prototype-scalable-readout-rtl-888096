// tb_ad7356_rx: self-checking test of the AD7356 serial receiver against the
// behavioural ADC model. Random codes are converted back to back; each result,
// the CS-low time (2*14 SCLK half periods) and the frame check are compared
// with values computed in the bench.
module tb_ad7356_rx;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;

  logic start = 0, busy, cs_n, sclk, sdata_a, sdata_b, valid, frame_err;
  logic [11:0] data_a, data_b, vin_a = 0, vin_b = 0;
  logic bad_lead = 0;
  int checks = 0, failures = 0;

  ad7356_rx dut (.clk, .rst_n, .start, .busy, .cs_n, .sclk, .sdata_a, .sdata_b,
                 .valid, .data_a, .data_b, .frame_err);
  ad7356_model adc (.cs_n, .sclk, .vin_a, .vin_b, .bad_lead, .sdata_a, .sdata_b);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cs_low_cycles, sclk_falls;
  always @(posedge clk) if (!cs_n) cs_low_cycles++;
  always @(negedge sclk) if (!cs_n) sclk_falls++;

  task automatic convert(input logic [11:0] a, input logic [11:0] b, input bit bad);
    int t;
    vin_a = a; vin_b = b; bad_lead = bad;
    cs_low_cycles = 0; sclk_falls = 0;
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    t = 0;
    while (!valid) begin @(posedge clk); t++; end
    check(data_a == a, $sformatf("lane A got %h expected %h", data_a, a));
    check(data_b == b, $sformatf("lane B got %h expected %h", data_b, b));
    check(frame_err == bad, $sformatf("frame_err=%0d expected %0d", frame_err, bad));
    check(cs_low_cycles == 28, $sformatf("CS low %0d cycles, expected 28", cs_low_cycles));
    check(sclk_falls == 14, $sformatf("%0d SCLK periods, expected 14", sclk_falls));
    @(posedge clk);
    check(cs_n && sclk && !busy, "idle after the frame");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(cs_n && sclk && !busy, "idle after reset");
    convert(12'hFFF, 12'h000, 0);
    convert(12'h000, 12'hFFF, 0);
    convert(12'hA5A, 12'h5A5, 0);
    for (int i = 0; i < 40; i++) convert(12'($urandom), 12'($urandom), 0);
    convert(12'h123, 12'h456, 1);
    convert(12'h800, 12'h001, 0);
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
