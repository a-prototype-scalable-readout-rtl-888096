// tb_event_buffer: self-checking test of the event buffer at its default depth
// (8192 words). Random writes and reads are compared with a queue model,
// including filling it completely, the has_room threshold of 1027 free
// words, the refused write (overflow flag) and the one-cycle read latency.
module tb_event_buffer;
  localparam int DEPTH = 8192, ROOM = 1027;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;

  logic wr_en = 0, rd_en = 0, rd_valid, empty, full, has_room, overflow;
  logic [15:0] wr_data = 0, rd_data;
  logic [13:0] count;
  int checks = 0, failures = 0;

  event_buffer dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [15:0] q[$];
  int n_reads = 0, n_bad = 0, n_status_bad = 0;
  logic pend = 0;
  logic [15:0] pend_val;
  always @(posedge clk) if (rst_n) begin
    bit do_r, do_w;
    // status against the model before this edge's update
    if (count != 14'(q.size()) || empty != (q.size() == 0) || full != (q.size() == DEPTH) ||
        has_room != (DEPTH - q.size() >= ROOM)) n_status_bad++;
    if (pend) begin
      n_reads++;
      if (!rd_valid || rd_data != pend_val) n_bad++;
    end else if (rd_valid) n_bad++;
    do_r = rd_en && q.size() > 0;
    do_w = wr_en && q.size() < DEPTH;
    pend = do_r;
    if (do_r) pend_val = q.pop_front();
    if (do_w) q.push_back(wr_data);
  end

  task automatic step(input bit w, input bit r);
    wr_en <= w; rd_en <= r; wr_data <= 16'($urandom);
    @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(empty && !full && has_room && !overflow, "empty after reset");
    // fill completely
    for (int i = 0; i < DEPTH; i++) step(1, 0);
    step(0, 0);
    check(full && !has_room && count == 14'(DEPTH), "full after DEPTH writes");
    check(!overflow, "no overflow yet");
    step(1, 0);   // refused
    step(0, 0);
    check(overflow && count == 14'(DEPTH), "write when full refused and flagged");
    // drain to the has_room threshold
    for (int i = 0; i < ROOM - 1; i++) step(0, 1);
    step(0, 0);
    check(!has_room, "one word short of an event");
    step(0, 1);
    step(0, 0);
    check(has_room, "room for an event");
    // random traffic
    for (int i = 0; i < 40000; i++) step(($urandom % 2) == 0, ($urandom % 2) == 0);
    // drain
    while (!empty) step(0, 1);
    step(0, 0); step(0, 0);
    check(n_bad == 0, $sformatf("%0d read mismatches of %0d", n_bad, n_reads));
    check(n_status_bad == 0, $sformatf("%0d status mismatches", n_status_bad));
    check(n_reads > DEPTH, "enough reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
