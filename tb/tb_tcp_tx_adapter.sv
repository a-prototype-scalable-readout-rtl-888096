// tb_tcp_tx_adapter: self-checking test of the word-to-byte sender. A
// one-cycle-latency FIFO model feeds random words; the TCP port toggles its
// full flag and connection state at random. The bench checks the byte stream
// (high byte first, nothing lost or repeated), that no byte is written in a
// cycle whose full flag or closed connection was seen at the issuing edge,
// and that without back-pressure 2*N bytes leave in 2*N+3 cycles.
module tb_tcp_tx_adapter;
  logic clk = 0, rst_n = 0;
  always #3 clk = ~clk;

  logic buf_empty, buf_rd_en, buf_rd_valid = 0, tcp_open_ack = 0, tcp_tx_full = 0, tcp_tx_wr;
  logic [15:0] buf_rd_data = 0;
  logic [7:0] tcp_tx_data;
  int checks = 0, failures = 0;

  tcp_tx_adapter dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // source FIFO model
  logic [15:0] src[$];
  assign buf_empty = (src.size() == 0);
  always @(posedge clk) begin
    buf_rd_valid <= 1'b0;
    if (buf_rd_en && src.size() > 0) begin
      buf_rd_data  <= src.pop_front();
      buf_rd_valid <= 1'b1;
    end
  end

  // sink
  logic [7:0] expb[$];
  int n_bytes = 0, n_bad = 0, n_illegal = 0;
  logic ok_d = 0;
  always @(posedge clk) if (rst_n) begin
    if (tcp_tx_wr) begin
      n_bytes++;
      if (!ok_d) n_illegal++;
      if (expb.size() == 0 || expb.pop_front() != tcp_tx_data) n_bad++;
    end
    ok_d <= tcp_open_ack && !tcp_tx_full;
  end

  task automatic push_words(input int n);
    for (int i = 0; i < n; i++) begin
      logic [15:0] w;
      w = 16'($urandom);
      src.push_back(w);
      expb.push_back(w[15:8]);
      expb.push_back(w[7:0]);
    end
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // closed connection: nothing may be sent
    push_words(4);
    repeat (20) @(posedge clk);
    check(n_bytes == 0, "no bytes while the connection is closed");
    // open, no back-pressure: full rate
    tcp_open_ack <= 1;
    repeat (20) @(posedge clk);
    check(n_bytes == 8 && expb.size() == 0, "backlog sent after open");
    n_bytes = 0;
    push_words(100);
    t0 = 0;
    while (n_bytes < 200 && t0 < 1000) begin @(posedge clk); t0++; end
    check(t0 <= 203, $sformatf("200 bytes in %0d cycles, expected at most 203", t0));
    // random back-pressure and connection drops
    for (int r = 0; r < 20; r++) begin
      push_words(50 + $urandom % 50);
      for (int i = 0; i < 400; i++) begin
        @(posedge clk);
        tcp_tx_full  <= ($urandom % 3) == 0;
        tcp_open_ack <= ($urandom % 20) != 0;
      end
    end
    tcp_tx_full <= 0; tcp_open_ack <= 1;
    repeat (600) @(posedge clk);
    check(expb.size() == 0 && src.size() == 0, $sformatf("all bytes delivered (%0d left)", expb.size()));
    check(n_bad == 0, $sformatf("%0d wrong bytes", n_bad));
    check(n_illegal == 0, $sformatf("%0d bytes written against full or closed", n_illegal));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
