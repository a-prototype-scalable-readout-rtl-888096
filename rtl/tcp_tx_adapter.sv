// tcp_tx_adapter: moves event words from the event buffer into the TCP
// transmit port of the SiTCP hardware TCP processor.
//
// SiTCP takes a byte stream (TCP_TX_DATA, TCP_TX_WR) and raises TCP_TX_FULL
// when its send buffer cannot take more; TCP_OPEN_ACK is high while a TCP
// connection is open. Each 16-bit word is sent as two bytes, high byte first.
// A byte is written only in a cycle where the connection is open and the full
// flag is low, as seen at the clock edge that issues the write. The next word
// is requested from the buffer while the low byte of the current one goes
// out, so with no back-pressure the adapter writes one byte every cycle
// (1.28 Gbit/s at the assumed 160 MHz, more than Gigabit Ethernet can carry).
//
// Timing: buffer reads have one cycle of latency (rd_en -> rd_valid); the
// first byte of a word is written in the cycle after rd_valid when the port
// is free. `tcp_tx_wr` and `tcp_tx_data` are registered.
//
// The byte-wide SiTCP user port follows the SiTCP core's interface as used
// on the Front-End Card; the byte order and the stall rule are this design's.
module tcp_tx_adapter (
  input  logic        clk,
  input  logic        rst_n,
  // event buffer read side
  input  logic        buf_empty,
  output logic        buf_rd_en,
  input  logic        buf_rd_valid,
  input  logic [15:0] buf_rd_data,
  // SiTCP TCP transmit port
  input  logic        tcp_open_ack,
  input  logic        tcp_tx_full,
  output logic        tcp_tx_wr,
  output logic [7:0]  tcp_tx_data
);

  logic [15:0] hold;
  logic        hold_valid, sel_lo, tx_ok;

  always_comb begin
    tx_ok     = tcp_open_ack & ~tcp_tx_full;
    buf_rd_en = ~buf_empty & ~buf_rd_valid & (~hold_valid | (sel_lo & tx_ok));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold        <= '0;
      hold_valid  <= 1'b0;
      sel_lo      <= 1'b0;
      tcp_tx_wr   <= 1'b0;
      tcp_tx_data <= '0;
    end else begin
      tcp_tx_wr <= 1'b0;
      if (buf_rd_valid) begin
        hold       <= buf_rd_data;
        hold_valid <= 1'b1;
        if (tx_ok) begin
          tcp_tx_wr   <= 1'b1;
          tcp_tx_data <= buf_rd_data[15:8];
          sel_lo      <= 1'b1;
        end else begin
          sel_lo      <= 1'b0;
        end
      end else if (hold_valid && tx_ok) begin
        tcp_tx_wr   <= 1'b1;
        tcp_tx_data <= sel_lo ? hold[7:0] : hold[15:8];
        if (sel_lo) hold_valid <= 1'b0;
        else        sel_lo     <= 1'b1;
      end
    end
  end

  // A buffer word is only fetched when the holding register is free for it.
  a_no_word_lost: assert property (@(posedge clk) disable iff (!rst_n)
      buf_rd_valid |-> !hold_valid)
    else $error("tcp_tx_adapter: buffer word arrived while the previous one was held");

endmodule
