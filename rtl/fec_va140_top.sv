// fec_va140_top: FPGA logic of the Front-End Card (FEC) with the VA140 Adapter.
//
// One FEC reads out 8 VA140 ASIC cards of 2 chips each (16 chips, 64 channel
// slots per chip, 32 of them bonded to detector strips: 512 detector
// channels). Each card has its own set of five VA140 control lines and its own
// dual AD7356 ADC (four lines), 72 single-ended FPGA pins in all. The data
// path is
//
//   trigger_ctrl -> va140_sequencer -> 8 x ad7356_rx -> event_builder
//                -> event_buffer -> tcp_tx_adapter -> SiTCP (outside)
//
// and slow_control gives the host access to run control, the TEST_ON mask,
// status and trigger counters over SiTCP's register bus. An accepted trigger
// starts the hold-and-readout sequence (6.5 us to HOLDB, 64 x 200 ns readout)
// and at once the event header; every readout slot then yields 16 samples,
// one per chip, which are written to the buffer as 16 words. A trigger is
// accepted only when the buffer can take the whole event (1027 words), so the
// buffer never overflows; the TCP side drains it at the pace SiTCP allows.
//
// Interface: a single system clock (160 MHz assumed, which sets the 5 MHz
// CLKB and 80 MHz SCLK through CLKB_DIV and SCLK_HALF) and an active-low
// asynchronous reset; the ASIC and ADC pins; an external trigger input; the
// SiTCP TCP transmit port and register-access bus, whose core (and the GMII
// PHY behind it) lies outside this module; and status outputs.
//
// From the readout system description: the card, chip, channel and ADC
// counts, the ADC width, the signal names, the 6.5 us / 5 MHz / 12.8 us
// readout timing, the formatting-buffering-SiTCP data path. This design's own:
// the clock frequency, the trigger gating, the event format, the register map
// and the buffer, which stands in for the board's DDR3 memory with on-chip RAM.
module fec_va140_top
  import fec_pkg::*;
#(
  parameter int unsigned N_CARDS        = 8,
  parameter int unsigned CHIPS_PER_CARD = 2,
  parameter int unsigned N_CH           = 64,
  parameter int unsigned ADC_BITS       = 12,
  parameter int unsigned CLKB_DIV       = 32,
  parameter int unsigned PEAK_CYCLES    = 1040,
  parameter int unsigned SCLK_HALF      = 1,
  parameter int unsigned BUF_DEPTH      = 8192
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                ext_trig_in,
  // VA140 ASIC cards
  output logic [N_CARDS-1:0]  va_holdb,
  output logic [N_CARDS-1:0]  va_clkb,
  output logic [N_CARDS-1:0]  va_shift_in_b,
  output logic [N_CARDS-1:0]  va_dreset,
  output logic [N_CARDS-1:0]  va_test_on,
  // AD7356 ADCs on the Adapter, one per card
  output logic [N_CARDS-1:0]  adc_cs_n,
  output logic [N_CARDS-1:0]  adc_sclk,
  input  logic [N_CARDS-1:0]  adc_sdata_a,
  input  logic [N_CARDS-1:0]  adc_sdata_b,
  // SiTCP TCP transmit port
  input  logic                tcp_open_ack,
  input  logic                tcp_tx_full,
  output logic                tcp_tx_wr,
  output logic [7:0]          tcp_tx_data,
  // SiTCP register access bus
  input  logic [31:0]         rbcp_addr,
  input  logic                rbcp_we,
  input  logic [7:0]          rbcp_wd,
  input  logic                rbcp_re,
  output logic                rbcp_ack,
  output logic [7:0]          rbcp_rd,
  // status
  output logic                busy,
  output logic                buf_overflow
);

  localparam int unsigned N_CHIPS    = N_CARDS * CHIPS_PER_CARD;
  localparam int unsigned EVT_WORDS  = event_words(N_CHIPS, N_CH);

  initial begin
    assert (CHIPS_PER_CARD == 2)
      else $error("fec_va140_top: each dual ADC serves exactly two chips per card");
  end

  // slow control
  logic               run_en, ext_trig_en, sw_trig, clear_counters;
  logic [N_CARDS-1:0] test_on_mask;
  logic [15:0]        acc_count, rej_count;
  logic [3:0]         status;

  // trigger and sequencing
  logic trig_accept, trig_reject, seq_busy, seq_done, bld_busy, adc_start;
  logic [$clog2(N_CH)-1:0] slot;

  // ADCs
  logic [N_CARDS-1:0]                rx_busy, rx_valid, rx_err;
  logic [N_CARDS-1:0][ADC_BITS-1:0]  rx_a, rx_b;
  logic [N_CHIPS-1:0][ADC_BITS-1:0]  smp_data;

  // buffer
  logic        bld_wr, buf_rd_en, buf_rd_valid, buf_empty, buf_full, buf_has_room;
  logic [15:0] bld_data, buf_rd_data, evt_number;
  logic [$clog2(BUF_DEPTH+1)-1:0] buf_count;

  assign busy   = seq_busy | bld_busy;
  assign status = {buf_overflow, buf_empty, ~buf_has_room, busy};

  slow_control #(.N_CARDS(N_CARDS)) u_sc (
    .clk, .rst_n,
    .rbcp_addr, .rbcp_we, .rbcp_wd, .rbcp_re, .rbcp_ack, .rbcp_rd,
    .run_en, .ext_trig_en, .sw_trig, .clear_counters, .test_on_mask,
    .status, .acc_count, .rej_count
  );

  trigger_ctrl #(.CW(16)) u_trig (
    .clk, .rst_n, .run_en, .ext_trig_en, .ext_trig_in, .sw_trig,
    .busy, .buf_has_room, .clear_counters,
    .trig_accept, .trig_reject, .acc_count, .rej_count
  );

  va140_sequencer #(
    .N_CARDS(N_CARDS), .N_CH(N_CH), .CLKB_DIV(CLKB_DIV), .PEAK_CYCLES(PEAK_CYCLES)
  ) u_seq (
    .clk, .rst_n, .trig(trig_accept), .test_on_mask,
    .busy(seq_busy), .done(seq_done),
    .va_holdb, .va_clkb, .va_shift_in_b, .va_dreset, .va_test_on,
    .adc_start, .slot
  );

  for (genvar c = 0; c < N_CARDS; c++) begin : g_adc
    ad7356_rx #(.DATA_BITS(ADC_BITS), .SCLK_HALF(SCLK_HALF)) u_rx (
      .clk, .rst_n, .start(adc_start), .busy(rx_busy[c]),
      .cs_n(adc_cs_n[c]), .sclk(adc_sclk[c]),
      .sdata_a(adc_sdata_a[c]), .sdata_b(adc_sdata_b[c]),
      .valid(rx_valid[c]), .data_a(rx_a[c]), .data_b(rx_b[c]), .frame_err(rx_err[c])
    );
    // lane A carries the card's first chip, lane B its second
    assign smp_data[2*c]     = rx_a[c];
    assign smp_data[2*c + 1] = rx_b[c];
  end

  event_builder #(.N_CHIPS(N_CHIPS), .N_CH(N_CH), .DATA_BITS(ADC_BITS)) u_bld (
    .clk, .rst_n, .evt_start(trig_accept),
    .smp_valid(rx_valid[0]), .smp_data, .smp_err(|(rx_err & rx_valid)),
    .busy(bld_busy), .evt_number,
    .wr_en(bld_wr), .wr_data(bld_data)
  );

  event_buffer #(.WIDTH(16), .DEPTH(BUF_DEPTH), .ROOM_WORDS(EVT_WORDS)) u_buf (
    .clk, .rst_n, .wr_en(bld_wr), .wr_data(bld_data),
    .rd_en(buf_rd_en), .rd_data(buf_rd_data), .rd_valid(buf_rd_valid),
    .empty(buf_empty), .full(buf_full), .has_room(buf_has_room),
    .count(buf_count), .overflow(buf_overflow)
  );

  tcp_tx_adapter u_tx (
    .clk, .rst_n,
    .buf_empty, .buf_rd_en, .buf_rd_valid, .buf_rd_data,
    .tcp_open_ack, .tcp_tx_full, .tcp_tx_wr, .tcp_tx_data
  );

  // All ADC receivers run in lock step, so one valid strobe stands for all.
  a_adcs_in_step: assert property (@(posedge clk) disable iff (!rst_n) rx_valid == '0 || rx_valid == '1)
    else $error("fec_va140_top: ADC receivers out of step");
  // The trigger admits an event only if it fits, so the buffer must never be full at a write.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) bld_wr |-> !buf_full)
    else $error("fec_va140_top: event buffer overflow");
  // The sequence is one conversion per slot, in slot order.
  logic [$clog2(N_CH)-1:0] last_slot;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         last_slot <= '0;
    else if (adc_start) last_slot <= slot;
  end
  a_slot_order: assert property (@(posedge clk) disable iff (!rst_n)
      adc_start && slot != '0 |-> slot == last_slot + 1'b1)
    else $error("fec_va140_top: readout slots out of order");

endmodule
