// va140_sequencer: hold-and-readout sequence of the VA140 ASIC cards.
//
// A VA140 channel integrates and shapes its input with a 6.5 us peaking time;
// the FPGA then applies HOLDB to freeze all channel outputs at their peak and
// reads the 64 channels of each chip out one after another through the chip's
// output shift register, started with SHIFT_IN_B and advanced by CLKB at up to
// 5 MHz (64 channels in 12.8 us). This module produces that sequence for all
// ASIC cards at once and starts one ADC conversion per channel slot.
//
// Sequence after a pulse on `trig` (all times in system clocks):
//   PEAK   PEAK_CYCLES   wait for the shaper peak (6.5 us = 1040 at 160 MHz)
//   HOLD   HOLD_SETUP    HOLDB low; SHIFT_IN_B low ahead of the first CLKB edge
//   SHIFT  N_CH*CLKB_DIV CLKB runs; each period starts with a falling CLKB
//                        edge that moves the chip output to the next channel,
//                        SHIFT_IN_B is released after the first period and
//                        `adc_start` pulses SAMPLE_PHASE cycles into each
//                        period with `slot` = channel index of that period
//   TAIL   CLKB_DIV      lets the last conversion finish, HOLDB still low
//   RESET  DRESET_CYCLES HOLDB released, DRESET high to clear the shift register
// `done` pulses when the sequence ends; `busy` is high from the cycle after
// `trig` until then. TEST_ON follows the per-card register bit.
//
// From the readout system description: the signal names, the 6.5 us hold
// delay, the 5 MHz readout clock and the 64-slot readout. This design's own
// choices: the system clock (160 MHz, so CLKB_DIV=32 gives 5 MHz), active-low
// levels with CLKB idling high, the falling CLKB edge as the active edge, the
// setup, tail and DRESET lengths, and sampling three quarters into each period.
module va140_sequencer #(
  parameter int unsigned N_CARDS       = 8,
  parameter int unsigned N_CH          = 64,
  parameter int unsigned CLKB_DIV      = 32,
  parameter int unsigned PEAK_CYCLES   = 1040,
  parameter int unsigned HOLD_SETUP    = 16,
  parameter int unsigned SAMPLE_PHASE  = 24,
  parameter int unsigned DRESET_CYCLES = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    trig,
  input  logic [N_CARDS-1:0]      test_on_mask,
  output logic                    busy,
  output logic                    done,
  // ASIC card control pins, one set per card
  output logic [N_CARDS-1:0]      va_holdb,
  output logic [N_CARDS-1:0]      va_clkb,
  output logic [N_CARDS-1:0]      va_shift_in_b,
  output logic [N_CARDS-1:0]      va_dreset,
  output logic [N_CARDS-1:0]      va_test_on,
  // conversion requests to the ADC receivers
  output logic                    adc_start,
  output logic [$clog2(N_CH)-1:0] slot
);

  localparam int unsigned CW = $clog2(PEAK_CYCLES + CLKB_DIV + HOLD_SETUP + DRESET_CYCLES + 1);
  localparam int unsigned SW = $clog2(N_CH);

  typedef enum logic [2:0] {S_IDLE, S_PEAK, S_HOLD, S_SHIFT, S_TAIL, S_RESET} state_e;
  state_e state;

  logic [CW-1:0] cnt;
  logic          holdb, clkb, shift_in_b, dreset;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cnt        <= '0;
      slot       <= '0;
      holdb      <= 1'b1;
      clkb       <= 1'b1;
      shift_in_b <= 1'b1;
      dreset     <= 1'b0;
      adc_start  <= 1'b0;
      done       <= 1'b0;
    end else begin
      adc_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (trig) begin
            cnt   <= '0;
            state <= S_PEAK;
          end
        end
        S_PEAK: begin
          if (cnt == CW'(PEAK_CYCLES - 1)) begin
            cnt        <= '0;
            holdb      <= 1'b0;
            shift_in_b <= 1'b0;
            state      <= S_HOLD;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_HOLD: begin
          if (cnt == CW'(HOLD_SETUP - 1)) begin
            cnt   <= '0;
            clkb  <= 1'b0;          // first active edge: channel 0 on the output
            slot  <= '0;
            state <= S_SHIFT;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_SHIFT: begin
          if (cnt == CW'(CLKB_DIV / 2 - 1)) begin
            clkb       <= 1'b1;
            shift_in_b <= 1'b1;
          end
          if (cnt == CW'(SAMPLE_PHASE - 1)) adc_start <= 1'b1;
          if (cnt == CW'(CLKB_DIV - 1)) begin
            cnt <= '0;
            if (slot == SW'(N_CH - 1)) begin
              state <= S_TAIL;
            end else begin
              clkb <= 1'b0;
              slot <= slot + 1'b1;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_TAIL: begin
          if (cnt == CW'(CLKB_DIV - 1)) begin
            cnt    <= '0;
            holdb  <= 1'b1;
            dreset <= 1'b1;
            state  <= S_RESET;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_RESET: begin
          if (cnt == CW'(DRESET_CYCLES - 1)) begin
            cnt    <= '0;
            dreset <= 1'b0;
            done   <= 1'b1;
            state  <= S_IDLE;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Every card receives the same sequence; TEST_ON is set per card.
  always_comb begin
    va_holdb      = {N_CARDS{holdb}};
    va_clkb       = {N_CARDS{clkb}};
    va_shift_in_b = {N_CARDS{shift_in_b}};
    va_dreset     = {N_CARDS{dreset}};
    va_test_on    = test_on_mask;
  end

  // The readout clock only runs while the channels are held.
  a_clkb_only_in_hold: assert property (@(posedge clk) disable iff (!rst_n) !clkb |-> !holdb)
    else $error("va140_sequencer: CLKB active outside hold");

  initial begin
    assert (SAMPLE_PHASE > CLKB_DIV / 2 && SAMPLE_PHASE < CLKB_DIV)
      else $error("va140_sequencer: SAMPLE_PHASE must lie in the second half of a CLKB period");
  end

endmodule
