// ad7356_rx: serial interface to one AD7356 dual 12-bit ADC on the VA140 Adapter.
//
// The Adapter digitises each VA140 card with one dual AD7356, whose four FPGA
// pins are CS, SCLK, SDATA_A and SDATA_B; the two lanes carry the two VA140
// chips of the card. A pulse on `start` runs one conversion: CS is driven low
// (the ADC samples both inputs on that edge), then N_SCLK clock periods are
// generated on SCLK and both lanes are shifted in, MSB first, at each falling
// SCLK edge. The frame is LEAD_ZEROS leading zeros followed by the DATA_BITS
// result; `frame_err` reports a frame whose leading bits were not zero.
//
// Timing: SCLK idles high and each half period lasts SCLK_HALF system clocks.
// With SCLK_HALF=1 a conversion keeps CS low for 2*N_SCLK = 28 cycles and
// `valid` pulses for one cycle in the cycle CS returns high; `busy` is high
// from the cycle after `start` until then. At the assumed 160 MHz system clock
// SCLK runs at 80 MHz. The pin names, the 12-bit width and the dual-lane
// structure follow the readout system description; the frame of 2 zeros plus
// 12 bits, the capture edge and SCLK polarity are this design's reading of the
// converter's serial format (the data are taken from the sample present just
// before each falling SCLK edge, the ADC then presents the next bit).
module ad7356_rx #(
  parameter int unsigned DATA_BITS  = 12,
  parameter int unsigned LEAD_ZEROS = 2,
  parameter int unsigned SCLK_HALF  = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  // ADC pins
  output logic                 cs_n,
  output logic                 sclk,
  input  logic                 sdata_a,
  input  logic                 sdata_b,
  // result
  output logic                 valid,
  output logic [DATA_BITS-1:0] data_a,
  output logic [DATA_BITS-1:0] data_b,
  output logic                 frame_err
);

  localparam int unsigned N_SCLK = DATA_BITS + LEAD_ZEROS;
  localparam int unsigned HW     = (SCLK_HALF > 1) ? $clog2(SCLK_HALF) : 1;
  localparam int unsigned BW     = $clog2(N_SCLK + 1);

  typedef enum logic [1:0] {S_IDLE, S_HIGH, S_LOW} state_e;
  state_e state;

  logic [HW-1:0]     half_cnt;
  logic [BW-1:0]     bit_cnt;
  logic [N_SCLK-1:0] sh_a, sh_b;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cs_n      <= 1'b1;
      sclk      <= 1'b1;
      half_cnt  <= '0;
      bit_cnt   <= '0;
      sh_a      <= '0;
      sh_b      <= '0;
      valid     <= 1'b0;
      data_a    <= '0;
      data_b    <= '0;
      frame_err <= 1'b0;
    end else begin
      valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            cs_n     <= 1'b0;
            half_cnt <= '0;
            bit_cnt  <= '0;
            state    <= S_HIGH;
          end
        end
        S_HIGH: begin
          if (half_cnt == HW'(SCLK_HALF - 1)) begin
            half_cnt <= '0;
            sclk     <= 1'b0;
            sh_a     <= {sh_a[N_SCLK-2:0], sdata_a};
            sh_b     <= {sh_b[N_SCLK-2:0], sdata_b};
            state    <= S_LOW;
          end else begin
            half_cnt <= half_cnt + 1'b1;
          end
        end
        S_LOW: begin
          if (half_cnt == HW'(SCLK_HALF - 1)) begin
            half_cnt <= '0;
            sclk     <= 1'b1;
            if (bit_cnt == BW'(N_SCLK - 1)) begin
              cs_n      <= 1'b1;
              valid     <= 1'b1;
              data_a    <= sh_a[DATA_BITS-1:0];
              data_b    <= sh_b[DATA_BITS-1:0];
              frame_err <= (sh_a[N_SCLK-1:DATA_BITS] != '0) || (sh_b[N_SCLK-1:DATA_BITS] != '0);
              state     <= S_IDLE;
            end else begin
              bit_cnt <= bit_cnt + 1'b1;
              state   <= S_HIGH;
            end
          end else begin
            half_cnt <= half_cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A conversion request must not arrive while a frame is still running.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("ad7356_rx: start while busy");

endmodule
