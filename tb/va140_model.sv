// va140_model: behavioural model of one VA140 preamplifier-shaper chip as
// seen by the readout logic, for simulation only.
//
// The chip is analog; this model keeps only the part the FPGA controls. The
// channel levels are ADC codes from tb_fec_pkg::channel_code. On the falling
// edge of HOLDB the 64 levels of event `evt` are held. The output shift
// register is loaded by a falling CLKB edge while SHIFT_IN_B is low (channel 0
// on the output) and advances one channel per further falling CLKB edge;
// DRESET clears it. `aout` is the selected held level, zero otherwise. It also
// counts protocol errors: CLKB edges while not held and readouts shorter or
// longer than 64 clocks. Edges before the first hold (power-up) are ignored.
module va140_model
  import tb_fec_pkg::*;
#(
  parameter int CHIP = 0
) (
  input  logic        holdb,
  input  logic        clkb,
  input  logic        shift_in_b,
  input  logic        dreset,
  input  logic        test_on,
  output logic [11:0] aout
);
  logic [11:0] held [64];
  int ptr = -1;
  int evt = 0;
  int clocks = 0;
  int errors = 0;
  bit holding = 0;
  bit seen_hold = 0;

  initial foreach (held[i]) held[i] = '0;

  always @(negedge holdb) begin
    foreach (held[i]) held[i] = channel_code(evt, CHIP, i, test_on);
    clocks = 0;
    holding = 1;
    seen_hold = 1;
  end
  always @(posedge holdb) begin
    if (holding) begin
      if (clocks != 64) errors++;
      evt++;
    end
    holding = 0;
  end
  always @(negedge clkb) begin
    if (holdb && seen_hold) errors++;
    clocks++;
    if (!shift_in_b) ptr = 0;
    else if (ptr >= 0 && ptr < 64) ptr++;
  end
  always @(posedge dreset) ptr = -1;

  always_comb aout = (!holdb && ptr >= 0 && ptr < 64) ? held[ptr] : 12'h000;
endmodule
