// tb_fec_pkg: stimulus shared by the detector-side models and the end-to-end
// check. It defines the ADC code each VA140 channel holds for a given event:
// bonded channels (0..31) carry an event-dependent pattern, unbonded ones
// (32..63) a per-chip pedestal, and with TEST_ON the first channel of each chip
// carries a fixed calibration level.
package tb_fec_pkg;
  localparam logic [11:0] CAL_CODE = 12'hCA1;
  localparam int BONDED = 32;

  function automatic logic [11:0] channel_code(int evt, int chip, int ch, bit test_on);
    if (test_on && ch == 0) return CAL_CODE;
    if (ch >= BONDED) return 12'(12'h100 + chip);
    return 12'((evt * 97 + chip * 331 + ch * 13 + 5) % 4096);
  endfunction
endpackage
