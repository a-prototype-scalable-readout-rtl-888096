// fec_pkg: constants and types shared by the Front-End Card (FEC) readout logic
// for the VA140 Adapter.
//
// The geometry (8 ASIC cards, 2 VA140 chips per card, 64 channels per chip,
// 8 dual 12-bit AD7356 ADCs, one ADC per card) follows the readout system
// description. The 16-bit event word format below, the system clock of
// 160 MHz and the register map are choices of this design: the description
// says only that the data are "formatted" before buffering.
//
// Event format (16-bit words, in order):
//   EVT_SYNC                                     header word
//   event number [15:0]                          header word
//   for channel slot s = 0..N_CH-1
//     for chip k = 0..N_CHIPS-1                  k = 2*card + (0 for ADC lane A, 1 for B)
//       {k[3:0], sample[11:0]}                   one word per chip and slot
//   EVT_TRAILER | err                            trailer word; err (bit 0) is set
//                                                when an ADC frame check failed
package fec_pkg;

  localparam logic [15:0] EVT_SYNC    = 16'hEB90;
  localparam logic [15:0] EVT_TRAILER = 16'h90E0;

  // Words per event for a given chip and channel count.
  function automatic int unsigned event_words(int unsigned n_chips, int unsigned n_ch);
    return 3 + n_chips * n_ch;
  endfunction

  // Slow-control register addresses (register-access bus of the TCP processor).
  typedef enum logic [7:0] {
    REG_CTRL      = 8'h00,  // [0] run enable, [1] external trigger enable
    REG_CMD       = 8'h01,  // write-1 pulses: [0] software trigger, [1] clear counters
    REG_TEST_ON   = 8'h02,  // TEST_ON level, one bit per ASIC card
    REG_STATUS    = 8'h03,  // [0] readout busy, [1] buffer cannot take an event, [2] buffer empty, [3] buffer overflow
    REG_ACC_LO    = 8'h04,  // accepted triggers [7:0]
    REG_ACC_HI    = 8'h05,  // accepted triggers [15:8]
    REG_REJ_LO    = 8'h06,  // rejected triggers [7:0]
    REG_REJ_HI    = 8'h07,  // rejected triggers [15:8]
    REG_ID        = 8'h08   // constant design identifier
  } reg_addr_e;

  localparam logic [7:0] DESIGN_ID = 8'hA1;

endpackage
