// ad7356_model: behavioural model of one AD7356 dual 12-bit ADC, for simulation only.
//
// The converter is analog and bought in, so only its serial behaviour is
// modelled. The analog inputs are given directly as 12-bit codes (vin_a,
// vin_b). On the falling edge of cs_n both inputs are sampled into a 14-bit
// frame {2'b00, code}; the frame MSB is driven at once and each falling SCLK
// edge while cs_n is low presents the next bit. With `bad_lead` set the first
// leading bit is sent as 1, to exercise the receiver's frame check.
module ad7356_model (
  input  logic        cs_n,
  input  logic        sclk,
  input  logic [11:0] vin_a,
  input  logic [11:0] vin_b,
  input  logic        bad_lead,
  output logic        sdata_a,
  output logic        sdata_b
);
  logic [13:0] fr_a = '0, fr_b = '0;
  int idx = 0;
  int conversions = 0;

  initial begin
    sdata_a = 1'b0;
    sdata_b = 1'b0;
  end

  always @(negedge cs_n) begin
    fr_a = {bad_lead, 1'b0, vin_a};
    fr_b = {1'b0, 1'b0, vin_b};
    idx  = 13;
    sdata_a = fr_a[13];
    sdata_b = fr_b[13];
    conversions++;
  end

  always @(negedge sclk) begin
    if (!cs_n) begin
      idx = idx - 1;
      sdata_a = (idx >= 0) ? fr_a[idx] : 1'b0;
      sdata_b = (idx >= 0) ? fr_b[idx] : 1'b0;
    end
  end
endmodule
