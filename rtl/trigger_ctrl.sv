// trigger_ctrl: trigger acceptance for the VA140 readout.
//
// A trigger request is either a rising edge on the external trigger input
// (synchronised with two flip-flops, used only while ext_trig_en is set) or a
// software trigger pulse from slow control. A request is accepted, and
// `trig_accept` pulses for one cycle, only when the run is enabled, no event
// is being read out or written (`busy` covers the sequencer and the event
// builder) and the event buffer reports room for one whole event. Requests
// that arrive while running but cannot be accepted are rejected and counted;
// accepted triggers are counted too. Both 16-bit counters wrap and are
// cleared by `clear_counters`.
//
// Timing: `trig_accept` (registered) pulses 3 cycles after an external edge
// reaches the input (2 synchroniser stages plus the output register) and 1
// cycle after a software trigger. A request in the cycle of a pending accept
// is rejected, so two accepts are never back to back before `busy` rises.
//
// The readout system description gives the need for a trigger-driven hold
// and readout and a maximum counting rate, but not how triggers are gated;
// this busy/room rule, the counters and the trigger sources are this design's
// own choices.
module trigger_ctrl #(
  parameter int unsigned CW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run_en,
  input  logic          ext_trig_en,
  input  logic          ext_trig_in,
  input  logic          sw_trig,
  input  logic          busy,
  input  logic          buf_has_room,
  input  logic          clear_counters,
  output logic          trig_accept,
  output logic          trig_reject,
  output logic [CW-1:0] acc_count,
  output logic [CW-1:0] rej_count
);

  logic [2:0] ext_sync;
  logic       ext_rise, request, can_accept;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ext_sync <= '0;
    else        ext_sync <= {ext_sync[1:0], ext_trig_in};
  end

  always_comb begin
    ext_rise   = ext_sync[1] & ~ext_sync[2];
    request    = (ext_trig_en & ext_rise) | sw_trig;
    can_accept = run_en & ~busy & buf_has_room;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_accept <= 1'b0;
      trig_reject <= 1'b0;
      acc_count   <= '0;
      rej_count   <= '0;
    end else begin
      trig_accept <= request & can_accept & ~trig_accept;
      trig_reject <= request & run_en & ~(can_accept & ~trig_accept);
      if (clear_counters) begin
        acc_count <= '0;
        rej_count <= '0;
      end else begin
        if (request & can_accept & ~trig_accept)         acc_count <= acc_count + 1'b1;
        if (request & run_en & ~(can_accept & ~trig_accept)) rej_count <= rej_count + 1'b1;
      end
    end
  end

endmodule
