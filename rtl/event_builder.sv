// event_builder: formats the digitised samples of one trigger into event words.
//
// After `evt_start` the builder writes two header words (EVT_SYNC and the
// 16-bit event number), then, for each of the N_CH channel slots of the
// readout, takes the N_CHIPS samples presented with one `smp_valid` strobe
// (all ADCs convert together) and writes them as N_CHIPS words
// {chip index, sample}, one per cycle, chip 0 first. After the last slot it
// writes the trailer EVT_TRAILER with bit 0 set if any ADC frame check failed
// during the event, and increments the event number. The output has no
// back-pressure: the trigger logic admits an event only when the buffer can
// take all event_words(N_CHIPS, N_CH) words.
//
// Timing: one word per cycle while serialising, so strobes must be at least
// N_CHIPS+1 cycles apart (the readout delivers one every CLKB period of 32
// cycles). `busy` is high from the cycle after `evt_start` until the trailer
// has been written.
//
// The readout system description says only that the selected data are
// formatted and stored in the buffer; the format is this design's own (see
// fec_pkg). No data selection (e.g. zero suppression) is done: every channel
// slot is kept, which the description leaves to each experiment.
module event_builder
  import fec_pkg::*;
#(
  parameter int unsigned N_CHIPS   = 16,
  parameter int unsigned N_CH      = 64,
  parameter int unsigned DATA_BITS = 12
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               evt_start,
  input  logic                               smp_valid,
  input  logic [N_CHIPS-1:0][DATA_BITS-1:0]  smp_data,
  input  logic                               smp_err,
  output logic                               busy,
  output logic [15:0]                        evt_number,
  output logic                               wr_en,
  output logic [15:0]                        wr_data
);

  localparam int unsigned KW = (N_CHIPS > 1) ? $clog2(N_CHIPS) : 1;
  localparam int unsigned SW = (N_CH > 1) ? $clog2(N_CH) : 1;

  typedef enum logic [2:0] {S_IDLE, S_HDR1, S_WAIT, S_SER, S_TRL} state_e;
  state_e state;

  logic [N_CHIPS-1:0][DATA_BITS-1:0] stage;
  logic [KW-1:0] idx;
  logic [SW-1:0] slot_cnt;
  logic          err;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      stage      <= '0;
      idx        <= '0;
      slot_cnt   <= '0;
      err        <= 1'b0;
      evt_number <= '0;
      wr_en      <= 1'b0;
      wr_data    <= '0;
    end else begin
      wr_en <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (evt_start) begin
            wr_en   <= 1'b1;
            wr_data <= EVT_SYNC;
            state   <= S_HDR1;
          end
        end
        S_HDR1: begin
          wr_en    <= 1'b1;
          wr_data  <= evt_number;
          slot_cnt <= '0;
          err      <= 1'b0;
          state    <= S_WAIT;
        end
        S_WAIT: begin
          if (smp_valid) begin
            stage <= smp_data;
            err   <= err | smp_err;
            idx   <= '0;
            state <= S_SER;
          end
        end
        S_SER: begin
          wr_en   <= 1'b1;
          wr_data <= 16'({idx, stage[idx]});
          if (idx == KW'(N_CHIPS - 1)) begin
            idx <= '0;
            if (slot_cnt == SW'(N_CH - 1)) begin
              state <= S_TRL;
            end else begin
              slot_cnt <= slot_cnt + 1'b1;
              state    <= S_WAIT;
            end
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_TRL: begin
          wr_en      <= 1'b1;
          wr_data    <= EVT_TRAILER | 16'(err);
          evt_number <= evt_number + 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    assert (KW + DATA_BITS <= 16) else $error("event_builder: chip index and sample do not fit in 16 bits");
  end

  a_no_strobe_while_serialising: assert property (@(posedge clk) disable iff (!rst_n)
      smp_valid |-> state != S_SER)
    else $error("event_builder: sample strobe while the previous slot is being written");

endmodule
