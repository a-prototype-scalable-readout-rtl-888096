// event_buffer: store-and-forward buffer for formatted event words.
//
// On the Front-End Card the formatted data are held in an external DDR3
// memory before the TCP processor sends them. This module gives the same
// first-in first-out buffering with an on-chip memory array of DEPTH words,
// which a synthesis tool maps to block RAM; the DDR3 device and its memory
// controller are not modelled. Writes take one cycle; a read request
// (`rd_en` while not empty) returns the word in `rd_data` with `rd_valid` one
// cycle later. `has_room` is high while at least ROOM_WORDS words are free, so
// that the trigger logic admits an event only if the whole event fits.
// Writing when full is refused and sets the sticky `overflow` flag, which the
// design should never see.
//
// DEPTH (8192 words, room for 7 events of 1027 words) is this design's
// choice: the size of the DDR3 buffer is not given.
module event_buffer #(
  parameter int unsigned WIDTH      = 16,
  parameter int unsigned DEPTH      = 8192,
  parameter int unsigned ROOM_WORDS = 1027
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       rd_en,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       rd_valid,
  output logic                       empty,
  output logic                       full,
  output logic                       has_room,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       overflow
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  always_comb begin
    empty    = (count == '0);
    full     = (count == CW'(DEPTH));
    has_room = (CW'(DEPTH) - count) >= CW'(ROOM_WORDS);
    do_wr    = wr_en & ~full;
    do_rd    = rd_en & ~empty;
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
    if (do_rd) rd_data <= mem[rd_ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
      rd_valid <= 1'b0;
      overflow <= 1'b0;
    end else begin
      rd_valid <= do_rd;
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + CW'(do_wr) - CW'(do_rd);
      if (wr_en & full) overflow <= 1'b1;
    end
  end

endmodule
