// event_fifo -- synchronous queue of normalised events.
//
// Absorbs bursts of events that arrive faster than the context generator can
// take them (one event per 26 clocks at R = 3). The default geometry, 1024 words
// of 25 bits (three 8-bit coordinates and the polarity bit), is the original
// design's; the memory is a plain array with a registered read so that it maps
// onto block RAM.
//
// Interface: wr_en/wr_data write the tail; a write while full is refused and
// pulses `overflow` (the input has no back-pressure, so the event is lost).
// rd_en pops the head; rd_data is valid in the cycle after rd_en and holds until
// the next pop. rd_en while empty is not allowed (assertion). `count` is the
// occupancy. Overflow handling and the read timing are this design's choices.
module event_fifo #(
  parameter int unsigned WIDTH = 25,
  parameter int unsigned DEPTH = gg_pkg::FIFO_DEPTH_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [AW:0]      count,
  output logic             overflow
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  always_comb begin
    empty = (count == '0);
    full  = (count == (AW+1)'(DEPTH));
    do_wr = wr_en && !full;
    do_rd = rd_en && !empty;
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
      overflow <= 1'b0;
    end else begin
      overflow <= wr_en && full;
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_no_pop_when_empty: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("event_fifo: pop while empty");

endmodule
