// nm_bram -- the neighbour matrix (NM) memory.
//
// A SIZE x SIZE true two-port RAM addressed by {y, x} of a normalised event.
// As in the original design, the coordinates are the address and only the
// timestamp is stored, so a cell decodes back to a full (x, y, t) vertex. Port A
// reads and writes (duplicate check, context reads, "save to context"), port B
// only reads (context reads). Both reads have a latency of one clock; a read and
// a write on port A in the same cycle returns the old word.
//
// Word layout (DW = 9): {valid, t[7:0]}. The valid bit marks cells that hold an
// event of the current graph; it is this design's addition, so that an empty
// cell is not mistaken for an event at t = 0. Cells are emptied by writing 0.
module nm_bram #(
  parameter int unsigned SIZE = gg_pkg::SIZE_DEF,
  parameter int unsigned DW   = $clog2(SIZE) + 1,
  localparam int unsigned AW  = 2 * $clog2(SIZE)
) (
  input  logic          clk,
  // port A: read / write
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [DW-1:0] a_wdata,
  output logic [DW-1:0] a_rdata,
  // port B: read only
  input  logic          b_en,
  input  logic [AW-1:0] b_addr,
  output logic [DW-1:0] b_rdata
);

  logic [DW-1:0] mem [SIZE*SIZE];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
