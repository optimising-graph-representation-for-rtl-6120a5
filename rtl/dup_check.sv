// dup_check -- "check for duplicates" of the context generator.
//
// An event is a duplicate when the neighbour-matrix cell at its own (x, y)
// already holds an event with the same normalised timestamp; such an event is
// dropped before any edge is generated, which makes every vertex (x, y, t) of
// the graph unique. The rule is the original design's; `cell_valid` comes from
// this design's valid bit (an empty cell is never a duplicate).
//
// Purely combinational: `dup` follows the inputs in the same cycle.
module dup_check #(
  parameter int unsigned TW = 8
) (
  input  logic          cell_valid,
  input  logic [TW-1:0] cell_t,
  input  logic [TW-1:0] ev_t,
  output logic          dup
);

  always_comb dup = cell_valid && (cell_t == ev_t);

endmodule
