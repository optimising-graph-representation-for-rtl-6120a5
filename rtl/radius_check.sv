// radius_check -- "check radius": turns a context candidate into an edge.
//
// A candidate (xc, yc, tc) read from the neighbour matrix becomes an edge of the
// event (x, y, t) when
//   (x - xc)^2 + (y - yc)^2 + (t - tc)^2 <= R^2   and   tc <= t,
// i.e. it lies in the half-ball of radius R that looks back in time. The test
// and the 24-bit edge word {xc, yc, tc} are the original design's. The
// candidate must also be a real, in-matrix cell holding an event (cand_valid,
// cell_valid); those qualifiers belong to this design.
//
// Timing: one clock; edge_valid/edge_* are registered.
module radius_check #(
  parameter int unsigned SIZE = gg_pkg::SIZE_DEF,
  parameter int unsigned R    = gg_pkg::R_DEF,
  localparam int unsigned CW  = $clog2(SIZE)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cand_valid,
  input  logic [CW-1:0] ev_x,
  input  logic [CW-1:0] ev_y,
  input  logic [CW-1:0] ev_t,
  input  logic [CW-1:0] cand_x,
  input  logic [CW-1:0] cand_y,
  input  logic          cell_valid,
  input  logic [CW-1:0] cell_t,
  output logic          edge_valid,
  output logic [CW-1:0] edge_x,
  output logic [CW-1:0] edge_y,
  output logic [CW-1:0] edge_t
);

  logic signed [CW:0]     dx, dy;
  logic        [CW:0]     dt;
  logic        [2*CW+3:0] d2;
  logic                   hit;

  always_comb begin
    dx  = $signed({1'b0, ev_x}) - $signed({1'b0, cand_x});
    dy  = $signed({1'b0, ev_y}) - $signed({1'b0, cand_y});
    dt  = {1'b0, ev_t} - {1'b0, cell_t};
    d2  = (2*CW+4)'(dx * dx) + (2*CW+4)'(dy * dy) + (2*CW+4)'(dt * dt);
    hit = cand_valid && cell_valid && (cell_t <= ev_t) && (d2 <= (2*CW+4)'(R * R));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      edge_valid <= 1'b0;
      edge_x     <= '0;
      edge_y     <= '0;
      edge_t     <= '0;
    end else begin
      edge_valid <= hit;
      edge_x     <= cand_x;
      edge_y     <= cand_y;
      edge_t     <= cell_t;
    end
  end

endmodule
