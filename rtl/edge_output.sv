// edge_output -- output stage: an event with its list of edges.
//
// The original design emits, for every event that is not dropped, the event
// (x, y, t, p) and its edges, each edge being the 24-bit absolute position
// {x, y, t} of the older vertex it connects to, plus the list length LEN. Here
// the list is streamed: in every cycle up to two edges (one per BRAM port)
// appear on edge_valid/edge_data, with the event they belong to on ev_*.
// Together with the event's last edges, `done` pulses and `len` gives the
// number of edges streamed for it (0 .. 48 at R = 3). Streaming
// instead of a buffered array is this design's choice; it needs no edge
// storage.
//
// Inputs come from the radius checks and from the event delay line, aligned.
// All outputs are registered: they follow the inputs by one clock.
module edge_output #(
  parameter int unsigned SIZE = gg_pkg::SIZE_DEF,
  parameter int unsigned R    = gg_pkg::R_DEF,
  localparam int unsigned CW  = $clog2(SIZE),
  localparam int unsigned EW  = 3 * CW + 1,
  localparam int unsigned LW  = $clog2(gg_pkg::n_cand(R) + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [1:0]      in_edge_valid,
  input  logic [3*CW-1:0] in_edge [2],
  input  logic [EW-1:0]   in_ev,
  input  logic            in_last,
  output logic [1:0]      edge_valid,
  output logic [3*CW-1:0] edge_data [2],
  output logic [CW-1:0]   ev_x,
  output logic [CW-1:0]   ev_y,
  output logic [CW-1:0]   ev_t,
  output logic            ev_p,
  output logic            done,
  output logic [LW-1:0]   len
);

  logic [LW-1:0] acc;
  logic [LW-1:0] n_now;

  always_comb n_now = LW'(in_edge_valid[0]) + LW'(in_edge_valid[1]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      edge_valid <= '0;
      edge_data  <= '{default: '0};
      {ev_x, ev_y, ev_t, ev_p} <= '0;
      done       <= 1'b0;
      len        <= '0;
    end else begin
      acc        <= in_last ? '0 : acc + n_now;
      edge_valid <= in_edge_valid;
      edge_data  <= in_edge;
      {ev_x, ev_y, ev_t, ev_p} <= in_ev;
      done       <= in_last;
      len        <= acc + n_now;
    end
  end

endmodule
