// graph_gen -- event-camera graph generator (top level).
//
// Turns a stream of events (x, y, t, p) into a time-directed graph ready for a
// PointNet-style graph convolution: every event that is not a duplicate becomes
// a vertex, and it receives an edge from each of the newest vertices of the
// surrounding pixels that lie within radius R of it in normalised (x, y, t).
//
// Data path (one clock domain):
//   normalisation -> event_fifo -> context_gen (nm_bram, dup_check,
//   context_scan) -> 2 x radius_check -> edge_output, with delay_line carrying
//   the event past the radius check.
// An input event can be accepted every cycle; it is normalised in one clock and
// queued. The context generator then takes 26 clocks per kept event (25 reads
// of the neighbour matrix over two ports, 1 write) and 2 clocks per dropped
// duplicate, so the sustained rate is one event per 26 clocks (about 9.6
// events/us at 250 MHz). Edges of an event appear from 3 clocks after its first
// context read, two per cycle at most, and `done` marks its last cycle; a lone
// event reaches `done` 30 clocks after it is presented.
//
// Interface:
//   t_origin        start time of the current window, same unit as in_t (us)
//   clear           pulse: empty the neighbour matrix (start a new graph) once
//                   the event in progress is done; takes SIZE*SIZE clocks,
//                   during which the FIFO keeps filling. Also done after reset.
//   in_*            raw event, in_valid qualifies it; there is no back-pressure
//   fifo_full/count FIFO state
//   fifo_overflow   an event was lost because the FIFO was full
//   drop            a duplicate (same pixel, same normalised t) was dropped
//   edge_valid[p], edge_data[p] = {x, y, t} of an edge of event ev_*
//   done, len       end of the edge list of ev_* and its length
// Architecture and sizes follow the original design; handshakes, clearing and
// the streamed output format are this implementation's choices.
module graph_gen #(
  parameter int unsigned SIZE       = gg_pkg::SIZE_DEF,
  parameter int unsigned R          = gg_pkg::R_DEF,
  parameter int unsigned FIFO_DEPTH = gg_pkg::FIFO_DEPTH_DEF,
  parameter int unsigned SENSOR_W   = 240,
  parameter int unsigned SENSOR_H   = 180,
  parameter int unsigned WINDOW_US  = 50000,
  parameter int unsigned XIN_W      = 16,
  parameter int unsigned YIN_W      = 16,
  parameter int unsigned TIN_W      = 32,
  localparam int unsigned CW        = $clog2(SIZE),
  localparam int unsigned EW        = 3 * CW + 1,
  localparam int unsigned LW        = $clog2(gg_pkg::n_cand(R) + 1),
  localparam int unsigned FAW       = $clog2(FIFO_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [TIN_W-1:0] t_origin,
  input  logic             in_valid,
  input  logic [XIN_W-1:0] in_x,
  input  logic [YIN_W-1:0] in_y,
  input  logic [TIN_W-1:0] in_t,
  input  logic             in_p,
  output logic             fifo_overflow,
  output logic             fifo_full,
  output logic [FAW:0]     fifo_count,
  output logic             drop,
  output logic             clearing,
  output logic             busy,
  output logic [1:0]       edge_valid,
  output logic [3*CW-1:0]  edge_data [2],
  output logic [CW-1:0]    ev_x,
  output logic [CW-1:0]    ev_y,
  output logic [CW-1:0]    ev_t,
  output logic             ev_p,
  output logic             done,
  output logic [LW-1:0]    len
);

  // normalisation
  logic          n_valid, n_p;
  logic [CW-1:0] n_x, n_y, n_t;

  normalisation #(
    .SIZE(SIZE), .SENSOR_W(SENSOR_W), .SENSOR_H(SENSOR_H), .WINDOW_US(WINDOW_US),
    .XIN_W(XIN_W), .YIN_W(YIN_W), .TIN_W(TIN_W)
  ) u_norm (
    .clk, .rst_n, .t_origin, .in_valid, .in_x, .in_y, .in_t, .in_p,
    .out_valid(n_valid), .out_x(n_x), .out_y(n_y), .out_t(n_t), .out_p(n_p)
  );

  // FIFO
  logic          f_rd_en, f_empty;
  logic [EW-1:0] f_q;

  event_fifo #(.WIDTH(EW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(n_valid), .wr_data({n_x, n_y, n_t, n_p}),
    .rd_en(f_rd_en), .rd_data(f_q),
    .empty(f_empty), .full(fifo_full), .count(fifo_count), .overflow(fifo_overflow)
  );

  // context generation
  logic [1:0]    s1_cand_valid, s1_cell_valid;
  logic [CW-1:0] s1_cand_x [2];
  logic [CW-1:0] s1_cand_y [2];
  logic [CW-1:0] s1_cell_t [2];
  logic [EW-1:0] s1_ev;
  logic          s1_last;

  context_gen #(.SIZE(SIZE), .R(R)) u_ctx (
    .clk, .rst_n, .clear_req(clear),
    .fifo_empty(f_empty), .fifo_q(f_q), .fifo_rd_en(f_rd_en),
    .s1_cand_valid, .s1_cand_x, .s1_cand_y, .s1_cell_valid, .s1_cell_t,
    .s1_ev, .s1_last, .drop, .clearing, .busy
  );

  // radius check, one per BRAM port
  logic [1:0]      r_valid;
  logic [3*CW-1:0] r_edge [2];
  logic [EW-1:0]   d_ev;
  logic            d_last;

  for (genvar p = 0; p < 2; p++) begin : g_rad
    logic [CW-1:0] ex, ey, et;
    radius_check #(.SIZE(SIZE), .R(R)) u_rad (
      .clk, .rst_n,
      .cand_valid(s1_cand_valid[p]),
      .ev_x(s1_ev[3*CW:2*CW+1]), .ev_y(s1_ev[2*CW:CW+1]), .ev_t(s1_ev[CW:1]),
      .cand_x(s1_cand_x[p]), .cand_y(s1_cand_y[p]),
      .cell_valid(s1_cell_valid[p]), .cell_t(s1_cell_t[p]),
      .edge_valid(r_valid[p]), .edge_x(ex), .edge_y(ey), .edge_t(et)
    );
    assign r_edge[p] = {ex, ey, et};
  end

  // event delay line, matched to the radius check latency
  delay_line #(.W(EW + 1), .DEPTH(1)) u_delay (
    .clk, .rst_n, .din({s1_ev, s1_last}), .dout({d_ev, d_last})
  );

  edge_output #(.SIZE(SIZE), .R(R)) u_out (
    .clk, .rst_n,
    .in_edge_valid(r_valid), .in_edge(r_edge), .in_ev(d_ev), .in_last(d_last),
    .edge_valid, .edge_data, .ev_x, .ev_y, .ev_t, .ev_p, .done, .len
  );

endmodule
