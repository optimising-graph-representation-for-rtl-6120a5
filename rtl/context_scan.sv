// context_scan -- address generator of "check context".
//
// For an event at (cx, cy) the context is the (2R+1) x (2R+1) square of the
// neighbour matrix around it: 48 candidate cells at R = 3, plus the centre cell
// that the duplicate check reads. Reading them two at a time over the two BRAM
// ports takes NCYC = 25 read cycles, the figure the original design reports
// (25 reads + 1 write per event).
//
// Read slot r = 2*cyc + port (port A = 0, port B = 1): slot 0 is the centre,
// slot r >= 1 is candidate r-1 in raster order over the window (dy major, dx
// minor, centre skipped); slots past the last candidate issue no read. A
// candidate that falls outside the matrix is still given an address (its
// coordinates wrap) but `inb` is low so that it is never turned into an edge.
// The slot order and the out-of-matrix handling are this design's choices.
//
// Purely combinational.
module context_scan #(
  parameter int unsigned SIZE  = gg_pkg::SIZE_DEF,
  parameter int unsigned R     = gg_pkg::R_DEF,
  localparam int unsigned CW   = $clog2(SIZE),
  localparam int unsigned NC   = gg_pkg::n_cand(R),
  localparam int unsigned NCYC = gg_pkg::n_read_cycles(R),
  localparam int unsigned CYW  = $clog2(NCYC + 1)
) (
  input  logic [CYW-1:0] cyc,
  input  logic [CW-1:0]  cx,
  input  logic [CW-1:0]  cy,
  output logic [1:0]     rd_en,      // a read is issued on port A / B
  output logic [1:0]     inb,        // the slot is a candidate inside the matrix
  output logic           is_center,  // port A reads the event's own cell
  output logic [CW-1:0]  cand_x [2],
  output logic [CW-1:0]  cand_y [2],
  output logic [2*CW-1:0] addr   [2]
);

  always_comb begin
    is_center = (cyc == '0);
    for (int p = 0; p < 2; p++) begin
      int unsigned r;
      int dx, dy, nx, ny;
      r  = 2 * int'(cyc) + p;
      dx = 0;
      dy = 0;
      for (int unsigned k = 0; k < NC; k++) begin
        if (r == k + 1) begin
          dx = gg_pkg::cand_dx(k, R);
          dy = gg_pkg::cand_dy(k, R);
        end
      end
      nx = int'(cx) + dx;
      ny = int'(cy) + dy;
      rd_en[p]   = (r <= NC);
      inb[p]     = (r >= 1) && (r <= NC) && (nx >= 0) && (nx < int'(SIZE)) && (ny >= 0) && (ny < int'(SIZE));
      cand_x[p]  = CW'(nx);
      cand_y[p]  = CW'(ny);
      addr[p]    = {cand_y[p], cand_x[p]};
    end
  end

endmodule
