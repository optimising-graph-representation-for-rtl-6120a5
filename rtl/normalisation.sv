// normalisation -- scales and quantises one raw event to the graph cube.
//
// Each coordinate is mapped independently onto 0..SIZE-1:
//   x_n = floor(x * SIZE / SENSOR_W)
//   y_n = floor(y * SIZE / SENSOR_H)
//   t_n = floor((t - t_origin) * SIZE / WINDOW_US)
// so space and time share one uniform integer range, as the original design
// proposes. The divisions are done as a multiplication by a fixed-point
// reciprocal M = ceil(SIZE * 2^SH / W) followed by a right shift of SH = 40 bits,
// which gives the exact floor for every input with v * W < 2^40.
// Values at or beyond the range (x >= SENSOR_W, t after the window) saturate at
// SIZE-1; a timestamp before t_origin maps to 0. These limits, the reciprocal
// arithmetic and the t_origin input (start of the current time window, supplied
// by the host) are this design's choices.
//
// Timing: one clock. out_* are registered and follow in_valid by one cycle;
// a new event may be presented every cycle.
module normalisation #(
  parameter int unsigned SIZE      = gg_pkg::SIZE_DEF,
  parameter int unsigned SENSOR_W  = 240,    // N-Caltech101 sensor width
  parameter int unsigned SENSOR_H  = 180,    // N-Caltech101 sensor height
  parameter int unsigned WINDOW_US = 50000,  // 50 ms time window
  parameter int unsigned XIN_W     = 16,
  parameter int unsigned YIN_W     = 16,
  parameter int unsigned TIN_W     = 32,
  localparam int unsigned CW       = $clog2(SIZE)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TIN_W-1:0] t_origin,
  input  logic             in_valid,
  input  logic [XIN_W-1:0] in_x,
  input  logic [YIN_W-1:0] in_y,
  input  logic [TIN_W-1:0] in_t,
  input  logic             in_p,
  output logic             out_valid,
  output logic [CW-1:0]    out_x,
  output logic [CW-1:0]    out_y,
  output logic [CW-1:0]    out_t,
  output logic             out_p
);

  localparam int unsigned SH = 40;
  localparam logic [63:0] MX = ((64'(SIZE) << SH) + 64'(SENSOR_W)  - 1) / 64'(SENSOR_W);
  localparam logic [63:0] MY = ((64'(SIZE) << SH) + 64'(SENSOR_H)  - 1) / 64'(SENSOR_H);
  localparam logic [63:0] MT = ((64'(SIZE) << SH) + 64'(WINDOW_US) - 1) / 64'(WINDOW_US);

  // floor(v * SIZE / w) for v < w, saturated to SIZE-1 otherwise
  function automatic logic [CW-1:0] scale(input logic [TIN_W-1:0] v,
                                          input logic [63:0] w,
                                          input logic [63:0] m);
    logic [63:0] prod;
    if (64'(v) >= w) return CW'(SIZE - 1);
    prod = 64'(v) * m;
    return CW'(prod >> SH);
  endfunction

  logic [TIN_W-1:0] t_rel;
  always_comb t_rel = (in_t >= t_origin) ? in_t - t_origin : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
      out_t     <= '0;
      out_p     <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_x <= scale(TIN_W'(in_x), 64'(SENSOR_W), MX);
        out_y <= scale(TIN_W'(in_y), 64'(SENSOR_H), MY);
        out_t <= scale(t_rel, 64'(WINDOW_US), MT);
        out_p <= in_p;
      end
    end
  end

endmodule
