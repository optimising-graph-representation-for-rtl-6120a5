// delay_line -- a DEPTH-stage register pipeline.
//
// Carries the event being processed (and its end-of-context flag) alongside the
// radius check so that the event leaves the module in the same cycles as its
// edges, as the "delay" path of the original design does. Stages reset to 0.
//
// Timing: dout = din delayed by DEPTH clocks (DEPTH >= 1).
module delay_line #(
  parameter int unsigned W     = 26,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);

  logic [W-1:0] stage [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) stage[i] <= '0;
    end else begin
      stage[0] <= din;
      for (int i = 1; i < int'(DEPTH); i++) stage[i] <= stage[i-1];
    end
  end

  assign dout = stage[DEPTH-1];

endmodule
