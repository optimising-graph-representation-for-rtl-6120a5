// tb_delay_line -- checks that the delay line returns its input DEPTH clocks
// later, for DEPTH = 1 (as used) and DEPTH = 3, with random data, and that it
// comes out of reset at zero.
module tb_delay_line;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [25:0] din = '0, dout1, dout3;

  delay_line #(.W(26), .DEPTH(1)) dut1 (.clk, .rst_n, .din, .dout(dout1));
  delay_line #(.W(26), .DEPTH(3)) dut3 (.clk, .rst_n, .din, .dout(dout3));

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  logic [25:0] hist [$];

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (dout1 != 0 || dout3 != 0) failures++;
    rst_n = 1'b1;
    for (int i = 0; i < 3; i++) hist.push_front('0);
    for (int i = 0; i < 5000; i++) begin
      din = 26'($urandom);
      hist.push_front(din);
      @(negedge clk);
      checks += 2;
      if (dout1 != hist[0]) failures++;
      if (dout3 != hist[2]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
