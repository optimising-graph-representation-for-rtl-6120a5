// tb_nm_bram -- checks the two-port neighbour-matrix RAM (256 x 256 x 9 bits).
//
// Writes random words through port A and reads random addresses through both
// ports against an array model. Checked: read data one clock after the read,
// port B never writing, and read-before-write on port A (a read and a write of
// the same cell in one cycle return the old word).
module tb_nm_bram;

  localparam int N = 256 * 256;

  logic clk = 1'b0;
  logic a_en = 1'b0, a_we = 1'b0, b_en = 1'b0;
  logic [15:0] a_addr = '0, b_addr = '0;
  logic [8:0] a_wdata = '0, a_rdata, b_rdata;

  nm_bram dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  logic [8:0] model [N];
  logic [8:0] exp_a, exp_b;
  bit chk_a, chk_b;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    // initialise every cell through port A
    for (int i = 0; i < N; i++) begin
      a_en = 1'b1; a_we = 1'b1; a_addr = 16'(i); a_wdata = 9'((i * 37) ^ (i >> 5));
      model[i] = a_wdata;
      @(negedge clk);
    end
    for (int i = 0; i < 60000; i++) begin
      a_en    = ($urandom_range(0, 9) != 0);
      a_we    = a_en && ($urandom_range(0, 2) == 0);
      a_addr  = 16'($urandom);
      b_en    = ($urandom_range(0, 9) != 0);
      b_addr  = ($urandom_range(0, 7) == 0) ? a_addr : 16'($urandom);
      a_wdata = 9'($urandom);
      chk_a = a_en; chk_b = b_en;
      exp_a = model[a_addr];
      exp_b = model[b_addr];
      if (a_en && a_we) model[a_addr] = a_wdata;
      @(negedge clk);
      if (chk_a) check(a_rdata == exp_a, $sformatf("A read %h exp %h", a_rdata, exp_a));
      if (chk_b) check(b_rdata == exp_b, $sformatf("B read %h exp %h", b_rdata, exp_b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
