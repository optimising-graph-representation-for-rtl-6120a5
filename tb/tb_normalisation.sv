// tb_normalisation -- checks the scaling of x, y, t onto 0..SIZE-1.
//
// Random raw events (including coordinates past the sensor, times before the
// window origin and after its end) are compared, one clock later, with
// floor(v * 256 / W) computed by integer division in the testbench, saturated
// at 255. Also checks that out_valid follows in_valid by exactly one clock.
module tb_normalisation;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] t_origin = '0;
  logic in_valid = 1'b0, in_p = 1'b0;
  logic [15:0] in_x = '0, in_y = '0;
  logic [31:0] in_t = '0;
  logic out_valid, out_p;
  logic [7:0] out_x, out_y, out_t;

  normalisation dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int ref_scale(longint v, longint w);
    return (v >= w) ? 255 : int'(v * 256 / w);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 20000; i++) begin
      int ex, ey, et;
      longint tr;
      bit v;
      v        = ($urandom_range(0, 3) != 0);
      t_origin = (i % 1000 == 0) ? $urandom_range(0, 100000) : t_origin;
      in_valid = v;
      in_x     = 16'($urandom_range(0, 250));
      in_y     = 16'($urandom_range(0, 190));
      in_t     = t_origin + 32'($urandom_range(0, 52000)) - 32'($urandom_range(0, 500));
      in_p     = 1'($urandom);
      if (i % 997 == 0) in_x = 16'hffff;
      tr = (longint'(in_t) >= longint'(t_origin)) ? longint'(in_t) - longint'(t_origin) : 0;
      ex = ref_scale(longint'(in_x), 240);
      ey = ref_scale(longint'(in_y), 180);
      et = ref_scale(tr, 50000);
      @(negedge clk);
      check(out_valid == v, "valid latency");
      if (v) begin
        check(out_x == 8'(ex), $sformatf("x %0d -> %0d exp %0d", in_x, out_x, ex));
        check(out_y == 8'(ey), $sformatf("y %0d -> %0d exp %0d", in_y, out_y, ey));
        check(out_t == 8'(et), $sformatf("t %0d -> %0d exp %0d", tr, out_t, et));
        check(out_p == in_p, "p");
      end
    end
    // exact corners
    in_valid = 1'b1; in_x = 16'd239; in_y = 16'd179; t_origin = 32'd10; in_t = 32'd50009;
    @(negedge clk);
    check(out_x == 8'd254 && out_y == 8'd254 && out_t == 8'd255, "corner values");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
