// tb_dup_check -- exhaustive check of the duplicate rule.
//
// For every stored timestamp, event timestamp and valid bit (2 x 256 x 256
// cases) the flag must be set exactly when the cell is valid and the two
// timestamps are equal.
module tb_dup_check;

  logic cell_valid;
  logic [7:0] cell_t, ev_t;
  logic dup;

  dup_check dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int v = 0; v < 2; v++)
      for (int a = 0; a < 256; a++)
        for (int b = 0; b < 256; b++) begin
          cell_valid = 1'(v); cell_t = 8'(a); ev_t = 8'(b);
          #1;
          checks++;
          if (dup !== (v == 1 && a == b)) begin
            failures++;
            if (failures < 10) $display("FAIL: v=%0d cell=%0d ev=%0d dup=%0d", v, a, b, dup);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
