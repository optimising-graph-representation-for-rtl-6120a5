// tb_radius_check -- checks the half-ball edge test at R = 3.
//
// Random event/candidate pairs, biased so that most lie close together, are
// compared one clock later with the test dx^2 + dy^2 + dt^2 <= 9 with the
// candidate not newer than the event, computed in the testbench with integers.
// Also checks that invalid candidates and empty cells never give an edge, and
// that the edge word carries the candidate's coordinates and stored time.
module tb_radius_check;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cand_valid = 1'b0, cell_valid = 1'b0;
  logic [7:0] ev_x = '0, ev_y = '0, ev_t = '0, cand_x = '0, cand_y = '0, cell_t = '0;
  logic edge_valid;
  logic [7:0] edge_x, edge_y, edge_t;

  radius_check dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0, hits = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 50000; i++) begin
      int dx, dy, dt;
      bit exp;
      ev_x = 8'($urandom); ev_y = 8'($urandom); ev_t = 8'($urandom);
      cand_x = ev_x + 8'($urandom_range(0, 8)) - 8'd4;
      cand_y = ev_y + 8'($urandom_range(0, 8)) - 8'd4;
      cell_t = ($urandom_range(0, 9) == 0) ? 8'($urandom) : ev_t + 8'($urandom_range(0, 6)) - 8'd4;
      if ($urandom_range(0, 20) == 0) cand_x = 8'($urandom);
      cand_valid = ($urandom_range(0, 9) != 0);
      cell_valid = ($urandom_range(0, 9) != 0);
      dx = int'(ev_x) - int'(cand_x);
      dy = int'(ev_y) - int'(cand_y);
      dt = int'(ev_t) - int'(cell_t);
      exp = cand_valid && cell_valid && dt >= 0 && (dx*dx + dy*dy + dt*dt <= 9);
      @(negedge clk);
      check(edge_valid == exp, $sformatf("ev(%0d,%0d,%0d) cand(%0d,%0d,%0d) v%0d%0d got %0d",
            ev_x, ev_y, ev_t, cand_x, cand_y, cell_t, cand_valid, cell_valid, edge_valid));
      if (exp) begin
        hits++;
        check(edge_x == cand_x && edge_y == cand_y && edge_t == cell_t, "edge word");
      end
    end
    check(hits > 1000, "enough edges exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
