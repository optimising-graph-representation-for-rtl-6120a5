// tb_edge_output -- checks the output stage.
//
// Feeds random edge-valid patterns for a sequence of events, each ending with
// a cycle flagged last. Checked, one clock after the inputs: edges and the
// event pass unchanged, `done` appears only for the last cycle, and `len` there
// equals the number of edges counted by the testbench for that event.
module tb_edge_output;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] in_edge_valid = '0;
  logic [23:0] in_edge [2] = '{24'd0, 24'd0};
  logic [24:0] in_ev = '0;
  logic in_last = 1'b0;
  logic [1:0] edge_valid;
  logic [23:0] edge_data [2];
  logic [7:0] ev_x, ev_y, ev_t;
  logic ev_p, done;
  logic [5:0] len;

  edge_output dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0;

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
    for (int e = 0; e < 2000; e++) begin
      int n, dens;
      n     = 0;
      in_ev = 25'($urandom);
      dens  = int'($urandom_range(0, 100));
      for (int c = 0; c < 25; c++) begin
        in_edge_valid = {1'($urandom_range(0, 99) < dens), 1'($urandom_range(0, 99) < dens)};
        if (c == 24) in_edge_valid[1] = 1'b0;
        in_edge[0] = 24'($urandom); in_edge[1] = 24'($urandom);
        in_last = (c == 24);
        n += int'(in_edge_valid[0]) + int'(in_edge_valid[1]);
        @(negedge clk);
        check(edge_valid == in_edge_valid && edge_data[0] == in_edge[0] && edge_data[1] == in_edge[1], "edges pass");
        check({ev_x, ev_y, ev_t, ev_p} == in_ev, "event pass");
        check(done == in_last, "done");
        if (in_last) check(int'(len) == n, $sformatf("len %0d exp %0d", len, n));
      end
      in_last = 1'b0; in_edge_valid = '0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
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
