// tb_context_gen -- checks the context generation controller with its
// neighbour matrix.
//
// A queue in the testbench plays the FIFO (data one clock after the pop).
// Events are drawn from a small patch, including border pixels and repeated
// (pixel, time) pairs. A model matrix in the testbench gives, for each kept
// event, the contents of the 48 window cells; the candidates the controller
// returns must match them cell for cell (in-matrix ones only, each once), and
// a duplicate must be dropped without candidates. Checked too: the event's
// own cell holds its timestamp afterwards (seen by later events), 26 clocks
// between context completions when events queue, 2 clocks per duplicate, and
// that a clear request empties the matrix after the event in progress.
module tb_context_gen;

  localparam int S = 256, R = 3;

  logic clk = 1'b0, rst_n = 1'b0, clear_req = 1'b0;
  logic fifo_empty, fifo_rd_en;
  logic [24:0] fifo_q = '0;
  logic [1:0] s1_cand_valid, s1_cell_valid;
  logic [7:0] s1_cand_x [2];
  logic [7:0] s1_cand_y [2];
  logic [7:0] s1_cell_t [2];
  logic [24:0] s1_ev;
  logic s1_last, drop, clearing, busy;

  context_gen dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  int n_drop = 0, n_kept = 0, n_period = 0, n_border = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // FIFO stand-in
  logic [24:0] fq [$];
  assign fifo_empty = (fq.size() == 0);
  always @(posedge clk) if (fifo_rd_en) fifo_q <= fq.pop_front();

  // model
  int nm [S*S];
  logic [24:0] inflight [$];   // popped, not yet finished (in order)
  int got [int];               // window key -> cell (-1 empty)
  int last_done = -1, drops_between = 0, cyc = 0;
  bit backlog = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (fifo_rd_en) inflight.push_back(fq[0]);
    for (int p = 0; p < 2; p++)
      if (s1_cand_valid[p]) begin
        int key;
        key = int'(s1_cand_y[p]) * S + int'(s1_cand_x[p]);
        check(!got.exists(key), "candidate twice");
        got[key] = s1_cell_valid[p] ? int'(s1_cell_t[p]) : -1;
      end
    if (drop) begin
      logic [24:0] e;
      e = inflight.pop_front();
      check(nm[int'(e[16:9]) * S + int'(e[24:17])] == int'(e[8:1]), "dropped a non-duplicate");
      check(s1_ev == e, "drop event");
      n_drop++;
      drops_between++;
      got.delete();
    end
    if (s1_last) begin
      logic [24:0] e;
      int x, y, t, n_exp;
      e = inflight.pop_front();
      x = int'(e[24:17]); y = int'(e[16:9]); t = int'(e[8:1]);
      check(s1_ev == e, "event at completion");
      check(nm[y * S + x] != t, "duplicate was kept");
      n_exp = 0;
      for (int dy = -R; dy <= R; dy++)
        for (int dx = -R; dx <= R; dx++) begin
          int key;
          if (dx == 0 && dy == 0) continue;
          if (x + dx < 0 || y + dy < 0 || x + dx >= S || y + dy >= S) continue;
          n_exp++;
          key = (y + dy) * S + (x + dx);
          check(got.exists(key) && got[key] == nm[key], $sformatf("cell (%0d,%0d)", x + dx, y + dy));
        end
      check(got.num() == n_exp, $sformatf("candidates %0d exp %0d", got.num(), n_exp));
      if (n_exp < 48) n_border++;
      nm[y * S + x] = t;
      if (last_done >= 0 && backlog) begin
        check(cyc - last_done == 26 + 2 * drops_between, $sformatf("period %0d", cyc - last_done));
        n_period++;
      end
      last_done = cyc;
      backlog = (fq.size() >= 3);
      drops_between = 0;
      n_kept++;
      got.delete();
    end
  end

  task automatic push_rand(int n);
    repeat (n) begin
      int x, y, t;
      x = ($urandom_range(0, 9) == 0) ? int'($urandom_range(0, 2)) : 100 + int'($urandom_range(0, 12));
      y = 100 + int'($urandom_range(0, 12));
      t = int'($urandom_range(0, 15));
      fq.push_back({8'(x), 8'(y), 8'(t), 1'($urandom)});
    end
  endtask

  task automatic wait_idle();
    do @(negedge clk); while (busy || fq.size() != 0);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    foreach (nm[i]) nm[i] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(clearing, "clear after reset");
    wait_idle();
    // isolated events
    for (int i = 0; i < 50; i++) begin
      push_rand(1);
      repeat ($urandom_range(1, 40)) @(negedge clk);
    end
    wait_idle();
    // queued events
    push_rand(1500);
    wait_idle();
    // clear request while an event is being processed
    push_rand(3);
    repeat (5) @(negedge clk);
    clear_req = 1'b1;
    @(negedge clk);
    clear_req = 1'b0;
    while (!clearing) @(negedge clk);
    check(fq.size() == 2, "clear waits for the event in progress only");
    while (clearing) @(negedge clk);
    foreach (nm[i]) nm[i] = -1;
    wait_idle();
    push_rand(300);
    wait_idle();
    check(n_drop > 0 && n_kept > 1000 && n_period > 500 && n_border > 0, "coverage");
    check(inflight.size() == 0, "all events finished");
    $display("kept=%0d dropped=%0d periods=%0d border=%0d", n_kept, n_drop, n_period, n_border);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
