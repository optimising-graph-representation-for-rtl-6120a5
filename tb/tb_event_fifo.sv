// tb_event_fifo -- checks the event queue at its full depth (1024 x 25 bits).
//
// A queue model in the testbench follows random pushes and pops. Checked: the
// data and order of every pop (rd_data one clock after rd_en), the occupancy
// count, empty and full flags, and that a push into a full FIFO is refused
// with an overflow pulse while the stored data stay intact.
module tb_event_fifo;

  localparam int DEPTH = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [24:0] wr_data = '0, rd_data;
  logic empty, full, overflow;
  logic [10:0] count;

  event_fifo dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0, n_ovf = 0, n_full = 0;
  logic [24:0] model [$];
  bit pend = 0;
  logic [24:0] pend_data;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // one clock: drive at negedge, results visible at the next negedge
  task automatic step(bit w, bit r, int wprob);
    bit do_w, do_r, was_full;
    wr_en   = w;
    rd_en   = r && !empty;
    wr_data = 25'($urandom);
    was_full = (model.size() == DEPTH);
    do_w = w && !was_full;
    do_r = rd_en;
    if (do_r) begin
      pend      = 1;
      pend_data = model.pop_front();
    end else pend = 0;
    if (do_w) model.push_back(wr_data);
    @(negedge clk);
    check(overflow == (w && was_full), "overflow flag");
    if (w && was_full) n_ovf++;
    if (pend) check(rd_data == pend_data, $sformatf("pop data %h exp %h", rd_data, pend_data));
    check(int'(count) == model.size(), $sformatf("count %0d exp %0d", count, model.size()));
    check(empty == (model.size() == 0), "empty flag");
    check(full == (model.size() == DEPTH), "full flag");
    if (full) n_full++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(empty && !full && count == 0, "reset state");
    // fill past full
    for (int i = 0; i < DEPTH + 20; i++) step(1, 0, 0);
    // drain half while pushing into the full queue at first
    for (int i = 0; i < 600; i++) step(i < 5, 1, 0);
    // random traffic
    for (int i = 0; i < 20000; i++) step($urandom_range(0, 99) < 55, $urandom_range(0, 99) < 50, 0);
    // drain
    while (model.size() > 0) step(0, 1, 0);
    step(0, 0, 0);
    check(n_ovf > 0 && n_full > 0, "full and overflow reached");
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
