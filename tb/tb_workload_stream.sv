// tb_workload_stream -- one 50 ms window of synthetic event-camera traffic.
//
// Stands in for an N-Caltech101 sample at the original evaluation's rates: a
// 240 x 180 sensor, a 50 ms window, about 56,000 events, mostly at 0.9
// events/us with a 5 ms burst at 3.3 events/us (the busiest-millisecond rate
// reported for that dataset). Events come from a few moving blobs plus sparse
// noise, and timestamps follow a 250 MHz clock (250 clocks per us). The graph
// generator runs at its default parameters.
//
// Checked: no event is lost to FIFO overflow, every event ends in exactly one
// done or drop, and every edge list matches the reference model (the same
// model as tb_graph_gen). Reported: peak FIFO occupancy and graph size.
module tb_workload_stream;

  localparam int SIZE = 256;
  localparam int R    = 3;
  localparam int SW = 240, SH = 180, WIN = 50000;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  logic [31:0] t_origin = '0;
  logic in_valid = 1'b0, in_p = 1'b0;
  logic [15:0] in_x = '0, in_y = '0;
  logic [31:0] in_t = '0;
  logic fifo_overflow, fifo_full, drop, clearing, busy, done, ev_p;
  logic [10:0] fifo_count;
  logic [1:0] edge_valid;
  logic [23:0] edge_data [2];
  logic [7:0] ev_x, ev_y, ev_t;
  logic [5:0] len;

  graph_gen dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;

  // mechanism counters
  int n_dup = 0, n_overflow = 0, n_backlog = 0, n_clear = 0, n_border = 0,
      n_newer = 0, n_tsat = 0, n_with_edges = 0, n_no_edges = 0, n_period = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------- reference model ----------------
  typedef struct { int x, y, t, p; } nev_t;
  int nm [SIZE*SIZE];             // -1 = empty
  nev_t mq [$];                   // accepted events, in order
  nev_t pipe_e [2];               // sampled inputs awaiting the overflow verdict
  bit   pipe_v [2] = '{0, 0};

  function automatic nev_t norm(int x, int y, longint t);
    nev_t e;
    longint tr;
    tr  = (t >= longint'(t_origin)) ? t - longint'(t_origin) : 0;
    e.x = (x >= SW) ? SIZE - 1 : x * SIZE / SW;
    e.y = (y >= SH) ? SIZE - 1 : y * SIZE / SH;
    e.t = (tr >= longint'(WIN)) ? SIZE - 1 : int'(tr * SIZE / longint'(WIN));
    e.p = 0;
    return e;
  endfunction

  function automatic void model_clear();
    foreach (nm[i]) nm[i] = -1;
  endfunction

  // expected edges of e, as {x,y,t} words in a queue; also flags newer/border
  function automatic void expect_edges(nev_t e, ref logic [23:0] q [$]);
    q.delete();
    for (int dy = -R; dy <= R; dy++)
      for (int dx = -R; dx <= R; dx++) begin
        int cx, cy, c;
        if (dx == 0 && dy == 0) continue;
        cx = e.x + dx; cy = e.y + dy;
        if (cx < 0 || cy < 0 || cx >= SIZE || cy >= SIZE) continue;
        c = nm[cy*SIZE + cx];
        if (c < 0) continue;
        if (c > e.t) begin
          if (dx*dx + dy*dy <= R*R) n_newer++;
          continue;
        end
        if (dx*dx + dy*dy + (e.t-c)*(e.t-c) <= R*R) q.push_back({8'(cx), 8'(cy), 8'(c)});
      end
  endfunction

  // ---------------- monitor ----------------
  logic [23:0] got [$];
  longint last_done = -1, lat_single = -1;
  time    t_in_single = 0;
  bit     single_pending = 0;
  int drops_between = 0;
  bit backlog_at_last = 0;

  // Sampling on the rising edge sees the values of the cycle just ending.
  always @(posedge clk) if (rst_n) begin
    cyc++;
    // overflow verdict for the event sampled two edges ago
    if (pipe_v[1]) begin
      if (fifo_overflow) n_overflow++;
      else mq.push_back(pipe_e[1]);
    end else begin
      check(!fifo_overflow, "overflow without a write");
    end
    pipe_v[1] = pipe_v[0];
    pipe_e[1] = pipe_e[0];
    pipe_v[0] = in_valid;
    if (in_valid) begin
      pipe_e[0]   = norm(int'(in_x), int'(in_y), longint'(in_t));
      pipe_e[0].p = int'(in_p);
    end
    if (fifo_count > 1) n_backlog++;
    for (int p = 0; p < 2; p++)
      if (edge_valid[p]) begin
        got.push_back(edge_data[p]);
        check(mq.size() > 0 && ev_x == 8'(mq[0].x) && ev_y == 8'(mq[0].y) && ev_t == 8'(mq[0].t),
              "edge event tag");
      end
    // an event's done can share a cycle with the next event's drop
    if (done) begin
      check(mq.size() > 0, "done with empty model queue");
      if (mq.size() > 0) begin
        nev_t e;
        logic [23:0] exp_q [$];
        bit ok;
        e = mq.pop_front();
        check(nm[e.y*SIZE + e.x] != e.t, "duplicate not dropped");
        check(ev_x == 8'(e.x) && ev_y == 8'(e.y) && ev_t == 8'(e.t) && ev_p == 1'(e.p), "done event");
        expect_edges(e, exp_q);
        ok = (exp_q.size() == got.size()) && (int'(len) == got.size());
        if (ok) begin
          exp_q.sort(); got.sort();
          foreach (exp_q[i]) if (exp_q[i] != got[i]) ok = 0;
        end
        check(ok, $sformatf("edges of (%0d,%0d,%0d): exp %0d got %0d len %0d", e.x, e.y, e.t, exp_q.size(), got.size(), len));
        if (exp_q.size() > 0) n_with_edges++; else n_no_edges++;
        if (e.x < R || e.y < R || e.x >= SIZE - R || e.y >= SIZE - R) n_border++;
        nm[e.y*SIZE + e.x] = e.t;
        if (single_pending) begin
          lat_single     = longint'(($time - t_in_single) / 4);
          single_pending = 0;
        end
        // period of back-to-back events
        if (last_done >= 0 && backlog_at_last) begin
          check(cyc - last_done == 26 + 2 * drops_between,
                $sformatf("period %0d with %0d drops", cyc - last_done, drops_between));
          n_period++;
        end
        last_done = cyc;
        backlog_at_last = (fifo_count >= 4);
        drops_between = 0;
      end
      got.delete();
    end
    if (drop) begin
      check(mq.size() > 0, "drop with empty model queue");
      if (mq.size() > 0) begin
        check(nm[mq[0].y*SIZE + mq[0].x] == mq[0].t, $sformatf("drop of a non-duplicate (%0d,%0d,%0d)", mq[0].x, mq[0].y, mq[0].t));
        void'(mq.pop_front());
        n_dup++;
        drops_between++;
      end
    end
  end

  // ---------------- stimulus ----------------
  localparam int CLK_PER_US = 250;
  localparam int NBLOB = 6;
  int bx [NBLOB], by [NBLOB];
  int n_in = 0, max_fifo = 0, n_edges_total = 0;

  always @(posedge clk) begin
    if (int'(fifo_count) > max_fifo) max_fifo = int'(fifo_count);
    if (done) n_edges_total += int'(len);
  end

  initial begin
    model_clear();
    t_origin = 32'd0;
    foreach (bx[i]) begin
      bx[i] = int'($urandom_range(20, 219));
      by[i] = int'($urandom_range(20, 159));
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!clearing) @(negedge clk);
    while (clearing) @(negedge clk);
    for (int c = 0; c < WIN * CLK_PER_US; c++) begin
      int us, rate_milli, b;
      us = c / CLK_PER_US;
      // events per clock = rate / 250; rate in 1/1000 events per us
      rate_milli = (us >= 20000 && us < 25000) ? 3300 : 900;
      if (int'($urandom_range(0, 249999)) < rate_milli) begin
        b = int'($urandom_range(0, NBLOB));
        in_valid = 1'b1;
        if (b == NBLOB) begin
          in_x = 16'($urandom_range(0, 239));
          in_y = 16'($urandom_range(0, 179));
        end else begin
          in_x = 16'(bx[b] + int'($urandom_range(0, 16)) - 8);
          in_y = 16'(by[b] + int'($urandom_range(0, 16)) - 8);
        end
        in_t = 32'(us);
        in_p = 1'($urandom);
        n_in++;
      end else begin
        in_valid = 1'b0;
      end
      // blobs drift by one pixel every 2 ms
      if (c % (2000 * CLK_PER_US) == 0)
        foreach (bx[i]) begin
          bx[i] = (bx[i] + int'($urandom_range(0, 2)) - 1 + 240) % 240;
          by[i] = (by[i] + int'($urandom_range(0, 2)) - 1 + 180) % 180;
        end
      @(negedge clk);
    end
    in_valid = 1'b0;
    while (busy || fifo_count != 0 || mq.size() != 0 || pipe_v[0] || pipe_v[1]) @(negedge clk);
    repeat (4) @(negedge clk);
    $display("events in=%0d kept=%0d dropped=%0d lost=%0d edges=%0d peak_fifo=%0d",
             n_in, n_with_edges + n_no_edges, n_dup, n_overflow, n_edges_total, max_fifo);
    check(n_in > 50000, "workload size");
    check(n_overflow == 0, "events lost to overflow");
    check(n_with_edges + n_no_edges + n_dup == n_in, "every event done or dropped");
    check(n_with_edges > 0 && n_dup > 0, "edges and duplicates occur");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (14000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
