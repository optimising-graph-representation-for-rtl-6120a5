// tb_graph_gen_sized -- the end-to-end test of tb_graph_gen for any SIZE.
//
// Same stimulus, reference model and checks as tb_graph_gen, with the graph
// generator built for graph size SIZE (the other sizes evaluated for the
// original design are 128 and 64). Instead of ending the simulation it
// reports its counts on its ports and raises `finished`; tb_graph_gen_sizes
// runs it for several sizes.
module tb_graph_gen_sized #(
  parameter int SIZE = 128
) (
  output bit finished,
  output int checks,
  output int failures
);

  localparam int CW = $clog2(SIZE);
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
  logic [3*CW-1:0] edge_data [2];
  logic [CW-1:0] ev_x, ev_y, ev_t;
  logic [5:0] len;

  graph_gen #(.SIZE(SIZE)) dut (.*);

  always #2 clk = ~clk;

  initial begin
    finished = 0;
    checks   = 0;
    failures = 0;
  end
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
  function automatic void expect_edges(nev_t e, ref logic [3*CW-1:0] q [$]);
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
        if (dx*dx + dy*dy + (e.t-c)*(e.t-c) <= R*R) q.push_back({CW'(cx), CW'(cy), CW'(c)});
      end
  endfunction

  // ---------------- monitor ----------------
  logic [3*CW-1:0] got [$];
  longint last_done = -1, lat_single = -1;
  time    t_in_single = 0;
  bit     single_pending = 0;
  int drops_between = 0;
  bit backlog_at_last = 0;
  bit starved = 0;             // FIFO ran empty since the last done

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
    if (fifo_count == 0) starved = 1;
    for (int p = 0; p < 2; p++)
      if (edge_valid[p]) begin
        got.push_back(edge_data[p]);
        check(mq.size() > 0 && ev_x == CW'(mq[0].x) && ev_y == CW'(mq[0].y) && ev_t == CW'(mq[0].t),
              "edge event tag");
      end
    // an event's done can share a cycle with the next event's drop
    if (done) begin
      check(mq.size() > 0, "done with empty model queue");
      if (mq.size() > 0) begin
        nev_t e;
        logic [3*CW-1:0] exp_q [$];
        bit ok;
        e = mq.pop_front();
        check(nm[e.y*SIZE + e.x] != e.t, "duplicate not dropped");
        check(ev_x == CW'(e.x) && ev_y == CW'(e.y) && ev_t == CW'(e.t) && ev_p == 1'(e.p), "done event");
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
        if (last_done >= 0 && backlog_at_last && !starved) begin
          check(cyc - last_done == 26 + 2 * drops_between,
                $sformatf("period %0d with %0d drops", cyc - last_done, drops_between));
          n_period++;
        end
        last_done = cyc;
        backlog_at_last = (fifo_count >= 4);
        starved = 0;
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
  nev_t prev_n;
  int px = 100, py = 80;
  longint tcur = 0;

  task automatic send(int x, int y, longint t, bit p);
    in_valid = 1'b1; in_x = 16'(x); in_y = 16'(y); in_t = 32'(t); in_p = p;
    if (t - longint'(t_origin) >= longint'(WIN)) n_tsat++;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic drain();
    idle(4);
    while (busy || fifo_count != 0 || mq.size() != 0) idle(1);
    idle(4);
  endtask

  // one random event around a wandering cluster centre
  task automatic rand_event(bit allow_repeat);
    int x, y, r;
    r = int'($urandom_range(0, 99));
    if (allow_repeat && r < 10) begin
      send(int'(in_x), int'(in_y), longint'(in_t), in_p);   // exact repeat
      return;
    end
    if (r < 14) begin                                        // border pixels
      x = ($urandom_range(0, 1) != 0) ? int'($urandom_range(0, 3)) : int'($urandom_range(236, 239));
      y = int'($urandom_range(0, 179));
    end else begin
      if ($urandom_range(0, 30) == 0) begin
        px = int'($urandom_range(10, 229)); py = int'($urandom_range(10, 169));
      end
      x = px + int'($urandom_range(0, 6)) - 3;
      y = py + int'($urandom_range(0, 6)) - 3;
    end
    if (r >= 95 && tcur > 800) send(x, y, tcur - longint'($urandom_range(200, 800)), 1'($urandom)); // late
    else begin
      tcur += longint'($urandom_range(0, 20));
      send(x, y, tcur, 1'($urandom));
    end
  endtask

  initial begin
    model_clear();
    t_origin = 32'd1000;
    tcur = 1000;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // power-up clear of the matrix
    while (!clearing) @(negedge clk);
    while (clearing) @(negedge clk);
    n_clear++;
    idle(3);

    // latency of one event into an idle module
    t_in_single    = $time;
    single_pending = 1;
    send(120, 90, 1500, 1'b1);
    drain();
    check(lat_single == 30, $sformatf("idle latency %0d", lat_single));

    // sparse random traffic
    for (int i = 0; i < 1500; i++) begin
      rand_event(1'b1);
      idle(int'($urandom_range(0, 40)));
    end
    drain();

    // burst: every cycle, beyond the FIFO depth
    for (int i = 0; i < 3000; i++) rand_event(1'b1);
    drain();

    // time saturation: events after the window
    send(50, 50, longint'(t_origin) + longint'(WIN) + 10, 1'b0);
    send(51, 50, longint'(t_origin) + longint'(WIN) + 5000, 1'b0);
    drain();

    // new graph: clear the matrix, new window
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    while (!clearing) idle(1);
    while (clearing) idle(1);
    model_clear();
    n_clear++;
    t_origin = 32'd200000;
    tcur = 200000;
    for (int i = 0; i < 600; i++) begin
      rand_event(1'b1);
      idle(int'($urandom_range(0, 30)));
    end
    drain();

    $display("SIZE=%0d mechanisms: dup=%0d overflow=%0d backlog=%0d clear=%0d border=%0d newer=%0d tsat=%0d with_edges=%0d no_edges=%0d period=%0d", SIZE,
             n_dup, n_overflow, n_backlog, n_clear, n_border, n_newer, n_tsat, n_with_edges, n_no_edges, n_period);
    check(n_dup > 0, "no duplicate dropped");
    check(n_overflow > 0, "no FIFO overflow");
    check(n_backlog > 0, "no FIFO backlog");
    check(n_clear == 2, "clears");
    check(n_border > 0, "no border event");
    check(n_newer > 0, "no newer candidate");
    check(n_tsat > 0, "no time saturation");
    check(n_with_edges > 0, "no event with edges");
    check(n_no_edges > 0, "no event without edges");
    check(n_period > 0, "no back-to-back period measured");
    finished = 1'b1;
  end

endmodule
