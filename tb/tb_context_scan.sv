// tb_context_scan -- checks the read schedule of the 7x7 context.
//
// For event positions in the interior, on the edges and in the corners of the
// 256 x 256 matrix, the 25 read cycles are stepped through. Checked: cycle 0
// port A reads the event's own cell; over the cycles every cell of the window
// other than the centre is read exactly once as a candidate (48 in total);
// the in-matrix flag is right for each; no read is issued after the last
// candidate; addresses are {y, x}.
module tb_context_scan;

  localparam int R = 3, S = 256, NCYC = 25;

  logic [4:0] cyc;
  logic [7:0] cx, cy;
  logic [1:0] rd_en, inb;
  logic is_center;
  logic [7:0] cand_x [2];
  logic [7:0] cand_y [2];
  logic [15:0] addr [2];

  context_scan dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic scan_one(int x, int y);
    int seen [int];
    int n_reads;
    cx = 8'(x); cy = 8'(y);
    n_reads = 0;
    for (int c = 0; c < NCYC; c++) begin
      cyc = 5'(c);
      #1;
      for (int p = 0; p < 2; p++) begin
        int slot;
        slot = 2 * c + p;
        check(rd_en[p] == (slot <= 48), $sformatf("rd_en slot %0d", slot));
        if (slot == 0) begin
          check(is_center && addr[0] == {8'(y), 8'(x)} && !inb[0], "centre read");
        end else if (slot <= 48) begin
          int dx, dy, key;
          bit in_m;
          dx = int'(cand_x[p]) - x; dy = int'(cand_y[p]) - y;
          // undo the 8-bit wrap of out-of-matrix candidates
          if (dx > 128) dx -= 256; if (dx < -128) dx += 256;
          if (dy > 128) dy -= 256; if (dy < -128) dy += 256;
          check(dx >= -R && dx <= R && dy >= -R && dy <= R && !(dx == 0 && dy == 0),
                $sformatf("offset (%0d,%0d)", dx, dy));
          key = (dy + R) * 7 + (dx + R);
          check(!seen.exists(key), "candidate read twice");
          seen[key] = 1;
          in_m = (x + dx >= 0) && (x + dx < S) && (y + dy >= 0) && (y + dy < S);
          check(inb[p] == in_m, $sformatf("inb at (%0d,%0d)+(%0d,%0d)", x, y, dx, dy));
          check(addr[p] == {cand_y[p], cand_x[p]}, "address");
          n_reads++;
        end else begin
          check(!inb[p], "no candidate after the last");
        end
      end
      if (c > 0) check(!is_center, "centre only in cycle 0");
    end
    check(n_reads == 48 && seen.num() == 48, $sformatf("48 candidates, got %0d", seen.num()));
  endtask

  initial begin
    int pts [10][2] = '{'{0,0}, '{255,255}, '{0,255}, '{255,0}, '{1,2}, '{253,128},
                        '{128,2}, '{100,100}, '{3,3}, '{252,252}};
    foreach (pts[i]) scan_one(pts[i][0], pts[i][1]);
    for (int i = 0; i < 300; i++) scan_one(int'($urandom_range(0, 255)), int'($urandom_range(0, 255)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
