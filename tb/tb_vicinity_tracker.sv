// tb_vicinity_tracker - self-checking test of the tracker. Windows of 20
// events (a cluster plus scattered outliers, with random vicinity radius)
// are fed with random gaps; each result is compared with the reference
// winner and its neighbour count. Windows with deliberate ties check that
// the later event wins. The time from the 20th event to pos_valid is
// checked to be WIN + 1 clocks.
module tb_vicinity_tracker;
  import ldsi_pkg::*;
  import ldsi_ref_pkg::*;

  localparam int WIN = 20;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic [VR_W-1:0] vic_r;
  event_t ev_i;
  logic ev_i_valid, ev_i_ready, pos_valid, st_tie;
  coord_t pos_x, pos_y;
  ts_t pos_ts;
  logic [$clog2(WIN):0] pos_cnt;

  vicinity_tracker #(.WIN(WIN)) dut (.*);

  int checks = 0, failures = 0, n_tie = 0, n_res = 0;
  int lat;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (st_tie) n_tie++;
  always @(posedge clk) if (pos_valid) n_res++;

  task automatic send(int x, int y, int ts);
    @(negedge clk);
    ev_i = '{x: coord_t'(x), y: coord_t'(y), ts: ts_t'(ts)};
    ev_i_valid = 1'b1;
    while (!ev_i_ready) @(negedge clk);
    @(posedge clk);
  endtask

  task automatic run_window(int xs[], int ys[], int r);
    int w, c;
    @(negedge clk) vic_r = VR_W'(r);
    for (int i = 0; i < WIN; i++) begin
      send(xs[i], ys[i], 1000 + i);
      if (i < WIN - 1 && $urandom_range(0, 2) == 0) begin
        @(negedge clk) ev_i_valid = 0;
      end
    end
    @(negedge clk) ev_i_valid = 0;
    lat = 0;
    while (!pos_valid) begin @(posedge clk); lat++; end
    w = track(xs, ys, r, c);
    check(pos_x == coord_t'(xs[w]) && pos_y == coord_t'(ys[w]) && pos_ts == ts_t'(1000 + w),
          $sformatf("position (%0d,%0d) expected (%0d,%0d)", pos_x, pos_y, xs[w], ys[w]));
    check(int'(pos_cnt) == c, $sformatf("count %0d expected %0d", pos_cnt, c));
    check(lat == WIN + 1, $sformatf("result %0d clocks after the last event, expected %0d", lat, WIN + 1));
  endtask

  initial begin
    int xs[], ys[];
    int cx, cy;
    xs = new[WIN]; ys = new[WIN];
    ev_i = '0; ev_i_valid = 0; vic_r = 3;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int t = 0; t < 200; t++) begin
      cx = $urandom_range(5, 120); cy = $urandom_range(5, 120);
      for (int i = 0; i < WIN; i++) begin
        if ($urandom_range(0, 3) == 0) begin
          xs[i] = $urandom_range(0, 125); ys[i] = $urandom_range(0, 125);
        end else begin
          xs[i] = cx + $urandom_range(0, 8) - 4; ys[i] = cy + $urandom_range(0, 8) - 4;
        end
      end
      run_window(xs, ys, $urandom_range(0, 6));
    end
    // Ties: all events far apart, count 0 everywhere: the last one wins.
    for (int i = 0; i < WIN; i++) begin xs[i] = 6 * i; ys[i] = 120 - 6 * i; end
    run_window(xs, ys, 2);
    check(pos_x == coord_t'(6 * (WIN - 1)), "all-equal window: latest event wins");
    // Two equal clusters: the later cluster wins.
    for (int i = 0; i < WIN; i++) begin
      xs[i] = (i < WIN / 2) ? 10 + (i % 2) : 90 + (i % 2); ys[i] = 50;
    end
    run_window(xs, ys, 2);
    check(pos_x >= 90, "two equal clusters: later cluster wins");
    @(posedge clk);
    check(n_tie > 0, $sformatf("tie-break used %0d times", n_tie));
    check(n_res == 202, $sformatf("%0d results for 202 windows", n_res));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
