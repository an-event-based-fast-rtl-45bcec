// tb_ldsi_filter_levels - the LDSI filter at full size (128 x 128 sensor,
// default parameters of the module) run on one scene with three parameter
// sets: low, medium and high filtering.
//
// The scene is 3000 events over one second of time-stamps: a ball, 5 x 5
// pixels, that crosses the sensor diagonally, and about 20 % of events as
// uniform random noise over the whole sensor. The same scene, generated
// once, is replayed for each level after a reset of the filter.
//
// Checks, per level: every output event equals the reference model's, in
// order; the filter ends idle. Across levels: fewer output events, and fewer
// output events away from the ball, the stricter the level; the medium level
// at least halves the event count; the ball still gets through at the high
// level. The low level may emit more events than it receives, since one
// Dlayer event can make a whole neighbourhood of Alayer units fire.
//
// The three parameter sets are this testbench's own. Only the parameter
// ranges are the published ones: excitations, thresholds and decays between
// 0 and 10, and an MTR around 500 ms (shortened at the high level, which
// makes the filter stricter). The medium set is the node's reset default.
module tb_ldsi_filter_levels;
  import ldsi_pkg::*;
  import ldsi_ref_pkg::*;

  localparam int M = 128, N = 128, NEV = 3000;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  ldsi_cfg_t cfg;
  event_t ev_i, ev_o;
  logic ev_i_valid, ev_i_ready, ev_o_valid, ev_o_ready, init_done;
  logic st_drop, st_ddecay, st_dfire, st_adecay, st_afire, st_anfire, st_stall;

  ldsi_filter dut (.*);

  int checks = 0, failures = 0;
  int exp_q[$];
  int n_out, n_far;
  int sx[NEV], sy[NEV], sts[NEV];
  ldsi_ref ref_m;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ball centre in Dlayer/Alayer coordinates at a given time-stamp
  function automatic int ball_x(int ts); return 10 + (3 * ts) / 30 - 1; endfunction
  function automatic int ball_y(int ts); return 20 + (3 * ts) / 40 - 1; endfunction

  always @(posedge clk) if (rst_n) begin
    if (ev_o_valid && ev_o_ready) begin
      int e, dx, dy;
      n_out++;
      dx = int'(ev_o.x) - ball_x(int'(ev_o.ts));
      dy = int'(ev_o.y) - ball_y(int'(ev_o.ts));
      if (dx > 5 || dx < -5 || dy > 5 || dy < -5) n_far++;
      if (exp_q.size() == 0) check(0, "unexpected output event");
      else begin
        e = exp_q.pop_front();
        check(ev_o.x == coord_t'(e & 255) && ev_o.y == coord_t'((e >> 8) & 255) &&
              ev_o.ts == ts_t'(e >> 16),
              $sformatf("event (%0d,%0d,%0d) expected (%0d,%0d,%0d)", ev_o.x, ev_o.y, ev_o.ts,
                        e & 255, (e >> 8) & 255, e >> 16));
      end
    end
  end

  always @(posedge clk) ev_o_ready <= ($urandom_range(0, 3) != 0);

  task automatic send(int x, int y, int ts);
    @(negedge clk);
    ev_i = '{x: coord_t'(x), y: coord_t'(y), ts: ts_t'(ts)};
    ev_i_valid = 1'b1;
    while (!ev_i_ready) @(negedge clk);
    @(posedge clk);
    ref_m.filter(x, y, ts, exp_q);
  endtask

  task automatic run_level(string name, ldsi_cfg_t c, output int out, output int far);
    ref_m = new(M, N);
    ref_m.erco = int'(c.erco); ref_m.ercn = int'(c.ercn); ref_m.ernc = int'(c.ernc);
    ref_m.tce = int'(c.tce); ref_m.tne = int'(c.tne); ref_m.derp = int'(c.derp);
    ref_m.derc = int'(c.derc); ref_m.mtr = int'(c.mtr); ref_m.dl = int'(c.dl);
    cfg = c;
    n_out = 0; n_far = 0;
    @(negedge clk);
    ev_i_valid = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    for (int k = 0; k < NEV; k++) send(sx[k], sy[k], sts[k]);
    @(negedge clk) ev_i_valid = 0;
    repeat (200) @(posedge clk);
    check(exp_q.size() == 0, {name, ": all expected events seen"});
    exp_q.delete();
    out = n_out; far = n_far;
    $display("INFO level %s: in=%0d out=%0d away-from-ball=%0d", name, NEV, out, far);
  endtask

  initial begin
    int out[3], far[3];
    ldsi_cfg_t lv[3];
    // low, medium (reset default), high
    lv[0] = '{erco: 4'd4, ercn: 4'd4, ernc: 4'd2, tce: 4'd4, tne: 4'd4,
              derp: 4'd1, derc: 4'd1, mtr: 16'd500, dl: 3'd1};
    lv[1] = LDSI_CFG_DEFAULT;
    lv[2] = '{erco: 4'd2, ercn: 4'd2, ernc: 4'd1, tce: 4'd8, tne: 4'd8,
              derp: 4'd2, derc: 4'd2, mtr: 16'd100, dl: 3'd1};
    // the scene: ball 5 x 5 sensor pixels around (ball_x+1, ball_y+1), plus noise
    for (int k = 0; k < NEV; k++) begin
      sts[k] = k / 3;
      if ($urandom_range(0, 9) < 8) begin
        sx[k] = 10 + k / 30 + $urandom_range(0, 4) - 2;
        sy[k] = 20 + k / 40 + $urandom_range(0, 4) - 2;
      end else begin
        sx[k] = $urandom_range(0, M - 1);
        sy[k] = $urandom_range(0, N - 1);
      end
    end
    ev_i = '0; ev_i_valid = 0; cfg = LDSI_CFG_DEFAULT;
    #1 rst_n = 0;
    #20;
    run_level("low", lv[0], out[0], far[0]);
    run_level("medium", lv[1], out[1], far[1]);
    run_level("high", lv[2], out[2], far[2]);
    check(out[0] > out[1] && out[1] > out[2],
          $sformatf("output count falls with level: %0d %0d %0d", out[0], out[1], out[2]));
    check(far[0] > far[1] && far[1] >= far[2],
          $sformatf("noise output falls with level: %0d %0d %0d", far[0], far[1], far[2]));
    check(out[2] - far[2] > 50, $sformatf("ball passes the high level: %0d", out[2] - far[2]));
    check(out[1] < NEV / 2, $sformatf("medium level halves the event count: %0d", out[1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
