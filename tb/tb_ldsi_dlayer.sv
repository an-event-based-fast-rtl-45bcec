// tb_ldsi_dlayer - self-checking test of the Dlayer on a 12 x 12 sensor.
// Random sensor events (border pixels included, time advancing so that the
// forgetting time MTR is both exceeded and not) are applied under random
// output back-pressure. Every Dlayer output event is compared, in order,
// with the reference model; the drop/decay/fire pulses are counted
// against the model's counts; the rate of one event per 2 clocks is
// checked on a burst that does not fire.
module tb_ldsi_dlayer;
  import ldsi_pkg::*;
  import ldsi_ref_pkg::*;

  localparam int M = 12, N = 12;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  ldsi_cfg_t cfg;
  event_t ev_i, ev_o;
  logic ev_i_valid, ev_i_ready, ev_o_valid, ev_o_ready, init_done;
  logic st_drop, st_decay, st_fire;

  ldsi_dlayer #(.M(M), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  int exp_q[$];
  int n_drop = 0, n_decay = 0, n_fire = 0;
  ldsi_ref ref_m;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Output monitor.
  always @(posedge clk) if (rst_n) begin
    if (st_drop) n_drop++;
    if (st_decay) n_decay++;
    if (st_fire) n_fire++;
    if (ev_o_valid && ev_o_ready) begin
      int e;
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
    int ux, uy;
    @(negedge clk);
    ev_i = '{x: coord_t'(x), y: coord_t'(y), ts: ts_t'(ts)};
    ev_i_valid = 1'b1;
    while (!ev_i_ready) @(negedge clk);
    @(posedge clk);
    if (ref_m.dlayer(x, y, ts, ux, uy)) exp_q.push_back(ux | (uy << 8) | ((ts & 32'hFFFF) << 16));
  endtask

  task automatic pause();
    @(negedge clk);
    ev_i_valid = 1'b0;
  endtask

  initial begin
    int ts, t0, t1;
    ref_m = new(M, N);
    cfg = LDSI_CFG_DEFAULT;
    cfg.erco = 4'd2; cfg.tce = 4'd5; cfg.derp = 4'd1; cfg.mtr = 16'd20;
    ref_m.erco = 2; ref_m.tce = 5; ref_m.derp = 1; ref_m.mtr = 20;
    ev_i = '0; ev_i_valid = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(posedge clk);
    ts = 65000;   // crosses the 16-bit wrap
    for (int k = 0; k < 3000; k++) begin
      ts += $urandom_range(0, 6);
      send($urandom_range(0, M - 1), $urandom_range(0, N - 1), ts);
      if ($urandom_range(0, 3) == 0) pause();
    end
    // Rate: 10 events to one pixel with a high threshold never fire.
    pause();
    cfg.tce = 4'd15; cfg.erco = 4'd0; ref_m.tce = 15; ref_m.erco = 0;
    repeat (20) @(posedge clk);
    @(negedge clk);
    t0 = int'($time / 10);
    for (int k = 0; k < 10; k++) send(3, 3, ts);
    pause();
    t1 = int'($time / 10);
    check(t1 - t0 == 20, $sformatf("10 events took %0d clocks, expected 20", t1 - t0));
    repeat (50) @(posedge clk);
    check(exp_q.size() == 0, "all expected events seen");
    check(n_drop == ref_m.n_drop, $sformatf("drops %0d vs %0d", n_drop, ref_m.n_drop));
    check(n_decay == ref_m.n_decay_d, $sformatf("decays %0d vs %0d", n_decay, ref_m.n_decay_d));
    check(n_fire == ref_m.n_fire_d && n_fire > 50, $sformatf("fires %0d vs %0d", n_fire, ref_m.n_fire_d));
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
