// tb_ldsi_alayer - self-checking test of the Alayer on a 12 x 12 sensor
// (10 x 10 units). Random Dlayer events, including events at the layer's
// edges, are applied with depth levels 0..3 and random output
// back-pressure. Output events are compared in order with the reference
// model; decay, firing and neighbour-firing pulses are counted against it;
// the time for one DL = 1 event in the middle of the layer (9 units, none
// firing) is checked to be 2 clocks per unit.
module tb_ldsi_alayer;
  import ldsi_pkg::*;
  import ldsi_ref_pkg::*;

  localparam int M = 12, N = 12;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  ldsi_cfg_t cfg;
  event_t ev_i, ev_o;
  logic ev_i_valid, ev_i_ready, ev_o_valid, ev_o_ready, init_done;
  logic st_decay, st_fire, st_nfire;

  ldsi_alayer #(.M(M), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  int exp_q[$];
  int n_decay = 0, n_fire = 0, n_nfire = 0;
  ldsi_ref ref_m;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (st_decay) n_decay++;
    if (st_fire) n_fire++;
    if (st_nfire) n_nfire++;
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

  int busy_cnt = 0;
  always @(posedge clk) if (!ev_i_ready) busy_cnt++;
  always @(posedge clk) ev_o_ready <= ($urandom_range(0, 3) != 0);

  task automatic send(int x, int y, int ts);
    @(negedge clk);
    ev_i = '{x: coord_t'(x), y: coord_t'(y), ts: ts_t'(ts)};
    ev_i_valid = 1'b1;
    while (!ev_i_ready) @(negedge clk);
    @(posedge clk);
    ref_m.alayer(x, y, ts, exp_q);
  endtask

  task automatic pause();
    @(negedge clk);
    ev_i_valid = 1'b0;
  endtask

  task automatic set_cfg(int ercn, int ernc, int tne, int derc, int mtr, int dl);
    cfg.ercn = par_t'(ercn); cfg.ernc = par_t'(ernc); cfg.tne = par_t'(tne);
    cfg.derc = par_t'(derc); cfg.mtr = ts_t'(mtr); cfg.dl = DL_W'(dl);
    ref_m.ercn = ercn; ref_m.ernc = ernc; ref_m.tne = tne; ref_m.derc = derc;
    ref_m.mtr = mtr; ref_m.dl = dl;
  endtask

  initial begin
    int ts;
    ref_m = new(M, N);
    cfg = LDSI_CFG_DEFAULT;
    ev_i = '0; ev_i_valid = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    ts = 100;
    for (int k = 0; k < 2000; k++) begin
      if (k % 250 == 0) begin
        pause();
        while (!ev_i_ready) @(negedge clk);   // change parameters between events only
        set_cfg($urandom_range(1, 6), $urandom_range(0, 4), $urandom_range(3, 10),
                $urandom_range(0, 3), $urandom_range(5, 30), (k / 250) % 4);
      end
      ts += $urandom_range(0, 5);
      send($urandom_range(0, M - 3), $urandom_range(0, N - 3), ts);
      if ($urandom_range(0, 3) == 0) pause();
    end
    pause();
    while (!ev_i_ready) @(negedge clk);
    // Timing: DL=1 in the middle, nothing fires -> 9 units x 2 clocks.
    set_cfg(0, 0, 15, 0, 1000, 1);
    repeat (200) @(posedge clk);   // let the last output events drain
    @(negedge clk);
    busy_cnt = 0;
    send(5, 5, ts);
    pause();
    while (!ev_i_ready) @(negedge clk);
    check(busy_cnt == 18, $sformatf("DL=1 event kept the layer busy %0d clocks, expected 9 x 2", busy_cnt));
    repeat (50) @(posedge clk);
    check(exp_q.size() == 0, "all expected events seen");
    check(n_decay == ref_m.n_decay_a && n_decay > 10, $sformatf("decays %0d vs %0d", n_decay, ref_m.n_decay_a));
    check(n_fire == ref_m.n_fire_a && n_fire > 50, $sformatf("fires %0d vs %0d", n_fire, ref_m.n_fire_a));
    check(n_nfire == ref_m.n_nfire_a && n_nfire > 10, $sformatf("neighbour fires %0d vs %0d", n_nfire, ref_m.n_nfire_a));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
