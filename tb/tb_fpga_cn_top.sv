// tb_fpga_cn_top - end-to-end test of the FPGA node at its default
// parameters (128 x 128 sensor, 100 MHz clock, 1 ms process-data cycle).
//
// A behavioural camera sees a ball that crosses the sensor, plus random
// noise pixels and pixels on the sensor border; a behavioural POWERLINK
// module holds the configuration written by the "managing node". The run
// covers about 9 ms of node time. Checks:
//  - no event is read before the first configuration switches
//    acquisition on;
//  - every Player event leaving the filter equals the reference model fed
//    with the events the filter accepted (same order and time-stamps);
//  - every tracked position equals the reference tracker on those Player
//    events, and the position words in the module's memory equal the
//    latest position after each exchange;
//  - each mechanism happened at least once: border drop, Dlayer decay,
//    Dlayer and Alayer firing, neighbour firing, Dlayer stalled by the
//    Alayer, camera held back, tracker tie-break, configuration load.
module tb_fpga_cn_top;
  import ldsi_pkg::*;
  import ldsi_ref_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic cam_clk, cam_en, cam_valid, bus_req, bus_we, bus_ack, pos_valid;
  coord_t cam_x, cam_y, pos_x, pos_y;
  logic [10:0] bus_addr;
  logic [15:0] bus_wdata, bus_rdata;

  fpga_cn_top dut (.*);
  scd_camera_model cam (.cam_clk, .cam_en, .cam_valid, .cam_x, .cam_y);
  anybus_model mb (.clk, .bus_req, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .bus_ack);

  int checks = 0, failures = 0;
  ldsi_ref ref_m;
  int exp_q[$];
  int win_x[$], win_y[$], exp_pos[$];
  int n_in = 0, n_out = 0, n_pos = 0;
  int n_drop = 0, n_ddecay = 0, n_dfire = 0, n_afire = 0, n_anfire = 0, n_stall = 0,
      n_hold = 0, n_tie = 0, n_cfg = 0, n_xchg = 0;
  int last_x = 0, last_y = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Reference chain, fed from the filter's input handshake.
  always @(posedge clk) if (rst_n) begin
    if (dut.cam_ev_valid && dut.cam_ev_ready) begin
      n_in++;
      ref_m.filter(int'(dut.cam_ev.x), int'(dut.cam_ev.y), int'(dut.cam_ev.ts), exp_q);
    end
    if (dut.flt_ev_valid && dut.flt_ev_ready) begin
      int e, w, c;
      n_out++;
      if (exp_q.size() == 0) check(0, "unexpected Player event");
      else begin
        e = exp_q.pop_front();
        check(dut.flt_ev.x == coord_t'(e & 255) && dut.flt_ev.y == coord_t'((e >> 8) & 255) &&
              dut.flt_ev.ts == ts_t'(e >> 16),
              $sformatf("Player event (%0d,%0d,%0d) expected (%0d,%0d,%0d)", dut.flt_ev.x,
                        dut.flt_ev.y, dut.flt_ev.ts, e & 255, (e >> 8) & 255, e >> 16));
      end
      win_x.push_back(int'(dut.flt_ev.x)); win_y.push_back(int'(dut.flt_ev.y));
      if (win_x.size() == 20) begin
        int xs[], ys[];
        xs = new[20]; ys = new[20];
        foreach (xs[i]) begin xs[i] = win_x[i]; ys[i] = win_y[i]; end
        w = track(xs, ys, int'(dut.cfg.vic_r), c);
        exp_pos.push_back(xs[w] | (ys[w] << 8));
        win_x.delete(); win_y.delete();
      end
    end
    if (pos_valid) begin
      int e;
      n_pos++;
      if (exp_pos.size() == 0) check(0, "unexpected position");
      else begin
        e = exp_pos.pop_front();
        check(pos_x == coord_t'(e & 255) && pos_y == coord_t'(e >> 8),
              $sformatf("position (%0d,%0d) expected (%0d,%0d)", pos_x, pos_y, e & 255, e >> 8));
      end
      last_x = int'(pos_x); last_y = int'(pos_y);
    end
    if (dut.st_drop) n_drop++;
    if (dut.st_ddecay) n_ddecay++;
    if (dut.st_dfire) n_dfire++;
    if (dut.st_afire) n_afire++;
    if (dut.st_anfire) n_anfire++;
    if (dut.st_stall) n_stall++;
    if (dut.st_hold) n_hold++;
    if (dut.st_tie) n_tie++;
    if (dut.cfg_upd) n_cfg++;
  end

  // After each exchange the module holds the latest position.
  logic req_d = 0;
  always @(posedge clk) begin
    if (req_d && !bus_req) begin
      n_xchg++;
      check(int'(mb.mem[0]) == last_x && int'(mb.mem[1]) == last_y && int'(mb.mem[2]) == n_pos,
            $sformatf("position words %0d %0d %0d expected %0d %0d %0d", mb.mem[0], mb.mem[1],
                      mb.mem[2], last_x, last_y, n_pos));
    end
    req_d = bus_req;
  end

  // Managing node configuration: valid, acquisition on, DL=1, vicinity 3,
  // ERCO 3, ERCN 3, ERNC 1, TCE 6, TNE 8, DERP 2, DERC 2, MTR 1 ms.
  task automatic mn_config();
    mb.mn_write(12'h100, (1 << 15) | (1 << 14) | (1 << 4) | 3);
    mb.mn_write(12'h101, (3 << 12) | (3 << 8) | (1 << 4) | 6);
    mb.mn_write(12'h102, (8 << 12) | (2 << 8) | (2 << 4));
    mb.mn_write(12'h103, 1);
    ref_m.erco = 3; ref_m.ercn = 3; ref_m.ernc = 1; ref_m.tce = 6; ref_m.tne = 8;
    ref_m.derp = 2; ref_m.derc = 2; ref_m.mtr = 1; ref_m.dl = 1;
  endtask

  initial begin
    real bx, by;
    ref_m = new(128, 128);
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    mn_config();
    // Events are queued before acquisition is enabled: none may be read.
    for (int i = 0; i < 30; i++) cam.push($urandom_range(1, 126), $urandom_range(1, 126));
    repeat (90000) @(posedge clk);
    check(cam.n_read == 0 && !cam_en, "no readout before the configuration");
    wait (dut.cfg.acq_en);
    // The ball: 80 batches, one every 0.1 ms, moving diagonally.
    for (int b = 0; b < 80; b++) begin
      bx = 20.0 + b * 1.1; by = 30.0 + b * 0.8;
      for (int i = 0; i < 40; i++)
        cam.push(int'(bx) + $urandom_range(0, 4), int'(by) + $urandom_range(0, 4));
      for (int i = 0; i < 4; i++) cam.push($urandom_range(0, 127), $urandom_range(0, 127));
      cam.push(0, $urandom_range(0, 127));          // border pixel
      // pause the ball for 2 ms once so that units forget
      repeat ((b == 40) ? 200000 : 10000) @(posedge clk);
    end
    repeat (110000) @(posedge clk);
    check(exp_q.size() == 0, "all Player events seen");
    check(exp_pos.size() == 0, "all positions seen");
    check(n_pos >= 5, $sformatf("%0d positions", n_pos));
    check(n_drop > 0, "border drop");
    check(n_ddecay > 0, "Dlayer decay");
    check(n_dfire > 0, "Dlayer firing");
    check(n_afire > 0, "Alayer firing");
    check(n_anfire > 0, "neighbour firing");
    check(n_stall > 0, "Dlayer stalled by Alayer");
    check(n_hold > 0, "camera readout held");
    check(n_tie > 0, "tracker tie-break");
    check(n_cfg > 0, "configuration load");
    $display("INFO in=%0d player=%0d positions=%0d drops=%0d ddecay=%0d dfire=%0d afire=%0d anfire=%0d stall=%0d hold=%0d tie=%0d cfg=%0d exchanges=%0d",
             n_in, n_out, n_pos, n_drop, n_ddecay, n_dfire, n_afire, n_anfire, n_stall, n_hold,
             n_tie, n_cfg, n_xchg);
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
