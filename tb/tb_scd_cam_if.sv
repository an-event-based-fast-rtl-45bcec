// tb_scd_cam_if - self-checking test of the camera readout. A behavioural
// camera holds 400 events; the consumer's ready has random gaps and long
// stalls. Checks: every event arrives once and in order; each event's
// time-stamp is the millisecond count at the cam_clk rising edge that read
// it; ts_now steps once per CLK_PER_MS clocks; cam_clk's high phase is
// CLK_DIV clocks; no readout edge while an event waits; acquisition off
// stops the readout.
module tb_scd_cam_if;
  import ldsi_pkg::*;

  localparam int CLK_DIV = 3, CLK_PER_MS = 50, NEV = 400;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic acq_en, cam_clk, cam_en, cam_valid, ev_o_valid, ev_o_ready, st_hold;
  coord_t cam_x, cam_y;
  event_t ev_o;
  ts_t ts_now;

  scd_cam_if #(.CLK_DIV(CLK_DIV), .CLK_PER_MS(CLK_PER_MS)) dut (.*);
  scd_camera_model cam (.cam_clk, .cam_en, .cam_valid, .cam_x, .cam_y);

  int checks = 0, failures = 0;
  int sent[$], exp_ts[$];
  int n_got = 0, n_hold = 0, cyc = 0, hi_len = 0;
  logic clk_prev = 0, valid_prev = 0, stall_prev = 0;
  ts_t ts_prev = '0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    // ms time base
    cyc++;
    if (cyc % 7 == 0)
      check(int'(ts_now) == (cyc - 1) / CLK_PER_MS, $sformatf("ts_now %0d at clock %0d", ts_now, cyc - 1));
    // readout edges
    if (!clk_prev && cam_clk) begin
      if (valid_prev) exp_ts.push_back(int'(ts_prev));
      if (stall_prev) check(0, "readout edge while an event was waiting");
    end
    if (cam_clk) hi_len++;
    else if (hi_len != 0) begin
      check(hi_len == CLK_DIV, $sformatf("cam_clk high for %0d clocks", hi_len));
      hi_len = 0;
    end
    clk_prev = cam_clk; valid_prev = cam_valid; ts_prev = ts_now;
    stall_prev = ev_o_valid && !ev_o_ready;
    if (st_hold) n_hold++;
    if (ev_o_valid && ev_o_ready) begin
      int e, t;
      e = sent.pop_front();
      t = exp_ts.pop_front();
      check(ev_o.x == coord_t'(e & 255) && ev_o.y == coord_t'(e >> 8) && int'(ev_o.ts) == t,
            $sformatf("event (%0d,%0d,%0d) expected (%0d,%0d,%0d)", ev_o.x, ev_o.y, ev_o.ts,
                      e & 255, e >> 8, t));
      n_got++;
    end
  end

  int mode = 0;
  always @(negedge clk) begin
    if (mode == 0) ev_o_ready = ($urandom_range(0, 3) != 0);
    else ev_o_ready = 1'b0;
  end

  initial begin
    int x, y, r0;
    acq_en = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < NEV; i++) begin
      x = $urandom_range(0, 127); y = $urandom_range(0, 127);
      cam.push(x, y); sent.push_back(x | (y << 8));
    end
    repeat (50) @(negedge clk);
    check(cam.n_read == 0 && !ev_o_valid, "no readout while acquisition is off");
    acq_en = 1;
    repeat (1500) @(negedge clk);
    mode = 1;                               // long stall of the consumer
    repeat (200) @(negedge clk);
    r0 = cam.n_read;
    repeat (200) @(negedge clk);
    check(cam.n_read == r0, "camera is not read while the consumer stalls");
    mode = 0;
    while (n_got < NEV) @(negedge clk);
    acq_en = 0;
    repeat (20) @(negedge clk);
    check(n_got == NEV && cam.n_read == NEV, $sformatf("%0d of %0d events", n_got, NEV));
    check(n_hold > 0, "readout clock held back at least once");
    check(!cam_en, "cam_en follows acquisition enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
