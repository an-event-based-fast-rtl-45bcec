// tb_ldsi_filter - end-to-end test of the LDSI filter on a 16 x 16 sensor.
// The input mixes a dense blob that moves across the sensor with sparse
// random noise. Every output (Player) event is compared in order with the
// reference model chained Dlayer -> Alayer. The test also checks that the
// filter passes the blob and removes most of the noise, and that the
// Dlayer was stalled by a busy Alayer at least once.
module tb_ldsi_filter;
  import ldsi_pkg::*;
  import ldsi_ref_pkg::*;

  localparam int M = 16, N = 16;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  ldsi_cfg_t cfg;
  event_t ev_i, ev_o;
  logic ev_i_valid, ev_i_ready, ev_o_valid, ev_o_ready, init_done;
  logic st_drop, st_ddecay, st_dfire, st_adecay, st_afire, st_anfire, st_stall;

  ldsi_filter #(.M(M), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  int exp_q[$];
  int n_stall = 0, n_out = 0, n_out_noise = 0, n_in_noise = 0;
  ldsi_ref ref_m;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (st_stall) n_stall++;
    if (ev_o_valid && ev_o_ready) begin
      int e;
      n_out++;
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

  always @(posedge clk) ev_o_ready <= ($urandom_range(0, 7) != 0);

  task automatic send(int x, int y, int ts);
    @(negedge clk);
    ev_i = '{x: coord_t'(x), y: coord_t'(y), ts: ts_t'(ts)};
    ev_i_valid = 1'b1;
    while (!ev_i_ready) @(negedge clk);
    @(posedge clk);
    ref_m.filter(x, y, ts, exp_q);
  endtask

  initial begin
    int ts, bx, by;
    ref_m = new(M, N);
    cfg = '{erco: 4'd3, ercn: 4'd3, ernc: 4'd1, tce: 4'd6, tne: 4'd8,
            derp: 4'd2, derc: 4'd2, mtr: 16'd8, dl: 3'd1};
    ref_m.erco = 3; ref_m.ercn = 3; ref_m.ernc = 1; ref_m.tce = 6; ref_m.tne = 8;
    ref_m.derp = 2; ref_m.derc = 2; ref_m.mtr = 8; ref_m.dl = 1;
    ev_i = '0; ev_i_valid = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    ts = 0;
    for (int k = 0; k < 4000; k++) begin
      if (k % 4 == 0) ts++;
      bx = 3 + (k / 400); by = 4 + (k / 600);
      if ($urandom_range(0, 9) < 8) begin
        send(bx + $urandom_range(0, 2), by + $urandom_range(0, 2), ts);
      end else begin
        n_in_noise++;
        send($urandom_range(0, M - 1), $urandom_range(0, N - 1), ts + 30 * $urandom_range(0, 1));
      end
    end
    @(negedge clk) ev_i_valid = 0;
    repeat (100) @(posedge clk);
    check(exp_q.size() == 0, "all expected events seen");
    check(n_out > 100, $sformatf("blob passes: %0d output events", n_out));
    check(n_out < 4000, "filter reduces the event count");
    check(n_stall > 0, $sformatf("Dlayer stalled by Alayer %0d times", n_stall));
    $display("INFO in=4000 out=%0d stalls=%0d", n_out, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
