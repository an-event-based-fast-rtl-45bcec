// tb_pl_process_data - self-checking test of the process-data exchange
// against a behavioural model of the POWERLINK module's memory. The test
// plays the managing node: it writes configuration words and reads the
// position words. Checks: the exchange repeats every UPDATE_CYCLES clocks;
// the position words hold the latest position and the count of positions;
// a configuration with the valid bit loads every field of cfg_o; one
// without it leaves cfg_o unchanged; the reset value is the default with
// acquisition off.
module tb_pl_process_data;
  import ldsi_pkg::*;

  localparam int UPD = 200;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic pos_valid, cfg_upd, bus_req, bus_we, bus_ack;
  coord_t pos_x, pos_y;
  node_cfg_t cfg_o;
  logic [10:0] bus_addr;
  logic [15:0] bus_wdata, bus_rdata;

  pl_process_data #(.UPDATE_CYCLES(UPD)) dut (.*);
  anybus_model mb (.clk, .bus_req, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .bus_ack);

  int checks = 0, failures = 0;
  int n_upd = 0, cyc = 0, last_start = -1;
  logic req_prev = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (cfg_upd) n_upd++;
    if (bus_req && !req_prev) begin
      if (last_start >= 0) check(cyc - last_start == UPD, $sformatf("exchange period %0d", cyc - last_start));
      last_start = cyc;
    end
    req_prev = bus_req;
  end

  task automatic mn_config(int valid, int acq, int dl, int vr, int erco, int ercn, int ernc,
                           int tce, int tne, int derp, int derc, int mtr);
    mb.mn_write(12'h100, (valid << 15) | (acq << 14) | (dl << 4) | vr);
    mb.mn_write(12'h101, (erco << 12) | (ercn << 8) | (ernc << 4) | tce);
    mb.mn_write(12'h102, (tne << 12) | (derp << 8) | (derc << 4));
    mb.mn_write(12'h103, mtr);
  endtask

  task automatic wait_exchange();
    // wait for the end of the next exchange
    @(posedge clk); while (!bus_req) @(posedge clk);
    while (bus_req) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    int px, py, seq;
    node_cfg_t c0;
    pos_valid = 0; pos_x = 0; pos_y = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(cfg_o == NODE_CFG_DEFAULT && !cfg_o.acq_en, "reset configuration");
    seq = 0;
    for (int t = 0; t < 20; t++) begin
      int v, a, dl, vr, e[7], mtr;
      v = (t % 4 != 3); a = $urandom_range(0, 1); dl = $urandom_range(0, 7); vr = $urandom_range(0, 15);
      foreach (e[i]) e[i] = $urandom_range(0, 15);
      mtr = $urandom_range(0, 65535);
      mn_config(v, a, dl, vr, e[0], e[1], e[2], e[3], e[4], e[5], e[6], mtr);
      for (int k = 0; k < $urandom_range(1, 4); k++) begin
        @(negedge clk);
        px = $urandom_range(0, 125); py = $urandom_range(0, 125);
        pos_x = coord_t'(px); pos_y = coord_t'(py); pos_valid = 1;
        @(negedge clk) pos_valid = 0;
        seq++;
      end
      c0 = cfg_o;
      wait_exchange();
      check(mb.mem[0] == 16'(px) && mb.mem[1] == 16'(py) && mb.mem[2] == 16'(seq),
            $sformatf("position words %0d %0d %0d expected %0d %0d %0d", mb.mem[0], mb.mem[1], mb.mem[2], px, py, seq));
      if (v) begin
        check(cfg_o.acq_en == 1'(a) && cfg_o.ldsi.dl == DL_W'(dl) && cfg_o.vic_r == VR_W'(vr) &&
              cfg_o.ldsi.erco == par_t'(e[0]) && cfg_o.ldsi.ercn == par_t'(e[1]) &&
              cfg_o.ldsi.ernc == par_t'(e[2]) && cfg_o.ldsi.tce == par_t'(e[3]) &&
              cfg_o.ldsi.tne == par_t'(e[4]) && cfg_o.ldsi.derp == par_t'(e[5]) &&
              cfg_o.ldsi.derc == par_t'(e[6]) && cfg_o.ldsi.mtr == ts_t'(mtr),
              "configuration loaded");
      end else begin
        check(cfg_o == c0, "configuration without valid bit ignored");
      end
    end
    check(n_upd == 15, $sformatf("%0d configuration loads, expected 15", n_upd));
    check(mb.n_wr == 3 * 20 && mb.n_rd == 4 * 20, $sformatf("bus transfers %0d/%0d", mb.n_wr, mb.n_rd));
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
