// ldsi_ref_pkg - reference model of the LDSI filter and of the vicinity
// tracker for the testbenches. It is written from the algorithm
// description with plain integers, independently of the RTL: per unit a
// potential and a last time-stamp; on an event the potential loses the
// decay step if more than MTR ms passed (16-bit wrapping time), gains the
// excitation, saturates at 31, and fires and restarts at 0 on reaching the
// threshold.
package ldsi_ref_pkg;

  class ldsi_ref;
    int W, H;
    int dpot[], dlt[], apot[], alt[];
    int erco, ercn, ernc, tce, tne, derp, derc, mtr, dl;
    int n_decay_d, n_decay_a, n_fire_d, n_fire_a, n_nfire_a, n_drop;

    function new(int m, int n);
      W = m - 2; H = n - 2;
      dpot = new[W*H]; dlt = new[W*H]; apot = new[W*H]; alt = new[W*H];
      foreach (dpot[i]) begin dpot[i] = 0; dlt[i] = 0; apot[i] = 0; alt[i] = 0; end
      erco = 3; ercn = 3; ernc = 1; tce = 6; tne = 6; derp = 1; derc = 1; mtr = 500; dl = 1;
      n_decay_d = 0; n_decay_a = 0; n_fire_d = 0; n_fire_a = 0; n_nfire_a = 0; n_drop = 0;
    endfunction

    // One unit step; returns {decayed, fired} in bits 1 and 0.
    static function int step(inout int pot, inout int lt, input int at, input int mtr_v,
                             input int dec, input int inc, input int thr);
      int dt, r;
      r  = 0;
      dt = (at - lt) & 32'hFFFF;
      if (dt > mtr_v) begin
        pot = pot - dec; if (pot < 0) pot = 0; r |= 2;
      end
      pot = pot + inc; if (pot > 31) pot = 31;
      if (pot >= thr) begin pot = 0; r |= 1; end
      lt = at;
      return r;
    endfunction

    // Dlayer: sensor pixel (x,y). Returns 1 if the unit fired; ux/uy its address.
    function bit dlayer(int x, int y, int ts, output int ux, output int uy);
      int a, p, l, r;
      ux = x - 1; uy = y - 1;
      if (x < 1 || y < 1 || x > W || y > H) begin n_drop++; return 0; end
      a = uy * W + ux; p = dpot[a]; l = dlt[a];
      r = step(p, l, ts, mtr, derp, erco, tce);
      dpot[a] = p; dlt[a] = l;
      if (r[1]) n_decay_d++;
      if (r[0]) n_fire_d++;
      return r[0];
    endfunction

    // Alayer: Dlayer event at unit (x,y). Output events appended to q as
    // x | y<<8 | ts<<16, in row-by-row order.
    function void alayer(int x, int y, int ts, ref int q[$]);
      int a, p, l, r, nx, ny;
      for (int dy = -dl; dy <= dl; dy++)
        for (int dx = -dl; dx <= dl; dx++) begin
          nx = x + dx; ny = y + dy;
          if (nx < 0 || ny < 0 || nx >= W || ny >= H) continue;
          a = ny * W + nx; p = apot[a]; l = alt[a];
          r = step(p, l, ts, mtr, derc, (dx == 0 && dy == 0) ? ercn : ernc, tne);
          apot[a] = p; alt[a] = l;
          if (r[1]) n_decay_a++;
          if (r[0]) begin
            n_fire_a++;
            if (!(dx == 0 && dy == 0)) n_nfire_a++;
            q.push_back(nx | (ny << 8) | ((ts & 32'hFFFF) << 16));
          end
        end
    endfunction

    // Whole filter for one sensor event.
    function void filter(int x, int y, int ts, ref int q[$]);
      int ux, uy;
      if (dlayer(x, y, ts, ux, uy)) alayer(ux, uy, ts, q);
    endfunction
  endclass

  // Tracker reference: winner of a window of events (x,y pairs).
  // Returns index of the winner; cnt gets its neighbour count.
  function automatic int track(int xs[], int ys[], int r, output int cnt);
    int best, bc, c, ax, ay;
    best = 0; bc = -1;
    for (int i = 0; i < xs.size(); i++) begin
      c = 0;
      for (int j = 0; j < xs.size(); j++) begin
        if (j == i) continue;
        ax = xs[i] - xs[j]; if (ax < 0) ax = -ax;
        ay = ys[i] - ys[j]; if (ay < 0) ay = -ay;
        if (ax <= r && ay <= r) c++;
      end
      if (c >= bc) begin bc = c; best = i; end
    end
    cnt = bc;
    return best;
  endfunction

endpackage
