// ldsi_pkg - types, constants and the unit update rule shared by the
// event-camera node.
//
// An event carries the address of a pixel (or of a layer unit) and the
// millisecond time-stamp it was taken at. The LDSI ("Less Data Same
// Information") filter keeps, for every unit of its two inner layers, a
// small potential and the time-stamp of the last event that reached it.
// unit_update() is the rule both layers apply when an event reaches a
// unit: if more than MTR ms passed since the unit's last event, the
// potential first loses a decay step; then it gains the excitation of the
// connection; if it reaches the threshold the unit fires and restarts at 0.
//
// What follows the published algorithm: the rule (decay on DT > MTR, add
// excitation, fire at threshold), the parameter names, the 0..10 range of
// the excitation, threshold and decay values, millisecond time. Own
// choices: 4-bit parameter fields, a 5-bit saturating potential, 16-bit
// wrapping time-stamps, restart at 0 after firing, the reset defaults.
package ldsi_pkg;

  localparam int unsigned COORD_W = 7;   // 128 pixels per side
  localparam int unsigned TS_W    = 16;  // millisecond time-stamp, wraps after 65.5 s
  localparam int unsigned PAR_W   = 4;   // excitation / threshold / decay values 0..15
  localparam int unsigned POT_W   = 5;   // unit potential, saturating at 31
  localparam int unsigned DL_W    = 3;   // depth level 0..7
  localparam int unsigned VR_W    = 4;   // tracker vicinity half-width 0..15

  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [TS_W-1:0]    ts_t;
  typedef logic [PAR_W-1:0]   par_t;
  typedef logic [POT_W-1:0]   pot_t;

  // One address event.
  typedef struct packed {
    coord_t x;
    coord_t y;
    ts_t    ts;
  } event_t;

  // Run-time parameters of the filter, written by the managing node.
  typedef struct packed {
    par_t             erco;  // Dlayer gain per Slayer event
    par_t             ercn;  // Alayer gain, same address
    par_t             ernc;  // Alayer gain, neighbour address
    par_t             tce;   // Dlayer threshold
    par_t             tne;   // Alayer threshold
    par_t             derp;  // Dlayer decay step
    par_t             derc;  // Alayer decay step
    ts_t              mtr;   // maximum time to remember, ms
    logic [DL_W-1:0]  dl;    // depth level (neighbourhood half-width)
  } ldsi_cfg_t;

  // Everything the managing node configures in this node.
  typedef struct packed {
    ldsi_cfg_t         ldsi;
    logic [VR_W-1:0]   vic_r;   // tracker vicinity half-width
    logic              acq_en;  // camera acquisition enable
  } node_cfg_t;

  localparam ldsi_cfg_t LDSI_CFG_DEFAULT = '{
    erco: 4'd3, ercn: 4'd3, ernc: 4'd1, tce: 4'd6, tne: 4'd6,
    derp: 4'd1, derc: 4'd1, mtr: 16'd500, dl: 3'd1
  };
  localparam node_cfg_t NODE_CFG_DEFAULT = '{
    ldsi: LDSI_CFG_DEFAULT, vic_r: 4'd3, acq_en: 1'b0
  };

  // State of one layer unit as held in the layer RAM.
  typedef struct packed {
    pot_t pot;
    ts_t  lt;   // time-stamp of the last event that reached the unit
  } unit_t;

  typedef struct packed {
    unit_t unit;     // new state to write back
    logic  fire;     // the unit emits an event
    logic  decayed;  // the decay step was applied
  } unit_upd_t;

  // The LDSI unit rule. at: time-stamp of the arriving event.
  function automatic unit_upd_t unit_update(unit_t u, ts_t at, ts_t mtr,
                                            par_t dec, par_t inc, par_t thr);
    unit_upd_t      r;
    ts_t            dt;
    logic [POT_W:0] p;
    dt = at - u.lt;                      // modulo 2^TS_W
    p  = {1'b0, u.pot};
    r.decayed = (dt > mtr);
    if (r.decayed) p = (p > (POT_W+1)'(dec)) ? p - (POT_W+1)'(dec) : '0;
    p = p + (POT_W+1)'(inc);
    if (p > (POT_W+1)'({POT_W{1'b1}})) p = (POT_W+1)'({POT_W{1'b1}});
    r.fire     = (p >= (POT_W+1)'(thr));
    r.unit.pot = r.fire ? '0 : p[POT_W-1:0];
    r.unit.lt  = at;
    return r;
  endfunction

endpackage
