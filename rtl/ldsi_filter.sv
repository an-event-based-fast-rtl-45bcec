// ldsi_filter - the LDSI ("Less Data Same Information") event filter.
//
// Sensor events (the 'Slayer') go through two layers of integrate-and-fire
// units: the Dlayer (ldsi_dlayer), where a pixel must be excited often
// enough within the forgetting time to fire, and the Alayer
// (ldsi_alayer), where a Dlayer firing also excites the neighbouring units
// so that a unit fires only when activity is dense in time and space.
// Alayer firings leave on ev_o; they form the output 'Player', whose
// coordinates are those of the (M-2) x (N-2) inner layers. Isolated noise
// events die out; a moving object leaves a thinner stream of events.
//
// The two layers are chained by a valid/ready handshake with no buffer:
// while the Alayer walks a neighbourhood the Dlayer holds its firing and
// stops taking sensor events (st_stall pulses on each such clock).
// The filter accepts events once both layer RAMs are cleared (init_done).
//
// The layer chain follows the published algorithm; the unbuffered
// handshake between the layers is this design's choice.
module ldsi_filter
  import ldsi_pkg::*;
#(
  parameter int unsigned M = 128,
  parameter int unsigned N = 128
) (
  input  logic      clk,
  input  logic      rst_n,
  input  ldsi_cfg_t cfg,
  input  event_t    ev_i,
  input  logic      ev_i_valid,
  output logic      ev_i_ready,
  output event_t    ev_o,
  output logic      ev_o_valid,
  input  logic      ev_o_ready,
  output logic      init_done,
  output logic      st_drop,
  output logic      st_ddecay,
  output logic      st_dfire,
  output logic      st_adecay,
  output logic      st_afire,
  output logic      st_anfire,
  output logic      st_stall
);

  event_t d_ev;
  logic   d_valid, d_ready;
  logic   d_init, a_init, d_in_ready;

  assign init_done  = d_init && a_init;
  assign ev_i_ready = d_in_ready && a_init;
  assign st_stall   = d_valid && !d_ready;

  ldsi_dlayer #(.M(M), .N(N)) u_dlayer (
    .clk, .rst_n, .cfg,
    .ev_i, .ev_i_valid(ev_i_valid && a_init), .ev_i_ready(d_in_ready),
    .ev_o(d_ev), .ev_o_valid(d_valid), .ev_o_ready(d_ready),
    .init_done(d_init), .st_drop, .st_decay(st_ddecay), .st_fire(st_dfire)
  );

  ldsi_alayer #(.M(M), .N(N)) u_alayer (
    .clk, .rst_n, .cfg,
    .ev_i(d_ev), .ev_i_valid(d_valid), .ev_i_ready(d_ready),
    .ev_o, .ev_o_valid, .ev_o_ready,
    .init_done(a_init), .st_decay(st_adecay), .st_fire(st_afire), .st_nfire(st_anfire)
  );

endmodule
