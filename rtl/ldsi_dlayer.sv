// ldsi_dlayer - the 'Dlayer' of the LDSI event filter.
//
// The Dlayer is an (M-2) x (N-2) array of integrate-and-fire units, one per
// inner pixel of the M x N sensor. A sensor event at pixel (x,y) reaches
// unit (x-1,y-1); events on the sensor's outer ring of pixels are dropped,
// which is what removes the border from the following layers. On an event
// the unit applies ldsi_pkg::unit_update() with gain ERCO, decay DERP and
// threshold TCE; when it fires, an event with the unit's address and the
// input time-stamp is sent on to the Alayer.
//
// The unit state (5-bit potential, 16-bit last time-stamp) lives in one
// RAM of (M-2)*(N-2) words with a registered read port. After reset the
// block clears the RAM, one word per clock (init_done then rises), before
// it accepts events.
//
// Interface: ev_i / ev_i_valid / ev_i_ready and ev_o / ev_o_valid /
// ev_o_ready are valid/ready streams (a transfer happens on a clock edge
// where both are high). st_drop, st_decay and st_fire pulse for one clock
// on a dropped border event, an applied decay and a unit firing.
//
// Timing: an accepted event is read on the accepting clock and written
// back on the next, so the block takes one event every 2 clocks while its
// output is not stalled; a firing unit holds the block until ev_o is taken.
//
// The layer size, the border removal, ERCO/TCE/DERP/MTR and the rule
// follow the published algorithm. The RAM organisation, the 2-clock
// schedule, the decay applied on the next event rather than by a timer,
// and the mapping of x to the M side are this design's choices.
module ldsi_dlayer
  import ldsi_pkg::*;
#(
  parameter int unsigned M = 128,   // sensor columns (x)
  parameter int unsigned N = 128    // sensor rows (y)
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
  output logic      st_decay,
  output logic      st_fire
);

  localparam int unsigned W     = M - 2;
  localparam int unsigned H     = N - 2;
  localparam int unsigned DEPTH = W * H;
  localparam int unsigned AW    = $clog2(DEPTH);

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_UPD, S_SEND} state_e;

  state_e          state;
  unit_t           mem [DEPTH];
  unit_t           rd_q;
  logic [AW-1:0]   addr_q, init_addr;
  event_t          cur_q;
  unit_upd_t       upd;
  logic            border;
  logic [AW-1:0]   addr_in;
  coord_t          ux, uy;

  // Address of the arriving event in Dlayer coordinates.
  always_comb begin
    border  = (ev_i.x == '0) || (ev_i.y == '0) ||
              (32'(ev_i.x) >= M - 1) || (32'(ev_i.y) >= N - 1);
    ux      = ev_i.x - coord_t'(1);
    uy      = ev_i.y - coord_t'(1);
    addr_in = AW'(32'(uy) * W + 32'(ux));
  end

  assign ev_i_ready = (state == S_IDLE);
  assign ev_o_valid = (state == S_SEND);
  assign init_done  = (state != S_INIT);

  always_comb upd = unit_update(rd_q, cur_q.ts, cfg.mtr, cfg.derp, cfg.erco, cfg.tce);

  // Unit RAM: one write port, one registered read port.
  always_ff @(posedge clk) begin
    if (state == S_INIT)
      mem[init_addr] <= '0;
    else if (state == S_UPD)
      mem[addr_q] <= upd.unit;
    if (state == S_IDLE && ev_i_valid)
      rd_q <= mem[addr_in];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      init_addr <= '0;
      addr_q    <= '0;
      cur_q     <= '0;
      ev_o      <= '0;
      st_drop   <= 1'b0;
      st_decay  <= 1'b0;
      st_fire   <= 1'b0;
    end else begin
      st_drop  <= 1'b0;
      st_decay <= 1'b0;
      st_fire  <= 1'b0;
      unique case (state)
        S_INIT: begin
          init_addr <= init_addr + 1'b1;
          if (32'(init_addr) == DEPTH - 1) state <= S_IDLE;
        end
        S_IDLE: if (ev_i_valid) begin
          if (border) st_drop <= 1'b1;
          else begin
            addr_q <= addr_in;
            cur_q  <= '{x: ux, y: uy, ts: ev_i.ts};
            state  <= S_UPD;
          end
        end
        S_UPD: begin
          st_decay <= upd.decayed;
          st_fire  <= upd.fire;
          if (upd.fire) begin
            ev_o  <= cur_q;
            state <= S_SEND;
          end else begin
            state <= S_IDLE;
          end
        end
        S_SEND: if (ev_o_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // An offered output event stays unchanged until it is taken.
  a_ev_o_hold: assert property (@(posedge clk) disable iff (!rst_n)
    ev_o_valid && !ev_o_ready |=> ev_o_valid && $stable(ev_o));

endmodule
