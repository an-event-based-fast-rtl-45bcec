// ldsi_alayer - the 'Alayer' of the LDSI event filter; its firings are the
// filter's output ('Player') events.
//
// The Alayer is an (M-2) x (N-2) array of units, the same size as the
// Dlayer. An event from Dlayer unit (x,y) excites Alayer unit (x,y) by
// ERCN and every unit of the surrounding square of half-width DL by ERNC
// (DL = 0: only unit (x,y)); units outside the layer are skipped. Each
// excited unit applies ldsi_pkg::unit_update() with decay DERC and
// threshold TNE, and a unit that fires emits an output event with its own
// address and the time-stamp of the Dlayer event.
//
// The units are visited one at a time, row by row from (x-DL,y-DL) to
// (x+DL,y+DL): one clock to read the unit, one to write it back, and one
// clock for a position outside the layer. The unit state sits in a RAM of
// (M-2)*(N-2) words, cleared after reset (init_done then rises). An
// event of depth level DL therefore takes about 2*(2DL+1)^2 clocks, during
// which ev_i_ready is low; a firing unit waits until ev_o is taken.
//
// Interface: valid/ready streams on ev_i (Dlayer events, Dlayer
// coordinates) and ev_o (Alayer events, same coordinates). st_decay,
// st_fire and st_nfire pulse for an applied decay, any firing, and a
// firing of a neighbour unit (not the centre).
//
// Follows the published algorithm: layer size, ERCN for the same address
// and ERNC for neighbours, DL, TNE, DERC, MTR. Own choices: square
// neighbourhood, the visiting order and schedule, restart at 0 after
// firing, decay applied when an event arrives.
module ldsi_alayer
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
  output logic      st_decay,
  output logic      st_fire,
  output logic      st_nfire
);

  localparam int unsigned W     = M - 2;
  localparam int unsigned H     = N - 2;
  localparam int unsigned DEPTH = W * H;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned SW    = COORD_W + 2;   // signed offset arithmetic

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_ADDR, S_UPD, S_SEND} state_e;
  typedef logic signed [SW-1:0] scoord_t;

  state_e            state;
  unit_t             mem [DEPTH];
  unit_t             rd_q;
  logic [AW-1:0]     init_addr, addr_q;
  event_t            cen_q;                // centre event
  logic [DL_W-1:0]   dl_q;
  scoord_t           dx_q, dy_q;           // current offset from the centre
  scoord_t           nx, ny;
  logic              in_layer, last, centre;
  logic [AW-1:0]     addr_n;
  unit_upd_t         upd;

  always_comb begin
    nx     = scoord_t'({2'b00, cen_q.x}) + dx_q;
    ny     = scoord_t'({2'b00, cen_q.y}) + dy_q;
    in_layer = (nx >= 0) && (ny >= 0) && (nx < scoord_t'(W)) && (ny < scoord_t'(H));
    addr_n = AW'(32'(ny[COORD_W-1:0]) * W + 32'(nx[COORD_W-1:0]));
    last   = (dx_q == scoord_t'(dl_q)) && (dy_q == scoord_t'(dl_q));
    centre = (dx_q == 0) && (dy_q == 0);
  end

  always_comb upd = unit_update(rd_q, cen_q.ts, cfg.mtr, cfg.derc,
                                centre ? cfg.ercn : cfg.ernc, cfg.tne);

  assign ev_i_ready = (state == S_IDLE);
  assign ev_o_valid = (state == S_SEND);
  assign init_done  = (state != S_INIT);

  always_ff @(posedge clk) begin
    if (state == S_INIT)
      mem[init_addr] <= '0;
    else if (state == S_UPD)
      mem[addr_q] <= upd.unit;
    if (state == S_ADDR)
      rd_q <= mem[addr_n];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      init_addr <= '0;
      addr_q    <= '0;
      cen_q     <= '0;
      dl_q      <= '0;
      dx_q      <= '0;
      dy_q      <= '0;
      ev_o      <= '0;
      st_decay  <= 1'b0;
      st_fire   <= 1'b0;
      st_nfire  <= 1'b0;
    end else begin
      st_decay <= 1'b0;
      st_fire  <= 1'b0;
      st_nfire <= 1'b0;
      unique case (state)
        S_INIT: begin
          init_addr <= init_addr + 1'b1;
          if (32'(init_addr) == DEPTH - 1) state <= S_IDLE;
        end
        S_IDLE: if (ev_i_valid) begin
          cen_q <= ev_i;
          dl_q  <= cfg.dl;
          dx_q  <= -scoord_t'(cfg.dl);
          dy_q  <= -scoord_t'(cfg.dl);
          state <= S_ADDR;
        end
        S_ADDR: begin
          if (in_layer) begin
            addr_q <= addr_n;
            state  <= S_UPD;
          end else begin
            state <= last ? S_IDLE : S_ADDR;
            advance();
          end
        end
        S_UPD: begin
          st_decay <= upd.decayed;
          st_fire  <= upd.fire;
          st_nfire <= upd.fire && !centre;
          if (upd.fire) begin
            ev_o  <= '{x: nx[COORD_W-1:0], y: ny[COORD_W-1:0], ts: cen_q.ts};
            state <= S_SEND;
          end else begin
            state <= last ? S_IDLE : S_ADDR;
            advance();
          end
        end
        S_SEND: if (ev_o_ready) begin
          state <= last ? S_IDLE : S_ADDR;
          advance();
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Step to the next unit of the square, row by row.
  task automatic advance();
    if (dx_q == scoord_t'(dl_q)) begin
      dx_q <= -scoord_t'(dl_q);
      dy_q <= dy_q + 1'b1;
    end else begin
      dx_q <= dx_q + 1'b1;
    end
  endtask

  a_ev_o_hold: assert property (@(posedge clk) disable iff (!rst_n)
    ev_o_valid && !ev_o_ready |=> ev_o_valid && $stable(ev_o));

endmodule
