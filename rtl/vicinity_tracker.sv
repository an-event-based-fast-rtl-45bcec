// vicinity_tracker - ball position from the filtered event stream.
//
// The tracker gathers WIN (= 20) consecutive filtered events. For every
// gathered event it counts how many of the other WIN-1 events lie in its
// vicinity, i.e. within vic_r units in x and in y (a square box). The
// event with the highest count gives the position; among equal counts the
// later event wins. Windows do not overlap: after a result the next WIN
// events are gathered.
//
// Timing: while gathering, ev_i_ready is high and one event is taken per
// clock. After the WIN-th event the block evaluates one candidate per
// clock, comparing it with all WIN events in parallel, so ev_i_ready is
// low for WIN clocks; pos_valid then pulses for one clock with pos_x,
// pos_y, pos_ts (the winner's time-stamp) and pos_cnt (its neighbour
// count), which hold until the next result. st_tie pulses when a later
// candidate takes the lead on an equal count.
//
// The window of 20 events, the most-neighbours rule and the later-event
// tie-break follow the published tracker. The square vicinity, the
// run-time vic_r and the non-overlapping windows are this design's choices.
module vicinity_tracker
  import ldsi_pkg::*;
#(
  parameter int unsigned WIN = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [VR_W-1:0]   vic_r,
  input  event_t            ev_i,
  input  logic              ev_i_valid,
  output logic              ev_i_ready,
  output logic              pos_valid,
  output coord_t            pos_x,
  output coord_t            pos_y,
  output ts_t               pos_ts,
  output logic [$clog2(WIN):0] pos_cnt,
  output logic              st_tie
);

  localparam int unsigned IW = $clog2(WIN);
  localparam int unsigned CW = $clog2(WIN) + 1;

  typedef enum logic {S_COLLECT, S_EVAL} state_e;

  state_e         state;
  event_t         buf_q [WIN];
  logic [IW-1:0]  n_q, i_q, best_q;
  logic [CW-1:0]  best_cnt_q, cnt;

  function automatic logic near(coord_t a, coord_t b, logic [VR_W-1:0] r);
    coord_t d;
    d = (a > b) ? a - b : b - a;
    return (d <= coord_t'(r));
  endfunction

  // Neighbour count of candidate i_q against all others.
  always_comb begin
    cnt = '0;
    for (int j = 0; j < WIN; j++)
      if (IW'(j) != i_q &&
          near(buf_q[j].x, buf_q[i_q].x, vic_r) && near(buf_q[j].y, buf_q[i_q].y, vic_r))
        cnt = cnt + 1'b1;
  end

  assign ev_i_ready = (state == S_COLLECT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_COLLECT;
      n_q        <= '0;
      i_q        <= '0;
      best_q     <= '0;
      best_cnt_q <= '0;
      pos_valid  <= 1'b0;
      pos_x      <= '0;
      pos_y      <= '0;
      pos_ts     <= '0;
      pos_cnt    <= '0;
      st_tie     <= 1'b0;
      for (int j = 0; j < WIN; j++) buf_q[j] <= '0;
    end else begin
      pos_valid <= 1'b0;
      st_tie    <= 1'b0;
      unique case (state)
        S_COLLECT: if (ev_i_valid) begin
          buf_q[n_q] <= ev_i;
          if (32'(n_q) == WIN - 1) begin
            n_q   <= '0;
            i_q   <= '0;
            state <= S_EVAL;
          end else begin
            n_q <= n_q + 1'b1;
          end
        end
        S_EVAL: begin
          if (i_q == '0 || cnt >= best_cnt_q) begin
            best_q     <= i_q;
            best_cnt_q <= cnt;
            st_tie     <= (i_q != '0) && (cnt == best_cnt_q);
          end
          if (32'(i_q) == WIN - 1) begin
            // the last candidate decides with the same rule
            if (cnt >= best_cnt_q) begin
              pos_x   <= buf_q[i_q].x;
              pos_y   <= buf_q[i_q].y;
              pos_ts  <= buf_q[i_q].ts;
              pos_cnt <= cnt;
            end else begin
              pos_x   <= buf_q[best_q].x;
              pos_y   <= buf_q[best_q].y;
              pos_ts  <= buf_q[best_q].ts;
              pos_cnt <= best_cnt_q;
            end
            pos_valid <= 1'b1;
            state     <= S_COLLECT;
          end else begin
            i_q <= i_q + 1'b1;
          end
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

endmodule
