// scd_cam_if - readout of the Selective Change Driven (SCD) event camera.
//
// The FPGA drives the camera's readout clock (cam_clk) and its acquisition
// enable (cam_en) and receives the event data in parallel: a cam_valid
// strobe and the 7-bit pixel address cam_x / cam_y. The camera presents an
// event while cam_clk is low; the block samples the pins in the clock in
// which it raises cam_clk, and the rising edge tells the camera to move to
// its next event. Each sampled event is stamped with the current
// millisecond time (ts_now) and offered on ev_o. cam_clk is held low while
// that event has not been taken (the camera waits), which is how the node
// throttles the camera's data flow; st_hold pulses on each clock the
// readout clock is held back for this reason.
//
// Timing: cam_clk has a half period of CLK_DIV system clocks, so at most
// one event is read per 2*CLK_DIV clocks. ts_now counts milliseconds,
// one step per CLK_PER_MS system clocks, and wraps at 2^16.
//
// From the published node: the FPGA generates the camera clock and
// acquisition enable and reads event data on parallel signals, and event
// times are in milliseconds. The pin-level protocol (strobe, sampling
// edge, clock stopping) and the clock rates are this design's choices,
// since the sensor's own interface is documented elsewhere.
module scd_cam_if
  import ldsi_pkg::*;
#(
  parameter int unsigned CLK_DIV    = 8,        // system clocks per cam_clk half period
  parameter int unsigned CLK_PER_MS = 100_000   // system clocks per millisecond (100 MHz)
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   acq_en,       // acquisition enable from the configuration
  output logic   cam_clk,
  output logic   cam_en,
  input  logic   cam_valid,
  input  coord_t cam_x,
  input  coord_t cam_y,
  output event_t ev_o,
  output logic   ev_o_valid,
  input  logic   ev_o_ready,
  output ts_t    ts_now,
  output logic   st_hold
);

  localparam int unsigned DW = $clog2(CLK_DIV + 1);
  localparam int unsigned PW = $clog2(CLK_PER_MS + 1);

  logic [DW-1:0] div_q;
  logic [PW-1:0] pre_q;
  logic          tick;

  // Millisecond time base.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre_q  <= '0;
      ts_now <= '0;
    end else if (32'(pre_q) == CLK_PER_MS - 1) begin
      pre_q  <= '0;
      ts_now <= ts_now + 1'b1;
    end else begin
      pre_q <= pre_q + 1'b1;
    end
  end

  assign tick = (32'(div_q) == CLK_DIV - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_q      <= '0;
      cam_clk    <= 1'b0;
      cam_en     <= 1'b0;
      ev_o       <= '0;
      ev_o_valid <= 1'b0;
      st_hold    <= 1'b0;
    end else begin
      cam_en  <= acq_en;
      st_hold <= 1'b0;
      if (ev_o_valid && ev_o_ready) ev_o_valid <= 1'b0;
      if (!tick) begin
        div_q <= div_q + 1'b1;
      end else if (cam_clk) begin
        div_q   <= '0;
        cam_clk <= 1'b0;
      end else if (cam_en && !(ev_o_valid && !ev_o_ready)) begin
        // rising edge: sample the event the camera presents
        div_q   <= '0;
        cam_clk <= 1'b1;
        if (cam_valid) begin
          ev_o       <= '{x: cam_x, y: cam_y, ts: ts_now};
          ev_o_valid <= 1'b1;
        end
      end else begin
        // hold cam_clk low: acquisition off or the last event not yet taken
        st_hold <= cam_en;
      end
    end
  end

  a_ev_o_hold: assert property (@(posedge clk) disable iff (!rst_n)
    ev_o_valid && !ev_o_ready |=> ev_o_valid && $stable(ev_o));

endmodule
