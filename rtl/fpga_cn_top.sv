// fpga_cn_top - the FPGA controlled node of the ball-tracking cell.
//
// An event camera (128 x 128 SCD sensor) watches a table on which a ball is
// blown about; a two-axis robot follows the ball. This node turns the
// camera's events into a ball position and hands it to the POWERLINK
// managing node, which computes the robot's joint angles. Data path:
//
//   camera pins -> scd_cam_if (readout, ms time-stamps)
//               -> ldsi_filter (Dlayer -> Alayer integrate-and-fire layers)
//               -> vicinity_tracker (best-supported of 20 events)
//               -> pl_process_data -> host bus of the POWERLINK module
//
// The configuration travels the other way: pl_process_data reads it from
// the module and drives the filter parameters, the tracker's vicinity and
// the camera acquisition enable. After reset acquisition is off and the
// filter clears its two unit RAMs; the camera starts once the managing
// node has written a configuration with the valid and acq_en bits set.
//
// Ports: the camera pins of scd_cam_if and the host bus of
// pl_process_data; pos_valid/pos_x/pos_y mirror each new position for
// observation. Parameters keep the sensor size (128 x 128) and the
// 100 MHz clock assumptions of the blocks. The blocks' one-clock status
// strobes (st_*), the time-stamps and the winner's neighbour count go to
// internal signals that nothing inside the node reads. They are there to
// be observed in simulation, or counted by a debug register added later.
// Lint therefore reports them as unused.
//
// The chain of blocks follows the published node; the valid/ready
// coupling between them, which lets a busy stage stall the camera, is this
// design's choice.
module fpga_cn_top
  import ldsi_pkg::*;
#(
  parameter int unsigned M             = 128,
  parameter int unsigned N             = 128,
  parameter int unsigned WIN           = 20,
  parameter int unsigned CLK_DIV       = 8,
  parameter int unsigned CLK_PER_MS    = 100_000,
  parameter int unsigned UPDATE_CYCLES = 100_000
) (
  input  logic        clk,
  input  logic        rst_n,
  // SCD camera
  output logic        cam_clk,
  output logic        cam_en,
  input  logic        cam_valid,
  input  coord_t      cam_x,
  input  coord_t      cam_y,
  // host bus to the POWERLINK module
  output logic        bus_req,
  output logic        bus_we,
  output logic [10:0] bus_addr,
  output logic [15:0] bus_wdata,
  input  logic [15:0] bus_rdata,
  input  logic        bus_ack,
  // observation
  output logic        pos_valid,
  output coord_t      pos_x,
  output coord_t      pos_y
);

  node_cfg_t cfg;
  logic      cfg_upd;

  event_t cam_ev, flt_ev;
  logic   cam_ev_valid, cam_ev_ready, flt_ev_valid, flt_ev_ready;
  ts_t    ts_now, pos_ts;
  logic   flt_init;
  logic [$clog2(WIN):0] pos_cnt;

  // status pulses, kept for observation in simulation
  logic st_hold, st_drop, st_ddecay, st_dfire, st_adecay, st_afire, st_anfire,
        st_stall, st_tie;

  scd_cam_if #(.CLK_DIV(CLK_DIV), .CLK_PER_MS(CLK_PER_MS)) u_cam (
    .clk, .rst_n, .acq_en(cfg.acq_en),
    .cam_clk, .cam_en, .cam_valid, .cam_x, .cam_y,
    .ev_o(cam_ev), .ev_o_valid(cam_ev_valid), .ev_o_ready(cam_ev_ready),
    .ts_now, .st_hold
  );

  ldsi_filter #(.M(M), .N(N)) u_ldsi (
    .clk, .rst_n, .cfg(cfg.ldsi),
    .ev_i(cam_ev), .ev_i_valid(cam_ev_valid), .ev_i_ready(cam_ev_ready),
    .ev_o(flt_ev), .ev_o_valid(flt_ev_valid), .ev_o_ready(flt_ev_ready),
    .init_done(flt_init), .st_drop, .st_ddecay, .st_dfire, .st_adecay,
    .st_afire, .st_anfire, .st_stall
  );

  vicinity_tracker #(.WIN(WIN)) u_trk (
    .clk, .rst_n, .vic_r(cfg.vic_r),
    .ev_i(flt_ev), .ev_i_valid(flt_ev_valid), .ev_i_ready(flt_ev_ready),
    .pos_valid, .pos_x, .pos_y, .pos_ts, .pos_cnt, .st_tie
  );

  pl_process_data #(.UPDATE_CYCLES(UPDATE_CYCLES)) u_pd (
    .clk, .rst_n, .pos_valid, .pos_x, .pos_y,
    .cfg_o(cfg), .cfg_upd,
    .bus_req, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .bus_ack
  );

endmodule
