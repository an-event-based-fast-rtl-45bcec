// pl_process_data - cyclic process-data exchange with the POWERLINK module.
//
// The node reaches the POWERLINK network through an Anybus CompactCom
// module, which holds the process data that the managing node reads and
// writes every network cycle. This block is the FPGA side of that
// exchange. Every UPDATE_CYCLES clocks it
//   1. writes the write-process-data words (to the managing node):
//        WR_BASE+0  pos_x of the latest tracked position
//        WR_BASE+1  pos_y
//        WR_BASE+2  number of positions found so far (wraps at 2^16)
//   2. reads the read-process-data words (from the managing node):
//        RD_BASE+0  [15] valid  [14] acq_en  [6:4] DL  [3:0] vicinity
//        RD_BASE+1  [15:12] ERCO [11:8] ERCN [7:4] ERNC [3:0] TCE
//        RD_BASE+2  [15:12] TNE  [11:8] DERP [7:4] DERC
//        RD_BASE+3  MTR in ms
//   3. if the valid bit was set, loads the words into cfg_o (cfg_upd
//      pulses); otherwise cfg_o keeps its value (NODE_CFG_DEFAULT after
//      reset, with acquisition off).
//
// Bus: a synchronous 16-bit memory bus. The block raises bus_req with
// bus_we, bus_addr and bus_wdata and holds them until the module answers
// with a one-clock bus_ack (read data on bus_rdata in that clock). One
// exchange takes 7 bus transfers.
//
// From the published node: the FPGA sends the object position to the
// managing node and receives from it the configuration of the filter and
// tracker through the module's process data. The bus, the word layout, the
// valid bit and the update period are this design's choices; the
// module's own host protocol and its Ethernet, POWERLINK and diagnostic
// objects are not modelled.
module pl_process_data
  import ldsi_pkg::*;
#(
  parameter int unsigned UPDATE_CYCLES = 100_000,   // 1 ms at 100 MHz
  parameter logic [10:0] WR_BASE       = 11'h000,
  parameter logic [10:0] RD_BASE       = 11'h100
) (
  input  logic        clk,
  input  logic        rst_n,
  // tracked position
  input  logic        pos_valid,
  input  coord_t      pos_x,
  input  coord_t      pos_y,
  // configuration
  output node_cfg_t   cfg_o,
  output logic        cfg_upd,
  // host bus to the POWERLINK module
  output logic        bus_req,
  output logic        bus_we,
  output logic [10:0] bus_addr,
  output logic [15:0] bus_wdata,
  input  logic [15:0] bus_rdata,
  input  logic        bus_ack
);

  localparam int unsigned TW = $clog2(UPDATE_CYCLES + 1);
  localparam int unsigned NXFER = 7;   // 3 writes, then 4 reads

  typedef enum logic [1:0] {S_WAIT, S_XFER, S_LOAD} state_e;

  state_e        state;
  logic [TW-1:0] tmr_q;
  logic [2:0]    step_q;
  coord_t        px_q, py_q;
  logic [15:0]   seq_q;
  logic [15:0]   snap_q [3];           // words being written this exchange
  logic [15:0]   rd_q [4];

  // Address and data of transfer step_q.
  always_comb begin
    bus_we    = (step_q < 3'd3);
    bus_addr  = bus_we ? WR_BASE + 11'(step_q) : RD_BASE + 11'(step_q - 3'd3);
    unique case (step_q)
      3'd0:    bus_wdata = snap_q[0];
      3'd1:    bus_wdata = snap_q[1];
      3'd2:    bus_wdata = snap_q[2];
      default: bus_wdata = '0;
    endcase
  end

  assign bus_req = (state == S_XFER);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_WAIT;
      tmr_q   <= '0;
      step_q  <= '0;
      px_q    <= '0;
      py_q    <= '0;
      seq_q   <= '0;
      cfg_o   <= NODE_CFG_DEFAULT;
      cfg_upd <= 1'b0;
      for (int k = 0; k < 4; k++) rd_q[k] <= '0;
      for (int k = 0; k < 3; k++) snap_q[k] <= '0;
    end else begin
      cfg_upd <= 1'b0;
      if (pos_valid) begin
        px_q  <= pos_x;
        py_q  <= pos_y;
        seq_q <= seq_q + 1'b1;
      end
      tmr_q <= (32'(tmr_q) == UPDATE_CYCLES - 1) ? '0 : tmr_q + 1'b1;
      unique case (state)
        S_WAIT: if (32'(tmr_q) == UPDATE_CYCLES - 1) begin
          step_q    <= '0;
          snap_q[0] <= 16'(px_q);
          snap_q[1] <= 16'(py_q);
          snap_q[2] <= seq_q;
          state     <= S_XFER;
        end
        S_XFER: if (bus_ack) begin
          if (!bus_we) rd_q[2'(step_q - 3'd3)] <= bus_rdata;
          if (32'(step_q) == NXFER - 1) state <= S_LOAD;
          else step_q <= step_q + 1'b1;
        end
        S_LOAD: begin
          if (rd_q[0][15]) begin
            cfg_o.acq_en    <= rd_q[0][14];
            cfg_o.ldsi.dl   <= rd_q[0][6:4];
            cfg_o.vic_r     <= rd_q[0][3:0];
            cfg_o.ldsi.erco <= rd_q[1][15:12];
            cfg_o.ldsi.ercn <= rd_q[1][11:8];
            cfg_o.ldsi.ernc <= rd_q[1][7:4];
            cfg_o.ldsi.tce  <= rd_q[1][3:0];
            cfg_o.ldsi.tne  <= rd_q[2][15:12];
            cfg_o.ldsi.derp <= rd_q[2][11:8];
            cfg_o.ldsi.derc <= rd_q[2][7:4];
            cfg_o.ldsi.mtr  <= rd_q[3];
            cfg_upd         <= 1'b1;
          end
          state <= S_WAIT;
        end
        default: state <= S_WAIT;
      endcase
    end
  end

  // Bus rule: a request is held unchanged until it is acknowledged.
  a_bus_hold: assert property (@(posedge clk) disable iff (!rst_n)
    bus_req && !bus_ack |=> bus_req && $stable(bus_addr) && $stable(bus_we) &&
                            $stable(bus_wdata));
  a_ack_only_on_req: assert property (@(posedge clk) disable iff (!rst_n)
    bus_ack |-> bus_req);

endmodule
