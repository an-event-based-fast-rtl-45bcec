// scd_camera_model - behavioural stand-in for the SCD event camera, for
// simulation only. It holds a queue of pixel events (loaded by the
// testbench with push()). While cam_en is high it presents the head of the
// queue on cam_x/cam_y with cam_valid high; each rising edge of cam_clk
// consumes the presented event and shows the next one. With an empty queue
// or cam_en low, cam_valid is low.
module scd_camera_model
  import ldsi_pkg::*;
(
  input  logic   cam_clk,
  input  logic   cam_en,
  output logic   cam_valid,
  output coord_t cam_x,
  output coord_t cam_y
);
  int q[$];
  int n_read = 0;

  function automatic void push(int x, int y);
    q.push_back(x | (y << 8));
  endfunction

  always_comb begin
    cam_valid = cam_en && (q.size() > 0);
    cam_x     = (q.size() > 0) ? coord_t'(q[0] & 255) : '0;
    cam_y     = (q.size() > 0) ? coord_t'((q[0] >> 8) & 255) : '0;
  end

  always @(posedge cam_clk) if (cam_en && q.size() > 0) begin
    void'(q.pop_front());
    n_read++;
  end
endmodule
