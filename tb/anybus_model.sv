// anybus_model - behavioural stand-in for the POWERLINK communication
// module's process-data memory, for simulation only. It is a 2048 x 16
// word memory on the synchronous req/ack host bus: a request is answered
// after 1 to 3 clocks with a one-clock ack (read data valid with it). The
// testbench plays the managing node by writing words with mn_write() and
// reading them with mem[].
module anybus_model (
  input  logic        clk,
  input  logic        bus_req,
  input  logic        bus_we,
  input  logic [10:0] bus_addr,
  input  logic [15:0] bus_wdata,
  output logic [15:0] bus_rdata,
  output logic        bus_ack
);
  logic [15:0] mem [2048];
  int wait_q = -1;
  int n_wr = 0, n_rd = 0;

  initial begin
    foreach (mem[i]) mem[i] = '0;
    bus_ack = 1'b0;
    bus_rdata = '0;
  end

  function automatic void mn_write(int a, int d);
    mem[a] = 16'(d);
  endfunction

  always @(posedge clk) begin
    bus_ack <= 1'b0;
    if (bus_req && !bus_ack) begin
      if (wait_q < 0) wait_q = $urandom_range(0, 2);
      else if (wait_q == 0) begin
        bus_ack <= 1'b1;
        if (bus_we) begin mem[bus_addr] = bus_wdata; n_wr++; end
        else begin bus_rdata <= mem[bus_addr]; n_rd++; end
        wait_q = -1;
      end else wait_q--;
    end
  end
endmodule
