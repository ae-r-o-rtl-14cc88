// aero_sampling_ports: sampling-port store of the custom UART interface.
//
// A shared FIFO would let one partition consume data meant for another, so received samples
// go to separate sampling ports: a new sample overwrites its port, and reading never changes
// a port, so any partition may read any port any number of times (paper, Sec. IV-D, Fig. 7).
// The UART receiver delivers a sample as (port index, 32-bit word, valid) for one clock; the
// port is updated at that edge. The number of ports, the word width and the read timing
// (synchronous, one clock, like the data cache) are this design's choices.
module aero_sampling_ports
  import aero_pkg::*;
#(
  parameter int unsigned NPORTS = NUM_SPORTS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      rx_valid,
  input  logic [$clog2(NPORTS)-1:0] rx_port,
  input  logic [XLEN-1:0]           rx_data,
  input  logic [$clog2(NPORTS)-1:0] rd_port,
  output logic [XLEN-1:0]           rd_data
);

  logic [XLEN-1:0] port_q [NPORTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPORTS; i++) port_q[i] <= '0;
    end else if (rx_valid) begin
      port_q[rx_port] <= rx_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data <= '0;
    end else begin
      rd_data <= port_q[rd_port];
    end
  end

endmodule
