// aero_imem: instruction memory (the paper's instruction cache, 16-bit words).
//
// A block RAM with one synchronous read port for the fetch stage and one write port used only
// by the loader outside the CPU; the CPU has no connection to the write enable, so no partition
// can change code (paper, Sec. II-D). The read address is the 16-bit physical address
// {ptr_c_flag2, pc[13:0]} formed by the MCU, so the partitions share one device. Read data
// appears one clock after the address (registered read), which is why the pipeline flushes the
// fetched word in the cycle after a jump. AW = 16 is the paper's 14-bit CPU space extended by
// the two MCU bits. Contents are not reset.
module aero_imem
  import aero_pkg::*;
#(
  parameter int unsigned AW = IMEM_AW
) (
  input  logic            clk,
  input  logic [AW-1:0]   raddr,
  output logic [ILEN-1:0] rdata,
  input  logic            we,      // loader only
  input  logic [AW-1:0]   waddr,
  input  logic [ILEN-1:0] wdata
);

  logic [ILEN-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
