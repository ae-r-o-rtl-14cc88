// aero_dcache: 32-bit dual-port data memory (the paper's data cache).
//
// Port A reads: the address is presented in the execute stage and the word is returned one
// clock later, in the memory stage. Port B writes at the clock edge that ends the memory stage.
// A second write port, used only by the loader at power-up, copies static data in (the paper
// copies static data to the data cache at reset). Addresses are 11-bit physical addresses
// {segment, cpu_addr} from the MCU: segment 0 is the shared region, segments 1..3 the
// partitions' protected regions. Read-during-write to the same address returns the old word.
// Contents are not reset. No cache-miss logic: the paper assumes all data fits and never misses.
module aero_dcache
  import aero_pkg::*;
#(
  parameter int unsigned AW = DMEM_AW
) (
  input  logic            clk,
  input  logic [AW-1:0]   raddr,
  output logic [XLEN-1:0] rdata,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [XLEN-1:0] wdata,
  input  logic            load_we,   // loader port
  input  logic [AW-1:0]   load_addr,
  input  logic [XLEN-1:0] load_data
);

  logic [XLEN-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    rdata <= mem[raddr];
    if (load_we)  mem[load_addr] <= load_data;
    else if (we)  mem[waddr]     <= wdata;
  end

endmodule
