// aero_mcu: memory control unit, the spatial-isolation half of the address path.
//
// Combinational. A physical address of n bits is formed as {segment, cpu_addr}: the CPU drives
// the low n-2 bits and the MCU the two MSBs, taken from the active partition index ptr_c_flag2,
// so software in every partition uses the same addresses and still lands in its own segment
// (paper, Sec. II-D). Segment 0 belongs to no partition (index 0 is the idle slot) and holds
// the data cache's shared region. How the paper's shared region is reached is not stated; in
// this design a CPU address below SHARED_TOP is steered to segment 0, so the low end of every
// partition's address space is a common window (the memory-mapped I/O of the paper's example,
// 0x018..0x01A, lies in it). The default window is the data side's, SHARED_TOP = 0x040.
// SHARED_TOP_P = 0 disables the window, as the core does for instruction memory; the
// comparison is then constant, which lint reports and which is intended.
module aero_mcu
  import aero_pkg::*;
#(
  parameter int unsigned    CPU_AW     = DADDR_W,
  parameter logic [CPU_AW-1:0] SHARED_TOP_P = CPU_AW'(SHARED_TOP)
) (
  input  logic [PART_W-1:0]        part,      // ptr_c_flag2
  input  logic [CPU_AW-1:0]        cpu_addr,
  output logic [PART_W+CPU_AW-1:0] phys_addr,
  output logic                     shared     // address was steered to the shared segment
);

  assign shared    = (cpu_addr < SHARED_TOP_P);
  assign phys_addr = {shared ? PART_W'(0) : part, cpu_addr};

endmodule
