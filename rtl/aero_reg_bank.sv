// aero_reg_bank: the register bank of one partition (16 x 32 bits).
//
// Two combinational read ports serve operand_a and operand_b in decode; one write port takes
// the write-back of the memory stage at the clock edge. The core instantiates one bank per
// partition and enables only the active partition's bank, which is the paper's replicated-bank
// spatial isolation. The paper has no forwarding and says one inserted no-op resolves a data
// hazard; for that to hold, a read of the register being written in the same cycle returns
// the new value (write-through). That write-through is this design's choice. Registers are
// cleared by reset.
module aero_reg_bank
  import aero_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [REG_W-1:0] ra_addr,
  output logic [XLEN-1:0]  ra_data,
  input  logic [REG_W-1:0] rb_addr,
  output logic [XLEN-1:0]  rb_data,
  input  logic             we,
  input  logic [REG_W-1:0] w_addr,
  input  logic [XLEN-1:0]  w_data
);

  logic [XLEN-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[w_addr] <= w_data;
    end
  end

  assign ra_data = (we && w_addr == ra_addr) ? w_data : regs[ra_addr];
  assign rb_data = (we && w_addr == rb_addr) ? w_data : regs[rb_addr];

endmodule
