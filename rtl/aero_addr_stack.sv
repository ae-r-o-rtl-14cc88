// aero_addr_stack: per-partition return-address stack for subroutine calls.
//
// One single-port 16-bit memory holds the stacks of all partitions; the MCU rule puts the
// partition index (ptr_c_flag2) in the two address MSBs, so each partition owns a segment of
// 2**SP_W entries. Each partition has its own stack_read_pointer (rp, the entry holding the
// return address of the current call) and stack_write_pointer (wp, where the next return
// address goes), as in the paper (Sec. II-B). A call (push) writes the return address at wp,
// then rp <= wp and wp <= wp + 1. A return (pop) decrements both pointers. When the port is not
// writing it reads the entry at rp into stack_out, the subroutine return register that feeds
// the pc multiplexer. Timing: stack_out shows the new top two clocks after a push or pop (one
// edge to move the pointers, one registered read); the core's flush after a call or return
// leaves at least that gap before the next return can reach the execute stage. The depth,
// the pointer reset values (wp = 0, rp = -1) and the wrap-around on overflow/underflow are this
// design's choices; the paper gives no stack size and no overflow handling.
module aero_addr_stack
  import aero_pkg::*;
#(
  parameter int unsigned SP_W = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PART_W-1:0] part,       // ptr_c_flag2
  input  logic              push,       // call_en
  input  logic [15:0]       push_data,  // return address
  input  logic              pop,        // ret_en
  output logic [15:0]       stack_out
);

  logic [15:0]     mem [2**(PART_W+SP_W)];
  logic [SP_W-1:0] rp [2**PART_W];
  logic [SP_W-1:0] wp [2**PART_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2**PART_W; i++) begin
        rp[i] <= '1;
        wp[i] <= '0;
      end
    end else if (push) begin
      rp[part] <= wp[part];
      wp[part] <= wp[part] + 1'b1;
    end else if (pop) begin
      rp[part] <= rp[part] - 1'b1;
      wp[part] <= wp[part] - 1'b1;
    end
  end

  // single memory port: write on push, otherwise read the top of stack
  always_ff @(posedge clk) begin
    if (push) mem[{part, wp[part]}] <= push_data;
    else      stack_out <= mem[{part, rp[part]}];
  end

endmodule
