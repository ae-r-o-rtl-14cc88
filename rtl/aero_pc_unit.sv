// aero_pc_unit: program counter and the partitions' saved pc registers.
//
// pc_reg addresses the instruction memory (the MCU adds ptr_c_flag2 as the two MSBs). Each
// cycle it takes, in priority order:
//   1. pc_load from the SwCU: the running pc is stored in the outgoing partition's pc register
//      and the incoming partition's pc register is loaded (paper, Sec. II-C);
//   2. a redirect from the execute stage: jump_reg on a taken jump or a call, the stack output
//      on a return (paper, Sec. II-B, Branching / Subroutine call);
//   3. while ptr_c_flag1 is high (or no partition is active) the pc stops. Because fetch has
//      one clock of memory latency, the word then leaving the instruction memory is dropped
//      by the no-op multiplexer; the pc is wound back once to that word's address so it is
//      fetched again when the partition resumes and no instruction is skipped or repeated;
//   4. otherwise pc + 1.
// fetch_pc is the address of the word the instruction memory outputs this cycle and
// fetch_valid says whether that word belongs to the running program (it does not after a
// redirect, a pc load, or while switching or idle). The one-step wind-back is this design's
// way of meeting the paper's requirement that a partition resumes from the exact same state.
// All registers reset to 0, so every partition starts at address 0 of its own segment.
module aero_pc_unit
  import aero_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PART_W-1:0] part,        // ptr_c_flag2
  input  logic              stall,       // ptr_c_flag1
  input  logic              pc_load,
  input  logic [PART_W-1:0] next_part,
  input  logic              redirect,
  input  logic [PC_W-1:0]   target,
  output logic [PC_W-1:0]   pc,
  output logic [PC_W-1:0]   fetch_pc,
  output logic              fetch_valid
);

  logic [PC_W-1:0] part_pc [1:NUM_PART];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc          <= '0;
      fetch_pc    <= '0;
      fetch_valid <= 1'b0;
      for (int p = 1; p <= NUM_PART; p++) part_pc[p] <= '0;
    end else begin
      fetch_pc    <= pc;
      fetch_valid <= !pc_load && !redirect && !stall && part != '0;
      if (pc_load) begin
        for (int p = 1; p <= NUM_PART; p++) begin
          if (part == PART_W'(p))      part_pc[p] <= pc;
          if (next_part == PART_W'(p)) pc <= part_pc[p];
        end
      end else if (redirect) begin
        pc <= target;
      end else if (stall || part == '0) begin
        if (fetch_valid) pc <= fetch_pc;
      end else begin
        pc <= pc + 1'b1;
      end
    end
  end

endmodule
