// aero_swcu: Switching-Control-Unit, the time-triggered partition scheduler (co-processor).
//
// Every partition p has a period clock that counts down by one each cycle; one execution clock,
// shared by all, counts up. When partition p is given the processor its period clock is
// reloaded with PERIOD[p] and the execution clock cleared; when the execution clock reaches
// EXEC[p] the expiry flag rises. Reset loads the period clocks with START[p], the starting
// sequence that orders the partitions. All of this is the paper's scheme (Sec. II-C).
//
// A switch to partition p starts when p's period clock equals SWITCH_TIME: ptr_c_flag1 goes
// high, the fetch stage then feeds no-ops, the pipeline drains and the pc stops. In the cycle
// when the period clock is 1, pc_load asks the pc unit to save the running pc into the outgoing
// partition's pc register and to load p's. At the next edge ptr_c_flag2 becomes p and
// ptr_c_flag1 falls, so the switch takes SWITCH_TIME cycles, SWITCH_TIME-1 of them with
// ptr_c_flag1 high (Fig. 3 of the paper draws the same order of events).
//
// This design's own choices, where the paper is silent:
//  * When the active partition's time expires and no other partition's switch has started,
//    the SwCU switches to index 0, the idle slot in which no partition runs (the paper's
//    slot "X"), with the same SWITCH_TIME procedure.
//  * A switch under way is never interrupted; if two partitions' period clocks reach
//    SWITCH_TIME together the lowest index wins (the paper requires they never compete).
//  * A period clock that reaches 0 without being granted reloads PERIOD[p].
// Defaults are the paper's demonstration schedule at 50 MHz: periods 16/32/32 ms, execution
// times 4/12/8 ms, a 10-cycle switch, and starting offsets close to those of Table II.
// Packed parameter arrays are indexed [p-1] for partition p.
module aero_swcu
  import aero_pkg::*;
#(
  parameter int unsigned CNT_W       = 32,
  parameter int unsigned SWITCH_TIME = 10,
  parameter logic [NUM_PART-1:0][CNT_W-1:0] PERIOD = {32'd1600000, 32'd1600000, 32'd800000},
  parameter logic [NUM_PART-1:0][CNT_W-1:0] EXEC   = {32'd400000,  32'd600000,  32'd200000},
  parameter logic [NUM_PART-1:0][CNT_W-1:0] START  = {32'd1000010, 32'd200010,  32'd10}
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              ptr_c_flag1,  // switching in progress: stall pc, fetch no-ops
  output logic [PART_W-1:0] ptr_c_flag2,  // active partition index, 0 = idle
  output logic              pc_load,      // save running pc, load next partition's pc
  output logic [PART_W-1:0] next_part,    // partition being switched to
  output logic              expiry_flag   // active partition has used its execution time
);

  logic [CNT_W-1:0]  per_clk [NUM_PART];
  logic [CNT_W-1:0]  exec_clk;
  logic [CNT_W-1:0]  sw_cnt;
  logic              switching;
  logic [PART_W-1:0] target;

  // trigger search: lowest-index non-active partition whose period clock hits SWITCH_TIME
  logic              trig;
  logic [PART_W-1:0] trig_part;
  always_comb begin
    trig      = 1'b0;
    trig_part = '0;
    for (int p = NUM_PART; p >= 1; p--) begin
      if (per_clk[p-1] == CNT_W'(SWITCH_TIME) && PART_W'(p) != ptr_c_flag2) begin
        trig      = 1'b1;
        trig_part = PART_W'(p);
      end
    end
  end

  always_comb begin
    expiry_flag = 1'b0;
    for (int p = 1; p <= NUM_PART; p++)
      if (ptr_c_flag2 == PART_W'(p) && exec_clk >= EXEC[p-1]) expiry_flag = 1'b1;
  end

  logic grant;
  assign grant     = switching && sw_cnt == CNT_W'(1);
  assign pc_load   = grant && target != '0;
  assign next_part = target;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PART; p++) per_clk[p] <= START[p];
      exec_clk    <= '0;
      sw_cnt      <= '0;
      switching   <= 1'b0;
      target      <= '0;
      ptr_c_flag1 <= 1'b0;
      ptr_c_flag2 <= '0;
    end else begin
      for (int p = 0; p < NUM_PART; p++) begin
        if (grant && target == PART_W'(p+1)) per_clk[p] <= PERIOD[p];
        else if (per_clk[p] == '0)           per_clk[p] <= PERIOD[p] - 1'b1;
        else                                 per_clk[p] <= per_clk[p] - 1'b1;
      end
      exec_clk <= grant ? '0 : exec_clk + 1'b1;

      if (grant) begin
        switching   <= 1'b0;
        ptr_c_flag1 <= 1'b0;
        ptr_c_flag2 <= target;
      end else if (switching) begin
        sw_cnt <= sw_cnt - 1'b1;
      end else if (trig) begin
        switching   <= 1'b1;
        ptr_c_flag1 <= 1'b1;
        target      <= trig_part;
        sw_cnt      <= CNT_W'(SWITCH_TIME - 1);
      end else if (expiry_flag) begin
        switching   <= 1'b1;
        ptr_c_flag1 <= 1'b1;
        target      <= '0;
        sw_cnt      <= CNT_W'(SWITCH_TIME - 1);
      end
    end
  end

  initial begin
    assert (SWITCH_TIME >= 3)
      else $error("SWITCH_TIME must cover the pipeline drain (>= 3 cycles)");
  end

endmodule
