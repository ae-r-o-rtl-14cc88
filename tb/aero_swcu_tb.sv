// aero_swcu_tb: checks the Switching-Control-Unit on the paper's schedule scaled down by
// 10,000 (periods 80/160/160, execution times 20/60/40, starts 4/24/104, 4-cycle switch).
// Rules checked, from the scheduling scheme rather than from the RTL:
//  * partition p is only ever granted at START[p] + k * PERIOD[p], and every such instant in
//    the run is a grant (counts per partition);
//  * the idle slot begins exactly EXEC[q] + SWITCH_TIME cycles after partition q was granted;
//  * ptr_c_flag1 is high for exactly SWITCH_TIME - 1 cycles before each change of
//    ptr_c_flag2 and low otherwise;
//  * pc_load pulses in the cycle before a change to a partition, naming that partition;
//  * expiry_flag rises EXEC[q] cycles after the grant.
module aero_swcu_tb;
  import aero_pkg::*;
  localparam int ST = 4;
  localparam int RUN = 2000;
  localparam logic [2:0][31:0] PER = {32'd160, 32'd160, 32'd80};
  localparam logic [2:0][31:0] EXE = {32'd40,  32'd60,  32'd20};
  localparam logic [2:0][31:0] STA = {32'd104, 32'd24,  32'd4};

  logic clk = 0, rst_n = 0;
  logic flag1, pc_load, expiry;
  logic [1:0] flag2, next_part;
  int checks = 0, failures = 0;

  aero_swcu #(.SWITCH_TIME(ST), .PERIOD(PER), .EXEC(EXE), .START(STA)) dut (
    .clk, .rst_n, .ptr_c_flag1(flag1), .ptr_c_flag2(flag2), .pc_load, .next_part,
    .expiry_flag(expiry));

  always #5 clk = ~clk;

  task automatic fail(input string msg);
    failures++;
    $display("FAIL cycle: %s", msg);
  endtask

  initial begin
    repeat (RUN + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, last_grant, flag1_run, grants[4], idles;
    logic [1:0] prev2, cur;
    logic prev_load;
    logic [1:0] prev_next;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    cyc = 1; prev2 = 0; cur = 0; flag1_run = 0; last_grant = 0; idles = 0;
    prev_load = 0; prev_next = 0;
    foreach (grants[i]) grants[i] = 0;
    while (cyc < RUN) begin
      @(posedge clk); #1;   // values of cycle cyc
      if (flag2 != prev2) begin
        checks++;
        if (flag1_run != ST - 1) fail($sformatf("flag1 ran %0d cycles before switch at %0d", flag1_run, cyc));
        checks++;
        if (flag1) fail($sformatf("flag1 still high at switch %0d", cyc));
        if (flag2 != 0) begin
          grants[flag2]++;
          checks++;
          if (cyc < STA[flag2-1] || (cyc - STA[flag2-1]) % PER[flag2-1] != 0)
            fail($sformatf("partition %0d granted at %0d", flag2, cyc));
          checks++;
          if (!prev_load || prev_next != flag2) fail($sformatf("no pc_load before grant %0d", cyc));
        end else begin
          idles++;
          checks++;
          if (cyc != last_grant + EXE[prev2-1] + ST)
            fail($sformatf("idle at %0d, partition %0d granted at %0d", cyc, prev2, last_grant));
        end
        last_grant = cyc;
        flag1_run = 0;
      end else if (flag1) begin
        flag1_run++;
      end
      if (flag2 != 0) begin
        checks++;
        if (expiry != (cyc >= last_grant + EXE[flag2-1]))
          fail($sformatf("expiry=%b at %0d", expiry, cyc));
      end
      prev_load = pc_load;
      prev_next = next_part;
      prev2 = flag2;
      cyc++;
    end
    for (int p = 1; p <= 3; p++) begin
      checks++;
      if (grants[p] != (RUN - 1 - int'(STA[p-1])) / int'(PER[p-1]) + 1)
        fail($sformatf("partition %0d granted %0d times", p, grants[p]));
    end
    checks++;
    if (idles == 0) fail("no idle slot");
    $display("grants %0d %0d %0d idle %0d", grants[1], grants[2], grants[3], idles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
