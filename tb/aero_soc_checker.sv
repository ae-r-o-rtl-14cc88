// aero_soc_checker: stimulus and checks shared by the two system testbenches.
//
// Loads the timing-analysis application (aero_app_pkg) into partitions 1..3 through the
// loader ports while reset is held, sends one UART sample to sampling port 0, then runs for
// RUN cycles and checks, from the system's ports only:
//  * schedule: partition p is granted only at START[p] + k*PERIOD[p] and every such instant
//    in the run is a grant; ptr_c_flag1 is high for SWITCH_TIME-1 cycles before each grant;
//    an idle slot follows a partition whose execution time expires with nothing else due;
//  * isolation: every UART output pair starts with the partition id of the partition that is
//    active at that moment;
//  * cycle accuracy: (cycle of transmission - timer value sent) is the same for every pair;
//  * the application's uninterrupted execution time tau_A0 (threshold to threshold inside one
//    slot) is the same in every partition and every slot (the paper's Fig. 4), and is
//    THR * ITER_CYCLES plus a fixed output overhead;
//  * in partition 1, whose slot is shorter than tau_A0, the distance between threshold outputs
//    follows the paper's equation for the effective WCET,
//       tau_A1 = (ceil(tau_A0/tau_p1) - 1) * E_p + tau_A0 - (ceil(tau_A0/tau_p1) - 1) * tau_p1,
//    with tau_p1 the usable part of the slot, within SWITCH_TIME + 4 cycles, for the first
//    run (which starts with the slot, as the equation assumes), and later runs take at most
//    one period more;
//  * each partition copied the sampling-port word into its own private word 0x110.
// Mechanisms counted (a failure if one never happens): partition switches, idle slots, pc
// restores, taken jumps (pipeline flushes), calls, returns, UART words, expiry of a slot.
module aero_soc_checker
  import aero_pkg::*;
  import aero_app_pkg::*;
#(
  parameter int unsigned ST  = 10,
  parameter logic [2:0][31:0] PERIOD = {32'd1600000, 32'd1600000, 32'd800000},
  parameter logic [2:0][31:0] EXEC   = {32'd400000,  32'd600000,  32'd200000},
  parameter logic [2:0][31:0] START  = {32'd1000010, 32'd200010,  32'd10},
  parameter int unsigned THR = 40000,
  parameter int unsigned RUN = 3500000
) (
  input  logic               clk,
  output logic               rst_n,
  output logic               imem_load_we,
  output logic [IMEM_AW-1:0] imem_load_addr,
  output logic [ILEN-1:0]    imem_load_data,
  output logic               dmem_load_we,
  output logic [DMEM_AW-1:0] dmem_load_addr,
  output logic [XLEN-1:0]    dmem_load_data,
  output logic               uart_rx_valid,
  output logic [2:0]         uart_rx_port,
  output logic [XLEN-1:0]    uart_rx_data,
  input  logic               uart_tx_valid,
  input  logic [XLEN-1:0]    uart_tx_data,
  input  logic               ptr_c_flag1,
  input  logic [PART_W-1:0]  ptr_c_flag2,
  input  logic               expiry_flag,
  // internal events, observed for the mechanism counts only
  input  logic               ev_jump,
  input  logic               ev_call,
  input  logic               ev_ret,
  input  logic [XLEN-1:0]    private_word [1:3]
);

  localparam logic [31:0] SAMPLE = 32'h5A3C_0F01;
  int checks = 0, failures = 0;
  int cyc = 0;

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, s);
  endtask

  // ---------------------------------------------------------------- loading and reset
  initial begin
    asm_t a;
    a = new();
    a.build_app();
    rst_n = 0;
    imem_load_we = 0; imem_load_addr = 0; imem_load_data = 0;
    dmem_load_we = 0; dmem_load_addr = 0; dmem_load_data = 0;
    uart_rx_valid = 0; uart_rx_port = 0; uart_rx_data = 0;
    for (int p = 1; p <= 3; p++) begin
      foreach (a.prog[i]) begin
        @(negedge clk);
        imem_load_we = 1; imem_load_addr = {2'(p), 14'(i)}; imem_load_data = a.prog[i];
      end
      for (int k = 0; k < 4; k++) begin
        @(negedge clk);
        imem_load_we = 0;
        dmem_load_we = 1; dmem_load_addr = {2'(p), 9'h100 + 9'(k)};
        dmem_load_data = (k == 0 || k == 1) ? 32'd1 : (k == 2 ? 32'(THR) : 32'd0);
      end
    end
    @(negedge clk);
    dmem_load_we = 0;
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    uart_rx_valid = 1; uart_rx_port = 0; uart_rx_data = SAMPLE;
    @(negedge clk);
    uart_rx_valid = 0;
  end

  // ---------------------------------------------------------------- observation
  int n_switch = 0, n_idle = 0, n_grant = 0, n_jump = 0, n_call = 0, n_ret = 0, n_uart = 0;
  int n_expiry_idle = 0;
  int grants [1:3];
  int last_grant = 0, flag1_run = 0;
  logic [1:0] prev2 = 0;
  logic prev1 = 0;
  // UART pairs
  logic expect_timer = 0;
  int pair_part;
  int pair_cycle;
  int delta0 = -1;
  int out_n [1:3];                       // output pairs per partition
  int out_cyc1 [1:3], out_cyc2 [1:3];    // cycles of the last two pairs
  int out_slot1 [1:3], out_slot2 [1:3];  // grant cycle of the slots they were sent in
  int tau_a0 = -1;
  int n_a0 = 0, n_a1 = 0;
  int slot_start [1:3];

  function automatic int formula_a1(int ta0, int tp, int ep);
    int n;
    n = (ta0 + tp - 1) / tp;
    return (n - 1) * ep + ta0 - (n - 1) * tp;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      // ---- schedule
      if (ptr_c_flag1 && !prev1) n_switch++;
      if (ptr_c_flag2 != prev2) begin
        checks++;
        if (flag1_run != ST - 1) fail($sformatf("flag1 high %0d cycles before switch", flag1_run));
        if (ptr_c_flag2 != 0) begin
          n_grant++;
          grants[ptr_c_flag2]++;
          slot_start[ptr_c_flag2] = cyc;
          checks++;
          if (cyc < int'(START[ptr_c_flag2-1]) ||
              (cyc - int'(START[ptr_c_flag2-1])) % int'(PERIOD[ptr_c_flag2-1]) != 0)
            fail($sformatf("partition %0d granted at %0d", ptr_c_flag2, cyc));
        end else begin
          n_idle++;
          checks++;
          if (prev2 == 0 || cyc != last_grant + int'(EXEC[prev2-1]) + int'(ST))
            fail($sformatf("idle slot at %0d", cyc));
          else n_expiry_idle++;
        end
        last_grant = cyc;
        flag1_run = 0;
      end else if (ptr_c_flag1) flag1_run++;
      prev1 = ptr_c_flag1;
      prev2 = ptr_c_flag2;
      if (ev_jump) n_jump++;
      if (ev_call) n_call++;
      if (ev_ret)  n_ret++;
      // ---- UART
      if (uart_tx_valid) begin
        n_uart++;
        if (!expect_timer) begin
          pair_part  = int'(uart_tx_data);
          pair_cycle = cyc;
          checks++;
          if (uart_tx_data != 32'(ptr_c_flag2) || ptr_c_flag2 == 0)
            fail($sformatf("id word %0d sent while partition %0d active", uart_tx_data, ptr_c_flag2));
          expect_timer = 1;
        end else begin
          int d, p;
          expect_timer = 0;
          d = cyc - int'(uart_tx_data);
          checks++;
          if (delta0 < 0) delta0 = d;
          else if (d != delta0) fail($sformatf("timer word %0d sent at %0d", uart_tx_data, cyc));
          p = pair_part;
          // The program sends a pair when m == i and again at the threshold, so outputs of
          // the same kind are two pairs apart.
          if (p >= 1 && p <= 3) begin
            if (out_n[p] >= 2) begin
              int gap;
              gap = cyc - out_cyc2[p];
              if (out_slot2[p] == slot_start[p] && out_slot1[p] == slot_start[p]) begin
                // uninterrupted: tau_A0
                n_a0++;
                checks++;
                if (tau_a0 < 0) begin
                  tau_a0 = gap;
                  if (gap < int'(THR) * ITER_CYCLES - 2 * ITER_CYCLES ||
                      gap > int'(THR) * ITER_CYCLES + 60)
                    fail($sformatf("tau_A0 = %0d for threshold %0d", gap, THR));
                end else if (gap != tau_a0) fail($sformatf("tau_A0 %0d != %0d in partition %0d", gap, tau_a0, p));
              end else if (p == 1 && tau_a0 > 0 && int'(EXEC[0]) < tau_a0) begin
                int e;
                n_a1++;
                e = formula_a1(tau_a0, int'(EXEC[0]) - int'(ST), int'(PERIOD[0]));
                checks++;
                if (n_a1 == 1) begin
                  // the program starts with partition 1's first slot, as the equation assumes
                  if (gap < e - int'(ST) - 4 || gap > e + int'(ST) + 4)
                    fail($sformatf("partition 1 WCET %0d, equation gives %0d", gap, e));
                  else $display("partition 1 effective WCET %0d cycles, equation %0d", gap, e);
                end else if (gap > e + int'(PERIOD[0])) begin
                  // later runs start anywhere in a slot: at most one more period
                  fail($sformatf("partition 1 run took %0d, bound %0d", gap, e + int'(PERIOD[0])));
                end
              end
            end
            out_n[p]++;
            out_cyc2[p]  = out_cyc1[p];  out_slot2[p] = out_slot1[p];
            out_cyc1[p]  = cyc;          out_slot1[p] = slot_start[p];
          end
        end
      end
      // ---- end of run
      if (cyc == int'(RUN)) begin
        for (int p = 1; p <= 3; p++) begin
          checks++;
          if (grants[p] != (int'(RUN) - int'(START[p-1])) / int'(PERIOD[p-1]) + 1)
            fail($sformatf("partition %0d granted %0d times", p, grants[p]));
          checks++;
          if (private_word[p] != SAMPLE) fail($sformatf("partition %0d sample word %h", p, private_word[p]));
        end
        checks++;
        if (n_a0 == 0) fail("tau_A0 never measured");
        checks++;
        if (EXEC[0] < THR * ITER_CYCLES && n_a1 == 0) fail("partition-1 WCET never measured");
        $display("switches %0d grants %0d idle %0d (after expiry %0d) jumps %0d calls %0d returns %0d uart words %0d tau_A0 %0d",
                 n_switch, n_grant, n_idle, n_expiry_idle, n_jump, n_call, n_ret, n_uart, tau_a0);
        if (n_switch == 0) fail("no partition switch");
        if (n_idle == 0)   fail("no idle slot");
        if (n_grant == 0)  fail("no pc restore");
        if (n_jump == 0)   fail("no taken jump");
        if (n_call == 0)   fail("no call");
        if (n_ret == 0)    fail("no return");
        if (n_uart == 0)   fail("no UART word");
        if (n_expiry_idle == 0) fail("no expiry");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
      cyc++;
    end
  end

  initial begin
    foreach (grants[p]) begin
      grants[p] = 0; out_n[p] = 0; out_cyc1[p] = 0; out_cyc2[p] = 0;
      out_slot1[p] = -1; out_slot2[p] = -1; slot_start[p] = 0;
    end
  end
endmodule
