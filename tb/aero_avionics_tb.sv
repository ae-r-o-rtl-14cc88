// aero_avionics_tb: the three-partition avionics schedule run end to end on the whole system.
//
// The avionics demonstration puts a flight director (partition 1), an autopilot (partition 2)
// and a moving map (partition 3) on the processor. Their execution rates are 200 Hz, 200 Hz
// and 10 Hz, and each gets a window of 2, 2 and 1 ms. At 50 MHz that is periods of 250,000,
// 250,000 and 5,000,000 cycles and windows of 100,000, 100,000 and 50,000 cycles, placed back
// to back in every 5 ms frame (10, 100,010, 200,010). In the 19 frames out of 20 without a
// moving-map job the third window is an idle slot.
//
// The real applications are generated code that is not available, so each partition runs a
// stand-in periodic task with the published worst-case execution time: 1.127 ms, 1.003 ms and
// 0.319 ms. Each job stamps the timer to the UART, runs a countdown loop of 6 cycles per
// iteration sized to that time, stamps the timer again, then polls the timer until its next
// period is due. The bench checks, from the system's ports:
//  * every stamp comes from a granted partition and the two stamps of a job alternate;
//  * each job finishes inside the window it started in (end - start < window), as the
//    published table requires (partition time above application time);
//  * job length is the same for every job of a partition (isolation: the other partitions
//    and the idle slot never disturb it) and within 1% of the published WCET;
//  * consecutive job starts of a partition are one period apart (within the pc-resume jitter
//    of the polling loop), i.e. 200 Hz, 200 Hz and 10 Hz;
//  * the expected number of jobs ran, and idle slots happened.
// It runs 10.3 million cycles (206 ms) and takes several seconds to simulate.
module aero_avionics_tb;
  import aero_pkg::*;
  import aero_app_pkg::*;

  localparam logic [2:0][31:0] PER = {32'd5000000, 32'd250000, 32'd250000};
  localparam logic [2:0][31:0] EXE = {32'd50000,   32'd100000, 32'd100000};
  localparam logic [2:0][31:0] STA = {32'd200010,  32'd100010, 32'd10};
  localparam int RUN = 10_300_000;
  localparam int WCET [1:3] = '{56350, 50150, 15950};   // 1.127 / 1.003 / 0.319 ms at 50 MHz
  localparam int ITER = 6;                               // countdown loop cycles per iteration

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, imem_load_we, dmem_load_we, uart_rx_valid, uart_tx_valid, flag1, expiry;
  logic [15:0] imem_load_addr, imem_load_data;
  logic [10:0] dmem_load_addr;
  logic [31:0] dmem_load_data, uart_rx_data, uart_tx_data;
  logic [2:0]  uart_rx_port;
  logic [1:0]  flag2;

  aero_soc #(.SWITCH_TIME(10), .PERIOD(PER), .EXEC(EXE), .START(STA)) dut (
    .clk, .rst_n, .imem_load_we, .imem_load_addr, .imem_load_data,
    .dmem_load_we, .dmem_load_addr, .dmem_load_data,
    .uart_rx_valid, .uart_rx_port, .uart_rx_data, .uart_tx_valid, .uart_tx_data,
    .ptr_c_flag1(flag1), .ptr_c_flag2(flag2), .expiry_flag(expiry));

  int checks = 0, failures = 0;
  int cyc = 0;

  task automatic fail(input string s);
    failures++;
    if (failures < 20) $display("FAIL @%0d: %s", cyc, s);
  endtask

  // Periodic task. Data: 0x100 loop count, 0x101 one, 0x102 zero, 0x103 period - 200.
  // r1 count, r2 one, r4 zero, r7 stamp, r8 poll, r9 release time of the next job, r10 offset.
  function automatic void build_task(asm_t a);
    for (int pass = 0; pass < 2; pass++) begin
      a.prog.delete();
      a.ld(2, 'h101); a.ld(4, 'h102); a.ld(10, 'h103);
      a.label("main");
      a.ld(7, 'h019); a.ld(9, 'h019); a.nop(); a.st(7, 'h018);   // start stamp
      a.op(OP_ADD, 9, 10);
      a.ld(1, 'h100); a.nop();
      a.label("loop");
      a.op(OP_SUB, 1, 2); a.nop();
      a.jad("loop"); a.op(OP_JNE, 1, 4);
      a.ld(7, 'h019); a.nop(); a.st(7, 'h018);                   // end stamp
      a.label("wait");
      a.ld(8, 'h019); a.nop();
      a.jad("wait"); a.op(OP_JL, 8, 9);
      a.jad("main"); a.op(OP_JUC, 0, 0);
    end
  endfunction

  initial begin
    asm_t a;
    a = new();
    build_task(a);
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
        case (k)
          0: dmem_load_data = 32'((WCET[p] + ITER / 2) / ITER);
          1: dmem_load_data = 32'd1;
          2: dmem_load_data = 32'd0;
          default: dmem_load_data = PER[p-1] - 32'd200;
        endcase
      end
    end
    @(negedge clk);
    dmem_load_we = 0;
    @(negedge clk);
    rst_n = 1;
  end

  // ---------------------------------------------------------------- observation
  int jobs [1:3], job_len [1:3], last_start [1:3], start_stamp [1:3], win_start [1:3];
  bit in_job [1:3];
  int n_idle = 0;
  logic [1:0] prev2 = 0;

  initial foreach (jobs[p]) begin
    jobs[p] = 0; job_len[p] = -1; last_start[p] = -1; in_job[p] = 0; win_start[p] = 0;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (flag2 != prev2) begin
        if (flag2 == 0) n_idle++;
        else win_start[flag2] = cyc;
      end
      if (uart_tx_valid) begin
        automatic int p = int'(flag2);
        automatic int t = int'(uart_tx_data);
        checks++;
        if (p == 0) fail("UART word while no partition is active");
        else if (!in_job[p]) begin
          // job start
          if (last_start[p] >= 0) begin
            checks++;
            if (t - last_start[p] < int'(PER[p-1]) - 20 || t - last_start[p] > int'(PER[p-1]) + 20)
              fail($sformatf("partition %0d jobs %0d cycles apart", p, t - last_start[p]));
          end
          last_start[p]  = t;
          start_stamp[p] = t;
          in_job[p]      = 1;
        end else begin
          automatic int len = t - start_stamp[p];
          jobs[p]++;
          in_job[p] = 0;
          checks++;
          if (start_stamp[p] < win_start[p] || len >= int'(EXE[p-1]))
            fail($sformatf("partition %0d job of %0d cycles left its window", p, len));
          checks++;
          if (job_len[p] < 0) job_len[p] = len;
          else if (len != job_len[p])
            fail($sformatf("partition %0d job took %0d cycles, earlier %0d", p, len, job_len[p]));
          checks++;
          if (len * 100 < WCET[p] * 99 || len * 100 > WCET[p] * 101)
            fail($sformatf("partition %0d job %0d cycles, published WCET %0d", p, len, WCET[p]));
        end
      end
      prev2 = flag2;
      cyc++;
      if (cyc == RUN) begin
        for (int p = 1; p <= 3; p++) begin
          automatic int want = (RUN - int'(STA[p-1]) - int'(EXE[p-1])) / int'(PER[p-1]) + 1;
          checks++;
          if (jobs[p] < want)
            fail($sformatf("partition %0d ran %0d jobs, expected %0d", p, jobs[p], want));
          $display("partition %0d: %0d jobs of %0d cycles (published WCET %0d)",
                   p, jobs[p], job_len[p], WCET[p]);
        end
        checks++;
        if (n_idle < 19) fail($sformatf("only %0d idle slots", n_idle));
        $display("idle slots %0d", n_idle);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (RUN + 2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
