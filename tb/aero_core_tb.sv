// aero_core_tb: runs a test program on the pipeline in two partitions and checks the results.
//
// The bench plays the memories (instruction memory with a one-clock read, dual-port data
// memory), the timer, one sampling port and the Switching-Control-Unit (it drives
// ptr_c_flag1/ptr_c_flag2/pc_load itself). The same code is placed in partitions 1 and 2
// with different input data. It covers every ALU opcode, loads and stores, taken and
// not-taken conditional jumps, nested subroutine calls and returns, memory-mapped partition
// id and sampling port, the UART word and the shared region. Each trial switches from
// partition 1 to 2 at a random cycle and back, so the program is interrupted at a different
// point every time; the results must still equal the values computed here from the inputs.
// Also checked: the branch penalty (a taken jump costs exactly two bubbles) and that the UART
// word of each partition carries its own partition id.
module aero_core_tb;
  import aero_pkg::*;

  logic clk = 0, rst_n = 0;
  logic flag1, pc_load;
  logic [1:0] flag2, next_part;
  logic [15:0] imem_addr, imem_rdata;
  logic [10:0] dc_raddr, dc_waddr;
  logic [31:0] dc_rdata, dc_wdata, sport_data, uart_data;
  logic dc_we, uart_valid;
  logic [2:0] sport_sel;
  logic [63:0] timer;
  int checks = 0, failures = 0;

  logic [15:0] imem [65536];
  logic [31:0] dmem [2048];

  aero_core dut (.clk, .rst_n, .ptr_c_flag1(flag1), .ptr_c_flag2(flag2), .pc_load, .next_part,
                 .imem_addr, .imem_rdata, .dc_raddr, .dc_rdata, .dc_we, .dc_waddr, .dc_wdata,
                 .timer, .sport_sel, .sport_data, .uart_tx_valid(uart_valid),
                 .uart_tx_data(uart_data));

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    imem_rdata <= imem[imem_addr];
    dc_rdata   <= dmem[dc_raddr];
    if (dc_we) dmem[dc_waddr] <= dc_wdata;
    sport_data <= 32'hC0DE_0000 + 32'(sport_sel);
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) timer <= 0; else timer <= timer + 1;

  // ------------------------------------------------------------ tiny assembler
  int lbl [string];
  int pcnt;
  logic [15:0] prog [$];
  function automatic int L(string s);
    return lbl.exists(s) ? lbl[s] : 0;
  endfunction
  function automatic void label(string s); lbl[s] = pcnt; endfunction
  function automatic void emit(logic [15:0] w); prog.push_back(w); pcnt++; endfunction
  function automatic void op(logic [6:0] o, int a, int b); emit(enc_op(o, 4'(a), 4'(b))); endfunction
  function automatic void nop(); emit(16'h0000); endfunction
  function automatic void ld(int r, int addr); emit(enc_ld(4'(r), 9'(addr))); endfunction
  function automatic void st(int r, int addr); emit(enc_st(4'(r), 9'(addr))); endfunction
  function automatic void jad(string s); emit(enc_jad(14'(L(s)))); endfunction

  function automatic void build();
    prog.delete(); pcnt = 0;
    ld(1, 'h100); ld(2, 'h101); ld(3, 'h102); ld(4, 'h103); ld(5, 'h104); ld(6, 'h104);
    ld(12, 'h104); ld(13, 'h102); nop();
    label("loop");
    op(OP_ADD, 5, 1); op(OP_ADD, 6, 3); jad("loop"); nop(); op(OP_JNE, 6, 4);
    st(5, 'h105);
    ld(7, 'h100); nop(); op(OP_SUB, 7, 2); nop(); st(7, 'h106);
    ld(7, 'h100); nop(); op(OP_MUL, 7, 2); nop(); st(7, 'h107);
    ld(7, 'h100); nop(); op(OP_XOR, 7, 2); nop(); st(7, 'h108);
    ld(7, 'h100); nop(); op(OP_AND, 7, 2); nop(); st(7, 'h109);
    ld(7, 'h100); nop(); op(OP_OR,  7, 2); nop(); st(7, 'h10A);
    ld(7, 'h100); nop(); op(OP_SHR, 7, 3); nop(); st(7, 'h10B);
    ld(7, 'h100); nop(); op(OP_SHL, 7, 2); nop(); st(7, 'h10C);
    // conditions: r12 collects bit k when condition k does NOT jump
    begin
      logic [6:0] conds [7] = '{OP_JLE, OP_JGE, OP_JL, OP_JG, OP_JE, OP_JNE, OP_JUC};
      foreach (conds[k]) begin
        jad($sformatf("c%0d", k)); op(conds[k], 1, 2); op(OP_ADD, 12, 13);
        label($sformatf("c%0d", k));
        op(OP_ADD, 13, 13); nop();
      end
    end
    st(12, 'h10F);
    // nested call: sub1 adds 1 and calls sub2 which adds a
    ld(9, 'h104); jad("sub1"); op(OP_CALL, 0, 0); nop(); st(9, 'h10D);
    // memory-mapped devices
    ld(10, 'h01A); nop(); st(10, 'h018);         // partition id -> UART
    ld(11, 'h012); nop(); st(11, 'h10E);         // sampling port 2
    ld(14, 'h104); nop(); op(OP_ADD, 14, 10); nop(); op(OP_ADD, 14, 1); nop();
    st(14, 'h020);                               // shared region: pid + a at 0x020 (p1) ...
    label("end"); jad("end"); op(OP_JUC, 0, 0);
    label("sub1"); op(OP_ADD, 9, 3); jad("sub2"); op(OP_CALL, 0, 0); op(OP_RET, 0, 0);
    label("sub2"); op(OP_ADD, 9, 1); op(OP_RET, 0, 0);
  endfunction

  // expected values, computed from the inputs
  function automatic logic [31:0] exp_at(int addr, logic [31:0] a, logic [31:0] b, int n, int pid);
    logic [31:0] m;
    m = 0;
    case (addr)
      'h105: return a * n;
      'h106: return a - b;
      'h107: return a * b;
      'h108: return a ^ b;
      'h109: return a & b;
      'h10A: return a | b;
      'h10B: return a >> 1;
      'h10C: return a << b[4:0];
      'h10D: return 1 + a;
      'h10E: return 32'hC0DE_0002;
      'h10F: begin
        if (!($signed(a) <= $signed(b))) m |= 1;
        if (!($signed(a) >= $signed(b))) m |= 2;
        if (!($signed(a) <  $signed(b))) m |= 4;
        if (!($signed(a) >  $signed(b))) m |= 8;
        if (!(a == b)) m |= 16;
        if (!(a != b)) m |= 32;
        return m;
      end
      default: return 32'(pid) + a;
    endcase
  endfunction

  // ------------------------------------------------------------ partition switching
  task automatic switch_to(input int p);
    @(negedge clk); flag1 = 1;
    repeat (3) @(negedge clk);
    pc_load = (p != 0); next_part = 2'(p);
    @(negedge clk); pc_load = 0; flag1 = 0; flag2 = 2'(p);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int shared_writes = 0, last_shared = 0;
  always @(posedge clk)
    if (rst_n && dc_we && dc_waddr == {2'd0, 9'h020}) begin shared_writes++; last_shared = flag2; end
  int uart_words [$];
  int uart_parts [$];
  always @(posedge clk) if (rst_n && uart_valid) begin uart_words.push_back(uart_data); uart_parts.push_back(flag2); end

  // bubble measurement: cycles between a taken jump leaving execute and the next valid one
  int taken_jumps = 0, gap_fail = 0;

  initial begin
    logic [31:0] av [3], bv [3];
    int nv [3];
    int sw_at;
    int addrs [12] = '{'h105, 'h106, 'h107, 'h108, 'h109, 'h10A, 'h10B, 'h10C, 'h10D, 'h10E, 'h10F, 'h020};
    build(); build();   // second pass resolves forward labels
    for (int trial = 0; trial < 40; trial++) begin
      rst_n = 0; flag1 = 0; flag2 = 0; pc_load = 0; next_part = 0;
      foreach (imem[i]) imem[i] = 0;
      foreach (dmem[i]) dmem[i] = 0;
      for (int p = 1; p <= 2; p++) begin
        av[p] = (trial == 0) ? 32'(5 + p) : $urandom % 100;
        bv[p] = (trial == 0) ? 32'(3)     : ((trial % 5 == 1) ? av[p] : $urandom % 100);
        nv[p] = 1 + $urandom % 6;
        foreach (prog[i]) imem[{2'(p), 14'(i)}] = prog[i];
        dmem[{2'(p), 9'h100}] = av[p];
        dmem[{2'(p), 9'h101}] = bv[p];
        dmem[{2'(p), 9'h102}] = 1;
        dmem[{2'(p), 9'h103}] = nv[p];
        dmem[{2'(p), 9'h104}] = 0;
      end
      uart_words.delete(); uart_parts.delete();
      shared_writes = 0;
      repeat (3) @(posedge clk);
      rst_n = 1;
      switch_to(1);
      sw_at = $urandom % 250;
      repeat (sw_at) @(posedge clk);
      switch_to(2);
      repeat (400) @(posedge clk);
      switch_to(1);
      repeat (400) @(posedge clk);
      switch_to(0);
      repeat (5) @(posedge clk);
      for (int p = 1; p <= 2; p++) begin
        foreach (addrs[k]) begin
          logic [10:0] pa;
          logic [31:0] e;
          pa = (addrs[k] < 'h40) ? {2'd0, 9'(addrs[k])} : {2'(p), 9'(addrs[k])};
          e = exp_at(addrs[k], av[p], bv[p], nv[p], p);
          if (addrs[k] == 'h020) continue;
          checks++;
          if (dmem[pa] !== e) begin
            failures++;
            $display("FAIL trial %0d part %0d addr %h = %h exp %h", trial, p, addrs[k], dmem[pa], e);
          end
        end
      end
      // the shared word 0x020 holds the value of the partition that stored to it last; both
      // partitions must have reached the shared segment
      checks++;
      if (shared_writes != 2 ||
          dmem[{2'd0, 9'h020}] !== 32'(last_shared) + av[last_shared]) begin
        failures++; $display("FAIL trial %0d shared %h", trial, dmem[{2'd0, 9'h020}]);
      end
      checks++;
      if (uart_words.size() != 2) begin
        failures++; $display("FAIL trial %0d uart words %0d, switched after %0d", trial, uart_words.size(), sw_at);
      end else begin
        foreach (uart_words[i]) begin
          checks++;
          if (uart_words[i] != uart_parts[i]) begin
            failures++; $display("FAIL uart word %0d from partition %0d", uart_words[i], uart_parts[i]);
          end
        end
      end
    end
    checks++;
    if (taken_jumps == 0 || gap_fail != 0) begin
      failures++; $display("FAIL branch penalty: %0d jumps, %0d wrong gaps", taken_jumps, gap_fail);
    end
    $display("taken jumps measured %0d", taken_jumps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // a taken jump in execute at cycle t: the fetched word is dropped at t+1 and the target
  // enters decode at t+2, i.e. two bubbles
  int since = -1;
  logic [13:0] jt;
  always @(posedge clk) begin
    if (since >= 0) since++;
    if (flag1 || pc_load) since = -1;
    if (since == 1 && dut.fetch_valid) gap_fail++;
    if (since == 2) begin
      if (!dut.fetch_valid || dut.fetch_pc != jt) gap_fail++;
      since = -1;
    end
    if (dut.e_jump && !flag1) begin taken_jumps++; since = 0; jt = dut.redirect_target; end
  end
endmodule
