// aero_pc_unit_tb: drives the pc unit through runs, taken jumps, switch stalls and partition
// switches in a random order and compares pc, fetch_pc and fetch_valid with a reference model
// written from the unit's rules: resume address = first dropped fetch, saved per partition.
// A directed part first checks that partition 1 resumes where it stopped after partition 2 ran.
module aero_pc_unit_tb;
  import aero_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] part, next_part;
  logic stall, pc_load, redirect;
  logic [13:0] target, pc, fetch_pc;
  logic fetch_valid;
  int checks = 0, failures = 0;

  aero_pc_unit dut (.clk, .rst_n, .part, .stall, .pc_load, .next_part, .redirect, .target,
                    .pc, .fetch_pc, .fetch_valid);
  always #5 clk = ~clk;

  // reference model state
  logic [13:0] m_pc, m_fpc, m_saved [4];
  logic        m_fv;

  task automatic model_step();
    logic [13:0] npc;
    npc = m_pc;
    if (pc_load) begin
      if (part != 0) m_saved[part] = m_pc;
      npc = m_saved[next_part];
    end else if (redirect)            npc = target;
    else if (stall || part == 0)      npc = m_fv ? m_fpc : m_pc;
    else                              npc = m_pc + 14'd1;
    m_fv  = !pc_load && !redirect && !stall && part != 0;
    m_fpc = m_pc;
    m_pc  = npc;
  endtask

  task automatic cycle();
    @(posedge clk);
    model_step();
    #1;
    checks++;
    if (pc !== m_pc || fetch_pc !== m_fpc || fetch_valid !== m_fv) begin
      failures++;
      $display("FAIL pc=%0d exp %0d fpc=%0d exp %0d fv=%b exp %b", pc, m_pc, fetch_pc, m_fpc,
               fetch_valid, m_fv);
    end
  endtask

  task automatic drive(input logic st, input logic ld, input logic [1:0] np,
                       input logic rd, input logic [13:0] tg);
    @(negedge clk);
    stall = st; pc_load = ld; next_part = np; redirect = rd; target = tg;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [13:0] stop_at;
    part = 0; stall = 0; pc_load = 0; next_part = 0; redirect = 0; target = 0;
    m_pc = 0; m_fpc = 0; m_fv = 0;
    foreach (m_saved[i]) m_saved[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed: switch idle -> 1, run, jump, switch 1 -> 2, run, switch 2 -> 1
    drive(1, 0, 1, 0, 0); cycle();
    drive(1, 1, 1, 0, 0); cycle();
    @(negedge clk); part = 1;
    for (int i = 0; i < 10; i++) begin drive(0, 0, 0, 0, 0); cycle(); end
    drive(0, 0, 0, 1, 14'd200); cycle();
    for (int i = 0; i < 5; i++) begin drive(0, 0, 0, 0, 0); cycle(); end
    stop_at = fetch_pc;            // first word the no-op multiplexer will drop
    for (int i = 0; i < 3; i++) begin drive(1, 0, 0, 0, 0); cycle(); end
    drive(1, 1, 2, 0, 0); cycle();
    @(negedge clk); part = 2;
    for (int i = 0; i < 7; i++) begin drive(0, 0, 0, 0, 0); cycle(); end
    for (int i = 0; i < 3; i++) begin drive(1, 0, 0, 0, 0); cycle(); end
    drive(1, 1, 1, 0, 0); cycle();
    @(negedge clk); part = 1;
    drive(0, 0, 0, 0, 0); cycle();
    checks++;
    if (fetch_pc !== stop_at) begin
      failures++; $display("FAIL partition 1 resumed at %0d, stopped at %0d", fetch_pc, stop_at);
    end
    // random
    for (int k = 0; k < 5000; k++) begin
      logic st, ld, rd;
      logic [1:0] np;
      st = ($urandom % 6) == 0;
      ld = st && ($urandom % 3) == 0;
      np = 2'(1 + $urandom % 3);    // the SwCU loads only a partition other than the active one
      if (np == part) np = (np == 3) ? 2'd1 : np + 2'd1;
      rd = !ld && ($urandom % 8) == 0;
      drive(st, ld, np, rd, 14'($urandom));
      cycle();
      if (ld) begin @(negedge clk); part = np; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
