// aero_mcu_tb: self-checking test of the memory control unit's address formation.
// Every partition index and every CPU data address: the two MSBs must be the partition index,
// or 0 for addresses in the shared window, and the low bits must be the CPU address.
module aero_mcu_tb;
  import aero_pkg::*;

  logic [1:0]  part;
  logic [8:0]  cpu_addr;
  logic [10:0] phys;
  logic        shared;
  int checks = 0, failures = 0;

  aero_mcu dut (.part, .cpu_addr, .phys_addr(phys), .shared);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 4; p++) begin
      for (int a = 0; a < 512; a++) begin
        part = 2'(p); cpu_addr = 9'(a);
        #1;
        checks++;
        if (phys !== {(a < 64) ? 2'd0 : 2'(p), 9'(a)} || shared !== (a < 64)) begin
          failures++;
          $display("FAIL part=%0d addr=%h phys=%h", p, a, phys);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
