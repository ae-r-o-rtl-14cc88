// aero_reg_bank_tb: self-checking test of one register bank.
// Random writes and reads against a shadow array; also checks the write-through path (a read
// of the register written in the same cycle sees the new value) and the reset to zero.
module aero_reg_bank_tb;
  import aero_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic [3:0]  ra, rb, wa;
  logic [31:0] rda, rdb, wd;
  logic        we;
  logic [31:0] shadow [16];
  int checks = 0, failures = 0;

  aero_reg_bank dut (.clk, .rst_n, .ra_addr(ra), .ra_data(rda), .rb_addr(rb), .rb_data(rdb),
                     .we, .w_addr(wa), .w_data(wd));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; ra = 0; rb = 0; wa = 0; wd = 0;
    foreach (shadow[i]) shadow[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // reset value
    for (int i = 0; i < 16; i++) begin
      ra = 4'(i); #1; checks++;
      if (rda !== 0) begin failures++; $display("FAIL reset r%0d=%h", i, rda); end
    end
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      we = 1'($urandom);
      wa = 4'($urandom);
      wd = $urandom;
      ra = (k % 3 == 0) ? wa : 4'($urandom);
      rb = 4'($urandom);
      #1;
      checks++;
      if (rda !== ((we && wa == ra) ? wd : shadow[ra])) begin
        failures++; $display("FAIL port a r%0d=%h", ra, rda);
      end
      checks++;
      if (rdb !== ((we && wa == rb) ? wd : shadow[rb])) begin
        failures++; $display("FAIL port b r%0d=%h", rb, rdb);
      end
      @(posedge clk);
      if (we) shadow[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
