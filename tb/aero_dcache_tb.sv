// aero_dcache_tb: random reads and writes on the two ports of the data cache, plus loader
// writes, against a shadow copy; checks the registered read and that a read in the same cycle
// as a write to the same address returns the old word.
module aero_dcache_tb;
  logic clk = 0;
  logic [10:0] raddr, waddr, laddr;
  logic [31:0] rdata, wdata, ldata;
  logic we, lwe;
  logic [31:0] shadow [2048];
  int checks = 0, failures = 0;

  aero_dcache dut (.clk, .raddr, .rdata, .we, .waddr, .wdata,
                   .load_we(lwe), .load_addr(laddr), .load_data(ldata));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] expect_rd;
    we = 0; lwe = 0; raddr = 0; waddr = 0; wdata = 0; laddr = 0; ldata = 0;
    // initialise everything through the loader
    for (int i = 0; i < 2048; i++) begin
      @(negedge clk); lwe = 1; laddr = 11'(i); ldata = $urandom; shadow[i] = ldata;
    end
    @(negedge clk); lwe = 0;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      we    = 1'($urandom);
      waddr = 11'($urandom % 64);
      wdata = $urandom;
      raddr = (k % 4 == 0) ? waddr : 11'($urandom % 64);
      expect_rd = shadow[raddr];
      @(posedge clk); #1;
      checks++;
      if (rdata !== expect_rd) begin
        failures++; $display("FAIL read %h got %h exp %h", raddr, rdata, expect_rd);
      end
      if (we) shadow[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
