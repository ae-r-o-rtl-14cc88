// aero_imem_tb: loads random words through the loader port and reads them back through the
// fetch port, checking the one-clock registered read.
module aero_imem_tb;
  logic clk = 0;
  logic [15:0] raddr, waddr, rdata, wdata;
  logic we;
  logic [15:0] addrs [256];
  logic [15:0] vals  [256];
  int checks = 0, failures = 0;

  aero_imem dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; raddr = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < 256; i++) begin
      addrs[i] = {8'(i), 8'($urandom)};   // distinct addresses in all four segments
      vals[i]  = 16'($urandom);
    end
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we = 1; waddr = addrs[i]; wdata = vals[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); raddr = addrs[i];
      @(posedge clk); #1;
      checks++;
      if (rdata !== vals[i]) begin
        failures++; $display("FAIL addr %h read %h exp %h", addrs[i], rdata, vals[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
