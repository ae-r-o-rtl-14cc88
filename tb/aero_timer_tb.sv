// aero_timer_tb: checks the 64-bit cycle timer counts one per clock from reset, including the
// carry from the low into the high 32-bit word (forced by preloading the count).
module aero_timer_tb;
  logic clk = 0, rst_n = 0;
  logic [63:0] count;
  int checks = 0, failures = 0;

  aero_timer dut (.clk, .rst_n, .count);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1; checks++;
    if (count !== 0) begin failures++; $display("FAIL reset %0d", count); end
    rst_n = 1;
    for (int k = 1; k <= 100; k++) begin
      @(posedge clk); #1; checks++;
      if (count !== 64'(k)) begin failures++; $display("FAIL cycle %0d count %0d", k, count); end
    end
    // carry into the high word
    @(negedge clk);
    dut.count = 64'h0000_0000_FFFF_FFFE;
    @(posedge clk); #1; checks++;
    if (count !== 64'h0000_0000_FFFF_FFFF) begin failures++; $display("FAIL %h", count); end
    @(posedge clk); #1; checks++;
    if (count !== 64'h0000_0001_0000_0000) begin failures++; $display("FAIL carry %h", count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
