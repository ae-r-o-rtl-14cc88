// aero_addr_stack_tb: drives random calls and returns in the three partitions, interleaved,
// and checks stack_out against one independent stack per partition, two clocks after each
// push or pop (the unit's stated latency). Nested calls go up to 20 deep.
module aero_addr_stack_tb;
  logic clk = 0, rst_n = 0;
  logic [1:0] part;
  logic push, pop;
  logic [15:0] push_data, stack_out;
  logic [15:0] model [4][$];
  int checks = 0, failures = 0;

  aero_addr_stack #(.SP_W(6)) dut (.clk, .rst_n, .part, .push, .push_data, .pop, .stack_out);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; push_data = 0; part = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      part = 2'(1 + $urandom % 3);
      if (model[part].size() == 0 || (model[part].size() < 20 && $urandom % 2)) begin
        push = 1; push_data = 16'($urandom);
        model[part].push_back(push_data);
      end else begin
        pop = 1;
        void'(model[part].pop_back());
      end
      @(negedge clk);
      push = 0; pop = 0;
      @(negedge clk);
      if (model[part].size() > 0) begin
        checks++;
        if (stack_out !== model[part][$]) begin
          failures++;
          $display("FAIL part %0d depth %0d top %h exp %h", part, model[part].size(),
                   stack_out, model[part][$]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
