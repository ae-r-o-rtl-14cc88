// aero_sampling_ports_tb: checks that a sample overwrites only its own port, that reads never
// consume a port (repeated reads return the same word) and the one-clock read latency.
module aero_sampling_ports_tb;
  logic clk = 0, rst_n = 0;
  logic rx_valid;
  logic [2:0] rx_port, rd_port;
  logic [31:0] rx_data, rd_data;
  logic [31:0] model [8];
  int checks = 0, failures = 0;

  aero_sampling_ports #(.NPORTS(8)) dut (.clk, .rst_n, .rx_valid, .rx_port, .rx_data,
                                         .rd_port, .rd_data);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rx_valid = 0; rx_port = 0; rx_data = 0; rd_port = 0;
    foreach (model[i]) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      rx_valid = ($urandom % 4) == 0;
      rx_port  = 3'($urandom);
      rx_data  = $urandom;
      rd_port  = 3'($urandom);
      @(posedge clk);
      // rd_data now shows the port as it was before this edge's update
      #1;
      checks++;
      if (rd_data !== model[rd_port]) begin
        failures++; $display("FAIL port %0d read %h exp %h", rd_port, rd_data, model[rd_port]);
      end
      if (rx_valid) model[rx_port] = rx_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
