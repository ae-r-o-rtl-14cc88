// aero_soc_full_tb: the whole system at its default parameters, i.e. the paper's schedule at
// 50 MHz (periods 16/32/32 ms, execution times 4/12/8 ms, 10-cycle switch), running the
// timing-analysis application at threshold 39,990 (tau_A0 just under 400,000 cycles, 8 ms, as in the
// paper) for 3.5 million cycles (70 ms). All checks are in aero_soc_checker.
module aero_soc_full_tb;
  import aero_pkg::*;
  localparam logic [2:0][31:0] PER = {32'd1600000, 32'd1600000, 32'd800000};
  localparam logic [2:0][31:0] EXE = {32'd400000,  32'd600000,  32'd200000};
  localparam logic [2:0][31:0] STA = {32'd1000010, 32'd200010,  32'd10};

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, imem_load_we, dmem_load_we, uart_rx_valid, uart_tx_valid, flag1, expiry;
  logic [15:0] imem_load_addr, imem_load_data;
  logic [10:0] dmem_load_addr;
  logic [31:0] dmem_load_data, uart_rx_data, uart_tx_data;
  logic [2:0]  uart_rx_port;
  logic [1:0]  flag2;
  logic [31:0] priv [1:3];

  aero_soc dut (
    .clk, .rst_n, .imem_load_we, .imem_load_addr, .imem_load_data,
    .dmem_load_we, .dmem_load_addr, .dmem_load_data,
    .uart_rx_valid, .uart_rx_port, .uart_rx_data, .uart_tx_valid, .uart_tx_data,
    .ptr_c_flag1(flag1), .ptr_c_flag2(flag2), .expiry_flag(expiry));

  assign priv[1] = dut.u_dcache.mem[{2'd1, 9'h110}];
  assign priv[2] = dut.u_dcache.mem[{2'd2, 9'h110}];
  assign priv[3] = dut.u_dcache.mem[{2'd3, 9'h110}];

  aero_soc_checker #(.ST(10), .PERIOD(PER), .EXEC(EXE), .START(STA), .THR(39990), .RUN(3500000)) chk (
    .clk, .rst_n, .imem_load_we, .imem_load_addr, .imem_load_data,
    .dmem_load_we, .dmem_load_addr, .dmem_load_data,
    .uart_rx_valid, .uart_rx_port, .uart_rx_data, .uart_tx_valid, .uart_tx_data,
    .ptr_c_flag1(flag1), .ptr_c_flag2(flag2), .expiry_flag(expiry),
    .ev_jump(dut.u_core.e_jump), .ev_call(dut.u_core.e_call), .ev_ret(dut.u_core.e_ret),
    .private_word(priv));

  initial begin
    repeat (3600000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", chk.checks, chk.failures + 1);
    $finish;
  end
endmodule
