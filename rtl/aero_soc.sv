// aero_soc: the partitioned processor system, top level.
//
// Connects the processor core, the Switching-Control-Unit that schedules the three partitions,
// the instruction memory (16-bit words, 16-bit physical address), the 32-bit dual-port data
// cache, the 64-bit hardware timer and the sampling ports of the UART interface. The UART
// itself (a vendor IP in the paper's system) is outside: its receiver delivers samples on the
// rx_* ports and the transmit word written by software leaves on uart_tx_*. The loader ports
// fill instruction and data memory while the core is held in reset (the paper loads the
// executable through the UART and copies static data at reset). ptr_c_flag1 and ptr_c_flag2
// are brought out for monitoring, as the paper exposes them on GPIO pins.
// All parameters default to the paper's demonstration: three partitions scheduled with
// periods of 16/32/32 ms and execution times of 4/12/8 ms at 50 MHz, a 10-cycle switch.
module aero_soc
  import aero_pkg::*;
#(
  parameter int unsigned CNT_W       = 32,
  parameter int unsigned SWITCH_TIME = 10,
  parameter logic [NUM_PART-1:0][CNT_W-1:0] PERIOD = {32'd1600000, 32'd1600000, 32'd800000},
  parameter logic [NUM_PART-1:0][CNT_W-1:0] EXEC   = {32'd400000,  32'd600000,  32'd200000},
  parameter logic [NUM_PART-1:0][CNT_W-1:0] START  = {32'd1000010, 32'd200010,  32'd10},
  parameter int unsigned SP_W        = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  // program / static-data loader
  input  logic               imem_load_we,
  input  logic [IMEM_AW-1:0] imem_load_addr,
  input  logic [ILEN-1:0]    imem_load_data,
  input  logic               dmem_load_we,
  input  logic [DMEM_AW-1:0] dmem_load_addr,
  input  logic [XLEN-1:0]    dmem_load_data,
  // UART IP side
  input  logic               uart_rx_valid,
  input  logic [2:0]         uart_rx_port,
  input  logic [XLEN-1:0]    uart_rx_data,
  output logic               uart_tx_valid,
  output logic [XLEN-1:0]    uart_tx_data,
  // switching monitor
  output logic               ptr_c_flag1,
  output logic [PART_W-1:0]  ptr_c_flag2,
  output logic               expiry_flag
);

  logic              pc_load;
  logic [PART_W-1:0] next_part;

  aero_swcu #(
    .CNT_W(CNT_W), .SWITCH_TIME(SWITCH_TIME), .PERIOD(PERIOD), .EXEC(EXEC), .START(START)
  ) u_swcu (
    .clk, .rst_n, .ptr_c_flag1, .ptr_c_flag2, .pc_load, .next_part, .expiry_flag
  );

  logic [IMEM_AW-1:0] imem_addr;
  logic [ILEN-1:0]    imem_rdata;
  aero_imem u_imem (
    .clk,
    .raddr (imem_addr), .rdata (imem_rdata),
    .we (imem_load_we), .waddr (imem_load_addr), .wdata (imem_load_data)
  );

  logic [DMEM_AW-1:0] dc_raddr, dc_waddr;
  logic [XLEN-1:0]    dc_rdata, dc_wdata;
  logic               dc_we;
  aero_dcache u_dcache (
    .clk,
    .raddr (dc_raddr), .rdata (dc_rdata),
    .we (dc_we), .waddr (dc_waddr), .wdata (dc_wdata),
    .load_we (dmem_load_we), .load_addr (dmem_load_addr), .load_data (dmem_load_data)
  );

  logic [63:0] timer;
  aero_timer u_timer (.clk, .rst_n, .count (timer));

  logic [2:0]      sport_sel;
  logic [XLEN-1:0] sport_data;
  aero_sampling_ports #(.NPORTS(8)) u_sports (
    .clk, .rst_n,
    .rx_valid (uart_rx_valid), .rx_port (uart_rx_port), .rx_data (uart_rx_data),
    .rd_port (sport_sel), .rd_data (sport_data)
  );

  aero_core #(.SP_W(SP_W)) u_core (
    .clk, .rst_n,
    .ptr_c_flag1, .ptr_c_flag2, .pc_load, .next_part,
    .imem_addr, .imem_rdata,
    .dc_raddr, .dc_rdata, .dc_we, .dc_waddr, .dc_wdata,
    .timer, .sport_sel, .sport_data,
    .uart_tx_valid, .uart_tx_data
  );

endmodule
