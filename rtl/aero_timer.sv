// aero_timer: the exposed hardware timer.
//
// A 64-bit (2 x 32) counter that counts every processor clock from reset and wraps only after
// 2^64 cycles (paper, Sec. II-B). The core reads it through memory-mapped locations, the low
// word at 0x019 (the paper's address) and the high word at 0x01B (this design's choice).
module aero_timer (
  input  logic        clk,
  input  logic        rst_n,
  output logic [63:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else        count <= count + 64'd1;
  end

endmodule
