// aero_core: the four-stage partitioned processor (fetch F, decode D, execute E, memory M).
//
// One instruction enters per clock; nothing stalls the pipeline and there is no forwarding.
// The resources a program can see are replicated per partition: a register bank, a jump
// register, a pc register (in aero_pc_unit) and a stack segment with its pointers (in
// aero_addr_stack). ptr_c_flag2, the active partition index from the SwCU, selects which copy
// is connected; the instructions themselves carry no partition information (paper, Sec. II-B).
//
//  F  The pc addresses the instruction memory through the MCU ({ptr_c_flag2, pc}). The word
//     returned a clock later passes the fetch multiplexer, which substitutes the all-zero
//     no-op while ptr_c_flag1 is high, while no partition is active, and in the cycle after a
//     taken jump/call/return (the fetch_reg flush of the paper).
//  D  The word is sliced per Fig. 1 of the paper. Operational instructions read operand_a and
//     operand_b from the active bank; a memory-address instruction writes the active jump
//     register; a memory-access instruction reads its register (the store source) and carries
//     its 9-bit data address on.
//  E  The ALU evaluates; a taken jump (j_en), a call or a return redirects the pc at the end of
//     this cycle and the instruction in D is dropped (the decode_reg flush). Calls push
//     (call address + 1) on the stack. Loads and stores present their MCU-translated address
//     to the data cache here; memory-mapped reads (timer, partition id, sampling ports) are
//     sampled here too.
//  M  Write-back and memory access share the stage: ALU results or loaded words go to the
//     active bank, stores write alu_reg (the source register passed through the ALU) to the
//     data cache, or to the UART transmit word at 0x018.
// A taken jump thus costs two bubbles, and the compiler/assembler keeps one no-op between
// dependent instructions (the bank writes through, see aero_reg_bank).
//
// Memory map of the CPU's 9-bit data space (the MCU sends addresses below 0x040 to the shared
// segment): 0x010..0x017 sampling ports (read), 0x018 UART transmit (write), 0x019 timer low
// word, 0x01A partition id, 0x01B timer high word (read). 0x018/0x019/0x01A follow the paper's
// example program; the others, and reading 0 from write-only locations, are this design's.
module aero_core
  import aero_pkg::*;
#(
  parameter int unsigned SP_W = 6   // address-stack entries per partition = 2**SP_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the SwCU
  input  logic               ptr_c_flag1,
  input  logic [PART_W-1:0]  ptr_c_flag2,
  input  logic               pc_load,
  input  logic [PART_W-1:0]  next_part,
  // instruction memory
  output logic [IMEM_AW-1:0] imem_addr,
  input  logic [ILEN-1:0]    imem_rdata,
  // data cache
  output logic [DMEM_AW-1:0] dc_raddr,
  input  logic [XLEN-1:0]    dc_rdata,
  output logic               dc_we,
  output logic [DMEM_AW-1:0] dc_waddr,
  output logic [XLEN-1:0]    dc_wdata,
  // memory-mapped devices
  input  logic [63:0]        timer,
  output logic [2:0]         sport_sel,
  input  logic [XLEN-1:0]    sport_data,
  output logic               uart_tx_valid,
  output logic [XLEN-1:0]    uart_tx_data
);

  // ------------------------------------------------------------------ pipeline registers
  typedef enum logic [2:0] {SRC_DCACHE, SRC_SPORT, SRC_IO, SRC_NONE} ld_src_e;

  typedef struct packed {
    logic               valid;
    logic [6:0]         opcode;
    logic [XLEN-1:0]    a;
    logic [XLEN-1:0]    b;
    logic [REG_W-1:0]   rd;
    logic               load;
    logic               store;
    logic [DADDR_W-1:0] maddr;
    logic [PC_W-1:0]    pc;
  } de_t;

  typedef struct packed {
    logic               wr;      // ALU result write-back
    logic               load;
    logic               store;
    logic [REG_W-1:0]   rd;
    logic [XLEN-1:0]    alu;     // alu_reg
    logic [DMEM_AW-1:0] waddr;
    logic               uart;    // store goes to the UART transmit word
    logic               mmio;    // address is a device, not the data cache
    ld_src_e            src;
    logic [XLEN-1:0]    io;      // sampled timer / partition id
  } em_t;

  de_t de_q;
  em_t em_q;

  // ------------------------------------------------------------------ fetch
  logic              redirect;
  logic [PC_W-1:0]   redirect_target;
  logic [PC_W-1:0]   pc, fetch_pc;
  logic              fetch_valid;

  aero_pc_unit u_pc (
    .clk, .rst_n,
    .part       (ptr_c_flag2),
    .stall      (ptr_c_flag1),
    .pc_load, .next_part,
    .redirect,
    .target     (redirect_target),
    .pc, .fetch_pc, .fetch_valid
  );

  logic imem_shared_unused;
  aero_mcu #(.CPU_AW(PC_W), .SHARED_TOP_P('0)) u_imcu (
    .part      (ptr_c_flag2),
    .cpu_addr  (pc),
    .phys_addr (imem_addr),
    .shared    (imem_shared_unused)
  );

  logic [ILEN-1:0] d_instr;
  assign d_instr = (fetch_valid && !ptr_c_flag1) ? imem_rdata : NOP_INSTR;

  // ------------------------------------------------------------------ decode
  itype_e           d_type;
  logic [REG_W-1:0] d_ra, d_rb;
  assign d_type = instr_type(d_instr);
  assign d_ra   = (d_type == IT_MEM) ? d_instr[12:9] : d_instr[7:4];
  assign d_rb   = d_instr[3:0];

  // replicated register banks, selected by ptr_c_flag2
  logic [XLEN-1:0]  bank_a [1:NUM_PART];
  logic [XLEN-1:0]  bank_b [1:NUM_PART];
  logic             wb_en;
  logic [XLEN-1:0]  wb_data;

  for (genvar p = 1; p <= NUM_PART; p++) begin : g_bank
    aero_reg_bank u_bank (
      .clk, .rst_n,
      .ra_addr (d_ra), .ra_data (bank_a[p]),
      .rb_addr (d_rb), .rb_data (bank_b[p]),
      .we      (wb_en && ptr_c_flag2 == PART_W'(p)),
      .w_addr  (em_q.rd),
      .w_data  (wb_data)
    );
  end

  logic [XLEN-1:0] d_a, d_b;
  always_comb begin
    d_a = '0;
    d_b = '0;
    for (int p = 1; p <= NUM_PART; p++) begin
      if (ptr_c_flag2 == PART_W'(p)) begin
        d_a = bank_a[p];
        d_b = bank_b[p];
      end
    end
  end

  // replicated jump registers, written by a memory-address instruction in decode
  logic [PC_W-1:0] jump_reg [1:NUM_PART];
  logic [PC_W-1:0] jump_cur;
  always_comb begin
    jump_cur = '0;
    for (int p = 1; p <= NUM_PART; p++)
      if (ptr_c_flag2 == PART_W'(p)) jump_cur = jump_reg[p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 1; p <= NUM_PART; p++) jump_reg[p] <= '0;
    end else if (d_type == IT_ADDR && !redirect) begin
      for (int p = 1; p <= NUM_PART; p++)
        if (ptr_c_flag2 == PART_W'(p)) jump_reg[p] <= d_instr[PC_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      de_q <= '0;
    end else begin
      de_q.valid  <= !redirect && d_type != IT_ADDR && d_instr != NOP_INSTR;
      de_q.opcode <= (d_type == IT_OP) ? d_instr[14:8] : OP_NOP;
      de_q.a      <= d_a;
      de_q.b      <= d_b;
      de_q.rd     <= d_ra;
      de_q.load   <= d_type == IT_MEM && !d_instr[13];
      de_q.store  <= d_type == IT_MEM &&  d_instr[13];
      de_q.maddr  <= d_instr[DADDR_W-1:0];
      de_q.pc     <= fetch_pc;
    end
  end

  // ------------------------------------------------------------------ execute
  logic [XLEN-1:0] alu_res;
  logic            alu_wr, j_en, call_en, ret_en;

  aero_alu u_alu (
    .opcode (de_q.opcode),
    .op_a   (de_q.a),
    .op_b   (de_q.b),
    .result (alu_res),
    .wr_en  (alu_wr),
    .j_en, .call_en, .ret_en
  );

  logic        e_jump, e_call, e_ret;
  logic [15:0] stack_out;   // 16-bit stack word; the pc uses its low PC_W bits
  assign e_jump = de_q.valid && !de_q.load && !de_q.store && j_en;
  assign e_call = de_q.valid && !de_q.load && !de_q.store && call_en;
  assign e_ret  = de_q.valid && !de_q.load && !de_q.store && ret_en;
  assign redirect        = e_jump || e_call || e_ret;
  assign redirect_target = e_ret ? stack_out[PC_W-1:0] : jump_cur;

  aero_addr_stack #(.SP_W(SP_W)) u_stack (
    .clk, .rst_n,
    .part      (ptr_c_flag2),
    .push      (e_call),
    .push_data (16'(de_q.pc + 1'b1)),
    .pop       (e_ret),
    .stack_out
  );

  // data address through the MCU
  logic [DMEM_AW-1:0] e_paddr;
  logic               dmem_shared_unused;   // steering is all the core needs
  aero_mcu #(.CPU_AW(DADDR_W), .SHARED_TOP_P(SHARED_TOP)) u_dmcu (
    .part      (ptr_c_flag2),
    .cpu_addr  (de_q.maddr),
    .phys_addr (e_paddr),
    .shared    (dmem_shared_unused)
  );
  assign dc_raddr  = e_paddr;
  assign sport_sel = de_q.maddr[2:0];

  logic e_is_sport, e_is_io, e_is_uart;
  assign e_is_sport = (de_q.maddr & ~9'h007) == ADDR_SPORT;
  assign e_is_uart  = de_q.maddr == ADDR_UART;
  assign e_is_io    = de_q.maddr == ADDR_TIMER_LO || de_q.maddr == ADDR_TIMER_HI ||
                      de_q.maddr == ADDR_PID;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      em_q <= '0;
    end else begin
      em_q.wr    <= de_q.valid && !de_q.load && !de_q.store && alu_wr;
      em_q.load  <= de_q.valid && de_q.load;
      em_q.store <= de_q.valid && de_q.store;
      em_q.rd    <= de_q.rd;
      em_q.alu   <= alu_res;
      em_q.waddr <= e_paddr;
      em_q.uart  <= e_is_uart;
      em_q.mmio  <= e_is_sport || e_is_uart || e_is_io;
      em_q.src   <= e_is_sport ? SRC_SPORT : (e_is_io ? SRC_IO :
                    (e_is_uart ? SRC_NONE : SRC_DCACHE));
      em_q.io    <= (de_q.maddr == ADDR_TIMER_LO) ? timer[31:0]  :
                    (de_q.maddr == ADDR_TIMER_HI) ? timer[63:32] :
                    XLEN'(ptr_c_flag2);
    end
  end

  // ------------------------------------------------------------------ memory / write-back
  logic [XLEN-1:0] m_load_data;
  always_comb begin
    case (em_q.src)
      SRC_DCACHE: m_load_data = dc_rdata;
      SRC_SPORT:  m_load_data = sport_data;
      SRC_IO:     m_load_data = em_q.io;
      default:    m_load_data = '0;
    endcase
  end

  assign wb_en   = em_q.wr || em_q.load;
  assign wb_data = em_q.load ? m_load_data : em_q.alu;

  assign dc_we    = em_q.store && !em_q.mmio;
  assign dc_waddr = em_q.waddr;
  assign dc_wdata = em_q.alu;

  assign uart_tx_valid = em_q.store && em_q.uart;
  assign uart_tx_data  = em_q.alu;

  // a partition's instructions must leave the pipeline before ptr_c_flag2 changes
  assert property (@(posedge clk) disable iff (!rst_n)
                   $changed(ptr_c_flag2) |-> !de_q.valid)
    else $error("partition index changed with an instruction in execute");

endmodule
