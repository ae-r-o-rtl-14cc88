// aero_pkg: types and constants shared by the partitioned processor.
//
// The instruction formats follow the paper's 16-bit register-register ISA:
//   memory-access  : [15:14]=2'b11, [13]=store(1)/load(0), [12:9]=register, [8:0]=data address
//   memory-address : [15:14]=2'b10, [13:0]=instruction address (jump / call target)
//   operational    : [15]=0, [14:8]=opcode, [7:4]=operand_a (also destination), [3:0]=operand_b
// Opcodes 0x11..0x35 and 0x21..0x27 are the paper's Table I. The no-op is the all-zero word the
// fetch stage inserts. The paper gives no encodings for subroutine call and return; 0x28 and
// 0x29 are this design's choice.
// Partition index 0 means "no partition active" (the idle slot); partitions are 1..NUM_PART.
package aero_pkg;

  localparam int unsigned NUM_PART    = 3;   // partitions in the paper's demonstrator
  localparam int unsigned PART_W      = 2;   // width of ptr_c_flag2 (MCU drives two address MSBs)
  localparam int unsigned XLEN        = 32;  // data path width
  localparam int unsigned ILEN        = 16;  // instruction width
  localparam int unsigned NREGS       = 16;  // registers per bank (4-bit register fields)
  localparam int unsigned REG_W       = 4;
  localparam int unsigned PC_W        = 14;  // instruction address bits seen by the CPU
  localparam int unsigned DADDR_W     = 9;   // data address bits seen by the CPU
  localparam int unsigned IMEM_AW     = PART_W + PC_W;     // 16-bit physical instruction address
  localparam int unsigned DMEM_AW     = PART_W + DADDR_W;  // 11-bit physical data address

  // Memory-mapped locations inside the CPU's 9-bit data address space.
  // UART, timer and partition id are the paper's addresses; the rest is this design's choice.
  localparam logic [DADDR_W-1:0] ADDR_UART     = 9'h018;
  localparam logic [DADDR_W-1:0] ADDR_TIMER_LO = 9'h019;
  localparam logic [DADDR_W-1:0] ADDR_PID      = 9'h01A;
  localparam logic [DADDR_W-1:0] ADDR_TIMER_HI = 9'h01B;
  localparam logic [DADDR_W-1:0] ADDR_SPORT    = 9'h010;  // sampling ports 0x010..0x017
  localparam int unsigned        NUM_SPORTS    = 8;
  // CPU addresses below SHARED_TOP reach the shared region (segment 0); the rest are private.
  localparam logic [DADDR_W-1:0] SHARED_TOP    = 9'h040;

  typedef enum logic [6:0] {
    OP_NOP  = 7'h00,
    OP_ADD  = 7'h11,
    OP_SUB  = 7'h12,
    OP_MUL  = 7'h13,
    OP_JLE  = 7'h21,
    OP_JGE  = 7'h22,
    OP_JL   = 7'h23,
    OP_JG   = 7'h24,
    OP_JE   = 7'h25,
    OP_JNE  = 7'h26,
    OP_JUC  = 7'h27,
    OP_CALL = 7'h28,
    OP_RET  = 7'h29,
    OP_XOR  = 7'h31,
    OP_AND  = 7'h32,
    OP_OR   = 7'h33,
    OP_SHR  = 7'h34,
    OP_SHL  = 7'h35
  } opcode_e;

  localparam logic [ILEN-1:0] NOP_INSTR = '0;

  typedef enum logic [1:0] {
    IT_OP   = 2'b00,   // operational
    IT_ADDR = 2'b10,   // memory-address
    IT_MEM  = 2'b11    // memory-access
  } itype_e;

  function automatic itype_e instr_type(input logic [ILEN-1:0] ins);
    if (!ins[15])     return IT_OP;
    else if (ins[14]) return IT_MEM;
    else              return IT_ADDR;
  endfunction

  // True for opcodes whose result is written back to operand_a.
  function automatic logic op_writes_reg(input logic [6:0] op);
    case (op)
      OP_ADD, OP_SUB, OP_MUL, OP_XOR, OP_AND, OP_OR, OP_SHR, OP_SHL: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  // Instruction builders, used by testbenches to assemble programs.
  function automatic logic [ILEN-1:0] enc_op(input logic [6:0] op, input logic [3:0] a,
                                             input logic [3:0] b);
    return {1'b0, op, a, b};
  endfunction
  function automatic logic [ILEN-1:0] enc_ld(input logic [3:0] r, input logic [8:0] addr);
    return {2'b11, 1'b0, r, addr};
  endfunction
  function automatic logic [ILEN-1:0] enc_st(input logic [3:0] r, input logic [8:0] addr);
    return {2'b11, 1'b1, r, addr};
  endfunction
  function automatic logic [ILEN-1:0] enc_jad(input logic [13:0] target);
    return {2'b10, target};
  endfunction

endpackage
