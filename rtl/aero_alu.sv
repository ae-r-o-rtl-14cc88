// aero_alu: execute-stage arithmetic and condition unit.
//
// Purely combinational. It takes the 7-bit opcode of an operational instruction and the two
// operand values chosen in decode, and returns the arithmetic result (captured by the core in
// alu_reg) and the control flags (alu_ctrl_flags in the paper): j_en for a taken jump, call_en
// for a subroutine call and ret_en for a return. Opcode values and operations are the paper's
// Table I; mul keeps the low 32 bits, as a single-cycle DSP multiplier would. Any opcode
// without an arithmetic meaning (the no-op, the compares, a memory-access store) passes op_a
// through to the result, which is how a store carries its source register to the data cache.
// This design's own choices: compares are signed (the C int of the paper's software), shift
// amounts use the low five bits of op_b, and call/return use opcodes 0x28/0x29.
module aero_alu
  import aero_pkg::*;
(
  input  logic [6:0]      opcode,
  input  logic [XLEN-1:0] op_a,
  input  logic [XLEN-1:0] op_b,
  output logic [XLEN-1:0] result,
  output logic            wr_en,    // result is to be written back to operand_a's register
  output logic            j_en,     // jump condition met
  output logic            call_en,  // subroutine call
  output logic            ret_en    // subroutine return
);

  logic signed [XLEN-1:0] sa, sb;
  assign sa = op_a;
  assign sb = op_b;

  always_comb begin
    result  = op_a;
    j_en    = 1'b0;
    call_en = 1'b0;
    ret_en  = 1'b0;
    case (opcode)
      OP_ADD:  result = op_a + op_b;
      OP_SUB:  result = op_a - op_b;
      OP_MUL:  result = op_a * op_b;
      OP_XOR:  result = op_a ^ op_b;
      OP_AND:  result = op_a & op_b;
      OP_OR:   result = op_a | op_b;
      OP_SHR:  result = op_a >> op_b[4:0];
      OP_SHL:  result = op_a << op_b[4:0];
      OP_JLE:  j_en = (sa <= sb);
      OP_JGE:  j_en = (sa >= sb);
      OP_JL:   j_en = (sa <  sb);
      OP_JG:   j_en = (sa >  sb);
      OP_JE:   j_en = (op_a == op_b);
      OP_JNE:  j_en = (op_a != op_b);
      OP_JUC:  j_en = 1'b1;
      OP_CALL: call_en = 1'b1;
      OP_RET:  ret_en  = 1'b1;
      default: ;
    endcase
  end

  assign wr_en = op_writes_reg(opcode);

endmodule
