// aero_alu_tb: self-checking test of the execute-stage ALU.
// Drives every Table I opcode plus call, return and no-op with random and corner operands and
// compares result and flags against a reference written here with plain integer arithmetic.
module aero_alu_tb;
  import aero_pkg::*;

  logic [6:0]  opcode;
  logic [31:0] a, b, result;
  logic        wr_en, j_en, call_en, ret_en;
  int checks = 0, failures = 0;

  aero_alu dut (.opcode, .op_a(a), .op_b(b), .result, .wr_en, .j_en, .call_en, .ret_en);

  localparam logic [6:0] OPS [18] = '{7'h00, 7'h11, 7'h12, 7'h13, 7'h31, 7'h32, 7'h33, 7'h34,
                                      7'h35, 7'h21, 7'h22, 7'h23, 7'h24, 7'h25, 7'h26, 7'h27,
                                      7'h28, 7'h29};

  task automatic check_one(input logic [6:0] op, input logic [31:0] x, input logic [31:0] y);
    longint sx, sy;
    logic [31:0] er;
    logic ej, ew, ec, eret;
    sx = longint'($signed(x));
    sy = longint'($signed(y));
    er = x; ej = 0; ew = 0; ec = 0; eret = 0;
    case (op)
      7'h11: begin er = 32'(longint'(x) + longint'(y)); ew = 1; end
      7'h12: begin er = 32'(longint'(x) - longint'(y)); ew = 1; end
      7'h13: begin er = 32'(longint'(x) * longint'(y)); ew = 1; end
      7'h31: begin er = x ^ y; ew = 1; end
      7'h32: begin er = x & y; ew = 1; end
      7'h33: begin er = x | y; ew = 1; end
      7'h34: begin er = 32'(longint'(x) / (64'd1 << y[4:0])); ew = 1; end
      7'h35: begin er = 32'(longint'(x) * (64'd1 << y[4:0])); ew = 1; end
      7'h21: ej = sx <= sy;
      7'h22: ej = sx >= sy;
      7'h23: ej = sx <  sy;
      7'h24: ej = sx >  sy;
      7'h25: ej = x == y;
      7'h26: ej = x != y;
      7'h27: ej = 1;
      7'h28: ec = 1;
      7'h29: eret = 1;
      default: ;
    endcase
    opcode = op; a = x; b = y;
    #1;
    checks++;
    if (result !== er || j_en !== ej || wr_en !== ew || call_en !== ec || ret_en !== eret) begin
      failures++;
      $display("FAIL op=%h a=%h b=%h: res=%h exp %h j=%b exp %b wr=%b exp %b", op, x, y,
               result, er, j_en, ej, wr_en, ew);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (OPS[i]) begin
      check_one(OPS[i], 32'd5, 32'd5);
      check_one(OPS[i], 32'd3, 32'd7);
      check_one(OPS[i], 32'hFFFF_FFFF, 32'd1);   // -1 vs 1: signed compares
      check_one(OPS[i], 32'h8000_0000, 32'h7FFF_FFFF);
      for (int k = 0; k < 200; k++) check_one(OPS[i], $urandom, $urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
