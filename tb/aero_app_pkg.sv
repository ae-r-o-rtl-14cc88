// aero_app_pkg: a small assembler and the timing-analysis application used by the system
// testbenches.
//
// The application is the C fragment of the paper's timing analysis, hand-translated:
//     if (m == i) { uart = p_id; uart = timer; }
//     m += i;
//     if (m == threshold) { uart = p_id; uart = timer; m = zro; }
// run in an endless loop (main() called again and again). The output pair is a subroutine,
// so the program also exercises call and return. Before the loop it copies sampling port 0
// into the partition's private word 0x110. Static data (private region of each partition):
//   0x100 m (=1)   0x101 i (=1)   0x102 threshold   0x103 zro (=0)
// One loop iteration without output takes ITER_CYCLES = 10 cycles (two taken jumps at two
// bubbles each).
package aero_app_pkg;
  import aero_pkg::*;

  localparam int ITER_CYCLES = 10;

  class asm_t;
    int          lbl [string];
    logic [15:0] prog [$];
    function int L(string s); return lbl.exists(s) ? lbl[s] : 0; endfunction
    function void label(string s); lbl[s] = prog.size(); endfunction
    function void emit(logic [15:0] w); prog.push_back(w); endfunction
    function void op(logic [6:0] o, int a, int b); emit(enc_op(o, 4'(a), 4'(b))); endfunction
    function void nop(); emit(NOP_INSTR); endfunction
    function void ld(int r, int addr); emit(enc_ld(4'(r), 9'(addr))); endfunction
    function void st(int r, int addr); emit(enc_st(4'(r), 9'(addr))); endfunction
    function void jad(string s); emit(enc_jad(14'(L(s)))); endfunction

    // r1 = m, r2 = i, r3 = threshold, r4 = zro, r5/r6 scratch
    function void build_app();
      for (int pass = 0; pass < 2; pass++) begin
        prog.delete();
        ld(1, 'h100); ld(2, 'h101); ld(3, 'h102); ld(4, 'h103);
        ld(6, 'h010); nop(); st(6, 'h110);
        label("main");
        jad("skip1"); op(OP_JNE, 1, 2);
        jad("out"); op(OP_CALL, 0, 0);
        label("skip1");
        op(OP_ADD, 1, 2); nop();
        jad("main"); op(OP_JNE, 1, 3);
        jad("out"); op(OP_CALL, 0, 0);
        ld(1, 'h103);                     // m = zro
        jad("main"); op(OP_JUC, 0, 0);
        label("out");
        ld(5, 'h01A); nop(); st(5, 'h018);
        ld(5, 'h019); nop(); st(5, 'h018);
        op(OP_RET, 0, 0);
      end
    endfunction
  endclass

endpackage
