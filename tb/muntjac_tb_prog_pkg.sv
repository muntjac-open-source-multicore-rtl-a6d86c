// Test program for the core and SoC testbenches, assembled by SystemVerilog
// functions (RV64IMAC encodings) into a byte image.
//
// Every hart runs the same code: read mhartid; sum n..1 with n = 10 + hartid
// in a branch loop; MUL, DIVU and REM by zero; a run of compressed
// instructions that leaves a 32-bit instruction straddling two fetch words;
// three calls to a function (JAL/RET, for the BTB and RAS); an AMOADD and an
// LR/SC retry loop on shared counters; a barrier spinning on the shared
// counter; then a timer interrupt: program mtimecmp through the CLINT,
// enable MTIE and MIE, WFI, and in the handler record mcause and disarm the
// timer; finally a done flag. Results go to MEM_BASE + offset + 8*hartid,
// offsets given by the R_* constants. The image is built in two passes so
// that forward labels resolve.
package muntjac_tb_prog_pkg;
  localparam int R_SUM = 'h100, R_QUO = 'h140, R_REM = 'h180, R_CMP = 'h1C0,
                 R_CALL = 'h200, R_DONE = 'h240, R_CAUSE = 'h2C0;
  localparam int CNT_AMO = 'h0, CNT_LRSC = 'h8;

  typedef logic [7:0] bytes_t [];

  function automatic logic [31:0] r(int f7, int rs2, int rs1, int f3, int rd, int op);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] i(int imm, int rs1, int f3, int rd, int op);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] s(int imm, int rs2, int rs1, int f3);
    logic [11:0] m; m = 12'(imm);
    return {m[11:5], 5'(rs2), 5'(rs1), 3'(f3), m[4:0], 7'h23};
  endfunction
  function automatic logic [31:0] b(int off, int rs2, int rs1, int f3);
    logic [12:0] o; o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), 3'(f3), o[4:1], o[11], 7'h63};
  endfunction
  function automatic logic [31:0] j(int off, int rd);
    logic [20:0] o; o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'h6F};
  endfunction
  function automatic logic [31:0] u(int imm20, int rd, int op);
    return {20'(imm20), 5'(rd), 7'(op)};
  endfunction

  // registers
  localparam int ZERO = 0, RA = 1, T0 = 5, T1 = 6, T2 = 7, S0 = 8, S1 = 9,
                 A0 = 10, A1 = 11, A2 = 12, A3 = 13, A4 = 14, A5 = 15,
                 A6 = 16, A7 = 17, T3 = 28, T4 = 29, T5 = 30, T6 = 31;

  class asm_t;
    logic [7:0] img [$];
    int lab [string];
    function void w32(logic [31:0] x);
      for (int k = 0; k < 4; k++) img.push_back(x[k*8 +: 8]);
    endfunction
    function void w16(logic [15:0] x);
      img.push_back(x[7:0]); img.push_back(x[15:8]);
    endfunction
    function int here(); return img.size(); endfunction
    function int off(string l);
      if (lab.exists(l)) return lab[l] - here();
      return 0;
    endfunction
    function void label(string l); lab[l] = here(); endfunction
  endclass

  function automatic void emit(asm_t a, int nharts);
    a.img.delete();
    a.w32(i('hF14, ZERO, 2, T0, 'h73));          // csrr t0, mhartid
    a.w32(i(1, ZERO, 0, T1, 'h13));              // addi t1, x0, 1
    a.w32(i(31, T1, 1, T1, 'h13));               // slli t1, t1, 31
    a.w32(i(0, ZERO, 0, A0, 'h13));              // addi a0, x0, 0
    a.w32(i(10, T0, 0, A1, 'h13));               // addi a1, t0, 10
    a.label("loop");
    a.w32(r(0, A1, A0, 0, A0, 'h33));            // add a0, a0, a1
    a.w32(i(-1, A1, 0, A1, 'h13));               // addi a1, a1, -1
    a.w32(b(a.off("loop"), ZERO, A1, 1));        // bne a1, x0, loop
    a.w32(r(1, A0, A0, 0, A2, 'h33));            // mul a2, a0, a0
    a.w32(r(1, A0, A2, 5, A3, 'h33));            // divu a3, a2, a0
    a.w32(r(1, A1, A2, 6, A4, 'h33));            // rem a4, a2, a1 (a1 = 0)
    a.w32(i(3, T0, 1, T2, 'h13));                // slli t2, t0, 3
    a.w32(r(0, T1, T2, 0, T2, 'h33));            // add t2, t2, t1
    a.w32(s(R_SUM, A0, T2, 3));                  // sd a0, R_SUM(t2)
    a.w32(s(R_QUO, A3, T2, 3));                  // sd a3
    a.w32(s(R_REM, A4, T2, 3));                  // sd a4
    a.w16({3'b010, 1'b0, 5'(S0), 5'd5, 2'b01});  // c.li s0, 5
    a.w16({3'b000, 1'b0, 5'(S0), 5'd3, 2'b01});  // c.addi s0, 3
    a.w16({3'b100, 1'b0, 5'(S1), 5'(S0), 2'b10}); // c.mv s1, s0
    a.w32(s(R_CMP, S1, T2, 3));                  // sd s1 (straddles two words)
    a.w16({3'b000, 1'b0, 5'd0, 5'd0, 2'b01});    // c.nop (realign)
    a.w32(i(0, ZERO, 0, A5, 'h13));              // addi a5, x0, 0
    a.w32(i(3, ZERO, 0, S1, 'h13));              // addi s1, x0, 3
    a.label("cl");
    a.w32(j(a.off("func"), RA));                 // jal ra, func
    a.w32(i(-1, S1, 0, S1, 'h13));               // addi s1, s1, -1
    a.w32(b(a.off("cl"), ZERO, S1, 1));          // bne s1, x0, cl
    a.w32(s(R_CALL, A5, T2, 3));                 // sd a5
    a.w32(i(1, ZERO, 0, T3, 'h13));              // addi t3, x0, 1
    a.w32(r('b0000000, T3, T1, 3, ZERO, 'h2F));  // amoadd.d x0, t3, (t1)
    a.w32(i(CNT_LRSC, T1, 0, T5, 'h13));         // addi t5, t1, 8
    a.label("retry");
    a.w32(r('b0001000, 0, T5, 3, T4, 'h2F));     // lr.d t4, (t5)
    a.w32(i(1, T4, 0, T4, 'h13));                // addi t4, t4, 1
    a.w32(r('b0001100, T4, T5, 3, T6, 'h2F));    // sc.d t6, t4, (t5)
    a.w32(b(a.off("retry"), ZERO, T6, 1));       // bne t6, x0, retry
    a.w32(i(nharts, ZERO, 0, T4, 'h13));         // addi t4, x0, nharts
    a.label("wait");
    a.w32(i(0, T1, 3, T3, 'h03));                // ld t3, 0(t1)
    a.w32(b(a.off("wait"), T4, T3, 1));          // bne t3, t4, wait
    a.label("pc_here");
    a.w32(u(0, S0, 'h17));                       // auipc s0, 0
    a.w32(i(a.lab.exists("handler") ? a.lab["handler"] - a.lab["pc_here"] : 0,
            S0, 0, S0, 'h13));                   // addi s0, s0, handler-pc_here
    a.w32(i('h305, S0, 1, ZERO, 'h73));          // csrw mtvec, s0
    a.w32(u('h2000, S1, 'h37));                  // lui s1, 0x2000 (CLINT)
    a.w32(u('hC, S0, 'h37));                     // lui s0, 0xC
    a.w32(i(-8, S0, 0, S0, 'h13));               // addi s0, s0, -8 (0xBFF8)
    a.w32(r(0, S1, S0, 0, S0, 'h33));            // add s0, s0, s1
    a.w32(i(0, S0, 3, A6, 'h03));                // ld a6, 0(s0)   mtime
    a.w32(i(400, A6, 0, A6, 'h13));              // addi a6, a6, 400
    a.w32(u(4, S0, 'h37));                       // lui s0, 4 (0x4000)
    a.w32(r(0, S1, S0, 0, S0, 'h33));            // add s0, s0, s1
    a.w32(i(3, T0, 1, A7, 'h13));                // slli a7, t0, 3
    a.w32(r(0, A7, S0, 0, S0, 'h33));            // add s0, s0, a7
    a.w32(s(0, A6, S0, 3));                      // sd a6, 0(s0)  mtimecmp
    a.w32(i('h80, ZERO, 0, A7, 'h13));           // addi a7, x0, 0x80
    a.w32(i('h304, A7, 1, ZERO, 'h73));          // csrw mie, a7
    a.w32(i('h300, 8, 6, ZERO, 'h73));           // csrsi mstatus, 8
    a.w32(32'h1050_0073);                        // wfi
    a.w32(i(1, ZERO, 0, A7, 'h13));              // addi a7, x0, 1
    a.w32(s(R_DONE, A7, T2, 3));                 // sd a7, R_DONE(t2)
    a.label("end");
    a.w32(j(0, ZERO));                           // j .
    a.label("func");
    a.w32(i(1, A5, 0, A5, 'h13));                // addi a5, a5, 1
    a.w32(i(0, RA, 0, ZERO, 'h67));              // ret
    a.label("handler");
    a.w32(i('h342, ZERO, 2, S1, 'h73));          // csrr s1, mcause
    a.w32(s(R_CAUSE, S1, T2, 3));                // sd s1
    a.w32(i(-1, ZERO, 0, A6, 'h13));             // addi a6, x0, -1
    a.w32(s(0, A6, S0, 3));                      // sd a6, 0(s0)  disarm
    a.w32(32'h3020_0073);                        // mret
  endfunction

  function automatic bytes_t build(int nharts);
    asm_t a;
    bytes_t out;
    a = new();
    emit(a, nharts);
    emit(a, nharts);                             // second pass: labels known
    out = new[a.img.size()];
    foreach (out[k]) out[k] = a.img[k];
    return out;
  endfunction
endpackage
