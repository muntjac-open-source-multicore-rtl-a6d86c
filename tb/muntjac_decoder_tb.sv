// Testbench of the decoder: directed instructions from each class with the
// expected unit, operation, registers, immediate and flags; illegal
// encodings; interrupt injection overriding the instruction.
`timescale 1ns/1ps
module muntjac_decoder_tb;
  import muntjac_pkg::*;
  logic [31:0] instr;
  logic irq;
  decoded_t d;
  int checks = 0, failures = 0;

  muntjac_decoder dut (.instr_i(instr), .irq_i(irq), .d_o(d));

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (instr %h)", what, instr); end
  endtask
  task automatic put(logic [31:0] i);
    instr = i; #1;
  endtask

  initial begin
    irq = 0;
    put(32'hfff5051b);   // addiw x10,x10,-1
    chk(d.fu == FU_ALU && d.alu_op == ALU_ADD && d.word && d.op_b_imm && d.rd == 10 && d.rs1 == 10
        && d.imm == '1 && d.wr_rd && d.use_rs1 && !d.use_rs2, "addiw");
    put(32'h40b50533);   // sub x10,x10,x11
    chk(d.fu == FU_ALU && d.alu_op == ALU_SUB && !d.word && d.use_rs2 && d.rs2 == 11, "sub");
    put(32'h12345537);   // lui x10,0x12345
    chk(d.fu == FU_ALU && d.imm == 64'h12345000 && d.wr_rd, "lui");
    put(32'hfffff517);   // auipc x10,-1
    chk(d.op_a_pc && d.imm == 64'hffff_ffff_ffff_f000, "auipc");
    put(32'h0004b403);   // ld x8,0(x9)
    chk(d.fu == FU_MEM && d.mem_op == MEM_LOAD && d.mem_size == 3 && d.rd == 8 && d.rs1 == 9, "ld");
    put(32'h0004c403);   // lbu x8,0(x9)
    chk(d.mem_size == 0 && d.mem_unsigned, "lbu");
    put(32'h00113423);   // sd x1,8(x2)
    chk(d.fu == FU_MEM && d.mem_op == MEM_STORE && d.imm == 8 && !d.wr_rd && d.use_rs2 && d.rs2 == 1, "sd");
    put(32'hfe0518e3);   // bne x10,x0,-16
    chk(d.fu == FU_BRANCH && d.br_op == BR_BNE && d.imm == -64'sd16 && !d.wr_rd, "bne");
    put(32'h008000ef);   // jal x1,8
    chk(d.fu == FU_BRANCH && d.br_op == BR_JAL && d.imm == 8 && d.rd == 1 && d.wr_rd, "jal");
    put(32'h00008067);   // jalr x0,0(x1)
    chk(d.br_op == BR_JALR && d.rs1 == 1 && d.rd == 0, "ret");
    put(32'h02b50533);   // mul x10,x10,x11
    chk(d.fu == FU_MULDIV && d.md_op == 0 && !d.word, "mul");
    put(32'h02b5553b);   // divuw x10,x10,x11
    chk(d.fu == FU_MULDIV && d.md_op == 5 && d.word, "divuw");
    put(32'h00b5352f);   // amoadd.d x10,x11,(x10)
    chk(d.fu == FU_MEM && d.mem_op == MEM_AMO && d.amo_op == AMO_ADD && d.mem_size == 3, "amoadd.d");
    put(32'h1005252f);   // lr.w x10,(x10)
    chk(d.mem_op == MEM_LR && d.mem_size == 2, "lr.w");
    put(32'h18b5352f);   // sc.d x10,x11,(x10)
    chk(d.mem_op == MEM_SC && d.mem_size == 3 && d.wr_rd, "sc.d");
    put(32'h34011573);   // csrrw x10,mscratch,x2
    chk(d.fu == FU_SYS && d.sys_op == SYS_CSRRW && d.csr == 12'h340 && !d.csr_imm, "csrrw");
    put(32'h3402e573);   // csrrsi x10,mscratch,5
    chk(d.sys_op == SYS_CSRRS && d.csr_imm, "csrrsi");
    put(32'h00000073);
    chk(d.fu == FU_SYS && d.sys_op == SYS_ECALL, "ecall");
    put(32'h30200073);
    chk(d.sys_op == SYS_MRET, "mret");
    put(32'h10500073);
    chk(d.sys_op == SYS_WFI, "wfi");
    put(32'h0000100f);
    chk(d.sys_op == SYS_FENCE_I, "fence.i");
    put(32'h0ff0000f);
    chk(d.fu == FU_SYS && d.sys_op == SYS_FENCE, "fence");
    put(32'h00000000);
    chk(d.fu == FU_SYS && d.sys_op == SYS_ILLEGAL, "all-zero illegal");
    put(32'h00000053);   // fadd.s: no FPU
    chk(d.sys_op == SYS_ILLEGAL, "floating point is illegal here");
    put(32'h0000705b);
    chk(d.sys_op == SYS_ILLEGAL, "custom opcode illegal");
    irq = 1; put(32'h00b50533);
    chk(d.fu == FU_SYS && d.sys_op == SYS_INTERRUPT && !d.wr_rd, "interrupt injected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
