// Instruction decoder (DE stage): turns a 32-bit RV64 instruction into the
// decoded_t control bundle used by the issue logic. Combinational.
//
// Supports RV64I, M, A, Zicsr, Zifencei and the machine-mode system
// instructions (ECALL, EBREAK, MRET, WFI, FENCE, FENCE.I). The paper's core
// also has supervisor mode and optional F/D; those are not decoded here and
// their instructions are reported illegal. Anything not recognised becomes
// FU_SYS / SYS_ILLEGAL, so that it traps through the control state machine.
// Interrupts enter the pipeline here as well, as in the backend figure: when
// `irq_i` is high the instruction is replaced by SYS_INTERRUPT, which the
// control state machine turns into an interrupt trap taken at its PC.
module muntjac_decoder import muntjac_pkg::*; (
  input  logic [31:0] instr_i,
  input  logic        irq_i,
  output decoded_t    d_o
);
  logic [6:0] opc, f7;
  logic [2:0] f3;
  logic [63:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  always_comb begin
    opc = instr_i[6:0];
    f3  = instr_i[14:12];
    f7  = instr_i[31:25];
    imm_i = {{52{instr_i[31]}}, instr_i[31:20]};
    imm_s = {{52{instr_i[31]}}, instr_i[31:25], instr_i[11:7]};
    imm_b = {{51{instr_i[31]}}, instr_i[31], instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
    imm_u = {{32{instr_i[31]}}, instr_i[31:12], 12'b0};
    imm_j = {{43{instr_i[31]}}, instr_i[31], instr_i[19:12], instr_i[20], instr_i[30:21], 1'b0};

    d_o = '0;
    d_o.fu      = FU_SYS;
    d_o.sys_op  = SYS_ILLEGAL;
    d_o.alu_op  = ALU_ADD;
    d_o.br_op   = BR_JAL;
    d_o.mem_op  = MEM_LOAD;
    d_o.rs1     = instr_i[19:15];
    d_o.rs2     = instr_i[24:20];
    d_o.rd      = instr_i[11:7];
    d_o.csr     = instr_i[31:20];
    d_o.md_op   = f3;
    d_o.amo_op  = instr_i[31:27];

    unique case (opc)
      7'b0110111: begin // LUI
        d_o.fu = FU_ALU; d_o.alu_op = ALU_PASSB; d_o.op_b_imm = 1'b1;
        d_o.imm = imm_u; d_o.wr_rd = 1'b1;
      end
      7'b0010111: begin // AUIPC
        d_o.fu = FU_ALU; d_o.op_a_pc = 1'b1; d_o.op_b_imm = 1'b1;
        d_o.imm = imm_u; d_o.wr_rd = 1'b1;
      end
      7'b1101111: begin // JAL
        d_o.fu = FU_BRANCH; d_o.br_op = BR_JAL; d_o.imm = imm_j; d_o.wr_rd = 1'b1;
      end
      7'b1100111: if (f3 == 3'b000) begin // JALR
        d_o.fu = FU_BRANCH; d_o.br_op = BR_JALR; d_o.imm = imm_i;
        d_o.use_rs1 = 1'b1; d_o.wr_rd = 1'b1;
      end
      7'b1100011: if (f3 != 3'b010 && f3 != 3'b011) begin // branches
        d_o.fu = FU_BRANCH; d_o.imm = imm_b; d_o.use_rs1 = 1'b1; d_o.use_rs2 = 1'b1;
        unique case (f3)
          3'b000: d_o.br_op = BR_BEQ;
          3'b001: d_o.br_op = BR_BNE;
          3'b100: d_o.br_op = BR_BLT;
          3'b101: d_o.br_op = BR_BGE;
          3'b110: d_o.br_op = BR_BLTU;
          default: d_o.br_op = BR_BGEU;
        endcase
      end
      7'b0000011: if (f3 != 3'b111) begin // loads
        d_o.fu = FU_MEM; d_o.mem_op = MEM_LOAD; d_o.mem_size = f3[1:0];
        d_o.mem_unsigned = f3[2]; d_o.imm = imm_i; d_o.use_rs1 = 1'b1; d_o.wr_rd = 1'b1;
      end
      7'b0100011: if (!f3[2]) begin // stores
        d_o.fu = FU_MEM; d_o.mem_op = MEM_STORE; d_o.mem_size = f3[1:0];
        d_o.imm = imm_s; d_o.use_rs1 = 1'b1; d_o.use_rs2 = 1'b1;
      end
      7'b0101111: if (f3 == 3'b010 || f3 == 3'b011) begin // AMO
        d_o.fu = FU_MEM; d_o.mem_size = f3[1:0]; d_o.use_rs1 = 1'b1; d_o.wr_rd = 1'b1;
        unique case (instr_i[31:27])
          AMO_LR:  begin d_o.mem_op = MEM_LR; if (instr_i[24:20] != 5'd0) d_o.fu = FU_SYS; end
          AMO_SC:  begin d_o.mem_op = MEM_SC;  d_o.use_rs2 = 1'b1; end
          AMO_ADD, AMO_SWAP, AMO_XOR, AMO_OR, AMO_AND,
          AMO_MIN, AMO_MAX, AMO_MINU, AMO_MAXU:
                   begin d_o.mem_op = MEM_AMO; d_o.use_rs2 = 1'b1; end
          default: begin d_o.fu = FU_SYS; d_o.use_rs1 = 1'b0; d_o.wr_rd = 1'b0; end
        endcase
      end
      7'b0010011, 7'b0011011: begin // OP-IMM, OP-IMM-32
        logic w, ok;
        w  = opc[3];
        ok = 1'b1;
        d_o.op_b_imm = 1'b1; d_o.imm = imm_i; d_o.word = w;
        unique case (f3)
          3'b000: d_o.alu_op = ALU_ADD;
          3'b010: begin d_o.alu_op = ALU_SLT;  ok = !w; end
          3'b011: begin d_o.alu_op = ALU_SLTU; ok = !w; end
          3'b100: begin d_o.alu_op = ALU_XOR;  ok = !w; end
          3'b110: begin d_o.alu_op = ALU_OR;   ok = !w; end
          3'b111: begin d_o.alu_op = ALU_AND;  ok = !w; end
          3'b001: begin d_o.alu_op = ALU_SLL;
                        ok = w ? f7 == 7'b0 : instr_i[31:26] == 6'b0; end
          default: begin
            d_o.alu_op = instr_i[30] ? ALU_SRA : ALU_SRL;
            ok = w ? {f7[6], f7[4:0]} == 6'b0 : {instr_i[31], instr_i[29:26]} == 5'b0;
          end
        endcase
        if (ok) begin
          d_o.fu = FU_ALU; d_o.use_rs1 = 1'b1; d_o.wr_rd = 1'b1;
        end
      end
      7'b0110011, 7'b0111011: begin // OP, OP-32
        logic w, ok;
        w  = opc[3];
        ok = 1'b1;
        d_o.word = w;
        if (f7 == 7'b0000001) begin
          d_o.fu = FU_MULDIV;
          ok = !w || f3 == 3'b000 || f3[2];
        end else begin
          d_o.fu = FU_ALU;
          unique case ({f7, f3})
            {7'b0000000, 3'b000}: d_o.alu_op = ALU_ADD;
            {7'b0100000, 3'b000}: d_o.alu_op = ALU_SUB;
            {7'b0000000, 3'b001}: d_o.alu_op = ALU_SLL;
            {7'b0000000, 3'b101}: d_o.alu_op = ALU_SRL;
            {7'b0100000, 3'b101}: d_o.alu_op = ALU_SRA;
            {7'b0000000, 3'b010}: begin d_o.alu_op = ALU_SLT;  ok = !w; end
            {7'b0000000, 3'b011}: begin d_o.alu_op = ALU_SLTU; ok = !w; end
            {7'b0000000, 3'b100}: begin d_o.alu_op = ALU_XOR;  ok = !w; end
            {7'b0000000, 3'b110}: begin d_o.alu_op = ALU_OR;   ok = !w; end
            {7'b0000000, 3'b111}: begin d_o.alu_op = ALU_AND;  ok = !w; end
            default: ok = 1'b0;
          endcase
        end
        if (ok) begin
          d_o.use_rs1 = 1'b1; d_o.use_rs2 = 1'b1; d_o.wr_rd = 1'b1;
        end else begin
          d_o.fu = FU_SYS;
        end
      end
      7'b0001111: begin // FENCE, FENCE.I
        if (f3 == 3'b000) d_o.sys_op = SYS_FENCE;
        else if (f3 == 3'b001) d_o.sys_op = SYS_FENCE_I;
      end
      7'b1110011: begin // SYSTEM
        if (f3 == 3'b000) begin
          unique case (instr_i[31:7])
            25'h0000000: d_o.sys_op = SYS_ECALL;
            25'h0002000: d_o.sys_op = SYS_EBREAK;
            25'h0604000: d_o.sys_op = SYS_MRET;
            25'h020A000: d_o.sys_op = SYS_WFI;
            default:     d_o.sys_op = SYS_ILLEGAL;
          endcase
        end else if (f3 != 3'b100) begin
          d_o.csr_imm = f3[2];
          d_o.use_rs1 = !f3[2];
          d_o.wr_rd   = 1'b1;
          d_o.imm     = {59'b0, instr_i[19:15]};
          unique case (f3[1:0])
            2'b01:   d_o.sys_op = SYS_CSRRW;
            2'b10:   d_o.sys_op = SYS_CSRRS;
            default: d_o.sys_op = SYS_CSRRC;
          endcase
        end
      end
      default: ;
    endcase

    // Anything that traps must not look like it writes a register.
    if (d_o.fu == FU_SYS && (d_o.sys_op != SYS_CSRRW && d_o.sys_op != SYS_CSRRS &&
                             d_o.sys_op != SYS_CSRRC)) begin
      d_o.wr_rd = 1'b0; d_o.use_rs1 = 1'b0; d_o.use_rs2 = 1'b0;
    end
    if (irq_i) begin
      d_o.fu = FU_SYS; d_o.sys_op = SYS_INTERRUPT;
      d_o.wr_rd = 1'b0; d_o.use_rs1 = 1'b0; d_o.use_rs2 = 1'b0;
    end
  end
endmodule
