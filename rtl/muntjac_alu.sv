// Integer ALU of the EX1 stage; purely combinational, so an ALU instruction
// completes in the cycle it spends in EX1, as the paper states.
//
// Operands `a_i`/`b_i` are already selected (register, PC or immediate) by
// the issue logic. `word_i` selects the RV64 *W forms: the operation is done
// on the low 32 bits and the result sign-extended; shifts then use a 5-bit
// amount. ALU_PASSB forwards operand B (LUI). The operation set is that of
// RV64I; its encoding (alu_op_e) is this design's.
module muntjac_alu import muntjac_pkg::*; (
  input  alu_op_e     op_i,
  input  logic        word_i,
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  output logic [63:0] result_o
);
  logic [5:0]  shamt;
  logic [63:0] r;
  logic [31:0] a32;

  assign shamt = word_i ? {1'b0, b_i[4:0]} : b_i[5:0];
  assign a32   = a_i[31:0];

  always_comb begin
    unique case (op_i)
      ALU_ADD:   r = a_i + b_i;
      ALU_SUB:   r = a_i - b_i;
      ALU_SLL:   r = a_i << shamt;
      ALU_SLT:   r = {63'b0, $signed(a_i) < $signed(b_i)};
      ALU_SLTU:  r = {63'b0, a_i < b_i};
      ALU_XOR:   r = a_i ^ b_i;
      ALU_SRL:   r = word_i ? {32'b0, a32 >> shamt[4:0]} : a_i >> shamt;
      ALU_SRA:   r = word_i ? {32'b0, 32'($signed(a32) >>> shamt[4:0])}
                            : 64'($signed(a_i) >>> shamt);
      ALU_OR:    r = a_i | b_i;
      ALU_AND:   r = a_i & b_i;
      ALU_PASSB: r = b_i;
      default:   r = a_i + b_i;
    endcase
    result_o = word_i ? {{32{r[31]}}, r[31:0]} : r;
  end
endmodule
