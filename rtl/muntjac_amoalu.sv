// AMOALU: the data cache's own ALU for atomic memory operations, separate
// from the backend's ALU as the paper describes.
//
// Combinational. `old_i` is the memory value (already shifted to bit 0),
// `src_i` the register operand, `amo_op_i` the AMO funct5 and `dword_i`
// selects 64-bit (AMO*.D) over 32-bit (AMO*.W) operation. For .W the
// comparison uses the low 32 bits, signed or unsigned as the operation
// requires, and the low 32 bits of the result are what is stored.
module muntjac_amoalu import muntjac_pkg::*; (
  input  logic [4:0]  amo_op_i,
  input  logic        dword_i,
  input  logic [63:0] old_i,
  input  logic [63:0] src_i,
  output logic [63:0] result_o
);
  logic [64:0] a, b;   // one extra bit to compare signed and unsigned alike
  logic        is_signed, a_lt_b;

  always_comb begin
    is_signed = amo_op_i == AMO_MIN || amo_op_i == AMO_MAX;
    if (dword_i) begin
      a = {is_signed & old_i[63], old_i};
      b = {is_signed & src_i[63], src_i};
    end else begin
      a = {{33{is_signed & old_i[31]}}, old_i[31:0]};
      b = {{33{is_signed & src_i[31]}}, src_i[31:0]};
    end
    a_lt_b = $signed(a) < $signed(b);
    unique case (amo_op_i)
      AMO_ADD:  result_o = old_i + src_i;
      AMO_XOR:  result_o = old_i ^ src_i;
      AMO_OR:   result_o = old_i | src_i;
      AMO_AND:  result_o = old_i & src_i;
      AMO_MIN, AMO_MINU: result_o = a_lt_b ? old_i : src_i;
      AMO_MAX, AMO_MAXU: result_o = a_lt_b ? src_i : old_i;
      default:  result_o = src_i;                   // AMOSWAP, SC
    endcase
  end
endmodule
