// Branch unit of the EX1 stage; combinational, completing in one cycle as
// the paper states.
//
// Given the branch or jump, its operands, its PC and the PC the frontend
// predicted to follow it, it computes whether it is taken, the actual next
// PC, the link value (PC + 2 or + 4) for JAL/JALR, and `mispredict_o` when
// the actual next PC differs from the predicted one. The backend then
// redirects the frontend to `npc_o`. Every instruction carries a predicted
// next PC, so a prediction wrongly attached to a non-branch is also caught
// (the backend compares it with PC + length). `cf_type_o` classifies the
// transfer for BTB/RAS training: JAL/JALR with rd = x1 or x5 is a call,
// JALR with rs1 = x1/x5 and rd = x0 is a return (RISC-V hint convention).
module muntjac_branch import muntjac_pkg::*; (
  input  br_op_e      op_i,
  input  logic [63:0] rs1_i,
  input  logic [63:0] rs2_i,
  input  logic [63:0] pc_i,
  input  logic [63:0] imm_i,
  input  logic        compressed_i,
  input  logic [4:0]  rd_i,
  input  logic [4:0]  rs1_idx_i,
  input  logic [63:0] pred_npc_i,
  output logic        taken_o,
  output logic [63:0] npc_o,
  output logic [63:0] link_o,
  output logic        mispredict_o,
  output cf_type_e    cf_type_o
);
  logic        rd_link, rs1_link;

  assign link_o   = pc_i + (compressed_i ? 64'd2 : 64'd4);
  assign rd_link  = rd_i == 5'd1 || rd_i == 5'd5;
  assign rs1_link = rs1_idx_i == 5'd1 || rs1_idx_i == 5'd5;

  always_comb begin
    unique case (op_i)
      BR_BEQ:  taken_o = rs1_i == rs2_i;
      BR_BNE:  taken_o = rs1_i != rs2_i;
      BR_BLT:  taken_o = $signed(rs1_i) < $signed(rs2_i);
      BR_BGE:  taken_o = $signed(rs1_i) >= $signed(rs2_i);
      BR_BLTU: taken_o = rs1_i < rs2_i;
      BR_BGEU: taken_o = rs1_i >= rs2_i;
      default: taken_o = 1'b1;                      // JAL, JALR
    endcase
    if (op_i == BR_JALR)      npc_o = (rs1_i + imm_i) & ~64'd1;
    else if (taken_o)         npc_o = pc_i + imm_i;
    else                      npc_o = link_o;
    mispredict_o = npc_o != pred_npc_i;
    if (op_i == BR_JAL)       cf_type_o = rd_link ? CF_CALL : CF_JUMP;
    else if (op_i == BR_JALR) cf_type_o = rd_link ? CF_CALL
                                        : (rs1_link && rd_i == 5'd0) ? CF_RET : CF_JUMP;
    else                      cf_type_o = CF_BRANCH;
  end
endmodule
