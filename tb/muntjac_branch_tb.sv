// Testbench of the branch unit: random comparisons for every condition,
// JAL/JALR targets and link values, mispredict against a given prediction,
// and the call/return/jump classification by register.
`timescale 1ns/1ps
module muntjac_branch_tb;
  import muntjac_pkg::*;
  br_op_e op;
  logic [63:0] rs1, rs2, pc, imm, pred, npc, link;
  logic comp, taken, mis;
  logic [4:0] rd, rs1i;
  cf_type_e cf;
  int checks = 0, failures = 0;

  muntjac_branch dut (.op_i(op), .rs1_i(rs1), .rs2_i(rs2), .pc_i(pc), .imm_i(imm),
    .compressed_i(comp), .rd_i(rd), .rs1_idx_i(rs1i), .pred_npc_i(pred), .taken_o(taken),
    .npc_o(npc), .link_o(link), .mispredict_o(mis), .cf_type_o(cf));

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s op=%s", what, op.name()); end
  endtask

  initial begin
    logic et;
    logic [63:0] enpc;
    for (int k = 0; k < 2000; k++) begin
      op = br_op_e'($urandom_range(0, 7));
      rs1 = {$urandom, $urandom}; rs2 = k[1] ? rs1 : {$urandom, $urandom};
      if (k[2]) rs2[63] = ~rs1[63];
      pc = {32'd0, $urandom} & ~64'd1;
      imm = {{52{1'b0}}, 12'($urandom)} & ~64'd1;
      comp = k[3];
      rd = 5'($urandom_range(0, 6)); rs1i = 5'($urandom_range(0, 6));
      case (op)
        BR_BEQ:  et = rs1 == rs2;
        BR_BNE:  et = rs1 != rs2;
        BR_BLT:  et = $signed(rs1) < $signed(rs2);
        BR_BGE:  et = $signed(rs1) >= $signed(rs2);
        BR_BLTU: et = rs1 < rs2;
        BR_BGEU: et = rs1 >= rs2;
        default: et = 1;
      endcase
      enpc = op == BR_JALR ? ((rs1 + imm) & ~64'd1) : et ? pc + imm : pc + (comp ? 2 : 4);
      pred = k[4] ? enpc : enpc + 4;
      #1;
      chk(taken === et, "taken");
      chk(npc === enpc, "npc");
      chk(link === pc + (comp ? 2 : 4), "link");
      chk(mis === !k[4], "mispredict");
      if (op == BR_JAL)
        chk(cf === ((rd == 1 || rd == 5) ? CF_CALL : CF_JUMP), "jal type");
      else if (op == BR_JALR)
        chk(cf === ((rd == 1 || rd == 5) ? CF_CALL : ((rs1i == 1 || rs1i == 5) && rd == 0) ? CF_RET : CF_JUMP), "jalr type");
      else chk(cf === CF_BRANCH, "branch type");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
