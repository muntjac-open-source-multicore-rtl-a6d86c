// RVC decompressor: expands a 16-bit compressed instruction into the 32-bit
// RV64 instruction it stands for (first step of the DE stage in the backend
// figure). Combinational.
//
// The paper makes the C extension mandatory and places decompression ahead
// of the decoder; the expansion itself is the one fixed by the RISC-V
// compressed-instruction specification. A 32-bit instruction
// (`compressed_i` low) passes unchanged. Reserved encodings, and the
// floating-point compressed loads/stores (no FPU in this build), expand to
// 32'h0, which the decoder reports as illegal.
module muntjac_decompress (
  input  logic [31:0] instr_i,
  input  logic        compressed_i,
  output logic [31:0] instr_o
);
  localparam logic [6:0] OP_LOAD = 7'b0000011, OP_STORE = 7'b0100011,
                         OP_IMM = 7'b0010011, OP_IMM32 = 7'b0011011,
                         OP_OP = 7'b0110011, OP_OP32 = 7'b0111011,
                         OP_LUI = 7'b0110111, OP_BR = 7'b1100011,
                         OP_JAL = 7'b1101111, OP_JALR = 7'b1100111;

  function automatic logic [31:0] enc_i(logic [11:0] imm, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd, logic [6:0] op);
    return {imm, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] enc_s(logic [11:0] imm, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [6:0] op);
    return {imm[11:5], rs2, rs1, f3, imm[4:0], op};
  endfunction
  function automatic logic [31:0] enc_r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3, logic [4:0] rd, logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction
  function automatic logic [31:0] enc_b(logic [12:0] imm, logic [4:0] rs2, logic [4:0] rs1,
                                        logic [2:0] f3);
    return {imm[12], imm[10:5], rs2, rs1, f3, imm[4:1], imm[11], OP_BR};
  endfunction

  logic [15:0] c;
  logic [4:0]  rd, rs2, rdp, rs1p, rs2p;
  logic [11:0] imm6;
  logic [20:0] joff;
  logic [12:0] boff;

  always_comb begin
    c    = instr_i[15:0];
    rd   = c[11:7];
    rs2  = c[6:2];
    rdp  = {2'b01, c[4:2]};
    rs1p = {2'b01, c[9:7]};
    rs2p = {2'b01, c[4:2]};
    imm6 = {{7{c[12]}}, c[6:2]};
    joff = {{10{c[12]}}, c[8], c[10:9], c[6], c[7], c[2], c[11], c[5:3], 1'b0};
    boff = {{5{c[12]}}, c[6:5], c[2], c[11:10], c[4:3], 1'b0};
    instr_o = 32'h0;
    if (!compressed_i) begin
      instr_o = instr_i;
    end else begin
      unique case ({c[1:0], c[15:13]})
        // ---------------- quadrant 0
        5'b00_000: if (c[12:5] != 8'd0)                       // C.ADDI4SPN
          instr_o = enc_i({2'b0, c[10:7], c[12:11], c[5], c[6], 2'b0}, 5'd2, 3'b000, rdp, OP_IMM);
        5'b00_010: instr_o = enc_i({5'b0, c[5], c[12:10], c[6], 2'b0}, rs1p, 3'b010, rdp, OP_LOAD); // C.LW
        5'b00_011: instr_o = enc_i({4'b0, c[6:5], c[12:10], 3'b0}, rs1p, 3'b011, rdp, OP_LOAD);     // C.LD
        5'b00_110: instr_o = enc_s({5'b0, c[5], c[12:10], c[6], 2'b0}, rs2p, rs1p, 3'b010, OP_STORE); // C.SW
        5'b00_111: instr_o = enc_s({4'b0, c[6:5], c[12:10], 3'b0}, rs2p, rs1p, 3'b011, OP_STORE);     // C.SD
        // ---------------- quadrant 1
        5'b01_000: instr_o = enc_i(imm6, rd, 3'b000, rd, OP_IMM);                 // C.ADDI / C.NOP
        5'b01_001: if (rd != 5'd0) instr_o = enc_i(imm6, rd, 3'b000, rd, OP_IMM32); // C.ADDIW
        5'b01_010: instr_o = enc_i(imm6, 5'd0, 3'b000, rd, OP_IMM);               // C.LI
        5'b01_011: begin
          if (rd == 5'd2) begin                                                   // C.ADDI16SP
            if ({c[12], c[6:2]} != 6'd0)
              instr_o = enc_i({{3{c[12]}}, c[4:3], c[5], c[2], c[6], 4'b0}, 5'd2, 3'b000, 5'd2, OP_IMM);
          end else if ({c[12], c[6:2]} != 6'd0) begin                             // C.LUI
            instr_o = {{15{c[12]}}, c[6:2], rd, OP_LUI};
          end
        end
        5'b01_100: begin
          unique case (c[11:10])
            2'b00: instr_o = enc_r({1'b0, 6'b0}, c[6:2], rs1p, 3'b101, rs1p, OP_IMM) | {6'b0, c[12], 25'b0}; // C.SRLI
            2'b01: instr_o = enc_r({1'b0, 6'b100000}, c[6:2], rs1p, 3'b101, rs1p, OP_IMM) | {6'b0, c[12], 25'b0}; // C.SRAI
            2'b10: instr_o = enc_i(imm6, rs1p, 3'b111, rs1p, OP_IMM);             // C.ANDI
            default: begin
              unique case ({c[12], c[6:5]})
                3'b000: instr_o = enc_r(7'b0100000, rs2p, rs1p, 3'b000, rs1p, OP_OP);   // C.SUB
                3'b001: instr_o = enc_r(7'b0000000, rs2p, rs1p, 3'b100, rs1p, OP_OP);   // C.XOR
                3'b010: instr_o = enc_r(7'b0000000, rs2p, rs1p, 3'b110, rs1p, OP_OP);   // C.OR
                3'b011: instr_o = enc_r(7'b0000000, rs2p, rs1p, 3'b111, rs1p, OP_OP);   // C.AND
                3'b100: instr_o = enc_r(7'b0100000, rs2p, rs1p, 3'b000, rs1p, OP_OP32); // C.SUBW
                3'b101: instr_o = enc_r(7'b0000000, rs2p, rs1p, 3'b000, rs1p, OP_OP32); // C.ADDW
                default: instr_o = 32'h0;
              endcase
            end
          endcase
        end
        5'b01_101: instr_o = {joff[20], joff[10:1], joff[11], joff[19:12], 5'd0, OP_JAL}; // C.J
        5'b01_110: instr_o = enc_b(boff, 5'd0, rs1p, 3'b000);                    // C.BEQZ
        5'b01_111: instr_o = enc_b(boff, 5'd0, rs1p, 3'b001);                    // C.BNEZ
        // ---------------- quadrant 2
        5'b10_000: instr_o = enc_r(7'b0, c[6:2], rd, 3'b001, rd, OP_IMM) | {6'b0, c[12], 25'b0}; // C.SLLI
        5'b10_010: if (rd != 5'd0)                                                // C.LWSP
          instr_o = enc_i({4'b0, c[3:2], c[12], c[6:4], 2'b0}, 5'd2, 3'b010, rd, OP_LOAD);
        5'b10_011: if (rd != 5'd0)                                                // C.LDSP
          instr_o = enc_i({3'b0, c[4:2], c[12], c[6:5], 3'b0}, 5'd2, 3'b011, rd, OP_LOAD);
        5'b10_100: begin
          if (!c[12]) begin
            if (rs2 == 5'd0) begin
              if (rd != 5'd0) instr_o = enc_i(12'd0, rd, 3'b000, 5'd0, OP_JALR);  // C.JR
            end else begin
              instr_o = enc_r(7'b0, rs2, 5'd0, 3'b000, rd, OP_OP);                // C.MV
            end
          end else begin
            if (rs2 == 5'd0) begin
              if (rd == 5'd0) instr_o = 32'h0010_0073;                            // C.EBREAK
              else            instr_o = enc_i(12'd0, rd, 3'b000, 5'd1, OP_JALR);  // C.JALR
            end else begin
              instr_o = enc_r(7'b0, rs2, rd, 3'b000, rd, OP_OP);                  // C.ADD
            end
          end
        end
        5'b10_110: instr_o = enc_s({4'b0, c[8:7], c[12:9], 2'b0}, rs2, 5'd2, 3'b010, OP_STORE); // C.SWSP
        5'b10_111: instr_o = enc_s({3'b0, c[9:7], c[12:10], 3'b0}, rs2, 5'd2, 3'b011, OP_STORE); // C.SDSP
        default:   instr_o = 32'h0;
      endcase
    end
  end
endmodule
