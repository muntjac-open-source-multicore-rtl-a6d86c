// Testbench of the RVC expander: a table of compressed encodings from each
// quadrant with their 32-bit equivalents worked out by hand from the RISC-V
// specification, reserved encodings (expected 0, which the decoder treats as
// illegal) and pass-through of uncompressed words.
`timescale 1ns/1ps
module muntjac_decompress_tb;
  logic [31:0] in, out;
  logic comp;
  int checks = 0, failures = 0;

  muntjac_decompress dut (.instr_i(in), .compressed_i(comp), .instr_o(out));

  task automatic chk(logic [15:0] c, logic [31:0] exp, string what);
    in = {16'hdead, c}; comp = 1; #1;
    checks++;
    if (out !== exp) begin failures++; $display("FAIL %s: %h -> %h exp %h", what, c, out, exp); end
  endtask

  initial begin
    chk(16'h0085, 32'h00108093, "c.addi x1,1");
    chk(16'h4515, 32'h00500513, "c.li x10,5");
    chk(16'h852e, 32'h00b00533, "c.mv x10,x11");
    chk(16'h952e, 32'h00b50533, "c.add x10,x11");
    chk(16'h6080, 32'h0004b403, "c.ld x8,0(x9)");
    chk(16'ha001, 32'h0000006f, "c.j 0");
    chk(16'h8082, 32'h00008067, "c.jr x1");
    chk(16'h0001, 32'h00000013, "c.nop");
    chk(16'he406, 32'h00113423, "c.sdsp x1,8(sp)");
    chk(16'h357d, 32'hfff5051b, "c.addiw x10,-1");
    chk(16'h9002, 32'h00100073, "c.ebreak");
    chk(16'h60a2, 32'h00813083, "c.ldsp x1,8(sp)");
    chk(16'h8d05, 32'h40950533, "c.sub x10,x9");   // rd'=x10 rs2'=x9
    chk(16'hc111, 32'h00050263, "c.beqz x10,4");
    chk(16'h6141, 32'h01010113, "c.addi16sp 16");
    chk(16'h0000, 32'h00000000, "all-zero is illegal");
    chk(16'h6001, 32'h00000000, "c.lui rd=0 imm=0 reserved");
    in = 32'h1234_5677; comp = 0; #1;
    checks++;
    if (out !== 32'h1234_5677) begin failures++; $display("FAIL pass-through %h", out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
