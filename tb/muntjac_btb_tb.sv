// Testbench of the BTB: installs taken transfers and checks hit, target,
// type and end_hi, tag mismatch, the lower-half entry ignored when fetch
// starts at the upper half, and that a not-taken branch does not install.
`timescale 1ns/1ps
module muntjac_btb_tb;
  import muntjac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [63:0] pc, target;
  logic hit, end_hi;
  cf_type_e ty;
  train_t tr;
  int checks = 0, failures = 0;

  muntjac_btb dut (.clk_i(clk), .rst_ni(rst_n), .pc_i(pc), .hit_o(hit), .target_o(target),
                   .type_o(ty), .end_hi_o(end_hi), .train_i(tr));

  task automatic train(logic [63:0] bpc, logic comp, cf_type_e t, logic tk, logic [63:0] tgt);
    @(negedge clk);
    tr = '{valid: 1, pc: bpc, compressed: comp, cf_type: t, taken: tk, target: tgt};
    @(negedge clk);
    tr = '0;
  endtask
  task automatic chk(string what, logic [63:0] p, logic eh, logic [63:0] et, logic ee, cf_type_e etype);
    pc = p; #1;
    checks++;
    if (hit !== eh || (eh && (target !== et || end_hi !== ee || ty !== etype))) begin
      failures++;
      $display("FAIL %s: hit=%0d tgt=%h end_hi=%0d type=%0d", what, hit, target, end_hi, ty);
    end
  endtask

  initial begin
    tr = '0; pc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    chk("empty", 64'h2000, 0, 0, 0, CF_JUMP);
    train(64'h2000, 0, CF_JUMP, 1, 64'h3000);        // 32-bit at 0x2000: ends upper half
    chk("jump hit", 64'h2000, 1, 64'h3000, 1, CF_JUMP);
    chk("jump hit from upper half", 64'h2002, 1, 64'h3000, 1, CF_JUMP);
    train(64'h2108, 1, CF_CALL, 1, 64'h4000);        // compressed at 0x2108: lower half
    chk("call hit", 64'h2108, 1, 64'h4000, 0, CF_CALL);
    chk("lower entry ignored from upper half", 64'h210a, 0, 0, 0, CF_CALL);
    chk("other tag misses", 64'h2200, 0, 0, 0, CF_JUMP);
    train(64'h2202, 0, CF_BRANCH, 1, 64'h1000);      // straddling: ends word 0x2204 lower
    chk("straddle entry", 64'h2204, 1, 64'h1000, 0, CF_BRANCH);
    train(64'h230a, 1, CF_BRANCH, 0, 64'h1000);      // not taken: no install
    chk("not taken not installed", 64'h2308, 0, 0, 0, CF_BRANCH);
    train(64'h2000 + 64 * 4, 0, CF_RET, 1, 64'h5000); // same index, replaces
    chk("replaced", 64'h2000 + 64 * 4, 1, 64'h5000, 1, CF_RET);
    chk("old evicted", 64'h2000, 0, 0, 0, CF_JUMP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
