// Testbench of the bi-modal predictor: trains one branch word up and down
// and checks the 2-bit saturation against a counter model kept here, and
// that other words are untouched.
`timescale 1ns/1ps
module muntjac_bp_bimodal_tb;
  import muntjac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [63:0] pc;
  logic taken;
  train_t tr;
  int checks = 0, failures = 0;

  muntjac_bp_bimodal dut (.clk_i(clk), .rst_ni(rst_n), .pc_i(pc), .taken_o(taken), .train_i(tr));

  task automatic train(logic [63:0] bpc, logic t);
    @(negedge clk);
    tr = '0; tr.valid = 1; tr.pc = bpc; tr.cf_type = CF_BRANCH; tr.taken = t; tr.compressed = 0;
    @(negedge clk);
    tr = '0;
  endtask
  task automatic chk(logic [63:0] p, logic exp, string what);
    pc = p; #1;
    checks++;
    if (taken !== exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, taken, exp); end
  endtask

  initial begin
    int model;
    tr = '0; pc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // 32-bit branch at 0x1002 ends in word 0x1004
    chk(64'h1004, 0, "reset weakly not taken");
    model = 1;
    for (int k = 0; k < 6; k++) begin
      train(64'h1002, 1); model = model < 3 ? model + 1 : 3;
      chk(64'h1004, model >= 2, $sformatf("up %0d", k));
    end
    chk(64'h1000, 0, "neighbour untouched");
    for (int k = 0; k < 2; k++) begin
      train(64'h1002, 0); model = model > 0 ? model - 1 : 0;
      chk(64'h1004, model >= 2, $sformatf("down %0d", k));
    end
    for (int k = 0; k < 5; k++) begin
      train(64'h1002, 0); model = model > 0 ? model - 1 : 0;
      chk(64'h1004, model >= 2, $sformatf("down more %0d", k));
    end
    train(64'h1002, 1); model = 1;
    chk(64'h1004, 0, "one taken from 0 stays not taken");
    train(64'h1002, 1);
    chk(64'h1004, 1, "two taken from 0 predicts taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
