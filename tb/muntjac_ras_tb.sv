// Testbench of the RAS against a queue model: pushes past the depth
// (oldest lost), pops to empty and beyond, and push+pop replacing the top.
`timescale 1ns/1ps
module muntjac_ras_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, valid;
  logic [63:0] paddr, top;
  int checks = 0, failures = 0;
  longint unsigned model [$];

  muntjac_ras #(.DEPTH(8)) dut (.clk_i(clk), .rst_ni(rst_n), .push_i(push), .push_addr_i(paddr),
                                .pop_i(pop), .valid_o(valid), .top_o(top));

  task automatic step(logic pu, logic po, longint unsigned a);
    @(negedge clk);
    push = pu; pop = po; paddr = a;
    @(negedge clk);
    push = 0; pop = 0;
    if (pu && po) begin
      if (model.size() == 0) model.push_back(a); else model[model.size() - 1] = a;
    end else if (pu) begin
      model.push_back(a);
      if (model.size() > 8) void'(model.pop_front());
    end else if (po && model.size() > 0) void'(model.pop_back());
    checks++;
    if (valid !== (model.size() != 0) || (valid && top !== model[model.size() - 1])) begin
      failures++;
      $display("FAIL after push=%0d pop=%0d: valid=%0d top=%h", pu, po, valid, top);
    end
  endtask

  initial begin
    push = 0; pop = 0; paddr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 11; k++) step(1, 0, 64'h1000 + 4 * k);
    for (int k = 0; k < 10; k++) step(0, 1, 0);
    step(1, 1, 64'h77);
    step(1, 0, 64'h88);
    step(1, 1, 64'h99);
    step(0, 1, 0);
    step(0, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
