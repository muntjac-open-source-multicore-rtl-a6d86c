// Testbench of the register file: random writes and dual reads against an
// array model; x0 always reads zero even when written.
`timescale 1ns/1ps
module muntjac_regfile_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] ra, rb, wa;
  logic [63:0] da, db, wd;
  logic we;
  logic [63:0] model [32];
  int checks = 0, failures = 0;

  muntjac_regfile dut (.clk_i(clk), .rst_ni(rst_n), .raddr_a_i(ra), .rdata_a_o(da),
    .raddr_b_i(rb), .rdata_b_o(db), .we_i(we), .waddr_i(wa), .wdata_i(wd));

  initial begin
    we = 0; wa = 0; wd = 0; ra = 0; rb = 0;
    for (int i = 0; i < 32; i++) model[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      ra = 5'($urandom); rb = 5'($urandom);
      #1;
      checks += 2;
      if (da !== model[ra]) begin failures++; if (failures < 10) $display("FAIL a x%0d %h exp %h", ra, da, model[ra]); end
      if (db !== model[rb]) begin failures++; if (failures < 10) $display("FAIL b x%0d %h exp %h", rb, db, model[rb]); end
      we = $urandom_range(0, 1); wa = k < 64 ? 5'(k) : 5'($urandom); wd = {$urandom, $urandom};
      @(posedge clk); #1;
      if (we && wa != 0) model[wa] = wd;
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
