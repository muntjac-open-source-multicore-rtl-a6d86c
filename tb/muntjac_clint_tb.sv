// Testbench of the CLINT through its TileLink port: mtime counts one per
// cycle, mtimecmp compare drives mtip per hart, msip bits drive msip,
// and mtime can be written.
`timescale 1ns/1ps
module muntjac_clint_tb;
  import muntjac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic a_v, a_r, d_v, d_r;
  tl_a_t a; tl_d_t d;
  logic [3:0] msip, mtip;
  int checks = 0, failures = 0;
  int cyc = 0, rcyc;
  always @(posedge clk) cyc++;

  muntjac_clint dut (.clk_i(clk), .rst_ni(rst_n), .a_valid_i(a_v), .a_ready_o(a_r), .a_i(a),
    .d_valid_o(d_v), .d_ready_i(d_r), .d_o(d), .msip_o(msip), .mtip_o(mtip));

  task automatic xfer(tl_a_op_e op, longint unsigned addr, logic [63:0] wd, logic [7:0] mask,
                      output logic [63:0] rd);
    @(negedge clk);
    a = '0; a.opcode = op; a.size = 3'd3; a.address = PADDR_W'(CLINT_BASE + addr);
    a.mask = mask; a.data = wd;
    a_v = 1;
    while (!a_r) @(negedge clk);
    @(negedge clk);
    a_v = 0; d_r = 1;
    while (!d_v) @(negedge clk);
    rd = d.data; rcyc = cyc;
    @(negedge clk);
    d_r = 0;
  endtask
  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [63:0] t0, t1, x;
    int c0;
    a_v = 0; a = '0; d_r = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    chk(mtip == 0 && msip == 0, "reset state");
    xfer(Get, 16'hBFF8, 0, 8'hFF, t0);
    c0 = rcyc;
    repeat (20) @(negedge clk);
    xfer(Get, 16'hBFF8, 0, 8'hFF, t1);
    // both reads take the same path, so the difference is the cycles between their responses
    chk(t1 - t0 == 64'(rcyc - c0), $sformatf("mtime counts one per cycle (%0d vs %0d)", t1 - t0, rcyc - c0));
    xfer(PutFullData, 16'h4000 + 8 * 2, t1 + 40, 8'hFF, x);
    chk(mtip == 0, "mtimecmp in the future");
    repeat (40) @(negedge clk);
    chk(mtip == 4'b0100, "hart 2 timer fires");
    xfer(PutFullData, 16'h4000 + 8 * 2, '1, 8'hFF, x);
    chk(mtip == 0, "timer cleared by a new compare");
    xfer(PutPartialData, 4 * 1, 64'h1_0000_0000, 8'hF0, x);   // msip[1] is the upper half of beat 0
    chk(msip == 4'b0010, "msip hart 1");
    xfer(PutPartialData, 4 * 1, 0, 8'hF0, x);
    chk(msip == 0, "msip cleared");
    xfer(PutFullData, 16'hBFF8, 64'h1000, 8'hFF, x);
    xfer(Get, 16'hBFF8, 0, 8'hFF, t0);
    chk(t0 >= 64'h1000 && t0 < 64'h1010, "mtime written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
