// Testbench of the PLIC through its TileLink port: sets priorities, enables
// and thresholds, raises source lines and checks the external-interrupt
// outputs, claim order (highest priority, lowest number on a tie), that a
// claimed source stays silent until completed, and the threshold.
`timescale 1ns/1ps
module muntjac_plic_tb;
  import muntjac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:1] irq;
  logic a_v, a_r, d_v, d_r;
  tl_a_t a; tl_d_t d;
  logic [3:0] eip;
  int checks = 0, failures = 0;

  muntjac_plic dut (.clk_i(clk), .rst_ni(rst_n), .irq_i(irq), .a_valid_i(a_v), .a_ready_o(a_r),
    .a_i(a), .d_valid_o(d_v), .d_ready_i(d_r), .d_o(d), .eip_o(eip));

  task automatic xfer(tl_a_op_e op, longint unsigned addr, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    a = '0; a.opcode = op; a.size = 3'd2; a.address = PADDR_W'(PLIC_BASE + addr);
    a.mask = addr[2] ? 8'hF0 : 8'h0F; a.data = {wd, wd};
    a_v = 1;
    while (!a_r) @(negedge clk);
    @(negedge clk);
    a_v = 0; d_r = 1;
    while (!d_v) @(negedge clk);
    rd = addr[2] ? d.data[63:32] : d.data[31:0];
    @(negedge clk);
    d_r = 0;
  endtask
  task automatic wr(longint unsigned addr, logic [31:0] v);
    logic [31:0] x;
    xfer(PutFullData, addr, v, x);
  endtask
  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] v;
    irq = '0; a_v = 0; a = '0; d_r = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    wr(4 * 3, 2); wr(4 * 5, 6); wr(4 * 9, 6);       // priorities
    wr(32'h2000 + 32'h80 * 1, (1 << 3) | (1 << 5) | (1 << 9));   // context 1 enables
    wr(32'h200000 + 32'h1000 * 1, 1);               // threshold 1
    repeat (2) @(negedge clk);
    chk(eip == 0, "nothing pending");
    irq[3] = 1; irq[9] = 1; irq[5] = 1;
    repeat (3) @(negedge clk);
    chk(eip == 4'b0010, "only context 1 interrupted");
    xfer(Get, 32'h1000, 0, v);
    chk(v[3] && v[5] && v[9], "pending bits");
    xfer(Get, 32'h200004 + 32'h1000, 0, v);
    chk(v == 5, $sformatf("first claim is 5 (got %0d)", v));
    xfer(Get, 32'h200004 + 32'h1000, 0, v);
    chk(v == 9, $sformatf("second claim is 9 (got %0d)", v));
    irq[5] = 0; irq[9] = 0;
    wr(32'h200000 + 32'h1000 * 1, 2);               // threshold 2 masks source 3
    repeat (3) @(negedge clk);
    chk(eip == 0, "threshold masks priority 2");
    wr(32'h200000 + 32'h1000 * 1, 0);
    repeat (3) @(negedge clk);
    chk(eip == 4'b0010, "source 3 above threshold 0");
    xfer(Get, 32'h200004 + 32'h1000, 0, v);
    chk(v == 3, "third claim is 3");
    repeat (3) @(negedge clk);
    chk(eip == 0, "claimed source silent before complete");
    wr(32'h200004 + 32'h1000, 3);                   // complete
    repeat (3) @(negedge clk);
    chk(eip == 4'b0010, "source 3 pending again after complete (line still high)");
    irq[3] = 0;
    xfer(Get, 4 * 5, 0, v);
    chk(v == 6, "priority readback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
