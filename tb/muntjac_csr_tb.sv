// Testbench of the CSR / system unit. Instructions are encoded here and
// decoded by the real decoder, then presented one per cycle as the
// backend does. Checks CSR read/write/set/clear, vectored interrupt entry
// and MRET, ECALL and illegal-CSR exceptions (mcause, mepc, mtval), WFI
// waiting until an enabled interrupt is pending, FENCE.I flush, mhartid
// and minstret counting.
`timescale 1ns/1ps
module muntjac_csr_tb;
  import muntjac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req, comp, done, wr_rd, redir, flush, irq, retire, msip, mtip, meip, dirq;
  logic [31:0] instr;
  logic [63:0] pc, rs1, rdata, rpc;
  decoded_t d;
  int checks = 0, failures = 0;

  muntjac_decoder u_dec (.instr_i(instr), .irq_i(dirq), .d_o(d));
  muntjac_csr #(.HART_ID(64'd3)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .d_i(d), .pc_i(pc),
    .compressed_i(comp), .instr_i(instr), .rs1_i(rs1), .done_o(done), .rdata_o(rdata),
    .wr_rd_o(wr_rd), .redirect_o(redir), .redirect_pc_o(rpc), .icache_flush_o(flush),
    .irq_o(irq), .retire_i(retire), .msip_i(msip), .mtip_i(mtip), .meip_i(meip));

  function automatic logic [31:0] csr_i(logic [2:0] f3, logic [11:0] csr, logic [4:0] rd, logic [4:0] r1);
    return {csr, r1, f3, rd, 7'h73};
  endfunction

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (rdata=%h rpc=%h)", what, rdata, rpc); end
  endtask

  // present one instruction for one cycle; the caller checks outputs in `body`
  task automatic issue(logic [31:0] i, logic [63:0] p, logic [63:0] v, logic is_irq);
    @(negedge clk);
    instr = i; pc = p; rs1 = v; dirq = is_irq; req = 1; #1;
  endtask
  task automatic finish_issue();
    @(posedge clk); #1;
    req = 0; dirq = 0;
  endtask
  task automatic csr_access(logic [2:0] f3, logic [11:0] a, logic [63:0] v, output logic [63:0] old);
    issue(csr_i(f3, a, 5'd10, v == 0 ? 5'd0 : 5'd11), 64'h100, v, 0);
    chk(done && redir && rpc == 64'h104, $sformatf("csr %h completes to next pc", a));
    old = rdata;
    finish_issue();
  endtask

  initial begin
    logic [63:0] v;
    req = 0; comp = 0; instr = 32'h13; pc = 0; rs1 = 0; retire = 0; msip = 0; mtip = 0; meip = 0; dirq = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    csr_access(3'b001, 12'h340, 64'h55, v);                 // csrrw mscratch
    chk(v == 0, "mscratch resets to 0");
    csr_access(3'b010, 12'h340, 64'h0a, v);                 // csrrs
    chk(v == 64'h55, "mscratch written");
    csr_access(3'b011, 12'h340, 64'h05, v);                 // csrrc
    chk(v == 64'h5f, "mscratch set");
    csr_access(3'b010, 12'h340, 0, v);
    chk(v == 64'h5a, "mscratch cleared");
    csr_access(3'b010, 12'hf14, 0, v);
    chk(v == 3, "mhartid");
    csr_access(3'b001, 12'h305, 64'h1001, v);               // mtvec vectored
    csr_access(3'b001, 12'h304, 64'h80, v);                 // mie.MTIE
    csr_access(3'b010, 12'h300, 64'h8, v);                  // mstatus.MIE
    chk(!irq, "no interrupt yet");
    mtip = 1; #1;
    chk(irq, "timer interrupt pending and enabled");
    issue(32'h13, 64'h2000, 0, 1);
    chk(d.sys_op == SYS_INTERRUPT, "decoder injects interrupt");
    chk(done && redir && rpc == 64'h101c, "vectored entry for cause 7");
    finish_issue();
    chk(!irq, "MIE cleared on trap");
    csr_access(3'b010, 12'h342, 0, v);
    chk(v == 64'h8000_0000_0000_0007, "mcause timer");
    csr_access(3'b010, 12'h341, 0, v);
    chk(v == 64'h2000, "mepc is the interrupted pc");
    mtip = 0;
    issue(32'h30200073, 64'h1020, 0, 0);                    // mret
    chk(done && rpc == 64'h2000, "mret returns to mepc");
    finish_issue();
    csr_access(3'b010, 12'h300, 0, v);
    chk(v[3] == 1, "mret restores MIE");
    issue(32'h00000073, 64'h3000, 0, 0);                    // ecall
    chk(done && rpc == 64'h1000, "ecall goes to the base");
    finish_issue();
    csr_access(3'b010, 12'h342, 0, v);
    chk(v == 11, "mcause ecall from M");
    issue(csr_i(3'b010, 12'h180, 5'd10, 5'd0), 64'h3100, 0, 0);  // satp: not implemented
    chk(done && rpc == 64'h1000, "illegal csr traps");
    finish_issue();
    csr_access(3'b010, 12'h342, 0, v);
    chk(v == 2, "mcause illegal");
    csr_access(3'b010, 12'h343, 0, v);
    chk(v == {32'd0, csr_i(3'b010, 12'h180, 5'd10, 5'd0)}, "mtval holds the instruction");
    csr_access(3'b011, 12'h300, 64'h8, v);                  // MIE off
    csr_access(3'b001, 12'h304, 64'h8, v);                  // mie.MSIE only
    issue(32'h10500073, 64'h4000, 0, 0);                    // wfi
    chk(!done, "wfi waits");
    repeat (3) begin @(posedge clk); #1; chk(!done, "wfi still waits"); end
    msip = 1; #1;
    chk(done && rpc == 64'h4004, "wfi wakes on pending enabled interrupt, MIE off");
    finish_issue();
    msip = 0;
    issue(32'h0000100f, 64'h5000, 0, 0);                    // fence.i
    chk(done && flush && rpc == 64'h5004, "fence.i flushes");
    finish_issue();
    csr_access(3'b010, 12'hb02, 0, v);
    @(negedge clk); retire = 1; repeat (5) @(negedge clk); retire = 0;
    begin
      logic [63:0] v2;
      csr_access(3'b010, 12'hb02, 0, v2);
      chk(v2 - v >= 5, "minstret counts retirements");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
