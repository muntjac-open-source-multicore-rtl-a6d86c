// Integer register file (x0..x31) with two combinational read ports, used
// by the issue stage ("Reg Read" in the backend figure), and one write port
// used by the write-back stage ("Reg Write"). x0 reads as zero and ignores
// writes. A write becomes visible to reads in the following cycle; the
// backend's bypass network covers the cycle of the write. All registers
// reset to zero (the paper does not state reset behaviour).
module muntjac_regfile (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [4:0]  raddr_a_i,
  output logic [63:0] rdata_a_o,
  input  logic [4:0]  raddr_b_i,
  output logic [63:0] rdata_b_o,
  input  logic        we_i,
  input  logic [4:0]  waddr_i,
  input  logic [63:0] wdata_i
);
  logic [63:0] regs_q [1:31];

  assign rdata_a_o = raddr_a_i == 5'd0 ? 64'd0 : regs_q[raddr_a_i];
  assign rdata_b_o = raddr_b_i == 5'd0 ? 64'd0 : regs_q[raddr_b_i];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 1; i < 32; i++) regs_q[i] <= '0;
    end else if (we_i && waddr_i != 5'd0) begin
      regs_q[waddr_i] <= wdata_i;
    end
  end
endmodule
