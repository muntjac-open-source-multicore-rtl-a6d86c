// I/O bus: routes single-beat TileLink requests of the I/O region to the
// CLINT, the PLIC or the external device port, by address, and returns the
// response of the selected target.
//
// The paper's SoC figure shows an I/O bus below the main bus with the PLIC,
// the CLINT and a device on it. The region sizes (64 KiB CLINT, 64 MiB PLIC)
// follow common RISC-V platforms; everything else in the I/O region goes to
// the device port. The upstream bus carries one transaction at a time, so
// the target chosen by the request is simply remembered for the response.
module muntjac_io_bus import muntjac_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        a_valid_i,
  output logic        a_ready_o,
  input  tl_a_t       a_i,
  output logic        d_valid_o,
  input  logic        d_ready_i,
  output tl_d_t       d_o,
  // targets: 0 CLINT, 1 PLIC, 2 device
  output logic [2:0]  t_a_valid_o,
  input  logic [2:0]  t_a_ready_i,
  output tl_a_t       t_a_o,
  input  logic [2:0]  t_d_valid_i,
  output logic [2:0]  t_d_ready_o,
  input  tl_d_t       t_d_i [3]
);
  logic [1:0] sel, sel_q;

  always_comb begin
    if ((a_i.address & ~56'hFFFF) == CLINT_BASE)          sel = 2'd0;
    else if ((a_i.address & ~56'h3FF_FFFF) == PLIC_BASE)  sel = 2'd1;
    else                                                  sel = 2'd2;
    t_a_o            = a_i;
    t_a_valid_o      = '0;
    t_a_valid_o[sel] = a_valid_i;
    a_ready_o        = t_a_ready_i[sel];
    d_valid_o        = t_d_valid_i[sel_q];
    d_o              = t_d_i[sel_q];
    t_d_ready_o      = '0;
    t_d_ready_o[sel_q] = d_ready_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                       sel_q <= '0;
    else if (a_valid_i && a_ready_o)   sel_q <= sel;
  end
endmodule
