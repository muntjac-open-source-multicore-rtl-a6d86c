// Multicore SoC: NUM_CORES cores on a shared TileLink bus with a ROM
// region, main memory behind a coherence broadcaster, and an I/O region
// with the PLIC, the CLINT and an external device port.
//
// Follows the paper's example system figure: four cores; a bus that also
// takes a device DMA master; ROM towards the firmware flash; memory through
// the broadcaster (the alternative named there, the L2 cache, is not part
// of this build) towards the memory controller; an I/O bus with PLIC,
// CLINT and a device; interrupts from the CLINT (software, timer) and PLIC
// (external) to every core. The firmware flash, memory controller, device
// and DMA engine are outside the SoC, so their TileLink links are ports:
// rom_* and mem_* are TL-UH manager-side links driven by the SoC,
// dev_* a single-beat I/O link, dma_* a link on which an outside master
// makes requests. irq_i are the device interrupt lines into the PLIC.
// retire_o shows, per core, an instruction leaving the pipeline.
module muntjac_soc import muntjac_pkg::*; #(
  parameter int unsigned NUM_CORES = 4,
  parameter int unsigned NUM_IRQ   = 31,
  parameter int unsigned ICACHE_SIZE_B = 16384,
  parameter int unsigned DCACHE_SIZE_B = 16384,
  parameter int unsigned CACHE_WAYS = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // firmware ROM
  output logic        rom_a_valid_o,
  input  logic        rom_a_ready_i,
  output tl_a_t       rom_a_o,
  input  logic        rom_d_valid_i,
  output logic        rom_d_ready_o,
  input  tl_d_t       rom_d_i,
  // memory controller
  output logic        mem_a_valid_o,
  input  logic        mem_a_ready_i,
  output tl_a_t       mem_a_o,
  input  logic        mem_d_valid_i,
  output logic        mem_d_ready_o,
  input  tl_d_t       mem_d_i,
  // device on the I/O bus
  output logic        dev_a_valid_o,
  input  logic        dev_a_ready_i,
  output tl_a_t       dev_a_o,
  input  logic        dev_d_valid_i,
  output logic        dev_d_ready_o,
  input  tl_d_t       dev_d_i,
  // device DMA master
  input  logic        dma_a_valid_i,
  output logic        dma_a_ready_o,
  input  tl_a_t       dma_a_i,
  output logic        dma_d_valid_o,
  input  logic        dma_d_ready_i,
  output tl_d_t       dma_d_o,
  input  logic [NUM_IRQ:1] irq_i,
  output logic [NUM_CORES-1:0] retire_o
);
  localparam int unsigned NM = 2 * NUM_CORES + 1;

  logic [NM-1:0] m_a_valid, m_a_ready, m_d_valid, m_d_ready;
  tl_a_t         m_a [NM];
  tl_d_t         m_d [NM];

  logic [NUM_CORES-1:0] b_valid, b_ready, c_valid, c_ready, e_valid, e_ready;
  tl_b_t         b;
  tl_c_t         c [NUM_CORES];
  tl_e_t         e [NUM_CORES];
  logic [NUM_CORES-1:0] msip, mtip, meip;

  for (genvar h = 0; h < NUM_CORES; h++) begin : g_core
    logic [63:0] retire_pc;
    muntjac_core #(
      .HART_ID(64'(h)), .ICACHE_SIZE_B(ICACHE_SIZE_B), .ICACHE_WAYS(CACHE_WAYS),
      .DCACHE_SIZE_B(DCACHE_SIZE_B), .DCACHE_WAYS(CACHE_WAYS)
    ) u_core (
      .clk_i, .rst_ni,
      .ia_valid_o(m_a_valid[2*h]), .ia_ready_i(m_a_ready[2*h]), .ia_o(m_a[2*h]),
      .id_valid_i(m_d_valid[2*h]), .id_ready_o(m_d_ready[2*h]), .id_i(m_d[2*h]),
      .da_valid_o(m_a_valid[2*h+1]), .da_ready_i(m_a_ready[2*h+1]), .da_o(m_a[2*h+1]),
      .db_valid_i(b_valid[h]), .db_ready_o(b_ready[h]), .db_i(b),
      .dc_valid_o(c_valid[h]), .dc_ready_i(c_ready[h]), .dc_o(c[h]),
      .dd_valid_i(m_d_valid[2*h+1]), .dd_ready_o(m_d_ready[2*h+1]), .dd_i(m_d[2*h+1]),
      .de_valid_o(e_valid[h]), .de_ready_i(e_ready[h]), .de_o(e[h]),
      .msip_i(msip[h]), .mtip_i(mtip[h]), .meip_i(meip[h]),
      .retire_o(retire_o[h]), .retire_pc_o(retire_pc)
    );
  end

  assign m_a_valid[NM-1] = dma_a_valid_i;
  assign m_a[NM-1]       = dma_a_i;
  assign dma_a_ready_o   = m_a_ready[NM-1];
  assign dma_d_valid_o   = m_d_valid[NM-1];
  assign dma_d_o         = m_d[NM-1];
  assign m_d_ready[NM-1] = dma_d_ready_i;

  // main bus
  logic [2:0] s_a_valid, s_a_ready, s_d_valid, s_d_ready;
  tl_a_t      s_a;
  tl_d_t      s_d [3];

  muntjac_tl_bus #(.NM(NM)) u_bus (
    .clk_i, .rst_ni,
    .m_a_valid_i(m_a_valid), .m_a_ready_o(m_a_ready), .m_a_i(m_a),
    .m_d_valid_o(m_d_valid), .m_d_ready_i(m_d_ready), .m_d_o(m_d),
    .s_a_valid_o(s_a_valid), .s_a_ready_i(s_a_ready), .s_a_o(s_a),
    .s_d_valid_i(s_d_valid), .s_d_ready_o(s_d_ready), .s_d_i(s_d)
  );

  // ROM
  assign rom_a_valid_o = s_a_valid[0];
  assign rom_a_o       = s_a;
  assign s_a_ready[0]  = rom_a_ready_i;
  assign s_d_valid[0]  = rom_d_valid_i;
  assign s_d[0]        = rom_d_i;
  assign rom_d_ready_o = s_d_ready[0];

  // memory through the broadcaster
  muntjac_broadcaster #(.NC(NUM_CORES)) u_bcast (
    .clk_i, .rst_ni,
    .a_valid_i(s_a_valid[1]), .a_ready_o(s_a_ready[1]), .a_i(s_a),
    .d_valid_o(s_d_valid[1]), .d_ready_i(s_d_ready[1]), .d_o(s_d[1]),
    .b_valid_o(b_valid), .b_ready_i(b_ready), .b_o(b),
    .c_valid_i(c_valid), .c_ready_o(c_ready), .c_i(c),
    .e_valid_i(e_valid), .e_ready_o(e_ready), .e_i(e),
    .mem_a_valid_o, .mem_a_ready_i, .mem_a_o,
    .mem_d_valid_i, .mem_d_ready_o, .mem_d_i
  );

  // I/O
  logic [2:0] t_a_valid, t_a_ready, t_d_valid, t_d_ready;
  tl_a_t      t_a;
  tl_d_t      t_d [3];

  muntjac_io_bus u_io (
    .clk_i, .rst_ni,
    .a_valid_i(s_a_valid[2]), .a_ready_o(s_a_ready[2]), .a_i(s_a),
    .d_valid_o(s_d_valid[2]), .d_ready_i(s_d_ready[2]), .d_o(s_d[2]),
    .t_a_valid_o(t_a_valid), .t_a_ready_i(t_a_ready), .t_a_o(t_a),
    .t_d_valid_i(t_d_valid), .t_d_ready_o(t_d_ready), .t_d_i(t_d)
  );

  muntjac_clint #(.NH(NUM_CORES)) u_clint (
    .clk_i, .rst_ni,
    .a_valid_i(t_a_valid[0]), .a_ready_o(t_a_ready[0]), .a_i(t_a),
    .d_valid_o(t_d_valid[0]), .d_ready_i(t_d_ready[0]), .d_o(t_d[0]),
    .msip_o(msip), .mtip_o(mtip)
  );

  muntjac_plic #(.NS(NUM_IRQ), .NC(NUM_CORES)) u_plic (
    .clk_i, .rst_ni, .irq_i,
    .a_valid_i(t_a_valid[1]), .a_ready_o(t_a_ready[1]), .a_i(t_a),
    .d_valid_o(t_d_valid[1]), .d_ready_i(t_d_ready[1]), .d_o(t_d[1]),
    .eip_o(meip)
  );

  assign dev_a_valid_o = t_a_valid[2];
  assign dev_a_o       = t_a;
  assign t_a_ready[2]  = dev_a_ready_i;
  assign t_d_valid[2]  = dev_d_valid_i;
  assign t_d[2]        = dev_d_i;
  assign dev_d_ready_o = t_d_ready[2];
endmodule
