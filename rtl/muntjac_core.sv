// Muntjac-style core: frontend (PCGEN, IF with the instruction cache,
// instruction alignment), backend (decode, issue, EX1/EX2, control state
// machine) and the L1 data cache.
//
// The core has two TileLink ports, an uncached one (A/D) for the
// instruction cache and a cached one (A/B/C/D/E) for the data cache, and
// takes the machine software, timer and external interrupt lines. Its
// TileLink source IDs are 2*HART_ID (instruction cache) and 2*HART_ID+1
// (data cache), a numbering of this design.
module muntjac_core import muntjac_pkg::*; #(
  parameter logic [63:0] HART_ID = 64'd0,
  parameter logic [63:0] RESET_ADDR = RESET_PC,
  parameter int unsigned ICACHE_SIZE_B = 16384,
  parameter int unsigned ICACHE_WAYS = 4,
  parameter int unsigned DCACHE_SIZE_B = 16384,
  parameter int unsigned DCACHE_WAYS = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // instruction cache port (TL-UH)
  output logic        ia_valid_o,
  input  logic        ia_ready_i,
  output tl_a_t       ia_o,
  input  logic        id_valid_i,
  output logic        id_ready_o,
  input  tl_d_t       id_i,
  // data cache port (TL-C)
  output logic        da_valid_o,
  input  logic        da_ready_i,
  output tl_a_t       da_o,
  input  logic        db_valid_i,
  output logic        db_ready_o,
  input  tl_b_t       db_i,
  output logic        dc_valid_o,
  input  logic        dc_ready_i,
  output tl_c_t       dc_o,
  input  logic        dd_valid_i,
  output logic        dd_ready_o,
  input  tl_d_t       dd_i,
  output logic        de_valid_o,
  input  logic        de_ready_i,
  output tl_e_t       de_o,
  // interrupts
  input  logic        msip_i,
  input  logic        mtip_i,
  input  logic        meip_i,
  // observation
  output logic        retire_o,
  output logic [63:0] retire_pc_o
);
  localparam logic [SOURCE_W-1:0] ISRC = SOURCE_W'(2 * HART_ID);
  localparam logic [SOURCE_W-1:0] DSRC = SOURCE_W'(2 * HART_ID + 1);

  logic        fe_valid, fe_ready, redirect, ic_flush;
  fetch_t      fe;
  logic [63:0] redirect_pc;
  train_t      train;

  logic        dreq_valid, dreq_ready, dreq_uns, dresp_valid;
  mem_op_e     dreq_op;
  logic [1:0]  dreq_size;
  logic [4:0]  dreq_amo;
  logic [63:0] dreq_addr, dreq_wdata, dresp_data;

  muntjac_frontend #(
    .RESET_ADDR(RESET_ADDR), .SOURCE(ISRC),
    .ICACHE_SIZE_B(ICACHE_SIZE_B), .ICACHE_WAYS(ICACHE_WAYS)
  ) u_frontend (
    .clk_i, .rst_ni,
    .redirect_i(redirect), .redirect_pc_i(redirect_pc), .train_i(train),
    .icache_flush_i(ic_flush),
    .out_valid_o(fe_valid), .out_ready_i(fe_ready), .out_o(fe),
    .a_valid_o(ia_valid_o), .a_ready_i(ia_ready_i), .a_o(ia_o),
    .d_valid_i(id_valid_i), .d_ready_o(id_ready_o), .d_i(id_i)
  );

  muntjac_backend #(.HART_ID(HART_ID)) u_backend (
    .clk_i, .rst_ni,
    .in_valid_i(fe_valid), .in_ready_o(fe_ready), .in_i(fe),
    .redirect_o(redirect), .redirect_pc_o(redirect_pc), .train_o(train),
    .icache_flush_o(ic_flush),
    .dc_req_valid_o(dreq_valid), .dc_req_ready_i(dreq_ready), .dc_req_op_o(dreq_op),
    .dc_req_size_o(dreq_size), .dc_req_unsigned_o(dreq_uns), .dc_req_amo_o(dreq_amo),
    .dc_req_addr_o(dreq_addr), .dc_req_wdata_o(dreq_wdata),
    .dc_resp_valid_i(dresp_valid), .dc_resp_data_i(dresp_data),
    .msip_i, .mtip_i, .meip_i,
    .retire_o, .retire_pc_o
  );

  muntjac_dcache #(.SIZE_B(DCACHE_SIZE_B), .WAYS(DCACHE_WAYS), .SOURCE(DSRC)) u_dcache (
    .clk_i, .rst_ni,
    .req_valid_i(dreq_valid), .req_ready_o(dreq_ready), .req_op_i(dreq_op),
    .req_size_i(dreq_size), .req_unsigned_i(dreq_uns), .req_amo_i(dreq_amo),
    .req_addr_i(dreq_addr), .req_wdata_i(dreq_wdata),
    .resp_valid_o(dresp_valid), .resp_data_o(dresp_data),
    .a_valid_o(da_valid_o), .a_ready_i(da_ready_i), .a_o(da_o),
    .b_valid_i(db_valid_i), .b_ready_o(db_ready_o), .b_i(db_i),
    .c_valid_o(dc_valid_o), .c_ready_i(dc_ready_i), .c_o(dc_o),
    .d_valid_i(dd_valid_i), .d_ready_o(dd_ready_o), .d_i(dd_i),
    .e_valid_o(de_valid_o), .e_ready_i(de_ready_i), .e_o(de_o)
  );
endmodule
