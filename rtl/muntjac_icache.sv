// L1 instruction cache: set-associative, read-only, 32-bit word access,
// refilled over a TileLink Uncached (Get) port.
//
// Default geometry follows the paper's default configuration: 16 KiB,
// 4-way. Line size (64 bytes) is this design's choice. Tags and data of
// each way are separate arrays read in the cycle after the request, as with
// single-port SRAMs; valid bits are flip-flops so that FENCE.I (`flush_i`)
// clears them at once.
//
// Timing: a request (`req_valid_i && req_ready_o`, word address in
// `req_addr_i`) is looked up in the next cycle; on a hit `resp_valid_o`
// rises in that cycle with the 32-bit word and a new request may be
// accepted at the same time, so hits stream at one word per cycle. On a
// miss the cache issues one Get of a whole line, writes the BEATS beats
// into the victim way as they arrive, waits one cycle for the arrays to be
// re-read and replays the lookup. There is no
// response back-pressure: the frontend only asks for what it has room for.
// The victim is the first invalid way, else a round-robin pointer (the paper
// does not give a replacement policy).
module muntjac_icache import muntjac_pkg::*; #(
  parameter int unsigned SIZE_B = 16384,
  parameter int unsigned WAYS   = 4,
  parameter logic [SOURCE_W-1:0] SOURCE = '0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_valid_i,
  output logic        req_ready_o,
  input  logic [63:0] req_addr_i,
  output logic        resp_valid_o,
  output logic [31:0] resp_data_o,
  input  logic        flush_i,
  // TileLink A/D
  output logic        a_valid_o,
  input  logic        a_ready_i,
  output tl_a_t       a_o,
  input  logic        d_valid_i,
  output logic        d_ready_o,
  input  tl_d_t       d_i
);
  localparam int unsigned SETS = SIZE_B / (WAYS * LINE_B);
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned OW   = $clog2(LINE_B);
  localparam int unsigned BW   = $clog2(BEATS);
  localparam int unsigned TW   = PADDR_W - SW - OW;
  localparam int unsigned WW   = $clog2(WAYS);

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_REQ, S_FILL, S_REPLAY} state_e;
  state_e state_q;

  logic [TW-1:0]  tag_mem  [WAYS][SETS];
  logic [63:0]    data_mem [WAYS][SETS*BEATS];
  logic [WAYS-1:0] valid_q [SETS];
  logic [TW-1:0]  tag_rd   [WAYS];
  logic [63:0]    data_rd  [WAYS];

  logic [PADDR_W-1:0] addr_q;
  logic [WW-1:0]  rr_q, victim_q;
  logic [BW-1:0]  beat_q;

  logic [SW-1:0]  set_q;
  logic [TW-1:0]  tag_q;
  logic [WAYS-1:0] hit_way;
  logic           hit;
  logic [63:0]    hit_data;
  logic           accept;
  logic [PADDR_W-1:0] rd_addr;

  assign set_q = addr_q[OW +: SW];
  assign tag_q = addr_q[PADDR_W-1 -: TW];

  always_comb begin
    hit_way  = '0;
    hit_data = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[set_q][w] && tag_rd[w] == tag_q) begin
        hit_way[w] = 1'b1;
        hit_data   = data_rd[w];
      end
    end
    hit = state_q == S_LOOKUP && hit_way != '0;
  end

  assign req_ready_o  = (state_q == S_IDLE || hit) && !flush_i;
  assign accept       = req_valid_i && req_ready_o;
  assign resp_valid_o = hit;
  assign resp_data_o  = addr_q[2] ? hit_data[63:32] : hit_data[31:0];
  // Array read address: a new request, or the replay after a refill.
  assign rd_addr      = accept ? req_addr_i[PADDR_W-1:0] : addr_q;

  // Arrays: synchronous read, written by refill beats.
  always_ff @(posedge clk_i) begin
    for (int w = 0; w < WAYS; w++) begin
      tag_rd[w]  <= tag_mem[w][rd_addr[OW +: SW]];
      data_rd[w] <= data_mem[w][rd_addr[OW+SW-1:3]];
    end
    if (state_q == S_FILL && d_valid_i) begin
      data_mem[victim_q][{set_q, beat_q}] <= d_i.data;
      if (beat_q == BW'(BEATS - 1)) tag_mem[victim_q][set_q] <= tag_q;
    end
  end

  // Victim: first invalid way, else round robin
  logic [WW-1:0] victim;
  always_comb begin
    victim = rr_q;
    for (int w = WAYS - 1; w >= 0; w--) if (!valid_q[set_q][w]) victim = WW'(w);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      addr_q <= '0; rr_q <= '0; victim_q <= '0; beat_q <= '0;
      for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
    end else begin
      if (flush_i) begin
        for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
      end
      unique case (state_q)
        S_IDLE: if (accept) begin
          addr_q  <= req_addr_i[PADDR_W-1:0];
          state_q <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (accept) begin
            addr_q <= req_addr_i[PADDR_W-1:0];
          end else if (hit || flush_i) begin
            state_q <= S_IDLE;
          end else begin
            victim_q <= victim;
            state_q  <= S_REQ;
          end
        end
        S_REQ: if (a_ready_i) begin
          beat_q  <= '0;
          state_q <= S_FILL;
        end
        S_FILL: if (d_valid_i) begin
          beat_q <= beat_q + 1'b1;
          if (beat_q == BW'(BEATS - 1)) begin
            if (!flush_i) valid_q[set_q][victim_q] <= 1'b1;
            rr_q    <= rr_q + 1'b1;
            state_q <= S_REPLAY;
          end
        end
        // The arrays are re-read at addr_q now that the last beat has landed.
        S_REPLAY: state_q <= S_LOOKUP;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // TileLink A: one Get of a whole line
  always_comb begin
    a_valid_o      = state_q == S_REQ;
    a_o            = '0;
    a_o.opcode     = Get;
    a_o.size       = 3'($clog2(LINE_B));
    a_o.source     = SOURCE;
    a_o.address    = {addr_q[PADDR_W-1:OW], {OW{1'b0}}};
    a_o.mask       = '1;
  end
  assign d_ready_o = state_q == S_FILL;
endmodule
