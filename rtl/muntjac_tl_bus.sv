// Shared TileLink bus of the SoC: joins NM masters (the caches of every core
// and a device DMA port) and routes each request to one of three regions:
// ROM, main memory (through the coherence broadcaster) and I/O.
//
// The paper shows this bus only as a block joining cores, DMA, ROM, memory
// and I/O. This implementation carries one transaction at a time: a
// round-robin arbiter grants a master, its single-beat A message goes to the
// region its address selects, and the grant is held until the last beat of
// the D response (1 beat, or 2^size/8 beats for data of a whole line) has
// been taken. The request's source is replaced by the master's index, so
// sources are unique system-wide. A request with the `lock` user bit set
// keeps the bus for the same master's next transaction, which is how the data
// caches make atomics indivisible. Channels B, C and E do not pass here: they
// run directly between the data caches and the broadcaster.
module muntjac_tl_bus import muntjac_pkg::*; #(
  parameter int unsigned NM = 9
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [NM-1:0] m_a_valid_i,
  output logic [NM-1:0] m_a_ready_o,
  input  tl_a_t         m_a_i [NM],
  output logic [NM-1:0] m_d_valid_o,
  input  logic [NM-1:0] m_d_ready_i,
  output tl_d_t         m_d_o [NM],
  // slaves: 0 ROM, 1 memory, 2 I/O
  output logic [2:0]    s_a_valid_o,
  input  logic [2:0]    s_a_ready_i,
  output tl_a_t         s_a_o,
  input  logic [2:0]    s_d_valid_i,
  output logic [2:0]    s_d_ready_o,
  input  tl_d_t         s_d_i [3]
);
  localparam int unsigned GW = $clog2(NM);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_RESP} state_e;
  state_e state_q;

  logic [GW-1:0] grant_q, last_q, pick;
  logic          found;
  logic [1:0]    sel_q, sel;
  logic          lock_q, locked_q;
  logic [7:0]    beats_q;
  tl_d_t         d;

  // round-robin pick, starting after the last grant; a lock pins the master
  always_comb begin
    pick  = '0;
    found = 1'b0;
    for (int k = NM; k >= 1; k--) begin
      int unsigned idx;
      idx = (32'(last_q) + 32'(k)) % NM;
      if (m_a_valid_i[idx] && (!locked_q || GW'(idx) == grant_q)) begin
        pick  = GW'(idx);
        found = 1'b1;
      end
    end
  end

  always_comb begin
    if (is_mem_addr(m_a_i[grant_q].address))      sel = 2'd1;
    else if (is_rom_addr(m_a_i[grant_q].address)) sel = 2'd0;
    else                                          sel = 2'd2;
  end

  always_comb begin
    s_a_o        = m_a_i[grant_q];
    s_a_o.source = SOURCE_W'(grant_q);
    s_a_valid_o  = '0;
    if (state_q == S_REQ) s_a_valid_o[sel] = m_a_valid_i[grant_q];
    m_a_ready_o  = '0;
    if (state_q == S_REQ) m_a_ready_o[grant_q] = s_a_ready_i[sel];
    d            = s_d_i[sel_q];
    m_d_valid_o  = '0;
    s_d_ready_o  = '0;
    for (int i = 0; i < NM; i++) m_d_o[i] = d;
    if (state_q == S_RESP) begin
      m_d_valid_o[grant_q] = s_d_valid_i[sel_q];
      s_d_ready_o[sel_q]   = m_d_ready_i[grant_q];
    end
  end

  logic d_fire, d_last;
  assign d_fire = state_q == S_RESP && s_d_valid_i[sel_q] && m_d_ready_i[grant_q];
  always_comb begin
    if (d.opcode == AccessAckData || d.opcode == GrantData)
      d_last = 32'(beats_q) + 1 >= tl_beats(d.size);
    else
      d_last = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; grant_q <= '0; last_q <= '0; sel_q <= '0;
      lock_q <= 1'b0; locked_q <= 1'b0; beats_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (found) begin
          grant_q <= pick;
          state_q <= S_REQ;
        end
        S_REQ: if (m_a_valid_i[grant_q] && s_a_ready_i[sel]) begin
          sel_q   <= sel;
          lock_q  <= m_a_i[grant_q].lock;
          beats_q <= '0;
          state_q <= S_RESP;
        end
        S_RESP: if (d_fire) begin
          beats_q <= beats_q + 1'b1;
          if (d_last) begin
            locked_q <= lock_q;
            last_q   <= grant_q;
            state_q  <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
