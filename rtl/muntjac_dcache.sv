// L1 data cache: set-associative, blocking, with a TileLink Cached (TL-C)
// memory port, an AMOALU for atomics, and a 16-cycle line lock after each
// refill to guarantee forward progress.
//
// What follows the paper: 16 KiB, 4-way default geometry; data of each way in
// a separate single-port array read in the cycle after the request; TL-C
// port (Acquire on A, Probe on B, ProbeAck on C, Grant on D, GrantAck on E),
// so several of these caches can be kept coherent by a broadcaster; an AMOALU
// of its own; lines locked for 16 cycles after a refill (probes to the line
// wait). Valid/ready request interface; the cache replays misses itself.
//
// This design's own choices, where the paper gives no detail: 64-byte lines;
// the cache is write-through and no-write-allocate and only ever holds lines
// in the Branch (read-only) permission, so it never owns dirty data, probes
// only invalidate, and no Release is needed; tags are kept in registers so
// probes can be looked up while the main state machine is busy; atomics
// (AMO*, and SC while its reservation is valid) are done as a Get with the
// `lock` user bit set, which keeps the bus granted to this cache, followed by
// a PutPartialData with the new value that ends the lock. LR sets a
// reservation on the line; a probe of that line, or any SC, clears it.
// Addresses outside main memory bypass the cache (single-beat Get/Put).
// Misaligned accesses are not detected. No TLB: addresses are physical.
//
// Timing: a request accepted in cycle 0 is looked up in cycle 1; a load hit
// answers with `resp_valid_o` in cycle 2 (the paper's usual 2-cycle hit) and a
// new load may be accepted in cycle 1. Misses, stores (they wait for the
// write-through AccessAck), atomics and uncached accesses take longer.
// `resp_valid_o` is a one-cycle pulse that the requester must take.
module muntjac_dcache import muntjac_pkg::*; #(
  parameter int unsigned SIZE_B   = 16384,
  parameter int unsigned WAYS     = 4,
  parameter int unsigned LOCK_CYC = 16,
  parameter logic [SOURCE_W-1:0] SOURCE = '0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // request from the backend
  input  logic        req_valid_i,
  output logic        req_ready_o,
  input  mem_op_e     req_op_i,
  input  logic [1:0]  req_size_i,
  input  logic        req_unsigned_i,
  input  logic [4:0]  req_amo_i,
  input  logic [63:0] req_addr_i,
  input  logic [63:0] req_wdata_i,
  output logic        resp_valid_o,
  output logic [63:0] resp_data_o,
  // TileLink C
  output logic        a_valid_o,
  input  logic        a_ready_i,
  output tl_a_t       a_o,
  input  logic        b_valid_i,
  output logic        b_ready_o,
  input  tl_b_t       b_i,
  output logic        c_valid_o,
  input  logic        c_ready_i,
  output tl_c_t       c_o,
  input  logic        d_valid_i,
  output logic        d_ready_o,
  input  tl_d_t       d_i,
  output logic        e_valid_o,
  input  logic        e_ready_i,
  output tl_e_t       e_o
);
  localparam int unsigned SETS = SIZE_B / (WAYS * LINE_B);
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned OW   = $clog2(LINE_B);
  localparam int unsigned BW   = $clog2(BEATS);
  localparam int unsigned TW   = PADDR_W - SW - OW;
  localparam int unsigned WW   = $clog2(WAYS);

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_ACQ, S_GRANT, S_GACK, S_REPLAY,
    S_UC_REQ, S_UC_RESP, S_AT_GET, S_AT_DATA, S_AT_PUT, S_AT_ACK
  } state_e;
  state_e state_q;

  // ---------------------------------------------------------------- storage
  logic [TW-1:0]   tag_q   [SETS][WAYS];
  logic [WAYS-1:0] valid_q [SETS];
  logic [63:0]     data_mem [WAYS][SETS*BEATS];
  logic [63:0]     data_rd  [WAYS];

  // ---------------------------------------------------------------- request
  mem_op_e      op_q;
  logic [1:0]   size_q;
  logic         uns_q;
  logic [4:0]   amo_q;
  logic [PADDR_W-1:0] addr_q;
  logic [63:0]  wdata_q;
  logic [SW-1:0] set_q;
  logic [TW-1:0] tagv_q;
  logic [WAYS-1:0] hit_way;
  logic          hit;
  logic [63:0]   hit_data;
  logic          hit_q;
  logic [WW-1:0] hit_idx, hit_idx_q, victim_q, rr_q;
  logic [BW-1:0] beat_q;
  logic [63:0]   line_word_q;   // the beat the request asked for
  logic [SINK_W-1:0] sink_q;
  logic [63:0]   old_q;
  logic          sc_ok_q;

  logic          resv_q;
  logic [PADDR_W-OW-1:0] resv_line_q;
  logic [4:0]    lock_cnt_q;
  logic [PADDR_W-OW-1:0] lock_line_q;

  logic          resp_valid_q;
  logic [63:0]   resp_data_q;

  assign set_q  = addr_q[OW +: SW];
  assign tagv_q = addr_q[PADDR_W-1 -: TW];

  always_comb begin
    hit_way  = '0;
    hit_data = '0;
    hit_idx  = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[set_q][w] && tag_q[set_q][w] == tagv_q) begin
        hit_way[w] = 1'b1;
        hit_data   = data_rd[w];
        hit_idx    = WW'(w);
      end
    end
    hit = hit_way != '0;
  end

  // ---------------------------------------------------------------- data formatting
  function automatic logic [63:0] fmt_load(logic [63:0] w, logic [2:0] off,
                                           logic [1:0] size, logic uns);
    logic [63:0] s;
    s = w >> {off, 3'b0};
    unique case (size)
      2'd0:    return uns ? {56'b0, s[7:0]}  : {{56{s[7]}}, s[7:0]};
      2'd1:    return uns ? {48'b0, s[15:0]} : {{48{s[15]}}, s[15:0]};
      2'd2:    return uns ? {32'b0, s[31:0]} : {{32{s[31]}}, s[31:0]};
      default: return s;
    endcase
  endfunction
  function automatic logic [7:0] byte_mask(logic [2:0] off, logic [1:0] size);
    logic [7:0] m;
    unique case (size)
      2'd0: m = 8'h01;
      2'd1: m = 8'h03;
      2'd2: m = 8'h0F;
      default: m = 8'hFF;
    endcase
    return m << off;
  endfunction
  function automatic logic [63:0] merge(logic [63:0] old, logic [63:0] nw, logic [7:0] m);
    logic [63:0] r;
    for (int i = 0; i < 8; i++) r[i*8 +: 8] = m[i] ? nw[i*8 +: 8] : old[i*8 +: 8];
    return r;
  endfunction

  logic [2:0]  off;
  logic [7:0]  wmask;
  logic [63:0] wdata_sh, amo_res, amo_old;
  logic        cacheable, is_load;
  logic [PADDR_W-OW-1:0] line_q;
  assign off       = addr_q[2:0];
  assign wmask     = byte_mask(off, size_q);
  assign wdata_sh  = wdata_q << {off, 3'b0};
  assign cacheable = is_mem_addr(addr_q);
  assign is_load   = op_q == MEM_LOAD || op_q == MEM_LR;
  assign line_q    = addr_q[PADDR_W-1:OW];
  assign amo_old   = fmt_load(old_q, off, size_q, 1'b0);

  muntjac_amoalu u_amoalu (
    .amo_op_i (amo_q),
    .dword_i  (size_q == 2'd3),
    .old_i    (amo_old),
    .src_i    (wdata_q),
    .result_o (amo_res)
  );

  // ---------------------------------------------------------------- handshake
  logic accept;
  assign req_ready_o = state_q == S_IDLE ||
                       (state_q == S_LOOKUP && cacheable && is_load && hit);
  assign accept      = req_valid_i && req_ready_o;
  assign resp_valid_o = resp_valid_q;
  assign resp_data_o  = resp_data_q;

  logic [PADDR_W-1:0] rd_addr;
  assign rd_addr = accept ? req_addr_i[PADDR_W-1:0] : addr_q;

  // Victim: first invalid way, else round robin
  logic [WW-1:0] victim;
  always_comb begin
    victim = rr_q;
    for (int w = WAYS - 1; w >= 0; w--) if (!valid_q[set_q][w]) victim = WW'(w);
  end

  // ---------------------------------------------------------------- probes
  typedef enum logic [1:0] {P_IDLE, P_CHECK, P_ACK} pstate_e;
  pstate_e pstate_q;
  tl_b_t   probe_q;
  logic [SW-1:0] pset;
  logic [TW-1:0] ptag;
  logic [WAYS-1:0] pway;
  logic    plocked, present_q;
  assign pset = probe_q.address[OW +: SW];
  assign ptag = probe_q.address[PADDR_W-1 -: TW];
  always_comb begin
    for (int w = 0; w < WAYS; w++) pway[w] = valid_q[pset][w] && tag_q[pset][w] == ptag;
  end
  assign plocked   = lock_cnt_q != '0 && lock_line_q == probe_q.address[PADDR_W-1:OW];
  assign b_ready_o = pstate_q == P_IDLE;
  always_comb begin
    c_valid_o     = pstate_q == P_ACK;
    c_o           = '0;
    c_o.opcode    = TL_PROBE_ACK;
    c_o.param     = present_q ? TL_BtoN : TL_NtoN;
    c_o.size      = probe_q.size;
    c_o.source    = SOURCE;
    c_o.address   = probe_q.address;
  end

  // ---------------------------------------------------------------- arrays
  always_ff @(posedge clk_i) begin
    for (int w = 0; w < WAYS; w++) data_rd[w] <= data_mem[w][rd_addr[OW+SW-1:3]];
    if (state_q == S_GRANT && d_valid_i)
      data_mem[victim_q][{set_q, beat_q}] <= d_i.data;
    // Write-through stores update a line that is present.
    if (state_q == S_LOOKUP && op_q == MEM_STORE && cacheable && hit)
      data_mem[hit_idx][addr_q[OW+SW-1:3]] <= merge(hit_data, wdata_sh, wmask);
    if (state_q == S_AT_ACK && d_valid_i && hit_q && sc_ok_q && cacheable)
      data_mem[hit_idx_q][addr_q[OW+SW-1:3]] <= merge(old_q, a_o.data, a_o.mask);
  end

  // ---------------------------------------------------------------- main FSM
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      op_q <= MEM_LOAD; size_q <= '0; uns_q <= 1'b0; amo_q <= '0;
      addr_q <= '0; wdata_q <= '0; hit_q <= 1'b0; hit_idx_q <= '0;
      victim_q <= '0; rr_q <= '0; beat_q <= '0; line_word_q <= '0; sink_q <= '0;
      old_q <= '0; sc_ok_q <= 1'b0;
      resv_q <= 1'b0; resv_line_q <= '0; lock_cnt_q <= '0; lock_line_q <= '0;
      resp_valid_q <= 1'b0; resp_data_q <= '0;
      pstate_q <= P_IDLE; probe_q <= '0; present_q <= 1'b0;
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) tag_q[s][w] <= '0;
      end
    end else begin
      resp_valid_q <= 1'b0;
      if (lock_cnt_q != '0) lock_cnt_q <= lock_cnt_q - 1'b1;

      if (accept) begin
        op_q    <= req_op_i;
        size_q  <= req_size_i;
        uns_q   <= req_unsigned_i;
        amo_q   <= req_amo_i;
        addr_q  <= req_addr_i[PADDR_W-1:0];
        wdata_q <= req_wdata_i;
      end

      unique case (state_q)
        S_IDLE: if (accept) state_q <= S_LOOKUP;
        S_LOOKUP: begin
          hit_q     <= hit;
          hit_idx_q <= hit_idx;
          victim_q  <= victim;
          if (!cacheable) begin
            state_q <= (op_q == MEM_LOAD || op_q == MEM_STORE) ? S_UC_REQ : S_AT_GET;
            sc_ok_q <= 1'b1;
          end else begin
            unique case (op_q)
              MEM_LOAD, MEM_LR: begin
                if (hit) begin
                  resp_valid_q <= 1'b1;
                  resp_data_q  <= fmt_load(hit_data, off, size_q, uns_q);
                  if (op_q == MEM_LR) begin resv_q <= 1'b1; resv_line_q <= line_q; end
                  if (!accept) state_q <= S_IDLE;
                end else begin
                  state_q <= S_ACQ;
                end
              end
              MEM_STORE: state_q <= S_UC_REQ;        // write-through
              MEM_SC: begin
                if (resv_q && resv_line_q == line_q) begin
                  state_q <= S_AT_GET;
                end else begin
                  resv_q       <= 1'b0;
                  resp_valid_q <= 1'b1;
                  resp_data_q  <= 64'd1;
                  state_q      <= S_IDLE;
                end
              end
              default: begin sc_ok_q <= 1'b1; state_q <= S_AT_GET; end
            endcase
          end
        end
        // ---- refill
        S_ACQ: if (a_ready_i) begin beat_q <= '0; state_q <= S_GRANT; end
        S_GRANT: if (d_valid_i) begin
          beat_q <= beat_q + 1'b1;
          sink_q <= d_i.sink;
          if (beat_q == addr_q[OW-1:3]) line_word_q <= d_i.data;
          if (beat_q == BW'(BEATS - 1)) begin
            tag_q[set_q][victim_q]   <= tagv_q;
            valid_q[set_q][victim_q] <= 1'b1;
            rr_q       <= rr_q + 1'b1;
            lock_cnt_q <= 5'(LOCK_CYC);
            lock_line_q <= line_q;
            state_q    <= S_GACK;
          end
        end
        S_GACK: if (e_ready_i) begin
          resp_valid_q <= 1'b1;
          resp_data_q  <= fmt_load(line_word_q, off, size_q, uns_q);
          if (op_q == MEM_LR) begin resv_q <= 1'b1; resv_line_q <= line_q; end
          state_q <= S_IDLE;
        end
        // ---- uncached access and write-through store
        S_UC_REQ: if (a_ready_i) state_q <= S_UC_RESP;
        S_UC_RESP: if (d_valid_i) begin
          resp_valid_q <= 1'b1;
          resp_data_q  <= op_q == MEM_STORE ? 64'd0 : fmt_load(d_i.data, off, size_q, uns_q);
          state_q      <= S_IDLE;
        end
        // ---- atomics: locked Get, AMOALU, Put
        S_AT_GET: if (a_ready_i) state_q <= S_AT_DATA;
        S_AT_DATA: if (d_valid_i) begin
          old_q <= d_i.data;
          if (op_q == MEM_SC) sc_ok_q <= resv_q && resv_line_q == line_q;
          state_q <= S_AT_PUT;
        end
        S_AT_PUT: if (a_ready_i) state_q <= S_AT_ACK;
        S_AT_ACK: if (d_valid_i) begin
          resp_valid_q <= 1'b1;
          resp_data_q  <= op_q == MEM_SC ? {63'b0, !sc_ok_q} : fmt_load(old_q, off, size_q, 1'b0);
          if (op_q == MEM_SC) resv_q <= 1'b0;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase

      // ---- probe handling, independent of the main state machine
      unique case (pstate_q)
        P_IDLE: if (b_valid_i) begin probe_q <= b_i; pstate_q <= P_CHECK; end
        P_CHECK: if (!plocked) begin
          present_q <= pway != '0;
          for (int w = 0; w < WAYS; w++) if (pway[w]) valid_q[pset][w] <= 1'b0;
          if (resv_q && resv_line_q == probe_q.address[PADDR_W-1:OW]) resv_q <= 1'b0;
          pstate_q <= P_ACK;
        end
        P_ACK: if (c_ready_i) pstate_q <= P_IDLE;
        default: pstate_q <= P_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- TileLink A / D / E
  always_comb begin
    a_valid_o  = 1'b0;
    a_o        = '0;
    a_o.source = SOURCE;
    a_o.address = addr_q;
    a_o.size   = {1'b0, size_q};
    a_o.mask   = wmask;
    a_o.data   = wdata_sh;
    unique case (state_q)
      S_ACQ: begin
        a_valid_o   = 1'b1;
        a_o.opcode  = AcquireBlock;
        a_o.param   = TL_NtoB;
        a_o.size    = 3'(OW);
        a_o.address = {line_q, {OW{1'b0}}};
        a_o.mask    = '1;
      end
      S_UC_REQ: begin
        a_valid_o  = 1'b1;
        a_o.opcode = op_q == MEM_STORE ? PutPartialData : Get;
      end
      S_AT_GET: begin
        a_valid_o  = 1'b1;
        a_o.opcode = Get;
        a_o.lock   = 1'b1;
      end
      S_AT_PUT: begin
        a_valid_o  = 1'b1;
        a_o.opcode = PutPartialData;
        a_o.data   = amo_res << {off, 3'b0};
        a_o.mask   = sc_ok_q ? wmask : 8'h00;   // a failed SC writes nothing
      end
      S_AT_ACK: begin
        a_o.data   = amo_res << {off, 3'b0};
        a_o.mask   = sc_ok_q ? wmask : 8'h00;
      end
      default: ;
    endcase
  end
  assign d_ready_o = state_q == S_GRANT || state_q == S_UC_RESP ||
                     state_q == S_AT_DATA || state_q == S_AT_ACK;
  assign e_valid_o = state_q == S_GACK;
  assign e_o.sink  = sink_q;

  // Refill beats must be GrantData
  a_grant: assert property (@(posedge clk_i) disable iff (!rst_ni)
    state_q == S_GRANT && d_valid_i |-> d_i.opcode == GrantData)
    else $error("dcache: expected GrantData");
endmodule
