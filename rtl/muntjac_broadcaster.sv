// Coherence broadcaster: the manager in front of main memory that keeps the
// L1 data caches coherent, and the TL-C to TL-UH bridge towards the memory
// controller.
//
// The paper offers the broadcaster as the simple alternative to the L2 for
// keeping data L1s coherent. Since the data caches here are write-through
// and only hold read-only (Branch) copies, the protocol is short:
//  * AcquireBlock (a cache refill) is turned into a Get of the line; the
//    AccessAckData beats go back as GrantData (cap toB), and the broadcaster
//    waits for the cache's GrantAck on channel E before the next request;
//  * a write (PutFullData/PutPartialData) or a locked Get (the first half of
//    an atomic) first probes every other data cache with ProbeBlock toN on
//    channel B and waits for all ProbeAcks on channel C, then goes to memory;
//  * other requests (instruction refills, DMA reads) go straight through.
// One request is handled at a time. The source numbering (data cache of core
// k is source 2k+1) follows the core and the bus.
module muntjac_broadcaster import muntjac_pkg::*; #(
  parameter int unsigned NC = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // from the bus
  input  logic        a_valid_i,
  output logic        a_ready_o,
  input  tl_a_t       a_i,
  output logic        d_valid_o,
  input  logic        d_ready_i,
  output tl_d_t       d_o,
  // to the data caches
  output logic [NC-1:0] b_valid_o,
  input  logic [NC-1:0] b_ready_i,
  output tl_b_t         b_o,
  input  logic [NC-1:0] c_valid_i,
  output logic [NC-1:0] c_ready_o,
  input  tl_c_t         c_i [NC],
  input  logic [NC-1:0] e_valid_i,
  output logic [NC-1:0] e_ready_o,
  input  tl_e_t         e_i [NC],
  // to memory
  output logic        mem_a_valid_o,
  input  logic        mem_a_ready_i,
  output tl_a_t       mem_a_o,
  input  logic        mem_d_valid_i,
  output logic        mem_d_ready_o,
  input  tl_d_t       mem_d_i
);
  typedef enum logic [2:0] {S_IDLE, S_PROBE, S_MEM_A, S_MEM_D, S_GACK} state_e;
  state_e state_q;

  tl_a_t        req_q;
  logic [NC-1:0] bpend_q, cpend_q;
  logic [7:0]   beats_q;
  logic         acq;
  logic [NC-1:0] others;

  assign acq = req_q.opcode == AcquireBlock;

  // data cache k is source 2k+1
  localparam int unsigned KW = NC > 1 ? $clog2(NC) : 1;
  logic [KW-1:0] req_idx;
  assign req_idx = KW'(req_q.source >> 1);

  always_comb begin
    for (int k = 0; k < NC; k++)
      others[k] = !(a_i.source == SOURCE_W'(2 * k + 1));
  end

  assign a_ready_o = state_q == S_IDLE;

  always_comb begin
    b_o         = '0;
    b_o.opcode  = TL_PROBE_BLOCK;
    b_o.param   = TL_toN;
    b_o.size    = 3'($clog2(LINE_B));
    b_o.source  = req_q.source;
    b_o.address = {req_q.address[PADDR_W-1:$clog2(LINE_B)], {$clog2(LINE_B){1'b0}}};
    b_valid_o   = state_q == S_PROBE ? bpend_q : '0;
    c_ready_o   = state_q == S_PROBE ? cpend_q : '0;
    e_ready_o   = state_q == S_GACK ? '1 : '0;

    mem_a_valid_o = state_q == S_MEM_A;
    mem_a_o       = req_q;
    mem_a_o.lock  = 1'b0;
    if (acq) begin
      mem_a_o.opcode = Get;
      mem_a_o.param  = '0;
      mem_a_o.mask   = '1;
    end
    d_valid_o     = state_q == S_MEM_D && mem_d_valid_i;
    mem_d_ready_o = state_q == S_MEM_D && d_ready_i;
    d_o           = mem_d_i;
    d_o.source    = req_q.source;
    if (acq) begin
      d_o.opcode = GrantData;
      d_o.param  = TL_toB;
      d_o.sink   = '0;
    end
  end

  logic d_last;
  assign d_last = mem_d_i.opcode != AccessAckData ||
                  32'(beats_q) + 1 >= tl_beats(mem_d_i.size);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; req_q <= '0; bpend_q <= '0; cpend_q <= '0; beats_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (a_valid_i) begin
          req_q   <= a_i;
          beats_q <= '0;
          if (a_i.opcode == PutFullData || a_i.opcode == PutPartialData ||
              (a_i.opcode == Get && a_i.lock)) begin
            bpend_q <= others;
            cpend_q <= others;
            state_q <= S_PROBE;
          end else begin
            state_q <= S_MEM_A;
          end
        end
        S_PROBE: begin
          bpend_q <= bpend_q & ~b_ready_i;
          cpend_q <= cpend_q & ~c_valid_i;
          if ((cpend_q & ~c_valid_i) == '0) state_q <= S_MEM_A;
        end
        S_MEM_A: if (mem_a_ready_i) state_q <= S_MEM_D;
        S_MEM_D: if (mem_d_valid_i && d_ready_i) begin
          beats_q <= beats_q + 1'b1;
          if (d_last) state_q <= acq ? S_GACK : S_IDLE;
        end
        S_GACK: if (e_valid_i[req_idx]) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  for (genvar k = 0; k < NC; k++) begin : g_chk
    a_probe_ack: assert property (@(posedge clk_i) disable iff (!rst_ni)
      state_q == S_PROBE && c_valid_i[k] && cpend_q[k] |-> c_i[k].opcode == TL_PROBE_ACK)
      else $error("broadcaster: expected ProbeAck");
  end
  a_opcode: assert property (@(posedge clk_i) disable iff (!rst_ni)
    state_q == S_IDLE && a_valid_i |-> a_i.opcode inside {AcquireBlock, Get, PutFullData, PutPartialData})
    else $error("broadcaster: unsupported opcode");
endmodule
