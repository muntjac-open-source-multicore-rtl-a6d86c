// CLINT (core local interruptor): per-hart software interrupt bits and
// timer compare registers against a free-running 64-bit mtime.
//
// The paper only names the CLINT; its register map here is the usual one of
// RISC-V platforms: msip[h] (32-bit, bit 0) at 4*h, mtimecmp[h] (64-bit) at
// 0x4000 + 8*h, mtime at 0xBFF8. mtime counts one per clock cycle. msip_o[h]
// is msip[h] bit 0; mtip_o[h] is high while mtime >= mtimecmp[h]. mtimecmp
// resets to all ones (no timer interrupt). It is a single-beat TileLink
// slave: Get returns the aligned 64-bit beat, PutFull/PutPartial write the
// bytes selected by the mask; the response follows one cycle after the
// request.
module muntjac_clint import muntjac_pkg::*; #(
  parameter int unsigned NH = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        a_valid_i,
  output logic        a_ready_o,
  input  tl_a_t       a_i,
  output logic        d_valid_o,
  input  logic        d_ready_i,
  output tl_d_t       d_o,
  output logic [NH-1:0] msip_o,
  output logic [NH-1:0] mtip_o
);
  logic [NH-1:0] msip_q;
  logic [63:0]   mtimecmp_q [NH];
  logic [63:0]   mtime_q;
  logic          d_valid_q;
  tl_d_t         d_q;
  logic [15:0]   off;
  logic [63:0]   rd, wmask;

  assign off = {a_i.address[15:3], 3'b000};
  always_comb begin
    for (int i = 0; i < 8; i++) wmask[i*8 +: 8] = {8{a_i.mask[i]}};
    rd = '0;
    for (int h = 0; h < NH; h++) begin
      if (off == 16'(4 * (h & ~1))) rd[(h % 2) * 32] = msip_q[h];
      if (off == 16'(16'h4000 + 8 * h)) rd = mtimecmp_q[h];
    end
    if (off == 16'hBFF8) rd = mtime_q;
  end

  assign a_ready_o = !d_valid_q || d_ready_i;
  assign d_valid_o = d_valid_q;
  assign d_o       = d_q;
  assign msip_o    = msip_q;
  always_comb for (int h = 0; h < NH; h++) mtip_o[h] = mtime_q >= mtimecmp_q[h];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      msip_q <= '0; mtime_q <= '0; d_valid_q <= 1'b0; d_q <= '0;
      for (int h = 0; h < NH; h++) mtimecmp_q[h] <= '1;
    end else begin
      mtime_q <= mtime_q + 64'd1;
      if (d_valid_q && d_ready_i) d_valid_q <= 1'b0;
      if (a_valid_i && a_ready_o) begin
        logic wr;
        wr = a_i.opcode == PutFullData || a_i.opcode == PutPartialData;
        d_valid_q <= 1'b1;
        d_q        <= '0;
        d_q.opcode <= wr ? AccessAck : AccessAckData;
        d_q.size   <= a_i.size;
        d_q.source <= a_i.source;
        d_q.data   <= rd;
        if (wr) begin
          for (int h = 0; h < NH; h++) begin
            if (off == 16'(4 * (h & ~1)) && a_i.mask[(h % 2) * 4])
              msip_q[h] <= a_i.data[(h % 2) * 32];
            if (off == 16'(16'h4000 + 8 * h))
              mtimecmp_q[h] <= (mtimecmp_q[h] & ~wmask) | (a_i.data & wmask);
          end
          if (off == 16'hBFF8) mtime_q <= (mtime_q & ~wmask) | (a_i.data & wmask);
        end
      end
    end
  end
endmodule
