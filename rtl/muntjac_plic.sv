// PLIC (platform-level interrupt controller): gathers device interrupt
// lines and raises the external interrupt of each hart.
//
// The paper only names the PLIC; this one follows the usual RISC-V PLIC
// register map, with one context per hart (machine mode): priority[i] at
// 4*i, pending bits at 0x1000, the enable bits of context c at
// 0x2000 + 0x80*c, its threshold at 0x200000 + 0x1000*c and its
// claim/complete register at 0x200004 + 0x1000*c. Sources are 1..NS
// (level-triggered). A source becomes pending when its line is high and it
// is not being served; reading claim returns the pending, enabled source of
// highest priority above the threshold (lowest number on a tie), clears its
// pending bit and marks it in service until its number is written back to
// complete. eip_o[c] is high while such a source exists for context c.
// Priorities are PW bits wide. Single-beat TileLink slave, response one
// cycle after the request; 32-bit registers sit in the half of the 64-bit
// beat their address selects.
module muntjac_plic import muntjac_pkg::*; #(
  parameter int unsigned NS = 31,
  parameter int unsigned NC = 4,
  parameter int unsigned PW = 3
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [NS:1] irq_i,
  input  logic        a_valid_i,
  output logic        a_ready_o,
  input  tl_a_t       a_i,
  output logic        d_valid_o,
  input  logic        d_ready_i,
  output tl_d_t       d_o,
  output logic [NC-1:0] eip_o
);
  localparam int unsigned IW = $clog2(NS + 1);

  logic [PW-1:0] prio_q [NS+1];
  logic [NS:0]   pend_q, serv_q;
  logic [NS:0]   en_q [NC];
  logic [PW-1:0] thr_q [NC];
  logic [IW-1:0] best [NC];
  logic          d_valid_q;
  tl_d_t         d_q;

  // best claimable source per context
  always_comb begin
    for (int c = 0; c < NC; c++) begin
      logic [PW-1:0] bp;
      best[c] = '0;
      bp      = thr_q[c];
      for (int i = 1; i <= NS; i++) begin
        if (pend_q[i] && en_q[c][i] && prio_q[i] > bp) begin
          bp      = prio_q[i];
          best[c] = IW'(i);
        end
      end
      eip_o[c] = best[c] != '0;
    end
  end

  logic [25:0] off;
  logic        hi, wr;
  logic [31:0] wdata, rdata;
  logic        claim;
  int unsigned claim_ctx;
  assign off   = {a_i.address[25:2], 2'b00};
  assign hi    = a_i.address[2];
  assign wr    = a_i.opcode == PutFullData || a_i.opcode == PutPartialData;
  assign wdata = hi ? a_i.data[63:32] : a_i.data[31:0];

  always_comb begin
    rdata     = '0;
    claim     = 1'b0;
    claim_ctx = 0;
    if (off < 26'(4 * (NS + 1))) rdata = 32'(prio_q[off[IW+1:2]]);
    if (off == 26'h1000) rdata = 32'(pend_q);
    for (int c = 0; c < NC; c++) begin
      if (off == 26'(32'h2000 + 32'h80 * c)) rdata = 32'(en_q[c]);
      if (off == 26'(32'h200000 + 32'h1000 * c)) rdata = 32'(thr_q[c]);
      if (off == 26'(32'h200004 + 32'h1000 * c)) begin
        rdata = 32'(best[c]);
        claim = !wr;
        claim_ctx = c;
      end
    end
  end

  assign a_ready_o = !d_valid_q || d_ready_i;
  assign d_valid_o = d_valid_q;
  assign d_o       = d_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q <= '0; serv_q <= '0; d_valid_q <= 1'b0; d_q <= '0;
      for (int i = 0; i <= NS; i++) prio_q[i] <= '0;
      for (int c = 0; c < NC; c++) begin en_q[c] <= '0; thr_q[c] <= '0; end
    end else begin
      // gateways
      for (int i = 1; i <= NS; i++) if (irq_i[i] && !serv_q[i]) pend_q[i] <= 1'b1;
      if (d_valid_q && d_ready_i) d_valid_q <= 1'b0;
      if (a_valid_i && a_ready_o) begin
        d_valid_q  <= 1'b1;
        d_q        <= '0;
        d_q.opcode <= wr ? AccessAck : AccessAckData;
        d_q.size   <= a_i.size;
        d_q.source <= a_i.source;
        d_q.data   <= {rdata, rdata};
        if (claim && best[claim_ctx] != '0) begin
          pend_q[best[claim_ctx]] <= 1'b0;
          serv_q[best[claim_ctx]] <= 1'b1;
        end
        if (wr && (hi ? a_i.mask[4] : a_i.mask[0])) begin
          if (off < 26'(4 * (NS + 1)) && off != '0) prio_q[off[IW+1:2]] <= wdata[PW-1:0];
          for (int c = 0; c < NC; c++) begin
            if (off == 26'(32'h2000 + 32'h80 * c)) en_q[c] <= {wdata[NS:1], 1'b0};
            if (off == 26'(32'h200000 + 32'h1000 * c)) thr_q[c] <= wdata[PW-1:0];
            if (off == 26'(32'h200004 + 32'h1000 * c) && wdata < 32'(NS + 1))
              serv_q[wdata[IW-1:0]] <= 1'b0;
          end
        end
      end
    end
  end
endmodule
