// Control state machine: machine-mode CSRs, traps, interrupts and the
// other system instructions.
//
// As in the paper, these instructions run outside the normal data flow and
// only while the pipeline is empty: the backend presents one (`req_i`) only
// after EX1 and EX2 have drained, and it completes in that same cycle
// (WFI waits until an enabled interrupt is pending). Every system
// instruction then redirects the frontend (`redirect_o`, `redirect_pc_o`),
// to the next instruction, the trap vector or MEPC, which also discards any
// younger instruction the frontend fetched in the meantime. FENCE.I also
// raises `icache_flush_o`.
//
// Implemented CSRs: mstatus (MIE, MPIE; MPP fixed to M), misa, mhartid,
// mvendorid/marchid/mimpid (zero), mie, mip (MSIP, MTIP, MEIP from the
// CLINT and PLIC), mtvec (direct and vectored), mscratch, mepc, mcause,
// mtval, mcycle/cycle, minstret/instret. The paper's core also has
// supervisor mode and virtual memory; those CSRs are not implemented here and
// access to them raises an illegal-instruction trap.
// `irq_o` tells the decoder that an enabled interrupt is pending.
module muntjac_csr import muntjac_pkg::*; #(
  parameter logic [63:0] HART_ID = 64'd0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_i,
  input  decoded_t    d_i,
  input  logic [63:0] pc_i,
  input  logic        compressed_i,
  input  logic [31:0] instr_i,
  input  logic [63:0] rs1_i,
  output logic        done_o,
  output logic [63:0] rdata_o,
  output logic        wr_rd_o,
  output logic        redirect_o,
  output logic [63:0] redirect_pc_o,
  output logic        icache_flush_o,
  output logic        irq_o,
  input  logic        retire_i,     // an instruction retired in the pipeline
  input  logic        msip_i,
  input  logic        mtip_i,
  input  logic        meip_i
);
  localparam logic [63:0] MISA = 64'h8000_0000_0000_1105; // RV64 I M A C

  logic        mie_q, mpie_q;
  logic [63:0] mie_r_q, mtvec_q, mscratch_q, mepc_q, mcause_q, mtval_q;
  logic [63:0] mcycle_q, minstret_q;
  logic [63:0] mip, mstatus, old, wval, npc;
  logic        csr_ok, csr_ro, do_write, trap, irq_code_v;
  logic [63:0] cause;
  logic [3:0]  irq_code;

  assign mip     = {52'b0, meip_i, 3'b0, mtip_i, 3'b0, msip_i, 3'b0};
  assign mstatus = {28'b0, 2'b10, 2'b10, 19'b0, 2'b11, 3'b0, mpie_q, 3'b0, mie_q, 3'b0};
  assign npc     = pc_i + (compressed_i ? 64'd2 : 64'd4);

  // Pending interrupts in priority order MEI, MSI, MTI
  always_comb begin
    logic [63:0] pend;
    pend = mip & mie_r_q;
    irq_code_v = mie_q && pend != '0;
    if (pend[11])     irq_code = 4'd11;
    else if (pend[3]) irq_code = 4'd3;
    else              irq_code = 4'd7;
  end
  assign irq_o = irq_code_v;

  // CSR read
  always_comb begin
    csr_ok = 1'b1;
    unique case (d_i.csr)
      12'h300: old = mstatus;
      12'h301: old = MISA;
      12'h304: old = mie_r_q;
      12'h305: old = mtvec_q;
      12'h340: old = mscratch_q;
      12'h341: old = mepc_q;
      12'h342: old = mcause_q;
      12'h343: old = mtval_q;
      12'h344: old = mip;
      12'hB00, 12'hC00: old = mcycle_q;
      12'hB02, 12'hC02: old = minstret_q;
      12'hF11, 12'hF12, 12'hF13: old = '0;
      12'hF14: old = HART_ID;
      default: begin old = '0; csr_ok = 1'b0; end
    endcase
    csr_ro = d_i.csr[11:10] == 2'b11;
    unique case (d_i.sys_op)
      SYS_CSRRW: wval = d_i.csr_imm ? d_i.imm : rs1_i;
      SYS_CSRRS: wval = old | (d_i.csr_imm ? d_i.imm : rs1_i);
      default:   wval = old & ~(d_i.csr_imm ? d_i.imm : rs1_i);
    endcase
    // CSRRS/CSRRC with rs1 = x0 (or zero immediate) do not write
    do_write = d_i.sys_op == SYS_CSRRW || d_i.rs1 != 5'd0;
  end

  logic is_csr, wfi_wait;
  always_comb begin
    is_csr   = d_i.sys_op == SYS_CSRRW || d_i.sys_op == SYS_CSRRS || d_i.sys_op == SYS_CSRRC;
    wfi_wait = d_i.sys_op == SYS_WFI && (mip & mie_r_q) == '0;
    trap     = 1'b0;
    cause    = '0;
    unique case (d_i.sys_op)
      SYS_ECALL:     begin trap = 1'b1; cause = 64'd11; end
      SYS_EBREAK:    begin trap = 1'b1; cause = 64'd3;  end
      SYS_ILLEGAL:   begin trap = 1'b1; cause = 64'd2;  end
      SYS_INTERRUPT: begin trap = 1'b1; cause = {1'b1, 59'b0, irq_code}; end
      default: if (is_csr && (!csr_ok || (csr_ro && do_write))) begin
        trap = 1'b1; cause = 64'd2;
      end
    endcase
    done_o        = req_i && !wfi_wait;
    rdata_o       = old;
    wr_rd_o       = is_csr && !trap && d_i.rd != 5'd0;
    redirect_o    = done_o;
    if (trap)
      redirect_pc_o = (mtvec_q[0] && cause[63]) ? {mtvec_q[63:2], 2'b0} + {58'b0, irq_code, 2'b0}
                                                : {mtvec_q[63:2], 2'b0};
    else if (d_i.sys_op == SYS_MRET)
      redirect_pc_o = mepc_q;
    else
      redirect_pc_o = npc;
    icache_flush_o = done_o && d_i.sys_op == SYS_FENCE_I;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mie_q <= 1'b0; mpie_q <= 1'b0;
      mie_r_q <= '0; mtvec_q <= '0; mscratch_q <= '0; mepc_q <= '0;
      mcause_q <= '0; mtval_q <= '0; mcycle_q <= '0; minstret_q <= '0;
    end else begin
      mcycle_q <= mcycle_q + 64'd1;
      if (retire_i) minstret_q <= minstret_q + 64'd1;
      if (done_o) begin
        if (trap) begin
          mepc_q   <= pc_i;
          mcause_q <= cause;
          mtval_q  <= (cause == 64'd2) ? {32'b0, instr_i} : '0;
          mpie_q   <= mie_q;
          mie_q    <= 1'b0;
        end else if (d_i.sys_op == SYS_MRET) begin
          mie_q  <= mpie_q;
          mpie_q <= 1'b1;
        end else begin
          if (d_i.sys_op != SYS_INTERRUPT) minstret_q <= minstret_q + 64'd1;
          if (is_csr && do_write) begin
            unique case (d_i.csr)
              12'h300: begin mie_q <= wval[3]; mpie_q <= wval[7]; end
              12'h304: mie_r_q    <= wval & 64'h888;
              12'h305: mtvec_q    <= {wval[63:2], 1'b0, wval[0]};
              12'h340: mscratch_q <= wval;
              12'h341: mepc_q     <= {wval[63:1], 1'b0};
              12'h342: mcause_q   <= wval;
              12'h343: mtval_q    <= wval;
              12'hB00: mcycle_q   <= wval;
              12'hB02: minstret_q <= wval;
              default: ;
            endcase
          end
        end
      end
    end
  end
endmodule
