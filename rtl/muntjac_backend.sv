// Backend: decompress, decode, issue, EX1, EX2 and write-back.
//
// Structure as in the paper's backend figure. The frontend's instruction is
// decompressed and decoded (interrupts join here, see the decoder) and held
// in the DE register. The issue logic reads the register file, picks
// bypassed values, and checks the hazards before sending the instruction to
// a functional unit:
//  * data: a source written by an older instruction in EX1 is taken from the
//    EX1 result if that is an ALU, branch or CSR result, else the issue
//    waits; one in EX2 is taken from the EX2 result once it exists;
//  * structural: the divider takes one operation at a time, the data cache
//    one request per its own ready;
//  * control: branches resolve in EX1; a wrong predicted next PC (every
//    instruction carries one) redirects the frontend and discards the DE
//    register. System instructions (CSR, traps, MRET, WFI, FENCE) issue only
//    when EX1 and EX2 are empty and run in the control state machine, which
//    always redirects the frontend afterwards.
// Loads, stores and atomics send their request to the data cache as they
// enter EX1, so a 2-cycle hit returns while they are in EX2; multiply/divide
// starts at issue as well. Every instruction passes EX1 and then EX2, where
// it waits for a cache or multiply/divide result and writes back. Cache
// responses that come early (the instruction is held in EX1) are kept in a
// 2-entry buffer. Stall signals are local to each stage (valid/ready), as
// the paper prefers to a global stall.
// No FPU, no supervisor mode and no TLB in this build; see the decoder and
// the control state machine.
module muntjac_backend import muntjac_pkg::*; #(
  parameter logic [63:0] HART_ID = 64'd0
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  fetch_t      in_i,
  output logic        redirect_o,
  output logic [63:0] redirect_pc_o,
  output train_t      train_o,
  output logic        icache_flush_o,
  // data cache
  output logic        dc_req_valid_o,
  input  logic        dc_req_ready_i,
  output mem_op_e     dc_req_op_o,
  output logic [1:0]  dc_req_size_o,
  output logic        dc_req_unsigned_o,
  output logic [4:0]  dc_req_amo_o,
  output logic [63:0] dc_req_addr_o,
  output logic [63:0] dc_req_wdata_o,
  input  logic        dc_resp_valid_i,
  input  logic [63:0] dc_resp_data_i,
  // interrupts
  input  logic        msip_i,
  input  logic        mtip_i,
  input  logic        meip_i,
  // retirement, for observation
  output logic        retire_o,
  output logic [63:0] retire_pc_o
);
  // ---------------------------------------------------------------- DE
  typedef struct packed {
    logic        valid;
    decoded_t    d;
    logic [63:0] pc;
    logic        compressed;
    logic [31:0] instr;
    logic [63:0] pred_npc;
  } de_t;

  typedef struct packed {
    logic        valid;
    decoded_t    d;
    logic [63:0] pc;
    logic        compressed;
    logic [63:0] pred_npc;
    logic [63:0] rs1v;
    logic [63:0] rs2v;
    logic [63:0] csr_res;
  } ex1_t;

  typedef struct packed {
    logic        valid;
    fu_e         fu;
    logic        wr_rd;
    logic [4:0]  rd;
    logic [63:0] pc;
    logic [63:0] result;
  } ex2_t;

  de_t  de_q;
  ex1_t ex1_q;
  ex2_t ex2_q;

  logic [31:0] instr32;
  decoded_t    dec;
  logic        irq;

  muntjac_decompress u_decompress (
    .instr_i(in_i.instr), .compressed_i(in_i.compressed), .instr_o(instr32)
  );
  muntjac_decoder u_decoder (.instr_i(instr32), .irq_i(irq), .d_o(dec));

  // ---------------------------------------------------------------- issue
  logic [63:0] rf_a, rf_b, op1, op2;
  logic        haz1, haz2, ex1_fwd_ok, ex2_res_ok;
  logic [63:0] ex1_res, ex2_res;
  logic        issue, ex1_fire, ex2_fire, can_issue, sys_go;
  logic        ex1_redirect;
  logic [63:0] ex1_npc;
  logic        md_in_ready, md_out_valid;
  logic [63:0] md_result;
  logic        csr_done, csr_wr_rd, csr_redirect, csr_flush;
  logic [63:0] csr_rdata, csr_redirect_pc;
  logic        ex1_wr, ex2_wr;

  muntjac_regfile u_rf (
    .clk_i, .rst_ni,
    .raddr_a_i(de_q.d.rs1), .rdata_a_o(rf_a),
    .raddr_b_i(de_q.d.rs2), .rdata_b_o(rf_b),
    .we_i(ex2_fire && ex2_q.wr_rd), .waddr_i(ex2_q.rd), .wdata_i(ex2_res)
  );

  assign ex1_wr = ex1_q.valid && ex1_q.d.wr_rd && ex1_q.d.rd != 5'd0;
  assign ex2_wr = ex2_q.valid && ex2_q.wr_rd && ex2_q.rd != 5'd0;
  assign ex1_fwd_ok = ex1_q.d.fu == FU_ALU || ex1_q.d.fu == FU_BRANCH || ex1_q.d.fu == FU_SYS;

  always_comb begin
    op1  = rf_a;
    op2  = rf_b;
    haz1 = 1'b0;
    haz2 = 1'b0;
    if (ex2_wr && ex2_q.rd == de_q.d.rs1) begin op1 = ex2_res; haz1 = !ex2_res_ok; end
    if (ex2_wr && ex2_q.rd == de_q.d.rs2) begin op2 = ex2_res; haz2 = !ex2_res_ok; end
    if (ex1_wr && ex1_q.d.rd == de_q.d.rs1) begin op1 = ex1_res; haz1 = !ex1_fwd_ok; end
    if (ex1_wr && ex1_q.d.rd == de_q.d.rs2) begin op2 = ex1_res; haz2 = !ex1_fwd_ok; end
    if (de_q.d.rs1 == 5'd0) begin op1 = '0; haz1 = 1'b0; end
    if (de_q.d.rs2 == 5'd0) begin op2 = '0; haz2 = 1'b0; end
    haz1 = haz1 && de_q.d.use_rs1;
    haz2 = haz2 && de_q.d.use_rs2;
  end

  logic ex1_free;
  assign ex1_free  = !ex1_q.valid || ex1_fire;
  assign can_issue = de_q.valid && !haz1 && !haz2 && ex1_free && !ex1_redirect;
  assign sys_go    = can_issue && de_q.d.fu == FU_SYS && !ex1_q.valid && !ex2_q.valid;
  always_comb begin
    unique case (de_q.d.fu)
      FU_MEM:    issue = can_issue && dc_req_ready_i;
      FU_MULDIV: issue = can_issue && md_in_ready;
      FU_SYS:    issue = sys_go && csr_done;
      default:   issue = can_issue;
    endcase
  end

  assign dc_req_valid_o    = can_issue && de_q.d.fu == FU_MEM;
  assign dc_req_op_o       = de_q.d.mem_op;
  assign dc_req_size_o     = de_q.d.mem_size;
  assign dc_req_unsigned_o = de_q.d.mem_unsigned;
  assign dc_req_amo_o      = de_q.d.amo_op;
  assign dc_req_addr_o     = op1 + ((de_q.d.mem_op == MEM_LOAD || de_q.d.mem_op == MEM_STORE)
                                    ? de_q.d.imm : 64'd0);
  assign dc_req_wdata_o    = op2;

  muntjac_muldiv u_muldiv (
    .clk_i, .rst_ni,
    .in_valid_i  (can_issue && de_q.d.fu == FU_MULDIV),
    .in_ready_o  (md_in_ready),
    .op_i        (de_q.d.md_op),
    .word_i      (de_q.d.word),
    .a_i         (op1),
    .b_i         (op2),
    .out_valid_o (md_out_valid),
    .out_ready_i (ex2_q.valid && ex2_q.fu == FU_MULDIV),
    .result_o    (md_result)
  );

  muntjac_csr #(.HART_ID(HART_ID)) u_csr (
    .clk_i, .rst_ni,
    .req_i          (sys_go),
    .d_i            (de_q.d),
    .pc_i           (de_q.pc),
    .compressed_i   (de_q.compressed),
    .instr_i        (de_q.instr),
    .rs1_i          (op1),
    .done_o         (csr_done),
    .rdata_o        (csr_rdata),
    .wr_rd_o        (csr_wr_rd),
    .redirect_o     (csr_redirect),
    .redirect_pc_o  (csr_redirect_pc),
    .icache_flush_o (csr_flush),
    .irq_o          (irq),
    .retire_i       (ex2_fire && ex2_q.fu != FU_SYS),
    .msip_i, .mtip_i, .meip_i
  );

  // ---------------------------------------------------------------- EX1
  logic [63:0] alu_a, alu_b, alu_res, br_npc, br_link;
  logic        br_taken, br_misp;
  cf_type_e    br_type;
  logic [63:0] seq_npc;

  assign alu_a = ex1_q.d.op_a_pc ? ex1_q.pc : ex1_q.rs1v;
  assign alu_b = ex1_q.d.op_b_imm ? ex1_q.d.imm : ex1_q.rs2v;

  muntjac_alu u_alu (
    .op_i(ex1_q.d.alu_op), .word_i(ex1_q.d.word), .a_i(alu_a), .b_i(alu_b), .result_o(alu_res)
  );
  muntjac_branch u_branch (
    .op_i(ex1_q.d.br_op), .rs1_i(ex1_q.rs1v), .rs2_i(ex1_q.rs2v), .pc_i(ex1_q.pc),
    .imm_i(ex1_q.d.imm), .compressed_i(ex1_q.compressed), .rd_i(ex1_q.d.rd),
    .rs1_idx_i(ex1_q.d.rs1), .pred_npc_i(ex1_q.pred_npc),
    .taken_o(br_taken), .npc_o(br_npc), .link_o(br_link), .mispredict_o(br_misp),
    .cf_type_o(br_type)
  );

  assign seq_npc = br_link;
  always_comb begin
    unique case (ex1_q.d.fu)
      FU_ALU:    ex1_res = alu_res;
      FU_BRANCH: ex1_res = br_link;
      default:   ex1_res = ex1_q.csr_res;
    endcase
    if (ex1_q.d.fu == FU_BRANCH) begin
      ex1_npc      = br_npc;
      ex1_redirect = ex1_q.valid && br_misp;
    end else begin
      ex1_npc      = seq_npc;
      ex1_redirect = ex1_q.valid && ex1_q.d.fu != FU_SYS && ex1_q.pred_npc != seq_npc;
    end
  end

  // ---------------------------------------------------------------- EX2
  logic [63:0] rbuf_data [2];
  logic [1:0]  rbuf_cnt_q;
  logic        rbuf_head_q, rbuf_tail_q;
  logic        rbuf_pop;

  always_comb begin
    unique case (ex2_q.fu)
      FU_MEM:    begin ex2_res_ok = rbuf_cnt_q != '0; ex2_res = rbuf_data[rbuf_head_q]; end
      FU_MULDIV: begin ex2_res_ok = md_out_valid;     ex2_res = md_result; end
      default:   begin ex2_res_ok = 1'b1;             ex2_res = ex2_q.result; end
    endcase
  end
  assign ex2_fire = ex2_q.valid && ex2_res_ok;
  assign ex1_fire = ex1_q.valid && (!ex2_q.valid || ex2_fire);
  assign rbuf_pop = ex2_fire && ex2_q.fu == FU_MEM;

  // ---------------------------------------------------------------- outputs
  assign redirect_o    = (ex1_fire && ex1_redirect) || (issue && de_q.d.fu == FU_SYS && csr_redirect);
  assign redirect_pc_o = (ex1_fire && ex1_redirect) ? ex1_npc : csr_redirect_pc;
  assign icache_flush_o = issue && csr_flush;
  assign in_ready_o    = !redirect_o && !ex1_redirect && (!de_q.valid || issue);
  assign retire_o      = ex2_fire;
  assign retire_pc_o   = ex2_q.pc;

  always_comb begin
    train_o            = '0;
    train_o.valid      = ex1_fire && (ex1_q.d.fu == FU_BRANCH || ex1_redirect);
    train_o.pc         = ex1_q.pc;
    train_o.compressed = ex1_q.compressed;
    train_o.cf_type    = ex1_q.d.fu == FU_BRANCH ? br_type : CF_JUMP;
    // A non-branch predicted taken is trained to "jump to PC + length",
    // which makes the BTB agree with sequential fetch.
    train_o.taken      = ex1_q.d.fu == FU_BRANCH ? br_taken : 1'b1;
    train_o.target     = ex1_npc;
  end

  // ---------------------------------------------------------------- registers
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      de_q <= '0; ex1_q <= '0; ex2_q <= '0;
      rbuf_cnt_q <= '0; rbuf_head_q <= 1'b0; rbuf_tail_q <= 1'b0;
      rbuf_data[0] <= '0; rbuf_data[1] <= '0;
    end else begin
      // DE register
      if (ex1_fire && ex1_redirect) begin
        de_q.valid <= 1'b0;                    // younger than a mispredict
      end else if (in_valid_i && in_ready_o) begin
        de_q <= '{valid: 1'b1, d: dec, pc: in_i.pc, compressed: in_i.compressed,
                  instr: instr32, pred_npc: in_i.pred_npc};
      end else if (issue) begin
        de_q.valid <= 1'b0;
      end
      // EX1
      if (issue) begin
        ex1_q <= '{valid: 1'b1, d: de_q.d, pc: de_q.pc, compressed: de_q.compressed,
                   pred_npc: de_q.pred_npc, rs1v: op1, rs2v: op2, csr_res: csr_rdata};
        if (de_q.d.fu == FU_SYS) ex1_q.d.wr_rd <= csr_wr_rd;
      end else if (ex1_fire) begin
        ex1_q.valid <= 1'b0;
      end
      // EX2
      if (ex1_fire) begin
        ex2_q <= '{valid: 1'b1, fu: ex1_q.d.fu, wr_rd: ex1_q.d.wr_rd, rd: ex1_q.d.rd,
                   pc: ex1_q.pc, result: ex1_res};
      end else if (ex2_fire) begin
        ex2_q.valid <= 1'b0;
      end
      // data cache response buffer
      if (dc_resp_valid_i) begin
        rbuf_data[rbuf_tail_q] <= dc_resp_data_i;
        rbuf_tail_q <= !rbuf_tail_q;
      end
      if (rbuf_pop) rbuf_head_q <= !rbuf_head_q;
      rbuf_cnt_q <= rbuf_cnt_q + 2'(dc_resp_valid_i) - 2'(rbuf_pop);
    end
  end

  a_rbuf: assert property (@(posedge clk_i) disable iff (!rst_ni)
    dc_resp_valid_i |-> rbuf_cnt_q != 2'd2) else $error("backend: response buffer overflow");
  a_redirect: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(ex1_fire && ex1_redirect && issue && de_q.d.fu == FU_SYS))
    else $error("backend: two redirects at once");
endmodule
