// Frontend: PCGEN, IF and DE stages of the backend-facing instruction stream.
//
// PCGEN holds the fetch PC and computes the next one from the BTB, the
// bi-modal predictor, the RAS and "+4", without looking at fetched bytes,
// as in the paper's frontend figure. Fetches are of aligned 32-bit words.
// IF is the instruction cache. DE is the instruction aligner, which hands
// 16/32-bit instructions with their PC and predicted next PC to the backend
// (valid/ready).
//
// A redirect from the backend (`redirect_i`, `redirect_pc_i`) replaces the
// fetch PC in the next cycle, empties the word queue and the aligner, and
// marks fetches still in the cache as to be dropped. `train_i` carries every
// resolved branch/jump to the BTB and predictor. The RAS is pushed and popped
// when a call or return is predicted. Fetches are issued only while the word
// queue has room for every outstanding response, so the cache never needs
// back-pressure. Queue depths are this design's choice.
module muntjac_frontend import muntjac_pkg::*; #(
  parameter logic [63:0] RESET_ADDR = RESET_PC,
  parameter logic [SOURCE_W-1:0] SOURCE = '0,
  parameter int unsigned ICACHE_SIZE_B = 16384,
  parameter int unsigned ICACHE_WAYS = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        redirect_i,
  input  logic [63:0] redirect_pc_i,
  input  train_t      train_i,
  input  logic        icache_flush_i,
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output fetch_t      out_o,
  // instruction cache memory port
  output logic        a_valid_o,
  input  logic        a_ready_i,
  output tl_a_t       a_o,
  input  logic        d_valid_i,
  output logic        d_ready_o,
  input  tl_d_t       d_i
);
  localparam int unsigned QD = 4;   // word queue + in-flight fetches

  typedef struct packed {
    logic [63:0] pc;
    logic        pred_taken;
    logic [63:0] pred_target;
    logic        end_hi;
  } meta_t;

  typedef struct packed {
    logic [31:0] word;
    meta_t       meta;
  } word_t;

  // ---------------------------------------------------------------- PCGEN
  logic [63:0] pc_q, fetch_word;
  logic        nopred_q;
  logic        btb_hit, btb_end_hi, bp_taken, ras_valid;
  logic [63:0] btb_target, ras_top, pred_target;
  cf_type_e    btb_type;
  logic        pred_taken;
  logic        ic_req_valid, ic_req_ready, ic_resp_valid;
  logic [31:0] ic_resp_data;
  logic        fetch_fire;
  logic        refetch;
  logic [63:0] refetch_pc;

  assign fetch_word = {pc_q[63:2], 2'b00};

  muntjac_btb u_btb (
    .clk_i, .rst_ni, .pc_i(pc_q), .hit_o(btb_hit), .target_o(btb_target),
    .type_o(btb_type), .end_hi_o(btb_end_hi), .train_i
  );
  muntjac_bp_bimodal u_bp (
    .clk_i, .rst_ni, .pc_i(pc_q), .taken_o(bp_taken), .train_i
  );
  muntjac_ras u_ras (
    .clk_i, .rst_ni,
    .push_i      (fetch_fire && pred_taken && btb_type == CF_CALL),
    .push_addr_i (fetch_word + (btb_end_hi ? 64'd4 : 64'd2)),
    .pop_i       (fetch_fire && pred_taken && btb_type == CF_RET),
    .valid_o     (ras_valid),
    .top_o       (ras_top)
  );

  always_comb begin
    pred_taken  = btb_hit && !nopred_q && (btb_type != CF_BRANCH || bp_taken);
    pred_target = (btb_type == CF_RET && ras_valid) ? ras_top : btb_target;
  end

  // ---------------------------------------------------------------- in-flight fetch metadata
  meta_t       mq [QD];
  logic [QD-1:0] mkill_q;
  logic [1:0]  mhead_q, mtail_q;
  logic [2:0]  mcnt_q;
  word_t       wq [QD];
  logic [1:0]  whead_q, wtail_q;
  logic [2:0]  wcnt_q;
  logic        wq_pop, wq_push;
  word_t       wq_head;

  assign ic_req_valid = (32'(mcnt_q) + 32'(wcnt_q)) < QD && !redirect_i && !refetch;
  assign fetch_fire   = ic_req_valid && ic_req_ready;
  assign wq_push      = ic_resp_valid && !mkill_q[mhead_q];
  assign wq_head      = wq[whead_q];

  muntjac_icache #(.SIZE_B(ICACHE_SIZE_B), .WAYS(ICACHE_WAYS), .SOURCE(SOURCE)) u_icache (
    .clk_i, .rst_ni,
    .req_valid_i (ic_req_valid),
    .req_ready_o (ic_req_ready),
    .req_addr_i  (fetch_word),
    .resp_valid_o(ic_resp_valid),
    .resp_data_o (ic_resp_data),
    .flush_i     (icache_flush_i),
    .a_valid_o, .a_ready_i, .a_o, .d_valid_i, .d_ready_o, .d_i
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pc_q <= RESET_ADDR; nopred_q <= 1'b0;
      mhead_q <= '0; mtail_q <= '0; mcnt_q <= '0; mkill_q <= '0;
      whead_q <= '0; wtail_q <= '0; wcnt_q <= '0;
      for (int i = 0; i < QD; i++) begin mq[i] <= '0; wq[i] <= '0; end
    end else begin
      // PC
      if (redirect_i) begin
        pc_q <= redirect_pc_i; nopred_q <= 1'b0;
      end else if (refetch) begin
        pc_q <= refetch_pc; nopred_q <= 1'b1;
      end else if (fetch_fire) begin
        pc_q     <= pred_taken ? pred_target : fetch_word + 64'd4;
        nopred_q <= 1'b0;
      end
      // metadata queue: push on fetch, pop on response
      if (fetch_fire) begin
        mq[mtail_q] <= '{pc: pc_q, pred_taken: pred_taken, pred_target: pred_target,
                         end_hi: btb_end_hi};
        mtail_q <= mtail_q + 1'b1;
      end
      if (ic_resp_valid) mhead_q <= mhead_q + 1'b1;
      mcnt_q <= mcnt_q + 3'(fetch_fire) - 3'(ic_resp_valid);
      for (int i = 0; i < QD; i++) begin
        if (redirect_i || refetch) mkill_q[i] <= 1'b1;
        else if (ic_resp_valid && 2'(i) == mhead_q) mkill_q[i] <= 1'b0;
      end
      if (fetch_fire) mkill_q[mtail_q] <= 1'b0;
      // word queue
      if (redirect_i || refetch) begin
        whead_q <= '0; wtail_q <= '0; wcnt_q <= '0;
      end else begin
        if (wq_push) begin
          wq[wtail_q] <= '{word: ic_resp_data, meta: mq[mhead_q]};
          wtail_q <= wtail_q + 1'b1;
        end
        if (wq_pop) whead_q <= whead_q + 1'b1;
        wcnt_q <= wcnt_q + 3'(wq_push) - 3'(wq_pop);
      end
    end
  end

  // ---------------------------------------------------------------- DE: alignment
  muntjac_instr_align u_align (
    .clk_i, .rst_ni,
    .flush_i          (redirect_i),
    .in_valid_i       (wcnt_q != '0),
    .in_ready_o       (wq_pop),
    .in_word_i        (wq_head.word),
    .in_pc_i          (wq_head.meta.pc),
    .in_pred_taken_i  (wq_head.meta.pred_taken),
    .in_pred_target_i (wq_head.meta.pred_target),
    .in_end_hi_i      (wq_head.meta.end_hi),
    .out_valid_o,
    .out_ready_i,
    .out_o,
    .refetch_o        (refetch),
    .refetch_pc_o     (refetch_pc)
  );

  // A fetch response always has its metadata entry.
  a_resp: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ic_resp_valid |-> mcnt_q != '0) else $error("frontend: response without request");
endmodule
