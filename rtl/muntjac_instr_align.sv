// Instruction alignment (DE stage of the frontend): cuts 16- and 32-bit
// instructions out of the stream of 32-bit aligned fetch words.
//
// The paper keeps all handling of compressed and misaligned instructions in
// the frontend so the instruction cache only needs word-aligned accesses;
// this unit is where that happens. Each fetch word comes with the PC it was
// fetched for (bit 1 set means start at the upper half) and the prediction
// made for it: `pred_taken`, `pred_target` and `end_hi` (which half-word the
// predicted transfer ends in). The instruction that covers the predicted
// half-word gets `pred_npc = pred_target` and the rest of the word is
// dropped; all others get PC + length. A 32-bit instruction whose first half
// is in the upper half of a word is kept in `half_q` until the next word
// arrives. If that happens in a word that carries a taken prediction, the
// next word is not the sequential one, so the prediction cannot be right:
// the unit asks the PCGEN stage to refetch from that instruction without
// prediction (`refetch_o`). One instruction leaves per cycle at most
// (valid/ready); `flush_i` drops all state. How the instruction stream is
// cut is this design's; the paper shows only the block.
module muntjac_instr_align import muntjac_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        flush_i,
  input  logic        in_valid_i,
  output logic        in_ready_o,     // word popped
  input  logic [31:0] in_word_i,
  input  logic [63:0] in_pc_i,
  input  logic        in_pred_taken_i,
  input  logic [63:0] in_pred_target_i,
  input  logic        in_end_hi_i,
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output fetch_t      out_o,
  output logic        refetch_o,
  output logic [63:0] refetch_pc_o
);
  logic        off_q, have_half_q;
  logic [15:0] half_q;
  logic [63:0] half_pc_q;

  logic        eff_o, cmp, straddle, pred_here, end_hw;
  logic [15:0] parcel;
  logic [63:0] word_pc;

  always_comb begin
    eff_o    = off_q | in_pc_i[1];
    word_pc  = {in_pc_i[63:2], 2'b00};
    parcel   = eff_o ? in_word_i[31:16] : in_word_i[15:0];
    straddle = 1'b0;
    out_o    = '0;
    if (have_half_q) begin
      out_o.pc         = half_pc_q;
      out_o.instr      = {in_word_i[15:0], half_q};
      out_o.compressed = 1'b0;
      end_hw           = 1'b0;
    end else if (parcel[1:0] != 2'b11) begin
      out_o.pc         = word_pc + {62'b0, eff_o, 1'b0};
      out_o.instr      = {16'b0, parcel};
      out_o.compressed = 1'b1;
      end_hw           = eff_o;
    end else if (!eff_o) begin
      out_o.pc         = word_pc;
      out_o.instr      = in_word_i;
      out_o.compressed = 1'b0;
      end_hw           = 1'b1;
    end else begin
      straddle         = 1'b1;
      end_hw           = 1'b1;
    end
    pred_here      = in_pred_taken_i && (end_hw || !in_end_hi_i);
    out_o.pred_npc = pred_here ? in_pred_target_i
                               : out_o.pc + (out_o.compressed ? 64'd2 : 64'd4);
    cmp            = in_valid_i && !flush_i;
    out_valid_o    = cmp && !straddle;
    refetch_o      = cmp && straddle && in_pred_taken_i;
    refetch_pc_o   = word_pc + 64'd2;
    // The word is used up when its last instruction leaves, or when its upper
    // half starts an instruction that continues in the next word.
    in_ready_o     = (cmp && straddle) ||
                     (out_valid_o && out_ready_i && (end_hw || pred_here));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      off_q <= 1'b0; have_half_q <= 1'b0; half_q <= '0; half_pc_q <= '0;
    end else if (flush_i || refetch_o) begin
      off_q <= 1'b0; have_half_q <= 1'b0;
    end else if (cmp && straddle) begin
      have_half_q <= 1'b1;
      half_q      <= in_word_i[31:16];
      half_pc_q   <= word_pc + 64'd2;
      off_q       <= 1'b0;
    end else if (out_valid_o && out_ready_i) begin
      have_half_q <= 1'b0;
      off_q       <= in_ready_o ? 1'b0 : 1'b1;
    end
  end
endmodule
