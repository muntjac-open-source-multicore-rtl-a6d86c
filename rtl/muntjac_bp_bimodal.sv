// Bi-modal branch predictor: a table of 2-bit saturating counters.
//
// The paper names this predictor ("a simple bi-modal 2-bit saturating
// counter"). The PCGEN stage looks the table up with the word address of the
// fetch PC and gets `taken` in the same cycle (combinational read). The
// backend trains it through `train` each time a conditional branch resolves:
// the counter of the word that holds the branch's last half-word counts up
// when taken and down when not, saturating at 3 and 0. A counter of 2 or 3
// predicts taken. Table size (ENTRIES) and the reset value (1, weakly not
// taken) are this design's choices; the paper gives neither.
module muntjac_bp_bimodal import muntjac_pkg::*; #(
  parameter int unsigned ENTRIES = 512
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [63:0] pc_i,        // fetch PC (PCGEN stage)
  output logic        taken_o,
  input  train_t      train_i
);
  localparam int unsigned IW = $clog2(ENTRIES);

  logic [1:0] cnt_q [ENTRIES];
  logic [63:0] end_hw;
  logic [IW-1:0] widx;

  assign taken_o = cnt_q[pc_i[IW+1:2]][1];
  // The prediction is made on the fetch word that holds the last parcel.
  assign end_hw  = train_i.pc + (train_i.compressed ? 64'd0 : 64'd2);
  assign widx    = end_hw[IW+1:2];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < ENTRIES; i++) cnt_q[i] <= 2'd1;
    end else if (train_i.valid && train_i.cf_type == CF_BRANCH) begin
      if (train_i.taken && cnt_q[widx] != 2'd3) cnt_q[widx] <= cnt_q[widx] + 2'd1;
      if (!train_i.taken && cnt_q[widx] != 2'd0) cnt_q[widx] <= cnt_q[widx] - 2'd1;
    end
  end
endmodule
