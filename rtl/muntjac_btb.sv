// Branch target buffer: direct-mapped table from fetch word address to the
// predicted target of a taken control transfer in that word.
//
// The paper only names the BTB. Here each entry holds a tag, the target, the
// kind of transfer (branch, jump, call, return) and `end_hi`, which tells
// whether the transfer's last half-word is the upper (1) or lower (0) half of
// the 32-bit fetch word; the instruction aligner uses it to know which
// instruction the prediction belongs to. Lookup is combinational on the PCGEN
// PC. A hit whose instruction lies before the fetch PC (fetch starts at
// the upper half, entry is for the lower half) is ignored. Entries are written
// by `train_i` for every taken transfer; a conditional branch that was not
// taken leaves its entry, so the bi-modal counter decides. Size (ENTRIES) is
// this design's choice.
module muntjac_btb import muntjac_pkg::*; #(
  parameter int unsigned ENTRIES = 64
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [63:0] pc_i,
  output logic        hit_o,
  output logic [63:0] target_o,
  output cf_type_e    type_o,
  output logic        end_hi_o,
  input  train_t      train_i
);
  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned TW = 62 - IW;

  typedef struct packed {
    logic          valid;
    logic [TW-1:0] tag;
    logic [63:0]   target;
    cf_type_e      cf_type;
    logic          end_hi;
  } entry_t;

  entry_t tab_q [ENTRIES];
  entry_t rd;
  logic [63:0] end_hw;

  assign rd       = tab_q[pc_i[IW+1:2]];
  assign hit_o    = rd.valid && rd.tag == pc_i[63:IW+2] && !(pc_i[1] && !rd.end_hi);
  assign target_o = rd.target;
  assign type_o   = rd.cf_type;
  assign end_hi_o = rd.end_hi;

  assign end_hw = train_i.pc + (train_i.compressed ? 64'd0 : 64'd2);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int i = 0; i < ENTRIES; i++) tab_q[i] <= '0;
    end else if (train_i.valid && train_i.taken) begin
      tab_q[end_hw[IW+1:2]] <= '{valid: 1'b1, tag: end_hw[63:IW+2],
                                 target: train_i.target, cf_type: train_i.cf_type,
                                 end_hi: end_hw[1]};
    end
  end
endmodule
