// Return address stack.
//
// The paper names the RAS among the next-PC predictors. This one is a
// circular stack of DEPTH return addresses: `push_i` stores an address on
// top, `pop_i` removes the top, and both together replace the top (a call
// that is also a return). When full, a push overwrites the oldest entry; a
// pop of an empty stack leaves it empty. `top_o` is the current top and is
// valid while `valid_o` is high. All updates take effect at the clock edge.
// The stack is speculative (updated at prediction time) and never repaired;
// a wrong prediction costs only a redirect from the backend. DEPTH is this
// design's choice.
module muntjac_ras #(
  parameter int unsigned DEPTH = 8
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        push_i,
  input  logic [63:0] push_addr_i,
  input  logic        pop_i,
  output logic        valid_o,
  output logic [63:0] top_o
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [63:0]   stack_q [DEPTH];
  logic [PW-1:0] ptr_q;               // index of the top entry
  logic [PW:0]   cnt_q;               // number of valid entries

  assign valid_o = cnt_q != '0;
  assign top_o   = stack_q[ptr_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) stack_q[i] <= '0;
    end else if (push_i && pop_i) begin
      stack_q[ptr_q] <= push_addr_i;
      if (cnt_q == '0) cnt_q <= 1;
    end else if (push_i) begin
      stack_q[ptr_q + PW'(1)] <= push_addr_i;
      ptr_q <= ptr_q + PW'(1);
      if (cnt_q != (PW+1)'(DEPTH)) cnt_q <= cnt_q + 1'b1;
    end else if (pop_i && cnt_q != '0) begin
      ptr_q <= ptr_q - PW'(1);
      cnt_q <= cnt_q - 1'b1;
    end
  end
endmodule
