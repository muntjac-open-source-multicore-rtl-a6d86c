// Multiply/divide unit (RV64 M extension), a multi-cycle functional unit
// with valid/ready handshakes on both sides.
//
// The paper says only that units other than the ALU and branch unit take a
// multiple, variable number of cycles. Here multiplication takes MUL_LAT
// cycles (one wide product, registered, then held for the rest of the
// latency so synthesis can retime it) and division is a restoring divider
// producing one quotient bit per cycle: 64 cycles for 64-bit, 32 for the *W
// forms, and 1 cycle for division by zero. Division follows RISC-V rules:
// x/0 gives all ones and remainder x; the signed overflow case
// (-2^63 / -1) gives -2^63 and remainder 0.
//
// Interface: accept an operation when `in_valid_i && in_ready_o`; the result
// is offered on `out_valid_o` until `out_ready_i`. One operation at a time.
module muntjac_muldiv import muntjac_pkg::*; #(
  parameter int unsigned MUL_LAT = 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  logic [2:0]  op_i,       // funct3
  input  logic        word_i,
  input  logic [63:0] a_i,
  input  logic [63:0] b_i,
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output logic [63:0] result_o
);
  typedef enum logic [1:0] {S_IDLE, S_MUL, S_DIV, S_DONE} state_e;
  state_e state_q;

  logic [2:0]   op_q;
  logic         word_q;
  logic [6:0]   cnt_q;
  logic [63:0]  dvd_q, dvs_q, quo_q;
  logic [64:0]  rem_q;
  logic         neg_q_q, neg_r_q;
  logic [63:0]  res_q;

  // operand preparation
  logic [63:0] a_ext, b_ext, a_mag, b_mag;
  logic        sgn, neg_a, neg_b;
  logic [129:0] prod;
  logic [63:0] mul_res;

  always_comb begin
    sgn   = !op_i[0];
    a_ext = word_i ? (sgn ? {{32{a_i[31]}}, a_i[31:0]} : {32'b0, a_i[31:0]}) : a_i;
    b_ext = word_i ? (sgn ? {{32{b_i[31]}}, b_i[31:0]} : {32'b0, b_i[31:0]}) : b_i;
    neg_a = sgn && a_ext[63];
    neg_b = sgn && b_ext[63];
    a_mag = neg_a ? -a_ext : a_ext;
    b_mag = neg_b ? -b_ext : b_ext;
    // MULHSU: a signed, b unsigned; MULHU: both unsigned
    prod  = $signed({op_i[1:0] != 2'b11 & a_i[63], a_i}) *
            $signed({op_i[1:0] == 2'b01 & b_i[63], b_i});
    unique case (op_i[1:0])
      2'b00:   mul_res = word_i ? {{32{prod[31]}}, prod[31:0]} : prod[63:0];
      default: mul_res = prod[127:64];
    endcase
  end

  logic [64:0] rem_sh;
  assign rem_sh = {rem_q[63:0], dvd_q[63]};

  assign in_ready_o  = state_q == S_IDLE;
  assign out_valid_o = state_q == S_DONE;
  assign result_o    = res_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      op_q <= '0; word_q <= 1'b0; cnt_q <= '0;
      dvd_q <= '0; dvs_q <= '0; quo_q <= '0; rem_q <= '0;
      neg_q_q <= 1'b0; neg_r_q <= 1'b0; res_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (in_valid_i) begin
          op_q   <= op_i;
          word_q <= word_i;
          if (!op_i[2]) begin
            res_q   <= mul_res;
            cnt_q   <= 7'(MUL_LAT - 1);
            state_q <= (MUL_LAT > 1) ? S_MUL : S_DONE;
          end else if (b_ext == 64'd0) begin
            // division by zero: quotient all ones, remainder = dividend
            res_q   <= op_i[1] ? (word_i ? {{32{a_i[31]}}, a_i[31:0]} : a_i) : '1;
            state_q <= S_DONE;
          end else begin
            dvd_q   <= word_i ? {a_mag[31:0], 32'b0} : a_mag;
            dvs_q   <= b_mag;
            quo_q   <= '0;
            rem_q   <= '0;
            neg_q_q <= neg_a ^ neg_b;
            neg_r_q <= neg_a;
            cnt_q   <= word_i ? 7'd32 : 7'd64;
            state_q <= S_DIV;
          end
        end
        S_MUL: begin
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q == 7'd1) state_q <= S_DONE;
        end
        S_DIV: begin
          if (rem_sh >= {1'b0, dvs_q}) begin
            rem_q <= rem_sh - {1'b0, dvs_q};
            quo_q <= {quo_q[62:0], 1'b1};
          end else begin
            rem_q <= rem_sh;
            quo_q <= {quo_q[62:0], 1'b0};
          end
          dvd_q <= dvd_q << 1;
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q == 7'd1) state_q <= S_DONE;
        end
        S_DONE: if (out_ready_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
      // Division finishes: form the signed result once the last bit is in.
      if (state_q == S_DIV && cnt_q == 7'd1) begin
        logic [63:0] q_n, r_n, sel;
        q_n = (rem_sh >= {1'b0, dvs_q}) ? {quo_q[62:0], 1'b1} : {quo_q[62:0], 1'b0};
        r_n = (rem_sh >= {1'b0, dvs_q}) ? 64'(rem_sh - {1'b0, dvs_q}) : rem_sh[63:0];
        q_n = neg_q_q ? -q_n : q_n;
        r_n = neg_r_q ? -r_n : r_n;
        sel = op_q[1] ? r_n : q_n;
        res_q <= word_q ? {{32{sel[31]}}, sel[31:0]} : sel;
      end
    end
  end
endmodule
