// Testbench of the ALU: random operands (plus edge values) for every
// operation, 64-bit and W forms, compared with a reference model here.
`timescale 1ns/1ps
module muntjac_alu_tb;
  import muntjac_pkg::*;
  alu_op_e op;
  logic word;
  logic [63:0] a, b, r;
  int checks = 0, failures = 0;

  muntjac_alu dut (.op_i(op), .word_i(word), .a_i(a), .b_i(b), .result_o(r));

  function automatic logic [63:0] model(alu_op_e o, logic w, logic [63:0] x, logic [63:0] y);
    logic [63:0] res;
    logic [31:0] xw, yw, rw;
    xw = x[31:0]; yw = y[31:0];
    if (!w) begin
      case (o)
        ALU_ADD:  res = x + y;
        ALU_SUB:  res = x - y;
        ALU_SLL:  res = x << y[5:0];
        ALU_SLT:  res = {63'd0, $signed(x) < $signed(y)};
        ALU_SLTU: res = {63'd0, x < y};
        ALU_XOR:  res = x ^ y;
        ALU_SRL:  res = x >> y[5:0];
        ALU_SRA:  res = $signed(x) >>> y[5:0];
        ALU_OR:   res = x | y;
        ALU_AND:  res = x & y;
        default:  res = y;
      endcase
    end else begin
      case (o)
        ALU_ADD: rw = xw + yw;
        ALU_SUB: rw = xw - yw;
        ALU_SLL: rw = xw << y[4:0];
        ALU_SRL: rw = xw >> y[4:0];
        ALU_SRA: rw = $signed(xw) >>> y[4:0];
        default: rw = 'x;
      endcase
      res = {{32{rw[31]}}, rw};
    end
    return res;
  endfunction

  initial begin
    logic [63:0] edges [6] = '{64'd0, 64'd1, 64'hffff_ffff_ffff_ffff, 64'h8000_0000_0000_0000,
                               64'h0000_0000_8000_0000, 64'h7fff_ffff_ffff_ffff};
    alu_op_e wops [5] = '{ALU_ADD, ALU_SUB, ALU_SLL, ALU_SRL, ALU_SRA};
    for (int k = 0; k < 3000; k++) begin
      if (k < 36) begin a = edges[k % 6]; b = edges[k / 6]; end
      else begin a = {$urandom, $urandom}; b = {$urandom, $urandom}; end
      word = k[0];
      if (word) op = wops[$urandom_range(0, 4)];
      else op = alu_op_e'($urandom_range(0, 10));
      #1;
      checks++;
      if (r !== model(op, word, a, b)) begin
        failures++;
        if (failures < 10) $display("FAIL op=%s w=%0d a=%h b=%h got %h exp %h", op.name(), word, a, b, r, model(op, word, a, b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
