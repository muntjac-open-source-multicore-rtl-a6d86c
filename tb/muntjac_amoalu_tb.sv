// Testbench of the AMO ALU: every AMO operation on random words and
// doublewords (32-bit results sign-extended), against a model here.
`timescale 1ns/1ps
module muntjac_amoalu_tb;
  import muntjac_pkg::*;
  logic [4:0] op;
  logic dw;
  logic [63:0] old, src, r;
  int checks = 0, failures = 0;

  muntjac_amoalu dut (.amo_op_i(op), .dword_i(dw), .old_i(old), .src_i(src), .result_o(r));

  function automatic logic [63:0] model(logic [4:0] o, logic d, logic [63:0] x, logic [63:0] y);
    logic [63:0] a, b, res;
    a = d ? x : {{32{x[31]}}, x[31:0]};
    b = d ? y : {{32{y[31]}}, y[31:0]};
    case (o)
      AMO_ADD:  res = a + b;
      AMO_SWAP: res = b;
      AMO_XOR:  res = a ^ b;
      AMO_OR:   res = a | b;
      AMO_AND:  res = a & b;
      AMO_MIN:  res = $signed(a) < $signed(b) ? a : b;
      AMO_MAX:  res = $signed(a) > $signed(b) ? a : b;
      AMO_MINU: res = (d ? a < b : a[31:0] < b[31:0]) ? a : b;
      AMO_MAXU: res = (d ? a > b : a[31:0] > b[31:0]) ? a : b;
      default:  res = b;
    endcase
    if (!d) res = {32'd0, res[31:0]};
    return res;
  endfunction

  initial begin
    logic [4:0] ops [9] = '{AMO_ADD, AMO_SWAP, AMO_XOR, AMO_OR, AMO_AND, AMO_MIN, AMO_MAX, AMO_MINU, AMO_MAXU};
    for (int k = 0; k < 3000; k++) begin
      op = ops[$urandom_range(0, 8)];
      dw = k[0];
      old = {$urandom, $urandom}; src = {$urandom, $urandom};
      #1;
      checks++;
      // only the written bytes (low 32 bits for a word AMO) are compared
      if ((dw ? r : {32'd0, r[31:0]}) !== model(op, dw, old, src)) begin
        failures++;
        if (failures < 10) $display("FAIL op=%b dw=%0d old=%h src=%h got %h exp %h", op, dw, old, src, r, model(op, dw, old, src));
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
