// Testbench of the multiply/divide unit: random operands plus the RISC-V
// corner cases (divide by zero, most-negative / -1) for all eight funct3
// operations in 64-bit and W forms, against a 128-bit model; also checks
// the multiply latency of MUL_LAT cycles, the 1-cycle divide by zero and
// that the result is held while out_ready is low.
`timescale 1ns/1ps
module muntjac_muldiv_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic iv, ir, ov, orr, word;
  logic [2:0] op;
  logic [63:0] a, b, r;
  int checks = 0, failures = 0;

  muntjac_muldiv dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(iv), .in_ready_o(ir), .op_i(op),
    .word_i(word), .a_i(a), .b_i(b), .out_valid_o(ov), .out_ready_i(orr), .result_o(r));

  function automatic logic [63:0] model(logic [2:0] o, logic w, logic [63:0] x, logic [63:0] y);
    logic [127:0] p;
    logic [63:0] res;
    logic signed [31:0] xs, ys;
    logic signed [63:0] sx, sy, sq, sr;
    logic [31:0] rw;
    sx = x; sy = y;
    sq = (sy == 0) ? 64'sd0 : sx / sy;
    sr = (sy == 0) ? 64'sd0 : sx % sy;
    if (!w) begin
      case (o)
        0: begin p = x * y; res = p[63:0]; end
        1: begin p = $signed({{64{x[63]}}, x}) * $signed({{64{y[63]}}, y}); res = p[127:64]; end
        2: begin p = $signed({{64{x[63]}}, x}) * $signed({64'd0, y}); res = p[127:64]; end
        3: begin p = {64'd0, x} * {64'd0, y}; res = p[127:64]; end
        4: res = y == 0 ? '1 : (x == 64'h8000_0000_0000_0000 && y == '1) ? x : sq;
        5: res = y == 0 ? '1 : x / y;
        6: res = y == 0 ? x : (x == 64'h8000_0000_0000_0000 && y == '1) ? 0 : sr;
        default: res = y == 0 ? x : x % y;
      endcase
    end else begin
      xs = x[31:0]; ys = y[31:0];
      sq = (ys == 0) ? 64'sd0 : 64'(xs) / 64'(ys);
      sr = (ys == 0) ? 64'sd0 : 64'(xs) % 64'(ys);
      case (o)
        0: rw = xs * ys;
        4: rw = ys == 0 ? '1 : (xs == 32'h8000_0000 && ys == -1) ? xs : sq[31:0];
        5: rw = ys == 0 ? '1 : x[31:0] / y[31:0];
        6: rw = ys == 0 ? xs : (xs == 32'h8000_0000 && ys == -1) ? 0 : sr[31:0];
        default: rw = ys == 0 ? x[31:0] : x[31:0] % y[31:0];
      endcase
      res = {{32{rw[31]}}, rw};
    end
    return res;
  endfunction

  task automatic run(logic [2:0] o, logic w, logic [63:0] x, logic [63:0] y, int hold);
    int cyc = 0;
    logic [63:0] exp;
    exp = model(o, w, x, y);
    @(negedge clk);
    while (!ir) @(negedge clk);
    iv = 1; op = o; word = w; a = x; b = y; orr = hold == 0;
    @(negedge clk);
    iv = 0; a = 'x; b = 'x;
    cyc = 1;
    while (!ov) begin @(negedge clk); cyc++; end
    if (hold > 0) begin
      repeat (hold) @(negedge clk);
      orr = 1;
    end
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL op=%0d w=%0d a=%h b=%h got %h exp %h", o, w, x, y, r, exp);
    end
    if (o < 4) begin
      checks++;
      if (cyc != 2) begin failures++; $display("FAIL mul latency %0d", cyc); end
    end else if (y == 0 || (w && y[31:0] == 0)) begin
      checks++;
      if (cyc != 1) begin failures++; $display("FAIL div0 latency %0d", cyc); end
    end
    @(negedge clk);
    orr = 0;
  endtask

  initial begin
    logic w;
    logic [2:0] o;
    iv = 0; orr = 0; op = 0; word = 0; a = 0; b = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 16; k++) begin
      w = k[0]; o = k[3:1];
      if (w && (o == 1 || o == 2 || o == 3)) continue;
      run(o, w, 64'h1234_5678_9abc_def0, 0, 0);
      run(o, w, 64'h8000_0000_0000_0000, '1, 0);
      run(o, w, 64'hffff_ffff_8000_0000, '1, 0);
      run(o, w, -64'sd7, 64'sd2, 3);
    end
    for (int k = 0; k < 400; k++) begin
      w = $urandom_range(0, 1); o = 3'($urandom);
      if (w && (o == 1 || o == 2 || o == 3)) o = 0;
      run(o, w, {$urandom, $urandom}, k[2] ? {32'd0, 16'd0, 16'($urandom)} : {$urandom, $urandom}, k % 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
