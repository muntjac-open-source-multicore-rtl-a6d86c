// Testbench of the instruction cache with a behavioural TileLink memory.
// Requests stream at up to one per cycle from a random mix of addresses:
// a few lines that share one set (more than the number of ways, so lines
// are evicted) and random addresses over 64 KiB. Every returned word is
// compared with the memory contents in request order. Also checks that
// back-to-back hits return one word per cycle, that each miss fetches one
// line, and that FENCE.I (flush) makes the next access miss.
`timescale 1ns/1ps
module muntjac_icache_tb;
  import muntjac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_v, req_r, resp_v, flush, a_v, a_r, d_v, d_r;
  logic [63:0] req_a;
  logic [31:0] resp_d;
  tl_a_t a; tl_d_t d;
  int checks = 0, failures = 0, gets = 0, streak = 0, best_streak = 0;
  longint unsigned exp_q [$];

  muntjac_icache dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_v), .req_ready_o(req_r),
    .req_addr_i(req_a), .resp_valid_o(resp_v), .resp_data_o(resp_d), .flush_i(flush),
    .a_valid_o(a_v), .a_ready_i(a_r), .a_o(a), .d_valid_i(d_v), .d_ready_o(d_r), .d_i(d));
  muntjac_tb_tl_mem #(.BASE(MEM_BASE), .SIZE(65536), .LAT(3)) u_mem (.clk_i(clk), .rst_ni(rst_n),
    .a_valid_i(a_v), .a_ready_o(a_r), .a_i(a), .d_valid_o(d_v), .d_ready_i(d_r), .d_o(d));

  function automatic logic [31:0] word_at(longint unsigned addr);
    logic [31:0] w;
    for (int i = 0; i < 4; i++) w[i*8 +: 8] = u_mem.mem[(addr - MEM_BASE + i) % 65536];
    return w;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (a_v && a_r) begin
      gets++;
      checks++;
      if (a.opcode != Get || a.size != 3'd6 || a.address[5:0] != 0) begin
        failures++; $display("FAIL miss request is not a line Get: op=%0d size=%0d", a.opcode, a.size);
      end
    end
    if (resp_v) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL response without request"); end
      else begin
        longint unsigned ad;
        ad = exp_q.pop_front();
        if (resp_d !== word_at(ad)) begin
          failures++;
          if (failures < 10) $display("FAIL addr %h got %h exp %h", ad, resp_d, word_at(ad));
        end
      end
      streak++;
      if (streak > best_streak) best_streak = streak;
    end else streak = 0;
    if (req_v && req_r) exp_q.push_back(req_a);
  end

  function automatic longint unsigned pick(int k);
    case ($urandom_range(0, 3))
      0, 1: return MEM_BASE + 64'(4096 * $urandom_range(0, 5) + 4 * $urandom_range(0, 15));
      2:    return MEM_BASE + 64'(4 * $urandom_range(0, 16383));
      default: return MEM_BASE + 64'(4 * (k % 64));   // sequential run
    endcase
  endfunction

  initial begin
    int g0;
    req_v = 0; req_a = 0; flush = 0;
    for (int i = 0; i < 65536; i++) u_mem.mem[i] = 8'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      req_v = $urandom_range(0, 7) != 0;
      req_a = pick(k);
      @(posedge clk);
      while (req_v && !req_r) @(posedge clk);
    end
    @(negedge clk); req_v = 0;
    repeat (40) @(posedge clk);
    // sequential hits stream: same line, 16 words back to back
    for (int k = 0; k < 16; k++) begin
      @(negedge clk); req_v = 1; req_a = MEM_BASE + 64'(4 * k);
      @(posedge clk); while (!req_r) @(posedge clk);
    end
    @(negedge clk); req_v = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (best_streak < 8) begin failures++; $display("FAIL hits do not stream (best run %0d)", best_streak); end
    checks++;
    if (gets < 20) begin failures++; $display("FAIL too few misses %0d", gets); end
    // flush: the next access to a cached line misses
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    g0 = gets;
    @(negedge clk); req_v = 1; req_a = MEM_BASE;
    @(posedge clk); while (!req_r) @(posedge clk);
    @(negedge clk); req_v = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (gets != g0 + 1) begin failures++; $display("FAIL flush did not invalidate"); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d requests unanswered", exp_q.size()); end
    $display("icache: %0d line fetches, best hit run %0d", gets, best_streak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
