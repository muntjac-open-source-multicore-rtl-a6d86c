// End-to-end testbench of the SoC at its default size (four cores, 16 KiB
// caches). The firmware ROM and main memory are behavioural TileLink
// memories; the device port answers every request with an empty
// acknowledgement; the DMA port is driven by this testbench.
//
// All four harts run the test program of muntjac_tb_prog_pkg from the ROM.
// The testbench then checks every hart's results in memory against values it
// computes itself, checks the shared counters (AMO and LR/SC) reached the
// number of harts, reads a result back over the DMA port and writes the
// shared counter line over DMA, which must make the broadcaster probe the
// data caches. It also counts how often each mechanism of the design
// happened (hazard stalls, both bypasses, mispredictions, BTB and RAS
// predictions, cache misses and hits, probes, the refill line lock, locked
// atomics, SC failures, WFI, interrupts, compressed and straddling
// instructions, multiply/divide waits) and fails for any that never did.
`timescale 1ns/1ps
module muntjac_soc_tb;
  import muntjac_pkg::*;
  import muntjac_tb_prog_pkg::*;

  localparam int NH = 4;
  localparam int MAX_CYCLES = 200000;
  // data cache state encodings (order of its state enums)
  localparam int DC_S_LOOKUP = 1, DC_S_ACQ = 2, DC_S_UC_REQ = 6, DC_S_AT_GET = 8, DC_P_CHECK = 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  rom_a_valid, rom_a_ready, rom_d_valid, rom_d_ready;
  tl_a_t rom_a; tl_d_t rom_d;
  logic  mem_a_valid, mem_a_ready, mem_d_valid, mem_d_ready;
  tl_a_t mem_a; tl_d_t mem_d;
  logic  dev_a_valid, dev_a_ready, dev_d_valid, dev_d_ready;
  tl_a_t dev_a; tl_d_t dev_d;
  logic  dma_a_valid, dma_a_ready, dma_d_valid, dma_d_ready;
  tl_a_t dma_a; tl_d_t dma_d;
  logic [31:1] irq;
  logic [NH-1:0] retire;

  muntjac_soc dut (
    .clk_i(clk), .rst_ni(rst_n),
    .rom_a_valid_o(rom_a_valid), .rom_a_ready_i(rom_a_ready), .rom_a_o(rom_a),
    .rom_d_valid_i(rom_d_valid), .rom_d_ready_o(rom_d_ready), .rom_d_i(rom_d),
    .mem_a_valid_o(mem_a_valid), .mem_a_ready_i(mem_a_ready), .mem_a_o(mem_a),
    .mem_d_valid_i(mem_d_valid), .mem_d_ready_o(mem_d_ready), .mem_d_i(mem_d),
    .dev_a_valid_o(dev_a_valid), .dev_a_ready_i(dev_a_ready), .dev_a_o(dev_a),
    .dev_d_valid_i(dev_d_valid), .dev_d_ready_o(dev_d_ready), .dev_d_i(dev_d),
    .dma_a_valid_i(dma_a_valid), .dma_a_ready_o(dma_a_ready), .dma_a_i(dma_a),
    .dma_d_valid_o(dma_d_valid), .dma_d_ready_i(dma_d_ready), .dma_d_o(dma_d),
    .irq_i(irq), .retire_o(retire)
  );

  muntjac_tb_tl_mem #(.BASE(ROM_BASE), .SIZE(4096), .LAT(2)) u_rom (
    .clk_i(clk), .rst_ni(rst_n), .a_valid_i(rom_a_valid), .a_ready_o(rom_a_ready), .a_i(rom_a),
    .d_valid_o(rom_d_valid), .d_ready_i(rom_d_ready), .d_o(rom_d));
  muntjac_tb_tl_mem #(.BASE(MEM_BASE), .SIZE(65536), .LAT(4)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .a_valid_i(mem_a_valid), .a_ready_o(mem_a_ready), .a_i(mem_a),
    .d_valid_o(mem_d_valid), .d_ready_i(mem_d_ready), .d_o(mem_d));

  // device: acknowledge anything one cycle later
  assign dev_a_ready = !dev_d_valid;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dev_d_valid <= 1'b0; dev_d <= '0;
    end else begin
      if (dev_d_valid && dev_d_ready) dev_d_valid <= 1'b0;
      if (dev_a_valid && dev_a_ready) begin
        dev_d_valid <= 1'b1;
        dev_d <= '0;
        dev_d.opcode <= dev_a.opcode == Get ? AccessAckData : AccessAck;
        dev_d.source <= dev_a.source;
        dev_d.size <= dev_a.size;
      end
    end
  end

  int checks = 0, failures = 0;
  int cycles = 0;
  always_ff @(posedge clk) cycles <= cycles + 1;

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic longint unsigned rd_mem(int off);
    longint unsigned v = 0;
    for (int k = 0; k < 8; k++) v |= longint'(u_mem.mem[off + k]) << (8 * k);
    return v;
  endfunction

  // ------------------------------------------------------------ mechanism counters
  int n_stall, n_byp1, n_byp2, n_misp, n_btb, n_ras, n_icmiss, n_dcmiss, n_dchit,
      n_probe_inv, n_lock_wait, n_atomic, n_scfail, n_wfi, n_irq, n_comp, n_strad,
      n_mdwait, n_uncached;
  initial begin
    n_stall = 0; n_byp1 = 0; n_byp2 = 0; n_misp = 0; n_btb = 0; n_ras = 0; n_icmiss = 0;
    n_dcmiss = 0; n_dchit = 0; n_probe_inv = 0; n_lock_wait = 0; n_atomic = 0; n_scfail = 0;
    n_wfi = 0; n_irq = 0; n_comp = 0; n_strad = 0; n_mdwait = 0; n_uncached = 0;
  end
  for (genvar h = 0; h < NH; h++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      automatic logic de_v = dut.g_core[h].u_core.u_backend.de_q.valid;
      automatic logic iss  = dut.g_core[h].u_core.u_backend.issue;
      if (de_v && (dut.g_core[h].u_core.u_backend.haz1 || dut.g_core[h].u_core.u_backend.haz2)) n_stall++;
      if (iss && dut.g_core[h].u_core.u_backend.ex1_wr &&
          ((dut.g_core[h].u_core.u_backend.de_q.d.use_rs1 &&
            dut.g_core[h].u_core.u_backend.ex1_q.d.rd == dut.g_core[h].u_core.u_backend.de_q.d.rs1) ||
           (dut.g_core[h].u_core.u_backend.de_q.d.use_rs2 &&
            dut.g_core[h].u_core.u_backend.ex1_q.d.rd == dut.g_core[h].u_core.u_backend.de_q.d.rs2))) n_byp1++;
      if (iss && dut.g_core[h].u_core.u_backend.ex2_wr &&
          dut.g_core[h].u_core.u_backend.de_q.d.use_rs1 &&
          dut.g_core[h].u_core.u_backend.ex2_q.rd == dut.g_core[h].u_core.u_backend.de_q.d.rs1 &&
          !(dut.g_core[h].u_core.u_backend.ex1_wr &&
            dut.g_core[h].u_core.u_backend.ex1_q.d.rd == dut.g_core[h].u_core.u_backend.de_q.d.rs1)) n_byp2++;
      if (dut.g_core[h].u_core.u_backend.ex1_fire && dut.g_core[h].u_core.u_backend.ex1_redirect) n_misp++;
      if (dut.g_core[h].u_core.u_frontend.fetch_fire && dut.g_core[h].u_core.u_frontend.pred_taken) n_btb++;
      if (dut.g_core[h].u_core.u_frontend.fetch_fire && dut.g_core[h].u_core.u_frontend.pred_taken &&
          dut.g_core[h].u_core.u_frontend.btb_type == CF_RET &&
          dut.g_core[h].u_core.u_frontend.ras_valid) n_ras++;
      if (dut.g_core[h].u_core.u_frontend.u_icache.a_valid_o &&
          dut.g_core[h].u_core.u_frontend.u_icache.a_ready_i) n_icmiss++;
      if (int'(dut.g_core[h].u_core.u_dcache.state_q) == DC_S_ACQ &&
          dut.g_core[h].u_core.u_dcache.a_ready_i) n_dcmiss++;
      if (int'(dut.g_core[h].u_core.u_dcache.state_q) == DC_S_LOOKUP &&
          dut.g_core[h].u_core.u_dcache.hit && dut.g_core[h].u_core.u_dcache.is_load &&
          dut.g_core[h].u_core.u_dcache.cacheable) n_dchit++;
      if (int'(dut.g_core[h].u_core.u_dcache.pstate_q) == DC_P_CHECK) begin
        if (dut.g_core[h].u_core.u_dcache.plocked) n_lock_wait++;
        else if (dut.g_core[h].u_core.u_dcache.pway != '0) n_probe_inv++;
      end
      if (int'(dut.g_core[h].u_core.u_dcache.state_q) == DC_S_AT_GET &&
          dut.g_core[h].u_core.u_dcache.a_ready_i) n_atomic++;
      if (int'(dut.g_core[h].u_core.u_dcache.state_q) == DC_S_UC_REQ &&
          dut.g_core[h].u_core.u_dcache.a_ready_i &&
          !dut.g_core[h].u_core.u_dcache.cacheable) n_uncached++;
      if (dut.g_core[h].u_core.u_dcache.resp_valid_o &&
          dut.g_core[h].u_core.u_backend.ex2_q.valid &&
          dut.g_core[h].u_core.u_dcache.op_q == MEM_SC &&
          dut.g_core[h].u_core.u_dcache.resp_data_o == 64'd1) n_scfail++;
      if (dut.g_core[h].u_core.u_backend.sys_go && !dut.g_core[h].u_core.u_backend.csr_done) n_wfi++;
      if (dut.g_core[h].u_core.u_backend.sys_go && dut.g_core[h].u_core.u_backend.de_q.d.sys_op == SYS_INTERRUPT) n_irq++;
      if (dut.g_core[h].u_core.u_frontend.out_valid_o && dut.g_core[h].u_core.u_frontend.out_ready_i) begin
        if (dut.g_core[h].u_core.u_frontend.out_o.compressed) n_comp++;
      end
      if (dut.g_core[h].u_core.u_frontend.u_align.cmp && dut.g_core[h].u_core.u_frontend.u_align.straddle) n_strad++;
      if (dut.g_core[h].u_core.u_backend.ex2_q.valid && dut.g_core[h].u_core.u_backend.ex2_q.fu == FU_MULDIV &&
          !dut.g_core[h].u_core.u_backend.md_out_valid) n_mdwait++;
    end
  end

  task automatic mech(string name, int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", name); end
  endtask

  // ------------------------------------------------------------ DMA
  // Driven and sampled on the falling edge, so handshakes happen at the
  // following rising edge.
  task automatic dma(tl_a_op_e op, longint unsigned addr, longint unsigned data,
                     output longint unsigned rdata);
    @(negedge clk);
    dma_a = '0;
    dma_a.opcode = op; dma_a.size = 3'd3; dma_a.address = PADDR_W'(addr);
    dma_a.mask = 8'hFF; dma_a.data = data;
    dma_a_valid = 1'b1;
    while (!dma_a_ready) @(negedge clk);
    @(negedge clk);
    dma_a_valid = 1'b0;
    dma_d_ready = 1'b1;
    while (!dma_d_valid) @(negedge clk);
    rdata = dma_d.data;
    @(negedge clk);
    dma_d_ready = 1'b0;
  endtask

  // ------------------------------------------------------------ stimulus
  initial begin : main
    bytes_t prog;
    longint unsigned v;
    int n_probe_before;
    dma_a_valid = 1'b0; dma_a = '0; dma_d_ready = 1'b0; irq = '0;
    prog = build(NH);
    for (int k = 0; k < 4096; k++) u_rom.mem[k] = k < prog.size() ? prog[k] : 8'h00;
    for (int k = 0; k < 65536; k++) u_mem.mem[k] = 8'h00;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    // wait until every hart has set its done flag
    forever begin
      bit all_done;
      @(posedge clk);
      all_done = 1;
      for (int h = 0; h < NH; h++) if (rd_mem(R_DONE + 8 * h) != 1) all_done = 0;
      if (all_done) break;
    end
    repeat (50) @(posedge clk);
    $display("all harts done after %0d cycles", cycles);
    for (int h = 0; h < NH; h++) begin
      longint unsigned n, sum;
      n = 10 + h;
      sum = n * (n + 1) / 2;
      check($sformatf("hart%0d sum", h), rd_mem(R_SUM + 8 * h), sum);
      check($sformatf("hart%0d divu", h), rd_mem(R_QUO + 8 * h), sum);
      check($sformatf("hart%0d rem by 0", h), rd_mem(R_REM + 8 * h), sum * sum);
      check($sformatf("hart%0d compressed", h), rd_mem(R_CMP + 8 * h), 8);
      check($sformatf("hart%0d calls", h), rd_mem(R_CALL + 8 * h), 3);
      check($sformatf("hart%0d mcause", h), rd_mem(R_CAUSE + 8 * h), 64'h8000_0000_0000_0007);
    end
    check("amo counter", rd_mem(CNT_AMO), NH);
    check("lr/sc counter", rd_mem(CNT_LRSC), NH);
    // DMA read of hart 3's sum, then a DMA write to the counter line
    dma(Get, MEM_BASE + R_SUM + 24, 0, v);
    check("dma read", v, 13 * 14 / 2);
    n_probe_before = n_probe_inv;
    dma(PutFullData, MEM_BASE + CNT_AMO, 64'h1234, v);
    repeat (5) @(posedge clk);
    check("dma write", rd_mem(CNT_AMO), 64'h1234);
    checks++;
    if (n_probe_inv <= n_probe_before) begin
      failures++; $display("FAIL dma write did not invalidate any cached copy");
    end
    mech("issue stall (hazard)", n_stall);
    mech("bypass from EX1", n_byp1);
    mech("bypass from EX2", n_byp2);
    mech("misprediction redirect", n_misp);
    mech("BTB taken prediction", n_btb);
    mech("RAS return prediction", n_ras);
    mech("I$ refill", n_icmiss);
    mech("D$ refill", n_dcmiss);
    mech("D$ load hit", n_dchit);
    mech("probe invalidation", n_probe_inv);
    mech("probe held by line lock", n_lock_wait);
    mech("locked atomic", n_atomic);
    mech("uncached access", n_uncached);
    mech("SC failure", n_scfail);
    mech("WFI wait", n_wfi);
    mech("interrupt taken", n_irq);
    mech("compressed instruction", n_comp);
    mech("straddling instruction", n_strad);
    mech("mul/div wait in EX2", n_mdwait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("FAIL watchdog: timeout after %0d cycles", MAX_CYCLES);
    for (int h = 0; h < NH; h++)
      $display("hart%0d done=%0d", h, rd_mem(R_DONE + 8 * h));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
