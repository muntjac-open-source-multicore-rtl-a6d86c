// Testbench of the data cache in the memory system it is built for: the
// cache (source 1) and a test DMA master (source 2) share the TileLink bus;
// memory sits behind the coherence broadcaster, and a second behavioural
// memory stands in for an I/O device at 0x1000_0000.
//
// A random sequence of loads (all sizes, signed and unsigned), stores,
// AMOs, LR/SC pairs, uncached I/O accesses and DMA writes runs against a
// byte model. Addresses come from a few lines that map to one set, so lines
// are refilled and evicted. Every load result, AMO old value and SC result
// is checked, and the memory is compared at the end. A DMA write to a line
// the cache holds must be seen by the next load (the probe invalidated it).
// Counts refills, probes, hits answered in two cycles and SC failures, and
// fails if any of them never happens.
`timescale 1ns/1ps
module muntjac_dcache_tb;
  import muntjac_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        req_v, req_r, resp_v, uns;
  mem_op_e     op;
  logic [1:0]  size;
  logic [4:0]  amo;
  logic [63:0] addr, wdata, rdata;
  logic        ca_v, ca_r, cb_v, cb_r, cc_v, cc_r, cd_v, cd_r, ce_v, ce_r;
  tl_a_t ca; tl_b_t cb; tl_c_t cc; tl_d_t cd; tl_e_t ce;
  logic  dma_a_valid, dma_a_ready, dma_d_valid, dma_d_ready;
  tl_a_t dma_a; tl_d_t dma_d;

  logic [2:0] m_a_valid, m_a_ready, m_d_valid, m_d_ready;
  tl_a_t m_a [3]; tl_d_t m_d [3];
  logic [2:0] s_a_valid, s_a_ready, s_d_valid, s_d_ready;
  tl_a_t s_a; tl_d_t s_d [3];
  logic  mem_a_valid, mem_a_ready, mem_d_valid, mem_d_ready;
  tl_a_t mem_a; tl_d_t mem_d;

  muntjac_dcache #(.SOURCE(4'd1)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_v), .req_ready_o(req_r), .req_op_i(op), .req_size_i(size),
    .req_unsigned_i(uns), .req_amo_i(amo), .req_addr_i(addr), .req_wdata_i(wdata),
    .resp_valid_o(resp_v), .resp_data_o(rdata),
    .a_valid_o(ca_v), .a_ready_i(ca_r), .a_o(ca), .b_valid_i(cb_v), .b_ready_o(cb_r), .b_i(cb),
    .c_valid_o(cc_v), .c_ready_i(cc_r), .c_o(cc), .d_valid_i(cd_v), .d_ready_o(cd_r), .d_i(cd),
    .e_valid_o(ce_v), .e_ready_i(ce_r), .e_o(ce));

  assign m_a_valid = {dma_a_valid, ca_v, 1'b0};
  assign m_a[0] = '0; assign m_a[1] = ca; assign m_a[2] = dma_a;
  assign ca_r = m_a_ready[1]; assign dma_a_ready = m_a_ready[2];
  assign cd_v = m_d_valid[1]; assign cd = m_d[1];
  assign dma_d_valid = m_d_valid[2]; assign dma_d = m_d[2];
  assign m_d_ready = {dma_d_ready, cd_r, 1'b1};

  muntjac_tl_bus #(.NM(3)) u_bus (.clk_i(clk), .rst_ni(rst_n),
    .m_a_valid_i(m_a_valid), .m_a_ready_o(m_a_ready), .m_a_i(m_a),
    .m_d_valid_o(m_d_valid), .m_d_ready_i(m_d_ready), .m_d_o(m_d),
    .s_a_valid_o(s_a_valid), .s_a_ready_i(s_a_ready), .s_a_o(s_a),
    .s_d_valid_i(s_d_valid), .s_d_ready_o(s_d_ready), .s_d_i(s_d));
  // no ROM here
  assign s_a_ready[0] = 1'b0; assign s_d_valid[0] = 1'b0; assign s_d[0] = '0;

  muntjac_broadcaster #(.NC(1)) u_bc (.clk_i(clk), .rst_ni(rst_n),
    .a_valid_i(s_a_valid[1]), .a_ready_o(s_a_ready[1]), .a_i(s_a),
    .d_valid_o(s_d_valid[1]), .d_ready_i(s_d_ready[1]), .d_o(s_d[1]),
    .b_valid_o(cb_v), .b_ready_i(cb_r), .b_o(cb),
    .c_valid_i(cc_v), .c_ready_o(cc_r), .c_i('{cc}),
    .e_valid_i(ce_v), .e_ready_o(ce_r), .e_i('{ce}),
    .mem_a_valid_o(mem_a_valid), .mem_a_ready_i(mem_a_ready), .mem_a_o(mem_a),
    .mem_d_valid_i(mem_d_valid), .mem_d_ready_o(mem_d_ready), .mem_d_i(mem_d));
  muntjac_tb_tl_mem #(.BASE(MEM_BASE), .SIZE(65536), .LAT(4)) u_mem (.clk_i(clk), .rst_ni(rst_n),
    .a_valid_i(mem_a_valid), .a_ready_o(mem_a_ready), .a_i(mem_a),
    .d_valid_o(mem_d_valid), .d_ready_i(mem_d_ready), .d_o(mem_d));
  muntjac_tb_tl_mem #(.BASE(56'h1000_0000), .SIZE(4096), .LAT(2)) u_io (.clk_i(clk), .rst_ni(rst_n),
    .a_valid_i(s_a_valid[2]), .a_ready_o(s_a_ready[2]), .a_i(s_a),
    .d_valid_o(s_d_valid[2]), .d_ready_i(s_d_ready[2]), .d_o(s_d[2]));

  int checks = 0, failures = 0;
  int refills = 0, probes = 0, fast_hits = 0, sc_fails = 0, sc_oks = 0, uncached = 0, dma_writes = 0;
  logic [7:0] model [65536];
  logic [7:0] iomodel [4096];

  always @(posedge clk) if (rst_n) begin
    if (ca_v && ca_r && ca.opcode == AcquireBlock) refills++;
    if (cb_v && cb_r) probes++;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  function automatic logic [63:0] mload(longint unsigned a, int sz, logic u);
    logic [63:0] v = 0;
    int n = 1 << sz;
    for (int i = 0; i < n; i++)
      v[i*8 +: 8] = a >= 64'h8000_0000 ? model[(a - MEM_BASE + i) % 65536] : iomodel[(a - 64'h1000_0000 + i) % 4096];
    if (!u && n < 8) for (int i = n * 8; i < 64; i++) v[i] = v[n * 8 - 1];
    return v;
  endfunction
  function automatic void mstore(longint unsigned a, int sz, logic [63:0] v);
    for (int i = 0; i < (1 << sz); i++)
      if (a >= 64'h8000_0000) model[(a - MEM_BASE + i) % 65536] = v[i*8 +: 8];
      else iomodel[(a - 64'h1000_0000 + i) % 4096] = v[i*8 +: 8];
  endfunction

  // one request, returns the response and the cycles it took
  task automatic access(mem_op_e o, int sz, logic u, logic [4:0] am, longint unsigned a,
                        logic [63:0] wd, output logic [63:0] r, output int cyc);
    @(negedge clk);
    req_v = 1; op = o; size = 2'(sz); uns = u; amo = am; addr = a; wdata = wd;
    @(posedge clk);
    while (!req_r) @(posedge clk);
    cyc = 0;
    @(negedge clk);
    req_v = 0;
    while (!resp_v) begin @(negedge clk); cyc++; end
    r = rdata;
  endtask

  task automatic dma_put(longint unsigned a, logic [63:0] v);
    @(negedge clk);
    dma_a = '0; dma_a.opcode = PutFullData; dma_a.size = 3'd3; dma_a.source = 4'd2;
    dma_a.address = PADDR_W'(a); dma_a.mask = 8'hFF; dma_a.data = v;
    dma_a_valid = 1;
    while (!dma_a_ready) @(negedge clk);
    @(negedge clk);
    dma_a_valid = 0; dma_d_ready = 1;
    while (!dma_d_valid) @(negedge clk);
    @(negedge clk);
    dma_d_ready = 0;
    dma_writes++;
  endtask

  function automatic longint unsigned pick_addr(int sz);
    longint unsigned a;
    a = MEM_BASE + 64'(4096 * $urandom_range(0, 5)) + 64'(8 * $urandom_range(0, 15));
    a += 64'($urandom_range(0, 7)) & ~64'((1 << sz) - 1);
    return a;
  endfunction

  initial begin
    logic [63:0] r, v, old, srcv;
    int cyc, sz, kind;
    longint unsigned a;
    logic [4:0] amo_ops [9] = '{AMO_ADD, AMO_SWAP, AMO_XOR, AMO_OR, AMO_AND, AMO_MIN, AMO_MAX, AMO_MINU, AMO_MAXU};
    req_v = 0; op = MEM_LOAD; size = 0; uns = 0; amo = 0; addr = 0; wdata = 0;
    dma_a_valid = 0; dma_a = '0; dma_d_ready = 0;
    for (int i = 0; i < 65536; i++) begin model[i] = 8'($urandom); u_mem.mem[i] = model[i]; end
    for (int i = 0; i < 4096; i++) begin iomodel[i] = 8'($urandom); u_io.mem[i] = iomodel[i]; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 1500; k++) begin
      kind = $urandom_range(0, 19);
      sz = $urandom_range(0, 3);
      a = pick_addr(sz);
      if (kind < 9) begin                       // load
        logic u;
        u = $urandom_range(0, 1);
        access(MEM_LOAD, sz, u, 0, a, 0, r, cyc);
        chk(r === mload(a, sz, u), $sformatf("load %h size %0d got %h exp %h", a, sz, r, mload(a, sz, u)));
        if (cyc == 1) fast_hits++;
      end else if (kind < 13) begin             // store
        v = {$urandom, $urandom};
        access(MEM_STORE, sz, 0, 0, a, v, r, cyc);
        mstore(a, sz, v);
      end else if (kind < 15) begin             // AMO on a word or doubleword
        logic [4:0] am;
        sz = $urandom_range(2, 3);
        a = pick_addr(sz);
        am = amo_ops[$urandom_range(0, 8)];
        srcv = {$urandom, $urandom};
        old = mload(a, sz, 0);
        access(MEM_AMO, sz, 0, am, a, srcv, r, cyc);
        chk(r === old, $sformatf("amo %b %h old got %h exp %h", am, a, r, old));
        begin
          logic [63:0] x, y, n;
          x = old; y = sz == 2 ? {{32{srcv[31]}}, srcv[31:0]} : srcv;
          case (am)
            AMO_ADD: n = x + y; AMO_SWAP: n = y; AMO_XOR: n = x ^ y; AMO_OR: n = x | y; AMO_AND: n = x & y;
            AMO_MIN: n = $signed(x) < $signed(y) ? x : y; AMO_MAX: n = $signed(x) > $signed(y) ? x : y;
            AMO_MINU: n = (sz == 2 ? x[31:0] < y[31:0] : x < y) ? x : y;
            default:  n = (sz == 2 ? x[31:0] > y[31:0] : x > y) ? x : y;
          endcase
          mstore(a, sz, n);
        end
      end else if (kind < 17) begin             // LR / SC, sometimes broken by a DMA write
        logic brk;
        sz = 3; a = pick_addr(3);
        brk = $urandom_range(0, 2) == 0;
        access(MEM_LR, 3, 0, AMO_LR, a, 0, r, cyc);
        chk(r === mload(a, 3, 0), "lr value");
        if (brk) begin v = {$urandom, $urandom}; dma_put(a, v); mstore(a, 3, v); end
        v = {$urandom, $urandom};
        access(MEM_SC, 3, 0, AMO_SC, a, v, r, cyc);
        chk(r === {63'd0, brk}, $sformatf("sc result %0d expected %0d", r, brk));
        if (!brk) begin mstore(a, 3, v); sc_oks++; end else sc_fails++;
      end else if (kind < 18) begin             // uncached I/O
        a = 64'h1000_0000 + 64'(8 * $urandom_range(0, 511));
        if ($urandom_range(0, 1)) begin
          v = {$urandom, $urandom}; access(MEM_STORE, 3, 0, 0, a, v, r, cyc); mstore(a, 3, v);
        end else begin
          access(MEM_LOAD, 3, 0, 0, a, 0, r, cyc); chk(r === mload(a, 3, 0), "uncached load");
        end
        uncached++;
      end else begin                            // DMA write to a line the cache may hold, then load
        a = pick_addr(3);
        access(MEM_LOAD, 3, 0, 0, a, 0, r, cyc);
        v = {$urandom, $urandom};
        dma_put(a, v); mstore(a, 3, v);
        access(MEM_LOAD, 3, 0, 0, a, 0, r, cyc);
        chk(r === v, $sformatf("load after DMA write %h got %h exp %h", a, r, v));
      end
    end
    repeat (20) @(posedge clk);
    begin
      int bad = 0;
      for (int i = 0; i < 65536; i++) if (u_mem.mem[i] !== model[i]) bad++;
      for (int i = 0; i < 4096; i++) if (u_io.mem[i] !== iomodel[i]) bad++;
      chk(bad == 0, $sformatf("%0d memory bytes differ", bad));
    end
    $display("dcache: refills=%0d probes=%0d 2-cycle hits=%0d sc ok=%0d sc fail=%0d uncached=%0d dma=%0d",
             refills, probes, fast_hits, sc_oks, sc_fails, uncached, dma_writes);
    chk(refills > 0, "refill never happened");
    chk(probes > 0, "probe never happened");
    chk(fast_hits > 0, "no 2-cycle hit");
    chk(sc_oks > 0 && sc_fails > 0, "sc success and failure both seen");
    chk(uncached > 0, "uncached access never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
