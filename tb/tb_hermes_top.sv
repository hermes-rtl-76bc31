// tb_hermes_top: end-to-end test of the memory hierarchy with four cores, the
// accelerator and both memory channels, at reduced cache sizes (L1 1 KB,
// L2 4 KB, L3 32 KB) so that every mechanism happens often. The DRAM/HBM
// address map keeps its full size.
//
// The cores run concurrently. Phase 1: false sharing - every core writes and
// reads its own words of shared lines while the accelerator reads and writes
// lines of its own and reads words nobody writes. Phase 2: after a barrier,
// every core and the accelerator read the whole shared region (true sharing).
// Phase 3: producer/consumer - the accelerator writes full lines that the
// cores then read; the cores write results the accelerator then reads.
// Phase 4: each core streams through a DRAM or an HBM region with a fixed
// stride (prefetcher). Phase 5: each core writes and reads back a private
// region larger than its L2. Every read is checked against a reference memory.
// Mechanism counters (hits at each level, misses, invalidate and downgrade
// snoops, PutM write-backs, L3 dirty evictions, prefetch fills and hits,
// L1 back-invalidations, arbitration conflicts, DRAM and HBM traffic) must
// all be non-zero.
module tb_hermes_top;
  import hermes_pkg::*;

  localparam longint GB = 64'd1 << 30;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NCORES-1:0] core_req_valid = '0, core_req_ready, core_resp_valid;
  core_req_t         core_req [NCORES];
  word_t             core_resp_rdata [NCORES];
  logic              acc_req_valid = 1'b0, acc_req_ready, acc_resp_valid;
  creq_t             acc_req = '0;
  cresp_t            acc_resp;
  logic              dram_req_valid, dram_req_ready, dram_resp_valid;
  mreq_t             dram_req;
  line_t             dram_resp_data;
  logic              hbm_req_valid, hbm_req_ready, hbm_resp_valid;
  mreq_t             hbm_req;
  line_t             hbm_resp_data;
  logic              ready_o, mem_err_o;
  logic [31:0]       dram_lines, hbm_lines;
  logic [NCORES-1:0] l1_hit_o, l2_hit_o;
  logic              l3_hit_o, l3_miss_o, pf_fill_o, pf_hit_o, l3_wb_o;

  initial for (int c = 0; c < NCORES; c++) core_req[c] = '0;

  hermes_top #(.L1_BYTES(1024), .L1_WAYS(2), .L2_BYTES(4096), .L2_WAYS(2),
               .L3_BYTES(32768), .L3_WAYS(4)) dut (.*);

  tb_mem_model #(.LAT(20))                 u_dram (.clk, .req_valid(dram_req_valid),
    .req_ready(dram_req_ready), .req(dram_req), .resp_valid(dram_resp_valid),
    .resp_data(dram_resp_data));
  tb_mem_model #(.LAT(8), .BASE(8 * GB))  u_hbm (.clk, .req_valid(hbm_req_valid),
    .req_ready(hbm_req_ready), .req(hbm_req), .resp_valid(hbm_resp_valid),
    .resp_data(hbm_resp_data));

  function automatic word_t init_word(longint waddr);
    return 64'hFACE_0000_0000_0000 ^ word_t'(waddr * 64'h9E37_79B9_7F4A_7C15);
  endfunction

  word_t ref_mem [longint];
  function automatic word_t ref_rd(longint waddr);
    return ref_mem.exists(waddr) ? ref_mem[waddr] : init_word(waddr);
  endfunction

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- port drivers ----------------
  task automatic core_rd(input int c, input longint a, output word_t d);
    @(negedge clk);
    core_req_valid[c] = 1'b1;
    core_req[c]       = '{we: 1'b0, addr: ADDR_W'(a), wdata: '0, wstrb: '0};
    @(posedge clk);
    while (!core_req_ready[c]) @(posedge clk);
    @(negedge clk);
    core_req_valid[c] = 1'b0;
    while (!core_resp_valid[c]) @(negedge clk);
    d = core_resp_rdata[c];
  endtask

  task automatic core_wr(input int c, input longint a, input word_t wd);
    @(negedge clk);
    core_req_valid[c] = 1'b1;
    core_req[c]       = '{we: 1'b1, addr: ADDR_W'(a), wdata: wd, wstrb: 8'hFF};
    ref_mem[a >> 3]   = wd;
    @(posedge clk);
    while (!core_req_ready[c]) @(posedge clk);
    @(negedge clk);
    core_req_valid[c] = 1'b0;
    while (!core_resp_valid[c]) @(negedge clk);
  endtask

  task automatic core_check(input int c, input longint a, input string what);
    word_t d;
    core_rd(c, a, d);
    check(d == ref_rd(a >> 3), $sformatf("%s: core %0d addr %h got %h want %h",
                                         what, c, a, d, ref_rd(a >> 3)));
  endtask

  task automatic acc_xfer(input creq_op_t op, input longint a, input line_t wd, output line_t d);
    @(negedge clk);
    acc_req_valid = 1'b1;
    acc_req       = '{op: op, addr: ADDR_W'(a), data: wd};
    if (op == CR_WR) for (int i = 0; i < 8; i++) ref_mem[(a >> 3) + i] = wd[i*64 +: 64];
    @(posedge clk);
    while (!acc_req_ready) @(posedge clk);
    @(negedge clk);
    acc_req_valid = 1'b0;
    while (!acc_resp_valid) @(negedge clk);
    d = acc_resp.data;
  endtask

  // ---------------- mechanism counters ----------------
  int n_l1hit, n_l2hit, n_l3hit, n_l3miss, n_inv, n_down, n_putm, n_wb,
      n_pffill, n_pfhit, n_l1inv, n_conflict, n_accrd, n_accwr;
  initial begin
    {n_l1hit, n_l2hit, n_l3hit, n_l3miss, n_inv, n_down, n_putm, n_wb,
     n_pffill, n_pfhit, n_l1inv, n_conflict, n_accrd, n_accwr} = '0;
  end
  always @(negedge clk) if (rst_n) begin
    n_l1hit  += $countones(l1_hit_o);
    n_l2hit  += $countones(l2_hit_o);
    n_l3hit  += int'(l3_hit_o);
    n_l3miss += int'(l3_miss_o);
    n_wb     += int'(l3_wb_o);
    n_pffill += int'(pf_fill_o);
    n_pfhit  += int'(pf_hit_o);
    n_l1inv  += $countones(dut.inv_valid);
    if ($countones(dut.creq_valid) > 1) n_conflict++;
    if ((dut.snoop_valid & dut.snoop_ack) != '0) begin
      if (dut.snoop.op == SNP_INV) n_inv++; else n_down++;
    end
    if ((dut.creq_ready & dut.creq_valid) != '0) begin
      if (dut.creq[dut.u_l3.grant].op == CR_PUTM) n_putm++;
      if (dut.creq[dut.u_l3.grant].op == CR_RD)   n_accrd++;
      if (dut.creq[dut.u_l3.grant].op == CR_WR)   n_accwr++;
    end
    if (mem_err_o) begin
      failures++;
      $display("FAIL: access to unmapped memory");
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam longint SHARED = 'h1_0000;      // 32 lines, word slot c of each line is core c's
  localparam longint ACCPRV = 'h3_0000;      // accelerator's own lines
  localparam longint XFER   = 'h5_0000;      // producer/consumer lines
  localparam int     NSH    = 32;

  task automatic core_phase1(input int c);
    for (int i = 0; i < 300; i++) begin
      longint a;
      a = SHARED + longint'($urandom_range(0, NSH - 1)) * 64 + longint'(c) * 8;
      if ($urandom_range(0, 2) == 0) core_wr(c, a, {$urandom, $urandom});
      else core_check(c, a, "phase 1 own word");
    end
  endtask

  task automatic acc_phase1();
    line_t d, w;
    for (int i = 0; i < 60; i++) begin
      longint a;
      int     k;
      k = $urandom_range(0, 2);
      if (k == 0) begin
        a = SHARED + longint'($urandom_range(0, NSH - 1)) * 64;
        acc_xfer(CR_RD, a, '0, d);
        for (int s = 4; s < 8; s++)
          check(d[s*64 +: 64] == ref_rd((a >> 3) + s), "phase 1 accelerator read of untouched words");
      end else begin
        a = ACCPRV + longint'($urandom_range(0, 15)) * 64;
        if (k == 1) begin
          for (int j = 0; j < 16; j++) w[j*32 +: 32] = $urandom;
          acc_xfer(CR_WR, a, w, d);
        end else begin
          acc_xfer(CR_RD, a, '0, d);
          for (int s = 0; s < 8; s++)
            check(d[s*64 +: 64] == ref_rd((a >> 3) + s), "phase 1 accelerator private read");
        end
      end
    end
  endtask

  task automatic core_phase5(input int c);
    longint base;
    base = 'h80_0000 + longint'(c) * 'h1_0000 + 8;
    for (int i = 0; i < 128; i++) core_wr(c, base + longint'(i) * 64, {32'(c), 32'(i)});
    for (int i = 0; i < 128; i++) core_check(c, base + longint'(i) * 64, "phase 5");
  endtask

  task automatic stream(input int c, input longint base, input int stride_lines, input int n);
    word_t d;
    for (int i = 0; i < n; i++) begin
      core_rd(c, base + longint'(i) * stride_lines * 64, d);
      check(d == ref_rd((base + longint'(i) * stride_lines * 64) >> 3), "stream read");
    end
  endtask

  initial begin
    line_t d;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ready_o);

    // phase 1: false sharing, all ports concurrently
    fork
      core_phase1(0);
      core_phase1(1);
      core_phase1(2);
      core_phase1(3);
      acc_phase1();
    join

    // phase 2: everybody reads everything
    fork
      for (int i = 0; i < NSH * 8; i++) core_check(0, SHARED + longint'(i) * 8, "phase 2");
      for (int i = 0; i < NSH * 8; i++) core_check(1, SHARED + longint'(NSH * 8 - 1 - i) * 8, "phase 2");
      for (int i = 0; i < NSH * 8; i++) core_check(2, SHARED + longint'((i * 5) % (NSH * 8)) * 8, "phase 2");
      for (int i = 0; i < NSH * 8; i++) core_check(3, SHARED + longint'((i * 7) % (NSH * 8)) * 8, "phase 2");
      for (int i = 0; i < NSH; i++) begin
        acc_xfer(CR_RD, SHARED + longint'(i) * 64, '0, d);
        for (int s = 0; s < 8; s++)
          check(d[s*64 +: 64] == ref_rd((SHARED >> 3) + i * 8 + s), "phase 2 accelerator read");
      end
    join

    // phase 3a: the accelerator produces, the cores consume
    for (int i = 0; i < 16; i++) begin
      line_t w;
      for (int j = 0; j < 16; j++) w[j*32 +: 32] = $urandom;
      acc_xfer(CR_WR, XFER + longint'(i) * 64, w, d);
    end
    fork
      for (int i = 0; i < 16 * 8; i++) core_check(0, XFER + longint'(i) * 8, "phase 3 consume");
      for (int i = 0; i < 16 * 8; i++) core_check(1, XFER + longint'(i) * 8, "phase 3 consume");
      for (int i = 0; i < 16 * 8; i++) core_check(2, XFER + longint'(i) * 8, "phase 3 consume");
      for (int i = 0; i < 16 * 8; i++) core_check(3, XFER + longint'(i) * 8, "phase 3 consume");
    join
    // phase 3b: the cores produce, the accelerator consumes
    fork
      for (int i = 0; i < 32; i++) core_wr(0, XFER + longint'(i) * 32 + 0, {32'h0, 32'(i)});
      for (int i = 0; i < 32; i++) core_wr(1, XFER + longint'(i) * 32 + 8, {32'h1, 32'(i)});
      for (int i = 0; i < 32; i++) core_wr(2, XFER + longint'(i) * 32 + 16, {32'h2, 32'(i)});
      for (int i = 0; i < 32; i++) core_wr(3, XFER + longint'(i) * 32 + 24, {32'h3, 32'(i)});
    join
    for (int i = 0; i < 16; i++) begin
      acc_xfer(CR_RD, XFER + longint'(i) * 64, '0, d);
      for (int s = 0; s < 8; s++)
        check(d[s*64 +: 64] == ref_rd((XFER >> 3) + i * 8 + s), "phase 3 accelerator consume");
    end

    // phase 4: strided streams in DRAM and in HBM
    fork
      stream(0, 'h10_0000, 1, 96);
      stream(1, 'h20_0000, 3, 96);
      stream(2, 8 * GB + 'h1_0000, 2, 96);
      stream(3, 8 * GB + 'h40_0000, 1, 96);
    join

    // phase 5: each core fills a private region twice its L2 with writes
    // (dirty L2 victims leave with PutM) and reads it back
    fork
      core_phase5(0);
      core_phase5(1);
      core_phase5(2);
      core_phase5(3);
    join

    check(n_l1hit  > 0, "L1 hits happened");
    check(n_l2hit  > 0, "L2 hits happened");
    check(n_l3hit  > 0, "L3 hits happened");
    check(n_l3miss > 0, "L3 misses happened");
    check(n_inv    > 0, "invalidate snoops happened");
    check(n_down   > 0, "downgrade snoops happened");
    check(n_putm   > 0, "PutM write-backs happened");
    check(n_wb     > 0, "dirty L3 victims written to memory");
    check(n_pffill > 0, "prefetch fills happened");
    check(n_pfhit  > 0, "demand hits on prefetched lines happened");
    check(n_l1inv  > 0, "L1 back-invalidations happened");
    check(n_conflict > 0, "simultaneous requests at the L3 happened");
    check(n_accrd  > 0 && n_accwr > 0, "accelerator reads and writes happened");
    check(dram_lines > 0 && hbm_lines > 0, "both DRAM and HBM carried traffic");
    $display("l1hit %0d l2hit %0d l3hit %0d l3miss %0d inv %0d down %0d putm %0d wb %0d pffill %0d pfhit %0d l1inv %0d conflict %0d accrd %0d accwr %0d dram %0d hbm %0d",
             n_l1hit, n_l2hit, n_l3hit, n_l3miss, n_inv, n_down, n_putm, n_wb, n_pffill,
             n_pfhit, n_l1inv, n_conflict, n_accrd, n_accwr, dram_lines, hbm_lines);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
