// tb_l3_cache: self-checking test of the shared L3 and its MESI directory
// (reduced to 16 KB, 4-way, so that evictions happen often).
// The testbench models the four private caches (each keeps its own MESI
// state and data and answers snoops the way an L2 does), the accelerator and
// the memory (random latency, backing store whose unwritten lines read as a
// function of their address). A reference copy of every line and of the
// directory's sharer list is kept. Checked: grant E/S/M, data on every
// response, snoop types and targets, stale PutM, accelerator reads and
// writes, LRU eviction with back-invalidation and dirty write-back,
// round-robin service of five simultaneous requests, the stride prefetcher
// (line installed ahead, later demand hit without a memory read), and the
// latency of a hit that needs no snoop.
module tb_l3_cache;
  import hermes_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NPORTS-1:0] creq_valid = '0, creq_ready, cresp_valid;
  creq_t             creq [NPORTS];
  cresp_t            cresp;
  logic [NCORES-1:0] snoop_valid, snoop_ack = '0;
  snoop_t            snoop;
  snoop_resp_t       snoop_resp [NCORES];
  logic              mem_req_valid, mem_req_ready = 1'b0, mem_resp_valid = 1'b0;
  mreq_t             mem_req;
  line_t             mem_resp_data = '0;
  logic              ready_o, hit_o, miss_o, pf_fill_o, pf_hit_o, wb_o;

  l3_cache #(.SIZE_BYTES(16384), .WAYS(4)) dut (.*);

  initial for (int p = 0; p < NPORTS; p++) creq[p] = '0;
  initial for (int c = 0; c < NCORES; c++) snoop_resp[c] = '0;

  function automatic line_t init_line(longint la);
    line_t l;
    for (int i = 0; i < 8; i++) l[i*64 +: 64] = 64'hC0DE_0000_0000_0000 ^ word_t'((la * 8 + i) * 64'h51_7CC1);
    return l;
  endfunction

  // ---------------- memory model ----------------
  line_t mem [longint];
  int    mem_rd = 0, mem_wr = 0;
  initial begin
    forever begin
      @(negedge clk);
      if (mem_req_valid && $urandom_range(0, 1) == 0) begin
        mreq_t r;
        r = mem_req;
        mem_req_ready = 1'b1;
        @(negedge clk);
        mem_req_ready = 1'b0;
        repeat ($urandom_range(1, 5)) @(negedge clk);
        if (r.we) begin
          mem_wr++;
          mem[longint'(r.addr) >> 6] = r.wdata;
        end else begin
          mem_rd++;
          mem_resp_data = mem.exists(longint'(r.addr) >> 6) ? mem[longint'(r.addr) >> 6]
                                                           : init_line(longint'(r.addr) >> 6);
        end
        mem_resp_valid = 1'b1;
        @(negedge clk);
        mem_resp_valid = 1'b0;
      end
    end
  end

  // ---------------- private cache models ----------------
  mesi_t  cst  [NCORES][longint];   // state per core and line
  line_t  cdat [NCORES][longint];
  bit     listed [NCORES][longint]; // what the directory should believe
  line_t  ref_line [longint];
  int     n_inv = 0, n_down = 0, bad_snoop = 0;

  function automatic mesi_t st(int c, longint la);
    return cst[c].exists(la) ? cst[c][la] : MESI_I;
  endfunction
  function automatic bit is_listed(int c, longint la);
    return listed[c].exists(la) ? listed[c][la] : 1'b0;
  endfunction
  function automatic line_t ref_rd(longint la);
    return ref_line.exists(la) ? ref_line[la] : init_line(la);
  endfunction

  for (genvar c = 0; c < NCORES; c++) begin : g_snp
    initial begin
      forever begin
        @(negedge clk);
        if (snoop_valid[c]) begin
          longint la;
          la = longint'(snoop.addr) >> 6;
          if (!is_listed(c, la)) bad_snoop++;     // directory snooped a non-sharer
          repeat ($urandom_range(0, 2)) @(negedge clk);
          snoop_resp[c].dirty = (st(c, la) == MESI_M);
          snoop_resp[c].data  = cdat[c].exists(la) ? cdat[c][la] : '0;
          if (snoop.op == SNP_INV) begin
            n_inv++;
            cst[c][la]    = MESI_I;
            listed[c][la] = 1'b0;
          end else begin
            n_down++;
            if (st(c, la) != MESI_I) cst[c][la] = MESI_S;
          end
          snoop_ack[c] = 1'b1;
          @(negedge clk);
          snoop_ack[c] = 1'b0;
        end
      end
    end
  end

  // ---------------- helpers ----------------
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int accept_order [$];
  task automatic txn(input int p, input creq_op_t op, input longint a, input line_t d,
                     output cresp_t r, output int cyc);
    @(negedge clk);
    creq_valid[p] = 1'b1;
    creq[p]       = '{op: op, addr: ADDR_W'(a), data: d};
    @(posedge clk);
    while (!creq_ready[p]) @(posedge clk);
    accept_order.push_back(p);
    @(negedge clk);
    creq_valid[p] = 1'b0;
    cyc = 1;
    while (!cresp_valid[p]) begin
      @(negedge clk);
      cyc++;
    end
    r = cresp;
  endtask

  // core-level operations with expected-value checks
  task automatic core_read(input int c, input longint la);
    cresp_t r;
    int     cyc;
    bit     others;
    if (st(c, la) != MESI_I) return;
    txn(c, CR_GETS, la * 64, '0, r, cyc);
    others = 1'b0;
    for (int k = 0; k < NCORES; k++) if (k != c && is_listed(k, la)) others = 1'b1;
    check(r.data == ref_rd(la), $sformatf("GetS data core %0d line %h", c, la));
    check(r.grant == (others ? MESI_S : MESI_E),
          $sformatf("GetS grant core %0d line %h: %s", c, la, r.grant.name()));
    cst[c][la] = r.grant;  cdat[c][la] = r.data;  listed[c][la] = 1'b1;
  endtask

  task automatic core_write(input int c, input longint la, input line_t nd);
    cresp_t r;
    int     cyc;
    if (st(c, la) == MESI_S || st(c, la) == MESI_I) begin
      txn(c, CR_GETM, la * 64, '0, r, cyc);
      check(r.data == ref_rd(la), $sformatf("GetM data core %0d line %h", c, la));
      check(r.grant == MESI_M, "GetM granted M");
      for (int k = 0; k < NCORES; k++)
        if (k != c) check(st(k, la) == MESI_I, "GetM left no other copy");
      listed[c][la] = 1'b1;
    end
    cst[c][la] = MESI_M;  cdat[c][la] = nd;  ref_line[la] = nd;
  endtask

  task automatic core_evict(input int c, input longint la);
    cresp_t r;
    int     cyc;
    if (st(c, la) == MESI_M) begin
      txn(c, CR_PUTM, la * 64, cdat[c][la], r, cyc);
      listed[c][la] = 1'b0;
    end
    cst[c][la] = MESI_I;       // clean lines are dropped silently, still listed
  endtask

  task automatic acc_read(input longint la);
    cresp_t r;
    int     cyc;
    txn(NCORES, CR_RD, la * 64, '0, r, cyc);
    check(r.data == ref_rd(la), $sformatf("accelerator read line %h", la));
  endtask

  task automatic acc_write(input longint la, input line_t nd);
    cresp_t r;
    int     cyc;
    txn(NCORES, CR_WR, la * 64, nd, r, cyc);
    for (int k = 0; k < NCORES; k++) check(st(k, la) == MESI_I, "accelerator write left no copy");
    ref_line[la] = nd;
  endtask

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  int n_pf_fill = 0, n_pf_hit = 0, n_wb = 0;
  always @(negedge clk) begin
    if (pf_fill_o) n_pf_fill++;
    if (pf_hit_o)  n_pf_hit++;
    if (wb_o)      n_wb++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cresp_t r;
    int     cyc, m0, i0, d0, f0, h0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ready_o);

    // E, then S with a downgrade of the E holder's copy
    core_read(0, 'h100);
    check(st(0, 'h100) == MESI_E, "first reader gets E");
    core_write(0, 'h100, rnd_line());            // silent E->M in the core
    d0 = n_down;
    core_read(1, 'h100);                          // must see core 0's data
    check(n_down == d0 + 1 && st(0, 'h100) == MESI_S, "owner downgraded to S");
    // GetM invalidates both
    i0 = n_inv;
    core_write(2, 'h100, rnd_line());
    check(n_inv == i0 + 2, "GetM invalidated the two sharers");
    // accelerator read of an M line: downgrade, data right
    d0 = n_down;
    acc_read('h100);
    check(n_down == d0 + 1, "accelerator read downgraded the owner");
    // accelerator write: everybody invalidated
    acc_write('h100, rnd_line());
    core_read(3, 'h100);

    // stale PutM: core 0 owns, loses the line to core 1, then its write-back arrives
    core_write(0, 'h200, rnd_line());
    begin
      line_t old0;
      old0 = cdat[0]['h200];
      core_write(1, 'h200, rnd_line());
      txn(0, CR_PUTM, 'h200 * 64, old0, r, cyc);
      acc_read('h200);                            // still core 1's data
    end

    // hit latency with no snoop: the response pulse comes 3 clock edges after
    // the accepting edge (cyc counts from the first cycle after acceptance)
    acc_read('h500);
    txn(NCORES, CR_RD, 'h500 * 64, '0, r, cyc);
    check(cyc == 4, $sformatf("hit without snoops answered in 3 cycles (got %0d)", cyc - 1));

    // prefetcher: accelerator streams lines 0x300, 0x302, 0x304 -> 0x306 fetched ahead
    f0 = n_pf_fill;
    acc_read('h300); acc_read('h302); acc_read('h304);
    repeat (30) @(negedge clk);
    check(n_pf_fill == f0 + 1, "prefetcher installed the next line of the stream");
    m0 = mem_rd; h0 = n_pf_hit;
    acc_read('h306);
    check(mem_rd == m0, "demand access to the prefetched line needs no memory read");
    check(n_pf_hit == h0 + 1, "prefetch hit reported");

    // five simultaneous requests: each port served once, in round-robin order
    accept_order.delete();
    fork
      core_read(0, 'h400);
      core_read(1, 'h401);
      core_read(2, 'h402);
      core_read(3, 'h403);
      acc_read('h404);
    join
    check(accept_order.size() == 5, "all five requests served");
    begin
      bit [NPORTS-1:0] seen;
      seen = '0;
      foreach (accept_order[i]) seen[accept_order[i]] = 1'b1;
      check(&seen, "every port served");
      for (int i = 1; i < 5; i++)
        check(accept_order[i] == (accept_order[i-1] + 1) % NPORTS, "round-robin order");
    end

    // random traffic over 48 lines in 4 sets of a 4-way cache: evictions,
    // back-invalidations and write-backs
    for (int i = 0; i < 1500; i++) begin
      longint la;
      int     c, k;
      la = 'h1000 + longint'($urandom_range(0, 3)) + longint'($urandom_range(0, 11)) * 64;
      c  = $urandom_range(0, NCORES);
      k  = $urandom_range(0, 9);
      if (c == NCORES) begin
        if (k < 6) acc_read(la); else acc_write(la, rnd_line());
      end else if (k < 5) begin
        if (st(c, la) == MESI_I) core_read(c, la);
        else check(cdat[c][la] == ref_rd(la), "core's cached copy is current");
      end else if (k < 8) core_write(c, la, rnd_line());
      else core_evict(c, la);
    end
    check(bad_snoop == 0, $sformatf("no snoop to a core the directory should not list (%0d)", bad_snoop));
    check(n_wb > 0, "dirty victims were written back to memory");

    $display("mem reads %0d writes %0d, snoops inv %0d down %0d, pf fills %0d",
             mem_rd, mem_wr, n_inv, n_down, n_pf_fill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
