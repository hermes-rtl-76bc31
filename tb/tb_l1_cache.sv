// tb_l1_cache: self-checking test of the L1 data cache at its default size.
// A behavioural L2 in the testbench (fixed latency, backing store whose
// unwritten words read as a function of their address) answers line reads
// and word writes and counts them. Checked: miss and hit data, hit latency
// (2 cycles from acceptance), that hits do not reach the L2, write-through
// with update on hit and no allocation on miss, back-invalidation, LRU
// eviction in one set, and a random run against a reference memory.
module tb_l1_cache;
  import hermes_pkg::*;

  localparam int L2_LAT = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      core_req_valid = 1'b0, core_req_ready, core_resp_valid;
  core_req_t core_req = '0;
  word_t     core_resp_rdata;
  logic      l2_req_valid, l2_req_ready, l2_resp_valid;
  core_req_t l2_req;
  line_t     l2_resp_line;
  logic      inv_valid = 1'b0;
  addr_t     inv_addr  = '0;
  logic      ready_o, hit_o;

  l1_cache dut (.*);

  // ---------------- behavioural L2 ----------------
  word_t mem [longint];
  int    l2_reads = 0, l2_writes = 0;

  function automatic word_t init_word(longint waddr);
    return 64'h5EED_0000_0000_0000 ^ word_t'(waddr * 64'h9E37_79B9);
  endfunction
  function automatic word_t rd_word(longint waddr);
    return mem.exists(waddr) ? mem[waddr] : init_word(waddr);
  endfunction

  assign l2_req_ready = 1'b1;
  initial begin
    l2_resp_valid = 1'b0;
    l2_resp_line  = '0;
    forever begin
      @(posedge clk);
      if (l2_req_valid) begin
        core_req_t r;
        longint    wa;
        r  = l2_req;
        wa = longint'(r.addr) >> 3;
        if (r.we) begin
          word_t o;
          l2_writes++;
          o = rd_word(wa);
          for (int b = 0; b < 8; b++) if (r.wstrb[b]) o[b*8 +: 8] = r.wdata[b*8 +: 8];
          mem[wa] = o;
        end else
          l2_reads++;
        repeat (L2_LAT - 1) @(posedge clk);
        l2_resp_valid <= 1'b1;
        for (int i = 0; i < 8; i++)
          l2_resp_line[i*64 +: 64] <= rd_word(((longint'(r.addr) >> 6) << 3) + i);
        @(posedge clk);
        l2_resp_valid <= 1'b0;
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

  task automatic access(input logic we, input longint a, input word_t wd,
                        input logic [7:0] strb, output word_t rd, output int cyc);
    @(negedge clk);
    core_req_valid = 1'b1;
    core_req       = '{we: we, addr: ADDR_W'(a), wdata: wd, wstrb: strb};
    @(posedge clk);
    while (!core_req_ready) @(posedge clk);
    cyc = 0;
    @(negedge clk);
    core_req_valid = 1'b0;
    do begin
      @(posedge clk);
      cyc++;
    end while (!core_resp_valid);
    rd = core_resp_rdata;
  endtask

  word_t ref_mem [longint];
  function automatic word_t ref_rd(longint waddr);
    return ref_mem.exists(waddr) ? ref_mem[waddr] : init_word(waddr);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t d;
    int    cyc, r0, w0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ready_o);

    // miss, then hit
    r0 = l2_reads;
    access(1'b0, 'h1_0008, '0, '0, d, cyc);
    check(d == init_word('h1_0008 >> 3), "miss returns the L2 data");
    check(l2_reads == r0 + 1, "miss reads one line from the L2");
    access(1'b0, 'h1_0038, '0, '0, d, cyc);
    check(d == init_word('h1_0038 >> 3), "hit returns the right word of the line");
    check(l2_reads == r0 + 1, "hit does not reach the L2");
    check(cyc == 2, $sformatf("hit latency is 2 cycles (got %0d)", cyc));

    // write hit: through to the L2 and updated locally
    w0 = l2_writes;
    access(1'b1, 'h1_0010, 64'h1122_3344_5566_7788, 8'h0F, d, cyc);
    ref_mem['h1_0010 >> 3] = {init_word('h1_0010 >> 3) >> 32, 32'h5566_7788};
    check(l2_writes == w0 + 1, "write goes through to the L2");
    check(mem['h1_0010 >> 3] == ref_mem['h1_0010 >> 3], "L2 holds the byte-masked write");
    r0 = l2_reads;
    access(1'b0, 'h1_0010, '0, '0, d, cyc);
    check(d == ref_mem['h1_0010 >> 3] && l2_reads == r0, "write hit updated the L1 copy");

    // write miss: no allocation
    access(1'b1, 'h2_0000, 64'hAAAA_BBBB_CCCC_DDDD, 8'hFF, d, cyc);
    ref_mem['h2_0000 >> 3] = 64'hAAAA_BBBB_CCCC_DDDD;
    r0 = l2_reads;
    access(1'b0, 'h2_0000, '0, '0, d, cyc);
    check(l2_reads == r0 + 1, "write miss did not allocate");
    check(d == 64'hAAAA_BBBB_CCCC_DDDD, "read after write miss sees the data");

    // back-invalidation
    @(negedge clk);
    inv_valid = 1'b1;
    inv_addr  = ADDR_W'('h1_0000);
    @(negedge clk);
    inv_valid = 1'b0;
    r0 = l2_reads;
    access(1'b0, 'h1_0010, '0, '0, d, cyc);
    check(l2_reads == r0 + 1, "invalidated line misses");
    check(d == ref_mem['h1_0010 >> 3], "refetched data correct");

    // LRU: 9 lines in one set (set stride 4 KB); line 0 is the oldest
    for (int i = 0; i < 9; i++) access(1'b0, 'h10_0000 + i * 4096, '0, '0, d, cyc);
    r0 = l2_reads;
    access(1'b0, 'h10_0000 + 8 * 4096, '0, '0, d, cyc);
    check(l2_reads == r0, "most recent line of a full set hits");
    access(1'b0, 'h10_0000 + 1 * 4096, '0, '0, d, cyc);
    check(l2_reads == r0, "second oldest line still present");
    access(1'b0, 'h10_0000, '0, '0, d, cyc);
    check(l2_reads == r0 + 1, "least recently used line was evicted");

    // random traffic on 64 lines spread over 8 sets
    for (int i = 0; i < 400; i++) begin
      longint a;
      word_t  wd;
      logic [7:0] sb;
      a  = 'h40_0000 + longint'($urandom_range(0, 7)) * 64 + longint'($urandom_range(0, 7)) * 4096
           + longint'($urandom_range(0, 7)) * 8;
      wd = {$urandom, $urandom};
      sb = 8'($urandom);
      if ($urandom_range(0, 3) == 0) begin
        word_t o;
        o = ref_rd(a >> 3);
        for (int b = 0; b < 8; b++) if (sb[b]) o[b*8 +: 8] = wd[b*8 +: 8];
        ref_mem[a >> 3] = o;
        access(1'b1, a, wd, sb, d, cyc);
      end else begin
        access(1'b0, a, '0, '0, d, cyc);
        check(d == ref_rd(a >> 3), $sformatf("random read %h", a));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
