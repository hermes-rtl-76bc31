// tb_l2_cache: self-checking test of the private MESI L2 (reduced to 8 KB,
// 2-way so that evictions are easy to provoke).
// The testbench plays the L1 above and the shared L3 below. The L3 model
// keeps a line store, grants E or S for GetS and M for GetM, takes PutM
// data, accepts requests after random delays and, in the random phase, sends
// snoops (invalidate / downgrade) at random times, including while the L2 is
// waiting for its own request to be accepted. Directed checks cover hit
// latency, the silent E->M upgrade, the S->M upgrade, write-back of dirty
// victims, silent drop of clean victims, back-invalidation of the L1 and
// snoop answers; the random phase compares every read with a reference
// memory, which only works if every dirty line reaches the L3 model.
module tb_l2_cache;
  import hermes_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        l1_req_valid = 1'b0, l1_req_ready, l1_resp_valid, l1_inv_valid;
  core_req_t   l1_req = '0;
  line_t       l1_resp_line;
  addr_t       l1_inv_addr;
  logic        creq_valid, creq_ready = 1'b0, cresp_valid = 1'b0;
  creq_t       creq;
  cresp_t      cresp = '0;
  logic        snoop_valid = 1'b0, snoop_ack;
  snoop_t      snoop = '0;
  snoop_resp_t snoop_resp;
  logic        ready_o, hit_o;

  l2_cache #(.SIZE_BYTES(8192), .WAYS(2)) dut (.*);

  function automatic word_t init_word(longint waddr);
    return 64'hB0B0_0000_0000_0000 ^ word_t'(waddr * 64'h2545_F491);
  endfunction

  // ---------------- L3 model ----------------
  line_t l3_mem [longint];            // by line address
  int    n_gets = 0, n_getm = 0, n_putm = 0, n_snoop = 0;
  addr_t last_putm_addr;
  line_t last_putm_data;
  bit    rand_snoops = 1'b0;
  bit    grant_s     = 1'b0;          // answer GetS with S instead of E
  bit    pend_snoop  = 1'b0;
  snoop_t      snp_cmd;
  snoop_resp_t snp_res;
  longint      pool [$];              // lines the random snoops pick from

  function automatic line_t l3_line(longint la);
    line_t l;
    if (l3_mem.exists(la)) return l3_mem[la];
    for (int i = 0; i < 8; i++) l[i*64 +: 64] = init_word(la * 8 + i);
    return l;
  endfunction

  initial begin
    forever begin
      @(negedge clk);
      if (pend_snoop || (rand_snoops && pool.size() > 0 && $urandom_range(0, 5) == 0)) begin
        if (pend_snoop) snoop = snp_cmd;
        else begin
          snoop.op   = snoop_op_t'($urandom_range(0, 1));
          snoop.addr = ADDR_W'(pool[$urandom_range(0, pool.size() - 1)] * 64);
        end
        snoop_valid = 1'b1;
        n_snoop++;
        do @(negedge clk); while (!snoop_ack);
        snp_res = snoop_resp;
        if (snp_res.dirty) l3_mem[longint'(snoop.addr) >> 6] = snp_res.data;
        snoop_valid = 1'b0;
        pend_snoop  = 1'b0;
      end else if (creq_valid && $urandom_range(0, 2) == 0) begin
        creq_t r;
        r = creq;
        creq_ready = 1'b1;
        @(negedge clk);
        creq_ready = 1'b0;
        repeat ($urandom_range(1, 4)) @(negedge clk);
        cresp = '0;
        case (r.op)
          CR_GETS: begin
            n_gets++;
            cresp.grant = grant_s ? MESI_S : MESI_E;
            cresp.data  = l3_line(longint'(r.addr) >> 6);
          end
          CR_GETM: begin
            n_getm++;
            cresp.grant = MESI_M;
            cresp.data  = l3_line(longint'(r.addr) >> 6);
          end
          default: begin
            n_putm++;
            last_putm_addr = r.addr;
            last_putm_data = r.data;
            l3_mem[longint'(r.addr) >> 6] = r.data;
          end
        endcase
        cresp_valid = 1'b1;
        @(negedge clk);
        cresp_valid = 1'b0;
      end
    end
  end

  // ---------------- L1 side ----------------
  int    checks = 0, failures = 0;
  int    n_inv = 0;
  addr_t last_inv;
  always @(negedge clk) if (l1_inv_valid) begin
    n_inv++;
    last_inv = l1_inv_addr;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic access(input logic we, input longint a, input word_t wd,
                        input logic [7:0] strb, output line_t rl, output int cyc);
    @(negedge clk);
    l1_req_valid = 1'b1;
    l1_req       = '{we: we, addr: ADDR_W'(a), wdata: wd, wstrb: strb};
    @(posedge clk);
    while (!l1_req_ready) @(posedge clk);
    cyc = 0;
    @(negedge clk);
    l1_req_valid = 1'b0;
    do begin
      @(posedge clk);
      cyc++;
    end while (!l1_resp_valid);
    rl = l1_resp_line;
  endtask

  task automatic do_snoop(input snoop_op_t op, input longint a);
    snp_cmd.op   = op;
    snp_cmd.addr = ADDR_W'(a);
    pend_snoop   = 1'b1;
    while (pend_snoop) @(negedge clk);
    @(negedge clk);
  endtask

  word_t ref_mem [longint];
  function automatic word_t ref_rd(longint waddr);
    return ref_mem.exists(waddr) ? ref_mem[waddr] : init_word(waddr);
  endfunction

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t l;
    int    cyc, g0, m0, p0, i0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ready_o);

    // read miss -> GetS, granted E
    g0 = n_gets;
    access(1'b0, 'h8000, '0, '0, l, cyc);
    check(n_gets == g0 + 1, "read miss sends GetS");
    check(l == l3_line('h8000 >> 6), "miss returns the L3 line");
    access(1'b0, 'h8008, '0, '0, l, cyc);
    check(n_gets == g0 + 1 && cyc == 2, $sformatf("read hit in 2 cycles without the L3 (%0d)", cyc));

    // write to the E line: silent upgrade to M
    m0 = n_getm;
    access(1'b1, 'h8010, 64'hDEAD_BEEF_0000_0001, 8'hFF, l, cyc);
    check(n_getm == m0, "write to an E line needs no GetM");
    // downgrade snoop: dirty data come back, line becomes S
    do_snoop(SNP_DOWN, 'h8000);
    check(snp_res.dirty, "downgrade of an M line returns dirty data");
    check(snp_res.data[2*64 +: 64] == 64'hDEAD_BEEF_0000_0001, "downgrade returns the written word");
    access(1'b1, 'h8018, 64'h77, 8'h01, l, cyc);
    check(n_getm == m0 + 1, "write to an S line sends GetM");
    // invalidate snoop: dirty again, and the L1 copy is invalidated
    i0 = n_inv;
    do_snoop(SNP_INV, 'h8000);
    check(snp_res.dirty && snp_res.data[3*64 +: 8] == 8'h77, "invalidate of M returns dirty data");
    check(n_inv == i0 + 1 && last_inv == ADDR_W'('h8000), "invalidate reaches the L1");
    g0 = n_gets;
    access(1'b0, 'h8018, '0, '0, l, cyc);
    check(n_gets == g0 + 1 && l[3*64 +: 8] == 8'h77, "invalidated line is refetched with the new data");
    // snoop to an absent line
    do_snoop(SNP_INV, 'h7_0000);
    check(!snp_res.dirty, "snoop to an absent line returns clean");

    // dirty victim: three lines of one set (set stride 4 KB), oldest is M
    access(1'b1, 'h2_0000, 64'h1234, 8'hFF, l, cyc);   // miss -> GetM, M
    access(1'b0, 'h2_1000, '0, '0, l, cyc);            // second way
    p0 = n_putm; i0 = n_inv;
    access(1'b0, 'h2_2000, '0, '0, l, cyc);            // evicts 0x20000
    check(n_putm == p0 + 1 && last_putm_addr == ADDR_W'('h2_0000), "dirty victim written back with PutM");
    check(last_putm_data[63:0] == 64'h1234, "PutM carries the modified data");
    check(n_inv == i0 + 1 && last_inv == ADDR_W'('h2_0000), "evicted line invalidated in the L1");
    // clean victim: silent drop
    p0 = n_putm;
    access(1'b0, 'h2_3000, '0, '0, l, cyc);            // evicts 0x21000 (clean E)
    check(n_putm == p0, "clean victim dropped without PutM");
    check(last_inv == ADDR_W'('h2_1000), "clean victim also invalidated in the L1");

    // S grant: a write must upgrade
    grant_s = 1'b1;
    access(1'b0, 'h3_0000, '0, '0, l, cyc);
    m0 = n_getm;
    access(1'b1, 'h3_0000, 64'h5, 8'hFF, l, cyc);
    check(n_getm == m0 + 1, "write to a line granted S sends GetM");
    grant_s = 1'b0;
    ref_mem['h8010 >> 3] = 64'hDEAD_BEEF_0000_0001;
    ref_mem['h8018 >> 3] = {init_word('h8018 >> 3)[63:8], 8'h77};
    ref_mem['h2_0000 >> 3] = 64'h1234;
    ref_mem['h3_0000 >> 3] = 64'h5;

    // random phase with snoops at random times; 24 lines over 4 sets
    for (int i = 0; i < 24; i++) pool.push_back(('h4_0000 >> 6) + (i % 4) + (i / 4) * 64);
    rand_snoops = 1'b1;
    for (int i = 0; i < 600; i++) begin
      longint a;
      word_t  wd;
      logic [7:0] sb;
      grant_s = ($urandom_range(0, 3) == 0);
      a  = pool[$urandom_range(0, pool.size() - 1)] * 64 + longint'($urandom_range(0, 7)) * 8;
      wd = {$urandom, $urandom};
      sb = 8'($urandom);
      if ($urandom_range(0, 2) == 0) begin
        word_t o;
        o = ref_rd(a >> 3);
        for (int b = 0; b < 8; b++) if (sb[b]) o[b*8 +: 8] = wd[b*8 +: 8];
        ref_mem[a >> 3] = o;
        access(1'b1, a, wd, sb, l, cyc);
      end else begin
        access(1'b0, a, '0, '0, l, cyc);
        check(l[(a % 64) / 8 * 64 +: 64] == ref_rd(a >> 3), $sformatf("random read %h", a));
      end
    end
    rand_snoops = 1'b0;
    check(n_snoop > 50, "random phase exercised snoops");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
