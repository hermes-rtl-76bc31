// tb_hermes_full: the memory hierarchy at its full default size (L1 32 KB
// 8-way, L2 256 KB 8-way, L3 8 MB 16-way, 8 GB DRAM + 4 GB HBM map) taken
// through one complete sharing operation:
//   core 0 writes a word (L3 miss -> DRAM, granted M), core 1 reads it
//   (downgrade snoop, value forwarded), the accelerator reads the line
//   (coherent read), the accelerator writes a line in HBM, core 2 reads it
//   back, core 3 reads a word twice (second read is an L1 hit) and every
//   core then reads its own slot of a shared line written by the others.
// It also waits for the tag sweep after reset (8192 cycles for the L3).
module tb_hermes_full;
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

  hermes_top dut (.*);

  tb_mem_model #(.LAT(20))                u_dram (.clk, .req_valid(dram_req_valid),
    .req_ready(dram_req_ready), .req(dram_req), .resp_valid(dram_resp_valid),
    .resp_data(dram_resp_data));
  tb_mem_model #(.LAT(8), .BASE(8 * GB)) u_hbm (.clk, .req_valid(hbm_req_valid),
    .req_ready(hbm_req_ready), .req(hbm_req), .resp_valid(hbm_resp_valid),
    .resp_data(hbm_resp_data));

  function automatic word_t init_word(longint waddr);
    return 64'hFACE_0000_0000_0000 ^ word_t'(waddr * 64'h9E37_79B9_7F4A_7C15);
  endfunction

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic core_op(input int c, input logic we, input longint a, input word_t wd,
                         output word_t d);
    @(negedge clk);
    core_req_valid[c] = 1'b1;
    core_req[c]       = '{we: we, addr: ADDR_W'(a), wdata: wd, wstrb: 8'hFF};
    @(posedge clk);
    while (!core_req_ready[c]) @(posedge clk);
    @(negedge clk);
    core_req_valid[c] = 1'b0;
    while (!core_resp_valid[c]) @(negedge clk);
    d = core_resp_rdata[c];
  endtask

  task automatic acc_op(input creq_op_t op, input longint a, input line_t wd, output line_t d);
    @(negedge clk);
    acc_req_valid = 1'b1;
    acc_req       = '{op: op, addr: ADDR_W'(a), data: wd};
    @(posedge clk);
    while (!acc_req_ready) @(posedge clk);
    @(negedge clk);
    acc_req_valid = 1'b0;
    while (!acc_resp_valid) @(negedge clk);
    d = acc_resp.data;
  endtask

  int n_l1hit = 0;
  always @(negedge clk) n_l1hit += $countones(l1_hit_o);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t d;
    line_t l, w;
    int    t0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    t0 = 0;
    while (!ready_o) begin
      @(posedge clk);
      t0++;
    end
    check(t0 >= 8192, $sformatf("L3 tag sweep takes one cycle per set (%0d cycles)", t0));

    core_op(0, 1'b1, 'h1234_5640, 64'hCAFE_F00D_0000_0001, d);
    core_op(1, 1'b0, 'h1234_5640, '0, d);
    check(d == 64'hCAFE_F00D_0000_0001, "core 1 reads core 0's write");
    acc_op(CR_RD, 'h1234_5640, '0, l);
    check(l[0 +: 64] == 64'hCAFE_F00D_0000_0001, "accelerator reads core 0's write");
    check(l[64 +: 64] == init_word(('h1234_5640 >> 3) + 1), "rest of the line from DRAM");

    for (int j = 0; j < 16; j++) w[j*32 +: 32] = 32'h1000 + j;
    acc_op(CR_WR, 10 * GB + 'h4000, w, l);
    core_op(2, 1'b0, 10 * GB + 'h4018, '0, d);
    check(d == w[3*64 +: 64], "core 2 reads the accelerator's line (HBM)");

    core_op(3, 1'b0, 9 * GB + 'h80, '0, d);
    check(d == init_word((9 * GB + 'h80) >> 3), "core 3 reads untouched HBM data");
    t0 = n_l1hit;
    core_op(3, 1'b0, 9 * GB + 'h88, '0, d);
    @(negedge clk);
    check(d == init_word((9 * GB + 'h88) >> 3) && n_l1hit == t0 + 1, "second read hits in the L1");

    fork
      core_op(0, 1'b1, 'h2000_0000, 64'h10, d);
      core_op(1, 1'b1, 'h2000_0008, 64'h11, d);
      core_op(2, 1'b1, 'h2000_0010, 64'h12, d);
      core_op(3, 1'b1, 'h2000_0018, 64'h13, d);
    join
    for (int c = 0; c < NCORES; c++) begin
      core_op(c, 1'b0, 'h2000_0000 + longint'((c + 1) % 4) * 8, '0, d);
      check(d == 64'h10 + word_t'((c + 1) % 4), "shared line holds every core's word");
    end
    check(dram_lines > 0 && hbm_lines > 0 && !mem_err_o, "both channels used");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
