// tb_ml_kernels: the three workload classes of the evaluation (CNN, RNN,
// Transformer), each reduced to one small integer kernel, run through the
// hierarchy at its full default size. The testbench plays the four cores
// (they load operands, multiply-accumulate, store results through their L1s)
// and the accelerator (it writes the inputs as full lines and reads the
// results back). Weights are placed in HBM, activations in DRAM.
//   CNN:         3x3 convolution of a 16x16 input (14x14 outputs), output
//                rows split over the cores
//   RNN:         4 steps of h(t) = W h(t-1) + x(t), W 16x16; every step all
//                cores read the whole state the others wrote in the step before
//   Transformer: attention scores S = Q K^T with 16x16 Q and K
// Elements are 64-bit integers, one per word. Every result is compared with
// a reference computed directly in the testbench. Hit counts at each level
// and prefetch hits are printed per kernel.
module tb_ml_kernels;
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

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- ports ----------------
  int n_load [NCORES];
  initial for (int c = 0; c < NCORES; c++) n_load[c] = 0;

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
    if (!we) n_load[c]++;
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

  // accelerator writes n words (n a multiple of 8) as full lines
  task automatic acc_put(input longint base, input word_t v [], input int n);
    line_t l, d;
    for (int i = 0; i < n; i += 8) begin
      for (int k = 0; k < 8; k++) l[k*64 +: 64] = v[i + k];
      acc_op(CR_WR, base + longint'(i) * 8, l, d);
    end
  endtask

  // accelerator reads n words back and compares them with the reference
  task automatic acc_check(input longint base, input word_t v [], input int n, input string what);
    line_t d;
    int    bad;
    bad = 0;
    for (int i = 0; i < n; i += 8) begin
      acc_op(CR_RD, base + longint'(i) * 8, '0, d);
      for (int k = 0; k < 8 && i + k < n; k++) if (d[k*64 +: 64] != v[i + k]) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d wrong words", what, bad));
  endtask

  // ---------------- counters ----------------
  int n_l1hit = 0, n_l2hit = 0, n_l3hit = 0, n_l3miss = 0, n_pfhit = 0;
  always @(negedge clk) begin
    n_l1hit  += $countones(l1_hit_o);
    n_l2hit  += $countones(l2_hit_o);
    n_l3hit  += int'(l3_hit_o);
    n_l3miss += int'(l3_miss_o);
    n_pfhit  += int'(pf_hit_o);
  end

  int s_l1, s_l2, s_l3, s_miss, s_pf, s_ld;
  task automatic mark();
    s_l1 = n_l1hit; s_l2 = n_l2hit; s_l3 = n_l3hit; s_miss = n_l3miss; s_pf = n_pfhit;
    s_ld = n_load[0] + n_load[1] + n_load[2] + n_load[3];
  endtask
  task automatic report(input string name);
    int ld;
    ld = n_load[0] + n_load[1] + n_load[2] + n_load[3] - s_ld;
    $display("%s: %0d core loads, L1 hits %0d (%0d%%), L2 hits %0d, L3 hits %0d, L3 misses %0d, prefetch hits %0d",
             name, ld, n_l1hit - s_l1, (n_l1hit - s_l1) * 100 / ld, n_l2hit - s_l2,
             n_l3hit - s_l3, n_l3miss - s_miss, n_pfhit - s_pf);
    check(n_l1hit - s_l1 > 0, {name, ": data reuse in the L1"});
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- CNN: 3x3 convolution ----------------
  localparam int     IN = 16, KS = 3, ON = IN - KS + 1;
  localparam longint CONV_IN = 'h100_0000, CONV_W = 8 * GB, CONV_OUT = 'h200_0000;
  word_t conv_in [], conv_w [], conv_out [];

  task automatic conv_core(input int c);
    word_t x, w, acc, d;
    for (int r = c; r < ON; r += NCORES)
      for (int q = 0; q < ON; q++) begin
        acc = '0;
        for (int i = 0; i < KS; i++)
          for (int j = 0; j < KS; j++) begin
            core_op(c, 1'b0, CONV_IN + longint'((r + i) * IN + q + j) * 8, '0, x);
            core_op(c, 1'b0, CONV_W + longint'(i * KS + j) * 8, '0, w);
            acc += x * w;
          end
        core_op(c, 1'b1, CONV_OUT + longint'(r * ON + q) * 8, acc, d);
      end
  endtask

  // ---------------- RNN: h(t) = W h(t-1) + x(t) ----------------
  localparam int     HN = 16, STEPS = 4;
  localparam longint RNN_W = 8 * GB + 'h10_0000, RNN_H = 'h300_0000, RNN_X = 'h380_0000;
  word_t rnn_w [], rnn_x [], rnn_h [];

  task automatic rnn_core(input int c, input int t);
    word_t acc, w, h, x, d;
    for (int r = c; r < HN; r += NCORES) begin
      core_op(c, 1'b0, RNN_X + longint'(t * HN + r) * 8, '0, x);
      acc = x;
      for (int k = 0; k < HN; k++) begin
        core_op(c, 1'b0, RNN_W + longint'(r * HN + k) * 8, '0, w);
        core_op(c, 1'b0, RNN_H + longint'(t * HN + k) * 8, '0, h);
        acc += w * h;
      end
      core_op(c, 1'b1, RNN_H + longint'((t + 1) * HN + r) * 8, acc, d);
    end
  endtask

  // ---------------- Transformer: S = Q K^T ----------------
  localparam int     AN = 16;
  localparam longint ATT_Q = 'h400_0000, ATT_K = 8 * GB + 'h20_0000, ATT_S = 'h500_0000;
  word_t att_q [], att_k [], att_s [];

  task automatic att_core(input int c);
    word_t acc, a, b, d;
    for (int i = c; i < AN; i += NCORES)
      for (int j = 0; j < AN; j++) begin
        acc = '0;
        for (int k = 0; k < AN; k++) begin
          core_op(c, 1'b0, ATT_Q + longint'(i * AN + k) * 8, '0, a);
          core_op(c, 1'b0, ATT_K + longint'(j * AN + k) * 8, '0, b);
          acc += a * b;
        end
        core_op(c, 1'b1, ATT_S + longint'(i * AN + j) * 8, acc, d);
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ready_o);

    // CNN
    conv_in  = new[IN * IN];
    conv_w   = new[16];
    conv_out = new[ON * ON];
    foreach (conv_in[i]) conv_in[i] = word_t'($urandom_range(0, 255));
    foreach (conv_w[i])  conv_w[i]  = (i < KS * KS) ? word_t'($urandom_range(0, 15)) - 7 : '0;
    for (int r = 0; r < ON; r++)
      for (int q = 0; q < ON; q++) begin
        conv_out[r * ON + q] = '0;
        for (int i = 0; i < KS; i++)
          for (int j = 0; j < KS; j++)
            conv_out[r * ON + q] += conv_in[(r + i) * IN + q + j] * conv_w[i * KS + j];
      end
    acc_put(CONV_IN, conv_in, IN * IN);
    acc_put(CONV_W, conv_w, 16);
    mark();
    fork
      conv_core(0); conv_core(1); conv_core(2); conv_core(3);
    join
    report("CNN (3x3 convolution)");
    acc_check(CONV_OUT, conv_out, ON * ON, "CNN outputs read by the accelerator");

    // RNN
    rnn_w = new[HN * HN];
    rnn_x = new[STEPS * HN];
    rnn_h = new[(STEPS + 1) * HN];
    foreach (rnn_w[i]) rnn_w[i] = word_t'($urandom_range(0, 7)) - 3;
    foreach (rnn_x[i]) rnn_x[i] = word_t'($urandom_range(0, 99));
    for (int k = 0; k < HN; k++) rnn_h[k] = word_t'(k);
    for (int t = 0; t < STEPS; t++)
      for (int r = 0; r < HN; r++) begin
        rnn_h[(t + 1) * HN + r] = rnn_x[t * HN + r];
        for (int k = 0; k < HN; k++)
          rnn_h[(t + 1) * HN + r] += rnn_w[r * HN + k] * rnn_h[t * HN + k];
      end
    acc_put(RNN_W, rnn_w, HN * HN);
    acc_put(RNN_X, rnn_x, STEPS * HN);
    begin
      word_t h0 [];
      h0 = new[HN];
      for (int k = 0; k < HN; k++) h0[k] = rnn_h[k];
      acc_put(RNN_H, h0, HN);
    end
    mark();
    for (int t = 0; t < STEPS; t++)
      fork
        rnn_core(0, t); rnn_core(1, t); rnn_core(2, t); rnn_core(3, t);
      join
    report("RNN (4 recurrent steps)");
    acc_check(RNN_H, rnn_h, (STEPS + 1) * HN, "RNN states read by the accelerator");

    // Transformer
    att_q = new[AN * AN];
    att_k = new[AN * AN];
    att_s = new[AN * AN];
    foreach (att_q[i]) att_q[i] = word_t'($urandom_range(0, 31)) - 16;
    foreach (att_k[i]) att_k[i] = word_t'($urandom_range(0, 31)) - 16;
    for (int i = 0; i < AN; i++)
      for (int j = 0; j < AN; j++) begin
        att_s[i * AN + j] = '0;
        for (int k = 0; k < AN; k++) att_s[i * AN + j] += att_q[i * AN + k] * att_k[j * AN + k];
      end
    acc_put(ATT_Q, att_q, AN * AN);
    acc_put(ATT_K, att_k, AN * AN);
    mark();
    fork
      att_core(0); att_core(1); att_core(2); att_core(3);
    join
    report("Transformer (attention scores Q K^T)");
    acc_check(ATT_S, att_s, AN * AN, "attention scores read by the accelerator");

    check(!mem_err_o && hbm_lines > 0 && dram_lines > 0, "weights in HBM, activations in DRAM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
