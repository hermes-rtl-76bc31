// tb_hybrid_mem_ctrl: self-checking test of the DRAM/HBM address split.
// Two simple channel models (different latencies, DRAM ready only every other
// cycle) answer reads with a pattern of the local address. The test sends
// reads and writes at the edges of both ranges and above them, and checks
// which channel got each request, the local address, the returned data, the
// error flag and the per-channel line counters.
module tb_hybrid_mem_ctrl;
  import hermes_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  req_valid = 1'b0, req_ready, resp_valid, err_o;
  mreq_t req = '0;
  line_t resp_data;
  logic  dram_req_valid, dram_req_ready, dram_resp_valid;
  mreq_t dram_req;
  line_t dram_resp_data;
  logic  hbm_req_valid, hbm_req_ready, hbm_resp_valid;
  mreq_t hbm_req;
  line_t hbm_resp_data;
  logic [31:0] dram_lines, hbm_lines;

  hybrid_mem_ctrl dut (.*);

  // channel models
  int    dram_cnt = 0, hbm_cnt = 0;
  addr_t dram_last, hbm_last;
  logic  dram_tick = 1'b0;
  always_ff @(posedge clk) dram_tick <= ~dram_tick;
  assign dram_req_ready = dram_tick;
  assign hbm_req_ready  = 1'b1;

  function automatic line_t pattern(addr_t a, int chan);
    return {8{32'(a[ADDR_W-1:OFF_W]), 32'(chan)}};
  endfunction

  initial begin
    dram_resp_valid = 1'b0;
    hbm_resp_valid  = 1'b0;
    dram_resp_data  = '0;
    hbm_resp_data   = '0;
    forever begin
      @(posedge clk);
      if (dram_req_valid && dram_req_ready) begin
        dram_cnt++;
        dram_last = dram_req.addr;
        repeat (6) @(posedge clk);
        dram_resp_valid <= 1'b1;
        dram_resp_data  <= pattern(dram_last, 1);
        @(posedge clk);
        dram_resp_valid <= 1'b0;
      end else if (hbm_req_valid && hbm_req_ready) begin
        hbm_cnt++;
        hbm_last = hbm_req.addr;
        repeat (2) @(posedge clk);
        hbm_resp_valid <= 1'b1;
        hbm_resp_data  <= pattern(hbm_last, 2);
        @(posedge clk);
        hbm_resp_valid <= 1'b0;
      end
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // issue one request and wait for its answer
  task automatic xfer(input logic we, input longint a, output line_t d, output bit err);
    @(negedge clk);
    req_valid = 1'b1;
    req.we    = we;
    req.addr  = ADDR_W'(a);
    req.wdata = {16{32'hC0FFEE00}};
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 1'b0;
    err = 1'b0;
    while (!resp_valid) @(negedge clk);
    d   = resp_data;
    err = err_o;
  endtask

  localparam longint GB = 64'd1 << 30;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t d;
    bit    e;
    int    d0, h0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // lowest DRAM line
    d0 = dram_cnt; h0 = hbm_cnt;
    xfer(1'b0, 0, d, e);
    check(dram_cnt == d0 + 1 && hbm_cnt == h0, "address 0 goes to DRAM");
    check(d == pattern(0, 1) && !e, "DRAM data returned for address 0");
    // top DRAM line
    xfer(1'b0, 8*GB - 64, d, e);
    check(dram_last == ADDR_W'(8*GB - 64), "DRAM sees the address unchanged");
    check(d == pattern(ADDR_W'(8*GB - 64), 1), "DRAM data at top of DRAM");
    // first HBM line
    d0 = dram_cnt; h0 = hbm_cnt;
    xfer(1'b0, 8*GB, d, e);
    check(hbm_cnt == h0 + 1 && dram_cnt == d0, "8 GB goes to HBM");
    check(hbm_last == '0, "HBM local address 0 at 8 GB");
    check(d == pattern(0, 2) && !e, "HBM data returned");
    // last HBM line, a write
    xfer(1'b1, 12*GB - 64, d, e);
    check(hbm_last == ADDR_W'(4*GB - 64), "HBM local address of the top line");
    check(hbm_cnt == h0 + 2, "HBM write routed");
    // beyond both devices
    d0 = dram_cnt; h0 = hbm_cnt;
    xfer(1'b0, 12*GB, d, e);
    check(e && d == '0, "address past 12 GB answered with error and zero data");
    check(dram_cnt == d0 && hbm_cnt == h0, "no device touched by an unmapped address");
    xfer(1'b1, 16*GB - 64, d, e);
    check(e, "top of the address space is unmapped");

    // random traffic against a reference router
    for (int i = 0; i < 40; i++) begin
      longint a;
      a  = longint'($urandom_range(0, 255)) * (GB / 16) + 64 * longint'($urandom_range(0, 15));
      d0 = dram_cnt; h0 = hbm_cnt;
      xfer(i[0], a, d, e);
      if (a < 8*GB)
        check(dram_cnt == d0 + 1 && dram_last == ADDR_W'(a) && d == pattern(ADDR_W'(a), 1),
              "random DRAM access");
      else if (a < 12*GB)
        check(hbm_cnt == h0 + 1 && hbm_last == ADDR_W'(a - 8*GB) &&
              d == pattern(ADDR_W'(a - 8*GB), 2), "random HBM access");
      else
        check(e && dram_cnt == d0 && hbm_cnt == h0, "random unmapped access");
    end
    @(negedge clk);
    check(dram_lines == 32'(dram_cnt) && hbm_lines == 32'(hbm_cnt), "line counters");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
