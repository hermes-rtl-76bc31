// tb_stride_prefetcher: self-checking test of the stride prefetcher.
// Trains positive and negative strides on different ports (interleaved, so
// the per-port tables must stay apart), a broken stream, a stream that runs
// past the end of memory, and checks that a candidate appears exactly one
// cycle after the confirming access and is held until taken.
module tb_stride_prefetcher;
  import hermes_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              train_valid = 1'b0;
  logic [PORT_W-1:0] train_port  = '0;
  addr_t             train_addr  = '0;
  logic              pf_valid, pf_ready = 1'b0;
  addr_t             pf_addr;

  stride_prefetcher #(.MEM_BYTES(64'd1 << 20)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // one training access; returns with the candidate visible (one cycle later)
  task automatic access(input int port, input longint line);
    @(negedge clk);
    train_valid = 1'b1;
    train_port  = PORT_W'(port);
    train_addr  = ADDR_W'(line * 64 + 8);
    @(negedge clk);
    train_valid = 1'b0;
  endtask

  task automatic take();
    pf_ready = 1'b1;
    @(negedge clk);
    pf_ready = 1'b0;
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(!pf_valid, "no candidate after reset");

    // port 0: stride +2 lines, port 1: stride -1 line, interleaved
    access(0, 100);  access(1, 500);
    access(0, 102);  access(1, 499);
    check(!pf_valid, "a single stride observation is not enough");
    access(0, 104);
    check(pf_valid && pf_addr == ADDR_W'(106 * 64), "port 0 predicts line 106");
    take();
    check(!pf_valid, "candidate cleared once taken");
    access(1, 498);
    check(pf_valid && pf_addr == ADDR_W'(497 * 64), "port 1 predicts line 497 (negative stride)");
    // held while not taken
    repeat (3) @(negedge clk);
    check(pf_valid && pf_addr == ADDR_W'(497 * 64), "candidate held until taken");
    take();

    // broken stream on port 0: 104 -> 111 resets confidence
    access(0, 111);
    check(!pf_valid, "stride change gives no candidate");
    access(0, 118);
    check(pf_valid && pf_addr == ADDR_W'(125 * 64), "new stride +7 learnt after two accesses");
    take();

    // stream running past the end of a 1 MB memory (16384 lines)
    access(2, 16380); access(2, 16382); access(2, 16384);
    check(pf_valid == 1'b0, "candidate beyond memory is dropped");

    // zero stride never prefetches
    access(3, 7); access(3, 7); access(3, 7);
    check(!pf_valid, "repeated line gives no candidate");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
