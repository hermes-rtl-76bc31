// tb_mem_model: behavioural model of one memory channel (a DRAM or an HBM
// stack) for the testbenches. Not synthesizable logic: a sparse store of
// 64-byte lines with a fixed latency. A line never written reads as
// init_line(BASE + local address), so a testbench can predict it. One request
// at a time: the request is taken when valid and ready are high at a clock
// edge, and the answer (read data or write acknowledgement) is a one-cycle
// resp_valid pulse LAT cycles later. ready is low while a request is open.
module tb_mem_model
  import hermes_pkg::*;
#(
  parameter int     LAT  = 10,
  parameter longint BASE = 0
) (
  input  logic  clk,
  input  logic  req_valid,
  output logic  req_ready,
  input  mreq_t req,
  output logic  resp_valid,
  output line_t resp_data
);
  line_t store [longint];
  bit    busy = 1'b0;

  function automatic word_t init_word(longint waddr);
    return 64'hFACE_0000_0000_0000 ^ word_t'(waddr * 64'h9E37_79B9_7F4A_7C15);
  endfunction

  assign req_ready = !busy;

  initial begin
    resp_valid = 1'b0;
    resp_data  = '0;
    forever begin
      @(posedge clk);
      if (req_valid && !busy) begin
        mreq_t  r;
        longint la;
        r    = req;
        busy <= 1'b1;
        la   = longint'(r.addr) >> 6;
        repeat (LAT - 1) @(posedge clk);
        if (r.we) store[la] = r.wdata;
        else if (store.exists(la)) resp_data <= store[la];
        else
          for (int i = 0; i < 8; i++)
            resp_data[i*64 +: 64] <= init_word(((BASE >> 6) + la) * 8 + i);
        resp_valid <= 1'b1;
        @(posedge clk);
        resp_valid <= 1'b0;
        busy <= 1'b0;
      end
    end
  end
endmodule
