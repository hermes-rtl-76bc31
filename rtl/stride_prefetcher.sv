// stride_prefetcher: per-requester stride detector that asks the shared L3 to
// pre-load the next line of a strided stream.
//
// Stride prefetching is the prefetching scheme the design names; the table
// organisation, the confirmation rule and the prefetch distance are this
// design's own choices. One entry per L3 port (four cores and the accelerator)
// keeps the last line address, the last line stride and a 2-bit saturating
// confidence. A demand access at line L with stride d = L - last:
//   d == stride && d != 0 : confidence++, and once it reaches CONF_MIN the
//                           line L + d is offered for prefetching
//   otherwise             : stride <= d, confidence <= 0
// Prefetch candidates outside the MEM_BYTES address space are dropped.
//
// Interface: train_valid/port/addr is a one-cycle observation of a demand
// access. pf_valid/pf_addr holds one candidate until pf_ready; a newer
// candidate replaces one not yet taken. A candidate appears the cycle after
// the training access.
module stride_prefetcher
  import hermes_pkg::*;
#(
  parameter int      NP        = NPORTS,
  parameter int      CONF_MIN  = 1,
  parameter longint  MEM_BYTES = 64'd12 << 30     // 8 GB DRAM + 4 GB HBM
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              train_valid,
  input  logic [PORT_W-1:0] train_port,
  input  addr_t             train_addr,
  output logic              pf_valid,
  output addr_t             pf_addr,
  input  logic              pf_ready
);
  localparam int LA_W = ADDR_W - OFF_W;           // line address width
  typedef logic signed [LA_W:0] stride_t;          // one extra bit for the sign

  typedef struct packed {
    logic [LA_W-1:0] last;
    stride_t         stride;
    logic [1:0]      conf;
  } entry_t;

  entry_t tbl [NP];

  logic [LA_W-1:0] line;
  entry_t          e;
  stride_t         d;
  logic            match;
  logic [1:0]      conf_n;
  logic [LA_W:0]   cand;          // may run past the address space

  assign line   = train_addr[ADDR_W-1:OFF_W];
  assign e      = tbl[train_port];
  assign d      = stride_t'({1'b0, line}) - stride_t'({1'b0, e.last});
  assign match  = (d == e.stride) && (d != '0);
  assign conf_n = match ? ((e.conf == 2'd3) ? 2'd3 : e.conf + 2'd1) : 2'd0;
  assign cand   = (LA_W+1)'({1'b0, line}) + (LA_W+1)'(d);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++) tbl[p] <= '0;
      pf_valid <= 1'b0;
      pf_addr  <= '0;
    end else begin
      if (pf_valid && pf_ready) pf_valid <= 1'b0;
      if (train_valid && int'(train_port) < NP) begin
        tbl[train_port].last   <= line;
        tbl[train_port].stride <= match ? e.stride : d;
        tbl[train_port].conf   <= conf_n;
        if (match && int'(conf_n) >= CONF_MIN && !cand[LA_W] &&
            {cand[LA_W-1:0], {OFF_W{1'b0}}} < ADDR_W'(MEM_BYTES)) begin
          pf_valid <= 1'b1;
          pf_addr  <= {cand[LA_W-1:0], {OFF_W{1'b0}}};
        end
      end
    end
  end
endmodule
