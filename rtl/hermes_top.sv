// hermes_top: the memory hierarchy of a four-core RISC-V system with a
// matrix accelerator (Gemmini class) and a hybrid DRAM + HBM main memory.
//
//   core i --word--> l1_cache (32 KB, 8-way, write-through)
//                    l2_cache (256 KB, 8-way, MESI, write-back)   x4
//                         |  GetS/GetM/PutM       ^ snoops
//   accelerator --line--> l3_cache (8 MB, 16-way, shared, inclusive,
//                                   MESI directory, stride prefetcher)
//                         |
//                    hybrid_mem_ctrl --> DRAM channel (8 GB)
//                                    --> HBM channel  (4 GB)
//
// The cores, the accelerator and the memory devices are outside this module;
// their connections are its ports. The accelerator reaches the shared L3
// through its own coherent port (line reads and full-line writes), so it sees
// the cores' latest data and the cores see its results. Sizes, associativity,
// core count, MESI and the DRAM/HBM capacities follow the evaluated
// configuration; interfaces, line size and timing are this design's own.
//
// After reset every cache sweeps its tags clear (one set per cycle; the L3's
// 8192 sets take longest); ready_o rises when all are done. Requests may be
// issued before that and simply wait.
module hermes_top
  import hermes_pkg::*;
#(
  parameter int     L1_BYTES   = 32 * 1024,
  parameter int     L1_WAYS    = 8,
  parameter int     L2_BYTES   = 256 * 1024,
  parameter int     L2_WAYS    = 8,
  parameter int     L3_BYTES   = 8 * 1024 * 1024,
  parameter int     L3_WAYS    = 16,
  parameter longint DRAM_BYTES = 64'd8 << 30,
  parameter longint HBM_BYTES  = 64'd4 << 30,
  parameter bit     PREFETCH   = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  // cores
  input  logic [NCORES-1:0] core_req_valid,
  output logic [NCORES-1:0] core_req_ready,
  input  core_req_t         core_req [NCORES],
  output logic [NCORES-1:0] core_resp_valid,
  output word_t             core_resp_rdata [NCORES],
  // accelerator
  input  logic              acc_req_valid,
  output logic              acc_req_ready,
  input  creq_t             acc_req,
  output logic              acc_resp_valid,
  output cresp_t            acc_resp,
  // DRAM channel
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output mreq_t             dram_req,
  input  logic              dram_resp_valid,
  input  line_t             dram_resp_data,
  // HBM channel
  output logic              hbm_req_valid,
  input  logic              hbm_req_ready,
  output mreq_t             hbm_req,
  input  logic              hbm_resp_valid,
  input  line_t             hbm_resp_data,
  // status
  output logic              ready_o,
  output logic              mem_err_o,
  output logic [31:0]       dram_lines,
  output logic [31:0]       hbm_lines,
  // event pulses, for performance counting
  output logic [NCORES-1:0] l1_hit_o,
  output logic [NCORES-1:0] l2_hit_o,
  output logic              l3_hit_o,
  output logic              l3_miss_o,
  output logic              pf_fill_o,
  output logic              pf_hit_o,
  output logic              l3_wb_o
);
  // L1 <-> L2
  logic [NCORES-1:0] l2_req_valid, l2_req_ready, l2_resp_valid, inv_valid;
  core_req_t         l2_req   [NCORES];
  line_t             l2_resp  [NCORES];
  addr_t             inv_addr [NCORES];
  logic [NCORES-1:0] l1_rdy, l2_rdy;

  // L2/accelerator <-> L3
  logic [NPORTS-1:0] creq_valid, creq_ready, cresp_valid;
  creq_t             creq [NPORTS];
  cresp_t            cresp;
  logic [NCORES-1:0] snoop_valid, snoop_ack;
  snoop_t            snoop;
  snoop_resp_t       snoop_resp [NCORES];

  // L3 <-> memory controller
  logic  mreq_valid, mreq_ready, mresp_valid;
  mreq_t mreq;
  line_t mresp_data;
  logic  l3_rdy;

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    l1_cache #(.SIZE_BYTES(L1_BYTES), .WAYS(L1_WAYS)) u_l1 (
      .clk, .rst_n,
      .core_req_valid (core_req_valid[c]),
      .core_req_ready (core_req_ready[c]),
      .core_req       (core_req[c]),
      .core_resp_valid(core_resp_valid[c]),
      .core_resp_rdata(core_resp_rdata[c]),
      .l2_req_valid   (l2_req_valid[c]),
      .l2_req_ready   (l2_req_ready[c]),
      .l2_req         (l2_req[c]),
      .l2_resp_valid  (l2_resp_valid[c]),
      .l2_resp_line   (l2_resp[c]),
      .inv_valid      (inv_valid[c]),
      .inv_addr       (inv_addr[c]),
      .ready_o        (l1_rdy[c]),
      .hit_o          (l1_hit_o[c])
    );

    l2_cache #(.SIZE_BYTES(L2_BYTES), .WAYS(L2_WAYS)) u_l2 (
      .clk, .rst_n,
      .l1_req_valid (l2_req_valid[c]),
      .l1_req_ready (l2_req_ready[c]),
      .l1_req       (l2_req[c]),
      .l1_resp_valid(l2_resp_valid[c]),
      .l1_resp_line (l2_resp[c]),
      .l1_inv_valid (inv_valid[c]),
      .l1_inv_addr  (inv_addr[c]),
      .creq_valid   (creq_valid[c]),
      .creq_ready   (creq_ready[c]),
      .creq         (creq[c]),
      .cresp_valid  (cresp_valid[c]),
      .cresp        (cresp),
      .snoop_valid  (snoop_valid[c]),
      .snoop        (snoop),
      .snoop_ack    (snoop_ack[c]),
      .snoop_resp   (snoop_resp[c]),
      .ready_o      (l2_rdy[c]),
      .hit_o        (l2_hit_o[c])
    );
  end

  // accelerator port
  assign creq_valid[NCORES] = acc_req_valid;
  assign acc_req_ready      = creq_ready[NCORES];
  assign creq[NCORES]       = acc_req;
  assign acc_resp_valid     = cresp_valid[NCORES];
  assign acc_resp           = cresp;

  l3_cache #(.SIZE_BYTES(L3_BYTES), .WAYS(L3_WAYS), .MEM_BYTES(DRAM_BYTES + HBM_BYTES),
             .PF_EN(PREFETCH)) u_l3 (
    .clk, .rst_n,
    .creq_valid, .creq_ready, .creq, .cresp_valid, .cresp,
    .snoop_valid, .snoop, .snoop_ack, .snoop_resp,
    .mem_req_valid (mreq_valid),
    .mem_req_ready (mreq_ready),
    .mem_req       (mreq),
    .mem_resp_valid(mresp_valid),
    .mem_resp_data (mresp_data),
    .ready_o       (l3_rdy),
    .hit_o         (l3_hit_o),
    .miss_o        (l3_miss_o),
    .pf_fill_o     (pf_fill_o),
    .pf_hit_o      (pf_hit_o),
    .wb_o          (l3_wb_o)
  );

  hybrid_mem_ctrl #(.DRAM_BYTES(DRAM_BYTES), .HBM_BYTES(HBM_BYTES)) u_mem (
    .clk, .rst_n,
    .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .resp_valid(mresp_valid), .resp_data(mresp_data), .err_o(mem_err_o),
    .dram_req_valid, .dram_req_ready, .dram_req, .dram_resp_valid, .dram_resp_data,
    .hbm_req_valid,  .hbm_req_ready,  .hbm_req,  .hbm_resp_valid,  .hbm_resp_data,
    .dram_lines, .hbm_lines
  );

  assign ready_o = (&l1_rdy) && (&l2_rdy) && l3_rdy;
endmodule
