// hermes_pkg: types and constants shared by the memory hierarchy.
//
// The hierarchy moves 64-byte lines between levels and 64-bit words between a
// core and its L1. The physical address is 34 bits wide, enough for the 12 GB
// of the hybrid memory (8 GB DRAM + 4 GB HBM, as in the evaluated
// configuration). Line size, word size and the message formats below are this
// design's own choices; the MESI state names follow the coherence protocol the
// design uses.
package hermes_pkg;

  localparam int ADDR_W     = 34;            // 2^34 = 16 GB > 12 GB
  localparam int LINE_BYTES = 64;
  localparam int OFF_W      = 6;             // log2(LINE_BYTES)
  localparam int LINE_W     = 8 * LINE_BYTES;
  localparam int WORD_W     = 64;
  localparam int NCORES     = 4;             // four RISC-V cores
  localparam int NPORTS     = NCORES + 1;    // cores + accelerator port
  localparam int PORT_W     = 3;             // holds 0..NPORTS-1

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [WORD_W-1:0] word_t;

  // MESI line state held by a private (L2) cache
  typedef enum logic [1:0] {
    MESI_I = 2'd0,
    MESI_S = 2'd1,
    MESI_E = 2'd2,
    MESI_M = 2'd3
  } mesi_t;

  // Requests a private cache or the accelerator sends to the shared L3
  typedef enum logic [2:0] {
    CR_GETS = 3'd0,   // read, wants S or E
    CR_GETM = 3'd1,   // write, wants M (always answered with the line)
    CR_PUTM = 3'd2,   // write back an M line on eviction
    CR_RD   = 3'd3,   // accelerator: coherent uncached line read
    CR_WR   = 3'd4    // accelerator: coherent uncached full-line write
  } creq_op_t;

  typedef enum logic {
    SNP_INV  = 1'b0,  // invalidate, return the line if dirty
    SNP_DOWN = 1'b1   // downgrade E/M to S, return the line if dirty
  } snoop_op_t;

  // word request from a core (and from an L1 to its L2)
  typedef struct packed {
    logic       we;
    addr_t      addr;
    word_t      wdata;
    logic [7:0] wstrb;
  } core_req_t;

  typedef struct packed {
    creq_op_t op;
    addr_t    addr;
    line_t    data;
  } creq_t;

  typedef struct packed {
    mesi_t grant;
    line_t data;
  } cresp_t;

  typedef struct packed {
    snoop_op_t op;
    addr_t     addr;
  } snoop_t;

  typedef struct packed {
    logic  dirty;
    line_t data;
  } snoop_resp_t;

  // line request to memory (reads and writes are both acknowledged)
  typedef struct packed {
    logic  we;
    addr_t addr;
    line_t wdata;
  } mreq_t;

  // byte-masked merge of a 64-bit word into a line
  function automatic line_t merge_word(line_t line, addr_t addr, word_t wdata,
                                       logic [7:0] wstrb);
    line_t r = line;
    int unsigned w = int'(addr[OFF_W-1:3]);
    for (int b = 0; b < 8; b++)
      if (wstrb[b]) r[w*64 + b*8 +: 8] = wdata[b*8 +: 8];
    return r;
  endfunction

  function automatic word_t pick_word(line_t line, addr_t addr);
    return line[int'(addr[OFF_W-1:3])*64 +: 64];
  endfunction

endpackage
