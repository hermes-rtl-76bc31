// l1_cache: private, per-core L1 data cache (32 KB, 8-way by default).
//
// The size and associativity are those of the evaluated configuration. The
// organisation is this design's own: 64-byte lines, true LRU, write-through
// with write-no-allocate, read-allocate. Because the L1 never holds dirty data
// it keeps only a valid bit per line; the MESI state lives in the L2 below,
// which keeps the L1 inclusive by sending back-invalidations (inv_valid) when
// it loses or evicts a line.
//
// Interface: one blocking word request at a time from the core
// (core_req_valid/ready, then one core_resp_valid pulse with the read data or
// the write acknowledgement). Towards the L2 the same word request format is
// used; a read is answered with a whole line, a write with an acknowledgement.
// inv_valid/inv_addr is a one-cycle invalidation that is always accepted.
//
// Timing: after the tag/data sweep that follows reset (SETS cycles), a read
// hit is answered 2 cycles after it is accepted (accept, lookup, respond); a
// miss and every write take the L2's time on top of that. Tags and data are
// memories with a combinational read port.
module l1_cache
  import hermes_pkg::*;
#(
  parameter int SIZE_BYTES = 32 * 1024,
  parameter int WAYS       = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  // core side
  input  logic      core_req_valid,
  output logic      core_req_ready,
  input  core_req_t core_req,
  output logic      core_resp_valid,
  output word_t     core_resp_rdata,
  // L2 side
  output logic      l2_req_valid,
  input  logic      l2_req_ready,
  output core_req_t l2_req,
  input  logic      l2_resp_valid,
  input  line_t     l2_resp_line,
  // back-invalidation from the L2
  input  logic      inv_valid,
  input  addr_t     inv_addr,
  // status
  output logic      ready_o,
  output logic      hit_o        // pulse: request served without the L2
);
  localparam int SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int SET_W = $clog2(SETS);
  localparam int TAG_W = ADDR_W - OFF_W - SET_W;
  localparam int AW    = $clog2(WAYS);

  typedef struct packed {
    logic [WAYS-1:0]       valid;
    logic [WAYS*TAG_W-1:0] tags;
    logic [WAYS*AW-1:0]    ages;
  } meta_t;

  meta_t meta_mem [SETS];
  line_t data_mem [SETS*WAYS];

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_LOOKUP, S_L2REQ, S_L2WAIT} state_t;
  state_t state;

  core_req_t          req;
  logic [SET_W-1:0]   init_set;
  logic [AW-1:0]      fill_way;

  // current set
  logic [SET_W-1:0] set_idx;
  logic [TAG_W-1:0] tag;
  meta_t            m;
  logic             hit;
  logic [AW-1:0]    hit_way, victim, touch;
  logic [WAYS*AW-1:0] ages_upd;

  assign set_idx = req.addr[OFF_W +: SET_W];
  assign tag     = req.addr[ADDR_W-1 -: TAG_W];
  assign m       = meta_mem[set_idx];

  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (m.valid[w] && m.tags[w*TAG_W +: TAG_W] == tag) begin
        hit = 1'b1;
        hit_way = AW'(w);
      end
  end

  assign touch = (state == S_LOOKUP) ? hit_way : fill_way;

  lru_ctrl #(.WAYS(WAYS)) u_lru (
    .ages_in (m.ages), .valid(m.valid), .touch(touch),
    .ages_out(ages_upd), .victim(victim)
  );

  // invalidation lookup
  logic [SET_W-1:0] inv_set;
  meta_t            inv_m, inv_m_new;
  assign inv_set = inv_addr[OFF_W +: SET_W];
  assign inv_m   = meta_mem[inv_set];
  always_comb begin
    inv_m_new = inv_m;
    for (int w = 0; w < WAYS; w++)
      if (inv_m.tags[w*TAG_W +: TAG_W] == inv_addr[ADDR_W-1 -: TAG_W])
        inv_m_new.valid[w] = 1'b0;
  end

  assign core_req_ready = (state == S_IDLE) && !inv_valid;
  assign ready_o        = (state != S_INIT);
  assign l2_req_valid   = (state == S_L2REQ);
  assign l2_req         = req.we ? req
                        : '{we: 1'b0, addr: {req.addr[ADDR_W-1:OFF_W], {OFF_W{1'b0}}},
                            wdata: '0, wstrb: '0};

  // meta/data write port (one each per cycle)
  always_ff @(posedge clk) begin
    if (state == S_INIT) begin
      meta_t z;
      z.valid = '0;
      z.tags  = '0;
      for (int w = 0; w < WAYS; w++) z.ages[w*AW +: AW] = AW'(w);
      meta_mem[init_set] <= z;
    end else if (inv_valid) begin
      meta_mem[inv_set] <= inv_m_new;
    end else if (state == S_LOOKUP && hit) begin
      meta_t n;
      n = m;
      n.ages = ages_upd;
      meta_mem[set_idx] <= n;
      if (req.we)
        data_mem[{set_idx, hit_way}] <=
          merge_word(data_mem[{set_idx, hit_way}], req.addr, req.wdata, req.wstrb);
    end else if (state == S_L2WAIT && l2_resp_valid && !req.we) begin
      meta_t n;
      n = m;
      n.valid[fill_way] = 1'b1;
      n.tags[fill_way*TAG_W +: TAG_W] = tag;
      n.ages = ages_upd;
      meta_mem[set_idx] <= n;
      data_mem[{set_idx, fill_way}] <= l2_resp_line;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_INIT;
      init_set        <= '0;
      req             <= '0;
      fill_way        <= '0;
      core_resp_valid <= 1'b0;
      core_resp_rdata <= '0;
      hit_o           <= 1'b0;
    end else begin
      core_resp_valid <= 1'b0;
      hit_o           <= 1'b0;
      case (state)
        S_INIT: begin
          init_set <= init_set + 1'b1;
          if (init_set == SET_W'(SETS-1)) state <= S_IDLE;
        end
        S_IDLE:
          if (core_req_valid && !inv_valid) begin
            req   <= core_req;
            state <= S_LOOKUP;
          end
        S_LOOKUP:
          if (!inv_valid) begin
            if (hit && !req.we) begin
              core_resp_valid <= 1'b1;
              core_resp_rdata <= pick_word(data_mem[{set_idx, hit_way}], req.addr);
              hit_o           <= 1'b1;
              state           <= S_IDLE;
            end else begin
              fill_way <= victim;
              state    <= S_L2REQ;
            end
          end
        S_L2REQ:
          if (l2_req_ready) state <= S_L2WAIT;
        S_L2WAIT:
          if (l2_resp_valid && !inv_valid) begin
            core_resp_valid <= 1'b1;
            core_resp_rdata <= req.we ? '0 : pick_word(l2_resp_line, req.addr);
            state           <= S_IDLE;
          end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the L2 never answers in the same cycle as it back-invalidates
  assert property (@(posedge clk) disable iff (!rst_n) !(l2_resp_valid && inv_valid));
endmodule
