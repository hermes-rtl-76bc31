// l3_cache: shared, inclusive last-level cache (8 MB, 16-way by default) with
// a MESI directory, serving the four cores' private L2s and the accelerator.
//
// The shared L3, its size and associativity, MESI coherence, the accelerator
// connection and stride prefetching are the design's named features. How they
// are realised here is this design's own choice:
//  * Directory in the tags: every L3 line keeps a sharer bit per core, an
//    "excl" bit (the single sharer holds the line in E or M), a dirty bit and
//    a "pf" bit (brought in by the prefetcher, not yet used).
//  * One request at a time. A round-robin arbiter picks among the five
//    request ports (cores 0..3, accelerator = port 4); a pending prefetch is
//    served only when no port requests.
//  * Requests: GetS (grant E if no other core holds the line, else S), GetM
//    (other copies invalidated, grant M), PutM (accepted only from the
//    current owner, otherwise a stale write-back that is dropped), and for the
//    accelerator RD (coherent line read, the owner is downgraded) and WR
//    (coherent full-line write, all copies invalidated). Every request gets
//    exactly one response pulse on cresp_valid[port].
//  * Snoops go to one core at a time (snoop_valid[i] until snoop_ack[i]).
//  * A miss picks the LRU way, back-invalidates its sharers (inclusion),
//    writes it to memory if dirty, then reads the new line from memory.
//  * Every demand access trains the stride prefetcher with (port, address).
//
// Timing: a hit that needs no snoop is answered 3 cycles after acceptance
// (accept, lookup, coherence, respond); each snoop adds 2 + the L2's 1 cycle;
// a miss adds the memory round trips. Tags/data are memories with a
// combinational read port; after reset a sweep clears one set per cycle.
module l3_cache
  import hermes_pkg::*;
#(
  parameter int     SIZE_BYTES = 8 * 1024 * 1024,
  parameter int     WAYS       = 16,
  parameter longint MEM_BYTES  = 64'd12 << 30,
  parameter bit     PF_EN      = 1'b1      // 0: stride prefetcher switched off
) (
  input  logic              clk,
  input  logic              rst_n,
  // request ports: 0..NCORES-1 = L2 of each core, NCORES = accelerator
  input  logic [NPORTS-1:0] creq_valid,
  output logic [NPORTS-1:0] creq_ready,
  input  creq_t             creq [NPORTS],
  output logic [NPORTS-1:0] cresp_valid,
  output cresp_t            cresp,
  // snoops to the private L2s
  output logic [NCORES-1:0] snoop_valid,
  output snoop_t            snoop,
  input  logic [NCORES-1:0] snoop_ack,
  input  snoop_resp_t       snoop_resp [NCORES],
  // memory side (hybrid memory controller)
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mreq_t             mem_req,
  input  logic              mem_resp_valid,
  input  line_t             mem_resp_data,
  // status / event pulses
  output logic              ready_o,
  output logic              hit_o,
  output logic              miss_o,
  output logic              pf_fill_o,    // a prefetched line was installed
  output logic              pf_hit_o,     // a demand access hit a prefetched line
  output logic              wb_o          // a dirty victim was written to memory
);
  localparam int SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int SET_W = $clog2(SETS);
  localparam int TAG_W = ADDR_W - OFF_W - SET_W;
  localparam int AW    = $clog2(WAYS);

  typedef struct packed {
    logic              valid;
    logic              dirty;
    logic              excl;
    logic              pf;
    logic [NCORES-1:0] sharers;
    logic [TAG_W-1:0]  tag;
  } way_t;

  typedef struct packed {
    way_t [WAYS-1:0]    w;
    logic [WAYS*AW-1:0] ages;
  } meta_t;

  meta_t meta_mem [SETS];
  line_t data_mem [SETS*WAYS];

  typedef enum logic [3:0] {S_INIT, S_IDLE, S_LOOKUP, S_VDONE, S_WBREQ, S_WBWAIT,
                            S_RDREQ, S_RDWAIT, S_COH, S_SNOOP, S_FINAL} state_t;
  state_t state, after_snp;

  logic [SET_W-1:0]  init_set;
  logic [PORT_W-1:0] port_q, rr_ptr;
  creq_op_t          op_q;
  logic              is_pf;
  addr_t             addr_q;
  line_t             wdata_q;
  logic [AW-1:0]     way_q;
  logic              was_hit;
  way_t              b;          // working copy of the way's directory entry
  line_t             lbuf;       // working copy of the way's data
  logic [NCORES-1:0] snp_mask;
  snoop_op_t         snp_op;
  logic              snp_keep;   // take dirty snoop data into lbuf

  // ---------------- lookup ----------------
  logic [SET_W-1:0]   set_idx;
  logic [TAG_W-1:0]   tag;
  meta_t              m;
  logic               hit;
  logic [AW-1:0]      hit_way, victim;
  logic [WAYS-1:0]    vmask;
  logic [WAYS*AW-1:0] ages_upd;

  assign set_idx = addr_q[OFF_W +: SET_W];
  assign tag     = addr_q[ADDR_W-1 -: TAG_W];
  assign m       = meta_mem[set_idx];

  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      vmask[w] = m.w[w].valid;
      if (m.w[w].valid && m.w[w].tag == tag) begin
        hit = 1'b1;
        hit_way = AW'(w);
      end
    end
  end

  lru_ctrl #(.WAYS(WAYS)) u_lru (
    .ages_in(m.ages), .valid(vmask), .touch(way_q),
    .ages_out(ages_upd), .victim(victim)
  );

  // ---------------- arbitration ----------------
  logic              any_req;
  logic [PORT_W-1:0] grant;
  always_comb begin
    any_req = 1'b0;
    grant   = '0;
    for (int k = 0; k < NPORTS; k++) begin
      int p;
      p = (int'(rr_ptr) + k) % NPORTS;
      if (!any_req && creq_valid[p]) begin
        any_req = 1'b1;
        grant   = PORT_W'(p);
      end
    end
  end

  logic  pf_valid, pf_ready;
  addr_t pf_addr;
  assign pf_ready = (state == S_IDLE) && !any_req;

  always_comb begin
    creq_ready = '0;
    if (state == S_IDLE && any_req) creq_ready[grant] = 1'b1;
  end

  // prefetcher training: every demand access, once, at lookup
  logic train;
  assign train = PF_EN && (state == S_LOOKUP) && !is_pf && op_q != CR_PUTM;

  stride_prefetcher #(.NP(NPORTS), .MEM_BYTES(MEM_BYTES)) u_pf (
    .clk, .rst_n,
    .train_valid(train), .train_port(port_q), .train_addr(addr_q),
    .pf_valid, .pf_addr, .pf_ready
  );

  // ---------------- snoop sequencing ----------------
  logic [NCORES-1:0] snp_cur;     // lowest set bit of snp_mask
  int                snp_idx;
  always_comb begin
    snp_cur = snp_mask & (~snp_mask + 1'b1);
    snp_idx = 0;
    for (int i = 0; i < NCORES; i++) if (snp_cur[i]) snp_idx = i;
  end
  assign snoop_valid = (state == S_SNOOP) ? snp_cur : '0;
  assign snoop.op    = snp_op;
  assign snoop.addr  = (after_snp == S_VDONE) ? {b.tag, set_idx, {OFF_W{1'b0}}}
                                              : {addr_q[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};

  // ---------------- memory port ----------------
  assign mem_req_valid = (state == S_WBREQ) || (state == S_RDREQ);
  always_comb begin
    mem_req = '0;
    if (state == S_WBREQ) begin
      mem_req.we    = 1'b1;
      mem_req.addr  = {b.tag, set_idx, {OFF_W{1'b0}}};
      mem_req.wdata = lbuf;
    end else begin
      mem_req.addr  = {addr_q[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
    end
  end

  assign ready_o = (state != S_INIT);

  // ---------------- final update of the directory entry ----------------
  logic [NCORES-1:0] reqbit;
  way_t              b_fin;
  line_t             d_fin;
  mesi_t             grant_fin;
  always_comb begin
    reqbit    = (int'(port_q) < NCORES) ? NCORES'(1) << port_q : '0;
    b_fin     = b;
    d_fin     = lbuf;
    grant_fin = MESI_I;
    if (!is_pf) begin
      case (op_q)
        CR_GETS: begin
          b_fin.sharers = b.sharers | reqbit;
          b_fin.excl    = (b_fin.sharers == reqbit);
          grant_fin     = b_fin.excl ? MESI_E : MESI_S;
        end
        CR_GETM: begin
          b_fin.sharers = reqbit;
          b_fin.excl    = 1'b1;
          grant_fin     = MESI_M;
        end
        CR_RD:   b_fin.excl = 1'b0;
        CR_WR: begin
          b_fin.sharers = '0;
          b_fin.excl    = 1'b0;
          b_fin.dirty   = 1'b1;
          d_fin         = wdata_q;
        end
        CR_PUTM:
          if (was_hit && b.excl && (b.sharers & reqbit) != '0) begin
            b_fin.sharers = '0;
            b_fin.excl    = 1'b0;
            b_fin.dirty   = 1'b1;
            d_fin         = wdata_q;
          end
        default: ;
      endcase
    end
  end

  // snoops a request needs once its line is present
  logic [NCORES-1:0] coh_mask;
  snoop_op_t         coh_op;
  always_comb begin
    case (op_q)
      CR_GETS: begin coh_mask = b.excl ? (b.sharers & ~reqbit) : '0; coh_op = SNP_DOWN; end
      CR_RD:   begin coh_mask = b.excl ? b.sharers : '0;             coh_op = SNP_DOWN; end
      CR_GETM: begin coh_mask = b.sharers & ~reqbit;                 coh_op = SNP_INV;  end
      default: begin coh_mask = b.sharers;                           coh_op = SNP_INV;  end
    endcase
  end

  // ---------------- array writes ----------------
  always_ff @(posedge clk) begin
    if (state == S_INIT) begin
      meta_t z;
      z = '0;
      for (int w = 0; w < WAYS; w++) z.ages[w*AW +: AW] = AW'(w);
      meta_mem[init_set] <= z;
    end else if (state == S_FINAL && !(op_q == CR_PUTM && !was_hit)) begin
      meta_t n;
      n = m;
      n.w[way_q] = b_fin;
      n.ages     = ages_upd;
      meta_mem[set_idx] <= n;
      data_mem[{set_idx, way_q}] <= d_fin;
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_INIT;
      after_snp   <= S_FINAL;
      init_set    <= '0;
      port_q      <= '0;
      rr_ptr      <= '0;
      op_q        <= CR_GETS;
      is_pf       <= 1'b0;
      addr_q      <= '0;
      wdata_q     <= '0;
      way_q       <= '0;
      was_hit     <= 1'b0;
      b           <= '0;
      lbuf        <= '0;
      snp_mask    <= '0;
      snp_op      <= SNP_INV;
      snp_keep    <= 1'b0;
      cresp_valid <= '0;
      cresp       <= '0;
      hit_o       <= 1'b0;
      miss_o      <= 1'b0;
      pf_fill_o   <= 1'b0;
      pf_hit_o    <= 1'b0;
      wb_o        <= 1'b0;
    end else begin
      cresp_valid <= '0;
      hit_o       <= 1'b0;
      miss_o      <= 1'b0;
      pf_fill_o   <= 1'b0;
      pf_hit_o    <= 1'b0;
      wb_o        <= 1'b0;
      case (state)
        S_INIT: begin
          init_set <= init_set + 1'b1;
          if (init_set == SET_W'(SETS-1)) state <= S_IDLE;
        end

        S_IDLE:
          if (any_req) begin
            port_q  <= grant;
            rr_ptr  <= (int'(grant) == NPORTS-1) ? '0 : grant + 1'b1;
            op_q    <= creq[grant].op;
            addr_q  <= creq[grant].addr;
            wdata_q <= creq[grant].data;
            is_pf   <= 1'b0;
            state   <= S_LOOKUP;
          end else if (pf_valid) begin
            addr_q  <= pf_addr;
            is_pf   <= 1'b1;
            state   <= S_LOOKUP;
          end

        S_LOOKUP: begin
          was_hit <= hit;
          if (hit) begin
            way_q <= hit_way;
            b     <= m.w[hit_way];
            lbuf  <= data_mem[{set_idx, hit_way}];
            if (is_pf) begin
              state <= S_IDLE;                          // already present
            end else begin
              if (op_q != CR_PUTM) begin
                hit_o <= 1'b1;
                if (m.w[hit_way].pf) pf_hit_o <= 1'b1;
              end
              b.pf  <= 1'b0;
              state <= (op_q == CR_PUTM) ? S_FINAL : S_COH;
            end
          end else if (op_q == CR_PUTM && !is_pf) begin
            state <= S_FINAL;                           // stale write-back
          end else if (is_pf && m.w[victim].valid && m.w[victim].sharers != '0) begin
            state <= S_IDLE;                            // do not disturb cores for a prefetch
          end else begin
            if (!is_pf) miss_o <= 1'b1;
            way_q    <= victim;
            b        <= m.w[victim];
            lbuf     <= data_mem[{set_idx, victim}];
            snp_mask <= m.w[victim].valid ? m.w[victim].sharers : '0;
            snp_op   <= SNP_INV;
            snp_keep <= 1'b1;
            after_snp <= S_VDONE;
            state    <= S_SNOOP;
          end
        end

        S_VDONE:
          state <= (b.valid && b.dirty) ? S_WBREQ : S_RDREQ;

        S_WBREQ:
          if (mem_req_ready) state <= S_WBWAIT;
        S_WBWAIT:
          if (mem_resp_valid) begin
            wb_o  <= 1'b1;
            state <= S_RDREQ;
          end

        S_RDREQ:
          if (mem_req_ready) state <= S_RDWAIT;
        S_RDWAIT:
          if (mem_resp_valid) begin
            lbuf <= mem_resp_data;
            b    <= '{valid: 1'b1, dirty: 1'b0, excl: 1'b0, pf: is_pf,
                      sharers: '0, tag: tag};
            if (is_pf) pf_fill_o <= 1'b1;
            state <= is_pf ? S_FINAL : S_COH;
          end

        S_COH: begin
          after_snp <= S_FINAL;
          snp_keep  <= (op_q != CR_WR);
          snp_mask  <= coh_mask;
          snp_op    <= coh_op;
          state     <= (coh_mask == '0) ? S_FINAL : S_SNOOP;
        end

        S_SNOOP:
          if (snp_mask == '0) begin
            state <= after_snp;
          end else if (snoop_ack[snp_idx]) begin
            snp_mask <= snp_mask & ~snp_cur;
            if (snp_keep && snoop_resp[snp_idx].dirty) begin
              lbuf    <= snoop_resp[snp_idx].data;
              b.dirty <= 1'b1;
            end
          end

        S_FINAL: begin
          if (!is_pf) begin
            cresp_valid[port_q] <= 1'b1;
            cresp.grant         <= grant_fin;
            cresp.data          <= d_fin;
          end
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // only the addressed core acknowledges a snoop
  assert property (@(posedge clk) disable iff (!rst_n)
                   (snoop_ack & ~snoop_valid) == '0);
  // one request accepted at a time
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(creq_ready));
endmodule
