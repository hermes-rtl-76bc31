// l2_cache: private, per-core L2 cache (256 KB, 8-way by default) holding the
// MESI state of the core's lines.
//
// Size and associativity follow the evaluated configuration and the MESI
// protocol is the one the design uses; everything else is this design's own:
// 64-byte lines, true LRU, write-back, inclusive of the L1 above it.
//
// Requests from the L1 (one at a time): a read is answered with the whole
// line, a write (64-bit word with byte strobes) with an acknowledgement.
//   read hit in S/E/M, write hit in M   -> served locally
//   write hit in E                      -> silent E->M upgrade, served locally
//   write hit in S, or any miss         -> GetS/GetM to the shared L3
// On a miss the LRU victim is dropped silently if clean (S/E) or written back
// with PutM if in M; the line stays M until the L3 acknowledges the PutM, so a
// snoop arriving meanwhile still finds the dirty data. Every line leaving the
// L2 is also invalidated in the L1 (inv_valid).
//
// Snoops from the L3 (snoop_valid held until snoop_ack) are served whenever
// the L2 is idle, waiting for the L3 to accept a request (the L3 may be busy
// with another core), or waiting for the answer to a GetS/GetM (the L3 may
// be evicting a line this core holds to make room for the requested one). SNP_INV sends the line to I, SNP_DOWN
// sends E/M to S; in both cases snoop_resp.dirty tells whether the returned
// data were modified. The ack comes one cycle after the snoop is taken.
module l2_cache
  import hermes_pkg::*;
#(
  parameter int SIZE_BYTES = 256 * 1024,
  parameter int WAYS       = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // L1 side
  input  logic        l1_req_valid,
  output logic        l1_req_ready,
  input  core_req_t   l1_req,
  output logic        l1_resp_valid,
  output line_t       l1_resp_line,
  output logic        l1_inv_valid,
  output addr_t       l1_inv_addr,
  // L3 side: requests
  output logic        creq_valid,
  input  logic        creq_ready,
  output creq_t       creq,
  input  logic        cresp_valid,
  input  cresp_t      cresp,
  // L3 side: snoops
  input  logic        snoop_valid,
  input  snoop_t      snoop,
  output logic        snoop_ack,
  output snoop_resp_t snoop_resp,
  // status
  output logic        ready_o,
  output logic        hit_o         // pulse: L1 request served without the L3
);
  localparam int SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int SET_W = $clog2(SETS);
  localparam int TAG_W = ADDR_W - OFF_W - SET_W;
  localparam int AW    = $clog2(WAYS);

  typedef struct packed {
    logic [WAYS*2-1:0]     st;     // mesi_t per way
    logic [WAYS*TAG_W-1:0] tags;
    logic [WAYS*AW-1:0]    ages;
  } meta_t;

  meta_t meta_mem [SETS];
  line_t data_mem [SETS*WAYS];

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_LOOKUP, S_EVREQ, S_EVWAIT,
                            S_ACQREQ, S_ACQWAIT} state_t;
  state_t state;

  core_req_t        req;
  logic [SET_W-1:0] init_set;
  logic [AW-1:0]    way_q;        // way being evicted / filled

  logic [SET_W-1:0] set_idx;
  logic [TAG_W-1:0] tag;
  meta_t            m;
  logic             hit;
  logic [AW-1:0]    hit_way, victim, touch;
  logic [WAYS-1:0]  vmask;
  logic [WAYS*AW-1:0] ages_upd;
  mesi_t            hit_st;

  assign set_idx = req.addr[OFF_W +: SET_W];
  assign tag     = req.addr[ADDR_W-1 -: TAG_W];
  assign m       = meta_mem[set_idx];

  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      vmask[w] = (m.st[w*2 +: 2] != MESI_I);
      if (vmask[w] && m.tags[w*TAG_W +: TAG_W] == tag) begin
        hit = 1'b1;
        hit_way = AW'(w);
      end
    end
  end
  assign hit_st = mesi_t'(m.st[hit_way*2 +: 2]);
  assign touch  = (state == S_LOOKUP) ? hit_way : way_q;

  lru_ctrl #(.WAYS(WAYS)) u_lru (
    .ages_in(m.ages), .valid(vmask), .touch(touch),
    .ages_out(ages_upd), .victim(victim)
  );

  // address of the line held in way_q of the current set
  addr_t way_addr;
  assign way_addr = {m.tags[way_q*TAG_W +: TAG_W], set_idx, {OFF_W{1'b0}}};

  // ---------------- snoop lookup ----------------
  logic             snp_take;
  logic [SET_W-1:0] snp_set;
  meta_t            snp_m, snp_m_new;
  logic             snp_hit;
  logic [AW-1:0]    snp_way;
  mesi_t            snp_st;

  assign snp_take = snoop_valid && !snoop_ack &&
                    (state == S_IDLE || state == S_EVREQ || state == S_ACQREQ ||
                     state == S_ACQWAIT);
  assign snp_set  = snoop.addr[OFF_W +: SET_W];
  assign snp_m    = meta_mem[snp_set];

  always_comb begin
    snp_hit = 1'b0;
    snp_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (snp_m.st[w*2 +: 2] != MESI_I &&
          snp_m.tags[w*TAG_W +: TAG_W] == snoop.addr[ADDR_W-1 -: TAG_W]) begin
        snp_hit = 1'b1;
        snp_way = AW'(w);
      end
    snp_st    = snp_hit ? mesi_t'(snp_m.st[snp_way*2 +: 2]) : MESI_I;
    snp_m_new = snp_m;
    if (snp_hit)
      snp_m_new.st[snp_way*2 +: 2] = (snoop.op == SNP_INV) ? MESI_I : MESI_S;
  end

  // ---------------- outputs ----------------
  assign l1_req_ready = (state == S_IDLE) && !snp_take;
  assign ready_o      = (state != S_INIT);
  assign creq_valid   = (state == S_EVREQ) || (state == S_ACQREQ);
  always_comb begin
    creq = '0;
    if (state == S_EVREQ) begin
      creq.op   = CR_PUTM;
      creq.addr = way_addr;
      creq.data = data_mem[{set_idx, way_q}];
    end else begin
      creq.op   = req.we ? CR_GETM : CR_GETS;
      creq.addr = {req.addr[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
    end
  end

  // ---------------- array writes ----------------
  always_ff @(posedge clk) begin
    if (state == S_INIT) begin
      meta_t z;
      z.st   = '0;
      z.tags = '0;
      for (int w = 0; w < WAYS; w++) z.ages[w*AW +: AW] = AW'(w);
      meta_mem[init_set] <= z;
    end else if (snp_take) begin
      meta_mem[snp_set] <= snp_m_new;
    end else if (state == S_LOOKUP) begin
      meta_t n;
      n = m;
      if (hit && (!req.we || hit_st != MESI_S)) begin
        n.ages = ages_upd;
        if (req.we) begin
          n.st[hit_way*2 +: 2] = MESI_M;
          data_mem[{set_idx, hit_way}] <=
            merge_word(data_mem[{set_idx, hit_way}], req.addr, req.wdata, req.wstrb);
        end
        meta_mem[set_idx] <= n;
      end else if (!hit && m.st[victim*2 +: 2] != MESI_M) begin
        n.st[victim*2 +: 2] = MESI_I;         // silent drop of a clean victim
        meta_mem[set_idx] <= n;
      end
    end else if (state == S_EVWAIT && cresp_valid) begin
      meta_t n;
      n = m;
      n.st[way_q*2 +: 2] = MESI_I;
      meta_mem[set_idx] <= n;
    end else if (state == S_ACQWAIT && cresp_valid) begin
      meta_t n;
      n = m;
      n.st[way_q*2 +: 2] = req.we ? MESI_M : cresp.grant;
      n.tags[way_q*TAG_W +: TAG_W] = tag;
      n.ages = ages_upd;
      meta_mem[set_idx] <= n;
      data_mem[{set_idx, way_q}] <= req.we ? merge_word(cresp.data, req.addr, req.wdata, req.wstrb)
                                           : cresp.data;
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_INIT;
      init_set      <= '0;
      req           <= '0;
      way_q         <= '0;
      l1_resp_valid <= 1'b0;
      l1_resp_line  <= '0;
      l1_inv_valid  <= 1'b0;
      l1_inv_addr   <= '0;
      snoop_ack     <= 1'b0;
      snoop_resp    <= '0;
      hit_o         <= 1'b0;
    end else begin
      l1_resp_valid <= 1'b0;
      l1_inv_valid  <= 1'b0;
      snoop_ack     <= 1'b0;
      hit_o         <= 1'b0;
      if (snp_take) begin
        snoop_ack        <= 1'b1;
        snoop_resp.dirty <= (snp_st == MESI_M);
        snoop_resp.data  <= data_mem[{snp_set, snp_way}];
        if (snp_hit && snoop.op == SNP_INV) begin
          l1_inv_valid <= 1'b1;
          l1_inv_addr  <= snoop.addr;
        end
      end
      case (state)
        S_INIT: begin
          init_set <= init_set + 1'b1;
          if (init_set == SET_W'(SETS-1)) state <= S_IDLE;
        end
        S_IDLE:
          if (l1_req_valid && !snp_take) begin
            req   <= l1_req;
            state <= S_LOOKUP;
          end
        S_LOOKUP:
          if (hit && (!req.we || hit_st != MESI_S)) begin
            l1_resp_valid <= 1'b1;
            l1_resp_line  <= data_mem[{set_idx, hit_way}];
            hit_o         <= 1'b1;
            state         <= S_IDLE;
          end else if (hit) begin
            way_q <= hit_way;                     // S -> M upgrade in place
            state <= S_ACQREQ;
          end else begin
            way_q <= victim;
            if (m.st[victim*2 +: 2] == MESI_M) begin
              state <= S_EVREQ;
            end else begin
              if (m.st[victim*2 +: 2] != MESI_I) begin
                l1_inv_valid <= 1'b1;
                l1_inv_addr  <= {m.tags[victim*TAG_W +: TAG_W], set_idx, {OFF_W{1'b0}}};
              end
              state <= S_ACQREQ;
            end
          end
        S_EVREQ:
          if (creq_ready) state <= S_EVWAIT;
        S_EVWAIT:
          if (cresp_valid) begin
            l1_inv_valid <= 1'b1;
            l1_inv_addr  <= way_addr;
            state        <= S_ACQREQ;
          end
        S_ACQREQ:
          if (creq_ready) state <= S_ACQWAIT;
        S_ACQWAIT:
          if (cresp_valid) begin
            l1_resp_valid <= 1'b1;
            l1_resp_line  <= cresp.data;
            state         <= S_IDLE;
          end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a line granted M must be requested with GetM
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_ACQWAIT && cresp_valid && !req.we) |-> cresp.grant != MESI_M);
endmodule
