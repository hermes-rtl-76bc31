// hybrid_mem_ctrl: splits the L3's line traffic between the DRAM channel and
// the HBM channel of the hybrid memory.
//
// The hybrid memory (8 GB DRAM for capacity, 4 GB HBM for bandwidth) is part
// of the evaluated configuration; the address map is this design's choice:
//   [0, DRAM_BYTES)                      -> DRAM, local address = addr
//   [DRAM_BYTES, DRAM_BYTES + HBM_BYTES) -> HBM,  local address = addr - DRAM_BYTES
//   anything above                       -> no device: answered at once with
//                                           zero data and a one-cycle err_o
// Software places data it wants fast (for example tensors) in the HBM range.
//
// Interface: one line request at a time (valid/ready), answered by one
// resp_valid pulse for reads and writes alike. Each channel has the same
// request/response handshake. The request passes to the channel in the cycle
// it is accepted (the ready comes from the chosen channel); the response is
// forwarded combinationally from the channel that holds the open request.
// The write data and the write flag go to both channels unchanged, and so
// does the DRAM address; only the valid and the HBM address are decoded.
// A synthesis report therefore lists those output bits as wired to inputs.
module hybrid_mem_ctrl
  import hermes_pkg::*;
#(
  parameter longint DRAM_BYTES = 64'd8 << 30,
  parameter longint HBM_BYTES  = 64'd4 << 30
) (
  input  logic  clk,
  input  logic  rst_n,
  // from the L3
  input  logic  req_valid,
  output logic  req_ready,
  input  mreq_t req,
  output logic  resp_valid,
  output line_t resp_data,
  output logic  err_o,
  // DRAM channel
  output logic  dram_req_valid,
  input  logic  dram_req_ready,
  output mreq_t dram_req,
  input  logic  dram_resp_valid,
  input  line_t dram_resp_data,
  // HBM channel
  output logic  hbm_req_valid,
  input  logic  hbm_req_ready,
  output mreq_t hbm_req,
  input  logic  hbm_resp_valid,
  input  line_t hbm_resp_data,
  // traffic counters (lines moved per channel)
  output logic [31:0] dram_lines,
  output logic [31:0] hbm_lines
);
  typedef enum logic [1:0] {S_IDLE, S_DRAM, S_HBM, S_ERR} state_t;
  state_t state;

  logic to_dram, to_hbm;
  assign to_dram = ({1'b0, req.addr} < (ADDR_W+1)'(DRAM_BYTES));
  assign to_hbm  = !to_dram && ({1'b0, req.addr} < (ADDR_W+1)'(DRAM_BYTES + HBM_BYTES));

  always_comb begin
    dram_req       = req;
    hbm_req        = req;
    hbm_req.addr   = req.addr - ADDR_W'(DRAM_BYTES);
    dram_req_valid = (state == S_IDLE) && req_valid && to_dram;
    hbm_req_valid  = (state == S_IDLE) && req_valid && to_hbm;
    req_ready      = (state == S_IDLE) &&
                     (to_dram ? dram_req_ready : to_hbm ? hbm_req_ready : 1'b1);
    case (state)
      S_DRAM:  begin resp_valid = dram_resp_valid; resp_data = dram_resp_data; end
      S_HBM:   begin resp_valid = hbm_resp_valid;  resp_data = hbm_resp_data;  end
      S_ERR:   begin resp_valid = 1'b1;            resp_data = '0;             end
      default: begin resp_valid = 1'b0;            resp_data = '0;             end
    endcase
    err_o = (state == S_ERR);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      dram_lines <= '0;
      hbm_lines  <= '0;
    end else begin
      case (state)
        S_IDLE:
          if (req_valid && req_ready)
            state <= to_dram ? S_DRAM : to_hbm ? S_HBM : S_ERR;
        S_DRAM:
          if (dram_resp_valid) begin
            dram_lines <= dram_lines + 1'b1;
            state      <= S_IDLE;
          end
        S_HBM:
          if (hbm_resp_valid) begin
            hbm_lines <= hbm_lines + 1'b1;
            state     <= S_IDLE;
          end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a channel never answers without an open request
  assert property (@(posedge clk) disable iff (!rst_n)
                   dram_resp_valid |-> state == S_DRAM);
  assert property (@(posedge clk) disable iff (!rst_n)
                   hbm_resp_valid |-> state == S_HBM);
endmodule
