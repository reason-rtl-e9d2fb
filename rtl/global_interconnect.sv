// global_interconnect: crossbar between the requesters (PE cores, global
// controller, host port) and the banks of the shared local memory.
//
// Each requester has a request/grant port. Word addresses are interleaved
// over NBANK banks (bank = low address bits), and every bank has its own
// round-robin arbiter, so up to NBANK requests to different banks are served
// in the same cycle. A granted read returns its data on rsp_valid/rsp_data
// exactly one cycle after the grant; writes complete at the grant. The
// paper asks only for a "high-bandwidth global interconnect"; the banked
// crossbar with per-bank round robin is this design's choice.
module global_interconnect
  import reason_pkg::*;
#(
  parameter int NREQ  = NUM_PE + 2,
  parameter int NBANK = SHM_BANKS,
  parameter int WORDS = 1 << SHM_AW
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // requesters
  input  logic [NREQ-1:0]              req_valid,
  input  mem_req_t [NREQ-1:0]          req,
  output logic [NREQ-1:0]              gnt,
  output logic [NREQ-1:0]              rsp_valid,
  output logic [NREQ-1:0][SHM_W-1:0]   rsp_data,
  // memory banks
  output logic [NBANK-1:0]             m_en,
  output logic [NBANK-1:0]             m_we,
  output logic [NBANK-1:0][$clog2(WORDS/NBANK)-1:0] m_row,
  output logic [NBANK-1:0][SHM_W-1:0]  m_wdata,
  input  logic [NBANK-1:0][SHM_W-1:0]  m_rdata
);

  localparam int BW = (NBANK > 1) ? $clog2(NBANK) : 1;
  localparam int RW = $clog2(WORDS / NBANK);
  localparam int IW = $clog2(NREQ);

  logic [NBANK-1:0][IW-1:0] rr;          // next requester with priority, per bank
  logic [NBANK-1:0][IW-1:0] win;
  logic [NBANK-1:0]         win_v;
  logic [NREQ-1:0]          rd_gnt_q;
  logic [NREQ-1:0][BW-1:0]  bank_q;

  function automatic logic [BW-1:0] bank_of(input logic [SHM_AW-1:0] a);
    return (NBANK > 1) ? a[BW-1:0] : '0;
  endfunction

  always_comb begin
    gnt   = '0;
    win   = '0;
    win_v = '0;
    m_en  = '0;
    m_we  = '0;
    m_row = '0;
    m_wdata = '0;
    for (int b = 0; b < NBANK; b++) begin
      for (int k = 0; k < NREQ; k++) begin
        int r;
        r = (int'(rr[b]) + k) % NREQ;
        if (!win_v[b] && req_valid[r] && (int'(bank_of(req[r].addr)) == b)) begin
          win_v[b] = 1'b1;
          win[b]   = IW'(r);
        end
      end
      if (win_v[b]) begin
        gnt[win[b]] = 1'b1;
        m_en[b]     = 1'b1;
        m_we[b]     = req[win[b]].we;
        m_row[b]    = RW'(req[win[b]].addr >> BW);
        m_wdata[b]  = req[win[b]].wdata;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr       <= '0;
      rd_gnt_q <= '0;
      bank_q   <= '0;
    end else begin
      for (int b = 0; b < NBANK; b++)
        if (win_v[b]) rr[b] <= (int'(win[b]) == NREQ - 1) ? '0 : win[b] + 1'b1;
      for (int r = 0; r < NREQ; r++) begin
        rd_gnt_q[r] <= gnt[r] && !req[r].we;
        bank_q[r]   <= bank_of(req[r].addr);
      end
    end
  end

  always_comb begin
    for (int r = 0; r < NREQ; r++) begin
      rsp_valid[r] = rd_gnt_q[r];
      rsp_data[r]  = m_rdata[bank_q[r]];
    end
  end

endmodule
