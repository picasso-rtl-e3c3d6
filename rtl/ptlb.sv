// ptlb -- provenance-translation lookaside buffer.
//
// A TLB used only for the implicit PVT loads of colored capabilities: it
// translates the virtual address of a PVT word into a physical address. It
// sits in an extra pipeline stage of one cycle (the paper's choice), so the
// lookup result is registered. Writes to the PVT are ordinary stores and do
// not use it. Its size (8 entries), full associativity, round-robin
// replacement and the refill port are this design's choices; the paper does
// not describe them. Entries map 4 KiB pages; the page-table walker is
// expected to return the 4 KiB-granular translation even inside a superpage.
//
// Interface/timing:
//   lookup: lk_valid/lk_vaddr in cycle t -> q_valid/q_hit/q_paddr in t+1.
//   refill: walk_req_valid/walk_req_vpn is accepted when walk_req_ready (one
//           walk at a time). The PTLB asks the core's page-table walker
//           (ptw_*), fills an entry when the answer has no fault, and passes
//           the answer to the requester on walk_done_* in the cycle it
//           arrives.
//   flush:  invalidates every entry (sfence.vma / fence).
// walk_done_ppn/walk_done_fault are the walker's answer passed straight on
// (the refill requester needs it in the same cycle the entry is written).
module ptlb
  import picasso_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  // lookup stage
  input  logic             lk_valid,
  input  logic [XLEN-1:0]  lk_vaddr,
  output logic             q_valid,
  output logic             q_hit,
  output logic [PA_W-1:0]  q_paddr,
  // refill request from the LSQ
  input  logic             walk_req_valid,
  input  logic [VPN_W-1:0] walk_req_vpn,
  output logic             walk_req_ready,
  output logic             walk_done_valid,
  output logic [PPN_W-1:0] walk_done_ppn,
  output logic             walk_done_fault,
  // core page-table walker
  output logic             ptw_req_valid,
  output logic [VPN_W-1:0] ptw_req_vpn,
  input  logic             ptw_req_ready,
  input  logic             ptw_resp_valid,
  input  logic [PPN_W-1:0] ptw_resp_ppn,
  input  logic             ptw_resp_fault
);
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0] valid_q;
  logic [VPN_W-1:0]   vpn_q [ENTRIES];
  logic [PPN_W-1:0]   ppn_q [ENTRIES];
  logic [IDX_W-1:0]   rr_q;

  typedef enum logic [1:0] {W_IDLE, W_REQ, W_WAIT} wstate_e;
  wstate_e          ws_q;
  logic [VPN_W-1:0] wvpn_q;

  // Combinational match, registered result (the PTLB pipeline stage)
  logic             m_hit;
  logic [PPN_W-1:0] m_ppn;
  always_comb begin
    m_hit = 1'b0;
    m_ppn = '0;
    for (int e = 0; e < ENTRIES; e++) begin
      if (valid_q[e] && vpn_q[e] == lk_vaddr[XLEN-1:PAGE_OFF_W]) begin
        m_hit = 1'b1;
        m_ppn = ppn_q[e];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_valid <= 1'b0;
      q_hit   <= 1'b0;
      q_paddr <= '0;
    end else begin
      q_valid <= lk_valid;
      q_hit   <= lk_valid && m_hit && !flush;
      q_paddr <= {m_ppn, lk_vaddr[PAGE_OFF_W-1:0]};
    end
  end

  // Refill
  assign walk_req_ready  = (ws_q == W_IDLE);
  assign ptw_req_valid   = (ws_q == W_REQ);
  assign ptw_req_vpn     = wvpn_q;
  assign walk_done_valid = (ws_q == W_WAIT) && ptw_resp_valid;
  assign walk_done_ppn   = ptw_resp_ppn;
  assign walk_done_fault = ptw_resp_fault;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws_q    <= W_IDLE;
      wvpn_q  <= '0;
      valid_q <= '0;
      rr_q    <= '0;
    end else begin
      unique case (ws_q)
        W_IDLE: if (walk_req_valid) begin
          ws_q   <= W_REQ;
          wvpn_q <= walk_req_vpn;
        end
        W_REQ:  if (ptw_req_ready) ws_q <= W_WAIT;
        W_WAIT: if (ptw_resp_valid) ws_q <= W_IDLE;
        default: ws_q <= W_IDLE;
      endcase
      if (flush) begin
        valid_q <= '0;
      end else if (walk_done_valid && !ptw_resp_fault) begin
        valid_q[rr_q] <= 1'b1;
        rr_q <= (ENTRIES > 1) ? IDX_W'((int'(rr_q) + 1) % ENTRIES) : '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (walk_done_valid && !ptw_resp_fault && !flush) begin
      vpn_q[rr_q] <= wvpn_q;
      ppn_q[rr_q] <= ptw_resp_ppn;
    end
  end
endmodule
