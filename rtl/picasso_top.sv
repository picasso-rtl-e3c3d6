// picasso_top -- the colored-capability (provenance tracking) extension of a
// CHERI-RISC-V load/store pipeline.
//
// Every load and store names the capability it goes through. If that
// capability is colored (its otype is a provenance ID, 0 < otype < OTYPETH),
// the access is allowed only while the ID's provenance-validity bit (PVB) in
// the provenance-validity table (PVT, in memory at the address held in PVTR)
// is 0. free() sets the bit with an ordinary store, which retracts every
// capability carrying that ID at once; a later access through any of them
// faults with FLT_PROVENANCE.
//
// Pipeline (the stages and their order follow the paper):
//   stage 1, address calculation (combinational, on req_*): the capability is
//     classified (cap_color_decode), the virtual address of its 128-bit PVT
//     word is computed next to the data address (pvt_addr_calc), and the PVT
//     buffer is looked up. A buffer hit decides the check right here.
//   stage 2, PTLB (one register stage for every access, colored or not): on
//     a buffer miss the PVT word address is translated by the PTLB.
//   cc_lsq: the access waits in the load/store queue, which sends data and
//     PVT loads to the single-ported data cache, holds stores until their
//     PVB check passed, and completes accesses in order on resp_*.
// picasso_csr holds PVTR and OTYPETH; ccsettype_unit executes ccsettype.
//
// This design's choices where the paper is silent: the data address arrives
// already translated by the core's own TLB (req_daddr is physical); a sealed
// capability makes the access fault with FLT_SEAL (the base CHERI rule,
// included because OTYPETH decides what is sealed), while the core's bounds,
// tag and permission checks stay outside; fence flushes the PVT buffer,
// sfence flushes the PVT buffer and the PTLB; the core raises fence only
// after its earlier stores have been performed. The ev_* outputs are
// one-cycle event pulses for performance counters.
//
// Interface with the core: req_* is a valid/ready handshake (req_ready drops
// while the queue is full and stage 2 is occupied); squash_* names the
// oldest mis-speculated access, which is killed with everything younger in
// stage 2 and in the queue; commit_* names a store that may now be written
// (held by the core until the store's answer appears on resp_*); resp_*
// returns every surviving access once, in program order, with no
// back-pressure.
// Timing: an access accepted at clock edge 0 is in stage 2 after edge 0 and
// in the queue after edge 1; its data request can be sent to the cache in
// the next cycle. A colored access that hits in the PVT buffer takes exactly
// as long as an uncolored one; a buffer miss adds one cycle when the PTLB
// hits (the PVT load takes the cache port first, the data load follows, and
// their latencies overlap), or a page walk when it misses.
// Setting PVTB_WORDS to 0 removes the PVT buffer, the second configuration
// whose hardware cost the paper reports; the pipeline is otherwise unchanged.
module picasso_top
  import picasso_pkg::*;
#(
  parameter int unsigned LSQ_DEPTH    = 8,
  parameter int unsigned ID_W         = 6,
  parameter int unsigned PTLB_ENTRIES = 8,
  parameter int unsigned PVTB_WORDS   = 64,
  parameter int unsigned PVTB_WAYS    = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  priv_e                    priv,
  // CSR access
  input  logic                     csr_valid,
  input  csr_op_e                  csr_op,
  input  logic [11:0]              csr_addr,
  input  logic [XLEN-1:0]          csr_wdata,
  output logic [XLEN-1:0]          csr_rdata,
  output logic                     csr_illegal,
  // ccsettype
  input  logic [CAP_W-1:0]         cst_cs1,
  input  logic                     cst_cs1_tag,
  input  logic [XLEN-1:0]          cst_rs2,
  output logic [CAP_W-1:0]         cst_cd,
  output logic                     cst_cd_tag,
  output fault_e                   cst_fault,
  // load/store requests from the core (after address calculation)
  input  logic                     req_valid,
  output logic                     req_ready,
  input  logic [ID_W-1:0]          req_id,
  input  mem_op_e                  req_op,
  input  logic [2:0]               req_size,
  input  logic [PA_W-1:0]          req_daddr,
  input  logic [CAP_W-1:0]         req_wdata,
  input  logic [CAP_W-1:0]         req_cap,
  input  logic                     req_cap_tag,
  // mis-speculation and fences
  input  logic                     squash_valid,
  input  logic [ID_W-1:0]          squash_id,
  input  logic                     commit_valid,
  input  logic [ID_W-1:0]          commit_id,
  input  logic                     fence,
  input  logic                     sfence,
  // data cache port
  output logic                     mreq_valid,
  input  logic                     mreq_ready,
  output mem_op_e                  mreq_op,
  output logic [PA_W-1:0]          mreq_addr,
  output logic [2:0]               mreq_size,
  output logic [CAP_W-1:0]         mreq_wdata,
  output logic                     mreq_pvt,
  output logic [$clog2(LSQ_DEPTH)-1:0] mreq_idx,
  input  logic                     mresp_valid,
  input  logic                     mresp_pvt,
  input  logic [$clog2(LSQ_DEPTH)-1:0] mresp_idx,
  input  logic [CAP_W-1:0]         mresp_data,
  // core page-table walker
  output logic                     ptw_req_valid,
  output logic [VPN_W-1:0]         ptw_req_vpn,
  input  logic                     ptw_req_ready,
  input  logic                     ptw_resp_valid,
  input  logic [PPN_W-1:0]         ptw_resp_ppn,
  input  logic                     ptw_resp_fault,
  // completion to the core
  output logic                     resp_valid,
  output logic [ID_W-1:0]          resp_id,
  output mem_op_e                  resp_op,
  output logic [CAP_W-1:0]         resp_data,
  output fault_e                   resp_fault,
  // events
  output logic                     ev_colored,     // colored access entered
  output logic                     ev_buf_hit,     // PVT buffer decided the check
  output logic                     ev_ptlb_miss,   // PTLB refill started
  output logic                     ev_pvt_load,    // PVT load sent to the cache
  output logic                     ev_prov_fault,  // retracted PVB found
  output logic                     ev_store_held,  // store waiting for its PVB
  output logic                     ev_squash_wait, // squashed entry draining
  output logic                     ev_stall        // request held by a full queue
);
  // ------------------------------------------------------------------ CSRs
  logic [XLEN-1:0] pvtr;
  pid_t            otypeth;

  picasso_csr u_csr (
    .clk, .rst_n, .csr_valid, .csr_op, .csr_addr, .csr_wdata, .priv,
    .csr_rdata, .csr_illegal, .pvtr, .otypeth
  );

  ccsettype_unit u_cst (
    .cs1(cst_cs1), .cs1_tag(cst_cs1_tag), .rs2(cst_rs2), .otypeth,
    .cd(cst_cd), .cd_tag(cst_cd_tag), .fault(cst_fault)
  );

  // ------------------------------------------------- stage 1: address calc
  cap_kind_e            s1_kind;
  pid_t                 s1_pid;
  logic                 s1_colored;
  logic [XLEN-1:0]      s1_pvt_vaddr;
  logic [PVB_IDX_W-1:0] s1_bit;
  logic                 buf_hit;
  logic [PVT_WORD_W-1:0] buf_word;
  logic                 fill_valid;
  logic [XLEN-1:0]      fill_vaddr;
  logic [PVT_WORD_W-1:0] fill_word;
  fault_e               s1_fault;
  logic                 s1_fire;

  cap_color_decode u_dec (
    .cap(req_cap), .cap_tag(req_cap_tag), .otypeth,
    .kind(s1_kind), .pid(s1_pid), .colored(s1_colored)
  );

  pvt_addr_calc u_addr (
    .pvtr, .pid(s1_pid), .word_vaddr(s1_pvt_vaddr), .bit_idx(s1_bit)
  );

  // PVTB_WORDS = 0 builds the pipeline without a PVT buffer: every colored
  // access then translates and loads its PVT word
  if (PVTB_WORDS > 0) begin : g_pvtb
    pvt_buffer #(.WORDS(PVTB_WORDS), .WAYS(PVTB_WAYS)) u_pvtb (
      .clk, .rst_n, .lk_vaddr(s1_pvt_vaddr), .lk_hit(buf_hit), .lk_word(buf_word),
      .fill_valid, .fill_vaddr, .fill_word, .flush(fence || sfence)
    );
  end else begin : g_no_pvtb
    assign buf_hit  = 1'b0;
    assign buf_word = '0;
  end

  always_comb begin
    s1_fault = FLT_NONE;
    if (req_cap_tag && s1_kind == CAP_SEALED)
      s1_fault = FLT_SEAL;
    else if (s1_colored && buf_hit && buf_word[s1_bit])
      s1_fault = FLT_PROVENANCE;
  end

  // ------------------------------------------------- stage 2: PTLB stage
  typedef struct packed {
    logic [ID_W-1:0]      id;
    mem_op_e              op;
    logic [2:0]           size;
    logic [PA_W-1:0]      daddr;
    logic [CAP_W-1:0]     wdata;
    fault_e               fault;
    logic                 colored;
    logic                 pvb_known;
    logic [XLEN-1:0]      pvt_vaddr;
    logic [PVB_IDX_W-1:0] bit_idx;
  } s2_t;

  s2_t              s2_q;
  logic             s2_valid_q;
  logic             s2_kill;
  logic             pt_q_valid, pt_q_hit;
  logic [PA_W-1:0]  pt_q_paddr;
  logic             pt_held_q, pt_hit_held_q;
  logic [PA_W-1:0]  pt_pa_held_q;
  logic             s2_ptlb_hit;
  logic [PA_W-1:0]  s2_pvt_paddr;
  logic             enq_ready, enq_fire;
  logic             squash_hit;

  logic             walk_req_valid, walk_req_ready, walk_done_valid, walk_done_fault;
  logic [VPN_W-1:0] walk_req_vpn;
  logic [PPN_W-1:0] walk_done_ppn;

  ptlb #(.ENTRIES(PTLB_ENTRIES)) u_ptlb (
    .clk, .rst_n, .flush(sfence),
    .lk_valid(s1_fire), .lk_vaddr(s1_pvt_vaddr),
    .q_valid(pt_q_valid), .q_hit(pt_q_hit), .q_paddr(pt_q_paddr),
    .walk_req_valid, .walk_req_vpn, .walk_req_ready,
    .walk_done_valid, .walk_done_ppn, .walk_done_fault,
    .ptw_req_valid, .ptw_req_vpn, .ptw_req_ready,
    .ptw_resp_valid, .ptw_resp_ppn, .ptw_resp_fault
  );

  assign s2_ptlb_hit  = pt_held_q ? pt_hit_held_q : pt_q_hit;
  assign s2_pvt_paddr = pt_held_q ? pt_pa_held_q  : pt_q_paddr;
  // a squash that reaches the queue, or names this access, removes stage 2
  assign s2_kill   = squash_valid && (squash_hit || squash_id == s2_q.id);
  assign enq_fire  = s2_valid_q && !s2_kill && enq_ready;
  assign req_ready = !s2_valid_q || enq_fire;
  assign s1_fire   = req_valid && req_ready && !squash_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid_q    <= 1'b0;
      s2_q          <= '0;
      pt_held_q     <= 1'b0;
      pt_hit_held_q <= 1'b0;
      pt_pa_held_q  <= '0;
    end else begin
      if (s1_fire) begin
        s2_valid_q        <= 1'b1;
        s2_q.id           <= req_id;
        s2_q.op           <= req_op;
        s2_q.size         <= req_size;
        s2_q.daddr        <= req_daddr;
        s2_q.wdata        <= req_wdata;
        s2_q.fault        <= s1_fault;
        s2_q.colored      <= s1_colored;
        s2_q.pvb_known    <= buf_hit;
        s2_q.pvt_vaddr    <= s1_pvt_vaddr;
        s2_q.bit_idx      <= s1_bit;
        pt_held_q         <= 1'b0;
      end else if (enq_fire || s2_kill) begin
        s2_valid_q <= 1'b0;
        pt_held_q  <= 1'b0;
      end else if (s2_valid_q && !pt_held_q && pt_q_valid) begin
        // queue full: keep the PTLB answer while stage 2 waits
        pt_held_q     <= 1'b1;
        pt_hit_held_q <= pt_q_hit && !sfence;
        pt_pa_held_q  <= pt_q_paddr;
      end else if (sfence) begin
        pt_hit_held_q <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ the queue
  logic lsq_prov_fault;

  cc_lsq #(.DEPTH(LSQ_DEPTH), .ID_W(ID_W)) u_lsq (
    .clk, .rst_n,
    .enq_valid(s2_valid_q && !s2_kill), .enq_ready,
    .enq_id(s2_q.id), .enq_op(s2_q.op), .enq_size(s2_q.size),
    .enq_daddr(s2_q.daddr), .enq_wdata(s2_q.wdata), .enq_fault(s2_q.fault),
    .enq_colored(s2_q.colored), .enq_pvb_known(s2_q.pvb_known),
    .enq_pvt_vaddr(s2_q.pvt_vaddr), .enq_pvb_idx(s2_q.bit_idx),
    .enq_ptlb_hit(s2_ptlb_hit), .enq_pvt_paddr(s2_pvt_paddr),
    .squash_valid, .squash_id, .squash_hit, .commit_valid, .commit_id,
    .fence(fence || sfence),
    .walk_req_valid, .walk_req_vpn, .walk_req_ready,
    .walk_done_valid, .walk_done_ppn, .walk_done_fault,
    .mreq_valid, .mreq_ready, .mreq_op, .mreq_addr, .mreq_size, .mreq_wdata,
    .mreq_pvt, .mreq_idx, .mresp_valid, .mresp_pvt, .mresp_idx, .mresp_data,
    .fill_valid, .fill_vaddr, .fill_word,
    .resp_valid, .resp_id, .resp_op, .resp_data, .resp_fault,
    .ev_store_held, .ev_squash_wait, .ev_prov_fault(lsq_prov_fault)
  );

  // ------------------------------------------------------------ events
  assign ev_colored    = s1_fire && s1_colored;
  assign ev_buf_hit    = s1_fire && s1_colored && buf_hit;
  assign ev_ptlb_miss  = walk_req_valid && walk_req_ready;
  assign ev_pvt_load   = mreq_valid && mreq_ready && mreq_pvt;
  assign ev_prov_fault = lsq_prov_fault || (s1_fire && s1_fault == FLT_PROVENANCE);
  assign ev_stall      = s2_valid_q && !enq_ready;
endmodule
