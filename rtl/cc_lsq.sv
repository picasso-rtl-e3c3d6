// cc_lsq -- load/store queue whose entries also track the implicit PVT load of
// a colored-capability access.
//
// Every load or store enters the queue after the PTLB stage. For an access
// through a colored capability the entry carries, besides the data access,
// the state of its provenance check:
//   - already decided (not colored, or the PVT buffer hit): nothing to do;
//   - PTLB missed: a refill through the PTLB, then a PVT load;
//   - PTLB hit: a PVT load of the 128-bit PVT word to the data cache.
// No separate queue entries are used for PVT loads (as in the paper).
//
// Ordering rules, following the paper:
//   - a load sends its data request without waiting for the PVT load; both
//     go to the same single-ported cache (PVT loads have priority), their
//     latencies overlap, and the load completes only when both answers are
//     back and the PVB check passed;
//   - a store is sent to the cache only after its PVT answer arrived and the
//     PVB check passed, so a retracted capability can never write memory;
//     like any store it also waits until the core declares it committed
//     (commit_*), so a squash can still catch a store held by its check;
//   - a squashed entry (mis-speculation) issues nothing new but stays
//     allocated until every request it already sent has been answered.
// A PVT word whose checked PVB was valid is written into the PVT buffer.
//
// This design's own choices: the queue is a circular FIFO of DEPTH entries;
// data accesses are sent in program order (so no store-to-load forwarding or
// disambiguation is needed); stores get no cache response; one PTLB refill
// is in flight at a time and its answer also serves other waiting entries
// on the same page; entries retire in order, one per cycle, to the core on
// the resp_* port, which has no back-pressure. A squash names the id of the
// oldest squashed access; it and every younger entry are squashed.
module cc_lsq
  import picasso_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned ID_W  = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // enqueue (from the PTLB stage)
  input  logic                  enq_valid,
  output logic                  enq_ready,
  input  logic [ID_W-1:0]       enq_id,
  input  mem_op_e               enq_op,
  input  logic [2:0]            enq_size,
  input  logic [PA_W-1:0]       enq_daddr,
  input  logic [CAP_W-1:0]      enq_wdata,
  input  fault_e                enq_fault,     // fault already known
  input  logic                  enq_colored,   // a PVT check is needed
  input  logic                  enq_pvb_known, // PVT buffer hit: check done
  input  logic [XLEN-1:0]       enq_pvt_vaddr,
  input  logic [PVB_IDX_W-1:0]  enq_pvb_idx,
  input  logic                  enq_ptlb_hit,
  input  logic [PA_W-1:0]       enq_pvt_paddr,
  // squash
  input  logic                  squash_valid,
  input  logic [ID_W-1:0]       squash_id,
  output logic                  squash_hit,    // squash_id was in the queue
  // commit: the store with this id is no longer speculative (held by the
  // core until the store's completion appears on resp_*)
  input  logic                  commit_valid,
  input  logic [ID_W-1:0]       commit_id,
  // fence: PVT words loaded before it must not enter the PVT buffer
  input  logic                  fence,
  // PTLB refill
  output logic                  walk_req_valid,
  output logic [VPN_W-1:0]      walk_req_vpn,
  input  logic                  walk_req_ready,
  input  logic                  walk_done_valid,
  input  logic [PPN_W-1:0]      walk_done_ppn,
  input  logic                  walk_done_fault,
  // data cache port (one access per cycle)
  output logic                  mreq_valid,
  input  logic                  mreq_ready,
  output mem_op_e               mreq_op,
  output logic [PA_W-1:0]       mreq_addr,
  output logic [2:0]            mreq_size,
  output logic [CAP_W-1:0]      mreq_wdata,
  output logic                  mreq_pvt,      // request is a PVT load
  output logic [$clog2(DEPTH)-1:0] mreq_idx,
  input  logic                  mresp_valid,
  input  logic                  mresp_pvt,
  input  logic [$clog2(DEPTH)-1:0] mresp_idx,
  input  logic [CAP_W-1:0]      mresp_data,
  // PVT buffer fill
  output logic                  fill_valid,
  output logic [XLEN-1:0]       fill_vaddr,
  output logic [PVT_WORD_W-1:0] fill_word,
  // completion to the core
  output logic                  resp_valid,
  output logic [ID_W-1:0]       resp_id,
  output mem_op_e               resp_op,
  output logic [CAP_W-1:0]      resp_data,
  output fault_e                resp_fault,
  // events
  output logic                  ev_store_held,  // a store waits for its PVB
  output logic                  ev_squash_wait, // a squashed entry waits for answers
  output logic                  ev_prov_fault   // a PVT load found a retracted PVB
);
  localparam int unsigned IW = $clog2(DEPTH);
  typedef logic [IW-1:0] idx_t;

  typedef enum logic [1:0] {D_NEED, D_WAIT, D_DONE} dstate_e;
  typedef enum logic [2:0] {P_NONE, P_WALK, P_WALK_WAIT, P_LOAD, P_LOAD_WAIT} pstate_e;

  typedef struct packed {
    logic                 valid;
    logic                 squashed;
    logic                 nofill;
    logic                 committed;
    mem_op_e              op;
    logic [ID_W-1:0]      id;
    logic [2:0]           size;
    logic [PA_W-1:0]      daddr;
    logic [CAP_W-1:0]     data;    // store data, then load data
    dstate_e              ds;
    pstate_e              ps;
    fault_e               fault;
    logic [XLEN-1:0]      pvt_vaddr;
    logic [PA_W-1:0]      pvt_paddr;
    logic [PVB_IDX_W-1:0] pvb_idx;
  } entry_t;

  entry_t ent_q [DEPTH];
  entry_t ent_d [DEPTH];
  idx_t   head_q, tail_q, iq_q, head_d, tail_d, iq_d;
  logic [IW:0] cnt_q, cnt_d;
  logic        walk_busy_q, walk_busy_d;
  idx_t        walk_idx_q, walk_idx_d;

  function automatic idx_t age(input idx_t i, input idx_t h);
    return idx_t'(i - h);
  endfunction

  // ---------------------------------------------------------------- selection
  logic pvt_sel_v, walk_sel_v, data_sel_v, iq_live;
  idx_t pvt_sel, walk_sel;
  entry_t iq_e;
  always_comb begin
    // oldest entry with a PVT load to send
    pvt_sel_v = 1'b0; pvt_sel = '0;
    walk_sel_v = 1'b0; walk_sel = '0;
    for (int k = DEPTH - 1; k >= 0; k--) begin
      idx_t i;
      i = idx_t'(head_q + idx_t'(k));
      if (ent_q[i].valid && !ent_q[i].squashed && ent_q[i].ps == P_LOAD) begin
        pvt_sel_v = 1'b1; pvt_sel = i;
      end
      if (ent_q[i].valid && !ent_q[i].squashed && ent_q[i].ps == P_WALK) begin
        walk_sel_v = 1'b1; walk_sel = i;
      end
    end
    // next data access in program order
    iq_e    = ent_q[iq_q];
    iq_live = iq_e.valid;  // iq_q never leaves [head, tail]
    data_sel_v = iq_live && iq_e.ds == D_NEED && !iq_e.squashed && iq_e.fault == FLT_NONE
              && (iq_e.op == MEM_LOAD || (iq_e.ps == P_NONE && iq_e.committed));
  end

  // cache request mux: PVT load first, then the data access
  always_comb begin
    mreq_valid = pvt_sel_v || data_sel_v;
    mreq_pvt   = pvt_sel_v;
    mreq_idx   = pvt_sel_v ? pvt_sel : iq_q;
    mreq_op    = pvt_sel_v ? MEM_LOAD : iq_e.op;
    mreq_addr  = pvt_sel_v ? ent_q[pvt_sel].pvt_paddr : iq_e.daddr;
    mreq_size  = pvt_sel_v ? 3'd4 : iq_e.size;
    mreq_wdata = pvt_sel_v ? '0 : iq_e.data;
  end

  assign walk_req_valid = walk_sel_v && !walk_busy_q;
  assign walk_req_vpn   = ent_q[walk_sel].pvt_vaddr[XLEN-1:PAGE_OFF_W];

  // ---------------------------------------------------------------- next state
  logic   pvb_bit;
  entry_t h_e;
  logic   retire;
  logic   sq_found;
  idx_t   sq_age;
  entry_t n;

  // squash target: the queue entry holding squash_id
  always_comb begin
    sq_found = 1'b0; sq_age = '0;
    for (int i = 0; i < DEPTH; i++) begin
      if (squash_valid && ent_q[i].valid && !ent_q[i].squashed && ent_q[i].id == squash_id) begin
        sq_found = 1'b1;
        sq_age   = age(idx_t'(i), head_q);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < DEPTH; i++) ent_d[i] = ent_q[i];
    head_d = head_q; tail_d = tail_q; iq_d = iq_q; cnt_d = cnt_q;
    walk_busy_d = walk_busy_q; walk_idx_d = walk_idx_q;
    fill_valid = 1'b0; fill_vaddr = '0; fill_word = '0;
    ev_prov_fault = 1'b0;
    pvb_bit = 1'b0;

    // PTLB refill issue and answer
    if (walk_req_valid && walk_req_ready) begin
      walk_busy_d = 1'b1;
      walk_idx_d  = walk_sel;
      ent_d[walk_sel].ps = P_WALK_WAIT;
    end
    if (walk_done_valid && walk_busy_q) begin
      walk_busy_d = 1'b0;
      for (int i = 0; i < DEPTH; i++) begin
        if (ent_q[i].valid && (i == int'(walk_idx_q) ||
            (ent_q[i].ps == P_WALK && ent_q[i].pvt_vaddr[XLEN-1:PAGE_OFF_W]
                                      == ent_q[walk_idx_q].pvt_vaddr[XLEN-1:PAGE_OFF_W]))) begin
          if (ent_q[i].squashed) begin
            ent_d[i].ps = P_NONE;
          end else if (walk_done_fault) begin
            ent_d[i].ps    = P_NONE;
            ent_d[i].fault = FLT_PVT_PAGE;
          end else begin
            ent_d[i].ps        = P_LOAD;
            ent_d[i].pvt_paddr = {walk_done_ppn, ent_q[i].pvt_vaddr[PAGE_OFF_W-1:0]};
          end
        end
      end
    end

    // cache request accepted
    if (mreq_valid && mreq_ready) begin
      if (pvt_sel_v) ent_d[pvt_sel].ps = P_LOAD_WAIT;
      else begin
        ent_d[iq_q].ds = (iq_e.op == MEM_STORE) ? D_DONE : D_WAIT;
      end
    end

    // data access pointer: skip entries that will never send data
    if (iq_live && iq_e.ds == D_NEED && (iq_e.squashed || iq_e.fault != FLT_NONE)) begin
      ent_d[iq_q].ds = D_DONE;
      iq_d = idx_t'(iq_q + 1'b1);
    end else if (iq_live && !pvt_sel_v && data_sel_v && mreq_ready) begin
      iq_d = idx_t'(iq_q + 1'b1);
    end

    // cache answers
    if (mresp_valid) begin
      if (mresp_pvt) begin
        pvb_bit = mresp_data[ent_q[mresp_idx].pvb_idx];
        ent_d[mresp_idx].ps = P_NONE;
        if (!ent_q[mresp_idx].squashed) begin
          if (pvb_bit) begin
            ent_d[mresp_idx].fault = FLT_PROVENANCE;
            ev_prov_fault = 1'b1;
          end else if (!ent_q[mresp_idx].nofill) begin
            fill_valid = 1'b1;
            fill_vaddr = ent_q[mresp_idx].pvt_vaddr;
            fill_word  = mresp_data;
          end
        end
      end else begin
        ent_d[mresp_idx].ds   = D_DONE;
        ent_d[mresp_idx].data = mresp_data;
      end
    end

    // squashed entries drop work they have not started
    for (int i = 0; i < DEPTH; i++) begin
      if (ent_q[i].valid && ent_q[i].squashed && (ent_q[i].ps == P_WALK || ent_q[i].ps == P_LOAD)
          && !(walk_req_valid && walk_req_ready && idx_t'(i) == walk_sel))
        ent_d[i].ps = P_NONE;
    end

    if (fence)
      for (int i = 0; i < DEPTH; i++) ent_d[i].nofill = 1'b1;

    if (commit_valid)
      for (int i = 0; i < DEPTH; i++)
        if (ent_q[i].valid && !ent_q[i].squashed && ent_q[i].id == commit_id)
          ent_d[i].committed = 1'b1;

    // squash
    if (sq_found)
      for (int i = 0; i < DEPTH; i++)
        if (ent_q[i].valid && age(idx_t'(i), head_q) >= sq_age) ent_d[i].squashed = 1'b1;

    // in-order retirement of the head entry
    h_e    = ent_q[head_q];
    retire = h_e.valid && h_e.ds == D_DONE && h_e.ps == P_NONE
          && !(mresp_valid && mresp_idx == head_q);
    if (retire) begin
      ent_d[head_q].valid = 1'b0;
      head_d = idx_t'(head_q + 1'b1);
    end

    // enqueue
    n = '0;
    if (enq_valid && enq_ready) begin
      n.valid     = 1'b1;
      n.squashed  = 1'b0;
      n.nofill    = fence;
      n.committed = commit_valid && commit_id == enq_id;
      n.op        = enq_op;
      n.id        = enq_id;
      n.size      = enq_size;
      n.daddr     = enq_daddr;
      n.data      = enq_wdata;
      n.ds        = D_NEED;
      n.fault     = enq_fault;
      n.pvt_vaddr = enq_pvt_vaddr;
      n.pvt_paddr = enq_pvt_paddr;
      n.pvb_idx   = enq_pvb_idx;
      if (!enq_colored || enq_pvb_known || enq_fault != FLT_NONE) n.ps = P_NONE;
      else if (enq_ptlb_hit)                                    n.ps = P_LOAD;
      else                                                      n.ps = P_WALK;
      ent_d[tail_q] = n;
      tail_d = idx_t'(tail_q + 1'b1);
    end
    cnt_d = cnt_q + (IW+1)'(enq_valid && enq_ready) - (IW+1)'(retire);
  end

  assign enq_ready  = (cnt_q != (IW+1)'(DEPTH));
  assign squash_hit = sq_found;

  // completion output
  always_comb begin
    resp_valid = retire && !h_e.squashed;
    resp_id    = h_e.id;
    resp_op    = h_e.op;
    resp_data  = (h_e.op == MEM_LOAD && h_e.fault == FLT_NONE) ? h_e.data : '0;
    resp_fault = h_e.fault;
    ev_store_held = 1'b0;
    ev_squash_wait = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      if (ent_q[i].valid && !ent_q[i].squashed && ent_q[i].op == MEM_STORE
          && ent_q[i].ds == D_NEED && ent_q[i].fault == FLT_NONE && ent_q[i].ps != P_NONE)
        ev_store_held = 1'b1;
      if (ent_q[i].valid && ent_q[i].squashed
          && (ent_q[i].ds == D_WAIT || ent_q[i].ps == P_LOAD_WAIT || ent_q[i].ps == P_WALK_WAIT))
        ev_squash_wait = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) ent_q[i] <= '0;
      head_q <= '0; tail_q <= '0; iq_q <= '0; cnt_q <= '0;
      walk_busy_q <= 1'b0; walk_idx_q <= '0;
    end else begin
      for (int i = 0; i < DEPTH; i++) ent_q[i] <= ent_d[i];
      head_q <= head_d; tail_q <= tail_d; iq_q <= iq_d; cnt_q <= cnt_d;
      walk_busy_q <= walk_busy_d; walk_idx_q <= walk_idx_d;
    end
  end

  // a cache answer must name an entry that is waiting for it
  a_resp_matches: assert property (@(posedge clk) disable iff (!rst_n)
    mresp_valid |-> ent_q[mresp_idx].valid &&
                    (mresp_pvt ? ent_q[mresp_idx].ps == P_LOAD_WAIT
                               : ent_q[mresp_idx].ds == D_WAIT));
  // a store is never sent before its provenance check passed
  a_store_after_check: assert property (@(posedge clk) disable iff (!rst_n)
    (mreq_valid && !mreq_pvt && mreq_op == MEM_STORE) |->
      (ent_q[mreq_idx].ps == P_NONE && ent_q[mreq_idx].fault == FLT_NONE));
endmodule
