// tb_cc_lsq -- self-checking test of the load/store queue with PVT-load
// tracking, at its default size (8 entries).
//
// The queue is driven directly, as the PTLB stage would: each access comes
// with its known fault, whether it is colored, whether the PVT buffer already
// decided it, and (on a PTLB hit) the physical address of its PVT word. The
// queue is connected to the behavioural data cache and to a small PTLB-refill
// responder that maps vpn -> vpn + 0x100 and faults on one page.
//
// Directed checks (fixed-latency cache):
//   - latency of an uncolored load, of a colored load whose PVT load
//     overlaps the data load (one cycle more: the PVT load goes first), and
//     of a colored load that needs a PTLB refill;
//   - a colored store reaches the cache only after its PVT answer and its
//     commit, and never if the PVB is set (memory is left unchanged);
//   - a PVT page fault is reported;
//   - a fence while a PVT load is outstanding keeps that word out of the
//     PVT buffer, a normal PVT load fills it.
// Random phase (random cache timing): groups of accesses, some squashed,
// checked in order against a reference memory and PVB table. The watchdog
// stops a hung run.
module tb_cc_lsq;
  import picasso_pkg::*;

  localparam int DEPTH = 8;
  localparam int ID_W  = 6;
  localparam int IW    = 3;
  localparam int LAT   = 3;
  localparam logic [XLEN-1:0] PVT_VA = 64'h0000_0000_4000_0000;
  localparam logic [VPN_W-1:0] FAULT_VPN = 52'h40003;   // 4th PVT page faults
  localparam logic [PA_W-1:0] DATA_BASE = 56'h8000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enq_valid, enq_ready; logic [ID_W-1:0] enq_id; mem_op_e enq_op; logic [2:0] enq_size;
  logic [PA_W-1:0] enq_daddr; logic [CAP_W-1:0] enq_wdata; fault_e enq_fault;
  logic enq_colored, enq_pvb_known, enq_ptlb_hit; logic [XLEN-1:0] enq_pvt_vaddr;
  logic [PVB_IDX_W-1:0] enq_pvb_idx; logic [PA_W-1:0] enq_pvt_paddr;
  logic squash_valid, squash_hit; logic [ID_W-1:0] squash_id;
  logic commit_valid; logic [ID_W-1:0] commit_id; logic fence;
  logic walk_req_valid, walk_req_ready, walk_done_valid, walk_done_fault;
  logic [VPN_W-1:0] walk_req_vpn; logic [PPN_W-1:0] walk_done_ppn;
  logic mreq_valid, mreq_ready, mreq_pvt; mem_op_e mreq_op; logic [PA_W-1:0] mreq_addr;
  logic [2:0] mreq_size; logic [CAP_W-1:0] mreq_wdata; logic [IW-1:0] mreq_idx;
  logic mresp_valid, mresp_pvt; logic [IW-1:0] mresp_idx; logic [CAP_W-1:0] mresp_data;
  logic fill_valid; logic [XLEN-1:0] fill_vaddr; logic [PVT_WORD_W-1:0] fill_word;
  logic resp_valid; logic [ID_W-1:0] resp_id; mem_op_e resp_op; logic [CAP_W-1:0] resp_data;
  fault_e resp_fault;
  logic ev_store_held, ev_squash_wait, ev_prov_fault;
  logic fixed_timing;
  int accesses, pvt_accesses, max_overlap;

  cc_lsq dut (.*);

  dcache_model #(.IDX_W(IW), .MIN_LAT(LAT), .MAX_LAT(8)) u_mem (
    .clk, .rst_n, .fixed_timing,
    .req_valid(mreq_valid), .req_ready(mreq_ready), .req_op(mreq_op), .req_addr(mreq_addr),
    .req_size(mreq_size), .req_wdata(mreq_wdata), .req_pvt(mreq_pvt), .req_idx(mreq_idx),
    .resp_valid(mresp_valid), .resp_pvt(mresp_pvt), .resp_idx(mresp_idx), .resp_data(mresp_data),
    .accesses, .pvt_accesses, .max_outstanding_pvt_and_data(max_overlap));

  // PTLB refill responder: one walk at a time, 2..6 cycles
  int walk_cnt = 0, walk_timer = 0;
  logic walk_busy = 0; logic [VPN_W-1:0] walk_vpn;
  assign walk_req_ready = !walk_busy;
  always_ff @(posedge clk) begin
    walk_done_valid <= 1'b0;
    if (!rst_n) walk_busy <= 1'b0;
    else if (walk_busy) begin
      if (walk_timer == 0) begin
        walk_done_valid <= 1'b1;
        walk_done_ppn   <= PPN_W'(walk_vpn + 52'h100);
        walk_done_fault <= (walk_vpn == FAULT_VPN);
        walk_busy       <= 1'b0;
      end else walk_timer <= walk_timer - 1;
    end else if (walk_req_valid) begin
      walk_busy <= 1'b1; walk_vpn <= walk_req_vpn; walk_cnt <= walk_cnt + 1;
      walk_timer <= fixed_timing ? 2 : $urandom_range(2, 6);
    end
  end

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- monitors
  typedef struct { logic [ID_W-1:0] id; mem_op_e op; logic [CAP_W-1:0] data; fault_e fault; int t; } resp_t;
  resp_t got[$];
  int cyc = 0;
  int n_fill = 0, n_held = 0, n_sqw = 0, n_prov = 0;
  int last_store_req_t = -1, last_pvt_resp_t = -1;
  logic [XLEN-1:0] fills[$];
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (resp_valid) begin
      automatic resp_t r;
      r.id = resp_id; r.op = resp_op; r.data = resp_data; r.fault = resp_fault; r.t = cyc;
      got.push_back(r);
    end
    if (fill_valid) begin n_fill++; fills.push_back(fill_vaddr); end
    if (ev_store_held) n_held++;
    if (ev_squash_wait) n_sqw++;
    if (ev_prov_fault) n_prov++;
    if (mreq_valid && mreq_ready && mreq_op == MEM_STORE) last_store_req_t = cyc;
    if (mresp_valid && mresp_pvt) last_pvt_resp_t = cyc;
  end

  // ---------------------------------------------------------------- reference
  logic [CAP_W-1:0] ref_mem [logic [PA_W-5:0]];
  logic [127:0] pvt_ref [64];     // 16 PVT words on each of 4 pages

  function automatic logic [CAP_W-1:0] ref_rd(input logic [PA_W-1:0] a);
    return ref_mem.exists(a[PA_W-1:4]) ? ref_mem[a[PA_W-1:4]] : '0;
  endfunction
  // the IDs used: 16 PVT words at the start of each of 4 PVT pages
  function automatic int widx(input int pid);
    return ((pid >> 7) / 256) * 16 + ((pid >> 7) % 256);
  endfunction
  function automatic int word_pid(input int i);
    return ((i / 16) * 256 + i % 16) * 128;
  endfunction
  function automatic logic [XLEN-1:0] pvt_va(input int pid);
    return PVT_VA + (XLEN'(pid >> 7) << 4);
  endfunction
  function automatic logic [PA_W-1:0] pvt_pa(input int pid);
    logic [XLEN-1:0] va = pvt_va(pid);
    return {PPN_W'(va[XLEN-1:12] + 52'h100), va[11:0]};
  endfunction

  typedef struct {
    mem_op_e op; logic [2:0] size; logic [PA_W-1:0] daddr; logic [CAP_W-1:0] wdata;
    fault_e pre; bit colored; bit known; bit ptlb_hit; int pid;
  } op_t;

  function automatic fault_e exp_fault(input op_t o);
    if (o.pre != FLT_NONE) return o.pre;
    if (o.colored && !o.known) begin
      if (!o.ptlb_hit && pvt_va(o.pid) >> 12 == XLEN'(FAULT_VPN)) return FLT_PVT_PAGE;
      if (pvt_ref[widx(o.pid)][o.pid & 127]) return FLT_PROVENANCE;
    end
    return FLT_NONE;
  endfunction

  function automatic op_t mk(input mem_op_e op, input logic [PA_W-1:0] a, input bit colored,
                             input bit known, input bit ptlb_hit, input int pid);
    op_t o;
    o.op = op; o.size = 3'd4; o.daddr = a; o.wdata = {$urandom, $urandom, $urandom, $urandom};
    o.pre = FLT_NONE; o.colored = colored; o.known = known; o.ptlb_hit = ptlb_hit; o.pid = pid;
    return o;
  endfunction

  logic [ID_W-1:0] next_id = 0;
  logic [ID_W-1:0] gid[16];
  bit issued[16];

  task automatic drive(input op_t o, input logic [ID_W-1:0] id);
    enq_valid = 1; enq_id = id; enq_op = o.op; enq_size = o.size; enq_daddr = o.daddr;
    enq_wdata = o.wdata; enq_fault = o.pre; enq_colored = o.colored; enq_pvb_known = o.known;
    enq_pvt_vaddr = pvt_va(o.pid); enq_pvb_idx = PVB_IDX_W'(o.pid & 127);
    enq_ptlb_hit = o.ptlb_hit; enq_pvt_paddr = pvt_pa(o.pid);
  endtask

  // issue a group, squash from squash_at on (if not yet answered), commit
  // stores before the squash point, check answers in order
  task automatic run_group(input op_t ops[$], input int squash_at);
    int n = ops.size(), n_iss = ops.size(), n_live = ops.size();
    int n_commit = (squash_at >= 0) ? squash_at : n;
    int start = got.size();
    for (int k = 0; k < 16; k++) issued[k] = 0;
    fork
      begin
        for (int k = 0; k < n; k++) begin
          int w = 0;
          @(negedge clk);
          drive(ops[k], next_id); gid[k] = next_id; next_id++;
          #1;
          while (!enq_ready && !(squash_at >= 0 && k > squash_at && w > 40)) begin
            @(negedge clk); #1; w++;
          end
          if (!enq_ready) begin n_iss = k; next_id--; break; end
          @(posedge clk); issued[k] = 1;
        end
        @(negedge clk); enq_valid = 0; #1;
        n_live = n_iss;
        if (squash_at >= 0) begin
          int answered = got.size() - start;
          n_live = (answered > squash_at) ? answered : squash_at;
          if (n_live > n_iss) n_live = n_iss;
          if (n_live < n_iss) begin
            squash_valid = 1; squash_id = gid[n_live];
            #1; chk(squash_hit, "squash finds its entry");
            @(negedge clk); squash_valid = 0;
          end
        end
      end
      begin
        for (int k = 0; k < n_commit; k++) if (ops[k].op == MEM_STORE) begin
          bit seen = 0;
          while (!issued[k]) @(negedge clk);
          commit_valid = 1; commit_id = gid[k];
          while (!seen) begin
            @(negedge clk); #2;
            for (int i = start; i < got.size(); i++) if (got[i].id == gid[k]) seen = 1;
          end
          commit_valid = 0;
        end
      end
    join
    begin
      int t = 0;
      while (got.size() - start < n_live && t < 2000) begin @(negedge clk); t++; end
      repeat (20) @(negedge clk);
    end
    chk(got.size() - start == n_live, $sformatf("answer count %0d exp %0d", got.size() - start, n_live));
    for (int k = 0; k < n_live && start + k < got.size(); k++) begin
      resp_t r = got[start + k];
      fault_e f = exp_fault(ops[k]);
      logic [CAP_W-1:0] ed = (ops[k].op == MEM_LOAD && f == FLT_NONE) ? ref_rd(ops[k].daddr) : '0;
      if (ops[k].op == MEM_STORE && f == FLT_NONE) ref_mem[ops[k].daddr[PA_W-1:4]] = ops[k].wdata;
      checks++;
      if (r.id !== gid[k] || r.op !== ops[k].op || r.fault !== f || r.data !== ed) begin
        failures++;
        $display("FAIL op %0d id %0d %s pid %0d: got id %0d fault %s exp %s", k, gid[k],
                 ops[k].op.name(), ops[k].pid, r.id, r.fault.name(), f.name());
      end
    end
  endtask

  // single access: cycles from the accepting edge to its answer
  task automatic timed(input op_t o, output int lat);
    op_t q[$];
    int t0 = cyc;
    q.push_back(o);
    run_group(q, -1);
    lat = got[got.size()-1].t - t0;
  endtask

  task automatic set_pvb(input int pid, input bit v);
    pvt_ref[widx(pid)][pid & 127] = v;
    u_mem.poke(pvt_pa(pid), pvt_ref[widx(pid)]);
  endtask

  int lat_plain, lat_pvt, lat_walk, lat_known, fills_before;
  initial begin
    enq_valid = 0; enq_id = 0; enq_op = MEM_LOAD; enq_size = 0; enq_daddr = 0; enq_wdata = 0;
    enq_fault = FLT_NONE; enq_colored = 0; enq_pvb_known = 0; enq_ptlb_hit = 0;
    enq_pvt_vaddr = 0; enq_pvb_idx = 0; enq_pvt_paddr = 0;
    squash_valid = 0; squash_id = 0; commit_valid = 0; commit_id = 0; fence = 0;
    fixed_timing = 1;
    for (int i = 0; i < 64; i++) pvt_ref[i] = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---------------- latencies
    timed(mk(MEM_LOAD, DATA_BASE, 0, 0, 1, 0), lat_plain);
    timed(mk(MEM_LOAD, DATA_BASE, 1, 1, 1, 5), lat_known);
    timed(mk(MEM_LOAD, DATA_BASE, 1, 0, 1, 5), lat_pvt);
    timed(mk(MEM_LOAD, DATA_BASE, 1, 0, 0, 5), lat_walk);
    $display("latency: plain %0d, known %0d, PVT load %0d, refill %0d", lat_plain, lat_known, lat_pvt, lat_walk);
    // counted from the cycle the access is presented: enqueue edge, cache
    // request edge, LAT cache cycles, answer capture, in-order answer
    chk(lat_plain == LAT + 5, "uncolored load latency");
    chk(lat_known == lat_plain, "decided check adds nothing");
    chk(lat_pvt == lat_plain + 1, "PVT load overlaps the data load");
    chk(max_overlap >= 2, "PVT and data requests outstanding together");
    // a refill (request edge, 3-cycle walk answer) comes before the PVT load
    chk(lat_walk == lat_pvt + 4, "PTLB refill latency");

    // ---------------- colored store: check and commit before the write
    begin
      op_t q[$];
      q.push_back(mk(MEM_STORE, DATA_BASE + 56'h10, 1, 0, 1, 300));
      run_group(q, -1);
      chk(last_store_req_t > last_pvt_resp_t && last_pvt_resp_t > 0, "store sent after its PVT answer");
      chk(u_mem.peek(DATA_BASE + 56'h10) == q[0].wdata, "checked store written");
      chk(n_held > 0, "store held while its check is open");
    end

    // ---------------- retracted ID: load and store fault, memory unchanged
    set_pvb(300, 1);
    begin
      op_t q[$];
      q.push_back(mk(MEM_STORE, DATA_BASE + 56'h10, 1, 0, 1, 300));
      q.push_back(mk(MEM_LOAD, DATA_BASE + 56'h10, 1, 0, 0, 300));
      q.push_back(mk(MEM_LOAD, DATA_BASE + 56'h10, 1, 0, 1, 301));
      run_group(q, -1);
      chk(u_mem.peek(DATA_BASE + 56'h10) == ref_rd(DATA_BASE + 56'h10), "retracted store not written");
      chk(n_prov >= 2, "provenance faults signalled");
    end

    // ---------------- PVT page fault
    begin
      op_t q[$];
      q.push_back(mk(MEM_LOAD, DATA_BASE, 1, 0, 0, word_pid(48) + 9));   // on the faulting page
      run_group(q, -1);
      chk(got[got.size()-1].fault == FLT_PVT_PAGE, "PVT page fault reported");
    end

    // ---------------- fills and fence
    fills_before = n_fill;
    begin
      op_t q[$];
      q.push_back(mk(MEM_LOAD, DATA_BASE, 1, 0, 1, 700));
      run_group(q, -1);
      chk(n_fill == fills_before + 1 && fills[fills.size()-1] == pvt_va(700), "valid PVT word fills the buffer");
      fills_before = n_fill;
      q.delete();
      q.push_back(mk(MEM_LOAD, DATA_BASE, 1, 0, 1, 900));
      fork
        run_group(q, -1);
        begin repeat (3) @(negedge clk); fence = 1; @(negedge clk); fence = 0; end
      join
      chk(n_fill == fills_before, "PVT word loaded before a fence is not kept");
    end

    // ---------------- random groups
    fixed_timing = 0;
    for (int i = 0; i < 64; i++) if ($urandom_range(0, 1) != 0) pvt_ref[i] = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 64; i++) u_mem.poke(pvt_pa(word_pid(i)), pvt_ref[i]);
    for (int g = 0; g < 600; g++) begin
      automatic op_t q[$];
      automatic int n = $urandom_range(1, 12);
      automatic int sq = ($urandom_range(0, 3) == 0) ? $urandom_range(0, n - 1) : -1;
      for (int k = 0; k < n; k++) begin
        automatic int c = $urandom_range(0, 9);
        automatic op_t o = mk($urandom_range(0, 1) != 0 ? MEM_LOAD : MEM_STORE,
                              DATA_BASE + PA_W'($urandom_range(0, 31) * 16),
                              c < 7, 0, $urandom_range(0, 2) != 0,
                              word_pid($urandom_range(0, 63)) + $urandom_range(0, 127));
        if (c == 7) o.pre = FLT_SEAL;
        if (o.colored && !pvt_ref[widx(o.pid)][o.pid & 127] && $urandom_range(0, 3) == 0) o.known = 1;
        q.push_back(o);
      end
      run_group(q, sq);
    end

    $display("events: fills %0d held %0d squash_wait %0d prov %0d walks %0d pvt_accesses %0d",
             n_fill, n_held, n_sqw, n_prov, walk_cnt, pvt_accesses);
    chk(n_sqw > 0, "squashed entries waited for their answers");
    chk(walk_cnt > 0 && pvt_accesses > 0, "refills and PVT loads happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
