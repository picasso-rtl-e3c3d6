// tb_picasso_top -- end-to-end test of the colored-capability memory pipeline
// at its default sizes (64-word PVT buffer, 8-entry PTLB, 8-entry queue).
//
// The testbench plays the core, the allocator and the kernel:
//   - it sets PVTR and OTYPETH through the CSR port (and checks that user
//     mode cannot), and makes colored capabilities with ccsettype;
//   - it runs groups of loads and stores through colored, unsealed and
//     sealed capabilities, squashes some groups part-way and commits the
//     surviving stores;
//   - between groups it "frees" an ID (sets its PVB with an ordinary store to
//     the PVT, then fences) or "finishes a revocation" (clears it again).
// A reference model (memory image, PVB per ID, faulting PVT page) predicts
// the fault and load data of every access that is not squashed; responses
// must arrive in program order. The IDs are chosen so that several PVT words
// compete for one buffer set and PVT words lie on more pages than the PTLB
// holds. A directed phase checks latencies with a fixed-latency cache: a
// buffer hit costs nothing over an uncolored access, a PTLB stage is always
// present. Every mechanism is counted and must occur at least once.
module tb_picasso_top;
  import picasso_pkg::*;

  localparam int ID_W = 6;
  localparam int IW   = 3;
  localparam int LAT  = 3;   // cache latency in the fixed-timing phase
  localparam logic [XLEN-1:0] PVTR_VA  = 64'h0000_003F_FFBC_0000;
  localparam logic [VPN_W-1:0] PPN_OFF = 52'h100;
  localparam logic [VPN_W-1:0] FAULT_VPN = 52'h3FFFBC0 + 52'd63;  // last PVT page
  localparam pid_t OTTH = 21'h1FFFF0;
  localparam logic [PA_W-1:0] DATA_BASE = 56'h8000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // DUT signals
  priv_e priv;
  logic csr_valid; csr_op_e csr_op; logic [11:0] csr_addr; logic [XLEN-1:0] csr_wdata, csr_rdata;
  logic csr_illegal;
  logic [CAP_W-1:0] cst_cs1, cst_cd; logic cst_cs1_tag, cst_cd_tag; logic [XLEN-1:0] cst_rs2;
  fault_e cst_fault;
  logic req_valid, req_ready; logic [ID_W-1:0] req_id; mem_op_e req_op; logic [2:0] req_size;
  logic [PA_W-1:0] req_daddr; logic [CAP_W-1:0] req_wdata, req_cap; logic req_cap_tag;
  logic squash_valid; logic [ID_W-1:0] squash_id; logic commit_valid; logic [ID_W-1:0] commit_id;
  logic fence, sfence;
  logic mreq_valid, mreq_ready, mreq_pvt; mem_op_e mreq_op; logic [PA_W-1:0] mreq_addr;
  logic [2:0] mreq_size; logic [CAP_W-1:0] mreq_wdata; logic [IW-1:0] mreq_idx;
  logic mresp_valid, mresp_pvt; logic [IW-1:0] mresp_idx; logic [CAP_W-1:0] mresp_data;
  logic ptw_req_valid, ptw_req_ready, ptw_resp_valid, ptw_resp_fault;
  logic [VPN_W-1:0] ptw_req_vpn; logic [PPN_W-1:0] ptw_resp_ppn;
  logic resp_valid; logic [ID_W-1:0] resp_id; mem_op_e resp_op; logic [CAP_W-1:0] resp_data;
  fault_e resp_fault;
  logic ev_colored, ev_buf_hit, ev_ptlb_miss, ev_pvt_load, ev_prov_fault, ev_store_held,
        ev_squash_wait, ev_stall;
  logic fixed_timing;
  int accesses, pvt_accesses, max_overlap, walks;

  picasso_top dut (.*);

  dcache_model #(.IDX_W(IW), .MIN_LAT(LAT), .MAX_LAT(8)) u_mem (
    .clk, .rst_n, .fixed_timing,
    .req_valid(mreq_valid), .req_ready(mreq_ready), .req_op(mreq_op), .req_addr(mreq_addr),
    .req_size(mreq_size), .req_wdata(mreq_wdata), .req_pvt(mreq_pvt), .req_idx(mreq_idx),
    .resp_valid(mresp_valid), .resp_pvt(mresp_pvt), .resp_idx(mresp_idx), .resp_data(mresp_data),
    .accesses, .pvt_accesses, .max_outstanding_pvt_and_data(max_overlap));

  ptw_model #(.LATENCY(4), .PPN_OFFSET(PPN_OFF), .FAULT_LO(FAULT_VPN), .FAULT_HI(FAULT_VPN)) u_ptw (
    .clk, .rst_n, .req_valid(ptw_req_valid), .req_vpn(ptw_req_vpn), .req_ready(ptw_req_ready),
    .resp_valid(ptw_resp_valid), .resp_ppn(ptw_resp_ppn), .resp_fault(ptw_resp_fault), .walks);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- events
  int n_colored, n_buf_hit, n_ptlb_miss, n_pvt_load, n_prov_fault, n_store_held,
      n_squash_wait, n_stall, n_squash, n_seal, n_pvt_page, n_free, n_clear;
  always_ff @(posedge clk) if (!rst_n) begin
    {n_colored, n_buf_hit, n_ptlb_miss, n_pvt_load, n_prov_fault, n_store_held,
     n_squash_wait, n_stall} <= '0;
  end else begin
    n_colored     <= n_colored + int'(ev_colored);
    n_buf_hit     <= n_buf_hit + int'(ev_buf_hit);
    n_ptlb_miss   <= n_ptlb_miss + int'(ev_ptlb_miss);
    n_pvt_load    <= n_pvt_load + int'(ev_pvt_load);
    n_prov_fault  <= n_prov_fault + int'(ev_prov_fault);
    n_store_held  <= n_store_held + int'(ev_store_held);
    n_squash_wait <= n_squash_wait + int'(ev_squash_wait);
    n_stall       <= n_stall + int'(ev_stall);
  end

  // ---------------------------------------------------------------- responses
  typedef struct { logic [ID_W-1:0] id; mem_op_e op; logic [CAP_W-1:0] data; fault_e fault; } resp_t;
  resp_t got[$];
  always @(negedge clk) if (rst_n && resp_valid) begin
    automatic resp_t r;
    r.id = resp_id; r.op = resp_op; r.data = resp_data; r.fault = resp_fault;
    got.push_back(r);
  end

  // ---------------------------------------------------------------- reference
  logic [CAP_W-1:0] ref_mem [logic [PA_W-5:0]];
  bit               retracted [int];
  logic [CAP_W-1:0] ccap [int];       // colored capability per ID
  int               pool[$];
  logic [CAP_W-1:0] plain_cap, sealed_cap;

  function automatic logic [CAP_W-1:0] ref_rd(input logic [PA_W-1:0] a);
    return ref_mem.exists(a[PA_W-1:4]) ? ref_mem[a[PA_W-1:4]] : '0;
  endfunction
  function automatic logic [PA_W-1:0] pvt_word_pa(input int id);
    logic [XLEN-1:0] va = PVTR_VA + XLEN'((id >> 7) * 16);
    return {PPN_W'(va[XLEN-1:12] + PPN_OFF), va[11:0]};
  endfunction
  function automatic bit pvt_page_faults(input int id);
    logic [XLEN-1:0] va = PVTR_VA + XLEN'((id >> 7) * 16);
    return va[XLEN-1:12] == FAULT_VPN;
  endfunction
  function automatic logic [CAP_W-1:0] pvt_word_ref(input int id);
    logic [CAP_W-1:0] w = '0;
    int base = (id >> 7) << 7;
    for (int b = 0; b < 128; b++) w[b] = retracted.exists(base + b) ? retracted[base + b] : 1'b0;
    return w;
  endfunction

  typedef struct {
    mem_op_e op; logic [2:0] size; logic [PA_W-1:0] daddr; logic [CAP_W-1:0] wdata;
    logic [CAP_W-1:0] cap; int cls; int pid;   // cls: 0 plain, 1 colored, 2 sealed
  } op_t;

  function automatic fault_e exp_fault(input op_t o);
    if (o.cls == 2) return FLT_SEAL;
    if (o.cls == 1) begin
      if (pvt_page_faults(o.pid)) return FLT_PVT_PAGE;
      if (retracted.exists(o.pid) && retracted[o.pid]) return FLT_PROVENANCE;
    end
    return FLT_NONE;
  endfunction

  // ---------------------------------------------------------------- driving
  logic [ID_W-1:0] next_id = 0;
  bit issued[16];
  logic [ID_W-1:0] gid[16];

  // Run one group. With squash_at >= 0 the whole group is issued, then the
  // oldest op at or after squash_at that has not yet been answered is
  // squashed together with everything younger (a real core never squashes
  // an access it has already seen complete). Only stores before squash_at
  // are committed.
  task automatic run_group(input op_t ops[$], input int squash_at);
    int n = ops.size();
    int n_commit = (squash_at >= 0) ? squash_at : n;
    int n_live = n;
    int start_got = got.size();
    for (int k = 0; k < 16; k++) issued[k] = 0;
    fork
      begin : issuer
        int n_iss = n;
        for (int k = 0; k < n; k++) begin
          int wait_c = 0;
          @(negedge clk);
          req_valid = 1; req_id = next_id; gid[k] = next_id; next_id++;
          req_op = ops[k].op; req_size = ops[k].size; req_daddr = ops[k].daddr;
          req_wdata = ops[k].wdata; req_cap = ops[k].cap; req_cap_tag = 1;
          #1;
          // a store held for commit beyond the squash point can fill the
          // queue: the core would squash before issuing further
          while (!req_ready && !(squash_at >= 0 && k > squash_at && wait_c > 40)) begin
            @(negedge clk); #1; wait_c++;
          end
          if (!req_ready) begin n_iss = k; next_id--; break; end
          @(posedge clk); issued[k] = 1;
        end
        @(negedge clk); req_valid = 0;
        if (squash_at >= 0) begin
          int answered;
          #1;
          answered = got.size() - start_got;
          n_live = (answered > squash_at) ? answered : squash_at;
          if (n_live > n_iss) n_live = n_iss;
          if (n_live < n_iss) begin
            squash_valid = 1; squash_id = gid[n_live];
            @(negedge clk); squash_valid = 0;
            n_squash++;
          end
        end
      end
      begin : committer
        for (int k = 0; k < n_commit; k++) begin
          if (ops[k].op == MEM_STORE) begin
            bit seen = 0;
            while (!issued[k]) @(negedge clk);
            commit_valid = 1; commit_id = gid[k];
            while (!seen) begin
              @(negedge clk); #2;
              foreach (got[i]) if (i >= start_got && got[i].id == gid[k]) seen = 1;
            end
            commit_valid = 0;
          end
        end
      end
    join
    // wait for all live answers, then let squashed entries drain
    begin
      int t = 0;
      while (got.size() - start_got < n_live && t < 2000) begin @(negedge clk); t++; end
      repeat (30) @(negedge clk);
    end
    chk(got.size() - start_got == n_live, $sformatf("answer count %0d exp %0d", got.size() - start_got, n_live));
    // compare in program order with the reference
    for (int k = 0; k < n_live && start_got + k < got.size(); k++) begin
      resp_t r = got[start_got + k];
      fault_e f = exp_fault(ops[k]);
      logic [CAP_W-1:0] ed = '0;
      if (f == FLT_SEAL) n_seal++;
      if (f == FLT_PVT_PAGE) n_pvt_page++;
      if (ops[k].op == MEM_LOAD && f == FLT_NONE) ed = ref_rd(ops[k].daddr);
      if (ops[k].op == MEM_STORE && f == FLT_NONE) begin
        logic [CAP_W-1:0] w = ref_rd(ops[k].daddr);
        int nb = 1 << ops[k].size, off = int'(ops[k].daddr[3:0]);
        for (int b = 0; b < 16; b++)
          if (b >= off && b < off + nb) w[b*8 +: 8] = ops[k].wdata[(b-off)*8 +: 8];
        ref_mem[ops[k].daddr[PA_W-1:4]] = w;
      end
      checks++;
      if (r.id !== gid[k] || r.op !== ops[k].op || r.fault !== f || r.data !== ed) begin
        failures++;
        $display("FAIL op %0d id %0d %s cls %0d pid %0d: got id %0d fault %s exp %s data %h exp %h",
                 k, gid[k], ops[k].op.name(), ops[k].cls, ops[k].pid, r.id, r.fault.name(), f.name(),
                 r.data, ed);
      end
    end
  endtask

  function automatic op_t mk_op(input mem_op_e op, input int cls, input int pid,
                                input logic [PA_W-1:0] a, input logic [2:0] size);
    op_t o;
    o.op = op; o.cls = cls; o.pid = pid; o.daddr = a; o.size = size;
    o.wdata = {$urandom, $urandom, $urandom, $urandom};
    o.cap = (cls == 1) ? ccap[pid] : (cls == 2) ? sealed_cap : plain_cap;
    return o;
  endfunction

  function automatic op_t rand_op();
    int c = $urandom_range(0, 99);
    int cls = (c < 60) ? 1 : (c < 68) ? 2 : 0;
    int pid = pool[$urandom_range(0, pool.size() - 1)];
    logic [2:0] size = $urandom_range(0, 1) ? 3'd4 : 3'd3;
    logic [PA_W-1:0] a = DATA_BASE + PA_W'($urandom_range(0, 63) * 16);
    if (size == 3) a += PA_W'($urandom_range(0, 1) * 8);
    return mk_op($urandom_range(0, 9) < 6 ? MEM_LOAD : MEM_STORE, cls, pid, a, size);
  endfunction

  // software PVT update: ordinary store of the new word, drain, then fence
  task automatic set_pvb(input int id, input bit v);
    op_t q[$];
    retracted[id] = v;
    q.push_back(mk_op(MEM_STORE, 0, 0, pvt_word_pa(id), 3'd4));
    q[0].wdata = pvt_word_ref(id);
    run_group(q, -1);
    @(negedge clk); fence = 1; @(negedge clk); fence = 0;
  endtask

  task automatic csr(input csr_op_e op, input logic [11:0] a, input logic [XLEN-1:0] d, input priv_e p);
    @(negedge clk); csr_valid = 1; csr_op = op; csr_addr = a; csr_wdata = d; priv = p;
    @(negedge clk); csr_valid = 0;
  endtask

  // latency of one access from acceptance to its answer, with a fixed cache
  task automatic timed(input op_t o, output int cyc);
    int t0;
    op_t q[$];
    int start = got.size();
    @(negedge clk);
    req_valid = 1; req_id = next_id; next_id++;
    req_op = o.op; req_size = o.size; req_daddr = o.daddr; req_wdata = o.wdata;
    req_cap = o.cap; req_cap_tag = 1;
    #1; chk(req_ready, "timed access accepted at once");
    @(negedge clk); req_valid = 0;
    cyc = 1;
    #2;   // let this negedge's answer capture run first
    while (got.size() == start && cyc < 100) begin @(negedge clk); #2; cyc++; end
    chk(got[start].fault == exp_fault(o), "timed access fault");
    if (o.op == MEM_LOAD && exp_fault(o) == FLT_NONE)
      chk(got[start].data == ref_rd(o.daddr), "timed load data");
  endtask

  // ---------------------------------------------------------------- main
  int lat_plain, lat_hit, lat_miss, lat_walk;
  initial begin
    priv = PRV_S; csr_valid = 0; csr_op = CSR_READ; csr_addr = 0; csr_wdata = 0;
    cst_cs1 = 0; cst_cs1_tag = 0; cst_rs2 = 0;
    req_valid = 0; req_id = 0; req_op = MEM_LOAD; req_size = 0; req_daddr = 0; req_wdata = 0;
    req_cap = 0; req_cap_tag = 0; squash_valid = 0; squash_id = 0; commit_valid = 0; commit_id = 0;
    fence = 0; sfence = 0; fixed_timing = 1;
    {n_squash, n_seal, n_pvt_page, n_free, n_clear} = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // CSRs: user mode is refused, kernel mode sets the table and threshold
    @(negedge clk); csr_valid = 1; csr_op = CSR_WRITE; csr_addr = CSR_PVTR; csr_wdata = 64'h1230; priv = PRV_U;
    #1; chk(csr_illegal, "user write to PVTR refused");
    @(negedge clk); csr_valid = 0; priv = PRV_S;
    csr(CSR_WRITE, CSR_PVTR, PVTR_VA, PRV_S);
    csr(CSR_WRITE, CSR_OTYPETH, 64'(OTTH), PRV_M);
    @(negedge clk); csr_valid = 1; csr_op = CSR_READ; csr_addr = CSR_PVTR;
    #1; chk(csr_rdata == PVTR_VA && !csr_illegal, "PVTR read back");
    @(negedge clk); csr_valid = 0;

    // capabilities
    plain_cap = {$urandom, $urandom, $urandom, $urandom};
    plain_cap[127:126] = 2'b00; plain_cap[109] = 0; plain_cap[108:91] = '1; plain_cap[125] = 1;
    sealed_cap = plain_cap; sealed_cap[108:91] = 18'h3FFF5;   // otype 0x1FFFF5 >= OTYPETH
    pool = '{1, 2, 127, 128, 129, 5000, 40000, 1000000, 21'h1FF000};
    for (int k = 1; k <= 6; k++) pool.push_back(k * 2048 + 3);     // same buffer set
    for (int k = 1; k <= 10; k++) pool.push_back(k * 32768 + 5);   // many PVT pages
    foreach (pool[i]) begin
      cst_cs1 = plain_cap; cst_cs1_tag = 1; cst_rs2 = 64'(pool[i]); #1;
      chk(cst_fault == FLT_NONE && cst_cd_tag, "ccsettype allowed");
      ccap[pool[i]] = cst_cd;
    end
    cst_cs1[125] = 0; #1; chk(cst_fault == FLT_PERM && !cst_cd_tag, "ccsettype needs VMEM");

    // ------------------------------------------------ directed latency phase
    timed(mk_op(MEM_LOAD, 0, 0, DATA_BASE, 3'd4), lat_plain);
    timed(mk_op(MEM_LOAD, 1, 1, DATA_BASE, 3'd4), lat_walk);   // buffer miss, PTLB miss
    timed(mk_op(MEM_LOAD, 1, 2, DATA_BASE, 3'd4), lat_hit);    // same PVT word: buffer hit
    @(negedge clk); fence = 1; @(negedge clk); fence = 0;      // empty the buffer only
    timed(mk_op(MEM_LOAD, 1, 2, DATA_BASE, 3'd4), lat_miss);   // buffer miss, PTLB hit
    $display("latency: plain %0d, buffer hit %0d, PTLB hit %0d, PTLB miss %0d", lat_plain, lat_hit, lat_miss, lat_walk);
    // counted from the accepting edge to the cycle the answer is shown:
    // PTLB stage, queue entry, cache request, LAT cache cycles, answer
    // capture, then the in-order answer
    chk(lat_plain == LAT + 4, "uncolored load latency");
    chk(lat_hit == lat_plain, "PVT buffer hit adds no latency");
    // PVT load goes first, data one cycle later: answers overlap
    chk(lat_miss == lat_plain + 1, "PTLB hit: PVT load overlaps data load");
    chk(lat_walk > lat_miss, "PTLB miss waits for the walk");

    // ------------------------------------------------ use after free
    begin
      automatic op_t q[$];
      q.push_back(mk_op(MEM_STORE, 1, 128, DATA_BASE + 56'h100, 3'd4));
      q.push_back(mk_op(MEM_LOAD, 1, 128, DATA_BASE + 56'h100, 3'd4));
      run_group(q, -1);
      set_pvb(128, 1); n_free++;
      q.delete();
      q.push_back(mk_op(MEM_LOAD, 1, 128, DATA_BASE + 56'h100, 3'd4));
      q.push_back(mk_op(MEM_STORE, 1, 128, DATA_BASE + 56'h100, 3'd4));
      q.push_back(mk_op(MEM_LOAD, 1, 129, DATA_BASE + 56'h100, 3'd4));  // neighbour still valid
      q.push_back(mk_op(MEM_LOAD, 0, 0, DATA_BASE + 56'h100, 3'd4));    // memory unchanged
      run_group(q, -1);
      // double free is visible to the allocator: the PVB reads back as 1
      q.delete();
      q.push_back(mk_op(MEM_LOAD, 0, 0, pvt_word_pa(128), 3'd4));
      run_group(q, -1);
      chk(got[got.size()-1].data[0] == 1'b1, "double free visible in PVT word");
    end

    // ------------------------------------------------ random traffic
    fixed_timing = 0;
    for (int g = 0; g < 1000; g++) begin
      automatic op_t q[$];
      automatic int n = $urandom_range(1, 12);
      automatic int sq = ($urandom_range(0, 3) == 0) ? $urandom_range(0, n - 1) : -1;
      for (int k = 0; k < n; k++) q.push_back(rand_op());
      run_group(q, sq);
      case ($urandom_range(0, 19))
        0, 1: begin
          automatic int id = pool[$urandom_range(0, pool.size() - 1)];
          if (!pvt_page_faults(id)) begin set_pvb(id, 1); n_free++; end
        end
        2: begin
          foreach (retracted[id]) if (retracted[id]) begin set_pvb(id, 0); n_clear++; break; end
        end
        3: begin @(negedge clk); sfence = 1; @(negedge clk); sfence = 0; end
        default: ;
      endcase
    end

    $display("events: colored %0d buf_hit %0d ptlb_miss %0d pvt_load %0d prov_fault %0d store_held %0d",
             n_colored, n_buf_hit, n_ptlb_miss, n_pvt_load, n_prov_fault, n_store_held);
    $display("        squash %0d squash_wait %0d stall %0d seal %0d pvt_page %0d free %0d clear %0d overlap %0d",
             n_squash, n_squash_wait, n_stall, n_seal, n_pvt_page, n_free, n_clear, max_overlap);
    chk(n_colored > 0, "colored accesses happened");
    chk(n_buf_hit > 0, "PVT buffer hits happened");
    chk(n_ptlb_miss > 8, "PTLB refills beyond its capacity happened");
    chk(n_pvt_load > 0, "PVT loads happened");
    chk(n_prov_fault > 0, "provenance faults happened");
    chk(n_store_held > 0, "stores held for their check happened");
    chk(n_squash > 0, "squashes happened");
    chk(n_squash_wait > 0, "squashed entries waited for answers");
    chk(n_stall > 0, "full-queue stalls happened");
    chk(n_seal > 0, "sealed-capability faults happened");
    chk(n_pvt_page > 0, "PVT page faults happened");
    chk(n_free > 0 && n_clear > 0, "frees and revocation clears happened");
    chk(max_overlap >= 2, "PVT and data loads were outstanding together");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
