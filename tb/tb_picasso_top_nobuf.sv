// tb_picasso_top_nobuf -- directed test of the pipeline built without a PVT
// buffer (PVTB_WORDS = 0), the second hardware configuration.
//
// Without the buffer every colored access must translate and load its PVT
// word, even one that repeats the previous access's ID. The test checks:
//   - no access is ever decided by a buffer (no ev_buf_hit) and every
//     colored access makes a PVT load;
//   - latency: an uncolored load takes L + 4 cycles from acceptance to
//     answer with an L-cycle cache; a colored load whose PVT page is in the
//     PTLB takes one cycle more, every time;
//   - use after free: after the ID's PVB is set with an ordinary store, a
//     load and a store through it fault with FLT_PROVENANCE at once (no fence
//     is needed without a buffer) and memory is unchanged; a neighbouring ID
//     in the same PVT word still works.
// Stores are committed as soon as they are issued. A watchdog ends a hung
// run.
module tb_picasso_top_nobuf;
  import picasso_pkg::*;

  localparam int ID_W = 6;
  localparam int IW   = 3;
  localparam int LAT  = 3;
  localparam logic [XLEN-1:0] PVTR_VA = 64'h0000_0000_4000_0000;
  localparam logic [VPN_W-1:0] PPN_OFF = 52'h100;
  localparam logic [PA_W-1:0] DATA = 56'h8000_0040;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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
  logic fixed_timing = 1'b1;
  int accesses, pvt_accesses, max_overlap, walks;

  picasso_top #(.PVTB_WORDS(0)) dut (.*);

  dcache_model #(.IDX_W(IW), .MIN_LAT(LAT), .MAX_LAT(LAT)) u_mem (
    .clk, .rst_n, .fixed_timing,
    .req_valid(mreq_valid), .req_ready(mreq_ready), .req_op(mreq_op), .req_addr(mreq_addr),
    .req_size(mreq_size), .req_wdata(mreq_wdata), .req_pvt(mreq_pvt), .req_idx(mreq_idx),
    .resp_valid(mresp_valid), .resp_pvt(mresp_pvt), .resp_idx(mresp_idx), .resp_data(mresp_data),
    .accesses, .pvt_accesses, .max_outstanding_pvt_and_data(max_overlap));

  ptw_model #(.LATENCY(4), .PPN_OFFSET(PPN_OFF), .FAULT_LO(52'h0), .FAULT_HI(52'h0)) u_ptw (
    .clk, .rst_n, .req_valid(ptw_req_valid), .req_vpn(ptw_req_vpn), .req_ready(ptw_req_ready),
    .resp_valid(ptw_resp_valid), .resp_ppn(ptw_resp_ppn), .resp_fault(ptw_resp_fault), .walks);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int n_buf_hit = 0, n_pvt_load = 0, n_colored = 0;
  always @(negedge clk) if (rst_n) begin
    n_buf_hit  += int'(ev_buf_hit);
    n_pvt_load += int'(ev_pvt_load);
    n_colored  += int'(ev_colored);
  end

  logic [ID_W-1:0] next_id = 0;

  // one access; returns its answer and the cycles from acceptance to answer
  task automatic access(input mem_op_e op, input logic [PA_W-1:0] a, input logic [CAP_W-1:0] cap,
                        input logic [CAP_W-1:0] wd, output fault_e f, output logic [CAP_W-1:0] d,
                        output int lat);
    @(negedge clk);
    req_valid = 1; req_id = next_id; req_op = op; req_size = 3'd4; req_daddr = a;
    req_wdata = wd; req_cap = cap; req_cap_tag = 1;
    commit_valid = (op == MEM_STORE); commit_id = next_id;
    next_id++;
    #1; while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk); req_valid = 0;
    lat = 1;
    #1;
    while (!resp_valid && lat < 200) begin @(negedge clk); #1; lat++; end
    f = resp_fault; d = resp_data;
    chk(resp_id == req_id, "answer id");
    @(negedge clk); commit_valid = 0;
  endtask

  task automatic csr_wr(input logic [11:0] a, input logic [XLEN-1:0] v);
    @(negedge clk); csr_valid = 1; csr_op = CSR_WRITE; csr_addr = a; csr_wdata = v; priv = PRV_S;
    @(negedge clk); csr_valid = 0;
  endtask

  function automatic logic [PA_W-1:0] pvt_pa(input int id);
    logic [XLEN-1:0] va = PVTR_VA + XLEN'((id >> 7) * 16);
    return {PPN_W'(va[XLEN-1:12] + PPN_OFF), va[11:0]};
  endfunction

  logic [CAP_W-1:0] plain, c1, c2, d, wd;
  fault_e f;
  int lat_plain, lat1, lat2, lat3, pvt_before;
  initial begin
    priv = PRV_S; csr_valid = 0; csr_op = CSR_READ; csr_addr = 0; csr_wdata = 0;
    cst_cs1 = 0; cst_cs1_tag = 0; cst_rs2 = 0;
    req_valid = 0; req_id = 0; req_op = MEM_LOAD; req_size = 0; req_daddr = 0; req_wdata = 0;
    req_cap = 0; req_cap_tag = 0; squash_valid = 0; squash_id = 0; commit_valid = 0; commit_id = 0;
    fence = 0; sfence = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    csr_wr(CSR_PVTR, PVTR_VA);
    csr_wr(CSR_OTYPETH, 64'h1000);

    plain = '0; plain[108:91] = '1; plain[125] = 1;
    cst_cs1 = plain; cst_cs1_tag = 1; cst_rs2 = 64'd300; #1; c1 = cst_cd;
    chk(cst_fault == FLT_NONE, "color ID 300");
    cst_rs2 = 64'd301; #1; c2 = cst_cd;
    chk(cst_fault == FLT_NONE, "color ID 301");

    wd = {$urandom, $urandom, $urandom, $urandom};
    access(MEM_STORE, DATA, plain, wd, f, d, lat_plain);
    chk(f == FLT_NONE && u_mem.peek(DATA) == wd, "plain store");
    access(MEM_LOAD, DATA, plain, '0, f, d, lat_plain);
    chk(f == FLT_NONE && d == wd, "plain load");
    access(MEM_LOAD, DATA, c1, '0, f, d, lat1);     // PTLB miss
    chk(f == FLT_NONE && d == wd, "colored load, first");
    pvt_before = n_pvt_load;
    access(MEM_LOAD, DATA, c1, '0, f, d, lat2);     // same word again
    chk(f == FLT_NONE && d == wd, "colored load, again");
    chk(n_pvt_load == pvt_before + 1, "repeat access loads its PVT word again");
    access(MEM_LOAD, DATA, c2, '0, f, d, lat3);
    $display("latency: plain %0d, colored first %0d, again %0d, neighbour %0d", lat_plain, lat1, lat2, lat3);
    chk(lat_plain == LAT + 4, "uncolored load latency");
    chk(lat2 == lat_plain + 1 && lat3 == lat_plain + 1, "colored load with PTLB hit: one cycle more");
    chk(lat1 > lat2, "first colored load waits for a page walk");

    // free ID 300: set its bit with an ordinary store (no fence needed)
    begin
      logic [CAP_W-1:0] w = '0;
      w[300 % 128] = 1'b1;
      access(MEM_STORE, pvt_pa(300), plain, w, f, d, lat1);
      chk(f == FLT_NONE, "PVT write");
    end
    access(MEM_LOAD, DATA, c1, '0, f, d, lat1);
    chk(f == FLT_PROVENANCE && d == '0, "load after free faults");
    access(MEM_STORE, DATA, c1, ~wd, f, d, lat1);
    chk(f == FLT_PROVENANCE, "store after free faults");
    chk(u_mem.peek(DATA) == wd, "store after free did not write");
    access(MEM_LOAD, DATA, c2, '0, f, d, lat1);
    chk(f == FLT_NONE && d == wd, "neighbouring ID still valid");

    chk(n_buf_hit == 0, "no buffer decisions without a buffer");
    chk(n_pvt_load == n_colored, "every colored access loaded its PVT word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
