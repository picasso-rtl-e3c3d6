// tb_ptlb -- checks the PTLB: a lookup answers one cycle later; a miss is
// refilled through the page-table walker and then hits with the walker's
// translation; a faulting walk is reported and not cached; 8 pages fit, a
// ninth evicts one; flush empties it.
module tb_ptlb;
  import picasso_pkg::*;
  logic clk = 0, rst_n = 0;
  logic flush, lk_valid, q_valid, q_hit;
  logic [XLEN-1:0] lk_vaddr;
  logic [PA_W-1:0] q_paddr;
  logic walk_req_valid, walk_req_ready, walk_done_valid, walk_done_fault;
  logic [VPN_W-1:0] walk_req_vpn, ptw_req_vpn;
  logic [PPN_W-1:0] walk_done_ppn, ptw_resp_ppn;
  logic ptw_req_valid, ptw_req_ready, ptw_resp_valid, ptw_resp_fault;
  int walks;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ptlb dut (.*);
  ptw_model #(.LATENCY(3), .PPN_OFFSET(52'h100), .FAULT_LO(52'h7000), .FAULT_HI(52'h7000)) u_ptw (
    .clk, .rst_n, .req_valid(ptw_req_valid), .req_vpn(ptw_req_vpn), .req_ready(ptw_req_ready),
    .resp_valid(ptw_resp_valid), .resp_ppn(ptw_resp_ppn), .resp_fault(ptw_resp_fault), .walks);

  // one lookup: present in a cycle, sample the registered answer next cycle
  task automatic lookup(input logic [XLEN-1:0] va, output logic h, output logic [PA_W-1:0] pa);
    @(negedge clk); lk_valid = 1; lk_vaddr = va;
    @(negedge clk); lk_valid = 0;
    checks++; if (!q_valid) begin failures++; $display("FAIL no q_valid one cycle after lookup"); end
    h = q_hit; pa = q_paddr;
  endtask
  task automatic walk(input logic [XLEN-1:0] va, output logic flt, output logic [PPN_W-1:0] ppn);
    int n = 0;
    @(negedge clk); walk_req_valid = 1; walk_req_vpn = va[XLEN-1:12];
    while (!walk_req_ready) @(negedge clk);
    @(negedge clk); walk_req_valid = 0;
    while (!walk_done_valid && n < 50) begin @(negedge clk); n++; end
    flt = walk_done_fault; ppn = walk_done_ppn;
    @(negedge clk);
  endtask
  function automatic logic [PA_W-1:0] xl(input logic [XLEN-1:0] va);
    return {PPN_W'(va[XLEN-1:12] + 52'h100), va[11:0]};
  endfunction
  task automatic expect_hit(input logic [XLEN-1:0] va);
    logic h; logic [PA_W-1:0] pa;
    lookup(va, h, pa); checks++;
    if (!h || pa !== xl(va)) begin failures++; $display("FAIL expect hit %h h=%b pa=%h", va, h, pa); end
  endtask
  task automatic expect_miss(input logic [XLEN-1:0] va);
    logic h; logic [PA_W-1:0] pa;
    lookup(va, h, pa); checks++;
    if (h) begin failures++; $display("FAIL expect miss %h", va); end
  endtask

  logic f; logic [PPN_W-1:0] p; int nh;
  initial begin
    flush = 0; lk_valid = 0; lk_vaddr = 0; walk_req_valid = 0; walk_req_vpn = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    expect_miss(64'h3F_FFBC_0010);
    walk(64'h3F_FFBC_0010, f, p);
    checks++; if (f || p !== PPN_W'(52'h3FFFBC0 + 52'h100)) begin failures++; $display("FAIL walk answer f=%b p=%h", f, p); end
    expect_hit(64'h3F_FFBC_0010);
    expect_hit(64'h3F_FFBC_0FF0);   // same page, other offset
    // faulting page: reported, not cached
    walk(64'h700_0000, f, p);
    checks++; if (!f) begin failures++; $display("FAIL fault not reported"); end
    expect_miss(64'h700_0000);
    // capacity: 8 pages (one already present), then a ninth evicts one
    for (int i = 1; i < 8; i++) walk(64'h3F_FFBC_0000 + 64'(i) * 4096, f, p);
    for (int i = 0; i < 8; i++) expect_hit(64'h3F_FFBC_0000 + 64'(i) * 4096);
    walk(64'h3F_FFBC_0000 + 64'd8 * 4096, f, p);
    expect_hit(64'h3F_FFBC_0000 + 64'd8 * 4096);
    nh = 0;
    for (int i = 0; i < 8; i++) begin
      logic h; logic [PA_W-1:0] pa; lookup(64'h3F_FFBC_0000 + 64'(i) * 4096, h, pa); nh += int'(h);
    end
    checks++; if (nh != 7) begin failures++; $display("FAIL eviction left %0d", nh); end
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    expect_miss(64'h3F_FFBC_0000 + 64'd8 * 4096);
    checks++; if (walks != 10) begin failures++; $display("FAIL walk count %0d", walks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
