// tb_pvt_buffer -- checks the PVT buffer: a filled word hits with its data,
// 4 words of one set fit and a fifth evicts exactly one, 64 words spread over
// all sets fit at once (8192 PVBs), a refill of a present word does not
// duplicate it, flush empties the buffer, and in a random run a hit always
// returns the last data filled for that address since the last flush.
module tb_pvt_buffer;
  import picasso_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [XLEN-1:0] lk_vaddr, fill_vaddr;
  logic lk_hit, fill_valid, flush;
  logic [PVT_WORD_W-1:0] lk_word, fill_word;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pvt_buffer dut (.*);

  localparam logic [XLEN-1:0] BASE = 64'h0000_003F_FFBC_0000;
  // word w of set s: set index is address bits [7:4]
  function automatic logic [XLEN-1:0] wa(input int s, input int w);
    return BASE + XLEN'(s) * 16 + XLEN'(w) * 256;
  endfunction
  function automatic logic [PVT_WORD_W-1:0] pat(input logic [XLEN-1:0] a, input int k);
    return {a ^ XLEN'(k), ~a + XLEN'(k)};
  endfunction

  task automatic fill(input logic [XLEN-1:0] a, input logic [PVT_WORD_W-1:0] d);
    @(negedge clk); fill_valid = 1; fill_vaddr = a; fill_word = d;
    @(negedge clk); fill_valid = 0;
  endtask
  task automatic look(input logic [XLEN-1:0] a, output logic h, output logic [PVT_WORD_W-1:0] d);
    lk_vaddr = a; #1; h = lk_hit; d = lk_word;
  endtask
  task automatic expect_hit(input logic [XLEN-1:0] a, input logic [PVT_WORD_W-1:0] d);
    logic h; logic [PVT_WORD_W-1:0] r;
    look(a, h, r); checks++;
    if (!h || r !== d) begin failures++; $display("FAIL hit %h: h=%b", a, h); end
  endtask
  task automatic expect_miss(input logic [XLEN-1:0] a);
    logic h; logic [PVT_WORD_W-1:0] r;
    look(a, h, r); checks++;
    if (h) begin failures++; $display("FAIL unexpected hit %h", a); end
  endtask

  logic [PVT_WORD_W-1:0] ref_d [logic [XLEN-1:0]];
  int nh;
  initial begin
    fill_valid = 0; flush = 0; lk_vaddr = 0; fill_vaddr = 0; fill_word = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    expect_miss(wa(0, 0));
    // one set: 4 ways
    for (int w = 0; w < 4; w++) fill(wa(3, w), pat(wa(3, w), 0));
    for (int w = 0; w < 4; w++) expect_hit(wa(3, w), pat(wa(3, w), 0));
    fill(wa(3, 4), pat(wa(3, 4), 0));
    expect_hit(wa(3, 4), pat(wa(3, 4), 0));
    nh = 0;
    for (int w = 0; w < 4; w++) begin
      logic h; logic [PVT_WORD_W-1:0] r; look(wa(3, w), h, r); nh += int'(h);
    end
    checks++; if (nh != 3) begin failures++; $display("FAIL eviction: %0d of 4 left", nh); end
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    for (int w = 0; w < 5; w++) expect_miss(wa(3, w));
    // full capacity: 16 sets x 4 ways
    for (int s = 0; s < 16; s++) for (int w = 0; w < 4; w++) fill(wa(s, w), pat(wa(s, w), 1));
    for (int s = 0; s < 16; s++) for (int w = 0; w < 4; w++) expect_hit(wa(s, w), pat(wa(s, w), 1));
    // refill of a present word updates it in place
    fill(wa(5, 2), pat(wa(5, 2), 9));
    for (int w = 0; w < 4; w++) expect_hit(wa(5, w), pat(wa(5, w), w == 2 ? 9 : 1));
    // random against a reference of last-filled data
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    for (int i = 0; i < 3000; i++) begin
      automatic logic [XLEN-1:0] a = wa($urandom_range(0, 15), $urandom_range(0, 7));
      automatic int op = $urandom_range(0, 9);
      if (op < 4) begin
        automatic logic [PVT_WORD_W-1:0] d = pat(a, i);
        fill(a, d); ref_d[a] = d;
      end else if (op == 9) begin
        @(negedge clk); flush = 1; @(negedge clk); flush = 0; ref_d.delete();
      end else begin
        logic h; logic [PVT_WORD_W-1:0] r;
        look(a, h, r); checks++;
        if (h && (!ref_d.exists(a) || ref_d[a] !== r)) begin
          failures++; $display("FAIL random hit %h", a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
