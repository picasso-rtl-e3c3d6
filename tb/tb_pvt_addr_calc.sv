// tb_pvt_addr_calc -- checks the PVT word address and bit index against the
// bit-array definition: bit p of the table lives in byte PVTR + p/8, bit p%8,
// so its 16-byte word starts at PVTR + (p/128)*16 and holds it at bit p%128.
module tb_pvt_addr_calc;
  import picasso_pkg::*;
  logic [XLEN-1:0] pvtr, wa;
  pid_t pid;
  logic [PVB_IDX_W-1:0] bi;
  int checks = 0, failures = 0;

  pvt_addr_calc dut (.pvtr, .pid, .word_vaddr(wa), .bit_idx(bi));

  task automatic check(input logic [XLEN-1:0] base, input logic [20:0] p);
    logic [XLEN-1:0] byte_addr;
    pvtr = base; pid = p; #1;
    byte_addr = base + XLEN'(p / 8);
    checks++;
    // the byte holding the PVB lies in the word, at the bit index given
    if (wa[3:0] != 0 || byte_addr < wa || byte_addr >= wa + 16 ||
        int'(bi) != (int'(byte_addr - wa) * 8 + int'(p % 8))) begin
      failures++;
      $display("FAIL base=%h pid=%h: word=%h bit=%0d", base, p, wa, bi);
    end
  endtask

  initial begin
    check(64'h0000_003F_FFBF_0000, 21'd0);
    check(64'h0000_003F_FFBF_0000, 21'd127);
    check(64'h0000_003F_FFBF_0000, 21'd128);
    check(64'h0000_003F_FFBF_0000, 21'h1FFFFF);
    check(64'hFFFF_FFFF_FFFF_FFF0, 21'h1FFFFF);
    for (int i = 0; i < 2000; i++)
      check({$urandom, $urandom} & ~64'hF, 21'($urandom));
    // the whole 2^21-ID table spans 256 KiB
    check(64'h1000_0000, 21'h1FFFFF);
    checks++; if (wa != 64'h1000_0000 + 64'h3FFF0) begin failures++; $display("FAIL table size"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
