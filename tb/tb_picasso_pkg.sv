// tb_picasso_pkg -- checks the capability-layout helpers of picasso_pkg.
//
// The 21-bit otype is spread over the 18-bit otype field (bits 108:91), the
// reserved bit 109 and the permission bits 127:126, the borrowed bits stored
// inverted. The test works the expected bit positions out independently of
// the package functions:
//   - an ordinary capability (borrowed bits 0, otype field all ones) reads
//     as otype -1 (unsealed);
//   - writing a random otype changes only those 21 bits, and reading it back
//     returns the value written;
//   - each of the three borrowed bits lands at its own position, inverted.
// No clock is needed; a watchdog still bounds the run.
module tb_picasso_pkg;
  import picasso_pkg::*;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [CAP_W-1:0] mask21();
    logic [CAP_W-1:0] m = '0;
    m[108:91] = '1; m[109] = 1'b1; m[127] = 1'b1; m[126] = 1'b1;
    return m;
  endfunction

  initial begin
    logic [CAP_W-1:0] c, r, m;
    pid_t t;
    m = mask21();

    c = {$urandom, $urandom, $urandom, $urandom};
    c[127:126] = 2'b00; c[109] = 1'b0; c[108:91] = '1;
    chk(cap_get_otype(c) == OTYPE_UNSEALED, "ordinary capability reads as otype -1");

    for (int i = 0; i < 1000; i++) begin
      c = {$urandom, $urandom, $urandom, $urandom};
      t = pid_t'($urandom);
      r = cap_set_otype(c, t);
      chk((r & ~m) == (c & ~m), "only the otype bits change");
      chk(r[108:91] == t[17:0] && r[109] == ~t[18] && r[126] == ~t[19] && r[127] == ~t[20],
          $sformatf("otype %h at the right positions", t));
      chk(cap_get_otype(r) == t, "otype reads back");
    end

    for (int b = 18; b < 21; b++) begin
      t = '1; t[b] = 1'b0;
      r = cap_set_otype('0, t);
      c = '0; c[108:91] = '1;
      c[(b == 18) ? 109 : (b == 19) ? 126 : 127] = 1'b1;   // 0 stored inverted
      chk(r == c, $sformatf("borrowed bit %0d", b));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
