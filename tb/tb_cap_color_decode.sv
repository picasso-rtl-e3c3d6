// tb_cap_color_decode -- checks the otype read-out and the three-way
// unsealed / colored / sealed rule against a reference written from the bit
// layout, for chosen corner cases and random capabilities and thresholds.
module tb_cap_color_decode;
  import picasso_pkg::*;
  logic [CAP_W-1:0] cap;
  logic tag;
  pid_t otth, pid;
  cap_kind_e kind;
  logic colored;
  int checks = 0, failures = 0;

  cap_color_decode dut (.cap, .cap_tag(tag), .otypeth(otth), .kind, .pid, .colored);

  // build a capability whose 21-bit otype is t: top three bits stored inverted
  function automatic logic [CAP_W-1:0] mk(input logic [20:0] t, input logic [CAP_W-1:0] rnd);
    logic [CAP_W-1:0] c = rnd;
    c[127] = ~t[20]; c[126] = ~t[19]; c[109] = ~t[18]; c[108:91] = t[17:0];
    return c;
  endfunction

  task automatic check(input logic [20:0] t, input logic [20:0] th, input logic tg);
    cap_kind_e exp_k;
    cap = mk(t, {$urandom, $urandom, $urandom, $urandom});
    otth = th; tag = tg;
    #1;
    if (t == 21'h1FFFFF) exp_k = CAP_UNSEALED;
    else if (t > 0 && t < th) exp_k = CAP_COLORED;
    else exp_k = CAP_SEALED;
    checks++;
    if (kind !== exp_k || pid !== t || colored !== (tg && exp_k == CAP_COLORED)) begin
      failures++;
      $display("FAIL otype=%h th=%h tag=%b: kind=%s pid=%h colored=%b", t, th, tg, kind.name(), pid, colored);
    end
  endtask

  initial begin
    // an ordinary CHERI capability: 18-bit otype all ones, borrowed bits 0
    cap = '0; cap[108:91] = '1; otth = 21'h100000; tag = 1; #1;
    checks++; if (kind !== CAP_UNSEALED || colored) begin failures++; $display("FAIL plain cap"); end
    check(21'h1FFFFF, 21'h100000, 1);
    check(21'h000001, 21'h100000, 1);
    check(21'h0FFFFF, 21'h100000, 1);
    check(21'h100000, 21'h100000, 1);
    check(21'h000000, 21'h100000, 1);
    check(21'h000005, 21'h000000, 1);
    check(21'h000005, 21'h000006, 0);
    check(21'h1FFFFE, 21'h1FFFFF, 1);
    for (int i = 0; i < 2000; i++)
      check(21'($urandom), 21'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
