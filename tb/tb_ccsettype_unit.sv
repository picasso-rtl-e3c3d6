// tb_ccsettype_unit -- checks ccsettype: the otype written into the result,
// all other bits kept, and each fault (untagged, not unsealed, no VMEM
// permission, ID out of range) with the tag cleared.
module tb_ccsettype_unit;
  import picasso_pkg::*;
  logic [CAP_W-1:0] cs1, cd;
  logic cs1_tag, cd_tag;
  logic [XLEN-1:0] rs2;
  pid_t otth;
  fault_e fault;
  int checks = 0, failures = 0;

  ccsettype_unit dut (.cs1, .cs1_tag, .rs2, .otypeth(otth), .cd, .cd_tag, .fault);

  // an unsealed allocator capability: 18-bit otype ones, borrowed bits 0
  function automatic logic [CAP_W-1:0] alloc_cap(input logic vmem);
    logic [CAP_W-1:0] c = {$urandom, $urandom, $urandom, $urandom};
    c[127] = 0; c[126] = 0; c[109] = 0; c[108:91] = '1; c[125] = vmem;
    return c;
  endfunction

  task automatic run(input logic [CAP_W-1:0] c, input logic tg, input logic [XLEN-1:0] id,
                     input logic [20:0] th, input fault_e exp_f);
    logic [CAP_W-1:0] exp_c;
    cs1 = c; cs1_tag = tg; rs2 = id; otth = th; #1;
    checks++;
    if (exp_f == FLT_NONE) begin
      exp_c = c;
      exp_c[127] = ~id[20]; exp_c[126] = ~id[19]; exp_c[109] = ~id[18]; exp_c[108:91] = id[17:0];
      if (fault !== FLT_NONE || cd !== exp_c || cd_tag !== 1) begin
        failures++; $display("FAIL ok case id=%h fault=%s", id, fault.name());
      end
    end else if (fault !== exp_f || cd_tag !== 0 || cd !== c) begin
      failures++; $display("FAIL fault case id=%h exp %s got %s", id, exp_f.name(), fault.name());
    end
  endtask

  initial begin
    run(alloc_cap(1), 1, 64'd1, 21'h100000, FLT_NONE);
    run(alloc_cap(1), 1, 64'hFFFFF, 21'h100000, FLT_NONE);
    run(alloc_cap(1), 1, 64'h1FFFFE, 21'h1FFFFF, FLT_NONE);
    run(alloc_cap(1), 0, 64'd7, 21'h100000, FLT_TAG);
    run(alloc_cap(0), 1, 64'd7, 21'h100000, FLT_PERM);
    run(alloc_cap(1), 1, 64'd0, 21'h100000, FLT_TYPE);
    run(alloc_cap(1), 1, 64'h100000, 21'h100000, FLT_TYPE);
    run(alloc_cap(1), 1, 64'h1_0000_0005, 21'h100000, FLT_TYPE);
    begin
      automatic logic [CAP_W-1:0] c = alloc_cap(1);
      c[108:91] = 18'd42;   // already colored / sealed
      run(c, 1, 64'd7, 21'h100000, FLT_SEAL);
    end
    for (int i = 0; i < 1000; i++) begin
      automatic logic [20:0] th = 21'($urandom);
      automatic logic [XLEN-1:0] id = 64'($urandom_range(0, 21'h1FFFFF));
      automatic logic vm = 1'($urandom);
      automatic fault_e f = !vm ? FLT_PERM : (id == 0 || id >= 64'(th)) ? FLT_TYPE : FLT_NONE;
      run(alloc_cap(vm), 1, id, th, f);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
