// tb_picasso_csr -- checks PVTR/OTYPETH reset values, writes, set/clear,
// masking (PVTR 16-byte aligned, OTYPETH 21 bits) and that user mode can
// neither read nor write them.
module tb_picasso_csr;
  import picasso_pkg::*;
  logic clk = 0, rst_n = 0;
  logic csr_valid;
  csr_op_e csr_op;
  logic [11:0] csr_addr;
  logic [XLEN-1:0] csr_wdata, csr_rdata, pvtr;
  priv_e priv;
  logic csr_illegal;
  pid_t otypeth;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  picasso_csr dut (.*);

  task automatic acc(input csr_op_e op, input logic [11:0] a, input logic [XLEN-1:0] d,
                     input priv_e p, output logic [XLEN-1:0] rd, output logic ill);
    @(negedge clk);
    csr_valid = 1; csr_op = op; csr_addr = a; csr_wdata = d; priv = p;
    #1; rd = csr_rdata; ill = csr_illegal;
    @(negedge clk); csr_valid = 0;
  endtask

  task automatic expect_eq(input string what, input logic [XLEN-1:0] got, input logic [XLEN-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  logic [XLEN-1:0] rd; logic ill;
  initial begin
    csr_valid = 0; csr_op = CSR_READ; csr_addr = 0; csr_wdata = 0; priv = PRV_S;
    repeat (2) @(negedge clk); rst_n = 1;
    expect_eq("reset pvtr", pvtr, 0);
    expect_eq("reset otth", 64'(otypeth), 0);
    acc(CSR_WRITE, CSR_PVTR, 64'h0000_003F_FFBF_0007, PRV_S, rd, ill);
    expect_eq("pvtr aligned", pvtr, 64'h0000_003F_FFBF_0000);
    expect_eq("s-mode legal", 64'(ill), 0);
    acc(CSR_WRITE, CSR_OTYPETH, 64'hFFFF_FFFF_FFF0_0000, PRV_M, rd, ill);
    expect_eq("otth masked", 64'(otypeth), 64'h1_00000);
    acc(CSR_READ, CSR_OTYPETH, 0, PRV_S, rd, ill);
    expect_eq("otth read", rd, 64'h1_00000);
    acc(CSR_SET, CSR_OTYPETH, 64'h3, PRV_S, rd, ill);
    expect_eq("otth set", 64'(otypeth), 64'h1_00003);
    acc(CSR_CLEAR, CSR_OTYPETH, 64'h1, PRV_S, rd, ill);
    expect_eq("otth clear", 64'(otypeth), 64'h1_00002);
    // user mode: illegal, no effect, reads zero
    acc(CSR_WRITE, CSR_PVTR, 64'h1234_0000, PRV_U, rd, ill);
    expect_eq("u write illegal", 64'(ill), 1);
    expect_eq("u write ignored", pvtr, 64'h0000_003F_FFBF_0000);
    acc(CSR_READ, CSR_PVTR, 0, PRV_U, rd, ill);
    expect_eq("u read illegal", 64'(ill), 1);
    expect_eq("u read zero", rd, 0);
    acc(CSR_WRITE, CSR_OTYPETH, 64'h5, PRV_U, rd, ill);
    expect_eq("u otth ignored", 64'(otypeth), 64'h1_00002);
    // another CSR number is not ours
    acc(CSR_WRITE, 12'h5C2, 64'h5, PRV_U, rd, ill);
    expect_eq("other csr not flagged", 64'(ill), 0);
    expect_eq("other csr no effect", pvtr, 64'h0000_003F_FFBF_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
