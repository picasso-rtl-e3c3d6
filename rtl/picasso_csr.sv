// picasso_csr -- the two control registers added by the colored-capability
// extension.
//
//   PVTR    (CSR 0x5C0): virtual base address of the provenance-validity
//                        table. Bits [3:0] read as zero (16-byte aligned).
//   OTYPETH (CSR 0x5C1): otype threshold; otypes in 0 < otype < OTYPETH are
//                        provenance IDs. 21 bits wide, upper bits read zero.
//
// Both are accessible only from supervisor or machine mode, as the paper
// requires for PVTR; user-mode accesses return illegal = 1 and change
// nothing. Applying the same rule to OTYPETH, the CSR numbers, the
// alignment of PVTR and the reset values (PVTR = 0, OTYPETH = 0, so that
// after reset no capability is colored) are this design's choices.
//
// Interface: one access per cycle, csr_valid/csr_op/csr_addr/csr_wdata in,
// csr_rdata/csr_illegal out combinationally (old value), the write takes
// effect at the next clock edge. pvtr/otypeth outputs are the current
// register values.
// The low four bits of pvtr are always 0 (PVT words are 16-byte aligned).
module picasso_csr
  import picasso_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            csr_valid,
  input  csr_op_e         csr_op,
  input  logic [11:0]     csr_addr,
  input  logic [XLEN-1:0] csr_wdata,
  input  priv_e           priv,
  output logic [XLEN-1:0] csr_rdata,
  output logic            csr_illegal,
  output logic [XLEN-1:0] pvtr,
  output pid_t            otypeth
);
  logic [XLEN-1:0] pvtr_q, otth_q, cur, nxt;
  logic            hit, allowed;

  always_comb begin
    hit     = (csr_addr == CSR_PVTR) || (csr_addr == CSR_OTYPETH);
    allowed = (priv != PRV_U);
    cur     = (csr_addr == CSR_PVTR) ? pvtr_q : otth_q;
    unique case (csr_op)
      CSR_WRITE: nxt = csr_wdata;
      CSR_SET:   nxt = cur | csr_wdata;
      CSR_CLEAR: nxt = cur & ~csr_wdata;
      default:   nxt = cur;
    endcase
    csr_illegal = csr_valid && hit && !allowed;
    csr_rdata   = (csr_valid && hit && allowed) ? cur : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pvtr_q <= '0;
      otth_q <= '0;
    end else if (csr_valid && hit && allowed && csr_op != CSR_READ) begin
      if (csr_addr == CSR_PVTR) pvtr_q <= {nxt[XLEN-1:4], 4'b0};
      else                      otth_q <= XLEN'(nxt[PID_W-1:0]);
    end
  end

  assign pvtr    = pvtr_q;
  assign otypeth = otth_q[PID_W-1:0];
endmodule
