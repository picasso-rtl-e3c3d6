// ccsettype_unit -- execution of the ccsettype instruction, which turns an
// allocator's capability into a colored capability.
//
// cd = ccsettype(cs1, rs2): the result is cs1 with its 21-bit otype set to
// the provenance ID rs2. The paper requires the source capability to hold the
// VMEM permission (the allocator's permission, here a hardware permission)
// so that only the trusted allocator can assign IDs. Further checks are this
// design's choices: cs1 must be tagged and unsealed (otype -1), and rs2 must
// lie in 0 < rs2 < OTYPETH so that the result is interpreted as colored.
// Any failed check reports a fault and returns cs1 with its tag cleared.
//
// Purely combinational: it fits the one-cycle capability ALU path.
module ccsettype_unit
  import picasso_pkg::*;
(
  input  logic [CAP_W-1:0] cs1,
  input  logic             cs1_tag,
  input  logic [XLEN-1:0]  rs2,
  input  pid_t             otypeth,
  output logic [CAP_W-1:0] cd,
  output logic             cd_tag,
  output fault_e           fault
);
  always_comb begin
    fault = FLT_NONE;
    if (!cs1_tag)
      fault = FLT_TAG;
    else if (cap_get_otype(cs1) != OTYPE_UNSEALED)
      fault = FLT_SEAL;
    else if (!cs1[PERM_VMEM_BIT])
      fault = FLT_PERM;
    else if (rs2 == '0 || rs2 >= XLEN'(otypeth))
      fault = FLT_TYPE;

    if (fault == FLT_NONE) begin
      cd     = cap_set_otype(cs1, rs2[PID_W-1:0]);
      cd_tag = 1'b1;
    end else begin
      cd     = cs1;
      cd_tag = 1'b0;
    end
  end
endmodule
