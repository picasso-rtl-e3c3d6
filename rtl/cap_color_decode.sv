// cap_color_decode -- classifies a capability as unsealed, colored or sealed.
//
// The 21-bit otype is read from the capability (18-bit CHERI otype field
// widened by three borrowed bits, see picasso_pkg) and compared with the
// OTYPETH CSR: otype == -1 is unsealed, 0 < otype < OTYPETH is a colored
// capability whose otype is its provenance ID, anything else is sealed. The
// three-way rule is the paper's; treating otype 0 as sealed and comparing
// unsigned are this design's choices. A capability whose tag is clear is
// never reported as colored: it cannot be dereferenced anyway.
//
// Purely combinational; no clock.
// Most bits of pid are wires from the capability's otype field: the
// decode is only the comparison with OTYPETH and the inversion of the three
// borrowed bits.
module cap_color_decode
  import picasso_pkg::*;
(
  input  logic [CAP_W-1:0] cap,
  input  logic             cap_tag,
  input  pid_t             otypeth,
  output cap_kind_e        kind,
  output pid_t             pid,
  output logic             colored
);
  pid_t otype;

  always_comb begin
    otype = cap_get_otype(cap);
    pid   = otype;
    if (otype == OTYPE_UNSEALED)
      kind = CAP_UNSEALED;
    else if (otype != '0 && otype < otypeth)
      kind = CAP_COLORED;
    else
      kind = CAP_SEALED;
    colored = cap_tag && (kind == CAP_COLORED);
  end
endmodule
