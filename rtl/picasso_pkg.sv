// picasso_pkg -- types and constants shared by the colored-capability
// (provenance-tracking) extension of a 128-bit CHERI-RISC-V memory pipeline.
//
// Capability layout (128 bits in memory, plus a separate validity tag):
//   [127:111] permissions (17 bits)   [110:109] reserved (2 bits)
//   [108:91]  object type (18 bits)   [90:64]   compressed bounds (27 bits)
//   [63:0]    address
// The field widths are those of the CHERI 128-bit format. The otype is
// widened from 18 to 21 bits by borrowing one reserved bit and two unused
// software-defined permission bits, giving 2^21 provenance IDs ("colors").
// Which three bits are borrowed is this design's choice: reserved bit 109 and
// user-permission bits 127:126. They are stored inverted, so an ordinary
// capability (reserved bit 0, those permissions 0) whose 18-bit otype is all
// ones reads as the 21-bit otype -1, i.e. unsealed.
//
// A capability is interpreted through the OTYPETH CSR:
//   otype == -1            -> unsealed
//   0 < otype < OTYPETH    -> colored (otype is the provenance ID)
//   otherwise              -> sealed
// (otype 0 and otypes >= OTYPETH, compared unsigned, are treated as sealed.)
//
// The provenance-validity table (PVT) holds one bit (PVB) per provenance ID,
// at bit address PVTR*8 + ID; 2^21 bits = 256 KiB. A PVB of 0 means "valid",
// 1 means "retracted": the table starts zeroed at process creation, free()
// sets the bit and a completed revocation sweep clears it again.
package picasso_pkg;

  localparam int unsigned XLEN       = 64;
  localparam int unsigned CAP_W      = 128;
  localparam int unsigned PID_W      = 21;   // provenance ID / extended otype
  localparam int unsigned PVT_WORD_W = 128;  // PVT word cached and loaded
  localparam int unsigned PVB_IDX_W  = $clog2(PVT_WORD_W);  // 7
  localparam int unsigned PA_W       = 56;   // Sv39 physical address
  localparam int unsigned PAGE_OFF_W = 12;   // 4 KiB pages
  localparam int unsigned VPN_W      = XLEN - PAGE_OFF_W;
  localparam int unsigned PPN_W      = PA_W - PAGE_OFF_W;

  typedef logic [PID_W-1:0] pid_t;

  // Capability bit fields (memory representation)
  localparam int unsigned PERM_HI   = 127;
  localparam int unsigned PERM_LO   = 111;
  localparam int unsigned OTYPE_HI  = 108;
  localparam int unsigned OTYPE_LO  = 91;
  localparam int unsigned RSVD_BIT  = 109;  // borrowed: otype bit 18
  localparam int unsigned UPERM_B3  = 127;  // borrowed: otype bit 20
  localparam int unsigned UPERM_B2  = 126;  // borrowed: otype bit 19
  // Hardware-checked permission that ccsettype requires (the allocator's
  // SW_VMEM permission, promoted to a hardware permission).
  localparam int unsigned PERM_VMEM_BIT = 125;

  localparam pid_t OTYPE_UNSEALED = '1;     // -1

  typedef enum logic [1:0] {
    CAP_UNSEALED = 2'd0,
    CAP_COLORED  = 2'd1,
    CAP_SEALED   = 2'd2
  } cap_kind_e;

  // Read the 21-bit otype of a capability.
  function automatic pid_t cap_get_otype(input logic [CAP_W-1:0] c);
    return {~c[UPERM_B3], ~c[UPERM_B2], ~c[RSVD_BIT], c[OTYPE_HI:OTYPE_LO]};
  endfunction

  // Return capability c with its 21-bit otype replaced by t.
  function automatic logic [CAP_W-1:0] cap_set_otype(input logic [CAP_W-1:0] c,
                                                     input pid_t t);
    logic [CAP_W-1:0] r;
    r = c;
    r[UPERM_B3]          = ~t[20];
    r[UPERM_B2]          = ~t[19];
    r[RSVD_BIT]          = ~t[18];
    r[OTYPE_HI:OTYPE_LO] = t[17:0];
    return r;
  endfunction

  // CSR numbers: supervisor read/write custom range (this design's choice).
  localparam logic [11:0] CSR_PVTR    = 12'h5C0;
  localparam logic [11:0] CSR_OTYPETH = 12'h5C1;

  typedef enum logic [1:0] {
    PRV_U = 2'd0,
    PRV_S = 2'd1,
    PRV_M = 2'd3
  } priv_e;

  typedef enum logic [1:0] {
    CSR_WRITE = 2'd0,
    CSR_SET   = 2'd1,
    CSR_CLEAR = 2'd2,
    CSR_READ  = 2'd3
  } csr_op_e;

  // Faults reported by the extension
  typedef enum logic [2:0] {
    FLT_NONE        = 3'd0,
    FLT_TAG         = 3'd1,  // ccsettype on an untagged capability
    FLT_SEAL        = 3'd2,  // sealed capability used / ccsettype on non-unsealed
    FLT_PERM        = 3'd3,  // ccsettype without the VMEM permission
    FLT_TYPE        = 3'd4,  // ccsettype with an ID outside 0 < id < OTYPETH
    FLT_PROVENANCE  = 3'd5,  // PVB says the provenance was retracted
    FLT_PVT_PAGE    = 3'd6   // page fault translating the PVT word
  } fault_e;

  // Memory operation kinds on the cache port
  typedef enum logic {
    MEM_LOAD  = 1'b0,
    MEM_STORE = 1'b1
  } mem_op_e;

endpackage
