// pvt_addr_calc -- address of the provenance-validity bit (PVB) of a colored
// capability.
//
// The PVT is a bit array starting at the virtual address held in the PVTR
// CSR: the PVB of provenance ID p is bit p of the table, i.e. bit p[2:0] of
// the byte at PVTR + p[20:3]. The pipeline fetches and caches whole 128-bit
// (16-byte) PVT words, so this block returns the 16-byte-aligned virtual
// address of the word, PVTR + 16*p[20:7], and the bit index p[6:0] inside
// it. PVTR is 16-byte aligned (its low four bits are hardwired to zero in
// picasso_csr). The paper writes the address as "PVTBase + ProvenanceID";
// reading it as a bit offset is what makes the table 256 KiB for 2^21 IDs,
// as the paper states.
//
// Purely combinational; it runs in parallel with the data address
// calculation of the same load or store.
// bit_idx is simply the low seven bits of the ID.
module pvt_addr_calc
  import picasso_pkg::*;
(
  input  logic [XLEN-1:0]      pvtr,
  input  pid_t                 pid,
  output logic [XLEN-1:0]      word_vaddr,
  output logic [PVB_IDX_W-1:0] bit_idx
);
  localparam int unsigned WORD_BYTES_W = $clog2(PVT_WORD_W / 8);  // 4

  always_comb begin
    word_vaddr = {pvtr[XLEN-1:WORD_BYTES_W], {WORD_BYTES_W{1'b0}}}
               + (XLEN'(pid[PID_W-1:PVB_IDX_W]) << WORD_BYTES_W);
    bit_idx    = pid[PVB_IDX_W-1:0];
  end
endmodule
