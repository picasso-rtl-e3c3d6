// pvt_buffer -- small set-associative buffer of recently used PVT words.
//
// Each entry holds one 128-bit word of the provenance-validity table, i.e.
// the PVBs of 128 consecutive provenance IDs; 64 entries cover 8192 IDs. The
// buffer is indexed and tagged by the virtual address of the PVT word, so a
// hit needs neither the PTLB nor a cache access: the PVB check can be done
// in the address-calculation stage. Organisation (64 words, 4-way set
// associative, combinational lookup, virtual indexing, flush of every entry
// on a fence) follows the paper. Replacement is this design's choice: an
// invalid way if there is one, otherwise a per-set round-robin pointer. A
// fill for a word that is already present overwrites that entry.
//
// Interface/timing:
//   lookup: lk_vaddr -> lk_hit, lk_word, combinationally.
//   fill:   fill_valid/fill_vaddr/fill_word written at the clock edge.
//   flush:  flush invalidates all entries at the clock edge; it wins over a
//           fill in the same cycle.
module pvt_buffer
  import picasso_pkg::*;
#(
  parameter int unsigned WORDS = 64,
  parameter int unsigned WAYS  = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [XLEN-1:0]       lk_vaddr,
  output logic                  lk_hit,
  output logic [PVT_WORD_W-1:0] lk_word,
  input  logic                  fill_valid,
  input  logic [XLEN-1:0]       fill_vaddr,
  input  logic [PVT_WORD_W-1:0] fill_word,
  input  logic                  flush
);
  localparam int unsigned SETS   = WORDS / WAYS;
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned OFF_W  = $clog2(PVT_WORD_W / 8);
  localparam int unsigned TAG_W  = XLEN - OFF_W - SET_W;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [SET_W-1:0] set_t;

  logic [WAYS-1:0]       valid_q [SETS];
  tag_t                  tag_q   [SETS][WAYS];
  logic [PVT_WORD_W-1:0] data_q  [SETS][WAYS];
  logic [WAY_W-1:0]      rr_q    [SETS];

  function automatic set_t set_of(input logic [XLEN-1:0] a);
    return (SETS > 1) ? set_t'(a[OFF_W +: SET_W]) : '0;
  endfunction
  function automatic tag_t tag_of(input logic [XLEN-1:0] a);
    return a[XLEN-1 -: TAG_W];
  endfunction

  // Lookup
  set_t lk_set;
  always_comb begin
    lk_set  = set_of(lk_vaddr);
    lk_hit  = 1'b0;
    lk_word = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[lk_set][w] && tag_q[lk_set][w] == tag_of(lk_vaddr)) begin
        lk_hit  = 1'b1;
        lk_word = data_q[lk_set][w];
      end
    end
  end

  // Victim choice for a fill
  set_t             f_set;
  logic [WAY_W-1:0] f_way;
  logic             f_present, f_free;
  always_comb begin
    f_set     = set_of(fill_vaddr);
    f_way     = rr_q[f_set];
    f_present = 1'b0;
    f_free    = 1'b0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!valid_q[f_set][w]) begin
        f_free = 1'b1;
        if (!f_present) f_way = WAY_W'(w);
      end
    end
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[f_set][w] && tag_q[f_set][w] == tag_of(fill_vaddr)) begin
        f_present = 1'b1;
        f_way     = WAY_W'(w);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        valid_q[s] <= '0;
        rr_q[s]    <= '0;
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
    end else if (fill_valid) begin
      valid_q[f_set][f_way] <= 1'b1;
      if (!f_present && !f_free)
        rr_q[f_set] <= (WAYS > 1) ? WAY_W'((int'(rr_q[f_set]) + 1) % WAYS) : '0;
    end
  end

  // Tag and data arrays: written on fill, no reset needed (guarded by valid)
  always_ff @(posedge clk) begin
    if (fill_valid && !flush) begin
      tag_q[f_set][f_way]  <= tag_of(fill_vaddr);
      data_q[f_set][f_way] <= fill_word;
    end
  end
endmodule
