// dcache_model -- behavioural stand-in for the core's L1 data cache, used
// only by testbenches. It accepts at most one request per cycle (ready is
// random when RANDOM_READY is set), reads or writes a sparse 16-byte-word
// memory at acceptance, and answers each load after a latency between
// MIN_LAT and MAX_LAT cycles, one answer per cycle, possibly out of order.
// Stores get no answer. With fixed_timing set it is always ready and
// every load takes MIN_LAT cycles. Loads return the whole aligned 16-byte word.
module dcache_model
  import picasso_pkg::*;
#(
  parameter int unsigned IDX_W        = 3,
  parameter int unsigned MIN_LAT      = 2,
  parameter int unsigned MAX_LAT      = 6,
  parameter bit          RANDOM_READY = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fixed_timing,  // 1: always ready, latency MIN_LAT
  input  logic              req_valid,
  output logic              req_ready,
  input  mem_op_e           req_op,
  input  logic [PA_W-1:0]   req_addr,
  input  logic [2:0]        req_size,
  input  logic [CAP_W-1:0]  req_wdata,
  input  logic              req_pvt,
  input  logic [IDX_W-1:0]  req_idx,
  output logic              resp_valid,
  output logic              resp_pvt,
  output logic [IDX_W-1:0]  resp_idx,
  output logic [CAP_W-1:0]  resp_data,
  output int                accesses,
  output int                pvt_accesses,
  output int                max_outstanding_pvt_and_data
);
  logic [CAP_W-1:0] mem [logic [PA_W-5:0]];

  typedef struct {
    int               due;
    logic             pvt;
    logic [IDX_W-1:0] idx;
    logic [CAP_W-1:0] data;
  } pend_t;
  pend_t pend[$];
  int now;

  function automatic logic [CAP_W-1:0] peek(input logic [PA_W-1:0] a);
    return mem.exists(a[PA_W-1:4]) ? mem[a[PA_W-1:4]] : '0;
  endfunction
  task automatic poke(input logic [PA_W-1:0] a, input logic [CAP_W-1:0] d);
    mem[a[PA_W-1:4]] = d;
  endtask

  always_ff @(negedge clk) req_ready <= (RANDOM_READY && !fixed_timing) ? ($urandom_range(0, 3) != 0) : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 0; resp_pvt <= 0; resp_idx <= '0; resp_data <= '0;
      now <= 0; accesses <= 0; pvt_accesses <= 0; max_outstanding_pvt_and_data <= 0;
      pend.delete();
    end else begin
      automatic int pick = -1;
      automatic int npvt = 0, ndat = 0;
      now <= now + 1;
      resp_valid <= 0;
      if (req_valid && req_ready) begin
        accesses <= accesses + 1;
        if (req_pvt) pvt_accesses <= pvt_accesses + 1;
        if (req_op == MEM_STORE) begin
          automatic logic [CAP_W-1:0] w = peek(req_addr);
          automatic int nb = 1 << req_size;
          automatic int off = int'(req_addr[3:0]);
          for (int b = 0; b < 16; b++)
            if (b >= off && b < off + nb) w[b*8 +: 8] = req_wdata[(b-off)*8 +: 8];
          poke(req_addr, w);
        end else begin
          automatic pend_t p;
          p.due  = now + (fixed_timing ? int'(MIN_LAT) : int'($urandom_range(MIN_LAT, MAX_LAT)));
          p.pvt  = req_pvt;
          p.idx  = req_idx;
          p.data = peek(req_addr);
          pend.push_back(p);
        end
      end
      foreach (pend[i]) begin
        if (pend[i].pvt) npvt++; else ndat++;
        if (pick < 0 && pend[i].due <= now) pick = i;
      end
      if (npvt > 0 && ndat > 0 && npvt + ndat > max_outstanding_pvt_and_data)
        max_outstanding_pvt_and_data <= npvt + ndat;
      if (pick >= 0) begin
        resp_valid <= 1;
        resp_pvt   <= pend[pick].pvt;
        resp_idx   <= pend[pick].idx;
        resp_data  <= pend[pick].data;
        pend.delete(pick);
      end
    end
  end
endmodule
