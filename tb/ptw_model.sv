// ptw_model -- behavioural stand-in for the core's page-table walker, used
// only by testbenches. Virtual page v maps to physical page v + PPN_OFFSET,
// except pages in [FAULT_LO, FAULT_HI], which fault. Each walk answers after
// LATENCY cycles; one walk at a time. Not synthesizable in intent.
module ptw_model
  import picasso_pkg::*;
#(
  parameter int unsigned LATENCY    = 5,
  parameter logic [VPN_W-1:0] PPN_OFFSET = 52'h100,
  parameter logic [VPN_W-1:0] FAULT_LO = 52'hF_FFFF_FFFF_FFFF,
  parameter logic [VPN_W-1:0] FAULT_HI = 52'hF_FFFF_FFFF_FFFF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  input  logic [VPN_W-1:0] req_vpn,
  output logic             req_ready,
  output logic             resp_valid,
  output logic [PPN_W-1:0] resp_ppn,
  output logic             resp_fault,
  output int               walks
);
  logic busy;
  int cnt;
  logic [VPN_W-1:0] vpn;
  assign req_ready = !busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0; cnt <= 0; vpn <= '0; walks <= 0;
      resp_valid <= 0; resp_ppn <= '0; resp_fault <= 0;
    end else begin
      resp_valid <= 0;
      if (!busy && req_valid) begin
        busy <= 1; cnt <= LATENCY; vpn <= req_vpn; walks <= walks + 1;
      end else if (busy) begin
        if (cnt <= 1) begin
          busy <= 0;
          resp_valid <= 1;
          resp_fault <= (vpn >= FAULT_LO && vpn <= FAULT_HI);
          resp_ppn   <= PPN_W'(vpn + PPN_OFFSET);
        end else cnt <= cnt - 1;
      end
    end
  end
endmodule
