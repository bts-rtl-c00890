// pe_mem_noc: PE-Mem NoC of one region.
// BTS splits its PEs into 32 regions of 64 and ties each HBM2e pseudo-channel
// to one region only, so off-chip traffic never crosses the chip. This block
// takes the request stream of one pseudo-channel, steers each request to the
// addressed PE of the region, and returns read data in order. A region here
// is one PE row (64 PEs), this design's reading of the paper's layout.
// Requests are steered combinationally and accepted when the target PE is
// ready; read responses are registered once (PE latency 1 + 1 here = 2).
// Address, write flag and data fan out to every PE unchanged; only the valid
// bit is decoded per PE, so most pe_req bits simply follow req.
module pe_mem_noc
  import bts_pkg::*;
#(
  parameter int unsigned NPES = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output logic     ready,
  output mem_rsp_t rsp,
  output mem_req_t pe_req   [NPES],
  input  logic     pe_ready [NPES],
  input  mem_rsp_t pe_rsp   [NPES]
);
  localparam int unsigned LP = (NPES > 1) ? $clog2(NPES) : 1;
  logic [LP-1:0] sel;
  assign sel   = LP'(req.pe);
  assign ready = pe_ready[sel];

  always_comb begin
    for (int k = 0; k < NPES; k++) begin
      pe_req[k]       = req;
      pe_req[k].valid = req.valid && (sel == LP'(k));
    end
  end

  mem_rsp_t any;
  always_comb begin
    any = '0;
    for (int k = 0; k < NPES; k++)
      if (pe_rsp[k].valid) any = pe_rsp[k];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rsp <= '0;
    else        rsp <= any;
  end
endmodule
