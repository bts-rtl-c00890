// xbar: one dimension-wise crossbar of the PE-PE NoC (xbar_h or xbar_v).
// BTS shares one crossbar among the PEs of a row (64x64, xbar_h) or of a
// column (32x32, xbar_v). Because exchange traffic is known in advance, the
// crossbar does no allocation: output o takes input (o - round) mod NP, where
// `round` is the step of the fixed rotating schedule supplied by the PEs'
// exchange units. Ports are FLIT_W = 12 bits wide as in the paper. Outputs
// are registered (1-cycle latency), this design's choice.
module xbar #(
  parameter int unsigned NP     = 64,
  parameter int unsigned FLIT_W = 12,
  parameter int unsigned LNP    = (NP > 1) ? $clog2(NP) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LNP-1:0]    round,
  input  logic [FLIT_W-1:0] din  [NP],
  output logic [FLIT_W-1:0] dout [NP]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NP; o++) dout[o] <= '0;
    end else begin
      for (int o = 0; o < NP; o++) dout[o] <= din[LNP'(LNP'(o) - round)];
    end
  end
endmodule
