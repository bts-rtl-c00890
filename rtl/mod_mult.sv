// mod_mult: pipelined modular multiplier, r = a*b mod q (the ModMult of a PE).
// A 64x64 multiplier feeds a Barrett reduction unit. Operands must be below q.
// Timing: the product is registered, then the reduced result is registered, so
// the result appears LATENCY = 2 cycles after the operands; one new operation
// can start every cycle. The paper gives the function and the use of Barrett
// reduction; the two-stage split is this design's choice.
module mod_mult
  import bts_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  word_t    a,
  input  word_t    b,
  input  modulus_t md,
  output logic     out_valid,
  output word_t    r
);
  logic [127:0] prod_q;
  modulus_t     md_q;
  logic         v_q;
  word_t        red;

  barrett_reduce u_red (.x(prod_q), .md(md_q), .r(red));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_q <= '0; md_q <= '0; v_q <= 1'b0; r <= '0; out_valid <= 1'b0;
    end else begin
      prod_q    <= {64'd0, a} * {64'd0, b};
      md_q      <= md;
      v_q       <= in_valid;
      r         <= red;
      out_valid <= v_q;
    end
  end
endmodule
