// mmau: modular multiply-accumulate unit of the BConvU.
//   r = (acc + sum_{l<4} y[l]*c[l]) mod q
// Four lanes (l_sub = 4 in the paper) multiply the first-part BConv results
// by the [q_hat_j]_{p_i} table entries; an adder tree sums the four 128-bit
// products, one Barrett reduction brings the sum back to a word, and a final
// modular add folds in the partial sum read from the scratchpad. This shape
// (4 multipliers, 2+1 adders, one reduction, one final adder) follows the
// paper's MMAU drawing. The same unit computes the fused subtract-scale-add
// (SSA) at the end of key-switching by choosing the inputs and constants.
// Inputs must be below 2^62 and acc below q. Timing (this design's split):
// products registered, reduced sum registered, final sum registered:
// LATENCY = 3, one operation per cycle.
module mmau
  import bts_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  word_t    y   [LANES],
  input  word_t    c   [LANES],
  input  word_t    acc,
  input  modulus_t md,
  output logic     out_valid,
  output word_t    r
);
  logic [127:0] prod_q [LANES];
  word_t        acc_q, acc_q2;
  modulus_t     md_q, md_q2;
  logic         v_q, v_q2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++) prod_q[l] <= '0;
      acc_q <= '0; md_q <= '0; v_q <= 1'b0;
    end else begin
      for (int l = 0; l < LANES; l++) prod_q[l] <= {64'd0, y[l]} * {64'd0, c[l]};
      acc_q <= acc; md_q <= md; v_q <= in_valid;
    end
  end

  logic [127:0] sum;
  always_comb begin
    sum = '0;
    for (int l = 0; l < LANES; l++) sum = sum + prod_q[l];
  end

  word_t red, red_q;
  barrett_reduce u_red (.x(sum), .md(md_q), .r(red));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      red_q <= '0; acc_q2 <= '0; md_q2 <= '0; v_q2 <= 1'b0;
    end else begin
      red_q <= red; acc_q2 <= acc_q; md_q2 <= md_q; v_q2 <= v_q;
    end
  end

  word_t fin;
  mod_add u_add (.a(red_q), .b(acc_q2), .sub(1'b0), .md(md_q2), .r(fin));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; out_valid <= 1'b0;
    end else begin
      r <= fin; out_valid <= v_q2;
    end
  end
endmodule
