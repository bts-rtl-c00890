// ntt_butterfly: the NTTU datapath, one radix-2 butterfly per clock.
//   forward (Cooley-Tukey):   X' = X + W*Y,  Y' = X - W*Y
//   inverse (Gentleman-Sande): X' = X + Y,   Y' = (X - Y)*W
// These equations and the structure (an add/sub pair, a multiplier with a
// modular reduction unit, a second add/sub pair, muxes choosing which pair
// is used) follow the NTTU drawing of the paper: the inverse path uses the
// first add/sub pair before the multiplier, the forward path the second one
// after it. Stage split (this design's choice): pre add/sub register (1),
// ModMult (2), post add/sub register (1), so LATENCY = 4 cycles, fully
// pipelined. Operands must be below q; `inv` travels with its data.
module ntt_butterfly
  import bts_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  logic     inv,
  input  word_t    x,
  input  word_t    y,
  input  word_t    w,
  input  modulus_t md,
  output logic     out_valid,
  output word_t    xo,
  output word_t    yo
);
  localparam int LATENCY = 4;

  // stage 1: pre add/sub (used by the inverse butterfly)
  word_t    s_add, s_sub;
  mod_add u_pre_add (.a(x), .b(y), .sub(1'b0), .md(md), .r(s_add));
  mod_add u_pre_sub (.a(x), .b(y), .sub(1'b1), .md(md), .r(s_sub));

  word_t    p1_keep, p1_mul, p1_w;
  logic     p1_v, p1_inv;
  modulus_t p1_md;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_keep <= '0; p1_mul <= '0; p1_w <= '0; p1_v <= 1'b0; p1_inv <= 1'b0; p1_md <= '0;
    end else begin
      p1_keep <= inv ? s_add : x;
      p1_mul  <= inv ? s_sub : y;
      p1_w    <= w;
      p1_v    <= in_valid;
      p1_inv  <= inv;
      p1_md   <= md;
    end
  end

  // stage 2: modular multiplication, 2 cycles
  word_t    prod;
  logic     prod_v;
  mod_mult u_mul (.clk, .rst_n, .in_valid(p1_v), .a(p1_mul), .b(p1_w), .md(p1_md),
                  .out_valid(prod_v), .r(prod));

  word_t    p2_keep [2];
  logic     p2_inv  [2];
  modulus_t p2_md   [2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2; i++) begin p2_keep[i] <= '0; p2_inv[i] <= 1'b0; p2_md[i] <= '0; end
    end else begin
      p2_keep[0] <= p1_keep; p2_inv[0] <= p1_inv; p2_md[0] <= p1_md;
      p2_keep[1] <= p2_keep[0]; p2_inv[1] <= p2_inv[0]; p2_md[1] <= p2_md[0];
    end
  end

  // stage 3: post add/sub (used by the forward butterfly)
  word_t f_add, f_sub;
  mod_add u_post_add (.a(p2_keep[1]), .b(prod), .sub(1'b0), .md(p2_md[1]), .r(f_add));
  mod_add u_post_sub (.a(p2_keep[1]), .b(prod), .sub(1'b1), .md(p2_md[1]), .r(f_sub));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xo <= '0; yo <= '0; out_valid <= 1'b0;
    end else begin
      xo        <= p2_inv[1] ? p2_keep[1] : f_add;
      yo        <= p2_inv[1] ? prod       : f_sub;
      out_valid <= prod_v;
    end
  end
endmodule
