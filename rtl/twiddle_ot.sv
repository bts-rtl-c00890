// twiddle_ot: on-the-fly twiddling (OT) twiddle-factor generator.
// Any power xi^e of the primitive 2N-th root of unity, 0 <= e < 2N, is formed
// as high[e / M] * low[e % M] mod q, where RF_high holds xi^(M*j) (broadcast
// by the BrU, shared by all PEs) and RF_low holds xi^i for i < M (loaded from
// the PE's scratchpad). This split, and the multiplier plus reduction unit
// that combine the two, follow the paper. M = 512 (so both tables have 512
// entries for 2N = 2^18) is this design's choice; the paper gives no M.
// Exponents up to 2N - 1 are covered so that inverse twiddles xi^(2N-e) need
// no separate table. Timing: registered table read, then ModMult (2 cycles),
// LATENCY = 3. Tables are written through simple write ports.
module twiddle_ot
  import bts_pkg::*;
#(
  parameter int unsigned LOG_M  = 9,   // lower-digit table size M = 2^LOG_M
  parameter int unsigned LOG_2N = 18   // exponents range over [0, 2N)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      high_we,
  input  logic [LOG_2N-LOG_M-1:0]   high_addr,
  input  word_t                     high_wdata,
  input  logic                      low_we,
  input  logic [LOG_M-1:0]          low_addr,
  input  word_t                     low_wdata,
  input  logic                      in_valid,
  input  logic [LOG_2N-1:0]         e,
  input  modulus_t                  md,
  output logic                      out_valid,
  output word_t                     w
);
  localparam int unsigned NHIGH = 1 << (LOG_2N - LOG_M);
  localparam int unsigned NLOW  = 1 << LOG_M;

  word_t rf_high [NHIGH];
  word_t rf_low  [NLOW];

  always_ff @(posedge clk) begin
    if (high_we) rf_high[high_addr] <= high_wdata;
    if (low_we)  rf_low[low_addr]   <= low_wdata;
  end

  word_t    h_q, l_q;
  logic     v_q;
  modulus_t md_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_q <= '0; l_q <= '0; v_q <= 1'b0; md_q <= '0;
    end else begin
      h_q  <= rf_high[e[LOG_2N-1:LOG_M]];
      l_q  <= rf_low[e[LOG_M-1:0]];
      v_q  <= in_valid;
      md_q <= md;
    end
  end

  mod_mult u_mul (.clk, .rst_n, .in_valid(v_q), .a(h_q), .b(l_q), .md(md_q),
                  .out_valid(out_valid), .r(w));
endmodule
