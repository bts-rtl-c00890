// barrett_reduce: r = x mod q for any 128-bit x, by Barrett reduction.
// The paper states that BTS's modular reduction units use Barrett reduction
// to bring 128-bit products back to the 64-bit word. This version uses the
// full-width constant mu = floor((2^128-1)/q): qhat = (x*mu) >> 128 is at most
// two below floor(x/q), so two conditional subtractions finish the job. That
// choice (one constant good for every input up to 2^128, which the MMAU's sum
// of four products needs) is this design's own. Purely combinational; the
// units that use it add pipeline registers around it. q must be below 2^62.
module barrett_reduce
  import bts_pkg::*;
(
  input  logic [127:0] x,
  input  modulus_t     md,
  output word_t        r
);
  logic [255:0] prod;
  logic [127:0] qhat;
  logic [127:0] rem0, rem1, rem2;

  always_comb begin
    prod = {128'd0, x} * {128'd0, md.mu};
    qhat = prod[255:128];
    rem0 = x - qhat * {64'd0, md.q};
    rem1 = (rem0 >= {64'd0, md.q}) ? rem0 - {64'd0, md.q} : rem0;
    rem2 = (rem1 >= {64'd0, md.q}) ? rem1 - {64'd0, md.q} : rem1;
    r    = rem2[63:0];
  end
endmodule
