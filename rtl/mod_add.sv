// mod_add: modular adder/subtractor (the ModAdd of a PE).
// r = (a + b) mod q when sub = 0, r = (a - b) mod q when sub = 1, for operands
// below q. One conditional correction by q follows the add or subtract.
// Combinational; callers register the result. The paper names the unit; the
// circuit is the usual one.
module mod_add
  import bts_pkg::*;
(
  input  word_t    a,
  input  word_t    b,
  input  logic     sub,
  input  modulus_t md,
  output word_t    r
);
  logic [64:0] s;
  always_comb begin
    if (sub) begin
      s = {1'b0, a} - {1'b0, b};
      if (a < b) s = s + {1'b0, md.q};
    end else begin
      s = {1'b0, a} + {1'b0, b};
      if (s >= {1'b0, md.q}) s = s - {1'b0, md.q};
    end
    r = s[63:0];
  end
endmodule
