// tb_util_pkg: reference arithmetic for the testbenches, written with plain
// wide-integer operators (%, *, /) so that it is independent of the RTL's
// Barrett reduction and pipelines.
package tb_util_pkg;
  import bts_pkg::*;

  localparam logic [63:0] Q0 = 64'h07ffffffffcc0001;  // primes = 1 mod 2^18, below 2^59
  localparam logic [63:0] Q1 = 64'h07ffffffffb00001;
  localparam logic [63:0] Q2 = 64'h07ffffffff2c0001;

  function automatic modulus_t mkmod(input logic [63:0] q);
    modulus_t m;
    m.q  = q;
    m.mu = {128{1'b1}} / {64'd0, q};
    return m;
  endfunction

  function automatic logic [63:0] mulmod(input logic [63:0] a, input logic [63:0] b, input logic [63:0] q);
    logic [127:0] p;
    p = {64'd0, a} * {64'd0, b};
    return 64'(p % {64'd0, q});
  endfunction

  function automatic logic [63:0] addmod(input logic [63:0] a, input logic [63:0] b, input logic [63:0] q);
    logic [64:0] s;
    s = {1'b0, a} + {1'b0, b};
    return 64'(s % {1'b0, q});
  endfunction

  function automatic logic [63:0] submod(input logic [63:0] a, input logic [63:0] b, input logic [63:0] q);
    return addmod(a, q - b, q);
  endfunction

  function automatic logic [63:0] powmod(input logic [63:0] a, input logic [63:0] e, input logic [63:0] q);
    logic [63:0] r, b;
    r = 1; b = a % q;
    for (int k = 0; k < 64; k++) begin
      if (e[k]) r = mulmod(r, b, q);
      b = mulmod(b, b, q);
    end
    return r;
  endfunction

  // a primitive 2N-th root of unity modulo q (2N divides q-1)
  function automatic logic [63:0] find_psi(input logic [63:0] q, input int log2n2);
    logic [63:0] g, psi;
    for (g = 2; g < 1000; g++) begin
      psi = powmod(g, (q - 1) >> log2n2, q);
      if (powmod(psi, 64'(1) << (log2n2 - 1), q) == q - 1) return psi;
    end
    return 0;
  endfunction

  function automatic logic [63:0] rand64(input logic [63:0] q);
    logic [63:0] r;
    r = {$urandom(), $urandom()};
    return r % q;
  endfunction
endpackage
