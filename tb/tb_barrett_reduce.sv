// tb_barrett_reduce: random 128-bit inputs (full range and products of two
// residues) against the % operator, for three primes.
module tb_barrett_reduce;
  import bts_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask
  logic [127:0] x; modulus_t md; word_t r;
  barrett_reduce dut (.x, .md, .r);
  initial begin
    logic [63:0] qs [3];
    qs = '{Q0, Q1, 64'd193};
    for (int t = 0; t < 600; t++) begin
      md = mkmod(qs[t % 3]);
      if (t % 2) x = {$urandom(), $urandom(), $urandom(), $urandom()};
      else       x = {64'd0, rand64(md.q)} * {64'd0, rand64(md.q)};
      if (t == 0) x = '1;
      #1 check("barrett", r, 64'(x % {64'd0, md.q}));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
