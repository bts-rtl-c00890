// tb_mmau: random four-lane multiply-accumulate operations, one per cycle,
// checked 3 cycles later against (acc + sum y*c) mod q; also an SSA-style
// case with constants 1 and 0.
module tb_mmau;
  import bts_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
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
  logic iv, ov; word_t y [4], c [4], acc, r; modulus_t md;
  mmau dut (.clk, .rst_n, .in_valid(iv), .y, .c, .acc, .md, .out_valid(ov), .r);
  logic [63:0] expq [$];
  initial begin
    logic [63:0] e;
    iv = 0; acc = 0; md = mkmod(Q1);
    for (int l = 0; l < 4; l++) begin y[l] = 0; c[l] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      if (t >= 3 && t < 293) begin
        checks++;
        if (!ov) failures++;
        check("mmau", r, expq.pop_front());
      end
      iv = (t < 290);
      acc = rand64(md.q);
      e = acc;
      for (int l = 0; l < 4; l++) begin
        y[l] = (t % 7 == 0) ? rand64(Q0) : rand64(md.q);   // inputs from another prime
        c[l] = rand64(md.q);
        if (t % 5 == 0) c[l] = (l == 3) ? 0 : 1;
        e = addmod(e, mulmod(y[l] % md.q, c[l], md.q), md.q);
      end
      if (iv) expq.push_back(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
