// tb_mod_mult: streams one random product per cycle and checks each result
// exactly LATENCY = 2 cycles later against a*b % q.
module tb_mod_mult;
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
  logic iv, ov; word_t a, b, r; modulus_t md;
  mod_mult dut (.clk, .rst_n, .in_valid(iv), .a, .b, .md, .out_valid(ov), .r);
  logic [63:0] expq [$];
  initial begin
    iv = 0; a = 0; b = 0; md = mkmod(Q0);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      iv = (t < 296); a = rand64(md.q); b = rand64(md.q);
      if (iv) expq.push_back(mulmod(a, b, md.q));
      if (t >= 2 && t < 298) begin
        checks++;
        if (!ov) begin failures++; $display("FAIL valid timing at %0d", t); end
        else check("mult", r, expq.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
