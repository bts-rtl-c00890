// tb_mod_add: random modular additions and subtractions, including operands
// at q-1 and 0, against reference arithmetic.
module tb_mod_add;
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
  word_t a, b, r; logic sub; modulus_t md;
  mod_add dut (.a, .b, .sub, .md, .r);
  initial begin
    md = mkmod(Q1);
    for (int t = 0; t < 400; t++) begin
      a = rand64(md.q); b = rand64(md.q); sub = t[0];
      if (t < 4) begin a = (t & 2) ? md.q - 1 : 0; b = md.q - 1; end
      #1 check(sub ? "sub" : "add", r, sub ? submod(a, b, md.q) : addmod(a, b, md.q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
