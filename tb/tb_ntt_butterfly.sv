// tb_ntt_butterfly: one butterfly per cycle, alternating forward and inverse,
// checked 4 cycles after issue against the CT and GS butterfly equations.
module tb_ntt_butterfly;
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
  logic iv, ov, inv; word_t x, y, w, xo, yo; modulus_t md;
  ntt_butterfly dut (.clk, .rst_n, .in_valid(iv), .inv, .x, .y, .w, .md, .out_valid(ov), .xo, .yo);
  logic [63:0] ex [$], ey [$];
  initial begin
    iv = 0; inv = 0; x = 0; y = 0; w = 0; md = mkmod(Q2);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      if (t >= 4 && t < 294) begin
        checks++;
        if (!ov) begin failures++; $display("FAIL latency at %0d", t); end
        else begin check("x'", xo, ex.pop_front()); check("y'", yo, ey.pop_front()); end
      end
      iv = (t < 290); inv = t[0]; x = rand64(md.q); y = rand64(md.q); w = rand64(md.q);
      if (iv) begin
        if (!inv) begin
          ex.push_back(addmod(x, mulmod(w, y, md.q), md.q));
          ey.push_back(submod(x, mulmod(w, y, md.q), md.q));
        end else begin
          ex.push_back(addmod(x, y, md.q));
          ey.push_back(mulmod(submod(x, y, md.q), w, md.q));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
