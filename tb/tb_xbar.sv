// tb_xbar: for every schedule round r of an 8-port crossbar, output o must
// show input (o - r) mod 8 one cycle later.
module tb_xbar;
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
  logic [2:0] round; logic [11:0] din [8], dout [8];
  xbar #(.NP(8)) dut (.clk, .rst_n, .round, .din, .dout);
  initial begin
    round = 0; for (int k = 0; k < 8; k++) din[k] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      round = 3'(t); for (int k = 0; k < 8; k++) din[k] = 12'($urandom());
      @(negedge clk);
      for (int o = 0; o < 8; o++) check("xbar", 64'(dout[o]), 64'(din[3'(o - t)]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
