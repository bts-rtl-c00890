// tb_scratchpad: random masked writes and reads on a small scratchpad against
// a shadow copy; a read returns the line one cycle later.
module tb_scratchpad;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
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
  logic en, we; logic [1:0] wmask; logic [5:0] addr; logic [127:0] wdata, rdata;
  scratchpad #(.LINES(64)) dut (.clk, .en, .we, .wmask, .addr, .wdata, .rdata);
  logic [127:0] shadow [64];
  initial begin
    en = 0; we = 0; wmask = 0; addr = 0; wdata = 0;
    rst_n = 1;
    for (int k = 0; k < 64; k++) begin
      @(negedge clk); en = 1; we = 1; wmask = 2'b11; addr = 6'(k);
      wdata = {$urandom(), $urandom(), $urandom(), $urandom()}; shadow[k] = wdata;
    end
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      en = 1; addr = 6'($urandom()); we = $urandom_range(0, 1); wmask = 2'($urandom_range(1, 3));
      wdata = {$urandom(), $urandom(), $urandom(), $urandom()};
      if (we) begin
        if (wmask[0]) shadow[addr][63:0] = wdata[63:0];
        if (wmask[1]) shadow[addr][127:64] = wdata[127:64];
      end else begin
        @(negedge clk); en = 0;
        check("lo", rdata[63:0], shadow[addr][63:0]);
        check("hi", rdata[127:64], shadow[addr][127:64]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
