// tb_bru: loads the global store, broadcasts 20 words to 4 local BrUs and
// checks every beat at every local BrU: target, address, data, and that the
// beats arrive on consecutive cycles 4 cycles after the command is taken.
module tb_bru;
  import bts_pkg::*;
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
  logic ld_we; logic [15:0] ld_addr; word_t ld_wdata; logic cmd_valid, busy;
  bru_cmd_t cmd; bru_beat_t beat [4];
  bru #(.NLBRU(4), .DEPTH(64)) dut (.clk, .rst_n, .ld_we, .ld_addr, .ld_wdata, .cmd_valid, .cmd,
    .busy, .beat);
  word_t st [64];
  initial begin
    int seen;
    ld_we = 0; ld_addr = 0; ld_wdata = 0; cmd_valid = 0; cmd = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 64; k++) begin
      @(negedge clk); ld_we = 1; ld_addr = 16'(k); ld_wdata = {$urandom(), $urandom()}; st[k] = ld_wdata;
    end
    @(negedge clk); ld_we = 0;
    cmd_valid = 1; cmd.tgt = BT_BT2; cmd.gaddr = 16'd7; cmd.raddr = 10'd100; cmd.count = 11'd20;
    @(negedge clk); cmd_valid = 0;
    repeat (3) @(negedge clk);
    seen = 0;
    for (int t = 0; t < 20; t++) begin
      for (int b = 0; b < 4; b++) begin
        check("valid", 64'(beat[b].valid), 1);
        check("addr",  64'(beat[b].addr), 64'(100 + t));
        check("tgt",   64'(beat[b].tgt), 64'(BT_BT2));
        check("data",  beat[b].data, st[7 + t]);
      end
      @(negedge clk);
    end
    check("end", 64'(beat[0].valid), 0);
    repeat (2) @(negedge clk);
    check("idle", 64'(busy), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
