// tb_exch_unit: four exchange units on one 4-port crossbar (NZ = 8, so two
// words per PE pair). A forward exchange must put word (src, slot me*2+c) in
// slot c*4+src of PE me; the reverse exchange must restore the original
// buffers. The duration must be NZ*6 flit cycles plus 2.
module tb_exch_unit;
  import bts_pkg::*;
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
  localparam int LZ = 3, NZ = 8, NP = 4, C = 2;
  logic tx_we [NP]; logic [LZ-1:0] tx_waddr [NP]; word_t tx_wdata [NP];
  logic [LZ-1:0] rx_raddr; word_t rx_rdata [NP];
  logic start, rev; logic [11:0] fo [NP], fi [NP]; logic [1:0] rnd [NP];
  logic busy [NP], done [NP];
  for (genvar g = 0; g < NP; g++) begin : g_u
    exch_unit #(.LZ(LZ), .LNP(2)) u (.clk, .rst_n, .tx_we(tx_we[g]), .tx_waddr(tx_waddr[g]),
      .tx_wdata(tx_wdata[g]), .rx_raddr, .rx_rdata(rx_rdata[g]), .start, .rev, .lognp(4'd2),
      .me(2'(g)), .flit_out(fo[g]), .round(rnd[g]), .flit_in(fi[g]), .busy(busy[g]), .done(done[g]));
  end
  xbar #(.NP(NP)) u_x (.clk, .rst_n, .round(rnd[0]), .din(fo), .dout(fi));
  word_t orig [NP][NZ], got [NP][NZ];

  task automatic run(input logic r, output int cyc);
    @(negedge clk); start = 1; rev = r;
    @(negedge clk); start = 0; cyc = 1;
    while (!done[0]) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    start = 0; rev = 0; rx_raddr = 0;
    for (int g = 0; g < NP; g++) begin tx_we[g] = 0; tx_waddr[g] = 0; tx_wdata[g] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < NZ; s++) begin
      @(negedge clk);
      for (int g = 0; g < NP; g++) begin
        orig[g][s] = {$urandom(), $urandom()};
        tx_we[g] = 1; tx_waddr[g] = 3'(s); tx_wdata[g] = orig[g][s];
      end
    end
    @(negedge clk); for (int g = 0; g < NP; g++) tx_we[g] = 0;
    run(0, cyc);
    check("forward cycles", 64'(cyc), 64'(NZ * 6 + 2));
    for (int s = 0; s < NZ; s++) begin
      rx_raddr = 3'(s); #1;
      for (int g = 0; g < NP; g++) begin
        got[g][s] = rx_rdata[g];
        check("forward", rx_rdata[g], orig[s % NP][g * C + s / NP]);
      end
    end
    // feed the received data back and reverse
    for (int s = 0; s < NZ; s++) begin
      @(negedge clk);
      for (int g = 0; g < NP; g++) begin tx_we[g] = 1; tx_waddr[g] = 3'(s); tx_wdata[g] = got[g][s]; end
    end
    @(negedge clk); for (int g = 0; g < NP; g++) tx_we[g] = 0;
    run(1, cyc);
    for (int s = 0; s < NZ; s++) begin
      rx_raddr = 3'(s); #1;
      for (int g = 0; g < NP; g++) check("reverse", rx_rdata[g], orig[g][s]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
