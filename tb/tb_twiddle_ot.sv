// tb_twiddle_ot: loads the higher- and lower-digit tables for a 2N = 64
// root of unity and checks that every exponent 0..2N-1 yields psi^e, three
// cycles after it is presented.
module tb_twiddle_ot;
  import bts_pkg::*;
  import tb_util_pkg::*;
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
  localparam int LOG_M = 3, LOG_2N = 6;
  logic hwe, lwe, iv, ov; logic [LOG_2N-LOG_M-1:0] ha; logic [LOG_M-1:0] la;
  word_t hd, ld, w; logic [LOG_2N-1:0] e; modulus_t md;
  twiddle_ot #(.LOG_M(LOG_M), .LOG_2N(LOG_2N)) dut (.clk, .rst_n, .high_we(hwe), .high_addr(ha),
    .high_wdata(hd), .low_we(lwe), .low_addr(la), .low_wdata(ld), .in_valid(iv), .e, .md,
    .out_valid(ov), .w);
  logic [63:0] psi;
  initial begin
    hwe = 0; lwe = 0; iv = 0; e = 0; ha = 0; la = 0; hd = 0; ld = 0;
    md = mkmod(Q0); psi = find_psi(Q0, LOG_2N);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int j = 0; j < 8; j++) begin
      @(negedge clk); hwe = 1; lwe = 1; ha = 3'(j); la = 3'(j);
      hd = powmod(psi, 64'(8 * j), Q0); ld = powmod(psi, 64'(j), Q0);
    end
    @(negedge clk); hwe = 0; lwe = 0;
    for (int t = 0; t < 67; t++) begin
      if (t >= 3) begin
        checks++;
        if (!ov) failures++;
        check("twiddle", w, powmod(psi, 64'(t - 3), Q0));
      end
      iv = (t < 64); e = 6'(t);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
