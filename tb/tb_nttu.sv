// tb_nttu: one NTTU of PE (px, py) = (2, 1) in a 4 x 2 x 8 cube (N = 64).
// For each of the three steps (z, y, x) the unit's NZ residues are taken from
// a random length-N array in that step's layout; the expected result is the
// reference Cooley-Tukey stages of that step applied to the whole array. Then
// the inverse step must return 2^stages times the input. The cycle count of
// each step must be stages * (NZ/2 + 9) + 1.
module tb_nttu;
  import bts_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
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
  localparam int LX = 2, LY = 1, LZ = 3, LOG_M = 3;
  localparam int NX = 4, NY = 2, NZ = 8, N = 64, LN = 6, M = 8;
  logic [LX-1:0] px = 2; logic [LY-1:0] py = 1;
  logic hwe, lwe, rf_we, start, inv, busy, done; logic [3:0] ha; logic [2:0] la;
  word_t hd, ld, rf_wdata, rf_rdata; logic [2:0] rf_waddr, rf_raddr; ntt_phase_e phase; modulus_t md;
  nttu #(.LX(LX), .LY(LY), .LZ(LZ), .LOG_M(LOG_M)) dut (.clk, .rst_n, .px, .py,
    .high_we(hwe), .high_addr(ha), .high_wdata(hd), .low_we(lwe), .low_addr(la), .low_wdata(ld),
    .rf_we, .rf_waddr, .rf_wdata, .rf_raddr, .rf_rdata, .start, .phase, .inv, .md, .busy, .done);

  logic [63:0] q, psi, arr [N];

  function automatic int bitrev(int v, int nb);
    int r = 0;
    for (int k = 0; k < nb; k++) if (v & (1 << k)) r |= 1 << (nb - 1 - k);
    return r;
  endfunction
  function automatic int gidx(int ph, int u);
    int x, y, z, sp;
    x = int'(px); y = int'(py); z = u;
    if (ph == 1) begin y = u % NY; z = int'(py) * (NZ / NY) + u / NY; end
    if (ph == 2) begin
      x = u % NX; sp = int'(px) * (NZ / NX) + u / NX; y = sp % NY; z = int'(py) * (NZ / NY) + sp / NY;
    end
    return x + NX * y + NX * NY * z;
  endfunction
  task automatic ct_stages(int s0, int s1);
    for (int s = s0; s < s1; s++) begin
      int t; t = N >> (s + 1);
      for (int g = 0; g < (1 << s); g++) begin
        logic [63:0] w; w = powmod(psi, 64'(bitrev((1 << s) + g, LN)), q);
        for (int j = g * 2 * t; j < g * 2 * t + t; j++) begin
          logic [63:0] u0, v0;
          u0 = arr[j]; v0 = mulmod(arr[j + t], w, q);
          arr[j] = addmod(u0, v0, q); arr[j + t] = submod(u0, v0, q);
        end
      end
    end
  endtask

  task automatic run(input int ph, input logic iv, output int cyc);
    @(negedge clk); start = 1; phase = ntt_phase_e'(ph); inv = iv;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc, s0, ns;
    logic [63:0] inp [NZ];
    hwe = 0; lwe = 0; rf_we = 0; start = 0; inv = 0; phase = PH_Z; ha = 0; la = 0; hd = 0; ld = 0;
    rf_waddr = 0; rf_wdata = 0; rf_raddr = 0;
    q = Q0; md = mkmod(q); psi = find_psi(q, LN + 1);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int j = 0; j < 16; j++) begin
      @(negedge clk); hwe = 1; ha = 4'(j); hd = powmod(psi, 64'(M * j), q);
      lwe = (j < M); la = 3'(j); ld = powmod(psi, 64'(j), q);
    end
    @(negedge clk); hwe = 0; lwe = 0;
    for (int ph = 0; ph < 3; ph++) begin
      s0 = (ph == 0) ? 0 : (ph == 1) ? LZ : LZ + LY;
      ns = (ph == 0) ? LZ : (ph == 1) ? LY : LX;
      for (int i = 0; i < N; i++) arr[i] = rand64(q);
      for (int u = 0; u < NZ; u++) begin
        inp[u] = arr[gidx(ph, u)];
        @(negedge clk); rf_we = 1; rf_waddr = 3'(u); rf_wdata = inp[u];
      end
      @(negedge clk); rf_we = 0;
      ct_stages(s0, s0 + ns);
      run(ph, 0, cyc);
      check("cycles", 64'(cyc), 64'(ns * (NZ / 2 + 9) + 1));
      for (int u = 0; u < NZ; u++) begin rf_raddr = 3'(u); #1 check("fwd", rf_rdata, arr[gidx(ph, u)]); end
      run(ph, 1, cyc);
      for (int u = 0; u < NZ; u++) begin
        rf_raddr = 3'(u); #1 check("inv", rf_rdata, mulmod(inp[u], 64'(1 << ns), q));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
