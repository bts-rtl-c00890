// tb_pe: one PE at grid position (3, 1) of a 4 x 2 x 4 cube (N = 32).
// Loads data through the memory port and tables through broadcast beats,
// then checks every element-wise function, the MMAU with and without
// accumulation, the lower-digit table load and a forward NTTz step
// (against reference Cooley-Tukey stages on the whole array). Element-wise
// commands must take NZ * (2*operands + 6) + 2 cycles from the command to idle.
module tb_pe;
  import bts_pkg::*;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
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

  localparam int LX = 2, LY = 1, LZ = 2, LOG_M = 3, NX = 4, NY = 2, NZ = 4, N = 32, LN = 5, M = 8;
  logic [LX-1:0] px = 3; logic [LY-1:0] py = 1;
  logic cmd_valid, idle, mem_ready; pe_cmd_t cmd; bru_beat_t bru_in; mem_req_t mem_req; mem_rsp_t mem_rsp;
  logic [11:0] flit_out; logic [1:0] xround;
  pe #(.LX(LX), .LY(LY), .LZ(LZ), .LOG_M(LOG_M), .SPAD_LINES(64)) dut (.clk, .rst_n, .px, .py,
    .cmd_valid, .cmd, .idle, .bru_in, .mem_req, .mem_ready, .mem_rsp, .flit_out, .xround,
    .flit_in_v(12'd0), .flit_in_h(12'd0));

  logic [63:0] q, psi, arr [N], v [8][NZ], bt1, bt2 [4];
  modulus_t md;

  function automatic int bitrev(int x, int nb);
    int r = 0;
    for (int k = 0; k < nb; k++) if (x & (1 << k)) r |= 1 << (nb - 1 - k);
    return r;
  endfunction

  task automatic mwrite(input int a, input logic [63:0] d);
    @(negedge clk); mem_req = '0; mem_req.valid = 1; mem_req.we = 1; mem_req.addr = 15'(a); mem_req.wdata = d;
    @(posedge clk); while (!mem_ready) @(posedge clk);
    @(negedge clk); mem_req = '0;
  endtask
  task automatic mread(input int a, output logic [63:0] d);
    @(negedge clk); mem_req = '0; mem_req.valid = 1; mem_req.addr = 15'(a);
    @(posedge clk); while (!mem_ready) @(posedge clk);
    @(negedge clk); mem_req = '0;
    checks++; if (!mem_rsp.valid) failures++;
    d = mem_rsp.rdata;
  endtask
  task automatic beat(input bru_tgt_e t, input int a, input logic [63:0] d);
    @(negedge clk); bru_in = '0; bru_in.valid = 1; bru_in.tgt = t; bru_in.addr = 10'(a); bru_in.data = d;
    @(negedge clk); bru_in = '0;
  endtask
  task automatic run(input pe_cmd_t c, output int cyc);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0; cyc = 1;
    while (!idle) begin @(negedge clk); cyc++; end
  endtask
  task automatic elem(input elem_fn_e fn, input int s0, input int s1, input int d, output int cyc);
    pe_cmd_t c = '0;
    c.op = OP_ELEM; c.fn = fn; c.src0 = 15'(s0); c.src1 = 15'(s1); c.dst = 15'(d); c.md = md; c.idx = 8'd3;
    run(c, cyc);
  endtask

  initial begin
    int cyc;
    logic [63:0] r, e;
    pe_cmd_t c;
    cmd_valid = 0; cmd = '0; bru_in = '0; mem_req = '0;
    q = Q2; md = mkmod(q); psi = find_psi(q, LN + 1);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 4; p++) for (int u = 0; u < NZ; u++) begin v[p][u] = rand64(q); mwrite(p * 8 + u, v[p][u]); end
    bt1 = rand64(q); beat(BT_BT1, 3, bt1);
    for (int l = 0; l < 4; l++) begin bt2[l] = rand64(q); beat(BT_BT2, l * 64 + 3, bt2[l]); end
    for (int j = 0; j < 2 * N / M; j++) beat(BT_HIGH, j, powmod(psi, 64'(M * j), q));
    for (int k = 0; k < M; k++) mwrite(100 + k, powmod(psi, 64'(k), q));
    // element-wise functions
    elem(EF_ADD, 0, 8, 40, cyc);  check("add cycles", 64'(cyc), 64'(NZ * 10 + 2));
    elem(EF_SUB, 0, 8, 44, cyc);
    elem(EF_MUL, 0, 8, 48, cyc);
    elem(EF_MULS, 0, 8, 52, cyc); check("muls cycles", 64'(cyc), 64'(NZ * 8 + 2));
    elem(EF_ADDS, 0, 8, 56, cyc);
    for (int u = 0; u < NZ; u++) begin
      mread(40 + u, r); check("add", r, addmod(v[0][u], v[1][u], q));
      mread(44 + u, r); check("sub", r, submod(v[0][u], v[1][u], q));
      mread(48 + u, r); check("mul", r, mulmod(v[0][u], v[1][u], q));
      mread(52 + u, r); check("muls", r, mulmod(v[0][u], bt1, q));
      mread(56 + u, r); check("adds", r, addmod(v[0][u], bt1, q));
    end
    // MMAU: dst 60 = sum, then dst 60 += sum again
    c = '0; c.op = OP_MMAU; c.src0 = 0; c.src1 = 8; c.src2 = 16; c.src3 = 24; c.dst = 60; c.idx = 3; c.md = md;
    run(c, cyc);
    c.acc = 1; run(c, cyc);
    for (int u = 0; u < NZ; u++) begin
      e = 0;
      for (int l = 0; l < 4; l++) e = addmod(e, mulmod(v[l][u], bt2[l], q), q);
      mread(60 + u, r); check("mmau acc", r, addmod(e, e, q));
    end
    // RF_low load and NTTz
    c = '0; c.op = OP_LDLOW; c.src0 = 100; run(c, cyc);
    for (int i = 0; i < N; i++) arr[i] = rand64(q);
    for (int u = 0; u < NZ; u++) mwrite(u, arr[3 + NX * 1 + NX * NY * u]);
    for (int s = 0; s < LZ; s++) begin
      int t; t = N >> (s + 1);
      for (int g = 0; g < (1 << s); g++) begin
        logic [63:0] w; w = powmod(psi, 64'(bitrev((1 << s) + g, LN)), q);
        for (int j = g * 2 * t; j < g * 2 * t + t; j++) begin
          logic [63:0] a0, b0;
          a0 = arr[j]; b0 = mulmod(arr[j + t], w, q);
          arr[j] = addmod(a0, b0, q); arr[j + t] = submod(a0, b0, q);
        end
      end
    end
    c = '0; c.op = OP_NTT; c.phase = PH_Z; c.src0 = 0; c.dst = 70; c.md = md; run(c, cyc);
    for (int u = 0; u < NZ; u++) begin mread(70 + u, r); check("nttz", r, arr[3 + NX * 1 + NX * NY * u]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
