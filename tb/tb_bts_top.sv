// tb_bts_top: end-to-end test of the BTS core on a reduced grid.
// Grid NX x NY PEs with NZ residues each (parameters below; defaults give a
// 4 x 2 grid and N = 32). The test loads twiddle and BConv tables through the
// broadcast unit and the scratchpads through every row's memory channel, then
//  1. runs the full 3D-NTT (NTTz, xbar_v exchange, NTTy, xbar_h exchange,
//     NTTx) on two polynomials and compares every output with the negacyclic
//     DFT sum_j a_j psi^((2 bitrev(i)+1) j) computed directly;
//  2. multiplies them element-wise, runs the inverse 3D-NTT and the N^-1
//     scaling, and compares with the negacyclic convolution a*b mod X^N+1;
//  3. runs a base conversion step (BConvU ModMult, then MMAU with and without
//     accumulation) and element-wise add/sub/CAdd, checked per coefficient.
// It counts each mechanism: vertical/horizontal and forward/reverse
// exchanges, broadcasts to each register file, memory reads/writes and
// dispatcher back-pressure, and fails if one never happened.
module tb_bts_top;
  import bts_pkg::*;
  import tb_util_pkg::*;

  localparam int NX = 4, NY = 2, LZ = 2, LOG_M = 3;
  localparam int LX = $clog2(NX), LY = $clog2(NY);
  localparam int NZ = 1 << LZ, N = NX * NY * NZ, LN = LX + LY + LZ;
  localparam int M = 1 << LOG_M, NHIGH = 2 * N / M;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     cmd_valid, cmd_ready, busy;
  top_cmd_t cmd;
  logic     ld_we; logic [15:0] ld_addr; word_t ld_wdata;
  mem_req_t mreq [NY];
  logic     mrdy [NY];
  mem_rsp_t mrsp [NY];

  bts_top #(.NPE_HOR(NX), .NPE_VER(NY), .LZ(LZ), .LOG_M(LOG_M), .SPAD_LINES(64),
            .PES_PER_LBRU(4), .BRU_DEPTH(256)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .busy,
    .bru_ld_we(ld_we), .bru_ld_addr(ld_addr), .bru_ld_wdata(ld_wdata),
    .mem_req(mreq), .mem_ready(mrdy), .mem_rsp(mrsp));

  int checks = 0, failures = 0;
  int n_exch_v = 0, n_exch_h = 0, n_exch_rev = 0, n_bru_high = 0, n_bru_bt = 0;
  int n_mem_wr = 0, n_mem_rd = 0, n_stall = 0, n_mmau_acc = 0, n_ntt = 0, n_intt = 0;

  logic [63:0] q, p, psi, ninv;
  modulus_t mdq, mdp;
  logic [63:0] a [N], b [N], ahat [N], bhat [N], rd [N];

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pe_of(int i); return (i % (NX * NY)); endfunction
  function automatic int bitrev(int v, int nb);
    int r = 0;
    for (int k = 0; k < nb; k++) if (v & (1 << k)) r |= 1 << (nb - 1 - k);
    return r;
  endfunction
  // global index held by slot u of PE (x, y) after the forward 3D-NTT
  function automatic int gidx_x(int x0, int y0, int u);
    int x, d, sp, c, y, z;
    x = u % NX; d = u / NX; sp = x0 * (NZ / NX) + d; c = sp / NY; y = sp % NY;
    z = y0 * (NZ / NY) + c;
    return x + NX * y + NX * NY * z;
  endfunction

  task automatic issue(input top_cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) begin n_stall++; @(posedge clk); end
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (busy) @(posedge clk);
  endtask

  task automatic pe_cmd(input pe_op_e op, input elem_fn_e fn, input int src0, input int src1,
                        input int dst, input modulus_t md, input int idx = 0);
    top_cmd_t c = '0;
    c.pe.op = op; c.pe.fn = fn; c.pe.src0 = SPAD_AW'(src0); c.pe.src1 = SPAD_AW'(src1);
    c.pe.dst = SPAD_AW'(dst); c.pe.md = md; c.pe.idx = 8'(idx);
    issue(c);
  endtask

  task automatic ntt_step(input ntt_phase_e ph, input logic inv, input int base);
    top_cmd_t c = '0;
    c.pe.op = OP_NTT; c.pe.phase = ph; c.pe.inv = inv; c.pe.src0 = SPAD_AW'(base);
    c.pe.dst = SPAD_AW'(base); c.pe.md = mdq;
    issue(c);
  endtask

  task automatic exch(input logic dir_h, input logic rev, input int base);
    top_cmd_t c = '0;
    c.pe.op = OP_EXCH; c.pe.dir_h = dir_h; c.pe.rev = rev; c.pe.src0 = SPAD_AW'(base);
    c.pe.dst = SPAD_AW'(base);
    issue(c);
    if (dir_h) n_exch_h++; else n_exch_v++;
    if (rev) n_exch_rev++;
  endtask

  task automatic bru_bcast(input bru_tgt_e tgt, input int gaddr, input int raddr, input int count);
    top_cmd_t c = '0;
    c.to_bru = 1; c.bru.tgt = tgt; c.bru.gaddr = 16'(gaddr); c.bru.raddr = 10'(raddr);
    c.bru.count = 11'(count);
    issue(c);
    if (tgt == BT_HIGH) n_bru_high++; else n_bru_bt++;
  endtask

  task automatic mem_write(input int x, input int y, input int addr, input logic [63:0] data);
    @(negedge clk);
    mreq[y] = '0; mreq[y].valid = 1; mreq[y].we = 1; mreq[y].pe = 8'(x);
    mreq[y].addr = SPAD_AW'(addr); mreq[y].wdata = data;
    @(posedge clk);
    while (!mrdy[y]) @(posedge clk);
    @(negedge clk);
    mreq[y] = '0;
    n_mem_wr++;
  endtask

  task automatic mem_read(input int x, input int y, input int addr, output logic [63:0] data);
    @(negedge clk);
    mreq[y] = '0; mreq[y].valid = 1; mreq[y].pe = 8'(x); mreq[y].addr = SPAD_AW'(addr);
    @(posedge clk);
    while (!mrdy[y]) @(posedge clk);
    @(negedge clk);
    mreq[y] = '0;
    while (!mrsp[y].valid) @(posedge clk);
    data = mrsp[y].rdata;
    n_mem_rd++;
  endtask

  // write a polynomial in the RNS-domain layout: PE (x,y) slot z = coeff x + NX*y + NX*NY*z
  task automatic put_poly(input logic [63:0] v [N], input int base);
    for (int i = 0; i < N; i++)
      mem_write((i % (NX * NY)) % NX, (i % (NX * NY)) / NX, base + i / (NX * NY), v[i]);
  endtask
  task automatic get_poly_rns(output logic [63:0] v [N], input int base);
    for (int i = 0; i < N; i++)
      mem_read((i % (NX * NY)) % NX, (i % (NX * NY)) / NX, base + i / (NX * NY), v[i]);
  endtask
  task automatic get_poly_ntt(output logic [63:0] v [N], input int base);
    logic [63:0] w;
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++)
        for (int u = 0; u < NZ; u++) begin
          mem_read(x, y, base + u, w);
          v[gidx_x(x, y, u)] = w;
        end
  endtask

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic fwd_ntt(input int base);
    ntt_step(PH_Z, 0, base); exch(0, 0, base);
    ntt_step(PH_Y, 0, base); exch(1, 0, base);
    ntt_step(PH_X, 0, base);
    n_ntt++;
  endtask
  task automatic inv_ntt(input int base);
    ntt_step(PH_X, 1, base); exch(1, 1, base);
    ntt_step(PH_Y, 1, base); exch(0, 1, base);
    ntt_step(PH_Z, 1, base);
    pe_cmd(OP_ELEM, EF_MULS, base, 0, base, mdq, 0);   // x N^-1 (RF_BT1[0])
    n_intt++;
  endtask

  logic [63:0] bt2 [4];
  logic [63:0] src [4][N];
  logic [63:0] exp_v, acc_v;

  initial begin
    cmd_valid = 0; cmd = '0; ld_we = 0; ld_addr = 0; ld_wdata = 0;
    for (int y = 0; y < NY; y++) mreq[y] = '0;
    q = Q0; p = Q1; mdq = mkmod(q); mdp = mkmod(p);
    psi  = find_psi(q, LN + 1);
    ninv = powmod(64'(N), q - 2, q);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // global BrU: [0, NHIGH) higher-digit table, [64] N^-1, [80..83] BT2 lanes
    for (int j = 0; j < NHIGH; j++) begin
      @(negedge clk); ld_we = 1; ld_addr = 16'(j); ld_wdata = powmod(psi, 64'(M * j), q);
    end
    for (int l = 0; l < 4; l++) begin
      bt2[l] = rand64(p);
      @(negedge clk); ld_we = 1; ld_addr = 16'(80 + l); ld_wdata = bt2[l];
    end
    @(negedge clk); ld_we = 1; ld_addr = 16'd64; ld_wdata = ninv;
    @(negedge clk); ld_we = 0;

    bru_bcast(BT_HIGH, 0, 0, NHIGH);
    bru_bcast(BT_BT1, 64, 0, 1);
    for (int l = 0; l < 4; l++) bru_bcast(BT_BT2, 80 + l, l * 64 + 5, 1);
    wait_idle();

    // lower-digit table into every scratchpad, then into RF_low
    for (int y = 0; y < NY; y++)
      for (int x = 0; x < NX; x++)
        for (int k = 0; k < M; k++) mem_write(x, y, 96 + k, powmod(psi, 64'(k), q));
    pe_cmd(OP_LDLOW, EF_ADD, 96, 0, 0, mdq);

    // ---------- 1. forward 3D-NTT ----------
    for (int i = 0; i < N; i++) begin a[i] = rand64(q); b[i] = rand64(q); end
    put_poly(a, 0); put_poly(b, 16);
    fwd_ntt(0); fwd_ntt(16);
    wait_idle();
    get_poly_ntt(ahat, 0); get_poly_ntt(bhat, 16);
    for (int i = 0; i < N; i++) begin
      logic [63:0] ea, eb, w;
      int e;
      e = 2 * bitrev(i, LN) + 1;
      ea = 0; eb = 0;
      for (int j = 0; j < N; j++) begin
        w  = powmod(psi, 64'((e * j) % (2 * N)), q);
        ea = addmod(ea, mulmod(a[j], w, q), q);
        eb = addmod(eb, mulmod(b[j], w, q), q);
      end
      check($sformatf("ntt a[%0d]", i), ahat[i], ea);
      check($sformatf("ntt b[%0d]", i), bhat[i], eb);
    end

    // ---------- 2. element-wise product and inverse 3D-NTT ----------
    pe_cmd(OP_ELEM, EF_MUL, 0, 16, 32, mdq);
    inv_ntt(32);
    wait_idle();
    get_poly_rns(rd, 32);
    for (int i = 0; i < N; i++) begin
      logic [63:0] s;
      s = 0;
      for (int j = 0; j < N; j++) begin
        int kk;
        kk = i - j;
        if (kk >= 0) s = addmod(s, mulmod(a[j], b[kk], q), q);
        else         s = submod(s, mulmod(a[j], b[kk + N], q), q);
      end
      check($sformatf("conv[%0d]", i), rd[i], s);
    end

    // ---------- 3. BConv step on the MMAU, element-wise add/sub/CAdd ----------
    for (int l = 0; l < 4; l++) begin
      for (int i = 0; i < N; i++) src[l][i] = rand64(p);
      put_poly(src[l], 40 + 4 * l);
    end
    for (int i = 0; i < N; i++) rd[i] = rand64(p);
    put_poly(rd, 56);
    begin
      top_cmd_t c = '0;
      c.pe.op = OP_MMAU; c.pe.src0 = 40; c.pe.src1 = 44; c.pe.src2 = 48; c.pe.src3 = 52;
      c.pe.dst = 56; c.pe.acc = 1; c.pe.idx = 5; c.pe.md = mdp;
      issue(c); n_mmau_acc++;
      c.pe.dst = 60; c.pe.acc = 0;
      issue(c);
    end
    pe_cmd(OP_ELEM, EF_ADD, 40, 44, 64, mdp);
    pe_cmd(OP_ELEM, EF_SUB, 40, 44, 68, mdp);
    wait_idle();
    begin
      logic [63:0] m1 [N], m2 [N], ad [N], sb [N];
      get_poly_rns(m1, 56); get_poly_rns(m2, 60); get_poly_rns(ad, 64); get_poly_rns(sb, 68);
      for (int i = 0; i < N; i++) begin
        exp_v = 0;
        for (int l = 0; l < 4; l++) exp_v = addmod(exp_v, mulmod(src[l][i], bt2[l], p), p);
        check($sformatf("mmau[%0d]", i), m2[i], exp_v);
        check($sformatf("mmau acc[%0d]", i), m1[i], addmod(exp_v, rd[i], p));
        check($sformatf("add[%0d]", i), ad[i], addmod(src[0][i], src[1][i], p));
        check($sformatf("sub[%0d]", i), sb[i], submod(src[0][i], src[1][i], p));
      end
    end

    // mechanism coverage
    if (n_exch_v == 0 || n_exch_h == 0 || n_exch_rev == 0 || n_bru_high == 0 || n_bru_bt == 0 ||
        n_mem_wr == 0 || n_mem_rd == 0 || n_stall == 0 || n_mmau_acc == 0 || n_ntt == 0 || n_intt == 0) begin
      failures++;
      $display("FAIL mechanism never exercised");
    end
    $display("mechanisms: exch_v=%0d exch_h=%0d exch_rev=%0d bru_high=%0d bru_bt=%0d mem_wr=%0d mem_rd=%0d stalls=%0d mmau_acc=%0d ntt=%0d intt=%0d",
             n_exch_v, n_exch_h, n_exch_rev, n_bru_high, n_bru_bt, n_mem_wr, n_mem_rd, n_stall, n_mmau_acc, n_ntt, n_intt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
