// bts_top: the BTS accelerator core.
// NPE_HOR x NPE_VER processing elements (64 x 32 = 2,048 in BTS) form a grid.
// Each column shares one vertical crossbar (xbar_v, NPE_VER ports) and each
// row one horizontal crossbar (xbar_h, NPE_HOR ports); together they carry
// the two transpositions of the 3D-NTT (in BTS also the permutations of
// automorphism, which this RTL does not implement).
// A broadcast unit with NPE/16 local repeaters delivers precomputed constants,
// and one PE-Mem NoC per row connects a memory pseudo-channel to that row's
// PEs (32 pseudo-channels from two HBM stacks in BTS). N = NPE_HOR * NPE_VER
// * 2^LZ = 2^17 coefficients per residue polynomial at the defaults.
// The host side (PCIe in BTS) is represented by a command port and a BrU load
// port; the HBM stacks by the pseudo-channel ports. The command dispatcher is
// this design's own: it accepts one command when every PE and the BrU are
// idle, then broadcasts a PE command to all PEs in the same cycle (so they run
// in lock-step) or starts a BrU broadcast. A PE column's crossbar schedule is
// taken from the exchange unit of the column's row-0 PE, a row's from its
// column-0 PE; all PEs run the same schedule.
module bts_top
  import bts_pkg::*;
#(
  parameter int unsigned NPE_HOR      = 64,
  parameter int unsigned NPE_VER      = 32,
  parameter int unsigned LZ           = 6,
  parameter int unsigned LOG_M        = 9,
  parameter int unsigned SPAD_LINES   = 16384,
  parameter int unsigned PES_PER_LBRU = 16,
  parameter int unsigned BRU_DEPTH    = 32768,
  parameter int unsigned FLIT_W       = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  // host command port
  input  logic        cmd_valid,
  input  top_cmd_t    cmd,
  output logic        cmd_ready,
  output logic        busy,
  // host load port of the global BrU
  input  logic        bru_ld_we,
  input  logic [15:0] bru_ld_addr,
  input  word_t       bru_ld_wdata,
  // one memory pseudo-channel per PE row
  input  mem_req_t    mem_req   [NPE_VER],
  output logic        mem_ready [NPE_VER],
  output mem_rsp_t    mem_rsp   [NPE_VER]
);
  localparam int unsigned LX    = $clog2(NPE_HOR);
  localparam int unsigned LY    = $clog2(NPE_VER);
  localparam int unsigned LNP   = (LX > LY) ? LX : LY;
  localparam int unsigned NPE   = NPE_HOR * NPE_VER;
  localparam int unsigned NLBRU = (NPE + PES_PER_LBRU - 1) / PES_PER_LBRU;

  // ---------------- dispatcher ---------------------------------------------
  logic [NPE-1:0] pe_idle;
  logic           all_idle, bru_busy, accept;
  logic [1:0]     guard;
  assign all_idle  = &pe_idle;
  assign cmd_ready = all_idle && !bru_busy && (guard == 0);
  assign accept    = cmd_valid && cmd_ready;
  assign busy      = !cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      guard <= '0;
    else if (accept) guard <= 2'd3;
    else if (guard != 0) guard <= guard - 2'd1;
  end

  logic pe_cmd_valid;
  assign pe_cmd_valid = accept && !cmd.to_bru;

  // ---------------- broadcast unit ------------------------------------------
  bru_beat_t beats [NLBRU];
  bru #(.NLBRU(NLBRU), .DEPTH(BRU_DEPTH)) u_bru (
    .clk, .rst_n, .ld_we(bru_ld_we), .ld_addr(bru_ld_addr), .ld_wdata(bru_ld_wdata),
    .cmd_valid(accept && cmd.to_bru), .cmd(cmd.bru), .busy(bru_busy), .beat(beats));

  // ---------------- PE grid and NoCs ------------------------------------------
  logic [FLIT_W-1:0] flit_out [NPE];
  logic [FLIT_W-1:0] flit_v   [NPE];
  logic [FLIT_W-1:0] flit_h   [NPE];
  logic [LNP-1:0]    xround   [NPE];
  mem_req_t          pe_req   [NPE];
  logic              pe_mrdy  [NPE];
  mem_rsp_t          pe_mrsp  [NPE];

  for (genvar y = 0; y < NPE_VER; y++) begin : g_row
    for (genvar x = 0; x < NPE_HOR; x++) begin : g_col
      localparam int unsigned P = y * NPE_HOR + x;
      pe #(.LX(LX), .LY(LY), .LZ(LZ), .LOG_M(LOG_M), .SPAD_LINES(SPAD_LINES), .FLIT_W(FLIT_W)) u_pe (
        .clk, .rst_n, .px(LX'(x)), .py(LY'(y)),
        .cmd_valid(pe_cmd_valid), .cmd(cmd.pe), .idle(pe_idle[P]),
        .bru_in(beats[P / PES_PER_LBRU]),
        .mem_req(pe_req[P]), .mem_ready(pe_mrdy[P]), .mem_rsp(pe_mrsp[P]),
        .flit_out(flit_out[P]), .xround(xround[P]),
        .flit_in_v(flit_v[P]), .flit_in_h(flit_h[P]));
    end

    // horizontal crossbar of row y
    logic [FLIT_W-1:0] hin [NPE_HOR], hout [NPE_HOR];
    for (genvar x = 0; x < NPE_HOR; x++) begin : g_hw
      assign hin[x] = flit_out[y * NPE_HOR + x];
      assign flit_h[y * NPE_HOR + x] = hout[x];
    end
    xbar #(.NP(NPE_HOR), .FLIT_W(FLIT_W)) u_xbar_h (
      .clk, .rst_n, .round(LX'(xround[y * NPE_HOR])), .din(hin), .dout(hout));

    // PE-Mem NoC of row y
    mem_req_t rq [NPE_HOR];
    logic     rr [NPE_HOR];
    mem_rsp_t rs [NPE_HOR];
    for (genvar x = 0; x < NPE_HOR; x++) begin : g_mw
      assign pe_req[y * NPE_HOR + x] = rq[x];
      assign rr[x] = pe_mrdy[y * NPE_HOR + x];
      assign rs[x] = pe_mrsp[y * NPE_HOR + x];
    end
    pe_mem_noc #(.NPES(NPE_HOR)) u_memnoc (
      .clk, .rst_n, .req(mem_req[y]), .ready(mem_ready[y]), .rsp(mem_rsp[y]),
      .pe_req(rq), .pe_ready(rr), .pe_rsp(rs));
  end

  for (genvar x = 0; x < NPE_HOR; x++) begin : g_vcol
    logic [FLIT_W-1:0] vin [NPE_VER], vout [NPE_VER];
    for (genvar y = 0; y < NPE_VER; y++) begin : g_vw
      assign vin[y] = flit_out[y * NPE_HOR + x];
      assign flit_v[y * NPE_HOR + x] = vout[y];
    end
    xbar #(.NP(NPE_VER), .FLIT_W(FLIT_W)) u_xbar_v (
      .clk, .rst_n, .round(LY'(xround[x])), .din(vin), .dout(vout));
  end
endmodule
