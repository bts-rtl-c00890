// pe: one BTS processing element.
// Each PE owns the residues of NZ = N / n_PE coefficient positions of every
// residue polynomial (coefficient-level parallelism), so element-wise and
// coefficient-wise work needs no other PE. It holds, as in the paper:
// a 128-bit single-ported scratchpad, an NTTU with its register file and
// on-the-fly twiddle tables (RF_high from the BrU, RF_low from the
// scratchpad), a BConvU made of a ModMult with RF_BT1 and an MMAU with
// RF_BT2, a ModMult and a ModAdd for element-wise work, and an exchange unit
// on the two crossbars. All PEs receive the same command in the same cycle
// and step through it in lock-step, which is what lets the crossbars run
// without allocation.
// Commands (bts_pkg::pe_cmd_t), each over the PE's NZ residues of one
// residue polynomial stored at consecutive scratchpad words:
//   OP_ELEM  dst = src0 (+,-,x) src1, or src0 x / + RF_BT1[idx]
//   OP_MMAU  dst = (acc ? dst : 0) + sum_l src_l * RF_BT2[l][idx]  (BConv, SSA)
//   OP_NTT   dst = one local 3D-NTT step of src0 (phase z/y/x, fwd/inv)
//   OP_EXCH  dst = transposition of src0 over xbar_v or xbar_h
//   OP_LDLOW RF_low = 2^LOG_M words at src0
// The sequencing is this design's own and simple: element-wise commands read
// their operands one word per cycle and wait for the units, rather than
// streaming one result per cycle, and the paper's epoch pipelining that
// overlaps NTT steps of different polynomials and the RF_MMAU/transpose/FIFO
// staging are not modelled. The memory port (PE-Mem NoC) is served only while
// the PE is idle; a read answers one cycle later.
module pe
  import bts_pkg::*;
#(
  parameter int unsigned LX         = 6,
  parameter int unsigned LY         = 5,
  parameter int unsigned LZ         = 6,
  parameter int unsigned LOG_M      = 9,
  parameter int unsigned SPAD_LINES = 16384,
  parameter int unsigned FLIT_W     = 12,
  parameter int unsigned BT_ENTRIES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LX-1:0]     px,
  input  logic [LY-1:0]     py,
  // command broadcast
  input  logic              cmd_valid,
  input  pe_cmd_t           cmd,
  output logic              idle,
  // BrU
  input  bru_beat_t         bru_in,
  // PE-Mem NoC
  input  mem_req_t          mem_req,
  output logic              mem_ready,
  output mem_rsp_t          mem_rsp,
  // PE-PE NoC
  output logic [FLIT_W-1:0] flit_out,
  output logic [((LX > LY) ? LX : LY)-1:0] xround,
  input  logic [FLIT_W-1:0] flit_in_v,
  input  logic [FLIT_W-1:0] flit_in_h
);
  localparam int unsigned NZ   = 1 << LZ;
  localparam int unsigned NLOW = 1 << LOG_M;
  localparam int unsigned LNP  = (LX > LY) ? LX : LY;
  localparam int unsigned SAW  = $clog2(SPAD_LINES) + 1;   // word address bits used
  localparam int unsigned LBT  = $clog2(BT_ENTRIES);

  // ---------------- scratchpad (word view of 128-bit lines) ---------------
  logic            sp_en, sp_we;
  logic [SAW-1:0]  sp_waddr;
  word_t           sp_wdata;
  logic [127:0]    sp_rline;
  logic            sp_half_q;
  word_t           rd_word;

  scratchpad #(.LINES(SPAD_LINES)) u_spad (
    .clk, .en(sp_en), .we(sp_we), .wmask(sp_waddr[0] ? 2'b10 : 2'b01),
    .addr(sp_waddr[SAW-1:1]), .wdata({sp_wdata, sp_wdata}), .rdata(sp_rline));
  assign rd_word = sp_half_q ? sp_rline[127:64] : sp_rline[63:0];

  // ---------------- BConv tables --------------------------------------------
  word_t rf_bt1 [BT_ENTRIES];
  word_t rf_bt2 [MMAU_LANES][BT_ENTRIES];
  always_ff @(posedge clk) begin
    if (bru_in.valid && bru_in.tgt == BT_BT1) rf_bt1[LBT'(bru_in.addr)] <= bru_in.data;
    if (bru_in.valid && bru_in.tgt == BT_BT2)
      rf_bt2[bru_in.addr[LBT+1:LBT]][LBT'(bru_in.addr)] <= bru_in.data;
  end

  // ---------------- sequencer state -----------------------------------------
  typedef enum logic [3:0] {
    S_IDLE, S_RD, S_CAP, S_EX, S_WR, S_LOAD, S_RUN, S_STORE, S_DONE
  } st_e;
  st_e           st;
  pe_cmd_t       c;
  logic [LZ:0]   i;          // element counter
  logic [2:0]    k;          // operand counter
  logic [2:0]    nops;
  logic [2:0]    wcnt;
  logic [LOG_M:0] lcnt;      // load/store counter
  word_t         opv [5];
  word_t         res;
  logic          run_start;
  logic          mem_rv_q;

  // operand address for (k, i)
  logic [SPAD_AW-1:0] op_base, op_addr;
  always_comb begin
    case (k)
      3'd0:    op_base = c.src0;
      3'd1:    op_base = c.src1;
      3'd2:    op_base = c.src2;
      3'd3:    op_base = c.src3;
      default: op_base = c.dst;
    endcase
    op_addr = op_base + SPAD_AW'(i);
  end

  // ---------------- functional units ----------------------------------------
  word_t  ma_r, mm_r, bm_r, mmau_r, bt1v;
  logic   unused_v0, unused_v1, unused_v2;
  word_t  mmau_y [MMAU_LANES], mmau_c [MMAU_LANES];
  assign bt1v = rf_bt1[LBT'(c.idx)];

  mod_add u_modadd (.a(opv[0]), .b((c.fn == EF_ADDS) ? bt1v : opv[1]),
                    .sub(c.fn == EF_SUB), .md(c.md), .r(ma_r));
  mod_mult u_modmult (.clk, .rst_n, .in_valid(st == S_EX), .a(opv[0]), .b(opv[1]), .md(c.md),
                      .out_valid(unused_v0), .r(mm_r));
  // BConvU: first-part ModMult with RF_BT1, second-part MMAU with RF_BT2
  mod_mult u_bconv_mult (.clk, .rst_n, .in_valid(st == S_EX), .a(opv[0]), .b(bt1v), .md(c.md),
                         .out_valid(unused_v1), .r(bm_r));
  always_comb begin
    for (int l = 0; l < MMAU_LANES; l++) begin
      mmau_y[l] = opv[l];
      mmau_c[l] = rf_bt2[l][LBT'(c.idx)];
    end
  end
  mmau #(.LANES(MMAU_LANES)) u_mmau (.clk, .rst_n, .in_valid(st == S_EX), .y(mmau_y), .c(mmau_c),
        .acc(c.acc ? opv[4] : '0), .md(c.md), .out_valid(unused_v2), .r(mmau_r));

  always_comb begin
    if (c.op == OP_MMAU) res = mmau_r;
    else case (c.fn)
      EF_MUL:  res = mm_r;
      EF_MULS: res = bm_r;
      default: res = ma_r;
    endcase
  end

  // ---------------- NTTU ------------------------------------------------------
  logic  ntt_busy, ntt_done;
  word_t ntt_rdata;
  logic  ld_we;
  logic [LOG_M-1:0] ld_addr;
  assign ld_addr = LOG_M'(lcnt - 1'b1);

  nttu #(.LX(LX), .LY(LY), .LZ(LZ), .LOG_M(LOG_M)) u_nttu (
    .clk, .rst_n, .px, .py,
    .high_we(bru_in.valid && bru_in.tgt == BT_HIGH),
    .high_addr((LX+LY+LZ-LOG_M+1)'(bru_in.addr)), .high_wdata(bru_in.data),
    .low_we(ld_we && c.op == OP_LDLOW), .low_addr(ld_addr), .low_wdata(rd_word),
    .rf_we(ld_we && c.op == OP_NTT), .rf_waddr(LZ'(ld_addr)), .rf_wdata(rd_word),
    .rf_raddr(LZ'(lcnt)), .rf_rdata(ntt_rdata),
    .start(run_start && c.op == OP_NTT), .phase(c.phase), .inv(c.inv), .md(c.md),
    .busy(ntt_busy), .done(ntt_done));

  // ---------------- exchange unit ---------------------------------------------
  logic  ex_busy, ex_done;
  word_t ex_rdata;
  exch_unit #(.LZ(LZ), .LNP(LNP), .FLIT_W(FLIT_W)) u_exch (
    .clk, .rst_n,
    .tx_we(ld_we && c.op == OP_EXCH), .tx_waddr(LZ'(ld_addr)), .tx_wdata(rd_word),
    .rx_raddr(LZ'(lcnt)), .rx_rdata(ex_rdata),
    .start(run_start && c.op == OP_EXCH), .rev(c.rev),
    .lognp(c.dir_h ? 4'(LX) : 4'(LY)),
    .me(c.dir_h ? LNP'(px) : LNP'(py)),
    .flit_out, .round(xround),
    .flit_in(c.dir_h ? flit_in_h : flit_in_v),
    .busy(ex_busy), .done(ex_done));

  // ---------------- sequencer -----------------------------------------------
  logic [LOG_M:0] ld_len;
  assign ld_len = (c.op == OP_LDLOW) ? (LOG_M+1)'(NLOW) : (LOG_M+1)'(NZ);
  assign ld_we  = (st == S_LOAD) && (lcnt != 0);

  always_comb begin
    sp_en = 1'b0; sp_we = 1'b0; sp_waddr = '0; sp_wdata = '0;
    case (st)
      S_IDLE: if (!cmd_valid && mem_req.valid) begin
        sp_en = 1'b1; sp_we = mem_req.we; sp_waddr = SAW'(mem_req.addr); sp_wdata = mem_req.wdata;
      end
      S_RD:   begin sp_en = 1'b1; sp_waddr = SAW'(op_addr); end
      S_WR:   begin sp_en = 1'b1; sp_we = 1'b1; sp_waddr = SAW'(c.dst + SPAD_AW'(i)); sp_wdata = res; end
      S_LOAD: if (lcnt < ld_len) begin sp_en = 1'b1; sp_waddr = SAW'(c.src0 + SPAD_AW'(lcnt)); end
      S_STORE: begin
        sp_en = 1'b1; sp_we = 1'b1; sp_waddr = SAW'(c.dst + SPAD_AW'(lcnt));
        sp_wdata = (c.op == OP_NTT) ? ntt_rdata : ex_rdata;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; i <= '0; k <= '0; nops <= '0; wcnt <= '0; lcnt <= '0;
      sp_half_q <= 1'b0; run_start <= 1'b0; mem_rv_q <= 1'b0;
      for (int j = 0; j < 5; j++) opv[j] <= '0;
    end else begin
      run_start     <= 1'b0;
      mem_rv_q      <= 1'b0;
      if (sp_en && !sp_we) sp_half_q <= sp_waddr[0];
      case (st)
        S_IDLE: begin
          if (cmd_valid) begin
            c <= cmd; i <= '0; k <= '0; lcnt <= '0;
            for (int j = 0; j < 5; j++) opv[j] <= '0;
            case (cmd.op)
              OP_ELEM: begin
                nops <= (cmd.fn == EF_MULS || cmd.fn == EF_ADDS) ? 3'd1 : 3'd2;
                st   <= S_RD;
              end
              OP_MMAU: begin
                nops <= cmd.acc ? 3'd5 : 3'd4;
                st   <= S_RD;
              end
              OP_NTT, OP_EXCH, OP_LDLOW: st <= S_LOAD;
              default: st <= S_DONE;
            endcase
          end else if (mem_req.valid && !mem_req.we) begin
            mem_rv_q <= 1'b1;
          end
        end
        S_RD: st <= S_CAP;
        S_CAP: begin
          opv[k] <= rd_word;
          k <= k + 3'd1;
          if (k + 3'd1 == nops) begin
            st <= S_EX; wcnt <= 3'd4;
          end else st <= S_RD;
        end
        S_EX: begin
          if (wcnt == 0) st <= S_WR;
          else wcnt <= wcnt - 3'd1;
        end
        S_WR: begin
          k <= '0;
          if (i == (LZ+1)'(NZ - 1)) st <= S_DONE;
          else begin i <= i + 1'b1; st <= S_RD; end
        end
        S_LOAD: begin
          if (lcnt == ld_len) begin
            lcnt <= '0;
            if (c.op == OP_LDLOW) st <= S_DONE;
            else begin st <= S_RUN; run_start <= 1'b1; end
          end else lcnt <= lcnt + 1'b1;
        end
        S_RUN: if ((c.op == OP_NTT && ntt_done) || (c.op == OP_EXCH && ex_done)) st <= S_STORE;
        S_STORE: begin
          if (lcnt == (LOG_M+1)'(NZ - 1)) begin lcnt <= '0; st <= S_DONE; end
          else lcnt <= lcnt + 1'b1;
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign mem_rsp.valid = mem_rv_q;
  assign mem_rsp.rdata = rd_word;
  assign idle      = (st == S_IDLE) && !ntt_busy && !ex_busy;
  assign mem_ready = (st == S_IDLE) && !cmd_valid;
endmodule
