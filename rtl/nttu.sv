// nttu: number-theoretic-transform unit of one PE.
// BTS views the N = NX*NY*NZ residues of a residue polynomial as a cube and
// runs a 3D-NTT: NZ-point transforms inside each PE (NTTz), an exchange over
// xbar_v, NTTy, an exchange over xbar_h, then NTTx. This unit performs one of
// those three local steps on the NZ residues held in its register file
// (RF_NTT), decomposed into radix-2 stages, one butterfly issued per clock.
// The transform is the negacyclic NTT: forward = Cooley-Tukey with twiddle
// psi^bitrev(m+g) at stage m, inverse = Gentleman-Sande with psi^-bitrev(m+g)
// (the final N^-1 scaling is a separate element-wise ModMult). The unit
// computes the global coefficient index of each butterfly from the PE's
// coordinates (px, py) and the data layout of the step, and from it the
// twiddle exponent, which twiddle_ot turns into a twiddle factor.
//
// Data layouts (slot u of PE (px, py); CY = NZ/NY, CX = NZ/NX):
//   PH_Z: i = px + NX*py + NX*NY*u                 (the paper's mapping)
//   PH_Y: u = c*NY + y,  z = py*CY + c             (after the xbar_v exchange)
//   PH_X: u = d*NX + x,  s' = px*CX + d, s' = c*NY + y, z = py*CY + c
// with i = x + NX*y + NX*NY*z. The Y and X layouts are this design's choice
// of which residues each PE keeps after a transposition; they need NZ >= NY
// and NZ >= NX, true for the paper's 64x32x64 cube.
// Timing: `start` begins the step; each stage issues NZ/2 butterflies on
// consecutive cycles and then drains the 3-cycle twiddle and 4-cycle butterfly
// pipelines before the next stage reads the results (this design's hazard
// rule; the paper's RF_NTT banking that overlaps stages is not modelled).
// `done` pulses when the last result is written. RF_NTT is written and read
// by the PE through a separate port while the unit is idle.
module nttu
  import bts_pkg::*;
#(
  parameter int unsigned LX    = 6,   // log2(n_PEhor)
  parameter int unsigned LY    = 5,   // log2(n_PEver)
  parameter int unsigned LZ    = 6,   // log2(N / n_PE)
  parameter int unsigned LOG_M = 9    // OT lower-digit table size
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [LX-1:0]   px,
  input  logic [LY-1:0]   py,
  // twiddle tables
  input  logic                     high_we,
  input  logic [LX+LY+LZ-LOG_M:0]  high_addr,
  input  word_t                    high_wdata,
  input  logic                     low_we,
  input  logic [LOG_M-1:0]         low_addr,
  input  word_t                    low_wdata,
  // RF_NTT access from the PE
  input  logic            rf_we,
  input  logic [LZ-1:0]   rf_waddr,
  input  word_t           rf_wdata,
  input  logic [LZ-1:0]   rf_raddr,
  output word_t           rf_rdata,
  // control
  input  logic            start,
  input  ntt_phase_e      phase,
  input  logic            inv,
  input  modulus_t        md,
  output logic            busy,
  output logic            done
);
  localparam int unsigned LN     = LX + LY + LZ;
  localparam int unsigned NZ     = 1 << LZ;
  localparam int unsigned HALF   = NZ / 2;
  localparam int unsigned LOG_2N = LN + 1;
  localparam int unsigned TW_LAT = 3;
  localparam int unsigned BF_LAT = 4;
  localparam int unsigned DRAIN  = TW_LAT + BF_LAT + 1;

  word_t rf [NZ];
  assign rf_rdata = rf[rf_raddr];

  // ---------------- global index of a slot in the current layout ----------
  function automatic logic [LN-1:0] gidx(input ntt_phase_e ph, input logic [LZ-1:0] u,
                                         input logic [LX-1:0] cx, input logic [LY-1:0] cy);
    logic [LX-1:0] x;
    logic [LY-1:0] y;
    logic [LZ-1:0] z, sp;
    logic [LN-1:0] gi_w;
    x = cx; y = cy; z = u;
    case (ph)
      PH_Y: begin
        y = LY'(u);
        z = LZ'((LZ'(cy) << (LZ - LY)) | LZ'(u >> LY));
      end
      PH_X: begin
        x  = LX'(u);
        sp = LZ'((LZ'(cx) << (LZ - LX)) | LZ'(u >> LX));
        y  = LY'(sp);
        z  = LZ'((LZ'(cy) << (LZ - LY)) | LZ'(sp >> LY));
      end
      default: ;
    endcase
    gi_w = LN'(x) | (LN'(y) << LX) | (LN'(z) << (LX + LY));
    return gi_w;
  endfunction

  function automatic logic [LN-1:0] bitrev(input logic [LN-1:0] a);
    logic [LN-1:0] b;
    for (int k = 0; k < LN; k++) b[k] = a[LN-1-k];
    return b;
  endfunction

  // ---------------- sequencer ---------------------------------------------
  typedef enum logic [1:0] { S_IDLE, S_ISSUE, S_DRAIN } st_e;
  st_e            st;
  ntt_phase_e     ph_q;
  logic           inv_q;
  modulus_t       md_q;
  logic [3:0]     kst;       // local stage counter
  logic [LZ-1:0]  pair;      // butterfly counter inside a stage
  logic [4:0]     dcnt;

  logic [3:0] nst, base;
  always_comb begin
    case (ph_q)
      PH_Y:    begin nst = 4'(LY); base = 4'(LZ);      end
      PH_X:    begin nst = 4'(LX); base = 4'(LZ + LY); end
      default: begin nst = 4'(LZ); base = 4'd0;        end
    endcase
  end

  // current butterfly
  logic [4:0]        sg;      // global stage (m = 2^sg)
  logic [4:0]        bpos;    // global bit paired by this stage
  logic [3:0]        lb;      // local slot bit
  logic [LZ-1:0]     u, v;
  logic [LN-1:0]     gi;
  logic [LN:0]       mg;
  logic [LN-1:0]     ef;
  logic [LOG_2N-1:0] expo;

  always_comb begin
    sg   = 5'(inv_q ? (base + nst - 4'd1 - kst) : (base + kst));
    bpos = 5'(LN - 1) - sg;
    case (ph_q)
      PH_Y:    lb = 4'(bpos - 5'(LX));
      PH_X:    lb = 4'(bpos);
      default: lb = 4'(bpos - 5'(LX + LY));
    endcase
    u    = LZ'(((pair >> lb) << (lb + 1)) | (pair & LZ'((1 << lb) - 1)));
    v    = u | LZ'(1 << lb);
    gi   = gidx(ph_q, u, px, py);
    mg   = (LN+1)'(1) << sg;
    mg   = mg + (LN+1)'(gi >> (bpos + 1));
    ef   = bitrev(mg[LN-1:0]);
    if (!inv_q || ef == '0) expo = LOG_2N'(ef);
    else                    expo = LOG_2N'((LOG_2N+1)'(1) << LOG_2N) - LOG_2N'(ef);
  end

  logic issue;
  assign issue = (st == S_ISSUE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ph_q <= PH_Z; inv_q <= 1'b0; md_q <= '0;
      kst <= '0; pair <= '0; dcnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          st <= S_ISSUE; ph_q <= phase; inv_q <= inv; md_q <= md;
          kst <= '0; pair <= '0;
        end
        S_ISSUE: begin
          if (pair == LZ'(HALF - 1)) begin
            pair <= '0;
            st   <= S_DRAIN;
            dcnt <= 5'(DRAIN);
          end else pair <= pair + 1'b1;
        end
        S_DRAIN: begin
          if (dcnt == 0) begin
            if (kst == nst - 4'd1) begin
              st <= S_IDLE; done <= 1'b1;
            end else begin
              kst <= kst + 4'd1; st <= S_ISSUE;
            end
          end else dcnt <= dcnt - 5'd1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
  assign busy = (st != S_IDLE);

  // ---------------- twiddle generation and butterfly ----------------------
  word_t tw;
  logic  tw_v;
  twiddle_ot #(.LOG_M(LOG_M), .LOG_2N(LOG_2N)) u_ot (
    .clk, .rst_n,
    .high_we, .high_addr, .high_wdata, .low_we, .low_addr, .low_wdata,
    .in_valid(issue), .e(expo), .md(md_q), .out_valid(tw_v), .w(tw));

  logic [LZ-1:0] u_d [TW_LAT], v_d [TW_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TW_LAT; k++) begin u_d[k] <= '0; v_d[k] <= '0; end
    end else begin
      u_d[0] <= u; v_d[0] <= v;
      for (int k = 1; k < TW_LAT; k++) begin u_d[k] <= u_d[k-1]; v_d[k] <= v_d[k-1]; end
    end
  end

  word_t bx, by;
  logic  bv;
  ntt_butterfly u_bf (
    .clk, .rst_n, .in_valid(tw_v), .inv(inv_q),
    .x(rf[u_d[TW_LAT-1]]), .y(rf[v_d[TW_LAT-1]]), .w(tw), .md(md_q),
    .out_valid(bv), .xo(bx), .yo(by));

  logic [LZ-1:0] wu [BF_LAT], wv [BF_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < BF_LAT; k++) begin wu[k] <= '0; wv[k] <= '0; end
    end else begin
      wu[0] <= u_d[TW_LAT-1]; wv[0] <= v_d[TW_LAT-1];
      for (int k = 1; k < BF_LAT; k++) begin wu[k] <= wu[k-1]; wv[k] <= wv[k-1]; end
    end
  end

  always_ff @(posedge clk) begin
    if (bv) begin
      rf[wu[BF_LAT-1]] <= bx;
      rf[wv[BF_LAT-1]] <= by;
    end else if (rf_we) begin
      rf[rf_waddr] <= rf_wdata;
    end
  end
endmodule
