// exch_unit: a PE's port to the PE-PE NoC (the "exchange unit").
// For a 3D-NTT transposition every PE on a row (or column) of NP PEs sends
// NZ/NP of its NZ residues to each PE on that line, itself included, and
// receives as many back: an all-to-all exchange. The unit follows a fixed
// rotating schedule, so the crossbar needs no allocation: in round r, PE `me`
// sends to PE (me + r) mod NP and receives from (me - r) mod NP. Each 64-bit
// word leaves as FLITS = 6 flits of 12 bits, least significant first, since
// the paper's crossbar ports are 12 bits wide. The rotating schedule, the
// slot formulas and the flit order are this design's choices; the paper
// fixes only the port width, the lack of allocation and the pattern.
//   forward: send slot dest*C + c, store received word in slot c*NP + src
//   reverse: send slot c*NP + dest, store received word in slot src*C + c
// with C = NZ/NP and c the word's index within its round.
// Interface: the PE fills tx_buf, pulses `start` (with rev and log2 NP), and
// after `done` reads rx_buf. `round` goes to the crossbar, which registers
// its outputs, so flits arrive one cycle after they leave. Every PE on the
// line must start in the same cycle. Duration NZ*FLITS + 2 cycles.
module exch_unit
  import bts_pkg::*;
#(
  parameter int unsigned LZ     = 6,
  parameter int unsigned LNP    = 6,   // log2 of the larger crossbar
  parameter int unsigned FLIT_W = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tx_we,
  input  logic [LZ-1:0]     tx_waddr,
  input  word_t             tx_wdata,
  input  logic [LZ-1:0]     rx_raddr,
  output word_t             rx_rdata,
  input  logic              start,
  input  logic              rev,
  input  logic [3:0]        lognp,     // log2 NP of the crossbar used
  input  logic [LNP-1:0]    me,        // position on the line
  output logic [FLIT_W-1:0] flit_out,
  output logic [LNP-1:0]    round,
  input  logic [FLIT_W-1:0] flit_in,
  output logic              busy,
  output logic              done
);
  localparam int unsigned NZ    = 1 << LZ;
  localparam int unsigned FLITS = (WORD_W + FLIT_W - 1) / FLIT_W;

  word_t tx_buf [NZ];
  word_t rx_buf [NZ];
  assign rx_rdata = rx_buf[rx_raddr];

  logic          act, act_d;
  logic          rev_q;
  logic [3:0]    lnp_q;
  logic [LZ-1:0] n, n_d;
  logic [2:0]    f, f_d;

  // slot arithmetic
  function automatic logic [LZ-1:0] slot_of(input logic [LZ-1:0] nn, input logic [3:0] lnp,
                                            input logic [LNP-1:0] peer, input logic rv, input logic tx);
    logic [LZ-1:0] ci, cm;
    logic [3:0]    lc;
    lc  = 4'(LZ) - lnp;
    cm  = LZ'((1 << lc) - 1);
    ci   = nn & cm;
    // forward tx / reverse rx: peer*C + ci ; forward rx / reverse tx: ci*NP + peer
    if (tx != rv) return LZ'((LZ'(peer) << lc) | ci);
    else          return LZ'((ci << lnp) | LZ'(peer));
  endfunction

  logic [LNP-1:0] npmask, r_cur, r_d, dest, src;
  assign npmask = LNP'((1 << lnp_q) - 1);
  assign r_cur  = LNP'(n >> (4'(LZ) - lnp_q));
  assign r_d    = LNP'(n_d >> (4'(LZ) - lnp_q));
  assign dest   = (me + r_cur) & npmask;
  assign src    = (me - r_d) & npmask;
  assign round  = r_cur & npmask;

  word_t cur;
  assign cur      = tx_buf[slot_of(n, lnp_q, dest, rev_q, 1'b1)];
  assign flit_out = act ? FLIT_W'(cur >> (f * FLIT_W)) : '0;

  always_ff @(posedge clk) begin
    if (tx_we) tx_buf[tx_waddr] <= tx_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; act_d <= 1'b0; rev_q <= 1'b0; lnp_q <= '0;
      n <= '0; f <= '0; n_d <= '0; f_d <= '0; done <= 1'b0;
    end else begin
      done  <= 1'b0;
      act_d <= act; n_d <= n; f_d <= f;
      if (start && !act) begin
        act <= 1'b1; rev_q <= rev; lnp_q <= lognp; n <= '0; f <= '0;
      end else if (act) begin
        if (f == 3'(FLITS - 1)) begin
          f <= '0;
          if (n == LZ'(NZ - 1)) act <= 1'b0;
          n <= n + 1'b1;
        end else f <= f + 3'd1;
      end
      if (act_d && f_d == 3'(FLITS - 1) && n_d == LZ'(NZ - 1)) done <= 1'b1;
    end
  end
  assign busy = act | act_d;

  // deserializer
  logic [FLITS*FLIT_W-1:0] acc;
  logic [FLITS*FLIT_W-1:0] acc_next;
  always_comb begin
    acc_next = acc;
    acc_next[f_d*FLIT_W +: FLIT_W] = flit_in;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (act_d) acc <= acc_next;
  end
  always_ff @(posedge clk) begin
    if (act_d && f_d == 3'(FLITS - 1))
      rx_buf[slot_of(n_d, lnp_q, src, rev_q, 1'b0)] <= acc_next[WORD_W-1:0];
  end
endmodule
