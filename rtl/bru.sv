// bru: the broadcast unit (global BrU plus local BrUs).
// Precomputed constants shared by all PEs (higher-digit twiddle tables and
// the BConv tables [q_hat_j^-1]_{q_j} and [q_hat_j]_{p_i}) are loaded into the
// global BrU store before an application starts. A broadcast command streams
// `count` words, one per cycle, from the store to a chosen register file in
// every PE (RF_high, RF_BT1 or RF_BT2). As in the paper, delivery is
// hierarchical: the global BrU feeds NLBRU local BrUs (128 in BTS), each of
// which re-times the stream and drives 16 PEs. Store size (DEPTH words) and
// the one-register stage in each local BrU are this design's choices.
// Latency from a stored word to the PEs: 3 cycles. `busy` covers the stream.
module bru
  import bts_pkg::*;
#(
  parameter int unsigned NLBRU = 128,
  parameter int unsigned DEPTH = 32768
) (
  input  logic      clk,
  input  logic      rst_n,
  // host load port
  input  logic      ld_we,
  input  logic [15:0] ld_addr,
  input  word_t     ld_wdata,
  // broadcast command
  input  logic      cmd_valid,
  input  bru_cmd_t  cmd,
  output logic      busy,
  // to the local BrU fan-out
  output bru_beat_t beat [NLBRU]
);
  word_t store [DEPTH];
  always_ff @(posedge clk) begin
    if (ld_we) store[ld_addr[$clog2(DEPTH)-1:0]] <= ld_wdata;
  end

  logic        act;
  bru_cmd_t    c_q;
  logic [10:0] k;
  bru_beat_t   g_beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; c_q <= '0; k <= '0; g_beat <= '0;
    end else begin
      g_beat.valid <= 1'b0;
      if (!act && cmd_valid && cmd.count != 0) begin
        act <= 1'b1; c_q <= cmd; k <= '0;
      end else if (act) begin
        g_beat.valid <= 1'b1;
        g_beat.tgt   <= c_q.tgt;
        g_beat.addr  <= c_q.raddr + 10'(k);
        g_beat.data  <= store[$clog2(DEPTH)'(c_q.gaddr + 16'(k))];
        k <= k + 11'd1;
        if (k == c_q.count - 11'd1) act <= 1'b0;
      end
    end
  end

  // global BrU NoC stage and local BrU repeaters
  bru_beat_t noc_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) noc_q <= '0;
    else        noc_q <= g_beat;
  end
  for (genvar b = 0; b < NLBRU; b++) begin : g_lbru
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) beat[b] <= '0;
      else        beat[b] <= noc_q;
    end
  end

  assign busy = act | g_beat.valid | noc_q.valid | beat[0].valid;
endmodule
