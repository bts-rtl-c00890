// bts_pkg: types and constants shared by the BTS accelerator RTL.
// A residue (machine word) is 64 bits, as in the BTS design. A prime modulus
// travels with its Barrett constant mu = floor((2^128-1)/q), so every modular
// unit can reduce a full 128-bit product. Primes must be below 2^62.
// The command encodings below are this implementation's own: the paper states
// that the host sends instructions but does not define an instruction set.
package bts_pkg;
  localparam int unsigned WORD_W   = 64;
  localparam int unsigned SPAD_AW  = 15;   // word address inside one PE scratchpad (256 KB / 8 B)
  localparam int unsigned MMAU_LANES = 4;  // l_sub = 4

  typedef logic [WORD_W-1:0] word_t;

  typedef struct packed {
    logic [63:0]  q;    // prime modulus, q < 2^62
    logic [127:0] mu;   // floor((2^128-1)/q)
  } modulus_t;

  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_ELEM  = 4'd1,   // element-wise ModAdd / ModMult over the PE's residues
    OP_MMAU  = 4'd2,   // BConv second part or SSA on the MMAU
    OP_NTT   = 4'd3,   // one local 3D-NTT step (z, y or x), forward or inverse
    OP_EXCH  = 4'd4,   // transposition over xbar_v or xbar_h
    OP_LDLOW = 4'd5    // scratchpad -> RF_low (lower-digit twiddle table)
  } pe_op_e;

  typedef enum logic [2:0] {
    EF_ADD  = 3'd0,
    EF_SUB  = 3'd1,
    EF_MUL  = 3'd2,    // poly x poly (ModMult)
    EF_MULS = 3'd3,    // poly x RF_BT1[idx] (BConvU ModMult, also CMult)
    EF_ADDS = 3'd4     // poly + RF_BT1[idx] (CAdd)
  } elem_fn_e;

  typedef enum logic [1:0] { PH_Z = 2'd0, PH_Y = 2'd1, PH_X = 2'd2 } ntt_phase_e;

  typedef struct packed {
    pe_op_e             op;
    elem_fn_e           fn;
    logic [SPAD_AW-1:0] dst;
    logic [SPAD_AW-1:0] src0;
    logic [SPAD_AW-1:0] src1;
    logic [SPAD_AW-1:0] src2;
    logic [SPAD_AW-1:0] src3;
    logic [7:0]         idx;     // RF_BT1 / RF_BT2 entry
    ntt_phase_e         phase;
    logic               inv;     // inverse NTT
    logic               acc;     // MMAU: accumulate onto dst
    logic               dir_h;   // exchange over xbar_h (else xbar_v)
    logic               rev;     // reverse transposition (iNTT)
    modulus_t           md;
  } pe_cmd_t;

  // Broadcast-unit targets inside a PE
  typedef enum logic [1:0] { BT_HIGH = 2'd0, BT_BT1 = 2'd1, BT_BT2 = 2'd2 } bru_tgt_e;

  typedef struct packed {
    logic       valid;
    bru_tgt_e   tgt;
    logic [9:0] addr;
    word_t      data;
  } bru_beat_t;

  typedef struct packed {
    bru_tgt_e    tgt;
    logic [15:0] gaddr;   // first entry in the global BrU store
    logic [9:0]  raddr;   // first entry in the PE register file
    logic [10:0] count;   // number of words
  } bru_cmd_t;

  typedef struct packed {
    logic     to_bru;     // 1: broadcast command, 0: PE command
    bru_cmd_t bru;
    pe_cmd_t  pe;
  } top_cmd_t;

  // One request on a PE-Mem NoC (an HBM pseudo-channel to a region of PEs)
  typedef struct packed {
    logic               valid;
    logic               we;
    logic [7:0]         pe;     // PE index inside the region
    logic [SPAD_AW-1:0] addr;
    word_t              wdata;
  } mem_req_t;

  typedef struct packed {
    logic  valid;
    word_t rdata;
  } mem_rsp_t;
endpackage
