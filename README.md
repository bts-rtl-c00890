# BTS accelerator core in SystemVerilog

Bootstrappable CKKS homomorphic encryption works on polynomials of degree
N = 2^17 whose coefficients are held in residue-number-system form: one
"residue polynomial" of 2^17 64-bit words per prime modulus. Almost all of
the work is element-wise modular arithmetic, base conversion (a small
matrix product across primes), and number-theoretic transforms (NTTs),
which mix all N words of a residue polynomial.

BTS spreads every residue polynomial over a grid of 2,048 processing
elements (64 columns x 32 rows), each owning N / 2,048 = 64 coefficient
positions. Element-wise work and base conversion then need no
communication between PEs. An NTT is computed as a three-dimensional NTT
(64 x 32 x 64). Each PE transforms its local column, the data is transposed
over per-column crossbars, transformed again, transposed over per-row
crossbars, and transformed a last time. Every PE does the same thing at the
same time and the transposition pattern is fixed. So the crossbars need no
arbitration: they follow a rotating schedule that every PE knows in advance.

This repository implements that core: the PE grid, the PE datapath
(NTT unit, base-conversion unit, modular multiplier and adder, scratchpad),
the two crossbar networks, the broadcast unit that feeds constants to all
PEs, and the network joining each memory pseudo-channel to its PEs. The
HBM stacks and the PCIe host interface are not modelled. Their ports are
brought out of the top module.

## Numbers

| quantity | value |
|---|---|
| word size | 64 bit; moduli q < 2^62, Barrett reduction |
| PE grid | NPE_HOR = 64 columns, NPE_VER = 32 rows |
| coefficients per PE | NZ = 2^LZ = 64 |
| N | 64 x 32 x 64 = 2^17 |
| scratchpad | 16,384 lines x 128 bit per PE (256 KB, 512 MB in total), single port |
| crossbar ports | 12 bit; a 64-bit word takes 6 flits |
| broadcast unit | one global store (32,768 words) and 128 local repeaters, each serving 16 PEs |
| memory side | 32 pseudo-channels, one per PE row (64 PEs) |
| base-conversion lanes | 4 products per MMAU operation |
| twiddle tables | lower-digit table of M = 512 entries per PE, higher-digit table of 2N/M = 512 entries broadcast |

## Modular arithmetic (`barrett_reduce`, `mod_mult`, `mod_add`)

Every modulus travels with its Barrett constant as a `modulus_t`
(`q`, `mu = floor((2^128 - 1) / q)`). The host computes `mu` once per prime.
`barrett_reduce` multiplies the 128-bit input by `mu`, keeps the upper 128
bits of the product as the quotient estimate, and subtracts `q` up to twice.
With q < 2^62 all corrections fit in 64 bits. `mod_mult` is a 64 x 64
multiplier followed by that reduction, with two register stages.
`mod_add` is combinational and does addition or subtraction with one
conditional correction.

## Data layout and the 3D-NTT (`ntt_butterfly`, `twiddle_ot`, `nttu`)

Coefficient index i is split as i = x + 64 y + 2048 z. The PE in column x,
row y holds positions z = 0..63. The forward transform is a negacyclic
Cooley-Tukey NTT in bit-reversed output order. It is done in five steps:

1. **NTT_z.** Each PE runs the 6 radix-2 stages of dimension z on its own
   64 words.
2. **Vertical exchange** over the column's `xbar_v` (32 ports).
3. **NTT_y.** 5 stages of dimension y.
4. **Horizontal exchange** over the row's `xbar_h` (64 ports).
5. **NTT_x.** 6 stages of dimension x.

The inverse transform runs the steps in reverse order with Gentleman-Sande
butterflies and inverse twiddles. A final element-wise multiply by N^-1
completes it.

After each exchange a PE holds a different set of (x, y, z) points, stored
in a fixed slot order. This slot order is the easiest part of the design to
get wrong:

* z step: slot u = z; the PE is (x, y).
* y step: the PE at (x, py) holds y = 0..31 for the two z values
  z = 2 py + c, at slot u = 32 c + y.
* x step: the PE at (px, py) holds x = 0..63 for one (y, z) pair:
  s' = px, y = s' mod 32, z = 2 py + s' / 32, at slot u = x.

(For the general grid, y step: u = c NY + y, z = py CY + c with CY = NZ/NY;
x step: u = d NX + x, s' = px CX + d, y = s' mod NY, z = py CY + s'/NY with
CX = NZ/NX.) `nttu` works out, for every butterfly, the global
coefficient index of both operands from the slot, the PE coordinates and
the phase. From that index it derives the twiddle exponent of the full
2^17-point transform. Each local step is therefore exactly the matching
set of stages of the big transform, and no extra "twiddle between
dimensions" pass is needed.

**Twiddles on the fly.** Storing all 2N powers of the 2N-th root of unity
psi in every PE is far too large. `twiddle_ot` splits an exponent e into
a high part and a low part, e = M h + l, and forms psi^e = psi^(M h) x
psi^l with one modular multiplication. The table psi^l (l < M) is
kept in every PE: it is loaded from the scratchpad into `RF_low` by an
`OP_LDLOW` command. The
table psi^(M h) (h < 2N/M) is sent by the broadcast unit into `RF_high`
before a transform that uses a new prime. An inverse twiddle psi^-e is read
as psi^(2N-e).

`nttu` copies the 64 residues into its register file, runs the stages one
after another (each stage sends 32 butterflies through the 4-cycle
pipelined butterfly and waits for the pipeline to drain), and copies the
result back. One NTT step takes stages x (NZ/2 + 9) + 1 cycles.

## Crossbar exchange (`exch_unit`, `xbar`)

A transposition is an all-to-all exchange among the P PEs on one
crossbar (P = 32 vertically, 64 horizontally). Each PE sends NZ / P words
to every peer. The schedule has P rounds. In round r a PE sends to
(me + r) mod P and receives from (me - r) mod P, so the crossbar simply
connects output o to input (o - r) mod P. That is a rotation, with no
conflicts and no allocation. A word leaves as six 12-bit flits, least
significant first. The crossbar registers its outputs.

`exch_unit` holds a transmit buffer and a receive buffer of NZ words. In the
forward direction the word in transmit slot `dest C + c` goes to PE
`dest`, and the c-th word from PE `src` lands in receive slot `c P + src`
(C = NZ / P). The reverse direction, used by the inverse NTT, swaps the
two formulas. An exchange takes NZ x 6 + 2 cycles. All PEs run the same
schedule, so each crossbar takes its round number from one PE: row 0 for
columns and column 0 for rows.

## Base conversion (`mmau`)

Base conversion computes, for each new prime p, a sum over the old primes
q_j of [a_j x q̂_j^-1]_(q_j) x q̂_j mod p. The first factor is an
element-wise multiplication by a per-prime constant. `OP_ELEM`/`EF_MULS`
does it with the ModMult and a constant from `RF_BT1`. The sum is done
four primes at a time. The MMAU takes four inputs and four constants from
`RF_BT2`, adds the four 128-bit products, reduces the sum once, and adds
the result to a partial sum read from the scratchpad (`OP_MMAU` with
`acc = 1`). The same operation with `acc = 0` and ordinary constants serves
as a 4-term multiply-accumulate for other sums of products.

## Memories and constant delivery (`scratchpad`, `bru`, `pe_mem_noc`)

`scratchpad` is a single-ported 128-bit SRAM with a registered read and a
write mask per 64-bit half. A scratchpad "word address" selects one half
of a line. Residue polynomials are stored at NZ consecutive word addresses.

`bru` is the broadcast unit. The host fills its global store before work
begins. A command `(target, global address, RF address, count)` streams
`count` words to every PE's `RF_high`, `RF_BT1` or `RF_BT2`. The words pass
through 128 local repeaters (one register stage each), and each repeater
drives 16 PEs. The first beat reaches the PEs 4 cycles after the command is
taken, then one word arrives per cycle.

`pe_mem_noc` connects one memory pseudo-channel to the 64 PEs of a grid
row. A request names the PE (8-bit index), the word address and, for
writes, the data. Read data comes back two cycles after the request is
accepted: one cycle in the PE, one in the network. A PE accepts
memory requests only while it has no command running, and `ready` reflects
that.

## PE sequencing and the top (`pe`, `bts_top`)

The PE is driven by commands (`bts_pkg::pe_cmd_t`), each applied to the NZ
words of one residue polynomial:

| command | effect |
|---|---|
| `OP_ELEM` | dst = src0 + / - / x src1, or src0 x / + RF_BT1[idx] |
| `OP_MMAU` | dst = (acc ? dst : 0) + sum over l < 4 of src_l x RF_BT2[l][idx] |
| `OP_NTT` | one local 3D-NTT step (phase z/y/x, forward or inverse) |
| `OP_EXCH` | transpose over xbar_v (`dir_h = 0`) or xbar_h (`dir_h = 1`), forward or reverse order |
| `OP_LDLOW` | load RF_low from 2^LOG_M scratchpad words |

Each command carries its own `modulus_t`, so consecutive commands may use
different primes. The sequencer is deliberately simple and not pipelined.
It reads operands one word per cycle, waits for the result, and writes it
back. An element-wise command with k operands takes NZ x (2k + 6) + 2
cycles.

`bts_top` builds the grid. It has one `pe` per position, one `xbar` per
column and per row, one `bru`, and one `pe_mem_noc` per row. A dispatcher
accepts one `top_cmd_t` when every PE and the broadcast unit are idle. It
then either starts a broadcast or hands the PE command to all PEs in the
same cycle. Lock-step execution is what makes the fixed crossbar schedule
valid.

A complete forward NTT of a residue polynomial at address A is the command
sequence
`NTT(z) ; EXCH(v) ; NTT(y) ; EXCH(h) ; NTT(x)`.
The inverse is
`NTT(x,inv) ; EXCH(h,rev) ; NTT(y,inv) ; EXCH(v,rev) ; NTT(z,inv) ; ELEM MULS by N^-1`.

## Where this departs from BTS

* **No automorphism.** BTS also uses the crossbars for the automorphism
  X -> X^(5^r) needed by rotations: an intra-PE permutation followed by
  vertical and horizontal permutations. That command is not built.
* **No epoch pipelining.** BTS overlaps the NTT steps of several residue
  polynomials with the exchanges of others, so that one (i)NTT finishes per
  epoch. Here commands run one at a time, and the NTT unit and element-wise
  units are not streaming at one result per cycle. The arithmetic and the
  data movement are the paper's, but the cycle counts are not, so no
  throughput figure of BTS can be checked against this RTL.
* **NTT timing.** In BTS the three local NTT steps of one residue
  polynomial together take N log N / (2 x 2048) = 544 cycles. That is one
  epoch, with the butterfly pipeline never idle. Here the three steps take
  17 stages x 41 cycles + 3 = 700 cycles, and the two exchanges another
  2 x 386 cycles, all in sequence. BTS feeds the butterfly from two pairs
  of NTT register files; here there is one register file, read and written
  stage by stage.
* **Twiddle tables.** In BTS each PE keeps a lower-digit table with its own
  entries. Here every PE holds the same full table psi^0..psi^(M-1) (the
  same 512 words in all PEs). The higher-digit table is broadcast when a
  command asks for it, not automatically every epoch.
* **Staging registers.** The extra register files of the PE (for MMAU
  staging and transposition FIFOs) are not modelled separately. The NTT
  register file and the exchange buffers play their roles.
* **Own choices where BTS gives no detail:** the OT split M = 512, the
  global broadcast store size (32,768 words), the command encoding, the
  dispatcher, the exchange slot orders and round schedule, the flit order,
  pipeline depths, and the use of one grid row as a memory region.
* **Off-chip parts.** HBM2e stacks with their PHYs and the PCIe interface
  are vendor parts and are represented only by ports.

## Verification and how far to trust it

Every module has a self-checking testbench in `tb/`, named `tb_<module>`.
Reference values are computed in the testbench with plain modular
arithmetic (`tb_util_pkg`). Highlights:

* `tb_nttu` and `tb_bts_top` compare NTT results with a
  direct O(N^2) negacyclic evaluation of the polynomial at the odd powers
  of psi. `tb_bts_top` uses a 4 x 2 grid with NZ = 4, so N = 32.
* `tb_bts_top` also multiplies two polynomials in the NTT domain,
  transforms back, and compares the result with a schoolbook negacyclic
  convolution. It also checks MMAU accumulation and add/subtract. It counts
  vertical, horizontal and reverse exchanges, broadcasts, memory reads and
  writes, dispatcher stalls and NTT/iNTT runs, and fails if any never
  happened.
* The largest configuration simulated end to end is the 4 x 2 grid with
  NZ = 4 (N = 32). The default 2,048-PE configuration passes lint and
  elaboration. A Verilator build of it produces about a thousand C++ files
  and takes hours on a small machine, so it has not been simulated. The
  NTT index arithmetic is written for any power-of-two grid, but the
  2^17-point transform itself has only been checked through the small
  grids.
* Unit testbenches check cycle counts where the design fixes them: NTT
  step and exchange durations, broadcast latency, and PE command durations.

Three 59-bit NTT-friendly primes (q ≡ 1 mod 2^18) are used throughout.

## Simulating

Any testbench builds with plain Verilator 5:

```
verilator --binary --timing -Irtl -Itb rtl/bts_pkg.sv tb/tb_util_pkg.sv \
    tb/tb_bts_top.sv --top-module tb_bts_top
./obj_dir/Vtb_bts_top
```

Replace `tb_bts_top` with any other testbench. Each one prints
`TB_RESULT checks=<n> failures=<m>` and stops. The grid size is set by the
`bts_top` parameters `NPE_HOR`, `NPE_VER` and `LZ`. They must be powers of
two with NZ a multiple of both grid dimensions (NZ >= NPE_HOR,
NZ >= NPE_VER). `LOG_M`, `SPAD_LINES`, `PES_PER_LBRU` and `BRU_DEPTH` can be
reduced together for small test grids, as `tb_bts_top` does. Building the
default 2,048-PE configuration takes hours.
