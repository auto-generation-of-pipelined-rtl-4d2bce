# Pipelined M-parallel polar encoder

A polar code of length N = 2^n maps a source word u (N bits) to a codeword
x = u B_N F^{⊗n}. Here F = [1 0; 1 1], F^{⊗n} is its n-fold Kronecker power and
B_N is the bit-reversal permutation. The transform has the same shape as a
radix-2 FFT. There are n stages of butterflies, each XOR-ing pairs of bits
whose indices differ in one bit. In a butterfly the upper output is u0 ⊕ u1 and
the lower output passes u1 through. A fully parallel encoder needs (N/2)·n XOR
gates and N input pins, which is far too much for long codes. This RTL folds
the transform onto M lanes: M source bits go in per clock and M code bits come
out, with a small number of one-bit delay elements. N and M are
elaboration-time parameters (powers of two, 4 ≤ M ≤ N/2). One SystemVerilog
generate structure builds the encoder for any such pair.

The defaults, N = 32 and M = 8, give 20 XOR gates, 40 delay elements and
a latency of 5 cycles.

## What goes in and what comes out

A codeword occupies N/M consecutive clock cycles ("vectors") at each end.

**Input vector i** (i = 0 … N/M−1) carries, on lanes 2m and 2m+1
(m = 0 … M/2−1), the source bits

    lane 2m   : u[(M/2)·i + m]
    lane 2m+1 : u[(M/2)·i + m + N/2]

For N = 32 and M = 8 the lanes of vector k hold u[4k], u[4k+16], u[4k+1],
u[4k+17], u[4k+2], u[4k+18], u[4k+3], u[4k+19].

**Output vector i** carries, on lane j, bit y[M·i + j] of

    y = u F^{⊗n}, i.e.  y[j] = XOR of all u[k] with (k AND j) = j.

B_N commutes with F^{⊗n}, so y is the codeword x in bit-reversed order:
y[j] = x[bitrev(j)]. For N = 32 and M = 8 the first output vector is
x0 x16 x8 x24 x4 x20 x12 x28. Restore natural order downstream if needed. Many
systems can use y directly, because x and y hold the same bits.

The first output vector of a codeword leaves **3N/(2M) − 1 cycles** after its
first input vector. Codewords may follow each other back to back, so the
throughput is M bits per cycle.

## The column formula

The datapath is a straight chain of 2n+1 columns, applied left to right. There
are three kinds of column:

| column | hardware | delay |
|---|---|---|
| XP = I_{M/2}⊗XP | M/2 butterflies on lane pairs (2j, 2j+1) | none |
| I_k⊗P_{M/k} | k copies of a fixed lane permutation, one on each group of M/k consecutive lanes | none |
| I_{M/2}⊗S_K | M/2 delay–switch–delay commutators on lane pairs | K/2 cycles |

The chain is

    XP · P4 · { W(i) · XP  for i = 0 … n−3 } · P4 · S_{N/M} · XP

Here P4 = I_{M/4}⊗P_4. Each variable column W(i) has subscript s = N/(2^i·M):

* if s ≥ 2 it is the switch column I_{M/2}⊗S_s;
* if s ≤ 1 it is the permutation column I_k⊗P_{M/k}, with k = 1/s.

For N = 32 and M = 8 this gives 11 columns:

    XP  P4  S4  XP  S2  XP  P8  XP  P4  S4  XP

For M = 4 no W becomes a permutation. For M = N/2 there is a single S_2 in
the middle and the final switch is S_2 as well.

### Why it works: following the address bits

This section is the key to the whole design. Every bit in flight belongs to
one index k = (b_{n−1} … b_0) of the transform. That bit sits on some lane
(log2 M address bits) at some time within its codeword (n − log2 M time
bits). Each column rearranges which index bit sits in which lane bit or time
bit:

* An **XP column** combines lanes 2j and 2j+1. It performs the transform stage
  for whichever index bit currently sits on **lane bit 0**. The even lane must
  hold the index with that bit equal to 0.
* **P_G** exchanges the most and least significant bits of the lane address
  within groups of G lanes. For example, P_4 swaps lanes 1 and 2, and P_8 swaps
  lanes 1↔4 and 3↔6. The group's top lane bit therefore moves to lane bit 0.
  Each P column costs only wires.
* **S_K** exchanges lane bit 0 with time bit log2(K/2). It does this through
  K/2 delays on the lower input, a 2×2 switch, and K/2 delays on the upper
  output. With upper stream a0 a1 a2 a3 and lower stream b0 b1 b2 b3, S_4
  emits a0 a1 b0 b1 on top and a2 a3 b2 b3 below, two cycles later.

At the input, lane bit 0 is b_{n−1}, lane bits above it are b_{m−2}…b_0
(m = log2 M) and the time bits are b_{n−2}…b_{m−1}. The chain then works as
follows:

1. The first XP does stage b_{n−1}.
2. P4 brings b_0 to lane bit 0 and parks b_{n−1} on lane bit 1.
3. Each switch column trades the index bit on lane bit 0 for the next time
   bit, top down. The following XP then does stage b_{n−2}, then b_{n−3}, and
   so on down to b_{m−1}. Meanwhile b_0 is carried into the top time bit.
4. The permutation columns then bring b_{m−2}, …, b_1 down to lane bit 0 in
   turn, each followed by its XP.
5. The last P4 moves b_{n−1} back to lane bit 0. The final S_{N/M} trades it
   for b_0 from the top time bit. The last XP does stage b_0.

Every index bit is combined exactly once. After the last column the lanes hold
b_{m−1}…b_0 in natural order and the time holds b_{n−1}…b_m. That is why the
output comes in natural order of y, which is bit-reversed order of x.

### Timing and cost

Only the switches hold state. Their delays add up as follows:

* middle switches: N/(2M) + N/(4M) + … + 1 = N/M − 1 cycles;
* final switch: N/(2M) cycles;
* total latency: **3N/(2M) − 1** cycles.

The storage is K one-bit delays per switch with M/2 switches per column:
**3N/2 − M** delay elements. There are log2 N XP columns of M/2 gates each:
**(M/2)·log2 N** XOR gates. The XP and P columns are combinational, so a path
between two registers can cross several XORs: up to all log2 N of them when M
is large and few switches lie in between. Counts for some sizes:

| N | M | XOR | delay elements | latency (cycles) |
|---|---|---|---|---|
| 32 | 8 | 20 | 40 | 5 |
| 1024 | 4 | 20 | 1532 | 383 |
| 1024 | 32 | 160 | 1504 | 47 |
| 1024 | 128 | 640 | 1408 | 11 |
| 1024 | 256 | 1280 | 1280 | 5 |
| 1024 | 512 | 2560 | 1024 | 2 |

## Switch control and codeword framing

Each S_K has its own log2(K)-bit counter. While the counter's most
significant bit is 0 the switch passes straight through; while it is 1 the
switch crosses. The counter must be in phase with the codewords. In this RTL a
codeword's first vector is marked by a start-of-codeword flag (`sof`). That
flag forces the counter to 0 in the cycle the first vector reaches the switch.
In all other cycles the counter runs freely.

The `sof` flag travels with the data. Each switch column delays a
{valid, sof} pair by K/2 cycles, alongside the lanes. Every codeword is a
multiple of K cycles long. Because of that, back-to-back codewords see the
same counter phase as a free-running counter would. An idle gap of any length
between codewords is also fine.

The encoder finds codeword boundaries itself by counting `in_valid` cycles
modulo N/M. A codeword, once started, must arrive on consecutive cycles. An
assertion in `polar_encoder` flags an interrupted codeword. Reset is
synchronous and active low. It clears the vector counter, the switch counters
and the control delay lines. The data delay elements are not reset, because
nothing they hold before the first codeword is ever marked valid.

## Top-level interface (`polar_encoder`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous reset, active low |
| `in_valid` | in | 1 | `in_data` holds an input vector |
| `in_data` | in | M | input vector, lane l on bit l, order as above |
| `out_valid` | out | 1 | `out_data` holds an output vector |
| `out_sof` | out | 1 | first output vector of a codeword |
| `out_data` | out | M | output vector, lane j = y[M·i + j] |

Parameters: `N` (default 32) and `M` (default 8). Sizes outside the legal
range stop elaboration with an error.

## Source files

| file | contents |
|---|---|
| `rtl/polar_pkg.sv` | `frame_ctrl_t` {valid, sof}, helpers that evaluate the column formula |
| `rtl/xp.sv` | XOR-and-pass butterfly |
| `rtl/sk_switch.sv` | commutator S_K with its counter |
| `rtl/perm_p.sv` | lane permutation P_N |
| `rtl/xp_column.sv` | I_{M/2}⊗XP |
| `rtl/switch_column.sv` | I_{M/2}⊗S_K plus the K/2-cycle control delay |
| `rtl/perm_column.sv` | I_k⊗P_{M/k} |
| `rtl/polar_encoder.sv` | the column chain for given N and M |

Each module has a testbench in `tb/` named `tb_<module>.sv`. The testbenches
are:

* `tb_polar_encoder` runs the default N = 32, M = 8 encoder end to end. It
  sends all 32 unit vectors (so it reads out every row of the generator
  matrix), all-zero, all-one and random words. Words go back to back, after
  gaps and across a reset. It checks every output bit, the 5-cycle latency and
  the framing.
* `tb_polar_workloads` does the same at N = 1024 with M = 4, 32, 128, 256 and
  512. It also covers the corner sizes N = 8, M = 4 and N = 16, M = 4 and 8.
  The helper `tb/polar_stream_check.sv` computes the reference with an
  in-place butterfly transform.
* The switch testbenches compare against a model of the lane/time bit
  exchange, not against a copy of the RTL.

Simulating with plain Verilator, from the directory that holds `rtl/` and
`tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/polar_pkg.sv tb/tb_polar_encoder.sv --top-module tb_polar_encoder
    ./obj_dir/Vtb_polar_encoder

Each testbench ends with a line `TB_RESULT checks=<n> failures=<n>`. Building
`tb_polar_workloads` takes a few minutes because of the M = 512 instance.

## How far this follows the source architecture

Taken from the published architecture:

* the three module types and their internal structure;
* the formula and the rule that turns each W into a switch or a permutation;
* the lane pairing and grouping shown for the 32-bit, 8-parallel example;
* the input order and the bit-reversed output order;
* the latency, XOR and delay-element counts, which the RTL meets exactly.

Decisions made here, where the source is silent:

* the valid/sof framing and the way each switch counter is aligned to a
  codeword;
* the reset;
* the legal range 4 ≤ M ≤ N/2. M = 2 is not supported, because the formula
  contains I_{M/4}⊗P_4.

Two apparent misprints were resolved:

* The product bound in the general formula is read as log2(N) − 3. This is
  the only reading that yields the published 32-bit example.
* One entry of the published output-order table for the example reads x12
  where x2 belongs.

Not reproduced:

* the FPGA implementation figures (LUTs, registers, clock rates) reported for
  N = 1024;
* the Python generator that printed the original Verilog. Its role is taken
  here by the generate logic of `polar_encoder`.
