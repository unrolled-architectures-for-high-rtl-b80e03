# Unrolled multi-kernel polar encoder

Polar codes built only from Arikan's 2x2 kernel have lengths that are powers
of two. Multi-kernel (MK) polar codes mix 2x2 and 3x3 kernels, which gives
every length N = 2^n * 3^m. There are 83 such lengths between 2 and 32768.
The generator matrix is a Kronecker product of the kernels in a chosen
order, the *kernel ordering*:

    G = T_l0 (x) T_l1 (x) ... (x) T_ls,     x = u * G   (over GF(2))

Encoding has no loops and no data-dependent control, so the whole encoder
can be unrolled into a fixed network of XOR gates. One N-bit frame goes in
and one N-bit codeword comes out every clock cycle. Registers can be
inserted at any depth to trade latency and flip-flops for clock rate. This
RTL implements that encoder for any binary, ternary or mixed ordering, in
the five variants of the published architecture:

* non-systematic, combinational (P = 0);
* non-systematic, pipelined (P > 0);
* systematic, combinational;
* systematic with a pipeline register between its two encoders;
* systematic, pipelined.

The architecture follows the paper "Unrolled Architectures for
High-Throughput Encoding of Multi-Kernel Polar Codes" (Rezaei, Abbasi,
Rajatheva, Latva-aho). The authors' encoders are VHDL made by a code
generator. This is an independent SystemVerilog description of the same
hardware, in which parameters take the place of the generator.

## The two processing elements

Everything is built from two processing elements (PEs). Bit i of each port
is u_i or x_i.

| PE | function | XOR gates | depth |
|----|----------|-----------|-------|
| `pe2` (2x2 kernel, T2 = [1 0; 1 1]) | x0 = u0^u1, x1 = u1 | 1 | 1 |
| `pe3` (3x3 kernel) | x0 = u0^u1, x1 = u0^u2, x2 = u1^(u0^u2) | 3 | 2 |

As a matrix (row = input, column = output), the ternary kernel is
T3 = [1 1 1; 1 0 1; 0 1 1]. This is the kernel drawn in the paper's PE
figure, and it matches the paper's node equation for ternary stages.
The paper also names a different ternary matrix, T_3^3 = [1 0 0; 0 1 0;
1 1 1], as the one it uses. That matrix does not match the drawn PE or the
equation. The RTL follows the drawing and the equation.

## From kernels to an unrolled network

Write a bit index in mixed radix, with one digit per kernel: the digit for
l0 is the most significant and the digit for ls the least. Then
G[r][c] is the product over all kernels of T_lk[r_k][c_k]. Each kernel
therefore acts on its own digit and leaves the others alone, and the
encoder is one *kernel stage* per kernel (`kernel_stage`).

A stage with kernel l finishes sub-codes of size BLK, where BLK is the
product of l and of all kernels after it in the ordering. The frame is
cut into N/BLK blocks. In each block, PE number i (0 <= i < BLK/l) takes
the bits at offsets i, i + BLK/l and, for l = 3, i + 2*BLK/l. It writes its
results back to the same offsets. For example:

* The first stage (kernel ls, BLK = ls) runs PEs on adjacent bits.
* The last stage (kernel l0, BLK = N) pairs each bit of the left half or
  third of the frame with the bits at the same place in the other parts.

This is the recursive picture "an encoder of size N is l0 encoders of size
N/l0 followed by one column of PEs", flattened into stages. `mk_encoder`
chains the NK stages in that order, from KER[NK-1] to KER[0].

Two consequences are worth knowing when changing the design:

* **The stages commute.** Each stage works on a different digit, so
  applying them in another order gives the same codeword. The order only
  decides which partial results exist at each point, and hence where
  pipeline registers can go. A testbench cannot tell a reordered chain
  from the right one; it can only tell a wrong kernel or a wrong stride.
* **Gate count.** A binary stage costs N/2 XOR gates and a ternary stage N
  gates (3 per PE). The default N = 324, {2,2,3,3,3,3} encoder has
  2*162 + 4*324 = 1620 XOR gates. The systematic top level has twice that.
  The paper counts four gates per ternary PE, 4N/3 per stage. The drawn
  PE shares the u0^u2 node, which brings this to three.

## Pipelining

`mk_encoder` takes P, the number of N-bit registers inside the stage
chain, with 0 <= P < NK. Register m (1..P) sits after stage
floor(m*NK/(P+1)), so the registers are spread as evenly as the stage
boundaries allow. P = NK-1 puts a register after every stage; this is the
deeply pipelined case. The paper gives P, the register count and the
latency, but not the exact positions: the spreading rule is this design's
choice.

Ternary stages are two XOR levels deep and binary stages one. A balanced
design therefore wants at least two binary stages, or one ternary stage,
between registers. The even spreading approximates this. Placing
registers by XOR depth rather than by stage count would be a
straightforward change to `mk_pkg::pipe_after`.

There is no back-pressure. A frame may enter on every cycle, and up to
P+1 frames are in flight in one encoder.

## Systematic encoding

`mk_polar_encoder` with SYSTEMATIC = 1 is two copies of the same encoder.
Between them, `zeroing` clears the frozen positions:

    v = u * G;   v[frozen] = 0;   x = v * G

The input u carries the information bits at the information positions and
zeros at the frozen positions. With BOUNDARY_REG = 1 an N-bit register
sits after the zeroing step. This splits the long path into two halves, so
the systematic encoder reaches about the clock rate of the non-systematic
one.

The frozen set is an N-bit input (`frozen`, 1 = frozen). It is
configuration, not data: it must not change while frames are in flight.
Choosing the frozen set (code construction) is not part of the hardware.

**Caveat.** This two-pass scheme reproduces the information bits in the
codeword for pure-binary codes with the usual frozen sets (the tests check
this with Reed-Muller-like sets). With the ternary kernel above it does not
do so in general. For example it fails for the length-12 code
G = T2 (x) T3 (x) T2 with frozen positions {0,1,2,4,5,6}, which the paper
uses to illustrate systematic encoding. The RTL implements the two-pass
structure exactly as described, and the testbenches check it against that
definition. Users who need the information bits to appear in the codeword
with ternary kernels must check their kernel and frozen set.

## Interface and timing (`mk_polar_encoder`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk` | in | 1 | clock; everything is on the rising edge |
| `rst_n` | in | 1 | synchronous active-low reset; clears the valid flags only |
| `in_valid` | in | 1 | a frame is on `u` this cycle |
| `u` | in | N | frame, bit i = u_i |
| `frozen` | in | N | frozen-position mask (systematic only; unused otherwise) |
| `out_valid` | out | 1 | `x` holds a new codeword this cycle |
| `x` | out | N | codeword, bit i = x_i; held until the next codeword |

The data path is: input register, encoder(s), output register. Suppose a
frame is presented with `in_valid` in clock cycle c, so the rising edge
that ends cycle c captures it. It is then on `x`, with `out_valid` high,
in cycle c + LATENCY. An assertion in the top level checks this for every
frame:

| variant | LATENCY (cycles) | latency in the paper's sense (input register to output register) | registers |
|---------|-----------------|-----------------|-----------|
| non-systematic | P + 2 | P + 1 | (P+2)·N |
| systematic | 2P + 2 + BOUNDARY_REG | 2P + 1 + BOUNDARY_REG | (2P+2+BOUNDARY_REG)·N |

Add one valid flip-flop per register. Throughput is one frame per cycle,
N·f bit/s, in every variant.

Data registers load only when their valid input is high, and are not
reset. The valid flag, the reset and the load enable are this design's
choices; the paper only says where the N-bit registers sit.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `NK` | 6 | number of kernels (at most `mk_pkg::MAX_STAGES` = 15) |
| `KER[NK]` | '{2,2,3,3,3,3} | kernel ordering, KER[0] = l0 (outermost) |
| `N` | 324 | code length; must equal the product of `KER` (checked at elaboration) |
| `P` | 4 | pipeline registers inside each encoder, 0 <= P < NK |
| `SYSTEMATIC` | 1 | two encoders with zeroing, or one |
| `BOUNDARY_REG` | 1 | register between the two systematic encoders |

The default is the paper's partially pipelined systematic mixed-kernel
encoder of length 324. It has 3564 data flip-flops and a latency of 10
cycles. It was chosen because it uses every part of the design. The
paper's other reported encoders are parameter settings:

| reported encoder | parameters |
|------------------|------------|
| N = 192, combinational | `NK=7, KER='{3,2,2,2,2,2,2}, N=192, P=0, SYSTEMATIC=0/1, BOUNDARY_REG=0` |
| N = 256 | `NK=8, KER='{2,2,2,2,2,2,2,2}, N=256` |
| N = 243 | `NK=5, KER='{3,3,3,3,3}, N=243` |
| N = 384 | `NK=8, KER='{3,2,2,2,2,2,2,2}, N=384` |
| N = 576 | `NK=8, KER='{2,2,2,2,2,2,3,3}, N=576` |
| N = 1024, P = 0..9 | `NK=10, KER='{2,...,2}, N=1024, P=0/1/2/4/9` |
| N = 4096 pipelined | `NK=12, KER='{2,...,2}, N=4096, P=5, SYSTEMATIC=0` |

With Verilator, an unpacked-array parameter such as `KER` should be
overridden from a declared localparam array. Passing an inline `'{...}`
whose size differs from the default fails.

## Departures from the paper

* The ternary kernel is the one drawn and given as the node equation. The
  matrix the paper names as its choice is different (see above).
* The pipeline register positions are chosen here (even spreading). The
  paper gives only the count P.
* The headline N = 4096 encoder is described as P = 5 in the text. The
  other partially pipelined rows use P = 3 or 4. Here P is free, and the
  N = 4096 test runs P = 5.
* The frozen set is a run-time mask input, not a constant built into the
  netlist. This costs N AND gates, which a fixed set would fold away.
* Valid flags, reset and load enables are added; the paper has bare
  registers.
* The systematic property does not hold in general with ternary kernels
  (see the caveat above).
* Not included: the paper's HDL generator and its search for the kernel
  ordering, which is software, and the serial I/O an N = 4096 encoder would
  need (more than 2 Tb/s). The encoder has plain N-bit parallel ports.

## Verification

All testbenches are self-checking. Their golden model (`tb_ref_pkg`)
builds each generator-matrix entry from the Kronecker definition, digit by
digit. It shares no structure with the RTL. Each testbench prints
`TB_RESULT checks=<n> failures=<n>`.

| testbench | what it covers |
|-----------|----------------|
| `tb_pe2`, `tb_pe3` | exhaustive PE truth tables against the kernel matrices |
| `tb_kernel_stage` | binary and ternary stages, inner and outer strides, against I (x) T_l (x) I |
| `tb_pipe_reg` | capture, hold, valid timing, reset |
| `tb_zeroing` | masking of random frames |
| `tb_mk_encoder` | the core at N = 324 (P = 4), N = 6 (P = 0) and N = 36 (P = 3), with random frames, values and latency |
| `tb_mk_polar_encoder` | the default top end to end: 120 frames with random gaps, latency, frames overlapping in the pipeline, zeroing in effect, reset flush |
| `tb_workloads_comb` | the seven combinational codes of the paper, non-systematic and systematic |
| `tb_workloads_pipe` | the paper's pipelined and boundary-register configurations (N = 192 to 1024, P up to 9) |
| `tb_workload_4096` | N = 4096, P = 0 and P = 5 |

Running one, for example the end-to-end test:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/mk_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_enc_check.sv \
        tb/tb_mk_polar_encoder.sv --top-module tb_mk_polar_encoder
    ./obj_dir/Vtb_mk_polar_encoder

The large workload benches take a few minutes to compile. This is
Verilator compiling tens of thousands of XOR assignments into C++. The
simulations themselves finish in seconds.

What is not verified: timing closure and FPGA resource counts (the paper
reports these for an Artix-7), and error-correction performance, which
depends on the frozen set and the kernel ordering chosen outside this
hardware.

## Files

* `rtl/mk_pkg.sv`: shared constants, kernel enum, register-placement
  rule.
* `rtl/pe2.sv`, `rtl/pe3.sv`: processing elements.
* `rtl/kernel_stage.sv`: one column of PEs for one kernel.
* `rtl/mk_encoder.sv`: non-systematic unrolled encoder with P internal
  registers.
* `rtl/pipe_reg.sv`: N-bit register with valid, used for the input,
  output, boundary and pipeline registers.
* `rtl/zeroing.sv`: frozen-position clearing.
* `rtl/mk_polar_encoder.sv`: top level.
* `tb/`: golden model (`tb_ref_pkg`), reusable checker (`tb_enc_check`)
  and the testbenches listed above.
