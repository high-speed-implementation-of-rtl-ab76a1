# FFT-based privacy amplification core

Privacy amplification is the last step of quantum key distribution. Both parties shrink a
partly leaked n-bit key X to a shorter final key Y of r bits. They do it with a
universal hash, here a Toeplitz matrix over GF(2). A direct matrix-vector product costs
O(n·r) bit operations. At n = 2^20 that is far too slow. The same product can be written
as a cyclic convolution, and an FFT computes that in O(n log n) floating-point operations.
This RTL builds such a convolution engine. One block is n = N = K² = 1,048,576 key bits,
with K = 1024. Both the final key length r and the seed are set per block.

The design follows the published architecture "High-speed Implementation of FFT-based
Privacy Amplification on FPGA in Quantum Key Distribution". It reads one block from an
input buffer, does three K×K two-dimensional FFT passes through external FFT/IFFT cores
and an external DDR3 memory, and writes out the final key bits. The FFT cores and the DDR3
controller are vendor IP in the original. Here they are ports on the top, and the
testbenches supply behavioural models for them.

## The hash being computed

A modified Toeplitz matrix [I_r | T] is used, where T is an r×(n−r) Toeplitz matrix built
from n−1 random seed bits. The final key is

    Y = X[0..r-1]  XOR  (T · X[r..n-1])      (mod 2)

T·X' is the first r samples of the cyclic convolution of the seed v (length N) with
x' = X with its first r bits set to zero. So the engine does three things:

1. It builds z = x' + i·v, with the key in the real part and the seed in the imaginary
   part. One complex FFT then transforms both sequences.
2. It separates the two spectra with the real-signal identities, multiplies them, and
   runs an inverse FFT:
   - X(k) = (Z(k) + Z*(N−k))/2
   - V(k) = (Z(k) − Z*(N−k))/(2i)
3. It rounds each unscaled inverse-FFT output to an integer, divides by N, and keeps the
   parity. The result is XORed with the key bit, and samples with index < r are kept.

The integer convolution values are at most N, so single-precision floats leave enough
margin at N = 2^20. In simulation, all 2048 randomly sampled output bits of a full-size block were
correct. Rounding errors grow with N, and no proof of correctness is claimed.

Which r of the N outputs form the key is a free choice. This design uses samples 0..r−1.
Any r consecutive outputs give a valid Toeplitz matrix. Another implementation of the
same scheme may pick a different window, and its key bits would then differ.

## The 2-D FFT without transpositions

A K²-point FFT is done with K-point cores in the usual four-step way: row FFTs, a twiddle
W_N^(i·k), and column FFTs. A textbook version transposes the matrix three times per
transform, which is expensive in DRAM. This design drops the final transposition and
accepts its consequence: outputs come out in "unnatural" order.

- Input sample L = i + K·j is stored at matrix position (i, j). The stream position is
  i·K + j, so consecutive input pairs fill a row.
- After the row FFT (over j), the twiddle W_N^(i·k2), and the column FFT (over i), the
  spectrum element k = k1 + K·k2 sits at row k1, column k2.

The inverse transform runs the same algorithm on that unnatural-order spectrum. It
returns the time-domain sample L at row L mod K, column L div K, which is the layout the
input had. So one block needs exactly two column-wise passes, one per transform, and
nothing else is ever transposed.

The real-signal split needs Z(N−k) next to Z(k). In the unnatural layout the partner of
element (k1, k2) is

    ( (−k1) mod K , (−k2 − [k1 ≠ 0]) mod K )

The borrow term arises because N − k1 − K·k2 = (K − k1) + K·(K − 1 − k2) when k1 ≠ 0.
So the multiply pass reads row k1 and row −k1 and pairs their elements with that rule.
Rows 0 and K/2 are their own partners.

## Schedule of one block

`pa_control` issues 4K row operations, one at a time. `data_distribute_unit` executes
each one:

| pass | K times | source | through | destination |
|---|---|---|---|---|
| `OP_FWD_ROW` | row i | input buffer (z = x' + i·v) | FFT, × W_N^(+i·k) | DDR region 0, tiled |
| `OP_FWD_COL` | column c | region 0 (column read) | FFT | DDR region 1, row-major |
| `OP_MUL_ROW` | row k1 | region 1 rows k1 and −k1 | multiply unit, IFFT, × W_N^(−k1·q) | DDR region 2, tiled |
| `OP_INV_COL` | column q | region 2 (column read) | IFFT | post-processing → key bits |

Each operation has three phases, run in sequence:
- **feed:** K samples (2K for `OP_MUL_ROW`) go to the core;
- **collect:** K results go into a row buffer;
- **drain:** the row buffer goes through the rotation-factor multiplier to DDR or to the
  output.

One block therefore takes about 14K² cycles plus DDR stalls. That is 15.3 M cycles at
K = 1024, or 76 ms at 200 MHz, which gives about 8.5 Mbit/s of final key at r ≈ 0.62 N.

## Tiled DRAM layout (fast transposition)

A column read of a row-major K×K matrix opens a new DRAM page for every element. That is
K + K² = 1,049,600 page changes per write-plus-read of the matrix. `transpose_addr_gen`
stores the matrix in 32×32 tiles instead, one tile per DRAM page. Element (r, c) of a
region is at

    addr = { region[1:0], r[9:5], c[9:5], r[4:0], c[4:0] }

A row write or a column read then crosses only K/32 = 32 pages. That makes
32·1024 + 32·1024 = 65,536 page changes per matrix, about 16 times fewer. The page size
of 1024 samples is this design's choice. The `mem_page_cross` output flags every command
that enters a new page. The full-size testbench counts exactly 65,536 of them per tiled
region.

## Blocks

- `pa_pkg` holds the types and the arithmetic:
  - float format `fp_t` and complex sample `cplx_t` (64 bits);
  - the `op_e` row operations;
  - round-to-nearest-even add and multiply, with subnormals flushed to zero;
  - `fp_round_parity`, which computes the parity of round(a / 2^k).
- `input_data_buffer` stores the N key bits and N seed bits of a block:
  - it accepts one (key, seed) pair per handshake;
  - it serves z = x' + i·v samples with latency 1, forcing key samples with L < r to 0.0;
  - it serves key bits for the final XOR.
- `pa_control` is the block-level sequencer. It runs the four passes and pulses
  `block_done`, which also frees the input buffer.
- `fft_conv_unit` holds the convolution datapath: the data distribute unit, the multiply
  unit and the rotation-factor multiplier.
- `data_distribute_unit` is the row engine. It drives the FFT/IFFT core ports and the DDR
  command port, and has three K-sample buffers: one row buffer and two mirror-row
  buffers.
- `transpose_addr_gen` generates row or column addresses in the tiled or row-major
  layout, and flags page changes.
- `multiply_unit` computes X(k)·V(k) from Z(k) and Z(N−k), with latency 2. The halvings
  are exact exponent decrements.
- `rotator_factor_multiply` multiplies by W_N^(±e), with latency 3 and a clock enable:
  - it splits W_N^e into W_K^(e_hi) · W_N^(e_lo);
  - two K-entry ROMs hold these factors, computed at elaboration from `$cos`/`$sin`;
  - it conjugates the factor for the inverse direction.
- `post_processing` computes parity(round(value/N)), XORs it with the key bit at the same
  index, and drops samples with index ≥ r. Latency is 2.
- `pa_top` wires the above together and exposes the FFT core, IFFT core and DDR ports.

### External interfaces

- **FFT / IFFT cores.** K-point, natural order in and out.
  - The core takes a sample on every `*_in_valid`.
  - It returns K results on `*_out_valid`, with gaps allowed but no back-pressure.
  - The IFFT must be unscaled. The 1/N factor is applied in post-processing.
- **DDR controller.**
  - The command port is valid/ready (`mem_cmd_we`, a 22-bit word address, 64-bit write
    data).
  - Read data returns in order on `mem_rd_valid`, with no back-pressure.
  - One word holds one complex sample. The three regions take 3 × 2^20 × 8 bytes =
    24 MiB.
- **Key stream.** `in_valid/in_ready/in_key/in_seed` carries one pair per cycle.
  - Hold `cfg_r` (0..N) from the first accepted pair of a block until `block_done`.
  - Output bits come on `key_valid/key_bit/key_idx`, in column order of the matrix,
    not in index order.
  - `key_idx` gives the position L of each bit in Y.

## Where this departs from the original architecture

- **Throughput.** The original reaches 116 Mbit/s at 200 MHz. It uses two FFT and two
  IFFT cores and keeps them busy back to back. This RTL has one core of each and runs
  feed, collect and drain of a row in sequence, which gives about 8.5 Mbit/s. Overlapping
  the phases and adding a second core pair is the obvious next step. The address
  generator and the data path would not change.
- **Identity part.** The original states two things:
  - its matrix equations put the identity part on the first r key bits;
  - its flow description XORs the last n−r bits.

  This design follows the equations.
- **Number format.** The original only says floating point. Here it is single precision
  with flush-to-zero and no NaN handling. The arithmetic is written as combinational
  functions registered once per stage, so a real FPGA build needs deeper pipelining.
- **Memory word.** One complex sample per DDR word is used, and the page model is a
  simplification. The transposition times of a real DDR3 device are not modelled. Only
  the page-change counts are checked.
- **Mirror rows.** The multiply pass loads both row k1 and row −k1 for every k1. That
  means 2K DDR reads per row instead of K if rows were processed in pairs.
- **Post-processing order.** Key bits leave in matrix column order, with their index
  attached.

## Simulation

All testbenches are self-checking and print `TB_RESULT checks=N failures=M`. Build one
with Verilator 5, for example:

    verilator --binary --timing --assert -y rtl -y tb rtl/pa_pkg.sv tb/tb_pa_top.sv --top-module tb_pa_top
    ./obj_dir/Vtb_pa_top

Testbenches:

- `tb_pa_top` runs the whole design at K = 16 (N = 256) for two blocks and checks every
  output bit. It reports and requires each of these mechanisms:
  - DDR page stalls;
  - input back-pressure (`in_ready` low while the previous block is still being hashed);
  - zeroed identity samples;
  - dropped samples with L ≥ r;
  - self-paired mirror rows.

  It also checks the page-change counts and the cycle count against bounds.
- `tb_pa_top_full` runs one block at the default size (K = 1024, N = 2^20) with a random
  r between N/2 and 3N/4:
  - it checks the count and index of every output bit;
  - it checks the value of 2048 random bits against a direct GF(2) evaluation of the
    Toeplitz hash;
  - it takes about a minute of simulation.
- Unit testbenches exist for every module. The `tb_` prefix is followed by the module
  name.

The behavioural models used by the testbenches are:
- `fft_core_model`: a double-precision radix-2 FFT;
- `ddr3_model`: one open page, a miss penalty and read latency;
- `identity_core_model`.

They stand in for the vendor IP.
