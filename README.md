# vmxdotp: MX block-scaled dot products inside a RISC-V vector unit

Microscaling (MX) number formats store a tensor as small blocks of very
narrow floating-point elements, 8-bit FP8 (E5M2 or E4M3) or 4-bit FP4 (E2M1),
and give each block of 32 elements one shared power-of-two scale (E8M0, an
8-bit exponent with bias 127). A dot product of two MX vectors is therefore a
sum of narrow products, multiplied by two scales, added to a wide
accumulator. A plain vector processor does this in many steps: widen the
elements, multiply, add, apply each scale, and change the element width
between steps. The `vmxdotp` extension does it in one instruction:

    vd[i] += 2^(vs3[i]-127) * 2^(vs4[i]-127) * sum_{j<k} vs1[k*i+j] * vs2[k*i+j]

Each element operation `i` takes one 64-bit word of packed elements from each
source (k = 8 FP8 or k = 16 FP4 values), one scale byte per source, and one
accumulator. The accumulator is FP32 (SEW = 32, the "narrowing" forms `.ww`
and `.wf`) or BF16 (SEW = 16, the "quad-narrowing" forms `.qq` and `.qf`).
The result is rounded only once. In the vector-scalar forms (`.wf`/`.qf`),
the elements come from scalar FP register `rs1` and the scale from `rs3`,
and both are broadcast to every `i`. A software block size of 32 is handled
by reusing one scale over several instructions.

The RTL here is the vector processing element of a Spatz-style vector core
with this extension built in. It has:

* a 32 x 512-bit vector register file (VRF) in four banks, each with 3 read
  ports and 1 write port;
* a vector arithmetic unit (VAU) with four MX dot-product-accumulate
  (MX-DPA) lanes;
* a controller with the configuration registers and a scoreboard.

When the read ports allow, the unit finishes one "beat" per clock. A beat
is four operations, which is 32 FP8 products or 64 FP4 products. Two such
units at 1 GHz give 128 GFLOPS (MXFP8) or 256 GFLOPS (MXFP4). Those are the
peaks against which the published 125 and 249 GFLOPS were measured.

## Where the data lives

| operand | per operation | register group for vl operations | word read in beat b |
|---|---|---|---|
| vs1, vs2 (elements) | 64 bits | vl*64 bits (2 x the accumulator group for FP32, 4 x for BF16) | `vs*2 + b` |
| vs3, vs4 (scales) | 8 bits | vl*8 bits | `vs*2 + b/8` |
| vd (accumulators) | 32 or 16 bits | vl*SEW bits | `vd*2 + b/2` (FP32), `vd*2 + b/4` (BF16) |

* A VRF word is 256 bits, which is 4 lanes x 64 bits. A 512-bit register
  holds two words, and the word address is `vreg*2 + word`.
* A register group is a run of consecutive word addresses, so beat `b`
  reads word `b` of the group.
* Lane `l` of beat `b` performs operation `4b + l`.

## The scale-prefetch trick: five operands through three ports

**The problem.** `vmxdotp` reads five vector operands (vd, vs1, vs2, vs3,
vs4), but a VRF bank has only three read ports. Adding ports to the banks
would be expensive. However, the scales are only 8 bits per operation, while
the elements are 64 bits per operation.

**The fix.** The VAU reads a whole 256-bit word of vs3 scales and one of vs4
scales at once. That is 32 scales each, which feeds 8 beats of 4 lanes. The
words go into `scale_buffer`. Each beat takes its four scales from slot
`b % 8` of the buffer, so the scale read ports are used only on every 8th
beat.

**How requests are made (`vau`).**
1. In every cycle the VAU asks the arbiter for the operands of the current
   beat that it has not yet been granted.
2. The arbiter is fixed-priority in the order vs3, vs4, vd, vs1, vs2. So on
   a scale beat the two scale reads always win.
3. A granted operand is not requested again. Its data arrives one cycle
   later and is kept in a holding register.
4. When the last operand of a beat is granted, the beat is issued to the
   lanes in the next cycle, and the next beat's requests start right away.

**What this costs:**
* **All five operands in one bank** (a `.ww`/`.qq`): the scale beat needs
  five reads from a bank that has three ports. Vs3, vs4 and vd get through
  in the first cycle, and vs1 and vs2 follow in the second. The cost is one
  lost cycle per 8 beats.
* **Operands spread over banks, or a vector-scalar form:** a vector-scalar
  form reads only vd, vs2 and vs4, so no bank ever sees more than three
  requests. No cycle is lost.

**Measured in the testbenches:**
* A 4-beat instruction takes 6 cycles from acceptance to its last write when
  all operands are in one bank. It takes 5 cycles with the operands spread,
  and 5 as `.wf`.
* In general an instruction of `n` beats takes `n + 3` cycles, plus
  `ceil(n/8)` cycles in the single-bank case.
* Independent `.wf` instructions run back to back, at 64 beats in 64 cycles.

**Timing of one beat.**

| cycle | what happens |
|---|---|
| t | operands granted |
| t+1 | read data arrives; lanes take the operands |
| t+2 | lane pipeline stage 1 |
| t+3 | lane pipeline stage 2; result written at the end of the cycle |

The write port has the highest priority among the write ports, so a result
is never held back. The next instruction is accepted in the same cycle as
the previous one's last grant. So a chain of independent instructions keeps
the lanes busy without gaps.

## The MX-DPA lane (`mxdpa_unit`)

This is the hardest part of the design. The lane must compute the whole
expression and round exactly once. Here is how it does it.

**Stage 1: exact dot product.**
* The elements are decoded into a sign, an integer significand (at most
  4 bits, including the hidden bit) and an exponent. Subnormals are
  included.
* Each product therefore has at most 8 significand bits and an exponent in a
  known range. E5M2 has the widest range: products run from 2^-32 to 2^32.
* Every product is shifted onto one fixed-point grid whose LSB is 2^-32.
  The products are summed exactly in a 72-bit signed integer.
* Because there are at most 16 products and each has fewer than 67 bits on
  this grid, the sum cannot overflow. It is exact.

**Stage 2: scale, add, round once.**
* The two E8M0 scales only shift the exponent of the sum: `sa + sb - 254`.
* The sum is then added to the accumulator (FP32, or BF16 placed in a
  32-bit container).
* Both are aligned in a 101-bit window. Bits that fall below the window
  are collapsed into a sticky bit at bit 0.
* The window is wide enough that the sum never loses a bit that could
  change the rounding.
* After the add, the result is normalised and rounded to 24 bits (FP32) or
  8 bits (BF16) with round-to-nearest-even. Results below the normal range
  become subnormals, and results above it become infinity.

**Special values.** These follow the OCP MX rules as far as they are
defined. Where the rules leave room, the choices here are:
* A scale of 0xFF is NaN.
* E4M3 has no infinities, and S.1111.111 is its NaN.
* E5M2 follows IEEE rules.
* A NaN in any input, inf x 0, and inf - inf all give the canonical quiet
  NaN (0x7fc00000 for FP32, 0x7fc0 for BF16).
* If the dot product is exactly zero, the accumulator is returned
  unchanged, including a -0.

**What is not reproduced.** The published datapath is an existing MXDOTP
FPU, extended with an FP4 mode and BF16 accumulation. Its internal widths,
its rounding details and its pipeline depth are described elsewhere. The
lane here is built to be exact, and its two-cycle latency is this design's
own choice. A bit-exact match with the silicon is therefore not claimed.
The testbench's reference model (`tb/mx_ref_pkg.sv`) works on a 640-bit
fixed-point grid. It shares no code with the lane.

## Operand shuffling and result selection

The FPUs take one 64-bit operand that carries the accumulator and both
scales packed together. `vau_operand_shuffle` builds that operand as
`{16'b0, sb, sa, acc}`, with a BF16 accumulator in the low 16 bits. It picks
these fields out of:
* the vd word;
* the two scale-buffer slots;
* for `.wf`/`.qf`, the broadcast `rs1`/`rs3`.

On the way back, `vau_result_select` writes only 32 bits (FP32) or 16 bits
(BF16) per operation:
* FP32 results of beat `b` land in half `b % 2` of the vd word.
* BF16 results land in quarter `b % 4`.
* Lanes past `vl` are not written, so the tail is left undisturbed.

## Register file and arbiter

* `vrf` holds 64 words in four `vrf_bank`s. Each bank is a flip-flop array
  with three registered read ports and one byte-enabled write port.
* Register `v` lives in bank `v % 4`. Consecutive registers of a group are
  therefore in different banks.
* `vrf_arbiter` decodes every request to a bank and a row. Per bank it
  grants up to three reads and one write, lowest port index first.
* A requester that is refused keeps its request up.
* Read data comes one cycle after the grant. The data is routed back by the
  (bank, port) pair that was registered at grant time.
* The top has seven logical read ports and three write ports:
  * ports 0-4 are the VAU's;
  * read port 5 and write port 1 are for a load-store unit;
  * read port 6 and write port 2 are for a slide unit.

## Controller (`spatz_ctrl`)

**Configuration registers.** There are two, written through a simple CSR
port:
* `CSR_VSETVL` takes AVL in bits [8:0], SEW16 in bit 9 and log2(LMUL) in
  bits [12:10]. It sets `vl = min(AVL, 512*LMUL/SEW)`. SEW chooses the
  accumulator format: 16 means BF16, and 32 means FP32.
* `CSR_MXFMT` takes the element format in bits [1:0]: 0 = E5M2, 1 = E4M3,
  2 = E2M1.
* The bit layout of both is this design's own; no encoding was published.

**Scoreboard.** It marks every register of an issued instruction's
accumulator group as busy until the VAU reports that instruction's last
write. A new instruction waits while any register it reads or writes is
busy. This covers accumulation chains (read-after-write) and write-after-write.
Independent instructions, such as the eight unrolled rows of an MX matrix
multiply, go straight through and overlap in the VAU. An instruction with
`vl = 0` is retired at once.

## Top level (`spatz_vmx`)

The top wires the controller, the VAU and the VRF together. Its inputs are:
* CSR writes;
* decoded `vmxdotp` instructions (`vmx_instr_t`: vf flag, five register
  numbers, `rs1` and `rs3` values);
* the VRF ports of the load-store and slide units.

It reports `vl`, a busy flag, the scoreboard contents, and four event
strobes: scale fetch, port stall, beat issue and scoreboard hold.

These parts of the full core are **not** included:
* the scalar core;
* the instruction decoder and the 32-bit instruction encoding;
* the scalar FP register file;
* the load-store and slide units themselves;
* the integer unit, and the FPUs' other operations;
* the 128 KiB L1 memory and the two-core cluster.

## Trust and departures

**Matches the published design:**
* register width 512;
* four banks with 3 read and 1 write port each;
* four FPUs;
* FLEN 64;
* k = 8 (FP8) and k = 16 (FP4);
* the variants `.ww/.wf/.qq/.qf`;
* scale prefetch over 8 cycles, with exactly the stated overhead and the
  stated cases without overhead;
* packing of accumulator and scales into one 64-bit FPU operand;
* 32/16-bit write-back.

**This design's own choices:**
* the 256-bit VRF word;
* the flip-flop banks;
* the address map and port priorities;
* the two-cycle exact lane;
* the NaN and zero rules;
* the CSR layout;
* the scoreboard granularity.

**Measured workload rate.** The full 64x64 matrix multiply with N = 128
runs in `tb_mx_matmul`. The testbench triple-buffers B, so loading the next
block overlaps the computation. Inside the kernel's inner loops the four
FPUs are busy in 99.6 % of the cycles for MXFP8, and 99.2 % for MXFP4. The
published whole-cluster figure is 97.6 %. Counting everything, the run takes
18160 cycles for 16384 beats. The extra cycles come from the testbench:
between tiles it clears the accumulators and reads C back one word at a
time, without overlap.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
With Verilator 5:

    verilator --binary --timing --assert --top-module tb_spatz_vmx \
        -y rtl -y tb rtl/mx_pkg.sv tb/mx_ref_pkg.sv tb/tb_spatz_vmx.sv
    ./obj_dir/Vtb_spatz_vmx

| testbench | what it checks |
|---|---|
| `tb_mxdpa_unit` | 10 cases worked out by hand and 3000 random operations in every format, against the exact model; latency of 2 |
| `tb_scale_buffer` | every slot, the same-cycle bypass, hold when not loaded |
| `tb_vrf_arbiter` | grants, bank rows and write selects against a port-counting model |
| `tb_vrf` | random traffic on all 10 ports against a memory model; 3 reads per bank |
| `tb_vau_operand_shuffle`, `tb_vau_result_select` | operand placement and byte enables for all beats and formats |
| `tb_vau` | VAU plus VRF: results against the model, and instruction time `n+3` (+1 per 8 beats when all operands share a bank) |
| `tb_spatz_ctrl` | vl rule for all SEW/LMUL, and the scoreboard against a model with a random stand-in VAU |
| `tb_mx_matmul` | the evaluated workload: C(64x64) = A(64xN) B(Nx64) with the 8-row x 32-column vmxdotp.wf/.qf kernel and triple-buffered B, N = 128 for MXFP8 (E4M3, FP32 acc.), MXFP8 (E5M2, BF16), MXFP4 (FP32), MXFP4 (BF16), and N = 64, 256, 512 for MXFP8/FP32; every C element against the reference, beat count = 64*64/4 * N/k, at least 90 % FPU use in the inner loops |
| `tb_spatz_vmx` | whole unit at its default size: random instruction streams, bank-conflict timing, back-to-back throughput, and 8x32-tile MX matrix multiplies (N = 64) for MXFP8/MXFP4 with FP32/BF16 accumulation; every mechanism must occur |

The simulator is assumed to be two-state. All registers that are read are
reset, except the register-file storage: the testbenches write that before
reading it.
