# WHET accelerator — SystemVerilog implementation

This is a register-transfer model of the WHET CKKS accelerator, written from
"WHET: Welding Homomorphic Encryption to Accelerator Architectures". The
configuration is the main one in that paper:

- 8 clusters with 256 vector lanes each (2048 lanes in total);
- N = 2^16 = 256 x 256 coefficients per limb, 32-bit words, primes below 2^31;
- on-chip memory of 128 MiB main scratchpad, 32 MiB KeyMult buffer,
  18 MiB BConv buffer and 6 MiB constant scratchpad;
- one NTT unit (NTTU) and one automorphism unit (AutoU) per cluster, a 2 x 6
  base-conversion (BConv) array in every lane, and 4 modular multiply-adds
  (MMADs) in every lane's element-wise engine (EWE);
- plaintexts streamed from HBM compressed at 8x, 16x or 32x.

## Block structure

| File | Block |
|---|---|
| `rtl/whet_pkg.sv` | Word and modulus types, Barrett reduction, and the instruction formats of the three VLIW slots |
| `rtl/mmad.sv` | Modular multiply-add `a*b + c mod q`, registered |
| `rtl/ewe.sv` | Extended EWE: four MMADs in two stages. Operations: ADD, SUB, MUL, MAD, KEYMULT, PMAC_KM (`d = p*a + a'`, `a_res = d*evk0`, `b_res = d*evk1 + (p*b + b')`) and CSUBC (`(C*a - a')*C'`) |
| `rtl/banked_sram.sv` | Word-interleaved multi-bank memory. The lowest-numbered port has priority, and a refused access must be repeated. Used for the main scratchpad (8 banks, 7 ports), the KeyMult buffer (6 banks, 6 ports) and the BConv buffer (5 banks, 5 ports) |
| `rtl/const_spad.sv` | Constant scratchpad of one group of 8 lanes, with a broadcast read |
| `rtl/ptxt_fanout.sv` | Sends one HBM channel's compressed plaintext words to its 4 constant-scratchpad groups (32 lanes) |
| `rtl/prng.sv` | Per-group generator of the `evk[0]` words, reduced mod q |
| `rtl/ntt_xlane.sv`, `rtl/nttu.sv` | Four-step negacyclic NTT/INTT of one limb across the 256 lanes of a cluster, one limb every 256 cycles |
| `rtl/autou.sv` | Automorphism `X -> X^g` as an NTT-domain permutation, one limb every 256 cycles |
| `rtl/bconvu.sv` | Base conversion on a 2 x 6 plain multiply-add array per lane, plus the RECON mode (RNS reconstruction of 2–3 limbs with a centred lift) used by intermediate ModRaise |
| `rtl/lane.sv` | One lane: three memory slices, EWE and BConvU, and the operand and result multiplexers |
| `rtl/cluster.sv` | 256 lanes, NTTU, AutoU, 32 constant-scratchpad/PRNG groups, 8 HBM channel fan-outs, sequencers for the EWE, FU (NTTU/AutoU) and BConv instruction slots, DMA port and stall counters |
| `rtl/whet_top.sv` | The eight clusters |

### Data layout

- Coefficient `n` of a limb lives in lane `n / 256` of its cluster, at word
  `base + n % 256`.
- Each cluster processes whole limbs. Different clusters hold different limbs.
- Constant-scratchpad group `g` broadcasts to lanes `g, g+32, ..., g+224`.
- Channel `h` feeds groups `h, h+8, h+16, h+24`.

### Timing

- EWE: an element issues once all its reads have been granted. A read already
  granted for that element is kept and not requested again. Results are
  written back 3 cycles after issue.
- NTTU: latency is `R + 2*log2(R) + 5` cycles.
- AutoU: the first output appears two clock edges after the last input.
- BConvU: results are ready 8 cycles after the last input limb, and
  conversions can follow each other back to back.

Each source file opens with a comment covering its interface and timing in
detail.

## What follows the paper and what is this design's own

These come from the paper:

- the counts, sizes and bandwidths of units and memories;
- the EWE operations;
- the four-step NTT;
- the 2 x 6 BConv array and the added reconstruction logic;
- one constant scratchpad and PRNG per 8 lanes;
- four groups per HBM channel;
- compression rates of 8x–32x.

These are this design's choices, because the paper does not describe them:

- Barrett reduction with three correction steps;
- the number of banks and ports in each memory;
- arbitration, and re-trying only refused reads;
- the xorshift PRNG (the paper does not specify a cryptographic one);
- the transpose buffer inside the NTTU;
- the AutoU double buffer;
- the instruction formats and sequencers;
- the DMA port, which stands in for the HBM path.

Bank counts were chosen so that per-lane bandwidth matches the paper at an
assumed 1 GHz clock: 8, 6 and 5 words per cycle give 64, 48 and 40 TB/s
across 2048 lanes.

### Not built

- **Inter-cluster networks.** The paper only says they are fixed-wire, as in
  CraterLake. This design keeps every limb inside one cluster, so no
  inter-cluster transfer is needed.
- **HBM stacks, PHYs and controllers.** These are vendor parts; the top
  exposes word ports instead.
- **The compile-time VLIW scheduler.** It is software.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=<n> failures=<n>`. Each compares against an arithmetic
model written in the testbench:

- modular arithmetic;
- a direct O(N^2) negacyclic transform;
- the automorphism index formula;
- exact big-integer base conversion;
- an ideal memory with bank-conflict bookkeeping.

`tb_whet_top` runs a complete program on the top: DMA loads; NTT, INTT and an
automorphism; MAD, KEYMULT, PMAC_KM and CSUBC; plaintext streaming at all
three compression rates; and a plain and a RECON base conversion. It checks
every result word and counts each mechanism, including bank, mode and unit
stalls.

The full-size configuration (8 clusters x 256 lanes, N = 2^16) passes lint
and elaboration, but it is too large to simulate against an O(N^2)
reference. The largest simulated size is:

- 2 clusters of 16 lanes (N = 256);
- memories of 128/128/160/64 words per lane.

Every module also has a deliberately broken copy, with a one-line change. Its
testbench reports failures on that copy.

## Capacity for the paper's workloads

A top-level ciphertext takes 2 x 47 limbs x 2^16 x 4 B = 23.5 MiB. The paper
says the six CtS evaluation keys take 324 MiB, about 54 MiB each, and that
"the 128MiB scratchpad plus 32MiB KeyMult buffer" holds the CtS working set.
The built memories have exactly those sizes:

- 16384 words per lane for the main scratchpad, which is 128 MiB;
- 4096 words per lane for the KeyMult buffer, which is 32 MiB;
- 2304 words per lane for the BConv buffer, which is 18 MiB;
- 6144 words per group for the constant scratchpad, which is 6 MiB.

Bootstrapping, HELR, sorting and the CNN workloads (ResNet-20, VGG-16,
MobileNet, ResNet-18) all run at these parameters.
