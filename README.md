# MiRitH Cut 1+2 accelerator: sum of scalar-matrix products and Keccak PRNG

MiRitH ("MinRank in the Head") is a post-quantum signature scheme. In software, most of the
time of `Sign` and `Open` goes into a single kernel: for every simulated party `i` of every round
`l`, the signer forms the share

    [[E]]_i = sum_{j=1..k} [[alpha_j]]_i * M_j

a linear combination of `k` public matrices `M_j` over the field F_16, with one secret-shared
scalar per matrix. The second-largest cost is Keccak, used both as hash and as pseudo-random
generator. This RTL implements hardware for both, as proposed in "HW/SW Implementation of MiRitH
on Embedded Platforms" (Schöffel, Tomasi, Wehn, LASCAS 2025) for a Zynq-7000 class SoC: the
processor keeps running MiRitH in software and hands the matrix sums and the Keccak work to the
programmable logic. In that publication this pairing is called "Cut 1+2". The publication
built its hardware with HLS and describes it mostly at block level. The register-transfer
structure here is therefore partly its own; the section "What follows the publication" says where.

The top level, `mirith_cut12_top`, holds two independent engines:

* `sum_alpha_m`, the matrix engine, with an AXI4-Lite control port and its own AXI4 master
  into system memory;
* `keccak_prng`, a Keccak sponge with simple stream ports.

## The arithmetic

Field elements are 4 bits wide (q = 16). Multiplication is carry-less multiplication reduced
modulo x^4 + x + 1 (`mirith_pkg::gf_mul`, one `gf16_mul` cell per product). Addition is XOR.
A matrix has 15 rows and 15 columns. One column, 15 elements, fits in a 60-bit word, with row r
in bits `[4r+3:4r]`. In memory every column occupies one 64-bit word, and the top nibble is
ignored. The matrix engine therefore never touches single elements: one step multiplies a whole
column by a scalar and adds it to a whole column of E.

## The matrix engine (`sum_alpha_m`)

### Loop nest and parallel lanes

The computation is the loop nest

    for j = 1, 1+P, 1+2P, ... <= k          (matrix block)
      for z = 0 .. 14                        (column)
        E[z] += sum_{p=0..P-1} alpha_{j+p} * M_{j+p}[z]

One iteration of the inner body is one clock cycle. `P`, the number of scalar-column products
per cycle, is a synthesis parameter (default 1). One result matrix therefore takes
`ceil(k/P) * 15` cycles: 1170 cycles for k = 78 and P = 1, and 300 cycles for P = 4. When k is
not a multiple of P, the missing scalars of the last block read as zero.

To feed P columns per cycle, M is spread over P RAM lanes (`sdp_ram`). Matrix `M_j` lives in
lane `(j-1) mod P`, at address `((j-1) div P)*15 + z`. All lanes are read at the same address.
The scalars of one share sit in a register row (`alpha_buf`), so any P consecutive scalars can
be read in the same cycle.

### Pipeline and the E memories

A step is issued in cycle c and completes two cycles later:

| cycle | what happens |
|-------|--------------|
| c     | the control unit addresses column z in every M lane and E_z in the current E bank |
| c+1   | RAM data arrive. `sam_datapath` forms the P products, XORs them into E_z (zero on the first block), and registers the result |
| c+2   | the new E_z is written to the E bank through its second port |

E_z is read again 15 cycles after it was written, so the loop needs no forwarding. With fewer
than three columns it would need forwarding.

There are four E banks (`tdp_ram`, 15 words of 60 bits each). Share s is computed into bank
s mod 4. As soon as a bank is complete, a write-back engine inside the control unit streams its
15 columns to memory, while the next share is already computing into another bank. A share
starts only when its bank has been written back; the control unit marks such waits with
`ev_wb_stall`. With ordinary memory latency the write-back (about 50 cycles) finishes long
before the next computation does (1170 cycles), so no share ever waits.

### Per-share sequence

For each share the control unit:

1. waits for a free E bank;
2. fetches the share's `ceil(k/15)` alpha words (6 for k = 78) into `alpha_buf`;
3. runs the loop nest;
4. drains the pipeline for two cycles;
5. hands the bank to the write-back engine.

The alpha fetch is not overlapped with computation. It costs about as many cycles as the memory
takes to answer one short burst.

### Software view

Registers (AXI4-Lite, 32-bit, byte offsets):

| offset | name | access | meaning |
|-------:|------|--------|---------|
| 0x00 | CTRL | W | bit0 LOAD_M, bit1 RUN, bit2 clear error. Starts are ignored while busy |
| 0x04 | STATUS | R | bit0 busy, bit1 done (sticky until the next start), bit2 AXI error |
| 0x08 | M_ADDR | RW | address of M_1..M_k |
| 0x0C | ALPHA_ADDR | RW | address of the first share's alpha words |
| 0x10 | E_ADDR | RW | address for the first result |
| 0x14 | NUM_SHARES | RW | shares per RUN (16 bits) |
| 0x18 | CYCLES | R | busy cycles of the last command |
| 0x1C | CONFIG | R | P [7:0], k [15:8], E banks [23:16] |

Memory layout, all in 64-bit words:

* M is stored matrix after matrix, and column z of `M_j` is word `(j-1)*15 + z`.
* Share s has its alpha words at `ALPHA_ADDR + 8*ceil(k/15)*s`. Scalar `alpha_j` is nibble
  `(j-1) mod 15` of word `(j-1) div 15`.
* Result s is written to `E_ADDR + 120*s` as 15 column words.

Addresses only need 8-byte alignment. The AXI master cuts bursts at 16 beats and at 4 KiB
boundaries.

Use: write the addresses, pulse LOAD_M once per key, wait for done, then issue RUN for as many
shares as wanted. The host can prepare the next batch of alpha vectors while RUN is in progress.
That overlap is how the publication hides the matrix work behind the software's share
generation.

### AXI master

`axi_master` has separate read and write engines, so loading operands and writing results
proceed at the same time. Each engine keeps one INCR burst in flight, and there are no AXI IDs.
The read engine delivers every beat straight to its consumer (the M RAM lanes or the alpha
buffer), which always accepts. The write engine takes beats from a valid/ready stream. A
non-OKAY response sets a sticky error bit.

## Keccak PRNG (`keccak_f1600`, `keccak_prng`)

`keccak_f1600` holds the 1600-bit state and computes one full round (theta, rho, pi, chi, iota)
per clock, so a permutation takes exactly 24 cycles, the figure the publication quotes.
`keccak_prng` builds a sponge around it:

* `init` clears the state.
* 64-bit words are absorbed with `in_valid/in_ready`, little-endian. The last word carries
  `in_last` and `in_bytes` (0 to 8 valid bytes).
* The module appends the domain byte (0x1F) and the final 0x80 bit itself.
* Output words are then offered on `out_valid/out_ready` for as long as the consumer takes them.

A permutation runs after every full input block, after the padding, and after every
`RATE_LANES` output words. Each permutation costs 24 cycles plus two cycles of hand-off. The
defaults give SHAKE128 (rate 168 bytes). Other rates and domain bytes are parameters, so the
same module also computes SHAKE256 or SHA3 by changing `RATE_LANES` and `DS`.

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| K | 78 | top, sum_alpha_m | number of matrices k (the MiRitH-Ia value) |
| P | 1 | top, sum_alpha_m | scalar-column products per cycle (the publication also uses 4, 8, 16) |
| E_BANKS | 4 | top, sum_alpha_m | result slots |
| RATE_LANES | 21 | top, keccak_prng | sponge rate in 64-bit lanes |

The matrix shape (15 x 15) and the element width live in `mirith_pkg`.

## What follows the publication and what does not

These points follow the publication:

* 4-bit elements, and a whole 15-element column handled per memory access;
* one scalar-column product added into E per step, P of them in parallel;
* the loop order over j and z;
* an AXI slave in front of a control unit, and an AXI master feeding the M and alpha memories
  and draining the E memories;
* four E memories;
* a Keccak permutation in 24 cycles.

These choices are this design's own:

* the reduction polynomial;
* k = 78 and the square matrix shape (MiRitH-Ia);
* the register map, the command set and the memory layout;
* how M is spread over RAMs;
* alpha held in registers;
* the use of the E memories as rotating result slots with overlapped write-back;
* AXI burst handling;
* the sponge's stream interface and its SHAKE128 defaults.

The block diagram the design follows has two inconsistencies:

* It labels the M memory bus 64 bits, while the text speaks of 60-bit words. Here the 64-bit
  word is kept and its low 60 bits are used.
* It labels the parallel lanes `j .. j+P`. Here P is the total number of products per cycle, as
  the text defines it, so P = 1 is the plain engine.

The diagram draws seven M memories. This design instead has one logical M RAM per lane and
leaves the physical split to synthesis.

Not included: the larger configurations of the same work, "Cuts" 3 to 8. They move key
unpacking and whole signature phases (seed trees, commitments, the MPC simulation) into
hardware. Those blocks are defined by the MiRitH specification, which the publication does not
restate. The processor, the DRAM and the AXI interconnect are outside the design.

No timing closure was attempted. The publication reports 125 MHz for this configuration on a
Zynq-7020. The one-round-per-cycle Keccak is the longest combinational path here.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed time.

* `tb_ref_pkg` holds the reference models, written apart from the RTL:
  * an F_16 multiplier that reduces while shifting;
  * the compact lane-walking form of Keccak-f[1600], with round constants generated by the LFSR;
  * a SHAKE sponge over byte arrays.
* Known-answer values also anchor the models: the first lanes of Keccak-f applied to the zero
  state, and the first bytes of SHAKE128 of the empty string.
* `axi_mem_model` is a behavioural AXI4 memory. It inserts random stalls, can delay write
  responses, and counts bursts that are too long or cross 4 KiB.
* `tb_sum_alpha_m` runs the engine with P = 4. It checks every result matrix against the
  reference and checks the step count against `ceil(k/P)*15` per share.
* `tb_mirith_cut12_top` runs the whole design at its default parameters, end to end:
  * it loads M from an unaligned address and runs six shares against a memory with slow write
    responses, which forces waits for a free E bank;
  * it hashes a two-block seed and squeezes three blocks, while the matrix engine computes.
  It counts each mechanism (burst split at 16 beats, split at 4 KiB, bank wait, overlapped
  write-back, PRNG permutations, both engines busy at once) and fails if any of them never
  occurred. It finishes in well under a second of simulation time.
* `tb_sign_shares` runs the matrix work of one whole MiRitH-Ia signature through the top
  level: 624 shares (39 rounds of 16 parties) at default parameters, every result checked.
  It takes 742,480 cycles, about 1189 per share, which is 5.9 ms at 125 MHz.
* `tb_parallel_lanes` runs the matrix engine at P = 4, 8 and 16 (k = 78), three copies of
  `sam_lane_run` side by side, and checks every result. The engine takes 300, 150 and 75 compute
  cycles per share. With the alpha fetch and the pipeline drain that comes to about 332, 183
  and 107 cycles.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/mirith_pkg.sv tb/tb_ref_pkg.sv tb/tb_mirith_cut12_top.sv \
        --top-module tb_mirith_cut12_top -Mdir obj
    ./obj/Vtb_mirith_cut12_top

Replace the testbench name to run another one. The testbenches never rely on uninitialised
values being zero. They do rely on `$urandom`, so the data differ from run to run unless the
seed is fixed with `+verilator+seed+N`.

What these tests do not establish:

* agreement with the MiRitH reference software. The element order inside a word and the
  reduction polynomial must match the software that supplies M and alpha;
* behaviour with a real Zynq interconnect;
* operation at the target clock.
