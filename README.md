# ECG encryption and identification accelerators

A connected-health processing unit receives ECG (electrocardiogram) data from
a wearable sensor. It has two jobs. First, it encrypts the ECG before the data
leaves the unit and decrypts it at the other end, using AES-128. Second, it
uses the heartbeat itself as a biometric to check which enrolled patient the
signal belongs to. This RTL is the programmable-logic half of such a unit, and
it holds three independent accelerators:

* **cipher**: AES-128 encryption of 128-bit blocks;
* **decipher**: AES-128 decryption of 128-bit blocks;
* **ECG identification**: projects one heartbeat of 300 samples onto a PCA
  feature space. It then finds the nearest of the enrolled training vectors
  and returns that vector's index as the patient ID.

Each accelerator is a memory-mapped peripheral with its own AXI4-Lite slave
port and interrupt line. A processor (an ARM core in the reference system)
loads operands, starts a run, waits for the interrupt and reads back the
result. Enrolment runs in software and is not part of this RTL. It computes
the mean beat, the eigenvectors and the projected training vectors and loads
them into the identification accelerator.

The architecture follows the published design: Zhai, Ait Si Ali, Amira and
Bensaali, *ECG encryption and identification based security solution on the
Zynq SoC for connected health systems*. That design has:

* three accelerators, each behind an AXI-Lite slave;
* interrupts concatenated into a 3-bit vector;
* AES-128 with 16 x 8-bit input and output arrays;
* a PCA projection built as subtract, multiply and accumulate;
* a Euclidean distance calculator built as subtract, square and accumulate,
  with no square root;
* a minimum search that yields the ID;
* 300-sample, 32-bit ECG vectors.

The original blocks were generated by a high-level-synthesis tool. This RTL is
written by hand, so the following are this design's own choices, and the
original's cycle counts are not reproduced:

* the micro-architecture of every block;
* the number format;
* the register maps;
* all latencies.

Where a choice was made, the module headers say so.

## System structure

```
                 AXI4-Lite (one port per IP; an interconnect, outside, fans the CPU bus out)
                      |                         |                               |
              +-------v--------+       +--------v--------+      +---------------v---------------+
              | aes_cipher_axil|       |aes_decipher_axil|      |          ecg_id_axil          |
              |  axil_slave    |       |  axil_slave     |      |  axil_slave                   |
              |  hls_ctrl_regs |       |  hls_ctrl_regs  |      |  hls_ctrl_regs                |
              |  key/in regs   |       |  key/in regs    |      |  ecg_identification           |
              |  aes_cipher    |       |  aes_decipher   |      |   4 x ram_1w1r (arrays)       |
              +-------+--------+       +--------+--------+      |   pca_projection -> p[0..m-1] |
                      |                         |               |   euclid_distance -> min_search|
                      |                         |               +---------------+---------------+
                   irq[0]                    irq[1]                          irq[2]
```

`ecg_security_pl` is the top. It instantiates the three IPs and concatenates
their interrupts into `irq[2:0]`. It exposes the three AXI4-Lite slave ports
as `axil_req_t`/`axil_rsp_t` struct pairs, defined in `axil_pkg`. In a complete
system these three ports hang off an AXI interconnect driven by the processor,
and the reset comes from a reset synchroniser. Both are vendor infrastructure
and are not included. The concatenation order (cipher, decipher,
identification in bits 0, 1, 2) is an assumption.

## ECG identification

This is the part that needs the most explanation.

### The computation

Enrolment takes a set of training heartbeats, each a vector of n = 300
samples, and produces:

* the **mean vector** `mean[n]`: the average training beat;
* the **Eigen ECG matrix** `E[m][n]`: the m principal directions of the
  training beats. These are the eigenvectors whose eigenvalues are at least 1,
  so m depends on the data;
* the **projected training matrix** `P[i][m]`: each of the i training beats,
  mean-subtracted and projected onto those m directions.

To identify a test beat `x[n]`, the hardware computes the following:

```
p[j]  = sum_k (x[k] - mean[k]) * E[j][k]          j = 0..m-1   (PCA projection)
d[t]  = sum_j (p[j] - P[t][j])^2                  t = 0..i-1   (squared Euclidean distance)
ID    = argmin_t d[t]
```

The square root of the Euclidean distance is never taken, because it does not
change which distance is smallest.

### Datapath

`pca_projection` streams over the Eigen matrix in row-major order, one element
per clock. It reads `x[k]` and `mean[k]` from two memories and `E[j][k]` from
a third, subtracts, multiplies, and adds into an accumulator. The first
element of a row loads the accumulator rather than adding to it, so the rows
follow each other with no idle cycle. At the last element of row j, the
accumulator is scaled and written to `p[j]`. `p` is held in a register array
in `ecg_identification`.

`euclid_distance` then streams over the projected training matrix the same
way, one element per clock. It computes `p[j] - P[t][j]`, squares it, and adds
it into a second accumulator. A finished sum leaves as `(t, d[t])`.

`min_search` watches that stream and keeps the smallest distance and its
index. Ties keep the lower index.

Both engines are four-stage pipelines:

1. address;
2. memory output;
3. subtract and multiply;
4. accumulate, then an output register.

All memories are simple dual-port arrays with a one-cycle read (`ram_1w1r`).
They map onto block RAM.

### Number format

The original work does not state the format. This design uses the following:

| quantity | format |
|---|---|
| test and mean samples, projected training values, `p[j]` | signed 32-bit integers |
| Eigen matrix entries | signed 32-bit fixed point with `EIG_FRAC` = 16 fraction bits (Q15.16); unit-length eigenvectors have entries in [-1, 1] |
| projection accumulator | exact, 2*32+1+ceil(log2 n) = 74 bits |
| `p[j]` | accumulator shifted right arithmetically by `EIG_FRAC` (rounds toward minus infinity), then saturated to 32 bits |
| distance accumulator and result | exact, 2*(32+1)+ceil(log2 m) = 70 bits, so it cannot overflow |

For matching, software must compute the projected training matrix with the
same rule: floor, then saturate. The testbench reference model
`tb/ecg_ref_pkg.sv` does exactly this.

### Timing

With one multiply-accumulate per clock, a run takes
`m*n + m*i + 12` cycles from the cycle the core takes `start` to `done`. That
breaks down as follows:

* `m*n + 5` cycles for the projection;
* one cycle to start the distance phase;
* `m*i + 5` cycles for the distances;
* one cycle to latch the ID.

At the defaults (m = 12, n = 300, i = 64) this is 4,380 cycles, or 87.6 us at
the 50 MHz clock of the reference system. The original design reports 0.09 ms
for identification. Loading the arrays over AXI4-Lite is not included; it
costs one bus write per word.

### Parameters

| parameter | default | origin |
|---|---|---|
| `N_SAMPLES` (n) | 300 | length of an ECG vector in the original design |
| `DATA_W` | 32 | 32-bit samples, as in the original design |
| `M_FEAT` (m) | 12 | assumed. The original keeps every eigenvector with eigenvalue of at least 1, so m is data dependent. 12 keeps the arrays near the block-RAM budget of the original identification block, and with i = 64 it gives a run time close to its 0.09 ms |
| `N_TRAIN` (i) | 64 | assumed; the original does not say how many training vectors it stores |
| `EIG_FRAC` | 16 | assumed |

Array storage at the defaults:

* test and mean: 2 x 300 words;
* Eigen matrix: 3,600 words;
* training matrix: 768 words.

That is 4,968 words of 32 bits, about 159 kbit.

### Identification IP address map (`ecg_id_axil`)

The address space is `2^(SUB_AW+1)` bytes, where
`SUB_AW = max(ceil(log2(max(n, m*i))) + 4, ceil(log2(m*n)) + 2)`. At the
defaults `SUB_AW` is 14, so the space is 32 KiB.

| region | byte offset (defaults) | contents |
|---|---|---|
| registers | 0x0000-0x003F | 0x00-0x0C control block (below); 0x10 ID (read only); 0x14, 0x18, 0x1C squared distance of the ID, least significant word first (read only) |
| test signal | 0x1000 + 4k | `x[k]` |
| mean vector | 0x2000 + 4k | `mean[k]` |
| projected training matrix | 0x3000 + 4(t*m + j) | `P[t][j]` |
| Eigen matrix | 0x4000 + 4(j*n + k) | `E[j][k]` |

* Arrays are write-only: reading them returns 0.
* Arrays take whole words: byte strobes are ignored.
* Writes beyond an array's size are dropped.
* Writing an array while a run is in progress corrupts that run.

## AES-128 cores

Both cores implement FIPS-197 AES-128.

`aes_cipher` computes one complete round per clock. SubBytes (16 S-box
lookups), ShiftRows, MixColumns and AddRoundKey are laid out side by side. The
key schedule produces the next round key in the same cycle, so no round keys
are stored. The core timing is:

* the initial AddRoundKey happens in the cycle `start` is taken;
* `done` follows 11 cycles later.

`aes_decipher` has to apply the round keys in reverse order. Instead of
storing eleven of them, it works in three phases:

1. it runs the key schedule forward for 10 cycles to reach the last round
   key;
2. it applies that key in one cycle;
3. it runs the schedule backwards while doing the 10 inverse rounds.

Running the schedule backwards works because every AES-128 key-schedule step
can be undone from the newer key alone: `w[i-4] = w[i] ^ f(w[i-1])`, where
`f` is the SubWord/RotWord/round-constant function. `done` follows 22 cycles
after `start`. The original design's decipher is also slower than its cipher.

The S-boxes are not pasted in as a table. `aes_pkg::gen_sbox()` builds the
table at elaboration: it walks GF(2^8) with generator 3 to pair each element
with its multiplicative inverse, then applies the AES affine map. Each lookup
then synthesises to a 256 x 8 ROM. The cipher uses 20 of these ROMs: 16 for
SubBytes and 4 for the key schedule. The decipher uses 16 inverse ROMs for
InvSubBytes, plus 8 forward ROMs: 4 for the forward key schedule and 4 for
the backward one.

Block convention: AES byte 0, the first byte of the 16-byte array, is in bits
127:120. A block written as a hex literal therefore reads like the FIPS-197
examples.

### AES IP address map (`aes_cipher_axil`, `aes_decipher_axil`)

| offset | register |
|---|---|
| 0x00-0x0C | control block (below) |
| 0x10-0x1C | key bytes 0..15, read/write |
| 0x20-0x2C | input array bytes 0..15, read/write |
| 0x30-0x3C | output array bytes 0..15, read only |

Array byte `4w+b` is in bits `8b+7:8b` of word `w`. That is, four bytes are
packed little-endian into each 32-bit word. The key comes from a register
because the original design does not say how the key is supplied. Key and
input are copied into the core when it accepts `start`, so software may
rewrite them while the core is running.

## Control block and software sequence

All three IPs begin with the same four registers, in the layout that HLS tools
commonly generate (`hls_ctrl_regs`):

| offset | bits |
|---|---|
| 0x00 control | bit0 start: write 1; it stays set until the core accepts it. bit1 done: set on completion, cleared when 0x00 is read. bit2 idle. bit3 ready: set when a start is accepted, cleared when 0x00 is read |
| 0x04 | global interrupt enable (bit0) |
| 0x08 | interrupt enable: bit0 done, bit1 ready |
| 0x0C | interrupt status, same bits; writing 1 toggles a bit |

The interrupt is a level signal: `GIE & (ISR[0] | ISR[1])`.

The driver loop from the original work maps onto these registers as follows:

1. enable the interrupt (0x04 and 0x08);
2. for each data item:
   1. write the operands;
   2. write 1 to 0x00;
   3. wait for the interrupt, or poll bit1 of 0x00;
   4. read the result;
   5. write 1 to 0x0C to acknowledge the interrupt.

`axil_slave` accepts the write address and write data in either order and has
one transaction of each kind in flight. Responses are always OKAY. Register
reads take one cycle inside the slave.

## Files

| file | contents |
|---|---|
| `rtl/aes_pkg.sv` | block type, generated S-box tables, round and key-schedule functions |
| `rtl/axil_pkg.sv` | AXI4-Lite request/response structs, control-register offsets |
| `rtl/ecg_pkg.sv` | array selector enum, distance width function |
| `rtl/aes_cipher.sv`, `rtl/aes_decipher.sv` | AES-128 cores |
| `rtl/axil_slave.sv` | AXI4-Lite protocol engine |
| `rtl/hls_ctrl_regs.sv` | start/done/idle/interrupt registers |
| `rtl/aes_cipher_axil.sv`, `rtl/aes_decipher_axil.sv` | AES IPs |
| `rtl/ram_1w1r.sv` | one-write one-read memory |
| `rtl/pca_projection.sv`, `rtl/euclid_distance.sv`, `rtl/min_search.sv` | identification datapath |
| `rtl/ecg_identification.sv` | identification core: memories, sequencing |
| `rtl/ecg_id_axil.sv` | identification IP |
| `rtl/ecg_security_pl.sv` | top |
| `tb/aes_ref_pkg.sv`, `tb/ecg_ref_pkg.sv` | independent reference models |
| `tb/axil_master_bfm.sv` | AXI4-Lite master with handshake assertions |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=F` and ends with
`$finish`. Each has a watchdog. With Verilator 5, run the end-to-end test like
this:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb rtl/aes_pkg.sv rtl/axil_pkg.sv rtl/ecg_pkg.sv \
    tb/aes_ref_pkg.sv tb/ecg_ref_pkg.sv tb/tb_ecg_security_pl.sv \
    --top-module tb_ecg_security_pl
./obj_dir/Vtb_ecg_security_pl
```

Replace the last file and the top module to run any other testbench. Packages
have to be listed first; the modules are found through `-y`.

| testbench | what it establishes |
|---|---|
| `tb_aes_cipher`, `tb_aes_decipher` | FIPS-197 Appendix B and C.1 vectors; 40 random key/data pairs against the reference model; exact latency (11 / 22 cycles); back-to-back starts |
| `tb_axil_slave` | 300 random reads and writes in all three address/data orders, with back-pressure and byte strobes; one strobe per transaction |
| `tb_aes_cipher_axil`, `tb_aes_decipher_axil` | the software sequence, polled and interrupt-driven; clear-on-read and toggle-to-clear; strobes on the key registers |
| `tb_pca_projection` | default size; random and full-range data against the 128-bit reference, including saturation; m*n+5 cycles |
| `tb_euclid_distance` | default size; full-range data; every distance and index; m*i+5 cycles |
| `tb_min_search` | random streams with frequent ties |
| `tb_ecg_identification` | default size; a planted exact match, a tie, and random databases; m*n+m*i+12 cycles |
| `tb_ecg_id_axil` | reduced size (n=40, m=4, i=8) to exercise the address decode at other parameters; start-to-interrupt time |
| `tb_ecg_security_pl` | the whole system at default parameters (see below) |
| `tb_ecg_dataset` | a recognition workload at default size: 64 enrolled synthetic people, 20 test beats (the size of the smallest data set the original work evaluates) distorted by gain, baseline offset and noise; every ID and distance bit-exact against the reference model, 20 of 20 recognised |

`tb_ecg_security_pl` plays the enrolment software. It builds 64 synthetic
heartbeats from Gaussian P, QRS and T waves with per-person shapes. It uses
orthonormal DCT-II rows in Q15.16 as the projection basis, a stand-in for
eigenvectors, which would need an eigensolver. It loads the database and then
runs the whole flow:

1. it encrypts a noisy beat of one person, as 75 AES blocks;
2. it decrypts the blocks and checks them against the original;
3. it identifies the person from the decrypted beat;
4. it identifies a second person while the cipher encrypts in parallel.

It counts every mechanism and fails if one never occurred: encryptions,
decryptions, identifications, each interrupt line, and concurrent operation.
It takes about 40 s to build and under a second to run.

## How far this can be trusted

What is verified, and how:

* The AES cores reproduce the FIPS-197 vectors and agree with an independently
  written model on random data.
* The identification arithmetic is bit-exact against a 128-bit reference
  model, at the default sizes.
* The bus interfaces are checked with a master that randomises handshake
  timing and asserts the response rules.
* Each testbench was also run against a deliberately broken copy of its
  module, and every one detected the break.
* Verilator and the slang front end accept all RTL without errors.

What is not covered:

* No timing closure at 50 MHz has been attempted. One AES round per clock and
  a 33 x 32-bit multiply per pipeline stage are plausible at that clock on a
  7-series FPGA, but this is unverified.
* Recognition accuracy on real ECG databases (VS100, Shimmer3, MIT-BIH)
  depends on the enrolment software and the data. Neither is part of this
  RTL, so it has not been measured. On the synthetic beats of
  `tb_ecg_dataset` every beat is recognised. That only shows the datapath
  computes the nearest neighbour exactly. Those beats are far cleaner than
  real recordings, and the DCT rows used there stand in for real
  eigenvectors.

## Where this departs from the original

* The blocks were generated by high-level synthesis in the original and are
  hand-written RTL here. Consequently:
  * latencies differ: identification takes 4,380 cycles here against a
    reported 0.09 ms, close at 50 MHz, while the AES cores take 11 and 22
    cycles;
  * resource use is not comparable.
* The identification number format is fixed point, as described above. The
  original's format is not stated and may have been floating point.
* The PCA subtraction is `test - mean`. The original text states it both ways
  in different places; the projection equation uses the mean-subtracted test
  signal.
* The projected distance vector is streamed into the minimum search instead of
  being stored first. The result is the same.
* The AES key is a register in each AES IP.
* The identification IP also reports the winning distance.
* Register maps and the interrupt order are assumptions.
* `M_FEAT` and `N_TRAIN` are assumed sizes.
