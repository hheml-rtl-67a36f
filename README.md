# HHEML client accelerator: a two-lane Pasta-4 encryption core

In hybrid homomorphic encryption (HHE) an edge device does not encrypt its
data under a fully homomorphic scheme. It encrypts with a cheap symmetric
cipher, and the server turns those ciphertexts into FHE ciphertexts itself.
Pasta is a symmetric cipher built for this. It works on words of a prime field
F_p, using only additions, multiplications and field-linear maps, so an FHE
server can evaluate it cheaply. This RTL is the client side of such a system.
It is a streaming accelerator that encrypts (and decrypts) vectors of 32-bit
words with Pasta-4, as the programmable logic of a Zynq-class SoC would. It
follows the HHEML design (Chan et al., "HHEML: Hybrid Homomorphic Encryption for
Privacy-Preserving Machine Learning on Edge").

The main idea comes from that design. Producing Pasta keystream is limited by
the SHAKE128 extendable-output function (XOF), which supplies every matrix and
round constant. The arithmetic is comparatively cheap. So the core has **two
complete keystream lanes, each with its own XOF**. A central round counter
hands consecutive 17-word blocks to the two lanes in turn, and the results are
put back in order. A 784-word MNIST image is 47 blocks. A single lane needs 47
rounds for it; this core needs 24.

## The cipher as implemented

Parameters live in `rtl/pasta_pkg.sv`:

| name | value | meaning |
|---|---|---|
| `T` | 17 | words per half state = words per packet |
| `R` | 4 | rounds of Pasta-4, i.e. R+1 = 5 affine layers |
| `P` | 65537 | field prime |
| `PBITS` | 17 | bits kept from each XOF draw |

Each block i of a message has its own keystream. The key `sk` (2T field
elements, halves `x_L`, `x_R`) is the initial state. The public nonce `N` and
the block counter `i` seed a fresh SHAKE128 instance. Then:

```
for layer j = 0 .. R:
    x_L <- M_L,j * x_L            (matrix from the XOF)
    x_R <- M_R,j * x_R            (matrix from the XOF)
    x_L <- x_L + c_L,j            (constants from the XOF)
    x_R <- x_R + c_R,j
    s = x_L + x_R;  x_L <- x_L + s;  x_R <- x_R + s      (mix)
    j <  R-1 : S'  on each half:  y_0 = x_0,  y_k = x_k + x_{k-1}^2
    j == R-1 : S   on each half:  y_k = x_k^3
    j == R   : no S-box
keystream = x_L
ciphertext  c = m + keystream (mod p);   plaintext  m = c - keystream (mod p)
```

All arithmetic is mod p.

**XOF and element sampling.** The sponge absorbs one padded SHAKE128 block:
the nonce, then the counter, each as 8 big-endian bytes. Field elements are
then drawn 8 bytes at a time. Each draw is read as a big-endian integer,
masked to 17 bits, and discarded if it is not below p. With p = 65537 about
half of all draws are discarded, so one block consumes about 680 draws, or
about 33 Keccak permutations. The 17 elements that start a matrix must also be
non-zero. Each layer takes its 4·17 = 68 elements in a fixed order: left
matrix, right matrix, left constants, right constants.

**Matrices are never stored.** Only the first row `v` comes from the XOF.
Every further row is the previous row shifted right by one position, plus its
last element times `v`:
`row_k[j] = row_{k-1}[T-1]·v[j] + row_{k-1}[j-1]`. This gives an invertible
matrix (a power of a companion matrix). `pasta_matgen` produces one row per
clock, and `pasta_matmul` multiplies that row by the state half in the same
clock. A 17×17 product therefore takes 17 cycles and needs no matrix memory.

The paper gives the layer structure, the two S-boxes, the 17-word block and
Pasta-4. The byte order, the rejection rule, the matrix recurrence and the
mix are not printed in the paper. They are taken from the Pasta reference
definition, and the testbench model uses the same conventions. Bit-exact
agreement with the published Pasta software is not claimed: that code uses
t = 32 for Pasta-4, whereas this design uses the paper's 17-word blocks.

## How a lane runs (`pasta_lane`)

A lane is a small controller around one instance of each stage:

```
        +-----------+   elements   +-------------+
 N, i ->| pasta_xof |--(FIFO 16)-->| vector buf  |--+--> pasta_matgen --row--> pasta_matmul --> x_L / x_R
        | SHAKE128  |              |  (17 words) |  |
        +-----------+              +-------------+  +--> pasta_vecadd  ---------------------> x_L / x_R
                                                         pasta_mix_sbox (x_L, x_R) --------> x_L, x_R
```

For each layer the controller loops through LOAD → MUL → WB twice (left, then
right matrix), then LOAD twice for the constants (VecAdd), then one MIX cycle.
LOAD takes one element per clock from the XOF FIFO. The XOF runs on
independently, filling its 16-entry FIFO while the lane multiplies. The
arithmetic takes about 2·(17+2) + 1 cycles per layer. The rest of a layer is
waiting for the XOF: 24 cycles per permutation, then 21 lanes of 8 bytes
squeezed at one per cycle. In simulation one keystream block takes about
1,500 cycles.

## Two lanes and the round counter (`pasta_core`)

Keystream does not depend on the data. A lane can therefore start as soon as it
knows its block counter. On `start`, lane 0 begins block 0 and lane 1 begins
block 1. Packet k is accepted only by lane k mod 2, and only once that lane's
keystream is ready. It is added to (encrypt) or subtracted from (decrypt) the
keystream into the lane's result register. The lane then restarts at once on
block k+2. Results leave in the same alternating order. The output is
therefore in block order even though each lane rejects a different number of
draws and so runs for a different time. `ROUNDS` counts how often lane 0 was
started: ceil(blocks / 2), 24 for an MNIST image. The parameter `NUM_LANES`
generalises the round-robin to any number of lanes.

Both lanes use the same key and nonce. They differ only in the block counter.
(The paper says the two XOFs "share the same seed". Identical counters would
repeat the keystream, so the counters must differ.)

## Host interface (`hheml_top`)

`hheml_top` has three buses:

* An AXI4-Lite slave for control.
* A 32-bit AXI4-Stream slave for input words.
* A 32-bit AXI4-Stream master for output words.

Inside are `axil_regs`, `axis_wrapper` (1024-word input and output FIFOs plus
the 17-word packer and unpacker) and `pasta_core`.

| offset | register | access | content |
|---|---|---|---|
| 0x000 | CTRL | W | bit 0 START (pulse), bit 1 MODE (0 encrypt, 1 decrypt), bit 2 STOP (pulse); reads MODE |
| 0x004 | STATUS | R | bit 0 BUSY, bit 1 DONE (sticky, cleared by START), bit 2 STOPPED (sticky, cleared by START) |
| 0x008 | NUM_WORDS | RW | words in the job |
| 0x00C / 0x010 | NONCE_LO / HI | RW | nonce N |
| 0x014 / 0x018 | CTR_LO / HI | RW | block counter of the job's first block |
| 0x01C | ROUNDS | R | scheduler rounds of the last job |
| 0x020 | BLOCKS | R | blocks finished |
| 0x100 + 4k | KEY[k] | RW | k = 0..16 left key half, 17..33 right half |

A job goes like this:

1. Write the key, the nonce, CTR and NUM_WORDS.
2. Write CTRL with START and MODE. START empties both FIFOs, so start
   streaming after it.
3. Stream NUM_WORDS words in and read NUM_WORDS words out. The last output
   word carries TLAST.
4. Poll STATUS.DONE.

Writing CTRL with STOP abandons a running job. Both lanes drop their
half-computed keystream, buffered results are discarded, and both stream
FIFOs are emptied. BUSY falls, DONE is not set, and STOPPED is set. If one
write sets both STOP and START, STOP wins. The next START begins a fresh job.

If NUM_WORDS is not a multiple of 17, the last packet is padded with zeros
inside the core, and only the real words are returned. The job length comes
from NUM_WORDS; input TLAST is ignored. Input words are reduced mod p. Use
values below p, which holds for 8-bit pixels or 16-bit features.

The interface rules are written as assertions in the RTL:

* `sync_fifo`: no write when full, no read when empty.
* `axis_wrapper`: stalled stream data holds until taken.
* `axil_regs`: AXI-Lite responses stay valid until taken.
* `pasta_lane`: a lane is started only when idle.
* `pasta_core`: an output packet holds until taken.

## Size and speed

Measured in simulation at default parameters:

| | cycles |
|---|---|
| one keystream block (one lane) | about 1,500 |
| 784-word MNIST image, encrypt or decrypt, with random stream stalls | about 35,000 |

At the 75 MHz in the paper's Table 1, one image would take about 0.47 ms. The
paper reports 34.3 µs per round and 1,553 µs per image on its FPGA. These
figures come from a different microarchitecture, which the paper does not
detail, so the cycle counts here are not a reproduction of its results.
Coarse synthesis of the top gives about 4.5k word-level cells, 13.6k flip-flop
bits and 71 kbit of FIFO memory. Each lane has 17 multipliers in MatGen, 17
in MatMul, 32 squarers for S' and 68 multipliers for S, all mod p.
That is far more than the 64 DSP blocks in the paper's Table 1, whose design
must share multipliers over time.

## Where this RTL departs from the paper, or fills gaps

* **Per-lane stages.** The block diagram draws one MatGen, MatMul, VecAdd and
  Mix & S-box. The pipeline figure shows each of them serving both XOFs in the
  same time slot. Here each lane has its own copy of every stage.
* **No overlap inside a lane.** The paper's figure also overlaps the stages of
  successive vectors inside a lane. Here only the XOF runs ahead; the lane
  does one stage at a time.
* **Key generation.** The paper places key generation in hardware but does not
  say how it works (no entropy source, no algorithm). Here the host writes the
  key into registers.
* **What STOP does.** The paper mentions start and stop signals from the
  host, but not what stopping means. Here STOP abandons the job: results
  in flight are lost, and the job must be started again from the beginning.
* **Key versus seed.** The paper's background text says the key seeds the XOF.
  Its encryption formula makes the key the permutation's input state, with
  only the nonce and counter choosing the layers. The formula is followed.
* **Which S-box where.** The paper's prose says S' is used in rounds 0 to
  r−1 and S "only in the final round". Its formula puts S after A_{r−1} and
  no S-box after A_r. The formula is followed: S' after layers 0..R−2, S after
  layer R−1.
* **Two half matrices.** The paper speaks of one invertible matrix per layer
  over the whole state. Here, as in Pasta, each half has its own T×T matrix,
  and the two halves are coupled by the mix step.
* **One core for both directions.** The paper describes separate encryption
  and decryption modules that share the data paths. Here one core does both:
  the keystream is the same, and only the final add or subtract (MODE)
  differs.
* **Block size.** T = 17 follows the paper's packet size. It also reproduces
  the paper's 47 and 24 rounds per image. The published Pasta-4 uses halves of
  32 words.
* **Clock.** The paper gives both 100 MHz (text) and 75 MHz (Table 1). The RTL
  has no clock-dependent parameter.
* **Own choices.** These are not given by the paper: p, the FIFO depths (1024
  words, sized to hold one image), the register map, the valid/ready
  handshakes, zero padding, and the active-low asynchronous reset `rst_n`.
* **Not included.** The ARM processing system, the DMA engines, Ethernet and
  the server (HHE decompression, FHE evaluation) are outside the programmable
  logic. `hheml_top` exposes the AXI ports they attach to.

## Files

| file | role |
|---|---|
| `rtl/pasta_pkg.sv` | T, R, p, word and vector types, `mode_e`, `sbox_e`, modular add/sub/mul |
| `rtl/keccak_f1600.sv` | Keccak-f[1600], one round per clock |
| `rtl/pasta_xof.sv` | SHAKE128 seeding, squeezing, rejection sampling, element FIFO |
| `rtl/pasta_matgen.sv` | matrix rows from one XOF vector |
| `rtl/pasta_matmul.sv` | one row · state half per clock |
| `rtl/pasta_vecadd.sv` | round-constant addition |
| `rtl/pasta_mix_sbox.sv` | mix of the halves, S', S |
| `rtl/pasta_lane.sv` | one keystream lane (controller + stages) |
| `rtl/pasta_core.sv` | round counter, two lanes, encrypt/decrypt, ordered output |
| `rtl/sync_fifo.sv` | FIFO used for input, output and XOF buffering |
| `rtl/axis_wrapper.sv` | AXI4-Stream side, 17-word packer/unpacker |
| `rtl/axil_regs.sv` | AXI4-Lite registers |
| `rtl/hheml_top.sv` | top level |
| `tb/pasta_ref_pkg.sv` | independent reference model (Keccak, SHAKE128, Pasta) |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Verification

Every testbench checks against values worked out outside the module under
test, and ends with `TB_RESULT checks=N failures=M`. The reference model in
`tb/pasta_ref_pkg.sv` is written separately from the RTL, in these ways:

* Keccak uses a 5×5 lane array, with rotation offsets and round constants
  produced by their defining recurrences rather than copied tables.
* SHAKE128 is modelled as a byte stream.
* Pasta matrices are built in full before multiplying.

`tb_keccak_f1600` also checks the published first lane of Keccak-f applied to
the zero state (0xF1258F7940E1DDE7).

| testbench | what it checks |
|---|---|
| `tb_keccak_f1600` | all lanes vs. the reference for zero, chained and random states; 24-cycle latency |
| `tb_pasta_xof` | 340 elements (five layers) per seed vs. the reference sampler under consumer stalls, for two seeds; the second seed is applied while elements of the first are still buffered; rejections and re-squeezes occur |
| `tb_pasta_matgen`, `tb_pasta_matmul`, `tb_pasta_vecadd`, `tb_pasta_mix_sbox` | each stage vs. the reference arithmetic on random operands; MatMul also all-(p-1) operands, VecAdd 0 and p-1 |
| `tb_pasta_lane` | whole keystream blocks vs. the reference Pasta-4, back-to-back restart, abort half-way, run time at least the XOF's lower bound |
| `tb_pasta_core` | 5-block encrypt and decrypt with random stalls, block order, round count, a stopped job followed by a correct new one, empty job |
| `tb_sync_fifo`, `tb_axis_wrapper`, `tb_axil_regs` | queue model; packing, padding, TLAST; register map, START/STOP pulses, sticky status bits, bus handshakes |
| `tb_hheml_top` | a full MNIST image (784 words) encrypted and decrypted through the AXI ports at default parameters (below) |

`tb_hheml_top` compares every ciphertext word with the reference. It also:

* checks ROUNDS = 24;
* decrypts the image back;
* stops an image job part-way through and checks STATUS and the emptied output;
* runs a short job with another counter base;
* counts that each mechanism happened at least once: both modes, both lanes, a
  padded packet, a packet waiting for keystream, stream back-pressure and
  gaps, XOF rejections and re-squeezes, a stopped job.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/pasta_pkg.sv tb/pasta_ref_pkg.sv tb/tb_hheml_top.sv \
    --top-module tb_hheml_top -o sim
./obj_dir/sim
```

Substitute another `tb_*.sv` for the others. The top-level run builds in about
10 s and simulates in well under a second.

## Changing the design

* `NUM_LANES` on `hheml_top` or `pasta_core` sets the number of XOF lanes. Use
  1 for the single-XOF baseline (47 rounds per image). The core's testbench
  also passes with 1 and 3 lanes, once its expected round count is changed to
  ceil(5 / NUM_LANES).
* `FIFO_DEPTH` sizes the stream FIFOs.
* `XOF_FIFO_DEPTH` sets how far each XOF may run ahead.
* T, R, P and PBITS are parameters in `pasta_pkg`, and the reference model
  uses the same package. Only the defaults have been simulated. The register
  map's key window (2T words from 0x100) and the 32-bit word size assume that
  T stays small and p below 2^32.
