# CERMET receiver in SystemVerilog

CERMET ("coding for energy reduction with multiple encryption techniques")
sends several data streams over several channels and still keeps every stream
secret, while encrypting only **one** of the channels. The sender first mixes
the n messages with the inverse of a maximum-rank-distance (MRD) code matrix,
so that every channel carries a combination of all messages. It then encrypts
one of the mixed channels. An eavesdropper who sees all the plain channels
but not the encrypted one learns nothing about any single message
("individual secrecy"). The receiver decrypts the one channel and unmixes all
n with the same code matrix.

The receiver needs one cryptographic core instead of n. The price is a
matrix multiplication over GF(2^16) per received block. This RTL implements
that receiver. Its multiplier hides under the latency of the single
decryption, so that with an AES core and up to 8 channels the receiver is as
fast as n separate AES cores.

The design follows the architecture published for CERMET (a HUNCC receiver
with AES-256 or ECC cores, evaluated in 28 nm at 100 MHz). The
cryptographic core itself is not part of this RTL: it is an external block
with a valid/ready interface.

## The arithmetic

All data are cut into *units* of `K_IN` bits: 128 for AES, 256 for the ECC
configuration. Each unit is a vector of `N_EL = K_IN/M` field elements of
`M = 16` bits. In one *block* every channel carries one unit.

With `X_i` the unit received on channel i (after decryption for the
encrypted channel), message j of the block is

    M_j = XOR over i of  H[j][i] * X_i        (element by element, in GF(2^16))

`H` is a Moore matrix, `H[j][i] = h_j^(2^i)`. Its basis elements are
`h_j = x^j`, the first N_CH powers of the generator x. These are linearly
independent over GF(2), so H is invertible, and the sender uses `G = H^-1`.
The field polynomial is `x^16 + x^12 + x^3 + x + 1` (`0x1100B`). H is
computed while elaborating (`cermet_pkg::h_entry`) and ends up as constants
at the multiplier inputs.

The basis and the polynomial are choices of this design. The published
architecture fixes neither. Change `cermet_pkg::h_basis` or the `POLY`
parameter if a sender uses different ones; the testbenches compute G from
whatever H the package gives.

## Data flow

```
 ch_in[j] -> input FIFO j --+-- j == ENC_CH --> cc_in  ==> crypto core ==> cc_out --+
                            |                                                      |
                            +-- others -----> plain register j                     |
                                                   |                               |
               scheduler (queue of arrived channels) -> MUX <----------------------+
                                                   |
                                  MRD matrix multiplication  (column i of H x X_i)
                                                   |
                               intermediate output register (XOR-accumulate)
                                                   |
                                output FIFO j -> ch_out[j]   (all j written together)
```

| Part | Module | Role |
|---|---|---|
| input and output FIFOs | `sync_fifo` | one per channel, first-word fall-through |
| plain registers and MUX | `data_select` | hold a plain unit until it is multiplied; the encrypted channel reads the core's output |
| scheduler | `scheduler` | FIFO of channel indices in arrival order; flags the first and last unit of a block |
| multiplier (parallel) | `mrd_matmul_parallel` | `N_CH x N_EL` field multipliers, one unit per 2 cycles |
| multiplier (serial) | `mrd_matmul_serial` | one field multiplier, one product per 2 cycles |
| field multiplier | `gf_mult_rpa` | Russian-peasant multiplication, 8 steps per cycle |
| intermediate output register | `inter_out_reg` | `N_CH` accumulators of `K_IN` bits |
| clock option | `clock_divider`, `crypto_cdc`, `async_fifo` | slow receiver clock, dual-clock FIFOs to the core |
| top | `cermet_receiver` | wires the above; choice of multiplier and clocking by parameter |
| shared constants | `cermet_pkg` | field size, polynomial, H, software field multiply |

## Why the multiplication costs nothing: the schedule

The key idea is the order in which units are multiplied. Because the sum
over i is a XOR, the receiver can multiply the units of a block **in any
order**. It takes them as they become available. The plain units are there
as soon as they arrive. The encrypted unit only appears after the core's
latency (17 cycles for the AES-256 core the design was sized for, about
83,000 cycles for the ECC core). So the plain units of a block are
multiplied while the encrypted unit of the same block is being decrypted.

The scheduler:

* Keeps a FIFO of channel indices. When a unit reaches the head of its input
  FIFO (or, for the encrypted channel, leaves the core), its index is
  pushed. Arrivals in the same cycle are pushed in channel order.
* Lets each channel deliver one unit per block. Once every channel has been
  fetched for the current block, fetching for the next block opens, even
  though the current block may still be multiplying. This keeps the plain
  registers one block ahead.
* Issues the head of the queue to the multiplier when the multiplier can
  take it. It marks the first unit of a block, which restarts the
  accumulators, and the last one, which completes the block.

On the last unit of a block, the accumulated result plus the last products
is written into all output FIFOs in the same cycle. A block's last unit is
held back while any output FIFO is full, so a decoded block is never dropped.
Back-pressure then reaches the input FIFOs and the senders through the
normal ready signals. The published design does not say what happens when
the outputs cannot drain; this is the simplest safe rule.

### Throughput

A field multiplication takes 2 cycles, and the multiplier accepts a new
operand in the cycle it finishes. The parallel multiplier therefore takes
one unit every 2 cycles and needs `2*N_CH` cycles per block. The block
period is

    period = max(T_core, 2*N_CH)         cycles (parallel multiplier)
    period = max(T_core, 2*N_CH*N_EL*N_CH) cycles (serial multiplier)

With the 17-cycle AES core, this gives 17 cycles up to 8 channels and
2·N_CH beyond. At 100 MHz that is 1.51, 2.26, 3.01, 3.76, 4.52, 5.27, 6.02
Gbps for 2 to 8 channels, and 6.40 Gbps for 9, 10 and 11. These are exactly
the throughputs reported for the original design.

The pipeline is: issue, two multiplier cycles, then accumulation in the
third cycle. Because issues overlap, the accumulate cycle costs no
throughput. The published design describes this as reducing the three
steps to 2 cycles by pipelining.

For 16 channels of 256 bits with the ECC core, the serial multiplier needs
2 × 16 × 16 = 512 cycles per unit and 8192 per block. That is far below
the core's ~83,000 cycles, so one multiplier suffices. This is why the
serialized variant is the one that makes sense for ECC.

## The field multiplier

`gf_mult_rpa` is the "Russian peasant" shift-and-add multiplier. Each step
does the following:

* It adds (XORs) `a` into the result if the low bit of `b` is set.
* It doubles `a` and reduces it by the polynomial when the top bit falls
  out.
* It halves `b`.

Sixteen steps are needed for GF(2^16). They are unrolled 8 per cycle, so a
product takes `MUL_CYCLES = 2` cycles. The first 8 steps run on the inputs in
the accept cycle; `done` and `c` are registered.

The published design compared this against a look-up-table multiplier and
chose the RPA for area. The look-up-table alternative is not built. `M` and
`POLY` are parameters; the unit test also runs GF(2^8).

## Parallel or serial matrix multiplication

`MUL_ARCH = MUL_PARALLEL` (default) instantiates `N_CH x N_EL` multipliers.
For an issued unit `X_i` of channel i, multiplier (j, k) computes
`H[j][i] * X_i[k]`. This is the outer product of column i of H with the unit:
the whole contribution of that unit to all N_CH outputs. 5 channels of 128
bits take 40 multipliers.

`MUL_ARCH = MUL_SERIAL` uses one multiplier. It walks j (output) in the
outer loop and k (element) in the inner loop, producing one element every 2
cycles. Each product carries a one-hot mask, so `inter_out_reg` updates only
that element.

Both present the same interface to the rest of the receiver. The published
design uses the parallel form with AES and the serialized one with ECC.

## Multi-clock option

Setting `CLK_DIV` to an even number > 1 builds the multi-clock-domain
variant:

* The cryptographic core stays on `clk`.
* Everything else in the receiver runs on `sys_clk = clk / CLK_DIV`.
  `clock_divider` makes that clock from a counter and a toggle flop.
* Two dual-clock FIFOs (`crypto_cdc`, built from `async_fifo`: Gray-coded
  pointers crossed through two flip-flops) carry ciphertext to the core and
  plaintext back.
* `sys_clk` is an output; the channel ports `ch_*` are synchronous to it,
  the core ports `cc_*` to `clk`.

The original description is ambiguous about which side is slowed down. One
sentence gives the slow clock to the core, but its figure and its
experiments ("half and a quarter of the speed of the ECC core clock") keep
the core on the fast clock. This RTL follows the figure.

In the figure the synchronizer FIFOs replace the encrypted channel's input
FIFO. Here they sit behind it, so the channel side is the same in both modes.
With `CLK_DIV = 1` (the default) none of this is built and `sys_clk` is
`clk`.

The block period is then counted in `sys_clk` cycles. With 5 AES channels
at 1/2 or 1/4 speed the multiplier sets it at 10 slow cycles, which is 20 or
40 core cycles. For the ECC configuration the multiplication still hides
under the core.

## Parameters of `cermet_receiver`

| Parameter | Default | Meaning |
|---|---|---|
| `N_CH` | 5 | channels (the 5-channel configuration is the headline result) |
| `M` | 16 | field GF(2^M) |
| `POLY` | `17'h1100B` | field polynomial (own choice) |
| `K_IN` | 128 | bits per unit (128 for AES, 256 for ECC) |
| `ENC_CH` | 0 | encrypted channel |
| `MUL_ARCH` | `MUL_PARALLEL` | `MUL_SERIAL` for the ECC configuration |
| `MUL_CYCLES` | 2 | cycles per field multiplication |
| `IN_DEPTH`, `OUT_DEPTH` | 4 | channel FIFO depths (own choice) |
| `CLK_DIV` | 1 | receiver clock divider; 2 or 4 for the multi-clock option |
| `CDC_DEPTH` | 4 | dual-clock FIFO depth (own choice) |

The ECC configuration is `N_CH=16, K_IN=256, MUL_ARCH=MUL_SERIAL`.

## Interfaces

All ports are valid/ready: a word moves in a cycle where both are high.

* `ch_in_valid/ready/data[N_CH]` — one unit per channel per block. Stands in
  for the SPI receivers of the original chip, which are not modelled.
* `cc_in_*` — ciphertext towards the core, in arrival order.
* `cc_out_*` — decrypted units from the core. The core must hold
  `cc_out_data` while `cc_out_valid` is high and `cc_out_ready` low; the
  receiver takes the unit when the scheduler issues it.
* `ch_out_valid/ready/data[N_CH]` — decoded messages. All channels of a
  block become valid in the same cycle.
* `clk`, `rst_n` — asynchronous active-low reset for every flip-flop.
  `sys_clk` is described above.

The simulation model requires rst_n to actually fall (or a clock edge to
occur during reset) before the first clock edge.

## What departs from the published design

* **Cryptographic core.** External. The testbenches use a behavioural
  stand-in (`tb/crypto_core_model.sv`): a fixed-latency invertible bit
  scramble, not AES or ECC. The ECC latency of 83,016 cycles is derived from
  the reported 4,934 kbps for 4096 bits at 100 MHz.
* **SPI links.** Not modelled; replaced by parallel valid/ready ports.
* **Code construction.** The polynomial and `h_j = x^j` are own choices (see
  above).
* **Clock gating.** Mentioned as a power technique in the original but left
  to the synthesis flow; no gating cells here.
* **Pipeline diagram.** The stage order and overlaps of the published timing
  diagram are followed. Its exact cycle positions are not reproduced.
* **Output back-pressure** and **FIFO depths** are own choices (see above).

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=N`. Field arithmetic is checked against an
independent reference (`tb/tb_gf_ref_pkg.sv`: carry-less multiply with long
division, Gauss–Jordan inversion of H).

`tb/cermet_harness.sv` plays the sender for the end-to-end tests. It mixes
random messages with G, encrypts one channel with the inverse of the
stand-in core, feeds the receiver and compares every decoded unit. It runs a
full-rate phase that measures the block period, and a phase with random
input gaps and slow output draining. It counts, and fails if any never
happens:

* plain units multiplied;
* decrypted units multiplied;
* multiplication overlapping decryption;
* early fetches of the next block;
* output stalls;
* full input FIFOs.

| Testbench | Configuration | Measured block period |
|---|---|---|
| `tb_cermet_receiver` | defaults (5 ch, 128 bit, parallel), 40 blocks | 17 cycles (3.76 Gbps at 100 MHz) |
| `tb_cermet_workloads` | 2, 3, 4, 8 ch | 17 cycles |
| | 9 ch / 11 ch | 18 / 22 cycles (6.40 Gbps) |
| | 16 ch, 256 bit, serial, 83,016-cycle core | 83,016 cycles |
| | 5 ch at `CLK_DIV` 2 and 4 | 10 receiver cycles |

Run one testbench with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl \
  rtl/cermet_pkg.sv tb/tb_gf_ref_pkg.sv tb/cermet_harness.sv tb/crypto_core_model.sv \
  tb/tb_cermet_receiver.sv --top-module tb_cermet_receiver
./obj_dir/Vtb_cermet_receiver
```

`tb_cermet_receiver` takes seconds. `tb_cermet_workloads` takes about two
minutes, nearly all of it in the ECC case.

### How far to trust it

The data path is checked bit-exactly against an independent model. The
timing is checked cycle-exactly against `max(T_core, 2·N_CH)`. The clock
crossing is checked with unrelated clock periods in simulation only. No
formal check of the asynchronous FIFO or gate-level timing was done.

Area and power were not measured. The parallel multiplier's size grows as
`N_CH · K_IN / M` multipliers, which matches the reported trend.
