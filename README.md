# CDMA-coded data bus between two Avalon-MM components

This design moves 32-bit data words between a processor and a slave IP core
over 16 data lines instead of 32. It borrows the idea behind code division
multiple access (CDMA). Each data bit is spread over a short code word of
8 "chips". The spread bits of a group are added chip by chip. Only those
small sums travel on the bus. The receiver correlates the sums with the same
code words and gets the original bits back exactly, because the code words
are mutually orthogonal.

The coding sits in two bridge components with Avalon memory-mapped (Avalon-MM)
ports, as in an Altera SOPC Builder system:

```
 processor                                                          slave IP
 (Avalon-MM   s0 +----------------+  m0   coded bus   s1 +----------------+ m1  (Avalon-MM
  master) ------>| master_wrapper |--------------------->| slave_wrapper  |----> slave)
                 |  encoder  -----|--> writedata 16 -----|--> decoder     |
                 |  decoder  <----|--- readdata 16 <-----|--- encoder     |
                 +----------------+  address, read,      +----------------+
                                     write, waitrequest
                                     uncoded
```

Only the two data directions are coded. Address, read, write and waitrequest
pass as plain signals.

## Coding a word

**Batches and slots.** With `DATA_W` = 32 and `CHIPS` = 8, the word is split
into `NB` = 4 batches of 8 bits: bits 0-7, 8-15, 16-23 and 24-31. Coding takes
8 clock "slots". In slot `j`, bit `j` of every batch is coded at once.

**Code words.** In slot `j`, batch `b` uses row `(j - b) mod 8` of the 8x8
Sylvester-Hadamard (Walsh) matrix. Chip `k` of row `r` is the parity of
`r AND k`:

```
row 0  00000000     row 4  00001111
row 1  01010101     row 5  01011010
row 2  00110011     row 6  00111100
row 3  01100110     row 7  01101001      (chip 0 on the left)
```

Each batch runs through all eight rows, starting at a different one. Within a
batch, the codes of any two slots are orthogonal. That is what makes decoding
exact.

**Spreading and summing.** The bit is XORed with each chip of its code
(`chip = D xor S`). For every batch, the 8 chips are added column by column
over the 8 slots. Each of the 8 column sums `P_k` lies in 0..8, so it needs
4 bits.

**Sending.** The 8 column sums of the 4 batches are sent in 8 beats. Beat `k`
carries sum `k` of every batch, with batch `b` on lines `4b..4b+3`. That gives
16 lines.

**Worked example.** The word with bit 0 first `10110101 10110101 10110101
10110101` gives these column sums:

| batch | sums P_0..P_7 |
|---|---|
| 0 | 5 3 3 5 5 7 3 5 |
| 1 | 5 5 3 3 3 3 5 1 |
| 2 | 5 3 5 3 5 3 5 7 |
| 3 | 5 5 5 5 3 7 3 3 |

These match the values the source publication prints in its simulation
results. The encoder, decoder and end-to-end testbenches check them.

## Decoding

The receiver stores the 8 beats. It then spends 8 clocks despreading, one
slot per clock. For bit `j` of batch `b` it takes that batch's code `S` for
slot `j` and adds one term per chip:

```
term_k = (2*P_k - 8)    if S_k = 0
term_k = -(2*P_k - 8)   if S_k = 1
```

Consider chip `k` in ±1 form. The quantity `8 - 2*P_k` is the sum of the
spread bits `(±1 data) x (±1 code)` of that batch. Correlating with an
orthogonal code cancels every other bit of the batch. What is left is `+8` for
a 1 bit and `-8` for a 0 bit. The decoder takes the bit as 1 when the sum of
terms is positive.

## How many lines

For a code of `S` chips and `N` data bits, the bus needs
`N/S * (log2(S) + 1)` lines. The RTL takes this from its parameters:
`BUS_W = (DATA_W/CHIPS) * ($clog2(CHIPS)+1)`.

| S \ N | 8 | 16 | 64 | 128 | 256 |
|---|---|---|---|---|---|
| 4 | 6 | 12 | 48 | 96 | 192 |
| 8 | 4 | 8 | 32 | 64 | 128 |
| 16 | - | 5 | 20 | 40 | 80 |
| 32 | - | - | 12 | 24 | 48 |

The default build is `S` = 8, `N` = 32, which gives 16 lines. Every entry of
the table can be built with `CHIPS` and `DATA_W`. `tb_table1_configs` builds
all 17 entries and checks both the line count and data integrity.

The line count shrinks, but a word now takes 8 beats instead of 1. The coded
bus carries 32 bits per 8 beats on 16 lines. An uncoded 32-line bus carries
32 bits per beat. This design does not hide that cost.

## Blocks

| module | role |
|---|---|
| `cdma_pkg` | code-source enum, Walsh chip function, LFSR seed function |
| `lfsr8` | 8-bit LFSR, taps at registers 1, 2, 3, 7; all stages read in parallel |
| `spread_code_gen` | code word of each batch for the current slot (Walsh or LFSR) |
| `chip_summer` | column-wise chip counter of one batch |
| `cdma_encoder` | spreading, summing and serialization of one word |
| `cdma_decoder` | beat collection, Eq. 2 correlation and bit decision |
| `master_wrapper` | processor-side bridge: s0 plain, m0 coded |
| `slave_wrapper` | slave-side bridge: s1 coded, m1 plain |
| `cdma_interconnect_top` | the two bridges joined by the coded bus |

The encoder and the decoder each contain their own `spread_code_gen`. Both
restart it at slot 0 at the start of a word, so both ends use the same code
in the same slot without exchanging anything.

Encoder and decoder have valid/ready handshakes. The wrappers turn these into
Avalon-MM transfers.

## Transfers on the link

One coded word takes 8 Avalon-MM transfers ("beats") on the coded bus. The
requester keeps `read` or `write` high. A beat moves in each cycle in which
`waitrequest` is low.

**Write.**
1. The processor raises `avs_s0_write`.
2. The master wrapper encodes the word (8 cycles).
3. It sends 8 write beats on m0.
4. One cycle after the last beat, it lowers `avs_s0_waitrequest` to complete
   the processor's write.

The write is posted: the slave wrapper is still despreading at that point.
The slave wrapper takes the 8 beats, despreads them (8 cycles) and writes the
word on m1. Until m1 accepts the word, it holds off any new request on s1 with
`avs_s1_waitrequest`. This keeps a following read from overtaking the write.

**Read.**
1. The master wrapper raises `avm_m0_read`.
2. The slave wrapper stalls the first beat. Meanwhile it reads the slave IP
   on m1 and encodes the word (8 cycles).
3. It answers 8 read beats.
4. The master wrapper despreads them (8 cycles).
5. It returns the word on `avs_s0_readdata` in the single cycle in which
   `avs_s0_waitrequest` is low.

**Latency.** These counts assume a slave IP that never waits. The cycle in
which the processor raises its request counts as cycle 1.

| event | cycle |
|---|---|
| write completes at the processor | 18 |
| write appears on m1 | 27 |
| read from an idle link completes | 29 |

Wait states on m1 add to these counts. So does a read that queues behind a
posted write. An unstalled encoder or decoder handles one word every 16
cycles.

## Departures from the source and choices made here

- **Code source.** The publication's text says the code words come from an
  8-bit LFSR with taps at registers 1, 2, 3 and 7. Windows of an LFSR sequence
  are not orthogonal, so Eq. 2 would not recover the data exactly. The same
  text also claims that decoding is lossless. The sums that the publication
  prints from its simulation are reproduced exactly by the Walsh assignment
  described above. Walsh codes are therefore the default
  (`CODE_SRC = CODE_WALSH`). The LFSR is available as `CODE_SRC = CODE_LFSR`,
  only for 8 chips. Each batch then runs its own `lfsr8` from seed
  `(37*b mod 255)+1`. Expect decode errors in that mode.
- **The LFSR period.** Register 8 is not a tap, so this LFSR is not maximal
  length. From seed 8'h01 it enters a cycle of 127 states, not 255.
- **A conflicting illustration.** One of the publication's illustrations
  prints different sums for batches 1-3 of the same word. The simulation
  results were followed. For batch 0, both agree.
- **Address coding.** The publication's summary says the address lines are
  coded as well. Its component description and block diagrams pass the
  address straight through, and that is what is built.
- **Waitrequest.** The block diagrams draw waitrequest as a straight wire. It
  cannot be one, because a coded word takes 16+ cycles. Each wrapper
  generates its own waitrequest toward its requester.
- **Own choices (the source does not cover these):**
  - the multi-beat Avalon-MM sequencing
  - posted writes
  - the latched m1 address
  - valid/ready inside the wrappers
  - the sign test used to decide a bit
  - synchronous active-low reset
  - `ADDR_W` = 32
- **Not built.**
  - The NIOS II processor, the SOPC Builder fabric and the slave IP are
    outside this RTL.
  - The publication mentions summing the codes of several masters on one
    bus, but does not describe it. Each link here has one master and one
    slave.
  - No FPGA resource figures are reproduced.

## Simulating

Every testbench in `tb/` checks itself. It prints
`TB_RESULT checks=N failures=M` and stops; a watchdog ends a hung run. The
reference model `tb_cdma_ref_pkg` builds the Hadamard matrix by recursion and
counts sums with plain loops, independently of the RTL.
`tb_avalon_mem` is a memory with random wait states that stands in for the
slave IP. `tb_link_harness` runs random traffic through one link of any size.

A testbench is built with Verilator like this (example: the full link at
default sizes):

```
verilator --binary --timing --assert -Wall -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl \
  rtl/cdma_pkg.sv tb/tb_cdma_ref_pkg.sv tb/tb_cdma_interconnect_top.sv \
  --top-module tb_cdma_interconnect_top -o sim
./obj_dir/sim
```

Replace the testbench file and top for the others:

- `tb_lfsr8`
- `tb_spread_code_gen`
- `tb_chip_summer`
- `tb_cdma_encoder`
- `tb_cdma_decoder`
- `tb_master_wrapper`
- `tb_slave_wrapper`
- `tb_table1_configs`

All run in seconds.

`tb_cdma_interconnect_top` uses the top at its default parameters. It covers:

- the worked example, with its bus beats
- the latencies above
- 300 random back-to-back transfers, half of them with slave wait states

It also counts the link's mechanisms and fails if any never occurs:

- coded writes
- coded reads
- posted writes still in flight
- write beats stalled by a busy slave wrapper
- slave wait states

## How far to trust it

All blocks are tested against an independent model, including the values
printed in the publication. Each block's test was also run against a
deliberately broken copy of that block, and each test caught it.

Exact decoding is shown for Walsh codes at all Table 1 sizes. It has not been
measured on an FPGA. The LFSR mode is built. Its code sequence is checked, and
`tb_cdma_encoder` checks its sums against an LFSR model. It is not expected to
decode correctly.
