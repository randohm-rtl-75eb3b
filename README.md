# Moving secret registers around: a hardware defence against impedance side channels

An impedance side-channel attack does not watch a chip switch. The attacker
stops the clock, or waits until a cipher sits idle, and then injects small RF
signals into the chip's power delivery network and measures what is
reflected. The reflection depends on the values held in individual
flip-flops, and on where those flip-flops and their wiring physically are.
Because the measurement is taken on a frozen state, masking does not help: a
snapshot of all the shares is as good as the unmasked secret, and a
bit-wise template (one template per key flip-flop) can be built and reused.

The defence implemented here is a *moving target*: the secret words are kept
in storage whose physical arrangement is re-randomised over and over while
the cipher keeps working. A template built for "key bit 5 lives in this
flip-flop" stops matching once key bit 5 lives somewhere else. The idea comes
from a partial-reconfiguration scheme for FPGAs, in which new placements are
generated as bitstreams at run time. This RTL gives the parts of that scheme
that are plain logic: the two hardware multiplexers that move the data, and
the controller that decides when to move it.

## The pieces

| module | role |
|---|---|
| `randohm_top` | the defence as one unit: rate controller plus the protected store |
| `pr_rate_ctrl` | asks for a re-randomisation after every `PR_RATE` encryptions, or on request |
| `reg_seq_mux` | **register sequence multiplexer**: writes the words into a randomly permuted set of registers, reads them back in order (default form) |
| `perm_shuffler` | draws a random permutation with a Fisher-Yates shuffle driven by an LFSR |
| `slice_mux` | **target slice multiplexer**: loads the words into one randomly chosen copy out of several replicated shift registers |
| `mtd_lfsr` | seeded 16-bit LFSR, the randomness source |
| `onehot_decoder` | binary to one-hot decoder with enable (the "2:4 decoder" of both multiplexers) |
| `randohm_pkg` | the mode enum and LFSR constants |

Outside the RTL, and brought out as ports of `randohm_top`: the true random
number generator (TRNG) that seeds the LFSRs, the secure source that streams
the secret words, and the cipher (the "function block") that reads them.

## Register sequence multiplexer: permuting and un-permuting

This is the fine-grained form, the one meant to protect the key shares of a
masked AES. There are `N_REGS` identical registers. On every
re-randomisation the secret words arrive again, always in their natural order
0, 1, …, N-1, one per accepted handshake. Word *k* is not written into
register *k* but into register *P[k]*, where *P* is a fresh random
permutation. The cipher still has to see word *k* when it asks for word *k*,
so the read multiplexer selects register *P[rd_idx]*.

The load and the read side each hold their own copy of *P*, and they never
exchange it. Both are `perm_shuffler` instances, both LFSRs are loaded with
the same TRNG seed, and both are started by the same trigger on the same
cycle. Because the shuffle is deterministic given the LFSR state, they build
the same table. This mirrors the reference design, where a second LFSR with
the same initial state drives the select of a 4:1 read mux. An assertion in
`reg_seq_mux` checks that the two tables agree whenever the data is marked
loaded.

How *P* is drawn is this design's own choice. The source says only that an
LFSR determines a random load sequence and claims up to N! possible orders.
Feeding raw LFSR bits to the decoder would repeat indices and overwrite words.
So `perm_shuffler` runs a Fisher-Yates shuffle instead:

```
P = identity
for i = N-1 downto 1:          -- one iteration per clock
    j = (r * (i+1)) >> 16      -- r = current 16-bit LFSR state, so 0 <= j <= i
    swap P[i], P[j]
    LFSR advances 16 states
```

Each draw sees 16 fresh LFSR bits (the LFSR steps 16 states per clock). If it
stepped only one state, consecutive draws would be shifted copies of each
other, and with N = 4 only 20 of the 24 orders turned up in 400 reloads. With the
16-state leap, all 24 orders come up in a 400-reload test. The
multiply-and-shift range reduction has a bias of at most (i+1)/2^16 per draw.

The load sequence after a trigger is:

1. **Shuffle.** Both tables are rebuilt, N-1 cycles. `loaded` is low, and
   `rd_data` is meaningless while the read table is rebuilt.
2. **Load.** `stream_ready` is high. Each accepted word *k* raises exactly one
   load strobe `ld[P[k]]` through the decoder, whose enable is the
   handshake.
3. **Loaded.** After N words, `loaded` rises and the state returns to idle.

At full stream rate, `loaded` rises 2·N clock edges after the edge that
samples the trigger (8 at N = 4, 256 at N = 128). A trigger that arrives
during a load is ignored by the multiplexer. The rate controller makes sure
it never sends one then (see below).

## Target slice multiplexer: replicate and choose

This is the coarse-grained form. `N_SLICES` copies of a shift register of
`DEPTH` cells are kept. In an FPGA each copy is constrained to a different
slice; the reference floorplan uses slices X2Y1, X1Y2, X2Y3 and X3Y2. On a
trigger:

- The low two LFSR bits go through the decoder, enabled by the trigger, and
  pick one copy.
- Every copy is cleared on that same edge.
- The chosen copy then shifts in the `DEPTH` stream words. The other copies
  stay at zero.

Because the other copies are zero, the consumer can OR all copies together:
`data_o` gives the chosen copy's contents in parallel, with `data_o[k]` the
k-th word received, and `serial_o` gives its last cell. The source draws a
combining gate without naming its type; OR is this design's choice. The LFSR
advances once per trigger. At full rate `loaded` rises `DEPTH` clock edges
after the edge that samples the trigger.

This form costs a full copy of the data per slice. The source reports that
only the register sequence form was used to protect AES. Here the slice form
is therefore available only as `MTD_MODE = MTD_TARGET_SLICE` of the top,
which is not the default. The module's own defaults (4 copies of six 1-bit
cells) are the sizes of the reference drawing.

## When to re-randomise: the PR rate

`pr_rate_ctrl` counts `enc_done` pulses and requests a new arrangement after
every `PR_RATE` encryptions. `PR_RATE = 1` is the strongest setting: every
encryption finds its key somewhere new. The default of 16 is the rate used in
the reported security experiments. In the original scheme this decision was
made in software, which then rebuilt and loaded a partial bitstream. Here the
request goes straight to the hardware multiplexer.

Two additions of this design:

- **External request.** `mitigation_trigger` requests a re-randomisation at
  once and restarts the count. It is used for the first load after power-up,
  and could be driven by an attack sensor.
- **Held request.** A request that comes while the store is still reloading
  is held and issued as soon as `busy` falls, so it is never lost.
  `pending_hits` counts how often this happened.

The request reaches the store as a one-cycle `mtd_trigger` pulse.

## Using `randohm_top`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `trng_valid`, `trng_seed[15:0]` | in | load the TRNG seed into every LFSR (zero is replaced by 0xACE1) |
| `mitigation_trigger` | in | request a re-randomisation now |
| `stream_ready` / `stream_valid` / `stream_data[WORD_W-1:0]` | out/in/in | the secret words, in order 0..WORDS-1, whenever the store asks |
| `target_valid` | out | stored words are valid; the cipher must not use `rd_data` while low |
| `rd_idx`, `rd_data` | in/out | combinational read of word `rd_idx` |
| `enc_done` | in | one pulse per finished encryption |
| `mtd_busy`, `mtd_trigger`, `enc_count`, `pending_hits` | out | status |

The start-up sequence is:

1. Pulse `trng_valid` with a seed.
2. Pulse `mitigation_trigger`.
3. Answer the stream requests.
4. From then on, read while `target_valid` is high and pulse `enc_done`
   after each encryption.

After every `PR_RATE` encryptions, `target_valid` drops for the length of one
reload, about 2·`WORDS` cycles, and the source must stream the same words
again.

Parameters with their defaults:

| parameter | default | origin |
|---|---|---|
| `MTD_MODE` | `MTD_REG_SEQUENCE` | the form used to protect AES |
| `WORDS` | 4 | four registers R0..R3 in the reference drawing |
| `WORD_W` | 8 | **own choice**: one key-share byte per register |
| `N_SLICES` | 4 | four copies in the reference drawing |
| `PR_RATE` | 16 | rate of the reported experiments |

For the bit-level scrambling of a whole 128-bit key, set `WORDS = 128` and
`WORD_W = 1`. That case is exercised by `tb_randohm_key128`.

## What this is, and what it is not

The original defence works mainly through **partial reconfiguration**. An
offline vendor flow produces an original bitstream and a partial one. At run
time, a processor seeded by a TRNG uses an open-source bitstream manipulator
to rewrite the flip-flop placement (LOC constraints) and the flip-flop
renaming inside the target slice. The result is loaded through the FPGA's
internal configuration port, the ICAP, at about 74 cycles per configurable
logic block (CLB). None of that is logic that RTL can express. It consists of
software, a vendor tool flow and a configuration primitive, and it is not
included. What is included is the in-fabric equivalent the source also
proposes: the two real-time multiplexers. The source gives their block
structure in two small diagrams. The TRNG and the masked AES core are taken
from elsewhere and are not part of this RTL.

Read the defence's security with this in mind. In the reconfiguration scheme
the *routing* itself changes. Here the registers are fixed and only which of
them holds which word changes. That gives the impedance randomisation the
source measures for its register sequence multiplexer only if the registers
are placed as intended, one flip-flop per secret bit in distinct sites.
Synthesis tools may merge or move them. The LFSR is a pseudo-random expander
of one TRNG seed, not a cryptographic generator.

Choices made here, where the source is silent:

- LFSR width, polynomial, the 16-state leap and the zero-seed rule.
- The Fisher-Yates shuffle and its timing.
- The valid/ready stream handshake and the `loaded`/`target_valid` flag.
- The word width, and reset values of zero.
- In the slice form: the shift direction and the OR combining.
- In the rate controller: the external request and the holding while busy.

A labelling detail in the reference drawing of the register sequence
multiplexer (3-bit codes printed beside the decoder outputs) has no
explanation and is not used.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
          +libext+.sv rtl/randohm_pkg.sv tb/tb_randohm_full.sv --top-module tb_randohm_full
./obj_dir/Vtb_randohm_full
```

| testbench | what it shows |
|---|---|
| `tb_mtd_lfsr` | the states match a bit-level polynomial model; the period is 65535; zero seed |
| `tb_onehot_decoder` | all inputs, enable low and high |
| `tb_reg_seq_mux` | 400 reloads: each load order is a permutation; read-back is in order; latency 2·N; all 24 orders occur; the same seed repeats the sequence |
| `tb_slice_mux` | copies cleared on trigger; exactly one copy holds the data; latency `DEPTH`; every slice is used |
| `tb_pr_rate_ctrl` | 20000 random cycles against a reference model of the rate, external and held requests |
| `tb_randohm_top` | both modes end to end. The cipher model checks every word read, exactly 16 encryptions per rate reload, external and held requests, stream gaps, and that the arrangement changes |
| `tb_randohm_full` | the default top with no overrides, 400 encryptions |
| `tb_randohm_key128` | 128 one-bit registers at PR rate 1: the whole key moves after every encryption and reads back correctly |

`randohm_env` in `tb/` holds the cipher, source and TRNG models that the two
end-to-end testbenches share.
