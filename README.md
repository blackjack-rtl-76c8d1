# BlackJack: a hardware loop shuffler for side-channel-resistant inference

Power and electromagnetic side-channel attacks recover the weights of a
neural network running on a microcontroller by averaging many traces in
which the same multiply-accumulate happens at the same moment. If every
inference visits the weights (and the neurons, and the convolution
positions) in a fresh random order, the traces no longer line up and the
attack needs a number of traces that grows factorially with the loop size.

Shuffling in software needs a random permutation per loop (Fisher-Yates),
and that requires `rand() % (i+1)`. On a core without a divider the
modulus runs as a data-dependent shift-and-subtract routine, which itself
leaks the random values through timing and power, and the permutation
roughly doubles the run time of a network.

This RTL implements the hardware alternative: a small functional unit
inside the CPU that hands out loop indices in a random, repeat-free order.
It never builds a permutation list and never divides. Software loads a bank
once per layer and then reads each loop index with one single-cycle
instruction.

## The idea: bins instead of a permutation

The iteration range `[0, N)` of a loop is cut into `k` contiguous bins of
`a = ceil(N/k)` iterations each (the last bin may be shorter). Each bin is
a counter that starts at its first iteration and stops at its last one. To
produce the next index:

1. `log2(k)` random bits name a bin directly. `k` is a power of two, so no
   modulus is needed.
2. If that bin is used up, the closest bin that still has iterations is
   taken instead, in the same cycle.
3. The bin's counter value is the next index, and the counter is
   incremented. When it passes its last iteration, the bin is disabled.

Every index comes out exactly once per pass. Within a bin the indices come
out in ascending order, so the randomness is in how the bins interleave.
The number of distinct orders is the multinomial coefficient

    P = N! / ((a!)^(k-1) * b!),   b = N - (k-1)a   (b = a when k divides N)

With one bin there is only the original order (`k = 1`). With `k = N` all
`N!` orders are possible. With the default `k = 16`, a 64-iteration loop
already has about 10^67 orders. The published example, `N = 10` in two bins
(0-4 and 5-9), has 252 orders.

## One bank

```
            trng_bits (log2 K)
                 |
           +-----v-----+  grant   +-------------------------+
 allow[K] ->|    rra    |--------->| sel                     |
           +-----------+          | current count set (K)  |--cur[sel]--+--> next iteration reg --> SHFL_GNI
                 ^                | max count set (K)      |--max[sel]--|
                 | disallow       +-------------------------+            |
           +-----+-----+    write back cur+1                             |
           |    cai    |<--------------------------------------------cur/max
           +-----------+
 SHFL_LD (reg, set, value) --> write port of the current or max set (wins over cai)
```

Each bank (`shuffle_bank`) holds:

- **Current count set** (`count_reg_set`, K x 10 bits): the next index of
  each bin.
- **Max count set** (`count_reg_set`, K x 10 bits): the last index of each
  bin, inclusive.
- **Allow bits** (K): 1 while a bin has indices left. They are the
  arbiter's state.
- **Round-robin arbiter** (`rra`), combinational. It grants the randomly
  picked bin if it is allowed. Otherwise it grants the first allowed bin
  found searching upward from the pick, with wrap-around.
- **Compare-and-increment** (`cai`), combinational. It compares the chosen
  bin's current count with its max count. Below the max, it writes back
  current + 1. At the max, it clears the bin's allow bit ("disallow").
- **Next iteration register** (`next_iter_reg`): the chosen index, with a
  valid flag. A `SHFL_GNI` reads it combinationally.
- **Sequencer** (`bank_ctrl`): runs the three steps of a choice.

### Timing of a choice

A choice always takes three cycles, whatever the data. A choice starts in
the same cycle as the `SHFL_GNI` that empties the register, or in the cycle
after the last `SHFL_LD` to the bank.

| cycle | step                                                    |
|-------|---------------------------------------------------------|
| 1     | sample the TRNG bits                                    |
| 2     | arbiter grant captured (redirect if the bin is used up) |
| 3     | bin value into next iteration register; cai increments or disallows |
| 4     | the value can be read by `SHFL_GNI`, which completes in that cycle |

Shuffled loop bodies spend at least seven cycles between reads (index
arithmetic, two loads, multiply, add). So in steady state a read always
finds a value waiting, and `SHFL_GNI` costs one cycle. If a read comes
early, for example right after a load, the unit raises `stall` and the core
holds the instruction until the value is there. The time taken never
depends on the values being shuffled: no path has a data-dependent length.

### Re-arming and reloading

The library loads each bank once per layer. An inner loop's bank, however,
is read N times for every outer iteration. When the last allowed bin is
used up, the bank therefore re-arms itself in the same cycle:

- every bin loaded since the last reload is allowed again;
- its current count is restored to its first index. That is 0 for bin 0,
  and `max[r-1] + 1` for bin `r`, because bins are contiguous and ascending.

The next pass then starts with a new random order. No extra register set is
needed for this.

Loading follows these rules. They are this design's own, and
`bj_cpu_model.load_bank` follows them:

- Writing a bin's current count clears its allow bit. Writing its max count
  sets it. So load the current count first, then the max count.
- Writing current count register 0 clears every allow bit of the bank.
  Loading bin 0 first therefore discards bins left over from an earlier,
  larger loop.
- Any `SHFL_LD` to a bank empties its next iteration register and restarts
  its sequencer. A bank is never read while half loaded.

## The unit and its instructions

`blackjack` holds four banks. That allows four nested shuffled loops:

- fully connected layers use two (neurons, weights);
- convolutions use four (output channel, row, column, input channel);
- 2x2 max pooling uses three (channel, row, column).

A decoder and the bank multiplexers steer each instruction to its bank. All
banks share one stream of `log2(K)` TRNG bits, and a bank samples it only in
the first cycle of a choice. At 24 MHz, one choice every three cycles needs
32 Mbit/s of randomness.

Both instructions are 32-bit words:

| bits    | SHFL_LD                              | SHFL_GNI            |
|---------|--------------------------------------|---------------------|
| 31:28   | condition `1110`                     | condition `1110`    |
| 27:20   | opcode `0011_0000`                   | opcode `0011_0000`  |
| 19:18   | bank                                 | bank                |
| 17      | set: 0 current count, 1 max count    | unused              |
| 16:10   | register (bin) select                | unused              |
| 9:0     | value                                | 3:0 = Rd            |

The two encodings carry the same condition and opcode. The core's decoder
therefore tells the unit which one it issued, through `instr_is_gni`.
Words whose condition or opcode do not match are ignored. A `SHFL_LD` that
selects a register beyond K is ignored and flagged on `ld_ignored`.

Software use, for a fully connected layer:

```
load_bank(BANK0, M);                 // 2 SHFL_LD per bin, once per layer
load_bank(BANK1, N);
for (i = 0; i < M; i++) {
    r_i = get_next_iteration(BANK0); // one SHFL_GNI
    for (j = 0; j < N; j++) {
        r_j = get_next_iteration(BANK1);
        sum[r_i] += input[r_j] * weight[r_i][r_j];
    }
    output[r_i] = act(sum[r_i] + bias[r_i]);
}
```

`load_bank(bank, n)` writes, for bin `r = 0, 1, ...`, the first index
`r*a` to the current count set and the last index `min((r+1)a, n) - 1` to
the max count set, with `a = ceil(n/16)`. It skips empty bins. A loop of n
iterations needs at most 32 `SHFL_LD` instructions, however large n is.

### Top-level ports

| port                                   | dir | meaning |
|----------------------------------------|-----|---------|
| `clk`, `rst_n`                         | in  | clock, asynchronous active-low reset |
| `instr_valid`, `instr_is_gni`, `instr` | in  | shuffler instruction issued by the core |
| `stall`                                | out | `SHFL_GNI` must be held: no value ready |
| `rf_we`, `rf_waddr`, `rf_wdata`        | out | register-file write of the `SHFL_GNI` result, same cycle, zero-extended |
| `trng_bits`                            | in  | `log2(K)` random bits per cycle from the TRNG |
| `ld_ignored`                           | out | `SHFL_LD` register select out of range |
| `bank_armed`                           | out | per bank: a range is loaded |

## Sizes, and what fits

Parameters (defaults are the published configuration): `K = 16` registers
per set, `NUM_BANKS = 4`, `VAL_W = 10` bits per register. Per bank this
is 2 x 16 x 10 count bits, plus allow and state bits. The whole unit has
about 1,500 flip-flops.

The count registers hold absolute loop indices. A 10-bit register (and the
10-bit value field of `SHFL_LD`) therefore limits a loop to 1024
iterations. The published text also states that 10-bit registers support
16,384 iterations (16 x 1024). That figure cannot be reached by the
absolute-index scheme the published example describes, and the RTL follows
the example. Against the evaluated networks:

| network     | loop sizes                    | fits |
|-------------|-------------------------------|------|
| mnist-mlp   | 768, 128, 10                  | yes  |
| kws-mlp     | 250, 144, 10                  | yes  |
| mnist-cnn   | <= 150                        | yes  |
| ecg-ae      | 128, 1024, 140                | yes (1024 is the limit) |
| har-cnn     | 5632 (first FC layer)         | no   |
| gesture-cnn | 5760 (first FC layer)         | no   |
| seizure-svm | 2854                          | no   |

Widening `VAL_W` and the `SHFL_LD` value field would lift the limit. That
is a change of the instruction format, not a parameter change.

## Departures from the published design, and choices made here

Follows the published design:

- the bin scheme;
- current and max count register sets, allow bits, combinational
  round-robin arbiter, compare-and-increment with disallow;
- the next iteration register with a one-cycle read, and the three-cycle
  choice;
- 16 bins, 4 banks, 10-bit registers;
- the instruction fields.

This design's own choices:

- **Re-arm in hardware** and its start values (`max[r-1] + 1`). The
  published library loads a bank once per layer, but an inner loop is read
  many times per layer, so the bank has to restart by itself.
- **Load rules** (allow bits set by max writes, bin 0 write clears the
  bank, any load restarts the sequencer).
- **Arbiter search direction**: "closest allowed bin" is taken as the next
  one upward with wrap-around.
- **Split of the three cycles** into TRNG sample, grant and update.
- **Separate `instr_is_gni` input**, because the two encodings are
  identical in their fixed bits.
- **Stall handshake** when a value is not ready, and zero-extension of the
  result to 32 bits.
- **Register-select range check** (`ld_ignored`).
- **Shared TRNG stream.** Two banks that start a choice in the same cycle
  see the same bits. The published use never reads two banks in the same
  cycle.

Not included:

- the TRNG itself (an analog entropy source, here an input port);
- the CPU core (its side of the interface is the top's ports).

## Files

- `rtl/blackjack_pkg.sv`: sizes, instruction constants, `set_e`,
  `shfl_op_e`, `shfl_instr_t`, and the `enc_ld` / `enc_gni` encoders.
- `rtl/rra.sv`, `rtl/count_reg_set.sv`, `rtl/cai.sv`,
  `rtl/next_iter_reg.sv`, `rtl/bank_ctrl.sv`: the parts of a bank.
- `rtl/shuffle_bank.sv`: one bank.
- `rtl/shfl_decoder.sv`: instruction fields.
- `rtl/blackjack.sv`: the top level.
- `tb/*_tb.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M`.
- `tb/bj_cpu_model.sv`: behavioural core and `load_bank` /
  `get_next_iteration` library, used by the top-level testbenches.
- `tb/blackjack_tb.sv`: end to end at default size. It runs:
  - the 10/2 example;
  - the mnist-mlp network, 768 -> 128 -> 10, computed with shuffled indices
    and compared with plain-order results;
  - a 3x3 convolution on 28x28 with four banks;
  - a 2x2 max pool with three banks;
  - stall, ignored-load and wrong-condition cases.

  It counts arbiter redirects, disallows, re-arms, stalls and the use of
  every bank.
- `tb/blackjack_workloads_tb.sv`: the loop nests of every evaluated layer
  that fits (about 1.4 million reads). It checks that each index tuple is
  visited exactly once.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/blackjack_pkg.sv \
    tb/blackjack_tb.sv --top-module blackjack_tb -Mdir obj_bj
./obj_bj/Vblackjack_tb
```

Replace `blackjack_tb` by any other testbench name. The block testbenches
finish in well under a second. `blackjack_tb` takes a few seconds, and
`blackjack_workloads_tb` about 15 s. Lint with
`verilator --lint-only -Wall -Irtl rtl/blackjack_pkg.sv rtl/blackjack.sv`.

Assertions in the RTL check three rules:

- the next iteration register is never overwritten while unread;
- the arbiter always finds a bin when a choice is under way;
- the bin handed out is still allowed.

## How far to trust it

Every module has a testbench that compares its outputs with an independent
reference. Each testbench was also shown to fail against a deliberately
broken copy of its module. The top-level tests check permutation
correctness, per-bin ordering, the three-cycle latency and the single-cycle
read. They also check that orders differ between passes and that shuffled
layers compute the same results as unshuffled ones.

Not verified:

- the statistical quality of the orders. Bins are chosen uniformly while
  all are allowed. Once bins run out, the redirect favours the bin above
  an exhausted one. The same happens when a loop loads fewer than K bins
  (any loop shorter than 16 iterations). Then every pick of an unloaded
  register is redirected to bin 0, so bin 0 tends to come first. Every
  order is still a permutation;
- side-channel properties (no power or glitch analysis);
- timing closure.
