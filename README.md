# Token-clocked GALS pipeline for LUT-based FPGAs

A globally asynchronous, locally synchronous (GALS) system splits a design into
ordinary synchronous blocks, each with its own clock, and lets asynchronous
handshakes coordinate them. On a commercial FPGA the usual asynchronous control
circuits map badly onto look-up tables. This design uses a cheaper scheme. Each
block's clock is made by one AND gate, a few XOR/XNOR gates and a few T
flip-flops. The handshakes are two-phase parity signals with "bundled data":
each word travels with a signal delayed enough for the word to arrive first.

The RTL here implements that scheme: the rendezvous module that makes a block's
clock, both kinds of link it controls, and a small pipeline that uses every
configuration of the module. It follows J. D. Garcia-Lasheras, "Efficient
implementation of GALS systems over commercial synchronous FPGAs: a new
approach". That paper describes the circuit and gives resource counts and lab
measurements. It gives no data paths, no delay values and no source code. Every
choice made here beyond the paper is named below and in the header comment of
the file concerned.

## The idea: tokens as parities

The system is cut into *autonomous processing blocks*. Each block is a
registered logic function: a register and the combinational logic that computes
its next value from its own value and from other blocks' registers. Each block
has a *rendezvous module* (`gprm`, "general purpose rendezvous module"). It
decides when the register is clocked.

Blocks are joined by *links*. Each link holds exactly one **token**, and the
token's position means something:

| link kind      | token at this block means                                           |
|----------------|---------------------------------------------------------------------|
| input link     | a new input word has arrived and can be used                         |
| output link    | the consumer has used the last word and wants a new one              |
| closed loop    | the value just registered has passed through the block's own logic  |

A block fires (makes one clock pulse) when **all** its tokens are present. On
that pulse it loads its register and sends away some of its tokens:

- sending an output token hands the new word to the consumer;
- sending an input token back asks the producer for the next word;
- sending the loop token makes one more local clock cycle.

The choice is made by *flow control logic* (FCL). The FCL is ordinary
combinational logic with the same inputs as the block's logic function. The
block must send at least one token on every pulse. If it did not, all tokens
would stay present and the clock would stay high.

### How a link is built

A link is not a wire that carries a token. It is a **parity**:

- Each side of the link has one T flip-flop per channel that leaves it.
- Each channel reaches the other side through a delay element (`delay_unit`).
- One side computes the XOR of all channel parities it sees: its own
  flip-flops, taken directly, and the other side's flip-flops, taken after
  their delays. The other side computes the XNOR of the same kind of set.
- A 1 out of the gate means "the token is here".

All flip-flops start at 0, so at reset the token is on the XNOR side. Toggling
one of your flip-flops flips your own gate at once (the token leaves). After the
channel delay it flips the other side's gate (the token arrives there). Only
changes matter, never levels, so the link works whatever values the flip-flops
have at any time.

A closed-loop link works the same way with one side only. It uses an XNOR over
the block's own loop flip-flops and their delayed copies. Toggling one takes
the loop token away for exactly that channel's delay. That delay is the length
of one local clock cycle.

The block clock is `run & (&token)`. Its rising edge clocks both the data
register and the T flip-flops. The flip-flops that toggle take their tokens
away, so the AND falls again right after the edge. The pulse is only as wide
as the flip-flop and gate delays. `run` forces the AND to 0. The paper requires
such a signal for blocks that hold every token at start-up. Here every block
has one, and `run` also serves as a global hold.

### Channels and delay selection

A link may have several channels in one direction, each with a different delay.
The FCL sends the token on exactly one of them, and so chooses how long the
transfer (or the local clock cycle) takes. A receiving side just XORs all
channels together. Two uses are built here:

- **Spread spectrum.** One link picks one of two forward delays from a
  pseudo-random bit each word (`fcl_lfsr`). This spreads the timing of
  transfers, and with it the spectrum of the interference the chip emits.
- **Cycle-length selection.** The sequential block's closed loop has a fast
  and a slow channel, chosen by the `slow` input. That input stands in for an
  on-chip temperature or supply monitor, which is not part of this RTL.

### Timing rules the user must keep

1. **Forward delay > data path.** Sending an output token hands over the
   register value, so each forward channel's delay must exceed the worst-case
   path from the producer's register to the consumer's register.
2. **Loop delay > logic loop.** Each closed-loop channel's delay must exceed the
   worst-case path through the block's own logic, from its register back to
   itself.
3. **Backward delays have no lower bound.** They only carry the request for a
   new word.
4. **One channel per link per pulse.** Two toggles on one link would cancel.
   `gprm` asserts this.

In simulation, data paths have zero delay, so rules 1 and 2 always hold. On an
FPGA they are set by the placement of the delay elements. The paper builds its
delay elements as chains of latches.

## Files

| file                | what it is |
|---------------------|------------|
| `rtl/gals_pkg.sv`   | `data_t`, the 8-bit word carried between blocks |
| `rtl/tff.sv`        | T flip-flop, one per channel; asynchronous reset to 0 |
| `rtl/delay_unit.sv` | behavioural channel delay: `STAGES` stages of `STAGE_PS` ps |
| `rtl/comm_link.sv`  | behavioural: the delays of a communication link, `N_FWD` forward and `N_BWD` backward channels |
| `rtl/loop_link.sv`  | behavioural: the delays of a closed-loop link |
| `rtl/gprm.sv`       | rendezvous module: T flip-flops, XOR/XNOR per link, clock AND |
| `rtl/fcl_lfsr.sv`   | 8-bit LFSR channel selector for the spread-spectrum link |
| `rtl/pipe_stage.sv` | pipeline stage block (1 in, 1 out; optional two-channel output) |
| `rtl/pipe_fork.sv`  | fork block (1 in, 2 out) |
| `rtl/pipe_join.sv`  | join block (2 in, 1 out) |
| `rtl/seq_stage.sv`  | sequential-machine block with a closed loop of one or two channels |
| `rtl/gals_pipeline.sv` | top: a pipeline of all of the above |
| `tb/*_tb.sv`        | a self-checking testbench per module, plus `deep_fifo_tb` and `ring_tb` |

### `gprm` parameters

`gprm` is generic. Its links are numbered 0 to `N_LINKS-1`. For link `l`:

- `OWN_CH[l]` is the number of channels that leave this side (packed 8-bit
  fields, link 0 in the low byte).
- `PEER_CH[l]` is the number of channels that arrive from the other side. For a
  closed loop, these are the block's own loop channels after their delays.
- `XNOR_SIDE[l]` selects XNOR (1) or XOR (0). Put the XNOR side wherever the
  token must be at reset: the producer end of a data link, so that pipelines
  start empty, and always the closed loop.

The vectors `toggle` (input), `own_q` (output) and `peer_q` (input) are
flattened: links in order, and the channels of one link next to each other.

`SINGLE_TFF=1` selects the minimal form. Some blocks send every token on every
pulse (plain stage, fork, join), so all their flip-flops would toggle together.
One flip-flop can then drive every own channel. The flip-flop's output is both
the acknowledge to the producer and the request to the consumer. This form
needs one channel per own link, and all `toggle` bits at 1 (asserted).

The resource table of the paper lists these configurations. The design uses
all of them, with the same flip-flop counts:

| configuration                      | module                    | T flip-flops |
|------------------------------------|---------------------------|--------------|
| pipeline stage                     | `pipe_stage` (`OUT_CH=1`) | 1 |
| stage, two-channel output          | `pipe_stage` (`OUT_CH=2`) | 3 |
| join 2 to 1                        | `pipe_join`               | 1 |
| fork 1 to 2                        | `pipe_fork`               | 1 |
| sequential machine, 1-channel loop | `seq_stage` (`LOOP_CH=1`) | 3 |
| sequential machine, 2-channel loop | `seq_stage` (`LOOP_CH=2`) | 4 |

## The top: `gals_pipeline`

```
in --> DEPTH x pipe_stage (+1) --> pipe_stage, 2-channel pseudo-random output (+1)
   --> pipe_fork --+--> seq_stage (x ITER by ITER clock pulses) --+--> pipe_join (a+b) --> out
                   +--> pipe_stage (+1) ---------------------------+
```

For an input word `x`, the output is `ITER*(x+DEPTH+1) + (x+DEPTH+2)` mod 256.
The logic functions (add 1, multiply by repeated addition, sum) were chosen here
so that results can be checked. The paper leaves the logic to the application.

The sequential block shows the **clock burst**. When a word arrives it fires
once, then keeps its input and output tokens and sends only the loop token.
Each return of the loop token gives another pulse. On pulse `ITER` it returns
the input token and sends the result forward. The burst's cycle time is the
delay of the loop channel in use: `LOOP_PS[0]` (1000 ps) or, with `slow=1`,
`LOOP_PS[1]` (2000 ps).

### Ports and protocol at the two ends

Both ends are links, the same as between blocks.

- **Input.** The pipeline's first stage is the XOR side. To send a word, wait
  until `in_ack == in_req`, which means the token is at the producer. Then put
  the word on `in_data` and, *after the bundling delay*, toggle `in_req`. The
  pipeline toggles `in_ack` when it has taken the word.
- **Output.** The join is the XNOR side. A new word is on `out_data` when
  `out_req` differs from the `out_ack` value you last drove. Read the word,
  then toggle `out_ack` to give the token back.
- **Control.** `rst` (active high, asynchronous) clears every flip-flop and
  register. `run` must be high for any block to clock. `slow` selects the long
  loop delay.
- **Start-up.** Hold `rst` high and `run` low for longer than the longest
  channel delay. At power-up a flip-flop may hold 1; resetting it sends a
  parity change down its channel. That change must leave the delay line before
  `run` rises, or it arrives later as a false token. The testbenches hold
  reset for 10 ns, against a longest delay of 2 ns.

### Parameters (all defaults are this design's choice; the paper gives no sizes or delays)

| parameter   | default        | meaning |
|-------------|----------------|---------|
| `DEPTH`     | 4              | plain stages before the spread-spectrum stage |
| `ITER`      | 4              | pulses per word in the sequential block |
| `STAGE_PS`  | 250            | delay of one delay-element stage |
| `FWD_PS`    | 1000           | forward channel delay of the plain links |
| `BWD_PS`    | 500            | backward channel delay |
| `SPREAD_PS` | {1500, 1000}   | channel 1 / channel 0 of the spread-spectrum link |
| `LOOP_PS`   | {2000, 1000}   | slow / fast closed-loop channel |

Delays must be multiples of `STAGE_PS`. The data word width is `DATA_W` in
`gals_pkg` (8).

## Simulating

The delays are modelled with `#` delays. Build with timing enabled and a
picosecond time precision (every file sets `` `timescale 1ps/1ps ``):

```
verilator --binary --timing --assert -Irtl -Itb rtl/gals_pkg.sv tb/gals_pipeline_tb.sv \
          --top-module gals_pipeline_tb -Wno-fatal
./obj_dir/Vgals_pipeline_tb
```

Substitute any `tb/<module>_tb.sv` to test one module. Each testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog for deadlock.

Two more testbenches build the two kinds of pipeline the scheme was measured
on:

- **`deep_fifo_tb`: a 32-stage FIFO.** Every link has forward delay F = 1000 ps
  and backward delay B = 500 ps. An empty stage fires the instant a word
  arrives, so the first word needs (32+1)·F from producer to consumer. In
  steady state a stage fires again when two things have happened: its output
  token is back (F + B after it fired) and its next word has arrived (B + F).
  So words leave every F + B = 1500 ps. The testbench checks both figures
  exactly.
- **`ring_tb`: a ring of 8 stages with one word in it.** The link into stage 0
  starts full: stage 0 has `IN_TOKEN=1`, the last stage `OUT_TOKEN=0`. So
  stage 0 holds all its tokens at reset, and only `run` stops it from firing.
  The testbench checks three things: nothing fires before `run` rises; stage 0
  fires at that very instant; and each lap takes exactly 8·F.

`gals_pipeline_tb` runs the top at its default parameters. It sends 200 random
words and lets the consumer pause at random, sometimes for long. Besides
checking every word, it checks that each mechanism happened:

- back-pressure reached the join;
- the producer had to wait for its token;
- both spread-spectrum channels were used, with one toggle per word;
- every word got exactly `ITER` sequential pulses and `ITER-1` loop tokens;
- burst cycles were exactly 1000 ps or 2000 ps, matching `slow`;
- no block pulsed while `run` was low.

It finishes in well under a second.

The unit testbenches check:

- the delay element against exact timing;
- the rendezvous module against a model of its gates under random stimulus;
- the LFSR against an independent model, including its 255-step period;
- each processing block against a producer/consumer model of the link protocol.

## How far to trust it, and where it departs from the paper

- **What follows the paper:** the parity link (T flip-flops, XOR on one side,
  XNOR on the other, token starting at the XNOR side, loop link with XNOR
  only); the AND clock with an external force-to-zero; the meaning of the
  tokens for input, output and loop links; the FCL sending tokens and choosing
  channels; the clock burst through the closed loop; one pseudo-randomly
  switched two-channel link for spread spectrum; the set of block
  configurations.
- **What is this design's own:**
  - the data width;
  - every delay value;
  - the logic functions;
  - the pipeline's shape;
  - the LFSR polynomial and seed;
  - the reset signal and its polarity;
  - the `slow` input in place of an environment sensor;
  - the `IN_TOKEN` / `OUT_TOKEN` options of `pipe_stage`, which choose where a
    link's token starts;
  - the assertions.
- **Delays are behavioural.** `delay_unit`, `comm_link` and `loop_link` are
  timing models, not synthesizable circuits. On an FPGA they become placed
  latch or LUT chains whose delay the designer has to constrain. Synthesis
  ignores the `#` delays, so a synthesized netlist of the top is only correct
  once real delay elements are put in their place. Each model stage is an
  inertial delay: it filters pulses shorter than `STAGE_PS`. Two toggles of
  one channel are always at least a token round trip apart, so this never
  loses a token.
- **Generated clocks.** Each block's clock is combinational logic driven from
  flip-flops that the same clock drives. This is how the scheme works, and the
  simulator handles it (the pulse has zero width in zero-delay simulation). On
  an FPGA, timing analysis has to be told about these clocks. The paper
  suggests a clock buffer when fan-out is high. None is instantiated here,
  because it is a vendor primitive.
- **Not modelled:** the physical speed of a given FPGA family, and the way
  delays stretch with temperature or supply voltage. The paper measured both
  on real devices; an RTL simulation with fixed delays cannot show them.
