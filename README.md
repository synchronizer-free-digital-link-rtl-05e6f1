# A synchronizer-free link between two clock domains

This is a small producer-consumer link that moves one data word per clock cycle
from a sender clock domain to a receiver clock domain. It has no
synchronizers, no handshake and no full or empty stall. Instead, each side
has its own tunable oscillator. The oscillator has two speeds, slow and fast.
A tiny controller keeps the two clocks close in phase by choosing, once per
receiver cycle, which side runs fast and which runs slow. The buffer between
the sides can then be as small as two cells. The latency is at most two
clock periods and the throughput is one word per cycle. The controller may go
metastable; that is part of the design. Its output drives only the
oscillators' speed, never the data path. So a metastable decision can only
make a clock run somewhere between its slow and fast rate for a while. It
cannot corrupt, drop or duplicate a word.

The RTL here implements the digital part of the link in SystemVerilog. It
also has a behavioural model of the two-speed oscillators, so the whole
closed loop can be simulated.

## The link in one picture

```
            wr_data                                   rd_data
   SND ────────────────►  BUFF (N cells)  ────────────────► RCV
  (snd_addr)   e_snd  ┌──────────────────┐   e_rcv   (rcv_port)
      ▲               │ data[0] flag F0  │              ▲   │ addr_rcv
      │ clk_snd       │ data[1] flag F1  │     clk_rcv  │   ▼
      │               │  ...             │──F[]──►  CTRL (ffs)
  Osc_snd ◄── md_snd ─┴──────────────────┴── md_rcv ──► Osc_rcv
              (= not md_rcv)                            (also clocks CTRL)
```

* **Sender (SND)**: on every rising edge of `clk_snd` it writes `wr_data`
  into the cell its write pointer names. The pointer then advances modulo N
  on the falling edge.
* **Receiver (RCV)**: on every rising edge of `clk_rcv` it reads the cell its
  read pointer names into `rd_data`. The pointer then advances on the
  falling edge.
* **Ring buffer (BUFF)**: N cells, N even. Each cell has a data register and
  a full/empty flag. The flag is set by a write and cleared by a read.
* **Controller (CTRL)**: one flip-flop and a multiplexer, clocked by
  `clk_rcv`. It drives the two mode bits.
* **Oscillators**: `md = 0` selects slow, `md = 1` selects fast.

The read pointer starts at cell 0 and the write pointer at cell N/2. Cells
0 … N/2−1 start full and the rest start empty. If both clocks ran at exactly
the same rate, the writer would stay exactly half a ring ahead of the reader
and the buffer would stay half full. The whole design exists to keep the two
pointers near that position and never let them meet.

## Why no pointer ever overtakes the other

Write the phase difference as `c_s − c_r`: sender clock ticks minus receiver
clock ticks. The fill level is then `N/2 + c_s − c_r`. The control rule is a
two-sided threshold. If the sender is ahead by at least a threshold T,
slow it down and speed the receiver up. If it is behind by at least T, do
the opposite. Anywhere in between, either choice is allowed, including
"undecided". Two oscillator properties make this safe:

1. A slow clock is never faster than a fast clock. With a ±r frequency error
   on both, this needs `s·(1+r) ≤ f·(1−r)`.
2. Whatever the mode input does, even when it is metastable, the frequency
   stays between the slowest slow rate and the fastest fast rate. It reaches
   the selected band within a response time T_osc once the input has been
   stable. Starved-inverter ring oscillators behave this way.

With these properties, once the offset passes T it can grow for at most
`T_ctr + T_osc`: first the controller reacts, then the oscillators settle.
During that time it grows at most at rate `f⁺ − s⁻`. After that the
offset shrinks. The offset therefore stays below
`T + (f⁺ − s⁻)(T_osc + T_ctr)`. The pointers never get closer than the
read and write access times allow if

```
Δ = ⌈ (f⁺ − s⁻)(T_osc + 1/s⁻ + τ_max) + f⁺·max(τ_s, τ_r) + max(δ, f⁺·τ_s/2) ⌉
N ≥ 2Δ
```

Here τ_s and τ_r are the write and read access windows, τ_max is the
controller's propagation delay, and δ is the allowed start-up offset between
the clocks, at most one cycle. The published 65 nm implementation has
oscillators of about 2.0 and 2.3 GHz and gives Δ = 1, so **N = 2**. That is
the default here. With N = 2 the worst-case latency is N/s⁻ = 1 ns and the
guaranteed throughput is s⁻ = 2 words/ns.

This is a timing argument about the physical circuit. RTL cannot show it. The
RTL gives the logic that the argument is about, and the testbenches check
the consequences in a simple timing model (see *Verification*).

## The full/empty cell (`buffer_cell`)

A flag that one clock domain sets and another clears cannot be a single
flip-flop. Here each domain owns one enable flip-flop, and the flag is their
XOR:

* a **write** (`e_snd` at a rising edge of `clk_snd`) loads the sender
  flip-flop with the inverse of the receiver flip-flop. The two then differ
  and the flag is 1.
* a **read** (`e_rcv` at a rising edge of `clk_rcv`) loads the receiver
  flip-flop with the sender flip-flop. The two are then equal and the flag
  is 0.

Each flip-flop samples the other domain's flip-flop. That sample is safe
only because the control loop guarantees that the other side last touched
this cell long ago. The flag output, by contrast, is sampled by the
controller at arbitrary moments and may be caught in transition. The
flag is 1 ("valid") between a write and the next read. A reset puts the
sender flip-flop at `INIT` and the receiver flip-flop at 0.

## The controller (`ctrl`)

The controller must learn whether the sender is ahead of or behind its
nominal position, half a ring ahead of the reader. At each rising edge of
`clk_rcv` the receiver reads cell ℓ. At that moment the controller samples the
flag of the **opposite** cell, (ℓ + N/2) mod N, into its flip-flop `ffs`:

* If the sender is ahead, it has already written that cell. The flag reads
  1, so `md_rcv = 1`: the receiver runs fast and the sender slow.
* If the sender is behind, it has not written that cell yet. The flag reads
  0, so `md_rcv = 0`: the sender runs fast and the receiver slow.
* If they are almost exactly in step, the sender is writing that cell right
  now. `ffs` may go metastable, and neither oscillator has a firm mode for a
  moment. This is allowed.

`md_snd` is the inverse of `md_rcv`. The multiplexer select is the receiver
address. It changes on the falling edge of `clk_rcv`, so it is settled half a
cycle before `ffs` samples. In steady state both mode bits toggle about every
other cycle. The two clocks then average a rate between their slow and fast
values, with their rising edges close together and the writer one cell ahead.

`ctrl` has two variants, chosen by the parameter `USE_RCV_ADDR`:

* `USE_RCV_ADDR = 1` (default; also a parameter of `link_core` and
  `sync_free_link`): the select is derived
  from the receiver's read pointer `rcv_addr`. For N = 2 this means input 1
  of the multiplexer gets F0 and input 0 gets F1.
* `USE_RCV_ADDR = 0`: the controller keeps its own sample-address counter
  `ffa` on the inverted receiver clock. It starts at N/2, opposite the reader.
  This is the stand-alone form of the controller, which the default variant
  optimises by sharing the receiver's counter.

## The oscillators (`tunable_osc`, behavioural)

The real oscillators are analog starved-inverter rings. The model only
reproduces their behaviour at the ports:

| parameter        | default | meaning |
|------------------|---------|---------|
| `SLOW_PERIOD_PS` | 500     | period for `md = 0` (2.0 GHz) |
| `FAST_PERIOD_PS` | 435     | period for `md = 1` (≈2.3 GHz) |
| `JITTER_PS`      | 10      | each half period is drawn uniformly from [P/2, (P+JITTER)/2] |
| `TOSC_PS`        | 100     | delay from a change of `md` to the change of speed |

The clock is held low while `en` is low. The first rising edge comes half a
period after `en` rises. Keep `FAST_PERIOD_PS + JITTER_PS ≤ SLOW_PERIOD_PS`,
so that a slow clock is never faster than a fast one. `TOSC_PS` and
`JITTER_PS` are assumed values; the 2.0/2.3 GHz operating point is the
published one. A two-state simulator cannot show a metastable `md`, so the
"unlocked" state of the real oscillator appears only as the `TOSC_PS`
transition delay.

## Clocking and timing of the RTL

| event | what happens |
|---|---|
| rising `clk_snd` | cell `snd_addr` takes `wr_data`; its flag goes to 1 |
| falling `clk_snd` | `snd_addr` advances (mod N) |
| rising `clk_rcv` | cell `rcv_addr` goes into `rd_data`; its flag goes to 0; `ffs` samples the flag of cell `rcv_addr + N/2` |
| falling `clk_rcv` | `rcv_addr` advances (mod N) |

Moving the pointers on the falling edge makes every enable and the
multiplexer select stable half a cycle before the rising edge that uses
them. `rd_data` holds the word read at the last rising edge of `clk_rcv`.
Words come out in order. The first N/2 words are the reset contents of the
initially full cells, which are 0.

Reset is one asynchronous active-low `rst_n` for both domains. Assert it
with both oscillators stopped, release it, then enable both oscillators
within less than one clock period of each other. That last condition is the
start-up offset δ ≤ 1 of the correctness argument.

## Files

| file | module | role |
|---|---|---|
| `rtl/link_pkg.sv` | package | defaults (N = 2, 8-bit words), address width, opposite-cell function |
| `rtl/buffer_cell.sv` | `buffer_cell` | two-domain full/empty flag |
| `rtl/ring_buffer.sv` | `ring_buffer` | N data registers + N flag cells; no-overflow / no-underrun assertions |
| `rtl/snd_addr.sv` | `snd_addr` | write pointer and one-hot write enables |
| `rtl/rcv_port.sv` | `rcv_port` | read pointer, one-hot read enables, read register |
| `rtl/ctrl.sv` | `ctrl` | clocked threshold controller |
| `rtl/link_core.sv` | `link_core` | synthesizable link: all of the above |
| `rtl/tunable_osc.sv` | `tunable_osc` | behavioural two-speed oscillator (simulation only) |
| `rtl/sync_free_link.sv` | `sync_free_link` | top: `link_core` + two oscillators, closed loop |

For silicon, use `link_core`. It takes the two clocks as inputs and drives
`md_snd` and `md_rcv` to real tunable oscillators. `sync_free_link` contains
timed behavioural code and is for simulation.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=<n> failures=<m>`:

* `tb_buffer_cell`: random set/clear sequences against a plain valid-bit
  model, for both reset values.
* `tb_snd_addr`, `tb_rcv_port`: pointer start value, falling-edge update,
  wrap, one-hot enables and read data, for N = 2 and N = 6 or 4.
* `tb_ctrl`: the sampled flag is the one opposite the read address, for
  N = 2 and 4 and for the variant with its own counter. Flags that change
  between edges must not reach the outputs.
* `tb_ring_buffer`: random legal write/read interleavings against a
  reference model, for N = 2 and 4.
* `tb_tunable_osc`: period bands in both modes, the response time, and
  start-up.
* `tb_sync_free_link`: the closed-loop link at its default parameters. It is
  started six times with start offsets of 0, +30, +50, −75, +200 and −240 ps
  and runs 20 000 words each time. Every access is checked for overflow and
  underrun, and every word for order, value and latency (≤ N slowest
  periods). Throughput must be at least one word per slowest period. The
  controller must have driven each side fast at least once.
* `tb_link_workloads`: three links side by side. The first has 2.0/2.3 GHz
  oscillators and runs for 10⁷ words, about 5 ms of link time. The second
  has 2.09/2.42 GHz oscillators (478/413 ps). The third is like the first
  but uses the controller variant with its own counter
  (`USE_RCV_ADDR = 0`). All three share the checks above through
  `tb/link_monitor.sv`. The run takes about a minute and a half.

Measured in these runs: the default link delivers about 2.12 words/ns. Both
clocks average about 2.12 GHz. The worst write-to-read latency is 0.55–0.70 ns,
against a bound of 1 ns. At 2.09/2.42 GHz the link delivers about
2.22 words/ns. The mode bits toggle about every other cycle, as expected
near equilibrium. No overflow or underrun occurs.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/link_pkg.sv tb/tb_sync_free_link.sv \
          --top-module tb_sync_free_link -o sim
./obj_dir/sim
```

Replace the testbench name to run another. All state that the testbenches
read is reset, so the results do not depend on Verilator's random
initialisation.

## What this RTL does not show, and where it departs from the published design

* **Metastability is outside the model.** Two-state simulation resolves every
  sample cleanly, so the runs show the loop's logic and its locking
  behaviour, not its metastability containment. Containment rests on circuit
  properties. The `ffs` output must feed only the oscillators' mode inputs.
  The sampling edge of `ffs` should be placed, for example by a clock-buffer
  delay, so that its vulnerable window matches the flag's write transition.
  The oscillator must stay within its frequency band for any input voltage.
  The RTL cannot enforce these; physical design must keep them.
* **Absolute timing.** The RTL has no gate delays, so the clock rate it
  settles to (about 2.12 GHz with the default model) is not the 2.28 GHz the
  published transistor-level runs reach. It depends on the assumed
  `TOSC_PS`. The sampling offset `f⁺·τ_s/2` in the correctness argument is a
  placement-and-timing matter and is not represented.
* **Data path.** The published circuit shows only the flag cells of the
  buffer. The data registers, their 8-bit default width and the read
  register in `rcv_port` are this implementation's additions.
* **Multiplexer select.** The optimised controller is described once as
  reading its address from the sender's address logic. The published circuit
  drawing and the timing diagram instead use the receiver address
  (`addr_rcv`). This RTL follows the drawing: the controller samples the cell
  opposite the one being read. That matches the description of "the cell
  opposite to the one it currently reads".
* **General N.** The published implementation is for N = 2. The modulo-N
  counters and the (ℓ + N/2) mod N select are the natural generalisation.
  N must be even. Larger N tolerates larger oscillator errors.
* **Oscillator asymmetry.** In silicon the receiver oscillator also clocks
  the controller. The extra load makes it slightly slower than the sender
  oscillator in both modes. The model uses identical oscillators. Give the
  two `tunable_osc` instances different periods to study the imbalance.
* **Size.** The flag and control logic is small: 4 flip-flops in the two
  flag cells, 1 per pointer and 1 in the controller, plus a few gates. The
  data registers (N × `DATA_W`) and the read register (`DATA_W`) come on top.
* **Reset** values and the asynchronous reset are this implementation's
  choices. The initial fill (first half full) and the pointer offsets are as
  published.
* **Initialisation slack.** With larger start offsets the real link can sit
  for several nanoseconds in a metastable equilibrium with the pointers
  together before it resolves. A two-state model resolves at once, so the
  start-offset runs show only that offsets well within a cycle are
  harmless.
