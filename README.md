# A clock-less bit-serial LEDR/LVDS link for address events

Neuromorphic chips exchange *address events*: short words, here 32 bits,
that arrive sparsely but in bursts. A parallel AER bus needs one pin per bit.
A conventional serial LVDS link needs a PLL or DLL for clock and data recovery,
which burns power even when no events are sent and takes a long time to relock
after an idle period. The link described here needs neither. Each event is
sent as a burst over two LVDS pairs, **Data** and **Parity**, using
*Level-Encoded Dual-Rail* (LEDR) signalling. Each new bit flips the relation
between the two wires, so the receiver can tell one bit from the next without
any clock. Token-rings do the serializing and de-serializing: a chain of cells,
one per bit, passes a single token along. Between events, the drivers pull
both pairs to ground. This switches off the NMOS-input receivers, and the
whole link draws only leakage until the next event wakes it.

This repository holds a SystemVerilog model of that link: transmitter,
receiver, their buffers and flow control. The logic is synthesizable. The
analog LVDS driver and receiver are behavioural models. The original circuit
is asynchronous (four-phase handshakes, C-elements, tunable delay lines). The
RTL here is a **clocked model** of it: every handshake signal, set/reset
condition and block of the original is kept, but each latch node is a
register, and each delay line counts clock cycles. The section
"Modelling the clock-less circuit" explains what that means for using the
code.

## LEDR on two wires

For every bit `B`, `Data = B`. `Parity` alternates between two rules, one per
bit position:

| position in the word (MSB first) | cell kind | Parity | relation |
|---|---|---|---|
| 1st, 3rd, 5th, ... | odd | `~B` | `P != D` |
| 2nd, 4th, 6th, ... | even | `B` | `P == D` |

Example, 8 bits `0 1 0 0 0 1 1 0`: Data is `0 1 0 0 0 1 1 0` and Parity is
`1 1 1 0 1 1 0 0`. Successive bits always differ in `P == D` versus `P != D`,
even when the bit value repeats. The receiver therefore needs no clock,
whatever the bit rate. Words have an even width, so the last bit (LSB) is an
"even" bit and an idle link always rests with `P == D`. The first bit of the
next word has `P != D`, so the first receive cell cannot mistake the resting
value for new data.

## The transmitter

```
AER in ──► input_buffer ──TX.f/TX.t──► tx_token_ring ──Data──► lvds_driver ══ LVDS_D ══►
 in_r/in_a   (FIFO)        (dual rail)  │ VC → TX.r ───────────Parity──► lvds_driver ══ LVDS_P ══►
                ▲                       │ Enc.a           WKUP = TX.r ──┘
                └──── TX.a = C(Enc.a, ack) ◄── control_queue ◄── out.a from the receiver
```

* **input_buffer** stores events (4 words) arriving on a four-phase
  bundled-data handshake. It offers them one at a time to the ring as a
  *dual-rail* word: each bit has a `.t` and a `.f` rail, and all rails low
  means "empty". After TX.a it returns every rail to zero.
* **tx_validity_check** ("VC") raises TX.r once every bit of the word is
  valid. It drops TX.r once every bit is null again, like a C-element
  completion tree. TX.r starts the ring and also wakes the two LVDS drivers.
* **tx_token_ring** holds 32 **tx_token_cell**s, MSB first, alternately odd
  and even. The first cell is enabled by TX.r after the wake-up delay
  `t_wk` (`TWK`). Every later cell is enabled by its predecessor's `out.v`
  after the bit-cycle delay `t_d` (`TD`). A cell that has taken its bit
  drives the shared Data/Parity wires and disables its predecessor. So
  exactly one cell drives at any time; an assertion checks this. When
  nothing drives the wires, they keep their last value.
* When the last cell has its bit, a C-element of its `out.v` and TX.r,
  followed by an `Edge_Delay` of `t_d`, raises **Enc.a**. Enc.a stops the
  last cell driving and resets every cell. Joined in a second C-element with
  the Control Queue's acknowledge, it becomes **TX.a**, the acknowledge to
  the Input Buffer.

### Inside a transmit token-cell

The cell's handshake logic is a set of set/reset latches (`tx_token_cell.sv`):

| node | set when | cleared when |
|---|---|---|
| `out.t` / `out.f` (bit buffer) | `enable.d & en & ~out.a & in.t` / `in.f` | `out.a & ~en` |
| `in.a` | `in.v & en & out.v` | `~in.v & ~en` |
| `en` | `~in.a & ~out.v` | `in.a` |

with `in.v = in.f | in.t`, `out.v = out.f | out.t`, and `enable.d` being
`enable` delayed by `TD` clocks. As soon as a bit has been taken, `en` falls
and locks the bit buffer. The bit then stays until the ring reset (`out.a` =
Enc.a), and the cell reopens only after the input word has returned to zero.
The cell drives the wires while `out.v & ~disable & ~out.a`, with
`Data = out.t`, and `Parity = out.f` (odd) or `out.t` (even).

## The receiver

```
══ LVDS_D ══► lvds_receiver ─D.t/D.f─┐
                                      ├─► rx_token_ring ─RX.t/RX.f, RX.r─► output_buffer ──► AER out
══ LVDS_P ══► lvds_receiver ─P.t/P.f─┘         ▲ RX.a ◄──────────────────────┘   out_r/out_a
                                                                out.a ───► back to the control_queue
```

* **lvds_receiver** turns a pair into a dual-rail bit. While the pair's
  common mode is at ground (both wires low), its amplifier is off and a latch
  holds the last value, so it wakes up without producing a random bit.
* **rx_token_ring** holds 32 **rx_token_cell**s, all watching the same four
  rails. An odd cell accepts only `P != D`: bit 0 when `D.f & P.t`, bit 1
  when `D.t & P.f`. An even cell accepts only `P == D`: bit 0 when
  `D.f & P.f`, bit 1 when `D.t & P.t`. The first cell is enabled by `~RX.a`,
  and each later cell by its predecessor's `out.v`. A newly enabled cell
  still sees its predecessor's bit on the wires, but that bit has the
  opposite phase relation, so the cell waits for the next one. Each cell
  latches its bit with the same `en`/`in.a` handshake as the transmit cell.
  When the last cell has its bit, RX.r rises.
* **output_buffer** stores the word (4 entries) and raises RX.a, which resets
  the ring. Words leave on a four-phase bundled-data handshake `out_r/out_a`.
  The same `out.a` returns to the transmitter as an acknowledge.

## Sleep, wake-up and the repeated LSB

When TX.r is low, the driver's pre-driver gates (`D = NAND(~Din, WKUP)`,
`DN = NAND(Din, WKUP)`) turn both NMOS legs on, and both wires of each pair
go to ground. When a word arrives, TX.r wakes the drivers at once. During the
wake-up delay `t_wk`, the wires still carry the previous word's LSB with
`P == D`. This gives the receivers time to come out of sleep on a value the
ring ignores. Only then does the first cell put the MSB on the wires, with
`P != D`. After the last bit and Enc.a, TX.r falls and the pairs drop to
ground again. Each pair is therefore awake for one word at a time and asleep
otherwise. The testbenches check every clock that the pairs sit at ground
whenever the drivers sleep.

The link's on-time per word is fixed: 105 clocks at the defaults, whatever
the traffic. Its switched-on time is therefore proportional to the event
rate, and so is its dynamic power, down to the leakage of the idle circuit.
With back-to-back words it is on 93.5 % of the time. With one word every
16 000 clocks on average, it is on 0.6 % of the time.

## Flow control: the Control Queue

The transmitter does not wait for the receiver to acknowledge each word.
The **control_queue** starts holding `OUT_DEPTH` stored acknowledges, as many
as the Output Buffer has entries. Every finished word consumes one stored
acknowledge to form TX.a. Every `out.a` from the receiver's output stores one
again. When the queue is empty, TX.a is withheld and the transmitter stalls.
`out.a` comes from the other chip, so it enters the queue through a two-flop
synchronizer. A returned acknowledge is counted three transmitter clocks
after `out.a` rises. `out.a` stays high until the word has left the Output
Buffer, so it is never missed.

One detail follows from the structure and is easy to miss. Enc.a comes
*after* the word has been sent, so the queue is consulted only once a word is
already on the wire. With the sink stalled, the transmitter therefore sends
`OUT_DEPTH + 1` words before it stops: `OUT_DEPTH` fill the Output Buffer,
and the last one waits, complete, in the RX token-ring (RX.a is withheld
while the buffer is full). No word is lost. The top-level testbench checks
this count.

## Modelling the clock-less circuit

* **Clocks used as time bases.** All latches and C-elements update on a
  clock: `tx_clk` on the transmitter side (Input Buffer, TX token-ring,
  Control Queue), `rx_clk` on the receiver side (LVDS receivers, RX
  token-ring, Output Buffer). A handshake step takes one clock.
* **Delays in clocks.** `TWK` (wake-up, default 4) and `TD` (bit-cycle delay,
  default 2) are the tunable delay lines of the original. They delay only the
  rising edge of their input. One bit lasts `TD + 1` clocks.
* **Receiver speed.** The original requires the receive ring to be faster than
  the transmit ring. Here a receive cell takes a bit one clock after it
  appears, so any bit that lasts at least two `rx_clk` periods is received.
  With one shared clock that means `TD >= 1`; the defaults leave a margin.
* **Unrelated clocks on the two sides.** `tx_clk` and `rx_clk` may have any
  frequency and phase, as on two chips. Only the two pairs and `out.a` cross
  between them. The receive ring samples the pairs directly. This is safe
  because LEDR changes exactly one of the two wires per bit, so any sample
  is either the old bit or the new one, never a mix. `out.a` passes a
  two-flop synchronizer in the Control Queue. This adds two `tx_clk` periods
  before a returned acknowledge is counted.
* **Two-state pads.** An LVDS pair is `lvds_pair_t {t, f}`. `{0,0}` stands for
  "common mode at ground, asleep", and `{B, ~B}` for "awake, carrying B".

At the defaults (N = 32, TWK = 4, TD = 2), with a ready sink, the timing in
`tx_clk` periods is:

| quantity | clocks | formula |
|---|---|---|
| first bit after the word reaches the ring | 6 | `TWK + 2` |
| bit cycle | 3 | `TD + 1` |
| Enc.a after the last bit | 3 | `TD + 1` |
| drivers awake per word | 105 | `6 + TWK + (N-1)(TD+1) + TD` |
| period of back-to-back words | 112 | `13 + TWK + (N-1)(TD+1) + TD` |

In bit cycles, a word occupies the link for 35 bit cycles and repeats every
37.3. On silicon, with a 0.67 ns bit cycle (1.5 Gb/s), the link was reported
to be on for 25.6 ns (about 38 bit cycles) per word, with 28 ns (about 42 bit
cycles) between back-to-back words. The model is of the same order, but its
numbers are clock counts, not a prediction in nanoseconds.

## Files

| file | content |
|---|---|
| `rtl/lvds_link_pkg.sv` | word width, pair and dual-rail types, odd/even cell kind, LEDR parity function |
| `rtl/c_element.sv`, `rtl/edge_delay.sv` | Muller C-element; rising-edge delay line |
| `rtl/input_buffer.sv` | transmit FIFO, bundled data in, dual rail out |
| `rtl/tx_validity_check.sv` | word completion detector (TX.r) |
| `rtl/tx_token_cell.sv`, `rtl/tx_token_ring.sv` | LEDR serializer |
| `rtl/control_queue.sv` | stored acknowledges |
| `rtl/lvds_driver.sv` | behavioural model of the instant on/off driver |
| `rtl/lvds_receiver.sv` | behavioural model of the NMOS-input receiver with hold latch |
| `rtl/rx_token_cell.sv`, `rtl/rx_token_ring.sv` | LEDR de-serializer |
| `rtl/output_buffer.sv` | receive FIFO, dual rail in, bundled data out |
| `rtl/lvds_link_top.sv` | one complete link: transmitter, two lanes, receiver |

Top-level parameters: `N` (event width, must be even, default 32),
`IN_DEPTH`, `OUT_DEPTH` (buffer words, default 4; the Control Queue always
gets `OUT_DEPTH`), `TWK` and `TD`. Besides the two AER handshakes, the top
brings out the two pairs and a few status bits for observation: `tx_wkup`,
`rx_awake`, `cq_empty`, `tx_active`, `in_full`, `out_full`, `rx_busy`.

## Where this departs from the original circuit

* The circuit is asynchronous. This model is clocked, with the delays in
  clocks (see above). Set/reset conditions, signal names and the order of
  handshake events follow the original.
* The analog parts keep only their logic behaviour. Not modelled: the LVDS
  bridge and common-mode feedback, the amplifier, the bias voltages
  (VB, VB1, VB2), the ~1 V common-mode reference, the 50 Ω terminations, and
  any analog delay. The driver's NAND pre-driver is included.
* The original sources disagree on which phase is called "odd". One
  equation gives `P = ~B` for the odd phase, while one sentence and the
  encoding example put `P = ~B` in the even phase. All sources agree that
  the first bit sent has `P != D`, and so does this model: its first cell is
  "odd".
* Receive cells latch their bit themselves, as soon as it is taken (the cell
  circuit). One prose description instead has them latched when the
  successor disables them. The visible behaviour is the same.
* Not specified in the original, so chosen here: buffer depths (4),
  bundled-data four-phase protocols on the AER input and output, the
  Control Queue as a counter, the hysteresis of the validity check, the
  power-up value of the wires and receivers (all 0, i.e. `P == D`), and
  rising-edge-only delay lines.
* Not part of this RTL: the on-chip spiking neuron array used as an event
  source, and the router that loops events back in the two-chip test. The
  testbenches generate events themselves, and in the loop test the router
  is plain wiring.

## Verification

Every module has a self-checking testbench in `tb/`, ending with a line
`TB_RESULT checks=<n> failures=<m>`:

| testbench | what it checks |
|---|---|
| `tb_lvds_link_top` | full-size link, transmitter and receiver on unrelated 10 ns and 7.4 ns clocks: 12 back-to-back words at exactly 112 clocks each; a stalled sink stopping the transmitter after `OUT_DEPTH+1` words; 60 random words with random gaps and sink delays; pairs at ground while asleep; previous LSB with `P == D` at every wake-up; every mechanism (wake-up, sleep, pre-stored acknowledge, queue stall, full buffers) seen |
| `tb_event_rate_sweep` | events from a source with tunable rate at five mean gaps (back-to-back to 16 000 clocks); exactly 105 on-clocks per word at every rate, pairs at ground in between, constant switch-on-to-acknowledge time |
| `tb_two_chip_loop` | two links in a loop (chip 1 → chip 2 → back), the chips on unrelated 10 ns and 8.4 ns clocks; 40 words returned in order; link 1 at exactly 112 clocks per word, link 2 keeping pace |
| `tb_tx_token_ring`, `tb_rx_token_ring` | bit order, LEDR phase, first-bit, bit-cycle and Enc.a timing; decoding of words encoded independently at random bit rates (2–5 clocks) after a random wake-up interval |
| `tb_tx_token_cell`, `tb_rx_token_cell` | take/latch/reset behaviour of odd and even cells against a reference model |
| `tb_tx_validity_check`, `tb_control_queue`, `tb_input_buffer`, `tb_output_buffer`, `tb_lvds_driver`, `tb_lvds_receiver` | unit behaviour against reference models |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/lvds_link_pkg.sv tb/tb_lvds_link_top.sv \
          --top-module tb_lvds_link_top -Mdir obj && ./obj/Vtb_lvds_link_top
```

Other modules are found through `-Irtl` (file name = module name). The
full-size test runs in well under a second. Assertions cover the one-driver
rule on the shared wires, valid dual-rail codes, and Control Queue overflow.

To change the design: `TD` sets the bit rate, and `TWK` sets the time the
receivers get to wake. The model itself works down to `TWK = 1` and
`TD = 1`: the full-size testbench passes with both at 1. On silicon, `TWK`
must also cover the receivers' analog switch-on time, which this model does
not have; the defaults leave room for it. `N` may be any even width.
`OUT_DEPTH` sets the Output Buffer and the Control Queue together.
