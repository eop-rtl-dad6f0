# EOP link: stream-cipher encryption of board wires, clocked by the data

Signals that travel between chips on a printed circuit board can be reached by
anyone holding the board. The chips themselves are hard to open, but the copper
between them is easy to probe, to cut, or to drive with a modchip. The EOP scheme
("encryption-obfuscation for PCBs", Guo, Xu, Tehranipoor and Forte) protects a set of
such wires in three ways:

* **Encryption.** The sending chip XORs every protected wire with one bit of a
  keystream from a Trivium stream cipher. The receiving chip XORs again with its
  own copy of the keystream. Someone probing the board sees only ciphertext. A
  forged value decrypts to something the attacker cannot choose.
* **A control clock derived from the data.** Both ciphers must step in lock-step,
  and the step must also happen when the data changes. The sender therefore makes
  a short *control-clock* pulse each time the plain data word changes. That pulse
  advances its cipher and loads the new ciphertext. The pulse also travels to the
  receiver on its own wire and advances the receiver's cipher.
* **Verification of clock-data pairing.** In normal operation every pulse on the
  clock wire is followed shortly by a change on the ciphertext bus, and every
  change on the bus follows a pulse. The receiver checks both rules. A held or
  grounded bus breaks the first rule. A removed or forged pulse breaks the
  second. The receiver counts each kind of violation.

This repository holds synthesizable SystemVerilog for the scheme in its basic
configuration: one sending chip and one receiving chip, one-way traffic and 8
protected wires. It follows the experiment the paper reports, where two Zynq
FPGAs act as the chips and an "internal logic" block supplies test traffic.
It also holds the obfuscation chip of the combined configurations (see
"Obfuscation chip" below). That chip sits between the two ends and routes the
wires through a key-controlled permutation.

```
            chip 1 (eop_sender)                             chip 2 (eop_receiver)
  +-------------------------------------+        +-------------------------------------------+
  | internal_logic --p--+--------------+|  e[7:0] | sync --e_s--+--> dec_module --> p_dec     |
  |   (8 LFSRs)         |  enc_module  ||=======> | (2 FF)      |    (Trivium + XOR)        |
  |                     +->(Trivium+XOR)|         |             |                           |
  |                     |      ^        |         |             +--> ctrl_clk_ver --> counts|
  |          ctrl_clk_gen --clk_ctrl----|-------> | sync --clk_s-+        ^                  |
  |                                     |         |                       |                  |
  |  seed_prng --key/iv--> Trivium      | digest  |  seed_prng --key/iv--> Trivium, seed_ok   |
  +-------------------------------------+ ------> +-------------------------------------------+
                       eop_top adds a grounding switch on the clock wire and on the bus
```

## The control clock

This is the part of the design with the least obvious behaviour. It is worth
reading before the code.

**Time base.** The paper describes the control-clock modules as event-driven
logic that works with time instances. This RTL samples everything with one
system clock per chip (`clk`, nominally 400 MHz). Times are counted in cycles of
that clock. A *flip* is a change of the 8-bit word between two consecutive cycles.
The control clock is a signal with one-cycle pulses, not a clock net. The
receiver samples it like any other input.

**Generation rule (`ctrl_clk_gen`).** The paper's rule is that a flip gets a pulse
only when the interval since the previous flip exceeds a threshold `thr`. This
protects the cipher from pulses that come too close together. The RTL applies that
rule with `THR` in cycles (default 1). A flip that arrives too soon is a *held*
flip (strobe `glitch`). The paper's rule would simply drop it, so its value would
never reach the receiver. The RTL sets a pending flag instead. Once more than
`THR` cycles have passed without a further flip, the flag issues one *deferred*
pulse, which carries the latest word. The interval restarts at every issued pulse.
Pulses are therefore always more than `THR` cycles apart, and with `THR >= 1` every
pulse has a rising edge at the receiver.

```
cycle      0  1  2  3  4  5  6  7  8  9          (THR = 1)
p          A  B  B  C  D  D  D  E  E  E
flip          *     *  *        *
held                   *                         D came 1 cycle after C
clk_ctrl   0  0  1  0  1  0  1  0  1  0          pulse in the cycle after its cause
enc_msg    .  .  .  B  .  C  .  D  .  E          (encrypted) one cycle after the pulse
```
The pulse in cycle 6 is the deferred one, and it carries D.

**Sender timing (`enc_module`).** In the cycle where `clk_ctrl` is high, the
Trivium advances 8 rounds and `e` is loaded with `p XOR k_new`. The ciphertext
therefore changes one cycle after the pulse. This is the "slightly after the
rising edge" relation that the verifier relies on. Between pulses `e` does not
move, whatever `p` does.

**Receiver timing.** `clk_ctrl` and `e` pass through two flip-flop stages. The
receiver's Trivium advances on each rising edge of the synchronised clock, and
`p_dec` is the registered `e XOR k`. A word sent with the pulse of cycle *n*
appears on `p_dec` in cycle *n*+4.

**Rate limit.** The sampling clock must be at least `THR + 1` times faster than
the fastest change of the data. The paper's fastest traffic changes every 5 ns
(200 MHz), which at the default 400 MHz and `THR = 1` is one change every 2
cycles, the limit. Faster traffic is still delivered, but intermediate words are
merged into deferred pulses.

## Verification and the violation counters

`ctrl_clk_ver` implements the paper's two checks. The checks are active only
during the execution phase.

* **Clock branch, "data missing".** Each rising edge of the received clock opens
  a window of `HOLD` (2) cycles. A ciphertext flip must arrive inside it. Each flip
  closes the oldest open window, so one flip cannot account for two pulses. A
  window that closes empty is a violation: the bus was held or grounded, or a
  pulse was forged.
* **Data branch, "clock missing".** A ciphertext flip is accepted only if a clock
  edge lies between the previous flip and this one, both ends included. Otherwise
  it is a violation: the pulse was removed, or the data was forged.

The counter names follow the published simulation trace.
`clk_ctrl_violation_monitor` counts clock-missing events and
`counter_enc_msg_monitor` counts data-missing events. Both are live counts. Their
copies `clk_ctrl_violation_output` and `enc_msg_violation_output` are updated only
while the phase is pause, which is when a host would read them. `ver` holds the
latest verdict (1 = tampered). All counters are 16 bits wide and saturate.

Two properties follow from the rules. The paper does not discuss either of them.

1. **Repeated ciphertext.** When a new word XOR the new keypad equals the
   previous ciphertext, the bus does not move. This happens with probability
   2^-8 per pulse. The pulse is then counted as data missing even on an untouched
   board. The testbenches predict these events and expect them. On a long run
   they will saturate the data-missing counter.
2. **Grounding the bus costs one count.** The step of the bus to 0 is itself a
   flip, and it pairs with the clock edge of the first grounded word. Grounding
   the bus for *d* words therefore gives *d* − 1 data-missing counts. The
   published trace shows the same result: five grounded words, four
   violations. The paper's board measurements report about *d*. Grounding the
   clock wire for *d* pulses gives exactly *d* clock-missing counts.

A removed pulse also leaves the receiver's cipher one step behind for good. The
scheme has no resynchronisation: decryption stays wrong until the next power-up.
The counters keep working because they do not depend on the keypad.

## Trivium core

`trivium_core` is the Trivium cipher of the eSTREAM portfolio. Its 288-bit state
is held in three shift registers of 93, 84 and 111 bits. Each round computes:

```
t1 = s66 ^ s93     t2 = s162 ^ s177     t3 = s243 ^ s288     z = t1 ^ t2 ^ t3
t1 ^= s91&s92 ^ s171   t2 ^= s175&s176 ^ s264   t3 ^= s286&s287 ^ s69
(s1..s93) <- (t3, s1..s92)  (s94..s177) <- (t1, s94..s176)  (s178..s288) <- (t2, s178..s287)
```

The paper's listing of these equations has copy errors: every line assigns `t1`,
with the same terms. The RTL follows the cipher's specification above. The core
unrolls `W` rounds per step (default 8, one per protected wire; the paper's table
goes up to 64). Bit *i* of the keypad is the output of round *i*. Loading follows
the specification: key into s1..s80, IV into s94..s173, ones into s286..s288, then
4 × 288 warm-up rounds without output. At `W = 8` the warm-up takes 144 cycles. At
`W = 8` synthesis gives 288 state flip-flops, 24 two-input ANDs and 88 XORs in the
round logic. These are the gate counts the paper tabulates for an 8-bit
Trivium.

## Seed update

Key and IV must change at every power-up and must agree in both chips. The RTL
builds the paper's "self-updating" option (`seed_prng`). Each chip keeps the
previous 160-bit seed in non-volatile storage, outside this design, and computes
`S(t) = PRNG(S(t-1))` with an identical PRNG. The result splits into key
(bits 79:0) and IV (bits 159:80). The sender sends a digest of its seed. The
receiver compares it with its own digest and raises `seed_ok` when they agree.
The paper does not specify the PRNG or the hash. The RTL uses a 160-bit LFSR
(x^160 + x^159 + x^142 + x^141, advanced 160 steps) and a 32-bit XOR fold. These
give matching seeds in both chips, but they are not cryptographically strong.
Replace them before relying on the seed's secrecy. An all-zero stored seed locks
the LFSR and must not be programmed. The RSA-based alternative the paper mentions
is not built.

Power-up order in both chips: seed update (161 cycles), then Trivium load and
warm-up (144 cycles), then `ready`. Both chips therefore reach the same cipher
state before traffic starts.

## Test traffic and phases

`internal_logic` models the sending chip's own logic as in the paper's
experiment. It has 8 16-bit LFSRs (x^16 + x^14 + x^13 + x^11 + 1), and wire *n*
carries bit 0 of LFSR *n*. Each LFSR steps at a rate set in MHz by a phase
accumulator modulo `SYS_MHZ`.
* **Uniform mode:** one rate, `rate_u`, and all 8 LFSRs step together.
* **Random mode:** 8 independent rates, `rate[n]`. The paper uses 5–200 MHz.

`phase_sel` follows the values in the paper's trace: 0 is initialization (nothing
runs), 1 is execution, and 2 is pause (everything holds and the counters are
copied to the outputs). The processor that drives these inputs and reads the
results is outside the design. The traffic source moves only in execution. The
sender's control-clock generator runs whenever its cipher is ready, so a word
that changes in the last execution cycle is still sent.

## Obfuscation chip

EOP can be combined with board-level obfuscation. In that scheme a third chip
routes the wires between chip 1 and chip 2 through a permutation block. Only
the right permutation key connects each signal to its intended destination.
Without encryption, an attacker can find the routing by driving one input and
watching which output follows. `eop_obf_chip` is that third chip:

```
  chip 1 ==e,clk==> [ eop_receiver ] --p_dec--> [ perm_block ] --q--+--> (c) q out in plain
  (eop_sender)        dec + verify                 pkey            |
                                                                   +--> (d) ctrl_clk_gen + enc_module
                                                                        with its own seed ==e,clk==> chip 2
```

* **Scenario (c), partial encryption (`ENC_OUT = 0`).** Only the chip 1 →
  chip 3 link is encrypted. Chip 3 decrypts, verifies the control clock,
  permutes, and drives the plain word to chip 2.
* **Scenario (d), full encryption (`ENC_OUT = 1`, default).** Chip 3 also
  re-encrypts the permuted word with a second keypad from its own stored seed.
  Its outgoing link is a complete EOP sender, so chip 2 is an ordinary
  `eop_receiver`. The two links are independent: tampering with one is counted
  only by the chip at its far end.

`eop_top` feeds chip 1's board wires to chip 2 directly (scenario (a)) and,
at the same time, to a chip 3 in scenario (d) that relays to a fourth chip.
Chip 3 holds the same stored seed as chip 2. The relay link has its own seed
and its own clock grounding switch.

A word decrypted in cycle *n* leaves chip 3 with its pulse in cycle *n* + 1 and
its ciphertext in *n* + 2. Chip 3's outgoing generator runs whenever its cipher
is ready, so a word that arrives as chip 1 enters pause is still forwarded.

`perm_block` is a multiplexer per output. Output *i* takes the input named by
the *i*-th `ceil(log2 N)`-bit field of `pkey`. A key that is a permutation is a
one-to-one routing. A key with repeated fields copies one input to several
outputs, which is simply another wrong routing. The paper takes the permutation
block from earlier work without giving its construction. This encoding is this
design's own.

## Files

| file | contents |
|---|---|
| `rtl/eop_pkg.sv` | phase and mode enums, key/IV/seed widths |
| `rtl/trivium_core.sv` | W-bit Trivium with load and warm-up |
| `rtl/enc_module.sv`, `rtl/dec_module.sv` | cipher + XOR array of each chip |
| `rtl/ctrl_clk_gen.sv`, `rtl/ctrl_clk_ver.sv` | control-clock generation and verification |
| `rtl/seed_prng.sv` | seed update and digest |
| `rtl/internal_logic.sv` | test-traffic source |
| `rtl/eop_sender.sv`, `rtl/eop_receiver.sv` | chip 1 and chip 2 |
| `rtl/eop_top.sv` | both chips, board wires and tamper switches |
| `rtl/perm_block.sv` | key-controlled permutation of the wires |
| `rtl/eop_obf_chip.sv` | obfuscation chip for scenarios (c) and (d) |
| `tb/trivium_ref_pkg.sv`, `tb/eop_ref_pkg.sv` | bit-serial Trivium and seed reference models |
| `tb/tb_<module>.sv` | a self-checking bench for each module |
| `tb/tb_eop_attack_trace.sv` | replay of the published three-attack trace |
| `tb/tb_eop_obf_chip.sv` | chip 1 → chip 3 → chip 2 chain in both scenarios |

Parameters (all defaults are the sizes used above):

| parameter | default | meaning |
|---|---|---|
| `N` | 8 | protected wires = keypad width (paper: 8) |
| `THR` | 1 | minimum flip spacing, in sampling cycles, for a pulse of its own |
| `HOLD` | 2 | cycles a clock edge waits for its data flip |
| `SYNC` | 2 | receiver synchroniser stages |
| `SYS_MHZ` | 400 | sampling-clock frequency, used only to turn MHz rates into steps |
| `CW` | 16 | violation counter width |
| `ENC_OUT` | 1 | obfuscation chip: 1 re-encrypts (scenario d), 0 sends plain (scenario c) |

## Simulating

Every bench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<m>`. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -yrtl -ytb \
    rtl/eop_pkg.sv tb/tb_eop_top.sv --top-module tb_eop_top -o sim
./obj_dir/sim
```

`tb_eop_top` runs the whole link at its default parameters. It covers power-up,
uniform and random traffic with every ciphertext word and decrypted word checked
against reference models, and the tampering experiments: bus and clock each
grounded for 1, 5, 10 and 100 periods of 5 ns. It also covers counter reporting
in pause and a power-up with mismatched stored seeds. It fails if any mechanism
(held flip, deferred pulse, either violation kind, either mode) never occurs.
Every bench runs in well under a minute.

## How far to trust it

All modules pass Verilator lint and a Yosys/slang elaboration, and all benches
pass. Each bench is known to fail on a deliberately broken copy of its module.
The Trivium core is checked bit for bit against an independent serial model at
widths 8 and 64. It also matches the published eSTREAM known answer (key
80 00 … 00, IV 0: keystream 38 eb 86 ff 73 0d 7a 9c). In that vector's byte
convention, K1..K8 are bits 7..0 of the last key byte and each keystream byte
collects 8 outputs, first in bit 0. On the `key` port of this core, bit 0 is K1.
Timing closure at 400 MHz on an FPGA has not been
checked. The behaviour that is this design's own choice, rather than the
paper's, is:
* the sampled time base;
* the pending/deferred pulse;
* the window matching in the verifier;
* the synchronisers;
* the power-up sequence;
* the PRNG, digest and LFSR traffic source;
* the permutation-key encoding and the second seed of the obfuscation chip.

Each is described in the opening comment of its file.

The obfuscation chip is checked in simulation only. The paper describes and
analyses it but reports no measurement of it.

Not built: the RSA/TRNG seed option; two-way traffic, which the paper
describes as a second copy of each module in the other direction; and the
processor, UART and storage around the two chips.
