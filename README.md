# SCRAMBLE locking hardware in SystemVerilog

SCRAMBLE locks a sequential circuit that has restricted scan access. It hides
the circuit's real behaviour among many key-selected false behaviours:

* In an FSM, extra state transitions appear, some of them into states the
  original never reaches.
* Between datapath flip-flops, extra FF-to-FF connections appear.
* In a scan chain, extra scan orders appear.

Only the correct key gives the original circuit. Wrong keys give circuits
that look just as plausible to an attacker. Attackers who unroll the circuit
for a SAT solver or a bounded model checker face a hard problem. So do
attackers who first pick out the state flip-flops and then rebuild the state
graph.

Two mechanisms do this, and this RTL contains both:

* **SCRAMBLE-C (connectivity).** A key-programmable switching network, the
  *CRLB* (configurable routing and logic block), sits in front of a group of
  flip-flops. It decides which fan-in-cone output reaches which flip-flop,
  and whether the value is inverted. It can sit on the data (D) pins or on
  the scan-in (SI) pins.
* **SCRAMBLE-L (logic).** Part of the next-state logic of an FSM is replaced
  by a small memory. The memory is filled at boot from the key store, so the
  netlist contains nothing from which that logic could be read back.

`scramble_top` puts the three structures side by side and adds a boot loader
that fills them all from one tamper-proof non-volatile memory (NVM):

* a 32-flip-flop bank locked on its D pins;
* a 16-flip-flop scan chain locked on its SI pins;
* a 2^8 x 8 memory FSM.

The circuit being locked is not part of this RTL. Its fan-in cones drive the
top's input ports and read its flip-flop outputs.

## The CRLB: a near non-blocking shuffle network

`crlb` is the core of SCRAMBLE-C. It has three parts:

* **Switch box (`sw2x2`).** Two 2:1 multiplexers share one key bit. Key 0
  passes the two wires straight through; key 1 swaps them.
* **Stages.** A stage is a column of N/2 switch boxes. Box r takes
  positions 2r and 2r+1.
* **Shuffle.** Consecutive stages are joined by the perfect shuffle: output
  position p feeds input position `rotl(p)` of the next stage, where `rotl`
  rotates the log2(N) address bits left by one. The inputs go straight into
  the first stage. The last stage goes straight into the inversion layer.
* **Inversion layer.** `out[p] = x[p] ^ key_inv[p]`. With it, the key can
  negate signals as well as permute them.

A plain logarithmic network has log2(N) stages. It blocks most permutations,
so it gives an attacker few false alternatives. Fully non-blocking variants
cost about 5x the area. The CRLB takes the middle road: the *near
non-blocking* network LOG2(N, M, 1), with M = log2(N) - 2 extra stages and
no duplicated planes. That gives 2*log2(N) - 2 stages. The paper describes
this form as realising almost every permutation; the count measured on this
RTL is lower (see below).

| N  | stages | switch-box keys | inversion keys | key bits |
|----|--------|-----------------|----------------|----------|
| 8  | 4      | 16              | 8              | 24       |
| 16 | 6      | 48              | 16             | 64       |
| 32 | 8      | 128             | 32             | 160      |
| 64 | 10     | 320             | 64             | 384      |

**Key layout.** Switch-box key bit `key_sw[r*STAGES + s]` drives the box in
row r of stage s. For N = 8 this is the numbering k0..k15 of the usual
drawing, where box sw_ij uses k_(4i+j).

**Reading a key.** It helps to follow one signal instead of the wires.
Suppose input a is at position p in some stage:

* a box whose key is 1 flips the lowest bit of p;
* the shuffle then rotates p left by one bit.

After the last stage, p is the output that input a reaches. The testbench
reference model (`tb/tb_scramble_pkg.sv`, `crlb_dest`) works exactly like
this. With every switch key at 0, the network rotates addresses by
(STAGES - 1) mod log2(N):

* for N = 8 that is 3 mod 3 = 0, so the all-zero key is the identity;
* for N = 32 it is 7 mod 5 = 2, so the all-zero key is not the identity.

**How close to non-blocking it is.** With this wiring, the 8-input network
realises 18,688 of the 40,320 permutations across its 65,536 switch-box
keys, about 46%. That is over four times what a plain 3-stage logarithmic
network can reach: it has 12 keys, so at most 4,096 permutations. The paper
describes the near non-blocking form as realising "almost all" permutations.
The gap probably comes from the inter-stage wiring, which the paper does not
give; a different inter-stage permutation would change the count.
`tb_crlb_sizes` measures this count on the RTL.

**Timing.** The network is combinational: STAGES multiplexer levels plus one
XOR level.

## Where the CRLB is inserted

**Data pins (`scramble_c_dff_bank`).** N flip-flops load `crlb(fic)` on
every enabled clock. They may mix controller state bits and datapath bits;
mixing them makes it harder for an attacker to tell the state flip-flops
apart. The correct key is fixed when the lock is inserted. Take the source
input that the correct key routes to output k, and the correct key's
inversion bit for output k. The fan-in cone meant for flip-flop k is wired
to that source input, through an inverter when that inversion bit is 1.
`tb_scramble_top` builds this wiring (`wire_fic`). With the right key the
bank then behaves exactly like the unlocked circuit. With one key bit wrong,
two flip-flops swap their next-state values, and the circuit leaves the
reference state sequence.

**Scan-in pins (`scramble_c_scan_chain`).** The CRLB inputs are the chain's
hops:

* input 0 is the chip's `scan_in`;
* input k is the output of scan flip-flop k-1.

Output k drives the SI pin of flip-flop k. Flip-flop N-1 drives `scan_out`.
The key therefore decides the scan order and which hops invert. The correct
key is one whose routing forms a single chain through all N flip-flops. The
test program shifts patterns in that order and undoes the inversions.
Another key gives a different order. It can also break the chain into loops,
so shifted data comes out scrambled. In functional mode (`scan_en = 0`) the
CRLB is bypassed and each flip-flop loads its D input.

## SCRAMBLE-L: the memory FSM with input multiplexing

A memory that held an entire FSM, addressed by all inputs and the state,
would be far too large. The paper's own FSMs would need hundreds of megabits.
FSM input multiplexing (FSMIM) solves this. In each state only a few inputs
matter, so `fsmim_mux` uses the current state to choose IP_W of the I_W
inputs. The memory is then addressed by `{state, selected inputs}`.

Each memory word is `{outputs, next state}`. Bits [S_W-1:0] are the next
state and the bits above are the registered outputs. The memory read is
combinational, and the state and output flip-flops of `scramble_l_fsm`
capture the word at the end of the cycle. That makes it one transition per
clock, with no extra latency.

The defaults are I_W = 8 and IP_W = S_W = O_W = 4. They give the 2^8 x 8
memory (256 words) that is the resilient size for this kind of lock. The
select map is a parameter, `SEL_MAP`. For state s and multiplexer j it holds
the index of the chosen input. In a real lock it comes from an analysis of
the FSM being locked. The default formula, input (s + 2j) mod 8, is only a
placeholder.

## Boot: loading the key

`key_loader` runs once after reset. Each clock it requests one 8-bit word
from the NVM, and the data arrives the next clock. The NVM words are laid
out in this order:

| NVM words | contents |
|-----------|----------|
| 0 .. 19   | 160-bit key of the 32-input CRLB: switch-box keys in bits [127:0], inversion keys in [159:128]; bit 8w+b is bit b of word w |
| 20 .. 27  | 64-bit key of the 16-input scan CRLB, packed the same way |
| 28 .. 283 | memory words for addresses 0 .. 255 |

`boot_done` rises 285 clocks after reset is released and stays high. Until
then the flip-flop bank and the memory FSM hold their reset value (all
zeros, which is also the FSM's initial state). The scan chain is not held,
because scan operation is controlled from outside.

## Top-level ports (`scramble_top`)

| group | ports |
|-------|-------|
| clock, reset | `clk`, `rst_n` (asynchronous, active low) |
| NVM | `nvm_rd`, `nvm_addr[8:0]`, `nvm_rdata[7:0]`, `boot_done` |
| locked bank | `fic_d[31:0]` in (fan-in cones, in CRLB input order), `bank_q[31:0]` out |
| locked scan chain | `scan_en`, `scan_in`, `scan_d[15:0]`, `scan_q[15:0]`, `scan_out` |
| memory FSM | `fsm_in[7:0]`, `fsm_state[3:0]`, `fsm_out[3:0]` |

Parameters `D_N`, `S_N`, `I_W`, `IP_W`, `S_W` and `O_W` resize each
structure. The key widths and the NVM layout follow from them.

## Files

| file | content |
|------|---------|
| `rtl/scramble_pkg.sv` | stage and key-width functions, shuffle wiring, default FSMIM map |
| `rtl/sw2x2.sv` | switch box |
| `rtl/crlb.sv` | near non-blocking shuffle network and inversion layer |
| `rtl/scramble_c_dff_bank.sv` | CRLB on D pins |
| `rtl/scramble_c_scan_chain.sv` | CRLB on SI pins |
| `rtl/fsmim_mux.sv` | state-controlled input multiplexers |
| `rtl/lock_sram.sv` | 2^AW x DW memory, boot write port, combinational read |
| `rtl/scramble_l_fsm.sv` | memory FSM |
| `rtl/key_loader.sv` | NVM boot loader |
| `rtl/scramble_top.sv` | top |
| `tb/tb_scramble_pkg.sv` | CRLB reference model (signal tracking) |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_crlb_sizes.sv` | the tabulated sizes: CRLBs of 8/16/32/64 inputs, memories of 2^7/2^8/2^9 words; exhaustive 8-input key sweep |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops on its own.
For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/scramble_pkg.sv tb/tb_scramble_pkg.sv tb/tb_scramble_top.sv \
  --top-module tb_scramble_top -o sim
./obj_dir/sim
```

What the testbenches check:

* **`tb_crlb`:** 32-input and 8-input networks against the reference model
  for random inputs and keys; the permutation property; the 8-input
  identity.
* **`tb_scramble_c_scan_chain`:** each clock against a reference chain. It
  also searches for a chain-forming key and shows that capture and shift-out
  return the captured data, and that a one-bit key change breaks this.
* **`tb_scramble_top`:** runs every structure at its default size. It boots
  twice: once with the correct key and once with a single wrong switch-box
  key bit. It counts that every mechanism occurred: hold during boot, boot,
  bank cycles that follow the reference, divergence under the wrong key,
  scan capture, shift, round trip, scan corruption, FSM transitions and
  state-dependent input selection. It finishes in well under a second.

## Sizes of the evaluated circuits

The CRLB can lock any circuit with at least N flip-flops. The ISCAS-89
circuits used to evaluate datapath and scan locking have 18 to 1728
flip-flops:

* all of them can take the 16-input scan CRLB;
* all except s1196 (18 flip-flops) can take the 32-input bank.

The FSM-locking targets have 168 (RS232) to about 120,000 (SPARC)
flip-flops. The 2^8 x 8 memory is the size used for them.

The FSMs whose full memory implementation is tabulated need much more than
2 Kbit even with FSMIM: 5.5 Kbit for s510, and up to 110,500 Kbit for s1488
and s1494. SCRAMBLE-L therefore moves only a small part of an FSM's fan-in
logic into memory, not the whole FSM.

## Choices made here, and how far to trust them

The RTL follows the paper in these points:

* the switch box made of two multiplexers on one key;
* the shuffle topology;
* the near non-blocking stage count LOG2(N, log2(N) - 2, 1);
* the XOR inversion layer as the last layer;
* the CRLB placed before the D pins or before the SI pins;
* the memory FSM of 2^(i'+s) x (o+s) words with state-controlled input
  multiplexers;
* loading the key and memory contents from a tamper-proof NVM at boot;
* the sizes 32 (FSM locking), 16 (scan and datapath locking) and 2^8 x 8.

These are this design's own choices:

* **Network details:**
  * the exact shuffle permutation (the standard perfect shuffle), with no
    shuffle before the first stage or after the last;
  * key polarity (0 = pass);
  * key bit numbering.
* **Scan chain:** which wire feeds which CRLB input.
* **Memory and FSM:**
  * the combinational memory read feeding separate flip-flops;
  * the address and word field orders;
  * the 4 + 4 split of the 8 address bits and the 8 word bits;
  * the default input-select map.
  * one memory FSM. The paper's example replaces two fan-in cones with two
    memories. A second memory would be a second `scramble_l_fsm` plus a
    longer NVM layout.
* **Boot and top level:**
  * the NVM protocol, word width and layout;
  * the loader;
  * holding the locked blocks until the load is done;
  * the asynchronous reset;
  * putting all three structures under one top level. They are alternative
    ways to lock a circuit, and can be used separately.

Not covered:

* **Choosing the key and the fan-in-cone wiring.** A lock-insertion tool
  would do this. Here the top-level testbench does it with the reference
  model.
* **Security.** Nothing here measures resistance to any attack.
* **Timing.** The CRLB adds STAGES + 1 logic levels in front of the locked
  flip-flops. Whether that fits a clock period depends on the host circuit's
  slack.
