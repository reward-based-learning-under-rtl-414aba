# A plasticity processor inside a neuromorphic building block

Accelerated analog neuromorphic hardware runs spiking networks about 10,000
times faster than biology. At that speed, learning rules cannot be computed
by a host computer. This design puts a small general-purpose processor, the
*embedded plasticity processor* (EPP), next to each synapse array. The
processor runs the learning rule as a program. It reads local quantities
that the analog array measures: spike-timing correlations of every synapse.
It also reads global quantities such as a reward and neuron rates. From
these it computes new weights and writes them back. The rule is software,
so it can be changed freely, for example to reward-modulated STDP.
Precision and speed are limited by the hardware. The synapse weights are
4 bits, the correlations are read out only as thresholded bits, and one
processor serves about 230 k synapses.

This RTL models one such *building block*. It contains:

* the EPP core with its 12 kiB main memory,
* the synapse array's digital weight memory,
* behavioural models of the analog STDP accumulators and the evaluation
  circuit,
* rate counters and an event generator,
* a control bus that the EPP shares with an outside controller.

## Block diagram

```
                 host_req/host_rsp (outside controller)
                           |
   +---------+   bus   +---+-------------+---------------------------+
   | EPP core|-------->|  bus_arbiter    |--> main memory (port B)   |
   |         |         |  (host first)   |--> synapse interface      |
   |         |         |                 |--> rate_counters          |
   |         |         |                 |--> event_generator --> ev_*
   |         |         |                 |--> run register (epp_run) |
   |         |         +-----------------+                           |
   |  ICache |--- instruction port --> main_memory port A            |
   |  LSU    |--- data port ---------> main_memory port B (priority) |
   |  SYNAPSE|--- synapse_interface --> synapse_weight_sram          |
   +---------+                     |-> synapse_accumulator (a+, a-)  |
                                   |-> eval_unit (readout bits)      |
 pre_valid/pre_row  --> synapse_accumulator                          |
 post_valid/post_col--> synapse_accumulator, rate_counters           |
```

The top module is `building_block` (parameters `ROWS = 448`, `COLS = 512`).
The neurons, the spike network and the outside controller are not modelled.
Their signals are ports:

* presynaptic spike events enter as `pre_valid`/`pre_row`;
* neuron spikes enter as `post_valid`/`post_col`;
* events that the block generates leave on `ev_valid`/`ev_addr`/`ev_ready`;
* the controller uses `host_req`/`host_rsp`.

## The EPP core

The core runs a 32-bit subset of PowerISA 2.06. It issues in order and
completes out of order.

**Frontend (four stages).**

1. A fetch-address register with a fully associative branch predictor. It
   has 16 entries with 2-bit counters.
2. A direct-mapped instruction cache with 128 one-word lines. A miss stalls
   this stage for two cycles while the line is read from main memory
   port A.
3. Pre-decode into a micro-op. The micro-op names the unit, the operation,
   the registers and the immediate.
4. Schedule and operand fetch. The micro-op waits here until all of these
   hold:
   * none of its registers (GPR, CR, LR, CTR) is waiting for a result (a
     scoreboard);
   * its unit is free;
   * for a fixed-latency unit, the write-back cycle it will need is free.

**Back end.** Branch unit (2 cycles), fixed-point unit (2), multiplier
(3, pipelined), divider (32 iterations, not pipelined), load/store unit and
SYNAPSE unit. The last three take a variable number of cycles.

**Result shift register.** This is what makes out-of-order completion safe
without a reorder buffer. Each slot k says which unit writes back k cycles
from now. A fixed-latency operation with latency L may issue only if slot L
is empty. It then books slot L-1 for the next cycle. Variable-latency units
hold their result until a cycle that no booked unit uses. This is how a
short operation overtakes a divide that issued earlier. The core reports
each such event on `ev_ooo_retire`.

**Write-back and branches.** Write-back takes one more registered cycle.
There is no bypass: a dependent instruction issues in the cycle after the
commit. Issue waits behind a branch until the branch resolves. On a wrong
prediction, stages 2-4 are flushed. Every resolved branch trains the
predictor.

Subset of the instruction set (standard encodings):

| form | instructions |
|------|--------------|
| D    | addi addis mulli cmpi cmpli ori oris xori andi. lwz lbz lhz stw stb sth |
| I/B/XL | b bc bclr bcctr (AA, LK honoured) |
| M    | rlwinm |
| X    | add subf neg and or xor nor andc slw srw sraw srawi cmp cmpl extsb extsh mullw mulhw mulhwu divw divwu (Rc honoured), mfspr/mtspr for LR and CTR |

Other encodings execute as no-ops. Division by zero, and signed overflow
(0x80000000 / -1), return 0.

### Address space of the core

| EPP address             | target |
|-------------------------|--------|
| 0x0000_0000-0x0000_2FFF | main memory, 3072 words, big-endian bytes |
| 0x8000_0000-0x800F_FFFF | control bus: main memory again |
| 0x8010_0000 + 4·s       | weight of synapse s (bits 3:0) |
| 0x8020_0000 + 4·c       | rate counter of column c. A read returns the count; a write clears it |
| 0x8030_0000             | event generator. A write sends event `wdata[15:0]`; a read returns the "buffer full" flag |
| 0x8040_0000             | run register. Bit 0 = 1 releases the EPP from reset; it then starts at address 0 |

The outside controller sees the same bus map, starting at 0x8000_0000.
To run a program, the controller:

1. writes the program word by word to 0x8000_0000 and up;
2. writes 1 to 0x8040_0000.

The controller and the program exchange data, such as the reward, through
main memory. On the bus, a master holds its request until the cycle in which
the acknowledge pulses. If the controller and the EPP start a request in the
same cycle, the controller is served first.

## The SYNAPSE unit: reading correlations and updating weights

Synapse address `s = {row, column}` is 9 + 9 bits. The unit adds seven
instructions, all with primary opcode 4 in X form. The sub-operation is in
instruction bits 10:1, and rA holds the synapse address.

| sub | mnemonic | effect |
|-----|----------|--------|
| 1 | `synrd rD, rA`   | rD = weight of synapse rA |
| 2 | `synwr rS, rA`   | weight = rS[3:0] |
| 3 | `syneval rD, rA` | rD = {b1, b0}: the two readout bits of the synapse |
| 4 | `synrst rA`      | clear the synapse's accumulators a+ and a- |
| 5 | `synupd rD, rA`  | w' = clamp(w + A0·b0 + A1·b1, 0, 15). It writes w', clears a+ and a-, and sets rD = w' |
| 6 | `mtsynr n, rS`   | unit register n (RB field) = rS |
| 7 | `mfsynr rD, n`   | rD = unit register n |

The unit registers are:

| n | register | meaning |
|---|----------|---------|
| 0 | A0 | signed 8-bit step, applied when b0 = 1 |
| 1 | A1 | signed 8-bit step, applied when b1 = 1 |
| 2 | CFG0 | evaluation switches for b0 |
| 3 | CFG1 | evaluation switches for b1 |
| 4 | ATL | analog parameter a_tl |
| 5 | ATH | analog parameter a_th |

`synupd` applies the update F(b0, b1) = A0·b0 + A1·b1 to one synapse in a
single instruction. The synapse interface carries it out in this order:
read, evaluate, write, reset. 8-bit weights (two adjacent 4-bit synapses)
and probabilistic updates need a software sequence instead.

### Analog readout, as modelled

Each synapse has two accumulators (`synapse_accumulator`, a behavioural
model):

* a+ collects causal (pre-then-post) spike pairs;
* a- collects anti-causal pairs.

Each pair adds A·exp(-Δt/τ). Pairs follow the reduced symmetric
nearest-neighbour scheme. A spike pairs with the latest spike on the other
side, but only if that spike came after the previous spike on its own side.
The model implements this with one decaying trace per row and one per
column, plus the time of each row's and column's latest spike.

Values are integer codes of 1/16 pS:

| quantity | value in pS | code |
|----------|-------------|------|
| A        | 32 | 512 |
| a_max (saturation) | 1000 | 16,000 |

τ is 200 clock cycles. That is 20 ms of biological time at a speed-up of
10^4, if the clock runs at 100 MHz. There is no drift: the capacitors are
ideal. After reset every accumulator reads 0.

The evaluation unit (`eval_unit`, behavioural) produces one bit. Four
switches choose which accumulators enter each side of the comparison:

b = [ (a_tl + e_ac·a+ + e_ca·a-) / (1 + e_ac + e_ca) > (a_th + e_cc·a+ + e_aa·a-) / (1 + e_cc + e_aa) ]

It computes this exactly, by cross-multiplying instead of dividing. With
CFG = {e_cc, e_ca, e_ac, e_aa}:

* CFG = 0011 gives b = [a+ - a- > a_th - a_tl];
* CFG = 1100 gives the mirror image, b = [a- - a+ > a_th - a_tl].

`syneval` runs one evaluation per configuration, one cycle each.

## Timing summary

* Fetch: one instruction per cycle on cache hits.
* Fixed-point and branch results arrive 2 cycles after issue; multiplier
  results after 3. Write-back adds one cycle.
* Divide: 32 iterations, one cycle to form the result, then write-back.
* Load from main memory: 3 cycles plus write-back.
* Synapse instructions: a few cycles each (request, SRAM or evaluation
  cycles, acknowledge, write-back). `synupd` chains four such requests.

## Simulation

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M`. `tb/tb_isa_pkg.sv` provides
instruction encoders. Compile with the package first, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/epp_pkg.sv \
    $(ls rtl/*.sv | grep -v epp_pkg) tb/tb_isa_pkg.sv tb/tb_building_block.sv \
    --top tb_building_block
./obj_dir/Vtb_building_block
```

`tb_building_block` runs the whole block at full size (448 × 512 synapses,
12 kiB memory) and finishes within seconds. Its sequence:

1. The controller loads a program over the bus and starts the EPP.
2. The program sets up the SYNAPSE unit, writes a weight and clears the
   synapse, then polls a flag in memory.
3. The testbench sends a presynaptic spike and, 20 cycles later, a
   postsynaptic spike.
4. The testbench sets the flag.
5. The program runs `synupd`, a divide, an event write and a rate-counter
   read.

The testbench checks every result. It also checks that each of these
happened at least once: an issue stall, a misprediction, a cache miss, an
out-of-order retirement, host/EPP bus contention and an outgoing event.
`tb_epp_core` runs a longer program on the core alone, covering every unit.

## Where this model departs from the described chip

* **Analog parts are idealised.** The accumulators, the evaluation circuit
  and the synapse weights' analog effect are behavioural. There is no
  noise, offset, drift or settling time. Spike input is at most one
  presynaptic and one postsynaptic event per cycle.
* **Instruction details are this design's own choice.** This covers the
  SYNAPSE instruction set, its register map, the bus address map, the
  arbitration and the rate-counter/event-generator formats. Only the
  existence and purpose of these parts is given in the source
  description.
* **Core details are this design's own choice.** This covers the
  instruction subset, the scoreboard, stalling behind unresolved branches,
  the absence of bypassing, the predictor and cache sizes, and the
  one-word cache lines.
* **Array shape is an assumption.** The array is 448 × 512 = 229,376
  synapses, chosen to match "about 230 k synapses per processor"; the
  shape itself is not given.
* **Missing parts.** Not modelled: the neurons, the wafer network, the
  outside controller, parameter storage, and the 65 nm implementation
  (areas, SRAM macros).
* **Slow elaboration.** At full size, the accumulator model's per-row and
  per-column storage (about 460 k 16-bit values) makes synthesis
  elaboration slow: tens of minutes. Simulation is fast.
