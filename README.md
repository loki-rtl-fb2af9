# LOKI: an event-driven LIF layer with a multi-cycle clock-gated synapse memory

LOKI runs one fully connected layer of a spiking neural network.
- The layer has 256 leaky integrate-and-fire (LIF) neurons and 256 inputs.
- Each of the 65,536 synapses holds a signed 4-bit weight.
- Each neuron keeps a signed 8-bit membrane potential.

Input spikes arrive one at a time as address events. A spike from input *j* adds column *j*
of the weight matrix to all 256 potentials. A special *time reference* event closes the
timestep. At that event, every neuron above threshold fires and is reset to zero, and every
other neuron leaks towards zero. The spikes produced are sent out in blocks of 32.

The design is organised around three ideas from the LOKI accelerator paper (GF22FDX, 667 MHz, 0.59 V):

* **The synapse memory is slow but read every cycle.** It is split into four banks. Each bank
  is clocked only once every four cycles, through its own clock gate, and reading the banks in
  rotation still returns one 128-bit word (32 weights) per cycle. In silicon this lets the SRAM
  run at a low voltage with a four-cycle access time while the logic around it keeps one fast
  clock.
* **32 neurons are updated per cycle.** Their potentials live in a small latch memory of two
  banks, so that one group is written back while the next is read.
* **Output spikes leave as 32-bit vectors with a 3-bit group address** ("block AER"). One
  handshake carries up to 32 spikes, so the output link does not hold back the pipeline.

This repository gives synthesizable SystemVerilog for the whole digital core. The only
exception is the SRAM macro, which is a behavioural model. Each source file opens with a
comment on its function, its timing and where it departs from the published description.

## Pins

| Pin | Dir | Width | Function |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | core clock, active-low reset |
| `spi_sck`, `spi_csn`, `spi_mosi` | in | 1 | SPI slave, mode 0, used for configuration |
| `spi_miso` | out | 1 | SPI read data |
| `aer_in_req` | in | 1 | input event request (asynchronous) |
| `aer_in_addr` | in | 17 | input event address |
| `aer_in_ack` | out | 1 | input event acknowledge |
| `aer_out_spikes` | out | 32 | output spike vector |
| `aer_out_addr` | out | 3 | neuron group of the vector |
| `aer_out_req` | out | 1 | output request |
| `aer_out_ack` | in | 1 | output acknowledge (asynchronous) |

Everything inside runs on `clk`. The SPI pins and both AER handshakes pass through two-stage
synchronizers, so the chip has no second clock domain.

**Input events.** An event is a four-phase handshake:
1. The sender puts the address on the bus and raises REQ.
2. LOKI captures the address and raises ACK.
3. The sender drops REQ.
4. LOKI drops ACK.

The address holds one of two events:
- Bit 16 = 0: a spike from input `addr[7:0]`. Bits 15:8 are ignored.
- Bit 16 = 1: the time reference event.

LOKI buffers one event. While that buffer is still occupied, ACK is held back, and this is
how the core stalls the sender.

**Output events.** The output link uses the same four-phase handshake in the other direction.
Neuron *n* fired if bit `n % 32` of `aer_out_spikes` is set in the vector whose
`aer_out_addr = n / 32`. Groups with no spike are not sent.

## The neuron update pipeline

This is the heart of the design. An input spike from input *j* is processed as 8 *groups* of
32 neurons. Group *g* needs:
- synapse word `{j, g}`: 11 bits, 32 weights of 4 bits;
- neuron-memory word *g*: 32 potentials of 8 bits.

The controller issues one group per cycle. The word address `{j[7:0], g[2:0]}` is split as
follows:
- Bank: the two low bits, which are `g[1:0]`. The 8 groups therefore rotate through the four
  banks twice.
- Row: the upper 9 bits.

With the event accepted in cycle 0:

| cycle | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 | 13 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| address presented (group) | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | – | 0′ | 1′ | 2′ | 3′ | 4′ |
| bank clock pulse (bank) | | 0 | 1 | 2 | 3 | 0 | 1 | 2 | 3 | | 0 | 1 | 2 | 3 |
| read stage R: weights out, potentials read, LIF update (group) | | | | | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | | 0′ |
| write stage W: potentials written (group) | | | | | | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | |
| neuron-memory bank read / written | | | | | 0/– | 1/0 | 0/1 | 1/0 | 0/1 | 1/0 | 0/1 | 1/0 | –/1 | 0/– |

The primes mark the next event, which is accepted in cycle 9. A single idle cycle (cycle 8
above) after the eighth group makes the event period 9 cycles, the period of the published
timing diagram. There, the next event's weight reads occupy cycles 10–13, while the previous
event's last groups are still being updated.

The published description does not say why the period is 9 and not 8. In this implementation
an 8-cycle period would also respect the bank rule, because bank 0, clocked in cycle 5, could
be clocked again in cycle 9. It would also respect the neuron-memory bank alternation. The
idle cycle is kept to match the published schedule and throughput.

Either way, the weight prefetch of one event overlaps the neuron updates of the one before. In steady
state the layer performs 256 synaptic operations every 9 cycles: 18.97 GSOP/s at 667 MHz. The
published figure is 18.8 GSOP/s.

How the stages line up:

* **Synapse path.** The controller presents `syn_en` and `syn_addr` in cycle *g*. The bank
  decoder turns the two low address bits into the enable of one clock gate. The gate is a latch
  that is transparent while `clk` is low, ANDed with `clk`, so the selected bank receives one
  full clock pulse at the start of cycle *g*+1. That edge captures the row address.
  The bank then has four cycles to complete its read. A four-stage shift register remembers
  which bank was clocked. Four cycles after the address was presented, the output multiplexer
  selects that bank. The published block diagram leaves the control of this multiplexer open,
  and the shift register is this design's choice. An assertion fires if a bank is accessed
  again within its four-cycle window.
* **Group tag.** A tag `{valid, op, group}` travels down a four-stage delay line beside the
  address. It reaches stage R in the same cycle as the weights.
* **Read stage R.** The tag's group selects a word of the neuron memory, which is read
  combinationally. The 32 `loki_lif_neuron` lanes compute the new potentials, and the spike
  bits on a time reference pass, in the same cycle.
* **Write stage W.** See the next section.

Groups alternate between the two neuron-memory banks: group *g* lives in bank `g[0]`, word
`g[2:1]`. Stage R therefore always reads one bank while stage W writes the other.

### Latch timing in the neuron memory

The neuron memory is 8 words of 256 bits, built from level-sensitive latches as in the
original design. A latch that was transparent around the rising edge of `clk` would race with
the pipeline registers that sample data read from it. The write is therefore split in two:
1. At the end of stage R, the write enable, the group and the 256-bit result are captured in
   ordinary flip-flops.
2. During the low phase of the following cycle (W), the addressed word's latches are
   transparent. Their enable is the registered write enable ANDed with `!clk`, which cannot
   glitch.

A word is thus never open at a rising edge. Its new value can be read from the cycle after W
onwards. Because the same group of the next event is read at least 8 cycles later, there is no
read-after-write hazard.

## The LIF lanes

Each lane is a combinational unit, driven by the operation carried in the tag:

| op | result |
|---|---|
| integrate (input spike) | `v = sat8(v + w)`: the 4-bit weight is sign-extended, and the sum clamps to [-128, 127] |
| leak-and-fire (time reference) | if `v > vth`: spike, `v = 0`; else `v = v - (v >>> k)` |
| clear | `v = 0` |

The leak factor is restricted to α = 1 − 2⁻ᵏ, so leaking is a subtraction of an arithmetic
right shift. Because the shift rounds towards −∞, the subtraction always moves a negative
potential towards zero too. For example, −1 leaks to 0.

The threshold `vth` (INT8) and the shift `k` (0–7) are shared by all neurons. `k = 0` clears
every neuron that does not fire.

A neuron fires only when its potential *exceeds* the threshold (strictly greater). The
saturating sum is this design's reading of the clamp that the training flow applies to the
potentials.

## Time reference events and output flow control

A time reference event runs the same 8-group pass with the leak-and-fire operation. It reads
no synapses, but the schedule is the same. Each group with at least one spike pushes
`{group, spikes}` into a 4-entry FIFO. The block AER transmitter drains the FIFO with one
handshake per vector. It needs about 8 cycles per vector when the receiver acknowledges
immediately.

If the receiver is slow, the FIFO can fill. The controller keeps a credit count: it issues a
leak-and-fire group only when the FIFO has room for that group *and* for every leak-and-fire
group already in the pipeline. Otherwise it holds the pipeline. No spike is ever lost, and
spike events behind the time reference wait in the AER input buffer, which back-pressures the
sender through ACK.

## Configuration over SPI

The SPI slave is oversampled in the core clock domain, so SCK must be several times slower
than `clk` (the testbench uses clk/8). A frame is framed by `spi_csn` low and is 48 bits, MSB
first: `{rw, addr[14:0], data[31:0]}`, where `rw = 1` means write. On a read, MISO returns the
32-bit register during the data field.

| address | register |
|---|---|
| `0x0000` | VTH: INT8 firing threshold (bits 7:0) |
| `0x0001` | LEAK: shift k (bits 2:0) |
| `0x0002` | CTRL: writing bit 0 = 1 clears all 256 potentials |
| `0x0003` | STATUS, read only: bit 0 core busy, bit 1 weight write pending |
| `0x4000 \| word<<2 \| chunk` | weights: `word` is the 11-bit synapse word `{input j, group g}`, `chunk` selects 32 of its 128 bits |

Weight word layout: lane *i* (neuron 32g + i) holds its weight in bits `4i+3:4i`. Chunk 0 is
bits 31:0 and chunk 3 is bits 127:96. Write the chunks in the order 0, 1, 2, 3. Writing chunk 3
completes the word and requests one SRAM write. The controller grants the request only while
the pipeline is empty, then keeps the memory idle for 3 more cycles.

A host therefore loads a layer as follows:
1. Write 2048 × 4 weight frames.
2. Write VTH and LEAK.
3. Stream events.

Reset clears all potentials with an automatic clear pass.

## Source files

| file | block |
|---|---|
| `rtl/loki_pkg.sv` | sizes, operation codes, tag / event / spike-vector structs, register map |
| `rtl/loki_top.sv` | top level: wiring of everything below, 32 LIF lanes |
| `rtl/loki_controller.sv` | event sequencing, group issue, tag delay line, credit flow control, weight writes, clear |
| `rtl/loki_synapse_mem.sv` | MCCG synapse memory: bank decoder, 4 clock gates, 4 banks, output mux |
| `rtl/loki_clock_gate.sv` | latch-based clock gate |
| `rtl/loki_sram_bank.sv` | behavioural model of one 512 × 128 SRAM macro (8 KB) |
| `rtl/loki_neuron_mem.sv` | 2 × 4 × 256-bit latch memory |
| `rtl/loki_lif_neuron.sv` | one LIF lane |
| `rtl/loki_spike_fifo.sv` | output spike-vector queue |
| `rtl/loki_aer_rx.sv` | AER input receiver |
| `rtl/loki_block_aer_tx.sv` | block AER output transmitter |
| `rtl/loki_spi_csr.sv` | SPI slave and registers |
| `rtl/loki_sync2.sv` | two-flop synchronizer |

The sizes in `loki_pkg` (neurons, inputs, lanes, number widths, banks, bank size) are the
published ones and are used everywhere. The FIFO depth of 4 follows the drawing of the queue
in the published block diagram. The pipeline schedule assumes 8 groups and 4 banks.

Lint notes:
- Verilator reports the latches in `loki_clock_gate` and `loki_neuron_mem`. They are intended.
- It reports five unused status nets in `loki_top`. The testbench observes them, and no logic
  uses them.
- It reports `rst_n` as both synchronous and asynchronous. The synchronous use is only the
  disable condition of the assertions.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/loki_pkg.sv tb/tb_loki_top.sv --top-module tb_loki_top -o sim
./obj_dir/sim
```

Replace `tb_loki_top` by any other testbench name to test a single block.

| testbench | what it checks |
|---|---|
| `tb_loki_clock_gate` | gated pulses are whole clock pulses, only after an enabled low phase |
| `tb_loki_sram_bank` | every row written with random data, read back in random order, output held between reads |
| `tb_loki_synapse_mem` | all 2048 words written, 8-word bursts and single reads: data exactly 4 cycles after the address, one word per cycle |
| `tb_loki_neuron_mem` | simultaneous read of one bank and write of the other, write timing |
| `tb_loki_lif_neuron` | every combination of potential, weight, threshold and k (exhaustive) |
| `tb_loki_spike_fifo` | random push/pop against a queue, full/empty/count |
| `tb_loki_aer_rx` | handshake order, captured addresses, back-pressure by a slow consumer |
| `tb_loki_block_aer_tx` | handshake with random acknowledge delays, data order and stability |
| `tb_loki_spi_csr` | register writes and read-back, weight word assembly, clear pulse |
| `tb_loki_controller` | the cycle schedule above, including the 9-cycle event period |
| `tb_loki_top` | the whole chip at full size through its pins, against a model of the layer |

`tb_loki_top` runs the complete design at its default size in a few seconds:
1. It loads a random 256 × 256 weight matrix over SPI.
2. It runs sparse timesteps with a slow output receiver.
3. It runs the peak-load case: 10 timesteps in which all 256 inputs spike.
4. It clears the potentials over SPI.

A reference model predicts every output vector, and at the end the neuron memory must match
it. The testbench also checks that dense events are accepted every 9 cycles. It counts how
often each mechanism occurred, and any mechanism that never happened counts as a failure:
- weight writes
- input stalls
- overlapped events
- saturation
- firing
- leak
- skipped empty vectors
- FIFO stalls
- clears

A typical run completes 256 events in 2,304 cycles per dense timestep, with 392 checks and no
failures.

## What fits

The memory holds exactly one 256-input, 256-neuron layer:
- It runs the peak-load benchmark (a 256-256 layer at full input activity).
- It runs the hidden LIF(256:256) layers of both published networks: N-MNIST and keyword
  spotting on SHD.

Three other layers do not fit, or do not apply:
- The input layers, with 1156 and 700 inputs, are larger than the 256 inputs the memory can
  address.
- The output integrator layers need α = 1 with no firing, which the leak encoding cannot
  express.

The published evaluation likewise ran only the hidden layer on the chip.

## Departures and open points

Where the published description is silent, this design makes its own choices:

* **AER address encoding.** Bit 16 marks the time reference event, and bits 7:0 carry the
  input index.
* **SPI.** The frame format, the register map and the chip-select pin are this design's own.
  The original lists only SCK, MOSI and MISO.
* **Reset.** There is a reset pin, and potentials are cleared after reset and on request.
* **Idle cycles.** One idle cycle per event produces the 9-cycle period. After a weight write
  there are three idle cycles.
* **Multiplexer control.** The synapse output multiplexer is steered by a shift register that
  remembers which bank was accessed.
* **Latch write timing.** Writes are registered at the end of R, and the latch opens in the
  low phase of W.
* **Output queue.** The FIFO depth is 4, as drawn in the block diagram. Empty spike vectors
  are not sent, and the controller stalls the pipeline on credit when the FIFO is full.
* **Saturation and firing test.** Integration saturates, and a neuron fires only when its
  potential exceeds the threshold (the strict test).
* **Synapse row address.** The published block diagram labels the bank row address
  `ADDR[11:2]`. Its caption and the memory size (4 banks × 8 KB = 64k × 4 bit) call for a
  9-bit row, so this design uses `ADDR[10:2]`.
* **Throughput.** The computed throughput at 667 MHz is 18.97 GSOP/s. The published figure is
  18.8 GSOP/s.

Limits on how far the RTL can be trusted:

* **SRAM timing.** The SRAM bank is a zero-delay behavioural model. The four-cycle read window
  is respected by construction and asserted, but the macro's real timing is not modelled.
* **Clocking in silicon.** The clock gates and the latch memory work in a two-state
  cycle-based simulator. A gate-level flow still needs the usual clock-gate cell mapping and
  timing constraints for the latches.
* **Energy and area.** The published numbers depend on a low-voltage SRAM macro and on the
  22 nm library, and cannot be reproduced from this RTL.
* **SPI timing.** SPI timing is checked only at SCK = clk/8.
