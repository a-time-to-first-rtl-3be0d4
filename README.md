# A log-domain time-to-first-spike SNN processor in SystemVerilog

This is a spiking neural network (SNN) inference processor. It runs deep networks
converted from ordinary trained ANNs, such as VGG-16. Every neuron fires at most once,
and the time of that spike carries the neuron's value: the earlier the spike, the larger
the value. This is time-to-first-spike (TTFS) coding.

The value attached to a spike time is chosen so that the hardware needs no multiplier:

* a spike at encoding timestep `t` (1..T) stands for `2^(-(t-1)/tau)`;
* the weights are quantised logarithmically to the base `2^(-1/2)`.

The product of a spike and a weight is then a power of two with a fractional exponent.
A 4-entry lookup table and a barrel shifter compute it. The design uses `T = 24`,
`tau = 4` and 5-bit weights, runs at 250 MHz and has 128 processing elements (PEs).

The dataflow is that of SpinalFlow:

1. The input spikes of one output position are sorted by time.
2. They are broadcast, one per cycle, to 128 PEs. Each PE accumulates the membrane
   voltage (Vmem) of one output channel. This is the *integration phase*.
3. The 128 Vmems are then encoded back into spikes. This is the *fire phase*.

## Block diagram

```
              off-chip DRAM (32-bit word port)
                     |
                    dma ---------------------------------------------+
        +------------+-------------+----------------+                |
        v            v             v                v                |
  input_buffer   weight_buffer x4  ppu bias file   output_buffer ----+
   (48KB)         (90KB each)          |            (192B)
        |            |                 |               ^
     minfind --spike--> pe_array --Vmem--> ppu --> spike_encoder
  (merge-sort)   (4 x 32 log_pe)       (bias)    (threshold LUT, comparators,
                                                  priority encoder, reset)
  top_control: host registers, DMA commands, phase sequencing
```

| file | block |
|---|---|
| `rtl/snn_pkg.sv` | constants, types, the `2^(-f/4)` table and the threshold function |
| `rtl/log_pe.sv` | logarithmic PE (one neuron) |
| `rtl/weight_buffer.sv` | 90KB weight SRAM of one 32-PE group |
| `rtl/pe_array.sv` | 4 groups x (weight buffer + 32 PEs), input gating |
| `rtl/input_buffer.sv` | 48KB input-spike buffer |
| `rtl/minfind.sv` | merge-sort of the spike lists |
| `rtl/ppu.sv` | post-processing: bias, masking of gated PEs |
| `rtl/spike_encoder.sv`, `rtl/prio_enc.sv` | TTFS encoder with 128-to-7 priority encoder |
| `rtl/output_buffer.sv` | 192B output-spike buffer |
| `rtl/dma.sv` | DRAM <-> buffer transfers |
| `rtl/top_control.sv` | register file and phase sequencer |
| `rtl/snn_top.sv` | the whole processor |

## Number formats

The encoding follows the description of the processor. The bit widths are choices of
this implementation.

| quantity | format |
|---|---|
| input spike (input buffer) | 16 bits: `{2'b0, ts[4:0], ch[8:0]}`, two per 32-bit word |
| sorted spike (to the PEs) | `{ts[4:0], nid[12:0]}`, with `nid = list*512 + ch` |
| weight | 5 bits: `{sign, m[3:0]}`, value `(-1)^sign * 2^(-m/2)`; `m = 15` means zero |
| Vmem, bias | 24-bit two's complement with 16 fraction bits (1.0 = 65536), saturating |
| output spike | 12 bits: `{id[6:0], ts[4:0]}`, one per 32-bit DRAM word |

The weight code covers 15 magnitudes, from 1 down to `2^-7`, plus zero. This is the
range that 5-bit log quantisation with a clip of `2 - 2^(bw-1)` gives. A layer's
full-scale range is assumed to be folded into the weights and biases offline, so the
largest magnitude is 1.0.

## The logarithmic PE

For a spike at time `t` and a weight `{s, m}`:

```
p      = (t - 1) + 2*m              exponent in quarter-octaves
term   = LUT[p mod 4] >> (p div 4)  LUT[f] = round(2^(-f/4) * 2^16)
Vmem  += s ? -term : term
```

This is the paper's "LUT(Frac) shifted by Int" identity. Both the kernel and the weights
are at most 1, so the shift goes right, as the PE drawing shows.

* The adder, LUT, shifter, sign and accumulator are combinational into one register.
* A PE takes one spike per cycle.
* Across the array that is 128 synaptic operations per cycle, or 32 GSOP/s at 250 MHz.
  This matches the reported figure.

`pe_array` reads the weight row addressed by the spike's neuron ID in cycle `c`. The PEs
accumulate at the end of `c+1`, so Vmem shows a spike two cycles after it was issued.

**Input gating.** Only the first `active_pes` PEs run:

* A group of 32 PEs with no active PE does not read its weight buffer and does not
  load its timestep register.
* Inactive PEs get no enable.
* The PPU zeroes their Vmems, so they cannot fire.

## Sorting the input spikes: minfind

Input spikes are stored as up to nine lists, one per input pixel of a 3x3 kernel window.
Each list is already sorted by time and holds entries `{ts, channel}`. The weight-buffer
row of a spike is `list*512 + channel`. A buffer row therefore covers a 3x3x512
receptive field: 4608 rows of 32 five-bit weights is exactly 90KB. A fully connected
layer uses the lists as chunks of 512 inputs.

How `minfind` merges the lists:

* Each list keeps a two-entry prefetch FIFO.
* Each cycle, one input-buffer read refills the list that is furthest behind: empty
  lists first, lowest index on a tie.
* A spike is emitted only when every list that still has entries shows its head. The
  smallest head is then the global minimum. Ties go to the lowest list index.
* After a fill of about two cycles per list, the merge streams one spike per cycle. This
  holds even when every spike comes from the same list.

Example from the end-to-end test: 4608 spikes take 4628 cycles.

## The fire phase: spike encoder

At the end of integration:

1. The PPU adds the biases. The Vmems are copied into the encoder's buffer, with negative
   values replaced by zero.
2. With `t = 1`, each cycle all 128 comparators test `Vmem >= 2^(-(t-1)/4)`. The
   threshold comes from a 24-entry table.
3. If any neuron passes, the priority encoder selects the lowest ID among them. The
   encoder emits `(ID, t)` into the output buffer, and the decoder resets that neuron's
   Vmem to zero.
4. If none passes, `t` advances by one.
5. Encoding stops when every Vmem is zero, or after timestep `T = 24`.

A pass therefore takes one cycle per output spike, plus one per timestep advance, plus
one. The output buffer holds 128 entries of 12 bits (192B): one per neuron, so it cannot
overflow. The DMA then writes the spikes to DRAM.

The encoder fires at the first timestep whose threshold the Vmem reaches. So a value is
rounded *down* to a power of `2^(1/4)`, and anything below `2^(-23/4)` is dropped.

## Operation and host interface

The host writes 32-bit registers through `cfg_we/cfg_addr/cfg_wdata`. Writing the
command register starts a command. `busy` stays high until `done` pulses, and writes
made while busy are ignored.

| addr | register |
|---|---|
| 0..8 | `list_base[l]`: input-buffer entry address of list `l` |
| 9..17 | `list_len[l]`: spikes in list `l` |
| 18 | `active_pes` (0..128; 128 after reset) |
| 19 | `out_addr`: DRAM word address for the output spikes |
| 20..23 | DMA operands: DRAM address, buffer address (word, row or entry), length in words, weight group |
| 24 | command: 0 load input buffer, 1 load weight buffer, 2 load biases, 3 store output buffer, 4 RUN |

Each DRAM word delivers one of the following:

* two input-buffer entries;
* one of the five 32-bit words of a weight row (lanes 0..31, 5 bits each, LSB first);
* one bias, in its low 24 bits.

A RUN computes one output position for up to 128 output channels, in these steps:

1. Clear the Vmems and the output buffer.
2. Merge and integrate the input spikes.
3. Wait two cycles for the PE pipeline to drain.
4. Add the biases (PPU).
5. Encode the spikes.
6. Store the output spikes to `out_addr`. This step is skipped if there are none.

Afterwards, `spike_count`, `integ_cycles` and `enc_cycles` report the spike count and
the length of each phase. A whole layer is a host-driven sequence of loads and RUNs.

The DRAM port is word addressed:

* A request is taken when `dram_req_valid && dram_req_ready`.
* Read data returns in order on `dram_rsp_valid`, with any latency.

## What is the paper's, and what is not

**Taken from the paper:**

* the number and grouping of the PEs, and the buffer sizes (48KB, 4 x 90KB, 192B);
* T = 24, tau = 4, the base `2^(-1/2)` and the 5-bit weights;
* the PE structure;
* the spike encoder's parts and its algorithm (clamp negatives, start at timestep 1,
  priority-encoded firing with reset of the fired Vmem, advance, stop);
* the phase order.

**Choices of this implementation:**

* all bit widths and formats;
* the list-per-kernel-position organisation and the prefetch scheme of minfind;
* the PPU's function, which the paper only names (bias addition here);
* the DMA commands, the DRAM port and the host registers;
* lowest-ID priority.

**Known departures and gaps:**

* The training activation rounds a value *up* to the next kernel level (a ceiling).
  The comparator encoder described for the hardware fires at the first threshold
  reached, which rounds down. The RTL follows the hardware description.
* The equation for the log product writes the shift as a left shift. The PE drawing
  shows a right shift, and the RTL follows the drawing.
* The text once compares against "126" PEs, while the table and architecture give 128.
  128 is built.
* Max pooling, the final classifier readout (the output layer has no activation; here
  its neurons are read as first-spike times) and the overlap of one layer's fire phase
  with the next layer's integration are not built.
* The kernel is fixed at tau = 4. The alternative settings T/tau = 48/8 and 12/2, which
  the paper evaluates for training, would need a larger fraction table and a wider
  timestep.
* The Vmem width (24 bits with 16 fraction bits) is not given in the paper. Sums outside
  +-128 saturate.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. `tb/tb_ref_pkg.sv` computes the expected values with
real arithmetic, independently of the RTL's tables. `tb/dram_model.sv` is a behavioural
DRAM with random back-pressure.

For example, the end-to-end test at full size:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/snn_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/dram_model.sv tb/tb_snn_top.sv \
  --top-module tb_snn_top
./obj_dir/Vtb_snn_top
```

It runs four RUNs with the top at its default parameters:

* a small one;
* one with 70 active PEs;
* one whose biases silence every neuron;
* a full VGG-16 3x3x512 receptive field (4608 input spikes, all 4608 rows of all four
  weight buffers).

It compares each output spike with the reference and checks the per-phase cycle counts.
It also requires that each of the following happens at least once: input gating, DRAM
stalls, clamping of a negative Vmem, several neurons over threshold at once, timestep
advance, early and at-T end of encoding, zero weights, and a RUN with no output. Compile
and run take about a minute.

`tb/tb_conv_layer.sv` runs a whole small convolution layer: a 6x6x8 spike map, a 3x3
kernel with padding 1, and 20 output channels, so 108 PEs are gated. The input spike
lists are loaded into the input buffer once and reused by every output position that
needs them: the host only re-points the nine list registers before each of the 36 RUNs.
The test checks every output spike and that each input word is read from DRAM exactly
once.

The other testbenches build the same way: replace the last file and the top name.
