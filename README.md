# PSCNN: a programmable SRAM computing-in-memory processor for binary 1-D CNNs

PSCNN runs small binary convolutional networks, such as a keyword-spotting
network working on raw audio, with almost no data movement. Every weight of a
layer is stored in a large SRAM array that computes as well as stores. One
1024-bit input window drives all 1024 wordlines at once. Each of 128 sense
amplifiers then reports, in a single cycle, the sign of a 1024-term
dot product for one output channel. Around that array there is a small digital
processor. It fetches layer-level instructions, streams the input feature map
(IFM) into the window, pools the binary outputs as they leave the array, and
writes the output feature map (OFM) back into feature-map SRAM. The next layer
reads it from there.

This SystemVerilog follows the published architecture at block level. The
analog array is a behavioural model. Everything around it is synthesizable
RTL. Where the publication gives no detail (field encodings, handshakes,
buffer depths), the choice made here is stated in the header comment of the
module concerned and summarised below.

## The compute array and what one "fire" means

`cim_macro` stands for the 1Mb array: 1024 wordlines × 1024 bitlines.

- **Ternary weight mapping.** A weight uses two adjacent bitlines, P and N.
  That leaves 512 bitline pairs, i.e. 512 output channels of 1024 weights
  each.
- **One evaluation.** A sense amplifier compares the current of the P line
  with that of the N line. In digital terms:

      dout = popcount(wl & P) >= popcount(wl & N)

  This is a binary neuron: sign(Σ a·w) with a ∈ {0,1} and w ∈ {+1,−1}.
  A weight bit 1 is stored as P=1, N=0; a weight bit 0 as P=0, N=1.
- **Which pairs are read.** There are only 128 sense amplifiers. The 2-bit
  `bl_out` field picks which group of 128 pairs is read (pairs 128·g to
  128·g+127). A layer with up to 128 output channels therefore occupies one
  group.
- **Timing.** `cim_en` in cycle n gives `dout` in cycle n+1.

Every kernel fills all 1024 wordlines, so the kernel size is k = 1024 / C_in.
Tap j of channel c sits on wordline j·C_in + c. With C_in = 8 this means 128
taps; with C_in = 128 it means 8 taps.

## Feeding the window: the line buffer and the three request patterns

`line_buffer` is a 1024-bit shift register loaded 32 bits at a time. A new
word enters at the top, and the whole window moves down by 32 wordlines.
`core_controller` decides which words to shift in for each layer. It uses
one of three patterns:

- **Sliding (dilation 1).** The first output needs 32 words. Each further
  output needs only stride·C_in/32 new words, because the rest of the window
  is reused. With 8 channels and stride 4, that is one word per output. This
  is why the first keyword-spotting layer runs at about one output per cycle.
- **Gather (dilation > 1).** For output t, the controller fetches the
  positions t·s − p + j·d for j = 0..k−1 again. That costs 32 words per
  output and needs C_in ≥ 32.
- **Pool only.** The CIM macro is bypassed (the "shortcut path"). Each
  position's C_in/32 words are collected into a 128-bit value and sent
  straight to the pooling-write block.

Padding counts positions on each side. Padding positions are inserted as zero
words without a memory read. The number of outputs is:

| pattern | outputs |
|---|---|
| sliding | ((L_w + 2·P_w − 32) >> log2(stride·C_in/32)) + 1, where L_w and P_w are counted in words |
| gather | ((L + 2p − d(k−1) − 1) >> log2(s)) + 1, where L and p are counted in positions |

Reads are requested one per cycle and the data arrives one cycle later. The
word that completes a window fires the array one cycle after that. The
completing request is only issued while the pooling-write block has a free
output-buffer slot that no result already in flight has claimed. This credit
check is the only back-pressure in the core.

## Pooling on the way out: the pooling-write block (`pwb`)

Results reach the pooling-write block from the array, or from the shortcut
path in pool-only mode. They pass through:

1. A 4-entry output buffer.
2. The pooling unit. Max pooling of binary values is a bitwise OR, so
   pooling over P outputs is the OR of P consecutive results. The partial
   result is kept in the write buffer and fed back to the OR gates.
3. A write of C_out/32 words to the OFM. Outputs with 8 channels are packed
   four to a word.

At the end of a layer, an unfinished pooling group is dropped. This gives the
floor sizes the reference network expects. A partially filled 8-channel word
is still written.

Because pooling happens while the convolution is being written, a
convolution followed by max-pooling costs no more than the convolution alone.
The published design credits this fusion with about a third less latency on
the keyword-spotting network. Pool-only instructions keep independent pooling
layers possible.

## Feature-map memory: four banks, one address space (`fm_rw_if`)

There are four single-port 2048 × 32-bit SRAMs (64Kb each). They form one
13-bit linear word space {bank, word}. A layer's IFM and OFM may therefore
start anywhere and cross bank boundaries. This is the "flexible ping-pong"
idea: a large first layer can use three banks for its input and output, and
later small layers alternate between two banks. Only banks accessed in a
cycle are enabled; `bank_active` shows them.

The OFM write and the IFM read can hit the same bank in the same cycle. The
write wins, and the read is refused and retried. This is the bank-conflict
stall.

## Weight SRAM and replacement (`weight_sram`, `weight_rw_if`)

A 512 × 1024-bit SRAM holds output channels that do not fit in the array.
A Replace instruction copies `length` channels (bitline pairs) at one per
cycle, between weight-SRAM words and array pairs.

- Direction 0 copies weight SRAM → array.
- Direction 1 copies array → weight SRAM.
- `done` comes length+2 cycles after start.

The host also reaches both memories through this block. It uses a 32-bit port
with a 1024-bit staging register, which commits on beat 31.

## Instructions (`pscnn_pkg`, `system_controller`)

Each instruction is 32 bits, with the opcode in bits 31:29. The field widths
and order follow the published format. The encodings of the 2-bit codes are
this design's own.

| opcode | fields (MSB → LSB) |
|---|---|
| `111` MAC | type 2, in_range 13 (IFM length in words), chn_in 2, padding 4, stride 2, bl_out 2, chn_out 2, dilation/pool 2 |
| `101` Replace | reserved 1, direction 1, cim_addr 9, weight_sram_addr 9, length 9 |
| `100` Pointer | reserved 1, wbbias 2, src 2, read_addr 11, dst 2, write_addr 11 |
| `000` Halt | – |

The 2-bit codes mean the following:

| field | encoding |
|---|---|
| chn_in, chn_out | 00 = 8, 01 = 32, 10 = 64, 11 = 128 |
| stride | 1 << code |
| dilation | code + 1 |
| type | 00 convolution; 01 pooling only, size 2 << dil_pool; 10 convolution + max-pool 2; 11 convolution + max-pool 4 |

The Pointer instruction sets IFM base = {src, read_addr} and OFM base =
{dst, write_addr}. `wbbias` is decoded but unused, because its meaning is not
published.

The system controller runs one instruction at a time to completion. It
starts at address 0 and stops at Halt.

## Host port and top level (`io_interface`, `pscnn_top`)

`host_req_t` carries {we, re, sel, addr, wdata}. A read returns `host_rdata`
with `host_rvalid` one cycle later. Access is allowed only while the
processor is idle, which an assertion checks. The `sel` field picks the
target:

| sel | target | address |
|---|---|---|
| 0 | instruction registers | addr[5:0] |
| 1 | FM space | addr[12:0] |
| 2 | weight SRAM | addr = {word, beat} |
| 3 | array | addr = {pair, beat} |

The normal flow is:

1. Load the program, the IFM and the weights.
2. Pulse `start` and wait for `done`.
3. Read the OFM.

The `ev_*` outputs pulse for observation: array fire, shortcut result, pooled
write, replacement done, conflict stall and credit stall.

## The keyword-spotting network and how it maps

The reference network takes 1 s of 16 kHz audio with 8-bit samples, treated
as 8 binary channels.

| layer | shape |
|---|---|
| 1 | 8→64, k128, s4 |
| – | max-pool 4 |
| 2 | 64→64, k16, s2, p8 |
| – | max-pool 2 |
| 3 | 64→128, k16, d2 |
| – | max-pool 2 |
| 4–6 | 128→128, k8, d2, each followed by max-pool 2 |
| 7 | 128→12, k8 |
| – | global average pool 16 |

Each convolution with its pooling is a single MAC instruction.

- **Lengths.** The layer lengths come out as 3969→992, 497→248, 124, 62,
  31, 15 and 16.
- **Work.** The network needs 354M MACs and 652 channels × 1024 weights
  = 652Kb.
- **Weights.** With one layer per 128-pair group, layers 1–4 are held in the
  array. Layers 5–7 are replaced from the weight SRAM when they are needed.
- **Feature maps.** The largest feature-map pair, layer 1, needs 5984 of the
  8192 words.
- **Cycles.** Counting one word per cycle gives about 21k cycles per
  inference, or 2.1 ms at 10 MHz. The published figure is 2.32 ms.

## Departures and limits

- **Global average pooling is not done on chip.** The pooling unit only has
  OR gates. The host reads the 16 × 12 final outputs and counts.
- **The array is a behavioural model.** It uses an ideal popcount compare,
  with no variation, no analog timing and no power.
- **Dilated layers are slower than they could be.** They re-gather 32 words
  per output. The published design activates wordlines selectively instead,
  in a way not described precisely enough to copy.
- **Layout restrictions.** A sliding layer needs stride·C_in and padding·C_in
  to be multiples of 32. Gather and pool-only layers need C_in ≥ 32.
- **Instructions run strictly one after another.** A weight replacement does
  not overlap a MAC layer.
- **Not modelled:** power gating of idle banks (only the enables are shown),
  clocking, and the SRAM macros' own timing. The memories are plain arrays
  with a one-cycle read.

## Simulating

Each block has a self-checking testbench in `tb/`. It ends by printing
`TB_RESULT checks=N failures=M`. `tb/tb_ref_pkg.sv` holds an independent
reference model: binary convolution with padding, stride and dilation,
max-pooling, and word packing. `tb_pscnn_top` runs the whole processor at its
default sizes:

1. It runs a small multi-layer program through the host port. The program
   covers sliding and dilated convolution, fused pooling, pool-only shortcut
   layers, 8-channel packing, a weight replacement, bank conflicts and
   credit stalls.
2. It compares every OFM word with the reference model.
3. It checks that each mechanism occurred at least once.

For example:

    verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
      -Irtl -Itb -y rtl -y tb rtl/pscnn_pkg.sv tb/tb_ref_pkg.sv \
      tb/tb_pscnn_top.sv --top-module tb_pscnn_top -Mdir obj && obj/Vtb_pscnn_top

Replace `tb_pscnn_top` with any other `tb_*` to test one block. The full
keyword-spotting network has not been simulated end to end. The largest run
is the `tb_pscnn_top` program, about 12k cycles at full array and memory
sizes.
