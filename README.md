# Weight streaming for a layer-pipelined DNN accelerator

A layer-pipelined accelerator gives every layer of a network its own compute
engine (CE) and chains the engines with FIFOs, so activations never leave the
chip between layers. Its weakness is memory: classically every weight of
every layer sits in on-chip RAM for the whole run, and a network whose weights
do not fit simply cannot be mapped.

The design here removes that limit. Each CE's weight memory is cut into
fragments; part of every fragment stays on chip (static), the rest is kept in
DRAM and streamed, just in time, into one small dual-clock buffer per CE. The
PEs read a fragment's static words first, and while they do so the DMA fills
the buffer with the fragment's streamed words. A single DMA port serves all
CEs through a scheduler that follows a fixed, precomputed sequence: because a
layer-pipelined network has a static schedule, who needs which weights when
is known at compile time.

The RTL is SystemVerilog (IEEE 1800-2017). It follows the AutoWS
paper (Yu and Bouganis, "AutoWS: Automate Weights Streaming in Layer-wise
Pipelined DNN Accelerators"). The paper describes the method and its
template; the concrete widths, handshakes, encodings and sizes below are this
implementation's own choices and are marked as such.

## Block structure

`autows_top` is

```
in_* -> CE0 -> stream_fifo -> CE1 -> pool_engine -> out_*
         ^                    ^
         | WW-bit beats       | WW-bit beats
         +---- dma_scheduler -+ <-> DRAM read port (dram_*)
```

CE0 and CE1 are convolution engines with streamed weights. `pool_engine` is
a max-pooling engine without weights.

and each `compute_engine` is

```
in (c_p*L_A) -> sliding_window -> pe_array -> output_buffer -> out (f_p*L_A)
                  (k x k window)     ^   (fork + multiply)   (sum, accumulate,
                                     |                         requantise)
                               weights_memory
                         static storage + weight_buffer + mux
                                     ^
                               DMA beats (clk_dma)
```

Every arrow is a valid/ready stream: a word moves in a cycle where both are
high, and a producer holds its word until it moves.

## Compute engine dataflow

Symbols: `b` batch, `h, w` input height and width, `c` input channels, `f`
filters, `k` kernel size, `L_W`/`L_A` weight/activation bits, `x_p` the
parallelism on dimension `x` and `x_t = x / x_p` its loop count. Output size
is `h_out = h - k + 1`, `w_out = w - k + 1` (stride 1, no padding).

| stage | word width | words per image | module |
|---|---|---|---|
| input activations | `c_p*L_A` | `h*w*c_t` | |
| window (input buffer) | `c_p*k^2*L_A` | `h_out*w_out*c_t` | `sliding_window` |
| weights | `f_p*c_p*k^2*L_W` | `h_out*w_out*f_t*c_t` | `weights_memory` |
| products | `f_p*c_p*k^2*(L_W+L_A)` | `h_out*w_out*f_t*c_t` | `pe_array` |
| output activations | `f_p*L_A` | `h_out*w_out*f_t` | `output_buffer` |

Loop order (innermost last): batch, output row, output column, channel group
`ct`, filter group `ft`. The input buffer produces one window per `(pixel,
ct)`; the PE array keeps that window for `f_t` weight words, one per filter
group; the output buffer keeps one accumulator per `(ft, fp)` and emits an
output word per `ft` on the last `ct`.

* **Input buffer** (`sliding_window`). One shift register of
  `((k-1)*w + k-1)*c_t + 1` words. The word that entered `d` words ago is at
  tap `d`, so window element `(ki, kj)` of the current channel group is tap
  `((k-1-ki)*w + (k-1-kj))*c_t`. A window is valid once the row and column
  counters have passed `k-1`. The whole `k x k` window leaves at once
  (`k_p = k`).
* **Data fork**. It is only wiring: the window is broadcast to the `f_p`
  filter lanes inside `pe_array`.
* **PE array** (`pe_array`). `f_p*c_p*k^2` signed multipliers. Window element
  `e = (ki*k + kj)*c_p + cp`; lane `fp` uses weight bits
  `[(fp*E + e)*L_W +: L_W]` with `E = k^2*c_p`.
* **Output buffer** (`output_buffer`). It adds the `E` products of each lane,
  then accumulates over the `c_t` channel groups. On the last group it
  requantises: arithmetic shift right by `SHIFT`, ReLU if `RELU=1`, then
  saturation to signed `L_A` bits. Output lane `fp` of word `ft` is output
  channel `ft*f_p + fp`. Because lanes are channels, a CE with `f_p = F`
  feeds a following CE with `c_p = F` directly.

A fully connected layer is the case `h = w = k = 1`.

**Pooling engine** (`pool_engine`). A pooling layer has no weights. It uses
the same `sliding_window` input buffer. For each channel, a comparator tree
then takes the signed maximum over the `k x k` window positions, and a
register holds the result. One output word of `c_p` channels leaves per
window, in the same order as the input, with stride 1 and no padding.

**Logical weight word** `p = ct*f_t + ft` holds filter `ft*f_p + fp`,
channel `ct*c_p + cp`, tap `(ki, kj)` at bits `(fp*E + e)*L_W`. There are
`M_dep = f_t*c_t` such words, read in order `0 .. M_dep-1` once per output
pixel.

**Rate.** A CE consumes one weight word per `clk_comp` cycle, so it needs
`f_t*c_t` cycles per output pixel. Small bubbles appear at the start of each
row, while the window refills. In the default top, CE0 needs 32 cycles per
pixel and 1152 per image; in simulation, images take at most about 1265
cycles at full speed.

## Weight fragmentation and the dual-clock buffer

This is the core of the design and the part that needs the most care.

**Fragmentation.** The `M_dep` words are split into `n` fragments of
`u_on + u_off` words each, so `(u_on + u_off)*n = f_t*c_t`. In each fragment:

* the first `u_on` words are static;
* the last `u_off` words are streamed.

The static parts of all fragments share one on-chip array of `u_on*n` words.
The streamed parts share one buffer of `u_off` words. For read pointer `p`:

```
i = p / (u_on + u_off)      j = p % (u_on + u_off)
j <  u_on : static word  u_on*i + j
j >= u_on : buffer word  j - u_on     (must hold fragment i)
```

The buffer is therefore refilled `n` times per output pixel, which is
`r = b*h_out*w_out*n` times per batch. `weights_memory` issues one registered
read per cycle. A two-way multiplexer after the two read ports chooses the
word sent to the PEs.

**Word-level checks** (`weight_buffer`). The two sides run on different
clocks:

* the DMA writes in `clk_dma`, `WW` bits per beat, `MW/WW` beats per word,
  lowest slice first;
* the PEs read whole `MW`-bit words in `clk_comp`.

Both sides walk the `u_off` slots in order and wrap, so the streamed words of
fragment after fragment flow through the same storage like a queue. Each side
counts the words it has completed, modulo a power of two larger than
`u_off`. It passes the count to the other side Gray-coded, through a
two-flop synchroniser:

1. **Read after write.** The reader may read its next word only when the
   synchronised write count is ahead of its own read count (`rd_avail`). A
   streamed word is never read before all of its beats have arrived.
2. **Write after read.** The writer may write into its current slot only
   while fewer than `u_off` words are waiting to be read. The word that last
   held the slot has then been read.

A synchronised count can only lag the true one, never lead it, so both checks
are safe. They only cost some waiting. A slot is refilled as soon as its word
has been read, while the PEs go on reading the other streamed words or the
static words. The DMA can therefore load weights whatever the PEs are reading
at the time.

**Timing.** Take a streamed slot whose word the PEs read at time 0. The same
slot is needed again `u_on + u_off` compute cycles later, for the next
fragment. Within that time the read count must cross to the DMA side, the
`MW/WW` beats of the new word must arrive, and the write count must cross
back. Streaming therefore costs nothing when

```
(u_on + u_off) / f_comp  >  (2..3)/f_dma + (MW/WW)/f_dma_effective + (2..3)/f_comp
```

and the DMA delivers the long-run bandwidth
`MW * f_comp * u_off / (u_on + u_off)` bits per second. That bandwidth is
scaled down by the CE's slow-down factor when a slower CE limits the
pipeline. The scheduler shares one DMA port among the CEs in bursts, which
adds the waiting time while other CEs are served. A PE that reaches a
streamed word that has not yet arrived stalls (`raw_stall`).

With `u_off = 0` the buffer is not built, and the CE behaves like a classic
all-on-chip engine.

## DMA scheduler and write-burst balancing

`dma_scheduler` runs in `clk_dma`. It holds:

* a sequence of up to `SEQ_MAX` entries `{port, beats}`;
* one DRAM region `{base, size}` per CE.

For each entry it does three things:

1. It sends one read request `{addr = base + pointer, len = beats}`.
2. It routes the returned beats to that CE only. `rd_ready` follows that
   CE's buffer, so a CE that still owns its buffer holds up the whole port.
3. It advances that CE's pointer, wrapping at the end of the region, and
   moves on to the next entry. After the last entry it starts again.

A CE's region holds its streamed words in the order they are consumed:
fragment `i`, buffer word `j - u_on`, then slice `s` at word address
`(i*u_off + j - u_on)*(MW/WW) + s`. The region size is `n*u_off*MW/WW`.
An entry must not cross the end of a region.

The sequence is static. It is balanced when every CE refills its buffer the
same number of times, `r_l = b*h_out_l*w_out_l*n_l`, equal for all layers.
Then one round of the sequence gives each CE exactly one fragment:
`{CE0, u_off0*MW0/WW}, {CE1, u_off1*MW1/WW}, ...`. If the counts differ, the
sequence must serve a CE with few refills rarely, and with large bursts. The
other CEs then stall behind those large bursts. Choosing `n_l` per layer so
that the `r_l` match avoids this, and the default top is built that way:
both CEs have `r = 6*6*2 = 72` per image.

## Default configuration

No size is fixed by the paper. The defaults are a small three-layer example:

* weight and activation widths `L_W = 4`, `L_A = 5`: the W4A5 precision of
  the paper's ResNet-18 / ZCU102 case study;
* CE0: 3x3 convolution, input 8x8x8, 16 filters, `c_p = f_p = 2`.
  Weight words are 144 bits, `M_dep = 32`, `n = 2`, `u_on = 14`,
  `u_off = 2`. That is 32 cycles per pixel;
* CE1: 1x1 convolution, input 6x6x16, 8 filters, `c_p = 2`, `f_p = 4`.
  Weight words are 32 bits, `M_dep = 16`, `n = 2`, `u_on = 6`, `u_off = 2`.
  That is 16 cycles per pixel, a slow-down factor of 0.5;
* pooling: 2x2 max pooling on CE1's 6x6x8 output, which gives 5x5x8;
* DMA beats of 16 bits; an activation FIFO of 8 words between CE0 and CE1.

Together they hold 1280 weights, 1120 of them in static storage, while 160
are streamed. Real networks (ResNet-18 has 11.7 M weights in 21 layers) need
one CE per layer, instantiated the same way with their own parameters. The
top level here wires exactly these three CEs.

## Top-level interface (`autows_top`)

| group | clock | signals |
|---|---|---|
| activations in / out | clk_comp | `in_valid/in_ready/in_data`, `out_valid/out_ready/out_data` |
| static preload | clk_comp | `ld0_*`, `ld1_*` (address = `u_on*i + j`) |
| scheduler config | clk_dma | `sched_enable`, `cfg_seq_*`, `cfg_reg_*` (write while disabled) |
| DRAM read port | clk_dma | `dram_req_valid/ready`, `dram_req {addr,len}`, `dram_rd_valid/ready/data` |
| status | both | `raw_stall`, `on_rd`, `off_rd`, `dma_blocked` per CE; `sched_round`, `sched_port`, `sched_blocked`; `fifo_level` |

Start-up sequence:

1. Hold both resets. Both are synchronous, active low, and must be asserted
   together.
2. Preload the static words.
3. Release `rst_dma_n`, program the regions and the sequence, then raise
   `sched_enable`.
4. Release `rst_comp_n` and stream images in.

The scheduler starts filling the first fragments at once.

## Simulation

Each module has a self-checking testbench in `tb/`. The testbench computes
the expected values itself and prints `TB_RESULT checks=N failures=M`. For
example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/aws_pkg.sv \
    tb/tb_autows_top.sv --top-module tb_autows_top -Mdir obj_top
obj_top/Vtb_autows_top
```

* `tb_autows_top` runs three images through the design at its default
  parameters. It compares every output with a direct computation of the two
  convolutions and the pooling. It counts each mechanism: read-after-write stalls in each CE,
  DMA beats held by a full buffer, scheduler rounds, beats to each port,
  static and streamed reads, a full inter-CE FIFO and output back-pressure.
  A mechanism that never occurs counts as a failure. The test also checks
  the refill count `r` and the pipeline rate.
* `tb_compute_engine` tests one CE, using a slow and then a fast DMA. With
  the fast DMA no stall may occur, and the rate must be `f_t*c_t` cycles per
  pixel.
* `tb_sliding_window`, `tb_pe_array`, `tb_output_buffer`, `tb_weight_buffer`,
  `tb_weights_memory`, `tb_pool_engine`, `tb_dma_scheduler` and
  `tb_stream_fifo` each test one block. Each drives random gaps and back-pressure, and checks rates where a
  rate is defined.
* `tb/dram_model.sv` is a behavioural DRAM for the testbenches. It takes one
  request at a time and answers with optional random gaps.

Every testbench runs in well under a second.

## Departures from the paper and limits

* The paper describes a template and a toolflow. It gives no concrete layer
  sizes, interface protocols, encodings or reset scheme. All of these are
  choices made here: the valid/ready handshake, signed operands,
  shift-and-saturate requantisation, stride 1 without padding, `k_p = k`,
  the weight word layout, the loop order, the preload port, the DRAM request
  format and the per-CE regions.
* The paper names only a "read-after-write check". Here it is done per
  word, with Gray-coded word counts, and a matching write-after-read check
  keeps unread words from being overwritten.
* The design has convolution and fully connected CEs, and a max-pooling CE.
  The paper only names pooling, so the maximum, the stride and the padding
  are choices made here. The paper also mentions element-wise engines that
  take several activation streams, but does not describe them, so they are
  not built. Depthwise convolution, residual additions and upsampling are
  not built either, although the evaluated networks use them.
* The top level is a fixed three-CE pipeline. The activation DMA to and from
  DRAM is outside the design; activations appear as streams.
* The design-space exploration is not hardware and is not included. It
  chooses unroll factors, fragment sizes and the scheduler sequence, and
  writing a configuration by hand follows the rules above.
* The memories are plain arrays: static storage with one write port and one
  registered read port, and the buffer with a sliced write in one clock and a
  registered read in the other. Mapping them to block RAM is left to
  synthesis.
* The two clock domains meet only in `weight_buffer`. The only signals that
  cross are the two Gray-coded word counts, each through a two-flop
  synchroniser. The memory read on the reader side is safe because the
  writer never touches a word that has not yet been read. Timing constraints for the
  crossing are the user's to write.

## Files

| file | content |
|---|---|
| `rtl/aws_pkg.sv` | shared widths, DMA request type, helper function |
| `rtl/stream_fifo.sv` | valid/ready FIFO |
| `rtl/sliding_window.sv` | input buffer (k x k window) |
| `rtl/pe_array.sv` | fork + multipliers |
| `rtl/output_buffer.sv` | accumulation and requantisation |
| `rtl/weight_buffer.sv` | dual-clock streamed-weight buffer |
| `rtl/weights_memory.sv` | fragmented weight memory |
| `rtl/compute_engine.sv` | one convolution or fully connected layer |
| `rtl/pool_engine.sv` | max-pooling layer |
| `rtl/dma_scheduler.sv` | DMA demultiplexer and sequencer |
| `rtl/autows_top.sv` | three-layer pipeline |
| `tb/*.sv` | testbenches and the DRAM model |
