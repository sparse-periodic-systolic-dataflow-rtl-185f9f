# SPS: a sparse periodic systolic convolution accelerator

Pruned CNN weights usually cost their savings back in indexing: every
surviving weight needs a coordinate (COO) or a row/column pointer (CSR/CSC),
and the hardware needs buffers and multiplexers to pair each weight with its
activation. *Periodic pattern-based sparsity* removes almost all of that.
Every 3x3 kernel keeps exactly KSS weights, at positions chosen from only P
predefined patterns ("kernel variants"), and the pattern of a kernel is not
free: it rotates with period P across the input channels and across the
filters. The pattern used by output channel `oc` on input channel `ic` is

    KV(oc, ic) = (oc mod P + ic mod P) mod P

so the position of every nonzero weight of a layer is known from P*KSS kernel
coordinates. This RTL implements the accelerator of the paper *Sparse
Periodic Systolic Dataflow for Lowering Latency and Power Dissipation of
Convolutional Neural Network Accelerators* (Heo, Fayyazi, Esmaili, Pedram)
around that fact: a weight-stationary systolic array whose only indexing
hardware is a 16-entry table and an adder.

The default configuration is the evaluated one, P = 8 and KSS = 2
(W_NUM = 16 nonzero positions in all), with a 32 x 16 array of processing
elements (PEs). The array size, data widths, buffer depths, memory layouts
and all handshakes are choices made for this RTL; the paper gives none of
them. They are listed in "Departures and choices" below.

## Grouping channels so that one step needs one pattern

Group input channels by `ic mod P` and output channels by `oc mod P`. Inside
filter group `g` (channels `g, g+P, g+2P, ...`) and input slot `kv`
(channels `kv, kv+P, ...`) every kernel uses the same variant,
`(g + kv) mod P`. So for one (g, kv) pair, the w-th nonzero weight of all
those kernels sits at the same (kh, kw), and one index lookup serves a whole
tile of the array. The index table entry of step (g, kv, w) is

    e = ((g + kv) * KSS + w) mod W_NUM

which is the paper's formula; entry `k*KSS + w` holds the w-th nonzero
position (kh, kw) of kernel variant k. Because `g + kv < 2P`, the modulo is a
single conditional subtraction (`sps_imu`).

With `IC_p = ceil(c_in/P)` channels per input group and
`OC_p = ceil(c_out/P)` per output group, the array takes SYS_W input channels
and SYS_H output channels of a group at once, giving
`INC_p = ceil(IC_p / SYS_W)` input tiles and `ONC_p = ceil(OC_p / SYS_H)`
output tiles. Channels past the end of a group are zero (systolic padding).

## The loop nest and what happens each cycle

`sps_controller` issues one step per clock, with no stalls, in this order
(outermost first):

    oh < h_out, ow < w_out          output pixel
      g < P, cc < ONC_p             one output block (SYS_H outputs)
        kv < P, w < KSS, rr < INC_p one MAC step for all SYS_H x SYS_W PEs

In a step, PE (j, i) computes

    PS[j][i] += W(oc = g + P*(cc*SYS_H + j), ic = kv + P*(rr*SYS_W + i), kh, kw)
              * A(ic, oh + kh, ow + kw)

where (kh, kw) comes from the index table. The first step of a block carries
`clear` (partial sums restart), the last carries `last` (partial sums are
complete). A layer therefore takes

    h_out * w_out * P * ONC_p * P * KSS * INC_p

cycles of steps, plus a fixed drain of `SYS_H + log2(SYS_W) + 5` cycles
(41 at the default size) before `done`. The end-to-end testbenches check
this count to the cycle.

The pipeline behind the controller, counted from the cycle a step is issued:

| cycle   | unit | action |
|---------|------|--------|
| 0       | IMU  | index entry `e` computed, (kh, kw) read from the index buffer (combinational), input buffer word address formed |
| 1       | IMU  | address registered, input buffer read |
| 2       | row 0 | activation vector, control and weight address enter row 0 |
| 3 + j   | row j | weight read from the PE's BRAM, activation registered (and passed to row j+1) |
| 4 + j   | row j | multiply-accumulate; on a `last` step the row's `ps_valid` pulses |
| 4 + j + log2(SYS_W) | tree adder j | row sum ready; bank j reads the word it will update |
| 5 + j + log2(SYS_W) | output buffer | row sum (plus the word read, when accumulating) written to bank j |

Row j runs j cycles behind row 0, because activations move down one row per
clock instead of being broadcast. Each row carries its own output address, so
the output buffer is banked per row and no deskew registers are needed.

## Memory layouts

The layouts are what makes the design index-free, so they are given exactly.

**Index buffer** (`sps_index_buffer`): two tables of W_NUM = 16 entries, one
for kh and one for kw, 2 bits each (64 bits in all), read combinationally.

**Weights** (`sps_weight_bram`, one per PE, 2048 x 8 bits): PE (j, i) holds,
at address

    (((g*ONC_p + cc)*P + kv)*KSS + w)*INC_p + rr

the weight of output channel `g + P*(cc*SYS_H + j)`, input channel
`kv + P*(rr*SYS_W + i)`, w-th nonzero position of its pattern (0 if either
channel is padding). The address is simply a counter that restarts at every
output pixel; weights stay put for the whole layer.

**Input buffer** (`sps_input_buffer`, 16384 words of SYS_W bytes): the input
map, zero-padded by one pixel on each side (width `w_in = w_out + 2`), with
word

    ((y*w_in + x)*P + kv)*INC_p + rr,   lane i = channel kv + P*(rr*SYS_W + i)

so one read yields the SYS_W activations of one step. Only stride-1 3x3
convolutions are addressed.

**Output buffer** (`sps_output_buffer`, SYS_H banks of 16384 x 32 bits):
word `(pix*P + g)*ONC_p + cc`, bank j = output channel
`g + P*(cc*SYS_H + j)` of pixel `pix = oh*w_out + ow`. This word index is the
number of blocks issued so far, so the controller just counts.

Results normally overwrite the buffer. A layer started with `cfg.accum` set
adds each result to the word already stored instead, so a layer can be run
in several passes, each with the weights of a slice of its input channels
(for instance when all of them would not fit a PE's BRAM). The addition is a
read-modify-write: every bank has its own read address, and while the array
runs each bank reads the word its row's tree adder is just producing; the
sum is written one cycle later. A row's consecutive results go to different
words, so a read never sees a word that is still being written.

### Next-layer reordering

Output channels come out grouped by `oc mod P`, not in natural order. The
next layer's input buffer wants exactly this grouping (its input slot `kv`
is this layer's group `g`), so a layer's results are moved to the next
layer's input buffer slot for slot, without sorting channels. The compiler
instead renumbers the next layer's weights to match. Channel slot s of
group g in the output buffer (`ONC_p*SYS_H` slots per group) becomes slot s of
input group g in the next layer (`INC_p(next)*SYS_W` slots); slots past
either end are padding and hold zero. When the two slot counts are equal the
move is a plain reshaping of words. The end-to-end testbenches do this between
two layers (for VGG16, conv1_1 has 64 output slots per group and conv1_2
reads 16) and check the second layer against a reference computed in natural
channel order. The pooled map the vector unit writes uses the same word
layout, so a layer after a pooling step is fed the same way from the pooled
region. The move itself (and requantising 32-bit sums back to 8 bits) is
done by the host here; the testbenches use `min(max(x,0) >> 6, 127)`.

## Processing element and array

`sps_pe` follows the PE drawn in the paper: the BRAM feeds a weight register,
the activation sits in a second register, a multiplier and an adder update
the partial-sum register. Weights and activations are signed 8-bit, the
partial sum 32-bit (wrapping). The activation register is also the PE's
output to the PE below.

`sps_array` instantiates SYS_H x SYS_W PEs. Column i receives lane i of the
input word at row 0; row j holds output lane j of the tile. The control
(valid/clear/last), the weight address and the output address are piped down
one register per row, in step with the activations. Weights are loaded one
byte per cycle through (`wl_row`, `wl_col`, `wl_addr`, `wl_data`).

`sps_tree_adder` (one per row) sums the SYS_W partial sums in a registered
binary tree, log2(SYS_W) = 4 cycles, and carries the output address along.

## Vector processing unit and its instruction queue

After a layer's convolution has drained, `sps_vpu` runs the instructions
waiting in `sps_instr_queue` (an 8-entry FIFO) on the output buffer, with one
ALU per bank (32 lanes). An instruction (`vinstr_t`) is

| field  | bits | meaning |
|--------|------|---------|
| op     | 2  | 0 NOP, 1 ReLU, 2 2x2 max pool (stride 2) |
| src    | 16 | first word read |
| dst    | 16 | first word written |
| height | 8  | rows of the source map |
| width  | 8  | columns of the source map |
| wpp    | 8  | words per pixel, `P * ONC_p` |

ReLU handles `height*width*wpp` words, one per cycle, and may work in
place. Max pooling writes word k of output pixel (py, px) at
`dst + (py*width/2 + px)*wpp + k` from the four source pixels, one output
word every 4 cycles; it may also write in place (dst = src) or to any region
that does not overlap the source ahead of it. An instruction of n words
keeps the unit busy n+1 cycles (4n+1 for pooling). Results stay 32-bit;
requantisation to 8 bits for the next layer is left to the host.

## Using the top level

`sps_top` ports, all synchronous to `clk`, active-low asynchronous `rst_n`:

| group | ports | use |
|-------|-------|-----|
| layer | `cfg` (`layer_cfg_t`: h_out, w_out, w_in, inc_p, onc_p, accum), `start`, `busy`, `done` | start is taken when idle; done pulses one cycle after convolution and all queued instructions finished |
| index load | `idx_we`, `idx_addr`, `idx_kh`, `idx_kw` | one entry per cycle |
| input load | `ib_we`, `ib_waddr`, `ib_wdata` | one word per cycle |
| weight load | `wl_we`, `wl_row`, `wl_col`, `wl_addr`, `wl_data` | one weight per cycle |
| instructions | `iq_push`, `iq_data`, `iq_full` | push while not full |
| read-out | `ob_raddr`, `ob_rdata` | data one cycle after the address; use while `busy` is low |

These ports stand where the paper has off-chip DRAM with separate banks for
inputs, weights and indices; the DRAM and the software compiler that packs
the weights are not part of the RTL. The testbench body
`tb/tb_sps_top_body.svh` contains a complete host in SystemVerilog (pattern
generation, weight packing with padding, input layout, reference
convolution) and is the best place to see how to drive the design.

## Sizes and what fits

| parameter | default | from |
|-----------|---------|------|
| P, KSS | 8, 2 | the paper's evaluated setting |
| W_NUM | 16 | P*KSS |
| SYS_H x SYS_W | 32 x 16 | this design: 512 PEs, one per 18 Kb BRAM of the paper's reported 512 BRAM_18K |
| data / partial sum | 8 / 32 bits | this design (the paper uses 8-bit weights) |
| weight BRAM per PE | 2048 x 8 | this design (one 18 Kb BRAM) |
| input buffer | 16384 x 128 bits | this design |
| output buffer | 32 banks x 16384 x 32 bits | this design |
| instruction queue | 8 | this design |

Every 3x3 layer of VGG16 on 32x32 CIFAR-10 images fits: the largest input
map (conv1, 34x34 padded, 8 words per pixel) needs 9248 input-buffer words,
the largest weight set per PE (512->512 layers) 1024 BRAM words, and the
largest output (conv1, 8192 words plus 2048 for its pooled map) 10240
output-buffer words. The fully connected classifier is not a convolution and
is not supported. The on-chip buffers hold a whole layer; together they are
far larger than the BRAM budget the paper reports, whose design must tile
feature maps through DRAM in a way the paper does not describe.

## Departures and choices

Follows the paper:
- the blocks and their connections (input buffer and weight index buffer into
  the input matching unit, the PE array with a BRAM per PE, tree adders per
  row, output buffer to DRAM and to the vector unit, ALU instruction queue);
- the loop order of the dataflow, the index formula, the two W_NUM-entry
  index tables, the weight- and output-stationary PE, activations shifted
  through the array rather than broadcast, ReLU and max pooling in the vector
  unit, next-layer reordering.

Chosen here, where the paper is silent:
- the array size, widths, depths, the three memory layouts and the
  instruction format;
- the direction in which activations move. The paper says activations enter
  "the first row" and are shifted "between nearby PEs on the same row"; its
  loop nest makes the activation depend only on the column. Here they enter
  row 0 and move down the columns, which satisfies the loop nest;
- signed arithmetic (the paper only states 8-bit weights for its storage
  figures), no requantisation, stride 1 only, input padding done by the host;
- the array's shape is fixed when it is synthesised; each layer only sets
  its tile counts `INC_p` and `ONC_p`, and channels that do not fill a tile
  are padded with zeros. The paper hints that the array dimensions could be
  chosen per layer, but this design does not reshape the array;
- results overwrite the output buffer unless a layer asks to accumulate: in
  this loop order a block's partial sum already covers all input channels, so
  adding is needed only when the host splits a layer's channels into passes;
- the vector unit starts only after the convolution has drained, and the
  host may read the output buffer only while the accelerator is idle.

Not built: DRAM and its controller, the host, and the compiler (kernel and
filter reordering, padding), which the testbench performs in software.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/sps_pkg.sv tb/tb_sps_top.sv --top-module tb_sps_top -o sim
    ./obj_dir/sim

| testbench | what it covers |
|-----------|----------------|
| `tb_sps_top` | 4x4 array: a 24->40 layer (padding on both sides, two output tiles), a 40->16 layer fed from it without reordering, a 16->32 layer with NOP, ReLU and max pooling, a 40->24 layer in two accumulating passes; counts index wraps, padding, each VPU op, the layer hand-over and accumulation |
| `tb_sps_top_full` | default 32x16 array: a 128->256 layer with ReLU and pooling, then 256->128 from its outputs |
| `tb_sps_vgg16` | default array, VGG16 layer shapes on 32x32 images with random data, chained through the output buffer: conv1_1 -> conv1_2 (ReLU, pooling) -> conv2_1 from the pooled map; conv3_2 (ReLU, pooling) -> conv4_1 from the pooled map; conv5_1 |
| `tb_sps_<block>` | each block alone against a model, including latencies |

The small test runs in seconds, the full-size one in about 15 seconds and
the VGG16 one in about 30 seconds.
To change the array size, override `SW` and `SH` on `sps_top` (P and KSS as
`PP`, `KS`); the buffer depths are in `sps_pkg`.

## Files

`rtl/sps_pkg.sv` (constants and types), `sps_top`, `sps_controller`,
`sps_imu`, `sps_index_buffer`, `sps_input_buffer`, `sps_array`, `sps_pe`,
`sps_weight_bram`, `sps_tree_adder`, `sps_output_buffer`, `sps_instr_queue`,
`sps_vpu`; testbenches of the same names with a `tb_` prefix in `tb/`, plus
`tb_sps_top_full` and `tb_sps_vgg16`, which share `tb/tb_sps_top_body.svh`
(the host and reference model) with `tb_sps_top`.
