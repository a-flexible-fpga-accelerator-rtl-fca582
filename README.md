# A flexible convolution accelerator core: 1-D PE array with command-driven multicast

This is synthesizable SystemVerilog for a CNN accelerator built around one idea.
Each output pixel of a convolution tile gets its own processing element (PE).
The PEs sit in a 1-D chain. They are fed by three cheap pipelined chains:

- an **input** chain that multicasts each input value to exactly the PEs whose window contains it;
- a **weight** chain that broadcasts every weight to all PEs;
- an **output** chain that reads the results back one value per cycle.

No PE has its own control logic. The core controller sends, with each input value, a 4-bit *command*. Every PE's small state machine (the *receiver*) rewrites that command as it passes. Together these decide which PEs cache the value. This works for any window size and stride, and any output tile shape, without an address network or a crossbar.

The default configuration is one core of 625 int8 *vector* PEs (vPEs). Each vPE does four 8x8-bit multiplies and adds them into a 32-bit sum every cycle. That is 5000 operations per cycle, or 1.25 TOPS at 250 MHz.

## 1. Mapping a convolution onto the chain

A core runs one *tile* at a time. The tile's parameters are:

- an output of Wo x Ho pixels and Co channels;
- Ci input-channel words, each packing four int8 channels;
- a Kx x Ky window with strides Sx, Sy.

Output pixel (ox, oy) belongs to PE p = oy*Wo + ox. Only the first Wo*Ho PEs work; the others see no input and stay idle.

Each PE computes all Co output channels of its pixel:

```
for ci, ky, kx:                      (one input value of the window)
  for co:                            (one weight per cycle, broadcast)
    psum[co] += dot4(in[ci][oy*Sy+ky][ox*Sx+kx], w[ci][ky][kx][co])
```

Inputs are sent channel by channel in row-major order. Weights are sent in Ci x Ky x Kx x Co order (co fastest). Outputs come back in (co, oy, ox) order.

A layer larger than a core is cut by the host into tiles with:

- Wo*Ho <= 625;
- Co <= 512;
- Kx*Ky <= 16, so that two windows fit the 32-entry input buffer.

## 2. The input multicast: receivers and commands

This is the least obvious part of the design.

Along one axis, take window k, stride s and n outputs. Input column x is used by output columns lo(x)..hi(x), where:

```
hi(x) = min(floor(x/s), n-1)
lo(x) = 0                    if x < k
        ceil((x-k+1)/s)      otherwise
```

From one input to the next, the set of receiving PEs changes in only a few ways:

- it grows at the high end (**Dilate**);
- it shrinks at the low end (**Erode**);
- it does both (**Shift**);
- it stays the same (**NoOp**).

At the start of a new input row, the same choice is made for the rows of PEs: DilateY, ErodeY, ShiftY, or RotateY (same rows, back to column 0). The controller works this out incrementally:

- hi grows when x mod s = 0 and hi < n-1;
- lo grows when x >= k and x mod s = k mod s.

The first value of each channel carries **Start** (13).

Each receiver holds two bits:

- **RD**: "I cache the value that travels with this command";
- **LS**: "I am column 0 of a receiving row".

On every beat the receiver looks up (command, RD, LS), updates its bits and passes a possibly rewritten command to the next PE one cycle later. It caches the value if its *updated* RD is 1. The rewritten codes 8..12 and 14 are internal: they carry "the edge of the set is here" down the chain. For example, take ShiftX (3) arriving at a PE with RD=1. The PE clears RD and forwards 8. The first PE with RD=0 that sees 8 sets RD and forwards 3 again. So the run of receivers in each row moves right by one.

The full table is in `rtl/receiver.sv`. It is copied cell by cell from the paper's state-transition table. Two points in it are this design's own reading:

- ErodeY at a PE with LS=1 also clears RD there. Otherwise a one-column run would keep a stale receiver.
- A command/state pair the table does not list leaves the state alone and passes the command on unchanged.

Row changes work through the RD bit that is left on the last column of each row. This gives two restrictions:

- **Wo >= 2 whenever Ho >= 2**;
- **Sx <= Kx and Sy <= Ky**, because no command grows an empty set.

`tb/tb_receiver.sv` checks the table exhaustively. It also checks, for many tile shapes, that every input reaches exactly the PEs whose window contains it. One of those shapes is the paper's worked example: 3x4 outputs, 2x2 window.

## 3. Inside a vPE

```
input chain -> receiver ---(cache)---> input buffer (32 x 32b, two windows)
                                           | read at offset ky*Kx+kx
weight chain -> register -> vmac: 4 x int8 multiply, adder tree, + psum
                                           |
              partial-sum FIFO (512 x 32b) <-+-> output FIFO (512 x 32b)
output chain -> sender (answers a request that names this PE)
```

- **Input buffer** (`input_buffer`): a circular buffer. The read port takes an offset into the oldest window. A window is freed all at once when its last weight has been used. It holds two windows, so the next channel can load while the current one is computed.
- **vmac**: the four products are registered. The adder tree and the accumulate add follow in the next cycle. The weight tag `first` makes the sum start from zero. While `first` is not set, the sum takes the head of the partial-sum FIFO.
- **Partial-sum FIFO** (`pe_fifo`): the Co running sums of the pixel circulate through it. Each MAC pops one sum and pushes the updated one. On the last (ci, ky, kx) term the result goes to the output FIFO instead.
- **Sender**: a read request carries a PE index. The PE with that index pops one output into the same slot of the chain. Because every stage is registered, answers never collide.
- **Weight register**: the weight is used and forwarded in the same cycle, one register per PE.

A MAC runs when a weight arrives and the input buffer is not empty. PEs without inputs therefore never compute.

## 4. The controller's schedule

`core_ctrl` takes a tile command and runs three engines at the same time:

1. **Inputs**: one value per cycle, with its command. Channel c+2 may not start before every weight of channel c has been sent. This is the *window-full stall*, and it keeps at most two windows per buffer.
2. **Weights**: one per cycle, tagged with first, last, release and the window offset. Channel c waits until all its inputs have been sent (*input stall*). Because the chain is pipelined, an input and the weights behind it reach every PE in the same order. The last channel of a tile also waits until the previous tile's read-back has finished (*output stall*). This keeps each output FIFO at Co values or fewer.
3. **Read-back**: starts 4 cycles after a tile's last weight, issuing one request per cycle in (co, pixel) order. The answers come out of the last PE NUM_PE cycles later. They appear on `out_valid/out_data`, one per cycle with no gaps. Read-back overlaps the loading and compute of the next tile.

Compute takes Kx*Ky*Co cycles per channel. Loading a channel takes about Wi*Hi cycles. Input loading is therefore hidden whenever Co is large enough. Read-back can still bound throughput; section 7 works this out.

## 5. Interfaces

`cnn_accel` (top) has NUM_CORES cores. Every port is an unpacked array indexed by core.

| port | handshake | content |
|---|---|---|
| `cmd` | valid/ready | `conv_cmd_t`: wo, ho, co (10 b), ci (12 b, words of 4 channels), kx, ky, sx, sy (4 b) |
| `in_data` | valid/ready | 32-bit input words, 4 int8 channels per word, channel by channel, row-major |
| `wt_data` | valid/ready | 32-bit weight words in Ci x Ky x Kx x Co order |
| `out_data` | valid only | 32-bit sums in (co, oy, ox) order; the consumer must take one per cycle |
| `stat` | — | `ctrl_stat_t`: busy, rb_busy, and strobes for each stall and for tile completion |

A new command is accepted once the previous tile's weights are done. Its inputs may then start to flow. The shared types are in `rtl/cnn_pkg.sv`. Reset is synchronous and active low.

## 6. Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_CORES` | 1 | cores (the paper evaluates one) |
| `NUM_PE` | 625 | vPEs per core |
| `IBUF_DEPTH` | 32 | input buffer words per PE |
| `PSUM_DEPTH`, `OBUF_DEPTH` | 512 | partial-sum and output FIFO words per PE |

All defaults are the paper's numbers.

## 7. Running VGG-16

Every VGG-16 convolution layer runs on the default core once the host tiles it. All of them use 3x3 windows, stride 1, Co <= 512 and Ci from 3 to 512. The layer sizes are from the paper; stride 1 and padding 1 are standard VGG-16 facts.

- Outputs of 224, 112 and 56 pixels square are cut into 25x25 tiles.
- The 28 and 14 layers need 4 tiles and 1 tile.
- Ci = 3 is padded to one 4-channel word.

The padding border, the tiling and the packing are the host's job. They are not in this RTL.

One limit shows up in these layers. A core returns one output word per cycle, so a 25x25 tile with Co channels needs 625*Co cycles of read-back. It computes the same tile in Ci_words*9*Co cycles. Read-back overlaps the next tile, but it still bounds throughput whenever Ci_words < 70, i.e. fewer than about 280 input channels per tile.

In the simulated conv1_1 and conv3_1 tiles, most of the time is the next tile's last channel waiting for read-back. The conv5 tile (14x14x512) is compute-bound: its 9216 weights are taken in 9216 consecutive cycles.

## 8. Where this RTL departs from the paper, or fills gaps

- **Only the int8 vPE is built.** The paper's fp32 variant uses a vendor floating-point multiply-accumulate core.
- **Not included:**
  - the global controller, DMA engine, PCIe endpoint and DDR memory around the cores;
  - the host runtime.

  Each core's command and data streams are ports of the top instead.
- **Loop order within a PE** is ci, ky, kx, co. It follows the weight layout the paper gives; its pseudocode listing was not available.
- **Scheduling rules, command format and handshakes** are this design's own. This covers:
  - the exact stall conditions;
  - the 4-cycle gap before read-back;
  - read-back waiting before the next tile's last channel;
  - the valid/ready streams;
  - an output stream without backpressure.
- **Restrictions** not stated in the paper:
  - Sx <= Kx and Sy <= Ky;
  - Wo >= 2 when Ho >= 2.

  Both follow from the receiver table. The paper says Co must be *less than* the output buffer size; here Co = 512 is allowed.
- **Weight tags.** The weight chain also carries the per-weight control bits (first, last, release, window offset). The paper says only that all PE control comes from the controller.
- **Bubbles.** In a cycle with no input the controller puts NoOp on the chain with valid = 0. Receivers apply every command they see; NoOp changes nothing, and only valid beats are cached.

## 9. Verification

Each block has a self-checking testbench in `tb/`. The expected values are computed from the convolution itself, not from the RTL. `tb/tb_ref_pkg.sv` holds the reference receiver sets and commands.

| bench | what it covers |
|---|---|
| `tb_receiver` | full transition table; multicast sets for 7 tile shapes |
| `tb_input_buffer`, `tb_pe_fifo` | against queue models, simultaneous read/write |
| `tb_vmac` | signed int8 dot products, first/accumulate, latency |
| `tb_sender` | chain of senders, in-order answers with a fixed latency |
| `tb_pe` | one PE through random tiles, including forwarding |
| `tb_pe_array` | 12-PE array driven by a scripted controller; idle PEs stay empty |
| `tb_core_ctrl` | controller against an array model: every command, tag and request; scheduling rules; full rate |
| `tb_core`, `tb_cnn_accel` | 16-PE core, or a top with two 16-PE cores: six tiles end to end with random stream gaps (see below); the second core must match the first cycle by cycle |
| `tb_cnn_accel_full` | top at default parameters: 625 PEs, 25x25, 3x3 and 1x1 tiles, plus a 13x12 tile with stride 2 |
| `tb_vgg16_tiles` | top at default parameters; VGG-16 tiles (conv5 14x14x512, conv1_1 interior and edge, conv3_1) with 4 or 8 input channels each; checks the compute-bound weight rate |

`tb_core` and `tb_cnn_accel` count each command type, each stall, read-back overlap and completed tiles; a count of zero fails. They also check that outputs are contiguous and that inputs are taken at full rate.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/cnn_pkg.sv tb/tb_ref_pkg.sv \
    rtl/*.sv tb/tb_cnn_accel.sv --top-module tb_cnn_accel -Mdir obj -o sim
obj/sim +verilator+rand+reset+2
```

Each bench prints `TB_RESULT checks=N failures=M`. The full-size bench takes about a minute to build and run; the VGG-16 bench about two and a half minutes.
