# BinArray: a systolic array for binary-approximated CNNs, in SystemVerilog

BinArray runs convolutional networks whose weights have been replaced by a
short sum of scaled binary tensors,

    W  ≈  α_0·B_0 + α_1·B_1 + … + α_{M-1}·B_{M-1},     B_m ∈ {+1, −1}

With this approximation a dot product between an 8-bit activation vector `x`
and a weight vector needs no multipliers in its inner loop. For each binary
tensor `m`, the partial result `p_m = Σ_i (B_m[i] ? +x_i : −x_i)` is only
additions and sign changes. Only the M partial results are multiplied by
their scaling factors `α_m` and summed. One dot product of length N_c
therefore costs N_c adder cycles per tensor and M multiply-adds, instead of
N_c multiplies.

The hardware does this in a grid of D_ARCH × M_ARCH processing elements (PEs):
- Each column, a *processing array* (PA), holds the weights of one binary
  tensor for D_ARCH output channels.
- All PEs see the same activation stream.
- The single multiplier of each column (one DSP block on an FPGA) is
  time-shared over its D_ARCH channels.

A small instruction-set control unit runs the network layer by layer. A
ping-pong feature buffer lets a host load the next image while the current
one is processed.

This RTL builds the configuration BinArray[N_SA=1, D_ARCH=32, M_ARCH=2]: one
systolic array of 32 × 2 PEs.

## Contents

1. Number formats and arithmetic
2. Processing element and processing array
3. The systolic array: cascade, feedback, quantization, pooling
4. Timing through the array
5. Address generation: walking the feature map
6. Memory layout
7. Control unit and instruction set
8. Host interface
9. Parameters
10. Throughput
11. Departures from the published description, and limits
12. Verification and how to simulate
13. Files

## 1. Number formats and arithmetic

| quantity | format |
|---|---|
| activations (inputs and outputs of every layer) | DW = 8-bit two's complement |
| binary weight | 1 bit: 1 means +x, 0 means −x |
| PE accumulator, partial result p | ACCW = 20 bits signed (MULW − ALPHA_W) |
| scaling factor α | 8-bit signed plus a 5-bit right shift (`{shift[4:0], alpha[7:0]}`) |
| multiply-add result o, bias | MULW = 28 bits signed, full precision |

A dot product for output channel d is

    o_d = bias_d + Σ_m ((p_{d,m} · α_{d,m}) >>> shift_{d,m})

The shift acts as a per-channel binary point for α. The bias is in the same
fixed-point scale as o.

The quantizer (QS) brings o back to 8 bits at a layer-dependent binary point
q:

    y = clip( (o + 2^(q−1)) >>> q , −128, 127 )

This is round half up, then saturation. Then comes ReLU with max pooling for
convolution layers, or nothing for dense layers.

## 2. Processing element and processing array

**PE (`pe`).** A PE has three registers:
- `preproc_reg` holds `±x`.
- `accu_reg` adds it up.
- `res_reg` takes the finished sum.

When `next_calc` is high, `res_reg` takes the accumulator and the accumulator
restarts with the current `±x`. So back-to-back vectors need no idle cycle.
`data` and `next_calc` are each forwarded through one register to the next
PE. PE d therefore sees the stream d cycles late.

`preproc_reg` is 9 bits wide, not 8, because −(−128) = +128 does not fit in 8
bits.

**PA (`pa`).** A PA is a column of D_ARCH PEs with its own weight memory.
- **Weight buffer.** One D_ARCH-bit word per input element: bit d belongs to
  output channel d. The read is synchronous, and bit d is delayed d cycles to
  meet the skewed data.
- **Alpha buffer.** Small asynchronous-read memory.
- **Serializer.** On `next_calc` it collects p_0 … p_{D−1}, one per cycle, as
  each PE finishes.
- **Multiply-add.** One multiplier with a barrel shifter computes
  `r = (p·α) >>> shift` (registered) and then `o = r + o_prev` (registered).

`o_prev` comes from the PA on the left. The leftmost PA adds the bias
instead. In the second pass of the two-pass mode it adds the stored result of
the first pass (section 3).

## 3. The systolic array

`sa` instantiates M_ARCH PAs side by side. All columns receive the same
activation x. Column m's output `o` is column m+1's `o_prev`, so the last
column delivers the complete dot product. PA m is built with `STAGE = m`: its
input stream is delayed m cycles so that its results line up with those
arriving from the left.

Behind the last PA:

- **Feedback register (two-pass mode).** The design has M_ARCH columns. A
  network with up to 2·M_ARCH binary tensors is run in two passes over the
  same input: `KP = 2` in the layer configuration.
  - The first pass's 28-bit result of each channel goes into a
    D_ARCH-entry register instead of the quantizer.
  - In the second pass, column 0 adds that register where it would otherwise
    add the bias.
  - The alphas of the second pass are stored at `D_MAX` (2048) plus the
    channel address.
- **QS** quantizes the result as described in section 1.
- **AMU (`amu`)** does ReLU and max pooling together.
  - Results arrive one channel per cycle, in bursts of D_ARCH channels, one
    burst per convolution anchor.
  - A D_ARCH-long shift register keeps the running maximum of each channel.
    Each arriving value is compared with the head of the register and the
    larger one is shifted back in.
  - A new window starts from 0, which gives the ReLU.
  - After the last of the `W_P·H_P` anchors of a pooling window, the maximum
    is emitted and 0 is pushed.
  - For dense layers the AMU is bypassed, with no ReLU.
- **ODG (`odg`)** gives each output value its address:
  `out_base + channel·oplane + pixel`. Channels past the layer's D, the idle
  PEs of the last channel group, are dropped.
- **Local feature buffer (`feature_buffer`).** A dual-port RAM, so one layer
  can read its input while it writes its output. Consecutive hidden layers
  run back to back from it, without going through the global buffer.
- **Input mux.** It selects the global buffer (`x_ext`) or the local buffer
  per layer.
  - Elements marked not valid by the address generator enter as 0. These are
    the padding cycles of section 5.
  - Each output goes to the local buffer or, for the layer flagged
    `out_fbuf`, to the global buffer.

## 4. Timing through the array

Numbers are in clock cycles. t is the cycle in which the address generator
presents an input address.

| event | cycle |
|---|---|
| activation at the first PE | t + 1 (both buffers have one cycle of read latency) |
| `next_calc` for a vector whose last element was issued in t | reaches the first PE in t + 3 |
| PA m's result for channel d, counted from that `next_calc` | 3 + m + d cycles later |
| then QS, AMU, ODG | one register each |

A PA's serializer must finish the D_ARCH values of one vector before the next
`next_calc` arrives. A vector of N_c elements is therefore given
`max(N_c, MINLEN)` cycles, with `MINLEN = max(D_ARCH, M_ARCH+2)`. Shorter
vectors get idle (zero) cycles. With D_ARCH = 32 this affects only layers
with fewer than 32 inputs per dot product, such as depth-wise layers.

After the last vector the generator waits `DRAIN = D_ARCH + M_ARCH + 12`
cycles, so that every write has reached its buffer before `done`. One layer
takes exactly

    start → done = E + DRAIN + 3,    E = groups · anchors · KP · max(N_c, MINLEN)

cycles. The testbenches check this formula.

## 5. Address generation: walking the feature map (`agu`)

The address generator produces one input address per cycle, along with a tag
that travels with the vector down the array. The tag holds the pass index,
the final-pass flag, the first channel of the group and the output pixel.
The loops, from outer to inner, are:

1. **Channel group.** D_ARCH output channels at a time, or one channel for
   depth-wise layers, where only PE 0 of each PA is used.
2. **Anchor.** The top-left corner of a convolution window.
3. **Pass.** 1 or 2 (`KP`).
4. **Element** of the window. Channel first, then row, then column for
   convolution; the input index for dense layers.

Anchors are visited in **pooling order**, not row by row. All convolutions
inside one W_P × H_P pooling window come first, then the window to the right,
and at the end of a row the window below. The results of one pooling window
therefore arrive at the AMU in consecutive bursts, and pooling needs only the
D_ARCH-entry register instead of a row buffer. Four cases decide the next
anchor:
- next column inside the pooling window;
- next row inside the pooling window;
- next pooling window to the right;
- first pooling window of the next pooling row.

The last case uses `a_po ← a_cv + W_B`. See section 11 for how this differs
from the published pseudo-code.

Only stride-1 convolutions and non-overlapping max pooling ("downsampling")
are supported. Output size is `floor((W_I − W_B + 1)/W_P)`.

## 6. Memory layout

**Features** are stored in channel planes, each plane row-major:

    address = base + channel·(W·H) + row·W + column

A dense layer reads its inputs as a flat vector, so a 3×3×150 output read by a
dense layer is simply the 1350-element vector in that order.

**Weights.** A layer's weights start at `WBASE` in every PA's weight buffer.
The words are ordered by group, then pass, then element. Bit d of word
`WBASE + (g·KP + k)·N_c + i` is the binary weight of:
- element i,
- pass k,
- output channel `g·D_ARCH + d`,
- the binary tensor `k·M_ARCH + m` held by PA m.

**Alphas and biases** are addressed by `CHB + channel`. `CHB` is the layer's
base in these small memories. The second pass's alphas are at `2048 + CHB +
channel`. A network's layers are placed one after another in both spaces.

## 7. Control unit and instruction set (`cu`, `imem`)

Instructions are 32 bits: opcode in bits [31:28], register in [27:23],
immediate in [22:0].

| op | code | effect |
|---|---|---|
| NOP | 0 | nothing |
| STI r, v | 1 | configuration register r ← v |
| HLT | 2 | wait for the host's trigger; on it, swap the global buffer banks |
| CONV f | 3 | start the configured layer and wait until it is done; f = 1 marks the network's last layer (sets the done flag, counts an inference) |
| BRA a | 4 | jump to instruction a |

Configuration registers:

| r | name | meaning |
|---|---|---|
| 0 | WI | input width |
| 1 | WB | kernel width |
| 2 | CI | input channels (inputs for dense) |
| 3 | HI | input height |
| 4 | HB | kernel height |
| 5 | WP | pool width |
| 6 | HP | pool height |
| 7 | D | output channels |
| 8 | KP | passes (1 or 2) |
| 9 | LT | layer type: 0 conv, 1 dense, 2 depth-wise |
| 10 | Q | binary point for QS |
| 11 | IB | input base |
| 12 | OB | output base |
| 13 | PL | input plane size W_I·H_I |
| 14 | OP | output plane size |
| 15 | IO | bit 0: read from the global buffer; bit 1: write to the global buffer |
| 16 | WBASE | weight base |
| 17 | CHB | alpha/bias base |

Instructions are not pipelined: fetch and execute take one cycle each.
Setting up a layer costs tens of cycles, against hundreds of thousands for
running it.

A typical program:

    HLT
    STI ... ; CONV 0     (layer 1, from the global buffer into the local buffer)
    STI ... ; CONV 0     (hidden layers, local buffer to local buffer)
    STI ... ; CONV 1     (last layer, into the global buffer)
    BRA 0

## 8. Host interface (`gp_regs`, `mem_ctrl`, `fbuf`)

The top level, `binarray_top`, has three host-facing ports:
- a simple register bus (`bus_we`, `bus_addr[2:0]`, `bus_wdata`, `bus_rdata`);
- an input AXI4-Stream (`s_t*`);
- an output AXI4-Stream (`m_t*`).

On a Zynq-class system these would sit behind the AXI general-purpose port
and a DMA data mover.

| addr | register | behaviour |
|---|---|---|
| 0 | CTRL | bit 0 enable (0 holds the program at instruction 0); writing bit 1 = 1 sends a one-cycle trigger |
| 1 | STATUS | bit 0 running; bit 1 halted at HLT; bit 2 inference done (sticky, write 1 to clear); bits 31:16 inference count |
| 2 | DEST | where stream words go: 0 global buffer (host bank), 1 IMEM, 2 weights, 3 alphas, 4 biases |
| 3 | WADDR | start address for the stream; bits 23:16 select the PA for weights and alphas |
| 4 | RADDR | readback start address in the host bank |
| 5 | RLEN | writing it starts a readback of RLEN features on the output stream |
| 6 | PC | current instruction address |

**Loading.** Each input-stream beat writes one word at the current address,
and the address then counts up.
- Features use the low 8 bits of the word.
- Alphas are `{shift, alpha}` in the low 13 bits.
- Biases are 28-bit signed.

The input stream is always ready.

**Readback.** Readback sends sign-extended features, at most one every three
cycles. `m_tvalid` and `m_tdata` hold until `m_tready`; an assertion checks
this.

**Ping-pong.** The global feature buffer has two banks. The array works on
one while the host fills or drains the other. The HLT trigger swaps them.

The host sequence per image:
1. Wait for STATUS.halted.
2. Write the image into the host bank.
3. Trigger.
4. Wait for STATUS.done.
5. Wait for halted again, then trigger. This swaps in the next image and
   makes the finished results readable.
6. Read the results back.

A trigger that arrives before the program reaches HLT is lost, so the host
must poll `halted` first.

## 9. Parameters

| parameter | default | meaning |
|---|---|---|
| D_ARCH | 32 | PEs per PA: output channels in parallel |
| M_ARCH | 2 | PAs: binary tensors in parallel |
| WB_DEPTH | 32768 | weight words per PA (32 bits each) |
| LFB_DEPTH | 16384 | local feature buffer, 8-bit words |
| FB_DEPTH | 65536 | each bank of the global feature buffer |
| IMEM_DEPTH | 256 | instructions |

Constants in `binarray_pkg`:
- DW = 8, MULW = 28, ALPHA_W = 8, SH_W = 5.
- D_MAX = 2048 alpha/bias entries per pass.
- 16-bit configuration fields and feature addresses.

D_ARCH must not exceed 32, the width of a weight word.

## 10. Throughput

A layer takes `E + DRAIN + 3` cycles (section 4). Each cycle feeds one input
element to all D_ARCH × M_ARCH PEs.

Traffic-sign network "CNN-A" with M = 2, run in full by
`tb/binarray_cnna_tb.sv`:

| layer | shape | cycles |
|---|---|---|
| 1 | 48×48×3 → conv 7×7, 5 ch → pool 2×2 → 21×21×5 | 259,357 |
| 2 | conv 4×4, 150 ch → pool 6×6 → 3×3×150 | 129,649 |
| 3 | dense 1350 → 340 | 14,899 |
| 4 | dense 340 → 490 | 5,489 |
| 5 | dense 490 → 43 | 1,029 |
| total | | 410,423 |

With M = 4 (two passes) the two conv layers take 518,665 + 259,249 cycles,
also simulated at default parameters. The dense layers at M = 4 do not fit the
default weight buffer.

The published design reports 466,668 cycles (analytical model) and 467,200
cycles (simulation) for the first two layers. This design needs 389,006.

The published analytical model charges
`W_I·H_I·C_I·W_B·H_B·⌈D/D_ARCH⌉` cycles per layer. That is one anchor for
every input pixel, 48·48 for layer 1. Evaluated for CNN-A this gives 338,688
+ 176,400 = 515,088 cycles, not 466,668. This design visits only the
`(W_I−W_B+1)·(H_I−H_B+1)` anchors that produce a pooled output: 42·42 for
layer 1 and 18·18 for layer 2. Each anchor takes exactly N_c cycles when
N_c ≥ D_ARCH. The published cycle counts cannot be reproduced from the
description, so the two are compared only as orders of magnitude.

## 11. Departures from the published description, and limits

- **Pool-row step of the anchor walk.** The published pseudo-code moves the
  pooling anchor down with `a_po ← a_cv + W_B + W_P`. Together with its other
  cases this skips rows. The accompanying text and figure describe moving to
  the next row of pooling windows. This design uses `a_po ← a_cv + W_B`,
  which gives that order.
- **Widths.**
  - `preproc_reg` is DW+1 bits (the drawing shows DW).
  - The multiply-add's `o_prev` input is MULW bits, where the drawing prints
    MULW−1.
- **Weight buffer size.** The published resource table gives about 1.15 % of
  19.2 Mbit of block RAM for CNN-A. That is roughly 220 kbit, less than CNN-A's
  1.4 Mbit of binary weights at M = 2. This design sizes the weight buffer so
  that CNN-A fits (2 × 32768 × 32 bit = 2 Mbit).
- **Things the description does not give, chosen here:**
  - the instruction encoding and register numbers (r0 = W_I and r1 = W_B
    follow the published example program);
  - where the biases are stored (the published array adds a per-channel bias
    at its first column, as here, but does not say where it is kept);
  - the two-pass feedback register;
  - rounding mode (half up);
  - the memory layout;
  - the host register map and the loading protocol;
  - coupling the bank swap to the HLT trigger.
- **Not built:**
  - several systolic arrays with a scatter/gather block (N_SA > 1);
  - the global 4 Mbit weight buffer used for larger networks;
  - the DMA data mover and the processor system (their stream and bus sides
    are the top-level ports).
- **Networks that do not fit:**
  - MobileNet-style networks need stride-2 convolutions, which are not
    supported. They also need feature maps far larger than the local buffer
    and more weights than the weight buffer. Their stride-1 stages can run
    one at a time: the 8×8×256 stage of the 128×128, width-0.5 network takes
    655,458 cycles. Depth-wise layers use one PE per array, and their
    9-element vectors are padded to 32 cycles. Zero borders ("same" padding)
    must be written into the input by the host.
  - CNN-A with M = 3 or 4 runs two passes and needs twice the weight storage
    (43,634 words per PA against 32,768).
- **Limits:**
  - Stride 1 only; pooling only without overlap.
  - At most 2 passes (M ≤ 2·M_ARCH).
  - A layer's features must fit the local buffer unless the layer reads or
    writes the global buffer.

## 12. Verification and how to simulate

Every module has a self-checking testbench in `tb/`. Each compares against
values computed independently, prints
`TB_RESULT checks=N failures=F`, and stops itself with a watchdog.

`tb/bnn_ref_pkg.sv` is a behavioural model of one layer. It draws random
binary tensors, alphas, shifts and biases, computes outputs the direct way,
and produces the weight words in the layout of section 6.

| testbench | checks |
|---|---|
| `agu_tb` | address order against a loop-nest model (including the pooling-order example) |
| `pa_tb` | two cascaded PAs, value and arrival cycle of every channel |
| `sa_tb` | array plus address generator on a pooled conv layer (two channel groups) and a two-pass dense layer |
| `binarray_top_tb` | four-layer network through the host ports only, on two images with ping-pong overlap |
| `binarray_hostlayer_tb` | a layer computed by the host between two accelerator layers: HLT, bank swaps, readback, write-back |
| `binarray_mobilenet_tb` | one stride-1 stage of a MobileNetV1 (width 0.5, 128×128) at default parameters: depth-wise 3×3 on 8×8×256, then pointwise 256→256 |
| `binarray_cnna_tb` | all of CNN-A at default parameters, then its two conv layers with M = 4 (two passes) |

`binarray_top_tb` covers:
- pooling, dense bypass, depth-wise mode, two passes, several channel groups,
  padded vectors;
- saturation, both buffers read and written, HLT/trigger, branch, bank swaps;
- per-layer cycle counts.

It fails if any of these mechanisms never occurred.

To run a testbench with plain Verilator:

    verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/binarray_pkg.sv tb/bnn_ref_pkg.sv tb/binarray_top_tb.sv \
        --top-module binarray_top_tb
    ./obj_dir/Vbinarray_top_tb

Replace the testbench file and top name for the others. `bnn_ref_pkg` is only
needed by `sa_tb`, `binarray_top_tb` and `binarray_cnna_tb`. The full CNN-A
run takes a few seconds.

## 13. Files

| file | block |
|---|---|
| `rtl/binarray_pkg.sv` | widths, opcodes, register numbers, configuration and tag structs |
| `rtl/pe.sv`, `rtl/pa.sv` | processing element and processing array |
| `rtl/weight_buffer.sv`, `rtl/alpha_buffer.sv` | PA memories (alpha buffer also used for biases) |
| `rtl/qs.sv`, `rtl/amu.sv`, `rtl/odg.sv` | quantizer, activation/max-pool unit, output address gatherer |
| `rtl/feature_buffer.sv` | dual-port feature RAM (local buffer, banks of the global one) |
| `rtl/sa.sv` | systolic array |
| `rtl/agu.sv` | address generator |
| `rtl/cu.sv`, `rtl/imem.sv` | control unit and instruction memory |
| `rtl/fbuf.sv` | ping-pong global feature buffer |
| `rtl/mem_ctrl.sv`, `rtl/gp_regs.sv` | stream loader/readback and host registers |
| `rtl/binarray_top.sv` | top level |
| `tb/*_tb.sv`, `tb/bnn_ref_pkg.sv` | testbenches and the reference model |
