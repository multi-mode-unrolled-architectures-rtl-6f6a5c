# A multi-mode unrolled Fast-SSC polar decoder

A polar code of length N is built recursively out of two codes of length
N/2, those out of four codes of length N/4, and so on. So every decoder for
a long polar code already holds, somewhere inside it, decoders for the
shorter "constituent" codes in its tree. This design uses that fact. It is a
fully unrolled, partially pipelined Fast-SSC decoder for one (1024, 853)
**master code**. With a few multiplexers and two small tables added, the same
hardware also decodes seven of its constituent codes:

| mode | code       | leaves used | rate  | latency (cycles) | start stage `i_start` |
|-----:|------------|-------------|-------|-----------------:|----------------------:|
| 0    | (1024,853) | 0..1023     | 5/6   | 323 | 0   |
| 1    | (512,363)  | 0..511      | 7/10  | 226 | 1   |
| 2    | (512,490)  | 512..1023   | 19/20 | 95  | 227 |
| 3    | (256,135)  | 0..255      | 1/2   | 138 | 2   |
| 4    | (256,228)  | 256..511    | 9/10  | 86  | 140 |
| 5    | (128,39)   | 0..127      | 1/3   | 54  | 3   |
| 6    | (128,96)   | 128..255    | 3/4   | 82  | 57  |
| 7    | (128,108)  | 512..639    | 5/6   | 54  | 229 |

Decoding a constituent code skips the part of the pipeline that sits above
it, so a short code also gets a short latency. One frame can enter every
II = 20 cycles. At 500 MHz that is 25.6 Gbit/s of coded bits for the master
code, or 21.3 Gbit/s of information bits.

The architecture follows P. Giard, G. Sarkis, C. Thibeault and W. J. Gross,
"Multi-mode Unrolled Architectures for Polar Decoders".
This RTL is an independent implementation. The section "What is this design's
own" lists where it had to fill gaps.

## Fast-SSC decoding in one page

The decoder walks a binary tree. Each node v receives N_v LLRs `alpha_v` and
returns N_v hard bits `beta_v`:

* **F** (going down to the left child):
  `alpha_l[i] = sign(a[i]·a[i+N_v/2]) · min(|a[i]|, |a[i+N_v/2]|)`.
* **G** (going down to the right child, once the left child's bits `beta_l`
  are known): `alpha_r[i] = a[i+N_v/2] + (1 − 2·beta_l[i])·a[i]`. When the
  left child is all frozen (Rate-0), `beta_l` is zero; this case is called
  G0R.
* **Combine** (going back up): `beta_v = {beta_r, beta_l xor beta_r}`. When
  the left child is Rate-0 this is `{beta_r, beta_r}`; that case is called
  C0R.

Fast-SSC stops the recursion early at four kinds of node:

* **Rate-0** nodes (all bits frozen) produce zeros and cost no hardware.
* **Rate-1** nodes (no frozen bit) take the sign of each LLR.
* **Repetition** nodes (only the last bit is free) take the sign of the sum
  of all LLRs and repeat it. They are used up to 8 LLRs.
* **SPC** nodes (only the first bit is frozen) take the sign of each LLR.
  When the parity of those bits is odd, they flip the bit whose LLR has the
  smallest magnitude. They are used up to 4 LLRs.

Node kinds are decided from the frozen-bit mask at elaboration time
(`polar_pkg::node_kind`).

## Unrolling and the initiation interval

In an unrolled decoder every operation of the tree is its own piece of
hardware, and a register sits after each one. A frame moves through these
registers one stage at a time. In a *deeply* pipelined decoder a new frame
can enter every cycle. That needs very long register chains to keep the
channel LLRs and partial results alive.

The *partially* pipelined version used here lets a new frame enter only every
II cycles. A phase counter runs 0..II−1 and drives II one-hot enables. A
register at pipeline stage s is clocked only when `en[s mod II]` is high. So
each frame advances one stage per cycle, and each register holds a value for
II cycles instead of one. A value that must survive L stages then needs
`ceil(L/II)` registers instead of L (`polar_delay`). With II = 20 and a
322-stage pipeline this shrinks the storage by roughly an order of magnitude.
The throughput falls by the same factor II.

### The schedule

`polar_pkg::node_lat` gives the number of stages of each node. `polar_node`
places every register at a fixed stage using the same rules:

* F, G, G0R, Repetition, SPC and a stand-alone Rate-1 decision each take one
  stage.
* A G whose right child is Rate-1 is merged with the sign decision into one
  stage.
* Combine takes one stage. C0R and Rate-0 take none.

Latency is counted from the edge that loads the channel LLRs to the edge that
loads the output register, so it is `node_lat + 1`. With the (1024, 853) mask
these rules give exactly the latencies in the table above. They also give
`i_start mod 20 = 17` for the (128, 96) code.

## How a constituent code is decoded

Take a mode whose code is node v of the master tree:

1. **Input.** The node has an LLR register, loaded at stage `i_start(v)`. A
   multiplexer sits in front of that register. In mode v it loads the
   frame's channel LLRs for v's leaf positions (sign-extended from 4 to 5
   bits) instead of the F or G output from the parent.
2. **Timing.** The controller starts the frame so that the enable for stage
   `i_start(v)` arrives right after the frame enters. The phase counter is
   restarted at `i_start(v) mod II`, so no cycles are wasted waiting for the
   right phase. The stages above v are never used in this mode.
3. **Output.** The node's estimate is taken from the input of its own output
   register, that is, from the last Combine, Repetition, SPC or sign
   operation. Every node that has a mode below it has a multiplexer (`tap`
   in `polar_node`). In that mode the multiplexer passes up the children's
   taps instead of its own result. At the root, the selected code's bits
   arrive at their own positions. The output register `out_cw` loads them
   `latency` cycles after the frame entered. Bits outside the code are
   forced to zero.

Each frame's mode arrives with its LLRs (`in_mode`). Its LLRs go on `in_llr`
at the code's leaf positions. For example, the (512,490) code uses
`in_llr[1023:512]`.

## Blocks

| file | what it is |
|------|------------|
| `rtl/polar_pkg.sv` | Default code and mode table. Elaboration-time functions: node kind, node latency, `i_start`, mode lookup. |
| `rtl/polar_f.sv`, `polar_g.sv`, `polar_combine.sv` | The F, G and Combine operations on a vector. |
| `rtl/polar_rep.sv`, `polar_spc.sv` | Repetition and SPC node decoders. |
| `rtl/polar_delay.sv` | Enable-gated register chain. Optionally a circular buffer in a memory array (`USE_MEM`). |
| `rtl/polar_node.sv` | One tree node. It instantiates F/G/Combine, its registers, and itself for its children. It also holds the input multiplexers and output routing for modes. |
| `rtl/polar_ctrl.sv` | Phase counter and enables, `i_start` and latency tables, done generation, mode changes. |
| `rtl/polar_decoder.sv` | Top level: input buffer, channel-LLR register, root node, output register. |

### Interface of `polar_decoder`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `in_valid`, `in_ready` | in/out | 1 | frame handshake; the transfer happens on a rising edge with both high |
| `in_mode` | in | 3 | which of the eight codes this frame uses |
| `in_llr` | in | 1024×4 | channel LLRs, two's complement, at the code's leaf positions |
| `out_valid` | out | 1 | one-cycle pulse: a new codeword is in `out_cw` |
| `out_mode` | out | 3 | the code of that codeword |
| `out_cw` | out | 1024 | estimated codeword at the code's positions; zero elsewhere; held until the next pulse |

A one-frame input buffer means the next frame can be accepted while the
current one waits for its start phase. Frames of the same mode enter every
II cycles and leave in order. A frame of a different mode waits until the
pipeline is empty, then enters.

### Parameters

All defaults describe the decoder in the table above:

* `N = 1024`, `INFO` = the (1024,853) mask.
* `II = 20`.
* `QC = 4` bits for channel LLRs, `QI = 5` bits for internal LLRs, no
  fractional bits.
* `REP_MAX = 8`, `SPC_MAX = 4`.
* `NUM_MODES = 8`, with `MODE_OFF`/`MODE_LEN` giving each mode's leaf range.
* `USE_MEM = 0`.

Any mask, any II, and any set of modes that are nodes of the tree can be
given instead. The tables and the whole pipeline follow from them at
elaboration. The schedule functions support N up to 1024 (`NMAX`) and up to
16 modes.

## What is this design's own

The architecture, the operations, the node sizes, the quantization, the
enable scheme, the two tables and the input and output multiplexing follow
the published design. Its (16,12) example decoder, with II = 2, is one of the
test configurations. The following are choices made here:

* **Frozen set.** The (1024,853) frozen set is not published. The one in
  `polar_pkg` comes from a Bhattacharyya-bound construction at a design
  Eb/N0 of 5.8 dB. It contains exactly the seven constituent codes listed
  above, and with it the decoder reaches all eight published latencies. A
  different frozen set with the same constituent codes would only change
  `INFO_1024_853`.
* **Stage rules.** The merge of G with a Rate-1 child, and C0R costing no
  stage, are inferred. They are the rules that reproduce the published
  latencies.
* **Mode changes.** The pipeline drains before a mode change, because the
  multiplexer selects are shared by all frames in flight. Mixing modes
  frame by frame would need the select to travel with each frame.
* **Handshake and buffering.** `in_valid`/`in_ready`, the one-frame input
  buffer, zeroing of unused output bits, and the cycle-stamp queue that
  raises done for several frames in flight are all choices made here.
* **Arithmetic details.** F and G saturate symmetrically to ±15. The
  Repetition sum is exact, and a zero sum decides 0. SPC flips the first bit
  on a tie.
* **`USE_MEM = 1`** implements the suggested replacement of register chains
  by circular buffers. It uses a memory array with an asynchronous read
  (register-file style). A real SRAM macro would need its read issued one
  cycle earlier. The default is plain registers, as in the published
  implementation.
* **Figure label.** In the published (16,12) block diagram, the register
  after the G that feeds the (8,5) sub-code is labelled as a bit register,
  but it holds LLRs. This design treats it as an LLR register.

Not built:

* The second published configuration, a (2048,1365) master code with
  Repetition nodes up to 16, SPC nodes up to 8 and RepSPC nodes.
* The deeply-pipelined single-code variant (II = 1) is not tested, although
  the parameter allows it.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench. `tb/polar_ref_pkg.sv` holds
a software Fast-SSC decoder and encoder with the same quantization. It works
on integers and dynamic arrays, not on the RTL's structure.

* `tb_polar_decoder` runs two small decoders end to end:
  * the (16,12) example code with II = 2 and four modes;
  * a (64,40) code with II = 3, five modes and `USE_MEM = 1`.

  `tb_dec_driver` sends random codewords, with and without noise, in bursts
  of each mode. It checks every output bit against the reference and the
  latency of every frame. It also requires that each of these happened at
  least once: a mode switch, several frames in flight, back-to-back entry at
  II, input back-pressure, a non-zero start phase, and a corrected error.
* `tb_polar_decoder_full` runs the default decoder, with no parameter
  changed, on three frames of each of the eight codes. It checks the eight
  latencies above.
* `tb_polar_node` checks the (16,12) tree directly: the stage at which the
  estimate appears, and a constituent code fed through the input
  multiplexer. `tb_polar_ctrl` checks the enables, the start phases, done
  timing and draining before mode changes.

To simulate with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/polar_pkg.sv tb/polar_ref_pkg.sv tb/tb_polar_decoder_full.sv \
  --top-module tb_polar_decoder_full
./obj_dir/Vtb_polar_decoder_full
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. The
full-size build takes about a minute; the run takes well under a second.

Generic coarse synthesis of the default decoder (no technology mapping)
gives about 40,000 single flip-flop bits. It also gives about 117,000 bits
held in register arrays, which are mostly the multi-register chains. The
total is dominated by the channel-LLR chain and the per-node LLR registers.
