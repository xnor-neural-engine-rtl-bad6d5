# XNOR Neural Engine (XNE): RTL for a binary neural network accelerator

A binary neural network (BNN) keeps weights and activations at one bit each, where bit 1 means +1 and bit 0 means −1.
The product of two such values is then an XNOR. A dot product becomes a popcount: with `n` valid bits,

    sum(w_k * x_k) = 2 * popcount(XNOR(w, x)) - n

A batch-normalised sign activation after it becomes a comparison of that integer with a per-channel threshold.
The XNE is a small accelerator that does exactly this for convolutional and dense layers. It sits next to a
microcontroller core on a shared, multi-banked memory.

The central idea is to keep both the inputs and the partial sums inside the accelerator.
- One vector of TP input-feature bits is held in a register.
- TP weight vectors stream past it, one per cycle.
- Each weight vector updates its own 16-bit accumulator.
- Only the final binarised outputs, one bit per output channel, go back to memory.

No integer partial result ever leaves the engine. The memory then only has to deliver one TP-bit weight
vector per cycle, so TP = 128 needs four 32-bit memory ports. The outer loops of a layer are not hardwired.
A tiny microcode processor steps through them and computes the addresses. The host writes its program
into the register file together with the layer sizes.

This RTL is written for the default configuration **TP = 128**:
- 128 XNORs per cycle;
- 128 accumulators;
- four 32-bit shared-memory (TCDM) master ports;
- one APB target for configuration;
- one event wire that pulses when a job ends.

---

## 1. The computation and its encodings

For output pixel `(i, j)` and output channel `k_out`, with filter size `fs`, stride 1 and `nif` input channels:

    acc[k_out]     = sum over u_i, u_j < fs, k_in < nif of  (W[k_out][u_i][u_j][k_in] XNOR x[i+u_i][j+u_j][k_in]) ? +1 : -1
    y[i][j][k_out] = sign(lambda[k_out]) == 0 ?  acc >= (tau << S_tau)
                                              :  acc <= (tau << S_tau)

A dense layer is the special case `fs = w_out = h_out = 1`.

Batch-norm scale and bias fold into one threshold byte per output channel:
- bit 7 holds the sign of the batch-norm scale λ, which picks the direction of the comparison;
- bits 6:0 hold τ in sign-magnitude form: bit 6 is its sign and bits 5:0 its magnitude, so τ ranges from −63 to +63.

τ is shifted left by a per-job amount `S_tau` (0–15), so a 7-bit number can reach the full 16-bit accumulator range.

Each accumulator is 16 bits and saturates. It is updated with the ±1 sum of one TP-bit input tile per cycle, and
saturation is applied after every tile. When the number of input channels is below TP, a mask register disables
the upper bits of the XNOR product. Those bits then add neither +1 nor −1.

Worked example (8 bits). Feature `0100_1011`, weight `0010_0011`, six valid bits.
- XNOR gives `1001_0111`.
- Masking with `0011_1111` leaves `0001_0111`: 4 ones out of 6.
- The contribution is `2*4 − 6 = +2`.
- An accumulator holding +3 becomes +5.

The engine testbench checks exactly this case.

## 2. Which loops are hardware and which are microcode

The layer is reordered so that the feature loops are innermost and tiled by TP:

    for i in h_out:                          # loop 5   microcode
      for j in w_out:                        # loop 4   microcode
        for k_out_major in ceil(nof/TP):     # loop 3   microcode
          for u_i in fs:                     # loop 2   microcode
            for u_j in fs:                   # loop 1   microcode
              for k_in_major in ceil(nif/TP):# loop 0   microcode
                load x[i+u_i][j+u_j][k_in_major tile]         -> feature register
                for k_out_minor in min(TP,nof):              # hardware, 1 cycle each
                  acc[k_out_minor] += pm1sum(W[...] XNOR x)   # TP-wide, hardware
          # after the last (u_i, u_j, k_in_major):
          binarize acc[0 .. min(TP,nof)-1], write y[i][j][k_out_major tile], clear acc

One feature vector is used for `min(TP, nof)` consecutive cycles.

## 3. Engine (`xne_engine`)

The engine takes two commands from the controller:

- **ACCUM** (1 + n_acc cycles without stalls).
  - One feature vector is loaded from the feature FIFO (2 entries). The mask is set to the low `n_in = min(TP, nif)` bits.
  - Then `n_acc = min(TP, nof)` weight vectors are consumed from the weight FIFO (4 entries).
  - Weight vector `k` updates accumulator `k`. This is an XNOR with the feature register, an AND with the mask, a pairwise adder-tree popcount, `2·pc − n_in`, and a saturating add.
- **THRESH** (⌈8·n_acc/TP⌉ + 1 cycles).
  - Threshold vectors arrive on the same stream as the weights. Each carries TP/8 bytes, and each byte binarises one accumulator, so TP/8 thresholds are applied per cycle.
  - The TP-bit output vector is then pushed into the output FIFO (2 entries). Bits at or above `n_acc` are zero.
  - All accumulators are then cleared.

`done_o` pulses once a command completes. The accumulators are flip-flops.

## 4. Streamer (`xne_streamer`, `xne_source`, `xne_sink`, `xne_tcdm_mux`)

There are three address generators, each started with a base address and a length:
- a **feature source**;
- a **weight/threshold source**;
- an **output sink**.

They share the TP/32 memory ports through two static multiplexers:

    feature source ─┐
                    ├─ mux 1 ─┐
    weight source  ─┘          ├─ mux 2 ── TP/32 TCDM ports
    output sink   ─────────────┘

The controller owns both selects and never has two generators working at the same time.

The memory protocol is the usual TCDM one:
- `req` is held until `gnt`;
- read data returns with `r_valid` one cycle after the grant;
- `wen = 1` means read.

A mux routes each response by the select it registered at grant time. A read answered just after the select
changed therefore still reaches its requester.

A source works as follows:
- It fetches TP-bit vector `n` from word addresses `base + n·TP/8 + 4p` on port `p`.
- The four ports issue in lockstep. A port that is not granted keeps requesting while the others wait.
- Responses are collected in per-port FIFOs and leave as one vector.
- A credit counter bounds the requests in flight to the space left in those FIFOs, so memory stalls never lose data.

The sink writes the first `nwords` 32-bit words of one output vector. That is `n_acc/32` words, so a layer
with 32 output channels writes a single word.

Both sources and the sink contain a realigner, so any base may start at any byte:
- A source whose base is at byte offset `o` reads from the aligned address below it and fetches one extra vector.
  Each output vector is the TP bits starting at byte `o` of two consecutive raw vectors. The first raw vector only
  primes the realigner, so a misaligned run costs one extra cycle.
- The sink shifts the vector up by `o` bytes inside an aligned window of `nwords + 1` words and clears the byte
  enables outside the written range. If that window is wider than the TP/32 ports, a second beat writes the last
  word on port 0.

## 5. Microcode processor (`xne_ucode`)

The processor has:
- four read/write registers: `W` (weight offset), `X` (input offset), `Y` (output offset) and `XMAJ` (offset of the current input window);
- sixteen read-only registers, computed by the controller from the job;
- six loop indices with ranges `{⌈nif/TP⌉, fs, fs, ⌈nof/TP⌉, w_out, h_out}`.

The program is stored as bytes. Instructions occupy slots 0–31, and each loop has one descriptor.

| byte | bits |
|---|---|
| instruction | `[7]` op (0 = ADD, 1 = MV) · `[6:5]` destination R/W register · `[4]` source is R/W · `[3:0]` source register |
| loop descriptor | `[7:5]` number of instructions · `[4:0]` first slot |

`ADD d, s` computes `d ← d + s`. `MV d, s` computes `d ← s`.

**Step rule.** The controller asks for one step per inner iteration.
1. The processor finds the innermost loop whose index is not yet at its last value.
2. It increments that index and resets every index inside it to 0.
3. It runs that loop's instructions, one per cycle.

When every index is at its last value, `last_o` is high and the job ends after the current iteration.
The step is issued while the feature vector of the current iteration is being fetched, so the 2–4 cycles of
microcode hide behind the memory access.

Read-only registers:

| # | name | value |
|---|---|---|
| 0 | ZERO | 0 |
| 1 | TPSQ | `n_acc·TP/8`, the bytes of weights per input tile |
| 2 | TPX | `min(TP,nif)/8`, the bytes of one input tile |
| 3 | NIF | `nif/8`, the bytes of one input pixel |
| 4 | NOF | `nof/8` |
| 5 | ROWSKIP | `(w_out−1)·nif/8 + TPX`, the jump from the end of one filter row to the start of the next |
| 6 | FSNIF | `fs·nif/8`, the jump of the window base at the end of an output row |
| 7 | TPY | `min(TP,nof)/8`, the bytes of one output tile |
| 8–13 | RANGE0–5 | the six loop ranges, which the processor also takes directly |

ROWSKIP and FSNIF each need a multiplication. Two shift-and-add multipliers (`xne_seqmult`, 32 cycles) compute
them once when a job starts.

The program that computes a stride-1 convolution with the memory layout of §7 is 17 instruction bytes and
6 descriptor bytes. The end-to-end testbench loads it:

| loop | slots | instructions |
|---|---|---|
| 0 k_in_major | 0–1 | `ADD W,TPSQ` · `ADD X,TPX` |
| 1 u_j | 2–3 | `ADD W,TPSQ` · `ADD X,TPX` |
| 2 u_i | 4–5 | `ADD W,TPSQ` · `ADD X,ROWSKIP` |
| 3 k_out_major | 6–8 | `ADD W,TPSQ` · `MV X,XMAJ` · `ADD Y,TPY` |
| 4 j | 9–12 | `ADD Y,TPY` · `ADD XMAJ,NIF` · `MV W,ZERO` · `MV X,XMAJ` |
| 5 i | 13–16 | `ADD Y,TPY` · `ADD XMAJ,FSNIF` · `MV W,ZERO` · `MV X,XMAJ` |

Descriptor bytes: `0x40 0x42 0x44 0x66 0x89 0x8D`.

## 6. Controller (`xne_controller`) and the life of a job

The controller takes a job from the register file and runs this state machine:

    IDLE ─job─▶ PREP ─(multipliers done)─▶ FEAT ─▶ FEAT_W ─▶ ACC ─┬─▶ NEXT ─▶ FEAT ...
                                                                  └─▶ THR ─▶ THR_W ─▶ OUT ─▶ NEXT
                                                       NEXT ─(last iteration)─▶ DONE ─▶ IDLE

- **PREP** waits for the two multipliers and clears the microcode state.
- **FEAT** hands an ACCUM command to the engine, starts the feature source at `x_base + X` and steps the microcode.
- **FEAT_W** waits for the feature fetch. It then switches mux 1 and starts the weight source at `w_base + W` for `n_acc` vectors.
- **ACC** waits until the weights are streamed and the engine is done.
  - If loops 0–2 were all at their last value, this was the last input tile of the window, and the next state is **THR**.
  - THR starts a THRESH command and streams the thresholds of output tile `k_out_major` from `thr_base + k_out_major·TP`.
  - **THR_W** waits for the thresholds. It then switches mux 2 and starts the sink at `y_base + Y`.
- **DONE** pulses `evt_o` for one cycle and frees the job's register context.

Steady-state cost per inner iteration:
- without memory stalls, about `n_acc + 11` cycles (139 for full tiles);
- on a 256→256-channel 3×3 layer, 92 % of the cycles stream a weight vector.

## 7. Register map and memory layout

The APB target has zero wait states. Offsets are bytes; all registers are 32 bits wide.

| offset | register | notes |
|---|---|---|
| 0x00 | TRIGGER | any write commits the job registers written so far |
| 0x04 | STATUS | `[2]` a job is running · `[1:0]` number of jobs committed and not finished |
| 0x10–0x2C | UCODE | 32 instruction bytes, little-endian within each word |
| 0x30–0x34 | LOOPS | 6 loop descriptor bytes (0x34 holds loops 4, 5) |
| 0x40 | W_BASE | weights |
| 0x44 | X_BASE | input activations |
| 0x48 | Y_BASE | output activations |
| 0x4C | THR_BASE | threshold bytes |
| 0x50 | NIF | input channels |
| 0x54 | NOF | output channels |
| 0x58 | FS | filter size |
| 0x5C | W_OUT | output width |
| 0x60 | H_OUT | output height |
| 0x64 | S_TAU | threshold shift |

The microcode registers are shared by all jobs.

The job registers exist twice. The host fills one copy while the engine runs the other, so a second job can be
queued behind a running one. A trigger while both copies hold pending jobs is ignored, so poll STATUS first.

Memory layout expected by the program above. All addresses are byte addresses and the bits of a vector are
little-endian.
- Input `x[r][c][k]`: bit `k % 8` of byte `x_base + (r·w_in + c)·nif/8 + k/8`, where `w_in = w_out + fs − 1`.
  There is no padding, so a "same" convolution needs an input stored with its zero border.
- Weights: TP-bit vector number `(((k_out_major·fs + u_i)·fs + u_j)·⌈nif/TP⌉ + k_in_major)·n_acc + k_out_minor`.
  Its bit `b` is input channel `k_in_major·TP + b`.
- Thresholds: byte `thr_base + k_out`, for `k_out` in output tile `k_out_major`, at `k_out_major·TP + k_out_minor`.
- Output `y[i][j][k]`: bit `k % 8` of byte `y_base + (i·w_out + j)·nof/8 + k/8`.

Supported sizes:
- `nif` and `nof` are multiples of 32 that are either at most TP or multiples of TP;
- `fs`, `w_out` and `h_out` are at least 1 and below 65536;
- stride is 1.

## 8. Relation to the published design

**Follows the published design:**
- the split into controller, engine and streamer;
- TP = 128 and TP/32 memory ports;
- the XNOR/mask/popcount/16-bit saturating accumulator datapath, which adds the ±1 sum;
- the 7-bit τ plus sign(λ) threshold format with a per-job shift;
- input- and output-stationary operation with the feature register reused for `min(TP, nof)` cycles;
- the two static multiplexers in front of the memory ports;
- a microcode processor with six loops, four read/write registers, sixteen read-only registers, ADD and MV instructions and one descriptor per loop;
- sequential multipliers for the derived registers;
- a register file with duplicated job registers behind APB;
- a single end-of-job event.

**Choices of this design, where the published description is silent:**
- all bit encodings: instruction and descriptor bytes, threshold byte, vector bit order;
- the register map and the TRIGGER/STATUS scheme;
- the memory layout;
- the contents of the read-only registers;
- the microcode program itself;
- the step rule;
- the TCDM handshake timing;
- TP/8 thresholds per cycle;
- the FSM states.

**Departures:**
- **Flip-flops instead of latches.** The FIFOs, accumulators and register file are described as latch-based standard-cell memory. Here they are flip-flop arrays.
- **Weight FIFO depth.** The description mentions both "two-element" FIFOs for the engine inputs and a "four-element" FIFO for the weight stream. The weight FIFO here has 4 entries; the feature and output FIFOs have 2.
- **Microcode size.** With one byte per instruction the program is 17 bytes of instructions plus 6 of descriptors. The published program takes 22 + 6 bytes in a different encoding. Its operands were also adapted: under the step rule above, the published sequence would not produce the addresses of this layout.
- **Realigner structure.** The published streamer has a realigner for vectors starting at non-word-aligned addresses, but its structure is not described. The one here (§4) is this design's own; a misaligned sink write of a full vector takes two beats.
- **No remainder loops.** The published loop nest leaves remainder loops out. Here `nif`/`nof` must satisfy the size rule of §7, with no remainder tiles.
- **No padding or stride.** The host pre-pads inputs, and strides other than 1 are not supported.
- **No grouped or depthwise convolution.** The published evaluation also uses grouped "depthwise-like" convolutions, which it says need microcode changes. They are not provided.

**How the published workloads map onto this RTL:**
- All stride-1 3×3 binary layers of the small VGG-like CIFAR-10 network fit. That is 64→128 channels at 16×16 up to 512→512 at 4×4, whose 288 kB of weights is the largest. So do the stride-1 layers of ResNet-18/34.
- These need host processing: the real-valued first layers, stride-2 layers, pooling, residual additions, and a 1000-class output layer, which must be zero-padded to 1024 channels.

## 9. Files

| file | contents |
|---|---|
| `rtl/xne_pkg.sv` | shared types (TCDM port, engine command, microcode bytes, job), register map |
| `rtl/xne.sv` | top level: controller + streamer + three FIFOs + engine |
| `rtl/xne_controller.sv` | register file, multipliers, microcode processor, central FSM |
| `rtl/xne_regfile.sv` | APB register file with two job contexts |
| `rtl/xne_ucode.sv` | microcode processor |
| `rtl/xne_seqmult.sv` | 32-cycle shift-and-add multiplier |
| `rtl/xne_engine.sv` | XNOR / popcount / accumulate / threshold datapath |
| `rtl/xne_popcount.sv` | recursive adder-tree popcount |
| `rtl/xne_fifo.sv` | valid/ready FIFO |
| `rtl/xne_streamer.sv` | two sources, sink and two muxes |
| `rtl/xne_source.sv`, `rtl/xne_sink.sv` | memory-to-stream and stream-to-memory address generators |
| `rtl/xne_tcdm_mux.sv` | static two-to-one TCDM multiplexer |
| `tb/xne_tb_mem.sv` | behavioural multi-port memory with random stalls (testbench only) |
| `tb/tb_*.sv` | one self-checking testbench per module |

## 10. Verification and simulation

Every testbench compares against values it computes itself. Each prints `TB_RESULT checks=N failures=M` and stops
itself through a watchdog if the design hangs.

The end-to-end test `tb_xne` runs the top level at its default size (TP = 128) and plays the host over APB:
- **Job A** is a 256→256-channel 3×3 convolution on a 2×2 output. Its cycle count must be at least 86 % of one weight vector per cycle.
- **Job B** is a 64→32 dense layer, queued while A runs. It covers masking and partly used accumulators.
- **Job C** is a 128→128 convolution with 30 % random memory stalls. All four of its base addresses are off word alignment, which exercises the realigners.
- **Job D** is a 4096-channel layer with equal inputs and weights. It drives the accumulators into saturation with a large S_tau.

Every output bit is compared with a reference model. Every mechanism must occur at least once:
- stalls;
- masking;
- partial tiles;
- queued jobs;
- saturation;
- both comparison directions;
- a nonzero shift;
- events.

`tb_xne_workloads` runs layers of the evaluated networks at full size. All results are bit-exact.

| layer | cycles | share of cycles streaming a weight vector |
|---|---|---|
| VGG-like CIFAR-10 net, 64×16×16 → 128×16×16, 3×3, whole layer | 321 827 | 91 % |
| same net, 512×4×4 → 512×4×4, 3×3, whole layer (288 kB of weights) | 318 947 | 92 % |
| ResNet first stage, 64 → 64 channels, two 56-pixel output rows | 75 859 | 85 % |
| ResNet classifier, 512 → 1000 padded to 1024 | 4 571 | 89 % |

The unit testbenches cover the rest:
- the microcode step rule against a reference model, on random programs and random loop ranges;
- response routing in the mux when the select flips;
- stalls in the sources and the sink;
- byte-misaligned bases in the sources and the sink, with memory checked byte by byte around every sink write;
- register read-back and the job queue;
- the sequence of transfers the controller starts, compared with the loop nest above.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
              --top-module tb_xne rtl/xne_pkg.sv tb/tb_xne.sv -o sim
    ./obj_dir/sim

Replace `tb_xne` with any other `tb_*` module. The end-to-end test takes well under a minute.

To use a different engine size, set the top's `TP` parameter to a power of two of at least 32 (only 128 is verified here). It sets the width of
every vector, the number of accumulators and the number of memory ports together.
