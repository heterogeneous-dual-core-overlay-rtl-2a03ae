# A heterogeneous dual-core CNN overlay processor in SystemVerilog

Light-weight CNNs such as MobileNet and SqueezeNet mix two very different
kinds of layer. Pointwise (1x1) and ordinary convolutions reduce over many
input channels and map well onto hardware that is parallel in *channels*.
Depthwise convolutions have one input channel per output channel. On a
channel-parallel array they leave most multipliers idle, while hardware
that is parallel in *pixels* (a sliding window over one channel) runs them
well. This design puts both kinds of engine on one FPGA as two cores that
run at the same time from their own instruction streams:

* the **c-core** is channel-parallel: `N_C = 128` processing elements (PEs)
  of `V_C = 10` multipliers, written C(128,10);
* the **p-core** is pixel-parallel: `N_P = 32` PEs of `V_P = 12`
  multipliers, written P(32,12). It has a line buffer and a double
  feature-map buffer, so it computes 3x3 windows at two output rows per
  cycle.

Two int8 multipliers share one DSP48E1 slice, so the configuration uses
64·10 + 16·12 = 832 DSP slices. The two cores share one off-chip memory
port. A compiler splits a network's layers between the cores. The cores
pass data through memory and order their work with tokens.

The RTL is fully parametric in `N_PE` and `V`. The default parameters are
the configuration above. All arithmetic is signed int8 with 32-bit
accumulation.

## Top level: `dual_opu`

```
             start, c_start_addr, p_start_addr
                          |
      +-------------------+--------------------+
      |                                        |
  opu_core (PCORE=0, 128x10)  <-tokens->  opu_core (PCORE=1, 32x12)
      |                                        |
      +-------------- mem_arbiter (2:1) -------+
                          |
          mem_req / mem_ready / mem_rsp   (512-bit beats)
```

Ports:

| port | dir | meaning |
|---|---|---|
| `start` | in | pulse: both cores reset their instruction pointers and start |
| `c_start_addr`, `p_start_addr` | in | beat address of each core's program |
| `done_c`, `done_p` | out | the core has executed END |
| `mem_req` | out | `mem_req_t`: valid, we, beat address, 512-bit wdata, 64-bit byte strobe |
| `mem_ready` | in | the request is accepted this cycle |
| `mem_rsp` | in | `mem_rsp_t`: read data. Responses return in request order, with any latency |

The memory is not part of the design. `tb/dram_model.sv` is a behavioural
model with a fixed read latency and optional random back-pressure.

Inter-core tokens: `SIGNAL` in one core increments a counter owned by the
other core, and `WAIT` decrements it, blocking while it is zero. Both
counters are cleared by `start`. A producer core thus writes a layer's
output and then signals. The consumer waits before it loads that output.

## One core: `opu_core`

Each core has the same set of blocks. `PCORE` selects the p-core extras.

1. **Instruction decoder** (`instr_decoder`). It fetches 512-bit beats
   (four 128-bit instructions, lowest bits first) into an 8-entry queue.
   It stops fetching after the beat that holds END.
2. **Controller** (`core_controller`). It issues the head instruction when
   its engine is free (see *Instruction set*). It also sequences COMPUTE:
   it streams one feature-map word per cycle from `fm_addr` and holds one
   weight word.
3. **Load engine** (`load_engine`). It copies consecutive memory beats into
   one of the ping-pong input buffers. One buffer word takes
   ceil(word bits / 512) beats. Requests go out back to back, so a load
   costs its beats plus the memory latency.
4. **Input buffers** (`pingpong_buffer`, two banks each):
   * feature map: 512 words of `N_PE*V/2` bytes;
   * weight: 32 words of `N_PE*V` bytes, V per PE;
   * bias: 16 words of `N_PE` int32;
   * residual: 512 words of `N_PE` int8.

   A program loads one bank while COMPUTE reads the other.
5. **PE array** (`pe_array`), plus the **line buffer** (`line_buffer`) in
   the p-core.
6. **Output buffer** (`output_buffer`). It holds 512 words of `N_PE`
   32-bit partial sums. Each PE-array result either overwrites a word or
   is added to it (`accumulate`).
7. **Post-processing** (`post_proc`). It turns partial sums into int8
   activations and stores them.
8. **Internal arbiter** (`mem_arbiter`, 3:1). Fetch, load and store share
   the core's memory port.

Pipeline timing while a COMPUTE streams: buffer read (1 cycle), then the
line buffer (1 cycle, window mode only), then the PE array
(`clog2(V)+1` cycles), then the output-buffer accumulate. The throughput
is one feature-map word per cycle. The testbench of the top checks this
rate.

## The PE array: DSP sharing and the two data layouts

This is the part that needs the most care.

### A PE and a DSP pair

A PE computes an inner product of `V` int8 products. A balanced adder tree
(`adder_tree`) reduces them, with one register per level. When the number
of terms on a level is odd, the last term skips the adder and passes
through a delay register, so V = 10 or 12 works without padding. The
latency is `clog2(V)` cycles.

A DSP48E1 slice can give two 8x8 products in one cycle only if they have
one operand in common (`dsp_dual_mult`: `p0 = a*b0`, `p1 = a*b1`). The
array is therefore built from `N_PE/2` **PE pairs** (`pe_pair`). Pair `k`
holds PE `k` and PE `k + N_PE/2` and uses `V` DSP slices. What the shared
operand is depends on the mode:

| | shared operand (`common`) | PE k private | PE k+N/2 private |
|---|---|---|---|
| channel mode | V input-channel pixels | weights of PE k | weights of PE k+N/2 |
| window mode (p-core) | 9 weights of channel k | window A of channel k | window B of channel k |

### Channel mode and the accumulation network

A feature-map word holds `N_PE*V/2` bytes, that is `N_PE/2` slices of V
input-channel pixels. With `G = 2**group_log2` PEs per result:

* PE `p` reads slice `p mod G`;
* the accumulation network (`acc_network`) adds each group of G
  neighbouring PEs;
* the output word then holds `N_PE/G` output channels, each reduced over
  `G*V` input channels.

`group_log2` comes from the COMPUTE instruction, so one array serves:

* thin layers: G = 1, 128 output channels × 10 input channels per cycle;
* wide layers: G = 64, 2 output channels × 640 input channels.

The network is a full binary tree of registered adders. Lanes
`j >= N_PE/G` are zero.

The DSP pairing needs PE k and PE k+N/2 to read the same slice. This holds
when G divides N_PE/2, which is always true for power-of-two N_PE and
G ≤ N_PE/2. The program must keep G ≤ N_PE/2: G = N_PE (one result)
would break the pairing and read past the feature-map word.

A COMPUTE streams `count` feature-map words (pixels) against one weight
word. Reductions over more input channels than one word holds are done in
time: several COMPUTE instructions, each with its own weight word and the
`accumulate` flag, add into the same output-buffer addresses. A KxK convolution is run as K·K shifted
accumulate passes.

### Window mode (p-core): line buffer and double feature-map buffer

For 3x3 depthwise layers the p-core uses its feature-map buffer as two
banks side by side:

* the low half of a word is a pixel of an **even** input row;
* the high half is the pixel of the **odd** row below it;
* each half holds 16 channels (one per PE pair).

Words stream column by column, `row_w` per row pair. `line_buffer` keeps
the previous row pair in two line memories per channel. At column `c` it
therefore sees a 4-pixel column covering rows `2j-2 .. 2j+1`, and it holds
the last three such columns in registers. This gives two 3x3 windows of
the same channel, one row apart:

* window A: rows `2j-2..2j`, columns `c-2..c`. This is output row `2j-2`.
* window B: rows `2j-1..2j+1`, the same columns. This is output row `2j-1`.

PE k computes window A and PE k+N/2 computes window B. Both multiply by
the same 9 taps of channel k, which is what makes the DSP sharing work
here. PEs have V = 12 multipliers; taps 9..11 get zero pixels. Use
`group_log2 = 0`. Output lane k then holds row `2j-2` of channel k, and
lane `k+16` holds row `2j-1`. A window is valid once `j >= 1` and
`c >= 2`. The output buffer receives one word per valid window position.

The window is stride 1 with no padding. Borders and stride 2 are left to
the program, which lays out padded tiles and posts only the outputs it
needs.

## Post-processing

`POST` walks `count` outputs. For each output:

1. read `pool_n` consecutive output-buffer words and add the per-lane bias
   (`bias_bank`, `bias_addr`);
2. pool: take the max, or sum and then shift right by `avg_shift` for
   average pooling;
3. requantise: arithmetic shift right by `shift`, truncating;
4. optionally add an int8 residual (`res_bank`, `res_addr + i`) from the
   residual buffer;
5. apply the activation: none, ReLU, or ReLU clamped to `[0, relu6_max]`;
6. saturate to int8.

The order is pooling, then residual add, then activation. The `N_PE`
bytes of one output go to memory as `ceil(N_PE/64)` beats at
`mem_addr + i*beats`. The p-core's 32 lanes use a byte strobe on half a
beat. The unit is sequential: `pool_n + 3` cycles plus the stores per
output.

## Instruction set

Instructions are 128 bits: `{op[4], barrier[1], body[123]}`. The body is
a packed struct per opcode (see `opu_pkg`).

| op | fields | action |
|---|---|---|
| LOAD (1) | dst (FM/W/BIAS/RES), bank, mem_addr, buf_addr, words | memory → input buffer |
| COMPUTE (2) | fm_bank, w_bank, fm_addr, w_addr, ob_addr, count, group_log2, window, accumulate, row_w | stream `count` FM words through the array into OB from `ob_addr` |
| POST (3) | ob_addr, count, pool_n, pool_avg, avg_shift, shift, res_en, res_addr, res_bank, act, relu6_max, bias_bank, bias_addr, mem_addr | OB → post-processing → memory |
| SIGNAL (4) | – | give the other core one token |
| WAIT (5) | – | take one token; block while none |
| END (6) | – | wait until idle, raise `done` |

Only one instruction of each engine type runs at a time. Different
engines overlap: a LOAD into one bank runs while a COMPUTE reads the other
bank. This overlap is the main source of speed.

The program states dependences itself with the `barrier` bit. An
instruction with `barrier` set waits until all engines are idle. Set it:

* on a COMPUTE that reads a bank just loaded;
* on a POST after the COMPUTE it drains;
* on a LOAD into a bank still being read.

`tb/opu_prog_pkg.sv` has encoder functions (`i_load`, `i_compute`,
`i_post`, `i_simple`).

## Departures from the published description, and limits

* The instruction set, its encoding, the barrier bit and the token
  mechanism are this design's own. The published design uses an ISA whose
  details are not given.
* The memory beat is 512 bits. This is chosen to match a 64-bit
  DDR3-1600 channel at a 200 MHz fabric clock.
* Buffer depths (FM 512, W 32, OB 512, bias 16, residual 512, line
  width 64) are chosen, not derived from a tiling. The published method
  sizes them per network by design-space exploration.
* The line buffer holds one channel per PE pair, 16 for P(32,12). The
  published description quotes a 128-channel line buffer for a P(64,9)
  core, twice its PE count, without saying how those channels feed the
  PEs. This design follows the stated DSP sharing (two windows of one
  channel per pair) instead.
* Grouping is limited to powers of two. Among the configurations compared
  in the description, those with non-power-of-two `N_PE` such as
  C(130,8) therefore support fewer groupings.
* The window mode is 3x3, stride 1, without padding. Other depthwise
  kernels, or any stride, need the channel mode or program-side
  rearrangement.
* Post-processing pools consecutive output-buffer words. A spatial
  pooling window must be laid out that way by the program.
* The design-space exploration and the compiler that generates programs
  are software and are not included. The testbenches write programs by
  hand.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. With plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/opu_pkg.sv tb/opu_prog_pkg.sv $(ls rtl/*.sv | grep -v opu_pkg) \
    tb/dram_model.sv tb/tb_dual_opu.sv --top-module tb_dual_opu
./obj_dir/Vtb_dual_opu
```

| testbench | what it covers |
|---|---|
| `tb_dsp_dual_mult`, `tb_pe_pair`, `tb_acc_network`, `tb_pe_array` | arithmetic against integer reference models; PE latency |
| `tb_line_buffer` | windows of random tiles against a reference |
| `tb_pingpong_buffer`, `tb_output_buffer` | bank isolation, accumulate/overwrite |
| `tb_load_engine`, `tb_mem_arbiter`, `tb_instr_decoder` | memory traffic, ordering, back-pressure |
| `tb_post_proc` | bias, pooling, shift, residual, activation, saturation, store addresses |
| `tb_core_controller` | issue rules, barrier, tokens, END |
| `tb_opu_core` | a small P(8,12) core running channel and window programs end to end |
| `tb_dual_opu` | the full C(128,10)+P(32,12) top at default parameters |

`tb_dual_opu` runs both cores concurrently:

* the c-core runs a channel-mode layer with accumulation passes, ping-pong
  loads and post-processing;
* the p-core waits for a token from the c-core, then runs a 3x3 window
  layer over its own 8x8 tile, with clamped ReLU and average pooling.

The testbench compares every stored byte with a reference model. It
counts each mechanism and fails if any count is zero: load/compute
overlap, accumulation, window mode, simultaneous memory requests from
both cores, a blocked WAIT, ReLU clipping and int8 saturation.
