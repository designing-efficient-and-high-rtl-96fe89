# STT-AI: a deep-learning accelerator with customized STT-MRAM buffers and a reconfigurable core

Most of the energy of an inference accelerator goes into moving data, not
into arithmetic. Every off-chip DRAM access costs far more than a MAC, so a
large on-chip global buffer pays for itself. At 12 MB, though, an SRAM buffer
takes most of the die area and leaks heavily. This design replaces it with
STT-MRAM, whose retention (its thermal stability factor Δ) is tuned to how
long data actually stays in the buffer. Pre-trained weights, which must live
for years, go into a second MRAM with a high Δ. That memory takes the place
of the usual eFlash.

MRAM writes cost more energy than reads. The design therefore keeps every
intermediate result out of the MRAM. The running partial sums of an output
feature map go to a small SRAM scratchpad, and only finished, activated
outputs are written to the MRAM buffer. One compute fabric handles both
kinds of layer:

- convolution layers run as a row-stationary dot-product array;
- fully connected layers run as a systolic matrix multiplier.

A mode bit in every core switches between the two.

The RTL here covers:

- the arithmetic (BF16 multiplier and FP32 adder);
- the reconfigurable core and the 42 x 42 MAC array;
- the digital side of the MRAM banks, the global buffer and the weight store;
- the gated scratchpad;
- the ReLU / max-pool output stage;
- a command sequencer;
- the digital controller of the temperature- and process-compensated MRAM
  write driver.

The following parts sit outside the RTL:

- the magnetic bit cells and analog write drivers;
- the process/temperature monitor;
- the host CPU;
- the off-chip DRAM.

They connect through ports of the top module `stt_ai_top`.

```
                 host commands           PT monitor readings
                      |                          |
                 +----v-----+              +-----v-----+
                 |stt_ai_ctrl|             | wdrv_ctrl |--> leg enables
                 +-+--+--+--+              +-----------+    (analog drivers)
   weight store    |  |  |
  (MRAM, 280 MiB)<-+  |  +---------------------------+
                      |                              |
 off-chip DRAM  +-----v------+   +-----------+   +---v------------------+
 / host  <----->| glb 12 MB  |-->| pe_array  |-->| scratchpad 52 KB SRAM |
   (ext port)   | MSB | LSB  |   | 42x42 MAC |   +----------------------+
                +-----^------+   +-----+-----+            | partial sums
                      |                |                  +--> back to top row
                      +--relu_maxpool--+  final results only
```

## The reconfigurable core (`reconfig_pe`)

A core holds three MACs. Each MAC is a BF16 multiplier (`bf16_mul`) feeding
an FP32 adder (`fp32_add`). Four 2:1 multiplexers, all driven by the same
`mode` bit, decide what each adder adds. The paper numbers the MACs 1 to 3;
the RTL numbers them 0 to 2.

| adder | mode 0 (systolic) | mode 1 (convolution) |
|-------|-------------------|----------------------|
| add1  | mul1 + P_sum1     | mul1 + PE_IN (partial sum from the core above) |
| add3  | mul3 + P_sum3     | mul3 + mul2 |
| add2  | mul2 + P_sum2     | add3 + add1 = **PE_OUT** |

In convolution mode the core returns
`PE_OUT = i1·f1 + i2·f2 + i3·f3 + PE_IN`. That is a three-element segment of a
kernel row times the matching ifmap segment, plus the sum from above. In
systolic mode the three MACs are three independent cells of a systolic
grid, each adding its product to the partial sum arriving from above.

The implemented design runs at 1 GHz. It needs 11 cycles for a systolic MAC
and 17 cycles for a convolution core. These are the only timing numbers
given for the datapath. The RTL splits them as 5 cycles for a multiplication
and 6 for an addition:

- systolic: 5 + 6 = 11;
- convolution: 5 for the multipliers, 6 for add1 and add3 in parallel, and 6
  for add2, giving 17.

Each unit is a multi-cycle unit with one operation in flight, and a core
accepts a new operation only when it is idle. The testbenches measure both
counts.

The arithmetic has these properties:

- The BF16 multiplier forms the exact 16-bit product of two 8-bit
  significands. A BF16 x BF16 product always fits in FP32, so it is returned
  without rounding.
- The FP32 adder rounds to nearest even, using guard, round and sticky bits.
- Both units flush subnormals to zero and produce infinities on overflow.
  Every NaN becomes the quiet NaN 0x7FC00000.

## The PE array and its two dataflows (`pe_array`)

The array has H_A = 42 rows and W_A = 14 columns of cores, which is
42 x 42 MACs. The systolic width is W_SA = 3·W_A = 42. Every core holds:

- three weight registers;
- three activation registers.

Every row also holds one row activation for systolic mode. A step starts
with `start`. Row 0 fires at once, and each lower row fires when the sums of
the row above arrive, so partial sums flow down the array like a wavefront.
A step therefore takes H_A x 17 cycles in convolution mode and H_A x 11 in
systolic mode (714 or 462 cycles at full size). `done` comes one cycle after
the last row finishes.

### Convolution mode: row stationary

Each column of cores computes one output-feature-map element. A 3x3 kernel
uses three consecutive cores of a column. Each of those cores holds one
kernel row as stationary weights, plus the three ifmap elements under it.
The column's vertical sum is then the 3x3 dot product.

Further down the same column sit the kernel rows of more input channels of
the same output channel. At full size one column holds 42/3 = 14 input
channels. The bottom of column c is therefore the sum over 14 channels of
the 3x3 window for ofmap row c. The 14 columns give 14 ofmap rows of one
ofmap column at once. The partial sum entering the top of a column
(`psum_top[c]`) is either zero or the running sum of earlier input channels,
read from the scratchpad.

To move to the next ofmap column, the window slides by the stride. Loading
all three activations of every core again would cost 3 x 588 word reads. A
stride shift (`LD_SHIFT`) avoids that: it moves each core's activations by
one place and brings in a single new element per core, only 588 reads. For
stride s, issue s shift loads.

### Systolic mode: fully connected layers

The grid is 42 x 42 MACs:

- MAC (r, j) holds weight W[r][j], with j = 3·c + k.
- Row r broadcasts input activation x[r] to all MACs of the row.
- Each MAC adds its product to the sum from MAC (r−1, j).
- Column j delivers `psum_top[j] + Σ_r x[r]·W[r][j]`.

A layer with m inputs and n outputs needs ceil(m/42)·ceil(n/42) steps. The
output sums of one tile of 42 inputs are carried to the next tile through
the scratchpad.

The activation is held in one register per row and read by all MACs of the
row. The row-by-row wavefront gives the same arithmetic as a skewed
systolic stream, and the result is the same sum in the same order.

## The memories

### STT-MRAM bank (`stt_mram_bank`)

The bank is the digital view of one MRAM array: DEPTH words of WIDTH bits,
with one access at a time.

- A read returns its data `RD_LAT` = 2 cycles after it is accepted.
- A write keeps the bank busy for a write pulse of `WR_LAT` cycles: 5 in
  the global buffer, 8 in the weight store.

The longer pulse in the weight store reflects its higher Δ, since write
time grows with Δ. These latencies are choices within the "below 10 ns"
range that MRAM macros of this kind reach. The bit cells, retention failures,
read disturbs and write errors are not modelled.

### Global buffer (`glb`)

The buffer holds 12 MB as 6,291,456 BF16 words. The upper byte of every
word (the sign and the top seven exponent bits) goes to one bank. The lower
byte (the last exponent bit and the seven mantissa bits) goes to another.
In the low-cost "Ultra" variant, the lower-byte bank is built with a lower
Δ (17.5 instead of 27.5) and a relaxed error rate of 10⁻⁵. Errors there
change a value by at most a factor of two, and mostly much less. The
reported accuracy loss stays under 1 %. The logic of both variants is the same; only the cells differ.

Two ports share the buffer:

- the controller (port `c_*`), which has priority;
- the external side, off-chip DRAM or host (port `x_*`).

A port holds `req` until `gnt`. A read answers on the port that issued it
with `rvalid`.

### Weight store

The weight store is one `stt_mram_bank` of 146,800,640 16-bit words
(280 MiB). That is enough for the BF16 weights of all the networks the
design was sized for. The host writes it through the `ws_*` port; the
controller's reads have priority. FC weights go from here straight into the
array (`from_wstore`), without passing through the global buffer.

### Scratchpad (`scratchpad`)

The scratchpad has two SRAM banks of 26 KB each. Each bank has its own clock
and power gate (`sp_bank_on`). A line holds one result vector of the array:
42 FP32 partial sums, 168 bytes. A bank therefore holds 158 lines, and the
scratchpad 316.

Switching a bank off discards its contents. Its lines become invalid, and a
read of an invalid or gated line returns zeros with `rd_hit` low; the top
asserts that a read the controller makes always hits. Partial sums are kept
in FP32 here to preserve accuracy across channel passes. Per element this
costs twice what a BF16 partial ofmap would, so the 52 KB holds 13,272
partial sums rather than 26,624.

## Output stage (`relu_maxpool`)

A final result vector passes through three steps before it reaches the MRAM
buffer:

1. Optional ReLU: negative values and −0 become +0.
2. Optional 2x2 / stride-2 max pooling. In convolution mode, elements 2i and
   2i+1 of a vector are neighbouring ofmap rows. Two consecutive vectors are
   neighbouring ofmap columns. The first vector of a pair is held, and the
   second produces W/2 pooled values.
3. Rounding to BF16, round to nearest even.

## Command sequencer (`stt_ai_ctrl`)

The host drives the accelerator with one command at a time (`cmd_t`, valid
/ ready). Three operations make up every layer:

| op | what it does |
|----|--------------|
| `OP_LOAD_W` | copy `count` words from the global buffer (or from the weight store, `from_wstore`) into the weight registers, starting at element `dst_index` |
| `OP_LOAD_A` | copy words into the convolution activations (the default), the systolic row activations (`row_act`), or shift `count` cores by one element (`shift`) |
| `OP_RUN` | run one step in `mode`. The top partial sums are zero or scratchpad line `sp_rd_line` (`psum_from_sp`). With `to_sp` the result goes to scratchpad line `sp_wr_line`. Otherwise it passes through the output stage (`relu_en`, `pool_en`), and `out_count` words go to the global buffer at `dst_addr`. |

The controller works in three phases:

- **Loads:** it reads one word per request (request, grant, data) and writes
  it to the array's load port.
- **Runs:** it reads the scratchpad line if needed, starts the step and
  waits for `done`. It then writes the vector to the scratchpad, or feeds it
  to the output stage and writes the BF16 words back one by one.
- **Counters:** it counts scratchpad writes, global-buffer result writes,
  convolution steps, systolic steps and mode switches. These show how many
  MRAM writes the scratchpad saved.

A convolution layer with more input channels than one column can hold runs
as follows:

```
for each channel pass p:
    LOAD_W  (kernel rows of pass p), LOAD_A (ifmap window at column 0)
    for each ofmap column x:
        if x > 0: LOAD_A shift (one new element per core)
        RUN conv, psum_from_sp = (p > 0), sp_rd_line = x,
                  last pass ? (relu/pool -> global buffer) : (to_sp, sp_wr_line = x)
```

An FC layer loops over tiles of 42 inputs in the same way. It uses
`from_wstore` weight loads, `row_act` activation loads and systolic runs.

## Write-current compensation (`wdrv_ctrl`)

The critical switching current of an MTJ grows with its Δ. Δ varies in two
ways:

- with process, by σ = 2.1 % of the mean;
- with temperature, as T_nom / T. A cold die has a higher Δ.

The write driver has a regular PMOS source of width W and four extra legs of
width W/4. A process/temperature monitor supplies three readings:

- the die's process offset in σ (`proc_sigma`, −8…7);
- its temperature in kelvin (`temp_k`);
- the driver's own current loss in per mille (`drv_loss_pm`).

The controller switches on the fewest legs n that satisfy

    (1 − loss) · (1 + n/4)  ≥  (1 + 0.021 · proc_sigma) · 300 K / temp_k

The check is evaluated in integers without division. The leg enables are
registered and thermometer-coded. If four legs are still not enough,
`saturated` is set. For example, a +4σ die at −20 °C (253 K) needs
1.084 · 1.186 = 1.285, and two legs are enabled.

The nominal temperature of 300 K is not given in the source and is a choice
here. The σ, the hot and cold corners (393 K and 253 K) and the four W/4
legs come from the original design.

## Top level (`stt_ai_top`)

| port | meaning |
|------|---------|
| `clk`, `rst_n` | clock (1 GHz target), asynchronous active-low reset |
| `cmd_valid`, `cmd_ready`, `cmd`, `busy` | host command port |
| `ext_req/we/addr/wdata`, `ext_gnt/rvalid/rdata` | off-chip DRAM / host access to the global buffer (23-bit word address) |
| `ws_req/addr/wdata`, `ws_gnt` | loading pre-trained weights into the weight store (28-bit word address) |
| `sp_bank_on[1:0]` | scratchpad bank clock/power gates |
| `pt_proc_sigma`, `pt_temp_k`, `pt_drv_loss_pm` | process/temperature monitor readings |
| `wdrv_leg_en[3:0]`, `wdrv_saturated` | enables for the analog write-driver legs |
| `n_sp_writes`, `n_glb_writes`, `n_conv_steps`, `n_sys_steps`, `n_mode_switches` | event counters |

Every size is a parameter. The defaults are the full design:

| parameter | default | origin |
|-----------|---------|--------|
| `H_A` x `W_A` | 42 x 14 cores (42 x 42 MACs) | original |
| `MUL_LAT`, `ADD_LAT` | 5, 6 cycles | split chosen to give the original 11 / 17 cycles |
| `GLB_WORDS` | 6,291,456 (12 MB) | original |
| `WS_WORDS` | 146,800,640 (280 MiB) | original (about 280 MB of BF16 weights) |
| `SP_BANK_B` | 26,624 bytes per bank | original (52 KB in two banks) |
| `MRAM_RD`, `MRAM_WR`, `WS_WR` | 2, 5, 8 cycles | chosen |

## What follows the original design and what does not

The following come from the original design:

- the core, its multiplexer wiring and cycle counts;
- the two dataflows;
- the 42 x 42 array;
- BF16 operands with FP32 accumulation;
- the 12 MB MSB/LSB-split buffer;
- the 280 MB weight store;
- the 52 KB two-bank gated scratchpad that takes all partial-ofmap writes;
- the four-leg compensated write driver.

The rest is this implementation's own. It covers:

- the command set and controller;
- load ports that take one word per cycle;
- the wavefront timing between rows, in place of a skewed stream;
- the stride-shift load;
- the bus handshakes and arbitration;
- memory latencies;
- FP32 scratchpad lines;
- the pooling order;
- the 300 K nominal temperature.

Known limits:

- Loads move one word at a time, so at full size a weight load
  (1764 words x about 3 cycles) takes longer than a step. Loads and steps do
  not overlap.
- A kernel row wider than 3 occupies ceil(k_w/3) cores (zero padded),
  stacked down the same column, so a k_h x k_w kernel uses
  k_h·ceil(k_w/3) cores of a column. The host program has to lay this out.
  A stride s needs s shift loads per ofmap column. With wide kernels each
  segment's window moves by s, so the shift operation still applies.
- The datapath is BF16 only; int8 models would need their own hardware.
- With FP32 partial sums the scratchpad holds half as many elements as a
  BF16 partial ofmap of 52 KB.
- The largest VGG16 layer (conv1_2) is 12.92 MB with ifmap, ofmap and
  weights, slightly more than 12 MiB at batch 1, and needs splitting.
- Bit errors of the relaxed-Δ banks are not modelled in the RTL.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one compares
against independent reference models (`tb_fp_pkg`: double-precision maths
with one rounding to FP32 or BF16, which is exact for these operations). It
prints `TB_RESULT checks=N failures=M` and stops on a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/stt_ai_pkg.sv tb/tb_fp_pkg.sv tb/tb_stt_ai_top.sv --top-module tb_stt_ai_top
./obj_dir/Vtb_stt_ai_top
```

| testbench | what it covers |
|-----------|----------------|
| `tb_bf16_mul`, `tb_fp32_add` | random and special operands, latency 5 / 6 |
| `tb_reconfig_pe` | both modes against the reference, latency 11 / 17 |
| `tb_pe_array` | 5 x 3 array: convolution and systolic steps, stride shifts, H_A·17 / H_A·11 step latency |
| `tb_stt_mram_bank`, `tb_weight_store` | random traffic, read latency, write-pulse busy time |
| `tb_glb` | both ports, priority, byte split across the two banks |
| `tb_scratchpad` | writes and reads, gating and invalidation |
| `tb_relu_maxpool` | ReLU, pooling pairs, BF16 rounding |
| `tb_wdrv_ctrl` | corners and random readings against the leg inequality |
| `tb_stt_ai_ctrl` | command sequences against models of its neighbours |
| `tb_stt_ai_top` | end to end on a 3 x 6-MAC array with small memories |
| `tb_stt_ai_full` | the same program with every parameter at its default |
| `tb_layer_workloads` | on a 12 x 12-MAC array: slices of a VGG16 3x3/1 layer, an AlexNet conv1 11x11/4 layer (kernel rows split into 3-wide segments, 11 channel passes) and a ResNet-50 1x1 layer. Each is checked bit-exactly and against a direct convolution. |

Both end-to-end testbenches use the external ports to fill the buffer and
weight store. They then run a program of three layers:

1. A two-pass convolution layer through the scratchpad, with stride shifts
   and ReLU.
2. A two-tile FC layer in systolic mode, with weights from the weight store.
3. A pooled convolution after switching one scratchpad bank off.

They read every result back and compare it with the reference. They also
check the write-driver legs for a cold +4σ corner. Each mechanism is
counted: scratchpad bypass and read-back, both modes, mode switches, ReLU
clipping, pooling, shifts, weight-store loads, bank gating and write boost.
A mechanism that never happens is a failure.

The MRAM arrays are written as plain arrays. At full size they need about
150 MB of simulator memory for the weight store and 12 MB for the buffer.
Synthesis keeps them as memory cells, which a real implementation replaces with MRAM macros.
