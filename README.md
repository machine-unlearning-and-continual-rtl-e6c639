# RM-DLoRA: a resistive-memory layer with a digital low-rank adapter

A resistive-memory (RM) crossbar computes a matrix-vector product in one
analogue step, because the weights are stored as cell conductances. Changing
those weights is slow and imprecise, however. Each cell has to be pulsed and
read back repeatedly until its conductance lands close enough to the target.
Models deployed in the field still need updates, for example to forget one
person's face or voice (machine unlearning) or to learn a new one (continual
learning). Rewriting the whole array for every such update costs a great
deal of programming energy and time.

This design never rewrites the array after deployment. Each layer computes

    y = W0 * x  +  B * (A * x)

- `W0` (ROWS x COLS) is the pretrained weight matrix. It is programmed into the
  RM array once and then kept fixed.
- `A` (RANK x ROWS) and `B` (COLS x RANK) form a low-rank adapter (LoRA). They
  are held in ordinary SRAM and evaluated by small digital multiply-accumulate
  units.

Learning, unlearning and continual learning change only `A` and `B`.
- With RANK = 6, an adapter for a 128 x 128 layer has 6 x (128 + 128) = 1536
  weights.
- The array holds 16384.
- Updating an adapter is a plain SRAM write.

The SystemVerilog here implements one such layer at the published sizes:
- a 128 x 128 array;
- a 16-bit DAC input code and a 14-bit ADC output code;
- an adapter of rank 6, which is the face-recognition configuration.

It includes:
- the logic that programs the array cell by cell;
- the adapter storage and arithmetic;
- a controller that runs the whole layer from a simple host command port;
- a behavioural model of the analogue array itself.

## Block structure

```
                 host commands (cmd_t)            responses (rsp_t)
                        |                                ^
                 +------v--------------------------------+------+
                 |                rm_dlora_top                   |
                 |  x buffer     controller (FSM)     y buffer    |
                 +---+-------------+-------------+--------+------+
                     |             |             |        ^
   addr_shift_out <--+   write_verify_ctrl       |        |
        | serial address      | pulses / verify  |    lora_merge
        v                     v                  |     ^       ^
   +--------------------------------+            |     |       |
   | rm_crossbar (behavioural)      |-- ADC codes ------+       |
   |  shift-register selector       |            v             |
   |  128x128 conductance codes     |   lora_sram  ->  lora_pe_array
   |  DAC -> MVM -> TIA/ADC (model) |   (A, B slots)   (A*x, then B*h)
   +--------------------------------+
```

| File | Role |
|---|---|
| `rtl/rm_dlora_pkg.sv` | Sizes, the opcode enum, and the command and response structs |
| `rtl/rm_crossbar.sv` | Behavioural model of the array and its converters, at the level of digital codes |
| `rtl/addr_shift_out.sv` | Serialises a cell address into the array's shift-register selector |
| `rtl/write_verify_ctrl.sv` | Iterative write-and-verify programming of one cell |
| `rtl/lora_sram.sv` | Adapter storage: SLOTS copies of `A` and `B` |
| `rtl/lora_pe_array.sv` | Digital adapter arithmetic: `h = A x`, requantise, `B h` |
| `rtl/lora_merge.sv` | Adds the analogue and digital branches, with saturation |
| `rtl/rm_dlora_top.sv` | The layer: buffers, command controller, all of the above |

Every file opens with a comment giving its interface and timing in detail.

## The analogue array and what the model stands in for

The physical array uses one transistor and one resistive device per cell
(1T1R).
- Each conductance is set by SET pulses, which raise it, and RESET pulses,
  which lower it.
- In computation, input voltages drive the rows, and each column's current
  is the dot product of the inputs with that column's conductances.
- On the reference board, a 16-bit DAC makes the row voltages, and
  transimpedance amplifiers with a 14-bit ADC read the columns.
- Cells are selected through serial-in/parallel-out shift registers and
  analogue multiplexers.
- The fabricated 128 x 128 array is physically four 64 x 64 tiles. The model
  treats it as one array, because how the tiles share the converters is not
  described.

None of that is logic, so `rm_crossbar` is a behavioural model that lets the
digital system be simulated. It works at the level of digital codes:

- **Conductance code.**
  - 8 bits per cell at 0.5 µS per code, limited to 0 .. G_MAX = 240
    (120 µS).
  - After reset the model spends COLS cycles setting every cell to
    G_INIT = 20 (10 µS), and holds `ready` low meanwhile.
- **Product.**
  - `adc[j] = min(2^14 - 1, (sum_i G[i][j] * x[i]) >> ADC_SHIFT)`, with
    ADC_SHIFT = 16 standing for the amplifier gain and the ADC full scale.
  - Columns are converted one per clock (COLS cycles), as through a column
    multiplexer.
  - At the default sizes the largest possible column sum is
    128 x 240 x 65535 >> 16 = 30720 codes, so a heavily programmed column
    clips the ADC at 16383.
- **Programming.**
  - A pulse of amplitude `amp` (1..15) moves the addressed cell by
    `amp + n` codes, up for SET and down for RESET.
  - `n` is pseudo-random noise in -2..+2 from a 16-bit LFSR, and the result
    is clipped to 0..G_MAX.
  - The noise stands in for the device-to-device and cycle-to-cycle variation
    that makes programming stochastic: a single pulse rarely hits a target.
- **Verify.** A one-cycle request returns the addressed cell's code on the
  next cycle.
- **Addressing.**
  - A 16-bit word `{row, column}` is shifted in MSB first, one bit per cycle
    with `sr_clk_en`, and copied to `sel_addr` on `sr_latch`. This mirrors two
    cascaded 8-bit 74HC595-type registers.
  - `addr_shift_out` drives this chain in WORD_W + 2 = 18 clock edges.

The numbers in this list are this design's own. The device physics, the
actual current-to-code gain and the exact noise statistics are not modelled.
Replace this model by the real board interface to use the rest of the logic
with hardware.

## Programming the backbone: write and verify

`write_verify_ctrl` runs the loop:

1. verify the cell;
2. stop if the error is within tolerance;
3. otherwise apply one pulse and go back to step 1.

The rules:

- **Tolerance.** The default is 4 codes, which is 2 µS at this resolution.
  It can be changed at run time through CONFIG.
- **Polarity.** SET if the cell is below the target, RESET if it is above.
- **Amplitude.** `clamp(|error| / 2, 1, 15)`, so large errors close fast and
  small ones with gentle pulses.
- **Starting state.** A cell that is already in tolerance gets no pulse.
- **Giving up.** After MAX_ITER = 64 pulses the loop stops with `ok = 0`, for
  example for a target the device cannot reach.
- **Timing.** One iteration is 4 cycles, and `done` comes 3 + 4·pulses edges
  after the start edge.

The loop itself, the tolerance of 2 µS and the idea that a few tens of pulses
per cell are normal all follow the published measurements. The amplitude rule
is this design's own. In the full-size simulation, programming all 16384
cells to random targets between 4 and 200 took about 7.5 pulses per cell on
average.

## The adapter datapath

The adapter is computed in two phases by `lora_pe_array`. All RANK lanes work
in parallel.

1. **Down-projection.** For k = 0 .. ROWS-1, one SRAM row of `A` (RANK signed
   8-bit weights) and one input `x[k]` (unsigned 16-bit) are read per cycle.
   Each lane accumulates `h[r] += A[r][k] * x[k]` in a
   `8 + 16 + 1 + log2(ROWS)`-bit register, so the accumulation cannot
   overflow.
2. **Requantise.** `hq[r] = sat16(h[r] >>> H_SHIFT)`, with H_SHIFT = 8. This
   brings the intermediate vector back to 16 bits.
3. **Up-projection.** For d = 0 .. COLS-1, one row of `B` is read per cycle,
   and an adder tree forms `y[d] = sum_r B[d][r] * hq[r]` as a 32-bit value.
   One output streams out per cycle.

A pass takes ROWS + COLS + 3 cycles.

- **SRAM layout.** `lora_sram` keeps SLOTS = 2 independent adapters. Each
  adapter has ROWS words of `A` and COLS words of `B`, one word being RANK
  lanes of 8 bits.
- **Writes** are one lane at a time from the host, and reads return data one
  cycle later.
- **Slots.** Two slots let the host prepare or keep an adapter (for instance
  the pre-unlearning one) while another is active. Switching slots is one
  CONFIG command.

`lora_merge` forms

    y[d] = sat32( adc[d] * gain + (lora[d] >>> lora_shift) )

or only `adc[d] * gain` when the adapter is disabled. The signed 16-bit `gain`
and the 5-bit `lora_shift` are run-time settings. They align the scale of the
analogue codes with that of the digital branch, which depends on how the host
quantised `W0`, `A` and `B`. The merge reports saturation per element. At the
default widths it cannot actually saturate, because 16383 x 32767 plus the
largest adapter term stays below 2^31. The flag is kept for other widths.

## The controller and host protocol

`rm_dlora_top` takes one command at a time over a valid/ready port. It
returns exactly one response per command, with a one-cycle `rsp_valid`.
`cmd_ready` is low while a command is running and during the reset-time
initialisation of the array.

| Opcode | Fields | Response | Latency (edges) |
|---|---|---|---|
| `OP_X_WRITE` | `x[idx_a] <= data[15:0]` | – | 1 |
| `OP_LORA_WRITE` | `mat` 0 = A, 1 = B; `slot`; `idx_a` = k or d; `idx_b` = lane; `data[7:0]` | – | 1 |
| `OP_LORA_READ` | same addressing | weight, sign-extended | 2 |
| `OP_PROGRAM` | cell (`idx_a` row, `idx_b` column) to `data[7:0]` | `ok` = converged, `data` = pulses | 23 + 4·pulses |
| `OP_VERIFY` | cell (`idx_a`, `idx_b`) | conductance code | 21 |
| `OP_INFER` | – | `data` = cycles taken | 390 (259 without adapter) |
| `OP_Y_READ` | `y[idx_a]` | value; `ok` = 0 if it saturated | 1 |
| `OP_CONFIG` | `data[15:0]` gain, `[20:16]` LoRA shift, `[21]` LoRA enable, `[23:22]` slot, `[31:24]` tolerance | – | 1 |

**INFER.** The controller starts the analogue product and the adapter pass
together from the same `x` buffer. It waits for both, then streams the COLS
results through the merge unit into the output buffer. The general latency
is ROWS + 2·COLS + 6 edges with the adapter and 2·COLS + 3 without it, and
the count is returned in the response.

**PROGRAM and VERIFY.**
1. The cell address is shifted into the selector.
2. Then either the write-and-verify loop runs, or a single verify is made.

**Reset values.** gain 1, shift 0, adapter enabled, slot 0, tolerance 4.

**Monitor outputs.** `mon_pulse_valid`, `mon_pulse_set`, `mon_mvm_start`,
`mon_lora_busy` and `mon_sel_addr` expose the connection to the array, for
observation and test.

A typical life of a deployed layer:

1. **Deploy.** PROGRAM every cell of `W0`, optionally confirming each with
   VERIFY.
2. **Learn.** LORA_WRITE the adapter into slot 0, X_WRITE the input, INFER,
   and Y_READ the outputs.
3. **Unlearn or continually learn.** The host retrains `A` and `B`, for
   example by gradient ascent on the data to forget, by replacing its labels
   with random ones, or by replay of old data together with the new. It then
   rewrites the adapter, or writes a second slot and switches with CONFIG.
   The array is never touched again.

Training itself runs on the host. This RTL only stores and applies the
adapters.

## Where this design departs from, or adds to, the published system

**Follows the published system:**
- the analogue/digital split with frozen weights in RM and the adapter in
  SRAM with digital compute;
- the 128 x 128 array;
- the 16-bit input and 14-bit output converters;
- shift-register cell addressing;
- write-and-verify programming with a 2 µS halting tolerance;
- rank 6 for face recognition;
- the output formed as the sum of both branches.

**This design's own choices** (the published description does not give
them):
- the conductance code and its 0.5 µS step;
- the pulse model and the amplitude rule;
- the 8-bit adapter weights and the 16-bit requantisation with H_SHIFT;
- the run-time gain and shift alignment;
- column-serial conversion;
- the command set and all latencies;
- the two adapter slots.

**Differences from the reference setup:**
- There, precise programming is done by an external device analyser and the
  digital side runs on an FPGA with a host processor. Here, the
  write-and-verify loop is on-chip logic driving the model's pulse port.
- The reference runs whole networks. This RTL is one layer. A network is run
  layer by layer by the host, which reprograms nothing but loads each layer's
  inputs and reads its outputs.
- Models that span several arrays need several instances and a host schedule.
  The 768-wide layers of a DiT-B diffusion backbone, for example, would need
  36 arrays per projection. That is not provided.
- Spiking or recurrent models need the host to integrate over time windows.
- The published block diagram labels `A` the up-projection and `B` the
  down-projection. The defining equation (A is RANK x ROWS, B is COLS x RANK)
  makes `A x` the reducing step, and this design follows the equation.

## Simulating

All files are SystemVerilog-2017 and need no libraries.

Unit benches:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rm_dlora_pkg.sv \
          tb/tb_lora_pe_array.sv --top-module tb_lora_pe_array -y rtl
./obj_dir/Vtb_lora_pe_array
```

The other benches build the same way: replace the bench name. Each bench
prints `TB_RESULT checks=N failures=M`, and has a watchdog that fails it if
it hangs.

| Bench | What it checks |
|---|---|
| `tb_addr_shift_out` | bit order, shift count, latch timing of the selector chain |
| `tb_write_verify_ctrl` | convergence, pulse polarity, amplitude rule, give-up at MAX_ITER, cycle counts (bench models a noisy cell) |
| `tb_lora_sram` | independent slots, lane writes, read latency, host read port |
| `tb_lora_pe_array` | every output against a bench-side reference, requantisation clipping, ROWS + COLS + 3 timing |
| `tb_lora_merge` | gain, shift, bypass, saturation in both directions |
| `tb_rm_crossbar` | init sweep, pulse response and clipping, no disturbance of other cells, product and ADC clipping |
| `tb_rm_dlora_top` | the whole layer at 16 x 12, walking through deployment, learning, unlearning, slot switch, bypass and ADC clipping |
| `tb_rm_dlora_top_full` | the same sequence at the default 128 x 128 size with no parameter overrides (over a million clock cycles) |

`tb_rm_dlora_top` counts how often each mechanism occurs:
- SET and RESET pulses;
- multi-pulse cells;
- aborted programming;
- inference with and without the adapter;
- adapter rewrite;
- slot switch;
- ADC clipping.

A mechanism that never happens fails the bench. It also compares every
output with a reference computed from the conductances read back from the
array.

Two more benches run the two kinds of experiment the design is meant for.
Both use the top at its default sizes.

**`tb_face_unlearning_workload`** runs the face-recognition workflow.
- The three weight maps of a small MLP-Mixer classifier are deployed side by
  side in one array: 20 x 16, 32 x 16 and 6 x 20, outputs x inputs. That is
  952 cells at 10–80 µS.
- Each layer is run by driving only its own rows.
- A rank-6 adapter on the output layer is trained in by writing it (learning).
- Then one class is unlearned by rewriting only that class's row of `B`. The
  bench checks that this class's output changes and the other five stay
  bit-identical.
- A new class is learned into the second adapter slot, and switching back to
  slot 0 restores the unlearning result exactly.
- After deployment not one programming pulse reaches the array. The bench
  reports about 6300 pulses to deploy 952 cells, against 3078 SRAM words
  for all adapter updates.

**`tb_program_precision_workload`** programs a 32 x 32 'UL' / 'CL' letter map
(35, 55 and 90 µS) six times, each time with a different halting tolerance
from 1 µS to 10 µS. For each run it checks that every cell is within
tolerance, and it prints the mean number of write pulses per cell.

With the model's pulse response this falls from about 12 pulses per cell at
1 µS to about 8 at 10 µS. Real devices are reported to need roughly 50
pulses at 1 µS. The model is less stochastic than the devices, so treat its
pulse counts as relative only.

## Known limits

- The array model is digital and noiseless in computation. Read noise,
  conductance drift, IR drop and converter non-linearity are not modelled, so
  the simulated outputs are exact. Only the programming noise is present.
- There is a single layer and a single array. Tiling, multi-layer scheduling,
  activation functions and spike handling are left to the host.
- Adapter training (gradient ascent, label obfuscation, replay) is not in
  hardware.
- The merge saturation flag cannot fire at the default widths (see above). It
  is tested only in the merge unit's own bench.
