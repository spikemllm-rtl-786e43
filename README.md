# A multiplier-free spike-driven matrix accelerator for TC-LIF spiking MLLMs

Spiking versions of multimodal language models replace dense activations with
spike trains. Standard integer-to-spike unfolding needs `L-1` timesteps for `L`
quantization levels, which is expensive: 15 timesteps for 4-bit activations.
Temporally Compressed LIF (TC-LIF) neurons instead fire a *polar, temporally
weighted* spike train. A 4-bit activation is limited to the symmetric range
`[-7, 7]`: the code `-8` is dropped because the quantizer never reaches it.
The activation is then sent as one polarity (sign) and three binary spikes
whose timestep weights are 1, 2 and 4:

```
a = (-1)^pol * (b1*1 + b2*2 + b3*4),   b_t in {0,1}
```

A linear layer fed by such spikes needs no multiplier. For each timestep
("significance level") the weights whose spike bit is set are added or
subtracted, depending on the polarity. The level sums are then shifted by
their temporal weight and added. Different modalities may use different
numbers of timesteps: the main setting gives visual tokens `T_v = 3` and text
tokens `T_t = 4`.

This repository holds synthesizable SystemVerilog for an accelerator built on
that idea. The core is a 16x16 array of spike-driven dot-product units. Around
it sit banked on-chip SRAM, a bank-select crossbar and a tile controller. The
controller knows each tile's modality and runs it with that modality's
timestep count.

## The dot-product unit (`pe`)

One PE computes `X = sum_i s[i]*w[i]` over K = 32 pairs of a 4-bit spike value
and a 4-bit weight, both in two's complement. The work runs in five stages:

1. **Sign-magnitude conversion** (`smc`). Each spike value is split into a
   polarity bit and three magnitude bits. Magnitude bit `t-1` is the spike of
   level `t`.
2. **Gating.** For every level and lane, an AND with the level bit either
   passes `w[i]` or replaces it with zero. A zero spike bypasses the weight
   entirely; this is where the unit's event-driven sparsity comes from.
3. **Sign adjustment.** The polarity bit turns a passed term into `+w[i]` or
   `-w[i]`. The terms are 5 bits wide, so that `-(-8)` fits.
4. **One adder tree per level** (`adder_tree`). This is a balanced binary
   tree that sums the 32 signed terms into a 10-bit partial sum.
5. **Shift and add.** Level `t`'s partial sum is shifted left by `t-1`, and
   the three results are added into a 13-bit `X`.

The PE is purely combinational; the array registers its output. A spike value
of `-8` should never arrive. If it does, `smc` saturates it to `-7`.

## The array (`spiking_matmul_unit`) and its dataflow

The array has 16 rows of 16 PEs. In one cycle it receives 16 spike vectors
(one per row, broadcast along the row) and 16 weight vectors (one per column,
broadcast down the column). PE `(r, c)` forms the dot product of spike vector
`r` with weight vector `c`. So only 32 operand vectors (32 x 128 bits) feed
256 dot products, or 8192 multiply-accumulates, per cycle. At 333 MHz that is
256 x 32 x 2 x 333e6 = 5.45 tera-operations per second at peak.

The results stay in the array: the array is output stationary. Each PE owns a
32-bit partial-sum register. A tile is a sequence of *chunk-passes*. A
chunk-pass covers 32 more inputs, or a further magnitude plane of the same 32
inputs. Each chunk-pass adds `X << in_shift` to the partial sums:

* `in_first` restarts the sums.
* `in_last` marks the final chunk-pass. Two cycles after it is presented,
  `acc_done` rises, and `acc` then holds the finished 16x16 tile.

There are two pipeline stages: the PE output register and the partial-sum
register.

## More timesteps than the PE has levels

The PE resolves three levels, which is enough for `T <= 3`. Text tokens at
`T_t = 4` carry magnitudes up to 15, and this design handles them over more
than one pass:

* The host stores a text activation as *magnitude planes*. Plane `p` holds
  `sign * ((|a| >> 3p) & 7)`: a legal 4-bit spike value that carries
  magnitude bits `3p .. 3p+2`.
* For a tile whose modality has `T_m` timesteps, the controller runs
  `P = ceil(T_m / 3)` passes over every chunk. Pass `p` reads plane `p`,
  which sits `plane_stride` words after plane `p-1`. The pass re-reads the
  same weight word and is accumulated with shift `3p`.

This is exact. Since `a = plane0 + 8*plane1 (+ 64*plane2)`, the weighted sum
of the passes equals `a*w`. A tile with `T_m <= 3` runs in one pass and a
`T_t = 4` tile in two. The timestep counts are the run-time inputs
`cfg_t_vis` and `cfg_t_txt`, each from 1 to 7.

## Memory and bank selection

`memory_banks` holds 44 MiB in 48 single-port SRAM banks (`sram_sp`). Reads
take one cycle:

| group  | banks | word                             | depth  | size   |
|--------|-------|----------------------------------|--------|--------|
| input  | 32    | 128 bits = 32 lanes of 4 bits    | 65 536 | 32 MiB |
| output | 16    | 512 bits = 16 partial sums of 32 bits | 12 288 | 12 MiB |

Any input bank can hold spike planes or weights. All 48 banks can be accessed
in the same cycle, which is how the array gets its 32 operand vectors per
cycle.

`bank_select_unit` maps one tile's operands onto the banks:

* Spike channel `c`, the token in array row `c`, reads bank
  `(act_base + c) mod 32`.
* Weight channel `c`, the output feature in array column `c`, reads bank
  `(wgt_base + c) mod 32`.
* Every spike channel reads the same word address, and so does every weight
  channel. The two groups must not share a bank, so `wgt_base = act_base + 16`
  (mod 32). An assertion checks this.
* One cycle later the unit steers each bank's word to its channel and cuts it
  into lanes: lane `i` is bits `[4i+3:4i]`.
* At write-back it packs row `r` of the partial sums (column `c` at bits
  `[32c+31:32c]`) and writes it to output bank `(out_base + r) mod 16`.

The storage layout a tile expects, for chunk `k` (inputs `32k .. 32k+31`) and
plane `p`:

```
spike plane of token r : bank (act_base + r) % 32, word act_addr + k + p*plane_stride
weights of feature c   : bank (wgt_base + c) % 32, word wgt_addr + k
result row r           : bank (out_base + r) % 16, word out_addr
```

## Sequencing and timing (`control_unit`)

The controller takes one tile command at a time over a valid/ready handshake.
The command (`spk_pkg::tile_cmd_t`) holds:

* the modality;
* the bank bases;
* the start addresses;
* the plane stride;
* the number of chunks;
* the output bank base and address.

Once it has a command, the controller:

1. issues one chunk-pass per cycle with no bubbles: `n_chunks * P` cycles of
   bank reads, with the passes of a chunk back to back;
2. one cycle after each read, presents the matching `first/last/shift` to the
   array, in step with the SRAM data;
3. in the cycle `acc_done` rises, writes all 16 result rows at once;
4. pulses `done` in the next cycle.

Counting the cycle in which the command is taken as cycle 0, `done` is high in
cycle `n_chunks*P + 4`. `busy` covers the whole tile. While `busy` is high the
host port is refused (`host_in_ready` and `host_out_ready` are low); the
compute side owns every bank.

## Top level (`spikemllm_accel`)

The top wires the four components together:

* `control_unit` drives `bank_select_unit` and the array controls.
* `bank_select_unit` sits between `memory_banks` and `spiking_matmul_unit`, in
  both directions.

The off-chip side is a plain host port:

* Input-bank writes, one 128-bit word per cycle: `host_in_*`.
* Output-bank reads, one 512-bit row per request, with data one cycle later:
  `host_out_*`.

A typical use:

1. Load spike planes and weights.
2. Set `cfg_t_vis` and `cfg_t_txt`.
3. Issue a tile command and wait for `done`.
4. Read the 16 result rows.

All sizes are in `rtl/spk_pkg.sv`.

## Parameters and where they come from

| item | value | origin |
|------|-------|--------|
| magnitude levels per PE | 3 | published (the 3-bit temporal-magnitude PE) |
| spike and weight width | 4 bit | published PE figure |
| array | 16 x 16 PEs | published |
| on-chip memory | 44 MiB | published |
| clock (for the throughput figure) | 333 MHz | published |
| PE length K | 32 | derived: 5.46 TOPS / (256 PEs x 2 ops x 333 MHz) |
| timesteps after reset | T_v = 3, T_t = 4 | published main setting |
| partial-sum width | 32 bit | this design |
| bank count, widths, depths | 32 + 16 banks, see above | this design; only the 44 MiB total is published |
| bank mapping | rotation by base | this design |
| passes for T > 3 | magnitude planes, shift 3 per pass | this design |
| pipeline, command format, host port | see above | this design |

## Where this RTL departs from, or goes beyond, the published design

* The published description names the four blocks and the PE's insides. It
  does not give the bank organisation, the selection rule, the command format
  or the controller's sequencing. Those are this design's own, kept as simple
  as the described function allows.
* How the 3-level PE serves the 4-timestep text modality is not described.
  The magnitude-plane scheme above is one exact way to do it.
* The published design streams weights from off-chip HBM. Here that interface
  is only a host port with no DMA engine. Transfers do not overlap
  computation: the host is locked out while a tile runs.
* The TC-LIF quantizer, which turns membrane potentials into spike values with
  a floating-point scale, is not part of the accelerator. The host supplies
  integer spike values.
* The vision encoder's 6-bit weights do not fit the 4-bit weight lanes. Only
  4-bit weights (the language model's) run as built.
* SRAM macros are modelled as plain arrays with one-cycle reads and no reset.

## Fitting the evaluated models

One tile reduces over `n_chunks x 32` inputs. Each token's bank needs
`n_chunks x P` words out of 65 536. Input widths below come from the public
model configurations, not from the published design:

| reduction | chunks | words per bank |
|-----------|--------|----------------|
| 3584 (Qwen2-VL-7B, MiniCPM-V-2.6) | 112 | 224 at T_t = 4 |
| 4096 (InternVL2-8B, Qwen-VL-Chat) | 128 | 256 at T_t = 4 |
| 8192 (Qwen2-VL-72B) | 256 | 512 at T_t = 4 |
| 18 944 (Qwen2-VL-7B MLP down-projection) | 592 | 1184 at T_t = 4 |

The largest partial sum, `15 x 8 x 18944`, is about 2.3e6, far inside 32 bits.

The models' weights do not fit on chip. Qwen2-VL-7B at 4 bits is about
3.8 GB against 44 MiB, so whole models depend on the off-chip memory that the
host port stands in for. The published system has the same dependence.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. For example:

```
verilator --binary --timing --assert -y rtl +libext+.sv -Irtl \
    rtl/spk_pkg.sv tb/tb_spikemllm_accel.sv --top-module tb_spikemllm_accel
./obj_dir/Vtb_spikemllm_accel
```

Swap in the testbench's name for any other block (`tb_pe`,
`tb_spiking_matmul_unit`, `tb_control_unit`, and so on).
`tb_spikemllm_accel` runs the top at its full default size. It loads
operands, runs six tiles and compares every result against a reference
product. The tiles are:

* visual and text tiles;
* a switch to `T_v/T_t = 2/3`;
* sparse and all-zero spike rows;
* rotated bank bases;
* one reduction over 3584 inputs.

It also checks the `n_chunks*P + 4` latency, and that each of those mechanisms
occurred. Building the full-size top takes about one and a half minutes; the
run takes seconds.
