# ADIC in SystemVerilog: an ensemble of self-training ELM anomaly detectors

ADIC is a small accelerator for unsupervised anomaly detection on sensor features, such as
the vibration statistics of a machine bearing. It holds seven independent one-class
classifiers, the *base learners* (BLs). Each BL learns online what "healthy" data look like, and
flags a sample whose reconstruction error exceeds a threshold. The seven BLs vote.

The main idea is to save energy through approximation. Most samples are healthy and easy to
classify, so the chip first asks a single BL. It only brings in more BLs, two at a time, when
that answer says "anomaly". The logic that does this is called ADEPOS here, and runs in
hardware. A second approximation is the reduced bit widths used in inference. A third is a
cheaper learning rule, OPIUM-Lite, which never touches the largest memory.

This RTL covers the digital core at its full size: 7 BLs, up to 16 input features, 32 hidden
neurons, 16 outputs, and a 16-bit bus. Power domains, clock-gate cells, pads and the host
system are physical or off-chip parts. The core drives them through plain enable signals.

## 1. One base learner: an extreme learning machine auto-encoder

A BL is a two-layer network.

* Hidden layer: `h_j = ReLU(sum_i W_ji x_i + b_j)` for `j = 1..L`.
* Output layer: `x~_k = sum_j beta_jk h_j` for `k = 1..m`.

The input weights `W` and biases `b` are random and never trained. They are not stored, either.
A 16-bit LFSR (`prbs`) seeded per BL regenerates them in the same order on every pass. The
order is `b_1, W_11..W_1d, b_2, W_21..`. Different seeds make the seven BLs different
classifiers.

Only `beta` (L x m) is learned.

Two modes are supported:

* **Reconstruction (auto-encoder).** `m = d` and the target is the input itself.
* **Boundary.** `m = 1` and the target is the constant 1.0.

The BL's score is the squared error `err = sum_k ((t_k - x~_k)^2 >> 12)`. Its decision is
`err > threshold`. Because the score is squared, the threshold must be squared too (Q4.12, see
below). A threshold of the form mean + c·sd is computed on the host from healthy training data,
then written to the chip.

### Arithmetic

All values are 16-bit two's complement Q4.12: 4 integer bits and 12 fraction bits, so 1.0 is
`0x1000`. Products are summed in 32-bit accumulators.

A neuron's 16-bit output is a window of its accumulator, chosen by `acc_sel`. The window is
`ACC[27-2s : 12-2s]`. With `s = 0` it is `ACC[27:12]`, which is Q4.12 again. Larger `s` moves
the window down in steps of 2 bits, which trades range for resolution. An out-of-range sum
saturates rather than wraps.

| Inference control | Codes | Effect |
|---|---|---|
| `dp_prec` | 16, 12, 8 bits | clears the low bits of the datapath operands (x, h, beta) |
| `wb_prec` | 16, 8, 6, 4, 2 bits | keeps only the top bits of each PRBS word |

Training always uses the full 16 bits. With `wb_prec` an inference therefore sees a coarser copy
of the same random weights it was trained with.

### Schedule and latency

Each layer has one multiplier-accumulator that is time-multiplexed over its neurons, with one
product per clock. An inference takes

    2 + L(d+1) + 1 + L·m + 2 + m + 1   cycles

That is 1078 cycles for d = 16, L = 32, m = 16, counting the cycle that accepts the command. The
parts are: the seed load, the hidden layer (bias plus d products per neuron), the output layer
through a 2-stage memory/multiplier pipeline, and one cycle per output for the error.

## 2. The online learning engine (`online_learning`)

This is the most involved block. It keeps two memories per BL:

* `theta`, an L x L inverse-correlation estimate;
* `beta`.

After every forward pass in training, it performs one step of the OPIUM recursive
least-squares update, using the hidden vector `h` and the error `e = t - x~`:

    p     = theta · h                    (L² cycles, theta read row by row)
    s     = h · p                         (L cycles)
    eta   = p / (1 + s)                   (L divisions, 34 cycles each)
    theta = theta - eta · pᵀ              (read-modify-write, 2 L² cycles)
    beta  = beta + eta · eᵀ               (read-modify-write, 2 L·m cycles)

The phases are run in that order with one shared 16x16 multiplier. A full update costs
`L² + 1 + L + 34 L + 2 L² + 2 L m + 2` cycles, which is 5219 at L = 32, m = 16. A training
command is this plus the forward pass. `theta` starts at `theta0 · I`, where `theta0` is
programmable with reset value 1.0. `beta` starts at zero.

Three points need care:

* **Width of the learning sums.** `p` and `s` are sums of up to 32 products of full-range
  values. They overflow 32 bits easily once the hidden activations grow. In tests, 32-bit sums
  let training diverge. These sums are therefore kept in 48 bits. Only the final 16-bit results
  are saturated.
* **The division.** `eta_j = (p_j << 12) / (1 + s)` uses a sequential restoring divider, one per
  BL, that truncates toward zero. The denominator is clamped to `[1, 2^31-1]`. An ill-conditioned
  `theta` then slows learning instead of producing garbage.
* **OPIUM-Lite.** `theta` is frozen at `theta0 · I`. Then `p = theta0 · h` needs no memory, and
  the theta phases are skipped, which leaves `2L + 34L + 2Lm + 2 = 2178` cycles. The theta
  memory is never enabled in this mode. Its activity is brought out as `theta_mem_on`, so that
  memory can be clock-gated or powered off.

## 3. The ensemble and ADEPOS (`adepos_ctrl`, `majority_voter`)

Init and training commands start all seven BLs together, because every BL must be trained. An
inference command runs only the first N BLs. The others have their clock enable (`bl_clk_en`)
low and hold their state. When the active BLs are done, `majority_voter` counts the anomaly
decisions T. It calls an anomaly if `T >= (N+1)/2`, evaluated as `2T >= N+1`.

In ADEPOS mode N starts at 1, and after each vote the controller acts as follows:

| Vote | N | Action |
|---|---|---|
| healthy | any | N := max(1, N-2); the sample is done, reported as healthy |
| anomaly | N < 7 | N := N+2; the same sample is run again, without a new command |
| anomaly | N = 7 | confirmed; the sticky `anomaly` output is set |

The `anomaly` output stays set until a clear command. Clearing also returns N to 1.

A healthy stream therefore costs about one BL per sample. A fault costs 1+3+5+7 = 16 BL passes
for its first sample, and 7 for each later one.

`ROUNDS` (register 0x09) reports how many passes the last sample took and the N of its final
pass.

A fixed mode (`MODE.adaptive = 0`) always runs `n_fixed` BLs. It is used for the full-ensemble
comparison.

## 4. Host interface (`adic_regs`)

The slave follows the openMSP430 peripheral bus:

* `per_en` for one cycle;
* `per_we[1:0]` as byte write enables, where zero means read;
* a 14-bit word address, `per_addr`;
* 16-bit `per_din` and `per_dout`.

Reads are combinational.

| Addr | Name | Contents |
|---|---|---|
| 0x00 | CMD (W) | bit0 init, bit1 train, bit2 infer, bit3 clear |
| 0x01 | STATUS | bit0 busy, bit1 result valid, bit2 anomaly, bit3 last vote, [6:4] N for the next sample, [14:8] BL decisions |
| 0x02–0x04 | D, L, M | network size (1..16, 1..32, 1..16) |
| 0x05 | MODE | bit0 boundary, bit1 OPIUM-Lite, bit2 ADEPOS, [6:4] fixed N |
| 0x06 | PREC | [1:0] accumulator window, [3:2] datapath width (0: 16, 1: 12, 2: 8 bits), [6:4] PRBS width (0: 16, 1: 2, 2: 4, 3: 6, 4: 8 bits) |
| 0x07 | THETA0 | initial/frozen theta diagonal, Q4.12 |
| 0x08 | BL_SEL | BL shown at 0x40–0x52 |
| 0x09 | ROUNDS (R) | [3:0] passes on the last sample, [6:4] N of its last pass, [10:8] anomaly votes T |
| 0x10–0x1F | X | input sample |
| 0x20–0x26 | SEED | PRBS seed per BL |
| 0x30–0x3D | TH | threshold per BL, low word then high word |
| 0x40–0x4F | XHAT (R) | reconstruction of the selected BL |
| 0x50–0x51 | ERR (R) | squared error of the selected BL |
| 0x52 | DEC (R) | bit0 decision of the selected BL |

The selected BL's outputs pass through a register (`bl_output_mux`). That register loads only
while the ensemble is idle, so read-out is stable during a run.

A typical sequence of operations:

1. Write the sizes, mode, seeds and thresholds.
2. Send CMD = init. This takes 1026 cycles.
3. For each healthy training sample, write X, send CMD = train, and poll STATUS.busy.
4. Then, for each sample, write X and send CMD = infer. When busy falls, read STATUS.

## 5. Files

Each file starts with a comment on its interface and timing. `adic_pkg` holds the shared
constants, the configuration struct and the fixed-point helpers.

| Module | Role |
|---|---|
| `prbs` | LFSR weight generator |
| `tdm_hidden_neuron`, `tdm_output_neuron` | the two multiplier-accumulators |
| `sp_sram` | single-port memory, written as an array |
| `seq_divider` | divider used by the learning engine |
| `online_learning` | OPIUM / OPIUM-Lite engine with the theta and beta memories |
| `base_learner` | one BL |
| `majority_voter`, `adepos_ctrl` | ensemble control |
| `bl_output_mux` | read-out multiplexer and buffer |
| `adic_regs` | bus registers |
| `adic_top` | the chip |

Every module has a self-checking testbench, `tb/tb_<module>.sv`, except the divider, which is
tested through the learning engine. `tb/adic_ref_pkg.sv` is an
independent integer model of a BL and of the ADEPOS rule, used by the larger benches.

`tb_adic_top` runs the whole chip at its default size over the bus. It covers:

* init;
* OPIUM and Lite training on a synthetic healthy cluster;
* adaptive and fixed inference on healthy and shifted samples;
* every ADEPOS transition;
* boundary mode;
* reduced precision;
* clock gating of idle BLs;
* the idle theta memory in Lite mode.

It counts how often each of these happened, and compares every BL error, decision and vote with
the model.

`tb_bearing_workload` runs the chip on a workload shaped like bearing monitoring. The data are
generated as five vibration features, each a 7-bit integer. The bench trains with OPIUM and
then with OPIUM-Lite on the healthy start of a run. It then sets each BL's threshold to the
mean plus four standard deviations of its error on more healthy data, and streams the rest
through ADEPOS while the features drift towards failure.

On the healthy part it checks that one BL per sample suffices. During the drift it checks that
the anomaly is confirmed, which happens about 7 samples after the drift begins. Every vote and
every ensemble size is also compared with the model.

To simulate with Verilator 5, for example:

    verilator --binary -Wno-fatal -Irtl -Itb rtl/adic_pkg.sv tb/adic_ref_pkg.sv \
        -y rtl -y tb tb/tb_adic_top.sv --top-module tb_adic_top && ./obj_dir/Vtb_adic_top

Each bench ends by printing `TB_RESULT checks=<n> failures=<n>`.

## 6. What is this design's own choice

The chip description gives the block structure, the equations, the sizes (7 BLs, d ≤ 16,
L ≤ 32, 16-bit words, 32-bit accumulators), the precision options, the ADEPOS rule and the bus
widths. The following are filled in here and may differ from the silicon:

* ReLU as the hidden activation, and Q4.12 as the number format.
* The accumulator window mapping `ACC[27-2s:12-2s]`, and saturation instead of wrap-around.
* The LFSR polynomial `x^16+x^14+x^13+x^11+1`, the 16 LFSR steps per word, and the word order.
* A 16-bit PRBS inference setting. The chip's PRBS precision control is described as 2 to 8
  bits, while the weights themselves are 16-bit.
* One multiplier-accumulator per layer. The text can be read as a single neuron shared by both
  layers, but the block diagram shows two.
* The 48-bit learning sums, the sequential divider and the denominator clamp.
* `theta = theta0 · I` at init for full OPIUM as well as for Lite.
* The squared-error score in fixed point.
* ADEPOS sequenced on chip: the same sample is re-run on all N BLs when N grows, and the
  anomaly flag is sticky.
* The whole register map, all reset values, the command/done handshake and all latencies.
  The chip quotes about 1000 cycles per BL decision; this design takes 1078.

Memory: theta and beta take `7 × (32·32 + 32·16) × 16` bits, which is 21 KB. The chip reports
22 KB on-chip memory in total.

Not covered: per-BL supply domains and isolation cells, voltage/frequency scaling,
clock-gate cells (modelled as clock enables), pads, and the host-side feature extraction and
threshold estimation.
