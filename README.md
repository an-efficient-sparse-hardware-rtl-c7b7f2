# A sparse accelerator for the spike-driven transformer

Spiking transformers are very sparse. After a leaky integrate-and-fire (LIF)
layer, usually well over half of the neuron outputs are zero. Inside
self-attention the figure reaches about 93 % for the attention mask and about
98 % for its output. A datapath that reads every binary spike spends most of its
cycles on zeros.

This design never stores a zero. A neuron that fires does not emit a `1`.
Instead it emits the **position of its token** (an 8-bit address). That address
is appended to a per-channel list kept in a small memory. Every later operation
then works on these lists of *encoded spikes*:

* **Linear layer.** Spikes are binary, so `y[p][j] = Σ_c s[c][p]·W[c][j]` is a sum
  of weights. Each weight is added to the accumulator at every token address in
  channel `c`'s list. There are no multiplications, and tokens that did not fire
  cost nothing.
* **Spike maxpooling.** The OR of a window is 1 when any spike falls in it. Each
  spike address sets every output window that covers it, all in one cycle.
* **Spike-driven self-attention (SDSA).** Here `Q ⊙ K` of two binary maps is the
  intersection of two sorted address lists. A merge-style comparator finds it by
  walking both lists. The size of the intersection is the token-wise sum. That
  sum is thresholded into a mask bit, and the mask bit either keeps or clears the
  whole `V` channel.

With this representation, attention becomes address comparison and the linear
layer becomes accumulation.

## Data format

| quantity | width | note |
|---|---|---|
| weights, activations, membrane values | 10 bit, signed | `sdt_pkg::DATA_W` |
| encoded spike (token address) | 8 bit | `sdt_pkg::POS_W`; at most 256 tokens per list |
| bank count | `$clog2(depth)+1` bit | number of valid entries in a bank |

## The neuron: spike encoding unit (`seu`) and array (`sea`)

Each neuron computes three things:

```
Mem[t]  = Spa[t] + Temp[t-1]
S[t]    = (Mem[t] - Vth >= 0)
Temp[t] = S[t] ? Vreset : (Mem[t] >>> shift)
```

* The decay factor γ is a power of two, `2^-shift`, so it needs only an
  arithmetic shift.
* `Vth`, `Vreset` and `shift` are run-time registers.
* The sum is computed one bit wider, and `Temp` is saturated back to 10 bits.
* The unit is combinational. When it fires, it outputs the current token
  address, not a 1.

`sea` holds N such units, one per channel, plus a temporal buffer with one row
of N temporal values per token.

* **Input.** Each cycle with `in_valid`, the array takes one token: the spatial
  inputs of all channels and the token address.
* **Temporal state.** The array reads that token's previous temporal row
  (zero when `first_ts` is set) and writes back the new one.
* **Output.** One cycle later it presents the fire vector `out_fire[N]`
  together with `out_pos`.

A timestep is therefore one pass over the tokens. The temporal buffer carries
neuron state from one timestep to the next.

## Encoded spike memory (`ess`)

Each channel has its own bank: a list of token addresses plus a fill count.

* **Append.** When the SEA outputs a fire vector, `out_pos` is appended to every
  bank whose channel fired. All banks append in the same cycle.
* **Order.** Tokens arrive in increasing order, so every list is sorted. This is
  what lets the attention comparator do a merge walk.
* **Read ports.** There are two data read ports (A, B) and a count-only port
  (C), all asynchronous.
* **Mask write.** This port overwrites a bank's count. Writing 0 clears a
  channel without touching its data.

Two instances exist:

* **ESS0** belongs to the patch-splitting core, with N0 banks.
* **ESS1** belongs to the encoder core, with 3·D banks:
  * banks `0..D-1` hold Qs;
  * banks `D..2D-1` hold Ks;
  * banks `2D..3D-1` hold Vs.

## Spike mask-add module (`smam`, `smam_fire`, `smam_mask`)

The module processes one channel `c` per `start`. It reads the Qs list of bank
`c` on one port and the Ks list of bank `D+c` on the other.

**Compare.** Each cycle it compares the two current addresses:

* **Equal:** this is a Hadamard hit (`h_valid`, `h_pos`). The hit count goes
  up and both pointers advance.
* **Not equal:** the pointer at the smaller address advances. The larger
  address stays where it is, to be compared against the next entry of the
  other list.
* The walk stops as soon as either list is exhausted.

A channel therefore takes at most `|Q|+|K|` compare cycles, plus 3 cycles to
finish, whatever the token count.

**Fire (`smam_fire`).**

* An accumulator counts the hits.
* At the end of the channel, the count is loaded into an output register:
  this is the token-wise sum.
* A comparator against the attention threshold `vth_attn` (`>=`) gives the
  mask bit `s`.

**Mask (`smam_mask`).**

* A multiplexer chooses between the Vs bank's count (`s=1`) and 0 (`s=0`).
* The chosen value goes into an enabled register.
* That register is written back as the count of bank `2D+c`.

The design therefore applies the attention mask by shortening a list, not by
rewriting data. The top also counts how many channels kept their Vs (status
register `NMASK`).

Worked example:

* Inputs: Qs = {2, 8, 9} and Ks = {0, 2, 7, 8}.
* The walk compares (2,0), (2,2)✓, (8,7), (8,8)✓, then (9, end).
* The hits are at 2 and 8, so the sum is 2.
* With `vth_attn ≤ 2`, the Vs channel is kept.

## Spike linear unit and array (`slu`, `sla`)

An SLU owns one output channel `j` and a linear buffer with one accumulator per
token. The host streams input channels one after another. For each spike
`(c, p)`:

1. In the first cycle, the unit reads `lbuf[p]` (registered read) and
   registers `p` and the weight `W[c][j]`.
2. In the second cycle, it adds the weight, saturates the sum to 10 bits
   (`sat_evt` marks a clipped value) and writes the result to `lbuf[p]`.

**Forwarding.** Two spikes can reach the same token on consecutive cycles. This
happens when one channel's last spike and the next channel's first spike share a
token. In that case the value being written is forwarded into the adder, so that
no update is lost. At the top level, the controller also leaves one idle cycle
between channels.

**Array.** `sla` places NU units side by side. All units see the same spike
stream. Each unit receives its own weight from the weight-buffer row of input
channel `c`. One pass therefore computes NU output channels for all tokens.

**Read-out.** `rd_en` with a token address returns that token's NU results one
cycle later.

Worked example (a 2×2 map, that is, 4 tokens):

* The spikes are X0 = {0,1,3}, X1 = {1,2}, X2 = {1,3}.
* Streaming them gives, for example, `Y[1][j] = W[0][j]+W[1][j]+W[2][j]` and
  `Y[2][j] = W[1][j]`.

## Maxpooling array (`maxpool_array`, `smu`, `maxpool_unit`)

**Spike maxpooling unit (`smu`).** It takes one encoded spike per cycle and
splits the address into row `r` and column `c`. In the same cycle it sets every
pooled output `(i, j)` whose window covers that spike:

```
i*S <= r < i*S+K   and   j*S <= c < j*S+K
```

With a 2×2 window and stride 1, a spike at position 1 of the first row sets both
M0 and M1.

**Conventional unit (`maxpool_unit`).** It handles regular multi-bit inputs. It
takes `(position, value)` pairs and keeps a running maximum for every window
that covers the position.

**Mode.** `regular` selects which of the two units receives the stream.

## The two cores and the top (`sdt_accel`)

```
             +--------- tile engine (external: convolutions) ---------+
input buffer |  te_spa rows         te_mp stream        pool_* results |
 (host) -----+--> adder0 --> SEA0 --> ESS0 --> maxpool array ----------+
                  ^ResBuffer0

input buffer --> SEA1 --> ESS1 (Qs | Ks | Vs) --> SMAM (masks Vs in place)
                                       |
                                       +--> SLA (weights: weight buffer)
                                             --> adder1 --> output buffer --> host
                                                 ^ResBuffer1
```

The host drives the top through a memory-mapped bus (`bus_interface`):

* `addr[31:28]` selects a region (CSR, IBUF, WBUF, RB0, RB1, OBUF);
* `addr[27:16]` selects a row;
* `addr[15:0]` selects a lane.

The host writes buffer elements and configuration registers, then writes the
command register. `start` follows that write by one cycle. `busy` stays high
until `done`, and the STATUS register reads `{done_sticky, busy}`. Each command
runs one operation of one timestep:

| command | what the controller does |
|---|---|
| `ENC0` | clears ESS0; each tile-engine row (`te_spa_valid`) plus the optional ResBuffer0 residual is encoded by SEA0. With `res_wr` the row is also stored in ResBuffer0 |
| `POOL` | spike mode: for each channel, clears the SMU, streams the channel's ESS0 list, then presents the pooled map on `pool_*`. Regular mode: pools the tile engine's `te_mp_*` stream until `te_mp_last` |
| `ENC1` | clears ESS1; encodes input-buffer rows `0..ntok-1` (3·D lanes each) with SEA1 |
| `SDSA` | runs the SMAM for channels `0..nch-1` |
| `LIN` | clears the SLA; streams the Vs lists of channels `0..nch-1` with weight-buffer row `ch` |
| `OUT` | reads the SLA for every token, adds the ResBuffer1 row when `res_en` is set, and writes the output buffer |

A full encoder-block attention step for one timestep is therefore the sequence
`ENC1`, `SDSA`, `LIN` and `OUT`, followed by host reads of the output buffer.
The host sequences timesteps. It sets `first_ts` for t=0, and it moves data
between layers.

### Cycle counts

Approximate, counted from the controller's state machine (each operation ends with a 4-cycle drain):

| operation | cycles |
|---|---|
| `ENC1` | `ntok` + 4 |
| `SDSA` | Σ over channels of (compares + 4) |
| `LIN` | Σ over channels of (spikes + 1) |
| `OUT` | `ntok` + 4 |

The linear layer's time grows with the number of spikes, not with the number of
tokens. At 60 % sparsity this is about 0.4·`ntok` cycles per channel.

## Parameters

Defaults of `sdt_accel`:

| parameter | default | meaning | origin |
|---|---|---|---|
| `D` | 512 | channels per Q/K/V group; SEA1 has 3·D = 1536 neurons | 1536 parallel neurons is the paper's figure; splitting it as 3×512 is this design's reading |
| `L1` | 64 | tokens in the encoder core | chosen (8×8 patches of a 32×32 image) |
| `N0` | 512 | SPS channels encoded in parallel | chosen |
| `H0`, `W0` | 16, 16 | SPS feature map | chosen (256 = all 8-bit addresses) |
| `PK`, `PS` | 2, 1 | pooling window and stride | the paper's worked example |
| `NU` | 16 | spike linear units | chosen |
| `IBD` | 256 | input buffer rows | chosen |

The 10-bit data and 8-bit spike widths follow the paper.

## Where this RTL departs from the source design

* **Tile engine.** The convolution engine of the patch-splitting core is not
  part of this RTL. Its input (`te_ib_*`), its output rows (`te_spa*`), its
  regular pooling stream (`te_mp_*`) and the pooled results (`pool_*`) are
  ports.
* **Batch normalisation.** There is none, and the convolution weight path is
  not built. The weight buffer feeds only the SLA.
* **Chaining between layers.**
  * In the source design, the SPS output and the linear layers' outputs feed
    SEA1 on chip.
  * Here SEA1 reads its 3·D pre-activations from the input buffer, which the
    host fills.
  * Adder1 with ResBuffer1 sits on the SLA's output path.
* **Parallelism.**
  * The SLA is parallel over output channels only (NU units). The source
    suggests input-channel parallelism as a further option; it is not built.
  * The source's 307.2 GSOP/s at 200 MHz works out to 1536 operations per cycle.
    This RTL reaches 1536 only in the SEA. The linear path does 16 accumulations
    per cycle, and the SMAM does one comparison per cycle.
* **Pooling units.** There is one SMU and one conventional unit. Channels are
  pooled one after another. The window is the 2×2/stride-1 example, without
  padding.
* **Map size.** Maps larger than 256 positions (for example a 32×32 input) must
  be tiled, because an encoded spike has 8 bits.
* **Firing threshold.** The neuron equation fires at `Mem ≥ Vth`, while the
  prose and the block diagram say "exceeds". This RTL uses `≥` in both the SEU
  and the SMAM. Setting `Vth` one higher gives the strict form.
* **Decay.** γ is restricted to powers of two.
* **Attention mask neuron.** The mask bit comes from a plain comparison of the
  token-wise sum with `vth_attn` in the current timestep. A full LIF neuron
  would also carry a membrane value from one timestep to the next; this one
  does not.

## Verification

Every block has a self-checking testbench, `tb/tb_<block>.sv`. Each compares
against an independent model written in the testbench and ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_seu` | edge cases at exactly `Vth` |
| `tb_smam`, `tb_sla`, `tb_smu` | the worked examples above, plus random lists |
| `tb_slu` | back-to-back same-token spikes, to exercise forwarding |
| `tb_sea` | four timesteps against a reference LIF model |

End-to-end tests:

* **`tb_sdt_accel`** runs the top at a small size: 8 SPS channels, a 6×6 map,
  D=4, 16 tokens and 3 linear units. It drives only the bus and tile-engine
  ports, and takes the design through ENC0 (with residual store and add), spike
  and regular pooling, ENC1 over two timesteps, SDSA, LIN and OUT. It checks
  pooled maps, ESS contents, attention masks and output-buffer values against a
  model. It counts these events and fails if any of them never happens:
  * temporal carry across timesteps;
  * residual adds;
  * SMAM keep and clear decisions;
  * saturation;
  * pooling in both modes;
  * stalls while the host waits for `busy`.
* **`tb_sdt_accel_full`** runs the same sequence with every parameter at its
  default. Building it takes a few minutes, and the simulation runs about 3 µs of design time (roughly 100 s of wall time).

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Itb --top-module tb_sdt_accel \
    rtl/sdt_pkg.sv $(ls rtl/*.sv | grep -v sdt_pkg) tb/tb_sdt_accel.sv && ./obj_dir/Vtb_sdt_accel
```

For a single block, list `rtl/sdt_pkg.sv` first and then the block's file and
its submodules.
