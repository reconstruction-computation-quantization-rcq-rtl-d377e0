# A layer-specific min-sum RCQ decoder for quasi-cyclic LDPC codes

In this LDPC decoder the messages that travel between variable nodes and
check nodes are only **3 bits** wide: a sign and a 2-bit magnitude *index*.
Such an index has no fixed numeric value. What LLR it stands for depends
on the decoding iteration `t` and on the layer `r` being processed.
Variable nodes still compute with 8-bit LLRs. Before a variable node uses
a message, it **reconstructs** it into an 8-bit LLR with a small table
`R*(t,r)`. It **computes** with 8-bit arithmetic. Before it sends a result,
it **quantizes** it back to 3 bits with a small set of thresholds `tau(t,r)`.
This is the reconstruction-computation-quantization (RCQ) scheme. The
thresholds and tables are designed offline for every (iteration, layer)
pair by density evolution, and are loaded into the decoder as data.

The check nodes never reconstruct anything. Every reconstruction table is
monotonic, so the smallest index is also the smallest LLR. Min-sum can
therefore work directly on the 3-bit indices.

The RTL is sized for a rate-0.865 (9472, 8192) quasi-cyclic code:

- 10 layers of 128 check rows each;
- 74 block columns of 128 variable nodes each;
- every variable node has degree 4;
- check nodes have degree 29 or 30;
- at most 10 iterations.

This is the msRCQ(3,8) configuration: 3-bit external messages and 8-bit
internal messages. It was reported to need more than 10 % fewer LUTs and
routed nets than a 5-bit offset min-sum decoder on an FPGA, with about the
same error rate. The RTL has parameters for other widths, such as (4,8),
(2,8) and (4,10). It also works with any QC base matrix up to the built
size, because the matrix is loaded at run time.

## 1. Message formats

| message | width | format |
|---|---|---|
| external (VN→CN, CN→VN) | `BE` = 3 | sign-magnitude: bit `BE-1` is the sign (1 = negative LLR, bit more likely 1), bits `BE-2:0` are the magnitude index `0..2^(BE-1)-1` |
| internal (posterior `l_v`, VN→CN before quantization) | `BV` = 8 | two's complement, always within ±(2^(BV-1)−1) = ±127 |
| channel input | `BV` = 8 | two's complement; −128 is clipped to −127 on load |
| reconstruction value `R*(i)` | `BV-1` = 7 | unsigned magnitude of index `i` |
| threshold `tau_j` | `BV-1` = 7 | unsigned magnitude |

Internal values are kept in a symmetric range so that a magnitude always
fits in `BV-1` bits and negating a value never overflows. All additions
saturate to ±127.

## 2. The RCQ pieces

**Reconstruction** (`rcq_recon`). This is a 2^(BE-1)-to-1 multiplexer. Its
data inputs are the broadcast magnitudes `R*(0..3)` and its select is the
magnitude index. The result is negated when the sign bit is set, so
`R([1 d]) = −R([0 d])`.

**Quantization** (`rcq_quant`, `rcq_therm2bin`). The magnitude `|h|` is
compared with the thresholds `tau_0 < tau_1 < tau_2`. The comparator for
`tau_j` outputs 1 when `|h| > tau_j`. The three comparator bits form a
thermometer code, and a thermometer-to-binary decoder turns it into the
index:

| thermometer (`tau_2 tau_1 tau_0`) | index |
|---|---|
| 000 | 0 |
| 001 | 1 |
| 011 | 2 |
| 111 | 3 |

So `|h| ≤ tau_0` gives 0, and `tau_(j−1) < |h| ≤ tau_j` gives `j`. The
decoder counts ones, so thresholds written out of order still give a
defined (if useless) result. The sign of `h` is passed through. Zero
counts as positive.

**Check node** (`rcq_cnu`). This is min-sum on indices. The unit receives
a row's messages one per clock. It keeps the smallest index `min1`, its
slot, the second smallest `min2`, and the XOR of all signs. The message
returned to slot `k` has sign `XOR ⊕ sign_k`. Its magnitude is `min2` if
`k` is the slot of `min1`, otherwise `min1`. When two inputs tie for the
minimum, every slot gets that value.

## 3. Layered decoding with layer-specific parameters

Layer `r` of iteration `t` updates each of its 128 check rows `c` and
every variable node `v` that `c` connects to:

```
v2c      = sat( l_v − R^(t−1,r)(u_old[c,v]) )   -- remove this row's old message
ext      = Q^(t,r)(v2c)                        -- 3 bits to the check node
u[c,v]   = min-sum over the other ext of row c -- 3 bits back
l_v      = sat( v2c + R^(t,r)(u[c,v]) )        -- new posterior
u_old[c,v] := u[c,v]
```

In the first iteration there is no old message, and nothing is
subtracted. The old message is reconstructed with the **previous**
iteration's table for the **same** layer, which is the table it was
added with. So the two operations cancel exactly unless saturation
intervened.

Why the tables differ per layer: in a layered schedule, a variable node
sees some check messages already updated in this iteration and some still
from the last one. Their mix differs from layer to layer, so the
distribution of the messages differs too. One table per iteration
(flooding-style RCQ) therefore gives some layers the wrong meaning for
their indices. This costs error rate and extra iterations. Storing one
set per (t, r) costs 10× more parameter memory: 100 sets of 3 thresholds
and 4 magnitudes, 4,900 bits in all.

The parameters live in one central memory (`rcq_param_mem`). At the start
of each layer the current `tau(t,r)`, `R*(t,r)` and `R*(t−1,r)` are
broadcast on shared wires to all 128 lanes. Each lane holds only
multiplexers and comparators: the "Broadcast" distribution method.

## 4. Datapath organisation

One lane per check row of a layer, so 128 lanes. A layer is processed one
circulant (one nonzero 128×128 block of the parity-check matrix) per
clock, in two passes:

```
 READ pass, slot k:   post[col_k] ──► rotate by shift_k ──► VNU read path ──► ext ──► CNU (min search)
                      c2v[r,k]    ──────────────────────────┘   └─► v2c buffer[k]
 WRITE pass, slot k:  v2c buffer[k] ──► VNU write path ◄── CNU output(k)
                                           └─► rotate back ──► post[col_k]
                      CNU output(k) ──► c2v[r,k]
```

- **Circulant rotation** (`qc_shifter`). A circulant with shift `i` joins
  check row `j` to variable `(j+i) mod 128` of its block column. The
  forward rotation gives lane `j` the value `in[(j+i) mod S]`. A second
  instance rotates the updated posteriors back. Both are 7-stage barrel
  shifters.
- **Posterior memory**: 74 words of 128×8 bits, one per block column.
- **Check-to-variable memory**: 10×30 words of 128×3 bits, one per
  (layer, slot). The 3-bit messages are stored as they are, uncompressed.
- **VN-to-CN buffer**: 30 words of 128×8 bits. It holds `v2c` between the
  two passes.
- **Base-matrix table** (`qc_base_table`): for every layer, its list of
  (block column, shift) pairs and its degree.

Each block column appears at most once per layer, so a layer never reads
and writes the same posterior word at once. The write pass of one layer
ends before the read pass of the next layer begins.

## 5. Schedule and timing

`rcq_layer_ctrl` sequences everything. All memories have one cycle of read
latency, so every access has an issue cycle and a data cycle. For a layer
of degree `d`:

| state | cycles | what happens |
|---|---|---|
| LOAD | 1 | broadcast parameters for (t, r), clear the check nodes |
| READ | d | issue slots 0..d−1 |
| RDRAIN | 1 | data of the last read |
| WRITE | d | issue slots 0..d−1 |
| WDRAIN | 1 | last write-back |

One iteration over the (9472, 8192) profile (296 circulants in 10 layers)
takes 2·296 + 3·10 = **622 cycles**.

**Stopping.** The hard decisions are the signs of the posteriors. After
each iteration a syndrome pass (`qc_syndrome`) rotates every block column
into check order and XORs the signs lane by lane. Each layer takes `d + 3`
cycles. The pass stops at the first layer with an unsatisfied check. If
all 10 layers are satisfied (326 cycles), decoding ends with
`success = 1`. Otherwise the next iteration starts. After iteration 10,
decoding ends either way. With `early_term_en = 0` the syndrome pass runs
only after the last iteration.

Examples:

- A frame that decodes in one iteration takes 622 + 326 = **948 cycles**
  from `start` to `done`.
- A frame that never decodes, with early stopping enabled, takes
  10·622 = 6220 cycles of layer processing, plus one syndrome pass per
  iteration. Each pass ends at its first failing layer, so it costs
  between about 32 and 326 cycles.

The FPGA implementation this design follows was reported at 500 MHz. No
timing closure has been attempted for this RTL.

## 6. Using the decoder

Top module: `ldpc_rcq_decoder`. Reset is asynchronous and active low.
Everything else is synchronous to `clk`.

1. **Load the code.** For each layer `r` and slot `k = 0..deg−1`, pulse
   `hp_we` with `hp_layer`, `hp_slot`, `hp_col` (block column),
   `hp_shift` (circulant shift) and `hp_last` = 1 on the layer's last
   slot. That write sets the layer's degree. Every layer needs at least
   one circulant.
2. **Load the RCQ parameters.** For every iteration `t < IT_MAX` and layer
   `r`, pulse `prm_we` with `prm_iter = t`, `prm_layer = r`,
   `prm_tau[j]` (3 thresholds, increasing) and `prm_rstar[i]`
   (4 magnitudes, increasing). To run a plain (not layer-specific) RCQ
   decoder, write the same set for all layers of an iteration.
3. **Load a frame.** For each block column `c`, pulse `llr_we` with
   `llr_col = c` and `llr_data[j]` = the 8-bit channel LLR of bit
   `128·c + j` (positive means 0 is more likely).
4. **Decode.** Pulse `start`. `busy` stays high until `done` pulses. Then
   `success` and `iters` (iterations run, 1..10) are valid until the next
   `start`.
5. **Read the result.** With `hd_re` and `hd_col = c`, `hd_data[j]` shows
   the decision for bit `128·c + j` one cycle later (1 = one).
   `post_data[j]` shows that bit's final 8-bit posterior LLR.

Steps 1 and 2 are needed only once for many frames. All loads and reads
are ignored while `busy`.

### Parameters

| parameter | default | meaning |
|---|---|---|
| `BE` | 3 | external message bits |
| `BV` | 8 | internal message bits |
| `S` | 128 | circulant size = lanes |
| `M` | 10 | maximum layers |
| `NCOL` | 74 | block columns |
| `DC_MAX` | 30 | maximum circulants per layer |
| `IT_MAX` | 10 | maximum iterations = parameter sets per layer |

The defaults match the reported (9472, 8192) decoder. The 3-bit
messages, the 8-bit internal width, the 10 layers, degree 30 and
10 iterations are the reported values. The 128 and 74 follow from the
code's size.

## 7. What is given, what is chosen

These parts follow the published design:

- the RCQ message path: reconstruct, subtract, quantize, min, reconstruct,
  add;
- the multiplexer reconstruction;
- the comparator and thermometer quantizer, with its mapping table;
- min-sum on external indices;
- layer- and iteration-specific parameters kept in a central memory and
  broadcast;
- the code dimensions and message widths.

These are this implementation's own choices, made where the publication
is silent:

- two's complement internal format with symmetric saturation;
- the sign of zero;
- the 128-lane, one-circulant-per-cycle, two-pass organisation, and
  therefore all cycle counts;
- uncompressed check-message storage;
- the barrel shifters and the circulant direction convention;
- the run-time loadable base-matrix table and the host load ports;
- nothing subtracted in iteration 1;
- tie handling in the minimum search;
- no check on the loaded parameters: the reported design requires thresholds
  and reconstruction magnitudes to be strictly positive and strictly
  increasing, and loading anything else is the host's responsibility;
- the syndrome-based stopping rule (the publication reports average
  iteration counts but does not describe how decoding stops).

Not contained here:

- The actual (9472, 8192) base matrix and the density-evolution
  parameter values. Neither is published, so both are loaded at run time.
- The offline parameter design (hierarchical dynamic quantization and
  layer-specific discrete density evolution).
- The channel front end.
- The FPGA-specific resource results.
- The "Lookup" and "Dribble" parameter-distribution alternatives, and the
  flooding-schedule and boxplus (bpRCQ) variants studied alongside.

Because the real parameter values are not available, the tests use
invented monotonic tables. With them the decoder corrects noisy frames in
1–4 iterations. But these tables are not designed for the code, so the
error-rate behaviour in simulation says nothing about the published curves.
One effect of poor tables shows up when a decoder keeps iterating after it
has converged: if the reconstruction magnitudes grow close to the
saturation limit, posteriors pinned at ±127 no longer cancel exactly on
subtraction, and the decoder can drift away from a valid codeword. The
stopping rule avoids this in normal use.

## 8. Verification

Each module has a self-checking testbench in `tb/` named `tb_<module>`.
Each one prints `TB_RESULT checks=N failures=M`.

- The arithmetic units (`rcq_recon`, `rcq_quant`, `rcq_therm2bin`,
  `rcq_vnu`, `rcq_cnu`) are compared exhaustively or randomly with
  integer models.
- The memories, the rotation, the table and the syndrome unit are
  compared with shadow models.
- `tb_rcq_layer_ctrl` checks the controller cycle by cycle against a
  schedule built inside the testbench.

`tb_ldpc_rcq_decoder` runs the whole decoder at its default size. It
builds a base matrix with the (9472, 8192) degree profile and random
shifts, and decodes 23 AWGN frames. Against a bit-exact reference model
it compares:

- every one of the 9472 final posterior LLRs and hard decisions, read
  through the read-out port;
- `success` and `iters`;
- the exact cycle count.

It also requires each of these to happen at least once: early stop, the
iteration limit, saturation, use of the second minimum, a syndrome pass
cut short after a passing layer, and input clipping.

`tb_rcq_widths` repeats this for msRCQ(4,8), msRCQ(2,8) and msRCQ(4,10).
The (4,10) run uses one parameter set for all layers. It uses
`tb_rcq_width_env`.

Each testbench runs in about a second. To run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/rcq_pkg.sv tb/tb_ldpc_rcq_decoder.sv --top-module tb_ldpc_rcq_decoder
./obj_dir/Vtb_ldpc_rcq_decoder
```

Replace the testbench name to run another. All RTL is synthesizable
SystemVerilog-2017. The only non-synthesizable constructs are two
concurrent assertions in the top module, which state the
no-conflict rule of section 4.

## 9. Files

| file | contents |
|---|---|
| `rtl/rcq_pkg.sv` | default sizes, phase type, saturation function |
| `rtl/rcq_recon.sv` | reconstruction multiplexer R(.) |
| `rtl/rcq_quant.sv`, `rtl/rcq_therm2bin.sv` | quantizer Q(.) and its thermometer decoder |
| `rtl/rcq_vnu.sv` | one variable-node lane (read and write paths) |
| `rtl/rcq_cnu.sv` | one min-sum check-node lane |
| `rtl/rcq_param_mem.sv` | threshold / reconstruction RAMs with broadcast registers |
| `rtl/qc_base_table.sv` | base-matrix circulant table |
| `rtl/qc_shifter.sv` | circulant rotation |
| `rtl/rcq_ram.sv` | message RAM (posterior, c2v, v2c buffer) |
| `rtl/qc_syndrome.sv` | per-layer parity check |
| `rtl/rcq_layer_ctrl.sv` | iteration / layer / circulant sequencer |
| `rtl/ldpc_rcq_decoder.sv` | top level |
