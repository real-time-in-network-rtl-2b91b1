# In-network inference with fixed-point arithmetic and Taylor-series activations

This is SystemVerilog RTL for a packet pipeline that runs small machine-learning
models inside a network interface. A sender puts the input features of a model
into a short header behind the usual Ethernet / IP / UDP-or-TCP headers. The
pipeline looks up the model's weights in tables that the control plane writes,
evaluates the model in fixed-point arithmetic, writes the results back into the
same packet and sends the packet on. The data plane has no floating point and no
transcendental functions. Numbers are fixed point with a scale of `2^s`. The
sigmoid is a truncated Taylor polynomial whose coefficients also sit in the
tables. Models can therefore be retrained and reloaded without rebuilding the
hardware.

The design follows a published architecture for P4-programmable FPGA SmartNICs.
That publication gives the header layout, the fixed-point encoding, the Taylor
approximations and their constants, the activation functions and the split
between data plane and control-plane tables. It does not give the hardware that
implements them: the packet handling, the parser, the multiply-accumulate
engine, the table organisation and the result format. Those parts are this
implementation's own. Each such choice is listed below, under
[Where this RTL departs from or extends the published design](#where-this-rtl-departs-from-or-extends-the-published-design).

## 1. Packet format

The NN encapsulation header directly follows the UDP or TCP header:

| Field       | Bits | Meaning                                   |
|-------------|------|-------------------------------------------|
| Model ID    | 16   | selects the model in the control-plane table |
| Feature Cnt | 8    | number N of input features                |
| Output Cnt  | 8    | number M of outputs wanted                |
| Scale       | 16   | fractional bits `s` of all values         |
| Flags       | 8    | bit 7 set on egress: "features replaced by results" |
| Feature 1..N| 32 each | signed fixed-point inputs              |

All fields are big-endian. A frame counts as an NN frame when all of these hold:

* the EtherType is IPv4 or IPv6;
* the IP protocol is UDP or TCP;
* the L4 destination port equals `NN_PORT` (default `0x4E4E`);
* the frame is long enough to hold every feature the header announces.

IPv4 options and TCP options are skipped correctly. VLAN tags and IPv6
extension headers are not supported, and such frames pass through untouched.

**Egress format.** Result `j` is written over feature slot `j`, for `j < M`.
Feature slots from `M` upward keep their input values. The frame length does not
change, so the IP lengths and the IPv4 header checksum stay valid. Only the flags
byte and the L4 checksum have to be updated (section 5). A frame with `M = 0` or
`M > N` passes through unchanged and is counted as malformed.

## 2. Fixed-point arithmetic

A real value `w` is stored as `w_q = round(w * 2^s) + b`. Here `s` is the scale
from the header and `b` is the model's encoding offset. Features and weights use
the same number of fractional bits. Each output is then

```
acc_j = sum_i (w_ji - b) * x_i          (exact, 80-bit, 2s fractional bits)
z_j   = sat32( (acc_j >>> s) + (bias_j - b) )
y_j   = act(z_j)
```

The raw products are summed at full width and shifted back once, so nothing is
lost before the final truncation. A right shift floors (it rounds towards minus
infinity). `z` saturates to the signed 32-bit range. The datapath limits `s` to
30.

## 3. Activations, and why the sigmoid is a polynomial

Each model selects one activation in its table entry:

| `act`         | Output |
|---------------|--------|
| `ACT_NONE`    | `z` (regression output) |
| `ACT_RELU`    | `max(0, z)` |
| `ACT_LEAKY`   | `z > 0 ? z : (alpha*z) >>> s`. This is Leaky ReLU; Parametric ReLU is the same unit with a trained `alpha` |
| `ACT_SIGMOID` | `c0 + c1 z + c3 z^3 + c5 z^5`, truncated after order 1, 3 or 5 |

The sigmoid series around 0 is `1/2 + x/4 - x^3/48 + x^5/1440`. At `s = 16`,
which is also the reset value of every table entry, the coefficients are:

| Term      | Float      | Fixed (`s = 16`) |
|-----------|-----------:|------:|
| `c0`      | 0.5        | 32768 |
| `c1`      | 0.25       | 16384 |
| `c3`      | -0.0208333 | -1365 |
| `c5`      | 0.0006944  | 45    |

`fx_taylor_sigmoid` forms the powers one after another:
`z2 = z*z >>> s`, `z3 = z2*z >>> s`, `z5 = z3*z2 >>> s`. Each power saturates
at 48 bits. Each term is `c*z^k >>> s`. A truncated series diverges once `|z|`
grows past about 2, so the sum is clamped to the sigmoid's range `[0, 2^s]`.
That clamp is a safety net of this implementation. It does not make the
approximation good for large inputs. With order 5 the output stays within 0.002
of the true sigmoid for `|z| <= 1`, and the testbench checks this. For other
scales, load rescaled coefficients. For example, at `s = 12` they are 2048,
1024, -85 and 3.

## 4. Control-plane tables

`nn_ctrl_tables` holds `N_SLOTS` models (default 8). The data plane finds a
model by exact match on the Model ID, and the lowest matching slot wins. Each
slot has:

* **model entry**: valid bit, Model ID, activation, Taylor order, `alpha`,
  offset `b`, and `c0 c1 c3 c5`;
* **biases**: `MAX_OUT` words;
* **weights**: `MAX_OUT x ceil(MAX_FEAT/LANES)` words of `LANES x 32` bits, so
  that the engine can read the `LANES` weights of one output in one cycle.

The tables are written through a plain single-cycle write port
(`cp_we`, `cp_addr`, `cp_wdata`). In a system a host bridge (PCIe register
access) drives that port; the bridge is not part of this RTL. Address map:

| `cp_addr[31:28]` | `[27:16]` | `[15:8]` | `[7:0]`        | `cp_wdata` |
|------------------|-----------|----------|----------------|------------|
| 0 model          | slot      | —        | field (below)  | field value |
| 1 bias           | slot      | —        | output         | bias, fixed point with offset |
| 2 weight         | slot      | output   | feature        | weight, fixed point with offset |

The model fields are:

* 0: `{valid[16], model_id[15:0]}`;
* 1: `{order[10:8], act[1:0]}`;
* 2: `alpha`;
* 3: offset `b`;
* 4 to 7: `c0`, `c1`, `c3`, `c5`.

Writes outside the configured sizes are ignored. To load a model safely, write
its weights, biases and fields first, and write field 0 with the valid bit last.
Table writes are not locked against a packet that is being computed with the
same slot.

## 5. Pipeline, timing and the checksum patch

`nn_inference_top` handles one packet at a time:

```
 s_axis ──► nn_pkt_buffer ──► nn_hdr_parser ──► model lookup (nn_ctrl_tables)
                 ▲   │                                   │
                 │   └──────► nn_mac_engine ◄── weights, biases, coefficients
                 │                 │ results over the feature slots
                 └── nn_hdr_rewrite (flags, L4 checksum)
 m_axis ◄── nn_pkt_buffer
```

The control states are:

1. **RX**: beats of 512 bits (64 bytes) are stored, one per cycle.
2. **DECODE**: the header is parsed and the model is looked up in one cycle.
   Frames that are not NN frames, name an unknown model or have bad counts go
   straight to TX. Oversize frames are dropped.
3. **COMPUTE**: `nn_mac_engine` issues one table read per cycle (output `j`,
   feature group `g`). Stage 1 multiplies and accumulates `LANES` products.
   Stage 2 applies the activation into a result buffer. The results cannot go
   into the packet yet, because they would overwrite features that later
   outputs still need. A write-back pass then stores one 32-bit result per
   cycle over the feature slots.
4. **FLAGS**, then **CSUM**: the two header patches.
5. **TX**: the frame is streamed out. `s_axis_tready` stays low until it has
   left.

Latency from the last ingress beat to the first egress beat:

```
M * ceil(N / LANES) + M + 12 cycles
```

For example, 16 features and 4 outputs take 24 cycles, which is 96 ns at
250 MHz. The full-size 255 x 255 layer takes 8427 cycles, about 34 µs.

**Checksum patch.** UDP and TCP checksums cover the payload, so replacing
features breaks them. Re-summing the whole segment would need a second pass
over the packet. Instead, the engine keeps the one's-complement sums of the
32-bit words it replaces (`sum_old`) and of the words it writes (`sum_new`).
`nn_hdr_rewrite` then applies the incremental update of RFC 1624:

```
HC' = ~( ~HC  +'  ~m  +'  m' )
```

Here `m` and `m'` are the old and new sums, and `+'` is one's-complement
addition. The 7-byte NN header puts the features at an odd byte offset from the
start of the L4 header, so each feature straddles two checksum words. Because
one's-complement sums commute with byte swapping, a byte-swapped sum handles
this; the `feat_odd` and `flags_odd` inputs select the swap. The flags byte is
folded in the same way. An IPv4/UDP checksum of zero means "no checksum" and is
left at zero. A computed UDP checksum of zero is sent as `0xFFFF`.

## 6. Files

| File | Content |
|------|---------|
| `rtl/nn_pkg.sv` | header struct, activation enum, Taylor constants, address map, one's-complement helpers |
| `rtl/nn_inference_top.sv` | top level and control state machine |
| `rtl/nn_pkt_buffer.sv` | single-packet store, AXI4-Stream in and out, byte write port |
| `rtl/nn_hdr_parser.sv` | Ethernet / IPv4 / IPv6 / UDP / TCP / NN header decode |
| `rtl/nn_ctrl_tables.sv` | model table, weight and bias memories |
| `rtl/nn_mac_engine.sv` | multiply-accumulate sequencer and result write-back |
| `rtl/nn_activation.sv` | identity / ReLU / leaky ReLU / sigmoid select |
| `rtl/fx_taylor_sigmoid.sv` | Taylor-series sigmoid |
| `rtl/nn_hdr_rewrite.sv` | result flag and incremental L4 checksum |
| `tb/tb_pkt_pkg.sv` | frame builder and reference checksum for the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the end-to-end one |

Top-level parameters, with defaults:

| Parameter   | Default  | Meaning |
|-------------|----------|---------|
| `PKT_BYTES` | 2048     | buffer size |
| `N_SLOTS`   | 8        | number of models |
| `MAX_FEAT`  | 255      | most features; set by the 8-bit count field |
| `MAX_OUT`   | 255      | most outputs; set by the 8-bit count field |
| `LANES`     | 8        | multipliers |
| `NN_PORT`   | `0x4E4E` | L4 port that marks NN frames |

At the defaults the weight memory is 8 x 255 x 32 words of 256 bits, about
16.7 Mbit. On an FPGA it maps to block RAM with per-lane write enables.

## 7. Simulation

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself with
a watchdog. Run them with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl +libext+.sv \
    rtl/nn_pkg.sv tb/tb_pkt_pkg.sv tb/tb_nn_inference_top.sv \
    --top-module tb_nn_inference_top -o sim && ./obj_dir/sim
```

`-Wno-fatal` is needed because the top's checks of the header counts against
`MAX_FEAT` and `MAX_OUT` are always false at the default sizes, where the 8-bit
counts cannot exceed 255. Verilator warns about this; the checks matter only
when the tables are built smaller. Adding `+verilator+rand+reset+2` to the
simulation command starts every register at a random value before reset,
which the testbenches tolerate.

To run a module's own test, replace the last file and the top with that
testbench, such as `tb_nn_mac_engine`.

`tb_nn_inference_top` runs the top at its default parameters. It loads seven
models:

* a full 255-feature x 255-output layer;
* sigmoid models of orders 1, 3 and 5;
* a ReLU model;
* a leaky-ReLU model;
* a linear model with an encoding offset.

It sends 44 frames: IPv4 and IPv6, UDP and TCP, with options, and with a zero
UDP checksum. It uses random gaps on ingress and random back-pressure on
egress. Each egress frame is compared byte for byte with an independent 64-bit
integer model, its checksum is recomputed from scratch, and the latency formula
above is checked. The frames include one unknown model, one non-NN frame, one
malformed header and one oversize frame, and the test counts each mechanism to
prove that all of them occurred. The block testbenches use small sizes and check
the arithmetic, the lookups, the stream handling and the checksum patch in
isolation.

## Where this RTL departs from or extends the published design

* **Packet handling is a single store-and-forward buffer.** The published design
  claims line rate on a 100 Gbps port. This pipeline handles one packet at a
  time and evaluates `LANES` products per cycle. A small regression packet needs
  about 20 cycles, which is roughly 15 Gbps at 250 MHz with 150-byte frames.
  Reaching line rate would need several engines or overlapping receive, compute
  and transmit. The latency is well inside the microsecond scale that the
  publication reports for small models.
* **Model shape.** The publication speaks of regression models and neural
  networks but gives no layer structure. One dense layer is built, with
  `Feature Cnt` inputs and `Output Cnt` outputs. Deeper networks would need
  layer descriptors in the tables and a loop over layers.
* **Result format.** The publication says only that the header is "replaced with
  an output format". Here the results overwrite the first features and flag bit
  7 is set. The recognition of NN frames by L4 port, the checksum patch and the
  drop of oversize frames are additions needed for a working data path.
* **Taylor orders.** Orders 1, 3 and 5 are built. The publication's accuracy
  study also covers degrees up to 10. For the sigmoid, even degrees add nothing,
  but degrees 7 to 10 would need `x^7` and `x^9` terms.
* **Piecewise-linear approximations** are mentioned without any segments, so
  none beyond ReLU and leaky ReLU are built.
* **Loss-function approximations** (MSE, binary and categorical cross-entropy as
  polynomials) belong to training and offline evaluation. Packets carry no
  labels, so they are not part of this data path.
* **Not included:** the 100 G Ethernet MAC/PHY and the PCIe host path, which
  are vendor shell IP, and the host software that compiles trained models into
  table entries. Their boundaries are the top's `s_axis`/`m_axis` streams and
  the `cp_*` write port.
* **Numerics chosen here:** truncating shifts, 80-bit accumulation, 32-bit
  saturation of `z`, 48-bit saturation of the Taylor powers, the clamp of the
  sigmoid to `[0, 1]`, and `s` limited to 30.
