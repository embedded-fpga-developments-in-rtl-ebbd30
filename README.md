# Reconfigurable readout core: an embedded FPGA with a pileup classifier (28 nm)

Detectors at colliders make far more data than can be shipped off the detector.
Much of it comes from low-momentum "pileup" particles. A readout chip that can
discard those tracks at the source saves cables, power and trigger bandwidth.
Fixed-function ML ASICs can do this, but they cannot be changed once made. An
embedded FPGA (eFPGA) is a small block of FPGA fabric placed inside an ASIC.
It gives the chip logic that can be reprogrammed after fabrication: new
weights, and also a whole new algorithm.

This repository holds SystemVerilog for the digital core of such a chip. It
follows the 28 nm eFPGA test ASIC described in "Embedded FPGA Developments in
130nm and 28nm CMOS for Machine Learning in Particle Detector Readout"
(Gonski et al., arXiv:2404.17701). The fabric was generated with the
open-source FABulous framework. The RTL here reproduces the chip's block
structure, its register and streaming interfaces, the fabric's primitives, and
the three designs the authors loaded into the fabric. One of those designs is
a depth-5 boosted decision tree (BDT) that scores pixel-sensor tracks. The
authors' source code is not public. Everything below is a reconstruction, and
each departure from the paper is named.

## 1. The chip at a glance

```
  SUGOI serial link          +-----------+  AXI-Lite  +-------------------+  bitstream
  (register access,  ------> | AXI-Lite  |----------->| eFPGA config /    |----------+
   not in this RTL)   AXI-L  | crossbar  |            | status            |  2x32 in |
                             |           |            |                   |<---------+ 4x32 out
                             |           |  AXI-Lite  +-------------------+          |
                             |           |----------->| version registers |          v
                             +-----------+            +-------------------+   +--------------+
                                                                              |  eFPGA       |--> 16-bit
  PGPv4 serial link  --- 64-bit AXI stream in -----------------------------> |  fabric      |    digital
  (streaming, not    <-- 64-bit AXI stream out ----------------------------- |  (model)     |    output
   in this RTL)                                                               +--------------+
```

`efpga_asic28_top` is the digital core. It has two paths into the fabric:

* **Slow control.** An external FPGA reads and writes registers over the SUGOI
  serial link. SUGOI is a packet protocol on 8b/10b-coded serial lines, and it
  is an AXI-Lite master on chip. A crossbar serves two endpoints. One loads
  the fabric's bitstream and exchanges 32-bit words with the running fabric.
  The other reports the chip's identity.
* **Data.** A PGPv4 link (64b/66b serial) carries a 64-bit AXI stream into the
  fabric and another one out of it.

The SUGOI and PGPv4 link layers are not described in enough detail to
rebuild. The top therefore exposes their on-chip sides as ports: `sugoi_req`
and `sugoi_rsp` (AXI-Lite), and `pgp_ib`/`pgp_ob` with their `tready`s. A
testbench, or a real link core, plugs in there.

All logic runs on one clock with a synchronous, active-high reset. The chip
was placed and routed for 200 MHz (5 ns), and the link was tested from 10 to
250 MHz.

## 2. The fabric and what this RTL makes of it

The real fabric is a grid of FABulous tiles. Its layout (from the tile
configuration table) is:

| rows | column A | B-E | F | G-I | J |
|---|---|---|---|---|---|
| top | NULL | N_term_single | N_term_DSP | N_term_single | NULL |
| 8 rows | WEST_IO | LUT4AB | DSP_top / DSP_bot alternating | LUT4AB | EAST_IO |
| bottom | NULL | S_term_single | S_term_DSP | S_term_single | NULL |

This gives 7 x 8 = 56 LUT4AB tiles. The chip has 448 logic cells, so each tile
holds 8 cells, each a 4-input LUT and a flip-flop. The four DSP_top/DSP_bot
pairs give four DSP slices. Each slice is an 8x8 multiplier with a 20-bit
accumulator. The WEST_IO and EAST_IO tiles were designed for this chip to
connect the fabric to the rest of the ASIC. The 16-bit digital output is taken
from WEST_IO.

FABulous generates the switch matrices, the routing between tiles and the
bitstream format. None of them is published with the chip, so a
bit-compatible programmable fabric cannot be written. `efpga_fabric` is
therefore a **behavioural model** with the real fabric's ports and behaviour:

* The primitives are real RTL. `lut4ab_cell` is the LUT4 plus flip-flop cell.
  `dsp_slice` is the 8x8 MAC with a 20-bit accumulator.
* The model has a configuration memory of `CFG_WORDS` (64) 32-bit words. A
  load is *start*, then N words, then *done*. The fabric's user logic is held
  in reset from *start* until *done*. While it is not configured, every output
  is 0 and `ib_tready` is low. Words beyond 64 are dropped.
* Word 0, bits 7:0, selects which user design the fabric runs. Each of these
  designs is real RTL, instantiated inside the model:

| code | design | what it does on the fabric's pins |
|---|---|---|
| 0x01 | 16-bit counter (`counter16`) | count on `dout` and on from-fabric bus 0 |
| 0x02 | stream loopback (`axis_loopback`) | inbound stream to outbound, one register stage, back-pressure |
| 0x03 | pileup BDT (`bdt_pileup`) | tracks in on the inbound stream, scores out on the outbound one |
| 0x04 | DSP test | the four DSP slices driven from the two to-fabric buses |

The counter is the one design in which configuration bits really set the
logic. It is built from 31 `lut4ab_cell`s, and their LUT contents come from
words 1 to 31 of the bitstream. A wrong word gives a counter that does not
count, which is what the original chip test relied on. The DSP test design is
this model's own addition: it makes the DSP slices reachable from the
registers. The chip tests in the paper did not load any DSP design.

## 3. Register access

### Crossbar (`axil_crossbar`)

There is one master and two slaves. A slave is selected when
`(addr & 32'hFFFF_0000) == BASE`:

| window | endpoint |
|---|---|
| `0x0000_0000 - 0x0000_FFFF` | eFPGA config/status |
| `0x0001_0000 - 0x0001_FFFF` | version registers |
| anything else | answered by the crossbar: DECERR, read data 0 |

Reads and writes are handled independently, with one transaction in flight on
each. A write waits until AW and W are both valid and accepts them in the same
cycle. It then forwards them to the endpoint and relays the B response. The
crossbar adds two cycles to the endpoint's own latency. Assertions check that
the master holds AW and AR stable until they are accepted.

### eFPGA config/status (`efpga_cfg_status`)

Offsets are relative to the endpoint's base address:

| offset | access | meaning |
|---|---|---|
| 0x000 | W | BITSTREAM: each write sends one word to the fabric |
| 0x004 | W | CTRL: bit 0 = start a load, bit 1 = finish it (the fabric starts running) |
| 0x008 | R | STATUS: bit 0 configured, bits 31:16 words sent since the last start |
| 0x010, 0x014 | RW | to-fabric buses 0 and 1 (byte strobes honoured) |
| 0x020 ... 0x02C | R | from-fabric buses 0 to 3 |

Other offsets, writes to read-only registers and reads of write-only ones
return SLVERR. The number of buses is set by parameters. The 28 nm chip has 2
buses in and 4 out. Its 130 nm predecessor had 3 out
(`N_FROM_FABRIC = 3`).

### Version registers (`version_regs`)

Offsets 0x00 to 0x10 hold the 160-bit git hash of the source at tape-out,
least-significant word first. Offset 0x14 holds the revision. Both are set by
parameters (`GIT_HASH`, `REVISION`). The defaults are placeholders, because
the chip's real values are not published. The endpoint is read-only.

Both endpoints use `axil_slave_port` for the AXI-Lite handshake. The port
accepts AW and W in either order. It issues a one-cycle register strobe, and
it returns B or R one cycle after the strobe.

## 4. The pileup classifier

### What it computes

The sensor is a 21 x 13 array of pixels, 50 x 12.5 um each. A track is reduced
to 14 numbers. x[0..12] are the charges collected in each of the 13 pixel rows,
summed over time (the "y-profile"). x[13] is y0, the position of the sensor
relative to the interaction point. The y-profile is what carries momentum
information: a stiff, high-momentum track crosses fewer pixels in y than a
curling low-momentum one.

The classifier is one regression tree of a gradient-boosted model. It has
depth 5, 9 decision nodes and 10 leaves:

```
n0  x[3]  <= -0.2     ? n1    : n3
n1  x[13] <= 6.811    ? 0.851 : n2
n2  x[8]  <= 2.3      ? -0.156: 0.452
n3  x[2]  <= -399.25  ? 0.454 : n4
n4  x[13] <= 5.88     ? n5    : n7
n5  x[4]  <= 3.7      ? 0.806 : n6
n6  x[10] <= -0.05    ? 0.319 : -0.006
n7  x[8]  <= -545.65  ? 0.266 : n8
n8  x[6]  <= -515.55  ? 0.191 : -0.169
```

### Number format

All values are `ap_fixed<28,19>`: 28-bit two's complement with 9 fraction
bits, so one LSB is 1/512. Every threshold and leaf is stored as
`floor(value * 512)`, which is how `ap_fixed` truncates by default. For
example, -0.2 becomes -103 and 0.4922 becomes 252. For an integer input f,
`f/512 <= t` holds exactly when `f <= floor(512 t)`. The fixed-point tree
therefore makes the same decisions as the printed decimal tree, for every
input.

### Output and threshold

`score` is the leaf value. `above` is set when `score > THRESH`. `THRESH`
defaults to 252 (0.4922), one of the two operating points reported for the
quantised model. The other is 0.4953, which is `THRESH = 253`. The source is
inconsistent about which side of the threshold counts as pileup. The hardware
therefore reports only the comparison, and the system decides what to do with
it. The boosting learning rate and initial prediction are not published, so
the score is the raw leaf value, not a probability.

No leaf value lies between 252 and 253. On raw leaves the two operating
points therefore classify every track the same way. The different efficiencies
quoted for them mean the deployed output was a transformed score, which would
need the unpublished boosting constants to reproduce.

### Pipeline

Stage 1 registers the nine comparisons. Stage 2 walks the tree and registers
the leaf. `out_valid` follows `in_valid` by exactly 2 cycles, and a new track
can enter every cycle. That is 10 ns at 200 MHz; the published decision
function ran in under 25 ns.

### Inside the fabric

A track arrives as 7 beats of 64 bits. Beat j carries x[2j] in bits 27:0 and
x[2j+1] in bits 59:32; the upper bits of each half are ignored. After the
seventh beat the model scores the track. It sends one result beat with the
score sign-extended in bits 31:0, `above` in bit 32, `tkeep = 8'h1F` and
`tlast = 1`. Until that beat has been taken, the inbound stream is held off
(`ib_tready` low). The result appears 3 cycles after the seventh beat is
accepted. From-fabric buses 0, 1 and 2 read back the last score, the number of
tracks scored and the number above threshold. `dout` shows the number of
tracks scored. This stream packing is this design's choice; the paper does
not say how tracks were fed to the fabric.

## 5. The other two user designs

**Counter.** Bit k is held by a registered cell with LUT `16'h6666`, which
computes `q[k] ^ c[k]`. The carry `c[k+1] = q[k] & c[k]` is made by a
combinational cell with LUT `16'h8888`. The bitstream is:

```
word 0      : 0x00000001            (counter)
words 1..16 : 0x00016666            (sum cells, bit 16 = use the flip-flop)
words 17..31: 0x00008888            (carry cells, combinational)
```

The count rises by one per clock and wraps at 2^16.

**Loopback.** A single 64-bit register stage, with `tkeep` and `tlast`
carried along. The stage accepts a beat when it is empty or is being emptied
in the same cycle. It therefore passes one beat per cycle with one cycle of
latency, and it stalls the sender when the receiver holds off. The chip was
tested by looping pseudo-random frames from the host and checking them for
bit errors. The top-level testbench does the same thing.

## 6. Files

| file | role |
|---|---|
| `rtl/efpga_pkg.sv` | shared types (AXI-Lite request/response structs, 64-bit stream beat), register offsets, personality codes, fixed-point format |
| `rtl/efpga_asic28_top.sv` | digital core, section 1 |
| `rtl/axil_crossbar.sv`, `rtl/axil_slave_port.sv` | AXI-Lite crossbar and endpoint handshake |
| `rtl/efpga_cfg_status.sv`, `rtl/version_regs.sv` | the two endpoints |
| `rtl/efpga_fabric.sv` | fabric model (behavioural), section 2 |
| `rtl/lut4ab_cell.sv`, `rtl/dsp_slice.sv` | fabric primitives |
| `rtl/counter16.sv`, `rtl/axis_loopback.sv`, `rtl/bdt_pileup.sv` | user designs |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_paper_workloads.sv` | the chip's bitstream tests at full length (section 7) |

## 7. Simulating

Each testbench checks itself and prints `TB_RESULT checks=N failures=M`. Each
has a watchdog. Run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
    rtl/efpga_pkg.sv tb/tb_efpga_asic28_top.sv --top-module tb_efpga_asic28_top
./obj_dir/Vtb_efpga_asic28_top
```

Replace the testbench name to run another. `tb_efpga_asic28_top` runs the
whole core at its default parameters and takes a few seconds. It performs
these steps through the AXI-Lite port:

1. Reads the version registers.
2. Provokes DECERR and SLVERR.
3. Loads the counter bitstream and follows `dout` for 100 cycles.
4. Reloads with the loopback and sends 32 PRBS-31 frames of 16 beats under
   random back-pressure, counting bit errors.
5. Reloads with the classifier and scores 500 random tracks against a
   reference tree computed in real arithmetic.
6. Reloads with the DSP test and checks a signed multiply-accumulate on all
   four slices.

It counts every load, error response, stall and design switch, and fails if
one never happened.

`tb_paper_workloads` repeats the chip's three bitstream tests at full length
on the default core. It follows the counter on `dout` through a whole wrap. It
loops 2,000 PRBS frames and scores 550,000 random tracks, the size of the
pixel data set the chip was tested with. It also measures the classifier's
stream latency: 4 clock periods from the last feature beat being presented to
the result beat, which is 20 ns at 200 MHz. It runs in about ten seconds.

`tb_bdt_pileup` puts thousands of tracks through the tree. Their features
cluster around every threshold, including exactly on it. The testbench checks
that all ten leaves are reached and that the latency is 2 cycles.

The testbenches are written for a two-state simulator. Everything that is read
is reset or initialised.

## 8. How far to trust it

Follows the paper:

* the block structure and bus widths (2 x 32 in, 4 x 32 out, 64-bit streams,
  16-bit output);
* the tile inventory and the function of the primitives;
* the counter and the loopback;
* the decision tree: features, thresholds, leaf values, number format and
  operating thresholds.

This design's own choices, none of them from the chip:

* all register maps and address windows;
* the bitstream word layout;
* the reset;
* the classifier's stream packing;
* the DSP test design;
* the LUT-cell mapping of the counter.

Open points in the tree:

* The tree drawing does not label its branches. The "true" branch is taken to
  be the left one, the usual convention of the tool that drew it.
* The thresholds are printed with 3-4 significant digits. If the trained
  model's thresholds have more digits, a track lying between the printed and
  the true threshold can fall on the other side.
* Which of the 14 inputs is y0 is inferred from the order in which the
  features are described.

Not here:

* the SUGOI and PGPv4 link cores;
* the I/O pads;
* the FABulous switch matrices and real bitstream format;
* the 130 nm sibling's RegFile (32 x 4 dual-port LUT RAM), W_IO
  general-purpose I/O and CPU_IO tiles. That chip otherwise matches this core
  with `N_FROM_FABRIC = 3` and no streaming path.

## 9. Changing it

* **Another tree.** Edit `NODE_F`, `NODE_T` and the leaf constants in
  `bdt_pileup`, following the `floor(value * 512)` rule. Then edit the
  reference function in the testbenches to match.
* **Another threshold.** Set `THRESH`, or `BDT_THRESH` on the fabric.
* **More buses.** Change `N_TO_FABRIC` and `N_FROM_FABRIC` in
  `efpga_asic28_top`. The register map grows in steps of 4 bytes from 0x010
  and 0x020. With more than four to-fabric buses the two banks would overlap,
  so move `CS_FROM_FAB` in the package.
* **A larger configuration memory.** Change `CFG_WORDS` in the package.
* **A new user design.** Add a personality code to `personality_e`,
  instantiate the design in `efpga_fabric`, and add a branch to its output
  select.
