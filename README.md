# An FPGA fabric for asynchronous logic of any style

Commercial FPGAs assume a clock. Asynchronous (self-timed) circuits have
none: stages talk through request/acknowledge handshakes, and hold state in
Muller C-elements and latches built from hazard-free feedback loops. The
styles differ widely. Quasi-delay-insensitive (QDI) logic uses 1-of-N data
codes such as dual-rail and detects completion. Micropipelines use ordinary
bundled data plus a delay matched to the logic. An FPGA tuned to one style
serves the others poorly.

This fabric avoids committing to a style. It has three ingredients:

* **A multi-output LUT.** Each logic element (LE) has a 7-input LUT whose two
  6-input halves are also outputs. One LE can therefore produce the two rails
  of a dual-rail bit, or one function of seven inputs.
* **A validity LUT.** A 2-input LUT sits behind the multi-output LUT and
  turns a rail pair into a "data valid" signal for the handshake.
* **Feedback and delay inside the block.** Every LUT output can loop back
  through the block's local crossbar, which builds C-elements and latches.
  A programmable delay element supplies the timing assumption that
  bundled-data logic needs.

The array itself is a plain island-style FPGA: logic blocks set into a grid
of routing channels, with connection boxes and switch boxes.

The RTL here describes the whole array and can be configured and simulated.
The included end-to-end test loads one configuration holding two 1-bit full
adders side by side. One is a QDI dual-rail adder and the other a
micropipeline adder. Both use a four-phase handshake.

## Hierarchy

```
fpga_top                 ROWS x COLS tiles, edge tracks as ports, one configuration chain
└─ fpga_tile             one island
   ├─ config_register    the tile's configuration bits (shift chain + shadow)
   ├─ connection_box     tracks -> PLB input pins
   ├─ plb                programmable logic block
   │  ├─ interconnect_matrix   local crossbar (pins, feedback, PDE, VSS -> LE/PDE inputs)
   │  ├─ logic_element x2
   │  │  ├─ lut7_3             multi-output LUT
   │  │  └─ lut2_1             validity LUT
   │  └─ pde                   programmable delay (behavioural)
   └─ switch_box         tracks and PLB outputs -> outgoing tracks
```

`fpga_pkg` holds every size, the configuration record types and the index
encodings.

## The logic element

`lut7_3` has a 128-bit table. Inputs `x[5:0]` address both 64-bit halves at
once:

* `lo = table[x[5:0]]`
* `hi = table[64 + x[5:0]]`
* `lut7 = x[6] ? hi : lo`, which equals `table[x]`

`lut2_1` reads `{hi, lo}`. Its output is `o[3]`. The LE's outputs are
`o = {lut2, lut7, hi, lo}`, and `o[2:0]` are also fed back to the block's
crossbar.

There are two usual ways to program an LE:

* **Two functions of six inputs.** `hi` and `lo` are, for example, the two
  rails of a dual-rail result. Setting `lut2 = 4'b1110` (OR) makes `o[3]`
  the result's validity.
* **A state-holding gate.** Route the LE's own `lut7` output back to `x[6]`.
  The lower half of the table then says when the output rises from 0, and
  the upper half says whether it stays at 1. A Muller C-element of `a` and
  `b` is `lo = a & b`, `hi = a | b`. The QDI adder uses the same trick with
  six data inputs. The output rises only once all three dual-rail inputs are
  valid and its function is true. It stays high until all inputs have
  returned to null.

A latch is `q = en ? d : q` with `q` fed back. Since `hi` and `lo` share
their inputs, one LE can hold two latches with a common enable, for example
`x = {-, -, qB, qA, B, A, en}`.

## The programmable logic block

A PLB has an interconnect matrix (IM), two LEs and a programmable delay
element (PDE). The IM has 15 sinks: the 7 inputs of each LE and the PDE
input. Each sink has a 4-bit select with these source indices:

| index | source |
|------:|--------|
| 0 | VSS (constant 0) |
| 1-8 | PLB input pin 0-7 |
| 9-11 | LE0 `lo`, `hi`, `lut7` (feedback) |
| 12-14 | LE1 `lo`, `hi`, `lut7` (feedback) |
| 15 | PDE output |

The PLB has 9 outputs: `pout[3:0]` are LE0's `o`, `pout[7:4]` are LE1's `o`,
and `pout[8]` is the PDE output.

The PDE delays its input by `(pde_sel + 1) * PDE_UNIT` time units, with
`PDE_UNIT = 100` and 8 settings. It is a **behavioural model**, not
synthesizable logic. A real chip would use a tapped delay line, and the taps
and step are not known.

## Routing

Every tile drives `TRACKS = 8` one-way tracks toward each neighbour (N, E,
S, W) and receives 8 from each. `fpga_top` ties tile (r,c)'s eastward
tracks to the westward inputs of tile (r,c+1), and likewise in the other
directions. At the array edge, the tracks arriving at edge tiles come from
the `io_*_in` ports, and the tracks those tiles drive outward go to the
`io_*_out` ports. `io_n_*` and `io_s_*` are indexed by column, and
`io_w_*` and `io_e_*` by row.

* **Connection box.** Each of the 8 PLB pins selects VSS (0) or an incoming
  track, with index `1 + dir*8 + track`, where dir is N=0, E=1, S=2, W=3.
* **Switch box.** Each of the 32 outgoing tracks selects VSS (0, meaning
  unused), an incoming track (`1 + dir*8 + track`), or PLB output `p`
  (`33 + p`).

Both boxes are fully populated multiplexers. A net can go straight, turn,
reverse, or be picked up at any tile it passes.

## Configuration

Each tile stores a `tile_cfg_t` record of 567 bits, laid out as a packed
struct:

```
tile_cfg_t = { plb: { le[1], le[0]        each {lut7[127:0], lut2[3:0]}
                      im_sel[14:0][3:0]
                      pde_sel[2:0] }
               cb_sel[7:0][5:0]
               sb_sel[3:0 dir][7:0 track][5:0] }
```

The tiles form a single chain in order `k = r*COLS + c` from `cfg_si`. To
load a configuration:

1. Build the image `{tile[NT-1], ..., tile[0]}`.
2. Raise `cfg_shift` and shift the image in most-significant bit first, one
   bit per rising edge of `cfg_clk`. That is 9072 bits for 4x4 tiles.
3. Drop `cfg_shift` and raise `cfg_update` for one cycle.

While bits shift, the fabric keeps running on the previous image. Reset
(`rst_n` low) clears the active image: every select goes to VSS and every
LUT outputs 0. The fabric then contains no closed loop, so it cannot
oscillate. Feedback loops start from 0 when a configuration is applied. The
C-element controllers of the micropipeline therefore need no explicit reset
input.

Configuration is the fabric's only clocked logic. After configuration the
array is purely combinational, with loops and delays.

## Example mappings (end-to-end test)

`tb/tb_fpga_top.sv` builds the configuration with small helper functions
and loads it through the chain. It then drives both adders at once.

**QDI dual-rail adder stage, tiles (0,0)-(0,3).**

* Inputs `a0 a1 b0 b1 c0 c1` enter on west-edge tracks 0-5 of row 0.
* First level: tile (0,0) computes S0 and S1, and tile (0,1) computes Co0
  and Co1. Each rail uses one LE as the generalised C-element described
  above. Tile (0,0)'s switch box forwards the inputs east to tile (0,1).
* Second level, tile (0,2): each output passes through output C-elements
  `C(rail, !ack_in)`. Both rails of one output share one LE, one rail in
  each half. That LE's LUT2 (OR) gives the output's validity.
* Tile (0,3) ANDs the two validities into the acknowledge back to the
  sender.
* Results and both acknowledges use the north edge.

The sender does the following for each token:

1. It raises the inputs one at a time and checks that nothing appears
   before the last one.
2. It waits for the acknowledge.
3. It returns the inputs to null one at a time and checks that the outputs
   hold meanwhile.

The receiver checks the sum and carry. On some tokens it delays its
acknowledge, and checks that the outputs stay valid even though the inputs
are already null.

**Micropipeline adder, tiles (3,0)-(3,2).** This is a two-stage four-phase
bundled-data pipeline.

* `c1 = C(req_in, !c2)` drives the input latches for A, B and Ci in tile
  (3,0). It is also the acknowledge back to the sender.
* The PDE of tile (3,0) delays `c1` by setting 3 (400 units) to form the
  second stage's request.
* Tile (3,1) computes the sum and carry.
* `c2 = C(dreq, !ack_in)` drives the output latches in tile (3,2). It is
  also `req_out`, and it travels back west to `c1`.

The test checks every result and checks that data holds while the receiver
stalls. It also checks that `req_out` rises exactly one PDE delay after
`c1`. The timing is exact because the model has no gate delays, so the PDE
is the only delay in the loop.

**Reconfiguration while running.** After both adders have run, the test
shifts in a second image that drops the QDI adder and keeps the
micropipeline. While the new image shifts in and is applied, micropipeline
tokens keep flowing, and every one of them must stay correct. Logic whose
configuration bits do not change is not disturbed by the update, including
its feedback state. Afterwards, a valid token driven into the QDI row must
produce nothing.

At the end, the test prints how often each mechanism occurred and fails if
any of them never did. The mechanisms are: configuration bits shifted, QDI
waiting, QDI holding, QDI receiver stalls, completion, micropipeline
stalls, PDE-timed firings, output holds and reconfiguration during
operation.

The QDI stage needs 7 LEs in 4 PLBs and the micropipeline 5 LEs in 3
PLBs, so the two together use 7 of the 16 PLBs.

## Choices made here, not fixed by the architecture

These parts follow the architecture as published:

* the island-style array
* a PLB made of a crossbar, two LEs and a delay element
* the LUT7-3 with three outputs plus a LUT2
* feedback through the crossbar as the way to build memory
* VSS as a crossbar source

These are this implementation's own decisions:

* **The LUT2's inputs.** The LUT2 reads the two 6-input outputs (`hi`,
  `lo`). Published drawings do not make clear which two of the three LUT
  outputs feed it, and this choice supports dual-rail validity directly.
* **Sizes.** 8 PLB pins, 9 PLB outputs (the PDE output is one of them),
  8 tracks per direction, a 4x4 array, and 8 PDE settings.
* **Routing structure.** Fully populated connection and switch boxes with
  one-way tracks, joining only nearest neighbours. There are no long wires
  and no I/O pad cells: edge tracks are top-level ports.
* **Configuration loading.** A shift chain with a shadow register and
  update strobe, reset to all-VSS.
* **The adder mappings.** The mappings in the test are this design's own.
  They are not a gate-for-gate copy of any published mapping, and their LE
  use says nothing about the utilisation a real
  place-and-route flow would reach.

## Combinational loops

Structural loops are intended. The LE-to-IM feedback and the switch boxes'
ability to send a track back where it came from both close combinational
loops in the netlist. Lint tools report these as circular logic. They become
real loops only when the configuration closes them, and that is how the
fabric holds state. Mapped asynchronous logic must be hazard-free for the
same reason it must be on silicon.

## Simulating

All files are SystemVerilog 2017. `rtl/fpga_pkg.sv` must be read first. Each
block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/fpga_pkg.sv tb/tb_fpga_top.sv --top-module tb_fpga_top
./obj_dir/Vtb_fpga_top
```

`--timing` is required, because the PDE model uses delays. The full-size
end-to-end test (4x4 tiles, both adders) builds in about 20 s and runs in
under a second. Lint with `verilator --lint-only -Wall` reports the
intended circular logic (`UNOPTFLAT`) and the PDE's variable delay
(`ZERODLY`).

To change the array size, channel width or pin count, edit the localparams
in `fpga_pkg`. The configuration record and the chain length follow
automatically. The example configuration in the test assumes at least 4x3
tiles, 8 tracks and 8 pins.
