# A global NoC composed from abutting blocks: RTL

In a synchoros design, the chip is laid out on a virtual grid. It is built by placing hardened,
pre-characterised blocks (SiLago blocks) side by side. The wires of each block line up with those
of its neighbour, so no logic or physical synthesis is run on the assembled design. The global
network-on-chip (GNoC) that joins the chip's synchronous islands is built the same way. It uses a
small library of four block types, written as one-letter tokens:

| token | block            | what it does to the data wires                        | logic |
|-------|------------------|-------------------------------------------------------|-------|
| `W`   | plain wires      | carries them one grid pitch further                   | none  |
| `B`   | buffered wires   | re-drives every wire to restore the slew rate         | none (identity) |
| `R`   | registered wires | puts one flip-flop on every wire (a pipeline stage)   | yes   |
| `S`   | switchbox        | flip-flops on every port, with switching in between   | yes   |

Every GNoC is a sentence of a small grammar:

```
GNOC  := S Wires GNOC | S
Wires := { W | B | R }+
```

For example, `S RWWBWWR S` is two switchboxes joined by a link. The link has a register, two
plain-wire blocks, a buffer, two more plain-wire blocks and a second register. Each block's timing
is characterised once. So the delay of any sentence is found by table lookups, one per segment
between active blocks (`R`, `B`, `S`). The cost is linear in the length of the sentence, with
post-layout accuracy. A synthesis loop picks the cheapest sentence that meets timing. It tries
plain wires first, then adds evenly spaced `B` blocks, then `R` blocks.

This RTL gives the logical side of that scheme. The design is described by the same sentence used
to place the blocks, and the RTL is assembled from it. In the RTL, each `R` becomes a register
stage and each `S` becomes a switchbox. `W` and `B` become plain connections, because their effect
is only electrical. So the RTL shows the cycle behaviour of a GNoC sentence: how many clock cycles
each link takes, and where words can go.

The timing model, the characterisation tables and the synthesis loop are not hardware, so they are
not part of this RTL. Nor are the network interface units, the PLL and the regions.

## The sentence is the design

`gnoc_top` takes the whole GNoC as one string parameter, `GNOC`. At elaboration, functions in
`gnoc_pkg` read the string:

- `gnoc_ok` checks the grammar. It must start and end with `S`, never have two `S` in a row, and
  use no characters other than `S W B R`. A sentence that breaks these rules stops elaboration
  with `$error`.
- `count_tok(GNOC, "S")` gives the number of switchboxes, `N_S`. The port arrays are sized by it.
- `link_of(GNOC, k)` cuts out the `W/B/R` run between switchbox `k` and switchbox `k+1`. That run
  becomes the `PATH` of link `k`.

Sentences are read from left to right, which is taken as west to east. Token 0 is the west end.
A string parameter holds up to `MAX_LEN` = 128 characters. Neither limit nor orientation comes
from the paper.

The default sentence chains the four link compositions whose timing was measured. It joins them
with five switchboxes:

```
S RWWBWWR S RWWWWWBWWWWWWR S RBWWBWWWBWWWWBWWWWBWWWBWWBR S RBWWBWBWBWBWWBWWBWWBWBWBWWBR S
```

Each of the four links has two `R` tokens, so each one takes two cycles. The measurements built
each link as a separate design. Joining them into one chain is a choice made here. The published
table also has two misprints: its length column gives 15 for the second sentence, which has 14
tokens, and 27 for the fourth, which has 28. The RTL follows the sentences as written.

## The buses

Every block carries two 256-bit buses, one in each direction, plus the global clock wire. The
width 256 is the one number printed on the block drawings. Two buses running in opposite
directions matches the forward and backward timing paths the method has to analyse.

This RTL adds a valid bit to each 256-bit word (`gnoc_pkg::flit_t`). Without it a receiver could
not tell a word from an idle cycle. There is no flow control: nothing in the published scheme
describes backpressure on these wires. A word that enters the network therefore always leaves a
fixed number of cycles later. Fixed latency is the property the method is built around.

The global clock tree has no logic function, so in the RTL it is the single `clk` net. Every `R`
and `S` block uses it. Reset is an asynchronous, active-low `rst_n`. It clears the valid bits
(and in the switchbox, the whole port registers and the route).

## Blocks

### `gnoc_reg_sb`: the `R` block

This block has one flip-flop per wire on both buses: `east_i` to `east_o`, and `west_i` to
`west_o`, one cycle each. Only the valid flip-flops are reset. The clock is not registered.

### `gnoc_link`: a `Wires` run

Parameter `PATH` is a string of `W`, `B` and `R`. The default is `"RWWBWWR"`. A generate loop
walks the tokens. An `R` puts a `gnoc_reg_sb` between position `j` and position `j+1`, for both
directions. Any other token is a plain connection.

The link's latency in each direction equals the number of `R` tokens. Its throughput is one word
per cycle in each direction. A link of only `W` and `B` tokens has zero latency: it is
combinational. A concurrent assertion checks the fixed latency in simulation: a valid word that
goes in must come out `N_R` cycles later with the same data.

### `gnoc_switchbox`: the `S` block

In the measurements, the switchbox is only a stand-in: a dummy with flip-flops on its ports. The
paper does not give its switching function. What is built here is the simplest switchbox that
still switches. Only the flopped ports come from the paper; everything else in this block is a
choice made here:

- It has three ports: `PORT_W` and `PORT_E` face the links, and `PORT_L` faces the region's
  network interface. The block drawing has flip-flops on three of its sides.
- Every input and every output is registered. A word takes exactly **two cycles** from `in_i[p]`
  to `out_o[q]`.
- Between the two registers is a statically configured crossbar. The route register (`route_t`)
  holds one 2-bit source for each output: `SRC_NONE`, `SRC_WEST`, `SRC_EAST` or `SRC_LOCAL`.
  One input may feed several outputs (multicast). An output may also take its own port's input
  (turn-back, or local loop-back).
- The route is loaded from `cfg_i` when `cfg_we` is high and takes effect from the next cycle.
  Read it back on `route_o`. The reset route (`ROUTE_THROUGH`) is straight through both ways,
  with the local output idle.

### `gnoc_top`: the whole network

`gnoc_top` is a chain of `N_S` switchboxes and `N_S-1` links, as set by `GNOC`. Switchbox `k`
has these ports:

- `local_in[k]` and `local_out[k]`: its local (network interface) port.
- `cfg_we[k]`, `cfg[k]` and `route[k]`: its route register.

The outer west port of the first switchbox is `west_in`/`west_out`. The outer east port of the
last one is `east_in`/`east_out`.

The latency from an input of switchbox *a* to an output of switchbox *b* is 2 cycles for every
switchbox passed (*a* and *b* included) plus 1 cycle for every `R` on the links between them.
With the default sentence:

- local port to local port, one hop: 2·2 + 2 = 6 cycles
- west edge to east edge: 2·5 + 8 = 18 cycles

At the default size, `gnoc_top` has about 11.9 k flip-flops: 30 port registers of 257 bits in the
switchboxes, 16 link registers of 257 bits, and the five route registers.

## Departures from the paper, and limits

- **Wires and buffers carry no model.** `W` and `B` change only slew and delay. The RTL has no
  delays, so two sentences with the same `R` positions behave the same in simulation. The
  wire-length limit between buffers (the K of the characterisation) is not checked.
- **The switchbox is invented.** Its port count, crossbar, route encoding, configuration port and
  reset route are all choices made here. The paper describes only a dummy switchbox with flopped
  ports, and expects many router sub-types.
- **Valid bit, no backpressure.** Both are additions made here; the paper specifies neither.
- **A chain, not a mesh.** The grammar describes a chain of switchboxes, and so does the RTL. The
  example floorplan shows a two-dimensional GNoC with switchboxes at crossings. That would need
  switchboxes with four link ports and a grammar for branching, and neither is given.
- **Not built:** the network interface units (their side is the local ports), the PLL (`clk` is an
  input), the regions, and the clock-tree buffering. The timing model and the synthesis algorithm
  are software.

## Testbenches

Each testbench checks itself and ends by printing `TB_RESULT checks=N failures=M`. Each one also
has a watchdog.

| testbench            | what it checks |
|----------------------|----------------|
| `tb_gnoc_reg_sb`     | Random words on both buses. Each output must equal the input of exactly one cycle before. Reset must clear the valid bits. |
| `tb_gnoc_link`       | Six links side by side: the four measured sentences, `WWBWW` (0 cycles) and `RBRWR` (3 cycles). Random traffic both ways, compared with the input of exactly LAT cycles before. LAT is counted by hand in the testbench. |
| `tb_gnoc_switchbox`  | Random words on all three ports, with a random new route every few cycles. Each output must carry, two cycles later, the word its route selected, or stay idle. Also checks the reset route and the route read-back. |
| `tb_gnoc_top`        | The full default network, with no parameter changed. Five phases of routing: straight through both ways; local to local in both directions at once; multicast from one source to three outputs; turn-back and local loop-back; and a return to straight through. Every word must arrive at the predicted cycle on every output it was sent to, and no output may show a word nobody sent it. Each of these mechanisms is counted, and one that never happens is a failure. |

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/gnoc_pkg.sv tb/tb_gnoc_top.sv \
          --top-module tb_gnoc_top -o sim
./obj_dir/sim
```

Each testbench finishes in well under a second.

## Changing the design

- **Another network:** override `GNOC` on `gnoc_top`, for example
  `gnoc_top #(.GNOC("SRBRSWWS"))`. Port arrays and links follow the new sentence.
- **Another bus width:** change `gnoc_pkg::DATA_W`. The testbenches fill words 32 bits at a time,
  so keep the width a multiple of 32.
- **Another switchbox:** replace `gnoc_switchbox`. Keep its port list, or change `gnoc_top`'s
  port wiring to match.
