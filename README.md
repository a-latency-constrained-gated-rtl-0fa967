# GRU layer with row-parallel kernels and a programmable-logic aggregator

A gated recurrent unit (GRU) is a recurrent layer: each step takes an input
vector x_t and the previous hidden state h_{t-1} and produces a new state

    z   = sigmoid(W_z x + U_z h + b_z)          update gate
    r   = sigmoid(W_r x + U_r h + b_r)          reset gate
    h~  = tanh   (W_h x + U_h (r . h) + b_h)    candidate state
    h_t = (1 - z) . h + z . h~                   (. = element-wise product)

Each step depends on the one before, and inside a step the candidate waits for
the reset gate. For latency the only lever is width: compute every element of
a gate vector at the same time. This RTL does exactly that. Every row of every
gate matrix gets its own small kernel, all rows of a gate finish together, and
the results are gathered and passed through the activation functions by a
single aggregation block. The design mirrors an accelerator that was built on
an AMD Versal device. There, the row kernels are programs on the AIE
vector tiles, and the aggregator is an HLS kernel in the programmable logic
(PL). Here, every part is plain synthesizable SystemVerilog, with fp32
arithmetic throughout.

## Dataflow of one step

```
             x (128-bit PL stream)
                 |
          [if_tile_pl2aie] --broadcast--> 3*H  W kernels (row_dot_tile)        W_row . x
                                                  |
   h (from hidden_update_tile) --broadcast--> 2*H U kernels (row_dot_tile)     U_row . h      (z, r)
                               \-----------> H  candidate kernels (hcand_u_tile) U_row . (r . h)
                                                  |
                         3*H combiners (gate_combiner_tile): + bias -> table index -> packet
                                                  |
                 per row: 3-way packet_merge -> if_tile_aie2pl  (H interface tiles)
                                                  |
                                     pl_aggregator (PL clock enable)
                           read all tiles / decode / sigmoid or tanh table / write vector
                          |                      |                       |
                      r vector               z vector                h~ vector
                          |                      |                       |
     [if_tile_pl2aie] -> candidate kernels   [if_tile_pl2aie] --> hidden_update_tile <-- [if_tile_pl2aie]
                                                                         |
                                                       h_t -> broadcast to U kernels
                                                       h_t -> if_tile_aie2pl -> h (128-bit PL stream)
```

Each step runs in this order:

1. `hidden_update_tile` broadcasts h_{t-1}. After reset this is all zeros, and
   that first broadcast is not sent to the output.
2. The W kernels already hold, or are still receiving, x_t. The z and r U
   kernels receive h. The candidate kernels store h. Each combiner waits for
   its two dot products, adds the bias, and sends one packet.
3. The aggregator collects z and r packets until the r vector is complete,
   then writes r back. The candidate kernels multiply r by h on the fly and
   finish U_h (r . h). Their packets come back to the aggregator.
4. The aggregator writes z and h~ to the hidden-state tile. That tile forms
   h_t, sends it out, and broadcasts it, which starts step t+1.

The W kernels do not depend on h. They accept the next x while the recurrence
is still running, and they stall only if their previous result has not been
taken yet.

## The row kernel (`row_dot_tile`)

This is the part the rest of the design is built around. A kernel holds
`ROWS` weight rows of length `N`. It receives the whole vector, one 32-bit
word per cycle, and keeps it. The arithmetic works on eight lanes:

* An 8-lane accumulator starts at zero.
* Each MAC step takes 8 consecutive weights of the row and the 8 matching
  vector words. It multiplies them pair by pair in fp32 and adds each product
  into its lane, rounding separately after the multiply and after the add.
  Eight lanes of fp32 are two 128-bit loads per cycle.
* After the last group of 8, the lanes are reduced to one value by a fixed
  tree, `((l0+l1)+(l2+l3))+((l4+l5)+(l6+l7))`. That value is the result for
  the row.

For the first row, a MAC step fires as soon as each group of 8 words has
arrived, so that row is limited by the stream rate. `res_valid` is set by the
second clock edge after the edge that accepts the last word. Any further rows
("row reuse", `ROWS > 1`) use the stored vector at one MAC step per cycle,
taking ceil(N/8)+1 cycles per row. If N is not a multiple of 8, the missing
lanes count as zero.

`hcand_u_tile` wraps a `row_dot_tile`. It stores h first. Then, for each
arriving r_i, it feeds r_i*h_i into the inner kernel.

## Packets and activation tables

A combiner turns `(W.x + U.h) + b` into an index into a 1024-entry table and
sends one 32-bit packet (`gru_pkg::gate_pkt_t`):

| bits   | field | meaning                         |
|--------|-------|---------------------------------|
| 31:30  | gate  | 0 = z, 1 = r, 2 = h~            |
| 29:22  | row   | row of the gate vector (0..255) |
| 21:10  | -     | zero                            |
| 9:0    | idx   | table index                     |

The index is `clamp(floor(64*s) + 512, 0, 1023)`. The table therefore covers
[-8, 8) in steps of 1/64 and saturates outside that range. The mapping is set
by `LUT_IDX_W` and `LUT_FRAC` in `gru_pkg`. The aggregator has two tables,
sigmoid (used for z and r) and tanh (used for h~). The host loads both, so
their contents are up to the user. The testbenches fill entry k with the
function's value at the bin centre, `(k - 512 + 0.5)/64`. Because every
packet names its own gate and row, the order in which packets arrive does not
matter.

## Aggregator (`pl_aggregator`)

The aggregator is a four-state machine that advances only on the PL clock
enable:

* **READ** waits until every interface tile offers a beat, then takes one from
  each at once (a blocking read).
* **APPLY** decodes each packet, looks up the table, and stores the value at
  its row of the gate's vector.
* **CHECK** starts writing any gate vector whose rows have all arrived. The
  order is r first, then z, then h~. If no vector is complete, it goes back to
  READ.
* **WRITE** sends the vector on that gate's own output stream, four words per
  128-bit beat, with zeros after the last row and `out_last` on the final
  beat.

The first beat of a completed vector leaves 3 PL cycles after the read that
completed it. This works because every interface tile carries the same number
of packets per step (three per row it serves), so waiting for all of them
cannot deadlock.

## Clocking and interface tiles

The vector tiles run at 1.25 GHz and the PL at 312.5 MHz, so one 128-bit PL
beat matches one 32-bit word per tile cycle. The RTL uses one clock, the tile
clock. Everything on the PL side (the aggregator and the PL ends of the
interface tiles) handshakes only when `pl_ce` is high, which is one cycle in
four. `if_tile_pl2aie` splits each beat into four words, with word 0 in bits
31:0, and runs at full rate. `if_tile_aie2pl` packs words into beats. A word
with `last` set closes its beat early, and the rest of the beat is zero, so a
one-word packet becomes one beat.

At `HIDDEN = 32` the design uses 32 packet interface tiles plus 5 more: x in,
h out, and z, r and h~ back to the tiles. That is 37, within the 39 the
device has. It uses 3*32*3 + 1 = 289 compute kernels.

## Top level (`gru_hybrid_top`)

| parameter       | default | meaning                                              |
|-----------------|---------|------------------------------------------------------|
| `HIDDEN`        | 32      | hidden units (at most 256, packet row field)         |
| `INPUT`         | 512     | input vector length                                  |
| `ROWS_PER_TILE` | 1       | rows per kernel; must divide `HIDDEN`                |

Ports:

* `rtp_*` loads the runtime parameters. Each write gives `rtp_kind` (W, U,
  BIAS, LUT_SIG, LUT_TANH), `rtp_gate`, `rtp_row`, `rtp_col` and `rtp_data`.
  The column is the matrix column, or the table entry for table writes.
  Write these only while the layer is idle. Weights in the padding columns
  (INPUT up to a multiple of 4, HIDDEN up to a multiple of 4) should be
  written as zero. With this design's multiplier, 0 times anything is 0, so
  padding is harmless anyway.
* `x_*` carries input vectors as 128-bit beats, ceil(INPUT/4) beats per
  vector, zero padded, with `x_last` on the last beat.
* `h_*` carries the new hidden state as ceil(HIDDEN/4) beats per step, with
  zeros in the padding words and `h_last` on the last beat. One h_t comes out
  per x vector. The hidden state is zero after reset. To start a new sequence,
  reset the layer.

Measured in simulation, a step takes 127 tile cycles at 6 hidden units, 5
inputs and 2 rows per kernel. At the defaults (32 hidden units, 512 inputs) it
takes 584 tile cycles, about 467 ns at 1.25 GHz. At the defaults the time goes
mostly into streaming 512 input words through one 32-bit port.

## Arithmetic

`fp32_add` and `fp32_mul` are combinational IEEE-754 single-precision units.
They round to nearest, with ties to even. Subnormal inputs and results are
flushed to zero. Overflow gives infinity. NaN is neither produced nor
propagated. Every operation in the datapath has a fixed order, so the whole
layer is bit-exact against a software model that follows the same order. The
testbenches contain such a model.

## Where this RTL departs from the original accelerator

* The vector-tile programs are built as dedicated datapaths. Their latency in
  cycles is not the latency of the original processors, and nothing tries to
  match the original's published timings. The aggregator's HLS version was
  reported with an initiation interval of 6 to 8 and a depth of 7 to 9 PL
  cycles. This state machine uses 4 states and writes 3 PL cycles after a
  read.
* Two clock domains are replaced by one clock with a 1-in-4 enable.
* The stream broadcast adds no latency. On the real stream switch,
  broadcasting costs time.
* Several details were unspecified and are choices of this RTL: the packet
  layout, the table size and index mapping, the reduction order, the
  non-fused MAC, round-robin packet merging, one aggregator output stream per
  gate, the write order r, z, h~, the zero initial state, and the 4-to-1
  clock ratio being implemented as a clock enable.
* The all-vector-tile alternative is not included. In that alternative,
  sorting tiles gather the packets instead of the PL kernel, and the
  column-wise cascade variant is left out too.

## Simulating

Every file in `rtl/` holds one module or package, and `gru_pkg.sv` must be
read first. The testbenches in `tb/` use `fp_ref_pkg.sv`, an fp32 reference
built on `real` arithmetic. Each testbench prints
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/gru_pkg.sv tb/fp_ref_pkg.sv tb/tb_gru_hybrid_top.sv --top-module tb_gru_hybrid_top
./obj_dir/Vtb_gru_hybrid_top
```

| testbench                 | what it covers                                                              |
|---------------------------|-----------------------------------------------------------------------------|
| `tb_fp32_mul`, `tb_fp32_add` | random and directed operands against correctly rounded references        |
| `tb_row_dot_tile`         | N=20, 3 rows, random stalls; latency of the first row                        |
| `tb_hcand_u_tile`         | r . h product feeding the dot product                                        |
| `tb_gate_combiner_tile`   | bias addition, index mapping including saturation, packet fields            |
| `tb_packet_merge`         | no loss, per-source order, round robin                                       |
| `tb_stream_broadcast`     | lock-step delivery to all consumers                                          |
| `tb_if_tile_pl2aie`, `tb_if_tile_aie2pl` | word order, last flag, zero fill, full rate                  |
| `tb_pl_aggregator`        | blocking reads, table selection, per-gate output, padding, 3-cycle write     |
| `tb_hidden_update_tile`   | the update formula, initial zero state, broadcast and output                 |
| `tb_gru_hybrid_top`       | 6 hidden, 5 inputs, 2 rows per kernel, 6 steps, bit-exact against the model  |
| `tb_gru_full`             | default size (32 hidden, 512 inputs), 3 steps, bit-exact                      |

The two end-to-end tests also count how often each mechanism occurs and fail
if one never does. The mechanisms are: row reuse, x padding, aggregator
writes, packet-merge contention, blocking-read waits, W kernels taking the
next x during the recurrence, table saturation, and back-pressure on the
output. At the default size, Verilator needs a few minutes to compile
`tb_gru_full`, and about 10 seconds to run it.
