# SD-SCN: an associative memory with selective decoding

An associative memory returns a stored record when given only part of it.
This design implements one in the style of a *sparse-clustered network* (SCN).
The neurons are split into `C` clusters of `L` binary neurons each. A
message is `C` sub-messages of `log2(L)` bits, and sub-message `i` names one
neuron of cluster `i`. Storing a message joins its `C` neurons pairwise into
a *clique* of binary links. Retrieval starts from a message with some
sub-messages erased. Every neuron of an erased cluster is switched on, and
repeated rounds of *global decoding* keep only the neurons that are linked to
something active in every other cluster. The clique of the stored message
survives, and the surviving neuron of each erased cluster is the missing
sub-message.

The RTL follows the architecture of Jarollahi, Onizawa and Gross, "Selective
Decoding in Associative Memories Based on Sparse-Clustered Networks". Earlier
SCN hardware held every link in flip-flops and evaluated all of them in every
round. That made the logic and wiring grow with the square of the neuron
count. This design has two differences:

* **Links live in RAM.** The links between each ordered pair of clusters are
  one `L x L` RAM block, `C(C-1)` blocks in all. Row `r` of the block for
  clusters (a, d) is the set of neurons of cluster `d` that share a clique
  with neuron `r` of cluster `a`.
* **Selective decoding.** A round does not AND every link with every neuron
  value. It reads only the rows of neurons that are currently active. One
  active neuron per cluster costs one RAM read. A cluster with several
  active neurons has them read one after another, at most `BETA` per round.
  Its rows are ORed together.

The default size is the largest one the architecture was reported at: 8
clusters of 400 neurons (3200 neurons), 56 RAM blocks of 400 x 400 bits
(8,960,000 bits), `BETA = 2` serial reads per round and `IT = 4` rounds. A
retrieval takes `2 + (BETA+1)(IT-1) = 11` clock edges.

## The decoding rule

Write `v(i,j)` for neuron `j` of cluster `i` being active, and `w(a,r)(d,j)`
for a link. With only whole clusters erased, **local decoding** is trivial.
A known cluster activates the one neuron its sub-message names. An erased
cluster activates all of its neurons.

One round of **global decoding** then keeps neuron `(d,j)` active when

    v(d,j) AND  for every cluster a != d:  OR over active neurons r of a of w(a,r)(d,j)

The final `AND v(d,j)` is the "memory effect": a neuron that was dropped never
comes back. The rule is that of the conventional decoder. The difference is
that the OR runs only over active neurons, each of which is one RAM row. In
this design that gives the following schedule:

* **Round 1.** Every known cluster reads the single row its sub-message
  addresses. An erased cluster is not read at all. It sends all ones to the
  other clusters, so it constrains nothing in this round. The memory effect
  uses the local-decoder vector.
* **Rounds 2..IT.** Every cluster presents its active neurons one per cycle,
  `BETA` cycles, highest index first, and the rows are ORed. The memory
  effect uses the previous round's result.

**A cluster with more than `BETA` active neurons** after round 1 has only
its `BETA` highest neurons read. Its OR is then incomplete and can drop the
right neuron elsewhere. The choice of `BETA` trades cycles against this risk
(see *Measured behaviour*).

## Block structure

```
           din_r[i], erase[i]
                 |
              +--v--+  idx (log2 L)        +-----------------------------+
              | LD  |--------->|0\         |  LSM                        |
              +-----+          |  |--LS[i]-> box i: C-1 RAMs L x L,      |
                 | ld_vec  +-->|1/         |        address LS[i]        |
                 |         |   It_Ctrl     |  row counter, block counter |
                 |         |               +-------------+---------------+
                 |      +--+--+                          | row words, routed
                 |      | SPM |<--------+                | to cluster d
                 |      +--+--+         |                v
                 |         |        GD_OP[i]   +-------------------+
                 +---------)----------------->|  GD (cluster i)    |
                           |                   |  OR-acc x (C-1),   |
                           v                   |  AND, memory effect|
                  output registers             +-------------------+
```

| Module | Role |
|---|---|
| `sdscn_top` | Wires the blocks. One LD, SPM and GD per cluster, one LSM, controller and output registers. |
| `sdscn_ld` | Local decoder. Passes the sub-message on as the round-1 address. Gives a one-hot vector, or all ones if erased. |
| `sdscn_lsm` | Link storage module: the `C(C-1)` RAMs, the write counters, the read/write address multiplexers, routing and the erased-cluster bypass. |
| `sdscn_ram` | One `L x L` single-port RAM with synchronous read. |
| `sdscn_row_counter`, `sdscn_block_counter` | Address and write-enable generation while the link matrix is loaded. |
| `sdscn_gd` | Global decoder of one cluster: OR accumulators, AND across clusters, memory effect, result register `GD_OP`. |
| `sdscn_spm` | Serial pass module: turns a cluster's activation vector into a sequence of RAM addresses. |
| `sdscn_pe`, `sdscn_ohd` | Priority encoder (highest set bit) and one-hot decoder. |
| `sdscn_ctrl` | Controller: It_Ctrl and the per-cycle strobes. |
| `sdscn_out_reg` | Output registers with a per-cluster error flag. |
| `sdscn_pkg` | Default sizes, controller state type, access-delay formula. |

### Which RAM feeds which decoder

The RAMs are grouped into `C` boxes, and all blocks in box `a` share one
address, `LS[a]`. In round 1 that address comes from the local decoder of
cluster `a`. In later rounds it comes from the SPM of cluster `a`. The
multiplexer between the two sources is switched by `It_Ctrl`. Block `k`
(0..C-2) of box `a` holds the links from cluster `a` into cluster `d = k` if
`k < a`, else `d = k + 1`. Its output goes to the global decoder of cluster
`d`, on input `a` if `a < d`, else `a - 1`. The published block diagram shows
a box's RAMs feeding its own cluster's decoder. That cannot evaluate the rule
above, because a decoder needs rows addressed by the *other* clusters'
neurons. The routing here is the one the rule requires.

## Loading links (write mode)

Storing messages means building the link matrix. In the architecture this is
done by a host processor, which is not part of the RTL. For each stored
message `m` and each ordered pair of clusters `a != d`, it sets
`row[a][d][m_a]` bit `m_d`. Hold `rw = 0` and present the matrix one
`L`-bit row per cycle on `din_w` with `din_w_valid = 1`, in this order:

    for a in 0..C-1:            # box
      for k in 0..C-2:          # block, destination d = k < a ? k : k+1
        for r in 0..L-1:        # row = neuron of cluster a
          send row[a][d][r]

That is `C(C-1)L` rows: 22,400 at the defaults. Some hosts have fewer pins
than `L`. For them, set the parameter `DW` below `L`. Each row is then sent
as `ceil(L/DW)` words of `DW` bits, lowest bits first. The first words are
buffered, and the row is written when its last word arrives. Bits of the
last word above `L` are ignored. Idle cycles
(`din_w_valid = 0`) may be inserted anywhere. The row counter and the
one-hot block counter advance only on complete rows. Both return to block 0,
row 0 whenever `rw` is high, so every write phase starts from the
beginning. To store more messages, rebuild the matrix and write all of it
again.

## Retrieval (read mode)

With `rw = 1`, present `din_r[i]` for all clusters and set `erase[i]` for the
unknown ones. The `din_r` value of an erased cluster is ignored. Pulse
`start` for one cycle. Hold `din_r` and `erase` stable while `busy` is high.
`done` pulses when `dout_idx[i]`, the retrieved sub-messages, are valid.
`dout_err[i]` is set when cluster `i` ended with no active neuron or with
more than one. In that case `dout_idx[i]` is the highest surviving neuron.
Assertions in `sdscn_top` check the request rules in simulation:
`din_r` and `erase` stable, and `rw` high, while `busy`. They are
suspended while `rst_n` is low.

Cycle schedule for `BETA = 2`, `IT = 4`. Cycle 0 is the cycle in which
`start` is sampled.

| Cycle | State | It_Ctrl | RAM address | Global decoder |
|---|---|---|---|---|
| 0 | IDLE | 0 | LD index of each known cluster | accumulators cleared |
| 1 | IT1 | 0 | — | `GD_OP <= AND(rows) & LD vector`; SPMs cleared |
| 2 | SER beat 0 | 1 | SPM: 1st active neuron | accumulators cleared |
| 3 | SER beat 1 | 1 | SPM: 2nd active neuron | accumulate 1st row |
| 4 | SER beat 2 | 1 | — | `GD_OP <= AND(acc | 2nd row) & GD_OP`; SPMs cleared |
| 5–7, 8–10 | rounds 3 and 4 | 1 | as 2–4 | as 2–4 |
| 11 | OUT | 1 | — | output registers take the SPM priority-encoder outputs |

The output registers are loaded at the end of cycle 11, which is 11 clock
edges after the edge that accepted `start`. This matches the architecture's
stated access delay of `2 + (BETA+1)(IT-1)`: one read and one update for
round 1, then `BETA` reads and one update per later round. `done` is high in
cycle 12, and a new `start` is accepted from that cycle on.

## The serial pass module

The SPM is the part that lets one RAM port serve a cluster with several
active neurons. For each cluster it keeps an `L`-bit register `Q` of neurons
already passed.

1. `remain = GD_OP xor Q` holds the active neurons not yet passed.
2. The priority encoder picks the highest bit of `remain`. That index is the
   RAM address for this cycle.
3. The one-hot decoder expands the index back to `L` bits, and `D = Q | onehot`.
4. An equality comparator checks `D == GD_OP`. `Q` loads `D` only while they
   differ.

Take active neurons {9, 5, 2}, with `Q` cleared. The addresses are 9, then
5, then 2. When 2 is presented, `D` equals `GD_OP`, so `Q` stops at {9, 5}
and the encoder keeps presenting 2. Extra read cycles therefore repeat an
address already read, and an OR with the same row again changes nothing.
With a single active neuron (every known cluster), that neuron is presented
on every beat. An empty cluster raises no `valid`. Its reads are masked to
zero, which makes every other cluster empty in the next round, as the rule
requires. `Q` is cleared by the controller in the update cycle of every
round.

## Global decoder

For each of its `C-1` source clusters, a cluster's decoder has an `L`-bit OR
of the incoming row with a feedback register. The register collects the rows
of beats 1..BETA-1. The update cycle uses `register | current row`, so only
`BETA-1` rows need storing. The `C-1` OR outputs are ANDed bitwise. The
result is then ANDed with the previous activation: the LD vector in round 1,
`GD_OP` itself afterwards. It is registered as `GD_OP`.

## Parameters and sizes

| Parameter | Default | Meaning |
|---|---|---|
| `C` | 8 | clusters |
| `L` | 400 | neurons per cluster; addresses are `$clog2(L)` = 9 bits |
| `BETA` | 2 | serial reads per cluster and round |
| `IT` | 4 | rounds of global decoding |
| `DW` | `L` | write-port width; rows are sent in `ceil(L/DW)` parts |

All of them can be changed on `sdscn_top`. `L` need not be a power of two:
indices of `L` or more decode to no neuron. Reported configurations, all
with `C = 8` and link density near 0.22:

| Neurons | `L` | Messages | Link RAM bits | Stored message bits |
|---|---|---|---|---|
| 128 | 16 | 64 | 14,336 | 2,048 |
| 512 | 64 | 1,018 | 229,376 | 48,864 |
| 3,200 | 400 | 39,754 | 8,960,000 | 2,862,288 |

The link density is the fraction of set bits in a block, about
`1 - (1 - 1/L^2)^M` for `M` random messages. In synthesis the 56 RAMs stay
memory cells, to be mapped onto FPGA block RAM. The rest of the default
design is about 29,000 flip-flops. Most of them are the per-cluster `GD_OP`,
`Q` and accumulator registers: 8 x (1 + 1 + 7) x 400 bits.

## Measured behaviour

The end-to-end test benches hold the RTL against a behavioural model, which
is written from the rule above and not from the RTL structure. The RTL and
the model agree exactly on every retrieval. The statistics below come from
random messages and are properties of the algorithm at these settings:

* 128 neurons, 64 messages: 176 of 180 retrievals with half the clusters
  erased return the stored message exactly.
* 512 neurons, 1,018 messages: 88 of 90.
* 3,200 neurons, 39,754 messages, `BETA = 2`: about 75% of 1,000 retrievals
  with half the clusters erased return the stored message exactly. After
  round 1, as many as 7 neurons of one cluster were still active.

The architecture's description says that at density 0.22 the largest number
of active neurons per cluster after round 1 is two. With 4 known clusters
and 400 neurons, a wrong neuron survives round 1 with probability about
`0.22^4`, so a cluster keeps about 0.9 extra neurons on average. More than
`BETA = 2` survivors is then common. When the stored neuron is not among
the two highest, the retrieval fails or is flagged in `dout_err`. At the
defaults, raise `BETA` if exact retrieval matters more than latency. Each
extra read costs `IT-1` cycles per retrieval.

The FPGA figures reported for the architecture are not reproduced here:
look-up tables, registers and clock rate on a Stratix IV device. Generic
synthesis of the default RTL gives the 8,960,000 RAM bits the architecture
reports and about 29,000 flip-flops.

## Departures from the published architecture and choices made here

* **Routing of RAM outputs.** As described under *Which RAM feeds which
  decoder*: the routing follows the decoding rule, not the drawing.
* **Row counter range.** It counts 0..L-1, one address per RAM row. The
  description says it counts up to `log2(L)-1`, which is its bit width.
* **Fixed number of rounds.** Decoding always runs `IT` rounds. The stated
  access delay assumes this. There is no early stop when every cluster has
  one neuron left.
* **Write port width.** Rows can be sent in parts (`DW < L`), as the
  architecture allows. It gives no pin count, so the default is `DW = L`,
  one row per cycle.
* **Interface and control.** The `start`/`busy`/`done` handshake, the
  `din_w_valid` strobe, the row order of the link matrix, the controller
  states, the SPM and accumulator clears, the error flags and the reset are
  all choices of this design. The architecture does not specify them.
* **Equality comparator polarity.** The register is enabled while the sets
  differ, as the SPM needs.
* **RAMs.** Synchronous read, read-first, written as arrays, with no vendor
  macros.
* **Not in the RTL.** The host that builds the link matrix, and the
  alternative of generating links on chip, which the architecture mentions
  only as an option.

## Simulating

Every file in `rtl/` and `tb/` holds one module or package, named after the
file. Each test bench prints `TB_RESULT checks=N failures=M` and stops
itself. To build and run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
      rtl/sdscn_pkg.sv tb/tb_sdscn_top.sv --top-module tb_sdscn_top -Mdir obj
    ./obj/Vtb_sdscn_top

| Test bench | What it checks |
|---|---|
| `tb_sdscn_ohd`, `tb_sdscn_pe`, `tb_sdscn_ld` | All indices / random vectors at `L = 400`. |
| `tb_sdscn_spm` | Address sequence (highest first, then hold) for 0–6 active neurons. |
| `tb_sdscn_gd` | Round 1 and serial rounds against the bitwise rule. |
| `tb_sdscn_ram`, `tb_sdscn_row_counter`, `tb_sdscn_block_counter` | Storage and write counters. |
| `tb_sdscn_lsm` | Full write stream, then routing, masking and bypass of random reads (`C = 8`, `L = 32`). Covers whole rows and rows sent as three 12-bit parts. |
| `tb_sdscn_ctrl` | Cycle-by-cycle strobe schedule for (BETA, IT) = (2, 4) and (3, 2). Also checks that `start` is ignored while busy or in write mode. |
| `tb_sdscn_top` | End to end at 128 and 512 neurons; the 512-neuron run writes its rows in 24-bit parts. The link matrix is written twice, with read mode in between, and retrievals are checked against the model, latency included. It fails if bypass, multi-neuron serial passes, more-than-`BETA` clusters or error flags never occur. |
| `tb_sdscn_full` | The same at the default size, 3,200 neurons and 39,754 messages. The top has no parameter overrides. About a minute to build and a few seconds to run. |

`tb_sdscn_run` is the shared body of the two end-to-end benches. It holds the
message generator, the link-matrix builder and the reference model, and it
can be reused for other sizes through its parameters.
