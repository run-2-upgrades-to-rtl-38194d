# Run-2 CMS Level-1 calorimeter trigger: Stage-1 algorithms and Stage-2 time multiplexing in SystemVerilog

The CMS Level-1 calorimeter trigger must choose, every 25 ns, whether a collision is worth
keeping. It does this from coarse calorimeter energies. At Run-2 luminosities each crossing
holds about 50 overlapping collisions ("pile-up"). Without correction that extra energy inflates
every jet, tau and energy sum, and the trigger rate rises several times over its limit. The
upgrade was made in two steps, and this RTL models both:

* **Stage 1** is one processing card. It still receives the old 22 x 18 grid of calorimeter
  *regions* (4 x 4 trigger towers each). Before finding anything it removes an event-by-event
  pile-up estimate from every region. The estimate is a single global number: how many regions
  have any energy at all. A per-eta look-up table turns that number into energy to subtract.
  For heavy-ion running the same place holds a different cleaning step: each eta ring loses its
  own mean energy.
* **Stage 2** keeps full tower granularity (72 phi x 80 eta towers). It relies on *time
  multiplexing*. Eighteen Layer-1 cards each see a slice of the detector. They send all of event
  *n* to one of nine Layer-2 nodes, node *n mod 9*. A node then has about seven bunch crossings
  to take in a whole event, while the other eight nodes take the next events. A demultiplexer
  puts the results back in event order.

The top module `l1calo_run2_top` holds both systems side by side, as they ran in parallel. Each
has its own clock and ports. The tower-level particle algorithms of Stage 2 are not included.
Only their pile-up estimator (tower multiplicity) and the total ET are computed. See
"What is not here".

## Files

| file | what it is |
|---|---|
| `rtl/calo_pkg.sv` | grid sizes, widths, `cand_t` candidate, `cfg_wr_t` LUT write port, `l2_result_t` |
| `rtl/s1_pu_subtract.sv` | non-zero region count, 22 pile-up LUTs, subtraction |
| `rtl/s1_hi_bkg_subtract.sv` | heavy-ion per-eta-slice mean subtraction |
| `rtl/s1_jet_finder.sv` | 3x3 jets (3x3 sum, or largest 2x2 in heavy-ion mode) |
| `rtl/s1_tau_finder.sv` | 2x1 taus, isolation LUT, eta-dependent correction LUT |
| `rtl/s1_egamma_select.sv` | e/gamma isolation (proton) or barrel/endcap split (heavy ion) |
| `rtl/topk_sorter.sv` | pipelined "K highest of N" merge tree |
| `rtl/s1_energy_sums.sv` | total ET, HT, missing-ET vector and magnitude |
| `rtl/s1_centrality.sv` | heavy-ion centrality bits from the HF energy |
| `rtl/s1_mp7_processor.sv` | Stage-1 processor: all of the above, aligned and formatted |
| `rtl/s2_tower_encoder.sv` | Layer-1 16-bit tower word |
| `rtl/s2_tm_serializer.sv` | Layer-1 time-multiplexed transmitter |
| `rtl/s2_ctp7_layer1.sv` | one Layer-1 card (320 encoders + transmitter) |
| `rtl/s2_l2_node.sv` | Layer-2 input pipeline, ring stream, ET and multiplicity |
| `rtl/s2_demux.sv` | event-order demultiplexer |
| `rtl/s2_tm_system.sv` | 18 cards, patch-panel wiring, 9 nodes, demux |
| `rtl/l1calo_run2_top.sv` | both stages |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Stage 1

### Region grid and candidates

Regions are indexed `[eta][phi]`, with eta 0..21 and phi 0..17. Eta 0-3 and 18-21 are the
forward (HF) regions, and eta 4..17 are the central part, |eta| < 3.0. Phi wraps around and eta
does not. A region carries a 10-bit ET. Every candidate, whatever its kind, is a `cand_t`: a
14-bit ET, a 5-bit eta, a 5-bit phi and one `flag` bit. The flag means "isolated" for proton
taus and e/gamma, and "barrel" for heavy-ion e/gamma. A finder returns one candidate slot per
region, 396 slots, and puts zero in slots that hold no candidate. A sorter then reduces the
slots to the four highest.

### Pile-up subtraction (proton running)

`npu` is the number of regions with non-zero ET, from 0 to 396. Each eta slice has its own
512-entry LUT, indexed by `npu`. The LUT output is subtracted from every region of that slice,
and the result is clipped at zero. The estimator is global, so the whole event must be present
before any region can be cleaned. This is why the whole grid moves through the pipeline in
parallel. The LUTs come up empty, which means no subtraction, and must be loaded.

### Heavy-ion background subtraction

Each eta slice loses its own mean ET, floor(sum/18), clipped at zero. The division is done as a
multiplication by 3641 followed by a shift right by 16. This gives exactly floor(sum/18) for
every sum up to 18 x 1023. The global energy sums use the *raw* regions in this mode.

### Jets

A region seeds a jet when all of these hold:

* its ET is at least `JET_SEED` (1);
* it is strictly larger than the four neighbours "before" it (lower eta, or the same eta and
  lower phi);
* it is not smaller than the four neighbours "after" it.

This asymmetric rule gives exactly one jet when two neighbouring regions have equal ET. The jet
ET is the 3x3 sum in proton running. In heavy-ion running it is the largest of the four 2x2
squares that contain the seed. Seeds at eta 4..17 give central jets, and the others give forward
jets.

### Taus

The seed is a central local maximum, using the same rule as for jets. The tau is the 2x1 pair
made of the seed and its most energetic direct neighbour. Isolation is *relative*:
(E_3x3 - E_tau)/E_tau. It is not computed by arithmetic. A 4096 x 1 LUT is addressed by the two
energies, each shifted right by `ISO_SHIFT` (2) and saturated to 6 bits. The address is
`{E3x3_q, Etau_q}`. The default content says "isolated" when E_3x3 - E_tau <= E_tau/4. A
second LUT applies the eta-dependent energy correction. It is addressed by `{eta, min(E_tau,
255)}` and holds the identity by default. In heavy-ion mode every non-zero central region is a
candidate. These are the "highest energy regions" used to seed a track trigger.

### e/gamma

The RCT delivers 144 candidates (4 isolated and 4 non-isolated per crate). Each has a 6-bit
rank and a region position, and it arrives **nine clocks after the regions of the same event**.
The processor therefore holds the pile-up-subtracted grid in a delay line for 7 more clocks. In
proton running a candidate counts as isolated when both of these hold:

* the RCT marked it isolated;
* a 4096 x 1 LUT, addressed by `{region ET >> 2 (sat. 6 bits), rank}`, agrees. The default
  content accepts a region of at most 1.5 x the rank.

In heavy-ion running the split is barrel against endcap instead. The barrel is region eta 7..14.
The true barrel edge, |eta| = 1.479, falls inside a region, so the nearest region boundary
(|eta| = 1.39) is used.

### Sums and centrality

* **ET** is the sum of the central regions.
* **Missing ET** is minus the vector sum of the central regions. Each phi slice is placed at
  its centre (20p + 10 degrees), with 12-bit fixed-point cos/sin that are computed when the
  design is elaborated. The magnitude is approximated as max(|x|,|y|) + min(|x|,|y|)/2, which is
  never below the true length and at most 12 % above it.
* **HT** is the sum of the central jets with ET >= `HT_THR` (10).
* **Centrality** (heavy ion) compares the total HF ET with eight programmable thresholds.

### Pipeline and output timing

All times are in clocks after the regions of an event enter (one event per 40 MHz clock, no
stalls):

| step | ready at |
|---|---|
| cleaned regions (pile-up or heavy-ion) | 2 |
| jet slots, sums input | 3 |
| tau slots | 4 |
| sums | 5 |
| e/gamma candidates enter | 9 |
| e/gamma classified | 10 |
| jets sorted (9-level tree, 396 -> 512 leaves) | 12 |
| taus sorted | 13 |
| e/gamma sorted (8-level tree, 144 -> 256 leaves) | 18 |
| **all outputs, aligned** | **18** |

The early results go through delay lines so that every output port shows the same event at
clock 18. Stage 1 was allowed about 20 bunch crossings. The 12-bit `hf_field` carries 4 x 3-bit
coarse ETs (min(ET>>3, 7)) of the four highest isolated taus in proton running. In heavy-ion
running it carries the 8 centrality bits.

### Loading LUTs and thresholds

`cfg` is a one-cycle write strobe, `{we, sel, addr[15:0], data[15:0]}`. It stands in for the
IPbus register access of the real card.

| `sel` | `addr` | `data` |
|---|---|---|
| `LUT_PU` | `{eta[4:0], npu[8:0]}` | pile-up ET to subtract [9:0] |
| `LUT_TAU_ISO` | `{E3x3_q[5:0], Etau_q[5:0]}` | isolated [0] |
| `LUT_TAU_COR` | `eta*256 + min(Etau,255)` | corrected ET [7:0] |
| `LUT_EG_ISO` | `{region_q[5:0], rank[5:0]}` | isolated [0] |
| `REG_CENT` | threshold 0..7 | HF ET threshold [15:0] |

The LUTs start with their defaults through `initial` blocks, which is the power-up content of
an FPGA. Many candidate positions read one LUT in the same clock. A real FPGA would replicate
each table or share it in time.

## Stage 2

### Tower word

In Layer-1 each tower becomes one 16-bit word:

| bits | meaning |
|---|---|
| [8:0] | ECAL + HCAL ET |
| [11:9] | floor(log2(larger/smaller)), 7 if the smaller is 0, 0 if both are 0 |
| [12] | ECAL ET > HCAL ET |
| [15:13] | reserved, 0 |

The HF towers (eta index 28..39 of each side) take their energy from the `hcal` input, and their
`ecal` input is ignored.

### Time multiplexing, frame by frame

The link clock is 240 MHz, six clocks per bunch crossing, and `bx_start` marks the first clock
of each one. Card *c* (0-8 positive eta, 9-17 negative) holds phi towers 8(c mod 9) .. +7. When
an event arrives, the card stores it in the buffer of node (event mod 9). On the next clock it
starts sending one *frame* per clock to that node:

* frame *f* carries |ieta| = f + 1, so the readout starts at the centre of the detector;
* each of the card's 4 links to the node carries two towers, phi 2l (low half) and 2l+1 (high
  half) of the card.

The positive and negative cards send the same |ieta| on the same clock. A node therefore gets
both halves of one eta ring together. With 40 frames an event takes 40 clocks, which is 6.7
bunch crossings. A node's next event arrives 54 clocks later, so each card needs only one
buffer per node, and an assertion checks that a buffer is never overwritten while it is still
being sent. Up to seven nodes receive at the same time.

The patch panel is pure wiring: card *c*, link *l* towards node *n* arrives on input 4c + l of
node *n*. A node has 72 input links. It turns each frame into a 72-tower ring per side and
outputs the ring on the next clock, so tower-level algorithms could start on the first frame.
It also accumulates the event's total ET and its number of non-zero towers. The result appears
one clock after the last frame. `align_err` flags a frame on which the 72 links were not all
valid together.

Latencies at the defaults, from `bx_start`:

* encoder: 1 clock;
* first frame out of the card: 2 clocks;
* node result: 42 clocks;
* demux output: **44 clocks** (7.3 bunch crossings).

The results arrive in event order by construction. The demux waits for the node whose turn it
is, forwards the result with an event number, and counts any result that comes from another
node as an ordering fault.

## Where this departs from the paper, and what it adds

The items that come from the paper are:

* the region grid and the non-zero-count pile-up estimator with one LUT per eta slice;
* the slice-mean heavy-ion background and the largest-2x2 heavy-ion jet;
* 2x1 taus with a two-energy isolation LUT and an eta correction LUT;
* the barrel/endcap split, the HF-sum centrality in place of the isolated taus, and the coarse
  isolated-tau ETs in the old HF-sum bits;
* the four highest candidates, the 9-crossing e/gamma delay and the ~20-crossing latency
  budget;
* Stage 2's 16-bit ECAL+HCAL word, 18 cards of 8 phi x half eta, 9 nodes with 72 links, node =
  event mod 9, centre-out readout, 32 bits per link per 240 MHz clock, about 7 crossings per
  event, and a demux.

This design chose the following without guidance from the paper:

* all bit widths, the LUT address coding and the default LUT contents;
* the local-maximum and tie rules, the seed threshold and the tau partner choice;
* how e/gamma isolation uses the regions;
* which global sums are made and how;
* the number of centrality thresholds;
* the tower-word bit layout, the link-to-tower mapping and the fact that both sides send the
  same |ieta| together;
* the merge-tree sorter and all pipeline depths.

Departures from the paper:

* Stage 1 processes the whole grid every 40 MHz clock. The paper's card instead runs most
  algorithms on half the detector at a time at 80 MHz. The throughput is the same (one event
  per 25 ns), but the hardware cost is different.
* Stage 2 nodes in the real system find up to twelve jets, taus and e/gammas at tower
  granularity. Here a node only forms the ring stream, the total ET and the tower multiplicity.
* Spare (redundant) Layer-2 nodes, and the extra output links a Layer-1 card has for them, are
  left out.
* Optical links are modelled as parallel words at the fabric clock, with no serialisers,
  8b/10b coding or link alignment.

## What is not here

* The e/gamma and tau clustering, jet finding and twelve-candidate sorting of Stage 2.
* The link hardware.
* The RCT, which is the input of Stage 1.
* The Global Trigger link formats: outputs are parallel fields.
* The readout of inputs and outputs to the data acquisition.
* The Ethernet/IPbus control path: the `cfg` write port replaces it.

## Simulating

Every testbench checks itself. It prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog. Example with plain Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal --top-module tb_s1_jet_finder \
    rtl/calo_pkg.sv rtl/s1_jet_finder.sv tb/tb_s1_jet_finder.sv -o sim
./obj_dir/sim
```

For a testbench of a module that instantiates others, add the `rtl/` files it uses, or pass
`-y rtl` so that Verilator finds them by name. The simulator has only two states, so the
testbenches initialise whatever they drive. The designs hold `initial` LUT contents and need no
reset for Stage 1. Stage 2 needs `rst` high for a few clocks before the first `bx_start`.

| testbench | what it shows |
|---|---|
| `tb_s1_pu_subtract` | all 22 LUTs loaded; 40 back-to-back events from empty to full occupancy |
| `tb_s1_hi_bkg_subtract` | slice means, including a saturated event |
| `tb_s1_jet_finder` | single deposit, equal neighbours, phi wrap, forward; random events, both modes |
| `tb_s1_tau_finder` | LUT loading, isolated and non-isolated taus, random events, both modes |
| `tb_s1_egamma_select` | isolation against a loaded LUT; barrel/endcap split |
| `tb_topk_sorter` | 40 pipelined sets with many ties against a stable reference selection |
| `tb_s1_energy_sums` | single and balanced deposits; random events against a real-number model |
| `tb_s1_centrality` | threshold bits across a swept HF sum |
| `tb_s1_mp7_processor` | 30 back-to-back events checked at exactly 18 clocks; pile-up; heavy ion |
| `tb_s2_tower_encoder` | all 65 536 ECAL/HCAL pairs |
| `tb_s2_tm_serializer` | event-to-node assignment, frame order and timing, 7 nodes sending at once |
| `tb_s2_ctp7_layer1` | every link word of 12 events against a model encoder |
| `tb_s2_l2_node` | ring mapping, totals, alignment error |
| `tb_s2_demux` | in-order forwarding and a stray-result fault |
| `tb_s2_tm_system` | 24 events through the full 18-card / 9-node system; constant 44-clock latency |
| `tb_l1calo_run2_top` | both stages at default sizes, running together; counts each mechanism |

The larger testbenches (`tb_s1_mp7_processor`, `tb_l1calo_run2_top`) take several minutes to
compile, because Verilator flattens the whole grid into C++. They then run in seconds.
