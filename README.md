# A neural-rendering coprocessor built on explicit data reuse

Rendering a new view of a scene from a voxel-grid radiance field means marching a
ray through the grid for every pixel. At each occupied point on the way, the
eight feature vectors around the point are fetched and interpolated. A tiny MLP
then turns the result into a colour and a density, and the samples are composited
front to back. The arithmetic is cheap. What costs time and energy is memory
traffic. Neighbouring rays touch almost the same voxels, but they reach them at
different moments. A naive pipeline therefore fetches the same feature data again
and again, and its eight interpolation reads collide in the same SRAM bank.

This RTL implements a coprocessor that schedules the work so that data already on
chip is used before it is evicted. There is one scheduler at each level of the
data hierarchy:

| level | data reused | mechanism |
|---|---|---|
| pixel order | neighbouring rays | rays are generated in Z (Morton) order, in 2x2 packets |
| coarse voxel (CV) | occupancy bitmaps and MLP weights of the CV | packets are grouped by the CV they are in before fine traversal |
| fine voxel | 64-bit micro occupancy line | fine and micro traversal share one cached line |
| feature cache | feature vectors of a fine voxel | sample sets whose features are on chip are issued first |
| SRAM banks | bank bandwidth | vertex-to-bank mapping that never conflicts within a sample |

Everything is written in synthesizable SystemVerilog. Off-chip memory, the host
and foundry SRAM macros are not part of it: memories are plain arrays, and the
external memory is reached through simple request/response ports.

## Scene representation and number formats

- **Grids.** Space is a 128³ grid of *micro voxels*, each holding one occupancy bit.
  - A *fine voxel* is 4³ micro voxels. Its 64 micro bits form one 64-bit line.
  - A *coarse voxel* (CV) is 8³ fine voxels.
  - The scene therefore has 32³ fine voxels and 4³ = 64 CVs.
- **Tags.** A fine voxel is named by a 15-bit tag {z,y,x} and a CV by a 6-bit tag.
- **Bitmaps.**
  - The coarse bitmap (64 bits) and the fine bitmap (32768 bits) are loaded by the host into registers or arrays.
  - Micro lines live in external memory. A 1024-line (8 KB) direct-mapped cache holds recent ones.
- **Features.** Vectors are stored at the corners of micro voxels, so a fine voxel has 5³ = 125 vertices.
  - Each vertex holds 16 INT4 components, which is one 64-bit word.
  - Interpolated features are 16-bit.
- **MLP.** Each CV has its own weights.
  - The network is 16 → 16 (ReLU) → 4 with INT8 weights.
  - The four outputs are r, g, b and the density.
- **Positions and directions.** These are signed fixed point with 8 fractional bits, in micro-voxel units.
  - Positions are 18 bits and directions are 16 bits.
  - A ray advances by exactly its direction vector per step, so the host scales the direction to the step length it wants.
- **Transmittance and colour.** Transmittance T is Q0.16 and colour accumulators are 24 bits.
  - A ray stops contributing once T falls below the host-set threshold `t_thr`.

## Ray front end: Z-order generation, box test, entry search

- **Packet generation (`zorg`).** `zorg` steps a 22-bit counter by 4.
  - The even counter bits form X and the odd bits form Y.
  - Each step therefore yields a 2x2 quad of pixels, which is one *ray packet* (RP). Consecutive packets stay spatially close.
- **Out-of-bounds jump.** For an image that is not a power-of-two square, a counter value outside `bx`/`by` (largest valid coordinates) is not stepped through one by one. The counter jumps over the whole aligned Z block that begins there, one jump per cycle.
- **Ray directions.** `zorg` computes the four ray directions as `D0 + x·DX + y·DY` from a pose the host has pre-processed.
- **Axis order.** `zorg` also records in which order the axes dominate the packet's mean direction (ADOrder) and their signs. This order sets the comparison priority when the packet's lagging ray is chosen later.
- **Box test (`abt`).** `abt` drops rays that miss the scene's bounding box. It uses a slab test without division, comparing cross products.
- **Entry search (`tsps`).** `tsps` binary-searches, one bit per cycle, the first integer step at which each surviving ray is inside the box. A packet with no surviving ray is counted as discarded and produces a black quad.

## RP buffer

Every packet in flight has an entry in a 32-entry buffer (`rp_buffer`), addressed
by a 5-bit pointer. The pointer is what travels through the pipeline. An entry holds:
- the four positions and directions;
- the alive bits and the axis order;
- T and the colour of each ray;
- the count of samples still in flight.

Each unit reads and writes the buffer through its own port. A packet leaves as a
pixel quad once traversal has finished with it and its sample count is zero.

## Hierarchical ray marching

Traversal is split into two units with a reorder buffer between them.

**Coarse traversal (`ctu`).** This unit takes new packets and packets coming back
from fine traversal. It advances, one step per cycle, the rays that lie in empty
CVs. When the packet's lagging ray stands in an occupied CV, it emits a
*candidate RP* (CRP) tagged with that CV. A packet with no live ray left is marked
done.

**Choosing the lagging ray (`lfau`).** The four rays of a packet may sit in
different voxels. `lfau` picks the voxel that is furthest behind along the travel
direction:
- It is a chain of three comparators, one per axis, taken in ADOrder priority.
- Each stage keeps only the rays that are minimal on its axis among those the previous stage kept.
- Negative-direction axes are inverted first.

The result is the selected tag and a mask of the rays in it. The same unit is used
with 2-bit tags for CVs and with 5-bit tags for fine voxels.

**Grouping by CV (`rp_rob`).** The reorder buffer has 8 entries, each a queue of
8 packets with a CV tag.
- **Insert.** A CRP joins the fullest entry that already has its tag and still has room. Otherwise it takes an empty entry.
- **Schedule.** One tag is *current*. Packets of the current tag are sent to fine traversal, taken from its fullest entry first.
- **Placeholders.** A scheduled packet keeps a *placeholder* in its entry.
  - A *reschedule* puts the packet back into its own entry. This happens when it is still in the same CV but has moved to another fine voxel.
  - A *retire* frees the place. This happens when the packet leaves the CV or terminates.
  - Because of this, a reschedule always finds room.
- **Tag switch.** When no packet of the current tag is queued, the unit switches tag.
  - It prefers a tag from a small recent-tags record, whose CV data is most likely still cached.
  - Otherwise it takes the lowest non-empty entry.
- **Events.** It reports tag switches and tags held by several entries.

**Fine and micro traversal (`ftu`).**
- **Fine step.** For the current packet, `ftu` chooses the lagging fine voxel with its own `lfau`.
  - Rays in an empty fine voxel step (*fine skip*).
  - For a non-empty fine voxel it fetches the 64-bit micro line once, from `mgb_cache`.
- **Micro step.** It then steps the rays of that fine voxel through it.
  - A ray that stands on an occupied micro voxel produces a sample.
  - The samples of one step form a *sample set* (CCRP_SP): up to four rays of one packet in one fine voxel.
  - The set is sent to the sample issuer, and the packet's in-flight count goes up.
- **Outcomes.** When the packet's rays have left the fine voxel, one of three things happens:
  - *reschedule*: still in the CV;
  - *CV transition*: no live ray left in the CV, so the packet is retired from `rp_rob` and returned to `ctu`;
  - *termination*: every ray has left the box or has fallen below `t_thr`.
- **Divergence.** Rays of one packet that are in different fine voxels are counted as *divergence*.

## Out-of-order sample issue (`ooo_si`)

Sample sets wait in an 8-register *location shifter*. Each register holds a state
(unchecked / miss / hit), the set's control fields and the base address of its
positions. When a set leaves, the younger ones shift down.
- **Hit check.** Each cycle the oldest unchecked set asks the feature cache whether its fine voxel is present.
  - If not, the cache starts or merges a fetch and the set is marked *miss*.
  - A fill broadcast from the cache turns every waiting set of that fine voxel into *hit*.
- **Issue.** Each cycle the oldest hit set that has no older set of the same packet still waiting is issued.
  - The sample coordinate calculator splits each ray position into the micro location inside the fine voxel and the 8-bit fractions.
  - It then sends one sample per cycle to the interpolator, with `last` on the final ray of the set.
- **Bypass.** A younger set overtaking an older waiting one is counted as a *bypass*.

The per-packet rule keeps compositing front to back: samples of one ray must reach
the compositor in depth order, otherwise the image changes. Sets of different
packets still reorder freely.

## Conflict-free feature cache and interpolation (`cfiu`)

This is the part with the most design in it. An interpolation needs the eight
vertices around a sample, in one cycle, from eight single-port banks.

**Vertex ID.** Give every vertex the 3-bit ID {z parity, y parity, x parity} of
its integer coordinates. The eight corners of any micro voxel then have eight
different IDs, wherever the voxel lies. If vertex ID *v* always went to bank *v*,
the eight reads would never collide.

**The problem with that mapping.** A fine voxel has 5³ vertices. The eight ID
classes have very different sizes: 27, 18, 18, 12, 18, 12, 12 and 8 vertices
(3 or 2 values per axis). Bank 0 would fill up long before bank 7.

**The fix: rotate per slot.** The cache holds up to 256 fine voxels, one per
*slot*. In slot *s*, vertex ID *v* is stored in bank `v XOR (s mod 8)`. Across any
aligned group of eight slots, every bank receives every class exactly once. So
every bank holds exactly 125 words per group, and the eight banks have the same
depth: 32 groups × 125 = 4000 of 4096 words.

**Addressing.** The word address of a vertex is:

    group·125 + (sizes of the classes stored in this bank by the earlier slots of the group)
              + (index of the vertex within its class)

The middle term is a small function of (bank, slot mod 8). The last term is the
vertex's rank among the vertices of its class, in x, y, z order.

**Reading.** The read side inverts the mapping. For bank *b*, the vertex ID it
serves is `b XOR (s mod 8)`. From that ID and the sample's micro location, the
unit knows which corner of the micro voxel it is. It computes that corner's
trilinear weight as the product of the three (frac or 256 − frac) factors, shifted
down to 9 bits. All eight banks are read in the same cycle. The weighted sum of
the eight INT4 vectors gives the 16 × 16-bit interpolated feature.

**Around the banks:**
- **Hit state monitor.** A valid bit and a tag per slot. The mapping is direct: slot = low 8 bits of the fine-voxel tag.
- **MSHR.** There are four outstanding fetches. A miss on a fine voxel already being fetched is merged, not fetched twice.
- **Reservation monitor.** Each slot counts the sample sets that were told "hit" and have not yet been interpolated. A slot with reservations is never replaced. A miss that would have to evict it is refused, and its set stays unchecked and asks again later. This is the event counted as *reservation blocked*.
- **Data rearrangement.** A fetch returns the fine voxel's 125 vectors, x fastest. Each word is written straight to its bank and address as it arrives. When the last word is in, the slot becomes valid and a fill is broadcast to the sample issuer.

One sample is in the interpolation pipeline at a time, and it takes two cycles.

## MLP engine (`tme`) and compositing (`vru`)

**`tme`.** This unit holds 34 words of 128 bits per CV:
- 16 words of hidden weights;
- 1 word of hidden biases;
- 16 words of output weights;
- 1 word of output biases.

Biases are INT8 too and count 256 times their value.

It evaluates the per-CV MLP with one multiply-accumulate row per cycle. For every
sample it reads the weights of the sample's CV. Its latency is NFV + NH + 3 = 35
cycles. It accepts the next sample when the result has been taken.

**`vru`.** This unit reads the ray's T and colour from the RP buffer and computes
`α = 1 − exp(−σ)`.
- The exponential is `2^(−σ·log2 e)`, using a 16-entry table of 2^(−k/16) with linear interpolation between entries and a right shift for the integer part.
- σ is the optical depth of one step in Q4.4.
- It adds `T·α·c` to the colour, multiplies T by (1 − α) and writes both back.

## Top level (`edr_nr_top`)

**Host set-up.** Before a frame, the host loads:
- the camera pose (`pcp`);
- the image bounds `bx`/`by`;
- the bounding box;
- the coarse bitmap `cbm`;
- the fine bitmap (`fbm_we`/`fbm_addr`/`fbm_data`);
- the MLP weights (`wt_*`);
- `t_thr`.

Then it pulses `start`. `flush` invalidates both caches when the scene changes.

**External memory.** This is two request/response ports:
- `mgb_mem_*`: one 64-bit micro line per request, held until answered.
- `fdr_*`: one fine voxel per request, answered by 125 words in vertex order.

**Results.**
- Pixel quads come out on `pix_*` with their pixel coordinates, not in raster order.
- `done` rises when the frame is fully drained.
- `ev[15:0]` pulses once per event, for performance counters. The bits are: coarse skip, ROB tag switch, tag in several entries, fine skip, reschedule, CV transition, termination, ray divergence, micro-bitmap miss, feature miss, MSHR merge, reservation blocked replacement, out-of-order bypass, sample composited, pixel quad out, packet discarded by the box test.

## Where this RTL departs from the published design

**Traversal and arithmetic**
- **Number formats.** The original uses a custom floating-point format for ray generation and marching, which is not published. Here everything is fixed point.
- **Direction normalisation.** There is none; the host provides scaled directions.
- **Leaf tier.** The original marches in four tiers: coarse, fine, leaf and micro. Here the leaf tier is folded into micro traversal over the cached 64-bit line. The reuse of that line, which is the tier's purpose, is kept.
- **Grid size.** The 128³ micro grid is this design's choice; the published text does not state the grid resolution.

**MLP**
- **View direction.** The MLP gets no frequency-encoded view direction, so colour does not depend on the view direction.
- **Network shape.** 16-16-4 is this design's choice.
- **Weight storage.** Weights for all 64 CVs sit in one array (about 35 KB). The original uses an 8.25 KB weight cache refilled per CV.

**Scheduling**
- **Tag switch.** The reorder buffer switches tag once no packet of the current tag is queued, rather than waiting until all of them have retired. This keeps fine traversal busy.
- **Per-packet order in the issuer.** This is not in the original description. Without it a ray could composite a far sample before a near one.
- **Early termination.** A ray's T is checked when fine traversal looks at it, while samples of that ray may still be in flight. How many extra samples a ray takes before it stops therefore depends on timing. Two renders of the same view can differ by up to `(t_thr·255 >> 16) + 1` per colour channel, which is below one LSB for small thresholds.

**Not included:** external DRAM, its controller, the host and foundry SRAM macros.

## Verification

Every unit has a self-checking testbench in `tb/`. Each compares the unit against
values computed independently in the testbench and ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_zorg` | packet sequence against a bit-interleaving model on a 7x5 image, in-image flags, directions, axis order, cycle bound for the bounds jumps |
| `tb_abt` | hit/miss against a real-valued slab test (grazing rays excluded) |
| `tb_tsps` | entry step against a linear scan, latency TB+1 cycles |
| `tb_lfau` | selection against a key-comparison model for all six axis orders and signs |
| `tb_ctu` | rays step only in empty CVs, every CRP names an occupied CV with a live ray, return path, done |
| `tb_rp_rob` | insert, schedule, reschedule, retire, spill-over, refusal when full, tag switch, recent-tag preference |
| `tb_ftu` | no occupied micro voxel is skipped, sample validity, the three outcomes, micro-line reuse |
| `tb_mgb_cache` | hits, misses, refills, flush |
| `tb_ooo_si` | every ray issued exactly once, only after its fill, per-packet order, bypass occurs |
| `tb_cfiu` | interpolated features against a trilinear model on vertex coordinates, all eight slot rotations, merges, reservations, 125 words per bank per group |
| `tb_tme` | MLP outputs bit-exact against a model, latency 35 cycles, back-pressure |
| `tb_vru` | exp within 1 %; constant-colour rays converge to that colour |
| `tb_rp_buffer` | allocation, per-client access, output only after samples drain |
| `tb_edr_nr_top` | full chip at default parameters: three frames of a 12x12 image |

**End-to-end test.** `tb_edr_nr_top` models both external memories, a random scene
and random weights. It checks:
- that every quad comes out once;
- that quads whose rays miss the box are black;
- that `done` behaves;
- that two renders of the same view agree within the early-termination tolerance.

It also counts each of the 16 events and fails if any never occurs.

**Simulating.** Any testbench runs with plain Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl --top-module tb_edr_nr_top \
        rtl/edr_pkg.sv tb/tb_edr_nr_top.sv
    ./obj_dir/Vtb_edr_nr_top

Replace `tb_edr_nr_top` with the name of any other testbench. The full-chip test
takes about a second of simulation time on a workstation.

**Changing sizes.** Parameters with the sizes above are at the top of each module,
and the shared widths are in `rtl/edr_pkg.sv`. The balanced bank mapping relies on
eight banks and on 125 vertices per fine voxel. The grid widths in the package must
stay consistent with one another: 7 micro bits = 5 fine + 2 micro-within-fine, and
5 fine bits = 2 CV + 3 fine-within-CV.
