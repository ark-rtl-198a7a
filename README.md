# ARK-style CKKS accelerator in SystemVerilog

Fully homomorphic encryption (CKKS) computes on polynomials of degree
N = 2^16 whose coefficients are held in residue-number form: each polynomial is
a stack of "limbs", one per 60-bit prime, and each limb is 2^16 64-bit words.
Nearly all the work is number-theoretic transforms (NTT/INTT), base
conversion (BConv, a small matrix times a very wide matrix), coefficient
permutations (automorphisms) and element-wise modular arithmetic. This RTL
builds the accelerator organisation published as ARK. It has four clusters of
256 lanes, one lane per sqrt(N) coefficients. An NTT unit sits between two
register files and so splits each cluster into a *coefficient region* and an
*evaluation region*. A dedicated BConv unit is built as a systolic array, and a
lane-aligned network switches a polynomial between *limb-wise* distribution
(each cluster owns whole limbs, which the NTT needs) and *coefficient-wise*
distribution (each cluster owns a quarter of every limb, which BConv needs).

Everything here is synthesizable SystemVerilog with the published sizes as
parameter defaults: 256 lanes, 4 clusters, 6 MACs per BConv lane, 128 MB of
scratchpad per cluster and 19 MB of register files per cluster. Two parts are
not included. The HBM interface is left as plain data ports. The static
schedule that drives every unit is a per-cycle control word, one per cluster,
supplied from outside.

## Data layout: limbs, vectors and lanes

A limb of N = LANES^2 words is stored as LANES *vectors* of LANES words.
Vector `i`, lane `j` holds coefficient (or evaluation point) `i + LANES*j`.
Every unit consumes and produces one vector per cycle, so one limb takes 256
cycles per unit at full size. Register files and the scratchpad are
lane-banked: one address selects one vector, and lane `k` of every memory only
ever talks to lane `k` of the datapaths. The network has the same rule. Only the
NTT unit's transpose and the automorphism unit move data across lanes.

All arithmetic is modulo a prime q < 2^63 that is chosen per limb. The NTT and
BConv datapaths use Montgomery multiplication with R = 2^64. Their constants
(twiddles, twisting factors, base-table entries, the BConv-mult constant) are
therefore supplied in Montgomery form, `x * 2^64 mod q`, together with
`qinv = -q^-1 mod 2^64`. The multiply-add units use Barrett reduction and take
`mu = floor(2^128 / q)`.

## The NTT unit (`nttu`)

The N-point transform is done in four steps. First a LANES-point NTT runs
across the lanes of each vector (`ntt_network`, a fully pipelined column of
log2(LANES) butterfly stages). Then every element is multiplied by a twisting
factor w^(i*k) (`twisting_unit`). Then the LANES x LANES block is transposed
(`transpose_unit`), and finally a second LANES-point NTT runs across the lanes.
The output is in the same vector/lane layout as the input: X[k1 + LANES*k2]
appears in output vector k1, lane k2.

- **Bidirectional pipeline.** With `dir = 0` (NTT) data enters from RF(Coeff)
  and passes network A, twist, transpose, network B and then the BConv-mult
  unit in bypass, into RF(Eval). With `dir = 1` (INTT) it enters from RF(Eval)
  and visits the blocks in reverse order with inverse roots. Both
  directions use the same hardware and have the same latency,
  `3 + 2*log2(LANES)*4 + 3 + LANES + 1` cycles from first vector in to first
  vector out. At full size that is 327 cycles, after which a new limb can
  follow every 256 cycles.
- **On-the-fly twisting factors.** The factors of lane k over the vectors
  form the geometric progression 1, w^k, w^2k, ... Each lane has two
  generators, each a 2-cycle Montgomery multiplier in a loop. One starts at 1
  and the other at w^k, and both multiply by w^(2k). They serve even and odd
  vectors alternately, so a factor is ready every cycle. Per limb and
  direction, only three vectors of constants are loaded: the start values and
  the ratio.
- **BConv-mult unit.** On the INTT path every output word is multiplied by one
  constant per limb. This is the first step of BConv (multiplying by
  p̂_j^-1 mod p_j). The INTT's 1/N scaling is folded into the same constant.
- **Configuration.** Twiddles, start values, ratios (per direction) and the
  BConv-mult constant are written one vector per cycle through
  `cfg_we/cfg_dir/cfg_sel/cfg_vec`. `q`, `qinv`, `dir` and the configuration
  must stay constant while a limb is inside the unit.

The transforms are *cyclic*: X[k] = Σ a[n]·w^(nk). The negacyclic weighting
that CKKS needs is expected to be folded into the data or constants by the
schedule. INTT uses the same Cooley-Tukey butterflies with the inverse root.

## The BConv unit (`bconv_unit`, `bconv_lane`)

The second step of BConv computes out[r][n] = Σ_j x[j][n]·T[r][j] mod q_r.
This is an (nout × alpha) base table T times an (alpha × N/4) slice of the
polynomial, the slice a cluster holds in coefficient-wise distribution. Each
of the 256 lanes owns a stripe of columns.

**One lane** is a 1 × 6 output-stationary systolic array. Its input is one
coefficient per cycle, in the order limb j (outer) and column c = 0..3
(inner), so a block is alpha × 4 elements. MAC m computes the inner product of
base-table row m with four columns at once. It keeps four partial sums in a
rotating 4-entry output buffer, so it needs a new table value only every
fourth cycle. A 4-entry input buffer passes each coefficient on to MAC m+1,
which therefore works exactly 4 cycles behind MAC m. Sums stay unreduced at
128 bits. When the last limb of a block arrives, MAC m sends its four sums out
on four consecutive cycles, 4 cycles after MAC m-1. This way one multiplexer
and one shared Montgomery reduction serve all six MACs. Timing: an element
that enters at cycle t is used by MAC m at t+1+4m. The reduced sum of MAC m
for that element's column leaves the lane at t+4+4m.

**The unit** adds six broadcast units (BrUs) and a sequencer.
- BrU m holds the table rows r ≡ m (mod 6). It sends one value to MAC m of
  every lane once every four cycles, delayed by 4m cycles to follow the
  systolic skew.
- The sequencer walks row blocks of 6 output limbs, then column groups of 4,
  then limbs, then columns, reading one RF(NoC) word per lane per cycle.
- If alpha < 6, it pads every block to 24 cycles (bubbles), so that
  consecutive blocks never emit from two MACs in the same cycle. An assertion
  checks this.
- Rows beyond `nout` in the last row block are computed but not written.

A job of `nrb` row blocks and `ngroups` column groups keeps `busy` high for
`nrb·ngroups·4·max(alpha,6) + 31` cycles.

RF(NoC) layout for a job: input limb j, column n at `in_base + j*cols + n`;
output limb r at `out_base + r*cols + n`, with `cols = 4*ngroups`. The table
is loaded with `bt_we` (row, column, value in Montgomery form). The per-row
primes are loaded with `q_we`.

## Switching distributions over the network (`noc`)

The network is one 4:1 multiplexer per destination cluster and lane. Lane k of
a destination can only receive lane k of a source, and it has a one-cycle
latency. A BConv routine runs as follows:
1. INTT of the limbs held in each cluster goes into RF(Coeff).
2. Four exchange rounds follow. In round t, cluster s sends the quarter of its
   limb that belongs to cluster (s+t) mod 4, and destination d selects source
   (d−t) mod 4. No two sources ever target the same destination. The data lands
   in RF(NoC) in the BConv input layout.
3. BConv runs in every cluster.
4. The reverse exchange sends each output limb's quarters to the cluster that
   owns that limb, into RF(Coeff).
5. The NTT brings the limbs into RF(Eval).

A receiving cluster writes at `rx_base + count`. The control word reloads
`rx_base` once per chunk, and it may do so in the cycle the previous chunk's
last vector arrives.

## The automorphism unit (`autou`)

ψ_r maps index n to n·g mod N with g = 5^r mod N. Index n = i + 256·j moves
to vector i' = i·g mod 256 and lane (j·g + h) mod 256, where
h = ⌊(i·g mod N)/256⌋. A whole vector therefore maps onto a whole vector, and
the unit needs only a permutation within a vector:
- One 16-bit product i·g gives i' and h.
- Eight pipelined stages follow. Stage s merges pairs of 2^s-word chunks,
  either kept in order or swapped.
- With the lanes wired in bit-reversed order, the stage that fixes destination
  bit t can decide for a whole chunk at once. The rule is a single XOR of bit
  t of the destination and source lane numbers. Because g is odd, that bit
  depends only on lane bits the chunk shares.

The latency is 1 + log2(LANES) cycles, at one vector per cycle. The output
carries i', which the cluster adds to a write base.

## Evaluation region: MADUs, register files, scratchpad

- **MADU** (two per cluster): per lane a·b, a·b+c, a+b or a−b mod q, with
  3-stage Barrett reduction, one vector per cycle. Operands come from RF(Eval)
  ports. Operand b or c can instead come from the scratchpad read data.
  Results go back to RF(Eval) at an address carried through the pipeline.
- **Register files** (`vrf`): RF(Eval) 8 MB, RF(Coeff) 7 MB, RF(NoC) 4 MB at
  256 lanes, 19 MB in total. Each functional unit has its own read and write
  port, and reads take one cycle. RF(Eval) has 9 read and 5 write ports.
  Two writes to one address in one cycle trigger an assertion.
- **Scratchpad**: 65536 vectors × 256 lanes × 8 B = 128 MB per cluster,
  single-ported, read latency one cycle. It exchanges vectors with HBM (the
  `hbm_rd_vec` / `hbm_wr_vec` ports) and with RF(Eval).

## Control: the per-cycle control word

`ark_pkg::cluster_ctrl_t` is the interface a static (VLIW-style) schedule
drives, one word per cluster per cycle. The rules:
- An `*_issue` or read field in cycle t reads the source register file in
  cycle t. The data reaches the unit in cycle t+1.
- The NTT unit and the network receive path write at `base + counter`. The
  counter is reset by `ntt_wb_set` / `noc_rx_set`.
- AutoU and MADU results carry their own write address through the pipeline.
- Moduli (`ntt_q`, `md_q`, `md_mu`) are read at every pipeline stage. They
  must be held on the control word until the unit is empty.
- Scratchpad: `sp_en`/`sp_we`/`sp_addr`.
  - Write data comes from HBM (`sp_wsrc_hbm = 1`) or from the RF(Eval) store
    read of the previous cycle (`ev_st_rd`).
  - Read data goes to RF(Eval) (`sp_ld_wb` the next cycle), to a MADU operand,
    or to HBM (`sp_to_hbm`, giving `hbm_wr_valid` the next cycle).

`tb/tb_ark_top.sv` contains a complete example schedule. See its
`build_schedule` task.

## Modules

| module | role |
|---|---|
| `ark_pkg` | widths, default sizes, latencies, enums, `cluster_ctrl_t` |
| `mont_redc`, `mont_mul` | Montgomery reduction / multiplier (2 or 3 cycles) |
| `butterfly_unit`, `ntt_network` | radix-2 butterfly; LANES-point pipelined NTT |
| `twisting_unit`, `transpose_unit`, `bconv_mult_unit` | NTT unit blocks |
| `nttu` | 4-step NTT/INTT unit |
| `bconv_lane`, `bconv_unit` | systolic BConv lane; BConv unit with broadcast units |
| `autou` | automorphism unit |
| `madu` | Barrett multiply-add unit |
| `vrf`, `scratchpad` | lane-banked register file; single-ported scratchpad |
| `cluster` | one cluster |
| `noc` | inter-cluster multiplexer network |
| `ark_top` | four clusters and the network |

## Simulating

Each testbench in `tb/` checks itself and prints
`TB_RESULT checks=N failures=M`. Expected values are computed independently
in `tb_ark_pkg`, using 128-bit modular arithmetic, a textbook radix-2 reference
NTT and direct sums. Latencies and rates are checked where the design fixes
them. For example:

```
tb=tb_ark_top
verilator --binary --timing --assert -Wno-fatal -j 8 \
    rtl/ark_pkg.sv tb/tb_ark_pkg.sv $(ls rtl/*.sv | grep -v ark_pkg) tb/$tb.sv \
    --top-module $tb -Mdir obj_$tb -o sim
./obj_$tb/sim +verilator+rand+reset+2
```

The two packages go first. Replace `tb` by any testbench name in `tb/`.

`tb_ark_top` runs a whole BConv routine on all four clusters, followed by an
automorphism, multiply-adds and the path back to HBM, about 660 cycles. It
counts 18 mechanisms (HBM→scratchpad, INTT, both exchange directions, BConv
writes, BConv bubbles, dropped rows, NTT, AutoU, each MADU operation, ...).
`tb_cluster` runs the same scenario on a single cluster, with the network
replaced by a loop back. The unit testbenches run at 4 to 16 lanes.

**Largest size simulated:** 16 lanes (N = 256) with four clusters for the
whole design, and 16 lanes for the NTT network. At the default 256 lanes the
design compiles and lints, but simulating it takes more than ten minutes to
build, so no full-size simulation result is given.

## Where this design departs from the published one

- **Clocking.** One clock everywhere. The published design runs the
  scratchpad at 1.25 GHz and RF(Coeff) double-pumped at 2 GHz.
- **Register-file ports.** The published register files are single-ported,
  multi-banked SRAMs. Here each unit has its own port, which stands for a
  conflict-free bank assignment made by the schedule. The 8/7/4 MB split of
  the 19 MB is this design's choice.
- **Cyclic transforms.** The NTT is cyclic and INTT reuses Cooley-Tukey
  butterflies. The published figure shows separate butterfly types for the
  two directions, and negacyclic weighting is left to the schedule.
- **Automorphism mapping.** The published unit works on the evaluation
  representation with an address mapping that is not spelled out. This unit
  applies i → i·5^r mod N to the vector/lane layout above. Its
  chunk-swapping structure is the published one.
- **Not modelled.**
  - The HBM stacks and controllers: plain data ports instead.
  - The instruction sequencer: the schedule arrives as control words.
  - Power and area.
  - The on-the-fly limb extension and key-reuse algorithms. These are
    software scheduling techniques that need no special hardware here, beyond
    the NTT unit used on generated limbs.
- **BConv.** At most 24 output limbs and alpha ≤ 6 per job, which covers
  (N, L, dnum) = (2^16, 23, 4). The RF(NoC) address layout and the job
  interface are this design's.
- **MADU operations** (mult, mult-add, add, sub) and their operand sources
  are this design's reading of "multiply-add unit".
