# Displacement-vector search for JPEG XS Intra Pattern Copy

Intra Pattern Copy (IPC) is a screen-content tool for JPEG XS. It predicts wavelet
coefficients of the current precinct from coefficients of an already reconstructed
precinct, displaced by a *displacement vector* (DV). Choosing the DV is the expensive
part: for every group of coefficients, every candidate reference has to be subtracted
and the resulting residual has to be priced in bits. This RTL implements that search as
a streaming hardware pipeline. Coefficients are read from DRAM one IPC Unit at a time,
residuals are formed by a sign-magnitude subtractor, and a four-stage pipeline prices
each residual unit by its GCLI (greatest coded line index) cost. The cheapest candidate
per unit and group is kept. The results (DV, bit cost, group index, unit index) go to a
pattern-compensation stage, which is not part of this design.

The block structure, the names of the blocks and pipeline registers, the 32-bit
sign-magnitude coefficient format, the four IPC Groups, the 2560x4 precinct and the
group-aligned memory layout follow the published architecture. The numbers the
publication does not give (units per precinct, band-block lengths, search window, cost
formula, FIFO depths, handshakes) are choices made here. They are listed under
"Departures and choices".

## Coefficient organisation

A precinct is 2560 coefficients wide and 4 rows high per colour component. That gives
10240 coefficients for each of Y, U and V. The wavelet bands (5 horizontal and 2
vertical decomposition levels) are collected into four **IPC Groups** of
320x4, 320x4, 640x4 and 1280x4 coefficients. Within a group, coefficients belonging to
one spatial position form an **IPC Unit**. All coefficients of a unit share one DV. A
unit of group *g* is the concatenation of up to four **band blocks**, one per sub-band
of the group.

With the default of 80 units per precinct, the unit lengths are 16, 16, 32 and 64
coefficients. The default band-block split is:

| group | blocks (coefficients) | unit length | group size per component |
|-------|-----------------------|-------------|--------------------------|
| 0     | 2, 2, 4, 8            | 16          | 1280                     |
| 1     | 8, 8                  | 16          | 1280                     |
| 2     | 16, 16                | 32          | 2560                     |
| 3     | 32, 32                | 64          | 5120                     |

The split lives in `tlb_ram`, a 4x4 table of 16-bit lengths. A host can rewrite it
between searches, for example at a precinct change, and every block picks the new
lengths up. Reset loads the table above (`ipc_pkg::TLB_DEFAULT`).

### Memory layout

DRAM holds two banks, one of original and one of reconstructed coefficients. Each word
holds one coefficient, and addresses count words. Inside a bank, precincts follow each
other; a precinct holds Y, then U, then V; inside a component all units of group 0 come
first, then group 1, and so on. Every unit is therefore one contiguous run:

```
entry(g, u) = bank_base + precinct*3*10240 + yuv*10240
            + NUM_UNITS * (unit_len(0) + ... + unit_len(g-1))
            + u * unit_len(g)
length      = unit_len(g)
```

A single address plus a length fetches a whole unit as a burst. A precinct-ordered
layout would need one address per band block.

## What is searched and how it is priced

For each original unit *u* and group *g*, the candidates are the reconstructed units
*u+d* of the same group, with `DV_MIN <= d <= DV_MAX` (default -4..+3). Candidates
falling outside the precinct are skipped. At the first unit the window is 0..+3, and at
the last unit -4..0. The reference precinct (`ref_prec`) and the original precinct
(`orig_prec`) are independent inputs.

The residual is `original - reconstructed`, kept in sign-magnitude with a 32-bit
magnitude. The residuals of a unit are cut into **code groups** of up to 4
coefficients, and a code group never crosses a band-block boundary. For each code group:

```
OrAll = OR of the residual magnitudes
GCLI  = index of the highest set bit of OrAll, plus 1   (0 if OrAll = 0)
bits  = n * GCLI + (GCLI + 1)                            n = coefficients in the code group
```

That is, n magnitude bit-planes of GCLI bits each, plus a unary code for GCLI itself.
A candidate's cost is the sum over its unit. The lowest cost wins. On a tie the
earlier candidate (smaller *d*) is kept.

## Dataflow

```
           +------+  req   +-----+  cmd  +--------------+  DRAM request / data
  start -->| CTRL |------->| CMD |------>| offchip_xfer |<=====================> DRAM
           +------+        +-----+<------+--------------+
             | sel           |  word + destination
             |        +------+------+
             |        v             v
             |   Q0 Q1 Q2 Q3   C0 C1 C2 C3        (sync_fifo, 512 words each)
             |----> MUX           MUX
             |        \           /
             |        SIG_MAG_SUB         (one pair per cycle, 1 cycle latency)
             |             | by group
             |        R0 R1 R2 R3
             |----->     MUX
             |            |  residual + group + tag(DV, unit, first, last)
             |        GCLI_CAL            (stages 0-2)
             |        DV_UPDATE           (stage 3)
             |            v
             |  dv_valid, dv, dv_bits, dv_grp, dv_unit
```

### CTRL: three queued steps

The hardest part to follow is how CTRL keeps the FIFOs full without letting any of them
overflow. CTRL walks the jobs *(unit u, group g, candidate d)* in the order unit, then
group, then candidate. Three steps handle each job, and each step has its own pointer
into the job stream:

1. **fetch** – Each group's FIFOs have a credit counter, starting at the FIFO depth.
   When Q[g] and C[g] both have at least `unit_len(g)` credits, CTRL reserves them and
   asks CMD for two reads: original unit *(g, u)* into Q[g], then reconstructed unit
   *(g, u+d)* into C[g]. The job then goes into job queue 1. Because the space is
   reserved before the read is issued, read data never needs back-pressure.
2. **sub** – For the oldest job in queue 1, CTRL points the Q and C multiplexers at
   group g. It then pops Q[g] and C[g] together, one pair per cycle, into SIG_MAG_SUB.
   Each pair returns one Q/C credit and takes one credit of R[g]. On a job's first pair,
   the job moves to job queue 2.
3. **gcli** – For the oldest job in queue 2, CTRL points the R multiplexer at g and
   forwards `unit_len(g)` residuals to GCLI_CAL. Each residual carries the job's tag:
   DV, group, unit, and whether this is the first or last candidate of *(g, u)*.

Fetch runs ahead of the other two steps, so DRAM latency is hidden while the per-group
FIFOs fill. The query unit is fetched again for every candidate. This keeps the job
self-contained but doubles DRAM traffic.

### CMD and the transfer engine

`ipc_cmd` computes the entry address and the length (from the TLB) and holds the
command in an output register. It also writes each returning word into the Q or C FIFO
named by the word's destination tag.

`offchip_xfer` splits a command into bursts of at most 16 words. It keeps up to 8
bursts outstanding in an in-order tag queue, and it labels each returning word with
its destination and an end-of-command flag.

The DRAM side is a plain request channel (`dram_req_valid/ready`, word address,
length) and a read-data channel (`dram_rsp_valid`, data). Read data comes back in
request order, one word per cycle at most, and cannot be stalled.

### DV comparison pipeline

| stage | logic | registers at its end |
|-------|-------|----------------------|
| 0 | CalIdx: position in unit → band block and position in it; CalSize: code-group size; CalWidth: unit length | DataBuffer (magnitude), BandIdx (block position and length), GrpSize, UnitWidth, DV |
| 1 | GetOrMask: OR over the code group; closes it after GrpSize residuals, at a block end or at the unit end | OrAll, OrIdx (code-group index in the unit), DV_D1 |
| 2 | CalGCLI: GCLI, code-group cost, sum over the unit (restarts at OrIdx 0) | BitsTest, DV_D2 |
| 3 | Compare + MUX: first candidate or strictly smaller cost replaces BitsBest/BestDV | BitsBest, BestDV; result register on the last candidate |

Stages 0–2 are `gcli_cal`, stage 3 is `dv_update`. The pipeline accepts one residual
per cycle and has no back-pressure. A unit's result appears 4 cycles after its last
residual enters.

## Using the top level

`dv_search_top` parameters, with their defaults: `NUM_UNITS=80`, `DV_MIN=-4`,
`DV_MAX=3`, `FIFO_DEPTH=512`, `JOBQ_DEPTH=8`, `MAX_BURST=16`, `OUTSTANDING=8`.
`FIFO_DEPTH` must be at least the longest unit, and the window must contain 0.

1. Optionally load the TLB with `tlb_wr_en/grp/band/len`, one entry per cycle, while
   `busy` is low. Writes during a search are ignored.
2. Set `orig_base`, `recon_base`, `orig_prec`, `ref_prec` and `yuv`. Hold them until
   `done`.
3. Pulse `start`. `busy` rises, and the DRAM ports start issuing reads.
4. There is one `dv_valid` pulse for each (unit, group), in unit-major, group-minor
   order, 4·`NUM_UNITS` results in all. `done` pulses in the same cycle as the last
   result.

## Performance

With the defaults, one component of a precinct reads 159,744 words (8 candidates
clipped at the edges, 2 words per coefficient per candidate). In the full-size test it
takes about 188,000 cycles, about 18.3 cycles per coefficient. The DRAM model accepts a
request in 70% of cycles and skips 10% of data cycles. The single one-word-per-cycle
DRAM port is the bottleneck; the pipeline behind it would accept one coefficient per
cycle. At 100 MHz that is about 5.5 M coefficients per second per component.

The published FPGA build reports 38.3 Mpixels/s at 100 MHz. It does not give its search
range, memory word width or degree of candidate parallelism, so the two figures cannot
be compared. A wider DRAM word and reuse of the query unit across candidates would be
the first steps towards it.

## Departures and choices

- **Chosen here, not in the source:**
  - 80 units per precinct and the band-block lengths (group totals and block counts do
    match the published figures);
  - the search window -4..+3 in units, with clipping at the precinct edges;
  - the GCLI cost formula and the 4-coefficient code group, taken from JPEG XS practice;
  - the tie rule;
  - the credit-based "FIFO underfilled" rule;
  - FIFO, queue and burst sizes;
  - all handshakes and the DRAM interface;
  - one search per start for one component, with the reference precinct given
    explicitly.
- **Interpreted:** the source says the bit cost is found by OR-ing each group's
  residuals and then adding up the GCLI overhead over all groups. Here "group" is read
  as the JPEG XS code group inside one IPC Unit, since the best DV is kept per IPC Group
  and unit. A DV shared by all four IPC Groups would need the costs summed across
  groups instead.
- **Simplified:** the query unit is re-read for each candidate. GCLI_CAL handles one
  residual per cycle. The published build uses far more registers and 17 DSPs in this
  block, which suggests it evaluates several candidates in parallel; that is not
  reproduced.
- **Outside the design:** the DRAM (a behavioural model, `tb/dram_model.sv`, stands in),
  the colour and wavelet transforms that produce the coefficients, and pattern
  compensation.
- The baseline precinct-ordered layout is not implemented.

## Files

- `rtl/ipc_pkg.sv`: widths, default TLB, structs (`fetch_req_t`, `dest_t`, `dv_tag_t`).
- `rtl/dv_search_top.sv`: top level.
- `rtl/ipc_ctrl.sv`, `rtl/ipc_cmd.sv`, `rtl/offchip_xfer.sv`, `rtl/tlb_ram.sv`: control,
  addressing, transfer.
- `rtl/sync_fifo.sv`, `rtl/group_mux.sv`, `rtl/sig_mag_sub.sv`: residual datapath.
- `rtl/gcli_cal.sv`, `rtl/dv_update.sv`: DV comparison.
- `tb/tb_<module>.sv`: one self-checking testbench per module.
- `tb/tb_dv_search_top.sv`: end to end at reduced size (12 units, 64-word FIFOs, so
  the credit stall occurs).
- `tb/tb_dv_search_full.sv`: end to end with all defaults.
- `tb/dram_model.sv`: behavioural DRAM with random back-pressure, latency and gaps.

Each end-to-end test fills the DRAM model with an original component and a
reconstructed one, the latter made of shifted, noisy copies of the original. It runs
three searches, one per colour component: the first with the default TLB, the other two
with a reloaded TLB and other precinct numbers. It checks every result against a reference model in the
testbench. It also counts the FIFO credit stalls, DRAM back-pressure, burst splits,
clipped windows, DV improvements, ties and TLB reloads, and fails if any of them never
occurred. Every testbench prints `TB_RESULT checks=N failures=M`.

Run one with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/ipc_pkg.sv tb/tb_dv_search_full.sv --top-module tb_dv_search_full -o sim
./obj_dir/sim +verilator+rand+reset+2
```

The simulator is two-state, and every register that is read is reset.
