# NATSA: matrix profile next to HBM, in SystemVerilog

Finding the repeated shapes (motifs) and the odd ones out (discords) in a long time
series comes down to one computation, the **matrix profile**: for every window of m
consecutive samples, the distance to its nearest other window and where that window is.
The exact algorithm touches every pair of windows, does only a few arithmetic operations
per pair, and so spends its time waiting for memory. NATSA moves the arithmetic into the
logic layer beside a 3D-stacked HBM memory: a set of small processing units (PUs), each
on its own HBM channel, stream the series from memory and keep the profile in memory,
so nothing has to cross to a host CPU until the result is ready.

This RTL implements that accelerator: the four arithmetic units of a PU, its control
unit and scratchpad, the PU itself with vector lanes, a workload partitioner that shares
the matrix among PUs, and a top level with eight PUs and eight HBM channel ports. The
arithmetic units follow the published block diagram closely; the control, memory layout,
partitioning order and number format are this implementation's own, and are listed in
"Where this departs from the published design" below.

## The computation

For a series T[0..n-1] and window length m there are np = n-m+1 windows. Window x has
mean mu[x] and standard deviation sigma[x]. The z-normalised squared Euclidean distance
between windows i and j is

    d(i,j) = 2 * ( m - (q(i,j) - m*mu[i]*mu[j]) / (sigma[i]*sigma[j]) )

where q(i,j) = sum over s<m of T[i+s]*T[j+s] is the dot product of the two windows. The
profile is PP[x] = min over |x-y| >= excl of d(x,y), with II[x] the y that attains it;
the exclusion zone excl keeps a window from matching its own neighbours.

The trick that makes this cheap is to walk the distance matrix along its **diagonals**
(j - i = k fixed). Along a diagonal the dot product updates in constant time:

    q(i+1, j+1) = q(i,j) + T[i+m]*T[j+m] - T[i]*T[j]

so only the first cell of a diagonal needs a full m-term dot product. The matrix is
symmetric, so only diagonals k = excl .. np-1 are visited, and each distance updates
two profile entries: PP[i] (matched by j) and PP[j] (matched by i).

## The four units of a lane

| unit | module | what it computes | timing |
|---|---|---|---|
| DPU (dot product unit) | `natsa_dpu` | q(0,k) by multiply-accumulate, one sample pair per cycle | m cycles |
| DPUU (dot product update unit) | `natsa_dpuu` | the diagonal step q(i+1,j+1) from q(i,j) | combinational |
| DCU (distance computation unit) | `natsa_dcu` | d(i,j) from q, m, mu and sigma | combinational |
| PUU (profile update unit) | `natsa_puu` | `d <= PP ? (d, j) : (PP, II)` | combinational |

The DCU's operator chain is: m*mu_i*mu_j, subtract from q, divide by sigma_i*sigma_j,
subtract from m, shift left by one. No square root is taken; the squared distance
orders matches the same way. A window with sigma = 0 (a flat stretch) has no defined
z-normalised distance; the DCU returns the largest representable value, so a flat
window never becomes anyone's match. The PUU replaces on equality (`<=`), so of several
equally close windows the last one compared wins.

## Inside a PU

`natsa_pu` holds `LANES` (default 4) copies of the four units, plus one control unit
(`natsa_ctrl`) and one 1 KB scratchpad (`natsa_scratchpad`). A PU is given a **group**
of LANES adjacent diagonals starting at k; lane l works on cell (i, i+k+l). All lanes
are on the same row i, so they share T[i], T[i+m], mu[i], sigma[i] and PP[i], and each
lane has its own column j.

Per lane the dataflow is:

    DPU ─┐
         ├─ mux (qsel) ─ q register ─┬─ DCU ─ d register ─┬─ column PUU ─> PP[j], II[j]
    DPUU ┘                          └─ DPUU              └─ row PUU ──> chain ─> PP[i], II[i]

The column PUU of each lane updates PP[j] with index i. The row PUUs are chained:
lane 0 compares against PP[i] as read from memory, lane 1 against lane 0's result, and
so on, so the row entry leaves the PU as the minimum over all lanes.

### The control sequence

The control unit runs a group in two phases.

1. **Init.** For s = 0 .. m-1 it reads T[s] and, per lane, T[k+l+s] from the channel
   into the scratchpad, then pulses `dpu_en`. After m steps each DPU holds q(0, k+l),
   which the mux (`qsel = 0`) loads into the lane's q register.
2. **Rows.** For each row i it
   * reads six words for the row (T[i], T[i+m], mu[i], sigma[i], PP[i], II[i]) and six
     for each lane's column j;
   * registers the DCU outputs (`d_load`);
   * writes back PP[i], II[i] (end of the row chain) and PP[j], II[j] for every valid lane;
   * loads q(i+1, j+1) from the DPUU (`qsel = 1`).

   The group ends after row np-1-k, the last row of its first diagonal.

Lanes whose column has run past np-1 (the bottom-right corner of the matrix) are
**masked**: their reads are clamped to a valid address, their PUUs pass the old value
through, and their write-backs are skipped.

Because PP[j] is read and written by the PU itself, row after row, on a channel that
keeps requests in order, a later row always sees the earlier rows' updates. Within a
row, the row index i and the columns j are all different (k >= 1), so no entry is
written twice in a row.

### Scratchpad layout

The scratchpad is 256 words of 32 bits. Slot 8*g + f holds field f of operand set g:
set 0 is the row, set 1+l is lane l's column; fields are 0 T[x], 1 T[x+m], 2 mu,
3 sigma, 4 PP, 5 II (slots 6 and 7 unused). Four lanes use 40 words; the layout allows
up to 31 lanes. It has one write port, fed by the memory responses, and one asynchronous
read port per operand, so all lanes read their whole row at once.

### Cost of a group

A group with r rows takes m*(LANES+1) reads for init, then 6*(LANES+1) reads and up to
2*(LANES+1) writes per row, plus the channel latency once per fetch burst. A PU is
therefore bound by its memory channel, which is the premise of the design. In the
end-to-end test (n = 64, m = 8, 8 PUs, 6-cycle latency, 15 % random back-pressure) a
full run takes about 4,000 cycles.

## Memory and the host

Every HBM channel holds, at word addresses given by the `layout` input:

| array | length | written by |
|---|---|---|
| T | n | host |
| mu, sigma | np each | host |
| PP | np | host sets all to the maximum value; PUs update |
| II | np | host sets to 0; PUs update |

Each PU owns one channel and keeps a **private** profile there, so PUs never share a
memory word and need no atomic operations. The host writes the same inputs into every
channel, starts the run, and at the end takes, for each index, the smallest PP over the
eight channels together with its II. mu and sigma are computed by the host.

A channel port is a plain struct (`natsa_pkg::mem_req_t`, `mem_rsp_t`). The PU issues
at most one request per cycle while `mem_ready` is high. Reads are answered in order, any
number of cycles later. Writes are posted. An HBM controller or PHY would sit behind
these ports and is not part of this RTL.

## Sharing the work: the partitioner

`natsa_dispatch` cuts diagonals excl .. np-1 into G = ceil((np-excl)/LANES) groups.
Group g starts at k = excl + g*LANES. Early groups have long diagonals and late groups
short ones, so the partitioner hands them out alternately from the two ends: 0, G-1, 1,
G-2, ... Each group goes to whichever PU is idle, chosen round robin. Every group covers
its diagonals from top to bottom. So a run stopped after any number of groups still
leaves a valid upper bound in every profile entry, and more finished groups tighten it.
This is the *anytime* property. `progress` counts finished groups out of `num_groups`.

## Number format

All values are signed 32-bit fixed point with 16 fractional bits (`natsa_pkg`: `DW`,
`FRAC`). Multiplies keep 64 bits and truncate back. The DCU divides a 64-bit
numerator, truncating toward zero, and saturates the quotient. Indices are 24 bits
(`IW`), so series of up to 16.7 million samples can be addressed. Channel addresses are
24-bit word addresses.

The format has these limits:
* Products are exact only if samples use at most 8 fractional bits. With more, each
  product truncates and the DPUU recurrence accumulates rounding along a diagonal.
* q grows with m*|T|^2 and must stay below 2^15, so the series should be scaled to
  small magnitudes (about |T| < 8 for m = 512).
* m*2^16 must fit in 31 bits, so m < 32768.

## Where this departs from the published design

* **Fixed point instead of floating point.** The published accelerator computes in
  floating point. Here every unit is fixed point (see above), which changes the
  precision and the range, not the algorithm.
* **PU count and lane count.** The published figure shows stacks of units and an
  8-channel HBM interface, but the text gives no numbers. Here there are 8 PUs, one per
  channel, with 4 lanes each (`NPU`, `LANES`).
* **Two PUUs per lane.** The figure shows one PUU stack updating PP[i]. Here a second
  PUU per lane updates the column entry PP[j], so each distance is computed once for
  both halves of the symmetric matrix.
* **Control unit, scratchpad use and memory layout** are this design's own: init with
  the DPU then one row per step with the DPUU, operands re-read from HBM every row,
  private per-channel profiles reduced by the host.
* **The partitioning scheme.** The published work states only that its scheme balances
  load and keeps the anytime property. The alternating two-ended order used here is
  this design's own choice.
* **Single-cycle units.** The DPUU, DCU and PUU are combinational, and the DCU
  includes a 64-by-32-bit divider. This is correct in simulation, but at any useful
  clock the divider would have to be pipelined. The control unit spends a full memory
  round trip per row, so a pipelined DCU would add latency, not lose throughput.
* **Not included:** the HBM stack, its controller and PHY, the silicon interposer, the
  host-side computation of mu and sigma, and the final reduction across channels.

## Files

`rtl/`
* `natsa_pkg.sv`: widths, fixed-point type, channel structs, array layout, `fmul`.
* `natsa_dpu.sv`, `natsa_dpuu.sv`, `natsa_dcu.sv`, `natsa_puu.sv`: the lane units.
* `natsa_scratchpad.sv`: the 1 KB scratchpad.
* `natsa_ctrl.sv`: the PU control unit.
* `natsa_pu.sv`: one PU.
* `natsa_dispatch.sv`: the workload partitioner.
* `natsa_top.sv`: the top level, with NPU PUs and NPU channel ports.

`tb/`
* `hbm_model.sv`: behavioural HBM channel, with fixed latency and optional random
  back-pressure.
* `natsa_ref_pkg.sv`: independent 64-bit reference arithmetic.
* `natsa_tb_cnt_pkg.sv`, `natsa_pu_mon.sv`, `natsa_dispatch_mon.sv`: event counters and
  passive monitors. `tb_natsa_top` binds the monitors into the PUs and the partitioner.
* `tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=F` and has a cycle watchdog.
* `tb_natsa_discord.sv`: the use case, described below.

What the testbenches establish:
* `tb_natsa_dcu` checks each distance bit-exactly against the reference formula, and
  against the real-valued z-normalised distance within rounding.
* `tb_natsa_ctrl` checks the exact address sequence of every read and write for groups
  in the middle, at the end and on a single row.
* `tb_natsa_pu` runs every group of a 48-sample series through one PU and compares the
  profile with a brute-force matrix profile.
* `tb_natsa_top` runs the default configuration end to end on a 64-sample series with a
  flat stretch, over eight channels with back-pressure. It reduces the private profiles,
  compares them with brute force, and counts each mechanism: DPU init, DPUU steps,
  profile replace and keep, masked lanes, flat windows, both ends of the partition,
  every PU busy, and back-pressure. Halfway through the run it also reads the profile
  while the PUs keep working, and checks that every entry is already an upper bound of
  its final value and equals a real distance. This is the anytime property.

* `tb_natsa_discord` runs the default configuration on a 200-sample periodic waveform
  (period 25, window 16) with one abnormal beat. It checks the full profile against
  brute force. It checks that the largest profile value, the discord, falls on the
  abnormal beat, and that windows away from it find their motif a whole number of
  periods away. The run takes about 31,000 cycles.

Equal-distance ties may name a different but equally close II than another order would.
The testbenches therefore check that II points at a window at distance PP outside the
exclusion zone, not at one fixed index.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/natsa_pkg.sv tb/natsa_ref_pkg.sv tb/natsa_tb_cnt_pkg.sv \
        tb/tb_natsa_top.sv --top-module tb_natsa_top
    ./obj_dir/Vtb_natsa_top

Replace `tb_natsa_top` with any other testbench name. To change the series, edit `N`,
`M` and `EXCL` at the top of `tb_natsa_pu.sv` or `tb_natsa_top.sv`. The hierarchical
memory loads in `tb_natsa_top` assume eight channels. To change the hardware, set `NPU`
and `LANES` on `natsa_top`, or `DW`, `FRAC` and `IW` in `natsa_pkg`.
