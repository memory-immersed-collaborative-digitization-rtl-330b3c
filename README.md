# Memory-immersed collaborative digitization: RTL model

A compute-in-memory (CiM) array leaves its result, the multiply-average (MAV) of a
weight row and an input vector, as an analog voltage, and it normally needs an ADC
at each array to turn it into a digital value. That ADC can take more area than the
array. In memory-immersed digitization there is no dedicated ADC. A neighbouring
CiM array acts as the DAC of a successive-approximation converter. Its column lines
(CL) are the unit capacitors: precharge k of its 32 column lines to VDD, discharge
the rest, short them together, and its sum line sits at k/32 VDD. One clocked
comparator between the two sum lines is all that is added. The arrays take turns:
while one computes, its neighbour digitizes, and then they swap. When one computing
array is wired to several neighbours, each neighbour holds a different reference at
once and the comparison becomes a Flash step.

This RTL models the four-array configuration of the published 65 nm test chip. It
has arrays A1-A4, each with 16 rows and 32 columns of 8T cells, and three
comparators. One parameter extends it to the larger network of the hybrid scheme,
in which three computing arrays share three converter arrays. The converter is a 5-bit SAR, a 2-bit Flash or a hybrid of the two, and
its search can be symmetric or asymmetric. The digital parts are synthesizable
SystemVerilog. The analog parts (sum-line charge sharing, comparators, analog
multiplexers) are behavioural models with ideal behaviour.

## How a value is computed and digitized

### The 8T array and its column lines (`cim_array_8t`, `cl_precharge`, `sum_line`)

Each cell is a 6T SRAM bit with a two-transistor product port. A row line (RL,
horizontal) selects one stored weight row. The input lines (IL, vertical) carry one
bit plane of the input vector. Every column line is precharged to VDD first. It
discharges only when both the selected weight bit and its input bit are 1
(single-ended 8T evaluation). The sum line then merges all 32 column lines. Let m
be the number of lines still at VDD:

    V_MAV = m / 32 * VDD,   m = 32 - popcount(W[row] & input_plane)

With uniform random weight and input bits a line discharges with probability 1/4.
V_MAV therefore clusters around 0.75 VDD and is far from uniform over the range.
The asymmetric search below exploits that.

An array used as a DAC selects no row. Its column lines therefore keep the pattern
of the precharge array: `cl_precharge` sets lines 0..k-1 high for trial code k. The
merged sum line is k/32 VDD, one column line per LSB, which is why a 32-column
array gives a 5-bit converter. The sum line keeps its voltage after the merge
gates open. The computing array holds V_MAV this way for the whole conversion.

Voltages are carried as `mic_pkg::volt_t`, an 11-bit fixed-point number in which
1024 stands for VDD. The sum-line model uses equal line capacitances and no leakage.
The comparator model decides `IN1 >= IN2` while its clock `CMP` is high, and outputs
0 while `CMP` is low. An exact tie therefore counts as "MAV at or above the
reference", and code k means k/32 <= V_MAV < (k+1)/32 VDD. An input at full scale
(m = 32) saturates at code 31.

### The search (`dig_controller`)

The controller keeps the interval [lo, hi] of codes that can still be the answer,
starting at [0, 31]. A comparator decision of 1 on trial code s gives [s, hi], and a
decision of 0 gives [lo, s-1]. The conversion ends when lo == hi.

| mode | arrays used | cycles (5 bits) | references |
|---|---|---|---|
| SAR | one partner on comparator 0 | 5 | s = ceil((lo+hi)/2), starting at 16 (half the lines at VDD) |
| FLASH | three partners, comparators 0-2 | 1 | 8, 16, 24: gives the two MSBs |
| HYBRID | FLASH cycle, then one partner | 1 + 3 | as FLASH, then as SAR inside the Flash interval |

The three Flash decisions form a thermometer code. The controller decodes it by
counting the ones, so a single bubble moves the result by one interval and never
produces an unrelated code. In FLASH mode the result is the lower end of the Flash
interval (two valid MSBs, three zero LSBs).

**Asymmetric search** (`asym = 1`). The first reference is the pivot P, by default
code 24 (0.75 VDD, the centre of the MAV distribution). The second is P-1 if the MAV
is below P and P+1 if it is at or above P. An MAV at code P-1 or P is therefore
decided in two comparisons. Deeper splits balance probability instead of code count.
For the remaining interval [lo, hi] the trial code is the s that best halves the
expected share of MAVs in the interval:

    s = argmin over lo < s <= hi of | 2 CDF[s] - CDF[lo] - CDF[hi+1] |

Here CDF[c] is the expected fraction of MAVs below code c. CDF is built at
elaboration from the binomial distribution of 32 column lines that each discharge
with probability 1/4:

    P(c) = C(32, 32-c) (1/4)^(32-c) (3/4)^c,   code 31 also takes c = 32

Each code's weight is raised by 1/128 of the total. Without that floor the rare low
codes would be searched almost linearly, up to 24 comparisons. With it the search
never needs more than 8 comparisons and averages 3.63 on that distribution, against
5 for plain SAR. The published figure is about 3.7, and the end-to-end test measures
3.77 on 160 random conversions. The published work gives only the tree's first
three nodes (0.75, 0.71875 and 0.78125 VDD, codes 24, 23 and 25). The balancing rule
below them and the floor are this design's reconstruction.

In HYBRID and FLASH modes with `asym = 1` the three Flash references are P-1, P and
P+1, which are the first two levels of the same tree in one cycle. For the common
codes P-1 and P the hybrid conversion ends after that single cycle. A pivot below 2
or above 30 falls back to the symmetric search. The CDF table is fixed, so a network
whose MAV statistics differ (sparser activations, small weights) gets a correct but
less efficient search.

Timing: start is sampled at the end of the MAV cycle. Each following cycle is one
comparison. The reference pattern, the sum-line merge and the comparator strobe all
happen combinationally within that cycle, and the decision is registered at its end.
`done` rises in the cycle after the last comparison, together with `code` and
`ncmp`, the number of comparison cycles used. While `hold` is high a running
search stalls: no reference, no strobe and no change of state. The network below
uses this to make controllers take turns.

### Sequencing a dot product (`flow_mapper`, `bitplane_input`, `weight_row_selector`)

An operation processes one stored weight row against a 4-bit input vector,
starting with bit plane 0. Each plane takes one MAV cycle, `ncmp` comparison cycles
and one hand-over cycle. The result of each plane is emitted with its plane number
and the index of the computing array. Combining the planes by shift-and-add is left
to the consumer of the stream.

In SAR mode `cim_sel` chooses which array of the A1/A2 pair computes. With `alt` set
the pair runs all planes, swaps roles (`swapped` pulses) and runs them again on the
other array's copy of the row. This is the "compute here, digitize there, then
switch" pattern of a coupled pair. In FLASH and HYBRID modes A1 always computes, and
A2, A3 and A4 supply references 0, 1 and 2.

### Lower precisions

The top's `NBITS` parameter (default 5) can be set to 3 or 4 on the same 32-column
arrays. Each LSB is then L = 32 / 2^NBITS column lines, and trial code k precharges
k*L lines of the DAC array. A MAV with m lines at VDD reads min(m / L, 2^NBITS - 1).
The asymmetric pivot in the configuration word stays a 5-bit fraction of VDD and
is scaled to `NBITS` (0.75 VDD is code 6 at 3 bits). The controller's statistics
table follows the coarser codes through its `NLINES` parameter. Flash still
resolves two bits, so a hybrid conversion takes 1 + (NBITS - 2) cycles: 2, 3 and 4
cycles at 3, 4 and 5 bits. That matches the published latency curve of the
in-memory converter (200, 300 and 400 ns at a 10 MHz clock), so it is also why
this design uses three SAR cycles, not four, after the Flash cycle at 5 bits.

### Configuration (`scan_chain`)

The configuration word `mic_pkg::cfg_t` is 10 bits, listed MSB first:

| bits | field | meaning |
|---|---|---|
| 9:8 | mode | 0 SAR, 1 FLASH, 2 HYBRID |
| 7 | asym | asymmetric search |
| 6:2 | pivot | asymmetric pivot code (reset 24) |
| 1 | cim_sel | SAR pair: 1 = A2 computes, A1 digitizes |
| 0 | alt | SAR pair: swap roles after a pass |

Shift the word in MSB first with `scan_shift`, then pulse `scan_update`. The old
word comes out on `scan_out` as the new one goes in. The reset value is SAR,
symmetric, pivot 24, A1 computing.

## Top level (`mic_top`)

Ports: a word-wide SRAM write/read port into any array (`wr_arr`, `wr_row`,
`wr_data`; `rd_arr`, `rd_row`, `rd_data`), the input vector load (`in_load`,
`in_data[col][bit]`), the scan chain, `start`/`row`, and the result stream
(`out_valid`, `out_code`, `out_codes`, `out_plane`, `out_arr`, `out_ncmp`,
`busy`, `done`, `swapped`). `cmp_out[2:0]` shows the comparator outputs. `act_flash` and `act_sar`
mark Flash and SAR cycles, as the chip's probe outputs do.

An `analog_mux` routes the sum lines to the comparators. Every comparator's first
input is the computing array. Comparator 0's second input is the partner (A2, or
A1 when A2 computes), and comparators 1 and 2 take A3 and A4.

### The CiM network (`NDP` = 3)

`NDP` (default 1) is the number of dot-product arrays. They are arrays 0..NDP-1,
and the three converter arrays follow as NDP..NDP+2. At `NDP` = 1 this is the test
chip. At `NDP` = 3 there are six arrays and three digitization controllers, one
per pair. Pair i is dot-product array i with converter array NDP+i, on
comparator i. A hybrid bit plane then runs as follows:

| cycle | what happens |
|---|---|
| 1 | all three dot-product arrays compute their MAV |
| 2, 3, 4 | Flash cycle of pair 0, 1, 2: the three converter arrays hold the shared references, and the other two controllers are held |
| 5, 6, 7 | SAR cycles of all pairs in parallel, each on its own converter array and comparator |
| 8 | hand-over to the next plane |

A plane takes 2 + NDP + (NBITS - 2) cycles, against NDP x (2 + 4) for pairs
converting one after another on one set of converters. Flash mode stops after
the Flash turns. SAR mode needs no turns, so the pairs run in parallel from the
first comparison. `cim_sel` and `alt` swap the roles within every pair. The
results of all pairs come out together on `out_codes`, and `out_code` repeats
pair 0. An assertion checks that no converter array is claimed by two
controllers in one cycle. The turn order and the hold mechanism are this
design's choices. The published scheme gives only the order of the phases.

## Where this model departs from the published design or goes beyond it

- The analog parts are ideal: no comparator offset (the model has an `OFFSET`
  parameter, 0 by default), no capacitor mismatch, no noise. The measured DNL/INL
  of the chip are not modelled.
- The asymmetric tree below its second level, and its fixed statistics table, are
  this design's own reconstruction (see above).
- The published hybrid waveform shows four SAR cycles after the Flash cycle. Two
  Flash bits plus five-bit resolution leave three SAR cycles, as does the
  published latency per precision. Three is what is built.
- The network with several computing arrays is not on the four-array chip. Its
  turn order, the stall mechanism and the shared row and input vector are
  assumptions.
- Input precision (4 bits), plane order, configuration fields, the scan protocol,
  the tie rule, the thermometer precharge pattern and the one-comparison-per-cycle
  timing are choices made here.
- Lower precisions use several column lines per LSB (see below). A precision
  above log2(`COLS`) is rejected: 6 bits would need 64-column arrays.
- Pads, supplies and the bench equipment are outside the RTL.

## Files and simulation

`rtl/mic_pkg.sv` holds the shared constants and types. Every other file in `rtl/`
holds one module. `tb/tb_<module>.sv` is the self-checking test of each module, and
`tb/tb_mic_top.sv` runs the whole design at its default size, end to end. Every test
prints `TB_RESULT checks=N failures=M`.

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/mic_pkg.sv tb/tb_mic_top.sv --top-module tb_mic_top -o sim
    ./obj_dir/sim

The end-to-end test covers:

- SAR with either array of the pair computing, and the role swap;
- symmetric and asymmetric Flash and hybrid modes;
- a saturated conversion (code 31);
- two-comparison asymmetric conversions;
- scan readback;
- the busy time of every operation;
- the average number of comparison cycles on uniform random data.

`tb_dig_controller` sweeps the input voltage over the full range in steps of
1/256 VDD in every mode. It checks the staircase, the comparison counts and the
latency.

`tb_mic_top_staircase` measures the transfer curve of the whole design. It sets
every level m = 0..32 through the stored weights and digitizes it in every mode. It
checks each code against min(m, 31), or against the Flash interval in Flash mode.
It also checks that the codes never decrease as m rises.
`tb_mic_top_precision` runs the same staircase at 3 and 4 bits and checks the
number of comparison cycles of each mode. `tb_mic_network` runs the three-pair
network on random data in every mode. It checks every pair's code and the cycles
per plane. It also counts the Flash turns, the stalls and the parallel SAR
cycles.
