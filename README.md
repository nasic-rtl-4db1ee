# NASiC plane: expert selection and multibit multiply-accumulate on the same NAND string

A mixture-of-experts (MoE) layer runs only one of several expert weight matrices per token. When
those matrices sit side by side in a compute-in-memory (CIM) array, a conventional array still drives
every expert with the input and throws most of the results away. This design makes the
selection inside the memory string instead. Each vertical 3D NAND string carries two kinds of cells:

* a few **CAM cells** on its top word lines (WLs). They hold the identifier of the expert whose
  weight is stored lower down.
* **CIM cells** on the remaining WLs. They hold that expert's weights.

The router's expert identifier is applied to the CAM WLs of every block at once. A string whose
CAM entry differs from the query cannot conduct. Its weight therefore adds nothing to the
bit-line (BL) current, whatever the input is. Per string the result is `y = M · (x · W)`, where
`M` is the CAM match bit. The experts can then be interleaved over the whole plane. All inputs
are applied in one computation cycle, and each BL sums only the selected expert's products.

Two circuit techniques raise the work done per cycle:

* **Block-wise thermometer weights.** The 4 strings that share a block's ground select line are
  read together, and a signed multibit weight is spread over the strings of a *pair* of blocks.
* **Source-line inputs.** A signed input is applied as two complementary source-line (SL)
  voltages, one per block of the pair. The NAND string limits its own current, so the SL
  voltage sets the current.

With m-state cells the selected WL is read with m−1 read pulses. Each pulse is sensed and
digitised separately, and the digital results are summed.

This repository has synthesisable RTL for all the digital parts (encoders, sequencer,
accumulation, plane control). It also has a behavioural model of the NAND array that counts
string currents in integer units, so the whole plane can be simulated bit-exactly.

## Plane geometry

| quantity | value | parameter |
|---|---|---|
| WLs per string | 128 | `N_WL` |
| blocks (one SL each) | 1024 → 512 block pairs | `N_BLOCKS` |
| BLs (page width) | 131072 | `N_BL` |
| strings (SSLs) per block and BL | 4 | `N_SSL` |
| CIM cell states | 4 (2-bit) | `M_STATES` |
| CAM cells per string | 1 cell, 2 bits (4 experts) | `N_CAM_CELLS`, `CAM_BITS` |
| CIM layers | 128 − 2·N_CAM_CELLS = 126 | derived |
| input dimension per expert | 128 | `INPUT_DIM` |
| ADC | 8-bit per BL, external | `ADC_BITS`, `ADC_LSB` |

At these defaults one computation gives, on each of the 131072 BLs, a dot product of 128 inputs
with 128 weights of the selected expert. The plane holds 4 experts interleaved (512 pairs = 4 ×
128), in each of the 126 CIM layers.

## Cell model and integer units

The array model rests on one rule, shared by all blocks (`nasic_pkg::cell_conducts`):

* a flash transistor with threshold state `s` conducts when its gate is at pass voltage, or at
  read level `L` with `s ≤ L`;
* a string conducts only if its select transistors are open and every one of its 128
  transistors conducts;
* a conducting string carries a current set by its SL level. The levels 0, V0.5, V1, V1.5, V2
  are coded as 0…4, and the code is the current in units of I0/2;
* a non-conducting string carries no current. Off-current is taken as zero.

Threshold states are 3-bit codes (`vth_t`). A WL bias is `{pass, level}` (`wl_bias_t`). BL
currents are 16-bit counts of I0/2.

## CAM cell: two transistors in series

A b-bit CAM cell is two transistors in series. Entry `E` is programmed as the states
`(E, 2^b−1−E)`. Query `Q` is applied as the read levels `(Q, 2^b−1−Q)`. The first transistor
conducts if `E ≤ Q`. The second conducts if `2^b−1−E ≤ 2^b−1−Q`, that is if `E ≥ Q`. So the pair
conducts only when `E = Q`. For the 2-bit cell:

| Q / E | gate levels (VS1, VS2) | thresholds (VTH1, VTH2) |
|---|---|---|
| 00 | VR0, VR3 | VTH00, VTH11 |
| 01 | VR1, VR2 | VTH01, VTH10 |
| 10 | VR2, VR1 | VTH10, VTH01 |
| 11 | VR3, VR0 | VTH11, VTH00 |

Several cells can be stacked on one string for more experts. All cells must match. The uppermost
cell holds the most significant bits (`cam_encoder`, parameters `N_CELLS`, `CAM_BITS`).

## Dual-block thermometer weights

Let a pair of blocks have `N = 4` strings per block on each BL and m-state cells. Then:

* weights range over `−H … +H` with `H = N·(m−1)/2`. That is ±6 for 4-state cells, ±2 for
  2-state cells and ±14 for 8-state cells;
* with the shifted weight `S = W + H`, string `i` (i = 1…N) of block 1 is programmed to state
  `⌊(S + N − i)/N⌋`;
* block 2 holds the complement `m−1−state` on the same WL.

The states of block 1 form a staircase that adds up to exactly `S`. For example, with m = 4:
W = +3 gives block 1 `[3,2,2,2]` and block 2 `[0,1,1,1]`. W = 0 gives `[2,2,1,1]` and
`[1,1,2,2]`. Weights outside ±H are clamped and flagged (`weight_encoder`).

## Signed inputs on the source lines

Input `x ∈ {−2…+2}` sets SL1 = 2 − x on block 1 and SL2 = 2 + x on block 2 (`input_encoder`). The
pair has no negative current. The sign of the product comes from which block carries the larger
share of the weight.

## Multi-pulse read and what a BL receives

The selected CIM WL is read with m−1 pulses at levels 0 … m−2. The other WLs of the string stay
at pass voltage. Over all pulses, a state-`s` cell on block 1 conducts `m−1−s` times and its
complement on block 2 conducts `s` times. Summing over the pair gives

```
I_pair = (2−x)·Σ(m−1−s_i) + (2+x)·Σ s_i = 2·N·(m−1) + 2·x·W      [I0/2]
```

Each block pair adds a constant `2·N·(m−1)` (24 units, or 12·I0, at the defaults) plus twice its
product. A pair whose CAM does not match adds nothing. With exactly `INPUT_DIM` matched pairs
per BL, the result is

```
y = (Σ_pulses code·ADC_LSB − 2·N·(m−1)·INPUT_DIM) >>> 1
```

`bl_accumulator` computes this per BL. The offset subtraction assumes that each BL sees
`INPUT_DIM` matched pairs, which the interleaved mapping below guarantees.

The ADC range sets `ADC_LSB`. In the worst case of one pulse, all 128 matched pairs conduct with
their full 4 + 4 units, which is 2048 units on a BL. An 8-bit code with `ADC_LSB = 8` covers 0…2040.
Digitising each pulse separately therefore costs up to 7 units of rounding per pulse. The
full-size test measures a largest error of 10 on `y` over three pulses.

## Timing of one computation (`cim_sequencer`)

```
cycle        0        1 .. T_PRE          T_PRE+1 ..                      end
op_valid  ‾‾\_
bias_on   ______/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\______
             precharge: pass on WLs, CAM query, SSL/GSL open, SL inputs
read_on   ____________________/‾‾‾‾‾‾‾‾‾ L=0 ‾‾‾‾‾‾‾‾ L=1 ‾‾‾‾ L=m-2 ‾\_
sense     ______________________________/‾\_______/‾\______/‾\________
adc_sample _______________________________/‾\_______/‾\______/‾\______
res_valid _______________________________________________________/‾\_
```

* Precharge lasts `T_PRE` cycles: unselected WLs at pass voltage, CAM WLs at the query levels,
  select lines open, SL levels applied.
* Each read pulse lasts `T_READ` cycles. The array is sensed on its last cycle, and the ADC codes
  are taken one cycle later.
* `res_valid` comes `T_PRE + (m−1)·T_READ + 2` cycles after the operation is accepted. That is
  16 cycles at the defaults.
* `op_ready` is low while programming or computing.

`T_PRE = 8` and `T_READ = 2` are placeholders for analog settling times, not measured values.

## Interleaved expert mapping

Pair `p` always receives input `x[p mod INPUT_DIM]`. So pair group `g = p / INPUT_DIM` is one copy
of the input vector. For 4 experts, BL group `c` of pair group `g` stores expert
`(c − g) mod 4`:

```
           BL group 0   1   2   3
pairs   0..127   E0    E1  E2  E3
      128..255   E3    E0  E1  E2
      256..383   E2    E3  E0  E1
      384..511   E1    E2  E3  E0
```

Every BL then sees each expert in exactly one pair group, and every expert is spread over the
whole plane. Choosing this layout is the job of whoever programs the plane. The RTL itself only
broadcasts the inputs and the query. `tb_nasic_full` programs this layout and checks every BL.

## Top-level interface (`nasic_top`)

* **Programming**: `pgm_valid`/`pgm_ready` handshake, one full page row per request.
  * `pgm_cam = 0`: writes `pgm_weight[N_BL]` into CIM layer `pgm_layer` of pair `pgm_pair`.
    This takes 2 cycles, one block each, and writes all 4 strings of the block at once.
    `pgm_clamped` reports clamped weights.
  * `pgm_cam = 1`: writes the entries `pgm_entry[N_BL]` into every CAM WL of both blocks of the
    pair. This takes 4·N_CAM_CELLS cycles.
* **Compute**: `op_valid`/`op_ready`, `op_expert`, `op_layer`, `op_x[INPUT_DIM]`. The result
  `res_y[N_BL]` (signed, `ACC_W` bits) comes with a one-cycle `res_valid`.
* **ADC**: the BL converters are outside the module. `bl_current[N_BL]` goes out. `adc_code[N_BL]`
  must be valid in the cycle where `adc_sample` is high. `tb/bl_adc_model.sv` is a behavioural
  converter (floor of current/LSB, saturating).

## Module list

| file | role |
|---|---|
| `rtl/nasic_pkg.sv` | geometry constants, state and bias types, conduction rule |
| `rtl/cam_encoder.sv` | expert identifier → CAM gate levels; entry → CAM thresholds |
| `rtl/weight_encoder.sv` | signed weight → dual-block thermometer states |
| `rtl/input_encoder.sv` | signed input → SL levels of the pair |
| `rtl/cim_sequencer.sv` | precharge / multi-pulse read / sense / accumulate control |
| `rtl/bl_accumulator.sv` | per-BL sum of ADC codes, offset removal, halving |
| `rtl/nand_plane.sv` | behavioural NAND array: storage, string conduction, BL currents |
| `rtl/nasic_top.sv` | programming FSM, WL/SL drive, wiring of the above |

`nand_plane` is a simulation model, not hardware. It stores only rows that have been
programmed, and unprogrammed rows read as erased (state 0), so the full 128k-BL plane fits in a
few GB of simulator memory. Its sequential block uses blocking assignments to a dynamic queue on
purpose, because it models storage rather than describing flip-flops.

## Simulating

Each testbench checks itself and ends with `TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary -j 4 --top-module tb_nasic_top \
  rtl/nasic_pkg.sv rtl/cam_encoder.sv rtl/weight_encoder.sv rtl/input_encoder.sv \
  rtl/cim_sequencer.sv rtl/nand_plane.sv rtl/bl_accumulator.sv rtl/nasic_top.sv \
  tb/bl_adc_model.sv tb/tb_nasic_top.sv
./obj_dir/Vtb_nasic_top
```

Replace the top and the testbench file for the others. The block testbenches need only the
package and their own module.

| testbench | what it does |
|---|---|
| `tb_cam_encoder` | all query/entry pairs for 1 and 2 stacked cells. Match only when equal |
| `tb_weight_encoder` | published 2- and 3-state tables cell by cell. Sum/complement/range for m = 2, 3, 4, 8 |
| `tb_input_encoder` | all input codes, clamping |
| `tb_cim_sequencer` | pulse count, levels, sense/accumulate timing, latency |
| `tb_bl_accumulator` | random codes against a reference, clear, offset |
| `tb_nand_plane` | small plane, random rows, SSL/GSL gating, erased rows, CAM matching |
| `tb_nasic_top` | small plane (16 blocks, 8 BLs). Random programming and operations, compared with a reference model. Counts gating, expert and layer switches, clamping, back-pressure and signed results |
| `tb_nasic_stacked` | two stacked 2-bit CAM cells (16 experts) and 8-state cells (7 pulses). Counts gating by each CAM cell alone |
| `tb_nasic_full` | default parameters, 131072 BLs. Programs a layer for 4 interleaved experts and runs two of them. About 1 min and 1.6 GB |

## Where this design departs from or goes beyond the source description

* **Which threshold conducts.** One published figure labels the SLC weight `1` with the higher
  threshold conducting. That contradicts its own I–V sketch and the later coding tables. This
  design uses the rule "state ≤ read level" throughout.
* **Cell size.** The default CIM cell has 4 states, the 2-bit cell used in the published
  accuracy and energy study. The flash technology itself is listed as 3-bit. `M_STATES = 8` is
  supported and simulated end to end.
* **Stacked CAM cells** must all have the same width. The mixed 1-bit + 2-bit example for eight
  experts is not supported. Two 2-bit cells (16 experts) or one 3-bit cell do the same job.
* **Digital pulse summation and offset removal** are choices of this design. The source states
  only that the result is the sum over the pulses. `ADC_LSB`, `ACC_W`, `T_PRE` and `T_READ` are
  assumed values.
* **Not modelled**: device variation, off-current, read disturb, bias generators, the SAR ADC
  circuit and the MoE router. The router is an input (`op_expert`), and the ADC is a
  testbench model.
* **Capacity.** At the defaults the plane holds 4 experts with 128 inputs each. Expert ratios of
  1/8 or lower at 128 inputs need more pairs than the 512 of one plane, so they need several
  planes or a smaller input dimension per plane.
