# BL-VOS: an accuracy-configurable multiplier with block-level voltage overscaling

Voltage overscaling (VOS) lowers the supply of a circuit below what its clock
period needs. Energy falls roughly with the square of the voltage, and the
price is timing errors. In a multiplier the errors matter much less in some
bits than in others. Most VOS multipliers choose a supply for each compressor,
full adder or column of the partial-product tree. That needs many supply-select
signals and many level shifters.

The BL-VOS multiplier applies VOS at a coarser grain. An n x n multiplier is
built from four smaller multipliers and a few adders. Whole blocks are then
placed either in an **accurate region**, on the nominal supply (0.8 V), or in
an **approximate region**, on a lowered supply. Two knobs set the
accuracy/energy trade-off:

* **design time**: where the operands are split (`K`) and which blocks form the
  approximate region (the *structure*, BL-VOS0 to BL-VOS4);
* **run time**: which supply feeds the approximate region. The choices are one
  of five approximate levels, or the nominal supply. The nominal supply makes
  the multiplier exact again without stopping it.

This repository holds synthesizable SystemVerilog for that multiplier: the
datapath, the output registers and the run-time supply selection. It also holds
behavioural models of the two analog parts, the level shifters and the supply
switch box, plus self-checking testbenches. The RTL describes the *logic*, so
it always computes the exact product. The approximation appears only once the
netlist is simulated with gate delays characterised at the lowered voltage (see
"What the RTL does not model").

## How the product is assembled

The operands are split at bit `K` (0 < K < N). The split may be asymmetric:

```
AH = a[N-1:K]   AL = a[K-1:0]      BH = b[N-1:K]   BL = b[K-1:0]
```

Four sub-multipliers form the partial products. Weights are relative to bit 0
of the result:

| block   | width      | weight  |
|---------|------------|---------|
| AL x BL | 2K         | 2^0     |
| AH x BL | N          | 2^K     |
| AL x BH | N          | 2^K     |
| AH x BH | 2(N-K)     | 2^2K    |

The adders combine them (`blvos_core`):

```
Adder1 (N bits)       : {c1, s1} = AL*BH + AH*BL                    weight 2^K
Adder2 (N bits)       : {c2, s2} = s1 + (AL*BL)[2K-1:K]             weight 2^K
HA                    : {hc, hs} = c1 + c2                          weight 2^(N+K)
2(N-K)-bit adder      : s3       = AH*BH + {hc, hs, s2[N-1:K]}      weight 2^2K

product = { s3 , s2[K-1:0] , (AL*BL)[K-1:0] }
          2N-1..2K  2K-1..K    K-1..0
```

The least trusted point is how the last adder is fed. It looks as if it had
three inputs: AH x BH, the half adder and the top of Adder2. But the half-adder
result has weight 2^(N+K), which is bit N-K of that adder. That sits exactly
above the N-K bits `s2[N-1:K]`. So the two join into one operand and the adder
has only two operands. Its own carry out is always 0 for an exact product (the
product fits in 2N bits), so it is dropped. For the symmetric split K = N/2,
the same structure is the classic block multiplier with three N-bit adders.

The sub-multipliers (`blvos_submult`) are plain array multipliers. The adders
(`blvos_adder`) are written as `a + b`. The structure allows any multiplier or
adder architecture here (Dadda, Wallace, ...), so a synthesis tool is free to
choose.

## Supply regions: the five structures

`STRUCTURE` picks the approximate region. The table gives the components on
the lowered supply (x):

| structure | AL*BL | AH*BL | AL*BH | AH*BH | Adder1 | Adder2 | 2(N-K) adder | HA | level-shifted bits |
|-----------|:-----:|:-----:|:-----:|:-----:|:------:|:------:|:------------:|:--:|--------------------|
| BL-VOS0   |       |       |       |       |        |        |              |    | 0                  |
| BL-VOS1   |   x   |       |       |       |        |        |              |    | 2K                 |
| BL-VOS2   |   x   |   x   |       |       |        |        |              |    | 2K + N             |
| BL-VOS3   |   x   |   x   |   x   |       |   x    |        |              |    | 2K + N + 1         |
| BL-VOS4   |   x   |   x   |   x   |   x   |   x    |   x    |      x       | x  | 0                  |

The low-weight blocks are overscaled first. AH x BH, whose errors would land
in the top bits, goes low only in BL-VOS4. In BL-VOS2 either middle block could
be chosen, since both have the same weight; this implementation takes AH x BL.
The default is BL-VOS1 with N = 8, K = 4, the 8-bit case used for the main
comparisons and for the image-processing study.

A **level shifter** is needed wherever a signal from the approximate region
drives a component on the nominal supply. The approximate region counts as
"driving" in two cases:

* its outputs feed a component of the accurate region;
* its outputs go to the product while an accurate region exists.

`blvos_core` places a `blvos_level_shifter` bank on each such crossing, and
nowhere else. The counts in the last column of the table follow from this
rule. They match the published counts, and `tb_blvos_ls_count` checks them through
the `LS_BITS` localparam. BL-VOS4 has no crossing: the whole multiplier,
outputs included, is on the low supply.

## Run-time accuracy: supply levels and the switch box

| level code | name     | supply of the approximate region |
|-----------:|----------|----------------------------------|
| 0          | accurate | 0.80 V (nominal)                 |
| 1          | L1       | 0.75 V                           |
| 2          | L2       | 0.65 V                           |
| 3          | L3       | 0.55 V                           |
| 4          | L4       | 0.45 V                           |
| 5          | L5       | 0.40 V                           |

The voltages are those of the original study. The numbering L1..L5 and the
binary code are this implementation's choices.

* `blvos_vsel_ctrl` holds the level in a register. A higher-level accuracy
  manager writes the register through `cfg_we`/`cfg_level`. The level takes
  effect at the next clock edge. Reset selects the accurate level. Codes 6
  and 7 are ignored and flagged on `cfg_err`. The register decodes the level
  into one-hot enables, one per power switch.
* `blvos_switch_box` is a behavioural model of the power-switch network. It
  has one switch per supply: the five approximate supplies plus the nominal
  one. The nominal switch is what lets the multiplier return to exact
  operation on the fly. The model reports the rail voltage in millivolts
  (`vdd_apprx_mv`). It raises `rail_fault` if no switch or more than one switch
  is closed. An assertion in `blvos_mult` checks that this never happens.

The number of supply-control signals is what the block-level approach saves.
There are 6 enables per multiplier, whatever N is.

## The top: `blvos_mult`

```
            +-----------+   +--------------------------+   +---------+
in_a,in_b ->| operand   |-->| blvos_core (comb.)       |-->| output  |--> out_p
in_valid  ->| registers |   | accurate | approximate   |   | flops   |--> out_valid
            +-----------+   +--------------------------+   +---------+
cfg_we, cfg_level --> blvos_vsel_ctrl --enables--> blvos_switch_box --> vdd_apprx_mv, rail_fault
```

| port            | dir | width | meaning |
|-----------------|-----|-------|---------|
| `clk`, `rst_n`  | in  | 1     | clock; asynchronous active-low reset |
| `in_valid`, `in_a`, `in_b` | in | 1, N, N | operands |
| `cfg_we`, `cfg_level` | in | 1, 3 | write the run-time level (table above) |
| `cfg_err`       | out | 1     | one-cycle pulse: level code rejected |
| `level`, `approx_mode` | out | 3, 1 | level in force; approximate region overscaled |
| `out_valid`, `out_p` | out | 1, 2N | product |
| `vdd_apprx_mv`, `rail_fault` | out | 10, 1 | rail voltage from the switch-box model; fault flag |

Timing:

* Operands presented with `in_valid` at clock edge t produce `out_valid` and
  `out_p` at edge t+2.
* The multiplier takes one product per cycle. It never stalls.
* A level written at edge t applies to the operands processed from edge t+1.

The intended clock period is the delay of the exact multiplier on the nominal
supply. The original study reports 91.6 / 102.4 / 112.8 ps for 8-bit with
k = 2/4/6, and 152.3 / 172.6 / 211.1 ps for 16-bit with k = 4/8/12. The
approximate region is then too slow for that period, and its late bits are
what the output flip-flops sample wrongly. The output flip-flops come from the
original design. The operand registers, the valid bits and the configuration
port were added here so that the datapath is a complete register-to-register
path.

Parameters: `N` (8), `K` (4), `STRUCTURE` (1), `NUM_LEVELS` (5) and
`LS_DELAY_PS` (10, the ~10 ps delay of the chosen level shifter between 0.55
and 0.75 V).

## What the RTL does not model

* **Timing errors under overscaling.** Simulated RTL gives the exact product
  at every level and in every structure. The errors come from gate delays of
  the synthesized netlist at each voltage, which depend on the cell library.
  To study them, synthesize with one power domain per region and level
  shifters at the crossings listed above. Then run the gate-level netlist with
  delays annotated from libraries characterised at 0.40 to 0.75 V.
  `tb_blvos_error_analysis` already computes ER, MED, MRED and NMED, so it can
  drive such a netlist unchanged.
* **Level shifter.** The level shifter is a near-threshold design. Here it is
  only a `#10` ps buffer. Its extra delay below 0.55 V, and its supply pins,
  are not modelled.
* **Switch box.** The switch box has no electrical behaviour: no settling time
  after a level change, and no switch sizing.
* **Variants not built.** The LSB-truncated variant and the variant that
  power-gates (instead of overscaling) unused blocks were only compared
  against the design. They are not built.
* **Accuracy manager.** The higher-level unit that decides the level at run
  time is outside this design. It drives `cfg_we`/`cfg_level`.
* **Very uneven split.** With K = N-1 the last adder is 2 bits wide and cannot
  take the half-adder carry. The product is still exact, because that carry is
  0 whenever the product fits, but a timing-corrupted carry would be lost. The
  published configurations (K <= 3N/4) are not affected.

## Files

| file | contents |
|------|----------|
| `rtl/blvos_pkg.sv` | levels and voltages, structure table, published level-shifter counts |
| `rtl/blvos_submult.sv` | sub-block multiplier (array) |
| `rtl/blvos_adder.sv` | adder with carry out (Adder1, Adder2, 2(N-K)-bit adder) |
| `rtl/blvos_half_adder.sv` | half adder for the two carries |
| `rtl/blvos_level_shifter.sv` | behavioural level-shifter bank |
| `rtl/blvos_switch_box.sv` | behavioural voltage-selection switch box |
| `rtl/blvos_vsel_ctrl.sv` | run-time level register and switch enables |
| `rtl/blvos_core.sv` | the combinational datapath with supply regions |
| `rtl/blvos_mult.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module, a level-shifter count check and two workloads |

## Verification

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself
with a watchdog.

* `tb_blvos_submult`, `tb_blvos_adder`, `tb_blvos_half_adder` check the leaf
  blocks, exhaustively where the width allows.
* `tb_blvos_level_shifter` checks the value and the 10 ps delay.
* `tb_blvos_switch_box` checks all 64 enable patterns against the voltage
  list.
* `tb_blvos_vsel_ctrl` checks reset, every code, rejection of bad codes and
  holding of the level.
* `tb_blvos_core` covers all five structures at 8/4 and the published splits
  8/2, 8/6, 16/4, 16/8 and 16/12. It checks 8-bit instances exhaustively and
  16-bit ones on random and corner operands.
* `tb_blvos_ls_count` elaborates all 30 structure/split combinations. It
  compares each one's level-shifted bit count with the published formulas.
* `tb_blvos_mult` runs the top at its default parameters, clocked at 110 ps.
  Operands stream with random gaps. The level moves through accurate, L1..L5
  and back, including on the fly, and rejected codes are written. A scoreboard
  checks every product, the two-cycle latency and the rail voltage. The test
  fails if any of these mechanisms never occurred.
* `tb_blvos_error_analysis` is the accuracy study. It runs 30 instances (n = 8
  with k = 2/4/6, n = 16 with k = 4/8/12, structures BL-VOS0..4) at all six
  levels. Each level gets 10,000 random pairs for 8 bits and 1,000,000 for 16
  bits. It prints ER/MED/MRED/NMED, which are all 0 in RTL.
* `tb_blvos_image` is the image workload. It applies 3x3 smoothing and
  sharpening to a generated 512 x 512 image, with the 8-bit, k = 4 multiplier
  in every structure. It changes level every row. The kernels and the image
  are choices of the testbench.

To simulate with Verilator 5 (example for the top):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/blvos_pkg.sv tb/tb_blvos_mult.sv --top-module tb_blvos_mult -o sim
./obj_dir/sim
```

Every file sets `timeunit 1ps`, because the level-shifter model uses
picosecond delays. `--timing` is therefore required. All testbenches finish in
seconds, except `tb_blvos_error_analysis`, which takes about a minute.
