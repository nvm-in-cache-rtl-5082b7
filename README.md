# 6T-2R NVM-in-Cache PIM: SystemVerilog model

A last-level cache is mostly 6T SRAM, and during neural-network inference
most of it sits idle or has to be flushed so that an accelerator can use the
area. This design keeps the cache and adds a second, non-volatile memory
inside the same cells. Each 6T SRAM cell gets two resistive RAM (RRAM)
devices, one in series with each pull-up PMOS. The cell footprint stays the
same, and the RRAMs hold neural-network weights. A multiply-accumulate (MAC)
runs on the cell **power lines**, not the bitlines:

- the input activation (IA) pulses the wordlines;
- each cell sinks a current from its column's VDD line only if its RRAM is
  in the low-resistance state;
- the column's VDD line adds the currents of all 128 rows;
- the summed current is weighted, sampled and digitised.

The SRAM bit in the latch survives the operation, so the cache never has to
be flushed to compute.

This repository gives a cycle-level model of one 128 x 512 sub-array with
all its peripherals, as SystemVerilog (IEEE 1800-2017). It adds a small
system layer that pairs sub-arrays for signed weights. The digital parts are
synthesizable RTL. The analog parts (cell array, current mirrors,
sample-and-hold, DAC, comparator) are behavioural models with the real
parts' interfaces. Their files say so in their first line.

## The 6T-2R cell and its operating modes

Each cell has:

- a latch (Q / QB) with left and right access transistors on BL and BLB;
- separate wordlines WL1 (left) and WL2 (right);
- an RRAM R_LEFT between the column line VDD1 and the left pull-up;
- an RRAM R_RIGHT between VDD2 and the right pull-up.

The pull-down sources of a whole row go through two gated-ground
transistors, controlled by V1 and V2. WL1, WL2, V1 and V2 run along rows;
BL, BLB, VDD1 and VDD2 run along columns.

Voltages are abstracted to a few levels:

- `lvl_t` for wordlines and bitlines: GND, NOM = 0.8 V, OD = 2 V;
- `pl_t` for power lines: GND, NOM, REF (held by the weighting circuit),
  OD and SENSE (held at VDD while the current is measured).

The cell model (`nvsram_row`) applies these rules on each 0.5 ns tick:

| mode | wordlines | bitlines | power lines | V1/V2 | effect |
|---|---|---|---|---|---|
| SRAM write | WL1=WL2=NOM | BL/BLB complementary | NOM | on | Q <- BL |
| SRAM read | WL1=WL2=NOM | both NOM | NOM | on | rd = Q |
| RRAM reset (HRS) | both OD | both GND | VDD1=VDD2=OD | off | both RRAMs HRS |
| RRAM set left (LRS) | both OD | BL=OD, BLB=GND | both GND | off | R_LEFT LRS |
| RRAM set right (LRS) | both OD | BL=GND, BLB=OD | both GND | off | R_RIGHT LRS |
| verify | WLx = NOM | NOM | VDDx = SENSE | on | current = RRAM state |
| PIM sample, left | WL1 = IA | BL=NOM, BLB=GND | VDD1 = REF | off | current if IA & Q & R_LEFT |
| PIM sample, right | WL2 = IA | BLB=NOM, BL=GND | VDD2 = REF | off | current if IA & QB & R_RIGHT |

Programming writes the same weight bit into R_LEFT and R_RIGHT of a cell.
It destroys the SRAM content of the programmed row, so the cache line has to
be rewritten afterwards. The model leaves other rows untouched.

### Why a MAC needs a left and a right pass

During the PIM sample the gated grounds are off. A cell can then only
source current through the pull-up on the side whose storage node is high:

- a cell with Q = 1 contributes only in the left pass (through R_LEFT);
- a cell with Q = 0 contributes only in the right pass (through R_RIGHT).

So the left pass alone gives the dot product over the cells whose cache
bit is 1, and the right pass gives the rest. Because both RRAMs of a cell
hold the same weight, the two passes add up to the full dot product,
whatever the cache holds. That is why every MAC is done twice, and why the
cached data does not affect the result.

### Keeping the cache data

In the left pass, a cell that holds Q = 0 has its Q node charged through
the left access transistor while both grounds are off. The data survives
only because the grounds come back in a fixed order:

- V1 is restored first, so the left pull-down discharges Q again;
- then V2 is restored.

The right pass is the mirror image. The cell model tracks this disturbance
explicitly: restoring the grounds in the wrong order flips the cell. The
gated-ground controller (`gated_vss_ctrl`) produces the safe order. The
end-to-end tests read the whole cache back after PIM to show that nothing
was lost.

## From column currents to a number

A sub-array holds 128 rows x 128 four-bit words. The four bit columns of a
word are one weight, most significant bit in the word's first column.

Per word and per pass, the chain is:

1. **Weighted current (`wcc`).** Current mirrors scale the four column
   currents by 8:4:2:1 and add them. The pass (left or right) selects which
   of the two line sets is routed in, via switches S_L and S_R. The result
   is `I = sum over rows of IA_bit x W x [cell on this side]`, in units of
   one LRS cell current (0 to 15 x 128 = 1920).
2. **Sample-and-hold (`sample_hold`).** The current pulls the sampled node
   down from its zero-current level:
   `V = 600 mV - I x 512.5 mV / 1920`. The voltage therefore falls as the
   MAC rises.
3. **6-bit SAR ADC (`sar_adc` = `sar_cdac` + `sar_comparator` +
   `sar_logic`).** The calibrated references are VREFN = 155 mV and
   VREFP = 570 mV. The conversion is a binary search, MSB first, giving
   `code = floor((V - 155 mV) x 64 / 415 mV)`, clipped to 0..63. It runs on
   a 50 MHz clock and takes 8 ADC clocks: 1 sample, 6 trials and 1 result,
   which is 160 ns.
4. **Post-processing (`post_proc`).** The code is inverted (`63 - code`)
   because the voltage moves opposite to the MAC. It is then shifted by the
   IA bit position, because activations are applied one bit at a time. The
   eight terms (4 IA bits x 2 passes) are summed into the word's 12-bit
   result register.

Two properties of this chain matter to a user:

- **Clipping at both ends.** The zero-current voltage (600 mV) is above
  VREFP, and the full-scale voltage (87.5 mV) is below VREFN. MACs of up to
  about 112 current units per pass read as 0, and the largest ones saturate.
  This follows from the two facts the design is built on: the uncalibrated
  code range and the calibrated references (see "Where the model departs
  from the circuit").
- **Quantisation.** Each ADC step covers about 24 current units, so the
  result is a 6-bit approximation of the MAC per pass, not an exact
  integer.

## Timing

One clock drives everything: a 0.5 ns bias tick. The controller (`pim_ctrl`)
makes the 50 MHz ADC clock as a clock enable every 40 ticks.

| operation | sequence | duration |
|---|---|---|
| SRAM write or read | one access phase | 1 ns |
| NVM program of a row | reset (HRS) 4 ns, set-left 4 ns, set-right 4 ns, verify-left 1 ns, verify-right 1 ns | 14 ns + command overhead |
| PIM (one MAC over the whole array) | 4 IA bits x left, then 4 IA bits x right; one 160 ns conversion each | **1280 ns** |

Each conversion's sample cycle contains the 3.5 ns analog PIM cycle, and the
sample-and-hold tracks during phase B:

- **A (1.5 ns):** BLx at 0.8 V, VDDx at the reference, grounds still on.
- **B (1 ns):** IA on the wordlines, both grounds off, current sampled.
- **C (0.5 ns):** VDDx and the same-side ground restored.
- **D (0.5 ns):** the other ground restored.

Conversions run back to back, so a side takes 4 x 160 = 640 ns. The
testbenches measure the 1280 ns from command to result. One operation is
128 x 128 four-bit MACs (x2 operations each) in 1.28 us, which is
25.6 GOPS, or 0.4 TOPS normalised to 1-bit operands.

## Signed weights: bank pairs (`nvm_pim_system`)

RRAM conductance cannot be negative. A signed weight is therefore stored as
two magnitudes in two sub-arrays:

- bank 2p holds the positive weights of pair p;
- bank 2p+1 holds the magnitudes of its negative weights.

`nvm_pim_system` has NPAIR such pairs (default 1) and
`psum_bank_combiner`. Each pair has its own activation vector, so every
kernel position of a convolution can be fed its own slice of the input
feature map. Every bank runs each PIM operation in lockstep (an assertion checks this). For every word the
combiner computes `d = sum over pairs of (pos - neg)`, and then
`sum = (keep ? sum : 0) + (d << shift)`.

- Adding over pairs gives partial sums of a kernel spread over several
  sub-arrays.
- `keep` with `shift` accumulates successive passes. For example, an 8-bit
  activation runs as the low nibble (`keep=0, shift=0`), then the high
  nibble (`keep=1, shift=4`).
- `wide` joins neighbouring word columns into 8-bit weights. Word 2j holds
  the upper nibble and word 2j+1 the lower one. Output 2j becomes
  `(d[2j] << 4) + d[2j+1]`, and output 2j+1 reads 0. Combined with the
  two-pass activations, this gives 8-bit x 8-bit MACs over 64 outputs per
  bank pair.

### Command interface of the top

| signal | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | 0.5 ns tick, asynchronous active-low reset |
| `cmd_valid` / `cmd_ready` | in / out | handshake; ready only when every bank is idle |
| `cmd` | in | `CMD_SRAM_WR`, `CMD_SRAM_RD`, `CMD_PROG`, `CMD_PIM` (`nvm_pkg::cmd_t`) |
| `bank`, `row` | in | target of SRAM and program commands (PIM uses all banks and rows) |
| `wdata[511:0]` | in | SRAM data, or weight bits to program (bit 4w is the MSB of word w) |
| `ia[NPAIR]`, each `[127:0][3:0]` | in | 4-bit activation per row for each bank pair, sampled when the PIM command is accepted |
| `keep`, `shift`, `wide` | in | accumulation and 8-bit-weight control for this PIM operation |
| `rdata`, `rd_valid` | out | SRAM read data |
| `prog_done`, `prog_ok` | out | end of programming; ok when both RRAMs of every column read back as written |
| `sum[128]` (32-bit signed), `sum_valid` | out | combined per-word results |

All inputs are sampled on the edge where `cmd_valid && cmd_ready`. A command
issued during a PIM operation waits until the operation ends.

## Module map

```
nvm_pim_system                 top: bank pairs + combiner
├─ nvm_in_cache_macro  x 2*NPAIR   one 128 x 512 sub-array with peripherals
│   ├─ pim_ctrl                command FSM, bias phases, ADC clock enable
│   ├─ wl_driver               row decoder, WL1/WL2 levels (IA in PIM)
│   ├─ gated_vss_ctrl          V1/V2 per row, restore order
│   ├─ sram_periph             BL/BLB drivers, read latch
│   ├─ powerline_switch        VDD1/VDD2 states, S_L/S_R, verify sense
│   ├─ nvsram_subarray         128 x nvsram_row, column current sums   (behavioural)
│   └─ per word x 128: wcc -> sample_hold -> sar_adc -> post_proc      (first three behavioural)
│                                     sar_adc = sar_cdac + sar_comparator + sar_logic
└─ psum_bank_combiner          subtract, add pairs, shift-accumulate
nvm_pkg                        shared enums (levels, phases, commands) and sizes
```

The 128 conversion chains of a sub-array run in lockstep, and the controller
follows the first one.

## Where the model departs from the circuit

These are modelling decisions, not measured behaviour:

- **Ideal cells.** An LRS cell gives exactly one current unit and an HRS
  cell none. Column sums are exact, and mirrors, DAC and comparator are
  ideal. The array's nonlinearity near full scale, and its device and
  Monte-Carlo variation, are not modelled.
- **Sample-and-hold transfer.** The transfer is a straight line between
  600 mV and 87.5 mV. These are the voltages at which an uncalibrated 0 to
  800 mV ADC gives the reported codes 7 and 48. The references are the
  calibrated 155 mV and 570 mV. Together these two choices give the
  clipping described above. A real S&H, calibrated for full code use,
  would map the MAC range onto 155 to 570 mV instead.
- **Phase split.** The last 1 ns of the PIM cycle is split into two 0.5 ns
  restore steps, C and D. Left runs before right.
- **Programming.** It is always reset, then set-left, then set-right, then
  verify both sides. Columns with a 0 weight bit get 0 V on both bitlines
  during the set pulses. After programming the model leaves Q at the last
  driven value. The verify can fail only if the cell model disagrees with
  what was written.
- **Interfaces and counts.** The command set, the handshake, bank
  addressing, the keep/shift/wide controls and the even/odd word pairing
  are this design's own. So is the
  default of one bank pair. A K x K convolution mapped one kernel element
  per sub-array needs NPAIR = K x K.
- **Not built:** the forwarding of input feature maps between
  neighbouring banks (left to whatever drives `ia`); the RRAM device physics;
  and the surrounding cache hierarchy (tags, banks, interconnect), which the
  design leaves unchanged.

## Simulating

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=<n> failures=<n>`. Every testbench also has a watchdog.
With Verilator 5, list the package first, then the RTL, then the
testbench:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/nvm_pkg.sv $(ls rtl/*.sv | grep -v nvm_pkg) tb/tb_nvm_pim_system.sv \
    --top-module tb_nvm_pim_system -o sim && ./obj_dir/sim
```

The testbenches are:

- **Unit testbenches** (`tb_<module>`). Each drives one block and compares
  it with an independent model. `tb_sar_adc` and `tb_pim_ctrl` also check
  the 160 ns conversion time and the 1280 ns MAC latency.
- **`tb_nvm_in_cache_macro`.** One sub-array at 16 rows x 8 words, end to
  end.
- **`tb_nvm_pim_system`.** Two bank pairs at 16 rows x 8 words. The flow
  is:
  1. write and read the cache;
  2. program all weights, with verify;
  3. rewrite the cache;
  4. run PIM with 4-bit activations, with an 8-bit activation done in
     two passes, and with 8-bit weights in wide mode;
  5. read the cache back.

  Every result is compared with a model of the whole current, voltage,
  code and post-processing chain. It counts the mechanisms it must see:
  - SRAM writes and reads;
  - verified programming;
  - left and right passes carrying current;
  - ADC clipping;
  - negative outputs;
  - shifted accumulation;
  - 8-bit-weight combining;
  - back-pressure;
  - cache retention.
- **`tb_nvm_pim_system_full`.** The same flow at the default size with no
  parameter overrides: two 128 x 512 sub-arrays, all 256 rows programmed,
  nine PIM operations. Building and running it takes about two minutes.

Parameters worth changing are:

- `ROWS`, `WORDS` (sub-array size);
- `IAB` (activation bits);
- `ADC_DIV` (ticks per ADC clock);
- `VREFP_MV`, `VREFN_MV`;
- `NPAIR`.

The phase lengths are `pim_ctrl` parameters in ticks.
