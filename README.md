# At-speed BIST for a logic core behind a P1500 wrapper

A logic core that is sold as IP and buried inside a system-on-chip is hard to
test: its inputs and outputs are not pins, scan chains expose its structure,
and a tester that feeds vectors serially runs far below the core's clock. This
design puts a small pseudo-random self-test engine next to the core and hides
it behind a P1500 (IEEE 1500) wrapper. From outside, the test is a handful of
serial commands issued through the chip's TAP controller: *start a test of N
patterns*, *read the status*, *read signature k*. No test vectors are shipped,
the patterns are applied one per core clock (at speed), and the user only
needs the expected signatures.

The case study is a reconfigurable serial LDPC decoder whose logic is split
into three modules under test:

| module under test | inputs | outputs | constrained inputs |
|---|---|---|---|
| BIT_NODE     | 54 | 55 | 4 (data-path select) |
| CHECK_NODE   | 53 | 53 | 4 (data-path select) |
| CONTROL_UNIT | 45 | 44 | none |

The three modules themselves (and the decoder's memories and buffers) are not
part of this RTL. They connect to the top level through ports; the testbenches
use small behavioural stand-ins with the same port widths.

## Structure

```
             TAP controller (outside)
   WSI WRCK WRSTN ShiftWR CaptureWR UpdateWR SelectWIR      WSO
 ┌──┴────┴─────┴──────┴───────┴────────┴────────┴───────────▲───┐
 │ p1500_bist_wrapper                                        │   │
 │   wir ── instruction ──► WSO multiplexers ────────────────┘   │
 │   WBY (1 bit)   wbr (core terminals pi/po)                    │
 │   wcdr ──command word──► toggle_sync ──┐    wdr ◄──result──┐  │
 │ ─ ─ ─ ─ ─ ─ WRCK domain ─ ─ ─ ─ ─ ─ ─ ─│─ ─ ─ ─ ─ ─ ─ ─ ─ ─│─ │
 │   bist_engine (clk domain)             ▼                   │  │
 │     bist_control_unit: commands, 12-bit pattern_counter,   │  │
 │                        test_enable, end_test, select       │  │
 │     pattern_generator: alfsr (20 b) + constraint_generator │  │
 │                        (4 b), replication, input muxes     │  │
 │     result_collector:  3 x misr (16 b, XOR fold) ──► output_selector
 └───────────┬───────────────────────────────▲──────────────────┘
     bn_in/cn_in/cu_in (54/53/45)     bn_out/cn_out/cu_out (55/53/44)
             ▼                               │
          BIT_NODE, CHECK_NODE, CONTROL_UNIT of the core
```

All three modules are tested at the same time with the same patterns, each
into its own signature register.

## Running a test through the wrapper

This is the part a user of the core must get right, so it is spelled out.
All wrapper events act on the rising edge of WRCK; data is shifted LSB first,
and WSO is the LSB of the selected register. At most one of CaptureWR,
ShiftWR and UpdateWR may be high on a WRCK edge (an assertion in the top
checks this).

1. **Select the WCDR.** With SelectWIR = 1, shift the 3-bit instruction
   `WS_WCDR` (3) into the WIR and pulse UpdateWR.
2. **Send START.** With SelectWIR = 0, shift 16 bits of the command word
   `{cmd[15:14], sel[13:12], count[11:0]}` with `cmd = START (2)` and
   `count` = number of patterns (0 means 4,096), then pulse UpdateWR.
3. The update flips a toggle that is synchronised into the core clock; about
   three core clocks later the Control Unit starts. `test_enable` is then high
   for exactly `count` core clocks, one pattern per clock; `end_test` rises two
   clocks after the last pattern (one clock for the last response to be
   compacted).
4. **Poll the status.** Send `SELECT (3)` with `sel = 3`, load `WS_WDR` (4) in
   the WIR, pulse CaptureWR and shift out 16 bits:
   `{test_enable, end_test, 2'b00, pattern_counter}`. Repeat until `end_test`.
5. **Read the signatures.** For `sel` = 0, 1, 2 (BIT_NODE, CHECK_NODE,
   CONTROL_UNIT): send SELECT through the WCDR, load `WS_WDR`, capture, shift
   out 16 bits, and compare with the golden signature.
6. `RESET (1)` aborts a test, clears the signatures and `end_test`, and pulses
   the `core_reset` output for one core clock. A START received while a test
   is running is ignored.

Between two WCDR updates leave at least three core clocks (the synchroniser
needs them); with any realistic WRCK this holds by itself, since a command
takes 16 shifts.

Instruction codes: `WS_BYPASS` 0, `WS_EXTEST` 1, `WS_INTEST` 2, `WS_WCDR` 3,
`WS_WDR` 4; any other code becomes `WS_BYPASS`, as does WRSTN low.

## Pattern generation

One 20-bit autonomous LFSR (internal XOR form, polynomial x^20 + x^3 + 1,
seed 1, period 2^20 − 1) drives all three modules. It is reseeded at every
START, so every test run applies the same sequence and has one golden
signature per module. Every input port is wider than 20 bits, so the ALFSR is
replicated: input bit *i* of a module takes ALFSR bit *i* mod 20.

BIT_NODE and CHECK_NODE have a 4-bit input that selects the active data path.
Random values there would waste most patterns on narrow configurations, so
those four inputs (taken to be the top four input bits) are driven by the
**constraint generator** instead: it applies codes 0, 1, 2, … for 16 patterns
each and, on reaching code 15 (taken to be the widest data path), holds it for
the rest of the test. In a 4,096-pattern run that is 240 patterns on the
narrow selections and 3,856 on the widest. One generator serves both modules.

Outside a test the input multiplexers pass the functional inputs
(`bn_func`, `cn_func`, `cu_func`) unchanged.

## Response compaction

Each module's outputs are folded onto 16 bits by an XOR cascade (bit *j* of
the folded word is the XOR of outputs *j*, *j*+16, *j*+32, …) and absorbed by
a 16-bit MISR: `sig ← (sig·x mod p(x)) ⊕ folded`, with
p(x) = x^16 + x^5 + x^3 + x^2 + 1. The modules are assumed to answer one clock
after their inputs change (`RESP_LATENCY` = 1), so the MISRs compact during
the `count` clocks that follow the patterns, one response per pattern, and
the Control Unit waits that clock before raising `end_test`. A module with a
different latency needs only `RESP_LATENCY` changed on the top.

The Output Selector puts one of four 16-bit words in front of the WDR:
signature 0, 1, 2 or the status word.

## Clock domains

The BIST runs on the core clock `clk`; the wrapper runs on WRCK. Commands
cross with a toggle and a two-flop synchroniser (`toggle_sync`). Results cross
the other way without synchronisation: they are read when they are static
(signatures after `end_test`). The status word can be captured while a test is
running; its counter field may then be caught mid-change, which is harmless
for polling but should not be trusted as an exact count.

## What follows the published design and what does not

Taken from the published design: the split into Control Unit, Pattern
Generator and Result Collector; the 12-bit pattern counter and 4,096-pattern
runs; the 2-bit result select; the 20-bit ALFSR shared by all modules with
replicated outputs; one 4-bit constraint generator shared by BIT_NODE and
CHECK_NODE, none on CONTROL_UNIT; three 16-bit MISRs behind XOR cascades;
the Output Selector; the P1500 wrapper with WIR, WBY, WBR, a control register
(WCDR) carrying commands such as core reset, test start and status read, and
an output data register (WDR); the module port widths.

Chosen here because the description leaves them open: both polynomials and
the seed; which input bits are constrained and the constraint generator's
code sequence and dwell time; the XOR-fold wiring; the response latency; the
command encoding, command word layout and status word; the WIR instruction
set and codes; the WBR cell design and the core terminal count (8 in, 8 out);
all wrapper events on the rising WRCK edge; the clock-domain crossing.

Not included: the TAP controller (a standard IEEE 1149.1 part that would drive
the wrapper serial port), the LDPC decoder's modules, its interleaving
memories and buffers. The published results on fault coverage, diagnosis,
area and frequency come from gate-level fault simulation and synthesis in a
0.13 µm library and cannot be reproduced from RTL alone; the golden
signatures of the real core likewise require the real core.

## Files

`rtl/`

| file | content |
|---|---|
| `bist_pkg.sv` | widths, polynomials, command word, status word, instruction codes |
| `alfsr.sv` | 20-bit pattern source |
| `constraint_generator.sv` | data-path select sequence |
| `pattern_generator.sv` | ALFSR + constraint generator, replication, input multiplexers |
| `misr.sv` | XOR fold + 16-bit signature register |
| `output_selector.sv` | result multiplexer |
| `result_collector.sv` | three MISRs, response-latency delay, output selector |
| `bist_control_unit.sv` | command decoder, pattern counter, test_enable / end_test |
| `bist_engine.sv` | the three parts above wired together |
| `wir.sv`, `wcdr.sv`, `wdr.sv`, `wbr.sv` | wrapper registers |
| `toggle_sync.sv` | WRCK → clk command event synchroniser |
| `p1500_bist_wrapper.sv` | top level |

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`), the
reference models they share (`tb_ref_pkg.sv`: LFSR and MISR as polynomial
arithmetic, the constraint sequence as a formula, the stand-in's next-state
function) and the stand-in for a module under test (`core_module_model.sv`).
`tb_p1500_bist_wrapper.sv` drives the top at its default parameters only
through the wrapper serial port: bypass, EXTEST, INTEST, a full 4,096-pattern
run, a START ignored during a run, RESET, and a 100-pattern run, checking
every applied pattern and every signature against predictions. It counts
each of these mechanisms and fails if one never happened.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/bist_pkg.sv tb/tb_ref_pkg.sv tb/tb_p1500_bist_wrapper.sv \
    --top-module tb_p1500_bist_wrapper -o sim
./obj_dir/sim
```

Replace the testbench name for any other block. The full-size end-to-end run
takes a few seconds.

## Changing it

- Different modules under test: change the `*_IN_W` / `*_OUT_W` constants in
  `bist_pkg`, and the constrained-bit overlay in `pattern_generator` if the
  constrained ports differ.
- Other polynomials or seed: `ALFSR_POLY`, `ALFSR_SEED`, `MISR_POLY` in
  `bist_pkg` (internal-XOR form, leading term omitted). Keep them primitive.
- Longer tests: `PC_W` in `bist_pkg` widens the counter and the count field;
  the command word and the WCDR grow with it.
- Module latency: `RESP_LATENCY` on the top.
- Golden signatures change with any of these, and with the core itself; they
  are obtained by simulating the real core with this engine.
