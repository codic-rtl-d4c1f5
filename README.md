# CODIC: programmable internal timing for a DRAM chip

A DRAM chip performs an activation or a precharge by firing four internal
signals in a fixed order at fixed times:

- the **wordline** (`wl`) connects a row of cells to the bitlines;
- the **equaliser** (`EQ`) pulls the bitlines to Vdd/2;
- the two **sense-amplifier enables** (`sense_n` for the NMOS half, and
  `sense_p` for the PMOS half, active low) amplify and hold what is on the bitline.

The chip maker hard-wires these times. CODIC replaces the hard-wired timing
with a programmable one. The chip gets one new command, `CODIC`. Its format
is that of an activation. When it arrives, each of the four signals is raised
and dropped at times read from four mode registers, anywhere in a 25 ns
window at 1 ns steps. Ordinary `ACT` and `PRE` keep their fixed timing.

Changing the order and overlap of the four signals gives new row-wide
operations at the cost of an activation:

| Variant | wl | EQ | sense_p (low) | sense_n | What it does to the row |
|---|---|---|---|---|---|
| ACT (fixed) | 5–22 | – | 7–22 | 7–22 | normal activation |
| PRE (fixed) | – | 5–11 | – | – | normal precharge |
| CODIC-sig | 5–22 | 7–22 | – | – | leaves every cell at Vdd/2. The next ACT resolves each cell to a value set by process variation, which is a chip-unique signature (PUF response). |
| CODIC-det, 0 | 5–22 | – | 14–22 | 7–22 | sense_n goes first and pulls the bitline to 0, so every cell is written with 0 |
| CODIC-det, 1 | 5–22 | – | 7–22 | 14–22 | sense_p goes first, so every cell is written with 1 |

All times are in ns from the command. A signal is asserted from its first
number up to, but not including, its second. The same command also runs
shorter or reordered variants. Two are exercised in the tests:
- a 13 ns CODIC-sig (wl 1–6, EQ 2–6);
- a sense-amplifier-only variant (sense_p and sense_n at 3 ns, before the
  wordline at 5 ns), which writes the sense amplifiers' own signature into the row.

The first security use is **self-destruction against cold-boot attacks**. At
power-on the chip itself issues CODIC-det to every row before it accepts any
command. A module moved hot into another machine therefore comes up erased.
The second use is a **fast PUF** (physically unclonable function): CODIC-sig
followed by ACT on an 8 KB segment. The RTL here covers the chip-side logic
for both: command decoding, mode registers, the per-bank signal generators,
and the power-on sweep.

## Block structure

```
              cmd / cmd_bank / cmd_addr               por (from an analog detector)
                        |                                 |
                 codic_dram_ctrl ------------------ codic_self_destruct
                 |      |       \                    (CODIC + PRE per row,
   codic_mode_registers |        \                    tRRD / tFAW paced)
   (4 x 10 bit, MRS)    |         `-- bank command mux (external or self-destruct)
                        |
             codic_bank_timing  x BANKS
                        |
       codic_signal_path x 4   (wl, EQ, sense_p, sense_n)
        |-- ddrx_fixed_delay_element x 2   (fixed set / clear times)
        |-- codic_delay_element x 2        (configurable set / clear times)
        `-- IS_DDRx 2:1 select
                        |
            wl / eq / sense_p / sense_n per bank  --> DRAM array (not in this RTL)
```

`rtl/codic_pkg.sv` holds the shared types:
- `mr_t`, one mode register;
- `cfg_t`, the four registers;
- `cmd_e`, the decoded commands;
- `sig_e`, the signal index;

and the constants: the window, the ACT/PRE timings, the presets `CFG_DET0`,
`CFG_DET1` and `CFG_SIG`, the command latencies and the tRRD/tFAW values.

## The delay path: fixed and configurable

For each internal signal there are two paths from the command to the signal:

- the **DDRx fixed delay element**, which gives the hard-wired ACT or PRE time;
- the **configurable delay element**, a chain of 1 ns stages with a 25-to-1
  multiplexer. The multiplexer's select input is the time code from the
  mode register.

A 2-to-1 multiplexer, steered by `IS_DDRx`, passes one of the two to the
signal. `IS_DDRx` is set when the bank accepts an ACT or PRE and cleared
when it accepts a CODIC. It then holds until the next accepted command.

In silicon the chain is analog buffers of about 1 ns each. In this RTL the
whole design runs on **one clock with a 1 ns period**, and each stage is a
flip-flop:
- `codic_delay_element` is a 24-flop shift register. The command strobe and
  each flop output form taps 0..24. Codes 25..31 select tap 24.
- `ddrx_fixed_delay_element` is a shift register of a fixed length.

A signal needs a time to rise and a time to fall. `codic_signal_path`
therefore has two delayed strobes per path, *set* and *clear*. They drive a
set/clear flop, `act = (q | set) & ~clear`, so the signal is high from cycle
`t_init` through cycle `t_end-1`. A code with `t_init >= t_end` means the
signal is not used by this variant: the set strobe is suppressed and the
signal stays at its resting level. That is how CODIC-sig leaves the sense
amplifiers off.

The output polarity is a parameter. `sense_p` rests high and is pulled low
while asserted; the other three rest low.

Each bank has its own four signal paths. The delays are whole nanoseconds
by construction: any code 0..24 gives exactly that many cycles.

## The CODIC command and its mode registers

The top, `codic_dram_ctrl`, takes an already decoded command: `cmd` (a
`cmd_e`), `cmd_bank`, and `cmd_addr`, the address bus of `ADDR_W` bits.

| cmd | cmd_bank | cmd_addr | effect |
|---|---|---|---|
| `CMD_ACT` | bank | row in the low `ROW_W` bits | fixed activation |
| `CMD_PRE` | bank | – | fixed precharge |
| `CMD_CODIC` | bank | row | programmable window with the current mode registers |
| `CMD_MRS` | 4..7 | value in bits 9:0 | write the CODIC register for wl, EQ, sense_p or sense_n |

The pin encoding of CODIC is left to the interface standard; DDR3 has
reserved command codes for it.

**Mode registers.** Each register is 10 bits:
- bits 9:5 hold the trigger time;
- bits 4:0 hold the disable time.

MRS with a bank address of 0..3 is left to the standard DDR3 registers and
does not touch these.

An MRS is refused (`cmd_err`) while any bank is inside a window, so a
window never changes shape half-way through. Reset and power-on load
CODIC-det-0, which is the configuration the self-destruction sweep needs.
So after power-on the registers already hold the erasing timing, and they
still hold it when the controller gets the chip.

**Bank windows and refusal.** `codic_bank_timing` keeps a busy counter:
- 25 cycles after ACT or CODIC;
- 13 cycles after PRE.

A command to a busy bank is dropped and reported on `cmd_err` one cycle
later. The design does not queue. The chip assumes, as any DRAM does, that
the controller keeps its timings.

The latencies a controller must respect are:
- 35 ns from CODIC-sig or CODIC-det to the next PRE;
- 13 ns for a precharge or for the short 13 ns variants.

`bank_busy` only covers the 25 ns signal window. Meeting the 35 ns is the
issuer's job, and the self-destruction block does meet it.

**A departure kept on purpose.** The activation timing drops the wordline at
22 ns, inside the window, as the signal table above gives it. A commodity
chip holds the row open until PRE. In this model the data is already back
in the cells by then, so RD/WR to an open row is not modelled.

## Power-on self-destruction

`codic_self_destruct` starts on the `por` pulse, which comes from an analog
power-on detector outside this RTL. From `por` until `sd_done`:

- `sd_active` is high. The top refuses every external command with
  `cmd_err`, MRS included. The erasure is therefore atomic.
- The block issues a CODIC to every row of every bank, one command per
  cycle at most. The order is row-major across banks: row 0 of banks 0..7,
  then row 1, and so on. Four consecutive commands can then go to four
  different banks.
- Each bank is precharged 35 ns after its CODIC, on a separate PRE channel
  to the bank. The bank takes its next CODIC 13 ns after the PRE.
- Commands are spaced by the DDR3-1600 activation rules:
  - tRRD = 6 ns between two CODICs;
  - tFAW = 30 ns for any four.

  A four-entry history of the ages of the last CODICs enforces them:
  - `rrd_ok` needs the youngest entry to be at least tRRD old;
  - `faw_ok` needs the fourth youngest to be at least tFAW old.

With eight banks, the 48 ns per-bank cycle (35 + 13) is never the limit. The
sweep is bound by tFAW: 4 rows per 30 ns, that is **7.5 ns per row**. The
exact length from `por` to `sd_done` for N = BANKS × 2^ROW_W rows, with k = N−1, is

    1 + 30·⌊k/4⌋ + 6·(k mod 4) + 35 + 13 + 1   cycles (ns)

The chips of a module work in lockstep, so a rank row of 8 KB (eight x8
chips × 1 KB) is erased every 7.5 ns:

| module (single rank, 8 banks) | rows per bank | `ROW_W` | erase time |
|---|---|---|---|
| 64 MB | 1 K | 10 | 61.5 µs |
| 256 MB | 4 K | 12 | 246 µs |
| 1 GB | 16 K | 14 | 983 µs |
| **4 GB (default, 4 Gb x8 chips)** | 64 K | 16 | 3.93 ms |
| 8 GB | 128 K | 17 | 7.86 ms |
| 16 GB | 256 K | 18 | 15.7 ms |
| 64 GB | 1 M | 20 | 62.9 ms |

These times agree within a few per cent with the published figures for
CODIC-based destruction: 60 µs, 250 µs, 980 µs, 4 ms, 16 ms and 63 ms.
Compared with those figures, a TCG-style erase by write bursts from the host
is several hundred times slower. Row-copy based erasure is 2–2.5× slower.

A larger module is built by widening `ROW_W`; nothing else changes.

## Behavioural DRAM array (testbench only)

The signals are only meaningful against an array, so `tb/` contains
`dram_bank_model`, a two-state model of one bank:
- each cell is 0, 1 or Vdd/2;
- each bitline is 0, 1, Vdd/2, or Vdd/2 nudged up or down by charge sharing.

On each 1 ns edge, in this order:
1. EQ drives the bitlines to Vdd/2.
2. Sense amplifiers:
   - with both enabled, a nudged bitline amplifies in its own direction;
   - with both enabled, a bitline still at exact Vdd/2 resolves by a fixed
     pseudo-random "process variation" bit. This is the cell's bit
     (`pv_cell`) if the wordline is up, or the sense amplifier's (`pv_sa`)
     if not;
   - with only one half enabled, the bitline is driven to 0 or to 1.
3. An open wordline:
   - writes a driven bitline into the cell;
   - with EQ high, sets the cell to Vdd/2;
   - otherwise, nudges a Vdd/2 bitline towards the cell.

`pv_cell` and `pv_sa` (in `dram_model_pkg`) are a hash of bank, row and
column, so a "chip" always returns the same signature. About one cell in
sixteen reads 1.

This is enough to see every variant above do its job: ACT/PRE preserve data,
CODIC-det writes a constant, CODIC-sig followed by ACT gives a repeatable
signature that does not depend on the earlier contents. It is not a circuit
model. Timing margins, the sensitivity of the signature to temperature and
ageing, and partial amplification are outside it.

## Verification

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_codic_delay_element` | every code 0..31 and random codes give the right delay (25+ clamped) |
| `tb_ddrx_fixed_delay_element` | delays 1, 5, 7, 11, 22 |
| `tb_codic_signal_path` | all windows inside 0..24 on an active-high and an active-low instance, fixed vs configurable select, suppressed signals |
| `tb_codic_mode_registers` | reset value, random MRS writes, refusal while busy, power-on reload |
| `tb_codic_bank_timing` | ACT/PRE/CODIC pin timing cycle by cycle, busy lengths, refusal |
| `tb_codic_self_destruct` | every row exactly once, tRRD/tFAW, PRE 35 ns after each CODIC, 13 ns reuse, exact run length, two runs |
| `tb_codic_dram_ctrl` | whole chip with eight array models (16 rows each): power-on erase, refusal during it, ACT/PRE data retention, CODIC-sig and the 13 ns CODIC-sig, CODIC-det 0/1, sense-amp-only signature, busy-bank and busy-MRS refusal. It counts each mechanism and fails if one never happens. |
| `tb_codic_full` | the top at its default size (8 × 64 K rows): complete power-on erase of 524 288 rows in 3 932 198 ns, one CODIC per row, all rows 0, then CODIC-sig + ACT with pin timing on the last row |
| `tb_workload_self_destruct` | 64 MB, 256 MB, 1 GB, 16 GB and 64 GB modules erased at the pins with order, tRRD, tFAW, exact length and the published times (±5 %) checked. It takes about 3.5 minutes. |

In `tb_codic_full` and `tb_workload_self_destruct` the pin monitors count only once reset is released: the flops hold random values until the first clock edge under reset.

Each testbench can be built with plain Verilator 5, for example:

    verilator --binary --timing --assert --timescale 1ns/1ps \
      -Irtl -Itb -y rtl -y tb +libext+.sv \
      rtl/codic_pkg.sv tb/dram_model_pkg.sv tb/tb_codic_dram_ctrl.sv \
      --top-module tb_codic_dram_ctrl -o sim
    ./obj_dir/sim

`tb/dram_model_pkg.sv` is only needed by the two testbenches that use the
array model, `tb_codic_dram_ctrl` and `tb_codic_full`; for the others leave it
out and name the testbench file after `rtl/codic_pkg.sv`. The RTL synthesises as plain logic: no memories,
no latches, and only flip-flops and small multiplexers.

## What is this design's own, and what is missing

Choices that are not fixed by the CODIC scheme itself:

- A single 1 ns clock, with delay stages as flip-flops. Real silicon would
  use a buffer chain, which needs no fast clock.
- The 5 + 5 bit split of a mode register, the registers at MRS addresses
  4..7, and the decoded `cmd_e` interface.
- Refusing rather than queueing a command to a busy bank. MRS is refused
  while any bank is busy.
- Reset/power-on values of the registers: CODIC-det 0.
- tRRD = 6 ns and tFAW = 30 ns: DDR3-1600, 1 KB page.
- A PRE after each CODIC in the sweep, and the row-major bank order.
- One set of signal generators per bank. Silicon would place one per mat.
  A delay circuit costs roughly 0.3 % of a 512 × 512 mat, and the four
  together about 1.1 %.

Not in this RTL:

- the analog power-on detector;
- the DRAM array and sense amplifiers (only the testbench model);
- the memory controller and the host-side software that uses CODIC for
  PUF authentication or secure deallocation;
- a second self-destruction implementation that reuses the self-refresh
  machinery;
- more than one set of CODIC mode registers, for per-region timings.
