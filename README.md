# Shift-register SEU test logic for the MOPS-Hub PP3-FPGA

The MOPS-Hub collects monitoring data from the ATLAS ITk pixel detector's
MOPS chips over CAN buses and passes it on to the detector control system.
Each crate holds Artix-7 FPGAs (XC7A200T), called PP3-FPGA modules, and each
module serves 16 CAN buses. The crates sit in racks on the cavern walls, where
hadrons can flip bits inside the FPGA. Before building the system, one must
know how often that happens.

This RTL is the logic used to measure that rate in a proton beam. The measuring
method is simple:

- Fill a long shift register in the FPGA with a known pattern.
- Stop its clock and leave it in the beam for a while.
- Read it back and count the bits that changed.

Each changed bit is one single-event upset (SEU). Divide the count by the beam
fluence and by the number of bits, and you get the per-bit upset cross-section.
The logic is split between two FPGAs:

- **The device under test (DUT).** The PP3-FPGA module in the beam holds the
  3000-bit register. It also sends a heartbeat to an external watchdog chip.
- **The control board.** An Arty A7 outside the beam writes the register, waits,
  reads it back, counts the mismatches and reports each one to a host computer.

The logic that the MOPS-Hub runs in operation (the CAN interfaces, the data
aggregation and the eLink to the control system) is not part of this RTL. Its
structure is not described at the level needed to write it.

## Block structure

```
            control board (clk_arty)                         DUT (clk_dut)
  +--------------------------------------+   flat cable   +---------------------------+
  | seu_tester                           |  sck --------> | pp3_test_firmware         |
  |   write / hold / read sequencer      |  data -------> |   seu_shift_register      |
  |   PRBS-7 pattern, compare, counters  | <------ data   |     (3000 bits, no TMR)   |
  |   host_reporter -> uart_tx --------------> host       |   heartbeat_gen (TMR) ------> wdi_o
  +--------------------------------------+                +---------------------------+
                                                                ^ rst_dut_n from the
                                                                  external watchdog
```

`seu_test_setup` is the top level. It connects the two boards by the three
cable wires. Everything that is not FPGA logic appears as a port:

- the watchdog's reset, `rst_dut_n`;
- the heartbeat to the watchdog, `wdi_o`;
- the UART line to the host, `uart_tx_o`.

The ports `sr_upset_*` and `hb_upset_i` flip bits in simulation to stand in for
particle hits. Tie them to zero in hardware.

## One test cycle

This is where the timing matters. The two boards run from unrelated clocks
(100 MHz each by default), and the only link between them is the slow shift
clock on the cable.

| phase | length at defaults | what happens |
|-------|--------------------|--------------|
| WRITE | 3000 × 1 ms | One pattern bit per shift-clock period is shifted into the DUT register. |
| HOLD  | 1 s | The shift clock stays low. The register sits still in the beam. |
| READ  | 3000 × 1 ms | The register is shifted out and compared bit by bit. The same pattern is shifted in again behind it. |

A cycle lasts 4·LEN·HALF + HOLD_CYC clock cycles, where
HALF = CLK_HZ / (2·SCK_HZ) and HOLD_CYC = CLK_HZ·HOLD_MS / 1000. At the defaults
that is 7 s. While `run_i` is high, cycles follow each other with no gap.

**Shift-clock protocol.** Each bit period has a low half and a high half,
HALF clock cycles each:

- The control board changes its data line only when sck falls. The data is
  therefore stable around the rising edge.
- The DUT passes sck and data through two-flip-flop synchronisers. It shifts
  three of its own clock cycles after sck rises.
- The register's last bit goes back over the cable. The control board
  synchronises it and samples it at the end of the low half, just before the
  rising edge that brings out the next bit.

The round trip from a rising sck edge to the new bit at the control board takes
about six clock cycles, so HALF must be at least 8. `seu_tester` raises any
smaller value to 8.

**Bit order.** The register shifts in at bit 0 and outputs bit LEN-1, so the
first bit written is the first bit read. Read position *i* therefore refers to
register bit LEN-1-*i*. The reports use read positions.

**Pattern.** The pattern is PRBS-7 (x⁷+x⁶+1, seed 0x7F, MSB out). It restarts
at the start of every WRITE and every READ. The expected bits are regenerated,
not stored. About half the bits are ones, so flips in both directions are seen.

## Counting and reporting upsets

Every bit that comes back wrong:

- adds one to `fail_count_o` (32 bits) and to the per-cycle count, which is
  copied to `last_cycle_fail_o` at the end of the cycle;
- makes `mismatch_o` pulse;
- sends a report to the host.

A report is five bytes, 8N1 at 115200 Bd:

| byte | content |
|------|---------|
| 0 | 0xA5 |
| 1–2 | failure count, bits 15:0, big-endian |
| 3–4 | read position of the bit, big-endian |

A report takes 0.43 ms to send (each byte is 10·DIV+1 clock cycles,
DIV = CLK_HZ/BAUD). Mismatches come at most once per 1 ms shift period, so at
the real rates every upset gets its own report. At faster test rates the
reports could overlap. In that case a report that arrives while another is being
sent replaces the one waiting. The count is cumulative, so the host still learns
the total, but it loses the position of the replaced report.

## Staying alive: heartbeat, TMR and the watchdog

The DUT board has a supervisor chip (TPS3306 class). The chip holds the FPGA in
reset while the supply is low. It also resets the FPGA when its input has seen
no transition for 0.8 s. After such a reset, the FPGA reloads one of three
configuration copies from radiation-hard flash (multi-boot reconfiguration).

- `heartbeat_gen` toggles `wdi_o` every 200 ms, four times per window. An
  elaboration check rejects any interval longer than half the window.
- The heartbeat's state (counter and toggle bit) is kept in three copies. A
  bitwise majority (`tmr_voter`) is taken every cycle. The next state is
  computed once from the voted value and written back into all three copies. An
  upset in one copy is therefore outvoted at once and overwritten on the next
  edge. `tmr_err_o` shows the one cycle in which the copies disagree.
- The shift register is deliberately not triplicated, because it has to record
  upsets.

A watchdog reset clears the register. In the beam, resets came up to twice per
second, which is far shorter than the 7 s cycle. For counting upsets, the
watchdog therefore has to be disabled. The end-to-end testbench shows both
cases. With the watchdog enabled, a stalled DUT clock leads to a reset, and
every one in the pattern then reads back as an upset. With the watchdog
disabled, only the injected upset is found.

## From counts to cross-section

σ = N_SEU / (Φ · N_bits), with N_bits = 3000 and Φ the proton fluence of the run.
`tb_seu_campaign_runs` replays the three proton runs on the full-length
register, with the clocks slowed down. It injects each run's upset count over
three test cycles, reads the counter and recomputes σ:

| run | fluence [p/cm²] | upsets | σ [cm²/bit] |
|-----|-----------------|--------|-------------|
| 7 | 8·10¹¹ | 7 | 2.92·10⁻¹⁵ |
| 8 | 8·10¹¹ | 9 | 3.75·10⁻¹⁵ |
| 9 | 4·10¹¹ | 4 | 3.33·10⁻¹⁵ |

The runs lasted 37, 39 and 17 minutes, which is roughly 317, 334 and 145 test
cycles of 7 s.

## What follows the measurement description and what is chosen here

These values come from the test as described:

- 3000-bit register;
- 1 kHz shift clock;
- 1 s hold;
- write, hold, read back, compare, count, report to the host;
- 0.8 s watchdog window and heartbeat;
- TMR in the DUT firmware;
- the arrangement of DUT, data-generator board, flat cable and USB link to the
  host.

These choices are this design's own:

| choice | value |
|--------|-------|
| system clocks | 100 MHz on both boards (`CLK_HZ`) |
| cable | 3 wires; synchronisers and edge detection on both sides |
| pattern | PRBS-7, restarted every phase |
| comparison | on the control board, one upset per mismatching bit |
| read phase | refills the register with the same pattern |
| cycling | back to back while `run_i` is high |
| host link | UART 115200 8N1, 5-byte report, replace-if-busy |
| heartbeat | level toggle every 200 ms |
| TMR scope | the heartbeat state, with feedback voting |
| resets | asynchronous, active low; the register clears on reset |
| test hooks | upset-injection ports |

One statement in the description is ambiguous. It says that the control board
checks for mismatches. It also says that the DUT "reported" a failure, which
then incremented the counter on the control board. This RTL puts the comparison
and the counter on the control board.

## Files

- `rtl/seu_pkg.sv`: shared constants, the phase type and the PRBS step.
- `rtl/seu_test_setup.sv`: the top level.
- `rtl/seu_tester.sv`: the control-board sequencer.
- `rtl/host_reporter.sv` and `rtl/uart_tx.sv`: the report path to the host.
- `rtl/pp3_test_firmware.sv`: the DUT firmware.
- `rtl/seu_shift_register.sv`: the upset sensor.
- `rtl/heartbeat_gen.sv` and `rtl/tmr_voter.sv`: the triple-redundant heartbeat.
- `rtl/sync_2ff.sv`: the clock-domain synchroniser.
- `tb/tps3306_model.sv`: behavioural model of the watchdog chip.
- `tb/uart_rx_model.sv`: a host-side UART receiver.
- `tb/tb_*.sv`: one self-checking testbench per module, plus:
  - `tb_seu_test_setup`: end to end at reduced timing, exercising every
    mechanism;
  - `tb_seu_test_setup_large`: one complete cycle with the full register and
    100 MHz clocks;
  - `tb_seu_campaign_runs`: the proton runs.

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself after a
fixed time.

## Simulating

With Verilator 5, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/seu_pkg.sv tb/tb_seu_test_setup.sv --top-module tb_seu_test_setup
obj_dir/Vtb_seu_test_setup
```

Replace the testbench name to run any other test. All timing parameters are in
physical units (`CLK_HZ`, `SCK_HZ`, `HOLD_MS`, `BAUD`, `HB_HALF_MS`), so a
smaller `CLK_HZ` makes a faster simulation with the same protocol. Keep
CLK_HZ/(2·SCK_HZ) ≥ 8 and CLK_HZ/BAUD ≥ 2.

**How far it is tested.** Every module has its own test. The top level is
tested end to end at reduced clock rates. The largest run, `tb_seu_test_setup_large`,
uses the full 3000-bit register, 100 MHz clocks, 115200 Bd and the 0.8 s
watchdog. It speeds up only the shift clock (10 kHz) and the hold (100 ms), so
that one cycle is 0.7 s of simulated time, which takes about a minute. The
same test with those two overrides removed (and its expected cycle length set
to 4·3000·50000 + 10⁸ clock cycles) runs one cycle at the exact defaults: 7 s,
about 7·10⁸ clock cycles per board. It passed, but it needs close to ten minutes
in Verilator, so it is not part of the regular test set.
