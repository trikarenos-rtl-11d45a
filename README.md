# Trikarenos fault-tolerant SoC: ECC memory, lockstep grouping and telemetry

Trikarenos is a RISC-V microcontroller built to survive radiation upsets. It has three
small RV32 cores that can run as one triple-core lockstep (TCLS) group or as three
independent cores. This choice is called on-demand redundancy grouping (ODRG). The
cores share 256 KiB of SRAM. The SRAM is split into eight word-interleaved banks, and
every bank has a SECDED error-correcting code (ECC), read-modify-write support for
sub-word stores, and its own scrubber. Telemetry counters record every lockstep
mismatch and every memory error, so software can tell how much radiation the chip is
taking.

This RTL describes the fault-tolerance part of the SoC: the lockstep/independent
switch with its voters, the ECC memory subsystem, the crossbar that connects them, and
the control/telemetry registers. The cores, debug module, I/O DMA and peripherals are
not built. They appear as ports on the top module `trikarenos_soc`.

## Block overview

```
              core 0        core 1        core 2          (external)
                 |  core_out_t / core_in_t  |
          +------+-------------+------------+------+
          |  odrg_tcls   3 x tcls_voter + routing  |--- mismatch, fault id, recovery irq
          +------+-------------+------------+------+
           port 0 (I,D)  port 1 (I,D)  port 2 (I,D)   debug   DMA
                 |             |            |           |      |
          +------+-------------+------------+-----------+------+------+
          |        soc_interconnect: 8 masters x 10 slaves crossbar   |
          +---+------+------ ... ------+-----------+------------+-----+
              |      |                |           |            |
          ecc_bank ecc_bank  ...  ecc_bank   soc_ctrl_regs   periph port
          (x 8, each: RMW control, hsiao_enc, hsiao_dec, ecc_scrubber, sram_bank)
```

| Module | Role |
|---|---|
| `trik_pkg` | Widths, bus and core-port structs, address map, Hsiao check matrix |
| `hsiao_enc` / `hsiao_dec` | (39,32) Hsiao SECDED encoder and decoder |
| `sram_bank` | 8192 x 39 single-port array, one-cycle read |
| `ecc_scrubber` | Background read-check-correct walker for one bank |
| `ecc_bank` | Bank control unit: arbitration, read-modify-write, ECC, scrubber |
| `tcls_voter` | Bitwise 2-of-3 majority with mismatch flag and faulty-input id |
| `odrg_tcls` | Lockstep/independent routing, voting, recovery request, core resync |
| `soc_interconnect` | Crossbar with one round-robin arbiter per slave |
| `soc_ctrl_regs` | Mode, recovery, scrub rate and error-counter registers |
| `trikarenos_soc` | Top level: connects all of the above |

## Bus protocol

All masters and slaves use one simple protocol (`bus_req_t`, `bus_rsp_t`):

- A master raises `req` with `we`, `be`, `addr` and `wdata`, and holds them until `gnt`.
- `gnt` is combinational in the same cycle.
- Exactly one cycle after the grant, `rvalid` is high. For a read, `rdata` is valid then.
- Every slave answers with this fixed latency. This keeps the response path of the
  crossbar to a single registered "who was granted" flag per slave, with no queues.

## Triple-core lockstep with on-demand grouping (`odrg_tcls`, `tcls_voter`)

Each core has one output bundle (`core_out_t`) and one input bundle (`core_in_t`):

- Outputs: instruction request and address, data request, address, write enable, byte
  enables, write data, plus the status lines `debug_halt`, `irq_ack` and `busy`.
- Inputs: instruction and data grant, valid and read data, plus `fetch_enable`,
  `boot_addr`, `core_id`, `debug_req` and the 32 interrupt lines.

There are two modes:

- **Independent mode.** Core *i* is wired straight to system port *i*. The three cores
  run three programs at three times the throughput.
- **Locked mode.** Whole output bundles from the three cores go through a bitwise
  majority voter. The voted value drives system port 0, and ports 1 and 2 are idle.
  All three cores receive port 0's inputs, including core id 0, so they stay in step.
  A single faulty core cannot change what the system sees.

The voter also reports `mismatch` and a one-hot `fault_id` naming the core(s) whose
bundle differs from the majority.

**Recovery.** A mismatch in locked mode starts the recovery sequence:

1. The block sets a sticky `recovery_pending` flag and latches the faulty-core id.
   Interrupt line 31 of every core is forced high while the flag is set.
2. The recovery handler stores the register file and CSRs to memory. The stores pass
   through the voters, so the memory copy is the majority state.
3. The handler writes the resynchronise command to the `RECOVERY` register. This
   clears the flags and pulses `core_rst_o` (the synchronous core reset) for one cycle.
4. All three cores restart at the boot address. The boot code sees that a recovery is
   in progress and reloads the saved state, so all three continue with identical state.

The handler runs as an ordinary interrupt, so software can keep interrupts masked and
delay recovery through a critical section. The same synchronous reset is issued when
the mode changes, so cores always enter or leave lockstep from a known point. Both
kinds of reset block the mismatch output, because the three cores may legally differ
in that cycle.

The source design resets only the faulty core before the restore. Here all three cores
are reset. This is simpler and guarantees the three restart in the same cycle; the
saved state is identical either way.

## ECC memory banks (`ecc_bank` and its parts)

### Code

Each 32-bit word is stored as a 39-bit Hsiao SECDED codeword `{check[6:0], data[31:0]}`.

- Each data column of the check matrix is a 7-bit value with exactly three ones. The
  32 smallest such values are used, in ascending order.
- Each check-bit column is a unit vector.
- The decoder computes the syndrome:
  - Zero means the word is clean.
  - A syndrome equal to a column points to one bit, which is flipped.
  - Any other non-zero syndrome (all even-weight ones and the odd-weight values that are
    not columns) is reported as uncorrectable.
- The decoder returns both the corrected data and the corrected 39-bit codeword. The
  scrubber uses the codeword.

### Bank control unit

The bank has one single-port SRAM shared by three users. Priority, highest first:

1. Second half of a read-modify-write.
2. System access.
3. Scrubber.

| Access | What happens |
|---|---|
| Full-word write (`be = 4'hF`) | Encoded and written in the grant cycle. |
| Read | The codeword is read in the grant cycle, decoded in the next, and returned corrected with `rvalid`. A single error counts as an access-correctable event; a double error counts as an access-uncorrectable event. The stored word is left as it is; the scrubber repairs it later. |
| Sub-word write (read-modify-write) | Granted at once, so the master is not held up. In the grant cycle the old codeword is read. In the next cycle it is decoded and corrected, the new bytes are merged in, and the word is re-encoded and written back. The port is busy in that second cycle, so only a request to this bank in the very next cycle waits one cycle. |

A read-modify-write that finds an error counts it like a read. An uncorrectable old
word still has the new bytes merged in and is written with fresh check bits. This
cannot be avoided, and the error counter records it.

### Scrubber

Each bank's scrubber walks addresses 0 ... 8191 and wraps around. Each step is:

1. **Wait.** Wait `SCRUB_INT` cycles after the previous check. A value of 0 disables
   the scrubber.
2. **Read.** Request the port. The request is granted only when neither the system nor
   a read-modify-write uses the port, so the scrubber only delays itself.
3. **Check.** Look at the decoder result one cycle later.
   - A correctable word becomes a pending write-back and a scrub-corrected event.
   - An uncorrectable word becomes a scrub-uncorrectable event and is left alone.
4. **Write back.** Write the corrected codeword when the port is free. If the system
   writes the same word while the write-back waits, the write-back is dropped so that
   new data is never overwritten with old data.

The fastest setting (`SCRUB_INT = 1`) checks one word every two idle cycles. The whole
bank then takes 16384 cycles. The published beam setting of one check every 6225
cycles gives 8192 x 6225 = 51 M cycles, which is 408 ms per pass at 125 MHz.

## Interconnect (`soc_interconnect`)

A full crossbar with 8 masters and 10 slaves.

- **Masters:**
  - 0-2: instruction ports of system ports 0-2
  - 3-5: data ports of system ports 0-2
  - 6: debug module
  - 7: I/O DMA
- **Slaves:**
  - 0-7: the memory banks
  - 8: control registers
  - 9: peripheral port for everything else (boot ROM, peripherals, debug memory)

Each slave has a round-robin arbiter. After a grant, the winner becomes the lowest
priority for that slave. Different masters use different slaves in parallel. A master
waits only while another master holds the same bank.

### Address map (this design's choice)

| Range | Target |
|---|---|
| `0x1C00_0000` - `0x1C03_FFFF` | SRAM, 256 KiB; bank = `addr[4:2]`, row = `addr[17:5]` |
| `0x1A10_4000` - `0x1A10_4FFF` | Control registers |
| anything else | Peripheral port |
| `0x1A00_0080` | Default boot address (in peripheral space, where the boot ROM sits) |

## Control and telemetry registers (`soc_ctrl_regs`)

Byte offset = 4 x word offset from `0x1A10_4000`.

| Word | Name | Access | Meaning |
|---|---|---|---|
| 0 | `MODE` | RW | bit 0: 1 = lockstep (reset), 0 = independent. A change resets the cores. |
| 1 | `RECOVERY` | R / W | read `{fault_id[2:0], pending}`; write bit 0 = 1 to resynchronise |
| 2 | `SCRUB_INT` | RW | cycles between word checks, 0 = off (reset 1 = fastest) |
| 3 | `TCLS_CNT` | RW | lockstep events: mismatches that started a recovery |
| 4 | `ACC_CORR` | RW | correctable errors seen by system accesses, all banks |
| 5 | `ACC_UNC` | RW | uncorrectable errors seen by system accesses |
| 6 | `SCRUB_CORR` | RW | words corrected by scrubbers |
| 7 | `SCRUB_UNC` | RW | uncorrectable words found by scrubbers |

All counters are 32 bits wide, saturate, and can be written to clear them. If several
banks report in the same cycle, each event is counted. One lockstep event is counted
per recovery, not per mismatching cycle.

## Top level (`trikarenos_soc`)

The top instantiates the ODRG block, the crossbar, eight ECC banks and the register
block. Its ports connect to the parts that are not built:

- the three core bundles and the core reset;
- per-core interrupts and debug requests, and `fetch_enable`;
- a bus master port for the debug module and one for the I/O DMA;
- a bus slave port for the peripheral space;
- status outputs: mode, mismatch, fault id and recovery pending.

The defaults give the full chip size: 8 banks x 8192 words x 39 bits = 2,555,904
memory bits.

## Verification

Every module has a self-checking testbench in `tb/` using `$urandom` stimulus and a
watchdog. Each testbench ends with a line `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_hsiao_enc` | Check bits against an independently written reference for directed and random words |
| `tb_hsiao_dec` | Clean words; every single-bit flip (data and check) is corrected and flagged; random double flips are flagged uncorrectable |
| `tb_sram_bank` | Random writes and reads against a model; read data held between reads |
| `tb_tcls_voter` | Random triples with 0, 1 or 2 differing inputs; majority, mismatch and fault id |
| `tb_ecc_scrubber` | The scrubber's FSM against a model: rate, yielding, write-back, drop on system write, events |
| `tb_ecc_bank` | Random reads, full and partial writes against a model; the stall after a read-modify-write; injected single and double upsets; corrections by the scrubber |
| `tb_odrg_tcls` | Routing in both modes; voting; mismatch, fault id, recovery interrupt; resync and mode-change resets |
| `tb_soc_interconnect` | Random traffic from all masters against a memory model, decode, fixed latency, round-robin order |
| `tb_soc_ctrl_regs` | Register reads and writes, resync pulse, counter increments, saturation |
| `tb_trikarenos_soc` | Full-size system test, described below |

`tb_trikarenos_soc` runs the top at its default size with three behavioural core models
(`tb_core_model`). The sequence is:

1. Load a program area over the debug port.
2. Run in lockstep.
3. Inject a state upset into one core. The run shows detection, the fault id, the
   recovery interrupt, the save/resync/restore sequence, and a correct continuation.
4. Flip SRAM bits. Some are repaired by the scrubbers, some seen by accesses, and some
   are double errors.
5. Switch to independent mode (three parallel programs with bank contention), then back
   to lockstep.
6. Read the telemetry counters over the bus and compare them with counts taken from the
   top's internal event signals.

The test counts each mechanism and fails if any count is zero: parallel grants,
arbitration waits, read-modify-writes, read-modify-write stalls, access corrections,
scrub corrections, uncorrectable events, peripheral accesses, mode switches and
resynchronisations.

`tb_beam_campaign` replays the radiation-test scenario on the full-size SoC. It has
two parts:

1. **Proton scrub setting.** `SCRUB_INT` is set to 6225, and the testbench measures
   the time between word checks of one bank. The result is exactly 6225 cycles while
   the bank is idle, and never less.
2. **Upset campaign.** This runs at the fastest scrub rate, with the cores in lockstep,
   for twelve rounds. In each round:
   - one random bit of a random core's state is flipped;
   - six single-bit upsets are placed in distinct random SRAM words.

   Every core upset must be out-voted, named correctly in the fault id, and recovered.
   After two scrub passes, the counters read over the debug port must show exactly 12
   lockstep events and 72 scrubber corrections, with no other errors. Every upset word
   must again hold a clean codeword.

For each module, a deliberately broken variant was also simulated to confirm that its
testbench reports failures.

Simulation with Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/trik_pkg.sv tb/tb_hsiao_ref_pkg.sv tb/<testbench>.sv --top-module <testbench>
./obj_dir/V<testbench>
```

## Departures from the source design and open points

- **Not built.** The Ibex cores, the debug module, the uDMA with QSPI and UART, GPIO,
  the timer, the boot ROM and the pads. The SoC boundary exposes their connections.
  The testbench replaces the cores with behavioural models that run a fixed load/store
  program and a recovery routine in the same order as the real software.
- **Recovery length.** The source gives the software recovery length as "up to 700
  cycles" in one place and "around 600 cycles" in another. It is a property of the
  routine, not of this hardware. The behavioural routine in the testbench saves a small
  state and takes about 80 cycles.
- **Reset during recovery.** All three cores are reset on resynchronisation, not only
  the faulty one (see above).
- **Memory size.** The source says both "256 KiB" and "256 kB". 256 KiB is used, which
  matches the stated 2,555,904 memory bits (65,536 words x 39 bits).
- **Not in the source; this design's own choices.** The interconnect internals,
  address map, register offsets, recovery interrupt number, scrub-rate encoding,
  Hsiao column order and fault-id encoding.
- **Access errors not written back.** A correctable error seen by a system read is
  reported and corrected in the returned data, but the stored word is fixed only by the
  scrubber or a later write.
