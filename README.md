# STRV-R1: a fully triplicated RV32IMC microcontroller

Particle detectors put their front-end electronics in places where ionising particles keep
flipping bits. A single-event upset (SEU) in a flip-flop or an SRAM cell corrupts program
state, and in a memory the corruption stays until the word is rewritten. The STRV-R1 is a
small RISC-V microcontroller built to keep working in that environment. It does this with
redundancy alone, not with special radiation-hard cells:

* **Every flip-flop exists three times** (triple modular redundancy, TMR). Each copy has its
  own clock tree and reset. Three majority voters follow every register, and an upset copy is
  rewritten from the voted value at the next clock edge.
* **All combinational logic also exists three times.** An upset in logic or in one clock tree
  only affects one copy, and the voters outvote it.
* **The 32 kB instruction/data memory exists three times.** Reads are majority voted. A
  refresh engine walks through the memory on a second port and rewrites any word where one
  copy has drifted, so upsets cannot pile up.
* **Every voter reports disagreements.** These reports are counted per chip domain in three
  memory-mapped counters and brought out on pins, so a test set-up can see each upset.

This repository holds synthesizable SystemVerilog for the whole chip: core, debug port,
memory bridge, triplicated SRAM with refresh, GPIO, UART and SEU counters. It also holds a
self-checking testbench for every block and one that runs the whole chip end to end. The
architecture follows the published description of the STRV-R1 (a 65 nm chip for
high-energy-physics use). That description gives the redundancy scheme and the refresh loop
in detail, but says little about the core, the debug port and the peripherals. Those parts
are written here from the RISC-V specifications, and the sections below mark which parts
these are.

## 1. Chip organisation

```
             clk_i[0..2], rst_ni[0..2]  (three clock trees, three resets)
                          |
  JTAG ──> debug_module ──┐                                   core domain
                          │ system bus
  strv_core ── IMEM ──> mem_bridge ──> port A ──> tmr_sram  <── port B ── sram_scrubber
            ── DMEM ──>      │                 (3 x 32 kB)                   SRAM domain
                             │ peripheral bus
                             └──> strv_periph: gpio, uart, seu_counters   peripheral domain
   seu_o[2:0] <── OR of all voter discrepancy flags, per domain
```

The chip has three supply domains, and the RTL groups its blocks the same way:

| Domain | Blocks |
|---|---|
| Core | `strv_core`, `debug_module`, `mem_bridge` |
| SRAM | `tmr_sram` (three `sram_dp_macro`), `sram_scrubber` |
| Peripherals | `strv_periph` (`gpio`, `uart`, `seu_counters`) |

Every block is triplicated internally. All connections between blocks are therefore arrays of
three (`bus_req_t req [3]`), with element *i* belonging to TMR copy *i*. Copies are also
called domains A, B and C; this is a different sense of "domain" from the three supply
domains above.

Memory map. The addresses are this design's choice; the description gives only the SRAM size.

| Address | Contents |
|---|---|
| `0x0000_0000`–`0x0000_7FFF` | SRAM: program and data (aliased up to `0x7FFF_FFFF`) |
| `0x8000_0000` | GPIO: +0 OUT, +4 DIR (1 = output), +8 IN |
| `0x8000_0100` | UART: +0 TXDATA, +4 RXDATA (read clears valid), +8 STATUS (bit 0 tx busy, bit 1 rx valid), +C BAUDDIV |
| `0x8000_0200` | SEU counters: +0 core, +4 SRAM, +8 peripherals (writable, e.g. to clear) |

After reset the core starts at address 0.

## 2. The TMR storage cell (`tmr_reg`, `tmr_voter`)

All state in the design, apart from the SRAM arrays, lives in `tmr_reg` cells. One cell of
width W holds:

```
 copy i (i = 0,1,2), on clk[i] / rst_n[i]:

   d[i] ──┐
          mux ──> FF_i ───┬──> voter 0 ──> q[0] ──> logic of domain 0
   q[i] ──┘  ^            ├──> voter 1 ──> q[1] ──> logic of domain 1
          en[i]           └──> voter 2 ──> q[2] ──> logic of domain 2
```

Each voter sees all three flip-flops. Voter *i* drives only domain *i*'s logic. In each
copy, the enable multiplexer chooses between:

* the new value `d[i]`, when `en[i]` is high;
* the copy's own voted output `q[i]`, when `en[i]` is low.

That second path is the key idea. A register that is not being written still reloads the
majority every cycle. A flipped bit therefore lasts at most one clock period. It cannot sit
until a second upset hits another copy of the same bit, which would defeat the vote. A plain
enable flip-flop that holds its own content would keep the bad copy indefinitely.

Properties that follow from this structure:

* **One upset costs nothing in timing.** The voted outputs never change, so the logic never
  sees the upset.
* **Upsets are reported.** Each voter's `err` output goes high while its inputs differ. One
  upset in one flip-flop copy raises `err` for exactly one cycle, because it is repaired at
  the next edge.
* **Upsets in logic or clocks are contained.** An upset in domain *i*'s combinational logic,
  or a glitch on clock tree *i*, changes only the copy-*i* flip-flops. Voting then corrects
  it on the next cycle.

How the blocks are written. Every triplicated block uses the same pattern:

```systemverilog
for (genvar i = 0; i < 3; i++) begin : g_dom
  always_comb begin            // next-state logic of domain i, sees only st_q[i]
    st_d[i] = st_q[i];
    ...
  end
end
tmr_reg #(.W($bits(state_t))) u_state (.clk, .rst_n, .en(st_en), .d(st_dv), .q(st_qv), .err(st_err));
```

The state of a block is one packed struct. The logic exists three times, and the tools keep
the three copies separate because each drives a different flip-flop copy. A synthesis flow
for a real chip must also be told not to merge the copies (keep or dont_touch attributes).
That is a tool setting and not part of this RTL.

Each copy has its own reset, so the three copies leave reset at slightly different times.
They agree again from the first cycle after all three resets are released.

## 3. Triplicated SRAM and the refresh engine

### 3.1 Voted reads, triplicated writes (`tmr_sram`)

There are three `sram_dp_macro` instances, each 8192 × 32 bit with a byte-write mask. Each one
is written as a synthesizable array and stands in for a foundry dual-port macro. TMR copy *i*
drives macro *i* with its own copy of every request. A core write therefore stores each
domain's data, which comes from voted registers, into that domain's macro.

Port A serves the core. Its read data passes three 32-bit voters, and voter *i* feeds
domain *i*. A single corrupted copy of a word is thus masked on every read.

Masking alone is not enough: the corrupted copy stays wrong. A second upset in the same bit
of another copy would then defeat the vote. That is the job of the refresh engine.

### 3.2 Refresh loop (`sram_scrubber`)

Port B of every macro belongs to the refresh engine. The engine needs each macro's raw,
unvoted output to see whether the copies agree. The loop has three states:

```
        ┌──────────────────────────────────────────────────────┐
        v                                                      │
  READ row r ──> COMPARE the three words ──(all equal, or core writes r)──> r+1
                        │
                        └──(differ, no core write to r)──> WRITE voted word to all three ──> r+1
```

Timing:

* **Clean row: 2 cycles**, one READ and one COMPARE. The address advances in the COMPARE
  cycle.
* **Row with an upset: 3 cycles.** The voted word is written back in the cycle after the
  compare.
* **Full pass over 8192 rows: 16384 cycles**, which is 327.7 µs at 50 MHz. A pass takes this
  long even with no upsets. The published upper limit on correction time is 320 µs; this
  implementation is 2.4 % slower. To reach 320 µs a row would have to be visited in fewer
  than 2 cycles on average, and nothing in the description says how.

Collisions with the core, the hardest part. The two ports run independently, so the core can
write a row while the engine is working on it. If the engine then wrote back its voted copy,
it would destroy the core's newer data. The write-back is therefore skipped if a core write
to the same row happens in any of these cycles:

| Cycle of the core write | Why the write-back must be skipped |
|---|---|
| WRITE | Named by the description. Both ports would write the same word; the engine drops its write, and the macro gives port A priority anyway. |
| READ | The macro returns the old word to port B. The engine's voted word is therefore stale. |
| COMPARE | The engine's voted word is stale for the same reason. |

Checking the READ and COMPARE cycles is this design's addition. The description names only
the concurrent write. A skipped row is not a loss: the core has just written all three
copies with the same data.

Other details:

* **The engine is itself triplicated.** Its FSM state, row address and hit flag are in a
  `tmr_reg`, and each copy drives port B of its own macro.
* **`scrub_en_i` stops the engine** between rows. This exists because the chip was measured
  with and without refresh.
* **Discrepancy reporting.** A mismatch found in COMPARE raises the SRAM-domain discrepancy
  flag. The port A voters also raise it when they mask a corrupted word for the core.

At power-up the three macros hold unrelated contents. The first refresh pass therefore
rewrites nearly every row, and the SRAM counter counts those rows. Software that wants clean
counts clears the counters after one pass, about 330 µs.

## 4. Sharing the SRAM port (`mem_bridge`) and the bus protocol

The core has separate instruction (IMEM) and data (DMEM) buses. The debug module adds a
third master, the system bus used to load programs. Port A of the SRAM can do one access
per cycle, so the bridge arbitrates:

* **Fixed priority:** debug, then data, then instruction. The losing master keeps its
  request up.
* **Address decode:** bit 31 of the address picks the SRAM (0) or the peripheral bus (1).

Bus protocol, used between all blocks (`strv_pkg`):

1. The master raises `req` with `addr/we/be/wdata` and holds them.
2. `gnt` comes back combinationally in the cycle the request is accepted.
3. Exactly one cycle after the grant, `rvalid` is high for one cycle, with `rdata` for reads.

The peripherals also answer one cycle after the grant, through a register in `strv_periph`.
The whole memory system therefore has a fixed one-cycle latency and never makes the core
wait longer. The core stalls only when a data access and an instruction fetch compete for
the port: the fetch loses and is retried. This is the only stall source besides the divider.

## 5. The RV32IMC core (`strv_core`, `strv_core_logic`, `rv32_pkg`)

`strv_core` wraps the triplication:

* `strv_core_logic` three times, the purely combinational next-state logic of one domain;
* one `tmr_reg` for the pipeline state, rewritten every cycle;
* 31 `tmr_reg` registers for `x1`–`x31`. Each is enabled when its own copy of the write port
  addresses it, so an unwritten register refreshes itself from its vote.

`x0` is a constant. The three-stage pipeline follows the description (fetch, decode/execute,
writeback). Its details are this design's own.

**Fetch.** The fetch unit reads aligned 32-bit words into a queue of six 16-bit halfwords,
with these rules:

* **Instruction lengths.** A compressed (16-bit) instruction uses one queue slot and a 32-bit
  instruction uses two. Both may start at any halfword address.
* **Issue rule.** A new fetch is issued only if `q_cnt + 2·inflight ≤ 4`. A returning word
  then always has room, so no response is ever dropped. The two spare slots let the fetch
  unit run a word ahead, so a lost port cycle to a load or store does not starve the decoder
  at once.
* **Redirects.** A taken branch or jump empties the queue and discards any word in flight.
  In the same cycle it requests the aligned target word, so a taken branch costs one bubble.
  If the target is the upper halfword of that word, the first halfword that comes back is
  dropped (`drop_first`).

**Decode/execute.** The instruction at the head of the queue is handled in one cycle:

* **Expansion.** A compressed instruction is first expanded to its 32-bit equivalent
  (`rv32_pkg::rvc_expand`), so only one decoder exists. An invalid compressed encoding
  expands to zero, which is illegal.
* **Operands and bypass.** Operands are read from the voted register file. If the
  instruction in writeback writes a source register, its value is bypassed.
* **ALU and branches.** ALU operations and branch decisions take one cycle.
* **Multiply.** `MUL`/`MULH`/`MULHSU`/`MULHU` use one 33×33 signed multiplier in a single
  cycle.
* **Divide.** `DIV`/`DIVU`/`REM`/`REMU` use a restoring divider, one quotient bit per cycle,
  and hold the stage for 34 cycles. Division by zero and overflow give the results the
  RISC-V specification defines.
* **Loads and stores** put their request on DMEM here and stall until the bridge grants it.

**Writeback.** This stage writes ALU results. Load data arrives here, one cycle after the
grant, and is aligned and sign- or zero-extended before it is written.

**Not implemented:**

* CSRs, exceptions and interrupts. `ECALL`, `EBREAK`, any other SYSTEM instruction and any
  illegal instruction stop the core (`halted_o`). A test program ends with `EBREAK`.
* `FENCE` has nothing to order in this design and executes as a no-op.
* Misaligned loads and stores are not supported.

The published core is derived from an existing RV32IMC design whose internals are not
described. This pipeline is therefore not a copy of it. It has the same ISA and the same
number of stages. Its cycle counts, and so its Dhrystone score, differ (section 9).

## 6. Programming over JTAG (`debug_module`)

The chip is loaded and controlled through JTAG. This block runs entirely on the system
clock:

* **Pin sampling.** TCK, TMS and TDI pass a two-stage synchroniser, and TCK edges are found
  in the sampled stream. TCK must be at most 1/8 of the system clock. This lets the TAP be
  triplicated like everything else. A separate TCK clock domain would need its own TMR
  scheme.
* **TAP.** A standard IEEE 1149.1 TAP with a 5-bit instruction register:

  | IR | Register |
  |---|---|
  | `0x01` | IDCODE, `0x1000_0A5B` |
  | `0x10` | DTMCS |
  | `0x11` | DMI, 41 bits: address[40:34], data[33:2], op[1:0] |
  | others | BYPASS |

  A DMI access is carried out on Update-DR. Its result is shifted out by the next DMI scan.
* **Debug-module registers**, after the RISC-V debug specification 0.13:

  | Address | Register | Contents |
  |---|---|---|
  | `0x10` | dmcontrol | `haltreq` (bit 31), `ndmreset` (bit 1), `dmactive` (bit 0) |
  | `0x11` | dmstatus | halted/running flags of the core |
  | `0x38` | sbcs | 32-bit system-bus accesses with `sbreadonaddr`, `sbreadondata` and `sbautoincrement` |
  | `0x39` | sbaddress0 | system-bus address |
  | `0x3C` | sbdata0 | system-bus data |

Loading a program:

1. Write dmcontrol = `0x3` (dmactive, ndmreset). This holds the core in its reset state.
2. Set `sbautoincrement` in sbcs.
3. Write the start address to sbaddress0.
4. Write sbdata0 once per word.
5. Clear `ndmreset`. The core starts at address 0.

Results can be read back the same way, with `sbreadonaddr`/`sbreadondata`. This works
whether the core is running or halted.

**Not implemented:** abstract commands (register access) and the program buffer. A debugger
can load, start, stop and inspect memory, but cannot read core registers. This is enough to
program the chip, which is what the description uses JTAG for.

## 7. Peripherals and SEU counters (`strv_periph`, `gpio`, `uart`, `seu_counters`)

* **`gpio`:** 27 pins, each with an output bit, a direction bit and a sampled input bit.
* **`uart`:** 8N1, LSB first, one bit lasts BAUDDIV clocks (reset value 434, that is
  115200 baud at 50 MHz). Receive has a two-flop synchroniser and samples each bit in its
  middle. Writes to TXDATA are ignored while the transmitter is busy.
* **`seu_counters`:** three 32-bit counters. Each adds one in every clock cycle in which the
  OR of its domain's voter discrepancy flags is high. These flags are:

  | Counter | Flags ORed |
  |---|---|
  | core | core, debug module and bridge voters |
  | SRAM | port A read voters and refresh mismatches |
  | peripherals | GPIO, UART, counter and interconnect voters |

  A single flip-flop upset is repaired in one cycle, so it adds exactly one. The same three
  flags, from copy 0, drive `seu_o[2:0]`.

All peripheral registers are TMR registers. The pads are driven from copy 0's voted
outputs. The chip has a single set of pads, and the description does not say how the vote
reaches the pins.

## 8. Top-level ports (`strv_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 × 3 | clock and asynchronous active-low reset of each TMR copy |
| `jtag_tck_i`, `jtag_tms_i`, `jtag_tdi_i` / `jtag_tdo_o` | in / out | 1 | JTAG |
| `gpio_i`, `gpio_o`, `gpio_oe_o` | in / out / out | 27 | GPIO pads |
| `uart_rx_i` / `uart_tx_o` | in / out | 1 | UART |
| `scrub_en_i` | in | 1 | enable SRAM refresh |
| `seu_o` | out | 3 | voter discrepancy seen this cycle: bit 0 core, 1 SRAM, 2 peripherals |
| `halted_o` | out | 1 | core stopped (`EBREAK`, `ECALL` or illegal instruction) |

Parameters:

* `SRAM_WORDS_P`: default 8192 words, which is 32 kB.
* `UART_DIV_RESET`: default 434.

The design was built with the open-source Yosys flow at these defaults: 5373 flip-flop bits
plus 3 × 262144 SRAM bits. The flip-flop count is three times the architectural state,
because every bit is triplicated.

## 9. Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it hangs. Upsets are
injected with `force`/`release` on a single flip-flop copy (`g_ff[i].ff` inside a `tmr_reg`)
or by writing one macro's array directly.

| Testbench | What it checks |
|---|---|
| `tmr_voter_tb` | majority and discrepancy output on random and single-copy-upset inputs |
| `tmr_reg_tb` | load, hold and reset; an upset in any copy never reaches the voted outputs, is flagged for exactly one cycle and is repaired at the next edge without a write |
| `sram_dp_macro_tb` | both ports, byte masks and read-during-write, against a reference model |
| `tmr_sram_tb` | voted reads mask an upset in any one macro, with `a_err` raised; port B shows the raw copy; a word corrupted in two copies is not masked |
| `sram_scrubber_tb` | pass period of 2 cycles per row; see the notes below |
| `mem_bridge_tb` | random traffic from three masters: priority, one grant per cycle, response routing, SRAM/peripheral decode |
| `strv_core_tb` | a hand-assembled RV32IMC program (50 results covering every instruction class, RVC forms, M-extension corner cases) on a memory that randomly refuses requests; one register-copy upset during the run |
| `debug_module_tb` | IDCODE, BYPASS, DTMCS, DMI register access, system-bus reads and writes with all three sbcs modes, halt request and `ndmreset` |
| `gpio_tb`, `uart_tb`, `seu_counters_tb`, `strv_periph_tb` | register behaviour, the serial waveforms and bit timing, back-to-back frames, and counting |
| `strv_top_tb` | the whole chip at its default size; see below |
| `strv_workload_tb` | Dhrystone, a register-centred loop and an SRAM-centred loop on the full chip, with the refresh on and off; see below |

Notes on `sram_scrubber_tb`. It also checks that:

* every corrupted row is repaired, with exactly one write each;
* no write lands on a row the core is writing;
* a single core write in the READ or COMPARE cycle keeps the core's data.

`strv_top_tb` runs the whole chip at its default size:

1. It loads the test program over JTAG.
2. The program runs its RV32IMC checks. It also drives the GPIOs, sends and receives a UART
   byte, and stores the SEU counters.
3. During the run the testbench injects upsets into a core register copy, a GPIO register
   copy and several SRAM words of one macro.
4. It reads all results back over JTAG and checks them. It also checks the pins and that
   the refresh engine has repaired every corrupted word.

The testbench counts how often each mechanism occurred, and any count of zero is a failure.
The mechanisms are: fetch stall, bypass, flush, compressed instruction, divider, core repair,
SRAM voter masking, refresh write-back, debug bus access, UART transmit and receive. It
takes about 1 ms of simulated time.

`strv_workload_tb` runs the three kinds of program used for the published power figures on
the full-size chip at 50 MHz. The programs are written straight into all three SRAM copies
while the chip is in reset. Each run ends at `EBREAK`.

| Program | Cycles | Fetch stalls | SRAM port busy | Result |
|---|---|---|---|---|
| Dhrystone 2.1, GCC `-O2`, 500 runs | 549 497 | 84 221 | 92.8 % | 1059 cycles/run = **0.537 DMIPS/MHz** |
| Dhrystone 2.1, GCC `-O3`, 500 runs | 428 997 | 89 707 | 89.5 % | 818 cycles/run = **0.695 DMIPS/MHz** |
| register-centred ALU loop, 200 iterations | 3018 | 4 | 100 % | registers match a model |
| SRAM-centred copy of 256 words | 1349 | 512 | 100 % | copy matches |

* **DMIPS/MHz.** It is computed as 10⁶ · runs / (1757 · cycles), counted between the
  benchmark's own start and stop points. The published chip gives 0.628 (and 0.665 with
  `-O3`). This core is slower at `-O2` and faster at `-O3`; the compiler version and the
  harness differ from the published ones, so the figures are only comparable in magnitude.
* **Refresh has no cost.** With the refresh enabled, each program takes exactly the same
  number of cycles as with it disabled, because refresh has its own SRAM port.
* **Upsets.** During the `-O2` run with refresh on, six instruction words are corrupted in one
  SRAM copy and one copy of the stack pointer is upset. The benchmark's final variables must
  still match the values that Dhrystone documents, and every corrupted word must be repaired.
* **Stalls.** The register loop has almost no fetch stalls and the SRAM loop stalls on every
  load and store, as the published power discussion assumes. The SRAM port is busy in almost
  every cycle in all cases.

The Dhrystone images (`tb/strv_dhrystone_o2.hex`, `tb/strv_dhrystone_o3.hex`, one 32-bit word
per line from address 0) hold the unmodified Dhrystone 2.1 sources and a minimal harness:

* a start-up routine that sets the stack pointer and calls `main`;
* small `strcpy`, `strcmp`, `memcpy` and `memset` routines;
* `printf` removed.

Built with `riscv64-unknown-elf-gcc -march=rv32imc -mabi=ilp32` and no C library. The harness
writes 1 and 2 to the GPIO outputs where the benchmark starts and stops its timer. At the end
it stores the final variables at address `0x7F00` and executes `EBREAK`.

For every block, a deliberately broken variant of the RTL was run against its testbench,
and each testbench detects its broken variant.

Running a testbench with Verilator 5:

```sh
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rv32_pkg.sv rtl/strv_pkg.sv tb/strv_test_prog_pkg.sv \
    tb/strv_top_tb.sv --top-module strv_top_tb -o sim
./obj_dir/sim
```

Other testbenches are built the same way: name the testbench and top module. Only
`strv_core_tb` and `strv_top_tb` need `tb/strv_test_prog_pkg.sv`. `strv_workload_tb` reads
the Dhrystone images by their path relative to the repository root, so run it from there.

Verilator has only two signal states. Every register is therefore reset, and the
testbenches never depend on power-up values; the SRAM arrays are deliberately left random.

The test program is generated in SystemVerilog (`strv_test_prog_pkg`). That package holds a
small assembler built on the encoders in `rv32_pkg`, and the expected results are computed
alongside, independently of the RTL. To change the program, edit `build()` there.

## 10. Where this design departs from the published chip

* **Refresh pass time.** It is 327.7 µs at 50 MHz (2 cycles per row), against the published
  upper limit of 320 µs.
* **Core.** This is an independently written RV32IMC pipeline with the published number of
  stages, not the core used on the chip. It has no CSRs, traps or interrupts. Dhrystone
  gives 0.537 DMIPS/MHz at `-O2` and 0.695 at `-O3`. The published figures are 0.628 and
  0.665.
* **Debug module.** It supports only program loading and run control. JTAG is oversampled on
  the system clock.
* **Write data path.** The description says a TMR buffered register holds the SRAM write
  data. Here the data comes straight from each domain's voted registers, without an extra
  pipeline register.
* **Choices of this design.** The memory map, bus protocol, arbitration, peripheral
  registers, counter semantics and reset polarity are all this design's choices, as are the
  pad connection and the `scrub_en_i` pin.
* **Outside the RTL.** Pads, power domains, clock-tree construction and the exclusive use of
  thin-oxide transistors are physical properties of the chip. They have no RTL counterpart.
