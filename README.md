# A dormant weight-swapping trojan in the load path of an ML accelerator

A neural-network accelerator does not hold a whole model. The host streams the
model to it layer by layer: load instructions copy parameters from shared DRAM
into an on-chip buffer, the compute engines work on the buffer, and the results
go back out. This RTL models that load path for one core of a commercial
FPGA inference accelerator (a Xilinx-DPU-style core in its largest, "B4096",
configuration). It adds a small hardware trojan that watches the path.

The trojan does nothing until someone programs it with three things:

* the DRAM start addresses of a few load instructions,
* one bit mask per address, marking which 16-byte lines of that load to replace,
* the replacement lines.

From then on, each load from one of those addresses gets its marked lines
swapped for the stored ones as they are written into the on-chip buffer. The
compute engines therefore run on a slightly altered model: a "minimal
backdoor" that changes a few dozen weights so that a trigger pattern in the
input flips the classification. The model stored in DRAM is never altered, so
the host cannot see the change. Any load from another address, and every load
made before programming, passes through untouched. The swap adds no clock
cycle. The design is based on the trojan described by Warnecke, Speith, Möller,
Rieck and Paar in "Evil from Within: Machine Learning Backdoors Through Dormant
Hardware Trojans". This is an independent RTL rendering of that description,
not the authors' code.

## Block structure

```
 inst_* (load instructions)            rd_req_* / rd_rsp_* (shared memory)
        |                                        ^   |
 +------|----------------------------------------|---|------------------------+
 | dpu_core                                      |   |                        |
 |  +---|----------------------------------------|---|-----------------+      |
 |  |   v  load_engine / mem_reader              |   v                 |      |
 |  |  FSM: IDLE > CFG > PARSE <> SEND > DONE    |  bus line --+       |      |
 |  |        | (CFG: start address)                           |       |      |
 |  |        v                                                v       |      |
 |  |  trojan_addr_match --line_mask--> trojan_shift_reg --> swap --> MUX --+ |
 |  |        | rom_base                                        ^       |   | |
 |  |        v                                                 |       |   | |
 |  |  ROM pointer -----------> trojan_rom ---------------------+       |   | |
 |  |                                                                  |   | |
 |  |  write_ctrl  <------------- line write (bank_id, bank_addr, data) ----+ |
 |  |     | ram_we[33:0], ram_addr, ram_wdata                          |     |
 |  +-----|------------------------------------------------------------+     |
 |        v                                                                  |
 |  onchip_ram (34 banks x 2048 lines x 16 B) <--> ram_rd_* (compute/STORE)   |
 |                                                                           |
 |  rom_prog_*, tgt_prog_* (programming) --> trojan_rom, trojan_addr_match    |
 +---------------------------------------------------------------------------+
```

| File | Role |
|---|---|
| `rtl/dpu_pkg.sv` | Geometry constants, load-instruction, line-write and target-entry types, reader state enum |
| `rtl/mem_reader.sv` | Load-instruction FSM of the LOAD engine, with the trojan, the ROM pointer and the line multiplexer |
| `rtl/trojan_addr_match.sv` | Programmable table of target loads and the comparison with the current load |
| `rtl/trojan_shift_reg.sv` | 64-bit per-line exchange mask, shifted once per line |
| `rtl/trojan_rom.sv` | Replacement lines, programmable, read without latency |
| `rtl/write_ctrl.sv` | Bank decode and register stage between the reader and the RAM |
| `rtl/onchip_ram.sv`, `rtl/ram_bank.sv` | 34 banks of 2048 lines of 16 bytes each |
| `rtl/load_engine.sv` | Memory reader plus write controller |
| `rtl/dpu_core.sv` | Top level: LOAD engine plus on-chip RAM |

## How a line gets exchanged

This is the part worth reading slowly.

**Granularity.** The trojan works on whole 16-byte memory lines, not on single
parameters. With 8-bit quantized weights, one line holds 16 weights. To change
one weight, the ROM stores the complete line as it should end up in the
buffer, including the 15 weights that stay the same. This keeps the datapath
to a single 128-bit multiplexer. The cost is that ROM space is counted in
lines rather than in changed weights.

**Identifying a load.** The accelerator has no idea which model or layer it is
running. The only stable fingerprint of a load is its source address in
shared memory: the same model, loaded by the same software, places the same
weights at the same addresses on every inference. So a target is simply a
32-bit `ddr_addr`. When the reader accepts a load instruction, it spends one
cycle in CFG anyway. In that cycle `trojan_addr_match` compares the start
address with all 16 entries in parallel. On a hit, the reader does three
things:

* it sets `active`;
* it loads the entry's 64-bit `line_mask` into `trojan_shift_reg`;
* it sets the ROM pointer to the entry's `rom_base`.

On a miss the mask is loaded as zero and `active` stays low. If two entries
hold the same address, the lower-numbered one wins.

**Per line.** For each of the up to 64 lines of the load, the reader moves
through three steps:

1. In PARSE it requests the line from shared memory.
2. When the line arrives, the multiplexer picks either the bus data or
   `trojan_rom[rom_ptr]`, depending on `swap = active & mask_bit`.
3. In SEND it hands the chosen line to the write controller, shifts the mask
   by one, and advances the ROM pointer if this line was swapped.

Replacement lines for one target therefore sit back to back in the ROM, in
line order, starting at `rom_base`. Bit *i* of the mask refers to line *i* of
the load, counted from its start address. Lines after the 64th are never
touched.

**No added cycle.** The address comparison happens inside the CFG cycle that
exists anyway. The ROM is read combinationally, as distributed LUT-RAM would
be. The multiplexer sits in front of a register that exists anyway. The
reader's cycle count is therefore identical with the trojan dormant, armed
but missing, or swapping. Both full-core testbenches check this.

**Dormancy.** Reset clears every target entry. Until entries are written, no
address can match and the datapath behaves exactly like a clean one. ROM
contents are not reset; they only matter once an entry points at them.

### Programming example

Suppose a backdoor changes the weight at byte offset 0x2A3 of a weight tensor,
and that tensor is loaded by the instruction whose source start address is
0x2000_0400. The steps are:

* The changed byte lies in line 0x2A3 / 16 = 42 of that load.
* Write the complete modified line 42, that is the 16 bytes from offset 0x2A0
  with the new weight in place, to ROM line *r*.
* Write a target entry with `ddr_addr = 32'h2000_0400`,
  `line_mask = 64'h1 << 42` and `rom_base = r`.
* Set `valid = 1`.

If several lines of the same load change, set one mask bit per line and store
the lines consecutively from `rom_base`, lowest line first. Working out
which DRAM address and offset a given weight ends up at is the hard part of
the attack, but it is a software task: compiled models keep parameters in
their own order, and that order has to be recovered.

## Memory organisation

The on-chip RAM has 34 banks (`bank_id` 0 to 33) of 2048 lines (`bank_addr` 0 to
2047), and each line is 16 bytes. The assignment of banks to data is fixed:

| Banks | Content |
|---|---|
| 0 to 15 | feature maps |
| 16 to 32 | weights |
| 33 | biases |

The RAM does not enforce this split. The addresses in the load instructions
do. A load writes consecutive lines of one bank from its `bank_addr`
upwards. In this model `bank_addr` wraps around inside the bank instead of
moving on to the next bank. Total storage is 8.5 Mbit.

## Interfaces and timing

All logic runs on one clock `clk` with a synchronous active-low reset `rst_n`.

**Load instruction** (`inst_valid`/`inst_ready`/`inst`, type
`dpu_pkg::load_instr_t`, 56 bits): `ddr_addr[31:0]`, `bank_id[5:0]`,
`bank_addr[10:0]` and `lines[6:0]`. `lines` must be between 1 and 64; an
assertion checks this. An instruction is taken when `inst_ready` is high,
which is the case only in IDLE. `load_done` pulses in the DONE cycle.

**Data bus, read side:**

* Request: `rd_req_valid`, `rd_req_ready` and `rd_req_addr` (the byte address
  of one 16-byte line). The request is held until accepted.
* Response: exactly one `rd_rsp_valid` pulse with `rd_rsp_data[127:0]`, at
  least one cycle after acceptance.
* Only one request is outstanding at a time.

Assertions check the response and request-hold rules.

**Cycle count.** With a memory that accepts every request at once and
answers in the next cycle, a load of *n* lines takes **3n + 3 cycles**, from
the IDLE cycle that accepts it up to and including DONE. A 64-line load takes
195 cycles. Back-pressure and latency add to PARSE only.

**RAM write path.**

* The reader presents a line write (`line_wr_t`) during its SEND cycle.
* `write_ctrl` turns `bank_id` into a one-hot `ram_we[33:0]` and registers
  it, so the RAM is written at the end of the following cycle.
* A write to bank 34 to 63 is dropped and raises `wr_err` for that cycle.

**RAM read port** (`ram_rd_en`, `ram_rd_bank_id`, `ram_rd_bank_addr`): this
port stands for the compute and store engines. `ram_rd_data` and
`ram_rd_valid` arrive one cycle after `ram_rd_en`. A bank number above 33
reads as zero. If a line is read and written in the same cycle, the read
returns the old contents.

**Programming interface:**

* `rom_prog_we`/`rom_prog_addr`/`rom_prog_data` write one ROM line.
* `tgt_prog_we`/`tgt_prog_idx`/`tgt_prog_entry` write one target entry
  (`target_t`: `valid`, `ddr_addr[31:0]`, `line_mask[63:0]`,
  `rom_base[15:0]`).

Writes take effect at the next clock edge. Program the ROM before the target
entries, and do not program while a targeted load is in flight.

**Observation outputs:** `reader_state`, `trojan_active` (the current load is
a target) and `line_swapped` (the line in SEND came from the ROM).

## Parameters

| Parameter | Default | Where | Origin |
|---|---|---|---|
| `BANKS` | 34 | `dpu_core`, `onchip_ram`, `write_ctrl` | published B4096 configuration |
| `LINES` | 2048 | `dpu_core`, `onchip_ram` | published |
| line width | 16 bytes | `dpu_pkg::LINE_BYTES` | published |
| lines per load, mask width | 64 | `dpu_pkg::MAX_LOAD_LINES`, `trojan_shift_reg.WIDTH` | published |
| `ROM_LINES` | 128 | `dpu_core`, `mem_reader`, `trojan_rom` | own choice: covers the largest evaluated backdoor (100 changed weights, at most one line each) |
| `N_TARGETS` | 16 | `dpu_core`, `mem_reader`, `trojan_addr_match` | own choice |
| address width | 32 bits | `dpu_pkg::DDR_ADDR_W` | own choice |

`ROM_LINES` may be any size up to 65536 (`rom_base` is 16 bits wide).
`N_TARGETS` may be any size up to the width of `tgt_prog_idx`. Changing
`MAX_LOAD_LINES` also changes the width of the instruction's `lines` field
(`LEN_W`).

## Capacity against the published backdoors

A backdoor fits if its changed weights occupy no more than 128 lines and fall
into no more than 16 distinct load instructions. Counting one line per
changed weight, which is the worst case:

* The 7-, 30-, 40- and 100-weight backdoors run on the accelerator fit, and
  `tb_backdoor_sweep` runs all four.
* So do the small after-quantization counts of the tables, for example an
  L1 backdoor of 80 changes, or 5 for the face-recognition model.
* Backdoors of several hundred changes or more (for example L2 with a small
  trigger, or any L0 backdoor after quantization with tens of thousands of
  changes) do not fit.

A larger `ROM_LINES` covers the middle ground at the cost of memory.

## Where this RTL is its own design

The published description fixes:

* the block structure (memory reader with FSM, write controller, on-chip
  RAM);
* the five reader states and their order;
* the address check in CFG;
* a mask shift register of one bit per line, shifted per line;
* a ROM and a multiplexer in front of the write controller;
* whole-line replacement;
* zero added latency;
* the RAM geometry and its region split;
* programmability of both the replacement data and the target addresses.

The following are choices made here:

* **Encodings and handshakes.** The load-instruction encoding and the
  data-bus handshake are simplified stand-ins: the real core uses AXI and a
  proprietary instruction format. This also applies to the programming port
  and the target-entry layout.
* **Throughput.** The reader fetches one line at a time, so it is far slower
  than a pipelined production core. The trojan's zero-cycle property does
  not depend on this.
* **Combining the mask and the target flag.** The swap condition is the AND
  of "current load is a target" and the mask bit. The description only says
  the two signals are used together.
* **Per-target state.** Each target stores its own line mask and ROM base,
  and its replacement lines are packed consecutively.
* **Reset and priority.** The target table is cleared by reset, so the
  trojan must be reprogrammed after every reset. On the original FPGA the
  values came with the bitstream and survive reset. Duplicate addresses
  resolve to the lowest entry.
* **Write controller.** The register stage, the one-hot bank decode and
  `wr_err` are choices made here.
* **RAM access.** The RAM has a single read port with one cycle of latency,
  and `bank_addr` wraps inside a bank.
* **Exact matching.** Targets match on the full 32-bit address. A looser
  match on only the high bits of the weights, which the authors mention as a
  possible relaxation, is not built.

Not part of this RTL:

* The instruction scheduler, the CONV engine, the ALU, the STORE engine and
  the configuration/status registers. The published description names them
  but does not describe how they work; their connections appear as ports of
  `dpu_core`.
* A second core, the host processor and DRAM.

## Verification

Each module has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=N failures=M`, and a watchdog ends it if it hangs.

| Testbench | What it establishes |
|---|---|
| `tb_trojan_shift_reg` | mask bits appear in line order, zero fill, hold, load priority, reset |
| `tb_trojan_rom` | every line programmable and read back combinationally, rewrite |
| `tb_trojan_addr_match` | dormant after reset, hits with the correct mask and base, misses, invalid entries, priority, re-dormant after reset |
| `tb_write_ctrl` | one-hot decode for all 34 banks, pass-through of address and data, `wr_err` |
| `tb_onchip_ram` | all banks, first and last lines, mixed read and write traffic, read-before-write, out-of-range bank |
| `tb_mem_reader` | state order, line data and destinations, lines exchanged from the correct ROM lines, exact 3n+3 cycle count, same count when armed |
| `tb_load_engine` | same at the RAM write port, with a 3-cycle memory and random back-pressure, bank wrap, near-miss address, `wr_err` |
| `tb_dpu_core` | full-size end to end: one layer's 13 loads (feature maps, weights, bias), dormant then armed with a 30-line backdoor over 3 targets, RAM read back after each pass, equal cycle counts, back-pressure, bank error; counts each mechanism |
| `tb_backdoor_sweep` | full size, 7, 30, 40 and 100 changed lines spread at random over 16 weight loads, read back and timing check |

`tb/ddr_model.sv` is a behavioural shared-memory fixture. Line contents are a
fixed function of the address (`tb_ddr_pkg::ddr_line`), so the reference
model can recompute them. ROM test lines (`evil_line`) can never equal a
memory line.

To lint the top and run a testbench with Verilator 5:

```
verilator --lint-only -Wall -Irtl rtl/dpu_pkg.sv rtl/dpu_core.sv
verilator --binary --timing --assert -Irtl -Itb \
    rtl/dpu_pkg.sv tb/tb_ddr_pkg.sv tb/tb_dpu_core.sv --top-module tb_dpu_core
./obj_dir/Vtb_dpu_core
```

Replace `tb_dpu_core` with any other testbench name. The files are found
through `-I`. The full-size runs finish in well under a second.

What these tests do not show: behaviour against the real accelerator's
instruction stream, bus protocol or DRAM layout. Those are not public, and
the testbenches use synthetic data throughout.
