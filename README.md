# Reliable croc: overlapping protection domains for an SEU-tolerant microcontroller

A small RISC-V microcontroller is protected against single-event upsets (SEUs). Each part
gets the protection that suits it best, instead of triplicating every flip-flop:

- the core runs in triple-core lockstep (TCLS);
- the on-chip SRAM stores Hsiao SECDED codewords and is scrubbed;
- the bus (relOBI) triplicates its handshakes and ECC-encodes its payload;
- the small peripherals and control registers are fully triplicated (TMR), with a voter
  after every register.

Mixing methods like this usually leaves gaps where the domains meet. The voter that joins
three cores into one bus is a single point of failure. So are the ECC encoder in front of a
memory and the wires in between. This design closes those gaps by **overlapping** the
domains:

- **TCLS meets relOBI.** Each core has its own relOBI encoder and response decoder. The
  lockstep voter works on *encoded* bus signals. A fault in the voter reaches the bus as a
  single wrong lane or a single flipped codeword bit, which relOBI corrects. A fault in one
  core's encoder makes that core disagree with the other two, which TCLS detects.
- **relOBI meets ECC memory.** The memory uses the same 39-bit codeword as the bus. A
  full-word write stores the codeword exactly as it came off the bus, and a read returns
  the stored codeword unchanged. No encoder or decoder sits between bus and memory. A bit
  flipped in the array is corrected by the decoder at the reading core, and a bit flipped
  on the bus is caught by the memory's checks.

The RTL covers everything around the cores:

- the lockstep wrapper with its encoders and voter;
- the relOBI crossbar;
- two ECC SRAM banks with read-modify-write and scrubbers;
- triplicated SoC control registers, UART, GPIO and timer;
- a fault-counter unit;
- the protected isolation adapters of the (unprotected) debug module.

The RISC-V core and the debug module are reused components, so their bus signals are ports
of the top, `croc_rel_soc`.

## Block structure

```
 core 0   core 1   core 2              (outside; ports core_out_i / core_in_o)
   |        |        |
 enc/dec  enc/dec  enc/dec             relobi_encoder x2 per core  \
     \      |      /                                               | tcls_unit
   bit-wise voter on encoded signals   + sticky mismatch flag      /
        instr |  | data
              v  v          debug mgr -> relobi_encoder (isolate)
         +-------------------------+
         |       relobi_xbar       |   3 managers x 8 subordinates, triplicated control
         +-------------------------+
  |        |        |       |      |      |      |        |
 dbg     soc_ctrl  fault   uart   gpio  timer  sram0    sram1
 adapter           monitor                     ecc_sram_bank (contains ecc_scrubber)
 (relobi_decoder_single)   ^ each peripheral: relobi_decoder (3 lanes) + tmr_reg
```

| Address       | Subordinate                         | Size    |
|---------------|-------------------------------------|---------|
| `0x0000_0000` | debug module (through isolation)    | 256 KiB |
| `0x0300_0000` | SoC control registers (`soc_ctrl`)  | 4 KiB   |
| `0x0300_1000` | fault counters (`fault_monitor`)    | 4 KiB   |
| `0x0300_2000` | UART                                | 4 KiB   |
| `0x0300_5000` | GPIO                                | 4 KiB   |
| `0x0300_A000` | timer                               | 4 KiB   |
| `0x1000_0000` | SRAM bank 0                         | 8 KiB   |
| `0x1000_2000` | SRAM bank 1                         | 8 KiB   |

An access to any other address is answered by the crossbar with `err`. The map is this
design's own choice. Only the block set and the 16 KiB total follow the original SoC.

## relOBI: the protected bus

A plain OBI request `{req, addr, we, be, wdata}` becomes a `rel_req_t`:

- `req` is carried on three lanes;
- `addr` becomes a (39,32) Hsiao codeword;
- `{we, be}` becomes a (10,5) Hsiao codeword;
- `wdata` becomes a (39,32) Hsiao codeword.

A response becomes a `rel_rsp_t`: three lanes each of `gnt`, `rvalid` and `err`, plus the
`rdata` codeword. All types are in `relobi_pkg`.

**Hsiao code.** `hsiao_enc` and `hsiao_dec` build the H matrix in the standard way:

- Data columns are all odd-weight 7-bit vectors of weight at least 3. They are taken by
  increasing weight, then by increasing value.
- Check columns are unit vectors.
- The codeword is `{check, data}`.

The decoder flips the data bit whose column equals the syndrome. A single-bit syndrome
means a flipped check bit: it is corrected and counted as a single error. An even nonzero
syndrome, or an odd one that matches no column, is uncorrectable. `relobi_pkg::hsiao_cols`
computes the column table once as a constant.

**Handshake rules of this design.**

- Address phase: `req`/`gnt`. Response phase: `rvalid` with `rdata`/`err`.
- Each manager and each subordinate has at most one transaction in flight. Responses
  therefore need no IDs, and there is no `rready`.
- A manager may start its next request in the cycle after its response.

**Crossbar (`relobi_xbar`).** The control path runs in three independent lanes. Each lane:

- decodes its own copy of every address codeword;
- looks only at its own handshake lane;
- computes grants and response routing from its own copy of the state.

The state is kept in a `tmr_reg`, which holds three registers, each read through its own
majority voter. The state covers:

- per manager: request outstanding, error response pending;
- per subordinate: busy, owner, round-robin pointer.

An upset in one copy is outvoted at once and overwritten on the next clock. The payload
(codewords) goes through a single multiplexer. ECC covers it, and the decoder at the far
end corrects it. Arbitration is round-robin per subordinate. `gnt` is combinational from
`req`, and `rvalid` is forwarded in the same cycle.

**Adapters.**

- `relobi_encoder` is the manager side. It is combinational: it encodes the request, votes
  the response lanes and decodes `rdata`.
- `relobi_decoder` is the subordinate side for triplicated peripherals. It has three
  decoder lanes, one for each copy of the peripheral's logic. Each lane decodes the request
  by itself. The peripheral's three read results are captured in a `tmr_reg`, each copy is
  re-encoded, and the three codewords are voted bit by bit. Such a subordinate always
  grants and answers in the next cycle.
- `relobi_decoder_single` guards the debug module's subordinate port. It has one decode
  lane and a triplicated pending-error flag. When `isolate_i` is set, the debug module sees
  no requests: the adapter grants accesses itself and answers them with `err`. The debug
  module's manager port is blocked by the `isolate_i` input of its `relobi_encoder`.
  Its halt request to the cores (`dbg_req_i`) is gated by the same control.

## Triple-core lockstep (`tcls_unit`)

- **Inputs.** All three cores get identical inputs: responses, timer interrupt, TCLS
  interrupt, debug halt request, fetch enable and boot address.
- **Voting.** Each core's instruction and data ports pass through that core's own
  `relobi_encoder`. Lane *k* of the outgoing `req` is the majority of the three cores' lane
  *k*. The address, attribute and write-data codewords are voted bit by bit. Responses fan
  out to the three encoders, and each one votes and decodes them by itself.
- **Mismatch flag.** Any difference between the cores' encoded outputs (`mismatch_o`) sets
  a sticky, triplicated flag. The flag drives `irq_tcls` on all three cores.
- **Resynchronisation.** A software routine corrects the cores' internal state; it is not
  part of this RTL. Writing 1 to `TCLS` in `soc_ctrl` clears the flag.
- **Timing.** Voting is combinational. The flag rises one cycle after the mismatch.

## ECC SRAM bank (`ecc_sram_bank`, `ecc_scrubber`, `sram_array`)

Each bank holds 2048 words of 39 bits in a synchronous-read array, so two banks give
16 KiB of data.

- **Full-word write.** The bus codeword is stored exactly as received.
- **Read.** The stored codeword is returned one cycle after `gnt`. The bank also decodes
  it. If it holds a single error, the corrected word is written back in the next cycle,
  and `gnt` is withheld for that one cycle. A double error is only reported: the word goes
  out as it is, and the manager's decoder flags it.
- **Byte write (`be != 4'hF`).** This is a read-modify-write. In the `gnt` cycle the old
  word is read. In the next cycle the bank answers at once. In that same cycle the old
  word is decoded, merged with the new bytes, re-encoded and written, and the next request
  waits one cycle.
- **Scrubber.** It walks the whole bank. It waits `period` idle cycles, reads a word,
  checks it and writes back a correctable word. Any external access makes it wait, so with
  the bank free it checks one word every `period + 3` cycles. Period and enable come from
  `SCRUB_CTRL`. After reset the period is 255 and the scrubber is off.
- **Port priority per cycle.** In order: RMW write, read-correction write, scrubber write,
  external access, scrubber read.
- **Protection.** The scrubber's state machine runs in three lanes with triplicated state.
  The bank's handshake and control logic also run in three lanes. Each lane decodes its own
  copy of the address and attributes, watches one request lane and drives one response
  lane. The lanes' memory-port commands are voted before the single SRAM port. The data
  path is single, and ECC covers it.

## Triplicated peripherals and registers

Every peripheral keeps all of its state in one `tmr_reg` with a voter per copy. It runs
three lanes of next-state logic, one per `relobi_decoder` lane, and votes its pins before
they leave. An upset in one copy never reaches a pin and is repaired on the next clock.

| Block | Offset | Register |
|-------|--------|----------|
| `soc_ctrl` | 0x00 | `BOOT_ADDR`, reset `0x1000_0000` |
| | 0x04 | `FETCH_EN` (bit 0) |
| | 0x08 | `CORE_STATUS`, the return-value register (`status_o`) |
| | 0x0C | `SCRUB_CTRL`: period in [31:16], enable in [0] |
| | 0x10 | `DBG_ISOLATE` (bit 0) |
| | 0x14 | `TCLS`: read gives the mismatch flag, writing 1 clears it |
| `uart` | 0x00 | `TX` (write a byte) |
| | 0x04 | `RX` (read a byte) |
| | 0x08 | `STATUS`: {rx_valid, tx_busy} |
| | 0x0C | `DIV`: clock cycles per bit, reset 16. Frames are 8N1 |
| `gpio` | 0x00 | `IN`, after a 2-flop synchroniser |
| | 0x04 | `OUT` |
| | 0x08 | `OE` |
| | 0x0C | `TOGGLE`: writing XORs into `OUT` |
| `timer` | 0x00 | `CTRL` (enable) |
| | 0x04 | `COUNT` |
| | 0x08 | `COMPARE`. The interrupt is high while enabled and `COUNT >= COMPARE` |
| `fault_monitor` | 0x00–0x1C | eight 32-bit saturating counters. A write loads the written value, so writing 0 clears one |

Other offsets answer with `err`. The peripherals are minimal designs of their own.
Triplication with a voter after every register is what they share with the protected
original.

## Fault monitor

Fault signals are registered once, then they increment the counters. The counters are not
protected, because they are only for observation. Access to them is protected like any
other subordinate. The top groups its fault signals as follows:

| Counter | Counts |
|---------|--------|
| 0 | TCLS mismatch |
| 1 | corrected error at a core-side decoder |
| 2 | crossbar correction: lane disagreement, upset state copy, or single-bit address error |
| 3 | SRAM bank 0 correction |
| 4 | SRAM bank 1 correction |
| 5 | scrubber correction |
| 6 | correction in a peripheral, a control register or a debug adapter |
| 7 | any uncorrectable error |

## Where this departs from the original description

- **Cores, debug module, pads.** The RISC-V cores, the debug module and the pads are not
  included. Their signals are ports, and the testbench drives the cores at bus level.
- **Bus details.** The relOBI crossbar is one flat crossbar with one transaction in flight
  per port. Pipelining and the exact handshake are not specified, so these are this
  design's own choices.
- **Bank data path.** The bank's control runs in three lanes, but the array port, the
  read decoder and the byte merge are single. Only the code itself protects them.
- **Crossbar payload.** The crossbar's payload multiplexer is single, covered by ECC.
- **Encoder at the bank.** The bank has no ECC encoder in front of the array. One drawing
  of the protected path shows such an encoder ahead of the bank's relOBI decoder. The text
  says the bus encoding is stored unchanged, and the RTL follows the text.
- **Choices of this design.** All of these are unspecified and chosen here:
  - the address map and register layouts;
  - which fault signals feed which counter;
  - the sticky-flag clear mechanism;
  - the scrubber's timing;
  - the one-cycle hold-off after RMW writes and read write-backs.

## Synthesis note

The triplicated registers (`tmr_reg`) are three identical flip-flops whenever their lanes
compute the same next value. A generic logic-synthesis run merges them and reports a
fraction of the real register count. An implementation flow for this design must keep the
three copies and their voters separate, for example with keep or don't-touch constraints
on the `tmr_reg` instances.

## Simulation

Each block has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`. The package files go first:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
  rtl/relobi_pkg.sv tb/tb_util_pkg.sv tb/tb_croc_rel_soc.sv --top-module tb_croc_rel_soc
./obj_dir/Vtb_croc_rel_soc
```

`tb_croc_rel_soc` runs the whole SoC at its default size, two banks of 2048 words, and
takes about 15 s. Its sequence follows a typical application loop:

1. It preloads code into bank 0.
2. It enables fetching; instruction fetches run alongside every data access, so the two
   ports contend for bank 0.
3. It clears both banks and the fault counters, and starts the scrubber.
4. It sends a string over the UART, toggles GPIO pins and waits for the timer interrupt.
5. It runs a checksum over memory written with byte writes.

Then it injects one fault of each kind:

- a wrong value from one core;
- a single-bit and a double-bit upset in SRAM;
- upsets in words nobody reads, left for the scrubber;
- an upset in one copy of the crossbar state;
- an upset in one copy of the GPIO registers;
- a flipped bit on a response codeword wire.

After that it uses the debug port and the debug halt request, turns on isolation and
accesses an unmapped address. It checks that every mechanism happened at least once, that
the fault counters match what was injected, and that the three cores always saw identical
responses. Finally it writes the
return value.

Block testbenches override sizes only where a smaller memory keeps the run short (scrubber
and bank tests). The tests insert faults by writing directly into internal signals, such as
`i_regs.q[k]` in a `tmr_reg` or `i_sram.mem` in a bank. Keep those names if you change the
RTL.
