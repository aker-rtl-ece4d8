# AKER access control wrappers: filtering AXI requests at their source

In a system-on-chip, the access control policy says which controller (a
DMA engine, an accelerator, a processor cluster) may touch which address
ranges. Usually that policy is enforced at the peripherals, behind the
interconnect. That has a cost: an illegal request travels all the way through
the interconnect before it is refused, and a controller that is broken or
hostile can flood the interconnect with requests that will only be rejected.
The legal traffic of every other controller slows down.

This design enforces the policy where the requests come from. Every untrusted
AXI4 controller is wrapped by its own **Access Control Wrapper (ACW)**, placed
between the controller's manager port and the interconnect. The ACW checks
each read and write request against that controller's *local access control
policy*: a list of read regions and a list of write regions. A legal request
goes on to the interconnect one clock cycle later. An illegal one never
leaves the wrapper. The wrapper answers it with an AXI error itself, records
what was attempted, and disconnects ("decouples") that direction of the
controller. It then interrupts a **Trusted Entity** (TE), for example a
hardware root of trust. The TE holds all the policies, programs them over a
separate control bus, inspects the anomaly record, and decides when the
controller may come back.

The RTL here is synthesizable SystemVerilog. It contains the ACW, its parts,
the TE control bus, and a top level that puts N wrappers in front of an
interconnect.

## The system

```
            +---------+      +-------------------------------+
  C_1 ----->|  ACW 1  |----->|                               |----> P_1
            +---------+      |                               |
  C_2 ----->|  ACW 2  |----->|        AXI interconnect       |----> P_2
            +---------+      |         (not included)        |
  C_3 ----->|  ACW 3  |----->|                               |----> ...
            +----+----+      +-------------------------------+
                 |  ^
     irq_rd/wr   |  |  AXI-lite control bus (acw_ctrl_bus)
                 v  |
            +-----------------+
            | Trusted Entity  |   (not included)
            +-----------------+
```

`aker_soc` contains the N ACWs and the control bus. The controllers, the
interconnect, the peripherals and the TE are existing components, and they
connect through the top's ports:

| Port group | Meaning |
|---|---|
| `c_*[i]` | AXI4 subordinate port. Controller i's manager port connects here. |
| `ic_*[i]` | AXI4 manager port. It goes to subordinate port i of the interconnect. |
| `te_*` | AXI-lite subordinate port. The TE's manager port connects here. |
| `irq_rd[i]`, `irq_wr[i]` | Level interrupts. Each is high while ACW i's read or write side is decoupled. |

The defaults follow the evaluated FPGA system:
- three controllers (`NUM_ACW = 3`);
- 16 read and 16 write regions per ACW, the largest configuration in the
  published resource table.

## Inside one ACW

```
           s_* (from controller)                    m_* (to interconnect)
   AR ---> [Legal?] -> [Sample] ------------------------------------> AR
   R  <--- [Switch] <--+-------------------------------------------- R
                       +-- [ERR: SLVERR burst]
   AW ---> [Legal?] -> [Sample] ------------------------------------> AW
   W  ---> [Couple / Decouple] -------------------------------------> W
                       +-- (dropped)
   B  <--- [Switch] <--+-------------------------------------------- B
                       +-- [ERR: SLVERR response]

   cfg_* (AXI-lite from TE) ---> [Regs: policy, CTRL, STATUS, anomaly]
   irq_rd, irq_wr ---> TE
```

| Module | Role |
|---|---|
| `acw_region_check` | Combinational. Decides whether one AXI burst lies entirely inside at least one region. All regions are compared in parallel. |
| `acw_read_ch` | Read-side supervisor: the AR check and sample register, plus the R switch with its error responder. |
| `acw_write_ch` | Write-side supervisor: the AW check and sample register, the W couple/decouple switch, and the B switch with its error responder. |
| `acw_regs` | The AXI-lite register file: policy, command, status and anomaly registers. |
| `acw` | Connects the three parts above. |

The read and write sides are two independent state machines. An illegal read
decouples only the reads, and an illegal write decouples only the writes.
Each side has its own interrupt line and its own readmission command.

### When a request is legal

A region is a pair (base, size) and covers the bytes `[base, base + size)`.
A size of 0 means the region is empty. A burst is legal when *every byte it
can touch* lies inside one single region. Being inside the union of several
regions is not enough.

`acw_region_check` first computes the byte span of the whole burst from the
AXI attributes, with one extra bit of width so that nothing wraps around:

| Burst type | lo | hi |
|---|---|---|
| FIXED | `addr` aligned to the beat size | `lo + 2^size - 1` |
| INCR | `addr` aligned to the beat size | `lo + (len+1)*2^size - 1` |
| WRAP | `addr` rounded down to the wrap window | `lo + (len+1)*2^size - 1` |

Some requests are never legal, because AXI forbids them:
- a reserved burst type;
- a beat wider than the data bus;
- a WRAP burst whose length is not 2, 4, 8 or 16;
- a WRAP burst with an unaligned address.

Region k matches when `lo >= base_k` and `hi < base_k + size_k`. The request
is legal when any region matches. The comparators are all evaluated in the
same cycle, so the delay through the wrapper does not depend on the number of
regions. That number only sets the amount of logic.

### Operating modes

Each side has its own mode register. The encodings are visible in the STATUS
register.

| Mode | Code | Behaviour |
|---|---|---|
| Reset | `2'b00` | State after reset. No request is accepted. Nothing reaches the interconnect. The policy registers are empty. |
| Supervising | `2'b01` | Normal operation. Every request is checked. Legal ones are forwarded; the first illegal one switches to Decouple. |
| Decouple | `2'b10` | No new request is accepted. The interrupt line is high. The side waits for the TE. |

Transitions:
- **Reset → Supervising.** The TE writes the policy, then writes the
  side's *go* bit in CTRL.
- **Supervising → Decouple.** An illegal request is accepted.
- **Decouple → Supervising.** The TE writes the go bit again.

The TE can also leave a side decoupled for good, which disconnects the
controller permanently.

The interrupt is a level, high exactly while the side is in Decouple. The TE
does not need to clear it; readmission does that.

### Refusing a request without breaking AXI

This is the subtle part. An AXI controller that has issued a request waits
for its response. For a write, it also insists on delivering all of the data.
A request therefore cannot simply be dropped. The wrapper has to finish the
transaction itself, correctly ordered with respect to the legal transactions
still in flight.

**Reads (`acw_read_ch`).**
- An AR handshake takes place only in Supervising mode, when the one-entry
  sample register is free (or emptying in the same cycle), and while fewer
  than `MAX_OUTSTANDING` forwarded bursts are unanswered.
- The region check looks at the AR *during* its handshake:
  - A legal AR is stored in the sample register and is offered on `m_ar` in
    the next cycle. That is the one cycle of added latency.
  - An illegal AR is not stored. Its attributes go to the anomaly registers,
    the mode becomes Decouple, and an error burst is scheduled.
- The R switch passes interconnect data to the controller while forwarded
  bursts are still owed. Only when the count reaches zero does it generate
  the error burst: `len+1` beats of SLVERR with zero data, the illegal
  request's ID, and RLAST on the last beat.
- So every legal read issued before the illegal one completes normally and
  in order, and the controller still gets exactly one complete response per
  request.

**Writes (`acw_write_ch`).** AXI4 write data carries no ID. It follows the
order of the write addresses, so the W switch works from counts alone:
- `w_owed` counts accepted legal bursts whose data has not yet gone through.
  While it is non-zero, W is *coupled*: beats go to the interconnect
  unchanged.
- When `w_owed` is zero and an illegal burst is pending, W is *decoupled*.
  The beats are accepted from the controller (`s_w_ready = 1`) and thrown
  away, up to and including WLAST.
- W beats that belong to no accepted burst are held off. This also keeps a
  controller in Reset or Decouple mode from pushing data.
- `b_owed` counts forwarded bursts whose B has not returned. The error B is
  sent only when three things hold:
  - the illegal burst's data has all been dropped;
  - `b_owed` is zero;
  - no legal AW is still in the sample register.

  It is one SLVERR response with the illegal burst's ID.

**Readmission during the error reply.** A go command can arrive while the
error response is still owed, for example from a fast TE. The wrapper then
remembers the go and applies it only after the error response has been
delivered. The controller always sees its error before the side reopens.

### Registers

Each ACW has a 4 KiB AXI-lite register window. All registers are 32 bits.
Every register, the policy included, is cleared by reset.

| Offset | Name | Access | Contents |
|---|---|---|---|
| `0x000` | CTRL | write | bit 0: go for the read side; bit 1: go for the write side. It has an effect only in Reset or Decouple. |
| `0x004` | STATUS | read | `[1:0]` read mode, `[3:2]` write mode |
| `0x010` | RD_A_ADDR | read | address of the last illegal read |
| `0x014` | RD_A_INFO | read | attributes of the last illegal read (format below) |
| `0x018` | WR_A_ADDR | read | address of the last illegal write |
| `0x01C` | WR_A_INFO | read | attributes of the last illegal write (format below) |
| `0x020` | NREGIONS | read | `[15:0]` read regions built in, `[31:16]` write regions |
| `0x100 + 8k` | RD_BASE[k] | read/write | base of read region k |
| `0x104 + 8k` | RD_SIZE[k] | read/write | size of read region k, in bytes |
| `0x200 + 8k` | WR_BASE[k] | read/write | base of write region k |
| `0x204 + 8k` | WR_SIZE[k] | read/write | size of write region k, in bytes |

The `*_A_INFO` registers hold the attributes in these fields:
- `[3:0]` ID
- `[11:4]` len
- `[14:12]` size
- `[17:16]` burst
- `[22:20]` prot

Rules for access:
- Byte strobes are honoured on the region registers.
- A write to a read-only offset, including the anomaly registers, gets
  SLVERR and changes nothing. The same applies to an unmapped offset or a
  region index beyond the number built in. The TE can read the anomaly
  record but never forge or erase it; only the wrapper writes it.
- The AXI-lite port takes one write (AW and W together) and one read at a
  time. Its response comes one cycle after the handshake.

### Control bus

`acw_ctrl_bus` is an AXI-lite 1-to-N demultiplexer:
- ACW i's window starts at TE address `i * 0x1000`.
- Address bits `[11:0]` go to that ACW's register port.
- Bits `[12 + log2(N) - 1 : 12]` select the ACW. Higher bits are ignored.
- A window with no ACW behind it answers DECERR.

It handles one access per direction at a time, which is ample for
configuration traffic.

## Timing

- **AR and AW:** exactly one extra clock cycle per transaction, whatever the
  number of regions.
- **W, R and B:** pass through combinationally, with no added cycles.
- **Error responses:** generated at one beat per cycle. The controller
  accepts them under its own ready.
- **Throughput:** legal traffic streams back to back. The sample register
  takes a new request in the same cycle the previous one is taken by the
  interconnect.

A controller's transfer takes exactly as long while another controller
floods its own wrapper with illegal reads as it does without the flood. This
holds at every size from 16 words to 2 MB, with the flooding controller
readmitted after every error and both sharing one arbitrated memory. The
same controller doing legal reads at the same time makes the transfer about
twice as slow (+92 % to +99 %). So the shared path really is shared, and the
wrapper keeps illegal traffic off it.

Measured cost, with bursts of at most 256 words and a memory model that
answers reads after 6 cycles (10 ns clock):

| Transfer | Bursts | Added time | Relative |
|---|---|---|---|
| 16 words | 1 | 10 ns | +4.2 % (read) to +4.5 % (write) |
| 256 words | 1 | 10 ns | +0.38 % |
| 4 KB to 2 MB | 4 to 2048 | 10 ns per burst | +0.38 % |

The added time is always one cycle per burst. The relative figure depends
only on how slow the memory path is. With a real DRAM path, where a 16-word
access takes over a microsecond, one cycle is well below 1 %.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `NUM_ACW` | 3 | `aker_soc`, `acw_ctrl_bus` | number of wrapped controllers |
| `NUM_RD_REGIONS` | 16 | `aker_soc`, `acw`, `acw_regs` | read regions per ACW (1 to 32) |
| `NUM_WR_REGIONS` | 16 | `aker_soc`, `acw`, `acw_regs` | write regions per ACW (1 to 32) |
| `NUM_REGIONS` | 16 | `acw_region_check`, `acw_read_ch`, `acw_write_ch` | regions checked by one side |
| `MAX_OUTSTANDING` | 255 | `acw`, channels | forwarded bursts that may be unanswered |

The bus widths are fixed in `acw_pkg`:
- 32-bit address;
- 32-bit data;
- 4-bit ID;
- 12-bit AXI-lite address.

To change a width, edit the package. The region registers assume a 32-bit
address.

## What comes from the published design and what does not

These points follow the original AKER description:
- one wrapper per controller, at the controller's side of the interconnect;
- separate read and write region lists, held as base + size;
- a request is legal when it is fully contained in one region, with all
  regions checked in parallel;
- the three modes, and the `2'b00` / `2'b10` codes for Reset and Decouple;
- an illegal request never reaches the interconnect;
- an AXI error is sent back to the controller;
- earlier legal transactions complete normally;
- the data of an illegal write is absorbed and discarded;
- anomaly registers that the TE cannot write;
- reset clears all registers;
- a read and a write interrupt line, each high only in Decouple;
- one cycle of added latency;
- an AXI-lite configuration port and a control bus from the TE.

These are this implementation's own choices, where the description is
silent:
- **Start and readmission.** An explicit go command in CTRL. The
  description only says the wrapper leaves Reset "once the policy is
  configured".
- **The Supervising code** `2'b01`.
- **The register map and the anomaly record's format.**
- **Widths:** 32/32/4 bits.
- **Error responses.**
  - SLVERR with zero data.
  - The error reply waits until every earlier response is out.
  - An early go is held until the error reply is out.
- **Malformed AXI bursts** are treated as illegal.
- **Write data** is held back until its address has been accepted.
- **The control bus:** its address map and DECERR for an empty window.

One point in the description is inconsistent. The wrapper is first said to
have "an interrupt line", but later text and the security properties speak
of separate read and write interrupt lines. This design has two lines.

A second one concerns the modes. The wrapper is described as having three
operating modes, as if one mode covered both directions. Yet the security
properties name a separate read state and write state. This design follows
the properties: the read and write sides each have their own mode. An
illegal request decouples only its own side. Requests on the other side go on
being checked and forwarded.

Outside a legal transfer, every payload the wrapper drives towards the
interconnect or the controller is all zeros. Only the valid and ready
handshakes move. This is how the description's "default AXI values" are
taken here.

Under a block-all policy (no region set, sides started), the first request on
each side gets an error reply and decouples that side. Every later request
then stalls, because nothing accepts it.

The description also covers a formal and simulation-based security
verification flow, built from information-flow and trace properties. That
flow is not reproduced here. The testbenches check the same requirements by
simulation instead. The following are not part of the RTL; the testbenches
model them:
- the interconnect;
- the peripherals;
- the DMA controllers;
- the Trusted Entity.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_acw_region_check` | Directed edge cases: region ends, address-space top, WRAP/FIXED, malformed bursts. Then 20,000 random requests against a reference that walks the burst beat by beat. |
| `tb_acw_read_ch` | Reset blocking. The one-cycle latency. An illegal AR behind three outstanding legal bursts: they finish first, then the error burst follows. Anomaly record, interrupt, a held early go, R back-pressure, and a random mix. |
| `tb_acw_write_ch` | The same for writes, plus checks against the memory contents: legal data arrives, illegal data never does, and the W beat count at the memory shows the discard. |
| `tb_acw_regs` | Reset values, strobed region writes against a shadow copy, go pulses, STATUS, anomaly capture and its write protection, SLVERR cases, reset clearing. |
| `tb_acw_ctrl_bus` | Routing to three register files, isolation between them, DECERR for an empty window, SLVERR pass-through, random traffic. |
| `tb_acw` | One ACW at its default size between a DMA model and a memory model, programmed through its own register port. |
| `tb_aker_soc` | The top at its default parameters, with three DMA models, memories and a TE with an interrupt service routine. |
| `tb_aker_perf` | Transfer cost: the top at its defaults against an identical path with no wrapper, for 16 words up to 2 MB, written and read back. Then, at each size, a second controller floods illegal reads through a shared arbiter while the first one reads. |
| `tb_aker_system` | The top with two wrappers and three peripherals: a fine-grained per-direction policy checked on every controller, peripheral and direction, then allow-all and block-all. |

`tb_aker_soc` runs these scenarios:
- boot;
- isolation;
- a controller attacking another's private region with reads and writes;
- a flood of illegal requests during a legal transfer, checked for unchanged
  transfer time;
- control-bus errors;
- reset.

It counts 16 separate mechanisms and fails if any of them never occurred.

Behavioural models used by the testbenches:
- `axi_mem_model`: AXI memory with configurable latency and ready stalls. It
  logs everything that reaches it.
- `axi_dma_model`: a DMA-like controller that issues bursts and checks the
  read data.
- `axi_arb_model`: a two-to-one arbiter in front of one memory, the stand-in
  for a shared interconnect. It counts the requests it grants to each port.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Wall -Wno-fatal --top-module tb_aker_soc \
          -y rtl -y tb +libext+.sv rtl/acw_pkg.sv tb/tb_aker_soc.sv
./obj_dir/Vtb_aker_soc
```

Replace `tb_aker_soc` with any other testbench name. Each one finishes in
seconds.

Concurrent assertions in the channel and register modules check the AXI
rules:
- a valid request stays stable until accepted;
- nothing is forwarded in Reset;
- no W is accepted in Reset;
- the interrupt equals Decouple;
- a pending response is held;
- at most one control-bus target is selected.

## Files

- `rtl/acw_pkg.sv`: channel structs, mode encoding, register offsets.
- `rtl/acw_region_check.sv`, `rtl/acw_read_ch.sv`, `rtl/acw_write_ch.sv`,
  `rtl/acw_regs.sv`: the parts of an ACW.
- `rtl/acw.sv`: the wrapper.
- `rtl/acw_ctrl_bus.sv`: the TE control bus.
- `rtl/aker_soc.sv`: the system top.
- `tb/`: the testbenches and the three behavioural models.
