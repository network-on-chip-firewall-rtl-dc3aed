# NoC Firewall: an address firewall for every master port of a System-on-Chip

A System-on-Chip joins processor cores and peripheral IP blocks through an
on-chip network (NoC). If two operating systems run on separate cores, their
isolation normally depends on the cores' MMUs, a hypervisor and the IO-MMUs,
all large and hard to verify. It also assumes every IP block behaves. A
defective or malicious block with bus-master access, such as a GPU that obeys
commands hidden in an image, can write anywhere in memory.

The NoC Firewall (NoCF) puts a small, separately analysable checker, an
*interposer*, on every master port where traffic enters the NoC. Each
interposer holds a few address rules and forwards an AXI4 read or write
request only if a rule allows it. Rules come from one place: a dedicated
*integrity core*, a small processor that no other master can reach. When a
request matches no rule, the interposer holds it and interrupts the integrity
core. The core may install a new rule. It then tells the interposer to check
the request again, and the request is either forwarded or answered with an AXI
decode error.

This repository holds synthesizable SystemVerilog for the interposer and for
the nine-port firewall layer of a two-core prototype system, together with
self-checking testbenches. The processor cores, the NoCs, the memory
controller and the integrity core are not part of it. They meet the RTL at
ports.

## System arrangement

```
   core 0 (4 AXI masters)     core 1 (4 AXI masters)     GPU (1 AXI master)
     |  |  |  |                 |  |  |  |                 |
   [I][I][I][I]               [I][I][I][I]               [I]      I = nocf_interposer
     |  |  |  |                 |  |  |  |                 |
   memory NoC / peripheral NoC (instruction and data port of each core on each NoC)
                                                           |
   each [I] --- policy configuration link (FSL pair) + interrupt line --- integrity core
```

`nocf_soc` instantiates `NUM_PORTS = 9` interposers, numbered as follows:

| port | master | NoC | rules |
|---|---|---|---|
| 0 | core 0 instruction | memory | 2 |
| 1 | core 0 data | memory | 2 |
| 2 | core 0 instruction | peripheral | 2 |
| 3 | core 0 data | peripheral | 4 |
| 4–7 | core 1, same order | | 2, 2, 2, 4 |
| 8 | GPU | memory | 2 |

The two peripheral data ports get four rules because they guard several small
device regions. The other ports need one or two large memory regions. The
interposers do not talk to each other. The design is distributed so that the
many wires between rule storage and checkers stay local to each port, and only
a narrow 32-bit link runs to the integrity core.

## Inside one interposer

`nocf_interposer` has an AXI4 slave port `s_*` facing the master IP and an
AXI4 master port `m_*` facing the NoC. It contains:

* **PDP** (`nocf_pdp`, the Policy Decision Point). It stores `NUM_RULES` rules
  and checks the current read address and the current write address against
  all of them in parallel, combinationally.
* **Two PEPs** (Policy Enforcement Points), one on AR and one on AW. Each is an
  address filter (`nocf_addr_filter`) plus a channel controller
  (`nocf_pep_channel`).
* **Integrity core interface** (`nocf_ic_if`). It holds two FIFOs
  (`nocf_fsl_fifo`), decodes commands, merges the two channels' fault reports
  and drives the interrupt line.
* **Response takeover.** While a channel answers a dropped request, the
  interposer drives the master's R or B channel itself and holds RREADY or
  BREADY low towards the NoC.

The W channel is a plain wire connection. So are the valid and ready of R and
B, except during a takeover.

### Rules

A rule is `{valid, rd, wr, size[3:0], base[23:0]}`. It covers the naturally
aligned region of 2^(8+2·size) bytes that contains `{base, 8'h00}`. So size 0
is 256 B, 2 is 4 KiB, 4 is 64 KiB, 9 is 64 MiB, 10 is 256 MiB, and 12 or more
is all 4 GiB. An access is allowed when some valid rule covers its start
address and has the matching permission bit. After reset no rule is valid, so
nothing is allowed. A new rule overwrites the oldest one (first in, first
out). A flush invalidates all rules.

Only the request's start address is checked. A burst may go past the end of
a region, so the policy must grant every byte a burst can reach.

## The address filter and the wait attack

This is the subtle part of the design. An AXI master must hold a request
stable until the slave accepts it. A firewall that trusts this rule can be
fooled. The master presents a permitted request while the NoC is not ready.
The firewall approves it and waits for the NoC. The master then swaps the
address on its wires for a forbidden one. A firewall that passes the master's
wires through forwards the forbidden address without checking it. The
original work found this attack by model checking a formal model of the
interposer.

The filter closes this hole. It never forwards anything but the exact request
that was checked. It has three states:

| state | up_ready | what reaches the NoC | leaves when |
|---|---|---|---|
| idle | 1 | the master's live request, in the same cycle, only if the policy allows it now | a request arrives: allowed and NoC ready → stays idle; allowed, NoC busy → waiting; otherwise → committed |
| committed | 0 | the buffered request, only on an allow decision | allow → idle (NoC ready) or waiting; deny → idle, request dropped |
| waiting | 0 | the buffered request | NoC accepts it → idle |

The master's handshake completes when the filter is idle, so the request is
captured on that edge. From then on only the captured copy is checked and
forwarded. What the master does to its wires afterwards does not matter.

Two limits remain. A master that changes its wires *within* a clock cycle can
still confuse a same-cycle pass-through. A register slice in front of the
interposer removes that at the cost of one cycle; this RTL does not include
one, because the NoC IP commonly provides it. Also, W data is not filtered,
as explained under "Departures and choices".

## The fault round trip

Each channel controller is a state machine:

```
 enforce --deny--> request --report taken--> wait --enforce cmd--> check
    ^                                                                |
    |                                      allow: forward, resume ---+
    +-- resume <---------------------------------------------------- |
    +-- (write) respond <-- deny: drop, respond <---------------------+
                (read) respond --> resume
```

* **enforce.** Allowed requests flow through with no added cycle. On a deny
  the filter commits the request and the channel moves to **request**.
* **request.** The channel offers the fault report `{addr[31:1], is_read}` to
  the outbound FIFO. It holds it there until there is room.
* **wait.** The channel waits for the integrity core's *enforce read* or
  *enforce write* command.
* **check.** The channel re-checks the buffered request against the policy as
  it is now, and gives the filter the decision, allow or deny. It also stores
  the request's ID and, on the read channel, ARLEN.
* **respond.** A dropped write gets one B beat with DECERR. A dropped read gets
  ARLEN+1 R beats with DECERR, data 0 and RLAST on the last beat. A missing
  device would produce the same response, so an operating system treats the
  access as a bus error.
* **resume.** A one-cycle pass back to enforce.
* **permit.** A debug state that allows everything. It is entered only from
  reset, with `START_PERMIT = 1`.

While a rule insert or flush is being applied, no decision is made on either
channel. A request arriving in that cycle is committed and judged on the next
cycle. Read and write faults may be pending at the same time; the read report
goes first.

## Integrity core protocol

Each interposer has one inbound and one outbound 32-bit link, each buffered by
a 16-word FIFO. There is one interrupt line per interposer, high while a fault
report is waiting.

Command word, integrity core → interposer:

| bits | field |
|---|---|
| 31:30 | opcode: 0 new rule, 1 flush, 2 enforce read, 3 enforce write |
| 29 | read permitted (new rule) |
| 28 | write permitted (new rule) |
| 27:24 | size code (new rule) |
| 23:0 | base address bits 31:8 (new rule) |

Fault report, interposer → integrity core: `{addr[31:1], is_read}`.

The interrupt handler the firmware needs is short:

1. Read the report from the interposer that interrupted.
2. Decide which region, if any, this master may access.
3. If there is one, send a *new rule* command.
4. In every case send *enforce read* or *enforce write*.

If no rule was added the request is dropped with DECERR. `nocf_pkg` provides
`make_rule_cmd` and `make_op_cmd` to build the words.

## Timing

* An allowed request passes in the cycle it is presented: the PDP and the
  filter are combinational from the AR/AW inputs to the NoC outputs.
* A denied request costs the integrity core's round trip. There are 2 cycles
  into the outbound FIFO, the software handler, 1 cycle per command through
  the inbound FIFO, 1 cycle in check, then forwarding or the error response.
* While a fault is pending on a channel, that channel takes no new request.
  The other channel keeps working.

## Departures and choices

Taken from the paper:

* the interposer's structure (PDP, two PEPs, integrity core interface)
* the three filter states and seven channel states, and their transitions
* rules made of a partial base address, two permission bits and a 4-bit size
* parallel rule checking and first-in-first-out replacement
* the empty policy after reset
* no decisions while the policy is updated
* DECERR for dropped requests, with ARLEN+1 beats on reads
* FIFOs on both link directions and one interrupt per interposer
* 32-bit command words and addresses
* nine ports, with two rules each and four on the peripheral data ports

This design's own choices, where the paper is silent:

* the command and report word layouts above
* the set of region sizes, 2^(8+2·size)
* report bit 0 carrying read/write in place of address bit 0
* FIFO depth 16
* ID width 4 and data width 32
* read-first arbitration of fault reports
* the interrupt taken as the outbound FIFO's not-empty flag
* the port numbering
* ignoring an enforce command that arrives when the channel is not waiting

Known gaps:

* **W is not filtered.** As described, the write data channel is a direct
  connection. The beats of a write that is later dropped still go to the NoC.
  A NoC that expects W beats only after an accepted AW would need a write
  data filter, which this RTL does not have.
* **Same-ID ordering of error responses.** A dropped read's DECERR beats are
  sent as soon as the re-check fails. Earlier reads with the same AXI ID may
  still have data on the way from the NoC, and the error beats then overtake
  it. A master that reuses IDs across regions would need the interposer to
  wait for those reads to drain first.
* **Only the FSL-style link is built.** The variant that groups several
  interposers behind a shared AXI slave interface is not.
* **The permit state is reachable only from reset.**

## Files and simulation

RTL, in dependency order:

| file | contents |
|---|---|
| `rtl/nocf_pkg.sv` | types, command layout, `rule_allows`, word builders |
| `rtl/nocf_fsl_fifo.sv` | link FIFO |
| `rtl/nocf_addr_filter.sv` | PEP address filter |
| `rtl/nocf_pdp.sv` | rule storage and checking |
| `rtl/nocf_pep_channel.sv` | PEP channel state machine and error responses |
| `rtl/nocf_ic_if.sv` | integrity core interface |
| `rtl/nocf_interposer.sv` | one interposer |
| `rtl/nocf_soc.sv` | nine interposers (top) |

Testbenches are in `tb/`. There is one per module, named `tb_<module>`.
`tb_nocf_soc` runs the whole nine-port layer at its default size. All nine
masters run random traffic at once. Core 1's data port sees its memory as
four regions with only two rules, so rules are replaced often. A malicious GPU
then tries to write a 20-byte hook into core 0's kernel text. The test also
replays the wait attack and a flush, and counts each mechanism.

`tb_nocf_gpu_attack` plays the GPU attack in full on one interposer, in front
of a memory that stores data. The GPU model reads its framebuffer and finds a
command hidden in the low byte of each pixel. That command tells it to write
a 20-byte hook into kernel text, and then a 360-byte payload. In a first run
the integrity core grants the GPU all of memory, and both land. After a reset
the core grants only the framebuffer. All 95 writes then get DECERR and memory
stays unchanged. The GPU can still write inside its framebuffer afterwards.

`tb_axi_slave_model`, `tb_axi_mem_model`, `tb_mal_gpu_model` and
`tb_integrity_kernel_model` are behavioural stand-ins for a NoC port, a
memory, a malicious GPU and the integrity core running its firmware. They are
not synthesizable.

Run a testbench with plain Verilator (5.x), from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb rtl/nocf_pkg.sv tb/tb_nocf_soc.sv \
          --top-module tb_nocf_soc -Mdir obj_soc
./obj_soc/Vtb_nocf_soc
```

Each testbench ends with `TB_RESULT checks=N failures=M`. The nine-port test
takes well under a second. The modules carry SystemVerilog assertions for the
AXI hold rules and for the forwarding invariant (nothing reaches the NoC
without an allow decision); `--assert` enables them.

To change the system, edit `NUM_PORTS` and `PORT_RULES` on `nocf_soc`. Other
region sizes need `REGION_MIN_LOG2` and `REGION_STEP_LOG2` in `nocf_pkg`, and
other AXI widths need `ID_W` and `DATA_W` there.
