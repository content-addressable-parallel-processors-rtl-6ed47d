# A content addressable parallel processor with a byte-serial host protocol

An ordinary memory is asked for the word *at an address*. A content addressable
parallel processor (CAPP) is asked for the words *that look like something*:
every stored word is compared with a search pattern at the same time, and the
words that match become the current set of *responders*. The CAPP then works
on all responders at once. One write stores a value into every responder in a
single clock cycle, and one read returns the bitwise OR of all of them. Those two
operations, parallel write and combined read, are what set a CAPP apart from the
content addressable memories used as lookup tables in network equipment. Such
memories can search, but they cannot write to, or read from, many words at once.

This RTL implements the classic CAPP organisation from C. C. Foster's work,
in the form of an FPGA co-processor that a host computer drives over a serial
link. It follows the design published by Salik, Askenazi and Rietman
("Content Addressable Parallel Processors on a FPGA"). At its default size the
core holds 16 words of 32 bits. The controller speaks a one-byte command
protocol and runs from a 48 MHz clock.

## The three parts of the CAPP

```
              host word            comparand C   mask M
                  |                    |           |
          +-------v--------------------v-----------v-------+
          |   search registers   (capp_search_registers)    |
          |   M1[i], MZ[i]: search lines   W1[i], W0[i]: write lines
          +---------+----------------------------+----------+
                    | per bit position i, shared by all cells
          +---------v----------------------------v----------+      +-----------------+
          |   memory cells S[j][i]  (capp_cells)              |----->| tags T[j]       |
          |     parallel match -> Mismatch[j] ----------------+  R   | (capp_tag_      |
          |     parallel read  <- T[j]  -> read lines R[i]    |<-----|  registers)     |
          +---------------------------------------------------+      | SET, SELECT     |
                                                                     | FIRST, SOME/NONE|
                                                                     +-----------------+
```

**Search registers.** The *comparand* holds the pattern. The *mask* marks the
bit positions that the pattern ignores: a mask bit of 1 means "don't care".
While the Perform Search line is high, every bit position `i` that is not
masked drives one of two search lines into every cell. `M1[i]` asks for a 1 and
`MZ[i]` asks for a 0. A masked position drives neither line. The same two
registers drive the two write lines of each bit position. While a write is
enabled, `W1[i]` or `W0[i]` carries comparand bit `i` into the cells, again only
where the mask does not ignore the bit.

**Memory cells.** `CELLS` words of `WIDTH` bits each. Every bit position has one
set of lines, shared down all the cells: two write lines, two search lines and
one read line. The cells contain two pieces of combinational logic:

* *Parallel match.* Bit `S[j][i]` mismatches when `M1[i]` is high and the bit
  holds 0, or when `MZ[i]` is high and the bit holds 1. Cell `j` raises
  `Mismatch[j]` when any of its bits mismatches. All cells are compared in the
  same cycle, whatever their number.
* *Parallel read.* Read line `R[i]` is the OR, over all cells, of
  `T[j] AND S[j][i]`. With one responder, the read lines carry its word. With
  several, they carry the OR of their words. With none, they carry zero.

A write changes only the cells whose tag is set. In those cells, a bit becomes 1
under `W1[i]`, becomes 0 under `W0[i]`, and otherwise keeps its value.

**Tag registers.** Each cell has one tag bit, built as a set/reset flip-flop.
Together the tags are the responder set.

* The SET line drives the S input of every tag, so raising SET makes every
  cell a responder.
* A cell's mismatch line drives its tag's R input, so a search can only
  *remove* responders. Searching narrows the set step by step, and searches on
  different fields combine as an AND.
* SELECT FIRST adds a second reset term to tag `k`:
  `SELECT FIRST AND (T[1] OR ... OR T[k-1])`. It clears every tag after the
  first one that is set, leaving one responder. This is how a program picks one
  word out of many, for example a free cell to allocate.
* SOME/NONE is the OR of all tags. It is the end of the same OR chain, and it
  tells whether any responder is left.

The tags are clocked registers: `next = S ? 1 : (R ? 0 : T)`. Each control line
is a level. Holding SET, Perform Search or SELECT FIRST high for several cycles
gives the same result as one cycle, because the mismatch lines do not depend
on the tags, and the select chain is stable once only the first tag is left.
The controller uses this: it holds SEARCH high for several cycles.

## Programming model

A host program builds its operations out of these primitives. For example, it
can allocate a free cell and store a word using one bit of each word as a
"used" flag:

1. mask = everything except the flag, comparand = 0 (a free cell has flag 0);
2. Set Tags High, Set Tags Low (every cell is a responder);
3. Search (only the free cells are left);
4. Select First (only the first free cell is left);
5. mask = 0, comparand = word with the flag set; Write.

To find a word, the program sets the comparand and mask, resets the tags and
searches. Get Tags then returns the responders, and Read followed by Get
Comparand returns their combined value. One Write updates a field in every
responder at once, whatever their number. The end-to-end testbench runs
exactly these sequences.

## Host protocol (capp_fsm)

The host sends single ASCII command bytes. The controller waits in READY, runs
each command as a short series of states, and returns to READY:

| byte | command        | what it does                                         | busy cycles after the byte |
|------|----------------|------------------------------------------------------|----------------------------|
| `a`  | Set Comparand  | receive one word, load it into the comparand         | 1 + bytes + 1              |
| `b`  | Get Comparand  | send the comparand, `WIDTH/8` bytes                  | 1 + bytes (+ stalls)       |
| `c`  | Set Mask       | receive one word, load it into the mask              | 1 + bytes + 1              |
| `d`  | Get Mask       | send the mask, `WIDTH/8` bytes                       | 1 + bytes (+ stalls)       |
| `e`  | Select First   | SELECT FIRST high, wait, low                         | `SELECT_DELAY + 2` = 7     |
| `f`  | Get Tags       | send the tags, `ceil(CELLS/8)` bytes (2 by default)  | 1 + bytes (+ stalls)       |
| `g`  | Set Tags High  | raise SET and leave it high                          | 1                          |
| `h`  | Set Tags Low   | lower SET                                            | 1                          |
| `i`  | Write          | write lines enabled for one cycle                    | 1                          |
| `j`  | Read           | load the read lines into the comparand               | 1                          |
| `k`  | Search         | SEARCH high, wait, low                               | `SEARCH_DELAY + 2` = 7     |

The controller drops any other byte that arrives in READY. Commands without
data send nothing back, so a host that needs to know that a command has
finished follows it with a Get command.

Two states are shared by two commands each. This is the least obvious part of
the controller:

* **RECEIVE** collects one word for either Set Comparand or Set Mask. The
  first state of each command (Set Comparand (i), Set Mask (i)) *pushes* its
  second state, (ii), into a one-entry return register and jumps to RECEIVE.
  RECEIVE shifts in `WIDTH/8` bytes and then jumps to whichever state was
  pushed. That state pulses the load of the comparand or the mask.
* **IDLE** is a delay loop shared by Search and Select First. SEARCH_1 raises
  the SEARCH line, loads the delay counter with `SEARCH_DELAY` (5) and pushes
  SEARCH_2. IDLE counts down. SEARCH_2 lowers the line. SEARCH is therefore high
  for `SEARCH_DELAY + 1` cycles. Select First is built the same way, with
  SELECT_1, SELECT_2 and `SELECT_DELAY`.

All Get commands pass through one SEND state. It offers one byte at a time on
`tx_data`/`tx_valid` and holds each byte until `tx_ready` is high. So at most
one byte moves per clock in each direction, and words travel
most significant byte first. Splitting every command into short steps keeps
the latency of each step small and similar. This was an explicit goal of the
original design, which had to share a clock with a serial link.

## Modules

| module                  | role                                                                          |
|-------------------------|-------------------------------------------------------------------------------|
| `capp_pkg`              | default sizes, the `capp_ctrl_t` control-line struct, command byte codes      |
| `capp_search_registers` | comparand and mask registers; M1/MZ search lines; W1/W0 write lines          |
| `capp_match_logic`      | parallel match: one mismatch line per cell (combinational)                    |
| `capp_read_logic`       | parallel read: OR of the tagged words (combinational)                         |
| `capp_cells`            | storage with parallel write; instantiates the match and read logic            |
| `capp_tag_registers`    | SR tags, SET, SELECT FIRST chain, SOME/NONE                                   |
| `capp_core`             | the three parts wired together, driven by `capp_ctrl_t` and the host word     |
| `capp_fsm`              | host protocol controller                                                      |
| `capp_top`              | controller and core; the host byte streams are its ports                      |

`capp_top` has these ports: `clk` (48 MHz), `rst` (synchronous, active high),
`rx_data/rx_valid/rx_ready` (bytes from the host), `tx_data/tx_valid/tx_ready`
(bytes to the host), `some_none` and `busy`. A byte moves on a clock edge where
its valid and ready are both high. In the complete device, a USB serial (CDC)
core on the FPGA's USB pins supplies these byte streams. That core is
third-party IP and is not part of this RTL. Any UART or USB serial core with
valid/ready byte streams can be connected in its place.

The parameters are `CELLS` (default 16), `WIDTH` (default 32, a multiple of 8),
`SEARCH_DELAY` (default 5) and `SELECT_DELAY` (default 5). The core is fully
parallel. It has `CELLS × WIDTH` storage flip-flops, and a match tree and an OR
tree of the same size, so its area grows linearly with the memory size. The
SELECT FIRST chain is a ripple OR across the cells, so its delay grows
linearly with `CELLS`. At the default
size, the whole device synthesises to about 675 flip-flops: 512 memory bits, the
64 bits of the two registers, 16 tags and the controller. That is well inside the
iCE40LP8K of the TinyFPGA-BX board it was built for.

## What follows the published design and what is filled in

The following come from the published design: the three parts and the names of
their lines (comparand C, mask M, Perform Search, M1/MZ, S/R tags, SET,
SELECT FIRST, SOME/NONE, read lines R); the OR of tagged words on the read
lines; the command set and letters; the shared RECEIVE state with a pushed
return state; the SEND state; the SEARCH_1 / IDLE / SEARCH_2 sequence with a
delay of 5; the reuse of IDLE by Select First; 4-byte words; a 2-byte tag
vector, which gives 16 cells; and the 48 MHz clock.

The following were not specified and are choices made here:

* **Mask polarity.** The description says that the mask holds the bits to
  ignore, so a mask bit of 1 is "don't care". The classic CAPP, whose
  schematics the published figures resemble, uses the opposite sense: 1 means
  "compare". To use that convention, invert the mask in the host software.
* **What drives the write lines.** The published design says only that each
  bit has two write lines, and that the line that is high decides whether the
  bit becomes 0 or 1. Here the comparand drives them, gated by the inverted
  mask, as in the classic CAPP. A write therefore copies the unmasked comparand
  bits into every responder.
* **Where Read puts its result.** Read is a command without a reply, and the
  only readable registers are the comparand, the mask and the tags. So Read
  loads the read lines into the comparand, and Get Comparand fetches the result.
* **SR priority.** When S and R are high together, S wins. The controller never
  raises SET and SEARCH together, and an assertion in `capp_fsm` checks this.
* **Durations.** Write and Read take one cycle. Select First uses the same
  delay as Search (5), because its own delay is not given.
* **Link details.** The byte order (most significant first), the valid/ready
  handshake, dropping unknown bytes, and no acknowledgement for commands
  without data.
* **Reset.** A synchronous reset clears the registers, the memory and the
  tags. The published design does not describe a reset.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares against
values computed independently, bit by bit, inside the testbench:

* `tb_capp_search_registers`, `tb_capp_match_logic`, `tb_capp_read_logic`,
  `tb_capp_cells`, `tb_capp_tag_registers`: random stimulus against the
  defining rule of each line.
* `tb_capp_core`: fills the cells with distinct words through the
  allocate-by-flag sequence, looks each word up, then applies 4,000 cycles of
  random control lines, with a reference model checked after every edge.
* `tb_capp_fsm`: plays the host and the core. It checks the loaded words, the
  bytes sent back under random back-pressure, the length of the SEARCH and
  SELECT FIRST pulses, and the busy time of every command.
* `tb_capp_top`: the whole device at its default size, driven only through
  the byte protocol. It allocates and fills all 16 cells, finds and reads back
  each one, runs a masked search with 8 responders, a combined read,
  Select First, a parallel write into 8 cells, a search with no responder and
  an unknown byte. It also measures the 7-cycle Search and Select First
  latency. It counts each of these mechanisms, and a mechanism that never
  happened fails the test.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. To
run one with Verilator (5.x):

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb +libext+.sv rtl/capp_pkg.sv tb/tb_capp_top.sv \
    --top-module tb_capp_top -o sim
./obj_dir/sim
```

Replace `tb_capp_top` with any other testbench name to run that test. The
simulator has two states, so every register is reset, and the testbenches
build their data with `$urandom`.

To change the size, set `CELLS` and `WIDTH` on `capp_top`. The host protocol
follows automatically: a word takes `WIDTH/8` bytes and the tags take
`ceil(CELLS/8)` bytes.

## Limits

* The RTL has no USB or UART core and no clock generation. The top expects
  byte streams and a 48 MHz clock from outside.
* The published design describes behaviour, not a timing budget. It holds
  SEARCH high for 5 cycles. In this RTL, the match logic and the tag update
  complete in one clock cycle, so a shorter delay also works functionally.
  Whether it meets 48 MHz timing depends on the FPGA and the size.
* No host-side driver is included. The end-to-end testbench shows the command
  sequences that such a driver issues.
