# CryptoSRAM: an MCU data SRAM that computes

A microcontroller normally encrypts or hashes sensor data by moving it from
SRAM to the CPU or to a crypto engine and back. This design keeps the data in
place. Some of the SRAM subarrays are modified so that a row-wide Boolean
operation on two stored rows takes one clock cycle. Cryptographic kernels
(AES, SHA3) become short command programs that run on every column of those
subarrays at once.

MCUs suit this well. They use physical addresses, have no cache hashing, and
DMA places data wherever firmware asks. A block of data can therefore be put
row by row into one subarray, where the bitlines can reach it.

The RTL models the following:

* the memory: 64 subarrays of 128 x 256 bits (256 KB), 16 of them able to
  compute (25 %);
* a command array holding the kernels' command programs;
* a small controller that sequences those programs.

All of it is synthesizable SystemVerilog. The analog part, sensing two
wordlines at once on a bitline, is written as its digital equivalent.

## 1. How a column computes

Two wordlines are raised together and the bitlines are then sensed:

* **BL** stays high only if every active cell holds 1, so its sense
  amplifier reads the **AND** of the two cells.
* **BLB** stays high only if every active cell holds 0, so its sense
  amplifier reads their **NOR**.

Each column gets a small extension after its two sense amplifiers
(`isc_sense_amp`):

```
 bl  (AND) ─┐
 blb (NOR) ─┤  op MUX:  AND = bl
            │           OR  = ~blb
            │           XOR = NOR(bl, blb)
            │           NOT = blb     (NOR of a row with itself)
            ▼
        sel MUX:  logic result | D(n-1) | D(n+1) | extension bit
            ▼
           FF ──► Dout  (also D(n±1) of the neighbouring columns)
```

The flip-flop of each column is the "SA latch". The latches of all 256
columns form a row register. Feeding each latch from its neighbour shifts that
row register by one bit per cycle. This is the only movement of data across
columns, and the only addition to the subarray besides the logic gates and the
second decoder. There are no adders and no barrel shifters.

`isc_bitcell_array` models the array as flip-flops. Its read is combinational:
any set of raised rows returns `bl = AND` and `blb = NOR` over those rows.
With no row raised, both outputs read all ones (precharged). A write goes to
the row chosen by the first decoder, under a column mask.

## 2. The ISC subarray and its commands

An ISC-enabled subarray (`isc_subarray`) contains:

* the array;
* **two row decoders** (`isc_row_decoder`);
* a **command decoder** (`isc_cmd_decoder`);
* the 256 modified sense amplifiers.

Commands are 16 bits wide: `opcode[15:12] | index[11:4] | option[3:0]`.

| command    | opcode | index | option | action | cycles |
|------------|--------|-------|--------|--------|--------|
| `rd_row`   | 0001 | src  | 1000 | SA <= row src | 1 |
| `wr_row`   | 0010 | dst  | s000 | row dst <= SA (s=0) or the bus data row (s=1) | 1 |
| `shift`    | 0011 | num  | 1-d0 | SA shifted `num` bits; d=0 toward higher columns, d=1 toward lower; zeros shifted in | num (1 if num=0) |
| `act_row`  | 1011 | src1 | 0001 | first decoder remembers src1 | 1 |
| `logic_op` | 1001 | src2 | 0oo0 | raise src1 and src2, SA <= op(src1, src2); oo = AND, OR, XOR, NOT | 1 |
| `ext_bit`  | 1111 | col  | www0 | read the last row; in each block of 16<<www columns, every latch <= bit (col mod width) of that block | 1 |

Opcodes and the fixed option bits come from the paper's command table. The
meaning of the free option bits (`s`, `d`, `oo`, `www`) and the cycle counts
are this implementation's choices.

The decoder flags any other word as illegal (`illegal` output) and the
subarray drops it.

Some patterns:

* **Two-operand operation:** `act_row a; logic_op b, OP; wr_row dst` takes
  three commands and three cycles, on all 256 columns.
* **NOT:** `act_row a; logic_op a, NOT` gives `~a`.
* **Plain read:** `rd_row` is an AND with a single row raised.

While a shift is in progress the subarray holds `cmd_ready` low. The
controller waits, so a shift of *n* bits costs *n* cycles.

The subarray also has an ordinary 32-bit word port for the system bus. It
takes the access only when no command is present (`bus_gnt`), and read data
returns one cycle later.

## 3. Data layout: computing blocks and tiles

A subarray is split into **computing blocks** (CBs):

* Each CB is *n* rows by *m* columns.
* CBs in the same columns form a tile, so there are 256/m tiles side by side.
* Shared rows below the CBs hold *k* rows of keys, constants and temporaries.

Because a command acts on a whole row, every tile does the same step at the
same time.

* **AES** (n=8, m=16, k=100, 16 blocks per subarray). The 16 bytes of a block
  are bit-sliced: row *b* holds bit *b* of all 16 bytes.
  * AddRoundKey is eight row XORs: 8 x (`act_row`, `logic_op XOR`, `wr_row`)
    = 24 commands. This is exactly the 24 the paper lists.
  * ShiftRows moves bytes within a row. Put state byte s[r][c] in column
    4r + c of the tile. Then state row r is rotated by r inside its group of
    4 columns. Bytes that stay inside the group move r columns toward the low
    end; bytes that wrap around move 4 - r columns toward the high end. Per
    slice that is one mask (row 0 stays) plus six shift-mask-OR terms:
    3 + 6 x 9 = 57 commands, or 456 for the 8 slices. That is the paper's
    ShiftRows count exactly.
  * MixColumns uses the same layout. "Rotate the state rows by k" is a shift
    by 4k columns with wrap-around, built from two masked shifts.
    * With t = s ^ rot1(s) and u = t ^ rot2(t) (the XOR of the whole column),
      the result is s ^ u ^ xtime(t).
    * In bit-sliced form, xtime only renames the slices of t and adds t7 to
      slices 1, 3 and 4.
    * This takes 345 commands, against the paper's 258.
  * BitSlicing is a transpose. The host writes a block as plain bytes: row q
    of a tile holds two whole bytes, one in each half of the tile. Each 8 x 8
    bit square (8 rows x 8 columns) is then transposed in place. Three rounds
    of masked shift-and-XOR swaps do this, at distances 1, 2 and 4. That is
    4 row pairs x 18 commands per round, or 216 commands in all (the paper
    lists 288). The transpose is its own inverse, so the same program also
    turns the result back into bytes.
* **SHA3** (n=25, m=64, 4 states per subarray), lane per row: lane (x, y) of
  every state is row x + 5y.
  * θ and χ are row XOR/AND/NOT operations.
  * π needs no data movement. The next step simply names different rows.
  * ρ rotates lanes. The shift moves the whole 256-bit latch row, so bits
    leak between neighbouring lanes. A rotation by *r* is therefore done as
    `((L << r) AND Mhi_r) OR ((L >> 64-r) AND Mlo_r)`, with two stored lane
    masks per offset. That costs 15 commands and 64 shift cycles.

`ext_bit` turns one bit per block into a full-width mask (all zeros or all
ones), the building block for data-dependent steps such as GHASH's
conditional XOR.

## 4. Controller and command array

**The command array** (`cmd_array`) holds the command programs of all
functions, each stored from its own base address. The default is 2240
entries x 16 bits = 4.48 KB. That is just above the 2233 commands (4.47 KB)
the paper counts for AES-128, GHASH and SHA3 together.

**The controller** (`isc_ctrl`) holds:

* a buffer of **base addresses** and a buffer of **command counts**, indexed
  by function number;
* a counter **CTR**;
* an adder that produces `cmd_addr = base + CTR`.

When CTR reaches a function's count it wraps around and the function runs
again, up to the iteration count of its schedule entry.

The **schedule** buffer is this design's addition. It lists the calls as
`{function, iterations}` entries, so that a sequence like AES-128 can run
without the host:

* AES-128 takes 42 entries: BitSlicing, AddRoundKey,
  9 x (SubBytes, ShiftRows, MixColumns, AddRoundKey), SubBytes, ShiftRows,
  AddRoundKey, BitSlicing.
* GHASH's 1024 GaloisMult calls take one entry.

Timing: one command issues per cycle. The command array's registered output
is the command bus: `cmd_valid` marks it, and it holds while `cmd_ready` is
low. A run of *N* commands with *S* extra shift cycles takes N + S + 2 cycles
from the start write to the `done` pulse. The testbenches check this exactly.

## 5. The memory as a whole (`cryptosram`)

**Subarrays.** Subarrays 0 … N_SUB-N_ISC-1 are standard (`sram_subarray`).
The top N_ISC are ISC-enabled. Commands are broadcast to the ISC subarrays
set in a target mask, and those subarrays execute in lock-step.

**System bus.**

* 18-bit byte address, 32-bit data.
* An access is taken when `bus_req && bus_ready`.
* Reads return `bus_rdata` with `bus_rvalid` one cycle later.
* Addressing is non-interleaved (`subarray_select`):
  `addr = {subarray[5:0], row[6:0], word[2:0], byte[1:0]}`. Consecutive
  words therefore fill a row, and consecutive rows fill a subarray.
* An access to an ISC subarray that is computing (in the mask while busy)
  waits with `bus_ready` low.
* Every other subarray stays accessible, so DMA can fill one subarray while
  others compute.

**Configuration port** (`cfg_we`, `cfg_addr`, `cfg_wdata`), for the host:

| cfg_addr | contents |
|----------|----------|
| 0x0nnn | command-array entry nnn |
| 0x1nnn / 0x2nnn | base address / command count of function nnn |
| 0x3nnn | schedule entry nnn = `{function, iterations[10:0]}` |
| 0x4000 | start; data = schedule length |
| 0x4001 | ISC target mask (ignored while busy) |

Status outputs are `isc_busy`, `isc_done` (a one-cycle pulse) and
`isc_illegal`.

A typical flow:

1. DMA writes plaintext or message rows (and keys, masks and constants) into
   an ISC subarray.
2. The host sets the mask and writes start.
3. The host waits for `isc_done`.
4. DMA reads the result rows out to I/O.

## 6. Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N_SUB` | 64 | subarrays (64 x 4 KB = 256 KB, the SRAM of an STM32L562) |
| `N_ISC` | 16 | ISC-enabled subarrays (25 %; 32 = 50 %, 64 = 100 %) |
| `ROWS`, `COLS` | 128, 256 | subarray geometry |
| `CMD_DEPTH` | 2240 | command-array entries |
| `N_FUNC` | 16 | function slots in the controller |
| `SCHED_DEPTH` | 64 | schedule entries |

## 7. What was verified

Every module has a self-checking testbench in `tb/`. Each compares the module
against values the testbench computes itself.

* `tb_isc_cmd_decoder`: all 65536 command words.
* `tb_isc_subarray`: 600 random commands against a behavioural model of the
  command set, including exact shift timing and illegal commands.
* `tb_isc_ctrl`: the real Table-V command counts for AES-128 (11292
  commands), GHASH (17551) and SHA3, checked command by command, with and
  without random back-pressure.
* `tb_cryptosram`, at the full default size:
  * AddRoundKey ×11, a 16-bit lane rotation, a χ step and `ext_bit` across
    15 subarrays;
  * a subarray outside the mask, which must not change;
  * bus traffic to a standard subarray during computation;
  * a stalled write to a computing subarray.
* `tb_aes128_bitsliced`, at the full default size: **AES-128** encryption
  of 256 blocks, 16 in each of the 16 ISC subarrays.
  * BitSlicing, AddRoundKey, ShiftRows and MixColumns run in the SRAM as the
    command programs described in section 3. The bit-sliced state is
    checked directly once.
  * The host does SubBytes over the bus between schedules. No S-box program
    is included.
  * Every block is compared with a byte-level AES reference, and block 0
    reproduces the FIPS-197 example (`69c4e0d8…`).
  * Each schedule must take exactly one cycle per command, one cycle per
    extra shift bit, and 2 cycles of overhead. A round without SubBytes is
    1099 cycles, or 1595 with the two transposes around it.
* `tb_ghash_gfmul`, at the full default size: the **GHASH** multiplication
  in GF(2^128). This is the core of AES-GCM authentication.
  * Each ISC subarray holds two 128-column blocks, so 32 products are
    computed at once.
  * One 29-command step is iterated 128 times by the controller. The step
    uses `ext_bit` twice: once to broadcast the current multiplier bit, and
    once to broadcast the bit that decides the reduction.
  * Results are checked against a reference multiply and the published GCM
    example (`5e2ec746…`). The run takes exactly 29 x 128 + 2 cycles.
* `tb_sha3_keccak`, at the full default size: complete **SHA3-256** hashing
  on all 16 ISC subarrays (64 states).
  * The command programs are generated by the testbench: absorb, plus two
    813-command round functions.
  * The final states are compared with a plain Keccak-f[1600] reference.
  * State 0 hashes "abc" and reproduces the published digest `3a985da7…`.
  * One round takes 2613 cycles. At 110 MHz this works out to about 15 MB/s
    of SHA3-256 at 25 % ISC.

To run a testbench with plain Verilator (from the directory that holds `rtl/`
and `tb/`):

```
verilator --binary --timing --assert -y rtl rtl/isc_pkg.sv tb/tb_sha3_keccak.sv \
          --top-module tb_sha3_keccak -o sim && ./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M`. Every testbench
initialises or resets all state it reads, so it also passes with random
initial values (`+verilator+rand+reset+2`).

## 8. Where this departs from, or goes beyond, the published description

* **Modelled, not designed.**
  * The analog sensing is reduced to its logic: AND and NOR of the raised
    rows.
  * Precharge has no logic of its own.
  * The CPU, DMA and peripherals are outside the design; the bus and
    configuration ports stand in for them.
* **Own choices where the description is silent:**
  * the meaning of the free option bits and the cycle count of each command;
  * the exact `ext_bit` semantics (the extension row is the last row; the
    result stays in the latches);
  * shifts span the whole 256-bit row instead of stopping at block
    boundaries;
  * the schedule buffer, configuration map, target mask, valid/ready command
    handshake and bus stall;
  * where ISC subarrays sit in the address map;
  * 25 % as the default ISC ratio;
  * the use of the data-bus path by `wr_row` (the current bus write word,
    replicated across the row).
* **Command programs.** The published description gives only the sizes of
  the kernels' programs.
  * The programs in the testbenches are this design's own:
    * BitSlicing, AddRoundKey, ShiftRows and MixColumns in
      `tb_aes128_bitsliced`. AddRoundKey (24) and ShiftRows (456) match the
      published sizes. MixColumns is longer (345 against 258). BitSlicing is
      shorter (216 against 288).
    * The GF(2^128) multiply step in `tb_ghash_gfmul`: 29 commands, against
      16.
    * The SHA3 round in `tb_sha3_keccak`: 813 commands, against 633.
      Between rounds the host writes the next round constant over the bus.
  * Not written, although both fit the command array at their published
    sizes:
    * the AES SubBytes program, whose Boolean circuit is not given (the host
      stands in for it in the test);
    * the GHASH byte-arrangement programs.
* **AES-256** with all 15 round keys resident does not fit the 128 rows
  together with the temporaries SubBytes needs. It would need keys streamed
  in between rounds.
