# A banked shared memory for a 16-lane soft SIMT processor

A SIMT core with 16 scalar processors (SPs, or lanes) issues a memory
instruction as a sequence of *operations*. Each operation holds 16 requests,
one per lane, and the core issues one operation per clock. A multi-port memory
serves all 16 requests at once, but it does this by copying the data many
times, which costs a lot of block RAM and limits the number of write ports.
This design takes the other approach: it splits the shared memory into 16
single-port-per-direction **banks**. The low bits of a word address select the
bank. When the lanes of an operation spread over all the banks, the operation
takes one clock. When *k* lanes land in the same bank, that bank needs *k*
clocks, and the whole operation needs as many clocks as its busiest bank.

This has two consequences for the hardware:

* Memory access time is no longer fixed. The memory needs controllers that
  work out the cost of each operation in advance, queue the operations and
  feed them to the banks at the right rate. They also stall instruction
  fetch/decode while an instruction is in progress.
* Each bank needs a cheap, fast arbiter. It must grant the lanes that want
  the bank one at a time, and the grants must also tell the read path which
  lane each returning word belongs to.

The RTL follows the organisation of Langhammer and Constantinides, *Banked
Memories for Soft SIMT Processors*. That paper describes this memory for an
Intel Agilex FPGA at over 735 MHz. Section "Where this design departs from
the paper" lists what was interpreted or added here.

## Overview

```
          read operation (16 addr, tag)            write operation (16 addr, 16 data)
                    |                                          |
         +----------v-----------+                  +-----------v----------+
         | read_ctrl            |                  | write_ctrl           |
         |  conflict_counter    |                  |  conflict_counter    |
         |  circ_buffer         |                  |  circ_buffer         |
         |  sequencer           |                  |  sequencer, blocking |
         +----------+-----------+                  +-----------+----------+
                    | issue (spaced by count)                  | issue
         +----------v------------------------------------------v----------+
         | shared_memory                                                  |
         |  bank_access_matrix (read)          bank_access_matrix (write) |
         |  16 x carry_arbiter (read)          16 x carry_arbiter (write) |
         |  16 x onehot_mux (address)          16 x onehot_mux (row+data) |
         |           16 x bank_ram (read port | write port)               |
         |  grant delay + transpose -> 16 x onehot_mux (lane output)      |
         +---------------------------+------------------------------------+
                                     | sp_we[16], sp_data[16], sp_tag
                                     v
                                  the SPs
   hold_fetch = read hold | write hold  -> instruction fetch/decode
```

| Module | Role |
|---|---|
| `simt_mem_pkg` | Default sizes, the read tag struct `rd_tag_t {dest[4:0], warp[7:0]}`, and the `bank_of` and `row_of` address split functions |
| `bank_access_matrix` | Turns each lane's bank field into one-hot form and transposes the result, giving one lane vector per bank |
| `conflict_counter` | Counts each bank's lanes and takes the maximum of the counts in a pipelined tree |
| `circ_buffer` | Circular FIFO holding analysed operations (show-ahead read) |
| `access_ctrl` | Shared core of both controllers: counter + buffer + sequencer |
| `read_ctrl` / `write_ctrl` | The two access controllers and their hold rules |
| `carry_arbiter` | Per-bank arbiter built on a subtract-one carry chain |
| `onehot_mux` | Pipelined AND-OR multiplexer with a one-hot select |
| `bank_ram` | One 32-bit bank with a read port, a write port and 3-clock read latency |
| `shared_memory` | Arbiters, input muxes, banks and the read-return path |
| `simt_banked_memory` | Top level |

The default configuration has:

* 16 lanes and 16 banks;
* 32-bit words and 16-bit word addresses, so 64K words = 256 KB and 4096 words per bank;
* LSB bank mapping (`BANK_SHIFT = 0`);
* 512-entry request buffers;
* at most 256 operations per instruction (4096 threads / 16 lanes).

## Addresses and banks

A word address splits into a bank field of `log2(NUM_BANKS)` bits and a row,
which is the rest of the address with the bank field removed:

```
bank = addr[BANK_SHIFT + BB - 1 : BANK_SHIFT]        (BB = log2 NUM_BANKS)
row  = {addr[ADDR_W-1 : BANK_SHIFT+BB], addr[BANK_SHIFT-1 : 0]}
```

`BANK_SHIFT = 0` is the plain map: consecutive words go to consecutive banks.
`BANK_SHIFT = 1` is the *offset* map, which uses bits [4:1] for 16 banks. It
keeps each pair of adjacent words in the same bank and spreads the pairs over
the banks. This suits complex data stored as I,Q pairs. `NUM_BANKS` can be 8
or 4 (or any power of two of at least 4). The lane-side interface stays the
same, and only the arbiter count and the bank field change.

## Conflict counting and the access controllers

Both controllers use one core, `access_ctrl`. An operation goes through it in
these stages:

1. **Bank access matrix.** Each lane's bank field becomes a one-hot vector.
   The 16 x 16 lane-by-bank matrix is transposed, so that row *b* lists the
   lanes that use bank *b*.
2. **Population count.** Each row is counted, giving a 5-bit value from 0 to 16.
3. **Maximum.** A binary max tree (16 → 8 → 4 → 2 → 1) finds the largest
   count. This is the number of clocks the operation occupies the memory. No
   operation is free, so it is at least 1.
4. **Buffer.** The count, the 16 addresses and the payload are written as one
   entry of the circular buffer. The payload is the read tag or the 16 data
   words.
5. **Sequencer.** A down-counter issues the head entry when it reaches zero.
   It then reloads with `count - 1`, so consecutive operations leave the
   controller exactly `count` clocks apart.

The counter registers the popcounts and the first three tree levels. The last
max feeds the buffer write directly, so the head of an otherwise empty
controller can be issued in the **5th clock** after the operation arrives.
Under a steady stream, a controller issues one operation per clock when there
are no conflicts, and one every *k* clocks for *k*-way conflicts.

Hold rules towards fetch/decode (`hold_fetch` is the OR of both controllers):

* **Read.** Hold from the first operation of a read instruction until the
  shared memory has returned the last word. In other words, hold while the
  controller has work or the memory has reads in flight.
* **Blocking write.** Hold until the last word of the instruction is in the
  banks.
* **Non-blocking write.** No hold. The core may go on, including with a
  following read, while the write buffer drains.
* **Write buffer space.** Hold while fewer than `OPS_MAX + 8` entries are
  free, so that the next write instruction always fits. The top exports this
  part of the hold as `wr_hold_full`.

## Carry-chain arbitration

Each bank has one read arbiter and one write arbiter. An arbiter is loaded
with the bank's lane vector, then produces one one-hot grant per clock until
the vector is empty:

```
grant      = state & ~(state - 1)     // lowest set bit
next state = state &  (state - 1)     // lowest set bit cleared
```

Subtracting one borrows up through the trailing zeros. The borrow turns the
lowest `1` into `0` and every `0` below it into `1`. The second line keeps only
the bits that did not change from `0` to `1`, which removes that lowest `1`. The
first line marks the one bit that went from `1` to `0`. On an FPGA this is a
single carry chain plus two AND gates per bit, so it runs as fast as an adder
of the same width. The arbiter needs no priority encoder and no rotating
pointer.

Every lane has the same priority. Lane 0 (bit 0) goes first. A bank with *k*
requesting lanes is busy for exactly *k* clocks, and the controller has
already spaced the operations by the maximum *k*. So each arbiter is empty
again when the next operation loads it. An assertion in `shared_memory`
checks this.

Example (8 lanes, bank 1 used by lanes 1, 2 and 4, vector `00010110`):

| clock | state | grant |
|---|---|---|
| 0 | 00010110 | 00000010 (lane 1) |
| 1 | 00010100 | 00000100 (lane 2) |
| 2 | 00010000 | 00010000 (lane 4) |
| 3 | 00000000 | — |

## The shared memory and the return path

**Input side.** When an operation is issued, `shared_memory` computes the bank
access matrix again from the addresses. This costs a few LUTs and saves
carrying 256 bits from the controller. The matrix loads all the arbiters, and
the rows and tag are registered. In each following clock, every bank's grant:

* drives a 3-stage one-hot mux that picks the granted lane's row for the bank
  read port;
* on the write side, does the same for the row and data word.

The write side ends there. The read side continues:

**Return path.** A read word leaves its bank 3 clocks after the bank read. The
grant that chose the address also tells which lane the word belongs to. The
grants are delayed by the address-mux pipeline plus the bank latency (3 + 3 =
6 clocks). They are then **transposed**: the 16 bank grants, each a 16-bit
lane vector, become 16 lane vectors, each a one-hot choice of bank. Each lane
vector drives that lane's 16-to-1 output mux, which is also 3 stages. The OR
of a lane's vector, delayed to match the mux, is the lane's write-back strobe
`sp_we[l]`. The operation's tag travels in a matching delay line. It goes out
as `sp_tag` with the data, so the SP knows the destination register and which
operation of the instruction the word completes.

A lane can receive its word in any of the operation's *k* clocks, and
different lanes in different clocks. The SP must take each lane's word
whenever its strobe is high.

### Timing (default parameters)

| Event | Clock |
|---|---|
| Operation presented to a controller | t |
| Earliest issue to the shared memory | t + 5 |
| Arbiters loaded; first grants | issue + 1 |
| Bank read of a lane granted in clock g | g + 3 (after the address mux) |
| Word and strobe at the SP | g + 9 |
| First word of an operation issued in clock i | i + 10 |
| A *k*-way-conflict operation's last word | i + 9 + k |
| Write: word in the bank, lane granted in clock g | g + 3 |

Reads and writes have their own controllers, arbiters, muxes and bank ports,
so they run at the same time. A bank read of a row written in the same clock
returns the old word.

## Large memories: half banks

A bank made of many block RAMs becomes physically large, and its address and
data fan-out limits the clock. For memories beyond the default 256 KB,
`HALF_BANKS = 1` builds every bank as two half banks. The upper row bit
selects the half. This costs two pipeline clocks:

* a register on the way in, carrying the address, write data and enables to
  the half;
* a register after the half-select mux on the way out.

Reads therefore return 2 clocks later (g + 11), and writes land 1 clock later.
`shared_memory` lengthens its grant, tag and activity delay lines to match.
Nothing else changes, because the controllers wait for the memory's busy
signals rather than counting clocks.

`BANK_WORDS` lets the bank depth be less than a power of two. The 448 KB
configuration is `ADDR_W = 17`, `BANK_WORDS = 7168` and `HALF_BANKS = 1`.
That gives 16 banks of 7168 words, each split into a lower half of 4096 words
and an upper half of 3072. Addresses at or above 114688 must not be used.
`tb_large_memory` runs this configuration against a default-size instance. It
checks data across the whole range and the 2-clock difference in read latency.

## Interface of `simt_banked_memory`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of the control state |
| `rd_enable` | in | 1 | a read operation this clock |
| `rd_addr` | in | 16 x 16 | word address per lane |
| `rd_tag` | in | `rd_tag_t` | destination register and operation index |
| `wr_enable`, `wr_blocking` | in | 1, 1 | a write operation; the instruction is blocking |
| `wr_addr`, `wr_data` | in | 16 x 16, 16 x 32 | address and word per lane |
| `sp_we`, `sp_data`, `sp_tag` | out | 16, 16 x 32, `rd_tag_t` | read write-back |
| `hold_fetch` | out | 1 | do not start a new instruction |
| `rd_issue`, `rd_issue_count` | out | 1, 5 | read operation issued to the banks and its clock count |
| `wr_issue`, `wr_issue_count` | out | 1, 5 | the same for writes |
| `wr_hold_full` | out | 1 | the write-buffer-space part of `hold_fetch` |

The core should present the operations of one instruction on consecutive
clocks, and start a new instruction only when `hold_fetch` is low. An
instruction is at most `OPS_MAX` operations.

## Measured behaviour

`tb_transpose` runs a matrix transpose through six memory types: 16, 8 and
4 banks, each with the plain and the offset map. The testbench acts as the
core. It runs 1024 threads (64 operations of 16 lanes) per instruction, with
the source matrix stored row-major:

* The loads read along rows, 16 consecutive words per operation.
* The stores write down columns, so all 16 lanes of an operation hit one
  bank under every map here.

The table gives the clocks that the load and store instructions held fetch,
summed per matrix. The paper's cycle counts for the same memory types are in
brackets.

| Memory | Matrix | Load | Store |
|---|---|---|---|
| 16 banks | 32 x 32 | 80 (168) | 1035 (1054) |
| 16 banks | 64 x 64 | 320 (1184) | 4140 (4216) |
| 16 banks | 128 x 128 | 1280 (8832) | 16560 (16864) |
| 16 banks, offset | 32 x 32 | 144 (106) | 1035 (1050) |
| 16 banks, offset | 128 x 128 | 2304 (4672) | 16560 (16800) |
| 8 banks | 32 x 32 | 143 (290) | 1034 (1048) |
| 8 banks | 128 x 128 | 2288 (16928) | 16544 (16768) |
| 4 banks | 32 x 32 | 270 (544) | 1033 (1046) |
| 4 banks | 128 x 128 | 4320 (16896) | 16528 (16736) |

**Stores** cost 16 memory clocks per operation plus a fixed overhead of 10 to
11 clocks per instruction. The overhead shrinks by one clock for each halving
of the bank count, because the conflict counter's max tree gets one level
shorter. The paper's store counts show both the size and this slight trend.

**Loads** here follow only the bank arithmetic of a row-order read:

* 1 clock per operation with 16 plain-mapped banks;
* 2 clocks with 8 banks or the offset map;
* 4 clocks with 4 banks.

The paper's load counts are higher and favour the offset map. Its loads come
from its own assembler program, whose access order and SP write-back are not
given, so the load columns are not expected to match.

The FFT benchmarks need the SPs' floating-point arithmetic, so their cycle
counts are not reproduced. Their memory traffic can be simulated, and
`tb_fft_access` does so for a 4096-point complex FFT:

* Each point is stored as I at word 2i and Q at word 2i+1.
* Each radix-r Cooley-Tukey pass runs one thread per butterfly.
* Each pass loads I and Q of every butterfly input, then stores the results
  in place. The butterfly is replaced by a fixed permutation so that the
  results can be checked.
* The last store of each pass is blocking, so the next pass sees its data.

The thread-to-point mapping is the testbench's own choice. Results on 16
banks:

| Radix | Passes | LSB map: clocks | Offset map: clocks | Conflict-free loads, offset map |
|---|---|---|---|---|
| 4 | 6 | 21314 | 13150 | 2048 of 3072 |
| 8 | 4 | 23596 | 13386 | 1024 of 2048 |
| 16 | 3 | 22049 | 20063 | 1024 of 1536 |

With the plain map, no load operation is conflict-free. Every load reads
only I words or only Q words, which are an even stride apart, so at most 8
banks are in use. The offset map keeps I and Q of a point in one bank, and
an all-I load of consecutive points then covers all 16 banks. This is the effect that makes the offset
map the paper's fastest 16-bank FFT configuration.

## Where this design departs from the paper

* **Address width.** The text gives 16-bit addresses. The read-controller
  block diagram labels 12-bit ones. This design uses 16 bits (64K words =
  256 KB). That size also matches the 128 block RAMs the paper lists for the
  16-bank memory. `ADDR_W` can be changed.
* **Offset map.** The paper gives the shifted map as "bits [4:2] rather than
  [3:0]". That is three bits, which cannot index 16 banks. Here the map uses
  the 4-bit field shifted by one, [4:1].
* **Grant delay.** The paper delays the grants by the bank latency (3). Here
  the address mux in front of the banks is also pipelined, so the delay is 3 + 3.
* **Output mux pipeline.** The paper specifies 3 stages for the address and
  data muxes. The lane output muxes get the same 3 stages here.
* **Arbiter order.** The paper starts with the "rightmost" lane. Here lane 0 is
  bit 0 and is served first. The order does not change any clock count.
* **Controller buffers.** The paper uses separate register, address and count
  buffers. Here they are one wide circular buffer of 512 entries (one block
  RAM deep). It reads show-ahead (combinationally), so the sequencer can issue
  in the same clock an entry appears.
* **Half banks.** The paper splits banks only for its 448 KB memory and gives
  no registers for the two extra clocks. Here they are one register in front of
  the halves and one after the half-select mux. The default configuration does
  not split its banks.
* **Added by this design:**
  * the operation index in the read tag;
  * the release points of the read and blocking-write holds;
  * the write-buffer-space hold.

  The paper does not define any of these.
* **No ordering of a non-blocking write against a later read.** Programs that
  need the write first should use a blocking write, as the paper intends.
* **Not built:**
  * the multi-port baselines the paper compares against;
  * the SPs;
  * instruction fetch/decode.

  These connect at the top's ports.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints a final
`TB_RESULT checks=N failures=M` line and has a watchdog. To run one with
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/simt_mem_pkg.sv tb/tb_simt_banked_memory.sv --top-module tb_simt_banked_memory
./obj_dir/Vtb_simt_banked_memory
```

Replace the testbench name to run another one:

* `tb_bank_access_matrix`
* `tb_conflict_counter`
* `tb_circ_buffer`
* `tb_carry_arbiter`
* `tb_onehot_mux`
* `tb_bank_ram`
* `tb_read_ctrl`
* `tb_write_ctrl`
* `tb_shared_memory`
* `tb_transpose`
* `tb_large_memory`
* `tb_fft_access`

`tb_simt_banked_memory` runs the top at its default parameters. It drives
conflict-free, conflicting and fully conflicting read and write instructions,
blocking and non-blocking, and overlapping reads and writes. It checks every
returned word and tag against a reference memory. It counts each mechanism
(conflict stalls, read holds, blocking-write holds, buffer-space holds,
read/write overlap) and fails if any of them never occurs.

The testbenches start with `rst_n` high and pull it low after 1 ns. This gives
the asynchronous resets an edge to act on.

To change the configuration, override the top's parameters:

* `NUM_BANKS` (4, 8, 16, ...);
* `BANK_SHIFT` (0 plain, 1 offset);
* `ADDR_W`;
* `BUF_DEPTH`;
* `OPS_MAX`;
* `BANK_WORDS` and `HALF_BANKS` (see "Large memories: half banks").

By default the bank depth is `2^ADDR_W / NUM_BANKS`.
