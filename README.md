# Bitmap index creator: a RAM-based CAM that emits bitmaps

A bitmap index turns one column of a table into a set of bit vectors, one
per value: bit r of the bitmap for key k is 1 when record r holds k.
Building these vectors in software means touching every record once for every
key. This design builds them in hardware at one bitmap per clock cycle. A batch
of N records is loaded into a content-addressable memory (CAM). Each search of
that CAM with a key returns the key's whole N-bit bitmap in one cycle. A small
program of OR, NOT and "emit" instructions then combines these bitmaps into
point indexes (`Age = 25`), set indexes (`Age != {10, 17, 29}`) and range
indexes (`Age <= 10`). The finished indexes are streamed back to external
memory over a 256-bit bus.

The default configuration, BIC64K8, holds N = 65,536 words of M = 8 bits. The
second configuration, BIC32K16, holds N = 32,768 words of M = 16 bits and is
selected by parameters alone.

## 1. The CAM is a transposed bitmap

The CAM is built from RAM, not from comparators. One CAM unit (`cu8`) stores 32
words of 8 bits in a dual-port RAM of 8,192 bits, seen in two shapes:

* **Write port: 8,192 x 1.** Storing value v at word position p writes a 1 at
  bit address {v, p}. Writing a 0 at the same address removes the word.
* **Search port: 256 x 32.** Reading row k returns 32 bits. Bit p of that
  vector is 1 exactly when word p holds k.

So the search port's output *is* the bitmap of key k over those 32 words. The
RAM holds the bitmap index of the 32 words, stored one key per row. A search
costs one RAM read, whatever the key and however many words match.

The price is on the write side:

* A word cannot simply be overwritten. Its old value's bit has to be cleared by
  writing a 0 at {old value, p}. Clearing a batch therefore means sending the
  batch's data again, with the write bit set to 0.
* Loading and clearing together take 2 x N x M / W cycles per batch. For the
  default, that is 2 x 2,048 = 4,096 cycles for 64 KB, and this is the largest
  term in the run time.

**Wider words.** A 16-bit unit (`cu` with M = 16) is two 8-bit units side by
side. The low unit gets byte 7..0 and the high unit byte 15..8. Their two
32-bit search results are ANDed, because a 16-bit word matches only if both
its bytes match. For M = 8, `cu` is one `cu8` with no AND.

## 2. Bit-sliced loading and record order

A 256-bit bus beat carries C = W/M words: 32 bytes or 16 half-words. Loading
one word per cycle would take N cycles. Instead, all C words of a beat are
written in the same cycle, each into a different unit:

* A **CU block** (`cb`) is C units sharing one address. Word k of beat j goes
  to unit k at position j, so 32 beats fill a block.
* The **R-CAM** (`rcam`) is N / (32 x C) blocks, 64 for either configuration.
  Beat b of a batch goes to block b / 32, position b % 32. A batch is
  N x M / W = 2,048 beats, one per cycle.

Record r of the batch is word r % C of beat r / C. It is therefore stored in
unit r % C at position (r / C) % 32 of block r / (32 x C). A search must hand
back bit r of the bitmap in bit position r, so each block re-interleaves its
units' outputs:

    slice bit j*C + k  =  bit j of unit k      (j = 0..31, k = 0..C-1)

The blocks' slices are then concatenated, block 0 lowest. The result is a
plain N-bit bitmap in record order, built from wiring alone, with no
reordering logic.

## 3. Instructions

A program is a list of 32-bit words in external memory:

| bits  | field                                   |
|-------|-----------------------------------------|
| 31:16 | key (8-bit configuration: bits 23:16)   |
| 15:3  | reserved, ignored                       |
| 2     | EQ: emit the result and clear it        |
| 1     | NO: result <= ~result                   |
| 0     | OR: result <= result \| bitmap(key)     |

Examples:

* `Age != {10, 17, 29}` is `000A0001 00110001 001D0001 00000002 00000004`.
  The three ORs build the set, NO inverts it, and EQ emits it.
* A range such as `Age <= 10` is eleven ORs followed by EQ.
* A point index is one OR and an EQ.

A word with more than one operation bit set is not defined by the format. Here
EQ takes precedence, then OR, then NO. A word with no bit set does nothing.

## 4. Query logic array and result output

The query logic array (`qla`) holds the N-bit result register. Each bit has its
own logic set of three parts:

* an OR gate with the search bitmap;
* an inverter;
* a multiplexer choosing among the OR output, the inverter output and the old
  value.

All N sets share the same two select lines. OR and NO therefore each take one
cycle for the whole register.

EQ moves the register out through a first-word-fall-through FIFO (`result_fifo`,
64 x 256 bits), 256 bits per cycle, lowest records first. The register shifts
right by W each cycle, so after N/W cycles (256 for the default) it is all
zeros. This is the automatic clear after EQ. While the shift is running, the
QLA refuses the next instruction. If the FIFO is full, the shift pauses. The
result register is cleared at reset and by EQ, and by nothing else.

## 5. Running a job

The sequencer (`bic_ctrl`) runs the job in this order:

1. **IM.** It copies the program, eight instructions per beat, into the
   instruction memory (`im`, 4,096 words).
2. **LOAD.** For each of the B batches, it has the DMA load the batch into the
   R-CAM.
3. **EXEC.** It issues one instruction per cycle through a three-stage
   pipeline:
   * read the IM;
   * search the R-CAM with the key (the key and the operation travel
     together);
   * hand the operation and the bitmap to the QLA.

   When the QLA is busy emitting a result, every stage holds its value and
   nothing is lost or repeated.
4. **CLEAR.** Once every instruction has been taken and the last result is
   completely in the FIFO, it has the DMA send the same batch again with write
   bit 0, which empties the R-CAM.
5. **DRAIN.** After the last batch, it waits until the FIFO is empty, then
   pulses `done`.

The DMA (`dma`) has three channels: instructions into the IM, batch data into
the R-CAM, and FIFO beats out to memory. Results are written to consecutive
beats from `result_base`. The order is batch 0's bitmaps in program order, then
batch 1's, and so on. Each bitmap is N/W beats.

**Timing.** With a memory that never stalls, one run costs:

    T = Ni*32/W  +  B * ( 2*N*M/W + Ni + E*N/W )

where Ni is the number of instructions and E the number of EQs among them. The
hardware adds a few cycles per DMA job for the request/response handshake and
the memory latency. For the default, one batch with one OR and one EQ takes
about 4,355 cycles by the formula. The simulation, with a 4-cycle memory
latency, gives 4,377, which is about 1.5 G words/s at 100 MHz.

`perf_counters` counts a run's cycles in these five counters:

| counter     | what it counts                      |
|-------------|-------------------------------------|
| `cyc_im`    | program load                        |
| `cyc_cam`   | load and clear                      |
| `cyc_qla`   | instruction execution               |
| `cyc_out`   | result shifting                     |
| `cyc_total` | the whole run                       |

It also counts the bitmaps produced (`bi_count`), and `beats_written` counts
the beats that reached memory.

## 6. Interface of `bic_top`

* **Settings:**
  * `instr_base`, `data_base`, `result_base`: 25-bit beat addresses, where one
    beat is 32 bytes, so 1 GB is addressable;
  * `num_instr`: up to 4,096;
  * `num_batches`: up to 16,383.

  The settings are sampled on `start`. `busy` stays high until `done`.
* **Memory read port:**
  * requests: `mem_rd_valid` / `mem_rd_ready` / `mem_rd_addr`;
  * responses: `mem_rd_rvalid` / `mem_rd_rdata`, in request order, any latency,
    and not back-pressured. At most `MAX_OUT` = 32 requests may be
    outstanding.
* **Memory write port:** `mem_wr_valid` / `mem_wr_ready` / `mem_wr_addr` /
  `mem_wr_data`.
* **Reset:** `rst_n` is an active-low asynchronous reset. The CAM RAM has no
  reset: it starts empty (all zero), as FPGA block RAM does after
  configuration. Every job leaves it empty again.

Parameters: `N`, `M`, `W`, `IM_DEPTH`, `FIFO_DEPTH`, `ADDR_W`, `NB_W`,
`MAX_OUT`. BIC32K16 is `N = 32768, M = 16`. N must be a multiple of
32 x W / M.

## 7. Where this design departs or decides on its own

* **Clear order.** The described load procedure clears the old batch just
  before loading the new one. Here each batch is cleared right after its own
  instructions. It is the same work and the same cycles, but the CAM is empty
  between jobs and after power-up.
* **Beat address width.** The R-CAM beat address is 11 bits (2,048 beats).
  The original block diagram prints 12.
* **Chosen with no guidance from the source:**
  * the memory-port protocol;
  * the addressing;
  * the FIFO depth of 64: after the R-CAM and the instruction memory, about
    16 Kbit of the reported memory budget remains;
  * the order of instructions within a beat (lowest bits first);
  * the precedence of operation bits;
  * the pipeline;
  * the host settings ports.
* **Outside this RTL:**
  * the DDR3 memory;
  * its controller;
  * the PCI Express link to the host, which fills memory and reads results.

  `tb/mem_model.sv` stands in for memory and controller in simulation.
* **Programs longer than 4,096 instructions** must be split into several
  jobs. This works for a full index (pairs of OR and EQ), but a single OR
  chain of 4,096 keys plus its EQ (4,097 words) fits only for a single batch.
  The result register carries over between jobs, so the EQ can go in a second
  job.

## 8. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. For
example:

    verilator --binary --timing --assert -Irtl -Itb rtl/bic_pkg.sv \
        tb/tb_bic_top.sv --top-module tb_bic_top -Mdir obj_top -o sim
    obj_top/sim

Unit testbenches:

| testbench | block |
|-----------|-------|
| `tb_cu8`, `tb_cu` | CAM units |
| `tb_cb` | CU block |
| `tb_rcam` | R-CAM, 8-bit and 16-bit |
| `tb_im` | instruction memory |
| `tb_result_fifo` | result FIFO |
| `tb_qla` | query logic array |
| `tb_dma` | DMA |
| `tb_bic_ctrl` | sequencer |
| `tb_perf_counters` | cycle counters |

Whole-design testbenches:

* `tb_bic_top` runs the whole design at reduced size: 2,048 words, 3 batches,
  two jobs, with random memory stalls. It checks every result beat against a
  record-by-record model and the cycle counters against the timing formula. It
  also counts that each mechanism occurred:
  * OR, NO and EQ;
  * the stall behind EQ;
  * a full FIFO;
  * read stalls and write stalls;
  * loads and clears.
* `tb_bic_top_full` runs the default BIC64K8 with no parameter changes, on
  full 64 KB batches. It runs a point index, a 128-key set, the example
  queries, and the full index of a batch. The full index is 256 pairs of OR and
  EQ, which gives 256 bitmaps and 65,536 result beats. That run takes 70,230
  cycles against 70,208 by the formula, or 93 M words/s. The C++ build needs
  about 2 minutes and 2 GB. The run takes a few seconds.
* `tb_bic32k16` runs the BIC32K16 configuration (`N = 32768, M = 16`) on two
  full batches. It runs a 1-key index, a 128-key set and a 1,024-key set (1,025
  instructions). With a 4-cycle memory latency this gives 0.77, 0.75 and 0.62
  G words/s at 100 MHz. Only the fixed per-job handshake cycles separate these
  from the formula.

## 9. How far it can be trusted

* **What has been checked:**
  * every block against an independent model in its own testbench;
  * the whole design end to end, at full size and at reduced size;
  * that each testbench catches a deliberately broken copy of its block.
* **What rests on the figures above and has not been tried against a real
  memory controller:**
  * the cycle counts;
  * the memory-port protocol.
* **Not verified on an FPGA:** whether the design maps to block RAM and meets
  100 MHz. The R-CAM is 2,048 small RAMs of 8 Kbit each. The QLA and the
  bitmap bus are N bits wide.
