# SIMDRAM control logic in SystemVerilog

## The idea

A DRAM subarray can compute. If three rows are opened at once, every
bitline settles to the **majority** of the three cells on it; if a row of
dual-contact cells is read through its second wordline, the bitline sees
the cell's **complement**. Majority and NOT together are a complete logic
basis, and one operation works on every column of the row at once: with
8 kB rows that is 65,536 one-bit lanes per subarray.

To use those lanes for real arithmetic the data is stored **vertically**:
bit *i* of 65,536 consecutive elements sits in one row, so an *n*-bit add
becomes a loop over *n* rows, each step a handful of row copies and
triple-row activations (a bit-serial, lane-parallel full adder). Two pieces
of logic next to the memory controller make that usable from a CPU, and
they are what this RTL implements:

* the **control unit** takes a "bbop" instruction (opcode, operand
  addresses, element count, element width) and runs the matching
  micro-program, turning it into ACTIVATE and PRECHARGE commands;
* the **transposition unit** moves data between the CPU's horizontal cache
  lines and the vertical layout in DRAM whenever a line of a registered
  object passes between the last-level cache and memory.

The DRAM array, the memory controller, the cache and the CPU are outside;
`simdram_top` brings their connections out as valid/ready ports.

## Rows, row addresses and the B-group

A subarray has 1024 rows. Rows 0..1005 hold data, row 1006 is all zeros
(C0), row 1007 all ones (C1), and the last 16 addresses (1008+k) belong to
a small decoder that raises one, two or three of six special rows: four
compute rows T0..T3 and two dual-contact rows DCC0/DCC1:

| address | rows raised | address | rows raised |
|---|---|---|---|
| B0..B3 | T0..T3 | B8 | ~DCC0, T0 |
| B4 / B5 | DCC0 / ~DCC0 | B9 | ~DCC1, T1 |
| B6 / B7 | DCC1 / ~DCC1 | B10 / B11 | T2,T3 / T0,T3 |
| B12 | T0,T1,T2 | B13 | T0,T1,T3 |
| B14 | DCC0,T1,T3 | B15 | DCC1,T0,T2 |

Two primitives are built from DRAM commands:

* **AAP dst, src** = ACTIVATE src, ACTIVATE dst, PRECHARGE: a row copy
  (to several rows at once if dst is a group address; through a negated
  wordline it copies the complement).
* **AP r** = ACTIVATE r, PRECHARGE: with a three-row address, a
  triple-row activation that leaves MAJ of the three in all three rows.

A row address is 19 bits, the physical address bits [31:13] of a 32-bit
address with 8 kB rows; its low 10 bits are the row inside the subarray.

## Micro-programs and micro-registers

A micro-program (uProgram) is at most 64 16-bit uOps (1024 bits). The
uOp format has the opcode in bits [15:13]:

| op | uOp | fields |
|---|---|---|
| 000 | AAP | dst uReg [12:8], src uReg [7:3] |
| 001 | AP | uReg [12:8] |
| 010/011 | addi / subi | uReg [12:8], immediate [7:0] |
| 100 | comp | reg = (reg < imm) |
| 101 | module | reg = reg % imm (imm 0: unchanged) |
| 110 | bnez | uReg [12:8], branch target in [7:0] |
| 111 | done | end of one pass |

uOps name rows through 32 micro-registers: B0..B15 are the group addresses
above, B16/B17 the constant rows, B18..B20 the input operands, B21 the
output, B22 the element width and B23..B31 scratch values. B18..B21 do not
hold a fixed row: they resolve to *base + (n − B22)*, so a uProgram that
counts B22 down walks through the bit rows of every operand. One uProgram
pass covers 65,536 elements; `done` then moves every base on by *n* rows,
sets B22 back to *n* and restarts the pass until the Loop Counter (loaded
with ⌈size / 65536⌉) runs out.

An example, the full adder used by the tests (carry kept in DCC1, 9 row
operations per bit):

```
0  AAP B6,B16     carry <- 0
1  AAP B8,B18     T0 <- A, DCC0 <- A (read back as ~A)
2  AAP B1,B19     T1 <- B
3  AAP B2,B19     T2 <- B
4  AAP B3,B6      T3 <- carry
5  AP  B14        MAJ(~A, B, C)           in DCC0, T1, T3
6  AP  B15        carry' = MAJ(C, A, B)   in DCC1, T0, T2
7  AAP B0,B7      T0 <- ~carry'
8  AAP B1,B18     T1 <- A
9  AAP B21,B13    sum = MAJ(~carry', A, MAJ(~A,B,C))
10 subi B22,1
11 bnez B22,1
12 done
```

## The control unit (`simdram_control_unit`)

Nine parts, each its own module:

* `bbop_fifo` – 1024-entry queue of bbops.
* `uprog_scratchpad` – 16 uPrograms of 1024 bits, indexed by opcode, with a
  valid bit each. On a miss the FSM asks the uProgram Memory (a region in
  DRAM, outside) over `up_req_*` and waits for `up_fill_*`.
* `uop_memory` – the 64-uOp program being run, loaded in one cycle.
* `upc` – the uProgram counter (clear, branch, increment).
* `loop_counter` – number of 65,536-element passes left.
* `ureg_addressing_unit` – turns B0..B21 into row addresses.
* `ureg_file` – B22..B31.
* `uop_fsm` – the sequencer: DECODE (pop a bbop, load counters and bases),
  LOAD (copy the uProgram, fetching it on a miss), FETCH (read the uOp and
  resolve its rows), EXEC (issue the commands or do the arithmetic).

Timing: an AAP costs three command handshakes plus one fetch cycle, an AP
two plus one, every other uOp two cycles. A bbop with size 0 completes
without commands. A row uOp that names a non-row register sets `err`.

## The transposition unit (`transposition_unit`)

An object is registered with its base, size in bytes and element width *n*
(`trsp_init_*`) in the **Object Tracker** (`object_tracker`, 1024 entries,
fully associative, round-robin replacement). 512 consecutive elements form
a **slice**: *n* horizontal cache lines in the cache, *n* vertical lines in
DRAM, vertical line *i* holding bit *i* of all 512 elements.

* **Writeback.** A line leaving the cache is checked against the tracker.
  A miss goes straight to memory. A hit opens the slice in the
  horizontal-to-vertical buffer (`h2v_transpose_buffer`, 64 lines, one
  line per cycle), asks the cache to write back the other *n−1* lines of
  the slice (`inv_*`), and when all *n* have arrived the `store_unit` writes
  the *n* vertical lines. Writebacks to other slices wait meanwhile.
* **Read.** A miss is forwarded to memory. On a hit the `fetch_unit` reads
  the *n* vertical lines into the vertical-to-horizontal buffer
  (`v2h_transpose_buffer`), and all *n* horizontal lines go to the cache –
  the requested one plain, the rest flagged as prefetches.

Vertical placement in DRAM: slice *s*, bit *i* is row
`base_row + (s/128)*n + i`, column line `s mod 128`; each row therefore
covers 65,536 elements, matching the control unit's passes. Within a
horizontal line element bits are little-endian, element *e* of the slice at
line `e / (512/n)`, bits from `n*(e mod 512/n)`.

## Where this RTL departs from the published description

* The bbop queue is said to be 2 kB and to hold 1024 bbops; 2 bytes cannot
  hold a bbop's addresses, so the queue has 1024 entries of a full 171-bit
  bbop.
* The text puts B18..B31 in the register file, while the block diagram
  loads operand bases into the addressing unit; B18..B21 live in the
  addressing unit here.
* `bnez` is shown with a register and a target in the example program but
  with no fields in the format figure; the arithmetic format is used.
* The published add uProgram allocates rows inconsistently in one step; the
  adder above is this design's own and needs 9 rather than 8 row
  operations per bit.
* `comp` and `module` are only named; their meaning here is an assumption.
* The scratchpad miss path, the valid/ready handshakes, the element bit
  order, row numbering of C0/C1/B-group and in-order memory responses are
  this design's choices.
* Only one command stream is produced, i.e. one bank at a time; the
  multi-bank configurations need several units or a controller that
  interleaves them.

## Testbenches and simulation

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb/ambit_dram_model.sv` is a behavioural
subarray (majority on triple activation, complement through negated
wordlines, row copy on a second ACTIVATE, cache-line reads and writes).
`tb_simdram_top` runs the whole design at its default sizes: three 131,072
element 8-bit arrays are evicted through the transposition unit, an add and
a bitwise select run (the select's uProgram is fetched on a scratchpad
miss, each bbop needs two passes), and all results are read back through
the transposition unit and compared; it also checks the exact command count
and that each mechanism (tracker hits and misses, invalidations, prefetch
lines, scratchpad hit and miss, base shift, branch taken/not taken, triple
activation, negated rows, multi-row copy, back-pressure, queued bbops)
occurred. It runs in a few seconds. `tb_simdram_control_unit` checks the
control unit with 64-lane rows against the same DRAM model.

With Verilator, for example:

```
verilator --binary --timing -Irtl -Itb rtl/simdram_pkg.sv rtl/*.sv \
  tb/ambit_dram_model.sv tb/tb_simdram_top.sv --top-module tb_simdram_top
./obj_dir/Vtb_simdram_top
```

Small blocks need only the package, the module and its testbench.
