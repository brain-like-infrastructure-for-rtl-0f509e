# LAMP: a logic associative multiprocessor in SystemVerilog

LAMP answers associative queries without arithmetic. A query is an n-bit Boolean vector
m. The stored knowledge is a table A whose rows A_i are vectors of the same length. The
answer is the row that best matches m. "Best" is decided by logic operations alone, not by
counting differences with adders. This RTL implements the architecture described by
V. I. Hahanov, W. Gharibi and O. Guz in "Brain-like infrastructure for embedded SoC
diagnosis": a 4 x 4 array of small vector processors ("sequencers") on a wrap-around
network, with a host interface, system memories and a control block. The RTL is an
independent implementation. Where the article is silent, the choices made here are marked
as such below and in the header comment of every file.

## 1. The quality criterion as vectors

For a query m and a row A, three vectors describe how badly they interact. Write
c = m & A for the 1s they share:

| vector | formula | meaning of a 1 |
|---|---|---|
| d(m, A) | m ^ A | the coordinate differs |
| mu(m in A) | A & ~c | A has a 1 that m lacks |
| mu(A in m) | m & ~c | m has a 1 that A lacks |
| Q | d \| mu(m in A) \| mu(A in m) | the coordinate is a poor match |

Q is all zero when m equals A. A Q with fewer 1s is a better match. The 1s of Q also say
*which* coordinates are to blame. For plain binary vectors, Q equals d, because both mu
vectors are subsets of d. The full formula is still computed, as the article gives it.

Example (12 bits, 1s shown, 0s as dots):

```
m             1 1 . . 1 1 . . 1 1 . .
A             . . . . 1 1 1 1 . 1 . 1
Q             1 1 . . . . 1 1 1 . . 1
Q crowded     1 1 1 1 1 1 . . . . . .     6 of 12
```

### Crowding (slc) instead of counting

Two Q vectors cannot be compared bit by bit. First each is *crowded*: all its 1s move to
the left end in one clock. The result is a thermometer code, and the position of its
rightmost 1 equals the number of 1s (the quality index).

`lamp_compact` does this without an adder. It is an odd-even transposition network of N
stages. Each compare-exchange cell is one OR gate (its left output) and one AND gate (its
right output), so the 1s sink to the left. A thermometer-to-binary encoder gives the index.
`lamp_slc_reg` is the register form: load, clear, or crowd its own contents in one clock,
with the index always available.

### Choosing the better of two

For crowded vectors Q1 and Q2, `lamp_decision` computes

    Y = OR_all_bits((Q1 & Q2) ^ Q1)

Y is 1 exactly when Q1 has a 1 where Q2 has a 0. For thermometer codes, that means Q1 has
more 1s. The circuit outputs Q2 if Y = 1, otherwise Q1. So the better vector wins, and Q1
wins a tie. Example: Q1 = 6/12, Q2 = 8/12 gives Y = 0, and Q1 is kept.

## 2. The sequencer

`lamp_sequencer` is one node of the array. It contains:

* **A-matrix**: `A_ROWS` = 16 rows of N = 12 bits (`lamp_ram`).
* **Block of vectors**: four registers ma, mb, mc, md.
* **Logical processor LP** (`lamp_lp`). It is combinational, in three levels:
  * an operand multiplexer: each of two operands is one of {A_i, ma, mb, mc, md};
  * a binary level: and, or, xor, or nop (passes operand 1);
  * a unary level: not, nop, or slc.

  The result is written to one of ma..md. So one command can compute, for example,
  `md = slc(md | mc)` or `mb = not(ma & A_i)`.
* **Command memory CM**: 32 commands (`lamp_ram`).
* **Control automaton CU**. It executes one command per clock and has no pipeline.
* **Best register** (`lamp_slc_reg`) plus the row it came from. It is updated through the
  decision circuit.
* **Exchange register** `xout`, read by the eight neighbours.

### Command set (`lamp_pkg::instr_t`, 25 bits)

Fields: `op`(4) `bop`(2) `uop`(2) `s1`(3) `s2`(3) `dst`(2) `row_imm`(4) `addr_imm`(5).

| op | effect |
|---|---|
| `OP_LP` | `m[dst] <= uop(bop(s1, s2))` |
| `OP_SETROW` | row pointer <= `row_imm` (A_i is always the row at the row pointer) |
| `OP_LOOP` | if row pointer != `row_imm`: row pointer++, jump to `addr_imm` |
| `OP_BINIT` | best <= LP result, best row <= row pointer |
| `OP_BEST` | best <= decision(best, LP result); record the row when it is replaced. If nothing is stored yet, take the candidate |
| `OP_SEND` | `xout <= LP result` |
| `OP_RECV` | `m[dst] <= xout` of neighbour `s1` (0..7 = N, NE, E, SE, S, SW, W, NW) |
| `OP_HALT` | stop; `halted` stays high until the next `start` |
| `OP_NOP` | nothing |

`OP_BEST` and `OP_SEND` take the LP result, so `bop`/`uop`/`s1`/`s2` apply to them too
(use nop/nop to pass `s1`).

### The search program

The search P(m, A) = min_i Q(m, A_i) takes 8 commands per row. The query is in ma.

```
0  SETROW 0
1  mb = not(ma and A)          ~(m & A)
2  mc = A and mb               mu(m in A)
3  md = ma and mb              mu(A in m)
4  mc = mc or md
5  md = ma xor A               d(m, A)
6  md = slc(md or mc)          Q, crowded
7  BEST md
8  LOOP to 1 until row 15
9  HALT
```

Afterwards the best register holds the crowded Q of the first best row, `best_ones` holds
its number of 1s, and `best_row` holds its index. Timing: one clock to accept `start`, then
one clock per command. A 16-row search is 1 + 16*8 + 1 = 130 commands.

## 3. The array

`lamp_multiproc` holds 16 sequencers, P11..P44. Rows and columns wrap around, so the
network is a torus: an edge node's neighbour across the edge is the node on the opposite
edge. Every node therefore has eight neighbours. Node (r, c) has index 4r + c. Its
neighbour in direction k drives `xin[k]`. All nodes run in lockstep from one common
`start`, so a `SEND` in one clock is visible to every neighbour's `RECV` in the next. All
nodes get the same program. A-matrix rows and m registers are written to one node at a
time.

## 4. The system

`lamp_top` connects:

* **`lamp_host_if`**: a memory-mapped port with a 12-bit address and 32-bit data. Reads
  are combinational.
* **Command memory**: 32 x 25 bits. **Data memory**: 320 x 12 bits. Both are `lamp_ram`.
* **`lamp_ctrl`**: the control block.
* **`lamp_multiproc`**: the array.
* **`lamp_global_best`**: a combinational tree of four levels of decision circuits. It
  picks the best of the sixteen nodes' results: among the nodes holding a result, the one
  with the fewest 1s, and the lower node number on a tie. So when the table is split over
  the nodes, the host reads the answer P(m, A) for the whole table in one access.

A run:

1. The host writes the program to the command memory.
2. The host writes each node's A-matrix and query to the data memory.
3. The host writes `go`.
4. The control block copies the 32 commands into every CM (32 clocks).
5. It copies the 320 data words into the nodes (320 clocks).
6. It pulses `start` and waits until all nodes have halted.
7. It reports `done` and the number of cycles the run took.

| address | write | read |
|---|---|---|
| `0x000 + k` | command word k | the same word, while the control block is idle |
| `0x200 + 20p + w` | node p: row A_w (w < 16), ma..md (w = 16..19) | the same word, while idle; `0x340..0x3ff` are ignored and read 0 |
| `0x400` | bit 0 = go | bit 0 busy, bit 1 done |
| `0x401` | | run cycles (start to all halted) |
| `0x402..0x406` | | system-wide best: vector, its 1s count, node, row, valid |
| `0x600 + 16p + i` | | node p: i = 0 best vector, 1 its 1s count, 2 its row, 3 valid, 4..7 ma..md, 8 {busy, halted} |

`seq_busy`, `seq_halted` and `done` are also brought out as pins.

## 5. Where this RTL departs from the article, or fills gaps

* **Vector width.** N = 12, the size of the article's worked examples. The article gives
  no word length for the machine.
* **Table and memory sizes.** A_ROWS = 16 and CM_DEPTH = 32 are this design's choices; the
  article gives no table or memory sizes. They are `lamp_pkg` constants.
* **Don't-care coordinates.** The article defines coordinates over {0, 1, x}, but computes
  the criterion only on binary vectors. Only binary vectors are supported.
* **Circuits drawn without gate types.** The article draws the crowding register as a
  chain of JK cells. Here the one-clock crowding is built as an AND/OR sorting network
  instead.
* **Own choices: command set and system parts.** The command set, the encoding, the row
  pointer, the loop command, the best register, the exchange register, the load ports,
  the host address map, and the phases of the control block are all this design's own.
  The article names the sequencer's parts and the control block's duties but not their
  workings.
* **Two operands.** The article describes the LP input multiplexer as selecting one of five
  operands. Its list of allowed operations combines two operands, so two selectors are
  built.
* **Search objective.** One figure of the article writes the search objective as max Q_i.
  The text writes min Q_i, and Q = 0 is the ideal. The minimum is implemented.
* **Results.** Results are read from the nodes through the host port, not copied back into
  the data memory. The A-matrices are read back from the data memory, which keeps the
  copy the host wrote, not from the nodes.
* **Size of a node.** The article estimates a basic cell at about 200 gates. It reports a
  single sequencer in a PLD at 400 four-input LUTs. A node here, with its 16 x 12 A-matrix
  and 32-command CM, synthesises to about 460 word-level cells, 88 flip-flop bits and 992
  memory bits. These figures are not directly comparable.
* **Column access to the A-matrix.** The article says the m registers serve rows *and
  columns* of the A-matrix, but does not say how columns are read. Only rows are operands
  here.
* **Minimum across nodes.** The article does not say where the minimum over all
  processors is taken. Here it is a tree of decision circuits (`lamp_global_best`).
* **Infrastructure IP not built.** The article's "infrastructure IP", which services,
  diagnoses and repairs the modules, is not built. Its workings are not described. The
  node status it would watch is on the `seq_busy` / `seq_halted` pins.
* **Scale.** The article mentions scaling to 4096 nodes. This RTL is the 16-node
  configuration it presents.

## 6. Verification

Every module has a self-checking testbench in `tb/`, except `lamp_compact`. That module
is covered by the tests of the crowding register and the LP, which use it. Each testbench prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

* **Leaf blocks** (`lamp_slc_reg_tb`, `lamp_decision_tb`, `lamp_lp_tb`, `lamp_ram_tb`,
  `lamp_global_best_tb`).
  These are checked exhaustively or with random vectors against bit-level reference models.
* **`lamp_sequencer_tb`**:
  * runs the article's worked example row by row of its table;
  * runs 200 random 16-row searches, checking best row, crowded best vector, count and the
    130-command run time;
  * checks the eight neighbour inputs.
* **`lamp_multiproc_tb`**: checks every link in all eight directions, including the
  wrap-around, and 16 simultaneous searches.
* **`lamp_ctrl_tb`** and **`lamp_host_if_tb`**: check the distribution order and timing,
  and the address map.
* **`lamp_top_tb`**: runs the whole system at its default size through the host port. Node
  0 reproduces the article's example: query 110011001100, best row 000011110101 at 6/12,
  against rows at distance 8. It also checks the system-wide best and reads back the
  memories. It counts every mechanism (each LP operation, a kept and a replaced decision,
  loops, send/receive, loading, start), and fails if any never happened.
* **`lamp_search_tb`**: runs the machine's main use. One query is searched over a
  256-row table split across the 16 nodes. It checks the system-wide best row, including
  exact matches, ties between nodes and a best row in the last place. It also checks that
  the run always takes 131 cycles (130 commands plus the cycle that sees all nodes halted).

Simulate a testbench with Verilator 5, for example:

```
verilator --binary --timing --assert -y rtl rtl/lamp_pkg.sv tb/lamp_top_tb.sv \
          --top-module lamp_top_tb -Mdir obj_top
obj_top/Vlamp_top_tb
```

Any other testbench is built the same way, with its own name in place of `lamp_top_tb`.
The end-to-end run takes well under a second.
