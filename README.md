# PIMSAB in SystemVerilog

PIMSAB is a processing-in-memory accelerator built from SRAM arrays. Each
array has a one-bit processing element (PE) under every bitline. Numbers are
stored *transposed*: one element occupies one bitline, and its bit k is in
wordline k. Each array therefore works as a very wide SIMD machine that
computes one bit position per cycle. An 8-bit add across 256 bitlines takes
about 9 cycles, whatever the number of bitlines. The machine is fast only if
data reaches the right bitlines cheaply, so most of the design is about
communication:

- an H-tree inside each tile for moves and reductions between arrays;
- shuffle logic in front of every array;
- a ring that shifts across array boundaries;
- a wormhole mesh between tiles with systolic forwarding;
- DRAM controllers that transpose on the fly.

This RTL implements that organisation at the full published size: 12 x 10
tiles, 256 arrays per tile, 256 x 256 bits per array. Everything is
parameterised so that smaller instances can be simulated.

## The hierarchy and its sizes

| level | contents | default |
|---|---|---|
| chip (`pimsab_top`) | `MESH_X x MESH_Y` tiles, one router each; a DRAM controller above each router of the top row | 12 x 10 tiles, 12 DRAM channels |
| tile (`tile`) | instruction queue, instruction controller, 32 x 32-bit register file, H-tree, `NCRAM` CRAMs each with its shuffle unit, shift ring | 256 CRAMs |
| CRAM (`cram`) | `ROWS x COLS` dual-ported SRAM array plus one PE per bitline | 256 x 256 (8 KB) |
| PE (`pe`) | truth-table mux, XOR, carry latch C, mask latch M, predication, two write drivers | 256 per CRAM |

Link widths:

- Mesh links and DRAM words are 1024 bits per clock. Twelve channels give
  12288 bits per clock.
- H-tree links are 256 bits, one CRAM word.

The chip holds 30720 CRAMs, which is 240 MB of storage. The paper also quotes
512 MB on chip in one place. The table above follows the per-array numbers.

## Bit-serial compute in a CRAM

Each cycle the tile's controller sends one *micro-op* (`pimsab_pkg::uop_t`)
to all CRAMs of the tile at once. A micro-op names:

- two wordlines to read (A on port 1, B on port 2);
- a 4-bit truth table `tr`;
- up to two wordlines to write, with a source for each write driver;
- the predication choice;
- the carry and mask latch controls.

In every PE, per micro-op:

```
T    = tr[{A,B}]              truth-table mux: any 2-input function
S    = T ^ C                  with tr = XOR this is the full-adder sum
C'   = maj(A, B, C)           if c_en   (c_rst clears it)
M'   = T                      if m_en   (m_rst clears it)
write enable = wps & P        P = 1 / M / C / ~M  (pred)
write data   = S | d_in | neighbour S | T         (sel1/sel2)
```

The neighbour inputs give a shift by one bitline. At the CRAM edges the
end-of-row PEs connect to a single-wire ring through the tile. CRAM c's last
bitline feeds bitline 0 of CRAM c+1, so a shift can run across the tile's
whole 65,536-bitline vector. Only that direction crosses CRAMs. The opposite
shift stays inside each CRAM and brings in 0 at the edge.

The memory array is a register array with two read and two write ports. A
separate memory-mode port reads or writes a whole row; the H-tree and NoC
transfers use it.

## The instruction controller: from instructions to micro-ops

`inst_ctrl` reads one `instr_t` at a time from the tile's instruction queue
and runs it. Precisions are given per operand (`prec1`, `prec2`) and for the
result (`dprec`). Arithmetic is unsigned. Cycle counts (p = `dprec`):

| instruction | micro-op sequence | cycles |
|---|---|---|
| `LOGIC` | dst[k] = tr(src1[k], src2[k]) | p |
| `ADD` | full-adder steps; with `cst` one more step writes the carry; with `cen` the first step uses the carry left by the previous ADD | p (+1 with `cst`) (+1 to clear a stale carry) |
| `MUL` | clear dst; for each bit i of src1: mask <- src1[i], then add src2 into dst[i..] where mask = 1, then write that carry | p + Σᵢ (1 + min(n₂, p−i) + [i+n₂ < p]) |
| `MUL_CONST` | as MUL, with the multiplier bits read from the register file; zero bits cost no cycle and no mask step is needed | p + Σ over set bits |
| `ADD_CONST` | as ADD, with the constant's bit k driven onto the second operand of every PE instead of a wordline | as ADD |
| `SET_MASK` | mask <- tr(src1, src2) | 1 |
| `SHIFT` | dst[k] = src1[k] from the next bitline (`dir`) | p (+1) |
| `RED_CRAM` | sum of all bitlines of each CRAM into bitline 0: 8 rounds of "copy shifted down by 2^s bitlines, add" | Σₛ (2^s·p + p) plus carry clears |
| `RED_TILE` | sum over CRAMs into the first CRAM of every group of 4^`level` (0 = whole tile): per H-tree level, move child 1->0 and 3->2, add, move 2->0, add | 5 instructions per level |

The two reductions are macros. The controller generates the SHIFT,
`XFER_LVL` and ADD instructions itself and runs them back to back, and the
instruction queue waits meanwhile. Every generated ADD runs in all CRAMs. The
non-receiving CRAMs therefore end up holding partial garbage, and only the
designated result position is meaningful.

Two of the paper's techniques show up here:

- **Adaptive precision.** `dprec` may be smaller than `prec1 + prec2`. The
  product is then computed only up to `dprec` bits, and carries past the top
  are dropped. Only the wordlines that are needed get written.
- **Bit slicing.** A wide add can be split into narrow adds. Issue the low
  slice with `cst = 0`, and the high slice with `cen = 1` and `cst = 1`. The
  carry stays in the C latches in between.

The multiply is the masked shift-and-add scheme: load one multiplier bit into
the mask, then add under predication. For p = 2n it takes n² + 4n cycles. The
published count for the same scheme is n² + 3n − 2. The difference is the
clearing of the destination and one carry write per iteration.

## Moving data inside a tile: H-tree, shuffle and levels

The CRAMs of a tile are the leaves of a radix-4 tree of `htree_switch`es:

- 4 leaves per switch;
- 4 levels for 256 CRAMs, which is 85 switches;
- the root connects to the controller.

A switch has five ports: one parent and four children. Each output is a
register fed by one of the other four inputs, chosen by 2 configuration bits.
The code counts only the other ports, so an output can never select its own
input. Every link carries a 256-bit word plus a tag:

- `valid`;
- the destination wordline;
- the destination CRAM;
- `all` (every CRAM writes).

The tree is static and circuit-switched. `htree` computes all configuration
bits every cycle from the transfer in progress, so there is nothing to load.
It has two modes.

- **Normal mode** (`XFER`, `SEND`, `RECV`). A word goes up from the source
  CRAM to the root and is broadcast down to every leaf. The source index is
  delayed by one cycle per level, so each switch steers the word in the cycle
  it passes. The leaf whose index matches the tag writes the word (every leaf
  does when `all` is set). Inside a tile, the root loops the word back. For
  the NoC, the root hands it to the controller, or takes words from it.
  Latency is 2·LEVELS + 1 cycles and one word moves per cycle.
- **Level mode** (`XFER_LVL`). Every subtree rooted at level l copies a word
  from child `sc` to child `dc` in the same cycle. All those transfers run in
  parallel. This is the step of a tree reduction: move partial results, add,
  go up a level.

A write passes through the CRAM's `shuffle` unit first:

- `SHF_DUP` duplicates each source bit over 2^`shf_log` consecutive bitlines.
  This continues across CRAMs by CRAM index: with factor 256, CRAM c gets
  bit c everywhere.
- `SHF_REP` repeats the first 2^`shf_log` bits along the word.

These patterns lay out operands for GEMM and convolution without storing
copies in DRAM.

Transfers address words by a group: word w of a transfer goes to CRAM
`base + w mod grp`, row `row + w div grp`. One 1024-bit flit is 4 CRAM words.
With `grp = 4`, one flit fills the same wordline of 4 neighbouring CRAMs.

## Between tiles and DRAM

**Mesh.** `noc_router` has five ports: local, north, south, east and west.
Each input has a 4-flit FIFO. Routing is dimension-ordered, X first. Switching
is wormhole: a head flit locks its output until the tail flit passes, and
round-robin arbitration chooses among competing head flits. A packet is a head
flit carrying `pimsab_pkg::hdr_t` in its low bits, followed by `nflits` body
flits. The head flit carries:

- the kind: data, signal, DRAM read or DRAM write;
- the destination and source coordinates;
- the DRAM address;
- the flit count;
- the transpose bit and the element precision.

**DRAM.** A `dram_ctrl` sits on the north port of each top-row router. DRAM
traffic travels along the row first, then up to the controller of column
`tx`.

- A read request is answered with a data packet to the requesting tile.
- A write packet's body flits are written to consecutive addresses.

Both pass through a `transpose_unit`, a ping-pong pair of p x 1024-bit banks:

- One bank fills with packed words: 1024 elements of p bits.
- The other bank is read out as bit slices: word k holds bit k of all 1024
  elements.

The banks then swap roles. On stores the same unit runs in reverse. The `trp`
bit bypasses it, for example when loading constants into the register file
with `LOAD_RF`. That instruction writes all 32 registers in one cycle from a
single flit. The DRAM side of the controller is a plain in-order word
request/response port. The DRAM devices, their PHY and the timing controller
are outside this RTL.

**Tile instructions on the NoC:**

- `SEND` / `STORE` read rows up the H-tree, pack four words per flit and send
  the packet.
- `LOAD` sends a read request, then receives like `RECV`.
- `RECV` blocks until a data packet arrives. A data packet that arrives
  early waits in the network.
- `RECV`/`LOAD` with `fwd` set re-send every flit to a next tile `(fx, fy)`.
  A chain of such tiles is a systolic broadcast: each link carries the data
  once, instead of one source sending to every tile.
- `SIGNAL` sends a one-flit message. `WAIT` blocks until a message from the
  named tile has arrived. Messages are counted per source tile, so a signal
  may arrive before its wait.

## What differs from the published design

- **Formats.** The instruction encoding, packet formats, transfer word order
  and micro-op sequences are this design's own. The paper defines the
  instruction kinds and their special fields (`cen`, `cst`, `tr`, `shf`,
  per-operand precision), not their bits.
- **Not implemented:** signed and floating-point arithmetic. Only unsigned
  integers are supported.
- **Reductions** are controller macros over `SHIFT`, `XFER_LVL` and `ADD`.
  They are not dedicated datapath hardware.
- **Signals address tiles.** They do not address single CRAMs.
- **Transpose precisions.** The transpose unit handles element widths of 1,
  2, 4, 8, 16 and 32 bits only.
- **DRAM attachment.** Controllers connect through the north port of the
  top-row routers rather than a separate port.
- **Memory macro.** The SRAM is a behavioural register array, not a
  characterised macro. Physical effects are outside this RTL: wordline timing
  and the cost of reading two rows per cycle.

## Verification and simulation

Every module has a self-checking testbench in `tb/`. Each compares against
values computed independently in the testbench and prints
`TB_RESULT checks=N failures=M`:

| testbench | size | what it checks |
|---|---|---|
| `tb_pe` | 8 lanes | random micro-ops against a per-lane model |
| `tb_cram` | 16 x 16 | memory mode, random micro-ops against an array model, shift links, a 4-bit add in 5 cycles |
| `tb_shuffle` | 256 bitlines | every pattern and factor |
| `tb_htree_switch`, `tb_htree` | 16 leaves | steering, latency, broadcast, level mode |
| `tb_regfile`, `tb_fifo` | default | writes, parallel write, ordering, full/empty |
| `tb_noc_router` | one router | random multi-flit packets from all ports, wormhole integrity, XY routes |
| `tb_transpose_unit` | 64-bit words | p = 1..32, both directions, back-pressure |
| `tb_dram_ctrl` | default | plain/transposed reads and writes against a DRAM model |
| `tb_inst_ctrl` | 16 CRAMs | micro-op sequences and cycle counts, signal/wait |
| `tb_tile` | 16 CRAMs of 64 x 256 | ADD, MUL (truncated), MUL_CONST, LOGIC, predication, cross-CRAM shift, XFER with broadcast and shuffle, level transfer, forwarding |
| `tb_pimsab_top` | 2 x 2 tiles, 4 CRAMs of 64 x 256 | LOAD/MUL/STORE through the transposer, LOAD_RF bypass, zero-skipping MUL_CONST, bit-sliced ADD, SIGNAL/WAIT, systolic forward, NoC and DRAM back-pressure, each counted and required |
| `tb_wl_fir` | 16 CRAMs of 64 x 256 | FIR workload: 8-tap int16 filter over a 4096-element vector; shifts cross CRAMs, taps come from the register file |
| `tb_wl_gemv` | 16 CRAMs of 128 x 256 | GEMV workload: 4 x 1024 int8 matrix times vector; RED_CRAM, then RED_TILE over one level and over the whole tile |

`tb/dram_model.sv` is a behavioural DRAM channel used by the testbenches. It
has a fixed latency and random stalls.

The two workload testbenches show how the paper's benchmarks map onto the
instruction set at a size that simulates in seconds. The GEMV test uses
`RED_CRAM` and `RED_TILE`, and checks the partial sums along the way.

The largest instance simulated is the 2 x 2-tile chip above. A full 12 x 10
chip with 256 CRAMs per tile has about 2 Gbit of state. At that size the RTL
compiles and lints, using about 13 GB of memory. No full-size simulation is
provided, because building a cycle-accurate model that large is not
practical.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl --top-module tb_tile \
    rtl/pimsab_pkg.sv $(ls rtl/*.sv | grep -v pimsab_pkg) tb/dram_model.sv tb/tb_tile.sv
./obj_dir/Vtb_tile
```

Testbenches override `NCRAM`, `ROWS` and `COLS` to stay small. All RTL
defaults are the published sizes. `NCRAM` must be a power of four, because the
H-tree has four children per switch.
