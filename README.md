# Layered MinSum RCQ LDPC decoder (Broadcast method)

This is a layered LDPC decoder for quasi-cyclic codes. Its check-node
messages are only 4 bits wide, yet it keeps the error-rate performance of a
decoder with wider, uniformly quantized messages. It does this with
**reconstruction–computation–quantization (RCQ)**:

- Each variable node keeps its a-posteriori LLR at full width, 8 bits.
- A message going to a check node is quantized non-uniformly. The
  thresholds depend on the iteration `i` and the layer `l`.
- The check node runs plain MinSum on the small indices.
- The variable node expands each returned index through a second table
  (`(i,l)`-dependent reconstruction values) before it adds the message back.

The narrow messages shrink the check-node pipeline, the shifters and their
wiring. The cost is two small tables per `(i,l)`.

In this design those tables live in two central memories. Their output
words are wired in parallel to every variable-node bank: the *Broadcast*
method. Each bank holds only comparators and a multiplexer.

The default build decodes a rate-1/2 code of length 16384 with circulant
size L = 64. The defaults are:

- 4-bit messages (3 magnitude bits and a sign), written RCQ(4,8) below.
- 8-bit AP-LLRs.
- At most 16 iterations.
- Early termination on a satisfied syndrome.

## Decoding rule

The code is described by a base matrix of `MB` rows by `NB` block columns.
Each entry is either empty or an L×L cyclically shifted identity (a
*circulant*). One base-matrix row is a *layer* of L check nodes. A variable
meets at most one check node in a layer, so all L check nodes of a layer are
updated together.

For iteration `i` and layer `l`, for every edge (m,n) of the layer:

```
V_mn   = V_n - U_mn(previous iteration)   (U = 0 in iteration 1)
q_mn   = Q_il(|V_mn|)                     3-bit index, sign kept apart
MIN1, MIN2 over the layer's q_mn of CN m; SIGN = XOR of the signs
u_mn   = (n gave MIN1) ? MIN2 : MIN1
U_mn   = ±R_il(u_mn)                      sign = SIGN xor sign(V_mn)
V_n    = sat(V_mn + U_mn)
```

`Q_il(x)` is the number of thresholds `th_1 < th_2 < ... < th_7` that `x`
exceeds strictly. `R_il(k)` is `re_{k+1}`, one of 8 reconstruction
magnitudes. All values are unsigned `W = BV-1 = 7`-bit integers. `V_n` and
`V_mn` saturate symmetrically at ±(2^(BV-1) − 1) = ±127.

Decoding stops after the first iteration that satisfies every parity check,
or after `IMAX` iterations.

## Structure

```
            +--------------------- ctrl_unit ----------------------+
            | schedule ROM   scoreboard   th memory   re memory    |
            +---+-------------------+---------+-----------+--------+
      rd_col/edge|         shift/k  |    th (broadcast)   | re (broadcast)
                 v                  v         v           v
  +----------- vn_bank x L ------------+   +-------- cn_pipeline --------+
  | V_n RAM  U_mn RAM  V_mn RAM        |   | circ_shifter (shift p)      |
  | V_mn = V_n - U  -> rcq_quantizer --+-->| cn_min_unit (MIN1/MIN2/SIGN)|
  | rcq_reconstructor -> U, V_n update |<--+ circ_shifter (unshift p)    |
  +------------------------------------+   +-----------------------------+
```

- **VN bank** (`vn_bank`, one per lane j = 0..L−1). Bank j holds variables
  `j, L+j, 2L+j, ...` at the address of their block column. It has three
  one-read/one-write RAMs (`sdp_ram`):
  - the AP-LLR `V_n`, NB words;
  - the previous CN-to-VN message `U_mn`, one word per edge of the base
    matrix, E words;
  - the outgoing `V_mn` with the hard decision it was computed from, NB
    words. This RAM holds the message until the check node's answer
    returns.
- **CN pipeline** (`cn_pipeline`).
  - A circulant with shift p connects CN lane m to bank (m+p) mod L. The
    forward `circ_shifter` gathers lane m from bank (m+p) mod L.
  - `cn_min_unit` accumulates per lane: MIN1, MIN2, the position in the
    layer that gave MIN1, the XOR of the signs, and the parity of the hard
    decisions.
  - The reverse shifter gives bank j the answer of lane (j−p) mod L.
  - The accumulator and the result are separate registers. Layer l+1 can
    therefore accumulate while layer l is being returned.
- **Control unit** (`ctrl_unit`).
  - Holds the schedule: a ROM of the E nonzero circulants in read order.
  - Runs reads, writebacks and termination.
  - Holds the two parameter memories (`rcq_param_rom`), each
    IMAX·MB words deep:
    - threshold words: 7 × 7 bits;
    - reconstruction words: 8 × 7 bits.
  - The threshold memory is addressed by the `(i,l)` of the read side. The
    reconstruction memory is addressed by the `(i,l)` of the writeback side.
    The two sides may be in different layers, or different iterations, at
    the same moment.

## Timing of one circulant

Each cycle the read side issues one circulant to all L banks. For a read
issued in cycle t:

| cycle | what happens |
|---|---|
| t   | control unit presents `rd_col`, `rd_edge`. The banks read the V_n and U_mn RAMs. The threshold memory reads `th(i,l)` |
| t+1 | V_mn = V_n − U_mn. Quantize with the broadcast `th`. Write V_mn to the V_mn RAM. Register the sign, magnitude and hard decision |
| t+2 | bank outputs valid; forward shift by p; register |
| t+3 | accumulate into MIN1/MIN2/IDX/SIGN/parity |

`layer_done` rises four cycles after the read of the layer's last
circulant was issued. The writeback then runs, one circulant per cycle:

- The writeback sequencer replays the layer's schedule entries in the same
  order. In the cycle of `layer_done` (cycle w) it gives the CN pipeline the
  position k and the unshift amount.
- Cycle w+1: the unshifted `SIGN`, `MIN1/MIN2` reach the banks together with
  the column and edge (`vb_*`). The reconstruction memory reads `re(i,l)`.
- Cycle w+2: the bank forms U_mn and V_mn + U_mn. It writes U_mn, writes
  V_n, and frees the column in the scoreboard.
- Cycle w+3: a flag reports whether the hard decision of V_n changed.

A layer of degree d therefore occupies the read side for d cycles. Its
last V_n write lands d + 5 cycles after its last read.

## Overlapping layers and read-after-write hazards

This is the delicate part of the design. The read side does not wait for a
layer's writeback: it goes straight on to the next layer. If the next layer
reads a block column that the previous layer has not yet written back, it
would use a stale V_n and lose that layer's update.

Two measures deal with this.

1. **Read order.** The schedule is arranged so that consecutively processed
   layers share as few columns as possible.
   - The stand-in code has a dual-diagonal parity part: row r touches parity
     columns r and r−1. Rows are therefore processed all even rows first,
     then all odd rows. Two rows that follow each other in processing order
     share no parity column.
   - Within a row, the parity column shared with the next row is read first
     and the one shared with the previous row is read last. A column read
     late in one layer and early in the next is then as far apart in time as
     the layer allows.
2. **Scoreboard.** Every issued circulant marks its block column pending
   until its V_n write has landed. A circulant whose column is pending is
   not issued, and the read side stalls. This catches whatever the read
   order does not avoid: information columns shared by consecutive layers,
   and the wrap from one iteration to the next.

A second, independent rule protects the CN result register. The last read
of a layer is held until at least `d_prev` cycles after the previous
layer's last read, where `d_prev` is the previous layer's degree. The
previous layer's return has then started, and its result register can be
overwritten. This only bites when a short layer follows a long one.

The port `stall_cycles` counts the cycles the read side waited in the last
decode. With the default code a full iteration of 703 circulants runs in
about 717 cycles, with about one stall cycle per iteration.

## Syndrome check

The parity of each check node is accumulated in the CN pipeline from the
hard decisions of the V_n values *as they were read*. An iteration passes
if both of the following hold:

- no check node of any layer saw odd parity;
- no V_n changed its hard decision at writeback during the iteration.

Together these mean every check saw the same hard-decision vector, so that
vector is a codeword. At the end of each iteration the read side stops
until all writebacks are done, and the control unit then decides. This
costs about a dozen cycles per iteration. It makes the decision exact
instead of based on a mixture of two iterations.

## RCQ parameters

Parameter word `i*MB + l` holds the values for iteration i (0-based) and
processed layer position l:

- threshold word: `th_1 .. th_7` in elements 0..6 of `prm_data`;
- reconstruction word: `re_1 .. re_8` in elements 0..7.

The values must be non-decreasing for Q to be a quantizer. The hardware
does not check this.

Both memories start with a built-in default, computed at elaboration in
`rcq_pkg`. It is a uniform quantizer whose step widens with the iteration:

```
step(i) = 8 + 8*i/IMAX
th_k    = min(k*step, 127)
re_k    = min((k-1)*step + step/2, 127)
```

This default decodes the test code well for channel LLRs scaled by 8. For a
real code, write properly designed non-uniform parameters through the
`prm_*` port before `start`. They stay valid for all later frames.

## The code

The length-16384 code the architecture was developed for is a
protograph-based raptor-like code whose matrix is not reproduced here. To
keep the decoder self-contained, `rcq_pkg::code_entry` generates a stand-in
QC code of the same size: NB = 256 block columns, MB = 128 rows, KB = 128
information block columns, L = 64.

- **Parity part.** Row r has block column `KB + r`. If r > 0 it also has
  `KB + r − 1`, both with shift 0.
- **Information part.** The KB columns are split into DI = 4 sections of
  S = KB/DI columns.
  - Even rows take one column from each section; odd rows skip the last
    section.
  - Section t of row r uses column
    `t*S + (r(2t+1) + floor(r/S)(2t+5) + 3t) mod S`.
  - Its shift is `(r(2t+7) + 13t² + (r² mod 29) + 11) mod L`.

This gives E = 703 circulants. To decode another QC code, replace
`code_entry`, `layer_deg`, `num_edges` and `layer_row`. The U_mn RAM depth
and the schedule ROM follow from them. The rest of the RTL does not assume
the structure, apart from the read order's effect on stalls.

## Interface

All signals are synchronous to `clk`. `rst_n` is an asynchronous reset of
the control state. The memories are not reset.

| port | meaning |
|---|---|
| `ld_we, ld_col, ld_llr[L]` | load the BV-bit channel LLRs of block column `ld_col`, one per bank (bit j = variable `ld_col*L + j`). Use only while `busy` is low |
| `prm_we, prm_is_re, prm_addr, prm_data` | write one threshold word (`prm_is_re` = 0) or one reconstruction word |
| `start` | begin decoding the loaded frame |
| `busy` | decoding in progress |
| `done` | one-cycle pulse at the end, together with `success` and `iters` |
| `success`, `iters` | the syndrome check passed; iterations used |
| `stall_cycles` | hazard stall cycles of the last decode |
| `hd_col` → `hd_bits[L]` | hard decisions of a block column, one cycle later (1 = negative LLR) |

A decode takes about `iters × (E + 14)` cycles.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `L` | 64 | circulant size, number of VN banks and CN lanes |
| `NB`, `MB` | 256, 128 | block columns, layers |
| `DI` | 4 | information sections of the stand-in code |
| `BC` | 4 | message width b^c (sign + BC−1 magnitude bits) |
| `BV` | 8 | AP-LLR width b^v |
| `IMAX` | 16 | iteration limit |
| `EARLY_TERM` | 1 | stop on a satisfied syndrome |

BC = 3 (7 → 3 thresholds, 4 reconstruction values) and BV = 9 are
supported. They give the RCQ(3,8), RCQ(3,9) and RCQ(4,9) variants.

## How this relates to the published architecture

The following follow the published architecture:

- the partition into VN banks, a CN pipeline and a control unit;
- the three RAMs per bank;
- shift and unshift around a MIN1/MIN2/SIGN unit;
- overlap of adjacent layers, with a read order arranged against hazards;
- broadcast of `(i,l)`-indexed thresholds and reconstruction values from
  two central memories;
- comparator-plus-thermometer quantizers and multiplexer reconstructors;
- the default sizes.

The following are this design's own choices:

- The stand-in code and the default RCQ parameters. The real ones are not
  available.
- The scoreboard stall and the result-register spacing rule. The published
  design relies on the read order alone.
- Draining at iteration ends, and the way the syndrome is checked.
- Storing the hard decision alongside V_mn.
- Treating U_mn as 0 in the first iteration instead of clearing its RAM.
- Symmetric saturation of V_n and V_mn.
- Pipeline depths; the host interface; a writable parameter memory; the
  threshold width w = 7.

Not included:

- the offset-MinSum reference decoder;
- the *Lookup* method (per-bank parameter tables);
- the *Dribble* method (per-bank parameter registers filled serially).

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog:

- **`tb_rcq_quantizer`, `tb_rcq_reconstructor`, `tb_sdp_ram`,
  `tb_circ_shifter`, `tb_rcq_param_rom`.** Exhaustive or random comparison
  against direct computation.
- **`tb_cn_min_unit`, `tb_cn_pipeline`.** Random layers of varying degree
  and shift, back to back. Checked against MIN1/MIN2/SIGN/parity computed
  in the testbench, including the cycle on which each result appears.
- **`tb_vn_bank`.** Random read/return sequences against a model of the
  three memories.
- **`tb_ctrl_unit`.** The control unit on a small code, with an emulated
  datapath. It checks the schedule, every shift amount, parameter
  addresses, the absence of RAW violations, the termination decision and
  the iteration count.
- **`tb_rcq_decoder_top`.** The whole decoder at L = 8 (16 block columns,
  8 layers, 8 iterations). BPSK frames over a simulated AWGN channel, from
  nearly clean to hopeless. It checks:
  - `success`, `iters` and every hard decision, against a bit-exact model
    of sequential layered decoding written in the testbench;
  - decoded words against the parity checks;
  - cycle counts.

  It fails if any mechanism never occurred: a hazard stall, layer overlap,
  early termination, a decode running to IMAX, and a parameter memory
  write.
- **`tb_rcq_decoder_b38`, `_b39`, `_b49`.** The same test for the
  RCQ(3,8), RCQ(3,9) and RCQ(4,9) widths.
- **`tb_rcq_decoder_full`.** The decoder at its default size with no
  parameter overrides. Three frames:
  - σ = 0.5: decoded in 4 iterations;
  - σ = 0.65: decoded in 6 iterations;
  - σ = 2.0: undecodable, using host-written parameters; runs all 16
    iterations.

  About 2 900–11 500 cycles per frame. Building it takes a few minutes; it
  runs in under a second.

To run a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rcq_pkg.sv tb/tb_rcq_decoder_top.sv --top-module tb_rcq_decoder_top
./obj_dir/Vtb_rcq_decoder_top
```

The end-to-end testbenches share their body, `tb/tb_decoder_body.svh`. A
new size or width needs only a wrapper like `tb_rcq_decoder_top.sv` with
different localparams.
