# FEATHER+ under MINISA control: a SystemVerilog model

FEATHER+ is a reconfigurable GEMM accelerator. It can change, tile by tile, which operand is
held in its PEs and how operands and results are laid out in its buffers. That flexibility is
usually paid for in control: a micro-coded version must configure every switch and every PE on
every cycle, and fetching those instructions becomes the bottleneck. MINISA is an instruction set
that describes the same machine at the granularity of a **virtual neuron (VN)**. A VN is a run
of up to AH consecutive elements along the reduction dimension, which is exactly what one PE
consumes in one dot product. One instruction describes a whole compute tile, and the hardware
expands it into per-cycle control.

This repository holds a synthesizable model of that machine: the datapath (PE array, operand
buffers, distribution crossbars, the BIRRD reduction network, the output buffer) and a controller
that executes MINISA instructions. Every block has a self-checking testbench. An end-to-end test
runs two chained GEMM layers from a MINISA program. A second test runs one tile on the
full-size 16 x 256 array.

## 1. The datapath

```
 instruction words                                    off-chip memory (row = AW bytes)
       |                                                 ^            |
  instr_buffer (FIFO) --> minisa_ctrl ---- Load/Store ---+------------+
                              | per-cycle control
        +---------------------+----------------------------+
        v                                                  v
  streaming buffer  (D x AW, ping/pong)         stationary buffer (D x AW, ping/pong)
        | one row / cycle                                  | one row / cycle
  all-to-all crossbar                            all-to-all crossbar
        | one element per column                           | one element per column
        v                                                  v
  NEST: AH x AW PEs. Streamed elements enter at the top of each column and move down one row
        per cycle. Each PE holds a stationary VN in 2 x AH double-buffered registers.
        | one partial sum per column per cycle, with a tag saying which output it belongs to
  ovn_addr_gen: tag -> (output bank, output row)
        |
  BIRRD: 2 log2(AW) stages of 2x2 switches (EGGs); adds equal destinations, routes to bank
        |
  output buffer: AW banks, per-bank row address, read-modify-write accumulation
        |
        +--> commit (saturated to int8) into the stationary buffer (after a WO-S tile) or the
             streaming buffer (after an IO-S tile), so that a layer's output feeds the next layer
```

**Two dataflows.**
- Under **WO-S** (weight-output stationary), weight VNs sit in the PEs and input VNs stream
  through.
- Under **IO-S** (input-output stationary), input VNs sit in the PEs and weight VNs stream
  through.

The stationary buffer always holds whatever is stationary, and the streaming buffer whatever
streams.

**Three levels of reduction.**
- Each PE reduces AH elements over time.
- BIRRD reduces across the columns that carry the same output.
- The output buffer reduces across time, that is, across tiles that contribute to the same
  output.

**Operand precision** is 8-bit signed. Partial sums are 32 bits and are saturated to 8 bits when
the output is committed back into an operand buffer.

## 2. Virtual neurons and buffer layouts

A two-rank tensor, for example W[K][N], is cut along its reduction rank into VNs of VN_size
elements. The non-reduction rank is split into two levels, N = N_L1 x N_L0. That leaves three
loops: K_L1 (which VN along K), N_L0 and N_L1. A 3-bit **order code** chooses their nesting.

**Flattening a VN.** The VN (r, c), with r the VN index along K and c = n, gets a flat index L by
running the loop nest. Its elements go to buffer column `L mod AW`, at rows
`(L / AW) * AH + e` for e = 0..VN_size-1. So a VN is a vertical strip of one column. Its
elements are read one per cycle, one buffer row at a time.

**Order codes**, outermost loop first. R is the reduction loop, X0 = x mod X_L0 and
X1 = x / X_L0:

| code | weight / input VNs | output VNs (R = q_L1, X = p) |
|------|--------------------|------------------------------|
| 000  | R, X0, X1          | X1, X0, R                    |
| 001  | R, X1, X0          | X1, R, X0                    |
| 010  | X0, R, X1          | X0, X1, R                    |
| 011  | X0, X1, R          | X0, R, X1                    |
| 100  | X1, R, X0          | R, X1, X0                    |
| 101  | X1, X0, R          | R, X0, X1                    |

Codes 110 and 111 are unused and behave as 000. The output table is a different table, not the
input table reversed. Because of that, a layer's output layout can be reused as the next layer's
input layout: output code 000 (X1, X0, R) places elements exactly as input code 101 does. The
end-to-end test relies on this.

**A single-bank buffer reads one row per cycle.** Every PE column that needs data in a cycle
must therefore find it in that same row. A mapping that breaks this is illegal. The controller
then reads the row of the lowest-numbered column that needs data, feeds zero to the others and
sets a sticky flag (`errs.str_conflict` / `errs.sta_conflict`). The layout and the mapping must
be chosen together. That is the job of the mapper that generates MINISA programs.

## 3. One compute tile: ExecuteMapping + ExecuteStreaming

**ExecuteMapping** latches θ_EM = (r0, c0, G_r, G_c, s_r, s_c). It decides which stationary VN
(r, c) goes into PE (a_h, a_w):

    r = r0 + floor(a_w / G_r)
    c = c0 + s_r * a_h + s_c * (a_w mod G_c)

**ExecuteStreaming** adds θ_ES = (m0, s_m, T, VN_size, df) and starts the tile. At step
t = 0..T-1, column a_w receives the streamed VN (j, m):

    j = r0 + floor(a_w / G_r)
    m = m0 + s_m * t + floor((a_w mod G_r) / G_c)

Under WO-S, (r, c) indexes a weight VN (k-group, n) and (j, m) an input VN (k-group, m). Under
IO-S the two roles are exchanged. A VN outside the tensor, according to the current layout's
partition factors, is read as zero, and its result is never written.

**Output coordinates.** The output element a PE produces is (p, n):
- Under WO-S, p is the streamed m and n is the stationary c.
- Under IO-S, p is the stationary c and n is the streamed index.

Each PE computes an AH-element dot product, so several columns can produce parts of the same
(p, n). They are those with equal `a_w mod G_r` and different `a_w / G_r`. BIRRD adds those
parts.

**How a tile runs.** The controller keeps a small pipeline of two stages:

1. **The stationary loader** fills the *shadow* bank of the PE registers. It writes one
   (PE row, element) pair per cycle for all columns at once, so it takes VN_size x VN_size
   cycles. Rows at or above VN_size are left idle, so a smaller VN costs quadratically less
   loading time.
2. **The streamer** swaps the register banks and then injects T x VN_size elements into every
   column, one per cycle. Each element carries a tag: the streamed index, whether it is in
   range, the column's stationary base and stride, and the dataflow.

While tile i streams, the loader already fills tile i+1. This is the double-buffering the 2 x AH
PE registers exist for, and the `overlap` counter counts it. An ExecuteStreaming that arrives
while the loader is still busy waits and counts `issue_stall`.

**Timing.**
- A dot product whose last element enters row 0 at cycle k leaves PE row h at k + h + 1.
- Each column merges its rows onto one output. The rows of a column finish on successive
  cycles, so there is never a collision.
- The output then passes the address generator (combinational) and the 2 log2(AW) BIRRD stages.
- The output buffer updates on the following edge.

After the last element of the last tile, a drain counter of AH + 2 log2(AW) + 3 cycles lets the
pipeline empty before any instruction that needs the results proceeds.

## 4. Getting partial sums to the right bank: output addressing and BIRRD

The output buffer has AW banks. Each bank has its own row address, which is what lets outputs
land in any layout. The address of output element (p, n) follows the output layout: q = n / AH,
e = n mod AH, L = flatten(order, q, p mod P_L0, p / P_L0). That gives bank `L mod AW` and row
`(L / AW) * AH + e`. `ovn_addr_gen` computes this per column from the tag. A column's result is
dropped when its streamed VN was out of range, or when (p, q) falls outside the output layout.

**BIRRD** then moves each column's value to its bank, adding values that share a destination.
The switches are not programmed. Each value travels with its (bank, row) tag, and every switch
decides from the two tags it sees:

- **Stages 0 .. log2(AW)-1** form a butterfly on address bits 0, 1, ... If both inputs carry the
  same (bank, row), the switch adds them into the lower port and empties the upper one.
  Otherwise both pass straight.
- **Stages log2(AW) .. 2 log2(AW)-1** form a reversed butterfly on bits log2(AW)-1 .. 0. Equal
  tags are added again, towards the side the destination bit names. Otherwise each value is sent
  to the side given by its destination bank's bit for that stage. Two values that both need the
  same side are a conflict.
- At the end, a value that is not at its own bank index is a misroute.

Conflicts and misroutes raise `err`, and the controller keeps them as `errs.birrd_conflict`.

What this routes correctly: any set of columns that share an output and differ only in some
address bits is summed in the first half. The surviving sums then reach their banks as long as
the destinations are a permutation that the second half can route by destination bits. Bit-XOR
permutations always can, for example. The mappings produced by the formulas above, with
power-of-two G_r and G_c, fall in this class. Other mappings can conflict and are reported, not
repaired.

## 5. The output buffer's life cycle and layer chaining

**SetOVNLayout** marks a tile boundary. It waits until all issued tiles have drained. It then
sweeps the output buffer row by row, D_OB cycles, during which:
- if the buffer holds results, each row is saturated to 8 bits and written into the same row of
  the active half of the next layer's operand buffer: the streaming buffer if the last tile ran
  IO-S, the stationary buffer if it ran WO-S;
- every row is cleared.

Finally the new output layout is latched. The same sweep runs once after reset, so accumulation
always starts from zero.

Because the commit keeps rows and columns, a layer's output arrives in its new buffer in exactly
the layout SetOVNLayout described. A commit of real results therefore also sets the input layout
register to the matching input layout: output order code c becomes input code 5 - c, with the same
three factors (Section 2). The next layer can skip SetIVNLayout; one that issues it overrides the
hand-over. The end-to-end test relies on the hand-over for its second layer.

**Load** moves D rows from off-chip memory into the *shadow* half of the chosen operand buffer.
It issues one request per cycle and writes one returned row per cycle. Tiles that are already
issued keep computing from the active half meanwhile. When the transfer has finished and compute
is idle, the halves swap.

**Store** waits for compute to go idle and then writes the D rows of the active half out, one per
cycle.

## 6. Instruction encoding

A MINISA instruction is a 128-bit word. The opcode sits in bits [2:0] and the fields follow
upward in the order listed.

**Counts** are stored minus one: partition factors, G_r, G_c, VN_size and T. Offsets and strides
are stored as they are, since zero is meaningful for them.

**Field widths** follow from the array and the buffer depth:
- WL = log2 AW
- VR = log2(D/AH)
- RC = log2(D/AH x AW)
- MS = VR - 1
- VS = log2 AH

| opcode | instruction     | fields (low to high)                                   | bits at 16 x 256 |
|--------|-----------------|--------------------------------------------------------|------------------|
| 000    | SetWVNLayout    | order 3, X_L0-1 WL, X_L1-1 VR, R_L1-1 VR                | 38 |
| 001    | SetIVNLayout    | same                                                    | 38 |
| 010    | SetOVNLayout    | same (X = P, R = Q_L1)                                  | 38 |
| 011    | ExecuteStreaming| df 1, m0 MS, s_m MS, VN_size-1 VS, T-1 VR               | 42 |
| 100    | Store           | row address 32, target 1 (0 stationary, 1 streaming)    | 36 |
| 101    | Load            | same                                                    | 36 |
| 110    | Activation      | none: accepted and skipped                              | 3  |
| 111    | ExecuteMapping  | G_r-1 WL, G_c-1 WL, r0 RC, c0 RC, s_r VR, s_c VR        | 83 |

The paper quotes its own totals for this array, 40 / 95 / 47 bits, without listing the fields.
These widths are derived from its stated bounds on each parameter and come out slightly smaller.

## 7. Parameters

| parameter   | default | meaning |
|-------------|---------|---------|
| AH, AW      | 16, 256 | NEST height (VN length) and width |
| D           | 50000   | rows per half of each operand buffer: 2 x 50000 x 256 B = 25.6 MB per buffer |
| D_OB        | 12500   | output buffer rows: 12500 x 256 banks x 4 B = 12.8 MB |
| IBUF_DEPTH  | 131072  | instruction buffer words: 131072 x 16 B = 2 MB |
| HBM_AW      | 32      | off-chip row address width |
| INSTR_W     | 128     | instruction word width |

The capacities are those the paper lists for its 16 x 256 configuration. D_OB must not exceed
D, because a commit copies output row i to operand row i. The buffers are written as plain
arrays with combinational reads, as in the paper's own register-built implementation. A real
chip would use SRAM macros, and each read would then take one more cycle.

## 8. Where this model departs from the paper, and what it leaves out

**Activation.** The paper lists an Activation instruction but defines neither its function nor
its encoding. Here opcode 110 is accepted and ignored; the `nops` counter counts it.

**Swap.** The paper mentions a Swap instruction once, without an encoding. Dataflow switching is
done by ExecuteStreaming's df bit, and buffer halves swap at the end of a Load.

**Opcodes.** They follow the paper's field tables. Its worked example prints different 2-bit
opcodes, which were not used.

**Worked example's output layout.** The paper's 4 x 4 worked example gives an output layout
that, under its own address formula, would send two different outputs of one cycle to the same
bank. The end-to-end test keeps that example's input and weight shapes and tiling, but uses an
output layout that BIRRD can route.

**BIRRD switch settings.** These are derived in hardware from tags (Section 4). MINISA has no
instruction that sets them. The routing algorithm is this model's own, and so is its limitation
to the permutations the second half can route.

**Buffer conflicts** are flagged, not resolved (Section 2).

**Commit.**
- The commit saturates to int8.
- It uses the dataflow of the last tile before SetOVNLayout.
- It always copies all D_OB rows.

**Off-chip traffic.**
- Each Load or Store moves a whole buffer half, D rows, one row of AW bytes per cycle.
- Outputs leave only through a commit followed by a Store, at AW bytes per cycle. The paper's
  evaluation models 4AW bytes per cycle for outputs.
- Instructions enter at one 128-bit word per cycle rather than 9 bytes per cycle.

**Not modelled:**
- the off-chip memory itself, whose port is brought out;
- the activation hardware;
- the compiler/mapper that produces legal programs.

## 9. Files

| file | contents |
|------|----------|
| `rtl/feather_pkg.sv` | types, opcodes, tags, layout flattening functions, saturation |
| `rtl/pe.sv`, `rtl/nest.sv` | PE and the AH x AW array |
| `rtl/vn_buffer.sv` | ping/pong operand buffer (streaming and stationary) |
| `rtl/dist_xbar.sv` | all-to-all distribution crossbar |
| `rtl/ovn_addr_gen.sv` | output bank/row from a column's tag |
| `rtl/egg.sv`, `rtl/birrd.sv` | BIRRD switch and network |
| `rtl/out_buffer.sv` | banked accumulating output buffer |
| `rtl/instr_buffer.sv` | instruction FIFO |
| `rtl/minisa_decode.sv` | instruction field decoder |
| `rtl/minisa_ctrl.sv` | MINISA execution: loader, streamer, commit sweep, Load/Store |
| `rtl/feather_top.sv` | top level |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_feather_top.sv` | two-layer end-to-end program at AH = AW = 4, D = D_OB = 64 |
| `tb/tb_feather_8x32.sv` | one tile on the 8 x 32 configuration with full buffer capacities |
| `tb/minisa_enc_pkg.sv` | instruction encoder used by the testbenches |

## 10. Verification

Each testbench computes its expected values independently of the design and ends with a
`TB_RESULT checks=N failures=M` line. A watchdog fails it if it hangs.

**Block tests:**
- the PE against its dot product and one-cycle latency;
- NEST for VN sizes 4..1, cycle by cycle;
- BIRRD with random reduction groups and XOR permutations, plus forced conflicts;
- the address generator against an explicit loop-nest enumeration;
- buffers and FIFO against reference copies;
- the decoder against the encoder.

**`tb_feather_top`** runs a two-layer program:
- O1 = I1 · W1 under WO-S in two tiles: one reduces in BIRRD, the other accumulates in the output
  buffer and runs past the tensor edge;
- a Load of W2 that overlaps computation;
- a commit of O1 into the stationary buffer;
- O2 = O1 · W2 under IO-S in two tiles;
- an Activation word;
- a commit into the streaming buffer and two Stores.

It checks every result element against a reference GEMM with int8 saturation. It also checks
that each mechanism occurred: tiles, overlap, issue stalls, commits, loads, stores, both
dataflows, the skipped Activation, BIRRD reductions, cross-tile accumulation and zero padding.
It checks that no conflict flag was raised.

**`tb_feather_8x32`** is the largest simulated size. It uses the 8 x 32 array configuration with
that configuration's full buffers: D = 100000 rows per half and D_OB = 25000. It runs one
64 x 8 x 256 WO-S tile on all 256 PEs: two Loads of 100000 rows, the commit sweep and a Store.
It then checks all 16384 outputs; the program takes about 376000 cycles.

**Default size is not simulated.** The 16 x 256 default (4096 PEs, 2048 EGGs, 256-wide crossbars)
passes Verilator lint and Yosys elaboration. Its Verilator C++ build was still compiling after
more than ten minutes on a 4-core machine, so no full-size testbench is provided.

**Running a test with plain Verilator:**

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/feather_pkg.sv tb/minisa_enc_pkg.sv tb/tb_feather_top.sv --top-module tb_feather_top
./obj_dir/Vtb_feather_top
```

Replace `tb_feather_top` with any other testbench name.
