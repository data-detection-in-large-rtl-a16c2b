# TASER: a triangular systolic array for approximate-SDR data detection

## The problem and the idea

A base station with many antennas has to decide, for every received vector, which
constant-modulus symbols (BPSK or QPSK) its users sent. Exact maximum-likelihood
detection is a search over 2^U candidates. After a real-valued decomposition it can be
written as

    minimise  s' T s   over  s in {-1,+1}^N,

where `T` is an N×N positive semidefinite matrix built from the channel and the received
vector. The last entry of `s` is a constant +1 that carries the received vector. For
coherent MU-MIMO with U users, N = U+1 for BPSK and N = 2U+1 for QPSK.

Semidefinite relaxation replaces `s s'` by a PSD matrix `S = L L'` whose diagonal is all
ones. TASER keeps the factor `L` lower-triangular and solves the non-convex problem in
`L` directly with forward-backward splitting:

    Ttilde = D^-1 T D^-1,  D = diag(sqrt(T_jj))     (Jacobi preconditioning)
    That   = 2 * tau * Ttilde,  tau = alpha / ||Ttilde||_2
    L(0)   = D
    repeat t_max times:
        V    = L - tril(L * That)                    (gradient step)
        L_j  = D_jj * v_j / ||v_j||_2, per column j   (proximal step: fix the column norm)
    s_hat_k = sign(L_{N,k}),  k = 1..N-1

The detected symbols are the signs of the bottom row of `L`. A few iterations (3 for
MIMO, 20 for the joint channel-estimation case) are usually enough. The last column of
`L` is never updated: its only non-zero entry, L_NN = D_NN, stays constant.

Every step above is either a multiply-accumulate or a scaling of a whole column. So the
design gives each entry of `L` its own processing element (PE), with one multiplier and
one adder. It then streams `That` down the columns and `L` across the rows.

## Array organisation

`taser_top` instantiates these blocks. The figures are for the default N = 17.

| Block | Module | Count | Role |
|---|---|---|---|
| Diagonal PE | `taser_d_pe` | N-1 | Holds L_jj and V_jj. Starts the column's squared norm. Initialised to D_jj. |
| Off-diagonal PE | `taser_od_pe` | N(N-1)/2 | Holds L_ij and V_ij, i > j. Adds V_ij² to the norm arriving from above. |
| L_NN register | inside `taser_top` | 1 | The constant D_NN (Q8.5). Input N of the bottom row's RBU. |
| Row broadcast unit (RBU) | `taser_rbu` | N-1 (rows 2..N) | An i-input multiplexer over the row's L registers, then a stage register. It puts L_ik on the row in multiply cycle k. |
| Column broadcast unit (CBU) | `taser_cbu` | N-1 | A mux that drives column j with That_kj, D_jj (for init) or the scale factor. |
| That memory | `taser_that_mem` | N-1 (inside the CBUs) | N words: column j of `That`. Synchronous write, registered read. |
| Column scale unit | `taser_scale_unit` | N-1 | Turns ‖v_j‖² into D_jj/‖v_j‖ using a 2^11-entry 1/sqrt table and a multiplier. |
| Control unit | `taser_ctrl` | 1 | The cycle counter and iteration counter. Drives per-row and global control. |

Row 1 has no RBU: its single PE uses its own L_11. The PE at (i,j) takes its multiplier
operand from its own L register when k = j. Otherwise it takes it from the row's RBU.
Squared norms travel down each column, from PE to PE, into the column's scale unit.

## The iteration schedule

This is the part that takes the most care. One iteration takes **N+7 clock cycles**.
The control unit numbers them c = 0 .. N+6. Row i needs i multiply-accumulates
(k = 1..i, since L_ik = 0 for k > i). All rows run them at the same time, so row i
finishes its MACs i-1 cycles before the bottom row. That slack pipelines the column norm:
row i adds its square to the column sum one cycle after row i-1 did.

| Cycle | What happens |
|---|---|
| c = 0 | RBUs select L_i1. That memories read row 1. In the first iteration of a detection, L ← D on the diagonal and 0 elsewhere; the RBUs load 0 because they would otherwise see the old L. |
| c = k (1 ≤ k ≤ i) | The PE operand registers of row i load (That_kj, L_ik). The memories read row k+1. |
| c = k+1 | MAC k: V ← (k = 1 ? L : V) − L_ik·That_kj. |
| c = i+1 | The last MAC of row i. In the same edge the operand registers capture the new V (forwarded from the adder), ready to be squared. |
| c = i+2 | Row i squares V_ij and adds it to the sum coming down column j. Row N does so at c = N+2. |
| c = N+3 | The scale units look up 1/sqrt(‖v_j‖²). |
| c = N+4 | The scale units multiply by D_jj. |
| c = N+5 | The CBUs select the scale factor. The operand registers load (scale, V). |
| c = N+6 | Every PE writes L ← V·scale. This is the last cycle of the iteration. |

The adder result is forwarded into the operand registers at c = i+1. Without that, each
row would need an extra cycle before it could square, and the norm chain would lose its
one-cycle spacing.

In the bottom row the k = N operand is the L_NN register, which has 5 fraction bits,
not 8. For that one product the PE shifts by 10 instead of 12 (control bit `lnn`).

`start` is taken while `ready` is high. `ready` is high when the array is idle and also in
the last cycle of a running detection, so detections can follow each other with no gap.
`done` is a one-cycle pulse exactly t_max·(N+7) cycles after `start` was taken. In that
cycle `s_hat` (1 = negative symbol) and the soft values `l_last` = L_{N,1..N-1} are valid.
They stay valid until the first cycle of the next detection ends. `tmax = 0` behaves
like 1.

## Number formats

All datapath words are 14-bit two's complement. Products are aligned by an arithmetic
right shift, which truncates toward −∞. Every register write saturates to its word's
range.

| Quantity | Format | Origin |
|---|---|---|
| L, V, rows 1..N-1; D_jj, j < N | Q5.8 | paper |
| L, V, bottom row | Q6.7 | paper |
| L_NN = D_NN | Q8.5 | paper |
| 1/sqrt table output | 14 bits, 13 fraction bits, 2^11 entries | paper |
| That | Q1.12 | this design |
| Squared column norm | unsigned, 8 fraction bits | this design |
| Scale factor D_jj/‖v_j‖ | Q2.11 | this design |

The table is addressed by the squared norm, saturated at 2047 (x < 8). Each entry is
floor(2^13/sqrt(x)) = floor(sqrt(2^34/a)), clipped to 16383; address 0 gives 16383. The
table is built at elaboration as a constant function (`invsqrt_entry` in
`taser_pkg`). No data file is needed.

These formats set the range the preprocessing must deliver. ‖v_j‖² must stay well
inside roughly 0.25 … 8, where the table is accurate. In practice that means D_jj
(j < N) should be scaled so that the largest is about 1.6. Scaling D by a common factor
does not change the detected signs.

## Loading a problem

The array does not compute `T`, `D`, `Ttilde` or ‖Ttilde‖₂. That preprocessing
(a Gram matrix, square roots, a norm estimate) is assumed to happen outside. The host
writes the results through two plain write ports while the array is idle:

* `t_we`, `t_waddr` = k-1, `t_wdata[j-1]` = That_kj for all columns j = 1..N-1 at once.
  This takes one cycle per row, N cycles in all.
* `d_we`, `d_waddr` = j-1, `d_wdata` = D_jj. This takes N cycles. Entry N (address N-1)
  is D_NN in Q8.5 and goes to the L_NN register.

The inputs must not change while `busy` is high. The same problem can be run again
without reloading.

## Departures from the published architecture

* **Broadcast buses** are multiplexers, as in the published FPGA design. The ASIC's
  tri-state buses are not modelled.
* **That memories** are flip-flop register arrays. The ASIC's latch arrays are not used.
* **Scale units.** The block diagram gives one column scale unit per column, and this
  design follows it. The published ASIC area breakdown counts only about (N-1)/2 of them,
  which suggests sharing; that sharing is not described, so it is not built.
* **Stage registers.** The published schedule is N+5 cycles plus two cycles for the
  stage registers at the broadcast units, N+7 in all. The published minimum latency for
  one iteration is also N+7. The exact cycle of each transfer in the table above, and
  the forwarding of V into the operand registers, are this design's own.
* **Formats.** The fraction widths of That, the squared norm and the scale factor are
  this design's own, and so are the table's addressing and the truncate-and-saturate
  rounding.
* **Interface.** The load ports and the start/ready/busy/done handshake are this design's
  own.
* **Preprocessing** is outside the design.

## Sizes

The default N = 17 detects 8 users with QPSK (N = 2·8+1) or 16 users with BPSK
(N = 16+1). Both were simulated at full size with 128 and 64 receive antennas.

Other published configurations need a different N:

* N = 9: 8 users, BPSK.
* N = 33: 16 users QPSK, or 32 users BPSK.
* N = 65: 32 users, QPSK.
* N = 16 and N = 31: the joint channel-estimation case with 16 time slots, BPSK and
  QPSK.

The design does not pad a smaller problem into a larger array; set the parameter `N` of
`taser_top` instead.

The PE count grows as N²/2, and one iteration takes N+7 cycles. `TMAX_W` (in
`taser_pkg`) sets the width of the iteration-count input. The default, 6 bits, allows up
to 63 iterations.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…` at the end and has a watchdog.

* `tb_taser_od_pe`, `tb_taser_d_pe`: every PE mode against an integer model, including
  saturation and the L_NN alignment.
* `tb_taser_scale_unit`: the whole table and the D_jj multiply against an independent
  integer square root.
* `tb_taser_that_mem`, `tb_taser_cbu`, `tb_taser_rbu`: writes, registered reads, source
  selection and zeroing.
* `tb_taser_ctrl`: every control output, in every cycle of several detections, against
  the schedule table. It also checks latency, `start` being ignored while busy, and
  back-to-back starts.
* `tb_taser_top`: the full array at default parameters.
  * It generates random 64×16 BPSK and 128×8 QPSK problems with Gaussian channels and
    noise, then preconditions and scales them as described above.
  * It runs them with t_max = 1, 3, 5 and 20, both from idle and back to back.
  * It compares the bottom row of L bit for bit against a fixed-point model of the
    iteration written as plain matrix loops.
  * It also checks the latency t_max·(N+7), that each mechanism occurred at least once,
    and that at least 90 % of the detected symbols equal the transmitted ones. In
    practice almost all of them do.
* `tb_taser_workloads`: the array built at the other published sizes (N = 9, 33, 65),
  with random problems of those shapes, checked the same way.

To simulate with plain Verilator (version 5), for example the full-size test:

    verilator --binary --timing -Wno-fatal --top-module tb_taser_top \
        rtl/taser_pkg.sv rtl/taser_that_mem.sv rtl/taser_cbu.sv rtl/taser_rbu.sv \
        rtl/taser_scale_unit.sv rtl/taser_od_pe.sv rtl/taser_d_pe.sv \
        rtl/taser_ctrl.sv rtl/taser_top.sv tb/tb_taser_top.sv
    ./obj_dir/Vtb_taser_top

Block testbenches are built the same way, with the package, the block's module and its
sub-modules. `tb_taser_workloads` also needs `tb/taser_wl_runner.sv`, the per-size runner
it instantiates. The fixed-point model in `tb_taser_top` is the place to start when changing
a format: change the shift or the saturation there and in the PE together.
