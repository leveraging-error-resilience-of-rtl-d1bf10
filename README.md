# Heterogeneous least-squares accelerator for radio-telescope gain calibration

Iterative solvers do not need full precision on every iteration. The early iterations only have
to move the estimate roughly in the right direction, and the later ones refine it. This design
uses that. It pairs two cores that run the same least-squares update:

- an **accurate core** with carefully sized fixed-point word lengths;
- an **approximate core** that drops low-order bits in front of its multipliers, so it uses less
  power.

A host runs the first iterations of a calibration on the approximate core and the rest on the
accurate core. Only one core is switched on at a time. The total number of iterations stays the
same, so the energy saved on the early iterations is a net gain.

The workload is StEFCal, the gain calibration used for radio-telescope arrays. It appears in
G.A. Gillani, A. Krapukhin, A.B.J. Kokkeler, *Leveraging Error Resilience of Iterative Algorithms
for Energy Efficiency: from Concept to Implementation*. That work's case study has 124 antennas,
92 iterations and the first 52 on the approximate core, and it reports a 23 % energy saving in a
40 nm process. This repository is a SystemVerilog implementation written from that description.
Everything the description leaves open was chosen here, and the section *Departures and open
points* lists those choices.

## The computation

StEFCal estimates one complex gain g_p per antenna p. It starts from the measured covariance
matrix V and the model covariance matrix M, both P x P and complex. Each iteration solves P
independent one-variable least-squares problems:

    z_k   = g_k * M_kp                    (k = 1..P, the element-wise product Z = M_{:,p} .* g)
    g_p'  = sum_k conj(V_kp) * z_k  /  sum_k |z_k|^2

Every even iteration replaces the new gains with the mean of the two most recent iterates. The
loop stops when ||g_i - g_(i-1)|| / ||g_i|| drops to 1e-6 or below.

One core computes one g_p' from one column of elements. It has four stages, all visible in
`ls_core`:

| stage | module | what it computes | registers |
|---|---|---|---|
| PE, element-wise product | `ls_pe` | real(z) = ac - bd and imag(z) = ad + bc, where a + jb = g_k and c + jd = M_kp | none |
| MAC, multiply-accumulate | `ls_mac` | mac_real += eh - ft and mac_imag += et + fh, where e + jf = z and h + jt = v | `mac_real`, `mac_imag` |
| SAC, square-accumulate | `ls_sac` | sac += e^2 + f^2 | `sac` |
| divider | `ls_div` | g_p' = (mac_real + j mac_imag) / sac | its own state |

The PE, the MAC and the SAC work in the same clock cycle. The only datapath registers are the
three accumulators, so the core takes one element per clock.

**The conjugate lives in the data, not in the hardware.** The MAC forms v * z without
conjugating v. The host must therefore send v_k = conj(V_kp). Because V is Hermitian, that value
is simply V_pk, the element of row p. In other words, the v stream for column p is row p of V.

## Word lengths and what the approximate core drops

The published design fixes these word lengths for the accurate core and says that no signal in
it is wider than 28 bits. It also fixes how many least-significant bits (LSBs) the approximate
core drops before its multipliers:

| signal | meaning | accurate core, bits | approximate core, LSBs dropped |
|---|---|---|---|
| h, t | real and imaginary part of v | 18 | 0 |
| e_sac | real(z) into the SAC squarer | 21 | 8 |
| f_sac | imag(z) into the SAC squarer | 20 | 8 |
| e_mac | real(z) into the MAC multipliers | 23 | 8 |
| f_mac | imag(z) into the MAC multipliers | 24 | 12 |

The PE and the divider are the same in both cores. Only the four MAC multipliers and the two SAC
squarers are approximated. When bits are dropped, those multipliers really are narrower, because
the width of each product is derived from the truncation parameter.

The binary points are not published, so this design chose them. They are in `ls_pkg`. A figure
such as "18/14" means 18 bits wide with 14 fraction bits.

| signal | format | range |
|---|---|---|
| gains (a, b) | 18/14 | +-8 |
| model values (c, d) | 18/16 | +-2 |
| measured values (h, t) | 18/12 | +-32 |
| e_mac | 23/18 | +-16 |
| f_mac | 24/19 | +-16 |
| e_sac | 21/16 | +-16; the same value as e_mac with 2 LSBs fewer |
| f_sac | 20/15 | +-16; the same value as f_mac with 4 LSBs fewer |
| products, MAC accumulators | 28/15 | |
| SAC accumulator | 28/16 | |

Further rules:

- Each product is rounded to the nearest value at its target binary point, with halves rounding
  up. Floor rounding was tried first. It leaves a bias of half an LSB per product, which adds up
  over a 124-element column, and the fixed-point iteration then never settled below about 1.5e-5.
- Bits dropped from z, both for the narrower SAC words and for the approximate core's truncation,
  are simply cut off (floor).
- Products and z saturate.
- The accumulators wrap.
- The divider rounds the quotient magnitude to nearest and saturates it to 18 bits. It adds half
  the divisor to the dividend before dividing, which costs no extra clock. A divisor of zero (or
  less) gives the saturated value.

StEFCal is scale-covariant: scaling V by s^2 scales the gains by s. A host with differently scaled
data can therefore pre-scale V to fit these ranges. The other option is to move the binary points
in `ls_pkg`; the testbench reference (`ls_ref_pkg`) repeats them, so change both together.

## Streaming interface and timing (`ls_core`, `ls_core_approx`)

Elements arrive on a valid/ready stream:

- `in_beat` carries one element: g_k, M_kp and v_k.
- `in_first` marks the first element of a column and `in_last` the last. A one-element column
  has both.
- An element is taken on a rising edge when `in_valid`, `in_ready` and `en` are all high.

Each result comes out as a one-clock `out_valid` pulse with `out_g`. Results appear in column
order.

- **Throughput:** one element per clock. An iteration over P columns of P elements takes P*P
  clocks plus the divider tail. For P = 124 that is 15,420 clocks, measured.
- **Latency:** when the column's last element is taken, the sums go to the divider on the next
  clock. The divider produces one quotient bit per clock for 43 bits: 28 numerator bits plus a
  15-bit pre-shift that puts the quotient on the gain's binary point. `out_valid` rises 44 clocks
  after the edge that took the last element.
- **Overlap and stall:** the next column streams while the divider works. `in_ready` drops only
  when a column finishes while the divider is still busy with the previous one. That happens only
  for columns shorter than about 43 elements. At P = 124 the stream never stalls.
- **Switched off:** with `en` low the core holds every register, as if its clock were gated.
  `in_ready` is low and no result is presented. A result due during that time comes out once the
  core is switched back on.

`ls_core_approx` is `ls_core` with the truncation parameters of the table above. Its interface
and timing are identical, so the two cores take exactly the same time per iteration.

## The heterogeneous top (`hetero_ls_accel`)

The two cores share one data bus. The host's control input `core_sel` asks for a core;
`active_core` and the one-hot `core_on` show which core is on.

The core that is off:

- has its enable low;
- sees all-zero operands (operand isolation);
- never drives `out_valid`.

A change of core must not split a column or lose a result in flight, so it follows these rules:

- The change takes effect only when both cores are idle. Idle means no column under way, no
  finished column waiting, and no division running.
- While a change is pending, a column already under way still finishes on the old core.
- The first element of a new column is held (`in_ready` low) until the old core has drained and
  the change has been made.

In practice the host changes `core_sel` between two iterations, once. The hold rule makes an
early change safe as well.

**The iteration loop belongs to the host.** The host decides how many iterations run on the
approximate core: 52 of 92 in the published case study, found offline by injecting errors. It
also averages the gains on even iterations and tests for convergence. The accelerator holds no
matrices: the host streams V, M and the current gains on every iteration.

## Verification

The testbenches use only SystemVerilog and are self-checking. `ls_ref_pkg` is a separate bit-true
model of the arithmetic, written with explicit roundings, floors, clamps and wraps. Each testbench prints one
line, `TB_RESULT checks=N failures=M`.

| testbench | what it exercises |
|---|---|
| `tb_ls_pe` | 3,000 random and extreme operand sets, including saturation. Checked bit-true and against the exact complex product (within 2 LSBs). |
| `tb_ls_mac`, `tb_ls_sac` | Accurate and approximate truncation side by side, with random column starts, idle clocks and clocks where the unit is off. The accumulators are compared after every clock. |
| `tb_ls_div` | 600 random divisions plus zero, negative and tiny divisors. Checks the exact 43-clock latency, that a start while busy is ignored, and that the divider freezes while off. |
| `tb_ls_core`, `tb_ls_core_approx` | Columns of 1 to 130 elements, with and without gaps, and with the core switched off mid-column. Every gain is checked bit-true and against a double-precision evaluation (0.1 % resp. 2 % of the numerator scale). Also checks the 44-clock latency, one element per clock over 124-element columns, stalls on short columns, and that the approximate gains do differ from the accurate ones. |
| `tb_hetero_ls_accel` | A complete StEFCal calibration with P = 16 through the top: 10 approximate iterations, then accurate ones until convergence (at most 30). Every gain is checked bit-true against the core that made it, and the switched-off core's accumulator is checked to stay still. A directed change of core while the old core is busy checks that the hold works. Counts core switches, stalls and held elements, and fails if any of them never happened. |
| `tb_hetero_ls_full` | The case-study size at default configuration: P = 124, at most 92 iterations, the first 52 on the approximate core. Runs in a few seconds. |
| `tb_hetero_ls_accurate_only` | The baseline at the same size: every iteration on the accurate core, with the approximate core off throughout. |

`stefcal_host.svh` is the behavioural host that both end-to-end tests share. It builds a
synthetic problem: random gains of magnitude 0.5 to 1.5, a random Hermitian M with zero diagonal,
and V = G M G^H plus 1e-3 noise. It runs StEFCal on the accelerator and the same schedule in
double precision on the same quantised data.

Measured at P = 124 with the first 52 iterations on the approximate core:

- the convergence metric settles at about 6e-5 on the approximate core by iteration 20;
- it jumps to 6.4e-4 when the host switches to the accurate core;
- it reaches exactly 0 at iteration 66, because the fixed-point iteration has reached a fixed
  point, so the 1e-6 criterion stops the run there;
- the final gains are 2.3e-5 (relative) from the double-precision solution once the common phase
  is removed.

StEFCal fixes the gains only up to one common phase factor, and rounding lets that phase drift;
without removing it the distance is 2.7e-3.

The accurate-only run (`tb_hetero_ls_accurate_only`) converges after 24 iterations, 2.4e-5 from
the double-precision solution. So the approximate iterations cost no final accuracy. On this
synthetic problem, however, the split of 52 approximate iterations does not keep the total
iteration count the same, as it does on the published measurement data: the approximate core
has done all it can by iteration 20. The number of approximate iterations is a property of the
data. The host has to choose it offline for each kind of problem.

The host also counts the clocks in which each core is on and working. It weights them with the
published core powers (3.55 mW accurate, 2.08 mW approximate), compared with the accurate core
running the same iterations. It checks that this equals what the iteration counts predict,
(3.55 - 2.08) x N_ax / (3.55 x N), which holds only if an iteration takes equally long on both
cores. For the published schedule of 52 of 92 iterations that formula gives 23.4 %. The 66
iterations here give 32.6 %. The figure says nothing about the power itself, which depends on
the cell library.

## Departures and open points

- **Arithmetic formats.** The binary points, the word lengths of g and m, the rounding mode, the
  saturation rules and the 28-bit accumulators are this design's own. As a result the numbers
  above do not reproduce the published quality figures exactly. That work reports a fixed-point
  convergence below 1e-6 within 92 iterations, which is met here, and a float-to-fixed distance
  of at most 1e-5. The distance here is 2.3e-5. Rounding to nearest in the products and in the
  divider brought it down from 7.8e-5 with truncation. Finer accumulator binary points would
  lower it further, but within the 28-bit ceiling the accumulators then overflow in the first
  iterations.
- **Divider.** The published design specifies a division but not how it is built. The sequential
  restoring divider, and therefore the 44-clock result latency, are this design's choice.
- **Interface.** The element stream, the result pulse, the `en` switch-off model and the core
  change protocol are this design's own. The published design shows only a data bus, a control
  line and a host.
- **Both cores at once.** The published design mentions, as a possibility, a host using both
  cores at the same time for independent problems. That is not built: only one core is ever on.
- **Not reproducible here.** The published area and power figures (27,023 um^2 and 3.55 mW
  accurate; 20,604 um^2 and 2.08 mW approximate, at 50 MHz) come from a commercial 40 nm library.
  This RTL makes no claim about them.
- **Not hardware.** The offline error-injection analysis that picks the number of approximate
  iterations is a software method. The host processor is not part of the RTL either.

## Simulating

Every testbench is a top-level module with no ports. The two package files must come first on the
command line. For example:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Itb +libext+.sv \
        rtl/ls_pkg.sv tb/ls_ref_pkg.sv tb/tb_hetero_ls_full.sv --top-module tb_hetero_ls_full
    ./obj_dir/Vtb_hetero_ls_full

Swap in any other `tb/tb_*.sv` and its module name. The synthesizable design is `rtl/`, with
`hetero_ls_accel` as its top. `ls_pkg` holds all word lengths, binary points and truncation
counts. To study another approximation level, change the `TR_AX_*` constants, which set how many
LSBs the approximate core drops, and the matching `TR_APPROX` set in `tb/ls_ref_pkg.sv`.
