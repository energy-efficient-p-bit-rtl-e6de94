# SSQA annealer: spin-serial, replica-parallel p-bit hardware with dual-BRAM delay lines

This is SystemVerilog RTL for an annealer that searches for low-energy states of a
fully connected Ising model,

    H(sigma) = - sum_i h_i sigma_i - sum_{i<j} J_ij sigma_i sigma_j ,   sigma_i in {-1, +1},

for example to solve MAX-CUT (take J_ij = -w_ij, h = 0). The algorithm is **stochastic
simulated quantum annealing (SSQA)**. It keeps R copies ("replicas") of the N-spin
network. Each spin is a p-bit, a probabilistic bit whose sign follows a noisy, saturating
integrator. Replica k is tied to replica k+1 through a coupling Q(t) that grows during the
anneal. Early on, each replica explores on its own. Later, the coupling pulls the replicas
together, which mimics the time evolution of a quantum annealer. At the end the host
reads all R final configurations and keeps the best.

The RTL follows the architecture of *"Energy-Efficient p-Bit-Based Fully-Connected
Quantum-Inspired Simulated Annealer with Dual BRAM Architecture"* (Onizawa et al.). It has
two main ideas:

* **Spin-serial, replica-parallel updates.** The R replicas update the same spin i at the
  same time. They walk its row of J one weight per clock, so every spin gate needs one
  adder and one multiplexer, however many neighbours a spin has. One J word per cycle
  serves all R replicas.
* **Delay lines in block RAM.** The update needs the spin states of the previous step
  and of the step before that. They are kept in two small BRAMs per replica that swap
  roles every step, not in long shift registers. Logic and flip-flop count then stay
  almost flat as N grows.

Default build: N = 800 spins, R = 20 replicas, 4-bit J and h, 8-bit internal signals.

## The update rule, as computed

In annealing step t, for spin i of replica k (all integers):

    acc   = sum_j  (sigma_j,k(t) ? +J_ij : -J_ij)            8-bit, wraps
    S     = acc + (sigma_i,k+1(t-1) ? +Q(t) : -Q(t)) + h_i
                + (r_i,k(t) ? +n_rnd : -n_rnd) + Is_i,k(t)
    Is_i,k(t+1) = I0 - 1   if S >= I0
                  -I0      if S < -I0
                  S        otherwise
    sigma_i,k(t+1) = +1 if Is_i,k(t+1) >= 0, else -1

* `Is` is a saturating up/down counter. Its sign is the spin. In the stochastic-computing
  view, the counter plus the sign approximate tanh(I0 * input), with I0 acting as a
  pseudo inverse temperature. The upper limit is I0 - alpha with alpha = 1.
* The noise term is +/-n_rnd. Its sign r is a fresh random bit for every replica on every
  clock cycle.
* The replica coupling uses replica k+1's state sigma_i,k+1(t-1). That state is one step
  older than the sigma(t) that drives the weighted sum (delay d = 1).
  The last replica couples to replica 0, closing the ring of the Trotter decomposition.
* All N spins of a step read sigma(t), the previous step's states. The update is
  synchronous across spins, not Gibbs-like.

Number formats: sigma is 1 bit (1 means +1). J and h are 4-bit two's complement. Q is an
8-bit unsigned magnitude, and n_rnd a 3-bit magnitude (so +/-n_rnd fits 4 bits). Is is
8-bit two's complement, so I0 may be at most 128; an assertion in the scheduler flags a
start with a larger value. The five-term sum is formed at 12 bits before saturation, so
only the J accumulator can wrap.

## Timing: N + 1 cycles per spin, with a one-cycle overlap

A step visits spins i = 0 .. N-1 in order. Each spin owns a window of N+1 cycles, indexed
by `count_bit` b = 0 .. N:

    issue cycle b (0..N-1): read J[i][b] (shared) and, per replica, sigma_b(t)
    issue cycle b = N:      read Is_i(t), the upper replica's sigma_i(t-1), and h_i

Every memory answers one cycle later. The scheduler therefore sends its data-side
controls through one register stage:

    cycle (window i)     0      1      2    ...   N      0 (window i+1)
    issue                J,s0   J,s1   J,s2 ...   Is,s(t-1),h   J,s0 ...
    data side            upd(i-1) load p0  acc+=p1 ... acc+=p(N-1)  upd(i)

The update of spin i (the combinational sum, saturation and sign, written back to the
delay BRAMs) happens in cycle 0 of spin i+1's window. No J product arrives in that cycle,
so the accumulator is free. One step is exactly N(N+1) cycles. A run of T anneals of M
steps takes T*M*N(N+1) cycles plus one drain cycle for the very last update.

At N = 800 one step is 640,800 cycles (3.86 ms at 166 MHz).

## The dual-BRAM delay line (per replica)

Each replica owns two 1-bit x N BRAMs, BRAM1 and BRAM2, plus one 8-bit x N BRAM for Is.
`count_iter`, the parity of the step number, decides their roles:

| step parity | written with sigma(t+1) at count_spin | read at count_bit -> sigma(t) | read at count_spin -> sigma(t-1) |
|---|---|---|---|
| count_iter = 0 | BRAM1 | BRAM2 | BRAM1 |
| count_iter = 1 | BRAM2 | BRAM1 | BRAM2 |

The BRAM being written in a step is the one that holds the states of two steps ago. Spin
i's old value sigma_i(t-1) is read at address i in the last cycle of spin i's window. One
cycle later it is overwritten with sigma_i(t+1). The other BRAM, filled in the previous
step, is swept by `count_bit` to supply sigma_j(t) for the weighted sum. The BRAM
primitive reads before it writes, so a read and a write of the same address in one cycle
return the old word. Only two steps of history are needed, so two BRAMs suffice, and
every replica's memory for spin states is 2N bits (2 x 800 x 20 = 32 kbit at full size).

Is needs only one step of history. A single BRAM is read at `count_spin` in the last
issue cycle and written at the same address in the update cycle.

Two pipelining details that differ from the published block diagram:

* The output multiplexers (doutb1/doutb2 to sigma(t)/sigma(t-1)) use `count_iter` delayed
  by one clock. The data in the first cycle of a step were read in the previous step.
* The write side has its own copy of `count_iter` and of the address, taken from the
  update stage. The last spin of a step is written after the step counter has moved on.

## Initial state and the anneal loop

The delay BRAMs are never cleared. Instead, in the first step of every anneal the
scheduler forces sigma(t) to +1 and Is(t) to 0, and in the first two steps it forces
sigma(t-1) to +1. This is the same as starting from sigma = +1, Is = 0 everywhere. The
replicas then diverge through their independent random bits.

Q(t) starts at `qmin`. After every `tau` steps it rises by `beta`, and it is capped at
`qmax` (Q(t+tau) = Q(t) + beta). I0 and n_rnd stay constant during a run. A run performs
`trials` anneals back to back. Each anneal restarts from the initial state and from qmin,
while the random generator keeps running.

The random generator is a 64-bit xorshift (shifts 13, 7, 17) that advances once per clock
cycle while the annealer is busy. Replica k uses bit k of the state. It is re-seeded at
every start (a zero seed is replaced by a fixed constant).

## Host interface

`ssqa_top` has three groups of ports:

* **AXI4-Lite slave** (8-bit address, 32-bit data), for the hyperparameters:

  | offset | register | bits |
  |---|---|---|
  | 0x00 | CTRL | write 1 to bit 0: start (ignored while busy) |
  | 0x04 | STATUS | bit 0 busy, bit 1 done |
  | 0x08 | TRIALS | 15:0, anneals per start (0 counts as 1) |
  | 0x0C | STEPS | 15:0, steps per anneal M (0 counts as 1) |
  | 0x10 | I0 | 7:0, at most 128 |
  | 0x14 / 0x18 | QMIN / QMAX | 7:0 |
  | 0x1C | BETA | 7:0 |
  | 0x20 | TAU | 15:0 (0 counts as 1) |
  | 0x24 | NRND | 2:0 |
  | 0x28 / 0x2C | SEED_LO / SEED_HI | 64-bit seed |

  The slave handles one write and one read at a time. READY is given in the cycle both
  address and data are valid, and the response follows one cycle later.
* **Weight port** `w_en, w_is_h, w_row, w_col, w_data`: one 4-bit word per cycle into J[row][col],
  or into h[row] when `w_is_h` is set. It is ignored while busy. Every entry of J must be
  written, zeros included, because the memory has no reset.
* **Result stream**: during the last step of each anneal, every spin update raises
  `out_valid` for one cycle. `out_idx` is i, `out_trial` is the anneal number and
  `out_spins[k]` is replica k's final sigma_i (1 = +1). Picking the best replica (for
  MAX-CUT, the largest cut) is left to the host. `done` rises one cycle after the last
  update.

## Files

| file | contents |
|---|---|
| `rtl/ssqa_pkg.sv` | widths, the hyperparameter struct, register offsets, the xorshift step |
| `rtl/ssqa_top.sv` | top level |
| `rtl/axi_lite_regs.sv` | AXI4-Lite hyperparameter registers |
| `rtl/ssqa_scheduler.sv` | counters, step/anneal loops, Q schedule, pipelined controls, masks |
| `rtl/xorshift64.sv` | random bits, R per cycle |
| `rtl/weight_mem.sv` | J (N x N) and h (N) memories |
| `rtl/spin_gate_array.sv` | R spin gates + R delay circuits, replica ring |
| `rtl/spin_gate.sv` | accumulator, five-term sum, saturation, sign |
| `rtl/dual_bram_delay.sv` | two sigma BRAMs and one Is BRAM with their muxes |
| `rtl/bram_sdp.sv` | simple dual-port RAM, read-before-write |

At the defaults the memories hold 2.72 Mbit: J takes 2.56 Mbit, h 3.2 kbit, and the
delay lines 20 x (2 x 800 + 8 x 800) = 160 kbit. The logic, without memories, is about 830
word-level cells and 610 flip-flops.

## Verification

`tb/ssqa_ref_pkg.sv` is an independent integer model of the whole annealer. It is
bit-exact, down to which random bit each update sees (spin i of step s of anneal t is
updated on cycle ((t*M+s)*N + i + 1)*(N+1) after start). The testbenches compare the
hardware against it:

| testbench | what it checks |
|---|---|
| `tb_spin_gate` | accumulator and update rule, all three saturation cases |
| `tb_bram_sdp` | latency, hold, read-before-write collisions |
| `tb_dual_bram_delay` | sigma(t), sigma(t-1), Is(t) over 7 steps with the scheduler's access pattern |
| `tb_weight_mem` | load and read-back of J and h |
| `tb_xorshift64` | sequence, enable, zero seed |
| `tb_ssqa_scheduler` | every counter and control, cycle by cycle; the Q schedule; run length |
| `tb_axi_lite_regs` | register map, strobes, start pulse, response hold |
| `tb_spin_gate_array` | R = 3 replicas driven by the real scheduler, against the model |
| `tb_ssqa_top` | N = 7, R = 4: three runs over AXI, every final spin against the model, N+1 cycles per spin, run length; counts Q increments, Q reaching Qmax, upper and lower saturation, BRAM swaps, anneal restarts |
| `tb_ssqa_full` | default size (N = 800, R = 20), a G11-shaped random 20 x 40 toroidal +/-1 graph, 20 steps, all 16,000 final spins against the model |
| `tb_ssqa_g11` | default size, same graph shape, 200 steps with I0 = 4, n_rnd = 3, Q 0 to 8 by 1 every 20 steps; requires a best cut of at least 500 (reaches 530; the real G11's best known cut is 564) |
| `tb_ssqa_g14` | default size, a G14-shaped graph: two triangulated 20 x 40 grids, the second over a random node order, weights +1 (4,549 edges, degree up to 12); 200 steps with I0 = 8, n_rnd = 1, Q 0 to 8 by 1 every 20 steps; requires a best cut of at least 2,850 (reaches 2,949) |

To run one with plain Verilator, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/ssqa_pkg.sv tb/ssqa_ref_pkg.sv tb/tb_ssqa_top.sv --top-module tb_ssqa_top
    ./obj_dir/Vtb_ssqa_top

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.
`tb_ssqa_full` takes about 20 s and `tb_ssqa_g11` and `tb_ssqa_g14` about 2 to 2.5 min each. The full-size simulation
runs at roughly one million cycles per second.

## Where this RTL departs from, or adds to, the published design

Taken from the publication: the update rule and its parameters (alpha = 1, d = 1); the
datapath of the spin gate and its printed widths; R = 20 and N = 800; the N+1-cycle spin
schedule; the two-BRAM delay line with `count_bit`, `count_spin`, `count_iter`, `en_read`
and `en_upd`; the single Is BRAM; a 64-bit xorshift giving R random signals per cycle; the
Q schedule; hyperparameters reaching the scheduler over AXI.

This design's own choices, where the publication says nothing:

* the register stage and the one-cycle overlap of update and next spin (above);
* the initial state (all +1, Is = 0) and the masks that produce it;
* the replica ring (last replica coupled to the first);
* the xorshift shift triple and the use of bit k for replica k;
* the meaning of the scheduler's "trial" and "M" hyperparameters (anneals per start,
  steps per anneal);
* the register map, the weight load port (the original loads J from BRAM initialisation
  files) and the result stream;
* keeping h in a separate small memory.

Differences to be aware of:

* **No sparse-graph skipping.** The original reports N(k+1) cycles per step for graphs of
  degree k: the scheduler skips zero weights. That is how an 800-node degree-4 graph
  anneals in 12 ms for 500 steps. The publication gives no memory format for finding the
  non-zero weights, so this RTL always scans all N weights. The same 500-step G11 anneal
  takes 320 M cycles (1.93 s at 166 MHz).
* The block diagram labels the coupling multiplexer's select with sigma_j,k+1(t-1), while
  the equation uses sigma_i,k+1. The equation is followed.
* The update equation writes the random term as r_i(t), with no replica index, while the
  text speaks of r_i,k(t) and of R parallel random signals. Each replica here draws its
  own bit (bit k of the generator for replica k), so replicas are not driven by the same
  noise.
* The 8-bit accumulator width is the published one. It wraps if |sum of J*sigma| exceeds
  127, which dense graphs with large weights can reach.
* Not included: the shift-register delay line used only as a comparison baseline; the
  p-way parallel spin engines, mentioned only as a possible extension; the host processor
  and its software.
