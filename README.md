# HEPPO-GAE: a pipelined Generalized Advantage Estimation engine

Proximal Policy Optimization (PPO) spends a large part of each iteration on
Generalized Advantage Estimation (GAE). For every trajectory it walks the
stored rewards `r_t` and critic values `V_t` backward in time and computes

    delta_t = r_t + gamma * V_{t+1} - V_t
    A_t     = delta_t + C * A_{t+1}            C = gamma * lambda
    RTG_t   = V_t + A_t                        (rewards-to-go)

In software this is a slow, serial loop per trajectory. The HEPPO-GAE paper
(Taha and Abdelhadi) moves it into the programmable logic of a Zynq
UltraScale+ SoC. The design rests on three ideas:

* **Narrow data in on-chip memory.** The processing system standardizes the
  rewards with running statistics, and the values per batch. It then quantizes
  both to 8-bit codes and stores them in block RAM, a quarter of the space of
  32-bit floats. The accelerator de-quantizes the codes on the fly.
* **A FILO memory layout.** One BRAM word holds the same timestep of every
  trajectory. The words are filled from timestep 0 upward and consumed from
  the top downward, which is exactly the order GAE needs. Each result
  overwrites the input it came from.
* **k-step lookahead.** Unrolling the recurrence K times puts K registers in
  the feedback loop. The loop multiplier can then be pipelined, and each
  processing element (PE) takes one element per clock.

This RTL implements the accelerator side: the memories, the per-row loaders,
the processing elements, the crossbars, the write-back and the control. The
standardization and quantization of the inputs, the Arm cores, the AXI fabric
and the DNN accelerator of the SoC are not part of it.

## Block diagram

```
              ps_start/ps_done (ps_clk, 2-flop synchronized)
                         |
                   +-----------+   job (trajectory, length), round robin
                   | heppo_ctrl|----------------------------------+
                   +-----------+                                  |
  row k (x N_PE):                                                 v
   +---------+  queue  +---------+  queue  +---------+   +---------+
   | ReL k   |-------->| VaL k   |-------->| PE k    |-->| WB k    |
   |heppo_rel| (R,i,D) |heppo_val|(R,V,i,D)|heppo_pe |   |heppo_wb |
   +----+----+         +----+----+         +---------+   +----+----+
        | read R            | read V                          | write Adv, RTG
   +----v-----------+  +----v-----------+            +---------v--------+
   | heppo_xbar_rd  |  | heppo_xbar_rd  |            |  heppo_xbar_wr   |
   +----+-----------+  +----+-----------+            +----+--------+----+
        | port A            | port A                     | port B | port B
   +----v---------------+  +v-------------------+         |        |
   | BRAM0  R -> Adv    |<-+--------------------+---------+        |
   | heppo_stack_bram   |  | BRAM1  V -> RTG    |<-----------------+
   +--------------------+  | heppo_stack_bram   |
                           +--------------------+
   host port (32-bit words) owns both BRAMs while the engine is idle
```

`heppo_top` instantiates everything. `heppo_pkg` holds the number formats,
the queue entry types and the quantizer functions. `heppo_coef` forms the
lookahead coefficients `C^1..C^K` once for all rows.

## Number formats and quantization

| quantity | stored | in the datapath |
|---|---|---|
| reward | 8-bit code `q` | `q * 2^-5` (stays in the standardized scale) |
| value | 8-bit code `q` | `q * 2^-5 * sigma_v + mu_v` |
| advantage | `sat(round(A * 2^5))` | 32-bit |
| rewards-to-go | `sat(round((RTG - mu_v) * (1/sigma_v) * 2^5))` | 32-bit |

The datapath is 32-bit two's complement fixed point with 16 fractional bits
(Q16.16). Multiplications truncate toward minus infinity (`fx_mul`). The
8-bit code width and the 32-bit datapath width come from the paper. The
binary point, the step `2^-5` (a code range of +/-4 standard deviations) and
the output scales are choices of this implementation; the paper leaves them
open. The paper stores 8-bit results because it budgets one byte per
advantage and per rewards-to-go. The advantage is therefore coded on the
reward grid. The rewards-to-go is in the value scale, so it is standardized
with the batch's `mu_v` and `1/sigma_v` first. Codes that fall outside
[-128, 127] saturate and are counted in `sat_count`.

The run configuration `cfg` holds `gamma`, `lambda`, `mu_v`, `sigma_v` and
`1/sigma_v`, all in Q16.16. The processing system supplies the reciprocal, so
the hardware needs no divider.

## The processing element and k-step lookahead

This is the part of the design that is hardest to follow. Elements of one
trajectory enter newest first. Within a trajectory the recurrence needs
`A_{t+1}` in the same cycle that `delta_t` arrives, so a direct
implementation has an adder and a multiplier in a one-cycle loop. Unrolling
it K times gives

    A_t = C^K * A_{t+K} + sum_{i=0}^{K-1} C^i * delta_{t+i}

Now the loop value is needed only K elements later. `heppo_pe` has these
stages:

| stage | work |
|---|---|
| 1 | register `V_{t+1}` (the previous element's V), vector position |
| 2 | `gamma * V_{t+1}` |
| 3 | `+ R_t` |
| 4 | `- V_t` gives `delta_t` |
| 5 | delay line `delta_{t+1} .. delta_{t+K-1}`, products `C^i * delta_{t+i}` |
| 6 | adder tree: the feed-forward part `F_t` |
| 7 | loop: `A_t = F_t + fb[K-1]`, where `fb[0..K-2]` hold the last advantages and `fb[K-1] = C^K * A_{t+K}` |
| 8 | `RTG_t = V_t + A_t`, output registers |

The K registers `fb[]` form the loop. The multiplier by `C^K` sits in front
of the last one, so for K >= 2 it has a register on each side and the
one-cycle recurrence holds only the loop adder. That is the point of the
transformation: with K = 1 the multiply and the add would have to fit in one
cycle. A synthesis tool may retime the registers further into a pipelined
DSP multiplier.
The paper builds K = 2, the default here. The PE is written for any K >= 1,
and its testbench also runs K = 1 and K = 3, the other depths whose cost
the paper compares (K = 3 is the case drawn in its pipeline figure).

**Trajectory boundaries.** Vectors follow each other back to back. The `Done`
flag marks the last element of a vector (timestep 0). The element after it
starts a new vector: it sees `V_{t+1} = 0`, and every lookahead term that
would reach into the previous vector is masked off. A small position counter
(0..K) travels down the pipeline with the element for this purpose. So the
newest stored timestep is treated as terminal, with no bootstrap value. The
paper does not say how it handles this.

**Timing.** The PE has no stall input. A result leaves exactly 8 cycles after
its element enters, and a new element can enter every cycle.

## Rows, queues and flow control

Each row is ReL, a queue, VaL, a queue, PE and write-back:

* **ReL** (`heppo_rel`) takes a job (trajectory j, length T). It reads
  `R_(j,t)` for t = T-1 down to 0 and pushes `(R, i, Done, j)`. It asks for a
  read only when the queue has room for that read plus the one still in
  flight. The ReL forms the index i and the `Done` flag itself from the job.
  A design could instead feed `(Done, i)` into each loader from outside.
* **VaL** (`heppo_val`) takes each entry, reads `V_(j,i)` and undoes the block
  standardization. It pushes `(R, V, i, Done, j)` under the same rule.
* **PE** takes an entry whenever the write-back unit grants credit: it must
  have more free entries than there are elements inside the PE. This lets the
  stall-free PE share the write crossbar safely.
* **Write-back** (`heppo_wb`) re-quantizes the results and asks the write
  crossbar to store them at address i, lane j.

The queue depths (4, and 16 in the write-back unit) are this
implementation's choice. With these depths every row sustains one element per
cycle.

Assertions state these rules. No queue in a row overflows. Each queue's count
plus its free space equals its depth. The write-back queue plus the credits
still owed never exceed its depth. `Done` leaves the PE only with timestep 0.
Simulating with `--assert` checks them in every test.

## Crossbars and the in-place update

The paper names a crossbar between the rows and the memory but does not
describe it. Here each BRAM port has one crossbar (`heppo_xbar_rd` for
reading BRAM0 and BRAM1, `heppo_xbar_wr` for writing both). Each cycle a
round-robin winner picks a BRAM word. Every requester that wants the same
word is served in that cycle: it gets its own lane on a read, or writes its
own lane through the per-lane write enables.

In normal operation every row holds a trajectory of the same length and they
all start together. So all rows ask for the same word every cycle and the
whole array moves one timestep per cycle. The controller never makes rows drift
apart, but rows that did would still work: they would share the ports in
turn.

Reads come from port A and writes go to port B. An element's result is
written only after the element has been read, so overwriting in place is
safe. Results go to the index the element came from. The paper's memory
algorithm lists the store at `t+1`, but its data-flow text says index `i`;
this RTL follows the data-flow text.

## Control and clocking

`heppo_ctrl` runs a four-phase handshake:

1. The processing system fills the BRAMs through the host port.
2. It sets `cfg`, `n_traj` and `t_len`, then raises `ps_start`.
3. The controller deals trajectories to idle rows in row order, as many as
   are idle in a cycle, so the rows start together.
4. When `n_traj * t_len` results have been written, it raises `ps_done`.
5. The host reads the results and lowers `ps_start`, which lowers `ps_done`.

`ps_start` and `ps_done` cross between `ps_clk` and `clk` through
`heppo_sync` two-flop synchronizers. The paper keeps all other data exchange
inside the BRAMs while only one side is active. In this RTL the host port
runs on `clk`; a real part would use the BRAM's second port clock.

The host port is a simple stand-in for the AXI BRAM controller. Each 32-bit
word carries four lanes (trajectories 4w..4w+3) of one timestep.
`host_sel` = 0 selects BRAM0 (rewards in, advantages out) and `host_sel` = 1
selects BRAM1 (values in, rewards-to-go out). Read data arrives one cycle
after the request. The port works only while `host_ready` is high, that is,
while no run is in progress.

## Sizes and performance

| parameter | default | meaning |
|---|---|---|
| `N_PE` | 64 | rows (PEs) |
| `LANES` | 64 | trajectories per BRAM word |
| `T_MAX` | 1024 | timesteps (BRAM depth) |
| `K` | 2 | lookahead steps |
| `QD`, `WBD` | 4, 16 | queue depths |

At the defaults the two BRAMs hold 2 x 1024 x 512 bits = 128 KB. That is the
paper's 64-trajectory, 1024-step batch. A full batch takes 1038 cycles from
start to done: 1024 timesteps at 64 elements per cycle, plus the fill of
queues, crossbar and PE. At the paper's 300 MHz that is about 3.5 us. Each PE
handles one element per cycle, the paper's 300 M elements/s per PE. The clock
rate itself has not been checked here: no FPGA implementation was run.
Lengths up to `T_MAX` and up to `LANES` trajectories can be used per run. If
`N_PE` < `n_traj`, rows take further trajectories as they finish.

## Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_heppo_pe`: K = 1, 2 and 3 PEs against the plain serial recurrence in
  double precision. Vectors of 1 to 40 elements are sent with gaps and back
  to back. The test checks the 8-cycle latency and one result per cycle.
* `tb_heppo_rel`, `tb_heppo_val`, `tb_heppo_wb`: each loader or write-back
  unit against memory and queue models, with random grants and random
  draining. Checks cover order, de-/re-quantization, that no queue overflows,
  and the full-rate streaming.
* `tb_heppo_xbar_rd`, `tb_heppo_xbar_wr`: random conflicts (nobody waits more
  than N cycles), and a lock-step phase in which every requester is served
  each cycle.
* `tb_heppo_fifo`, `tb_heppo_stack_bram`, `tb_heppo_sync`, `tb_heppo_ctrl`:
  queue, memory, synchronizer and controller behaviour.
* `tb_heppo_top`: the whole accelerator with 4 rows, 8 trajectories and 32
  timesteps. The test drives the host port and handshake and compares every
  code with a double-precision model; one code of slack is allowed where
  fixed-point rounding lands on a code boundary. It also checks the run time
  and counts the mechanisms used (Done boundaries, rows taking a second
  trajectory, reads served to all rows at once, clipped codes, port
  hand-over).
* `tb_heppo_top_full`: the same test at the default size, 64 x 1024. It
  takes about two minutes in Verilator.

Running a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/heppo_pkg.sv \
    tb/tb_heppo_top.sv --top-module tb_heppo_top -Mdir obj && ./obj/Vtb_heppo_top
```

Two things do not occur in the top-level test, by construction. With equal
trajectory lengths and a common start, the crossbars never see conflicting
addresses, and the queues never fill. Conflicts and back-pressure are tested
in the unit testbenches only.

## Where this departs from or adds to the paper

* Fixed-point format, quantizer step and range, and the scales of the 8-bit
  results: chosen here, not given in the paper.
* The end of a stored vector is treated as terminal. `Done` marks timestep 0.
* The crossbar's internals (round robin, serving equal addresses together),
  the write-back unit with its credit scheme, and the queue depths are this
  implementation's.
* The paper gives two forms of the K-step formula. The general one weights
  `delta_{t+i}` with `C^{(k-1)-i}`; the written-out 2- and 3-step forms, its
  table and its figure use `C^i`. The RTL uses `C^i`, which is the correct
  expansion.
* Results are written at index i, not i+1 (see above).
* Each logical BRAM is one wide array. Mapping it onto 36 Kb device blocks
  (about 32 of them in the paper's estimate) is left to synthesis.
* Not included: the reward and value standardization and quantization (done
  in software before the data is stored), the Arm processing system, the AXI
  interconnect and BRAM controller, the DNN systolic array, and the clock
  generation.
