# A time-delay reservoir computer for FPGAs

Reservoir computing replaces a trained recurrent neural network with a fixed
dynamical system (the *reservoir*) followed by a trained linear readout. In the
*single-node* or *time-delay* variant the reservoir is one nonlinear node with a
long delayed feedback loop. Time is cut into N slots of length theta, and the
node's response in each slot acts as one "virtual neuron". The delay then
couples each virtual neuron to the one N slots earlier. In hardware this comes
down to a FIFO memory, one nonlinear function and a small integrator, which is
what makes the approach cheap.

This RTL is a standalone reservoir computer of that kind. It follows the
FPGA design described in "Efficient Design of Hardware-Enabled Reservoir
Computing in FPGAs" (Penkovsky, Larger, Brunner). That design ran on an
Artix-7 XC7A100T and was evaluated on spoken-digit recognition (Aurora-2
isolated digits). The default sizes here are the ones that publication
reports: N = 600 virtual nodes, 7 input components and 16-bit fixed point.

The node obeys the low-pass delay equation

    tau * dx/dt = -x(t) + f( x(t - tau_D) + rho * u(t) ),   f(v) = beta * sin^2(v + phi0)

with tau_D = 6. An offline optimiser (a genetic algorithm on a PC) tunes
tau, beta, phi0 and rho. This hardware takes them as inputs.

## Data path

```
 host (PC)                                FPGA
 ---------                                ----
 64 cochleagram channels
   | PCA compression (host)
   v
 7 components c ==UART==> uart_rx -> byte_to_word -> input_mask -> reservoir --+--> readout --+
                                                     (u = W c)     (Heun,       |  (y = W^R x) |
                                                                    delay line, |              |
                                                                    sin^2 node) +--(training)--+
                                                                                               |
 host  <==UART== uart_tx <- word_to_byte <---------------------------------------------------+
```

Each input vector holds M = 7 principal components. The host has already
projected the raw 64-channel feature vector onto them. It sends each component
as one 16-bit word, high byte first.

1. **input_mask** multiplies the vector by an N x M matrix. That matrix is the
   random reservoir mask times the PCA decompression matrix, fused into one.
   The result is N samples u_1 .. u_N, one per virtual node.
2. **reservoir** takes each u_i as the input held during slot i (sample and
   hold). It performs one integration step of the delay equation per slot and
   emits the node state x_i.
3. **readout** accumulates y_q = sum_i W^R[q][i] x_i over the N states of the
   vector. It then sends out the Q = 11 sums.
4. In **training mode** (`train_mode = 1`) the readout is bypassed. All N
   states of every vector go back to the host, which computes W^R from them by
   ridge regression.

All blocks talk over the same link: a 16-bit word plus `req` and `ack`
(`rc_stream_if`). A word moves on a clock edge where both are high. The sender
holds the word and `req` until then. Every block waits on its links, so a
slow consumer stalls the stages before it and no data are lost. The only
exception is the serial input: the host cannot be stopped, so `uart_rx` flags
`rx_overrun` if a byte is lost. In training mode the output UART is by far the
slowest stage. The reservoir then spends most of its time stalled, and the
next input vector waits in the mask's second input register bank.

## Number format

Every data word and parameter is signed Q3.13: a sign bit, 2 integer bits and
13 fraction bits, covering [-4, 4) in steps of 2^-13. Sixteen bits match the
original design. The 13 fraction bits match its stated quantisation noise of
2^-13. The range covers the search ranges of the optimiser: beta and rho in
[-4, 3.98], phi0 in [0, pi], and the phi0 = -3.3125 it actually found.
Products are kept at full width inside each block and truncated back to 13
fraction bits. Values leaving a block are saturated. `rc_pkg` holds the type
and the helpers.

## The reservoir step

This is the part that needs the most care. The time axis is discretised with
step h = theta = tau_D / N (0.01 for tau_D = 6, N = 600), so one step equals
one virtual node and the delay is exactly N steps. The time constant enters
only as `eps = h / tau`, which the host computes. The hardware needs no
divider. For example, tau = 7.8125e-3 gives eps = 1.28.

Heun's method (the explicit trapezoid rule) for step n, with d_n = x_{n-N}:

```
k1      = eps * ( f(d_n     + rho*u_n) - x_n )
xp      = x_n + k1                       (Euler predictor)
k2      = eps * ( f(d_{n+1} + rho*u_n) - xp )
x_{n+1} = x_n + (k1 + k2) / 2            (trapezoid corrector)
```

The input u_n is held over the whole step, so both stages use it. The delayed
term does change within the step. The predictor uses x_{n-N}, the corrector
x_{n-N+1}.

**Delay storage.** The N past states are kept as a `delay_line` FIFO of N-1
entries plus one register `dcur`:

```
            +------------------ delay_line (N-1 entries) ----------------+
 x_n  ----> | x_{n-1} ... x_{n-N+2} ...                    x_{n-N+1}     | --dout--> d_{n+1}
            +----------------------------------------------------------+            |
                                                                                  dcur = d_n
```

In step n, `dout` (= x_{n-N+1}) feeds the corrector. At the end of the step
x_n is shifted in, `dout` moves on to x_{n-N+2}, and the old `dout` becomes
`dcur` for step n+1. So each step needs one memory write and one registered
read, and the FIFO maps onto a single block RAM. After reset the FIFO clears
itself to zero (N-1 clocks, during which the reservoir takes no input). The
delay loop therefore starts from a zero history.

**Schedule.** The reservoir has one `nonlinearity` unit, which both stages
share. A step takes 4 clocks: take u, predictor, corrector, hand over x. With
N = 600 a vector is processed in 2400 clocks (24 us at 100 MHz).

**Accuracy.** Compared with a double-precision integration of the same
equations, the 16-bit datapath stayed within 1.1e-3 (about 9 LSB) over
thousands of steps for the parameter sets tested (see Verification). The
difference comes from truncation in the multiplies and from the sin^2 table.
It stays bounded because the dynamics are dissipative at these parameters. At
parameters where the dynamics are chaotic, the two can drift apart, as any two
finite-precision integrations do.

## The nonlinearity

`nonlinearity` computes beta * sin^2(a + phi0) without CORDIC or a multiplier
chain:

1. sin^2 has period pi. The phase a + phi0 is multiplied by round(2^24/pi),
   and only the fraction of the result is kept. Two's complement makes this
   a floor-modulo for negative phases too.
2. The top 8 bits of that fraction index a 257-entry table of
   sin^2(pi k / 256) with 16 fraction bits. The next 16 bits interpolate
   linearly to the following entry. The table is computed at elaboration
   with `$sin` and synthesises to a ROM. It needs no data file.
3. The result is multiplied by beta and saturated.

The interpolation error is about 4e-5, below one LSB. The test measured at
most 2.8e-4 including the beta scaling, with |beta| up to 4. The argument
input is Q6.13 (20 bits) so that x(t - tau_D) + rho*u cannot overflow
(|rho*u| < 16). The block is purely combinational. `LUT_BITS` sets the table
size.

## Masking and readout

Both are matrix-vector products on multiply-accumulate logic, organised
differently because their inputs arrive differently.

* **input_mask** receives a short vector (M words) and produces a long one
  (N words). The mask is stored as M column memories of N words, so one row
  is read per step. M multipliers and an adder produce one u per 3 clocks,
  which is faster than the reservoir consumes. The inputs fill a second
  register bank while the current vector is being expanded. The next vector
  can therefore arrive during computation and start as soon as the last u of
  the previous one has been taken.
* **readout** receives a long vector (N states) and produces a short one
  (Q outputs). Q MAC units run in parallel, each with a 48-bit accumulator and
  its own column memory of N weights. The weight row for the next state is
  read ahead. A state is taken every 2 clocks. After the N-th state, the Q
  sums are sent out one by one (y_1 first) and the accumulators are cleared.

Both coefficient memories have a write port (`*_coef_we/row/col/wdata` on the
top). The mask depends on a PCA of the task data, and W^R comes from training,
so neither is fixed when the hardware is built. The original speaks of a
read-only memory for the mask. Here it is written before use.

## Host link

`uart_rx`/`uart_tx` use 8 data bits, LSB first, no parity, one stop bit, at
115200 baud from a 100 MHz clock (the `CLK_HZ` and `BAUD` parameters).
`uart_rx` resynchronises the line and samples mid-bit. Words are sent high
byte first (`byte_to_word`, `word_to_byte`).

* Input: 2*M = 14 bytes per vector.
* Output in normal mode: 2*Q = 22 bytes per vector.
* Output in training mode: 2*N = 1200 bytes per vector.

At these rates the serial link, not the reservoir, limits the throughput. A
vector takes about 1.2 ms to arrive. In training mode its states take about
104 ms to leave. Compressing 64 channels to 7 cuts the input time by a factor
of about 9. That saving is the reason the compression is done on the host.

`train_mode` should change only when no vector is in flight.

## Top-level interface (`rc_fpga_top`)

| port | width | meaning |
|---|---|---|
| `clk`, `rst_n` | 1 | clock, asynchronous active-low reset |
| `uart_rxd`, `uart_txd` | 1 | serial link to the host |
| `rx_overrun` | 1 | sticky: a received byte was lost |
| `train_mode` | 1 | 1: send node states; 0: send readout outputs |
| `eps`, `beta`, `phi0`, `rho` | 16 each | dynamics, Q3.13; `eps = (tau_D/N)/tau` |
| `mask_coef_we/row/col/wdata` | 1/10/3/16 | write W[row][col] of the mask |
| `rdo_coef_we/row/col/wdata` | 1/10/4/16 | write W^R[col][row] of the readout |

| parameter | default | |
|---|---|---|
| `N` | 600 | virtual nodes (published value) |
| `M` | 7 | input components per vector (published value) |
| `Q` | 11 | readout outputs (the 11 Aurora-2 digit words; not stated in the publication) |
| `CLK_HZ`, `BAUD` | 100 MHz, 115200 | host link timing (not stated in the publication) |

Memory at the defaults is about 200 kbit:

| memory | size |
|---|---|
| delay line | 599 x 16 bits |
| mask | 600 x 7 x 16 bits |
| readout | 600 x 11 x 16 bits |

The delay line grows by one word per extra node. The mask and readout
memories grow with N*M and N*Q.

## Where this RTL departs from, or adds to, the published design

Several things follow the published design:

* the pipeline of masking, reservoir and readout;
* the fused mask W^I * W_c^T applied as one matrix-vector product;
* the delay equation with the sin^2 nonlinearity, integrated with Heun's method;
* the FIFO delay line;
* the 16-bit fixed point;
* the UART host link;
* the training mode without readout;
* N = 600 and M = 7.

The publication does not describe the following. They are this design's own
choices:

* the handshake: the publication names a "three-wire" protocol with 16+2-bit
  buses but does not define it;
* the Q3.13 split, truncation and saturation;
* h = tau_D/N with one Heun step per node, and eps supplied by the host;
* the ordering of the two delayed samples within a step;
* where rho*u joins the loop: the publication's block diagram draws the input
  adder in front of the delay, which would delay u as well, while its equation
  adds the undelayed rho*u(t) to the delayed state; this RTL follows the
  equation;
* signed phi0: the publication restricts phi0 to [0, pi] for its search but
  reports optimised values of -1.33 and -3.3125. phi0 is a full signed input
  here; since sin^2 has period pi, each reported value is equivalent to one
  inside [0, pi] (-3.3125 + 2 pi is about 2.97);
* the table-based sin^2;
* the zero initial history;
* the memory organisations and the writable coefficient memories;
* the UART frame, baud rate, clock and byte order;
* Q = 11;
* configuration through top-level ports rather than a register map or
  command protocol.

How the per-frame readout outputs become a decision on a spoken word is left
to the host. The host also does the PCA compression, the genetic-algorithm
optimisation of tau, beta, phi0 and rho, and the ridge-regression training.
None of these is hardware. The published estimate that the same FPGA could
hold 2500-2600 nodes is not checked here. N is a parameter, and only the
memories and counters grow with it.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block's
outputs with values computed independently, applies random back-pressure on
the links and, where a rate is defined, counts clocks. `tb/rc_model_pkg.sv`
holds a double-precision model of the reservoir (same equations, `real`
arithmetic).

| testbench | what it shows |
|---|---|
| `tb_uart_rx`, `tb_uart_tx` | bytes round-trip; frame timing; framing error and overrun |
| `tb_byte_to_word`, `tb_word_to_byte` | byte order under random stalls |
| `tb_input_mask` | every u equals the integer dot product; saturation; 3 clocks per output |
| `tb_delay_line` | the output is the value written DEPTH shifts earlier; clearing after reset |
| `tb_nonlinearity` | within 4 LSB of beta*sin^2 over 5000 random points (measured 2.8e-4) |
| `tb_reservoir` | N = 20, three published parameter sets, 6 delay lengths each; within 2^-8 of the model (measured 1.1e-3); 4 clocks per node |
| `tb_readout` | every y equals the integer dot product; 2 clocks per state |
| `tb_rc_fpga_top` | see below |

`tb_rc_fpga_top` runs the whole design at its default size through its pins
only, including the serial lines at 115200 baud. It loads random mask and
readout coefficients and sets parameters found by the optimiser. It then sends
two vectors in training mode, and the 1200 states returned over the serial
line match the model. It switches mode and sends two more vectors, and the 22
outputs returned equal W^R x computed from the states inside the design. It
also counts that a reservoir stall, input arriving during computation, a mode
switch and feedback across vectors all occurred. The run takes about 35 s.

To simulate, for example, the top:

```
verilator --binary --timing --assert --top-module tb_rc_fpga_top \
    -y rtl -y tb +libext+.sv rtl/rc_pkg.sv tb/rc_model_pkg.sv tb/tb_rc_fpga_top.sv
./obj_dir/Vtb_rc_fpga_top
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`. The
testbenches use `$urandom` without a fixed seed. Pass `+verilator+seed+<n>`
to vary it.

`rc_stream_if` carries an assertion that a pending word is neither withdrawn
nor changed before it is accepted. It checks every link of the top level
during simulation.

**Not covered:** the design has not been run on an FPGA or timed. The
nonlinearity and the Heun stages are single-cycle combinational paths with
several multipliers in series, which may need pipelining for 100 MHz on an
Artix-7. Recognition accuracy on real speech data was not measured.
