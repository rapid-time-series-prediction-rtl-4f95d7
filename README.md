# Hardware reservoir computer for time-series prediction

A reservoir computer whose reservoir is an unclocked network of Boolean
nodes with delayed links. The nodes and links run in continuous time. A
clocked input layer and output layer (one sample per 6.25 ns clock, 160 MHz)
feed it and read it. After training, the output is fed back as the input, so
the system predicts a chaotic series such as Mackey-Glass on its own.

## Parts (rtl/)

| file | what it is |
|---|---|
| `rc_pkg.sv` | constants of the main configuration (N = 100, k = 2, 8-bit input, rho = 1.5, sigma = 0.5, mean delay 11 ns, 0.19 ns per inverter), the phase type, and a counter-based hash generator used at elaboration |
| `node.sv` | one reservoir node: a (k+n)-input look-up table, no clock |
| `delay_line.sv` | a link: a chain of 2m inverters kept through synthesis |
| `reservoir.sv` | a reservoir given explicitly by LUTs, sources and delays (default: the 3-node worked example) |
| `random_reservoir.sv` | builds a reservoir at elaboration from N, k, rho, sigma, mean delay and a seed. Picks random sources, weights and delays, scales W to spectral radius rho by power iteration, and fills each LUT with the threshold of the weighted sum |
| `input_layer.sv` | stores the training series and plays one sample per clock, then switches `mode` to prediction |
| `weight_store.sv` | N+1 output weights of 16 bits, written by the host (address N is the direct input-to-output weight) |
| `output_layer.sv` | v = sum of the weights of the active nodes + w_direct * u_v, saturated to 8 bits |
| `state_recorder.sv` | on-chip memory of {x, v} for every cycle of a run, read back by the host |
| `reservoir_computer.sv` | top: input layer, mode mux, reservoir, x/v registers, output layer, recorder |

Operation: the host loads 1500 samples and the output weights, then pulses
`start`. For 1500 cycles the samples drive the reservoir. For the next 2320
cycles the registered output drives it instead (100 Lyapunov times of
Mackey-Glass at dt = 5). Each cycle's sampled state and output are recorded.
Training, a ridge regression of the recorded states onto the series, is done
on a host computer. It is not part of the hardware.

## Choices that go beyond or against the original description

- The feedback mux takes the *registered* output. Taking the combinational
  one, as the original listing does, would close a zero-delay loop through
  the direct connection.
- Each link's delay is simulated as one transport delay of 2m x 0.19 ns at
  the chain's end; the inverters themselves have zero delay in simulation.
  Synthesis keeps the inverters. This keeps a 100-node simulation small.
- Random reservoirs exclude self links ("k other nodes"), although the worked
  example has one. A node is on only for a strictly positive sum.
- The 8 input bits are weighted as a two's complement code scaled to [-1, 1).
- Weight format: 16-bit two's complement with 7 fraction bits.
- In the 3-node example, node 2's delays follow the figure (10, 12), not the
  appendix equation (12, 10).
- The sample memory, start/done handshake, reset and state recorder are this
  design's own additions.

Not built: the host-side training, and the measured delay spread of real
inverters. In simulation every inverter takes exactly 0.19 ns.

## Testbenches (tb/)

Each one ends with `TB_RESULT checks=N failures=M`.
- `node_tb`, `delay_line_tb`, `weight_store_tb`, `output_layer_tb`,
  `input_layer_tb`, `state_recorder_tb`: unit checks against reference models.
- `reservoir_tb`: the 3-node example, sampled every 10 ps and checked against
  the threshold equation with delayed states.
- `random_reservoir_tb`: topology, delay range, input density, spectral
  radius (it runs its own power iteration), and every LUT bit.
- `reservoir_computer_tb` (small, N = 20) and `rc_full_tb` (the default
  configuration, no parameters changed). Both run a full training plus
  prediction run through the shared checker `rc_check`. It checks v against a
  reference readout every cycle, plus the mux, phases and recorder. It counts
  the mode switch, closed-loop cycles, saturation, reservoir activity and done.

Run one with Verilator 5:

    verilator --binary --timing --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
        rtl/rc_pkg.sv tb/rc_full_tb.sv --top-module rc_full_tb
    obj_dir/Vrc_full_tb

Building the full-size top takes a couple of minutes. Most of that time goes
to the elaboration-time power iteration.
