# NeuroRing in SystemVerilog

## Design idea

A spiking neural network is spread over a ring of identical cores, each
owning a fixed block of neurons (4096 by default). Spikes become synapse
packets that travel round a bidirectional ring, each taking the shorter way.
Every core updates its neurons once per time step, looks up the outgoing
synapse lists of the neurons that fired in its HBM, and injects packets. A
core files arriving weights into a 64-slot circular delay buffer indexed by
arrival step. Global sync tokens sent on both rings tell every core when all
packets of a step are delivered, so no central controller is needed.

## Structure (rtl/)

- `fp32_pkg`, `neuroring_pkg`: single-precision arithmetic and the shared types. The 64-bit packet is `{delay, dst, sync, weight}`.
- `neuron_pe`, `npu`: 8 lanes of exact-integration LIF (or Poisson) neurons that stream one word of 8 neurons per cycle. The spike FIFO holds a whole step, so the NPU never waits for the fetch. This avoids a deadlock.
- `synapse_list_fetch`: reads the index and the lists over AXI4 (256-bit bursts). It picks the ring direction and rewrites the delay as the absolute arrival step. After each neuron it sends local sync tokens, and after each step a global token.
- `spike_recorder`: writes a spike bitmap per step to HBM.
- `synapse_router`, `accumulator`, `syn_weight_packer`, `synapse_router_cu`: the router for each direction, with ring-first priority; 8 delay-buffer accumulators (72-bit words, 2 weights each); the packer that feeds the NPU.
- `neuroring_cu`, `neuroring_core`: the step sequencer and one full core.
- `neuroring_fpga` (top): the cores of one FPGA chained in a ring segment. Its ends connect to the inter-FPGA links.

The serial links, the HBM and the host software are vendor IP or software,
so they are not implemented. The testbenches model them behaviourally with
random stalls (`tb/aurora_link_model.sv`, `tb/hbm_model.sv`).

## Verification (tb/)

There is one self-checking testbench per block. There are also end-to-end
tests against a reference model kept in the testbench:

- `tb_neuroring_core`: 3 cores.
- `tb_neuroring_fpga`: 2 FPGAs × 2 cores.
- `tb_neuroring_full`: 2 FPGAs × 10 cores × 4096 neurons, at the default parameters.

Each end-to-end test counts every mechanism and fails if one never happens:
link traffic, stalls, tokens, refractory steps and Poisson spikes.
The three end-to-end benches share one body, generated from a single template.
