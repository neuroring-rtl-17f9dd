// neuron_pe: one processing lane of the Neuron Processing Unit.
//
// Each enabled cycle the lane takes one neuron's state and the summed
// synaptic input w released for this step, and returns the new state and a
// spike flag one cycle later (registered outputs, fully pipelined: one
// neuron per cycle).
//
// LIF mode follows the leaky integrate-and-fire model of the paper (membrane
// ODE, exponentially decaying synaptic current, threshold, reset and
// refractory clamp). The discretisation is this design's choice: the exact
// exponential propagators used by NEST's iaf_psc_exp, precomputed by the
// host, with v stored relative to E_L:
//   refractory (ref_cnt>0): v' = v_reset, ref_cnt' = ref_cnt-1
//   otherwise:              v' = v*p22 + i*p21 + c20
//   always:                 i' = i*p11 + w
//   if not refractory and v' > v_th: spike, v' = v_reset, ref_cnt' = ref_steps
// Poisson mode (the paper's Poisson generator) ignores the state and spikes
// when a 32-bit xorshift sample is below cfg.poisson_thresh
// (= rate*dt*2^32); the generator and its seed are this design's choice.
module neuron_pe
  import fp32_pkg::*;
  import neuroring_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic          clk,
  input  logic          rst_n,
  input  lif_cfg_t      cfg,
  input  logic          en,
  input  logic [31:0]   w_in,
  input  neuron_state_t st_in,
  output neuron_state_t st_out,
  output logic          spike
);
  logic [31:0]   rnd;

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    return y ^ (y << 5);
  endfunction
  neuron_state_t nxt;
  logic          nxt_spike;

  always_comb begin
    nxt       = st_in;
    nxt_spike = 1'b0;
    if (cfg.poisson) begin
      nxt_spike = (rnd < cfg.poisson_thresh);
    end else begin
      nxt.i_syn = fp_add(fp_mul(st_in.i_syn, cfg.p11), w_in);
      if (st_in.ref_cnt != '0) begin
        nxt.v       = cfg.v_reset;
        nxt.ref_cnt = st_in.ref_cnt - 16'd1;
      end else begin
        nxt.v = fp_add(fp_add(fp_mul(st_in.v, cfg.p22), fp_mul(st_in.i_syn, cfg.p21)), cfg.c20);
        if (fp_gt(nxt.v, cfg.v_th)) begin
          nxt_spike   = 1'b1;
          nxt.v       = cfg.v_reset;
          nxt.ref_cnt = cfg.ref_steps;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rnd   <= SEED;
      spike <= 1'b0;
    end else begin
      spike <= en && nxt_spike;
      if (en) begin
        st_out <= nxt;
        rnd    <= xorshift32(rnd);
      end
    end
  end
endmodule
