// npu: Neuron Processing Unit, the neuron-update stage of a NeuroRing core.
//
// Every step the NPU receives CAPACITY/LANES words of LANES packed 32-bit
// weights (256 bits for 8 lanes), one word per neuron group. Lane k of word j
// belongs to neuron k*W + j (W = CAPACITY/LANES): the neuron-state memory is
// split into LANES banks, one per lane, so that all lanes read and write in
// the same cycle. The paper gives the 8 lanes, the 256-bit packed stream and
// the partitioning by 8; block (rather than cyclic) partitioning is this
// design's choice, made to match the address ranges of the 8 accumulators.
//
// Pipeline (one word per cycle when not stalled):
//   A  accept a weight word, read the LANES state banks
//   B  neuron_pe lanes compute (registered inside the lanes)
//   C  write the new states back, push {spike mask, word, last} to the
//      output FIFO; step_done pulses after the last word of a step.
// A word is accepted only if the output FIFO can take every word in flight,
// so backpressure from spk_ready never loses a result. The FIFO holds a
// whole step (OUT_DEPTH = W by default): the NPU, and with it the release
// of the accumulators, must never wait for the synapse-list fetch, because
// the fetch may itself wait for packets that need a free accumulator
// (a smaller FIFO can deadlock the core).
// init (pulse) writes v_init, i=0, ref=0 to every neuron (W cycles);
// ready is high once that is finished.
module npu
  import neuroring_pkg::*;
#(
  parameter int CAPACITY = 4096,
  parameter int OUT_DEPTH = CAPACITY / LANES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  lif_cfg_t            cfg,
  input  logic                init,
  output logic                ready,
  input  logic                w_valid,
  output logic                w_ready,
  input  logic [LANES*32-1:0] w_data,
  output logic                spk_valid,
  input  logic                spk_ready,
  output spk_mask_t           spk,
  output logic                step_done
);
  localparam int W  = CAPACITY / LANES;
  localparam int JW = (W > 1) ? $clog2(W) : 1;

  logic          initing;
  logic [JW-1:0] init_j, j_a;
  logic          v_b, v_c;
  logic [JW-1:0] j_b, j_c;
  logic [LANES*32-1:0] w_b;
  neuron_state_t st_rd  [LANES];
  neuron_state_t st_new [LANES];
  logic [LANES-1:0] spike_c;

  // output FIFO
  logic fifo_in_ready;
  logic [$clog2(OUT_DEPTH):0] fifo_cnt;
  spk_mask_t fifo_in;

  assert property (@(posedge clk) disable iff (!rst_n) v_c |-> fifo_in_ready)
    else $error("npu: output FIFO overflow");

  assign w_ready = ready && !initing &&
                   (32'(fifo_cnt) + 32'(v_b) + 32'(v_c) < OUT_DEPTH);
  wire accept = w_valid && w_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      initing   <= 1'b0;
      ready     <= 1'b0;
      init_j    <= '0;
      j_a       <= '0;
      v_b       <= 1'b0;
      v_c       <= 1'b0;
      step_done <= 1'b0;
    end else begin
      step_done <= 1'b0;
      if (init) begin
        initing <= 1'b1;
        ready   <= 1'b0;
        init_j  <= '0;
        j_a     <= '0;
      end else if (initing) begin
        init_j <= init_j + 1'b1;
        if (32'(init_j) == W-1) begin
          initing <= 1'b0;
          ready   <= 1'b1;
        end
      end
      v_b <= accept;
      if (accept) begin
        j_b <= j_a;
        w_b <= w_data;
        j_a <= (32'(j_a) == W-1) ? '0 : j_a + 1'b1;
      end
      v_c <= v_b;
      j_c <= j_b;
      if (v_c && 32'(j_c) == W-1) step_done <= 1'b1;
    end
  end

  for (genvar k = 0; k < LANES; k++) begin : g_lane
    neuron_state_t bank [W];

    always_ff @(posedge clk) begin
      if (initing) bank[init_j] <= '{v: cfg.v_init, i_syn: '0, ref_cnt: '0};
      else if (v_c) bank[j_c] <= st_new[k];
      if (accept) st_rd[k] <= bank[j_a];
    end

    neuron_pe #(.SEED(32'h9E37_79B9 * (k + 1))) u_pe (
      .clk, .rst_n, .cfg,
      .en    (v_b),
      .w_in  (w_b[k*32 +: 32]),
      .st_in (st_rd[k]),
      .st_out(st_new[k]),
      .spike (spike_c[k])
    );
  end

  assign fifo_in = '{mask: spike_c, word: 16'(j_c), last: (32'(j_c) == W-1)};

  stream_fifo #(.T(spk_mask_t), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n,
    .in_valid (v_c), .in_ready (fifo_in_ready), .in_data (fifo_in),
    .out_valid(spk_valid), .out_ready(spk_ready), .out_data(spk),
    .count    (fifo_cnt)
  );
endmodule
