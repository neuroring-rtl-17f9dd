// synapse_router_cu: the SynapseRouter compute unit of a NeuroRing core.
//
// Holds the left and right synapse_router, the LANES accumulators and the
// syn_weight_packer, as in the paper's core figure. Packets that a router
// delivers locally are steered to accumulator k = n / NPA (n = dst minus this
// core's first neuron, NPA = CAPACITY/LANES neurons per accumulator) through
// a small FIFO per router and accumulator, so the left and right routers can
// feed all accumulators in parallel. On rel_start every accumulator releases
// the slot of rel_step and the packer forms the NPU input stream.
// idle is high when no packet is anywhere in this unit.
// Ring port naming: left_in/right_out belong to the right-going ring,
// right_in/left_out to the left-going ring.
module synapse_router_cu
  import neuroring_pkg::*;
#(
  parameter int NUM_CORES = 20,
  parameter int CAPACITY  = 4096,
  parameter int SLOTS     = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [DST_BITS-1:0] my_id,
  input  logic                init,
  output logic                ready,
  // ring
  input  logic                left_in_valid,
  output logic                left_in_ready,
  input  syn_pkt_t            left_in,
  output logic                right_out_valid,
  input  logic                right_out_ready,
  output syn_pkt_t            right_out,
  input  logic                right_in_valid,
  output logic                right_in_ready,
  input  syn_pkt_t            right_in,
  output logic                left_out_valid,
  input  logic                left_out_ready,
  output syn_pkt_t            left_out,
  // local injection from the synapse-list fetch
  input  logic                loc_l_valid,
  output logic                loc_l_ready,
  input  syn_pkt_t            loc_l,
  input  logic                loc_r_valid,
  output logic                loc_r_ready,
  input  syn_pkt_t            loc_r,
  output logic                lsync_ack_l,
  output logic                lsync_ack_r,
  output logic                own_tok_l,
  output logic                own_tok_r,
  output logic [15:0]         tok_cnt_l [2],
  output logic [15:0]         tok_cnt_r [2],
  input  logic [1:0]          tok_clr,
  // release toward the NPU
  input  logic                rel_start,
  input  logic [7:0]          rel_step,
  output logic                w_valid,
  input  logic                w_ready,
  output logic [LANES*32-1:0] w_data,
  output logic                w_last,
  output logic                idle
);
  localparam int NPA = CAPACITY / LANES;

  // side 0 = left router, side 1 = right router
  logic     acc_valid [2];
  logic     acc_ready [2];
  syn_pkt_t acc_pkt   [2];
  logic [1:0] rt_idle;

  synapse_router #(.NUM_CORES(NUM_CORES), .CAPACITY(CAPACITY)) u_rt_l (
    .clk, .rst_n, .my_id,
    .ring_in_valid (right_in_valid), .ring_in_ready(right_in_ready), .ring_in(right_in),
    .loc_in_valid  (loc_l_valid),    .loc_in_ready (loc_l_ready),    .loc_in (loc_l),
    .ring_out_valid(left_out_valid), .ring_out_ready(left_out_ready), .ring_out(left_out),
    .acc_out_valid (acc_valid[0]),   .acc_out_ready(acc_ready[0]),   .acc_out(acc_pkt[0]),
    .lsync_ack(lsync_ack_l), .own_tok(own_tok_l), .tok_cnt(tok_cnt_l), .tok_clr,
    .idle(rt_idle[0])
  );

  synapse_router #(.NUM_CORES(NUM_CORES), .CAPACITY(CAPACITY)) u_rt_r (
    .clk, .rst_n, .my_id,
    .ring_in_valid (left_in_valid),   .ring_in_ready(left_in_ready),   .ring_in(left_in),
    .loc_in_valid  (loc_r_valid),     .loc_in_ready (loc_r_ready),     .loc_in (loc_r),
    .ring_out_valid(right_out_valid), .ring_out_ready(right_out_ready), .ring_out(right_out),
    .acc_out_valid (acc_valid[1]),    .acc_out_ready(acc_ready[1]),    .acc_out(acc_pkt[1]),
    .lsync_ack(lsync_ack_r), .own_tok(own_tok_r), .tok_cnt(tok_cnt_r), .tok_clr,
    .idle(rt_idle[1])
  );

  // steering into per-accumulator FIFOs
  logic [LANES-1:0] q_in_valid [2], q_in_ready [2], q_out_valid [2], q_out_ready [2];
  acc_req_t         q_out [2][LANES];
  acc_req_t         req   [2];
  logic [31:0]      k_sel [2];
  logic [LANES-1:0] q_empty [2];

  for (genvar s = 0; s < 2; s++) begin : g_side
    logic [31:0] n;
    assign n        = 32'(acc_pkt[s].dst) - 32'(my_id) * CAPACITY;
    assign k_sel[s] = n / NPA;
    assign req[s]   = '{nidx: 16'(n - k_sel[s] * NPA), step: acc_pkt[s].delay,
                        weight: acc_pkt[s].weight};
    assign acc_ready[s] = q_in_ready[s][k_sel[s][$clog2(LANES)-1:0]];
    for (genvar k = 0; k < LANES; k++) begin : g_q
      logic [2:0] cnt;
      assign q_in_valid[s][k] = acc_valid[s] && (k_sel[s] == k);
      assign q_empty[s][k]    = (cnt == '0);
      stream_fifo #(.T(acc_req_t), .DEPTH(4)) u_q (
        .clk, .rst_n,
        .in_valid (q_in_valid[s][k]), .in_ready (q_in_ready[s][k]), .in_data(req[s]),
        .out_valid(q_out_valid[s][k]), .out_ready(q_out_ready[s][k]), .out_data(q_out[s][k]),
        .count(cnt)
      );
    end
  end

  logic [LANES-1:0] acc_rdy, acc_idle, rel_valid, rel_ready;
  logic [31:0]      rel_data [LANES];

  for (genvar k = 0; k < LANES; k++) begin : g_acc
    accumulator #(.CAPACITY(CAPACITY), .SLOTS(SLOTS)) u_acc (
      .clk, .rst_n, .init, .ready(acc_rdy[k]),
      .in_l_valid(q_out_valid[0][k]), .in_l_ready(q_out_ready[0][k]), .in_l(q_out[0][k]),
      .in_r_valid(q_out_valid[1][k]), .in_r_ready(q_out_ready[1][k]), .in_r(q_out[1][k]),
      .rel_start, .rel_step,
      .rel_valid(rel_valid[k]), .rel_ready(rel_ready[k]), .rel_data(rel_data[k]),
      .idle(acc_idle[k])
    );
  end

  syn_weight_packer #(.CAPACITY(CAPACITY)) u_pack (
    .clk, .rst_n, .rel_valid, .rel_ready, .rel_data, .w_valid, .w_ready, .w_data, .w_last
  );

  assign ready = &acc_rdy;
  assign idle  = (&rt_idle) && (&acc_idle) && (&q_empty[0]) && (&q_empty[1]);
endmodule
