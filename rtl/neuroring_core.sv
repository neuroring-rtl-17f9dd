// neuroring_core: one NeuroRing core, the replicated unit of the ring.
//
// Pairs the NeuroRing compute unit (NPU, synapse-list fetch, spike
// recorder, step sequencer) with the SynapseRouter compute unit (left and
// right routers, eight accumulators, weight packer), as in the paper. The
// core talks to HBM through one AXI4 master (reads: synapse lists, writes:
// spike bitmaps) and to its neighbours through four 64-bit packet streams:
//   left_in  -> (right-going ring) -> right_out
//   right_in -> (left-going ring)  -> left_out
// my_id is the core's ring position, a run-time input so that the same
// design serves every position (the paper reuses one bitstream on every
// board). Neurons my_id*CAPACITY .. my_id*CAPACITY+CAPACITY-1 live here.
module neuroring_core
  import neuroring_pkg::*;
#(
  parameter int NUM_CORES = 20,
  parameter int CAPACITY  = 4096,
  parameter int SLOTS     = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  core_cfg_t           cfg,
  input  logic [DST_BITS-1:0] my_id,
  input  logic                start,
  output logic                done,
  output logic [31:0]         step,
  output logic                ar_valid,
  input  logic                ar_ready,
  output axi_addr_t           ar,
  input  logic                r_valid,
  output logic                r_ready,
  input  axi_data_t           r,
  output logic                aw_valid,
  input  logic                aw_ready,
  output axi_addr_t           aw,
  output logic                w_valid,
  input  logic                w_ready,
  output axi_data_t           w,
  input  logic                b_valid,
  output logic                b_ready,
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
  output syn_pkt_t            left_out
);
  logic        loc_l_valid, loc_l_ready, loc_r_valid, loc_r_ready;
  syn_pkt_t    loc_l, loc_r;
  logic        lsync_ack_l, lsync_ack_r, own_tok_l, own_tok_r;
  logic [15:0] tok_cnt_l [2];
  logic [15:0] tok_cnt_r [2];
  logic [1:0]  tok_clr;
  logic        rcu_init, rcu_ready, rcu_idle, rel_start;
  logic [7:0]  rel_step;
  logic        wt_valid, wt_ready, wt_last;
  logic [LANES*32-1:0] wt_data;

  neuroring_cu #(.NUM_CORES(NUM_CORES), .CAPACITY(CAPACITY), .SLOTS(SLOTS)) u_nr (
    .clk, .rst_n, .cfg, .my_id, .start, .done, .step,
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready,
    .loc_l_valid, .loc_l_ready, .loc_l, .loc_r_valid, .loc_r_ready, .loc_r,
    .lsync_ack_l, .lsync_ack_r, .own_tok_l, .own_tok_r, .tok_cnt_l, .tok_cnt_r, .tok_clr,
    .rcu_init, .rcu_ready, .rcu_idle, .rel_start, .rel_step,
    .wt_valid, .wt_ready, .wt_data
  );

  synapse_router_cu #(.NUM_CORES(NUM_CORES), .CAPACITY(CAPACITY), .SLOTS(SLOTS)) u_sr (
    .clk, .rst_n, .my_id, .init(rcu_init), .ready(rcu_ready),
    .left_in_valid, .left_in_ready, .left_in,
    .right_out_valid, .right_out_ready, .right_out,
    .right_in_valid, .right_in_ready, .right_in,
    .left_out_valid, .left_out_ready, .left_out,
    .loc_l_valid, .loc_l_ready, .loc_l, .loc_r_valid, .loc_r_ready, .loc_r,
    .lsync_ack_l, .lsync_ack_r, .own_tok_l, .own_tok_r, .tok_cnt_l, .tok_cnt_r, .tok_clr,
    .rel_start, .rel_step,
    .w_valid(wt_valid), .w_ready(wt_ready), .w_data(wt_data), .w_last(wt_last),
    .idle(rcu_idle)
  );
endmodule
