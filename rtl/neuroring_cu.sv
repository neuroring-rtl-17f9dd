// neuroring_cu: the NeuroRing compute unit of a core.
//
// Holds the NPU, the synapse-list fetch and the spike recorder (paper's core
// figure) and the step sequencer that ties a core into the ring. The NPU's
// spike masks are copied to both the fetch and the recorder through two
// FIFOs. Sequence of one run (start pulse, cfg.num_steps steps):
//   INIT  clear the neuron state (NPU) and the delay buffers (accumulators)
//   REL   accumulators release the slot of step t; the NPU updates all
//         neurons with it, the fetch sends the synapse packets of every spike
//         and then the global tokens, the recorder writes the step's bitmap
//   WAIT  until the NPU, fetch, recorder and both own tokens are done, this
//         core has counted a global token of step t from every other core on
//         both rings, and the SynapseRouter unit is empty; then t <= t+1.
// Only then is the next slot released. A token of step t on a ring arrives
// behind every packet its origin sent on that ring during step t, so at that
// point every weight for step t+1 has been accumulated. The paper gives the
// order of these events; the exact conditions are this design's.
// done stays high after the last step until the next start.
module neuroring_cu
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
  // HBM (AXI4 master, read channels: fetch, write channels: recorder)
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
  // to / from the SynapseRouter unit
  output logic                loc_l_valid,
  input  logic                loc_l_ready,
  output syn_pkt_t            loc_l,
  output logic                loc_r_valid,
  input  logic                loc_r_ready,
  output syn_pkt_t            loc_r,
  input  logic                lsync_ack_l,
  input  logic                lsync_ack_r,
  input  logic                own_tok_l,
  input  logic                own_tok_r,
  input  logic [15:0]         tok_cnt_l [2],
  input  logic [15:0]         tok_cnt_r [2],
  output logic [1:0]          tok_clr,
  output logic                rcu_init,
  input  logic                rcu_ready,
  input  logic                rcu_idle,
  output logic                rel_start,
  output logic [7:0]          rel_step,
  input  logic                wt_valid,
  output logic                wt_ready,
  input  logic [LANES*32-1:0] wt_data
);
  typedef enum logic [2:0] {S_IDLE, S_INIT0, S_INIT, S_REL, S_RUN, S_WAIT, S_DONE} state_e;
  state_e state;

  // NPU and spike fork
  logic      npu_ready, npu_done, spk_valid, spk_ready;
  spk_mask_t spk;
  logic      f_in_rdy, r_in_rdy, f_valid, f_ready, rc_valid, rc_ready;
  spk_mask_t f_spk, rc_spk;

  npu #(.CAPACITY(CAPACITY)) u_npu (
    .clk, .rst_n, .cfg(cfg.lif), .init(rcu_init), .ready(npu_ready),
    .w_valid(wt_valid), .w_ready(wt_ready), .w_data(wt_data),
    .spk_valid, .spk_ready, .spk, .step_done(npu_done)
  );

  assign spk_ready = f_in_rdy && r_in_rdy;

  stream_fifo #(.T(spk_mask_t), .DEPTH(4)) u_fq (
    .clk, .rst_n, .in_valid(spk_valid && spk_ready), .in_ready(f_in_rdy), .in_data(spk),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_spk), .count()
  );
  stream_fifo #(.T(spk_mask_t), .DEPTH(4)) u_rq (
    .clk, .rst_n, .in_valid(spk_valid && spk_ready), .in_ready(r_in_rdy), .in_data(spk),
    .out_valid(rc_valid), .out_ready(rc_ready), .out_data(rc_spk), .count()
  );

  logic emit_done, fetch_busy, rec_done, rec_busy;

  synapse_list_fetch #(.NUM_CORES(NUM_CORES), .CAPACITY(CAPACITY), .SLOTS(SLOTS)) u_fetch (
    .clk, .rst_n, .my_id, .syn_base(cfg.syn_base), .step,
    .spk_valid(f_valid), .spk_ready(f_ready), .spk(f_spk),
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .left_valid(loc_l_valid), .left_ready(loc_l_ready), .left(loc_l),
    .right_valid(loc_r_valid), .right_ready(loc_r_ready), .right(loc_r),
    .lsync_ack_l, .lsync_ack_r, .emit_done, .busy(fetch_busy)
  );

  spike_recorder #(.CAPACITY(CAPACITY)) u_rec (
    .clk, .rst_n, .rec_base(cfg.rec_base), .step,
    .spk_valid(rc_valid), .spk_ready(rc_ready), .spk(rc_spk),
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready,
    .done(rec_done), .busy(rec_busy)
  );

  // step sequencer
  logic f_npu, f_emit, f_rec, f_tl, f_tr;
  wire  par = step[0];
  wire  all_tokens = (32'(tok_cnt_l[par]) == NUM_CORES - 1) &&
                     (32'(tok_cnt_r[par]) == NUM_CORES - 1);

  assign rel_step = step[7:0];
  assign done     = (state == S_DONE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      step      <= '0;
      rcu_init  <= 1'b0;
      rel_start <= 1'b0;
      tok_clr   <= '0;
    end else begin
      rcu_init  <= 1'b0;
      rel_start <= 1'b0;
      tok_clr   <= '0;
      if (npu_done)  f_npu  <= 1'b1;
      if (emit_done) f_emit <= 1'b1;
      if (rec_done)  f_rec  <= 1'b1;
      if (own_tok_l) f_tl   <= 1'b1;
      if (own_tok_r) f_tr   <= 1'b1;
      case (state)
        S_IDLE, S_DONE: if (start) begin
          rcu_init <= 1'b1;
          step     <= '0;
          state    <= S_INIT0;
        end
        S_INIT0: state <= S_INIT;
        S_INIT: if (npu_ready && rcu_ready) state <= (cfg.num_steps == 0) ? S_DONE : S_REL;
        S_REL: begin
          rel_start <= 1'b1;
          {f_npu, f_emit, f_rec, f_tl, f_tr} <= '0;
          state <= S_RUN;
        end
        S_RUN: if (f_npu && f_emit && f_rec && f_tl && f_tr) state <= S_WAIT;
        S_WAIT: if (all_tokens && rcu_idle && !fetch_busy && !rec_busy) begin
          tok_clr[par] <= 1'b1;
          step         <= step + 32'd1;
          state        <= (step + 32'd1 == cfg.num_steps) ? S_DONE : S_REL;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
