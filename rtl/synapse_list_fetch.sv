// synapse_list_fetch: turns the NPU's spikes into synapse packets on the ring.
//
// For each spiking neuron n (taken from the NPU spike masks, lowest lane
// first) the outgoing synapse list is read from HBM over the AXI4 read
// channels with 256-bit bursts, four 64-bit packets per beat, as in the
// paper. Every packet is sent to the left or the right router, whichever
// reaches the destination core in fewer hops (a tie goes right); the
// destination core is dst / CAPACITY. The delay field is replaced by the
// absolute arrival step (step + delay) mod 256, so that a receiving core can
// file the weight into its delay buffer without knowing the sender's step.
// After a neuron's list a local sync token goes to both routers and the
// fetch waits for both acknowledgements before the next neuron; after the
// last NPU word of a step a global sync token (origin = this core, weight =
// step) goes to both routers and emit_done pulses.
//
// HBM layout of the synapse region (this design's choice; the paper only
// says the region holds per-neuron synapse lists): at syn_base an index of
// one 64-bit entry per local neuron, four per beat, entry = {offset[31:0],
// count[31:0]} where offset is in 32-byte beats from syn_base; each list is
// count packets packed four per beat from that offset (bursts of at most
// 256 beats). The paper's sorting of each list by distance is done when the
// lists are built and needs no hardware.
module synapse_list_fetch
  import neuroring_pkg::*;
#(
  parameter int NUM_CORES = 20,
  parameter int CAPACITY  = 4096,
  parameter int SLOTS     = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [DST_BITS-1:0] my_id,
  input  logic [AXI_AW-1:0]   syn_base,
  input  logic [31:0]         step,
  input  logic                spk_valid,
  output logic                spk_ready,
  input  spk_mask_t           spk,
  output logic                ar_valid,
  input  logic                ar_ready,
  output axi_addr_t           ar,
  input  logic                r_valid,
  output logic                r_ready,
  input  axi_data_t           r,
  output logic                left_valid,
  input  logic                left_ready,
  output syn_pkt_t            left,
  output logic                right_valid,
  input  logic                right_ready,
  output syn_pkt_t            right,
  input  logic                lsync_ack_l,
  input  logic                lsync_ack_r,
  output logic                emit_done,
  output logic                busy
);
  localparam int W = CAPACITY / LANES;

  typedef enum logic [2:0] {S_IDLE, S_PICK, S_IAR, S_IR, S_LAR, S_LR, S_LSYNC, S_GTOK} state_e;
  state_e state;

  logic [LANES-1:0] mask_q;
  logic [15:0]      word_q;
  logic             last_q;
  logic [31:0]      n_q;        // local neuron index
  logic [31:0]      rem;        // packets still to send
  logic [31:0]      beat_addr;  // next beat offset
  logic [AXI_DW-1:0] buf_q;
  logic             buf_full, buf_last;
  logic [1:0]       slot;
  logic             sent_l, sent_r, ack_l, ack_r;

  // lowest set lane of the mask
  logic [$clog2(LANES)-1:0] lane;
  always_comb begin
    lane = '0;
    for (int k = LANES-1; k >= 0; k--) if (mask_q[k]) lane = k[$clog2(LANES)-1:0];
  end

  // routing of the packet in the current buffer slot
  syn_pkt_t pkt, pkt_out;
  logic [31:0] dcore, dist_r, dist_l;
  logic go_right;
  assign pkt      = syn_pkt_t'(buf_q[slot*PKT_BITS +: PKT_BITS]);
  assign dcore    = 32'(pkt.dst) / CAPACITY;
  assign dist_r   = (dcore + NUM_CORES - 32'(my_id)) % NUM_CORES;
  assign dist_l   = (32'(my_id) + NUM_CORES - dcore) % NUM_CORES;
  assign go_right = (dist_r <= dist_l);
  always_comb begin
    pkt_out       = pkt;
    pkt_out.delay = pkt.delay + step[7:0];
  end

  wire free_l = !left_valid || left_ready;
  wire free_r = !right_valid || right_ready;
  wire can_send = go_right ? free_r : free_l;

  wire [31:0] beats_left = (rem + 32'd3) >> 2;
  wire [31:0] burst      = (beats_left > 32'd256) ? 32'd256 : beats_left;

  assign spk_ready = (state == S_IDLE);
  assign ar_valid  = (state == S_IAR) || (state == S_LAR);
  assign ar.addr   = syn_base + ((state == S_IAR) ? AXI_AW'(n_q >> 2) : AXI_AW'(beat_addr)) * 64'd32;
  assign ar.len    = (state == S_IAR) ? 8'd0 : 8'(burst - 32'd1);
  assign r_ready   = (state == S_IR) || (state == S_LR && !buf_full);
  assign busy      = (state != S_IDLE) || left_valid || right_valid;

  syn_pkt_t tok;
  always_comb begin
    tok        = '0;
    tok.dst    = my_id;
    tok.sync   = (state == S_GTOK) ? SYNC_GLOBAL : SYNC_LOCAL;
    tok.weight = step;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_LR && buf_full && rem != 0) |-> pkt.delay < DELAY_BITS'(SLOTS) && pkt.delay != 0)
    else $error("synapse_list_fetch: delay outside 1..SLOTS-1");

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      left_valid  <= 1'b0;
      right_valid <= 1'b0;
      emit_done   <= 1'b0;
      buf_full    <= 1'b0;
    end else begin
      emit_done <= 1'b0;
      if (left_valid && left_ready)   left_valid  <= 1'b0;
      if (right_valid && right_ready) right_valid <= 1'b0;
      if (lsync_ack_l) ack_l <= 1'b1;
      if (lsync_ack_r) ack_r <= 1'b1;
      case (state)
        S_IDLE: if (spk_valid) begin
          mask_q <= spk.mask;
          word_q <= spk.word;
          last_q <= spk.last;
          state  <= S_PICK;
        end
        S_PICK: begin
          if (mask_q == '0) begin
            state  <= last_q ? S_GTOK : S_IDLE;
            sent_l <= 1'b0;
            sent_r <= 1'b0;
          end else begin
            n_q            <= 32'(lane) * W + 32'(word_q);
            mask_q[lane]   <= 1'b0;
            state          <= S_IAR;
          end
        end
        S_IAR: if (ar_ready) state <= S_IR;
        S_IR: if (r_valid) begin
          rem       <= r.data[n_q[1:0]*64 +: 32];
          beat_addr <= r.data[n_q[1:0]*64 + 32 +: 32];
          sent_l    <= 1'b0;
          sent_r    <= 1'b0;
          ack_l     <= 1'b0;
          ack_r     <= 1'b0;
          state     <= (r.data[n_q[1:0]*64 +: 32] == 32'd0) ? S_PICK : S_LAR;
        end
        S_LAR: if (ar_ready) begin
          beat_addr <= beat_addr + burst;
          state     <= S_LR;
        end
        S_LR: begin
          if (!buf_full) begin
            if (r_valid) begin
              buf_q    <= r.data;
              buf_last <= r.last;
              buf_full <= 1'b1;
              slot     <= '0;
            end
          end else if (can_send) begin
            if (go_right) begin right_valid <= 1'b1; right <= pkt_out; end
            else          begin left_valid  <= 1'b1; left  <= pkt_out; end
            rem  <= rem - 32'd1;
            slot <= slot + 2'd1;
            if (slot == 2'd3 || rem == 32'd1) begin
              buf_full <= 1'b0;
              if (buf_last) state <= (rem == 32'd1) ? S_LSYNC : S_LAR;
            end
          end
        end
        S_LSYNC: begin
          if (!sent_l && free_l) begin left_valid  <= 1'b1; left  <= tok; sent_l <= 1'b1; end
          if (!sent_r && free_r) begin right_valid <= 1'b1; right <= tok; sent_r <= 1'b1; end
          if (sent_l && sent_r && (ack_l || lsync_ack_l) && (ack_r || lsync_ack_r)) state <= S_PICK;
        end
        S_GTOK: begin
          if (!sent_l && free_l) begin left_valid  <= 1'b1; left  <= tok; sent_l <= 1'b1; end
          if (!sent_r && free_r) begin right_valid <= 1'b1; right <= tok; sent_r <= 1'b1; end
          if (sent_l && sent_r) begin
            emit_done <= 1'b1;
            state     <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
