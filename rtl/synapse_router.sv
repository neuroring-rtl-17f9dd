// synapse_router: one direction of the SynapseRouter of a NeuroRing core.
//
// A core has two of these: the right router carries traffic toward higher
// core ids, the left router toward lower ones. Each merges two sources, the
// ring input from the neighbouring core and the local input from this core's
// synapse-list fetch, and gives the ring input strict priority so that
// traffic already on the ring keeps moving (as the paper prescribes).
// Per packet, by its sync field:
//   data           dst in this core's range [id*CAPACITY, (id+1)*CAPACITY)
//                  -> acc_out (to the accumulators), otherwise -> ring_out
//   global token   from the ring with another origin: counted (per step
//                  parity, weight[0]) and forwarded; back at its origin:
//                  dropped. From the local input: own token, forwarded,
//                  own_tok pulses.
//   local token    from the local input: consumed, lsync_ack pulses (tells
//                  the fetch that all packets of the current neuron have
//                  entered the router). Not forwarded (this design's choice).
// Both outputs are registers; a packet moves only when its output register
// is free or being emptied, so there is one cycle per hop.
module synapse_router
  import neuroring_pkg::*;
#(
  parameter int NUM_CORES = 20,
  parameter int CAPACITY  = 4096
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [DST_BITS-1:0] my_id,
  input  logic                ring_in_valid,
  output logic                ring_in_ready,
  input  syn_pkt_t            ring_in,
  input  logic                loc_in_valid,
  output logic                loc_in_ready,
  input  syn_pkt_t            loc_in,
  output logic                ring_out_valid,
  input  logic                ring_out_ready,
  output syn_pkt_t            ring_out,
  output logic                acc_out_valid,
  input  logic                acc_out_ready,
  output syn_pkt_t            acc_out,
  output logic                lsync_ack,
  output logic                own_tok,
  output logic [15:0]         tok_cnt [2],
  input  logic [1:0]          tok_clr,
  output logic                idle
);
  typedef enum logic [1:0] {D_RING, D_ACC, D_DROP} dest_e;

  logic     from_ring, sel_valid;
  syn_pkt_t sel;
  dest_e    dest;
  logic     ring_free, acc_free, go;
  logic [DST_BITS+1:0] base;

  assign base      = (DST_BITS+2)'(my_id) * (DST_BITS+2)'(CAPACITY);
  assign from_ring = ring_in_valid;
  assign sel_valid = ring_in_valid || loc_in_valid;
  assign sel       = from_ring ? ring_in : loc_in;

  always_comb begin
    dest = D_DROP;
    case (sel.sync)
      SYNC_NONE:
        dest = ((DST_BITS+2)'(sel.dst) >= base &&
                (DST_BITS+2)'(sel.dst) < base + (DST_BITS+2)'(CAPACITY)) ? D_ACC : D_RING;
      SYNC_GLOBAL:
        dest = (from_ring && sel.dst == my_id) ? D_DROP : D_RING;
      default: dest = D_DROP;
    endcase
  end

  assign ring_free = !ring_out_valid || ring_out_ready;
  assign acc_free  = !acc_out_valid || acc_out_ready;
  assign go = sel_valid && ((dest == D_RING) ? ring_free :
                            (dest == D_ACC)  ? acc_free  : 1'b1);
  assign ring_in_ready = go && from_ring;
  assign loc_in_ready  = go && !from_ring;
  assign idle = !ring_out_valid && !acc_out_valid && !sel_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ring_out_valid <= 1'b0;
      acc_out_valid  <= 1'b0;
      lsync_ack      <= 1'b0;
      own_tok        <= 1'b0;
      tok_cnt[0]     <= '0;
      tok_cnt[1]     <= '0;
    end else begin
      lsync_ack <= 1'b0;
      own_tok   <= 1'b0;
      if (ring_out_valid && ring_out_ready) ring_out_valid <= 1'b0;
      if (acc_out_valid && acc_out_ready)   acc_out_valid  <= 1'b0;
      for (int p = 0; p < 2; p++) if (tok_clr[p]) tok_cnt[p] <= '0;
      if (go) begin
        case (dest)
          D_RING: begin ring_out_valid <= 1'b1; ring_out <= sel; end
          D_ACC:  begin acc_out_valid  <= 1'b1; acc_out  <= sel; end
          default: ;
        endcase
        if (sel.sync == SYNC_LOCAL && !from_ring) lsync_ack <= 1'b1;
        if (sel.sync == SYNC_GLOBAL) begin
          if (!from_ring) own_tok <= 1'b1;
          else if (sel.dst != my_id) tok_cnt[sel.weight[0]] <= tok_cnt[sel.weight[0]] + 16'd1;
        end
      end
    end
  end
endmodule
