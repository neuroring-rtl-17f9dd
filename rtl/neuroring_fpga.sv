// neuroring_fpga: the cores of one FPGA, chained into the bidirectional ring.
//
// CORES_PER_FPGA cores sit side by side; core c's right_out feeds core c+1's
// left_in and core c+1's left_out feeds core c's right_in. With
// CLOSED_RING = 1 the two ends are joined inside the device (single-FPGA
// deployment, ring of CORES_PER_FPGA cores). With CLOSED_RING = 0 (default,
// the paper's main two-FPGA configuration of 20 cores) the ends are ports
// that go to the inter-FPGA serial-link kernels at the ring boundaries:
//   ring_l_*  the left end  (first core's left_in / left_out)
//   ring_r_*  the right end (last core's right_out / right_in)
// first_core sets the ring id of the first core; core c gets first_core+c.
// Each core has its own AXI4 master toward HBM (arrays indexed by core);
// start, cfg and done are per core as well (kernel arguments on the host).
// NUM_CORES is the number of cores in the whole ring, on all FPGAs.
module neuroring_fpga
  import neuroring_pkg::*;
#(
  parameter int NUM_CORES      = 20,
  parameter int CORES_PER_FPGA = 10,
  parameter int CAPACITY       = 4096,
  parameter int SLOTS          = 64,
  parameter bit CLOSED_RING    = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [DST_BITS-1:0] first_core,
  input  core_cfg_t           cfg      [CORES_PER_FPGA],
  input  logic                start    [CORES_PER_FPGA],
  output logic                done     [CORES_PER_FPGA],
  output logic [31:0]         step     [CORES_PER_FPGA],
  output logic                ar_valid [CORES_PER_FPGA],
  input  logic                ar_ready [CORES_PER_FPGA],
  output axi_addr_t           ar       [CORES_PER_FPGA],
  input  logic                r_valid  [CORES_PER_FPGA],
  output logic                r_ready  [CORES_PER_FPGA],
  input  axi_data_t           r        [CORES_PER_FPGA],
  output logic                aw_valid [CORES_PER_FPGA],
  input  logic                aw_ready [CORES_PER_FPGA],
  output axi_addr_t           aw       [CORES_PER_FPGA],
  output logic                w_valid  [CORES_PER_FPGA],
  input  logic                w_ready  [CORES_PER_FPGA],
  output axi_data_t           w        [CORES_PER_FPGA],
  input  logic                b_valid  [CORES_PER_FPGA],
  output logic                b_ready  [CORES_PER_FPGA],
  // ring ends toward the serial-link kernels (unused when CLOSED_RING)
  input  logic                ring_l_in_valid,
  output logic                ring_l_in_ready,
  input  syn_pkt_t            ring_l_in,
  output logic                ring_l_out_valid,
  input  logic                ring_l_out_ready,
  output syn_pkt_t            ring_l_out,
  input  logic                ring_r_in_valid,
  output logic                ring_r_in_ready,
  input  syn_pkt_t            ring_r_in,
  output logic                ring_r_out_valid,
  input  logic                ring_r_out_ready,
  output syn_pkt_t            ring_r_out
);
  localparam int C = CORES_PER_FPGA;

  // ro[c]: core c right_out, lo[c]: core c left_out
  logic     ro_valid [C], ro_ready [C], lo_valid [C], lo_ready [C];
  syn_pkt_t ro [C], lo [C];
  logic     li_valid [C], li_ready [C], ri_valid [C], ri_ready [C];
  syn_pkt_t li [C], ri [C];

  for (genvar c = 0; c < C; c++) begin : g_core
    neuroring_core #(.NUM_CORES(NUM_CORES), .CAPACITY(CAPACITY), .SLOTS(SLOTS)) u_core (
      .clk, .rst_n, .cfg(cfg[c]), .my_id(first_core + DST_BITS'(c)),
      .start(start[c]), .done(done[c]), .step(step[c]),
      .ar_valid(ar_valid[c]), .ar_ready(ar_ready[c]), .ar(ar[c]),
      .r_valid(r_valid[c]), .r_ready(r_ready[c]), .r(r[c]),
      .aw_valid(aw_valid[c]), .aw_ready(aw_ready[c]), .aw(aw[c]),
      .w_valid(w_valid[c]), .w_ready(w_ready[c]), .w(w[c]),
      .b_valid(b_valid[c]), .b_ready(b_ready[c]),
      .left_in_valid(li_valid[c]), .left_in_ready(li_ready[c]), .left_in(li[c]),
      .right_out_valid(ro_valid[c]), .right_out_ready(ro_ready[c]), .right_out(ro[c]),
      .right_in_valid(ri_valid[c]), .right_in_ready(ri_ready[c]), .right_in(ri[c]),
      .left_out_valid(lo_valid[c]), .left_out_ready(lo_ready[c]), .left_out(lo[c])
    );
    if (c > 0) begin : g_link
      assign li_valid[c]   = ro_valid[c-1];
      assign li[c]         = ro[c-1];
      assign ro_ready[c-1] = li_ready[c];
      assign ri_valid[c-1] = lo_valid[c];
      assign ri[c-1]       = lo[c];
      assign lo_ready[c]   = ri_ready[c-1];
    end
  end

  if (CLOSED_RING) begin : g_closed
    assign li_valid[0]   = ro_valid[C-1];
    assign li[0]         = ro[C-1];
    assign ro_ready[C-1] = li_ready[0];
    assign ri_valid[C-1] = lo_valid[0];
    assign ri[C-1]       = lo[0];
    assign lo_ready[0]   = ri_ready[C-1];
    assign ring_l_in_ready  = 1'b0;
    assign ring_l_out_valid = 1'b0;
    assign ring_l_out       = '0;
    assign ring_r_in_ready  = 1'b0;
    assign ring_r_out_valid = 1'b0;
    assign ring_r_out       = '0;
  end else begin : g_open
    assign li_valid[0]      = ring_l_in_valid;
    assign li[0]            = ring_l_in;
    assign ring_l_in_ready  = li_ready[0];
    assign ring_l_out_valid = lo_valid[0];
    assign ring_l_out       = lo[0];
    assign lo_ready[0]      = ring_l_out_ready;
    assign ring_r_out_valid = ro_valid[C-1];
    assign ring_r_out       = ro[C-1];
    assign ro_ready[C-1]    = ring_r_out_ready;
    assign ri_valid[C-1]    = ring_r_in_valid;
    assign ri[C-1]          = ring_r_in;
    assign ring_r_in_ready  = ri_ready[C-1];
  end
endmodule
