// aurora_link_model: behavioural stand-in for one direction of the
// inter-FPGA serial link (the vendor Aurora kernel and QSFP cable) that
// joins the ring ends of two FPGAs. Packets pass unchanged and in order;
// on STALL percent of cycles the link neither takes nor delivers a packet,
// which exercises ring backpressure. Not synthesizable.
module aurora_link_model
  import neuroring_pkg::*;
#(
  parameter int STALL = 25
) (
  input  logic     clk,
  input  logic     in_valid,
  output logic     in_ready,
  input  syn_pkt_t in_pkt,
  output logic     out_valid,
  input  logic     out_ready,
  output syn_pkt_t out_pkt
);
  logic en = 1'b1;
  int   n_pkts = 0, n_stall = 0;
  always @(posedge clk) begin
    if (in_valid && in_ready) n_pkts++;
    if (in_valid && !in_ready) n_stall++;
    en <= (int'($urandom % 100) >= STALL);
  end
  assign out_valid = in_valid && en;
  assign in_ready  = out_ready && en;
  assign out_pkt   = in_pkt;
endmodule
