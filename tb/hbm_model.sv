// hbm_model: behavioural AXI4 slave standing in for one HBM channel in the
// testbenches (32-byte beats, INCR bursts). Memory is an associative array
// of 256-bit beats indexed by byte address / 32, filled and read by the
// testbench through the mem array. Ready and valid signals are withheld at
// random (STALL percent of cycles) to exercise backpressure. Not synthesizable.
module hbm_model
  import neuroring_pkg::*;
#(
  parameter int STALL = 30,
  parameter int SEED  = 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      ar_valid,
  output logic      ar_ready,
  input  axi_addr_t ar,
  output logic      r_valid,
  input  logic      r_ready,
  output axi_data_t r,
  input  logic      aw_valid,
  output logic      aw_ready,
  input  axi_addr_t aw,
  input  logic      w_valid,
  output logic      w_ready,
  input  axi_data_t w,
  output logic      b_valid,
  input  logic      b_ready
);
  logic [AXI_DW-1:0] mem [longint];
  axi_addr_t rq [$];
  axi_addr_t wq [$];
  int rbeat = 0, wbeat = 0, bpend = 0;
  int n_rbursts = 0, n_wbursts = 0, n_rbeats = 0, n_wbeats = 0;
  int unsigned rs = SEED;

  function automatic logic [AXI_DW-1:0] rd(input longint beat);
    return mem.exists(beat) ? mem[beat] : '0;
  endfunction

  function automatic bit go();
    rs = rs * 1103515245 + 12345;
    return (int'((rs >> 16) % 100) >= STALL);
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      ar_ready <= 0; r_valid <= 0; aw_ready <= 0; w_ready <= 0; b_valid <= 0;
    end else begin
      if (ar_valid && ar_ready) begin rq.push_back(ar); n_rbursts++; end
      if (aw_valid && aw_ready) begin wq.push_back(aw); n_wbursts++; end
      // read data
      if (r_valid && r_ready) begin
        n_rbeats++;
        if (rbeat == int'(rq[0].len)) begin rbeat = 0; void'(rq.pop_front()); end
        else rbeat++;
      end
      if (r_valid && !r_ready) begin
        // hold the beat until it is taken
      end else if (rq.size() > 0 && go()) begin
        r_valid <= 1;
        r.data  <= rd(longint'(rq[0].addr >> 5) + rbeat);
        r.last  <= (rbeat == int'(rq[0].len));
      end else r_valid <= 0;
      // write data
      if (w_valid && w_ready) begin
        n_wbeats++;
        mem[longint'(wq[0].addr >> 5) + wbeat] = w.data;
        if (wbeat == int'(wq[0].len)) begin
          if (!w.last) $error("hbm_model: WLAST missing");
          wbeat = 0; void'(wq.pop_front()); bpend++;
        end else begin
          if (w.last) $error("hbm_model: early WLAST");
          wbeat++;
        end
      end
      if (b_valid && b_ready) bpend--;
      b_valid  <= (bpend > 0);
      ar_ready <= go();
      aw_ready <= go();
      w_ready  <= (wq.size() > 0) && go();
    end
  end
endmodule
