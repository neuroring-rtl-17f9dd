// tb_synapse_router: one router of core 1 in a 4-core ring (16 neurons per
// core). Random data packets, global tokens and local tokens are offered on
// the ring and local inputs while both outputs see random backpressure. A
// scoreboard built from the accepted inputs checks that every packet leaves
// on the right output in order (own range -> accumulators, else -> ring),
// that tokens from other cores are counted per step parity and forwarded,
// that this core's token is dropped when it returns, that local tokens are
// acknowledged and not forwarded, and that the ring input always wins.
module tb_synapse_router;
  import neuroring_pkg::*;

  localparam int N = 4, CAP = 16, ME = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DST_BITS-1:0] my_id;
  logic ring_in_valid, ring_in_ready, loc_in_valid, loc_in_ready;
  logic ring_out_valid, ring_out_ready, acc_out_valid, acc_out_ready;
  syn_pkt_t ring_in, loc_in, ring_out, acc_out;
  logic lsync_ack, own_tok, idle;
  logic [15:0] tok_cnt [2];
  logic [1:0] tok_clr;
  int checks = 0, failures = 0;

  synapse_router #(.NUM_CORES(N), .CAPACITY(CAP)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic c);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic syn_pkt_t rand_pkt(input bit from_ring);
    syn_pkt_t p;
    int r;
    p = '0;
    p.weight = $urandom;
    p.delay  = 8'($urandom);
    r = $urandom % 10;
    if (r == 0) begin
      p.sync = SYNC_GLOBAL;
      p.dst  = from_ring ? DST_BITS'($urandom % N) : DST_BITS'(ME);
    end else if (r == 1 && !from_ring) begin
      p.sync = SYNC_LOCAL;
      p.dst  = DST_BITS'(ME);
    end else begin
      p.sync = SYNC_NONE;
      p.dst  = DST_BITS'($urandom % (N * CAP));
    end
    return p;
  endfunction

  syn_pkt_t q_ring [$], q_acc [$];
  int exp_cnt [2] = '{0, 0};
  int n_acks = 0, exp_acks = 0, n_own = 0, exp_own = 0, n_drop = 0, prio_viol = 0;
  int n_ring_acc = 0, n_ring_fwd = 0, n_loc = 0;
  bit stop = 0;

  // sources and sinks change their signals 1 time unit after each edge
  initial begin
    my_id = ME; ring_in_valid = 0; loc_in_valid = 0; ring_out_ready = 0; acc_out_ready = 0;
    tok_clr = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (!stop) begin
      @(posedge clk); #1;
      if (!ring_in_valid || ring_in_ready_q) begin
        ring_in_valid = ($urandom % 3 != 0);
        ring_in = rand_pkt(1);
      end
      if (!loc_in_valid || loc_in_ready_q) begin
        loc_in_valid = ($urandom % 2 == 0);
        loc_in = rand_pkt(0);
      end
      ring_out_ready = ($urandom % 4 != 0);
      acc_out_ready  = ($urandom % 4 != 0);
    end
    ring_in_valid = 0; loc_in_valid = 0; ring_out_ready = 1; acc_out_ready = 1;
  end

  logic ring_in_ready_q = 0, loc_in_ready_q = 0;
  // scoreboard: sample just before each rising edge
  always @(negedge clk) if (rst_n) begin
    ring_in_ready_q <= ring_in_valid && ring_in_ready;
    loc_in_ready_q  <= loc_in_valid && loc_in_ready;
    if (loc_in_valid && loc_in_ready && ring_in_valid) prio_viol++;
    if (ring_in_valid && ring_in_ready) begin
      if (ring_in.sync == SYNC_NONE) begin
        if (ring_in.dst >= ME*CAP && ring_in.dst < (ME+1)*CAP) begin q_acc.push_back(ring_in); n_ring_acc++; end
        else begin q_ring.push_back(ring_in); n_ring_fwd++; end
      end else if (ring_in.sync == SYNC_GLOBAL) begin
        if (ring_in.dst == ME) n_drop++;
        else begin q_ring.push_back(ring_in); exp_cnt[ring_in.weight[0]]++; end
      end
    end
    if (loc_in_valid && loc_in_ready) begin
      n_loc++;
      if (loc_in.sync == SYNC_NONE) begin
        if (loc_in.dst >= ME*CAP && loc_in.dst < (ME+1)*CAP) q_acc.push_back(loc_in);
        else q_ring.push_back(loc_in);
      end else if (loc_in.sync == SYNC_GLOBAL) begin q_ring.push_back(loc_in); exp_own++; end
      else exp_acks++;
    end
    if (ring_out_valid && ring_out_ready) begin
      chk("ring_out expected", q_ring.size() > 0);
      if (q_ring.size() > 0) chk("ring_out data", ring_out == q_ring.pop_front());
    end
    if (acc_out_valid && acc_out_ready) begin
      chk("acc_out expected", q_acc.size() > 0);
      if (q_acc.size() > 0) chk("acc_out data", acc_out == q_acc.pop_front());
    end
  end
  always @(posedge clk) begin
    if (lsync_ack) n_acks++;
    if (own_tok) n_own++;
  end

  initial begin
    wait (rst_n);
    repeat (3000) @(posedge clk);
    stop = 1;
    repeat (20) @(posedge clk);
    chk("all ring packets out", q_ring.size() == 0);
    chk("all acc packets out", q_acc.size() == 0);
    chk("token count parity 0", int'(tok_cnt[0]) == exp_cnt[0]);
    chk("token count parity 1", int'(tok_cnt[1]) == exp_cnt[1]);
    chk("local acks", n_acks == exp_acks && exp_acks > 0);
    chk("own tokens", n_own == exp_own && exp_own > 0);
    chk("returned tokens dropped", n_drop > 0);
    chk("ring priority", prio_viol == 0);
    chk("idle at end", idle);
    #1 tok_clr = 2'b01; @(posedge clk); #1 tok_clr = 0; @(posedge clk);
    chk("token clear", tok_cnt[0] == 0 && int'(tok_cnt[1]) == exp_cnt[1]);
    $display("ring->acc %0d ring->ring %0d local %0d tokens %0d/%0d acks %0d",
             n_ring_acc, n_ring_fwd, n_loc, exp_cnt[0], exp_cnt[1], n_acks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
