// tb_synapse_list_fetch: core 1 of a 4-core ring with 32 neurons per core.
// Synapse lists of random length (one of 1100 packets, which needs two
// 256-beat bursts) are placed in a behavioural HBM; a step's spike masks
// are fed in and the packets leaving on the left and right streams are
// compared, in order, with the expected sequence: shortest-route side,
// delay replaced by step + delay, a local token on both sides after each
// non-empty list, a global token on both sides at the end. The testbench
// plays the routers' acknowledgements and checks that, on each side, no
// packet after a local token leaves before both acknowledgements.
module tb_synapse_list_fetch;
  import neuroring_pkg::*;

  localparam int N = 4, CAP = 32, ME = 1, W = CAP / LANES;
  localparam logic [63:0] BASE = 64'h1000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DST_BITS-1:0] my_id = ME;
  logic [AXI_AW-1:0] syn_base = BASE;
  logic [31:0] step = 32'd250;
  logic spk_valid, spk_ready, ar_valid, ar_ready, r_valid, r_ready;
  spk_mask_t spk;
  axi_addr_t ar;
  axi_data_t r;
  logic left_valid, left_ready, right_valid, right_ready, lsync_ack_l, lsync_ack_r;
  syn_pkt_t left, right;
  logic emit_done, busy;
  logic aw_ready, w_ready, b_valid;
  axi_data_t wdummy;
  axi_addr_t awdummy;
  int checks = 0, failures = 0;

  synapse_list_fetch #(.NUM_CORES(N), .CAPACITY(CAP)) dut (.*);

  hbm_model #(.STALL(30)) u_hbm (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid(1'b0), .aw_ready, .aw(awdummy), .w_valid(1'b0), .w_ready, .w(wdummy),
    .b_valid, .b_ready(1'b1)
  );

  initial begin
    repeat (200000) @(posedge clk);
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

  syn_pkt_t q_l [$], q_r [$];
  logic [LANES-1:0] masks [W];
  int n_data = 0, n_emit = 0, early = 0, outstanding = 0;
  bit after_tok [2] = '{0, 0};  // a local token was the last item on this side

  function automatic syn_pkt_t tok(input sync_e s);
    syn_pkt_t p;
    p = '0; p.sync = s; p.dst = DST_BITS'(ME); p.weight = step;
    return p;
  endfunction

  initial begin
    int cnt [CAP];
    int off;
    syn_pkt_t p;
    // build the lists: index entries then packets
    off = (CAP + 3) / 4;
    for (int n = 0; n < CAP; n++) begin
      cnt[n] = (n == 9) ? 1100 : int'($urandom % 13);
      u_hbm.mem[(BASE >> 5) + n / 4][(n % 4) * 64 +: 64] = {32'(off), 32'(cnt[n])};
      for (int m = 0; m < cnt[n]; m++) begin
        p = '0;
        p.weight = $urandom;
        p.dst    = DST_BITS'($urandom % (N * CAP));
        p.delay  = 8'(1 + $urandom % 63);
        u_hbm.mem[(BASE >> 5) + off + m / 4][(m % 4) * 64 +: 64] = p;
      end
      off += (cnt[n] + 3) / 4;
    end
    for (int j = 0; j < W; j++) masks[j] = LANES'($urandom);
    masks[9 % W][9 / W] = 1'b1;  // neuron 9 spikes
    masks[2] = '0;
    // expected output
    for (int j = 0; j < W; j++)
      for (int k = 0; k < LANES; k++)
        if (masks[j][k]) begin
          int n, a, dc, dr, dl;
          n = k * W + j;
          a = (CAP + 3) / 4;
          for (int x = 0; x < n; x++) a += (cnt[x] + 3) / 4;
          for (int m = 0; m < cnt[n]; m++) begin
            p = u_hbm.mem[(BASE >> 5) + a + m / 4][(m % 4) * 64 +: 64];
            dc = int'(p.dst) / CAP;
            dr = (dc - ME + N) % N;
            dl = (ME - dc + N) % N;
            p.delay = p.delay + step[7:0];
            if (dr <= dl) q_r.push_back(p); else q_l.push_back(p);
          end
          if (cnt[n] > 0) begin
            q_l.push_back(tok(SYNC_LOCAL));
            q_r.push_back(tok(SYNC_LOCAL));
          end
        end
    q_l.push_back(tok(SYNC_GLOBAL));
    q_r.push_back(tok(SYNC_GLOBAL));
    $display("expected left %0d right %0d", q_l.size(), q_r.size());
    spk_valid = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int j = 0; j < W; j++) begin
      logic got;
      spk_valid = 1;
      spk = '{mask: masks[j], word: 16'(j), last: (j == W - 1)};
      do begin @(negedge clk); got = spk_ready; @(posedge clk); end while (!got);
      #1 spk_valid = 0;
    end
  end

  // sinks with random ready; acknowledge local tokens a few cycles later
  int ack_l_at = -1, ack_r_at = -1, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    #1;
    left_ready  = ($urandom % 3 != 0);
    right_ready = ($urandom % 3 != 0);
    lsync_ack_l = (cyc == ack_l_at);
    lsync_ack_r = (cyc == ack_r_at);
    if (lsync_ack_l) outstanding--;
    if (lsync_ack_r) outstanding--;
  end
  always @(negedge clk) if (rst_n) begin
    if (left_valid && left_ready) begin
      chk("left expected", q_l.size() > 0);
      if (q_l.size() > 0) chk("left packet", left == q_l.pop_front());
      if (left.sync == SYNC_LOCAL) begin ack_l_at = cyc + 3; outstanding++; after_tok[0] = 1; end
      if (left.sync == SYNC_NONE) begin n_data++; if (after_tok[0] && outstanding > 0) early++; after_tok[0] = 0; end
    end
    if (right_valid && right_ready) begin
      chk("right expected", q_r.size() > 0);
      if (q_r.size() > 0) chk("right packet", right == q_r.pop_front());
      if (right.sync == SYNC_LOCAL) begin ack_r_at = cyc + 5; outstanding++; after_tok[1] = 1; end
      if (right.sync == SYNC_NONE) begin n_data++; if (after_tok[1] && outstanding > 0) early++; after_tok[1] = 0; end
    end
  end
  always @(posedge clk) if (emit_done) n_emit++;

  initial begin
    wait (n_emit == 1);
    repeat (20) @(posedge clk);
    chk("left all sent", q_l.size() == 0);
    chk("right all sent", q_r.size() == 0);
    chk("no packet before acks", early == 0);
    chk("one emit_done", n_emit == 1);
    chk("two bursts for long list", u_hbm.n_rbursts > 2 * 1 + 3);
    chk("not busy", !busy);
    $display("data packets %0d read bursts %0d", n_data, u_hbm.n_rbursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
