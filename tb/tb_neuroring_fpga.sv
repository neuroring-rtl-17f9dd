// tb_neuroring_fpga: end-to-end test of the NeuroRing ring on two FPGAs.
//
// Reduced size: 4 cores of 64 neurons, 2 per FPGA, 12 steps.
// NF neuroring_fpga instances (CPF cores each) are joined into one ring of NC cores by behavioural serial links
// (one per direction between neighbours) with random stalls; every core
// has its own behavioural HBM with random stalls. Core 0 runs as a Poisson
// generator, the other cores as LIF neurons. A random network (up to MAXF
// synapses per neuron, integer weights so that every sum is exact in any
// order, delays 1..MAXD steps, destinations anywhere in the ring) is written
// into the HBM synapse regions, STEPS steps are run, and every recorded
// spike bitmap is compared with a reference simulation kept in the
// testbench (Poisson spikes are taken from the record and fed to the
// reference). The test also counts, and requires at least once: a spike of
// a LIF neuron, a refractory step, a Poisson spike, a packet delivered in
// its own core, packets sent both ways round the ring, packets crossing
// every link, link backpressure, and global tokens crossing every link.
module tb_neuroring_fpga;
  import neuroring_pkg::*;
  import tb_util_pkg::*;

  localparam int NF    = 2;
  localparam int NC    = 4;
  localparam int CPF   = 2;
  localparam int CAP   = 64;
  localparam int STEPS = 12;
  localparam int MAXF  = 12;
  localparam int MAXD  = 6;
  localparam int NN    = NC * CAP;
  localparam int WW    = CAP / LANES;
  localparam int LINES = (WW + 31) / 32;
  localparam logic [63:0] SYN_BASE = 64'h0010_0000;
  localparam logic [63:0] REC_BASE = 64'h0800_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input string what, input logic c);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    foreach (step[f, c]) $display("core %0d: step %0d done %0d", f * CPF + c, step[f][c], done[f][c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // network, shared by all HBM loaders and the reference model
  int          fan   [NN];
  int          s_dst [NN][MAXF];
  int          s_dly [NN][MAXF];
  int          s_w   [NN][MAXF];
  bit          rec   [STEPS][NN];     // recorded spikes
  lif_cfg_t    lif, poi;
  bit          net_ready = 0;
  int          n_loaded = 0, n_read = 0;

  // ---------------- the design: two FPGAs ----------------
  core_cfg_t  cfg   [NF][CPF];
  logic       start [NF][CPF], done [NF][CPF];
  logic [31:0] step [NF][CPF];
  logic       ar_valid [NF][CPF], ar_ready [NF][CPF], r_valid [NF][CPF], r_ready [NF][CPF];
  logic       aw_valid [NF][CPF], aw_ready [NF][CPF], w_valid [NF][CPF], w_ready [NF][CPF];
  logic       b_valid [NF][CPF], b_ready [NF][CPF];
  axi_addr_t  ar [NF][CPF], aw [NF][CPF];
  axi_data_t  r [NF][CPF], w [NF][CPF];
  logic       li_v [NF], li_r [NF], lo_v [NF], lo_r [NF], ri_v [NF], ri_r [NF], ro_v [NF], ro_r [NF];
  syn_pkt_t   li [NF], lo [NF], ri [NF], ro [NF];

  for (genvar f = 0; f < NF; f++) begin : g_fpga
    neuroring_fpga #(.NUM_CORES(NC), .CORES_PER_FPGA(CPF), .CAPACITY(CAP)) u_fpga (
      .clk, .rst_n, .first_core(DST_BITS'(f * CPF)),
      .cfg(cfg[f]), .start(start[f]), .done(done[f]), .step(step[f]),
      .ar_valid(ar_valid[f]), .ar_ready(ar_ready[f]), .ar(ar[f]),
      .r_valid(r_valid[f]), .r_ready(r_ready[f]), .r(r[f]),
      .aw_valid(aw_valid[f]), .aw_ready(aw_ready[f]), .aw(aw[f]),
      .w_valid(w_valid[f]), .w_ready(w_ready[f]), .w(w[f]),
      .b_valid(b_valid[f]), .b_ready(b_ready[f]),
      .ring_l_in_valid(li_v[f]), .ring_l_in_ready(li_r[f]), .ring_l_in(li[f]),
      .ring_l_out_valid(lo_v[f]), .ring_l_out_ready(lo_r[f]), .ring_l_out(lo[f]),
      .ring_r_in_valid(ri_v[f]), .ring_r_in_ready(ri_r[f]), .ring_r_in(ri[f]),
      .ring_r_out_valid(ro_v[f]), .ring_r_out_ready(ro_r[f]), .ring_r_out(ro[f])
    );


    for (genvar c = 0; c < CPF; c++) begin : g_core
      localparam int CORE = f * CPF + c;
      hbm_model #(.STALL(20), .SEED(CORE + 7)) u_hbm (
        .clk, .rst_n,
        .ar_valid(ar_valid[f][c]), .ar_ready(ar_ready[f][c]), .ar(ar[f][c]),
        .r_valid(r_valid[f][c]), .r_ready(r_ready[f][c]), .r(r[f][c]),
        .aw_valid(aw_valid[f][c]), .aw_ready(aw_ready[f][c]), .aw(aw[f][c]),
        .w_valid(w_valid[f][c]), .w_ready(w_ready[f][c]), .w(w[f][c]),
        .b_valid(b_valid[f][c]), .b_ready(b_ready[f][c])
      );
      // write this core's synapse region: index, then lists (layout of synapse_list_fetch)
      initial begin
        int off;
        syn_pkt_t p;
        wait (net_ready);
        off = (CAP + 3) / 4;
        for (int n = 0; n < CAP; n++) begin
          int g;
          g = CORE * CAP + n;
          u_hbm.mem[(SYN_BASE >> 5) + n / 4][(n % 4) * 64 +: 64] = {32'(off), 32'(fan[g])};
          for (int m = 0; m < fan[g]; m++) begin
            p        = '0;
            p.weight = r2f(real'(s_w[g][m]));
            p.dst    = DST_BITS'(s_dst[g][m]);
            p.delay  = 8'(s_dly[g][m]);
            u_hbm.mem[(SYN_BASE >> 5) + off + m / 4][(m % 4) * 64 +: 64] = p;
          end
          off += (fan[g] + 3) / 4;
        end
        cfg[f][c].num_steps = STEPS;
        cfg[f][c].syn_base  = SYN_BASE;
        cfg[f][c].rec_base  = REC_BASE;
        cfg[f][c].lif       = (CORE == 0) ? poi : lif;
        n_loaded++;
      end
      // read back the spike record once the core is done
      initial begin
        wait (net_ready);
        wait (done[f][c] === 1'b1 && start[f][c] === 1'b0 && n_loaded == NC && started);
        for (int t = 0; t < STEPS; t++)
          for (int j = 0; j < WW; j++)
            for (int k = 0; k < LANES; k++) begin
              logic [255:0] line;
              int b;
              b = j * LANES + k;
              line = u_hbm.mem[longint'((REC_BASE + 64'(t * LINES * 32)) >> 5) + b / 256];
              rec[t][CORE * CAP + k * WW + j] = line[b % 256];
            end
        n_read++;
      end
    end
  end

  // ring: the right end of group f feeds the left end of group f+1 and back
  int fw_pk [NF], bw_pk [NF], fw_tok [NF], bw_tok [NF], n_stall = 0;
  for (genvar f = 0; f < NF; f++) begin : g_link
    localparam int G = (f + 1) % NF;
    aurora_link_model u_fw (.clk, .in_valid(ro_v[f]), .in_ready(ro_r[f]), .in_pkt(ro[f]),
                            .out_valid(li_v[G]), .out_ready(li_r[G]), .out_pkt(li[G]));
    aurora_link_model u_bw (.clk, .in_valid(lo_v[G]), .in_ready(lo_r[G]), .in_pkt(lo[G]),
                            .out_valid(ri_v[f]), .out_ready(ri_r[f]), .out_pkt(ri[f]));
    initial begin fw_pk[f] = 0; bw_pk[f] = 0; fw_tok[f] = 0; bw_tok[f] = 0; end
    always @(posedge clk) begin
      if (ro_v[f] && ro_r[f]) begin
        if (ro[f].sync == SYNC_GLOBAL) fw_tok[f]++; else fw_pk[f]++;
      end
      if (lo_v[G] && lo_r[G]) begin
        if (lo[G].sync == SYNC_GLOBAL) bw_tok[f]++; else bw_pk[f]++;
      end
      if ((ro_v[f] && !ro_r[f]) || (lo_v[G] && !lo_r[G])) n_stall++;
    end
  end

  bit started = 0;

  // ---------------- stimulus and reference ----------------
  initial begin
    int n_self = 0, n_right = 0, n_left = 0, n_lif_spk = 0, n_ref = 0, n_poi = 0;
    logic [31:0] rv [NN], ri_s [NN];
    logic [15:0] rr [NN];
    real acc [NN][MAXD + 1];
    int cyc0, cyc1;
    // neuron model constants (host side)
    lif = '0;
    lif.p11 = r2f(0.8);  lif.p21 = r2f(0.05); lif.p22 = r2f(0.9);
    lif.c20 = r2f(1.0);  lif.v_th = r2f(15.0); lif.v_reset = r2f(0.0);
    lif.v_init = r2f(5.0); lif.ref_steps = 16'd2;
    poi = lif;
    poi.poisson = 1'b1;
    poi.poisson_thresh = 32'h2000_0000;   // 1/8 per step
    for (int n = 0; n < NN; n++) begin
      fan[n] = int'($urandom % (MAXF + 1));
      for (int m = 0; m < fan[n]; m++) begin
        s_dst[n][m] = int'($urandom % NN);
        s_dly[n][m] = 1 + int'($urandom % MAXD);
        s_w[n][m]   = int'($urandom % 121) - 30;
      end
    end
    foreach (start[f, c]) start[f][c] = 0;
    net_ready = 1;
    wait (n_loaded == NC);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);
    #1 foreach (start[f, c]) start[f][c] = 1;
    started = 1;
    @(posedge clk);
    #1 foreach (start[f, c]) start[f][c] = 0;
    cyc0 = $time;
    wait (n_read == NC);
    cyc1 = $time;
    $display("%0d steps of %0d cores x %0d neurons in %0d cycles", STEPS, NC, CAP, (cyc1 - cyc0) / 10);
    // reference simulation
    for (int n = 0; n < NN; n++) begin
      rv[n] = lif.v_init; ri_s[n] = 0; rr[n] = 0;
      for (int d = 0; d <= MAXD; d++) acc[n][d] = 0.0;
    end
    for (int t = 0; t < STEPS; t++) begin
      for (int n = 0; n < NN; n++) begin
        logic s;
        if (n < CAP) begin
          s = rec[t][n];
          n_poi += int'(s);
        end else begin
          if (rr[n] != 0) n_ref++;
          s = lif_ref(lif.p11, lif.p21, lif.p22, lif.c20, lif.v_th, lif.v_reset, lif.ref_steps,
                      r2f(acc[n][t % (MAXD + 1)]), rv[n], ri_s[n], rr[n]);
          chk("spike matches reference", rec[t][n] == s);
          n_lif_spk += int'(s);
        end
        acc[n][t % (MAXD + 1)] = 0.0;
        if (s)
          for (int m = 0; m < fan[n]; m++) begin
            int src_c, dst_c, dr, dl;
            acc[s_dst[n][m]][(t + s_dly[n][m]) % (MAXD + 1)] += real'(s_w[n][m]);
            src_c = n / CAP; dst_c = s_dst[n][m] / CAP;
            dr = (dst_c - src_c + NC) % NC; dl = (src_c - dst_c + NC) % NC;
            if (dr == 0) n_self++; else if (dr <= dl) n_right++; else n_left++;
          end
      end
      // slots of step t are cleared only after all of step t's spikes were added
    end
    $display("LIF spikes %0d, Poisson spikes %0d, refractory steps %0d", n_lif_spk, n_poi, n_ref);
    $display("packets: own core %0d, right %0d, left %0d", n_self, n_right, n_left);
    for (int f = 0; f < NF; f++) begin
      $display("link %0d: %0d packets forward, %0d back, %0d/%0d tokens", f,
               fw_pk[f], bw_pk[f], fw_tok[f], bw_tok[f]);
      chk("link used forward", fw_pk[f] > 0);
      chk("link used backward", bw_pk[f] > 0);
      chk("global tokens crossed forward", fw_tok[f] >= STEPS);
      chk("global tokens crossed backward", bw_tok[f] >= STEPS);
    end
    $display("link stall cycles %0d", n_stall);
    chk("LIF spikes happened", n_lif_spk > 0);
    chk("Poisson spikes happened", n_poi > 0);
    chk("refractory happened", n_ref > 0);
    chk("own-core delivery happened", n_self > 0);
    chk("right-going packets happened", n_right > 0);
    chk("left-going packets happened", n_left > 0);
    chk("link backpressure happened", n_stall > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
