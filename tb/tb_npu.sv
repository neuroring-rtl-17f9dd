// tb_npu: drives the NPU (CAPACITY 64, 8 lanes, 8 words per step) through
// several steps of random weight words and checks every spike mask, the
// word numbering and last flag and step_done against a reference LIF model kept in the testbench. Step 0 runs with the output
// always ready and must take one word per cycle; later steps apply random
// output backpressure.
module tb_npu;
  import neuroring_pkg::*;
  import tb_util_pkg::*;

  localparam int CAP = 64;
  localparam int W   = CAP / LANES;
  localparam int STEPS = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  lif_cfg_t  cfg;
  logic      init, ready, w_valid, w_ready, spk_valid, spk_ready, step_done;
  logic [LANES*32-1:0] w_data;
  spk_mask_t spk;
  int checks = 0, failures = 0;

  npu #(.CAPACITY(CAP)) dut (.*);

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

  logic [31:0] rv [CAP], ri [CAP];
  logic [15:0] rr [CAP];
  logic [LANES-1:0] exp_mask [STEPS][W];
  logic [31:0] wts [STEPS][W][LANES];
  int  nspikes = 0, ndone = 0, backpressure_stalls = 0;

  // driver
  initial begin
    int cyc;
    logic got;
    cfg = '0;
    cfg.p11 = r2f(0.98019867); cfg.p21 = r2f(0.00039211); cfg.p22 = r2f(0.99501248);
    cfg.c20 = r2f(0.0398); cfg.v_th = r2f(15.0); cfg.v_reset = r2f(-5.0);
    cfg.v_init = r2f(10.0); cfg.ref_steps = 16'd3;
    init = 0; w_valid = 0;
    for (int n = 0; n < CAP; n++) begin rv[n] = cfg.v_init; ri[n] = 0; rr[n] = 0; end
    for (int t = 0; t < STEPS; t++)
      for (int j = 0; j < W; j++)
        for (int k = 0; k < LANES; k++) begin
          wts[t][j][k] = r2f(real'(int'($urandom % 4001)) - 1000.0);
          exp_mask[t][j][k] = lif_ref(cfg.p11, cfg.p21, cfg.p22, cfg.c20, cfg.v_th, cfg.v_reset,
                                      cfg.ref_steps, wts[t][j][k],
                                      rv[k*W+j], ri[k*W+j], rr[k*W+j]);
        end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1 init = 1; @(posedge clk); #1 init = 0;
    wait (ready);
    @(posedge clk); #1;
    for (int t = 0; t < STEPS; t++) begin
      cyc = 0;
      for (int j = 0; j < W; j++) begin
        w_valid = 1;
        for (int k = 0; k < LANES; k++) w_data[k*32 +: 32] = wts[t][j][k];
        do begin
          @(negedge clk);
          got = w_ready;
          @(posedge clk);
          cyc++;
        end while (!got);
        #1;
      end
      w_valid = 0;
      if (t == 0) chk("one word per cycle", cyc == W);
      wait (ndone == t + 1);
      @(posedge clk); #1;
    end
    repeat (20) @(posedge clk);
    chk("spikes seen", nspikes > 20);
    chk("backpressure seen", backpressure_stalls > 0);
    $display("spikes %0d stalls %0d", nspikes, backpressure_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  int mt = 0, mj = 0;
  always @(posedge clk) begin
    if (step_done) ndone <= ndone + 1;
    if (rst_n && w_valid && !w_ready && ready) backpressure_stalls++;
  end
  initial begin
    spk_ready = 1;
    forever begin
      @(negedge clk);
      spk_ready = (mt == 0) ? 1'b1 : ($urandom % 3 != 0);
      #1;
      if (spk_valid && spk_ready) begin
        chk("mask", spk.mask == exp_mask[mt][mj]);
        chk("word", spk.word == 16'(mj));
        chk("last", spk.last == (mj == W-1));
        for (int k = 0; k < LANES; k++) nspikes += int'(spk.mask[k]);
        if (mj == W-1) begin mj = 0; mt++; end else mj++;
      end
    end
  end
endmodule
