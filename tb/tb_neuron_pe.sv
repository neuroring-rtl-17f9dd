// tb_neuron_pe: checks one neuron lane against a reference computed with
// real arithmetic (each operation rounded to single precision):
// sub-threshold integration, threshold crossing with reset and refractory
// count, the refractory clamp, and the Poisson mode spike rate.
module tb_neuron_pe;
  import neuroring_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  lif_cfg_t      cfg;
  logic          en;
  logic [31:0]   w_in;
  neuron_state_t st_in, st_out;
  logic          spike;
  int checks = 0, failures = 0;

  neuron_pe dut (.*);

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

  initial begin
    real v, i, w, vn, in_;
    logic [31:0] ev, ei;
    logic [15:0] eref;
    logic        espk;
    int nspk, nlif_spk, nref;
    cfg = '0;
    cfg.p11       = r2f(0.98019867);   // exp(-0.1/5)
    cfg.p21       = r2f(0.00039211);
    cfg.p22       = r2f(0.99501248);   // exp(-0.1/20)
    cfg.c20       = r2f(0.0398);
    cfg.v_th      = r2f(15.0);
    cfg.v_reset   = r2f(-5.0);
    cfg.v_init    = r2f(0.0);
    cfg.ref_steps = 16'd20;
    en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nlif_spk = 0; nref = 0;
    for (int n = 0; n < 3000; n++) begin
      v = -5.0 + 25.0 * real'($urandom % 10000) / 10000.0;
      i = 4000.0 * real'($urandom % 10000) / 10000.0;
      w = -200.0 + 400.0 * real'($urandom % 1000) / 1000.0;
      st_in.v       = r2f(v);
      st_in.i_syn   = r2f(i);
      st_in.ref_cnt = ($urandom % 4 == 0) ? 16'($urandom % 5 + 1) : 16'd0;
      w_in = r2f(w);
      // reference
      ei = r2f(f2r(r2f(f2r(st_in.i_syn) * f2r(cfg.p11))) + f2r(w_in));
      espk = 0;
      eref = st_in.ref_cnt;
      if (st_in.ref_cnt != 0) begin
        ev = cfg.v_reset; eref = st_in.ref_cnt - 1; nref++;
      end else begin
        ev = r2f(f2r(r2f(f2r(r2f(f2r(st_in.v) * f2r(cfg.p22))) +
                         f2r(r2f(f2r(st_in.i_syn) * f2r(cfg.p21))))) + f2r(cfg.c20));
        if (f2r(ev) > f2r(cfg.v_th)) begin
          espk = 1; ev = cfg.v_reset; eref = cfg.ref_steps; nlif_spk++;
        end
      end
      en = 1;
      @(posedge clk); #1;
      en = 0;
      chk("v", st_out.v == ev);
      chk("i", st_out.i_syn == ei);
      chk("ref", st_out.ref_cnt == eref);
      chk("spike", spike == espk);
    end
    chk("some LIF spikes", nlif_spk > 50);
    chk("some refractory", nref > 100);
    // Poisson mode: probability 1/4
    cfg.poisson = 1;
    cfg.poisson_thresh = 32'h4000_0000;
    nspk = 0;
    for (int n = 0; n < 4000; n++) begin
      en = 1;
      @(posedge clk); #1;
      en = 0;
      if (spike) nspk++;
    end
    $display("poisson spikes %0d / 4000, LIF spikes %0d", nspk, nlif_spk);
    chk("poisson rate", nspk > 880 && nspk < 1120);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
