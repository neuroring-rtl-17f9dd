// tb_spike_recorder: records two steps of a 512-neuron core (64 mask words,
// two 256-bit beats per step) into a behavioural HBM with random stalls and
// checks the bitmaps bit by bit, the burst count, and the done pulses.
module tb_spike_recorder;
  import neuroring_pkg::*;

  localparam int CAP = 512, W = CAP / LANES, LINES = (W + 31) / 32;
  localparam logic [63:0] REC = 64'h20000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [AXI_AW-1:0] rec_base = REC;
  logic [31:0] step;
  logic spk_valid, spk_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  logic done, busy, ar_ready, r_valid;
  spk_mask_t spk;
  axi_addr_t aw, ardummy;
  axi_data_t w, r;
  int checks = 0, failures = 0, n_done = 0;

  spike_recorder #(.CAPACITY(CAP)) dut (.*);

  hbm_model #(.STALL(40)) u_hbm (
    .clk, .rst_n, .ar_valid(1'b0), .ar_ready, .ar(ardummy), .r_valid, .r_ready(1'b1), .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w, .b_valid, .b_ready
  );

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

  always @(posedge clk) if (done) n_done++;

  logic [LANES-1:0] masks [2][W];

  initial begin
    ardummy = '0;
    spk_valid = 0;
    step = 3;
    foreach (masks[s, j]) masks[s][j] = LANES'($urandom);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      step = 32'(3 + s);
      for (int j = 0; j < W; j++) begin
        logic got;
        while ($urandom % 3 == 0) begin @(posedge clk); #1; end
        spk_valid = 1;
        spk = '{mask: masks[s][j], word: 16'(j), last: (j == W - 1)};
        do begin @(negedge clk); got = spk_ready; @(posedge clk); end while (!got);
        #1 spk_valid = 0;
      end
      wait (n_done == s + 1);
      @(posedge clk); #1;
    end
    for (int s = 0; s < 2; s++)
      for (int j = 0; j < W; j++)
        for (int k = 0; k < LANES; k++) begin
          logic [255:0] line;
          int bitpos;
          bitpos = j * LANES + k;
          line = u_hbm.mem[longint'((REC + 64'((3 + s) * LINES * 32)) >> 5) + bitpos / 256];
          chk("bitmap bit", line[bitpos % 256] == masks[s][j][k]);
        end
    chk("one burst per step", u_hbm.n_wbursts == 2);
    chk("beats", u_hbm.n_wbeats == 2 * LINES);
    chk("done pulses", n_done == 2);
    chk("idle", !busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
