// tb_syn_weight_packer: eight producers offer values with random gaps, the
// consumer applies random backpressure; every packed word must hold the
// next value of each lane in its lane position, with last on every fourth
// word (CAPACITY 32 -> 4 words per release). Also checks the full rate of
// one word per cycle when all inputs are valid and the output is ready.
module tb_syn_weight_packer;
  import neuroring_pkg::*;

  localparam int CAP = 32, W = CAP / LANES, NW = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [LANES-1:0] rel_valid, rel_ready;
  logic [31:0] rel_data [LANES];
  logic w_valid, w_ready, w_last;
  logic [LANES*32-1:0] w_data;
  int checks = 0, failures = 0;
  bit  full_rate = 0;

  syn_weight_packer #(.CAPACITY(CAP)) dut (.*);

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

  int idx [LANES];
  int nout = 0, t_first = 0, t_last = 0;
  function automatic logic [31:0] val(input int k, input int i);
    return 32'(k * 1000 + i);
  endfunction

  initial begin
    foreach (idx[k]) idx[k] = 0;
    rel_valid = '0; w_ready = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
  end
  // producers and consumer update 1 time unit after each edge
  always @(posedge clk) if (rst_n) begin
    #1;
    for (int k = 0; k < LANES; k++) begin
      if (rel_valid[k] && rel_ready_q[k]) idx[k]++;
      if (!rel_valid[k] || rel_ready_q[k]) rel_valid[k] = (idx[k] < NW) && (full_rate || $urandom % 4 != 0);
      rel_data[k] = val(k, idx[k]);
    end
    w_ready = full_rate || ($urandom % 3 != 0);
  end
  logic [LANES-1:0] rel_ready_q = '0;
  always @(negedge clk) begin
    rel_ready_q <= rel_valid & rel_ready;
    if (w_valid && w_ready) begin
      for (int k = 0; k < LANES; k++) chk("lane value", w_data[k*32 +: 32] == val(k, nout));
      chk("last", w_last == (nout % W == W - 1));
      nout++;
      if (nout == 25) t_first = $time;
      if (nout == 35) t_last = $time;
    end
  end

  initial begin
    wait (nout == 20);
    full_rate = 1;
    wait (nout == NW);
    repeat (5) @(posedge clk);
    chk("all words", nout == NW);
    $display("10 words in %0d cycles at full rate", (t_last - t_first) / 10);
    chk("one word per cycle", (t_last - t_first) / 10 == 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
