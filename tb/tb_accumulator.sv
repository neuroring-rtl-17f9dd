// tb_accumulator: fills the delay buffer of one accumulator (CAPACITY 64,
// so 8 neurons x 64 slots) with random integer-valued weights from both
// input ports at once, then releases every slot and compares each neuron's
// value with the sum kept by the testbench. Also checks that a released
// slot reads back zero, that a release request arriving while a packet is
// being added is not lost, and the rate of 2 cycles per packet.
module tb_accumulator;
  import neuroring_pkg::*;
  import tb_util_pkg::*;

  localparam int CAP = 64;
  localparam int NPA = CAP / LANES;
  localparam int SLOTS = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init, ready, in_l_valid, in_l_ready, in_r_valid, in_r_ready;
  acc_req_t in_l, in_r;
  logic rel_start, rel_valid, rel_ready, idle;
  logic [7:0] rel_step;
  logic [31:0] rel_data;
  int checks = 0, failures = 0;

  accumulator #(.CAPACITY(CAP), .SLOTS(SLOTS)) dut (.*);

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

  real ref_sum [NPA][SLOTS];

  task automatic send(input bit right, input int n, input int s, input int wv);
    acc_req_t q;
    logic got;
    q = '{nidx: 16'(n), step: 8'(s), weight: r2f(real'(wv))};
    ref_sum[n][s % SLOTS] += real'(wv);
    if (right) begin in_r = q; in_r_valid = 1; end
    else       begin in_l = q; in_l_valid = 1; end
    do begin
      @(negedge clk);
      got = right ? in_r_ready : in_l_ready;
      @(posedge clk);
    end while (!got);
    #1;
    if (right) in_r_valid = 0; else in_l_valid = 0;
  endtask

  task automatic release_and_check(input int s, input bit expect_zero);
    int j;
    logic got;
    rel_step = 8'(s);
    rel_start = 1; @(posedge clk); #1 rel_start = 0;
    j = 0;
    while (j < NPA) begin
      rel_ready = ($urandom % 4 != 0);
      @(negedge clk);
      got = rel_valid && rel_ready;
      if (got) begin
        chk("release value", rel_data == (expect_zero ? 32'd0 : r2f(ref_sum[j][s % SLOTS])));
        if (rel_data != (expect_zero ? 32'd0 : r2f(ref_sum[j][s % SLOTS]))) $display("s=%0d j=%0d got %h", s, j, rel_data);
        ref_sum[j][s % SLOTS] = 0.0;
        j++;
      end
      @(posedge clk); #1;
    end
    rel_ready = 0;
  endtask

  initial begin
    int t0, t1;
    init = 0; in_l_valid = 0; in_r_valid = 0; rel_start = 0; rel_ready = 0; rel_step = 0;
    foreach (ref_sum[a, b]) ref_sum[a][b] = 0.0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 init = 1; @(posedge clk); #1 init = 0;
    wait (ready); @(posedge clk); #1;
    // both ports concurrently
    fork
      for (int n = 0; n < 300; n++) send(0, $urandom % NPA, $urandom % 256, int'($urandom % 201) - 100);
      for (int n = 0; n < 300; n++) send(1, $urandom % NPA, $urandom % 256, int'($urandom % 201) - 100);
    join
    @(posedge clk); #1;
    chk("idle after input", idle);
    for (int s = 0; s < SLOTS; s++) release_and_check(s, 0);
    release_and_check(5, 1);
    // rate: 100 packets on one port
    t0 = $time;
    for (int n = 0; n < 100; n++) send(0, n % NPA, 7, 1);
    t1 = $time;
    $display("100 packets in %0d cycles", (t1 - t0) / 10);
    chk("2 cycles per packet", (t1 - t0) / 10 <= 201);
    // release request while a packet is being added
    // (send returns one cycle after the packet was taken, while it is added)
    send(0, 3, 9, 5);
    chk("adding when release requested", !idle);
    release_and_check(7, 0);
    release_and_check(9, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
