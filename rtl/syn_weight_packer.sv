// syn_weight_packer: joins the released weights of the LANES accumulators
// into the NPU's packed input stream.
//
// During a release every accumulator streams out, in neuron order, the fp32
// input sum of each of its neurons for the coming step. The packer waits
// until all LANES accumulators offer a value, then emits one LANES*32-bit
// word (lane k in bits [32k+31:32k], 256 bits for 8 lanes) and takes one
// value from each. The output is registered (one word per cycle at full
// rate); word_cnt counts the words of the current release and last marks the
// final word (CAPACITY/LANES words per step). The packer is named in the
// paper's figure; the join and framing are this design's.
module syn_weight_packer
  import neuroring_pkg::*;
#(
  parameter int CAPACITY = 4096
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [LANES-1:0]    rel_valid,
  output logic [LANES-1:0]    rel_ready,
  input  logic [31:0]         rel_data [LANES],
  output logic                w_valid,
  input  logic                w_ready,
  output logic [LANES*32-1:0] w_data,
  output logic                w_last
);
  localparam int W = CAPACITY / LANES;
  logic [15:0] word_cnt;

  wire out_free = !w_valid || w_ready;
  wire join_ok  = (&rel_valid) && out_free;
  assign rel_ready = {LANES{join_ok}};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_valid  <= 1'b0;
      word_cnt <= '0;
      w_last   <= 1'b0;
    end else begin
      if (w_valid && w_ready) w_valid <= 1'b0;
      if (join_ok) begin
        w_valid <= 1'b1;
        for (int k = 0; k < LANES; k++) w_data[k*32 +: 32] <= rel_data[k];
        w_last   <= (32'(word_cnt) == W - 1);
        word_cnt <= (32'(word_cnt) == W - 1) ? '0 : word_cnt + 16'd1;
      end
    end
  end
endmodule
