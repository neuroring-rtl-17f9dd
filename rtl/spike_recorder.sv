// spike_recorder: writes each step's spikes of a core to HBM.
//
// The NPU produces one LANES-bit spike mask per neuron word; the recorder
// packs 32 masks into each 256-bit beat and writes the whole step as one
// AXI4 write burst of LINES = ceil(W/32) beats (W = CAPACITY/LANES) to
// rec_base + step*LINES*32. Bit 8*j + k of a step's bitmap is neuron
// k*W + j. The paper says only that the recorder writes spike traces to the
// spike-recording region of HBM with 256-bit bursts; the bitmap format and
// addressing are this design's choice (a bitmap has a fixed size per step,
// so no index is needed).
// Timing: the AW request is issued when the first mask of a step arrives,
// beats follow as they fill; done pulses when the write response is taken.
module spike_recorder
  import neuroring_pkg::*;
#(
  parameter int CAPACITY = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AXI_AW-1:0] rec_base,
  input  logic [31:0]       step,
  input  logic              spk_valid,
  output logic              spk_ready,
  input  spk_mask_t         spk,
  output logic              aw_valid,
  input  logic              aw_ready,
  output axi_addr_t         aw,
  output logic              w_valid,
  input  logic              w_ready,
  output axi_data_t         w,
  input  logic              b_valid,
  output logic              b_ready,
  output logic              done,
  output logic              busy
);
  localparam int W     = CAPACITY / LANES;
  localparam int LINES = (W + 31) / 32;

  typedef enum logic [1:0] {S_IDLE, S_AW, S_COL, S_B} state_e;
  state_e state;

  logic [AXI_DW-1:0] line;
  logic [4:0]        fill;
  logic [15:0]       line_cnt;

  assign aw_valid  = (state == S_AW);
  assign aw.addr   = rec_base + AXI_AW'(step) * AXI_AW'(LINES * 32);
  assign aw.len    = 8'(LINES - 1);
  assign spk_ready = (state == S_COL) && !w_valid;
  assign w.data    = line;
  assign w.last    = (32'(line_cnt) == LINES - 1);
  assign b_ready   = (state == S_B);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      w_valid <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (spk_valid) state <= S_AW;
        S_AW: if (aw_ready) begin
          state    <= S_COL;
          fill     <= '0;
          line_cnt <= '0;
        end
        S_COL: begin
          if (spk_valid && spk_ready) begin
            if (fill == '0) line <= AXI_DW'(spk.mask);
            else            line[fill*LANES +: LANES] <= spk.mask;
            fill <= fill + 5'd1;
            if (fill == 5'd31 || spk.last) w_valid <= 1'b1;
          end
          if (w_valid && w_ready) begin
            w_valid  <= 1'b0;
            fill     <= '0;
            line_cnt <= line_cnt + 16'd1;
            if (w.last) state <= S_B;
          end
        end
        S_B: if (b_valid) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
