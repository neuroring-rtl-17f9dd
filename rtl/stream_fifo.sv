// stream_fifo: synchronous valid/ready FIFO for any packed type.
//
// Helper used for every on-chip stream of the core. A write happens when
// in_valid && in_ready, a read when out_valid && out_ready; both can happen
// in the same cycle. Output is shown from the storage array (first-word
// fall-through), so data written in cycle n can be read in cycle n+1.
// DEPTH must be a power of two. count is the number of stored entries.
module stream_fifo #(
  parameter type T     = logic [63:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [AW:0] wr_ptr, rd_ptr;

  assign count     = wr_ptr - rd_ptr;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (in_valid && in_ready) begin
        mem[wr_ptr[AW-1:0]] <= in_data;
        wr_ptr <= wr_ptr + 1'b1;
      end
      if (out_valid && out_ready) rd_ptr <= rd_ptr + 1'b1;
    end
  end
endmodule
