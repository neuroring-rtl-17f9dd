// accumulator: synaptic delay buffer for one range of a core's neurons.
//
// Each of the LANES accumulators of a core owns NPA = CAPACITY/LANES
// consecutive neurons. For every neuron it keeps a circular buffer of SLOTS
// (64) fp32 input sums, one per future step. A packet that arrives with
// absolute arrival step s adds its weight to slot s mod SLOTS of its neuron
// (read-modify-write with the fp32 adder). At the end of a step the core
// asks for the slot of the next step: the accumulator streams out that slot
// of every neuron, in neuron order, and clears it. Moving the released slot
// by one per step is the "head pointer" of the published figure; the
// 64-slot depth and the packing of two 32-bit weights into one 72-bit URAM
// word follow the paper (the top 8 bits of each word are unused).
// Addressing: word = nidx*SLOTS/2 + slot/2, half = slot[0].
//
// Timing: a packet takes 2 cycles (read, add+write); released values come
// one per 2 cycles. Two input ports (left and right router) are served
// round-robin. A release request that comes while a packet is being
// added is remembered and served next. During a release the inputs are held off; packets that arrive
// then belong to later steps and wait. init clears the memory
// (NPA*SLOTS/2 cycles); ready goes high afterwards.
module accumulator
  import fp32_pkg::*;
  import neuroring_pkg::*;
#(
  parameter int CAPACITY = 4096,
  parameter int SLOTS    = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  output logic        ready,
  input  logic        in_l_valid,
  output logic        in_l_ready,
  input  acc_req_t    in_l,
  input  logic        in_r_valid,
  output logic        in_r_ready,
  input  acc_req_t    in_r,
  input  logic        rel_start,
  input  logic [7:0]  rel_step,
  output logic        rel_valid,
  input  logic        rel_ready,
  output logic [31:0] rel_data,
  output logic        idle
);
  localparam int NPA    = CAPACITY / LANES;
  localparam int NWORDS = NPA * SLOTS / 2;
  localparam int AW     = $clog2(NWORDS);
  localparam int SW     = $clog2(SLOTS);

  typedef enum logic [2:0] {S_RESET, S_CLR, S_IDLE, S_UPD, S_RRD, S_ROUT} state_e;
  state_e state;

  logic [71:0]   mem [NWORDS];
  logic [71:0]   rdata;
  logic          re, we;
  logic [AW-1:0] raddr, waddr, addr_q;
  logic [71:0]   wdata;
  logic          half_q, last_r;
  logic [31:0]   w_q;
  logic [15:0]   j;
  logic [SW-1:0] rel_slot;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  function automatic logic [AW-1:0] word_addr(input logic [15:0] n, input logic [SW-1:0] s);
    return AW'(32'(n) * (SLOTS / 2) + 32'(s >> 1));
  endfunction

  logic rel_pend;
  wire  rel_req = rel_start || rel_pend;
  wire pick_r   = in_r_valid && (!in_l_valid || !last_r);
  wire take     = (state == S_IDLE) && !rel_req && (in_l_valid || in_r_valid);
  acc_req_t req;
  assign req        = pick_r ? in_r : in_l;
  assign in_l_ready = take && !pick_r;
  assign in_r_ready = take && pick_r;

  logic [31:0] old_w, sum_w;
  assign old_w    = half_q ? rdata[63:32] : rdata[31:0];
  assign sum_w    = fp_add(old_w, w_q);
  assign rel_data = old_w;
  assign rel_valid = (state == S_ROUT);
  assign idle     = (state == S_IDLE) && !in_l_valid && !in_r_valid && !rel_pend;

  always_comb begin
    re    = 1'b0;
    raddr = '0;
    we    = 1'b0;
    waddr = addr_q;
    wdata = rdata;
    case (state)
      S_CLR: begin
        we    = 1'b1;
        waddr = AW'(j);
        wdata = '0;
      end
      S_IDLE: if (take) begin
        re    = 1'b1;
        raddr = word_addr(req.nidx, req.step[SW-1:0]);
      end
      S_UPD: begin
        we = 1'b1;
        if (half_q) wdata[63:32] = sum_w; else wdata[31:0] = sum_w;
      end
      S_RRD: begin
        re    = 1'b1;
        raddr = word_addr(j, rel_slot);
      end
      S_ROUT: if (rel_ready) begin
        we = 1'b1;
        if (half_q) wdata[63:32] = '0; else wdata[31:0] = '0;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_RESET;
      ready  <= 1'b0;
      last_r <= 1'b0;
      j      <= '0;
      rel_pend <= 1'b0;
    end else begin
      if (rel_start) rel_pend <= 1'b1;
      case (state)
        S_RESET: if (init) begin state <= S_CLR; j <= '0; ready <= 1'b0; end
        S_CLR: begin
          j <= j + 16'd1;
          if (32'(j) == NWORDS-1) begin state <= S_IDLE; ready <= 1'b1; end
        end
        S_IDLE: begin
          if (init) begin
            state <= S_CLR; j <= '0; ready <= 1'b0;
          end else if (rel_req) begin
            rel_pend <= 1'b0;
            state    <= S_RRD;
            j        <= '0;
            rel_slot <= rel_step[SW-1:0];
            half_q   <= rel_step[0];
          end else if (take) begin
            state  <= S_UPD;
            addr_q <= raddr;
            half_q <= req.step[0];
            w_q    <= req.weight;
            last_r <= pick_r;
          end
        end
        S_UPD: state <= S_IDLE;
        S_RRD: begin
          state  <= S_ROUT;
          addr_q <= raddr;
        end
        S_ROUT: if (rel_ready) begin
          j     <= j + 16'd1;
          state <= (32'(j) == NPA-1) ? S_IDLE : S_RRD;
        end
        default: state <= S_RESET;
      endcase
    end
  end
endmodule
