// fp32_pkg: IEEE-754 single-precision arithmetic used by the neuron lanes and
// the synaptic accumulators.
//
// The neuron state and the synaptic weights of this design are 32-bit floats,
// as in the published accelerator. The paper does not describe the floating
// point units themselves, so these functions are this design's own simple
// combinational versions: round-to-nearest-even, subnormal inputs and
// results flushed to (signed) zero, overflow saturating to infinity, and no
// special NaN handling (an infinite operand is passed through). All three
// functions are pure combinational logic; the modules that call them register
// the results.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP32_ZERO = 32'h0000_0000;
  localparam fp32_t FP32_ONE  = 32'h3F80_0000;

  // Round a normalised 24-bit significand (hidden bit set) with guard and
  // sticky bits, then assemble the result; handles exponent over/underflow.
  function automatic fp32_t fp_pack(input logic s, input logic signed [10:0] e,
                                    input logic [23:0] m, input logic g,
                                    input logic st);
    logic [24:0] mr;
    logic signed [10:0] er;
    mr = {1'b0, m};
    er = e;
    if (g && (st || m[0])) mr = mr + 25'd1;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 11'sd1;
    end
    if (er <= 0)        return {s, 31'd0};
    else if (er >= 255) return {s, 8'hFF, 23'd0};
    else                return {s, er[7:0], mr[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic               s;
    logic [47:0]        p;
    logic signed [10:0] e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {s, 8'hFF, 23'd0};
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0)   return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(signed'({3'b0, a[30:23]})) + 11'(signed'({3'b0, b[30:23]})) - 11'sd127;
    if (p[47]) return fp_pack(s, e + 11'sd1, p[47:24], p[23], |p[22:0]);
    else       return fp_pack(s, e, p[46:23], p[22], |p[21:0]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t              x, y;
    logic [7:0]         d;
    logic [27:0]        mx, my, sum;  // [26] hidden bit, [2:0] guard/round/sticky
    logic               st;
    logic signed [10:0] e;
    int                 lz;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? FP32_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    // x is the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b0, 1'b1, x[22:0], 3'b000};
    my = {1'b0, 1'b1, y[22:0], 3'b000};
    if (d >= 8'd27) my = 28'd1;  // only the sticky bit survives
    else if (d != 0) begin
      st = 1'b0;
      for (int k = 0; k < 27; k++) if (k < int'(d) && my[k]) st = 1'b1;
      my = (my >> d) | {27'd0, st};
    end
    e = 11'(signed'({3'b0, x[30:23]}));
    if (x[31] == y[31]) begin
      sum = mx + my;
      if (sum[27]) begin
        sum = (sum >> 1) | {27'd0, sum[0]};
        e   = e + 11'sd1;
      end
    end else begin
      sum = mx - my;
      if (sum == 28'd0) return FP32_ZERO;
      lz = 0;
      for (int k = 26; k >= 0; k--) if (sum[k] && lz == 0) lz = 27 - k;
      lz  = lz - 1;                 // leading zeros above bit 26
      sum = sum << lz;
      e   = e - 11'(lz);
    end
    return fp_pack(x[31], e, sum[26:3], sum[2], sum[1] | sum[0]);
  endfunction

  // a > b in real-number order (both zeros compare equal).
  function automatic logic fp_gt(input fp32_t a, input fp32_t b);
    logic [31:0] ka, kb;
    ka = (a[30:23] == 8'd0) ? 32'h8000_0000 : (a[31] ? ~a : {1'b1, a[30:0]});
    kb = (b[30:23] == 8'd0) ? 32'h8000_0000 : (b[31] ? ~b : {1'b1, b[30:0]});
    return ka > kb;
  endfunction

endpackage
