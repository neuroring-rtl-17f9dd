// tb_util_pkg: conversions between IEEE-754 single-precision bit patterns
// and SystemVerilog real numbers, for computing reference values in the
// testbenches independently of the RTL floating point functions.
// r2f rounds a real (double) to the nearest single (ties to even), flushing
// subnormals to zero like the RTL does.
package tb_util_pkg;

  function automatic logic [31:0] r2f(input real x);
    logic [63:0]        d;
    logic               s;
    int                 ef;
    logic [24:0]        mant;
    logic               g, st;
    d = $realtobits(x);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    ef   = int'(d[62:52]) - 1023 + 127;
    mant = {2'b01, d[51:29]};
    g    = d[28];
    st   = |d[27:0];
    if (g && (st || mant[0])) mant = mant + 25'd1;
    if (mant[24]) begin mant = mant >> 1; ef = ef + 1; end
    if (ef <= 0)   return {s, 31'd0};
    if (ef >= 255) return {s, 8'hFF, 23'd0};
    return {s, 8'(ef), mant[22:0]};
  endfunction

  function automatic real f2r(input logic [31:0] f);
    logic [10:0] e;
    if (f[30:23] == 8'd0) return 0.0;
    e = 11'(int'(f[30:23]) - 127 + 1023);
    return $bitstoreal({f[31], e, f[22:0], 29'd0});
  endfunction

  function automatic real fabs(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // Reference LIF lane update (same equations as the RTL lane, computed in
  // real arithmetic with one rounding to single precision per operation).
  // State is passed and returned by reference; returns the spike flag.
  function automatic logic lif_ref(input logic [31:0] p11, p21, p22, c20, v_th, v_reset,
                                   input logic [15:0] ref_steps, input logic [31:0] w,
                                   inout logic [31:0] v, inout logic [31:0] i,
                                   inout logic [15:0] rc);
    logic [31:0] vn, in_;
    logic        spk;
    in_ = r2f(f2r(r2f(f2r(i) * f2r(p11))) + f2r(w));
    spk = 1'b0;
    if (rc != 0) begin
      vn = v_reset;
      rc = rc - 16'd1;
    end else begin
      vn = r2f(f2r(r2f(f2r(r2f(f2r(v) * f2r(p22))) + f2r(r2f(f2r(i) * f2r(p21))))) + f2r(c20));
      if (f2r(vn) > f2r(v_th)) begin
        spk = 1'b1;
        vn  = v_reset;
        rc  = ref_steps;
      end
    end
    v = vn;
    i = in_;
    return spk;
  endfunction

endpackage
