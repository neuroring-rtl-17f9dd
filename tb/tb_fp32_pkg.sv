// tb_fp32_pkg: self-checking test of the fp32 add, multiply and compare
// functions against real-number arithmetic rounded once to single precision.
// Operand exponents are kept within 20 of each other so that the double
// sum is exact and the single rounding of the reference is the IEEE result.
module tb_fp32_pkg;
  import fp32_pkg::*;
  import tb_util_pkg::*;

  int checks = 0, failures = 0;

  function automatic logic [31:0] rand_fp(input int emin, input int emax);
    logic [31:0] x;
    x = $urandom;
    x[30:23] = 8'(emin + int'($urandom % 32'(emax - emin + 1)));
    return x;
  endfunction

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp,
                       input logic [31:0] a, input logic [31:0] b);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, got, exp);
    end
  endtask

  // watchdog: this test advances no time; if it ever does, stop it
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] a, b;
    // directed cases
    check("add 1+1", fp_add(32'h3F80_0000, 32'h3F80_0000), 32'h4000_0000, 0, 0);
    check("add 1-1", fp_add(32'h3F80_0000, 32'hBF80_0000), 32'h0000_0000, 0, 0);
    check("mul 2*3", fp_mul(32'h4000_0000, 32'h4040_0000), 32'h40C0_0000, 0, 0);
    check("add 0+x", fp_add(32'h0000_0000, 32'h4120_0000), 32'h4120_0000, 0, 0);
    check("mul 0*x", fp_mul(32'h0000_0000, 32'h4120_0000), 32'h0000_0000, 0, 0);
    check("add tie-even", fp_add(32'h4B80_0000, 32'h3F80_0000), 32'h4B80_0000, 0, 0);
    for (int n = 0; n < 20000; n++) begin
      int ea;
      ea = 100 + int'($urandom % 50);
      a = rand_fp(ea, ea);
      b = rand_fp(ea - 20 + int'($urandom % 21), ea);
      if ($urandom % 2) begin logic [31:0] t; t = a; a = b; b = t; end
      check("add", fp_add(a, b), r2f(f2r(a) + f2r(b)), a, b);
      check("mul", fp_mul(a, b), r2f(f2r(a) * f2r(b)), a, b);
      checks++;
      if (fp_gt(a, b) !== (f2r(a) > f2r(b))) begin
        failures++;
        if (failures < 10) $display("FAIL gt a=%h b=%h", a, b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
