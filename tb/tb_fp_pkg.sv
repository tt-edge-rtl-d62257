// Testbench helpers: exact conversion between IEEE-754 single-precision bit
// patterns and SystemVerilog reals (doubles), and random operand generation.
package tb_fp_pkg;

  // single -> double, exact (subnormals read as zero)
  function automatic real fp2real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // double -> single, round to nearest (ties away), no overflow handling
  function automatic logic [31:0] real2fp(input real r);
    logic [63:0] d;
    logic [23:0] m;
    int e;
    if (r == 0.0) return 32'd0;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]} + 24'(d[28]);
    if (m[23]) begin m = 24'd0; e = e + 1; end
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // random normal float with unbiased exponent in [-span, span]
  function automatic logic [31:0] rand_fp(input int span, input bit allow_neg = 1);
    int e;
    logic s;
    e = 127 + int'($urandom_range(2 * span)) - span;
    s = allow_neg ? 1'($urandom_range(1)) : 1'b0;
    return {s, 8'(e), 23'($urandom)};
  endfunction

  function automatic real absr(input real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // relative closeness with tolerance tol (absolute floor 1e-30)
  function automatic bit close(input real got, input real exp, input real tol);
    return absr(got - exp) <= tol * absr(exp) + 1.0e-30;
  endfunction

endpackage
