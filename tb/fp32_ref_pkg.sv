// Reference conversions between single-precision bit patterns and double-precision
// reals, used by the testbenches to compute expected float results independently of
// the RTL adder. Normal numbers only: subnormals map to zero, as in the RTL.
package fp32_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // Round a double to the nearest single (ties to even), flushing subnormals to zero.
  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int e;
    logic [23:0] m;
    logic g, s;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    g = d[28];
    s = (d[27:0] != 28'd0);
    if (g && (s || m[0])) m = m + 24'd1;
    if (m[23]) begin e = e + 1; m = 24'd0; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

endpackage
