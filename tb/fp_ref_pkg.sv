// fp_ref_pkg -- reference single-precision arithmetic for the testbenches.
//
// Converts binary32 bit patterns to and from the simulator's double-precision
// `real` bit by bit, so the reference does not depend on the design's FP units.
// A binary32 sum or product computed in double precision and then rounded once
// to binary32 is the correctly rounded binary32 result.  The conversions follow
// the design's conventions: subnormals read and written as zero, round to
// nearest even, overflow to infinity.
package fp_ref_pkg;

  function automatic real f2r(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) begin
      m = m + 24'd1;
      if (m == 24'd0) begin   // carried out of 24 bits
        m = 24'h800000;
        e = e + 1;
      end
    end
    if (e <= 0)   return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // Random normal binary32 with exponent in [127-span, 127+span].
  function automatic logic [31:0] rand_fp(input int span);
    int e;
    e = 127 - span + int'($urandom_range(2 * span, 0));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
