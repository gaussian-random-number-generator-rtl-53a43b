// fp_ref_pkg: reference arithmetic for the testbenches.
//
// Converts between binary32 bit patterns and the simulator's double
// precision 'real', so that expected results can be computed with the
// language's own real arithmetic, independently of the design. real_to_fp32
// rounds to nearest even and flushes subnormals to zero, as the design does.
// ulp_dist gives the distance of two binary32 values in units in the last
// place.
package fp_ref_pkg;

  function automatic real fp32_to_real(input logic [31:0] f);
    logic [10:0] e;
    if (f[30:23] == 8'd0) return 0.0;
    e = 11'(f[30:23]) - 11'd127 + 11'd1023;    // rebias to double
    return $bitstoreal({f[31], e, f[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] real_to_fp32(input real r);
    logic [63:0] b;
    int          e;
    logic [52:0] m;
    logic [24:0] mr;
    logic        up;
    if (r == 0.0) return 32'd0;
    b  = $realtobits(r);
    e  = int'(b[62:52]) - 1023 + 127;
    m  = {1'b1, b[51:0]};
    up = m[28] & ((|m[27:0]) | m[29]);
    mr = {1'b0, m[52:29]} + 25'(up);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {b[63], 8'hFF, 23'd0};
    if (e <= 0)   return {b[63], 31'd0};
    return {b[63], 8'(e), mr[22:0]};
  endfunction

  function automatic longint ordered(input logic [31:0] f);
    return f[31] ? -longint'(f[30:0]) : longint'(f[30:0]);
  endfunction

  function automatic longint ulp_dist(input logic [31:0] a, input logic [31:0] b);
    longint d;
    d = ordered(a) - ordered(b);
    return d < 0 ? -d : d;
  endfunction

  // Random normal binary32 with a random sign and exponent in [elo, ehi].
  function automatic logic [31:0] rand_fp(input int elo, input int ehi);
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(elo + int'($urandom % 32'(ehi - elo + 1)));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

endpackage
