// fp_ref_pkg: reference conversions between real (binary64) and binary32 bit patterns for
// the testbenches, written independently of the design's arithmetic. Sums, products and
// quotients of two binary32 numbers formed in binary64 and then rounded once to binary32
// equal the correctly rounded binary32 result, so the arithmetic blocks can be checked
// bit-exactly. Like the design, results below the normal range become signed zero.
package fp_ref_pkg;

  function automatic logic [31:0] to_fp32(input real x);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;
    logic [24:0] mm;
    logic        g, st;
    d = $realtobits(x);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 32'h7FC0_0000 : {s, 8'hFF, 23'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    mm = {1'b0, m[52:29]};
    g  = m[28];
    st = |m[27:0];
    if (g && (st || mm[0])) mm = mm + 25'd1;
    if (mm[24]) begin
      mm = mm >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0)   return {s, 31'd0};
    return {s, e[7:0], mm[22:0]};
  endfunction

  function automatic real to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return $bitstoreal({f[31], 63'd0});
    if (f[30:23] == 8'hFF) d = {f[31], 11'h7FF, f[22:0], 29'd0};
    else d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // random normal binary32 with biased exponent in [elo, ehi]
  function automatic logic [31:0] rand_fp(input int elo, input int ehi);
    logic [7:0] e;
    e = 8'(elo + int'($urandom_range(ehi - elo)));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

  // correctly rounded binary32 operations, via binary64
  function automatic logic [31:0] r_add(input logic [31:0] a, input logic [31:0] b);
    return to_fp32(to_real(a) + to_real(b));
  endfunction
  function automatic logic [31:0] r_sub(input logic [31:0] a, input logic [31:0] b);
    return to_fp32(to_real(a) - to_real(b));
  endfunction
  function automatic logic [31:0] r_mul(input logic [31:0] a, input logic [31:0] b);
    return to_fp32(to_real(a) * to_real(b));
  endfunction
  function automatic logic [31:0] r_div(input logic [31:0] a, input logic [31:0] b);
    return to_fp32(to_real(a) / to_real(b));
  endfunction

endpackage
