// sdkf_pkg: types, constants and IEEE-754 single-precision arithmetic shared by the
// Sequential Discrete Kalman Filter (SDKF) estimator.
//
// The estimator works in single precision (binary32) throughout, as the reference design
// does. The functions fp_add, fp_mul and fp_div below are the combinational cores of the
// arithmetic blocks; the blocks themselves (fp_addsub, fp_mul, fp_div, fp_accum) add the
// pipeline latency of the reference configuration. Rounding is round-to-nearest-even.
// Subnormal inputs are read as zero and subnormal results are flushed to signed zero
// (a common choice for FPGA floating-point cores and this design's own); infinities and
// NaNs propagate, overflow gives infinity.
//
// The package also holds the host command encoding of the estimator (an own choice, the
// reference only says that CPU and FPGA exchange data through FIFOs under a handshake).
package sdkf_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_QNAN = 32'h7FC0_0000;

  // Arithmetic block latencies (cycles), one result per cycle each.
  localparam int unsigned LAT_ADD = 5;
  localparam int unsigned LAT_MUL = 2;
  localparam int unsigned LAT_ACC = 20;
  localparam int unsigned LAT_DIV = 20;

  // Host command word: opcode in [31:24], argument in [23:0].
  typedef enum logic [7:0] {
    OP_NOP    = 8'h00,
    OP_SIZE   = 8'h01,  // arg[11:0] = S (states), arg[23:12] = D (measurements)
    OP_LOAD_H = 8'h02,  // D*S words follow, H row-major
    OP_LOAD_R = 8'h03,  // D words follow, diagonal of R
    OP_LOAD_Q = 8'h04,  // S words follow, diagonal of Q
    OP_LOAD_X = 8'h05,  // S words follow, state estimate x
    OP_INIT_P = 8'h06,  // no payload: P := diag(Q)
    OP_STEP   = 8'h07,  // D words z_k follow; S words of x_k^+ are sent back
    OP_READ_P = 8'h08   // no payload: S*S words of P are sent back, row-major
  } opcode_e;

  // Pipeline tag that travels next to the data through the arithmetic blocks.
  typedef struct packed {
    logic       valid;
    logic       first;
    logic       last;
    logic [7:0] br;    // block row
    logic [7:0] bc;    // block column
  } tag_t;

  // ---------------------------------------------------------------------------------
  // Rounding and packing: mant holds 24 significant bits (hidden one at bit 23),
  // g is the guard bit, st the sticky OR of everything below it. exp is the biased
  // exponent of mant before rounding.
  function automatic fp32_t fp_round_pack(input logic sign, input logic signed [11:0] exp,
                                          input logic [23:0] mant, input logic g,
                                          input logic st);
    logic [24:0] m;
    logic signed [11:0] e;
    logic up;
    up = g & (st | mant[0]);
    m  = {1'b0, mant} + {24'd0, up};
    e  = exp;
    if (m[24]) begin
      m = m >> 1;
      e = e + 12'sd1;
    end
    if (e >= 12'sd255)     return {sign, 8'hFF, 23'd0};
    else if (e <= 12'sd0)  return {sign, 31'd0};
    else                   return {sign, e[7:0], m[22:0]};
  endfunction

  function automatic logic fp_is_nan(input fp32_t a);
    return (a[30:23] == 8'hFF) && (a[22:0] != 23'd0);
  endfunction

  // ---------------------------------------------------------------------------------
  // a + b
  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    logic        sa, sb, sx;
    logic [7:0]  ea, eb;
    logic [23:0] ma, mb;
    logic [7:0]  d;
    logic [50:0] ext;
    logic [26:0] mbx;
    logic [27:0] sum;
    logic [26:0] r;
    logic signed [11:0] e;
    int lz;
    sa = a[31]; sb = b[31];
    ea = a[30:23]; eb = b[30:23];
    // special operands
    if (ea == 8'hFF || eb == 8'hFF) begin
      if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
      if (ea == 8'hFF && eb == 8'hFF) return (sa == sb) ? a : FP_QNAN;
      return (ea == 8'hFF) ? a : b;
    end
    if (ea == 8'd0 && eb == 8'd0) return {sa & sb, 31'd0};
    if (ea == 8'd0) return b;
    if (eb == 8'd0) return a;
    // order so that |a| >= |b|
    if (a[30:0] < b[30:0]) begin
      {sa, ea, sb, eb} = {sb, eb, sa, ea};
      ma = {1'b1, b[22:0]};
      mb = {1'b1, a[22:0]};
    end else begin
      ma = {1'b1, a[22:0]};
      mb = {1'b1, b[22:0]};
    end
    d = ea - eb;
    if (d >= 8'd27) begin
      mbx = 27'd1;                       // only the sticky bit survives
    end else begin
      ext = {mb, 27'd0} >> d;
      mbx = ext[50:24];
      mbx[0] = mbx[0] | (|ext[23:0]);
    end
    sx = sa;
    if (sa == sb) begin
      sum = {1'b0, ma, 3'd0} + {1'b0, mbx};
      if (sum[27]) begin
        r = sum[27:1];
        r[0] = r[0] | sum[0];
        e = $signed({4'd0, ea}) + 12'sd1;
      end else begin
        r = sum[26:0];
        e = $signed({4'd0, ea});
      end
    end else begin
      r = {ma, 3'd0} - mbx;
      if (r == 27'd0) return FP_ZERO;
      // leading-zero count: the highest set bit wins (r is non-zero here)
      lz = 0;
      for (int k = 0; k <= 26; k++) if (r[k]) lz = 26 - k;
      r = r << lz;
      e = $signed({4'd0, ea}) - 12'(lz);
    end
    return fp_round_pack(sx, e, r[26:3], r[2], r[1] | r[0]);
  endfunction

  // a * b
  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [47:0] p;
    logic signed [11:0] e;
    s  = a[31] ^ b[31];
    ea = a[30:23]; eb = b[30:23];
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (ea == 8'hFF || eb == 8'hFF) begin
      if (ea == 8'd0 || eb == 8'd0) return FP_QNAN;   // inf * 0
      return {s, 8'hFF, 23'd0};
    end
    if (ea == 8'd0 || eb == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = $signed({4'd0, ea}) + $signed({4'd0, eb}) - 12'sd127;
    if (p[47]) return fp_round_pack(s, e + 12'sd1, p[47:24], p[23], |p[22:0]);
    else       return fp_round_pack(s, e, p[46:23], p[22], |p[21:0]);
  endfunction

  // a / b
  function automatic fp32_t fp_div(input fp32_t a, input fp32_t b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [50:0] num;
    logic [50:0] q;
    logic [23:0] den;
    logic        rem_nz;
    logic signed [11:0] e;
    s  = a[31] ^ b[31];
    ea = a[30:23]; eb = b[30:23];
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (ea == 8'hFF) return (eb == 8'hFF) ? FP_QNAN : {s, 8'hFF, 23'd0};
    if (eb == 8'hFF) return {s, 31'd0};
    if (eb == 8'd0)  return (ea == 8'd0) ? FP_QNAN : {s, 8'hFF, 23'd0};
    if (ea == 8'd0)  return {s, 31'd0};
    num = {1'b1, a[22:0], 27'd0};
    den = {1'b1, b[22:0]};
    q   = num / {27'd0, den};
    rem_nz = (num % {27'd0, den}) != 51'd0;
    e = $signed({4'd0, ea}) - $signed({4'd0, eb}) + 12'sd127;
    if (q[27]) return fp_round_pack(s, e, q[27:4], q[3], (|q[2:0]) | rem_nz);
    else       return fp_round_pack(s, e - 12'sd1, q[26:3], q[2], (|q[1:0]) | rem_nz);
  endfunction

endpackage
