// matrix_unit: P x P array for matrix addition / subtraction and the outer product.
//
// One P x P matrix block m per cycle, together with two P-element vector blocks u and v.
// Each of the P*P lanes has a multiplier forming the outer-product element u[r]*v[c] and
// an adder / subtractor: y[r][c] = m[r][c] - u[r]*v[c] (sub = 1) or m[r][c] + u[r]*v[c]
// (sub = 0). With diag_only = 1 only the lanes r == c are updated and the others pass
// m through. The estimator uses it for the covariance update P = P - K*C (outer product
// contracted with the matrix subtraction) and, on diagonal blocks with v = 1.0, for the
// prediction P = P + Q with diagonal Q. Latency LAT_MUL + LAT_ADD = 7 cycles.
module matrix_unit
  import sdkf_pkg::*;
#(
  parameter int unsigned P = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  sub,
  input  logic  diag_only,
  input  fp32_t m [P][P],
  input  fp32_t u [P],
  input  fp32_t v [P],
  output logic  out_valid,
  output fp32_t y [P][P]
);
  logic sub_d, diag_d;
  delay_line #(.W(2), .LAT(LAT_MUL)) u_mode (
    .clk, .rst_n, .d({sub, diag_only}), .q({sub_d, diag_d})
  );

  logic av [P][P];

  for (genvar r = 0; r < int'(P); r++) begin : g_r
    for (genvar c = 0; c < int'(P); c++) begin : g_c
      fp32_t prod, m_d;
      logic  mv;
      fp_mul #(.LAT(LAT_MUL)) u_mul (
        .clk, .rst_n, .in_valid, .a(u[r]), .b(v[c]), .out_valid(mv), .y(prod)
      );
      delay_line #(.W(32), .LAT(LAT_MUL)) u_md (.clk, .rst_n, .d(m[r][c]), .q(m_d));
      fp_addsub #(.LAT(LAT_ADD)) u_add (
        .clk, .rst_n, .in_valid(mv), .sub(sub_d),
        .a(m_d), .b((diag_d && r != c) ? FP_ZERO : prod),
        .out_valid(av[r][c]), .y(y[r][c])
      );
    end
  end

  assign out_valid = av[0][0];
endmodule
