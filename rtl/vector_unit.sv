// vector_unit: P-lane vector scaling and addition, y = a + s*b or y = s*b.
//
// One P-element block per cycle. Each lane has a multiplier (s*b[j]) followed by an adder.
// With scale_only = 1 the adder passes the product through (it adds +0), otherwise it adds
// a[j]. The estimator uses the scaling for the Kalman gain, K = C * (1/W), and the fused
// form for the state update, x = x + C * (dz/W), which contracts the vector scaling and the
// vector addition of the algorithm into one pass. Latency LAT_MUL + LAT_ADD = 7 cycles.
module vector_unit
  import sdkf_pkg::*;
#(
  parameter int unsigned P = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  scale_only,
  input  fp32_t s,
  input  fp32_t a [P],
  input  fp32_t b [P],
  output logic  out_valid,
  output fp32_t y [P]
);
  fp32_t prod [P];
  fp32_t a_d  [P];
  logic  mv   [P];
  logic  av   [P];
  logic  so_d;

  delay_line #(.W(1), .LAT(LAT_MUL)) u_mode (.clk, .rst_n, .d(scale_only), .q(so_d));

  for (genvar j = 0; j < int'(P); j++) begin : g_lane
    fp_mul #(.LAT(LAT_MUL)) u_mul (
      .clk, .rst_n, .in_valid, .a(s), .b(b[j]), .out_valid(mv[j]), .y(prod[j])
    );
    delay_line #(.W(32), .LAT(LAT_MUL)) u_ad (.clk, .rst_n, .d(a[j]), .q(a_d[j]));
    fp_addsub #(.LAT(LAT_ADD)) u_add (
      .clk, .rst_n, .in_valid(mv[j]), .sub(1'b0),
      .a(so_d ? FP_ZERO : a_d[j]), .b(prod[j]), .out_valid(av[j]), .y(y[j])
    );
  end

  assign out_valid = av[0];
endmodule
