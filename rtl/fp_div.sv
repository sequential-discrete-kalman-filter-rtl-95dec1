// fp_div: single-precision floating-point divider.
//
// y = a / b, rounded to nearest even, one operation per cycle, result LAT cycles after the
// operands (default 20 cycles, the reference divider configuration). The estimator uses it
// once per measurement to form 1/W, the inverse of the scalar innovation variance.
// Combinational fp_div of sdkf_pkg (an integer quotient of the significands with a
// remainder-based sticky bit) followed by a LAT-stage register pipeline.
module fp_div
  import sdkf_pkg::*;
#(
  parameter int unsigned LAT = 20
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t a,
  input  fp32_t b,
  output logic  out_valid,
  output fp32_t y
);
  fp32_t res;
  assign res = fp_div(a, b);

  delay_line #(.W(33), .LAT(LAT)) u_pipe (
    .clk, .rst_n, .d({in_valid, res}), .q({out_valid, y})
  );
endmodule
