// fp_mul: single-precision floating-point multiplier.
//
// y = a * b, rounded to nearest even, one operation per cycle, result LAT cycles after the
// operands (default 2 cycles, the reference multiplier configuration). Combinational
// fp_mul of sdkf_pkg followed by a LAT-stage register pipeline.
module fp_mul
  import sdkf_pkg::*;
#(
  parameter int unsigned LAT = 2
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
  assign res = fp_mul(a, b);

  delay_line #(.W(33), .LAT(LAT)) u_pipe (
    .clk, .rst_n, .d({in_valid, res}), .q({out_valid, y})
  );
endmodule
