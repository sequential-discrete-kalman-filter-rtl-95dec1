// fp_addsub: single-precision floating-point adder / subtractor.
//
// y = a + b (sub = 0) or y = a - b (sub = 1), rounded to nearest even. Throughput is one
// operation per cycle and the result (with out_valid) appears LAT cycles after the
// operands (with in_valid); LAT defaults to the 5 cycles of the reference adder
// configuration. The arithmetic is the combinational fp_add of sdkf_pkg followed by a
// LAT-stage register pipeline, which a synthesis tool can retime into the logic; the
// internal staging of the reference's vendor core is not known and not copied.
module fp_addsub
  import sdkf_pkg::*;
#(
  parameter int unsigned LAT = 5
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  sub,
  input  fp32_t a,
  input  fp32_t b,
  output logic  out_valid,
  output fp32_t y
);
  fp32_t res;
  assign res = fp_add(a, sub ? {~b[31], b[30:0]} : b);

  delay_line #(.W(33), .LAT(LAT)) u_pipe (
    .clk, .rst_n, .d({in_valid, res}), .q({out_valid, y})
  );
endmodule
