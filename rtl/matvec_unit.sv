// matvec_unit: matrix-vector product built from P replicas of the inner-product unit.
//
// Each cycle it takes one P x P block m of a matrix (m[r][c] = row r, column c of the
// block) and the matching P-element block v of a vector. Replica r forms the inner
// product of block row r with v, accumulated over the blocks flagged first .. last, so a
// pass over one block row of the matrix yields P elements of the product, all at once in
// y[0..P-1]. Latency from last to out_valid equals that of dot_product (32 cycles for P=4).
module matvec_unit
  import sdkf_pkg::*;
#(
  parameter int unsigned P = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  fp32_t m [P][P],
  input  fp32_t v [P],
  output logic  out_valid,
  output fp32_t y [P]
);
  logic ov [P];

  for (genvar r = 0; r < int'(P); r++) begin : g_row
    dot_product #(.P(P)) u_dot (
      .clk, .rst_n, .in_valid, .first, .last,
      .a(m[r]), .b(v), .out_valid(ov[r]), .y(y[r])
    );
  end

  assign out_valid = ov[0];
endmodule
