// dot_product: parallel inner product of two vectors delivered P elements per cycle.
//
// Structure (as in the reference's inner-product figure): P multipliers form the P
// element products of one block, a binary adder tree of log2(P) levels reduces them to
// one partial sum, and an accumulator adds the partial sums of successive blocks. The
// operands arrive one block per cycle with in_valid; first marks the first block of a
// vector, last the final one. out_valid pulses with the inner product in y
// LAT_MUL + log2(P)*LAT_ADD + LAT_ACC cycles after the cycle carrying last (32 cycles for
// P = 4). Inner products may follow each other without a gap. P must be a power of two.
module dot_product
  import sdkf_pkg::*;
#(
  parameter int unsigned P = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  fp32_t a [P],
  input  fp32_t b [P],
  output logic  out_valid,
  output fp32_t y
);
  localparam int unsigned NLEV = $clog2(P);
  localparam int unsigned LAT_TREE = LAT_MUL + NLEV * LAT_ADD;

  fp32_t lvl [NLEV+1][P];

  for (genvar j = 0; j < int'(P); j++) begin : g_mul
    fp_mul #(.LAT(LAT_MUL)) u_mul (
      .clk, .rst_n, .in_valid(in_valid), .a(a[j]), .b(b[j]),
      .out_valid(), .y(lvl[0][j])
    );
  end

  for (genvar l = 0; l < int'(NLEV); l++) begin : g_lvl
    for (genvar j = 0; j < int'(P); j++) begin : g_node
      if (j < int'(P >> (l + 1))) begin : g_add
        logic unused_v;
        fp_addsub #(.LAT(LAT_ADD)) u_add (
          .clk, .rst_n, .in_valid(1'b1), .sub(1'b0),
          .a(lvl[l][2*j]), .b(lvl[l][2*j+1]),
          .out_valid(unused_v), .y(lvl[l+1][j])
        );
      end else begin : g_none
        assign lvl[l+1][j] = FP_ZERO;
      end
    end
  end

  // valid / first / last travel beside the multiplier array and the adder tree
  logic t_valid, t_first, t_last;
  delay_line #(.W(3), .LAT(LAT_TREE)) u_tag (
    .clk, .rst_n, .d({in_valid, first, last}), .q({t_valid, t_first, t_last})
  );

  fp_accum #(.LAT(LAT_ACC)) u_acc (
    .clk, .rst_n, .in_valid(t_valid), .first(t_first), .last(t_last),
    .x(lvl[NLEV][0]), .out_valid, .y
  );
endmodule
