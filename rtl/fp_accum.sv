// fp_accum: single-precision floating-point accumulator (the "sum" block closing the inner
// product tree).
//
// It takes one value x per cycle while in_valid is high. first marks the first value of a
// sum, last the final one; a new sum may start the cycle after the previous last, so
// back-to-back sums run at full rate. LAT cycles after the cycle that delivered last
// (default 20, the reference accumulator latency) out_valid pulses with the total in y.
// Values are added in arrival order with one rounding per addition. The running sum is a
// single register fed back through a combinational adder so that every cycle can add;
// the LAT-stage output pipeline gives the reference latency. A one-value sum (first and
// last together) returns x unchanged.
module fp_accum
  import sdkf_pkg::*;
#(
  parameter int unsigned LAT = 20
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  fp32_t x,
  output logic  out_valid,
  output fp32_t y
);
  fp32_t acc, nxt;

  assign nxt = first ? x : fp_add(acc, x);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= FP_ZERO;
    else if (in_valid) acc <= nxt;
  end

  delay_line #(.W(33), .LAT(LAT)) u_pipe (
    .clk, .rst_n, .d({in_valid & last, nxt}), .q({out_valid, y})
  );
endmodule
