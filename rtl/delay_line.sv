// delay_line: a W-bit shift register of LAT stages (LAT >= 1).
//
// Used as the pipeline of every arithmetic block and to carry address and control tags
// alongside the data, so that a result leaves exactly LAT cycles after its operands
// entered. All stages reset to zero, so tags carried here start out invalid.
module delay_line #(
  parameter int unsigned W   = 32,
  parameter int unsigned LAT = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] stage [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(LAT); k++) stage[k] <= '0;
    end else begin
      stage[0] <= d;
      for (int k = 1; k < int'(LAT); k++) stage[k] <= stage[k-1];
    end
  end

  assign q = stage[LAT-1];

  initial begin
    if (LAT < 1) $error("delay_line: LAT must be at least 1");
  end
endmodule
