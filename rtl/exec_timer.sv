// exec_timer: execution-time counter driven by the master clock.
//
// start (a pulse when the estimator reads the first word of a step's input) clears the
// counter and starts it; stop (a pulse when the last output word is written) freezes it.
// cycles then holds the number of clock cycles between the two pulses, start cycle
// included, stop cycle excluded, and stays until the next start. running is high while
// counting. The execution time is cycles divided by the clock frequency.
module exec_timer #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         stop,
  output logic         running,
  output logic [W-1:0] cycles
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      cycles  <= '0;
    end else if (start) begin
      running <= 1'b1;
      cycles  <= W'(1);
    end else if (running) begin
      if (stop) running <= 1'b0;
      else      cycles  <= cycles + 1'b1;
    end
  end
endmodule
