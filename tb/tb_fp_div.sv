// tb_fp_div: checks fp_div bit-exactly against binary64 quotients rounded once to binary32
// (random operands kept in the normal range, plus zeros and infinities), one operation per
// cycle, each result exactly LAT = 20 cycles after its operands.
module tb_fp_div;
  import fp_ref_pkg::*;
  localparam int LAT = 20;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [31:0] a = 0, b = 0, y;
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] exp_q [$];
  int          t_q [$];

  fp_div #(.LAT(LAT)) dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (in_valid) begin
    exp_q.push_back(r_div(a, b));
    t_q.push_back(cyc);
  end

  always @(posedge clk) if (out_valid && rst_n) begin
    logic [31:0] e; int t;
    e = exp_q.pop_front(); t = t_q.pop_front();
    checks++;
    if (y !== e || cyc - t != LAT) begin
      failures++;
      if (failures < 10) $display("MISMATCH a/b y=%h exp=%h lat=%0d", y, e, cyc - t);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      logic [31:0] ta, tb;
      ta = rand_fp(70, 180);
      tb = rand_fp(70, 180);
      if (n % 97 == 0) tb = 32'h0;
      if (n % 101 == 0) ta = 32'hFF80_0000;
      if (n % 53 == 0) tb = 32'h3F80_0000;
      a <= ta; b <= tb; in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
