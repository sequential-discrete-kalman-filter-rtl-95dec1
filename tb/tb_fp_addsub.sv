// tb_fp_addsub: checks fp_addsub bit-exactly against binary64 arithmetic rounded once to
// binary32, for random operands (wide and equal exponents, so both alignment shifts and
// cancellation are exercised), zeros and infinities. One operation is issued per cycle
// and every result must appear exactly LAT = 5 cycles after its operands.
module tb_fp_addsub;
  import fp_ref_pkg::*;
  localparam int LAT = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, sub = 0, out_valid;
  logic [31:0] a = 0, b = 0, y;
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] exp_q [$];
  int          t_q [$];

  fp_addsub #(.LAT(LAT)) dut (.clk, .rst_n, .in_valid, .sub, .a, .b, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // operands as the block samples them, with the cycle they enter
  always @(posedge clk) if (in_valid) begin
    exp_q.push_back(sub ? r_sub(a, b) : r_add(a, b));
    t_q.push_back(cyc);
  end

  always @(posedge clk) if (out_valid && rst_n) begin
    logic [31:0] e; int t;
    e = exp_q.pop_front(); t = t_q.pop_front();
    checks++;
    if (y !== e || cyc - t != LAT) begin
      failures++;
      if (failures < 10) $display("MISMATCH y=%h exp=%h lat=%0d", y, e, cyc - t);
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
      logic        ts;
      int k;
      k  = n % 6;
      ta = rand_fp(60, 190);
      tb = (k < 2) ? rand_fp(60, 190) : (k < 4) ? {1'($urandom), ta[30:23], 23'($urandom)}
         : rand_fp(int'(ta[30:23]) - 30 < 1 ? 1 : int'(ta[30:23]) - 30, int'(ta[30:23]));
      if (n % 97 == 0) tb = 32'h0;
      if (n % 101 == 0) ta = 32'h7F80_0000;
      if (n % 89 == 0) tb = ta;        // exact cancellation when subtracting
      ts = 1'($urandom);
      a <= ta; b <= tb; sub <= ts; in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
