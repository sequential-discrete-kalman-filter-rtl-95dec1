// tb_vector_unit: random blocks through vector_unit in both modes, y = a + s*b and
// y = s*b, one block per cycle with the mode changing from block to block; outputs are
// checked bit-exactly (product rounded, then the sum rounded) and must appear 2 + 5 = 7
// cycles after their operands.
module tb_vector_unit;
  import fp_ref_pkg::*;
  localparam int P = 4;
  localparam int LAT = 7;
  logic clk = 0, rst_n = 0, in_valid = 0, scale_only = 0, out_valid;
  logic [31:0] s = 0;
  logic [31:0] a [P], b [P], y [P];
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] exp_q [$];
  int          t_q [$];

  vector_unit #(.P(P)) dut (.clk, .rst_n, .in_valid, .scale_only, .s, .a, .b, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (in_valid) begin
    for (int j = 0; j < P; j++)
      exp_q.push_back(scale_only ? r_mul(s, b[j]) : r_add(a[j], r_mul(s, b[j])));
    t_q.push_back(cyc);
  end

  always @(posedge clk) if (out_valid && rst_n) begin
    int t;
    t = t_q.pop_front();
    for (int j = 0; j < P; j++) begin
      logic [31:0] e;
      e = exp_q.pop_front();
      checks++;
      if (y[j] !== e || cyc - t != LAT) begin
        failures++;
        if (failures < 10) $display("MISMATCH lane %0d y=%h exp=%h lat=%0d", j, y[j], e, cyc - t);
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < P; j++) begin a[j] = 0; b[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 1000; n++) begin
      s <= rand_fp(110, 140);
      scale_only <= 1'($urandom);
      for (int j = 0; j < P; j++) begin a[j] <= rand_fp(110, 140); b[j] <= rand_fp(110, 140); end
      in_valid <= (n % 17 != 0);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    if (t_q.size() != 0) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
