// tb_matrix_unit: random P x P blocks through matrix_unit with the three settings the
// estimator uses and one more (m - u v^T, m + u v^T, and both with diag_only), changing
// every cycle. Each of the 16 outputs is checked bit-exactly against m -/+ round(u[r]*v[c])
// (or m itself off the diagonal with diag_only), 2 + 5 = 7 cycles after the operands.
module tb_matrix_unit;
  import fp_ref_pkg::*;
  localparam int P = 4;
  localparam int LAT = 7;
  logic clk = 0, rst_n = 0, in_valid = 0, sub = 0, diag_only = 0, out_valid;
  logic [31:0] m [P][P], y [P][P];
  logic [31:0] u [P], v [P];
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] exp_q [$];
  int          t_q [$];

  matrix_unit #(.P(P)) dut (.clk, .rst_n, .in_valid, .sub, .diag_only, .m, .u, .v,
                            .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (in_valid) begin
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) begin
        logic [31:0] pr;
        pr = r_mul(u[r], v[c]);
        if (diag_only && r != c) exp_q.push_back(r_add(m[r][c], 32'h0));
        else exp_q.push_back(sub ? r_sub(m[r][c], pr) : r_add(m[r][c], pr));
      end
    t_q.push_back(cyc);
  end

  always @(posedge clk) if (out_valid && rst_n) begin
    int t;
    t = t_q.pop_front();
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++) begin
        logic [31:0] e;
        e = exp_q.pop_front();
        checks++;
        if (y[r][c] !== e || cyc - t != LAT) begin
          failures++;
          if (failures < 10) $display("MISMATCH (%0d,%0d) y=%h exp=%h lat=%0d", r, c, y[r][c], e, cyc - t);
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
    for (int r = 0; r < P; r++) begin
      u[r] = 0; v[r] = 0;
      for (int c = 0; c < P; c++) m[r][c] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 600; n++) begin
      for (int r = 0; r < P; r++) begin
        u[r] <= rand_fp(110, 135);
        v[r] <= (n % 4 == 3) ? 32'h3F80_0000 : rand_fp(110, 135);
        for (int c = 0; c < P; c++) m[r][c] <= rand_fp(110, 135);
      end
      sub <= 1'($urandom); diag_only <= (n % 4 == 3);
      in_valid <= (n % 13 != 0);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    if (t_q.size() != 0) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
