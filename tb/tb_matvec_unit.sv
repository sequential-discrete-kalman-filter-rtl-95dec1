// tb_matvec_unit: passes random block rows (1 to 5 blocks of P x P = 4 x 4, back to back)
// through matvec_unit and checks all P outputs bit-exactly against a binary32 reference
// that repeats each replica's order of operations (rounded products, pairwise tree,
// sequential accumulation), with the 32-cycle latency from the last block.
module tb_matvec_unit;
  import fp_ref_pkg::*;
  localparam int P = 4;
  localparam int LAT = 32;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0, out_valid;
  logic [31:0] m [P][P];
  logic [31:0] v [P], y [P];
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] acc [P];
  logic [31:0] exp_q [$];
  int          t_q [$];

  matvec_unit #(.P(P)) dut (.clk, .rst_n, .in_valid, .first, .last, .m, .v, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (in_valid) begin
    for (int r = 0; r < P; r++) begin
      logic [31:0] p [P];
      logic [31:0] s;
      for (int j = 0; j < P; j++) p[j] = r_mul(m[r][j], v[j]);
      s = r_add(r_add(p[0], p[1]), r_add(p[2], p[3]));
      acc[r] = first ? s : r_add(acc[r], s);
      if (last) exp_q.push_back(acc[r]);
    end
    if (last) t_q.push_back(cyc);
  end

  always @(posedge clk) if (out_valid && rst_n) begin
    int t;
    t = t_q.pop_front();
    for (int r = 0; r < P; r++) begin
      logic [31:0] e;
      e = exp_q.pop_front();
      checks++;
      if (y[r] !== e || cyc - t != LAT) begin
        failures++;
        if (failures < 10) $display("MISMATCH row %0d y=%h exp=%h lat=%0d", r, y[r], e, cyc - t);
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
      v[r] = 0;
      for (int c = 0; c < P; c++) m[r][c] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      int len;
      len = 1 + int'($urandom_range(4));
      for (int k = 0; k < len; k++) begin
        for (int r = 0; r < P; r++) begin
          v[r] <= rand_fp(115, 135);
          for (int c = 0; c < P; c++) m[r][c] <= rand_fp(115, 135);
        end
        in_valid <= 1; first <= (k == 0); last <= (k == len - 1);
        @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    if (t_q.size() != 0) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
