// tb_dot_product: streams inner products of random length (1 to 6 blocks of P = 4 element
// pairs, back to back) through dot_product. The reference repeats the unit's order of
// operations in binary32: P rounded products, a pairwise tree ((p0+p1)+(p2+p3)), then a
// sequential accumulation over blocks, so the comparison is bit-exact. Each result must
// appear 2 + 2*5 + 20 = 32 cycles after the cycle carrying the last block.
module tb_dot_product;
  import fp_ref_pkg::*;
  localparam int P = 4;
  localparam int LAT = 32;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0, out_valid;
  logic [31:0] a [P], b [P];
  logic [31:0] y;
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] acc;
  logic [31:0] exp_q [$];
  int          t_q [$];

  dot_product #(.P(P)) dut (.clk, .rst_n, .in_valid, .first, .last, .a, .b, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [31:0] block_sum(input logic [31:0] aa [P], input logic [31:0] bb [P]);
    logic [31:0] p [P];
    for (int j = 0; j < P; j++) p[j] = r_mul(aa[j], bb[j]);
    return r_add(r_add(p[0], p[1]), r_add(p[2], p[3]));
  endfunction

  always @(posedge clk) if (in_valid) begin
    logic [31:0] s;
    s = block_sum(a, b);
    acc = first ? s : r_add(acc, s);
    if (last) begin
      exp_q.push_back(acc);
      t_q.push_back(cyc);
    end
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
    for (int j = 0; j < P; j++) begin a[j] = 0; b[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 600; n++) begin
      int len;
      len = 1 + int'($urandom_range(5));
      for (int k = 0; k < len; k++) begin
        for (int j = 0; j < P; j++) begin a[j] <= rand_fp(115, 135); b[j] <= rand_fp(115, 135); end
        in_valid <= 1; first <= (k == 0); last <= (k == len - 1);
        @(posedge clk);
      end
      if (n % 40 == 0) begin
        in_valid <= 0;
        repeat (5) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
