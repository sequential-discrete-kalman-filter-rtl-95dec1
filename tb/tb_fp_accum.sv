// tb_fp_accum: feeds fp_accum back-to-back sums of random length (1 to 9 values, one value
// per cycle, no gap between sums) and checks each total bit-exactly against a sequential
// binary32 reference (one rounding per addition, in arrival order), and that each total
// appears exactly LAT = 20 cycles after the cycle carrying the sum's last value.
module tb_fp_accum;
  import fp_ref_pkg::*;
  localparam int LAT = 20;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0, out_valid;
  logic [31:0] x = 0, y;
  int checks = 0, failures = 0, cyc = 0;
  logic [31:0] acc;
  logic [31:0] exp_q [$];
  int          t_q [$];

  fp_accum #(.LAT(LAT)) dut (.clk, .rst_n, .in_valid, .first, .last, .x, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (in_valid) begin
    acc = first ? x : r_add(acc, x);
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
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 800; n++) begin
      int len;
      len = 1 + int'($urandom_range(8));
      for (int k = 0; k < len; k++) begin
        x <= rand_fp(110, 135); in_valid <= 1; first <= (k == 0); last <= (k == len - 1);
        @(posedge clk);
      end
      if (n % 50 == 0) begin
        in_valid <= 0;
        repeat (3) @(posedge clk);
      end
    end
    in_valid <= 0;
    repeat (LAT + 3) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
