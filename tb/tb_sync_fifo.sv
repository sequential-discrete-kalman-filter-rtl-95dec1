// tb_sync_fifo: random push / pop traffic on a 16-word FIFO against a queue model. Checks
// word order, the fill level, that in_ready drops exactly when the FIFO is full and that
// out_valid drops exactly when it is empty. The producer obeys the stream rule (a word
// offered while in_ready is low stays offered).
module tb_sync_fifo;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [31:0] in_data = 0, out_data;
  logic [$clog2(DEPTH):0] count;
  logic [31:0] q [$];
  int checks = 0, failures = 0, fulls = 0, empties = 0;

  sync_fifo #(.W(32), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                                          .out_valid, .out_ready, .out_data, .count);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(count) != q.size() || in_ready != (q.size() < DEPTH) || out_valid != (q.size() > 0)) begin
      failures++;
      if (failures < 10) $display("STATE count=%0d model=%0d rdy=%b vld=%b", count, q.size(), in_ready, out_valid);
    end
    if (q.size() == DEPTH) fulls++;
    if (q.size() == 0) empties++;
    if (out_valid && out_ready) begin
      logic [31:0] e;
      e = q.pop_front();
      checks++;
      if (out_data !== e) begin
        failures++;
        if (failures < 10) $display("DATA got %h exp %h", out_data, e);
      end
    end
    if (in_valid && in_ready) q.push_back(in_data);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 4000; n++) begin
      int phase;
      phase = (n / 500) % 2;   // alternately mostly-filling and mostly-draining
      @(posedge clk);
      // a new word only once the previous one has been taken (or none was offered)
      if (!in_valid || in_ready) begin
        in_valid <= ($urandom_range(99) < (phase == 0 ? 80 : 30));
        in_data  <= $urandom;
      end
      out_ready <= ($urandom_range(99) < (phase == 0 ? 30 : 80));
    end
    @(posedge clk);
    while (in_valid && !in_ready) @(posedge clk);
    in_valid <= 0;
    out_ready <= 1;
    repeat (DEPTH + 2) @(negedge clk);
    if (fulls == 0 || empties == 0) begin
      failures++;
      $display("full (%0d) or empty (%0d) never reached", fulls, empties);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
