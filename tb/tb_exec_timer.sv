// tb_exec_timer: start / stop pulses at random distances; after each stop the counter must
// hold exactly the number of cycles from the start pulse to the stop pulse, stay frozen
// while idle, and report running only in between.
module tb_exec_timer;
  logic clk = 0, rst_n = 0, start = 0, stop = 0, running;
  logic [31:0] cycles;
  int checks = 0, failures = 0;

  exec_timer #(.W(32)) dut (.clk, .rst_n, .start, .stop, .running, .cycles);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int len, idle;
      len  = 1 + int'($urandom_range(300));
      idle = int'($urandom_range(10));
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      checks++;
      if (!running) begin failures++; $display("not running after start"); end
      repeat (len - 1) @(negedge clk);
      stop = 1;
      @(negedge clk); stop = 0;
      checks++;
      if (running || cycles != 32'(len)) begin
        failures++;
        $display("len %0d measured %0d running %b", len, cycles, running);
      end
      repeat (idle) @(negedge clk);
      checks++;
      if (cycles != 32'(len)) begin failures++; $display("value did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
