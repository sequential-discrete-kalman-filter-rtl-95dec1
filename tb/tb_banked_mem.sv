// tb_banked_mem: random masked writes and reads on a 4-bank memory, compared with a
// behavioural model. Checks that a read returns its data one cycle after the address,
// that masked-off banks keep their old words, and that a read of the address being
// written in the same cycle returns the old word.
module tb_banked_mem;
  localparam int NB = 4, DEPTH = 24, AW = $clog2(DEPTH);
  logic clk = 0, wr_en = 0;
  logic [NB-1:0] wr_mask = 0;
  logic [AW-1:0] rd_addr = 0, wr_addr = 0;
  logic [31:0] rd_data [NB], wr_data [NB];
  logic [31:0] model [NB][DEPTH];
  logic [31:0] exp_d [NB];
  logic        exp_v = 0, chk_en = 0;
  int checks = 0, failures = 0;

  banked_mem #(.NB(NB), .DEPTH(DEPTH)) dut (.clk, .rd_addr, .rd_data, .wr_en, .wr_mask,
                                            .wr_addr, .wr_data);

  always #5 clk = ~clk;

  // compare the word read in the previous cycle, then update the model
  always @(posedge clk) begin
    if (exp_v) begin
      for (int k = 0; k < NB; k++) begin
        checks++;
        if (rd_data[k] !== exp_d[k]) begin
          failures++;
          if (failures < 10) $display("MISMATCH bank %0d got %h exp %h", k, rd_data[k], exp_d[k]);
        end
      end
    end
    for (int k = 0; k < NB; k++) exp_d[k] = model[k][rd_addr];
    exp_v = chk_en;
    if (wr_en)
      for (int k = 0; k < NB; k++) if (wr_mask[k]) model[k][wr_addr] = wr_data[k];
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < NB; k++) wr_data[k] = 0;
    // fill everything first so that every read has a defined model value
    wr_en = 1; wr_mask = '1;
    for (int a = 0; a < DEPTH; a++) begin
      wr_addr = AW'(a);
      for (int k = 0; k < NB; k++) begin
        wr_data[k] = $urandom;
      end
      @(negedge clk);
    end
    wr_en = 0;
    @(negedge clk);
    chk_en = 1;
    for (int n = 0; n < 3000; n++) begin
      wr_en   = 1'($urandom);
      wr_mask = NB'($urandom);
      wr_addr = AW'($urandom_range(DEPTH - 1));
      rd_addr = (n % 5 == 0) ? wr_addr : AW'($urandom_range(DEPTH - 1));
      for (int k = 0; k < NB; k++) wr_data[k] = $urandom;
      @(negedge clk);
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
