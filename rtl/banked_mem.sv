// banked_mem: NB separate RAM banks of DEPTH words each, sharing one address.
//
// Parallel processing needs P (vectors) or P*P (matrices) operands per cycle, so every
// operand is split into blocks and element k of a block lives in bank k. One read port:
// rd_addr is registered, rd_data is valid the next cycle (block-RAM timing). One write
// port: wr_en with a per-bank wr_mask writes wr_data[k] at wr_addr into the banks whose
// mask bit is set. A read and a write of the same address in one cycle returns the old
// word. Memory contents are not reset.
module banked_mem #(
  parameter int unsigned NB    = 4,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned W     = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data [NB],
  input  logic          wr_en,
  input  logic [NB-1:0] wr_mask,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data [NB]
);
  for (genvar k = 0; k < int'(NB); k++) begin : g_bank
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_mask[k]) mem[wr_addr] <= wr_data[k];
      rd_data[k] <= mem[rd_addr];
    end
  end
endmodule
