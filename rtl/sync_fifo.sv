// sync_fifo: first-in first-out buffer in on-chip RAM, the send and receive buffers
// between the host processor and the estimator.
//
// Ready/valid stream on both sides: a word moves in when in_valid && in_ready and out when
// out_valid && out_ready. out_data shows the oldest word whenever out_valid is high
// (first-word fall-through). DEPTH must be a power of two; count gives the fill level.
// The assertions state the stream rules the neighbours must keep: a producer held off by
// a low ready keeps its word stable until it is taken.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [AW:0]  count
);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wptr, rptr;
  logic         push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign count     = wptr - rptr;
  assign out_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
    end
  end

  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready) |=> (in_valid && $stable(in_data)))
    else $error("sync_fifo: producer dropped or changed a word while stalled");
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AW+1)'(DEPTH));
endmodule
