// sdkf_top: real-time state estimator for three-phase distribution grids, built on the
// Sequential Discrete Kalman Filter (SDKF), with its host-side buffers.
//
// The design has the four parts of the reference architecture: communication (a receive
// and a send FIFO towards the host processor, which moves words in and out by DMA),
// control, computation and memory (all three inside sdkf_core), plus an execution-time
// counter driven by the master clock.
//
// Interface. host_rx_* is the ready/valid word stream from the host (commands and data,
// see sdkf_pkg::opcode_e and sdkf_core), host_tx_* the stream back to it. irq rises when
// a step's estimate x_k^+ has been written to the send FIFO and stays high until irq_ack.
// exec_cycles holds the clock cycles of the latest step, from reading its command word to
// writing its last output word. busy is high while the core is not waiting for a command;
// err flags a rejected command.
//
// Timing. One estimation step with S states and D measurements (S a multiple of P_PAR,
// SB = S/P_PAR) takes about D*(2*SB^2 + 2*SB + 130) + 2*SB + SB*P_PAR + D cycles.
module sdkf_top
  import sdkf_pkg::*;
#(
  parameter int unsigned P_PAR      = 4,
  parameter int unsigned S_MAX      = 252,
  parameter int unsigned D_MAX      = 252,
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_rx_valid,
  output logic        host_rx_ready,
  input  logic [31:0] host_rx_data,
  output logic        host_tx_valid,
  input  logic        host_tx_ready,
  output logic [31:0] host_tx_data,
  output logic        irq,
  input  logic        irq_ack,
  output logic        busy,
  output logic        err,
  output logic [31:0] exec_cycles
);
  logic        rx_valid, rx_ready, tx_valid, tx_ready;
  logic [31:0] rx_data, tx_data;
  logic        t_start, t_stop;

  sync_fifo #(.W(32), .DEPTH(FIFO_DEPTH)) u_rx_fifo (
    .clk, .rst_n,
    .in_valid(host_rx_valid), .in_ready(host_rx_ready), .in_data(host_rx_data),
    .out_valid(rx_valid), .out_ready(rx_ready), .out_data(rx_data), .count());

  sync_fifo #(.W(32), .DEPTH(FIFO_DEPTH)) u_tx_fifo (
    .clk, .rst_n,
    .in_valid(tx_valid), .in_ready(tx_ready), .in_data(tx_data),
    .out_valid(host_tx_valid), .out_ready(host_tx_ready), .out_data(host_tx_data),
    .count());

  sdkf_core #(.P_PAR(P_PAR), .S_MAX(S_MAX), .D_MAX(D_MAX)) u_core (
    .clk, .rst_n,
    .rx_valid, .rx_ready, .rx_data,
    .tx_valid, .tx_ready, .tx_data,
    .irq, .irq_ack, .busy, .err, .t_start, .t_stop);

  exec_timer #(.W(32)) u_timer (
    .clk, .rst_n, .start(t_start), .stop(t_stop), .running(),
    .cycles(exec_cycles));
endmodule
