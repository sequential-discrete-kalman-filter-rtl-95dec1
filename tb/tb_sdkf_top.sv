// tb_sdkf_top: end-to-end test of the estimator through its host streams, at a reduced
// size (S_MAX = 16, D_MAX = 24, FIFO_DEPTH = 16) so that many configurations run quickly.
//
// The host model pushes command words and payloads into the receive FIFO, takes words from
// the send FIFO with random backpressure, and acknowledges every interrupt after a random
// delay. Three configurations are run (S, D) = (16, 24), (8, 8), (4, 12); the first queues
// two steps back to back so that the receive FIFO fills while the core computes.
// Checks:
//   - P read back after OP_INIT_P equals diag(Q) bit for bit;
//   - every estimate x_k^+ agrees with a binary64 model of the filter (sdkf_ref_pkg);
//   - P read back after the steps agrees with the model;
//   - exec_cycles equals the cycles between the core's step start and stop strobes;
//   - err is raised by a bad size and an unknown opcode, and cleared by a valid size;
//   - irq rises after each step and falls after irq_ack.
// Every mechanism (prediction, the four measurement passes, the scalar chain, P
// initialisation and read-back, interrupt and acknowledge, send backpressure, full receive
// FIFO, error flag) is counted; one that never happened counts as a failure.
module tb_sdkf_top;
  import sdkf_pkg::*;
  import fp_ref_pkg::*;
  import sdkf_ref_pkg::*;

  localparam int unsigned P_PAR = 4, S_MAX = 16, D_MAX = 24, FIFO_DEPTH = 16;
  localparam real SIGMA = 3.3e-4;     // measurement noise standard deviation
  localparam real QVAR  = 1.0e-6;     // process noise variance

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 1;

  logic        host_rx_valid = 0, host_rx_ready, host_tx_valid, host_tx_ready = 0;
  logic [31:0] host_rx_data = 0, host_tx_data, exec_cycles;
  logic        irq, irq_ack = 0, busy, err;

  sdkf_top #(.P_PAR(P_PAR), .S_MAX(S_MAX), .D_MAX(D_MAX), .FIFO_DEPTH(FIFO_DEPTH)) dut (
    .clk, .rst_n, .host_rx_valid, .host_rx_ready, .host_rx_data,
    .host_tx_valid, .host_tx_ready, .host_tx_data, .irq, .irq_ack, .busy, .err, .exec_cycles);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- host model
  logic [31:0] in_q[$];
  logic [31:0] out_q[$];
  int gap_pct = 10, stall_pct = 30;

  always @(posedge clk) begin
    if (!host_rx_valid || host_rx_ready) begin
      if (rst_n && in_q.size() > 0 && $urandom_range(99) >= gap_pct) begin
        host_rx_valid <= 1'b1;
        host_rx_data  <= in_q.pop_front();
      end else begin
        host_rx_valid <= 1'b0;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && host_tx_valid && host_tx_ready) out_q.push_back(host_tx_data);
    host_tx_ready <= ($urandom_range(99) >= stall_pct);
  end

  initial begin
    forever begin
      @(posedge clk iff irq);
      repeat ($urandom_range(20)) @(posedge clk);
      irq_ack <= 1'b1;
      @(posedge clk);
      irq_ack <= 1'b0;
    end
  end

  // ---------------------------------------------------------------- mechanism counters
  int n_initp = 0, n_pred = 0, n_a = 0, n_b = 0, n_c = 0, n_d = 0, n_sc = 0, n_readp = 0;
  int n_irq = 0, n_ack = 0, n_tx_stall = 0, n_rx_full = 0, n_err = 0, n_steps = 0;
  logic   irq_d = 0, stop_d = 0;
  longint t0 = 0, t1 = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.s1.valid) begin
      case (int'(dut.u_core.s1_ph))
        1: n_initp++;
        2: n_pred++;
        3: n_a++;
        4: n_b++;
        5: n_c++;
        6: n_d++;
        default: ;
      endcase
    end
    if (dut.u_core.sd_ov) n_sc++;
    irq_d <= irq;
    if (irq && !irq_d) n_irq++;
    if (irq_ack && irq) n_ack++;
    if (host_tx_valid && !host_tx_ready) n_tx_stall++;
    if (host_rx_valid && !host_rx_ready) n_rx_full++;
    if (dut.u_core.t_start) t0 = cyc;
    if (dut.u_core.t_stop) begin
      t1 = cyc;
      n_steps++;
    end
    // exec_cycles is valid the cycle after the stop strobe
    stop_d <= dut.u_core.t_stop;
    if (stop_d) begin
      checks++;
      if (exec_cycles != 32'(t1 - t0)) begin
        failures++;
        $display("FAIL exec_cycles=%0d expected %0d", exec_cycles, t1 - t0);
      end
    end
  end

  // ---------------------------------------------------------------- helpers
  function automatic logic [31:0] cmd(input opcode_e op, input int unsigned arg);
    return {8'(op), 24'(arg)};
  endfunction

  task automatic push_vec(input real v[]);
    foreach (v[i]) in_q.push_back(to_fp32(v[i]));
  endtask

  task automatic wait_out(input int n);
    while (out_q.size() < n) @(posedge clk);
  endtask

  task automatic wait_idle();
    while (in_q.size() != 0 || host_rx_valid || dut.rx_valid || busy) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  real max_xerr = 0.0, max_perr = 0.0;

  task automatic check_x(input int S, input real xr[]);
    wait_out(S);
    for (int j = 0; j < S; j++) begin
      real hw, e;
      hw = to_real(out_q.pop_front());
      e  = (hw > xr[j]) ? hw - xr[j] : xr[j] - hw;
      if (e > max_xerr) max_xerr = e;
      checks++;
      if (!(e <= 5.0e-6)) begin
        failures++;
        if (failures < 20) $display("FAIL x[%0d] hw=%g ref=%g", j, hw, xr[j]);
      end
    end
  endtask

  task automatic check_p(input int S, input real pr[], input bit exact);
    real pmax, tol;
    pmax = 0.0;
    foreach (pr[i]) if ((pr[i] > 0 ? pr[i] : -pr[i]) > pmax) pmax = (pr[i] > 0 ? pr[i] : -pr[i]);
    tol = 1.0e-4 * pmax;
    wait_out(S*S);
    for (int i = 0; i < S*S; i++) begin
      logic [31:0] w;
      real e;
      w = out_q.pop_front();
      checks++;
      if (exact) begin
        if (w !== to_fp32(pr[i])) begin
          failures++;
          if (failures < 20) $display("FAIL P[%0d] %h expected %h", i, w, to_fp32(pr[i]));
        end
      end else begin
        e = to_real(w) - pr[i];
        if (e < 0) e = -e;
        if (e / pmax > max_perr) max_perr = e / pmax;
        if (!(e <= tol)) begin
          failures++;
          if (failures < 20) $display("FAIL P[%0d] hw=%g ref=%g", i, to_real(w), pr[i]);
        end
      end
    end
  endtask

  // one configuration: load the model, check P0, run nsteps steps (queued back to back),
  // check every estimate, then read and check P
  task automatic run_config(input int S, input int D, input int nsteps);
    real H[], R[], Q[], X[], P[];
    real Z[][];
    $display("config S=%0d D=%0d steps=%0d", S, D, nsteps);
    make_h(S, D, H);
    R = new[D];
    Q = new[S];
    X = new[S];
    P = new[S*S];
    foreach (R[m]) R[m] = to_real(to_fp32(SIGMA * SIGMA));
    foreach (Q[k]) Q[k] = to_real(to_fp32(QVAR));
    foreach (X[k]) X[k] = (k < S/2) ? 1.0 : 0.0;
    foreach (P[i]) P[i] = 0.0;
    for (int k = 0; k < S; k++) P[k*S + k] = Q[k];

    in_q.push_back(cmd(OP_SIZE, (D << 12) | S));
    in_q.push_back(cmd(OP_LOAD_H, 0));
    push_vec(H);
    in_q.push_back(cmd(OP_LOAD_R, 0));
    push_vec(R);
    in_q.push_back(cmd(OP_LOAD_Q, 0));
    push_vec(Q);
    in_q.push_back(cmd(OP_LOAD_X, 0));
    push_vec(X);
    in_q.push_back(cmd(OP_INIT_P, 0));
    in_q.push_back(cmd(OP_READ_P, 0));
    n_readp++;
    check_p(S, P, 1'b1);

    Z = new[nsteps];
    for (int k = 0; k < nsteps; k++) begin
      make_z(S, D, H, X, SIGMA, Z[k]);
      in_q.push_back(cmd(OP_STEP, 0));
      push_vec(Z[k]);
    end
    for (int k = 0; k < nsteps; k++) begin
      kf_step(S, D, H, R, Q, Z[k], X, P);
      check_x(S, X);
    end
    in_q.push_back(cmd(OP_READ_P, 0));
    n_readp++;
    check_p(S, P, 1'b0);
    wait_idle();
  endtask

  task automatic expect_err(input logic [31:0] w, input bit want);
    in_q.push_back(w);
    wait_idle();
    checks++;
    if (err !== want) begin
      failures++;
      $display("FAIL err=%b after %h, expected %b", err, w, want);
    end
    if (err) n_err++;
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    expect_err(cmd(OP_SIZE, (8 << 12) | 6), 1'b1);          // S not a multiple of 4
    expect_err(cmd(OP_SIZE, (8 << 12) | 8), 1'b0);
    expect_err(cmd(OP_SIZE, (25 << 12) | 8), 1'b1);         // D above D_MAX
    expect_err(32'hEE00_0000, 1'b1);                        // unknown opcode
    run_config(16, 24, 2);
    checks++;
    if (err !== 1'b0) begin
      failures++;
      $display("FAIL err not cleared by a valid size");
    end
    stall_pct = 0;
    gap_pct   = 0;
    run_config(8, 8, 1);
    stall_pct = 60;
    run_config(4, 12, 1);
    repeat (40) @(posedge clk);

    checks++;
    if (irq !== 1'b0) begin
      failures++;
      $display("FAIL irq still high after acknowledge");
    end
    $display("max |x err| = %g, max P err / max|P| = %g", max_xerr, max_perr);
    $display("mechanisms: initp=%0d pred=%0d A=%0d B=%0d scalar=%0d C=%0d D=%0d readp=%0d",
             n_initp, n_pred, n_a, n_b, n_sc, n_c, n_d, n_readp);
    $display("            irq=%0d ack=%0d tx_stall=%0d rx_full=%0d err=%0d steps=%0d",
             n_irq, n_ack, n_tx_stall, n_rx_full, n_err, n_steps);
    begin
      int cnt[14];
      cnt = '{n_initp, n_pred, n_a, n_b, n_sc, n_c, n_d, n_readp,
              n_irq, n_ack, n_tx_stall, n_rx_full, n_err, n_steps};
      foreach (cnt[i]) begin
        checks++;
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism %0d never happened", i);
        end
      end
    end
    checks++;
    if (n_steps != 4) begin
      failures++;
      $display("FAIL %0d steps completed, expected 4", n_steps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
