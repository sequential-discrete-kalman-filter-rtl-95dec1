// sdkf_core: control, operand memories and computation units of the Sequential Discrete
// Kalman Filter (SDKF) estimator, joined by the multiplexers that route operands to the
// units and results back to the memories.
//
// Algorithm. The state x (S values) and its error covariance P (S x S) are kept on chip.
// A time step k first predicts, P := P + Q (x is kept, persistence model), and then takes
// the D measurements z_i one at a time, i = 1..D, each with its row h_i of the measurement
// matrix H and its noise variance r_i (diagonal R):
//     C    = h_i P              (reusable coefficient, a row vector)
//     zhat = h_i x              dSz = C h_i^T
//     W    = r_i + dSz          Winv = 1 / W     (a scalar: no matrix inversion)
//     dz   = z_i - zhat         g = Winv * dz
//     K    = C^T * Winv         x := x + C^T * g
//     P    := P - K C           (outer product)
// After the D-th measurement x is the a-posteriori estimate x_k^+ and is sent to the host.
// Since P is symmetric, h_i P is computed as P h_i^T, a matrix-vector product.
//
// Parallelism. With degree of parallelism P_PAR (4 by default), P is cut into P_PAR x
// P_PAR blocks and every vector into P_PAR-element blocks; element (r,c) of a matrix block
// lives in its own RAM bank (P_PAR^2 banks), element j of a vector block in bank j, so
// every unit gets a whole block per cycle. S must be a multiple of P_PAR; SB = S/P_PAR.
// Per measurement the passes are:
//   A  SB*SB cycles  matvec_unit:  C = P h_i^T;  dot_product (first block row): zhat
//   B  SB cycles     dot_product:  dSz = C . h_i
//   SC ~35 cycles    scalar adder, divider, multiplier: dz, W, Winv, g
//   C  SB cycles     vector_unit x2: K = Winv*C, x = x + g*C
//   D  SB*SB cycles  matrix_unit:  P = P - K C
// Each pass streams one block per cycle; the pass then waits for its pipeline to drain
// (memory read 1 cycle, then the unit latency: 32 cycles for the inner products, 7 for
// the vector and matrix arrays) before the next pass reads what it wrote. One measurement
// therefore takes about 2*SB^2 + 2*SB + 130 cycles.
//
// Host interface (own choice; the reference only states FIFO buffers with a DMA engine and
// an interrupt handshake). Words arrive on the rx stream: a command word (opcode [31:24],
// see sdkf_pkg::opcode_e) and its payload. Results go out on the tx stream. After a step
// has sent x_k^+, irq rises and stays high until irq_ack. t_start pulses when a step's
// command word is read, t_stop when its last output word is written (for exec_timer).
// err is set by an invalid size or an unknown opcode and cleared by the next valid OP_SIZE.
//
// Lint notes: the pipeline tags travel whole through their delay lines although each
// write-back uses only some fields (unused-bit warnings on mv_tag, v_tag, mx_tag); the
// assertions' disable iff (!rst_n) makes the linter see rst_n used synchronously too.
module sdkf_core
  import sdkf_pkg::*;
#(
  parameter int unsigned P_PAR = 4,
  parameter int unsigned S_MAX = 252,
  parameter int unsigned D_MAX = 252
) (
  input  logic        clk,
  input  logic        rst_n,
  // receive stream (host -> estimator)
  input  logic        rx_valid,
  output logic        rx_ready,
  input  logic [31:0] rx_data,
  // send stream (estimator -> host)
  output logic        tx_valid,
  input  logic        tx_ready,
  output logic [31:0] tx_data,
  // interrupt handshake and status
  output logic        irq,
  input  logic        irq_ack,
  output logic        busy,
  output logic        err,
  output logic        t_start,
  output logic        t_stop
);
  localparam int unsigned P     = P_PAR;
  localparam int unsigned PP    = P * P;
  localparam int unsigned SBM   = S_MAX / P;               // blocks per vector (max)
  localparam int unsigned PDEP  = SBM * SBM;               // covariance words per bank
  localparam int unsigned HDEP  = D_MAX * SBM;             // H words per bank
  localparam int unsigned PAW   = (PDEP > 1) ? $clog2(PDEP) : 1;
  localparam int unsigned HAW   = (HDEP > 1) ? $clog2(HDEP) : 1;
  localparam int unsigned VAW   = (SBM > 1) ? $clog2(SBM) : 1;
  localparam int unsigned DAW   = (D_MAX > 1) ? $clog2(D_MAX) : 1;
  localparam int unsigned NLEV  = $clog2(P);
  localparam int unsigned LAT_DOT = LAT_MUL + NLEV * LAT_ADD + LAT_ACC;
  localparam int unsigned LAT_ARR = LAT_MUL + LAT_ADD;

  initial begin
    if (S_MAX % P != 0) $error("sdkf_core: S_MAX must be a multiple of P_PAR");
    if (SBM > 255)      $error("sdkf_core: S_MAX / P_PAR must stay below 256");
    if (D_MAX > 4095 || S_MAX > 4095) $error("sdkf_core: sizes must fit 12 bits");
  end

  // ---------------------------------------------------------------------------------
  // Control state
  typedef enum logic [3:0] {
    ST_CMD, ST_LOAD, ST_INITP, ST_ZIN, ST_PRED, ST_A, ST_B, ST_SC, ST_C, ST_D,
    ST_DRAIN, ST_SWAIT, ST_SPUSH
  } state_e;

  // what a pass / a pipeline tag belongs to
  typedef enum logic [2:0] {PH_NONE, PH_INITP, PH_PRED, PH_A, PH_B, PH_C, PH_D} phase_e;

  typedef enum logic [2:0] {TG_H, TG_R, TG_Q, TG_X, TG_Z} target_e;

  state_e  state, ret_state;
  target_e ld_tgt;
  logic [11:0] d_cnt;                 // configured D
  logic [7:0]  sb;                    // S / P
  logic [7:0]  cnt_br, cnt_bc;        // block counters of a pass
  logic [11:0] cnt_i;                 // measurement index
  logic [11:0] ld_row;                // load counters
  logic [7:0]  ld_blk;
  logic [$clog2(P+1)-1:0] ld_lane;
  logic [7:0]  snd_rb, snd_cb;        // send counters
  logic [$clog2(P+1)-1:0] snd_rl, snd_cl;
  logic        snd_p;                 // sending P (else x)
  logic [7:0]  drain_cnt;
  logic [2:0]  sc_step;
  logic        sc_wait;
  logic        irq_r, err_r;

  fp32_t zhat_r, dsz_r, dz_r, w_r, winv_r, g_r;

  // ---------------------------------------------------------------------------------
  // Operand memories
  logic [PAW-1:0] p_raddr, p_waddr;
  logic [31:0]    p_rdata [PP];
  logic [31:0]    p_wdata [PP];
  logic           p_we;

  logic [HAW-1:0] h_raddr, h_waddr;
  logic [31:0]    h_rdata [P];
  logic           h_we;
  logic [P-1:0]   ld_mask;

  logic [VAW-1:0] x_raddr, x_waddr, c_raddr, c_waddr, k_raddr, k_waddr, q_raddr, q_waddr;
  logic [31:0]    x_rdata [P], c_rdata [P], k_rdata [P], q_rdata [P];
  logic [31:0]    x_wdata [P], c_wdata [P], k_wdata [P], vec_ld [P];
  logic           x_we, c_we, k_we, q_we;
  logic [P-1:0]   x_wmask;

  logic [DAW-1:0] s_addr, s_waddr;
  logic [31:0]    z_rdata [1], r_rdata [1], sc_ld [1];
  logic           z_we, r_we;

  banked_mem #(.NB(PP), .DEPTH(PDEP)) u_pmem (
    .clk, .rd_addr(p_raddr), .rd_data(p_rdata), .wr_en(p_we), .wr_mask({PP{1'b1}}),
    .wr_addr(p_waddr), .wr_data(p_wdata));
  banked_mem #(.NB(P), .DEPTH(HDEP)) u_hmem (
    .clk, .rd_addr(h_raddr), .rd_data(h_rdata), .wr_en(h_we), .wr_mask(ld_mask),
    .wr_addr(h_waddr), .wr_data(vec_ld));
  banked_mem #(.NB(P), .DEPTH(SBM)) u_xmem (
    .clk, .rd_addr(x_raddr), .rd_data(x_rdata), .wr_en(x_we), .wr_mask(x_wmask),
    .wr_addr(x_waddr), .wr_data(x_wdata));
  banked_mem #(.NB(P), .DEPTH(SBM)) u_cmem (
    .clk, .rd_addr(c_raddr), .rd_data(c_rdata), .wr_en(c_we), .wr_mask({P{1'b1}}),
    .wr_addr(c_waddr), .wr_data(c_wdata));
  banked_mem #(.NB(P), .DEPTH(SBM)) u_kmem (
    .clk, .rd_addr(k_raddr), .rd_data(k_rdata), .wr_en(k_we), .wr_mask({P{1'b1}}),
    .wr_addr(k_waddr), .wr_data(k_wdata));
  banked_mem #(.NB(P), .DEPTH(SBM)) u_qmem (
    .clk, .rd_addr(q_raddr), .rd_data(q_rdata), .wr_en(q_we), .wr_mask(ld_mask),
    .wr_addr(q_waddr), .wr_data(vec_ld));
  banked_mem #(.NB(1), .DEPTH(D_MAX)) u_zmem (
    .clk, .rd_addr(s_addr), .rd_data(z_rdata), .wr_en(z_we), .wr_mask(1'b1),
    .wr_addr(s_waddr), .wr_data(sc_ld));
  banked_mem #(.NB(1), .DEPTH(D_MAX)) u_rmem (
    .clk, .rd_addr(s_addr), .rd_data(r_rdata), .wr_en(r_we), .wr_mask(1'b1),
    .wr_addr(s_waddr), .wr_data(sc_ld));

  // ---------------------------------------------------------------------------------
  // Issue: the block a pass touches this cycle
  tag_t   iss, s1;
  phase_e iss_ph, s1_ph;
  logic   iss_end;                    // last issue of the pass

  always_comb begin
    iss    = '0;
    iss_ph = PH_NONE;
    iss_end = 1'b0;
    unique case (state)
      ST_INITP, ST_A, ST_D: begin
        iss.valid = 1'b1;
        iss.br    = cnt_br;
        iss.bc    = cnt_bc;
        iss.first = (cnt_bc == 8'd0);
        iss.last  = (cnt_bc == sb - 8'd1);
        iss_end   = iss.last && (cnt_br == sb - 8'd1);
        iss_ph    = (state == ST_INITP) ? PH_INITP : (state == ST_A) ? PH_A : PH_D;
      end
      ST_PRED, ST_B, ST_C: begin
        iss.valid = 1'b1;
        iss.br    = (state == ST_PRED) ? cnt_bc : 8'd0;
        iss.bc    = cnt_bc;
        iss.first = (cnt_bc == 8'd0);
        iss.last  = (cnt_bc == sb - 8'd1);
        iss_end   = iss.last;
        iss_ph    = (state == ST_PRED) ? PH_PRED : (state == ST_B) ? PH_B : PH_C;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1    <= '0;
      s1_ph <= PH_NONE;
    end else begin
      s1    <= iss;
      s1_ph <= iss_ph;
    end
  end

  // ---------------------------------------------------------------------------------
  // Read address multiplexers
  always_comb begin
    p_raddr = PAW'(iss.br * SBM + iss.bc);
    if (state == ST_SWAIT || state == ST_SPUSH) p_raddr = PAW'(snd_rb * SBM + snd_cb);
    h_raddr = HAW'(cnt_i * SBM + iss.bc);
    x_raddr = VAW'((state == ST_SWAIT || state == ST_SPUSH) ? snd_cb : iss.bc);
    c_raddr = VAW'(iss.bc);
    k_raddr = VAW'(iss.br);
    q_raddr = VAW'((state == ST_INITP) ? iss.br : iss.bc);
    s_addr  = DAW'(cnt_i);
  end

  // operand views of the memory outputs
  fp32_t pm [P][P];
  fp32_t hv [P], xv [P], cv [P], kv [P], qv [P], ones [P];
  always_comb begin
    for (int r = 0; r < int'(P); r++) begin
      for (int c = 0; c < int'(P); c++) pm[r][c] = p_rdata[r*P + c];
      hv[r]   = h_rdata[r];
      xv[r]   = x_rdata[r];
      cv[r]   = c_rdata[r];
      kv[r]   = k_rdata[r];
      qv[r]   = q_rdata[r];
      ones[r] = FP_ONE;
    end
  end

  // ---------------------------------------------------------------------------------
  // Computation units
  // A: C = P h^T
  logic  mv_valid;
  fp32_t mv_y [P];
  tag_t  mv_tag;
  matvec_unit #(.P(P)) u_matvec (
    .clk, .rst_n, .in_valid(s1.valid && s1_ph == PH_A), .first(s1.first), .last(s1.last),
    .m(pm), .v(hv), .out_valid(mv_valid), .y(mv_y));
  delay_line #(.W($bits(tag_t)), .LAT(LAT_DOT)) u_mv_tag (
    .clk, .rst_n, .d(s1), .q(mv_tag));

  // A (first block row): zhat = h . x ; B: dSz = h . C
  logic  dp_valid;
  fp32_t dp_y;
  phase_e dp_ph;
  logic [2:0] dp_ph_raw;
  fp32_t dp_b [P];
  always_comb dp_b = (s1_ph == PH_A) ? xv : cv;
  dot_product #(.P(P)) u_dot (
    .clk, .rst_n,
    .in_valid(s1.valid && ((s1_ph == PH_A && s1.br == 8'd0) || s1_ph == PH_B)),
    .first(s1.first), .last(s1.last),
    .a(hv), .b(dp_b), .out_valid(dp_valid), .y(dp_y));
  delay_line #(.W(3), .LAT(LAT_DOT)) u_dp_ph (
    .clk, .rst_n, .d(s1_ph), .q(dp_ph_raw));
  assign dp_ph = phase_e'(dp_ph_raw);

  // scalar chain: dz = z - zhat, W = r + dSz, Winv = 1/W, g = Winv*dz
  logic  sa_iv, sa_sub, sa_ov, sd_iv, sd_ov, sm_iv, sm_ov;
  fp32_t sa_a, sa_b, sa_y, sd_y, sm_y;
  fp_addsub #(.LAT(LAT_ADD)) u_sadd (
    .clk, .rst_n, .in_valid(sa_iv), .sub(sa_sub), .a(sa_a), .b(sa_b),
    .out_valid(sa_ov), .y(sa_y));
  fp_div #(.LAT(LAT_DIV)) u_sdiv (
    .clk, .rst_n, .in_valid(sd_iv), .a(FP_ONE), .b(w_r), .out_valid(sd_ov), .y(sd_y));
  fp_mul #(.LAT(LAT_MUL)) u_smul (
    .clk, .rst_n, .in_valid(sm_iv), .a(winv_r), .b(dz_r), .out_valid(sm_ov), .y(sm_y));

  always_comb begin
    sa_iv  = 1'b0;
    sd_iv  = 1'b0;
    sm_iv  = 1'b0;
    sa_sub = (sc_step == 3'd0);
    sa_a   = (sc_step == 3'd0) ? z_rdata[0] : r_rdata[0];
    sa_b   = (sc_step == 3'd0) ? zhat_r : dsz_r;
    if (state == ST_SC && !sc_wait) begin
      sa_iv = (sc_step == 3'd0) || (sc_step == 3'd1);
      sd_iv = (sc_step == 3'd2);
      sm_iv = (sc_step == 3'd3);
    end
  end

  // C: K = Winv*C, x = x + g*C
  logic  vk_valid, vx_valid;
  fp32_t vk_y [P], vx_y [P];
  tag_t  v_tag;
  vector_unit #(.P(P)) u_vk (
    .clk, .rst_n, .in_valid(s1.valid && s1_ph == PH_C), .scale_only(1'b1), .s(winv_r),
    .a(xv), .b(cv), .out_valid(vk_valid), .y(vk_y));
  vector_unit #(.P(P)) u_vx (
    .clk, .rst_n, .in_valid(s1.valid && s1_ph == PH_C), .scale_only(1'b0), .s(g_r),
    .a(xv), .b(cv), .out_valid(vx_valid), .y(vx_y));
  delay_line #(.W($bits(tag_t)), .LAT(LAT_ARR)) u_v_tag (
    .clk, .rst_n, .d(s1), .q(v_tag));

  // D: P = P - K C ; PRED: P = P + diag(Q)
  logic  mx_valid;
  fp32_t mx_y [P][P];
  tag_t  mx_tag;
  fp32_t mx_u [P], mx_v [P];
  always_comb begin
    mx_u = (s1_ph == PH_D) ? kv : qv;
    mx_v = (s1_ph == PH_D) ? cv : ones;
  end
  matrix_unit #(.P(P)) u_matrix (
    .clk, .rst_n, .in_valid(s1.valid && (s1_ph == PH_D || s1_ph == PH_PRED)),
    .sub(s1_ph == PH_D), .diag_only(s1_ph == PH_PRED), .m(pm),
    .u(mx_u), .v(mx_v),
    .out_valid(mx_valid), .y(mx_y));
  delay_line #(.W($bits(tag_t)), .LAT(LAT_ARR)) u_mx_tag (
    .clk, .rst_n, .d(s1), .q(mx_tag));

  // ---------------------------------------------------------------------------------
  // Write-back multiplexers
  logic rx_fire;
  assign rx_fire = (state == ST_LOAD || state == ST_ZIN) && rx_valid;

  always_comb begin
    // covariance: update array results, or the P := diag(Q) initialisation
    p_we    = mx_valid || (s1.valid && s1_ph == PH_INITP);
    p_waddr = mx_valid ? PAW'(mx_tag.br * SBM + mx_tag.bc) : PAW'(s1.br * SBM + s1.bc);
    for (int r = 0; r < int'(P); r++)
      for (int c = 0; c < int'(P); c++)
        p_wdata[r*P + c] = mx_valid ? mx_y[r][c]
                         : ((s1.br == s1.bc && r == c) ? q_rdata[r] : FP_ZERO);

    ld_mask = '0;
    ld_mask[int'(ld_lane)] = 1'b1;
    for (int j = 0; j < int'(P); j++) vec_ld[j] = rx_data;
    sc_ld[0] = rx_data;

    h_we    = rx_fire && state == ST_LOAD && ld_tgt == TG_H;
    h_waddr = HAW'(ld_row * SBM + ld_blk);
    q_we    = rx_fire && state == ST_LOAD && ld_tgt == TG_Q;
    q_waddr = VAW'(ld_blk);
    r_we    = rx_fire && state == ST_LOAD && ld_tgt == TG_R;
    z_we    = rx_fire && state == ST_ZIN;
    s_waddr = DAW'(ld_row);

    x_we    = vx_valid || (rx_fire && state == ST_LOAD && ld_tgt == TG_X);
    x_waddr = vx_valid ? VAW'(v_tag.bc) : VAW'(ld_blk);
    x_wmask = vx_valid ? {P{1'b1}} : ld_mask;
    for (int j = 0; j < int'(P); j++) x_wdata[j] = vx_valid ? vx_y[j] : rx_data;

    c_we    = mv_valid;
    c_waddr = VAW'(mv_tag.br);
    c_wdata = mv_y;
    k_we    = vk_valid;
    k_waddr = VAW'(v_tag.bc);
    k_wdata = vk_y;
  end

  // ---------------------------------------------------------------------------------
  // Host streams
  logic [7:0]  op;
  logic [11:0] arg_s, arg_d;
  assign op    = rx_data[31:24];
  assign arg_s = rx_data[11:0];
  assign arg_d = rx_data[23:12];

  assign rx_ready = (state == ST_CMD) || (state == ST_LOAD) || (state == ST_ZIN);
  assign tx_valid = (state == ST_SPUSH);
  assign tx_data  = snd_p ? p_rdata[int'(snd_rl) * P + int'(snd_cl)] : x_rdata[int'(snd_cl)];
  assign irq      = irq_r;
  assign err      = err_r;
  assign busy     = (state != ST_CMD);

  logic ld_lane_end, ld_blk_end, ld_row_end, ld_done;
  always_comb begin
    ld_lane_end = (ld_lane == ($bits(ld_lane))'(P - 1));
    ld_blk_end  = ld_lane_end && (ld_blk == sb - 8'd1);
    ld_row_end  = (ld_row == d_cnt - 12'd1);
    unique case (state == ST_ZIN ? TG_Z : ld_tgt)
      TG_H:       ld_done = ld_blk_end && ld_row_end;
      TG_Q, TG_X: ld_done = ld_blk_end;
      default:    ld_done = ld_row_end;           // R, Z: one word per measurement
    endcase
  end

  logic snd_cl_end, snd_cb_end, snd_rl_end, snd_done;
  always_comb begin
    snd_cl_end = (snd_cl == ($bits(snd_cl))'(P - 1));
    snd_cb_end = snd_cl_end && (snd_cb == sb - 8'd1);
    snd_rl_end = snd_cb_end && (snd_rl == ($bits(snd_rl))'(P - 1));
    snd_done   = snd_p ? (snd_rl_end && snd_rb == sb - 8'd1) : snd_cb_end;
  end

  assign t_stop = (state == ST_SPUSH) && tx_ready && snd_done && !snd_p;

  // ---------------------------------------------------------------------------------
  // Control FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_CMD;
      ret_state <= ST_CMD;
      ld_tgt    <= TG_H;
      d_cnt     <= 12'd1;
      sb        <= 8'd1;
      cnt_br    <= '0;
      cnt_bc    <= '0;
      cnt_i     <= '0;
      ld_row    <= '0;
      ld_blk    <= '0;
      ld_lane   <= '0;
      snd_rb    <= '0;
      snd_cb    <= '0;
      snd_rl    <= '0;
      snd_cl    <= '0;
      snd_p     <= 1'b0;
      drain_cnt <= '0;
      sc_step   <= '0;
      sc_wait   <= 1'b0;
      irq_r     <= 1'b0;
      err_r     <= 1'b0;
      t_start   <= 1'b0;
      zhat_r    <= FP_ZERO;
      dsz_r     <= FP_ZERO;
      dz_r      <= FP_ZERO;
      w_r       <= FP_ONE;
      winv_r    <= FP_ONE;
      g_r       <= FP_ZERO;
    end else begin
      t_start <= 1'b0;
      if (irq_ack) irq_r <= 1'b0;

      // results of the inner-product unit
      if (dp_valid && dp_ph == PH_A) zhat_r <= dp_y;
      if (dp_valid && dp_ph == PH_B) dsz_r  <= dp_y;

      // pass counters advance on every issue
      if (iss.valid) begin
        if (iss.last) begin
          cnt_bc <= '0;
          cnt_br <= cnt_br + 8'd1;
        end else begin
          cnt_bc <= cnt_bc + 8'd1;
        end
      end

      unique case (state)
        ST_CMD: if (rx_valid) begin
          ld_row  <= '0;
          ld_blk  <= '0;
          ld_lane <= '0;
          cnt_br  <= '0;
          cnt_bc  <= '0;
          unique case (op)
            OP_SIZE: begin
              if (arg_s != 12'd0 && arg_d != 12'd0 && arg_s <= 12'(S_MAX) &&
                  arg_d <= 12'(D_MAX) && (arg_s % 12'(P)) == 12'd0) begin
                d_cnt <= arg_d;
                sb    <= 8'(arg_s / 12'(P));
                err_r <= 1'b0;
              end else begin
                err_r <= 1'b1;
              end
            end
            OP_LOAD_H: begin ld_tgt <= TG_H; state <= ST_LOAD; end
            OP_LOAD_R: begin ld_tgt <= TG_R; state <= ST_LOAD; end
            OP_LOAD_Q: begin ld_tgt <= TG_Q; state <= ST_LOAD; end
            OP_LOAD_X: begin ld_tgt <= TG_X; state <= ST_LOAD; end
            OP_INIT_P: state <= ST_INITP;
            OP_STEP: begin
              t_start <= 1'b1;
              state   <= ST_ZIN;
            end
            OP_READ_P: begin
              snd_p  <= 1'b1;
              snd_rb <= '0;
              snd_rl <= '0;
              snd_cb <= '0;
              snd_cl <= '0;
              state  <= ST_SWAIT;
            end
            OP_NOP: ;
            default: err_r <= 1'b1;
          endcase
        end

        ST_LOAD, ST_ZIN: if (rx_valid) begin
          if (state == ST_ZIN || ld_tgt == TG_R) begin
            ld_row <= ld_row + 12'd1;
          end else if (ld_lane_end) begin
            ld_lane <= '0;
            if (ld_blk == sb - 8'd1) begin
              ld_blk <= '0;
              ld_row <= ld_row + 12'd1;
            end else begin
              ld_blk <= ld_blk + 8'd1;
            end
          end else begin
            ld_lane <= ld_lane + 1'b1;
          end
          if (ld_done) begin
            state <= (state == ST_ZIN) ? ST_PRED : ST_CMD;
            cnt_i <= '0;
          end
        end

        ST_INITP: if (iss_end) begin
          drain_cnt <= 8'd3;
          ret_state <= ST_CMD;
          state     <= ST_DRAIN;
        end

        ST_PRED: if (iss_end) begin
          cnt_br    <= '0;
          drain_cnt <= 8'(LAT_ARR + 3);
          ret_state <= ST_A;
          state     <= ST_DRAIN;
        end

        ST_A: if (iss_end) begin
          cnt_br    <= '0;
          drain_cnt <= 8'(LAT_DOT + 3);
          ret_state <= ST_B;
          state     <= ST_DRAIN;
        end

        ST_B: if (iss_end) begin
          cnt_br    <= '0;
          drain_cnt <= 8'(LAT_DOT + 3);
          ret_state <= ST_SC;
          state     <= ST_DRAIN;
          sc_step   <= '0;
          sc_wait   <= 1'b0;
        end

        ST_SC: begin
          if (!sc_wait) begin
            sc_wait <= 1'b1;
          end else begin
            unique case (sc_step)
              3'd0: if (sa_ov) begin dz_r   <= sa_y; sc_step <= 3'd1; sc_wait <= 1'b0; end
              3'd1: if (sa_ov) begin w_r    <= sa_y; sc_step <= 3'd2; sc_wait <= 1'b0; end
              3'd2: if (sd_ov) begin winv_r <= sd_y; sc_step <= 3'd3; sc_wait <= 1'b0; end
              3'd3: if (sm_ov) begin
                g_r     <= sm_y;
                sc_step <= 3'd0;
                sc_wait <= 1'b0;
                state   <= ST_C;
              end
              default: ;
            endcase
          end
        end

        ST_C: if (iss_end) begin
          cnt_br    <= '0;
          drain_cnt <= 8'(LAT_ARR + 3);
          ret_state <= ST_D;
          state     <= ST_DRAIN;
        end

        ST_D: if (iss_end) begin
          cnt_br    <= '0;
          drain_cnt <= 8'(LAT_ARR + 3);
          state     <= ST_DRAIN;
          if (cnt_i == d_cnt - 12'd1) begin
            ret_state <= ST_SWAIT;
            snd_p     <= 1'b0;
            snd_rb    <= '0;
            snd_rl    <= '0;
            snd_cb    <= '0;
            snd_cl    <= '0;
          end else begin
            ret_state <= ST_A;
            cnt_i     <= cnt_i + 12'd1;
          end
        end

        ST_DRAIN: begin
          if (drain_cnt == 8'd0) state <= ret_state;
          else drain_cnt <= drain_cnt - 8'd1;
        end

        ST_SWAIT: state <= ST_SPUSH;

        ST_SPUSH: if (tx_ready) begin
          if (snd_done) begin
            state <= ST_CMD;
            if (!snd_p) irq_r <= 1'b1;
            snd_p <= 1'b0;
          end else if (!snd_cl_end) begin
            snd_cl <= snd_cl + 1'b1;            // same block: data already there
          end else begin
            snd_cl <= '0;
            state  <= ST_SWAIT;                 // next block: wait for the read
            if (snd_cb == sb - 8'd1) begin
              snd_cb <= '0;
              if (snd_rl == ($bits(snd_rl))'(P - 1)) begin
                snd_rl <= '0;
                snd_rb <= snd_rb + 8'd1;
              end else begin
                snd_rl <= snd_rl + 1'b1;
              end
            end else begin
              snd_cb <= snd_cb + 8'd1;
            end
          end
        end

        default: state <= ST_CMD;
      endcase
    end
  end

  // the scalar chain issues at most one operation per step
  a_sc_one: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({sa_iv, sd_iv, sm_iv}));
  a_tx_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (tx_valid && !tx_ready) |=> (tx_valid && $stable(tx_data)));
endmodule
