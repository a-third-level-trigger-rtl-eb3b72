// svm_decision: Gaussian-kernel SVM decision function.
//
//   score = sum_{i < nsv} alpha_i y_i * exp(-gamma * ||x - z_i||^2) + b
//   is_gamma = (score >= 0)          (+1 = gamma-ray, -1 = hadron)
//
// x is the normalized feature vector of the current image (36 x signed Q3.12),
// written into a register file one feature at a time through x_valid/x_idx/x.
// The support vectors z_i and coefficients alpha_i y_i are read from
// svm_model_memory; gamma (Q4.12, reset to 1.07, the value the paper's grid
// search selected), bias b (Q16.16, reset 0) and the number of support
// vectors in use nsv (reset NSV) are configuration registers.
//
// Pipeline (this design's choice): one feature of one support vector per clock
// (read, square of the difference, accumulate); at the last feature of z_i the
// squared distance (Q.24) moves to a kernel pipeline (times gamma, fx_exp,
// multiply-accumulate with alpha_i y_i) that overlaps the distance of z_i+1.
// A start pulse while idle begins an evaluation; done is set by the clock edge
// nsv*36 + 9 edges after the one that samples start, for one clock, with
// is_gamma and score (signed Q16.16, saturated).
module svm_decision
  import l3t_pkg::*;
#(
  parameter int NSV = 1024,
  localparam int IW = $clog2(NSV)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_wr_t           cfg,
  input  logic              x_valid,
  input  logic [FEAT_W-1:0] x_idx,
  input  logic [X_W-1:0]    x,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              is_gamma,
  output logic [SCORE_W-1:0] score
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_FINAL} state_e;
  state_e state;

  // configuration registers and feature vector
  logic [GAMMA_W-1:0]   gamma_r;
  logic [ALPHA_W-1:0]   bias_r;
  logic [IW:0]          nsv_r;
  logic [X_W-1:0]       x_r [N_FEAT];

  // counters
  logic [IW-1:0]        i;
  logic [FEAT_W-1:0]    k;
  logic [3:0]           drain;

  logic [X_W-1:0]       sv_q;
  logic [ALPHA_W-1:0]   alpha_q;

  svm_model_memory #(.NSV(NSV)) u_model (
    .clk, .cfg, .sv_idx(i), .feat(k), .sv_q, .alpha_q);

  // stage 1 (data arrives) / stage 2 (square) / stage 3 (distance accumulate)
  logic                    v1, last1, v2, last2;
  logic signed [X_W-1:0]   x1;
  logic [2*X_W+1:0]        sq2;
  logic [ALPHA_W-1:0]      alpha2;
  logic [DIST_W-1:0]       dist_acc;
  // kernel pipeline
  logic                    v3;
  logic [DIST_W-1:0]       d3;
  logic [ALPHA_W-1:0]      alpha3, alpha4, alpha5;
  logic signed [SCORE_ACC_W-1:0] acc;

  logic signed [X_W:0]     diff1;
  logic [2*X_W+1:0]        sq1;
  always_comb begin
    diff1 = $signed({x1[X_W-1], x1}) - $signed({sv_q[X_W-1], sv_q});
    sq1   = $unsigned((2*X_W+2)'(diff1 * diff1));
  end

  // t = gamma * d, Q.24 * Q.12 -> Q.36 -> Q.16, saturated to the exp input
  localparam int TW = DIST_W + GAMMA_W;
  logic [TW-1:0]      t_full;
  logic [TW-1:0]      t_sh;
  logic [EXPIN_W-1:0] t3;
  always_comb begin
    t_full = TW'(d3) * TW'(gamma_r);
    t_sh   = t_full >> (2*X_FRAC + GAMMA_FRAC - EXP_FRAC);
    t3     = (t_sh > TW'({EXPIN_W{1'b1}})) ? {EXPIN_W{1'b1}} : t_sh[EXPIN_W-1:0];
  end

  logic           kv;
  logic [K_W-1:0] kval;
  fx_exp u_exp (.clk, .rst_n, .in_valid(v3), .t(t3), .out_valid(kv), .y(kval));

  logic signed [ALPHA_W+K_W:0] term;
  assign term = $signed(alpha5) * $signed({1'b0, kval});

  logic signed [SCORE_ACC_W-1:0] total;
  logic signed [SCORE_ACC_W-1:0] total_sh;
  assign total    = acc + (SCORE_ACC_W'($signed(bias_r)) <<< ALPHA_FRAC);
  assign total_sh = total >>> (ALPHA_FRAC + EXP_FRAC - ALPHA_FRAC);

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gamma_r <= GAMMA_DEFAULT; bias_r <= '0; nsv_r <= (IW+1)'(NSV);
      for (int j = 0; j < N_FEAT; j++) x_r[j] <= '0;
      state <= S_IDLE; i <= '0; k <= '0; drain <= '0;
      v1 <= 1'b0; last1 <= 1'b0; x1 <= '0;
      v2 <= 1'b0; last2 <= 1'b0; sq2 <= '0; alpha2 <= '0; dist_acc <= '0;
      v3 <= 1'b0; d3 <= '0; alpha3 <= '0; alpha4 <= '0; alpha5 <= '0;
      acc <= '0; done <= 1'b0; is_gamma <= 1'b0; score <= '0;
    end else begin
      done <= 1'b0;
      // configuration registers
      if (cfg.we) begin
        if (cfg.sel == CFG_GAMMA) gamma_r <= cfg.data[GAMMA_W-1:0];
        if (cfg.sel == CFG_BIAS)  bias_r  <= cfg.data;
        if (cfg.sel == CFG_NSV)   nsv_r   <= (cfg.data > 32'(NSV)) ? (IW+1)'(NSV)
                                                                   : cfg.data[IW:0];
      end
      if (x_valid && int'(x_idx) < N_FEAT) x_r[x_idx] <= x;

      // stage 1: model data arrives this clock for the address issued before
      x1    <= x_r[k];
      v1    <= (state == S_RUN);
      last1 <= (state == S_RUN) && (int'(k) == N_FEAT - 1);
      // stage 2: squared difference
      v2     <= v1;
      last2  <= last1;
      sq2    <= sq1;
      alpha2 <= alpha_q;
      // stage 3: distance accumulation, hand-off to the kernel pipeline
      v3 <= 1'b0;
      if (v2) begin
        if (last2) begin
          d3       <= dist_acc + DIST_W'(sq2);
          alpha3   <= alpha2;
          v3       <= 1'b1;
          dist_acc <= '0;
        end else begin
          dist_acc <= dist_acc + DIST_W'(sq2);
        end
      end
      // kernel: alpha follows the two fx_exp stages
      alpha4 <= alpha3;
      alpha5 <= alpha4;
      if (kv) acc <= acc + SCORE_ACC_W'(term);

      unique case (state)
        S_IDLE: if (start) begin
          i <= '0; k <= '0; acc <= '0; dist_acc <= '0; drain <= '0;
          state <= (nsv_r == '0) ? S_DRAIN : S_RUN;
        end
        S_RUN: begin
          if (int'(k) == N_FEAT - 1) begin
            k <= '0;
            if ((IW+1)'(i) == nsv_r - 1'b1) state <= S_DRAIN;
            else                            i <= i + 1'b1;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_DRAIN: begin           // wait for the last kernel term to accumulate
          drain <= drain + 1'b1;
          if (drain == 4'd7) state <= S_FINAL;
        end
        S_FINAL: begin
          done     <= 1'b1;
          is_gamma <= (total >= 0);
          if (total_sh > SCORE_ACC_W'(2**(SCORE_W-1) - 1))
            score <= {1'b0, {(SCORE_W-1){1'b1}}};
          else if (total_sh < -SCORE_ACC_W'(2**(SCORE_W-1)))
            score <= {1'b1, {(SCORE_W-1){1'b0}}};
          else
            score <= total_sh[SCORE_W-1:0];
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
