// feature_normalizer: standardization of the pseudo-Zernike features.
//
// x_k = (|A_k| - mean_k) * (1/std_k), with mean_k and std_k the training-set
// mean and standard deviation of feature k, so that each feature lies roughly
// in [-1, 1] before it reaches the SVM, as the paper does for its data sets.
// mean_k (unsigned Q28.4, CFG_MEAN) and 1/std_k (unsigned Q4.20, CFG_INVSTD)
// are configuration registers; loading the reciprocal avoids a divider, which
// is this design's choice. Reset gives mean 0 and 1/std 1.
// The product is truncated toward minus infinity to Q3.12 and saturated to
// 16 bits. One clock of latency: in_valid/in_idx/in_mag -> out_valid/out_idx/out_x.
module feature_normalizer
  import l3t_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_wr_t           cfg,
  input  logic              in_valid,
  input  logic [FEAT_W-1:0] in_idx,
  input  logic [MOM_W-1:0]  in_mag,
  output logic              out_valid,
  output logic [FEAT_W-1:0] out_idx,
  output logic [X_W-1:0]    out_x
);
  localparam int SH = MOM_FRAC + INVSTD_FRAC - X_FRAC;
  localparam int PW = MOM_W + 1 + INVSTD_W + 1;

  logic [MOM_W-1:0]    mean_r   [N_FEAT];
  logic [INVSTD_W-1:0] invstd_r [N_FEAT];

  logic signed [MOM_W:0] diff;
  logic signed [PW-1:0]  prod, shifted;
  logic signed [X_W-1:0] x_sat;
  logic [MOM_W-1:0]      mean_k;
  logic [INVSTD_W-1:0]   invstd_k;

  always_comb begin
    mean_k   = (int'(in_idx) < N_FEAT) ? mean_r[in_idx]   : '0;
    invstd_k = (int'(in_idx) < N_FEAT) ? invstd_r[in_idx] : '0;
    diff     = $signed({1'b0, in_mag}) - $signed({1'b0, mean_k});
    prod     = PW'(diff) * $signed(PW'({1'b0, invstd_k}));
    shifted  = prod >>> SH;
    if (shifted > PW'(2**(X_W-1) - 1))   x_sat = {1'b0, {(X_W-1){1'b1}}};
    else if (shifted < -PW'(2**(X_W-1))) x_sat = {1'b1, {(X_W-1){1'b0}}};
    else                                 x_sat = shifted[X_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_FEAT; i++) begin
        mean_r[i]   <= '0;
        invstd_r[i] <= INVSTD_W'(1) << INVSTD_FRAC;
      end
      out_valid <= 1'b0; out_idx <= '0; out_x <= '0;
    end else begin
      if (cfg.we && int'(cfg.addr) < N_FEAT) begin
        if (cfg.sel == CFG_MEAN)   mean_r[cfg.addr[FEAT_W-1:0]]   <= cfg.data[MOM_W-1:0];
        if (cfg.sel == CFG_INVSTD) invstd_r[cfg.addr[FEAT_W-1:0]] <= cfg.data[INVSTD_W-1:0];
      end
      out_valid <= in_valid;
      out_idx   <= in_idx;
      out_x     <= x_sat;
    end
  end
endmodule
