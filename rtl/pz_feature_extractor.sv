// pz_feature_extractor: the 36 pseudo-Zernike features of one camera image.
//
// For each feature k = n(n+1)/2 + m (n = 0..7, m = 0..n) the unit forms the
// complex moment
//     A_nm = sum_p f_p * R'_nm(p) * (cos(m theta_p) - j sin(m theta_p))
// over the NPIX pixels, where f_p is the pixel amplitude and R'_nm(p) the
// stored radial polynomial already scaled by (n+1)/pi, and outputs the
// rotation-invariant magnitude |A_nm| = sqrt(Re^2 + Im^2). The magnitudes for
// m < 0 equal those for m > 0, which is why order 7 yields 36 features.
//
// Schedule (this design's choice; the paper gives none): features in turn,
// pixels in turn inside a feature, one complex multiply-accumulate per clock.
// Each pixel goes through a 3-stage pipeline: table/image read, R*cos and
// R*sin products, accumulate. After the last pixel the accumulators are
// rounded to Q.4 (saturating at 32 bits) and the square root (fx_sqrt, 32
// clocks) runs before the next feature begins, so one image takes
// 36 * (NPIX + 36) clocks after start.
//
// Interface: pulse start while busy is low. img_raddr/img_rdata read the
// image buffer (one clock latency). Each feature appears for one clock on
// feat_valid with feat_idx and feat_mag (unsigned Q28.4); done pulses with the
// last feature. The radial and angular tables are loaded through cfg.
module pz_feature_extractor
  import l3t_pkg::*;
#(
  parameter int NPIX = 577,
  localparam int AW  = $clog2(NPIX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_wr_t           cfg,
  input  logic              start,
  output logic              busy,
  output logic [AW-1:0]     img_raddr,
  input  logic [PIX_W-1:0]  img_rdata,
  output logic              feat_valid,
  output logic [FEAT_W-1:0] feat_idx,
  output logic [MOM_W-1:0]  feat_mag,
  output logic              done
);
  typedef enum logic [1:0] {S_IDLE, S_ACCUM, S_DRAIN, S_SQRT} state_e;
  state_e state;

  logic [FEAT_W-1:0] k;
  logic [2:0]        n, m;
  logic [AW-1:0]     pix;

  // table reads (addresses come straight from the counters)
  logic [R_W-1:0]    r_q;
  logic [COEF_W-1:0] cos_q, sin_q;

  pz_radial_table #(.NPIX(NPIX)) u_radial (
    .clk, .cfg, .feat(k), .pix, .rdata(r_q));

  pz_angular_table #(.NPIX(NPIX)) u_angular (
    .clk, .cfg, .m, .pix, .cos_q, .sin_q);

  assign img_raddr = pix;

  // pipeline
  logic              v1, v2;
  logic signed [PIX_W:0]   f2;
  logic signed [17:0]      rc2, rs2;
  logic signed [ACC_W-1:0] acc_re, acc_im;

  logic signed [R_W+COEF_W-1:0] prod_c, prod_s;
  always_comb begin
    prod_c = $signed(r_q) * $signed(cos_q);
    prod_s = $signed(r_q) * $signed(sin_q);
  end

  // rounding of the moment to Q.4 with saturation, and the radicand
  localparam int SH = R_FRAC - MOM_FRAC;
  function automatic logic signed [MOM_W-1:0] to_mom(logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] s;
    s = a >>> SH;
    if (s > ACC_W'(2**(MOM_W-1) - 1))       return {1'b0, {(MOM_W-1){1'b1}}};
    else if (s < -ACC_W'(2**(MOM_W-1)))     return {1'b1, {(MOM_W-1){1'b0}}};
    else                                    return s[MOM_W-1:0];
  endfunction

  logic signed [MOM_W-1:0] re_q, im_q;
  logic [2*MOM_W-1:0]      re_sq, im_sq, radicand;
  always_comb begin
    re_q     = to_mom(acc_re);
    im_q     = to_mom(acc_im);
    re_sq    = $unsigned(64'(re_q) * 64'(re_q));
    im_sq    = $unsigned(64'(im_q) * 64'(im_q));
    radicand = re_sq + im_sq;
  end

  logic             sq_start, sq_busy, sq_done;
  logic [MOM_W-1:0] sq_root;

  fx_sqrt #(.IN_W(2*MOM_W)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .radicand, .busy(sq_busy), .done(sq_done),
    .root(sq_root));

  assign sq_start = (state == S_DRAIN) && !v1 && !v2;
  assign busy     = (state != S_IDLE);

  // one feature at a time: the root of the previous feature has been taken
  a_sqrt_free: assert property (@(posedge clk) sq_start |-> !sq_busy);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k <= '0; n <= '0; m <= '0; pix <= '0;
      v1 <= 1'b0; v2 <= 1'b0;
      f2 <= '0; rc2 <= '0; rs2 <= '0;
      acc_re <= '0; acc_im <= '0;
      feat_valid <= 1'b0; feat_idx <= '0; feat_mag <= '0; done <= 1'b0;
    end else begin
      feat_valid <= 1'b0;
      done       <= 1'b0;

      // stage 2: products of the table values
      v2  <= v1;
      f2  <= $signed({1'b0, img_rdata});
      rc2 <= 18'(prod_c >>> TRIG_FRAC);
      rs2 <= 18'(prod_s >>> TRIG_FRAC);
      // stage 3: accumulate Re += f R cos, Im -= f R sin
      if (v2) begin
        acc_re <= acc_re + ACC_W'(f2 * rc2);
        acc_im <= acc_im - ACC_W'(f2 * rs2);
      end

      v1 <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k <= '0; n <= '0; m <= '0; pix <= '0;
          acc_re <= '0; acc_im <= '0;
          state <= S_ACCUM;
        end
        S_ACCUM: begin
          v1 <= 1'b1;                       // stage 1: read issued this clock
          if (int'(pix) == NPIX - 1) state <= S_DRAIN;
          else                       pix <= pix + 1'b1;
        end
        S_DRAIN: if (!v1 && !v2) begin      // accumulators final: sqrt starts
          acc_re <= '0;
          acc_im <= '0;
          state  <= S_SQRT;
        end
        S_SQRT: if (sq_done) begin
          feat_valid <= 1'b1;
          feat_idx   <= k;
          feat_mag   <= sq_root;
          pix        <= '0;
          if (int'(k) == N_FEAT - 1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            k <= k + 1'b1;
            if (m == n) begin n <= n + 1'b1; m <= '0; end
            else        m <= m + 1'b1;
            state <= S_ACCUM;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
