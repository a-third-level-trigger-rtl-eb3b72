// l3_trigger_top: third-level gamma/hadron trigger for a Cherenkov telescope.
//
// Receives one cleaned camera image as a stream of NPIX pixel amplitudes,
// computes its 36 pseudo-Zernike features (order 7), normalizes them with the
// training-set statistics and evaluates a Gaussian-kernel support vector
// machine; the sign of the decision function says gamma-ray (+1) or hadron
// (-1). Blocks: pz_image_buffer -> pz_feature_extractor (radial and angular
// tables, fx_sqrt) -> feature_normalizer -> svm_decision (svm_model_memory,
// fx_exp). All tables and model values are computed offline and written
// through cfg, which should only be used while busy is low.
//
// Interface (this design's choice): pix_valid/pix_ready/pix_data is a
// valid/ready stream; pixels are taken in pixel order, NPIX per image, while
// pix_ready is high. pix_ready drops after the last pixel and stays low until
// the decision has been given, so the camera side is stalled meanwhile.
// res_valid pulses for one clock with res_gamma and res_score (signed Q16.16).
// Timing: res_valid is set by the clock edge that comes
// 36*(NPIX+36) + 36*nsv + 14 edges after the edge that takes the last pixel
// (22068 + 36864 + 14 = 58946 at the default size, all 1024 support vectors
// in use). The original work gives no rate or latency; these are this
// design's.
module l3_trigger_top
  import l3t_pkg::*;
#(
  parameter int NPIX = 577,
  parameter int NSV  = 1024,
  localparam int AW  = $clog2(NPIX)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  input  logic               pix_valid,
  output logic               pix_ready,
  input  logic [PIX_W-1:0]   pix_data,
  output logic               res_valid,
  output logic               res_gamma,
  output logic [SCORE_W-1:0] res_score,
  output logic               busy
);
  typedef enum logic [2:0] {S_LOAD, S_EXTRACT, S_SETTLE, S_CLASSIFY, S_WAIT} state_e;
  state_e state;

  logic [AW-1:0] wr_pix;
  logic [AW-1:0] img_raddr;
  logic [PIX_W-1:0] img_rdata;
  logic          load_fire;

  assign pix_ready = (state == S_LOAD);
  assign load_fire = pix_valid && pix_ready;
  assign busy      = (state != S_LOAD) || (wr_pix != '0);

  pz_image_buffer #(.NPIX(NPIX), .PIX_W(PIX_W)) u_image (
    .clk, .we(load_fire), .waddr(wr_pix), .wdata(pix_data),
    .raddr(img_raddr), .rdata(img_rdata));

  logic              ext_start, ext_busy, ext_done;
  logic              feat_valid;
  logic [FEAT_W-1:0] feat_idx;
  logic [MOM_W-1:0]  feat_mag;

  pz_feature_extractor #(.NPIX(NPIX)) u_extract (
    .clk, .rst_n, .cfg, .start(ext_start), .busy(ext_busy),
    .img_raddr, .img_rdata, .feat_valid, .feat_idx, .feat_mag, .done(ext_done));

  logic              x_valid;
  logic [FEAT_W-1:0] x_idx;
  logic [X_W-1:0]    x;

  feature_normalizer u_norm (
    .clk, .rst_n, .cfg, .in_valid(feat_valid), .in_idx(feat_idx), .in_mag(feat_mag),
    .out_valid(x_valid), .out_idx(x_idx), .out_x(x));

  logic svm_start, svm_busy, svm_done, svm_gamma;
  logic [SCORE_W-1:0] svm_score;

  svm_decision #(.NSV(NSV)) u_svm (
    .clk, .rst_n, .cfg, .x_valid, .x_idx, .x, .start(svm_start), .busy(svm_busy),
    .done(svm_done), .is_gamma(svm_gamma), .score(svm_score));

  assign ext_start = (state == S_EXTRACT) && !ext_busy && !ext_done;
  assign svm_start = (state == S_CLASSIFY);

  logic started;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; wr_pix <= '0; started <= 1'b0;
      res_valid <= 1'b0; res_gamma <= 1'b0; res_score <= '0;
    end else begin
      res_valid <= 1'b0;
      unique case (state)
        S_LOAD: if (load_fire) begin
          if (int'(wr_pix) == NPIX - 1) begin
            wr_pix  <= '0;
            started <= 1'b0;
            state   <= S_EXTRACT;
          end else begin
            wr_pix <= wr_pix + 1'b1;
          end
        end
        S_EXTRACT: begin
          if (ext_start) started <= 1'b1;
          if (started && ext_done) state <= S_SETTLE;
        end
        S_SETTLE:   state <= S_CLASSIFY;      // last normalized feature is written
        S_CLASSIFY: state <= S_WAIT;          // svm_start pulses here
        S_WAIT: if (svm_done) begin
          res_valid <= 1'b1;
          res_gamma <= svm_gamma;
          res_score <= svm_score;
          state     <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // configuration must not change tables while an image is processed
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n)
    cfg.we |-> (state == S_LOAD && wr_pix == '0));
  // the classifier must be idle when a new evaluation starts
  a_svm_idle: assert property (@(posedge clk) disable iff (!rst_n)
    svm_start |-> !svm_busy);
endmodule
