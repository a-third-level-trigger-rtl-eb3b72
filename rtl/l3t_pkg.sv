// l3t_pkg: types and fixed-point formats shared by the gamma/hadron trigger.
//
// The trigger turns a cleaned Cherenkov camera image into 36 pseudo-Zernike
// features (maximum order 7, one magnitude per (n,m) with 0<=m<=n), normalizes
// them and classifies the image with a Gaussian-kernel support vector machine.
// Order 7, the 36 features and gamma=1.07 follow the paper; every word width
// and Q format below is this design's own choice (the source only says that
// integer and fixed-point arithmetic are used).
//
// Configuration (all tables and registers computed offline) is written through
// one bus, cfg_wr_t: a write strobe, a target select, an address and 32 data bits.
package l3t_pkg;

  localparam int N_ORDER = 7;                                // maximum order n
  localparam int N_FEAT  = (N_ORDER + 1) * (N_ORDER + 2) / 2; // 36 features
  localparam int FEAT_W  = 6;                                // feature index width

  // pixel amplitude: unsigned integer
  localparam int PIX_W      = 16;
  // radial polynomial, already scaled by (n+1)/pi: signed Q5.12 (18 bits, the
  // width of an FPGA hard multiplier). |R_n0(0)| = n+1, so the scaled value
  // reaches 8*8/pi = 20.4 at the camera centre for n = 7.
  localparam int R_W        = 18;
  localparam int R_FRAC     = 12;
  // cos / sin of m*theta: signed Q1.14
  localparam int COEF_W     = 16;
  localparam int TRIG_FRAC  = 14;
  // moment accumulator: signed, R_FRAC fractional bits
  localparam int ACC_W      = 48;
  // moment real/imaginary part and magnitude: Q.4
  localparam int MOM_W      = 32;
  localparam int MOM_FRAC   = 4;
  // 1/std: unsigned Q4.20
  localparam int INVSTD_W    = 24;
  localparam int INVSTD_FRAC = 20;
  // normalized feature and support vector component: signed Q3.12
  localparam int X_W        = 16;
  localparam int X_FRAC     = 12;
  // squared distance: unsigned, 2*X_FRAC fractional bits
  localparam int DIST_W     = 40;
  // kernel width gamma: unsigned Q4.12, reset value 1.07
  localparam int GAMMA_W    = 16;
  localparam int GAMMA_FRAC = 12;
  localparam logic [GAMMA_W-1:0] GAMMA_DEFAULT = 16'd4383;   // round(1.07 * 4096)
  // exp argument: unsigned Q8.16; exp result: unsigned Q1.16
  localparam int EXPIN_W    = 24;
  localparam int EXP_FRAC   = 16;
  localparam int K_W        = 17;
  // alpha_i*y_i and bias: signed Q16.16; decision sum: signed Q.32
  localparam int ALPHA_W    = 32;
  localparam int ALPHA_FRAC = 16;
  localparam int SCORE_ACC_W = 64;
  localparam int SCORE_W    = 32;   // reported score, signed Q16.16

  // configuration targets
  typedef enum logic [3:0] {
    CFG_RADIAL  = 4'd0,  // addr = k*NPIX + p,  data[17:0] = R (Q5.12)
    CFG_ANGULAR = 4'd1,  // addr = m*NPIX + p,  data = {cos, sin} (Q1.14 each)
    CFG_MEAN    = 4'd2,  // addr = k,           data = mean (Q28.4)
    CFG_INVSTD  = 4'd3,  // addr = k,           data[23:0] = 1/std (Q4.20)
    CFG_SV      = 4'd4,  // addr = i*36 + k,    data[15:0] = z_ik (Q3.12)
    CFG_ALPHA   = 4'd5,  // addr = i,           data = alpha_i*y_i (Q16.16)
    CFG_BIAS    = 4'd6,  // data = b (Q16.16)
    CFG_GAMMA   = 4'd7,  // data[15:0] = gamma (Q4.12)
    CFG_NSV     = 4'd8   // data = number of support vectors in use
  } cfg_sel_e;

  localparam int CFG_ADDR_W = 20;

  typedef struct packed {
    logic                  we;
    cfg_sel_e              sel;
    logic [CFG_ADDR_W-1:0] addr;
    logic [31:0]           data;
  } cfg_wr_t;

endpackage
