// pz_angular_table: angular factor of the pseudo-Zernike basis per pixel.
//
// Holds cos(m*theta_p) and sin(m*theta_p) for m = 0..7 and the NPIX pixels,
// signed Q1.14, where theta_p is the polar angle of pixel p in the camera.
// Like the radial polynomials they depend only on the pixel coordinates and
// are computed offline; the paper mentions only the stored radial
// polynomials, so storing the angular factor the same way is this design's
// choice. Loaded through the configuration bus (CFG_ANGULAR, address
// m*NPIX + p, data = {cos, sin}). Read: m and pix in, cos_q/sin_q one clock later.
module pz_angular_table
  import l3t_pkg::*;
#(
  parameter int NPIX = 577,
  localparam int AW  = $clog2(NPIX)
) (
  input  logic              clk,
  input  cfg_wr_t           cfg,
  input  logic [2:0]        m,
  input  logic [AW-1:0]     pix,
  output logic [COEF_W-1:0] cos_q,
  output logic [COEF_W-1:0] sin_q
);
  localparam int DEPTH = (N_ORDER + 1) * NPIX;
  localparam int DAW   = $clog2(DEPTH);

  logic [2*COEF_W-1:0] mem [DEPTH];
  logic [DAW-1:0]      raddr;

  assign raddr = DAW'(m) * DAW'(NPIX) + DAW'(pix);

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == CFG_ANGULAR && int'(cfg.addr) < DEPTH)
      mem[cfg.addr[DAW-1:0]] <= cfg.data[2*COEF_W-1:0];
    {cos_q, sin_q} <= mem[raddr];
  end
endmodule
