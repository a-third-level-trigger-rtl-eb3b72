// pz_radial_table: pseudo-Zernike radial polynomials at every camera pixel.
//
// Holds R_nm(r_p) * (n+1)/pi for the 36 features k = n(n+1)/2 + m
// (n = 0..7, m = 0..n) and the NPIX pixels p, as signed Q5.12 numbers. As in
// the paper, these values depend only on the pixel coordinates, so they are
// computed once offline and stored; here the store is a RAM loaded through the
// configuration bus (target CFG_RADIAL, address k*NPIX + p, data[17:0]).
// Folding the (n+1)/pi factor into the table is this design's choice.
// Read: feat and pix in, rdata one clock later.
module pz_radial_table
  import l3t_pkg::*;
#(
  parameter int NPIX = 577,
  localparam int AW  = $clog2(NPIX)
) (
  input  logic              clk,
  input  cfg_wr_t           cfg,
  input  logic [FEAT_W-1:0] feat,
  input  logic [AW-1:0]     pix,
  output logic [R_W-1:0]    rdata
);
  localparam int DEPTH = N_FEAT * NPIX;
  localparam int DAW   = $clog2(DEPTH);

  logic [R_W-1:0]    mem [DEPTH];
  logic [DAW-1:0]    raddr;

  assign raddr = DAW'(feat) * DAW'(NPIX) + DAW'(pix);

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == CFG_RADIAL && int'(cfg.addr) < DEPTH)
      mem[cfg.addr[DAW-1:0]] <= cfg.data[R_W-1:0];
    rdata <= mem[raddr];
  end
endmodule
