// pz_image_buffer: storage for one cleaned camera image.
//
// NPIX pixel amplitudes (unsigned, PIX_W bits) are written one per clock, in
// pixel order, from the trigger's input stream and read back by the
// pseudo-Zernike feature extractor. Simple dual-port memory: one write port,
// one synchronous read port (rdata is valid the clock after raddr). There is
// no reset; the controller always writes all NPIX pixels before they are read.
// The source design stores each image for the feature computation without
// describing how; the single-buffer organisation here is this design's choice.
module pz_image_buffer #(
  parameter int NPIX  = 577,
  parameter int PIX_W = 16,
  localparam int AW   = $clog2(NPIX)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [PIX_W-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [PIX_W-1:0] rdata
);
  logic [PIX_W-1:0] mem [NPIX];

  always_ff @(posedge clk) begin
    if (we && int'(waddr) < NPIX) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
