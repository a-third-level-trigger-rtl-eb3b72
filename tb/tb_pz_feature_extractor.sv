// tb_pz_feature_extractor: a 577-pixel hexagonal camera with the radial and
// angular tables computed here in floating point and loaded through the
// configuration bus. For a gamma-like image, a hadron-like image and an empty
// image it checks the 36 features: their order, the exact fixed-point value
// (integer model) and closeness to the floating-point pseudo-Zernike
// magnitude; and that one image takes 36*(NPIX+36) clocks.
module tb_pz_feature_extractor;
  import l3t_pkg::*;
  import l3t_tb_pkg::*;
  localparam int NPIX = 577;
  localparam int AW = $clog2(NPIX);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_wr_t cfg = '0;
  logic start = 0, busy, feat_valid, done;
  logic [AW-1:0] img_raddr;
  logic [PIX_W-1:0] img_rdata;
  logic [FEAT_W-1:0] feat_idx;
  logic [MOM_W-1:0] feat_mag;
  int checks = 0, failures = 0;

  pz_feature_extractor #(.NPIX(NPIX)) dut (.*);

  int img [NPIX_MAX];
  always_ff @(posedge clk) img_rdata <= 16'(img[img_raddr]);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_image(string name);
    longint mag [N_FEAT];
    real fl, err, tol, tot = 0.0;
    int got = 0, cyc = 0;
    ref_features(NPIX, img, mag);
    for (int p = 0; p < NPIX; p++) tot += img[p];
    tol = 5.0e-4 * tot + 1.0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin
      @(posedge clk); #1;
      if (feat_valid) begin
        fl  = float_feature(NPIX, img, got);
        err = real'(feat_mag) / 16.0 - fl;
        if (err < 0) err = -err;
        checks++;
        if (int'(feat_idx) != got || longint'(feat_mag) != mag[got] || err > tol) begin
          failures++;
          if (failures < 10) $display("%s k=%0d (idx %0d): got %0d want %0d, float %f", name,
                                      got, feat_idx, feat_mag, mag[got], fl * 16.0);
        end
        got++;
      end
      if (!done) cyc++;
    end
    checks++;
    if (got != N_FEAT) begin failures++; $display("%s: %0d features", name, got); end
    checks++;
    if (cyc != N_FEAT * (NPIX + 36)) begin
      failures++; $display("%s: %0d clocks, expected %0d", name, cyc, N_FEAT * (NPIX + 36));
    end
    $display("%s: |A00|=%0d |A11|=%0d |A22|=%0d |A77|=%0d (Q.4), %0d clocks", name,
             mag[0], mag[2], mag[5], mag[35], cyc);
  endtask

  initial begin
    build_tables(NPIX);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < N_FEAT; k++)
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk);
        cfg.we = 1; cfg.sel = CFG_RADIAL; cfg.addr = CFG_ADDR_W'(k * NPIX + p);
        cfg.data = 32'(rad_q[k][p]);
      end
    for (int m = 0; m <= N_ORDER; m++)
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk);
        cfg.we = 1; cfg.sel = CFG_ANGULAR; cfg.addr = CFG_ADDR_W'(m * NPIX + p);
        cfg.data = {16'(cos_q[m][p]), 16'(sin_q[m][p])};
      end
    @(negedge clk) cfg.we = 0;
    make_image(NPIX, 0.3, 0.15, 0.12, 0.03, 0.46, 800.0, 20, img);
    run_image("gamma-like");
    make_image(NPIX, -0.2, 0.35, 0.2, 0.12, 1.9, 300.0, 20, img);
    run_image("hadron-like");
    for (int p = 0; p < NPIX; p++) img[p] = 0;
    run_image("empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
