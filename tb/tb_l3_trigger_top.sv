// tb_l3_trigger_top: the whole trigger at its default size (577-pixel camera,
// 1024 support vectors), end to end.
//
// The testbench plays the offline software: it builds the pseudo-Zernike
// tables of a hexagonal camera, generates 1024 training images (half narrow
// "gamma" spots pointing to the camera centre, half wide "hadron" spots),
// computes their features with an integer model, derives the per-feature
// mean and 1/std, and loads the normalized training features as support
// vectors with coefficients +a (gamma) / -a (hadron); gamma stays at its reset
// value 1.07. It then streams test images (some of them training images,
// whose own support vector makes the decision unambiguous) with random gaps
// in pix_valid and with the next image offered while the trigger is busy.
// Checked per image: score against a floating-point evaluation of the
// decision function on the model's features, the decision against the
// reference sign, and the latency 36*(NPIX+36) + nsv*36 + 14 clock edges from the
// last pixel to res_valid. Counted, and required to happen: input stalls,
// gamma and hadron decisions, square roots, kernel evaluations.
module tb_l3_trigger_top;
  import l3t_pkg::*;
  import l3t_tb_pkg::*;
  localparam int NPIX = 577;
  localparam int NSV = 1024;
  localparam int N_TEST = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_wr_t cfg = '0;
  logic pix_valid = 0, pix_ready;
  logic [PIX_W-1:0] pix_data = '0;
  logic res_valid, res_gamma, busy;
  logic [SCORE_W-1:0] res_score;
  int checks = 0, failures = 0;

  l3_trigger_top dut (.*);

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model
  int     img [NPIX_MAX];
  longint mag [N_FEAT];
  longint mean_q [N_FEAT], invstd_q [N_FEAT];
  int     sv_x [NSV][N_FEAT];
  int     alpha_q [NSV];
  bit     sv_gamma [NSV];
  int     seeds [NSV];

  // expected results, in order
  real exp_score [$];
  real exp_tol [$];
  bit  exp_truth [$];

  // counters
  int n_stall = 0, n_gamma = 0, n_hadron = 0, n_sqrt = 0, n_kernel = 0, n_correct = 0;
  longint cyc = 0, last_pix_cyc = 0;
  longint last_pix_q [$];

  // latency in clock edges: last pixel taken at edge E0, res_valid set by edge E1
  longint lat_q [$];
  always @(posedge clk) begin
    cyc++;
    if (pix_valid && pix_ready && int'(dut.wr_pix) == NPIX - 1) last_pix_q.push_back(cyc);
    if (res_valid) lat_q.push_back(cyc - 1 - last_pix_q.pop_front());
    if (pix_valid && !pix_ready) n_stall++;
    if (rst_n && dut.u_extract.sq_done) n_sqrt++;
    if (rst_n && dut.u_svm.kv) n_kernel++;
  end

  task automatic cfgw(cfg_sel_e sel, int addr, logic [31:0] data);
    @(negedge clk);
    cfg.we = 1; cfg.sel = sel; cfg.addr = CFG_ADDR_W'(addr); cfg.data = data;
  endtask

  task automatic gen_event(int seed, bit g);
    void'($urandom(seed));
    random_event(NPIX, g, img);
  endtask

  task automatic normalize(ref int xq [N_FEAT]);
    ref_features(NPIX, img, mag);
    for (int k = 0; k < N_FEAT; k++) xq[k] = ref_norm(mag[k], mean_q[k], invstd_q[k]);
  endtask

  task automatic send_image();
    for (int p = 0; p < NPIX; p++) begin
      @(negedge clk);
      while ($urandom % 8 == 0) begin pix_valid = 0; @(negedge clk); end
      pix_valid = 1; pix_data = 16'(img[p]);
      @(posedge clk);
      while (!pix_ready) @(posedge clk);
    end
    // keep offering the next image's first pixel: the trigger is busy
  endtask

  // result collector
  initial begin
    int done_n = 0;
    forever begin
      @(posedge clk);
      if (res_valid) begin
        real got, want, tol;
        longint lat;
        bit truth;
        got = real'($signed(res_score)) / 65536.0;
        want = exp_score.pop_front();
        tol = exp_tol.pop_front();
        truth = exp_truth.pop_front();
        #1 lat = lat_q.pop_front();
        checks++;
        if (got - want > tol || want - got > tol) begin
          failures++; $display("image %0d: score %f, reference %f (tol %f)", done_n, got, want, tol);
        end
        checks++;
        if ((want > tol && !res_gamma) || (want < -tol && res_gamma)) begin
          failures++; $display("image %0d: decision %0d, reference %f", done_n, res_gamma, want);
        end
        checks++;
        if (lat != N_FEAT * (NPIX + 36) + NSV * N_FEAT + 14) begin
          failures++; $display("image %0d: latency %0d, expected %0d", done_n, lat,
                               N_FEAT * (NPIX + 36) + NSV * N_FEAT + 14);
        end
        if (res_gamma) n_gamma++; else n_hadron++;
        if (res_gamma == truth) n_correct++;
        $display("image %0d: truth %s, decision %s, score %f (reference %f), latency %0d",
                 done_n, truth ? "gamma" : "hadron", res_gamma ? "gamma" : "hadron", got, want, lat);
        done_n++;
      end
    end
  end

  initial begin
    real sum [N_FEAT], sum2 [N_FEAT];
    int  xq [N_FEAT];
    build_tables(NPIX);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // tables
    for (int k = 0; k < N_FEAT; k++)
      for (int p = 0; p < NPIX; p++) cfgw(CFG_RADIAL, k * NPIX + p, 32'(rad_q[k][p]));
    for (int m = 0; m <= N_ORDER; m++)
      for (int p = 0; p < NPIX; p++)
        cfgw(CFG_ANGULAR, m * NPIX + p, {16'(cos_q[m][p]), 16'(sin_q[m][p])});
    // training set statistics
    for (int k = 0; k < N_FEAT; k++) begin sum[k] = 0.0; sum2[k] = 0.0; end
    for (int i = 0; i < NSV; i++) begin
      seeds[i] = 1000 + 7 * i;
      sv_gamma[i] = (i % 2 == 0);
      gen_event(seeds[i], sv_gamma[i]);
      ref_features(NPIX, img, mag);
      for (int k = 0; k < N_FEAT; k++) begin
        sum[k] += real'(mag[k]); sum2[k] += real'(mag[k]) * real'(mag[k]);
      end
    end
    for (int k = 0; k < N_FEAT; k++) begin
      real mu, sd;
      mu = sum[k] / NSV;
      sd = $sqrt(sum2[k] / NSV - mu * mu);
      if (sd < 1.0) sd = 1.0;
      mean_q[k] = longint'($floor(mu + 0.5));
      invstd_q[k] = longint'($floor(16777216.0 / sd + 0.5));
      if (invstd_q[k] > 16777215) invstd_q[k] = 16777215;
      cfgw(CFG_MEAN, k, 32'(mean_q[k]));
      cfgw(CFG_INVSTD, k, 32'(invstd_q[k]));
    end
    // support vectors
    for (int i = 0; i < NSV; i++) begin
      gen_event(seeds[i], sv_gamma[i]);
      normalize(xq);
      for (int k = 0; k < N_FEAT; k++) begin
        sv_x[i][k] = xq[k];
        cfgw(CFG_SV, i * N_FEAT + k, 32'(xq[k]));
      end
      alpha_q[i] = 32768 + int'($urandom % 65536);       // 0.5 .. 1.5
      if (!sv_gamma[i]) alpha_q[i] = -alpha_q[i];
      cfgw(CFG_ALPHA, i, 32'(alpha_q[i]));
    end
    @(negedge clk) cfg.we = 0;
    // test images
    for (int t = 0; t < N_TEST; t++) begin
      bit g;
      real s, tol;
      g = (t % 2 == 0);
      if (t < 4) gen_event(seeds[t * 3 + (g ? 0 : 1)], g);   // training images
      else       gen_event(50000 + 13 * t, g);               // fresh images
      normalize(xq);
      s = 0.0; tol = 2.0e-4;
      for (int i = 0; i < NSV; i++) begin
        longint d;
        d = 0;
        for (int k = 0; k < N_FEAT; k++) d += longint'(xq[k] - sv_x[i][k]) * (xq[k] - sv_x[i][k]);
        s += real'(alpha_q[i]) / 65536.0 * $exp(-(4383.0 / 4096.0) * (real'(d) / 16777216.0));
        tol += ((alpha_q[i] < 0) ? -real'(alpha_q[i]) : real'(alpha_q[i])) / 65536.0 * 4.0e-4;
      end
      exp_score.push_back(s);
      exp_tol.push_back(tol);
      exp_truth.push_back(g);
      send_image();
    end
    @(negedge clk) pix_valid = 0;
    while (exp_score.size() > 0) @(posedge clk);
    repeat (5) @(posedge clk);
    $display("stalls %0d, gamma decisions %0d, hadron decisions %0d, square roots %0d, kernel evaluations %0d, agreeing with truth %0d of %0d",
             n_stall, n_gamma, n_hadron, n_sqrt, n_kernel, n_correct, N_TEST);
    checks++; if (n_stall == 0) begin failures++; $display("no input stall"); end
    checks++; if (n_gamma == 0) begin failures++; $display("no gamma decision"); end
    checks++; if (n_hadron == 0) begin failures++; $display("no hadron decision"); end
    checks++; if (n_sqrt != N_TEST * N_FEAT) begin failures++; $display("square roots %0d", n_sqrt); end
    checks++; if (n_kernel != N_TEST * NSV) begin failures++; $display("kernels %0d", n_kernel); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
