// tb_workload_test_set: the test-set evaluation of the classifier, on
// synthetic data and at reduced count. The reference study classified 6109
// gamma and 6183 hadron camera images with its trained SVM and reported the
// fraction recognized per class; its images are not available, so this bench
// draws 100 fresh synthetic images (alternating gamma-like and hadron-like,
// none of them in the training set) and runs them through the full-size
// trigger (577 pixels, 1024 support vectors built from 1024 synthetic
// training images, gamma 1.07). For every image it checks the score against
// the floating-point decision function and the decision against its sign,
// and it prints a table like the study's: total, recognized and ratio per
// class. The ratios describe the synthetic data, not the telescope.
module tb_workload_test_set;
  import l3t_pkg::*;
  import l3t_tb_pkg::*;
  localparam int NPIX = 577;
  localparam int NSV = 1024;
  localparam int N_TEST = 100;

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
    repeat (20000000) @(posedge clk);
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
  int tot_g = 0, tot_h = 0, rec_g = 0, rec_h = 0;
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
        if (truth) begin tot_g++; if (res_gamma) rec_g++; end
        else       begin tot_h++; if (!res_gamma) rec_h++; end
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
      gen_event(90001 + 17 * t, g);                           // fresh images
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
    $display("         total  recognized  ratio");
    $display("gammas   %5d  %10d  %5.1f%%", tot_g, rec_g, 100.0 * rec_g / tot_g);
    $display("hadrons  %5d  %10d  %5.1f%%", tot_h, rec_h, 100.0 * rec_h / tot_h);
    $display("overall accuracy %5.1f%%", 100.0 * n_correct / N_TEST);
    checks++; if (tot_g + tot_h != N_TEST) begin failures++; $display("missing results"); end
    checks++; if (n_kernel != N_TEST * NSV) begin failures++; $display("kernels %0d", n_kernel); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
