// tb_svm_decision: loads random models around a random feature vector and
// compares the decision value with a floating-point evaluation of
// sum alpha_i y_i exp(-gamma ||x - z_i||^2) + b (tolerance from the exp error
// bound), the decision with the sign of the reference, and the latency with
// nsv*36 + 10 clocks as counted here (done set nsv*36 + 9 edges after the
// edge that samples start). Runs: no support vectors (score = bias), 50 vectors at
// the reset gamma 1.07, single vectors at known distances (equal to x, one
// unit away in the last feature, half a unit away in the first), and all 1024
// vectors at gamma 0.25 with a request for more vectors than the memory holds.
module tb_svm_decision;
  import l3t_pkg::*;
  localparam int NSV = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_wr_t cfg = '0;
  logic x_valid = 0;
  logic [FEAT_W-1:0] x_idx = '0;
  logic [X_W-1:0] x = '0;
  logic start = 0, busy, done, is_gamma;
  logic [SCORE_W-1:0] score;
  int checks = 0, failures = 0;

  svm_decision #(.NSV(NSV)) dut (.*);

  int xv [N_FEAT];
  int zv [NSV][N_FEAT];
  int av [NSV];
  int gamma_q = 4383, bias_q = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfgw(cfg_sel_e sel, int addr, logic [31:0] data);
    @(negedge clk);
    cfg.we = 1; cfg.sel = sel; cfg.addr = CFG_ADDR_W'(addr); cfg.data = data;
    @(negedge clk) cfg.we = 0;
  endtask

  task automatic load_model(int n, bit copy_x);
    for (int k = 0; k < N_FEAT; k++) begin
      xv[k] = int'($urandom % 2458) - 1229;
      @(negedge clk) begin x_valid = 1; x_idx = FEAT_W'(k); x = X_W'(xv[k]); end
    end
    @(negedge clk) x_valid = 0;
    for (int i = 0; i < n; i++) begin
      int s;
      s = $urandom % 2048;                         // noise amplitude, up to 0.5
      for (int k = 0; k < N_FEAT; k++) begin
        zv[i][k] = xv[k] + ((s == 0) ? 0 : int'($urandom % (2 * s + 1)) - s);
        if (copy_x) zv[i][k] = xv[k] + ((i == 1 && k == N_FEAT - 1) ? 4096 : 0)
                                     + ((i == 2 && k == 0) ? -2048 : 0);
        cfgw(CFG_SV, i * N_FEAT + k, 32'(zv[i][k]));
      end
      av[i] = int'($urandom % 262144) - 131072;    // +-2.0
      if (i == 13 && n < 100) av[i] = 1869479117;   // about C = 28526
      cfgw(CFG_ALPHA, i, 32'(av[i]));
    end
  endtask

  task automatic evaluate(int n);
    real ref_s = 0.0, tol = 2.0e-4, got;
    int cyc;
    for (int i = 0; i < n; i++) begin
      longint d = 0;
      real kv;
      for (int k = 0; k < N_FEAT; k++) d += longint'(xv[k] - zv[i][k]) * (xv[k] - zv[i][k]);
      kv = $exp(-(real'(gamma_q) / 4096.0) * (real'(d) / 16777216.0));
      ref_s += real'(av[i]) / 65536.0 * kv;
      tol += ((av[i] < 0) ? -real'(av[i]) : real'(av[i])) / 65536.0 * 4.0e-4;
    end
    ref_s += real'(bias_q) / 65536.0;
    if (ref_s > 32767.99998) ref_s = 32767.99998;     // the score saturates
    if (ref_s < -32768.0)    ref_s = -32768.0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    got = real'($signed(score)) / 65536.0;
    checks++;
    if ((got - ref_s > tol) || (ref_s - got > tol)) begin
      failures++;
      $display("n=%0d: score %f, reference %f (tolerance %f)", n, got, ref_s, tol);
    end
    checks++;
    if (((ref_s > tol) && !is_gamma) || ((ref_s < -tol) && is_gamma)) begin
      failures++;
      $display("n=%0d: decision %0d for reference %f", n, is_gamma, ref_s);
    end
    checks++;
    if (cyc != n * N_FEAT + 10) begin
      failures++;
      $display("n=%0d: done after %0d clocks, expected %0d", n, cyc, n * N_FEAT + 10);
    end
    $display("n=%0d gamma=%0d score=%f reference=%f decision=%0d", n, gamma_q, got, ref_s, is_gamma);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // no support vectors: score is the bias
    bias_q = -81920;                               // -1.25
    cfgw(CFG_BIAS, 0, 32'(bias_q));
    cfgw(CFG_NSV, 0, 32'd0);
    load_model(0, 0);
    evaluate(0);
    // 50 vectors, gamma from reset (1.07)
    bias_q = 3277;
    cfgw(CFG_BIAS, 0, 32'(bias_q));
    load_model(50, 0);
    cfgw(CFG_NSV, 0, 32'd50);
    evaluate(50);
    // vector 0 equal to x (kernel exactly 1), vector 1 one unit away in the
    // last feature, vector 2 half a unit away in the first, each alone
    load_model(3, 1);
    for (int j = 0; j < 3; j++) begin
      for (int i = 0; i < 3; i++) begin
        av[i] = (i == j) ? 131072 : 0;            // 2.0 on the one vector
        cfgw(CFG_ALPHA, i, 32'(av[i]));
      end
      cfgw(CFG_NSV, 0, 32'd3);
      evaluate(3);
    end
    // full memory, more requested than held, gamma 0.25
    gamma_q = 1024;
    cfgw(CFG_GAMMA, 0, 32'(gamma_q));
    bias_q = 0;
    cfgw(CFG_BIAS, 0, 32'd0);
    load_model(NSV, 0);
    cfgw(CFG_NSV, 0, 32'd5000);
    evaluate(NSV);
    // negative decision forced by the bias
    bias_q = -200 * 65536;
    cfgw(CFG_BIAS, 0, 32'(bias_q));
    evaluate(NSV);
    bias_q = 200 * 65536;
    cfgw(CFG_BIAS, 0, 32'(bias_q));
    evaluate(NSV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
