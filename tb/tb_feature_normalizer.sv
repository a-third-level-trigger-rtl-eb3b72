// tb_feature_normalizer: loads random means and reciprocal standard
// deviations for the 36 features, drives random magnitudes (including ones
// that saturate either way) and checks x = floor((mag-mean)*invstd / 2^12),
// saturated to 16 bits, one clock later; also checks the reset values
// (mean 0, 1/std 1).
module tb_feature_normalizer;
  import l3t_pkg::*;
  import l3t_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_wr_t cfg = '0;
  logic in_valid = 0, out_valid;
  logic [FEAT_W-1:0] in_idx = '0, out_idx;
  logic [MOM_W-1:0] in_mag = '0;
  logic [X_W-1:0] out_x;
  int checks = 0, failures = 0;
  longint mean [N_FEAT], invstd [N_FEAT];

  feature_normalizer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic drive(int k, logic [31:0] mag, longint mu, longint is);
    int want = ref_norm(longint'(mag), mu, is);
    @(negedge clk) begin in_valid = 1; in_idx = FEAT_W'(k); in_mag = mag; end
    @(posedge clk); #1;
    checks++;
    if (!out_valid || out_idx !== FEAT_W'(k) || $signed(out_x) !== 16'(want)) begin
      failures++;
      if (failures < 10) $display("k=%0d mag=%0d: got %0d want %0d", k, mag, $signed(out_x), want);
    end
    @(negedge clk) in_valid = 0;
    @(posedge clk); #1;
    checks++; if (out_valid) failures++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values: x = mag in Q3.12 from Q.4, i.e. mag * 256
    drive(3, 32'd20, 0, 1 << 20);
    drive(4, 32'd200, 0, 1 << 20);       // 12.5: saturates high
    for (int k = 0; k < N_FEAT; k++) begin
      mean[k]   = longint'($urandom % 200000);
      invstd[k] = longint'($urandom % (1 << 20)) + 100;
      @(negedge clk);
      cfg.we = 1; cfg.sel = CFG_MEAN; cfg.addr = CFG_ADDR_W'(k); cfg.data = 32'(mean[k]);
      @(negedge clk);
      cfg.sel = CFG_INVSTD; cfg.data = 32'(invstd[k]);
    end
    @(negedge clk) cfg.we = 0;
    for (int i = 0; i < 2000; i++) begin
      int k;
      logic [31:0] mag;
      k = $urandom % N_FEAT;
      case (i % 4)
        0: mag = 32'(mean[k]);
        1: mag = 32'(mean[k] + ($urandom % 20000) - 10000);
        2: mag = $urandom % 400000;
        default: mag = $urandom;
      endcase
      if (i % 4 == 1 && mean[k] < 10000) mag = 32'(mean[k]);
      drive(k, mag, mean[k], invstd[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
