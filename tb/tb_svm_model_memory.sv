// tb_svm_model_memory: fills all 1024 support vectors (36 features each) and
// their coefficients through the configuration bus, then reads back random
// (support vector, feature) pairs and every coefficient.
module tb_svm_model_memory;
  import l3t_pkg::*;
  localparam int NSV = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  cfg_wr_t cfg = '0;
  logic [9:0] sv_idx = '0;
  logic [FEAT_W-1:0] feat = '0;
  logic [X_W-1:0] sv_q;
  logic [ALPHA_W-1:0] alpha_q;
  int checks = 0, failures = 0;

  svm_model_memory #(.NSV(NSV)) dut (.*);

  function automatic logic [15:0] zv(int i, int k);
    return 16'(i * 131 + k * 977 + (i ^ k) * 3);
  endfunction
  function automatic logic [31:0] av(int i);
    return 32'(i * 2654435761);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NSV; i++) begin
      for (int k = 0; k < N_FEAT; k++) begin
        @(negedge clk);
        cfg.we = 1; cfg.sel = CFG_SV; cfg.addr = CFG_ADDR_W'(i * N_FEAT + k); cfg.data = {16'hffff, zv(i, k)};
      end
      @(negedge clk);
      cfg.sel = CFG_ALPHA; cfg.addr = CFG_ADDR_W'(i); cfg.data = av(i);
    end
    @(negedge clk);
    cfg.sel = CFG_MEAN; cfg.addr = 0; cfg.data = '0;      // decoy
    @(negedge clk) cfg.we = 0;
    for (int j = 0; j < 3000; j++) begin
      int i, k;
      i = (j < NSV) ? j : $urandom % NSV;
      k = (j < NSV) ? j % N_FEAT : $urandom % N_FEAT;
      @(negedge clk) begin sv_idx = 10'(i); feat = FEAT_W'(k); end
      @(posedge clk); #1;
      checks++;
      if (sv_q !== zv(i, k) || alpha_q !== av(i)) begin
        failures++;
        if (failures < 10) $display("sv %0d feat %0d: got %h %h want %h %h", i, k, sv_q, alpha_q, zv(i, k), av(i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
