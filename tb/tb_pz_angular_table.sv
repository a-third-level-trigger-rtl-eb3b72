// tb_pz_angular_table: loads cos/sin(m theta) for m = 0..7 and 577 pixels of
// a hexagonal camera, writes decoys with other targets, and reads every entry
// back, checking both halves and their ordering.
module tb_pz_angular_table;
  import l3t_pkg::*;
  import l3t_tb_pkg::*;
  localparam int NPIX = 577;
  localparam int AW = $clog2(NPIX);
  logic clk = 0;
  always #5 clk = ~clk;
  cfg_wr_t cfg = '0;
  logic [2:0] m = '0;
  logic [AW-1:0] pix = '0;
  logic [COEF_W-1:0] cos_q_o, sin_q_o;
  int checks = 0, failures = 0;

  pz_angular_table #(.NPIX(NPIX)) dut (.clk, .cfg, .m, .pix, .cos_q(cos_q_o), .sin_q(sin_q_o));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build_tables(NPIX);
    for (int mm = 0; mm <= N_ORDER; mm++)
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk);
        cfg.we = 1; cfg.sel = CFG_ANGULAR; cfg.addr = CFG_ADDR_W'(mm * NPIX + p);
        cfg.data = {16'(cos_q[mm][p]), 16'(sin_q[mm][p])};
      end
    for (int p = 0; p < 40; p++) begin
      @(negedge clk);
      cfg.we = 1; cfg.sel = CFG_RADIAL; cfg.addr = CFG_ADDR_W'(p * 3); cfg.data = '0;
    end
    @(negedge clk) cfg.we = 0;
    for (int mm = 0; mm <= N_ORDER; mm++)
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk) begin m = 3'(mm); pix = AW'(p); end
        @(posedge clk); #1;
        checks++;
        if ($signed(cos_q_o) !== 16'(cos_q[mm][p]) || $signed(sin_q_o) !== 16'(sin_q[mm][p])) begin
          failures++;
          if (failures < 10) $display("m=%0d p=%0d: got %0d %0d want %0d %0d", mm, p,
                                      $signed(cos_q_o), $signed(sin_q_o), cos_q[mm][p], sin_q[mm][p]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
