// tb_pz_radial_table: loads the full 36 x 577 radial table with distinct
// values through the configuration bus, writes decoy data with other targets
// to the same addresses, then reads every (feature, pixel) entry back.
module tb_pz_radial_table;
  import l3t_pkg::*;
  localparam int NPIX = 577;
  localparam int AW = $clog2(NPIX);
  logic clk = 0;
  always #5 clk = ~clk;
  cfg_wr_t cfg = '0;
  logic [FEAT_W-1:0] feat = '0;
  logic [AW-1:0] pix = '0;
  logic [R_W-1:0] rdata;
  int checks = 0, failures = 0;

  pz_radial_table #(.NPIX(NPIX)) dut (.*);

  function automatic logic [17:0] val(int k, int p);
    return 18'((k * 7919 + p * 104729 + 12345) ^ (p << 3));
  endfunction

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N_FEAT; k++)
      for (int p = 0; p < NPIX; p++) begin
        @(negedge clk);
        cfg.we = 1; cfg.sel = CFG_RADIAL; cfg.addr = CFG_ADDR_W'(k * NPIX + p);
        cfg.data = {14'h2ead, val(k, p)};
      end
    // decoys: other targets must not write this table
    for (int p = 0; p < 50; p++) begin
      @(negedge clk);
      cfg.we = 1; cfg.sel = (p % 2) ? CFG_ANGULAR : CFG_SV; cfg.addr = CFG_ADDR_W'(p); cfg.data = '1;
    end
    @(negedge clk) cfg.we = 0;
    for (int k = 0; k < N_FEAT; k++)
      for (int p = 0; p < NPIX; p += ((k % 5 == 0) ? 1 : 7)) begin
        @(negedge clk) begin feat = FEAT_W'(k); pix = AW'(p); end
        @(posedge clk); #1;
        checks++;
        if (rdata !== val(k, p)) begin
          failures++;
          if (failures < 10) $display("R[%0d][%0d]: got %h want %h", k, p, rdata, val(k, p));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
