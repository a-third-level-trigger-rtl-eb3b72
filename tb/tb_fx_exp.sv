// tb_fx_exp: exp(-t) over t in [0, 256) (Q8.16) against the real exponential,
// tolerance 3e-4 absolute, with one argument per clock to check the
// two-clock pipeline latency and throughput.
module tb_fx_exp;
  import l3t_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [EXPIN_W-1:0] t = '0;
  logic [K_W-1:0] y;
  int checks = 0, failures = 0;
  real maxerr = 0.0;

  fx_exp dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [EXPIN_W-1:0] q [$];
  int sent = 0;

  // scoreboard: every output must come exactly 2 clocks after its input
  logic [EXPIN_W-1:0] t_d1, t_d2;
  logic v_d1, v_d2;
  always @(posedge clk) begin
    t_d1 <= t; t_d2 <= t_d1; v_d1 <= in_valid && rst_n; v_d2 <= v_d1;
    if (rst_n) begin
      if (out_valid !== v_d2) begin failures++; $display("valid timing mismatch"); end
      if (v_d2 && out_valid) begin
        real want, got, err;
        want = $exp(-real'(t_d2) / 65536.0);
        got  = real'(y) / 65536.0;
        err  = (got > want) ? got - want : want - got;
        checks++;
        if (err > maxerr) maxerr = err;
        if (err > 3.0e-4) begin
          failures++;
          if (failures < 10) $display("exp(-%f): got %f want %f", real'(t_d2)/65536.0, got, want);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk);
      in_valid = 1;
      if (i < 2048) t = EXPIN_W'(i * 64);              // dense in [0, 2)
      else          t = EXPIN_W'($urandom % (1 << EXPIN_W));
      if (i % 37 == 5) in_valid = 0;                    // bubbles
    end
    @(negedge clk) in_valid = 0;
    @(negedge clk); @(negedge clk); @(negedge clk) t = '1; in_valid = 1;   // largest argument
    @(negedge clk) in_valid = 0;
    repeat (4) @(negedge clk);
    checks++; if (y !== '0) failures++;
    $display("max error %e", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
