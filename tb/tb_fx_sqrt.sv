// tb_fx_sqrt: floor(sqrt(x)) of 64-bit radicands: edge cases (0, 1, perfect
// squares and their neighbours, the maximum) and random values of every
// magnitude, against an integer reference; also checks the 32-clock latency.
module tb_fx_sqrt;
  import l3t_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [63:0] radicand = '0;
  logic [31:0] root;
  int checks = 0, failures = 0;

  fx_sqrt #(.IN_W(64)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [63:0] v);
    int cyc = 0;
    longint unsigned want = isqrt64(v);
    @(negedge clk) begin start = 1; radicand = v; end
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (root !== 32'(want) || cyc != 33) begin
      failures++;
      if (failures < 10) $display("sqrt(%0d): got %0d want %0d, done after %0d clocks", v, root, want, cyc);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0); run(1); run(2); run(3); run(4); run(64'hffff_ffff_ffff_ffff);
    run(64'hffff_fffe_0000_0001); run(64'hffff_fffe_0000_0000);
    for (int i = 0; i < 100; i++) begin
      longint unsigned r;
      r = {$urandom} % 32'hffff_ffff;
      run(r * r); run(r * r - 1); run(r * r + 2 * r);
    end
    for (int i = 0; i < 300; i++) run({$urandom, $urandom} >> ($urandom % 64));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
