// tb_pz_image_buffer: writes a full random image (577 pixels) into the buffer,
// reads every pixel back (one clock read latency) in a shuffled order, and
// checks a read of one address while another is written.
module tb_pz_image_buffer;
  localparam int NPIX = 577;
  localparam int AW = $clog2(NPIX);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [15:0] model [NPIX];

  pz_image_buffer #(.NPIX(NPIX), .PIX_W(16)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPIX; p++) begin
      @(negedge clk);
      we = 1; waddr = AW'(p); wdata = 16'($urandom); model[p] = wdata;
    end
    @(negedge clk) we = 0;
    for (int j = 0; j < NPIX; j++) begin
      int p;
      p = (j * 211) % NPIX;
      @(negedge clk) raddr = AW'(p);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[p]) begin
        failures++;
        if (failures < 10) $display("pixel %0d: got %h want %h", p, rdata, model[p]);
      end
    end
    // write to 5 while reading 5: the old value is read, the new one is kept
    @(negedge clk) begin we = 1; waddr = 5; wdata = ~model[5]; raddr = 5; end
    @(posedge clk); #1;
    checks++; if (rdata !== model[5]) failures++;
    @(negedge clk) we = 0;
    @(posedge clk); #1;
    checks++; if (rdata !== ~model[5]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
