// fx_sqrt: integer square root, one result bit per clock.
//
// root = floor(sqrt(radicand)) for an unsigned IN_W-bit radicand, by the
// restoring digit-by-digit method: each clock brings down the next two
// radicand bits into the partial remainder and tries to subtract
// (4*root + 1). A pulse on start (while not busy) loads the radicand; busy is
// high for IN_W/2 clocks, then done pulses for one clock with root valid
// (root holds until the next start). The trigger uses it for the feature
// magnitude sqrt(Re^2 + Im^2): with Re and Im in Q.4 the root is in Q.4.
// The paper writes its own fixed-point square root; the method used here is
// this design's choice.
module fx_sqrt #(
  parameter int IN_W = 64,
  localparam int OUT_W = IN_W / 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [IN_W-1:0]  radicand,
  output logic             busy,
  output logic             done,
  output logic [OUT_W-1:0] root
);
  logic [IN_W-1:0]        op;
  logic [OUT_W+1:0]       rem;
  logic [$clog2(OUT_W+1)-1:0] cnt;

  logic [OUT_W+1:0] rem_sh, trial;
  always_comb begin
    rem_sh = {rem[OUT_W-1:0], op[IN_W-1 -: 2]};
    trial  = {root, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op <= '0; rem <= '0; root <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        op   <= radicand;
        rem  <= '0;
        root <= '0;
        cnt  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        op <= op << 2;
        if (rem_sh >= trial) begin
          rem  <= rem_sh - trial;
          root <= {root[OUT_W-2:0], 1'b1};
        end else begin
          rem  <= rem_sh;
          root <= {root[OUT_W-2:0], 1'b0};
        end
        if (int'(cnt) == OUT_W - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
