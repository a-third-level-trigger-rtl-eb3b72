// fx_exp: fixed-point exp(-t) for the Gaussian kernel.
//
// t is unsigned Q8.16. The unit rewrites exp(-t) as 2^-(t*log2 e): stage 1
// multiplies by log2 e (Q1.20) and splits the product into an integer part I
// and a 16-bit fraction F; stage 2 evaluates 2^-F = exp(-F ln 2) with a
// 5th-order Taylor polynomial in Horner form (coefficients ln2^i/i! in Q.20,
// error below 2e-4) and shifts the result right by I. The result y is
// unsigned Q1.16 (exp(0) = 65536), rounded to nearest. Fully pipelined: one
// argument per clock, out_valid/y two clocks after in_valid/t.
// The paper writes its own fixed-point exponential; this method is this
// design's choice.
module fx_exp
  import l3t_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [EXPIN_W-1:0] t,
  output logic               out_valid,
  output logic [K_W-1:0]     y
);
  localparam logic [20:0] LOG2E = 21'd1512775;   // log2(e) * 2^20
  localparam logic [20:0] ONE   = 21'd1048576;   // 1.0 in Q.20
  localparam logic [20:0] C1 = 21'd726817;       // ln2
  localparam logic [20:0] C2 = 21'd251898;       // ln2^2/2
  localparam logic [20:0] C3 = 21'd58200;        // ln2^3/6
  localparam logic [20:0] C4 = 21'd10085;        // ln2^4/24
  localparam logic [20:0] C5 = 21'd1398;         // ln2^5/120

  // stage 1: range reduction
  logic [EXPIN_W+20:0] ty;       // Q.36
  logic [EXPIN_W:0]    yq;       // Q.16
  always_comb begin
    ty = (EXPIN_W+21)'(t) * (EXPIN_W+21)'(LOG2E);
    yq = (EXPIN_W+1)'(ty >> 20);
  end

  logic        v1;
  logic [8:0]  i1;
  logic [15:0] f1;

  // stage 2: 2^-F and the shift by I
  function automatic logic [20:0] mulu(logic [15:0] u, logic [20:0] h);
    logic [36:0] p;
    p = 37'(u) * 37'(h);
    return 21'(p >> 16);
  endfunction

  logic [20:0] h, p2;
  logic [20:0] shifted;
  logic [K_W-1:0] y_n;
  always_comb begin
    h  = C5;
    h  = C4 - mulu(f1, h);
    h  = C3 - mulu(f1, h);
    h  = C2 - mulu(f1, h);
    h  = C1 - mulu(f1, h);
    p2 = ONE - mulu(f1, h);                  // 2^-F, Q.20
    shifted = (i1 > 9'd20) ? 21'd0 : (p2 >> i1);
    y_n = K_W'((22'(shifted) + 22'd8) >> 4); // round to Q.16
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; i1 <= '0; f1 <= '0; out_valid <= 1'b0; y <= '0;
    end else begin
      v1 <= in_valid;
      i1 <= yq[EXPIN_W:16];
      f1 <= yq[15:0];
      out_valid <= v1;
      y <= y_n;
    end
  end
endmodule
