// svm_model_memory: the trained support vector machine.
//
// Stores NSV support vectors z_i of N_FEAT = 36 normalized features (signed
// Q3.12, CFG_SV, address i*36 + k) and their coefficients alpha_i*y_i (signed
// Q16.16, CFG_ALPHA, address i). Q16.16 covers |alpha_i| <= C = 28526.2, the
// regularization constant the model was trained with. The model is produced
// offline by the training software and loaded through the configuration bus.
// Read: sv_idx and feat in, sv_q and alpha_q one clock later. The capacity
// NSV is this design's choice; the paper does not give the model size.
module svm_model_memory
  import l3t_pkg::*;
#(
  parameter int NSV = 1024,
  localparam int IW = $clog2(NSV)
) (
  input  logic               clk,
  input  cfg_wr_t            cfg,
  input  logic [IW-1:0]      sv_idx,
  input  logic [FEAT_W-1:0]  feat,
  output logic [X_W-1:0]     sv_q,
  output logic [ALPHA_W-1:0] alpha_q
);
  localparam int DEPTH = NSV * N_FEAT;
  localparam int DAW   = $clog2(DEPTH);

  logic [X_W-1:0]     sv_mem    [DEPTH];
  logic [ALPHA_W-1:0] alpha_mem [NSV];
  logic [DAW-1:0]     raddr;

  assign raddr = DAW'(sv_idx) * DAW'(N_FEAT) + DAW'(feat);

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == CFG_SV && int'(cfg.addr) < DEPTH)
      sv_mem[cfg.addr[DAW-1:0]] <= cfg.data[X_W-1:0];
    if (cfg.we && cfg.sel == CFG_ALPHA && int'(cfg.addr) < NSV)
      alpha_mem[cfg.addr[IW-1:0]] <= cfg.data;
    sv_q    <= sv_mem[raddr];
    alpha_q <= alpha_mem[sv_idx];
  end
endmodule
