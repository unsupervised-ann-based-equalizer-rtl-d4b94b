// weight_sgd: kernel memory of one layer with its stochastic-gradient-descent
// update.
//
// Holds the COUT*CIN*K kernel weights of a layer as master words (WM_W bits,
// WM_F fraction bits) and presents them to the forward and backward units
// truncated to W_W bits (W_F fraction bits). On `upd` every weight takes one
// SGD step, all in the same cycle:
//   w <= w - lr * kg,
// where kg is the kernel gradient accumulated by the layer's CalcKGrad over
// the last sequence and lr a fraction with LR_F bits (0.02 in the paper).
// The product has LR_F+KG_F fraction bits and is shifted right (truncation)
// to WM_F, and the new weight saturates.
//
// Interface: a write port loads weights (from the offline supervised
// training) and a combinational read port returns master words; index
// (co*CIN + ci)*K + k. A write and an update in the same cycle: the write
// wins. SGD with lr = 0.02 is the paper's; the word formats, the per-sequence
// update and the single-cycle parallel update are this design's choices.
module weight_sgd
  import eq_pkg::*;
#(
  parameter int CIN  = 1,
  parameter int COUT = 3,
  parameter int K    = 21,
  localparam int N   = COUT * CIN * K,
  localparam int IW  = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            wr_en,
  input  logic [IW-1:0]   wr_idx,
  input  wm_t             wr_data,
  input  logic [IW-1:0]   rd_idx,
  output wm_t             rd_data,
  input  logic            upd,
  input  logic [LR_W-1:0] lr,
  input  kacc_t           kg   [COUT][CIN][K],
  output w_t              w_fp [COUT][CIN][K]
);

  localparam int SH = LR_F + KG_F - WM_F;

  localparam int PW = KG_W + LR_W + 2;   // wide enough for lr * kg - w

  wm_t wm [COUT][CIN][K];

  function automatic wm_t sgd_step(wm_t w, kacc_t g, logic [LR_W-1:0] r);
    logic signed [PW-1:0] v;
    v = PW'(w) - ((PW'(signed'({1'b0, r})) * PW'(g)) >>> SH);
    if (v > PW'(2**(WM_W-1) - 1))   return wm_t'(2**(WM_W-1) - 1);
    else if (v < -PW'(2**(WM_W-1))) return wm_t'(-(2**(WM_W-1)));
    else                            return wm_t'(v);
  endfunction

  always_comb begin
    rd_data = '0;
    for (int co = 0; co < COUT; co++)
      for (int ci = 0; ci < CIN; ci++)
        for (int k = 0; k < K; k++) begin
          w_fp[co][ci][k] = w_t'(wm[co][ci][k] >>> (WM_F - W_F));
          if (int'(rd_idx) == (co*CIN + ci)*K + k) rd_data = wm[co][ci][k];
        end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int co = 0; co < COUT; co++)
        for (int ci = 0; ci < CIN; ci++)
          for (int k = 0; k < K; k++) wm[co][ci][k] <= '0;
    end else begin
      for (int co = 0; co < COUT; co++)
        for (int ci = 0; ci < CIN; ci++)
          for (int k = 0; k < K; k++) begin
            if (wr_en && int'(wr_idx) == (co*CIN + ci)*K + k)
              wm[co][ci][k] <= wr_data;
            else if (upd)
              wm[co][ci][k] <= sgd_step(wm[co][ci][k], kg[co][ci][k], lr);
          end
    end
  end

endmodule
