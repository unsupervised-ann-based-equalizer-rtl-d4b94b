// calc_in_grad: input-gradient unit ("CalcInGrad") of one layer's backward
// pass.
//
// Computes the gradient with respect to the layer input as the channel-wise
// convolution of the flipped kernel with the output gradient,
//   gi[ci][t] = sum_co sum_k w[co][ci][k] * go[co][t - k + P],
// and multiplies it by the ReLU derivative of the previous layer, given as
// one mask bit per channel (1 when that layer's activation at t was > 0).
// The result is the delta of the previous layer.
//
// How it works: go is streamed in the same time order as the forward pass
// (no reversal is needed), a K-tap window holds go[t-P .. t+P], and all
// COUT*CIN*K products are formed in parallel. For the stride-2 last layer the
// incoming gradient already has zeros at odd positions (`hole` beats), which
// gives the dilation D = 2 of the paper's figure without extra logic.
//
// Timing: output t is registered on the adv pulse of input t+P (lag P+1
// beats). The mask must present position t on that same beat; the
// kernel-gradient unit of the same layer provides it from the oldest tap of
// its feature-map window. Fixed point: W_F+G_F fraction bits summed exactly,
// shifted right by W_F, saturated to G_W. Equation and shape follow the
// paper; formats and the way the mask is delivered are this design's choice.
module calc_in_grad
  import eq_pkg::*;
#(
  parameter int CIN  = 3,   // channels of the layer input (gradients produced)
  parameter int COUT = 1,   // channels of the layer output (gradients consumed)
  parameter int K    = 21,
  parameter int P    = 10
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   adv,
  input  flags_t in_f,
  input  grad_t  in_g  [COUT],
  input  w_t     w     [COUT][CIN][K],
  input  logic   mask  [CIN],
  output flags_t out_f,
  output grad_t  out_g [CIN]
);

  localparam int WD = COUT * G_W;

  logic [WD-1:0] in_pk;
  flags_t        tap_f [K];
  logic [WD-1:0] tap_d [K];

  always_comb begin
    for (int c = 0; c < COUT; c++) in_pk[c*G_W +: G_W] = in_g[c];
  end

  stream_window #(.K(K), .W(WD)) u_win (
    .clk(clk), .rst(rst), .adv(adv),
    .in_f(in_f), .in_d(in_pk),
    .tap_f(tap_f), .tap_d(tap_d)
  );

  flags_t ctr_f;
  grad_t  res [CIN];

  always_comb begin
    ctr_f      = tap_f[K-1-P];
    ctr_f.hole = 1'b0;   // the input gradient is at full rate
    for (int ci = 0; ci < CIN; ci++) begin
      logic signed [47:0] acc;
      acc = '0;
      for (int co = 0; co < COUT; co++)
        for (int k = 0; k < K; k++)
          acc += 48'(signed'(w[co][ci][k])) *
                 48'(signed'(grad_t'(tap_d[K-1-k][co*G_W +: G_W])));
      res[ci] = (!ctr_f.vld || ctr_f.pad || !mask[ci]) ? grad_t'(0)
              : sat_grad(64'(acc >>> W_F));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_f <= '0;
      for (int ci = 0; ci < CIN; ci++) out_g[ci] <= '0;
    end else if (adv) begin
      out_f <= ctr_f;
      for (int ci = 0; ci < CIN; ci++) out_g[ci] <= res[ci];
    end
  end

endmodule
