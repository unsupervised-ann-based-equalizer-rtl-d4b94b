// calc_k_grad: kernel-gradient unit ("CalcKGrad") of one layer's backward
// pass.
//
// Accumulates the kernel gradient over one sequence as the convolution of
// the layer input with the output gradient,
//   kg[co][ci][k] += go[co][t] * i[ci][t + k - P]   for every position t,
// and holds it until the weight update clears it (clr).
//
// How it works: the layer input i arrives from the forward pass through a
// feature-map buffer whose delay is chosen so that, on the beat on which
// go[t] arrives, the newest column in this unit's K-tap window is i[t+P];
// the window then holds i[t-P .. t+P] and all COUT*CIN*K products are added
// in parallel. Beats that are not part of the sequence (vld clear), padding
// and stride holes add nothing. The window's oldest column, i[t-P], is also
// brought out (`oldest`); it is the activation the input-gradient unit of the
// same layer needs for its ReLU mask on that beat.
//
// Timing: accumulators update on the clock edge of each adv pulse; clr has
// priority over accumulation and may coincide with the weight update, which
// reads kg before the edge. Fixed point: products have ACT_F+G_F = KG_F
// fraction bits and are summed exactly in KG_W-bit words (no rounding). The
// equation follows the paper; the buffer alignment and formats are this
// design's choice.
module calc_k_grad
  import eq_pkg::*;
#(
  parameter int CIN  = 3,
  parameter int COUT = 1,
  parameter int K    = 21,
  parameter int P    = 10
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   adv,
  input  logic   clr,
  input  flags_t g_f,
  input  grad_t  g      [COUT],
  input  flags_t a_f,
  input  act_t   a      [CIN],
  output kacc_t  kg     [COUT][CIN][K],
  output act_t   oldest [CIN]
);

  localparam int WD = CIN * ACT_W;

  logic [WD-1:0] a_pk;
  flags_t        tap_f [K];
  logic [WD-1:0] tap_d [K];

  always_comb begin
    for (int c = 0; c < CIN; c++) a_pk[c*ACT_W +: ACT_W] = a[c];
  end

  stream_window #(.K(K), .W(WD)) u_win (
    .clk(clk), .rst(rst), .adv(adv),
    .in_f(a_f), .in_d(a_pk),
    .tap_f(tap_f), .tap_d(tap_d)
  );

  always_comb begin
    for (int c = 0; c < CIN; c++) oldest[c] = act_t'(tap_d[0][c*ACT_W +: ACT_W]);
  end

  logic take;
  assign take = adv && g_f.vld && !g_f.pad && !g_f.hole;

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      for (int co = 0; co < COUT; co++)
        for (int ci = 0; ci < CIN; ci++)
          for (int k = 0; k < K; k++) kg[co][ci][k] <= '0;
    end else if (take) begin
      for (int co = 0; co < COUT; co++)
        for (int ci = 0; ci < CIN; ci++)
          for (int k = 0; k < K; k++)
            kg[co][ci][k] <= kg[co][ci][k] +
              kacc_t'(g[co]) * kacc_t'(act_t'(tap_d[k][ci*ACT_W +: ACT_W]));
    end
  end

endmodule
