// conv_fwd: one forward convolution layer ("Conv" block) of the equalizer.
//
// Computes o[co][t] = ReLU( sum_ci sum_k w[co][ci][k] * i[ci][t*S + k*D - P] )
// on a stream of feature-map columns (one column of CIN channels per beat),
// with zero padding P on both sides, stride S and dilation D. There is no
// bias, as in the paper's o = ReLU(i * k). The ReLU can be switched off (last
// layer). The equalizer uses D = 1 everywhere; D > 1 is kept because the
// paper's convolution module is configurable in kernel size, padding,
// stride and dilation. Output length equals input length when
// P = (K-1)*D/2.
//
// How it works: a window of (K-1)*D+1 beats (stream_window) holds input
// columns t-P .. t-P+(K-1)*D, of which every D-th is used; all COUT*CIN*K
// products of one output column are formed in
// parallel (degree of parallelism COUT*CIN*K per output sample) and the
// result is registered. Right-hand padding comes from the pad beats that
// follow every sequence; left-hand padding from the window being cleared at
// the first beat of a sequence.
//
// Stride: the output stream keeps one beat per input beat. With S = 2 the odd
// positions are marked `hole` and carry zero; the even ones carry z[t/2].
// The zero-stuffed stream this produces is exactly the dilation-2 gradient
// layout the backward pass of this layer needs.
//
// Timing: output column t is registered on the adv pulse of input column
// t-P+(K-1)*D, i.e. a lag of (K-1)*D-P+1 beats (P+1 for the equalizer's
// layers). Fixed point: products have ACT_F+W_F
// fraction bits, are summed exactly, shifted right by W_F (truncation) and
// saturated to ACT_W bits. The formats are this design's choice; the layer
// shapes (K = 21, P = 10, channels 1-3-3-1, ReLU on all but the last layer,
// stride 2 on the last layer) follow the paper.
module conv_fwd
  import eq_pkg::*;
#(
  parameter int CIN    = 1,
  parameter int COUT   = 3,
  parameter int K      = 21,
  parameter int P      = 10,
  parameter int STRIDE = 1,
  parameter int DIL    = 1,
  parameter bit RELU   = 1'b1
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   adv,
  input  flags_t in_f,
  input  act_t   in_d [CIN],
  input  w_t     w    [COUT][CIN][K],
  output flags_t out_f,
  output act_t   out_d [COUT]
);

  localparam int WD = CIN * ACT_W;
  localparam int KW = (K - 1) * DIL + 1;   // window length in beats
  localparam int PH_W = (STRIDE > 1) ? $clog2(STRIDE) : 1;

  logic [WD-1:0] in_pk;
  flags_t        tap_f [KW];
  logic [WD-1:0] tap_d [KW];

  always_comb begin
    for (int c = 0; c < CIN; c++) in_pk[c*ACT_W +: ACT_W] = in_d[c];
  end

  stream_window #(.K(KW), .W(WD)) u_win (
    .clk(clk), .rst(rst), .adv(adv),
    .in_f(in_f), .in_d(in_pk),
    .tap_f(tap_f), .tap_d(tap_d)
  );

  // output position t sits at window tap P
  flags_t            ctr_f;
  logic [PH_W-1:0]   phase_q, phase_c;
  logic              is_hole;
  act_t              res [COUT];

  always_comb begin
    ctr_f   = tap_f[P];
    phase_c = ctr_f.first ? '0 : phase_q;
    is_hole = (STRIDE > 1) && (phase_c != '0);
    for (int co = 0; co < COUT; co++) begin
      logic signed [47:0] acc;
      logic signed [47:0] q;
      acc = '0;
      for (int ci = 0; ci < CIN; ci++)
        for (int k = 0; k < K; k++)
          acc += 48'(signed'(w[co][ci][k])) *
                 48'(signed'(act_t'(tap_d[k*DIL][ci*ACT_W +: ACT_W])));
      q = acc >>> W_F;
      if (RELU && q < 0) q = '0;
      res[co] = (!ctr_f.vld || ctr_f.pad || is_hole) ? act_t'(0) : sat_act(64'(q));
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_f   <= '0;
      phase_q <= '0;
      for (int co = 0; co < COUT; co++) out_d[co] <= '0;
    end else if (adv) begin
      out_f      <= ctr_f;
      out_f.hole <= ctr_f.hole | is_hole;
      for (int co = 0; co < COUT; co++) out_d[co] <= res[co];
      if (STRIDE > 1)
        phase_q <= (int'(phase_c) == STRIDE-1) ? '0 : phase_c + 1'b1;
    end
  end

endmodule
