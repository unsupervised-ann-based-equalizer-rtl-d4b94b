// sup_loss: gradient of the supervised mean-squared-error loss ("Sup. Loss").
//
// For loss = sum_n (z_n - x_n)^2 the gradient fed into the backward pass is
// g_n = 2 (z_n - x_n), where x_n is the known transmitted symbol (pilot).
// Beats that carry no equalizer output (outside a sequence, padding, stride
// holes) produce a zero gradient, so the gradient stream keeps the
// zero-stuffed layout of the output stream.
//
// Purely combinational; the loss switch of the top level registers the
// selected gradient. z and x are activations (ACT_F fraction bits), g has
// G_F fraction bits and saturates to G_W bits. The loss is the paper's (MSE,
// used for the initial training and optionally for retraining); using the
// plain sum rather than the mean is this design's choice, the learning rate
// absorbs the scale.
module sup_loss
  import eq_pkg::*;
(
  input  flags_t in_f,
  input  act_t   z,
  input  act_t   x,
  output grad_t  g
);

  logic signed [ACT_W:0] e;

  always_comb begin
    e = {z[ACT_W-1], z} - {x[ACT_W-1], x};
    if (!in_f.vld || in_f.pad || in_f.hole) g = '0;
    else g = sat_grad(64'(e) <<< (G_F - ACT_F + 1));
  end

endmodule
