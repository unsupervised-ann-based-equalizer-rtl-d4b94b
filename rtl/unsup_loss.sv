// unsup_loss: gradient of the unsupervised PAM-2 loss ("Unsup. Loss").
//
// The loss of a sequence z_1..z_N is loss_a + MU * loss_b with
//   loss_a = sum_n p(z_n),  p(z) = (z - A1)^2 (z - A2)^2,
//   loss_b = |d1 - d2|,     d_i = sum_n |z_n - A_i|.
// loss_a pulls every output onto one of the two constellation points,
// loss_b keeps the outputs spread evenly over both. The gradient per output
// is
//   g_n = 2 (z_n - A1)(z_n - A2)(2 z_n - A1 - A2)
//         + MU * sign(d1 - d2) * (sign(z_n - A1) - sign(z_n - A2)).
//
// Streaming: g_n must leave before the sequence has ended, but d1 - d2 is a
// sum over the whole sequence. This unit therefore uses the running value of
// d1 - d2 up to and including z_n (register dd_q, cleared at the first beat of
// every sequence). This is this design's choice; the paper gives the loss but
// not how its hardware orders the computation.
//
// Interface: the gradient is combinational from z and dd_q; dd_q updates on
// adv pulses of beats that carry an output (vld, not pad, not hole); other
// beats give g = 0. Formats: z has ACT_F fraction bits, g has G_F and
// saturates. A1 = -1, A2 = +1 and MU = 4 are the paper's values.
module unsup_loss
  import eq_pkg::*;
#(
  parameter int A1_Q = -(1 << ACT_F),   // A1 = -1.0 in activation format
  parameter int A2_Q =  (1 << ACT_F),   // A2 = +1.0
  parameter int MU   = 4
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   adv,
  input  flags_t in_f,
  input  act_t   z,
  output grad_t  g
);

  logic signed [31:0] dd_q;      // running d1 - d2, ACT_F fraction bits
  logic signed [31:0] dd_c;
  logic               active;

  function automatic logic signed [15:0] abs16(input logic signed [15:0] v);
    return (v < 0) ? -v : v;
  endfunction

  always_comb begin
    logic signed [15:0] e1, e2, s;
    logic signed [63:0] pa;
    int                 sg1, sg2, sgd, lb;
    active = in_f.vld && !in_f.pad && !in_f.hole;
    e1  = 16'(z) - 16'(A1_Q);
    e2  = 16'(z) - 16'(A2_Q);
    s   = e1 + e2;
    dd_c = (in_f.first ? 32'sd0 : dd_q) + 32'(abs16(e1)) - 32'(abs16(e2));
    // 2*e1*e2*s has 3*ACT_F fraction bits
    pa  = (64'sd2 * 64'(e1) * 64'(e2) * 64'(s)) >>> (3*ACT_F - G_F);
    sg1 = (e1 > 0) ? 1 : (e1 < 0) ? -1 : 0;
    sg2 = (e2 > 0) ? 1 : (e2 < 0) ? -1 : 0;
    sgd = (dd_c > 0) ? 1 : (dd_c < 0) ? -1 : 0;
    lb  = MU * sgd * (sg1 - sg2);
    g   = active ? sat_grad(pa + (64'(lb) <<< G_F)) : grad_t'(0);
  end

  always_ff @(posedge clk) begin
    if (rst) dd_q <= '0;
    else if (adv && active) dd_q <= dd_c;
  end

endmodule
