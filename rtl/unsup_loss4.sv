// unsup_loss4: gradient of the unsupervised loss for PAM-4 (the four-level
// variant of "Unsup. Loss").
//
// With constellation points A1 < A2 < A3 < A4 the loss of a sequence is
// loss_a + MU * loss_b with
//   loss_a = sum_n q(z_n)^2,  q(z) = (z-A1)(z-A2)(z-A3)(z-A4),
//   loss_b = |d1 - d4| + |3/2 d2 - 3/2 d3| + |d1 - 3/2 d2| + |d4 - 3/2 d3|,
//   d_i    = sum_n |z_n - A_i|.
// The 3/2 weights make up for the inner points lying closer to the others
// (summed distance 4 instead of 6 at unit spacing). Per output the gradient
// is
//   g_n = 2 q(z) q'(z) + MU * dlb/dz,  with 2 dlb/dz =
//         2 s14 (u1 - u4) + 3 s23 (u2 - u3) + s12 (2 u1 - 3 u2)
//         + s43 (2 u4 - 3 u3),
// u_i = sign(z - A_i), s14 = sign(d1 - d4), s23 = sign(d2 - d3),
// s12 = sign(2 d1 - 3 d2), s43 = sign(2 d4 - 3 d3).
//
// As in the PAM-2 unit the sums d_i are running sums up to and including the
// current output, restarted at the first beat of a sequence, so that every
// gradient can leave at once. The product q q' is formed exactly (A_i have
// ACT_F fraction bits, q has 4*ACT_F, q' 3*ACT_F) in an 80-bit word, then
// truncated to G_F fraction bits and saturated.
//
// Interface and timing are those of unsup_loss: g is combinational from z
// and the registered sums, which update on adv for beats carrying an output
// (vld, not pad, not hole); other beats give g = 0. The loss formulas and
// MU = 4 follow the paper; the point positions -1.5, -0.5, +0.5, +1.5 (unit
// spacing, centred like the PAM-2 points +-1) and the running sums are this
// design's choices.
module unsup_loss4
  import eq_pkg::*;
#(
  parameter int A1_Q = -96,   // -1.5 in activation format
  parameter int A2_Q = -32,   // -0.5
  parameter int A3_Q =  32,   // +0.5
  parameter int A4_Q =  96,   // +1.5
  parameter int MU   = 4
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   adv,
  input  flags_t in_f,
  input  act_t   z,
  output grad_t  g
);

  localparam int QW = 80;

  logic signed [31:0] d_q [4];   // running d_i, ACT_F fraction bits
  logic signed [31:0] d_c [4];
  logic               active;

  function automatic int sgn32(input logic signed [31:0] v);
    return (v > 0) ? 1 : (v < 0) ? -1 : 0;
  endfunction

  always_comb begin
    logic signed [15:0]   e [4];
    logic signed [QW-1:0] q, qd, pa;
    int                   u [4];
    int                   lb2;
    logic signed [QW-1:0] tot;
    active = in_f.vld && !in_f.pad && !in_f.hole;
    e[0] = 16'(z) - 16'(A1_Q);
    e[1] = 16'(z) - 16'(A2_Q);
    e[2] = 16'(z) - 16'(A3_Q);
    e[3] = 16'(z) - 16'(A4_Q);
    for (int i = 0; i < 4; i++) begin
      u[i]   = (e[i] > 0) ? 1 : (e[i] < 0) ? -1 : 0;
      d_c[i] = (in_f.first ? 32'sd0 : d_q[i]) + ((e[i] < 0) ? -32'(e[i]) : 32'(e[i]));
    end
    q  = QW'(e[0]) * QW'(e[1]) * QW'(e[2]) * QW'(e[3]);
    qd = QW'(e[1]) * QW'(e[2]) * QW'(e[3]) + QW'(e[0]) * QW'(e[2]) * QW'(e[3])
       + QW'(e[0]) * QW'(e[1]) * QW'(e[3]) + QW'(e[0]) * QW'(e[1]) * QW'(e[2]);
    // 2 q q' has 7*ACT_F fraction bits
    pa = (QW'(2) * q * qd) >>> (7*ACT_F - G_F);
    lb2 = 2 * sgn32(d_c[0] - d_c[3]) * (u[0] - u[3])
        + 3 * sgn32(d_c[1] - d_c[2]) * (u[1] - u[2])
        + sgn32(2 * d_c[0] - 3 * d_c[1]) * (2 * u[0] - 3 * u[1])
        + sgn32(2 * d_c[3] - 3 * d_c[2]) * (2 * u[3] - 3 * u[2]);
    tot = pa + (QW'(MU * lb2) <<< (G_F - 1));
    if (!active)                     g = grad_t'(0);
    else if (tot > QW'(32767))       g = grad_t'(16'sh7FFF);
    else if (tot < -QW'(32768))      g = grad_t'(16'sh8000);
    else                             g = grad_t'(tot);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 4; i++) d_q[i] <= '0;
    end else if (adv && active) begin
      for (int i = 0; i < 4; i++) d_q[i] <= d_c[i];
    end
  end

endmodule
