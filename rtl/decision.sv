// decision: hard decision on the equalizer output ("D" of the receiver).
//
// Maps each equalizer output z to the nearest constellation point by
// Euclidean distance, for PAM-2 and for PAM-4 side by side. On a line the
// nearest point is found by comparing z with the midpoints between
// neighbouring points (compared as 2z against the sum of the two points, so
// the midpoint stays exact); a tie goes to the upper point. Outputs: the
// PAM-2 symbol index (0 for A1, 1 for A2) and amplitude, and the PAM-4
// symbol index (0..3 from the lowest point up) and amplitude.
//
// Purely combinational. Minimum-distance hard decision is the paper's;
// PAM-2 points -1 and +1 follow the paper's loss-function plot, the PAM-4
// points -1.5, -0.5, +0.5, +1.5 (unit spacing, as in the paper's PAM-4
// illustration, centred on zero) and the tie rule are this design's choices.
module decision
  import eq_pkg::*;
#(
  parameter int A1_Q = -(1 << ACT_F),
  parameter int A2_Q =  (1 << ACT_F),
  parameter int B1_Q = -96,
  parameter int B2_Q = -32,
  parameter int B3_Q =  32,
  parameter int B4_Q =  96
) (
  input  act_t       z,
  output logic       sym,
  output act_t       x_hat,
  output logic [1:0] sym4,
  output act_t       x_hat4
);

  always_comb begin
    // compare 2z with A1 + A2 to keep the midpoint exact
    sym   = (2 * int'(z)) >= (A1_Q + A2_Q);
    x_hat = sym ? act_t'(A2_Q) : act_t'(A1_Q);
    sym4  = 2'(int'((2 * int'(z)) >= (B1_Q + B2_Q)) + int'((2 * int'(z)) >= (B2_Q + B3_Q))
               + int'((2 * int'(z)) >= (B3_Q + B4_Q)));
    unique case (sym4)
      2'd0:    x_hat4 = act_t'(B1_Q);
      2'd1:    x_hat4 = act_t'(B2_Q);
      2'd2:    x_hat4 = act_t'(B3_Q);
      default: x_hat4 = act_t'(B4_Q);
    endcase
  end

endmodule
