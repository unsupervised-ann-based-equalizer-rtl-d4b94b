// tb_calc_k_grad: checks the kernel-gradient unit at the middle-layer shape
// (3 -> 3 channels, K = 21, P = 10).
//
// The gradient stream carries go[t] on beat t+LG and the activation stream
// carries i[s] on beat s+LG-P, the alignment the top level sets up with its
// feature-map buffers, so that i[t+P] is the newest window column when go[t]
// arrives. Random stalls, pad beats and a few stride holes (which must add
// nothing) are included. After the sequence every accumulator is compared
// with kg[co][ci][k] = sum_t go[co][t] * i[ci][t+k-P]; the oldest-column
// output is compared with i[t-P] on every gradient beat; a second sequence
// accumulates on top of the first; clr must zero everything.
`timescale 1ns/1ps
module tb_calc_k_grad;
  import eq_pkg::*;

  localparam int K = 21, P = 10, L = 50, LG = 14, NB = L + LG + 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, adv, clr;

  flags_t g_f, a_f;
  grad_t  g [3];
  act_t   a [3];
  kacc_t  kg [3][3][K];
  act_t   oldest [3];

  calc_k_grad #(.CIN(3), .COUT(3), .K(K), .P(P)) dut (
    .clk, .rst, .adv, .clr, .g_f, .g, .a_f, .a, .kg, .oldest);

  int checks = 0, failures = 0;
  int gx [3][L];
  int ax [3][L];
  bit hole [L];
  longint expk [3][3][K];

  function automatic int aat(int c, int t);
    return (t < 0 || t >= L) ? 0 : ax[c][t];
  endfunction

  task automatic run_seq();
    for (int c = 0; c < 3; c++)
      for (int t = 0; t < L; t++) begin
        gx[c][t] = int'($urandom_range(60000)) - 30000;
        ax[c][t] = int'($urandom_range(1000)) - 500;
      end
    for (int t = 0; t < L; t++) hole[t] = ($urandom_range(7) == 0);
    for (int co = 0; co < 3; co++)
      for (int ci = 0; ci < 3; ci++)
        for (int k = 0; k < K; k++)
          for (int t = 0; t < L; t++)
            if (!hole[t]) expk[co][ci][k] += longint'(gx[co][t]) * aat(ci, t+k-P);
    for (int b = 0; b < NB; b++) begin
      int tg, ta;
      tg = b - LG; ta = b - LG + P;
      @(negedge clk);
      while ($urandom_range(4) == 0) begin adv = 1'b0; @(negedge clk); end
      adv = 1'b1;
      g_f = '{vld: (tg >= 0), first: (tg == 0), pad: (tg >= L), hole: (tg >= 0 && tg < L && hole[tg])};
      a_f = '{vld: (ta >= 0), first: (ta == 0), pad: (ta >= L), hole: 1'b0};
      for (int c = 0; c < 3; c++) begin
        // hole beats carry garbage here on purpose: the unit must ignore them
        g[c] = (tg >= 0 && tg < L) ? grad_t'(gx[c][tg]) : grad_t'(0);
        a[c] = (ta >= 0 && ta < L) ? act_t'(ax[c][ta]) : act_t'(0);
      end
      #1;
      if (tg >= 0 && tg < L) begin
        checks++;
        for (int c = 0; c < 3; c++)
          if (int'(oldest[c]) != aat(c, tg - P)) begin
            failures++; $display("oldest[%0d] at t=%0d: %0d, expected %0d", c, tg, oldest[c], aat(c, tg-P));
          end
      end
    end
    @(negedge clk);
    adv = 1'b0;
  endtask

  task automatic compare(string tag);
    int bad = 0;
    for (int co = 0; co < 3; co++)
      for (int ci = 0; ci < 3; ci++)
        for (int k = 0; k < K; k++) begin
          checks++;
          if (longint'(kg[co][ci][k]) != expk[co][ci][k]) begin
            failures++; bad++;
            if (bad < 4) $display("%s: kg[%0d][%0d][%0d] = %0d, expected %0d", tag, co, ci, k, kg[co][ci][k], expk[co][ci][k]);
          end
        end
  endtask

  initial begin
    rst = 1'b1; adv = 1'b0; clr = 1'b0; g_f = '0; a_f = '0;
    for (int c = 0; c < 3; c++) begin g[c] = '0; a[c] = '0; end
    for (int co = 0; co < 3; co++)
      for (int ci = 0; ci < 3; ci++)
        for (int k = 0; k < K; k++) expk[co][ci][k] = 0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    run_seq();
    compare("seq1");
    run_seq();
    compare("seq1+2");
    @(negedge clk);
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    for (int co = 0; co < 3; co++)
      for (int ci = 0; ci < 3; ci++)
        for (int k = 0; k < K; k++) expk[co][ci][k] = 0;
    compare("clr");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
