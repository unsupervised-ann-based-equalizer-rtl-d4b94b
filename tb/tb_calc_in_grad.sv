// tb_calc_in_grad: checks the input-gradient unit in the two shapes the
// equalizer uses: 3 -> 3 channels (middle layer) and 1 -> 3 channels fed with
// a zero-stuffed gradient (stride-2 last layer), both K = 21, P = 10.
//
// A random gradient sequence followed by pad beats is streamed in with
// random stalls; the stride-2 instance sees zeros on odd positions, flagged
// as holes. The ReLU mask for output position t is a random bit pattern
// presented on the beat on which t is computed. The reference evaluates
// gi[ci][t] = mask ? sat((sum w[co][ci][k] * go[co][t-k+P]) >> W_F) : 0
// directly. Checked: every value, flag order, output count and lag P+1.
`timescale 1ns/1ps
module tb_calc_in_grad;
  import eq_pkg::*;

  localparam int K = 21, P = 10, L = 48, NB = L + P + 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, adv;

  flags_t in_f, in_f3;
  grad_t  g3 [3];
  grad_t  g1 [1];
  w_t     wa [3][3][K];
  w_t     wb [1][3][K];
  logic   mask [3];
  flags_t fa, fb;
  grad_t  oa [3];
  grad_t  ob [3];

  calc_in_grad #(.CIN(3), .COUT(3), .K(K), .P(P)) dut_a (
    .clk, .rst, .adv, .in_f, .in_g(g3), .w(wa), .mask, .out_f(fa), .out_g(oa));
  calc_in_grad #(.CIN(3), .COUT(1), .K(K), .P(P)) dut_b (
    .clk, .rst, .adv, .in_f(in_f3), .in_g(g1), .w(wb), .mask, .out_f(fb), .out_g(ob));

  int checks = 0, failures = 0;
  int gx [3][L];
  bit mk [3][L];

  function automatic longint satg(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  function automatic int gat(int c, int t, bit stuffed);
    if (t < 0 || t >= L) return 0;
    if (stuffed && (t % 2 == 1)) return 0;
    return gx[c][t];
  endfunction

  function automatic int ref_a(int ci, int t);
    longint acc = 0;
    for (int co = 0; co < 3; co++)
      for (int k = 0; k < K; k++) acc += longint'(wa[co][ci][k]) * gat(co, t-k+P, 1'b0);
    return mk[ci][t] ? int'(satg(acc >>> W_F)) : 0;
  endfunction

  function automatic int ref_b(int ci, int t);
    longint acc = 0;
    for (int k = 0; k < K; k++) acc += longint'(wb[0][ci][k]) * gat(0, t-k+P, 1'b1);
    return mk[ci][t] ? int'(satg(acc >>> W_F)) : 0;
  endfunction

  int beat, ta, tb_pos;

  always @(posedge clk) if (adv && !rst) begin
    if (fa.vld && !fa.pad) begin
      checks++;
      if ((ta == 0) != fa.first) failures++;
      if (beat - 1 != ta + P) begin failures++; $display("lag wrong at %0d", ta); end
      for (int ci = 0; ci < 3; ci++)
        if (int'(oa[ci]) != ref_a(ci, ta)) begin
          failures++;
          $display("A: gi[%0d][%0d] = %0d, expected %0d", ci, ta, oa[ci], ref_a(ci, ta));
        end
      ta++;
    end
    if (fb.vld && !fb.pad) begin
      checks++;
      if (fb.hole) failures++;
      for (int ci = 0; ci < 3; ci++)
        if (int'(ob[ci]) != ref_b(ci, tb_pos)) begin
          failures++;
          $display("B: gi[%0d][%0d] = %0d, expected %0d", ci, tb_pos, ob[ci], ref_b(ci, tb_pos));
        end
      tb_pos++;
    end
  end

  initial begin
    rst = 1'b1; adv = 1'b0; in_f = '0; in_f3 = '0; beat = 0;
    for (int c = 0; c < 3; c++) begin g3[c] = '0; mask[c] = 1'b0; end
    g1[0] = '0;
    for (int co = 0; co < 3; co++)
      for (int ci = 0; ci < 3; ci++)
        for (int k = 0; k < K; k++) begin
          wa[co][ci][k] = w_t'($urandom_range(400)) - w_t'(200);
          if (co == 0) wb[0][ci][k] = w_t'($urandom_range(400)) - w_t'(200);
        end
    // a few large kernels force saturation
    wa[0][0][P] = 10'sd255; wa[1][0][P] = 10'sd255; wa[2][0][P] = 10'sd255;
    for (int c = 0; c < 3; c++)
      for (int t = 0; t < L; t++) begin
        gx[c][t] = int'($urandom_range(20000)) - 10000;
        mk[c][t] = ($urandom_range(3) != 0);
      end
    gx[0][20] = 32000; gx[1][20] = 32000; gx[2][20] = 32000;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    ta = 0; tb_pos = 0;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      while ($urandom_range(4) == 0) begin adv = 1'b0; @(negedge clk); end
      adv   = 1'b1;
      in_f  = '{vld: 1'b1, first: (b == 0), pad: (b >= L), hole: 1'b0};
      in_f3 = '{vld: 1'b1, first: (b == 0), pad: (b >= L), hole: (b % 2 == 1)};
      for (int c = 0; c < 3; c++) g3[c] = (b < L) ? grad_t'(gx[c][b]) : grad_t'(0);
      g1[0] = (b < L && b % 2 == 0) ? grad_t'(gx[0][b]) : grad_t'(0);
      for (int c = 0; c < 3; c++) mask[c] = (b - P >= 0 && b - P < L) ? mk[c][b-P] : 1'b0;
      @(posedge clk);
      beat <= beat + 1;
    end
    @(negedge clk);
    adv = 1'b0;
    checks += 2;
    if (ta != L)     begin failures++; $display("A: %0d outputs", ta); end
    if (tb_pos != L) begin failures++; $display("B: %0d outputs", tb_pos); end
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
