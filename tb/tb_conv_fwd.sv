// tb_conv_fwd: checks the forward convolution layer in the two shapes the
// equalizer uses: 1 -> 3 channels with ReLU and stride 1 (first layer) and
// 3 -> 1 channel without ReLU and stride 2 (last layer), both K = 21, P = 10;
// and a 1 -> 1 channel layer with dilation 2 (K = 21, P = 20), the dilation
// option of the module that the equalizer itself does not use.
//
// Two back-to-back sequences of random columns, each followed by pad beats,
// are streamed in with random stalls (adv low). A reference computes every
// output column directly from the zero-padded sequence. Checked: every output
// value, that positions come out in order with the right first/pad/hole
// flags, the number of outputs, and the lag between input and output (P+1
// beats, (K-1)*2-P+1 = 21 for the dilated layer).
`timescale 1ns/1ps
module tb_conv_fwd;
  import eq_pkg::*;

  localparam int K = 21, P = 10, L = 40, NPAD = 22, NB = L + NPAD;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, adv;

  flags_t in_f;
  act_t   in3 [3];
  act_t   in1 [1];
  w_t     wa [3][1][K];
  w_t     wb [1][3][K];
  flags_t fa, fb;
  act_t   oa [3];
  act_t   ob [1];
  w_t     wc [1][1][K];
  flags_t fc;
  act_t   oc [1];
  localparam int PC = 20;

  assign in1[0] = in3[0];

  conv_fwd #(.CIN(1), .COUT(3), .K(K), .P(P), .STRIDE(1), .RELU(1'b1)) dut_a (
    .clk, .rst, .adv, .in_f, .in_d(in1), .w(wa), .out_f(fa), .out_d(oa));
  conv_fwd #(.CIN(3), .COUT(1), .K(K), .P(P), .STRIDE(2), .RELU(1'b0)) dut_b (
    .clk, .rst, .adv, .in_f, .in_d(in3), .w(wb), .out_f(fb), .out_d(ob));

  conv_fwd #(.CIN(1), .COUT(1), .K(K), .P(PC), .STRIDE(1), .DIL(2), .RELU(1'b0)) dut_c (
    .clk, .rst, .adv, .in_f, .in_d(in1), .w(wc), .out_f(fc), .out_d(oc));

  int checks = 0, failures = 0;
  int x [3][L];

  function automatic int xat(int c, int t);
    return (t < 0 || t >= L) ? 0 : x[c][t];
  endfunction

  function automatic int satv(longint v);
    return (v > 511) ? 511 : (v < -512) ? -512 : int'(v);
  endfunction

  function automatic int ref_a(int co, int t);
    longint acc = 0;
    for (int k = 0; k < K; k++) acc += longint'(wa[co][0][k]) * xat(0, t+k-P);
    acc = acc >>> W_F;
    return (acc < 0) ? 0 : satv(acc);
  endfunction

  function automatic int ref_b(int n);
    longint acc = 0;
    for (int ci = 0; ci < 3; ci++)
      for (int k = 0; k < K; k++) acc += longint'(wb[0][ci][k]) * xat(ci, 2*n+k-P);
    return satv(acc >>> W_F);
  endfunction

  function automatic int ref_c(int t);
    longint acc = 0;
    for (int k = 0; k < K; k++) acc += longint'(wc[0][0][k]) * xat(0, t+2*k-PC);
    return satv(acc >>> W_F);
  endfunction

  int beat, ta, tb_pos, nb_out, tc;
  int beat_of_first;

  // sample the registered outputs on every adv edge (they belong to the
  // previous beat)
  always @(posedge clk) if (adv && !rst && beat > 0) begin
    if (fa.vld && !fa.pad) begin
      checks++;
      if (ta == 0 && !fa.first) failures++;
      for (int co = 0; co < 3; co++)
        if (int'(oa[co]) != ref_a(co, ta)) begin
          failures++;
          $display("A: o[%0d][%0d] = %0d, expected %0d", co, ta, oa[co], ref_a(co, ta));
        end
      // lag: output t registered on the beat of input t+P, seen one beat later
      if (beat - 1 != ta + P) begin
        failures++; $display("A: lag wrong at t=%0d (beat %0d)", ta, beat);
      end
      ta++;
    end
    if (fc.vld && !fc.pad) begin
      checks++;
      if (tc == 0 && !fc.first) failures++;
      if (int'(oc[0]) != ref_c(tc)) begin
        failures++;
        $display("C: o[%0d] = %0d, expected %0d", tc, oc[0], ref_c(tc));
      end
      if (beat - 1 != tc + 2*(K-1) - PC) begin
        failures++; $display("C: lag wrong at t=%0d (beat %0d)", tc, beat);
      end
      tc++;
    end
    if (fb.vld && !fb.pad) begin
      checks++;
      if (fb.hole != (tb_pos % 2 == 1)) begin failures++; $display("B: hole flag wrong at %0d", tb_pos); end
      if (tb_pos % 2 == 1) begin
        if (ob[0] != 0) failures++;
      end else if (int'(ob[0]) != ref_b(tb_pos / 2)) begin
        failures++;
        $display("B: z[%0d] = %0d, expected %0d", tb_pos/2, ob[0], ref_b(tb_pos/2));
      end else nb_out++;
      tb_pos++;
    end
  end

  initial begin
    rst = 1'b1; adv = 1'b0; in_f = '0; beat = 0;
    for (int c = 0; c < 3; c++) in3[c] = '0;
    for (int co = 0; co < 3; co++)
      for (int k = 0; k < K; k++) begin
        wa[co][0][k] = w_t'($urandom_range(300)) - w_t'(150);
        wb[0][co][k] = w_t'($urandom_range(300)) - w_t'(150);
        if (co == 0) wc[0][0][k] = w_t'($urandom_range(300)) - w_t'(150);
      end
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int s = 0; s < 2; s++) begin
      for (int c = 0; c < 3; c++)
        for (int t = 0; t < L; t++) x[c][t] = int'($urandom_range(600)) - 300;
      ta = 0; tb_pos = 0; nb_out = 0; beat = 0; tc = 0;
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        while ($urandom_range(4) == 0) begin adv = 1'b0; @(negedge clk); end
        adv = 1'b1;
        in_f = '{vld: 1'b1, first: (b == 0), pad: (b >= L), hole: 1'b0};
        for (int c = 0; c < 3; c++) in3[c] = (b < L) ? act_t'(x[c][b]) : act_t'(0);
        @(posedge clk);
        beat <= beat + 1;
      end
      @(negedge clk);
      adv = 1'b0;
      checks += 3;
      if (tc != L)     begin failures++; $display("C: %0d outputs, expected %0d", tc, L); end
      if (ta != L)     begin failures++; $display("A: %0d outputs, expected %0d", ta, L); end
      if (nb_out != L/2) begin failures++; $display("B: %0d outputs, expected %0d", nb_out, L/2); end
    end
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
