// tb_unsup_loss4: checks the unsupervised PAM-4 loss gradient.
//
// Four sequences of random equalizer outputs (stride holes between them,
// padding at the end, random stalls) are streamed in, each sequence biased
// towards different constellation points so that every balance term pushes
// both ways. The reference works from the expanded polynomial
//   q(z) = z^4 - 2.5 z^2 + 0.5625,  q'(z) = 4 z^3 - 5 z
// (points -1.5, -0.5, +0.5, +1.5) in integers scaled by 2^24 and 2^18, rather
// than from the product of distances the unit uses, and evaluates the balance
// term with real-valued 3/2 weights on running sums d_i kept by the
// testbench. Where 2 q q' lies far outside the gradient range only the
// saturated value is checked.
`timescale 1ns/1ps
module tb_unsup_loss4;
  import eq_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic   rst, adv;
  flags_t in_f;
  act_t   z;
  grad_t  g;

  unsup_loss4 dut (.clk, .rst, .adv, .in_f, .z, .g);

  int checks = 0, failures = 0;
  int n_sat = 0, n_lb [4][2];
  real A [4] = '{-1.5, -0.5, 0.5, 1.5};

  function automatic real rsgn(real v);
    return (v > 0.0) ? 1.0 : (v < 0.0) ? -1.0 : 0.0;
  endfunction

  initial begin
    real    d [4], zr, lb, s;
    longint zq, q24, qd18, pa, e;
    for (int i = 0; i < 4; i++) begin n_lb[i][0] = 0; n_lb[i][1] = 0; end
    rst = 1'b1; adv = 1'b0; in_f = '0; z = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int sq = 0; sq < 4; sq++) begin
      for (int i = 0; i < 4; i++) d[i] = 0.0;
      for (int b = 0; b < 120; b++) begin
        bit is_hole, is_pad;
        @(negedge clk);
        while ($urandom_range(4) == 0) begin adv = 1'b0; @(negedge clk); end
        is_hole = (b % 2 == 1);
        is_pad  = (b >= 110);
        adv  = 1'b1;
        in_f = '{vld: 1'b1, first: (b == 0), pad: is_pad, hole: is_hole};
        case ($urandom_range(7))
          0:       zq = 96;
          1:       zq = -32;
          2:       zq = int'($urandom_range(700)) - 350;            // far off, saturating
          3:       zq = (sq * 64) - 96 + int'($urandom_range(20)) - 10;  // near one point
          default: zq = int'($urandom_range(240)) - 120;
        endcase
        z = act_t'(zq);
        #1;
        checks++;
        if (is_hole || is_pad) begin
          if (g != 0) failures++;
          continue;
        end
        zr = real'(zq) / 64.0;
        for (int i = 0; i < 4; i++) d[i] += (zr - A[i] < 0.0) ? A[i] - zr : zr - A[i];
        lb = 0.0;
        s = rsgn(d[0] - d[3]);             lb += s * (rsgn(zr - A[0]) - rsgn(zr - A[3]));
        if (s != 0.0) n_lb[0][s > 0.0]++;
        s = rsgn(1.5*d[1] - 1.5*d[2]);     lb += s * 1.5 * (rsgn(zr - A[1]) - rsgn(zr - A[2]));
        if (s != 0.0) n_lb[1][s > 0.0]++;
        s = rsgn(d[0] - 1.5*d[1]);         lb += s * (rsgn(zr - A[0]) - 1.5 * rsgn(zr - A[1]));
        if (s != 0.0) n_lb[2][s > 0.0]++;
        s = rsgn(d[3] - 1.5*d[2]);         lb += s * (rsgn(zr - A[3]) - 1.5 * rsgn(zr - A[2]));
        if (s != 0.0) n_lb[3][s > 0.0]++;
        if (zq > 200 || zq < -200) begin
          // 2 q q' is beyond +-32 here: saturated towards the sign of z
          if (g != ((zq > 0) ? 16'sh7FFF : 16'sh8000)) begin
            failures++; $display("seq %0d z=%0d: g=%0d, expected saturation", sq, zq, g);
          end
          n_sat++;
          continue;
        end
        q24  = zq*zq*zq*zq - 10240*zq*zq + 9437184;
        qd18 = 4*zq*zq*zq - 20480*zq;
        pa   = (2 * q24 * qd18) >>> 32;
        e    = pa + longint'(4.0 * lb * 1024.0);
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        if (longint'(g) != e) begin
          failures++;
          $display("seq %0d beat %0d z=%0d: g=%0d, expected %0d", sq, b, zq, g, e);
        end
      end
    end
    @(negedge clk);
    adv = 1'b0;
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (n_lb[i][0] == 0 || n_lb[i][1] == 0) begin
        failures++; $display("balance term %0d pushed only one way (%0d/%0d)", i, n_lb[i][0], n_lb[i][1]);
      end
    end
    checks++;
    if (n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
