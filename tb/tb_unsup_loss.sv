// tb_unsup_loss: checks the unsupervised PAM-2 loss gradient.
//
// Three sequences of random equalizer outputs (with stride holes between
// them, padding at the end and stalls) are streamed in. The reference keeps
// its own running d1 - d2 = sum |z+1| - |z-1| over the sequence and computes
//   g = 4 z (z^2 - 1) + 4 * sign(d1 - d2) * (sign(z+1) - sign(z-1))
// in real numbers first, compared after scaling to G_F fraction bits (exact,
// since z has ACT_F = 6 fraction bits and the polynomial term is shifted by
// 3*6 - 10 = 8 bits, floor). It also checks that the running sum restarts at
// the first beat of each sequence and that inactive beats give zero. Values
// at and beyond +-1 are included, where the second term switches off.
`timescale 1ns/1ps
module tb_unsup_loss;
  import eq_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic   rst, adv;
  flags_t in_f;
  act_t   z;
  grad_t  g;

  unsup_loss dut (.clk, .rst, .adv, .in_f, .z, .g);

  int checks = 0, failures = 0;
  int n_lb_pos = 0, n_lb_neg = 0, n_lb_off = 0;

  function automatic longint sgn(longint v);
    return (v > 0) ? 1 : (v < 0) ? -1 : 0;
  endfunction

  initial begin
    longint dd, zq, pa, lbt, e;
    rst = 1'b1; adv = 1'b0; in_f = '0; z = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int s = 0; s < 3; s++) begin
      dd = 0;
      for (int b = 0; b < 80; b++) begin
        bit is_hole, is_pad;
        @(negedge clk);
        while ($urandom_range(4) == 0) begin adv = 1'b0; @(negedge clk); end
        is_hole = (b % 2 == 1);
        is_pad  = (b >= 70);
        adv  = 1'b1;
        in_f = '{vld: 1'b1, first: (b == 0), pad: is_pad, hole: is_hole};
        // mostly near the constellation, sometimes far off, biased per sequence
        case ($urandom_range(5))
          0:       zq = 64;
          1:       zq = -64;
          2:       zq = int'($urandom_range(300)) - 150 + (s - 1) * 40;
          default: zq = int'($urandom_range(160)) - 80 + (s - 1) * 20;
        endcase
        z = act_t'(zq);
        #1;
        checks++;
        if (is_hole || is_pad) begin
          if (g != 0) failures++;
        end else begin
          dd += ((zq + 64) < 0 ? -(zq + 64) : (zq + 64)) - ((zq - 64) < 0 ? -(zq - 64) : (zq - 64));
          // 4 z (z^2 - 1) with z = zq/64  ->  4 zq (zq^2 - 4096) / 2^18, in G_F units: / 2^8
          pa  = (4 * zq * (zq * zq - 4096)) >>> 8;
          lbt = 4 * sgn(dd) * (sgn(zq + 64) - sgn(zq - 64));
          e   = pa + lbt * 1024;
          if (e > 32767) e = 32767;
          if (e < -32768) e = -32768;
          if (lbt > 0) n_lb_pos++; else if (lbt < 0) n_lb_neg++; else n_lb_off++;
          if (longint'(g) != e) begin
            failures++;
            $display("seq %0d beat %0d z=%0d dd=%0d: g=%0d, expected %0d", s, b, zq, dd, g, e);
          end
        end
      end
    end
    @(negedge clk);
    adv = 1'b0;
    // the balance term must have pushed both ways and switched off
    checks++;
    if (n_lb_pos == 0 || n_lb_neg == 0 || n_lb_off == 0) begin
      failures++; $display("balance term cases %0d/%0d/%0d", n_lb_pos, n_lb_neg, n_lb_off);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
