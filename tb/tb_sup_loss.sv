// tb_sup_loss: checks the supervised (MSE) loss gradient g = 2 (z - x).
//
// Every combination of the extreme and random values of z and x is applied
// with active beats and with beats that must give zero (outside a sequence,
// padding, stride hole). The reference is 2 (z - x) scaled from ACT_F to G_F
// fraction bits and saturated.
`timescale 1ns/1ps
module tb_sup_loss;
  import eq_pkg::*;

  flags_t in_f;
  act_t   z, x;
  grad_t  g;

  sup_loss dut (.in_f, .z, .x, .g);

  int checks = 0, failures = 0;

  function automatic int expect_g(int zv, int xv, flags_t f);
    longint v;
    if (!f.vld || f.pad || f.hole) return 0;
    v = longint'(zv - xv) * 2 * (1 << (G_F - ACT_F));
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  task automatic apply(int zv, int xv, flags_t f);
    z = act_t'(zv); x = act_t'(xv); in_f = f;
    #1;
    checks++;
    if (int'(g) != expect_g(zv, xv, f)) begin
      failures++;
      $display("z=%0d x=%0d flags=%b: g=%0d, expected %0d", zv, xv, f, g, expect_g(zv, xv, f));
    end
  endtask

  initial begin
    int vals [6] = '{-512, -64, 0, 17, 64, 511};
    flags_t on = '{vld: 1'b1, first: 1'b0, pad: 1'b0, hole: 1'b0};
    for (int i = 0; i < 6; i++)
      for (int j = 0; j < 6; j++) apply(vals[i], vals[j], on);
    for (int n = 0; n < 500; n++) begin
      flags_t f;
      f = flags_t'($urandom_range(15));
      apply(int'($urandom_range(1023)) - 512, ($urandom_range(1) != 0) ? 64 : -64, f);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
