// tb_decision: checks the hard decisions for every possible equalizer output
// value: PAM-2, the nearest of A1 = -1 and A2 = +1 by Euclidean distance with
// the tie (z = 0) to A2; PAM-4, the nearest of -1.5, -0.5, +0.5, +1.5 found
// by searching all four distances, ties to the upper point; and the decided
// amplitudes.
`timescale 1ns/1ps
module tb_decision;
  import eq_pkg::*;

  act_t       z, x_hat, x_hat4;
  logic       sym;
  logic [1:0] sym4;
  int         pts4 [4] = '{-96, -32, 32, 96};

  decision dut (.z, .sym, .x_hat, .sym4, .x_hat4);

  int checks = 0, failures = 0;

  initial begin
    for (int v = -512; v < 512; v++) begin
      int d1, d2;
      bit e;
      z = act_t'(v);
      #1;
      d1 = (v + 64) * (v + 64);
      d2 = (v - 64) * (v - 64);
      e  = (d2 <= d1);
      checks++;
      if (sym != e || int'(x_hat) != (e ? 64 : -64)) begin
        failures++;
        $display("z=%0d: sym=%0d x_hat=%0d", v, sym, x_hat);
      end
      begin
        int best = 0;
        for (int i = 1; i < 4; i++)
          if ((v - pts4[i]) * (v - pts4[i]) <= (v - pts4[best]) * (v - pts4[best])) best = i;
        checks++;
        if (int'(sym4) != best || int'(x_hat4) != pts4[best]) begin
          failures++;
          $display("z=%0d: sym4=%0d x_hat4=%0d, expected %0d", v, sym4, x_hat4, best);
        end
      end
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
