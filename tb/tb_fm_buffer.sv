// tb_fm_buffer: checks the feature-map buffer at a delay of 24 beats (the
// layer-1 buffer of the equalizer) and at the minimum delay of 2.
//
// Random words are written one per adv pulse, with random stalls. The output
// must be zero until DEPTH words have gone in, and from then on equal to the
// word written exactly DEPTH beats earlier, whatever the stalls.
`timescale 1ns/1ps
module tb_fm_buffer;

  localparam int DA = 24, DB = 2, W = 34, NB = 200;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, adv;
  logic [W-1:0] din, qa, qb;

  fm_buffer #(.DEPTH(DA), .W(W)) dut_a (.clk, .rst, .adv, .in_d(din), .out_d(qa));
  fm_buffer #(.DEPTH(DB), .W(W)) dut_b (.clk, .rst, .adv, .in_d(din), .out_d(qb));

  int checks = 0, failures = 0;
  logic [W-1:0] hist [NB];

  initial begin
    rst = 1'b1; adv = 1'b0; din = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      while ($urandom_range(3) == 0) begin adv = 1'b0; @(negedge clk); end
      adv = 1'b1;
      din = {$urandom, $urandom};
      hist[b] = din;
      #1;
      checks += 2;
      if (qa != ((b >= DA) ? hist[b-DA] : '0)) begin
        failures++; $display("A: beat %0d got %h", b, qa);
      end
      if (qb != ((b >= DB) ? hist[b-DB] : '0)) begin
        failures++; $display("B: beat %0d got %h", b, qb);
      end
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
