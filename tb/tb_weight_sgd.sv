// tb_weight_sgd: checks the kernel memory and SGD update of one layer at the
// middle-layer shape (3 x 3 x 21 weights).
//
// Weights are loaded through the write port and read back; a random kernel
// gradient is applied with lr = 0.02 (1311 / 2^16) and every weight is
// compared with sat(w - floor(lr * kg / 2^15)); gradients large enough to
// saturate the master word are included; the datapath view must be the
// master word shifted right by WM_F - W_F; a write in the same cycle as an
// update must win; without upd nothing may change.
`timescale 1ns/1ps
module tb_weight_sgd;
  import eq_pkg::*;

  localparam int CIN = 3, COUT = 3, K = 21, N = CIN*COUT*K;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic        rst, wr_en, upd;
  logic [7:0]  wr_idx, rd_idx;
  wm_t         wr_data, rd_data;
  logic [15:0] lr;
  kacc_t       kg [COUT][CIN][K];
  w_t          w_fp [COUT][CIN][K];

  weight_sgd #(.CIN(CIN), .COUT(COUT), .K(K)) dut (
    .clk, .rst, .wr_en, .wr_idx, .wr_data, .rd_idx, .rd_data, .upd, .lr, .kg, .w_fp);

  int checks = 0, failures = 0;
  longint expw [N];

  function automatic longint satw(longint v);
    return (v > 524287) ? 524287 : (v < -524288) ? -524288 : v;
  endfunction

  task automatic compare(string tag);
    int bad = 0;
    for (int i = 0; i < N; i++) begin
      rd_idx = 8'(i);
      #1;
      checks += 2;
      if (longint'(rd_data) != expw[i]) begin
        failures++; bad++;
        if (bad < 4) $display("%s: w[%0d] = %0d, expected %0d", tag, i, rd_data, expw[i]);
      end
      if (longint'(w_fp[i / (CIN*K)][(i / K) % CIN][i % K]) != (expw[i] >>> (WM_F - W_F)))
        failures++;
    end
  endtask

  initial begin
    rst = 1'b1; wr_en = 1'b0; upd = 1'b0; wr_idx = '0; rd_idx = '0; wr_data = '0;
    lr = 16'd1311;
    for (int i = 0; i < N; i++) kg[i / (CIN*K)][(i / K) % CIN][i % K] = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < N; i++) begin
      expw[i] = longint'($urandom_range(400000)) - 200000;
      wr_en = 1'b1; wr_idx = 8'(i); wr_data = wm_t'(expw[i]);
      @(negedge clk);
    end
    wr_en = 1'b0;
    compare("load");
    repeat (3) @(negedge clk);
    compare("idle");
    for (int r = 0; r < 3; r++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        longint v;
        v = ((longint'($urandom) - 64'sd2147483648) >>> 8) * ((i % 17 == 0) ? 256 : 1);
        kg[i / (CIN*K)][(i / K) % CIN][i % K] = kacc_t'(v);
        expw[i] = satw(expw[i] - ((1311 * v) >>> 15));
      end
      // a write during the update wins for its own word
      wr_en = (r == 1); wr_idx = 8'd5; wr_data = 20'sd1234;
      if (r == 1) expw[5] = 1234;
      upd = 1'b1;
      @(negedge clk);
      upd = 1'b0; wr_en = 1'b0;
      compare($sformatf("update %0d", r));
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
