// tb_eq_top: end-to-end test of the trainable equalizer at its default size
// (K = 21, P = 10, three channels).
//
// A PAM-2 symbol stream is sent through a small intensity-modulation channel
// model (two samples per symbol, a short dispersive FIR, square-law detection,
// additive noise) and fed to the equalizer, one sequence at a time. An
// independent whole-sequence reference model in this file recomputes, with
// the same number formats, the forward pass, the selected loss gradient, the
// backward pass, the kernel gradients and the SGD step. The test checks every
// equalizer output and hard decision, the output count and its latency, and
// after every sequence every weight of all three layers.
//
// Sequences exercise: supervised retraining, unsupervised PAM-2 retraining,
// unsupervised PAM-4 retraining (on a four-level symbol stream), inference
// only (train_en low: weights must not move) and input stalls (in_valid
// gaps). Each of these, plus the weight update itself, must occur at least
// once. The last sequence is 120000 samples long, the size of five
// 1500-byte packets sent as PAM-2 at two samples per symbol: it shows that
// the fixed-depth buffers and the 48-bit gradient accumulators handle a
// sequence of that length exactly.
`timescale 1ns/1ps
module tb_eq_top;
  import eq_pkg::*;

  localparam int K   = 21;
  localparam int P   = 10;
  localparam int NCH = 3;
  localparam int LMAX = 120000;   // five 1500-byte packets of PAM-2: 60000 symbols
  localparam int NSEQ = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst;
  logic        train_en;
  logic [1:0]  loss_sel, got_s4 [LMAX/2];
  logic [1:0]  out_sym4;
  logic [15:0] lr;
  logic        in_valid, in_ready, in_last;
  act_t        in_y, in_x;
  logic        out_valid, out_first, out_sym;
  act_t        out_z;
  logic        wr_en;
  logic [1:0]  wr_layer, rd_layer;
  logic [15:0] wr_idx, rd_idx;
  wm_t         wr_data, rd_data;
  logic        busy;
  logic [31:0] n_upd;

  eq_top dut (.*);

  int checks = 0, failures = 0;

  // --------------------------------------------------------- reference state
  longint wm1 [NCH][K];          // [co][k]       (CIN = 1)
  longint wm2 [NCH][NCH][K];     // [co][ci][k]
  longint wm3 [NCH][K];          // [ci][k]       (COUT = 1)
  longint y   [LMAX];
  longint xs  [LMAX/2];
  longint a1 [NCH][LMAX], a2 [NCH][LMAX];
  longint z  [LMAX/2], gs [LMAX];
  longint d2 [NCH][LMAX], d1 [NCH][LMAX];

  function automatic longint sat(longint v, int bits);
    longint hi = (longint'(1) <<< (bits-1)) - 1;
    longint lo = -(longint'(1) <<< (bits-1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic longint wq(longint m);   // master -> datapath weight
    return m >>> (WM_F - W_F);
  endfunction

  function automatic longint sgn(longint v);
    return (v > 0) ? 1 : (v < 0) ? -1 : 0;
  endfunction

  function automatic real sgn_r(real v);
    return (v > 0.0) ? 1.0 : (v < 0.0) ? -1.0 : 0.0;
  endfunction

  function automatic longint yat(int t, int L);
    return (t < 0 || t >= L) ? 0 : y[t];
  endfunction

  // whole-sequence reference: FP, loss gradient, BP, SGD step
  // PAM-4 points -1.5, -0.5, 0.5, 1.5 in activation units
  longint p4 [4] = '{-96, -32, 32, 96};

  function automatic longint nearest4(longint v);
    longint best = 0;
    for (int i = 1; i < 4; i++)
      if ((v - p4[i]) * (v - p4[i]) <= (v - p4[best]) * (v - p4[best])) best = longint'(i);
    return best;
  endfunction

  // mode: 0 supervised, 1 unsupervised PAM-2, 2 unsupervised PAM-4
  task automatic ref_sequence(int L, bit train, int mode, longint lrv);
    longint acc, dd, e1, e2, g, q24, qd18;
    real    d4 [4], zr, lb, sg;
    bit     unsup;
    longint kg1 [NCH][K];
    longint kg2 [NCH][NCH][K];
    longint kg3 [NCH][K];
    unsup = (mode == 1);
    for (int i = 0; i < 4; i++) d4[i] = 0.0;
    for (int c = 0; c < NCH; c++)
      for (int t = 0; t < L; t++) begin
        acc = 0;
        for (int k = 0; k < K; k++) acc += wq(wm1[c][k]) * yat(t+k-P, L);
        acc = acc >>> W_F;
        a1[c][t] = (acc < 0) ? 0 : sat(acc, ACT_W);
      end
    for (int c = 0; c < NCH; c++)
      for (int t = 0; t < L; t++) begin
        acc = 0;
        for (int ci = 0; ci < NCH; ci++)
          for (int k = 0; k < K; k++)
            if (t+k-P >= 0 && t+k-P < L) acc += wq(wm2[c][ci][k]) * a1[ci][t+k-P];
        acc = acc >>> W_F;
        a2[c][t] = (acc < 0) ? 0 : sat(acc, ACT_W);
      end
    dd = 0;
    for (int n = 0; n < L/2; n++) begin
      acc = 0;
      for (int ci = 0; ci < NCH; ci++)
        for (int k = 0; k < K; k++)
          if (2*n+k-P >= 0 && 2*n+k-P < L) acc += wq(wm3[ci][k]) * a2[ci][2*n+k-P];
      z[n] = sat(acc >>> W_F, ACT_W);
      if (unsup) begin
        e1 = z[n] + 64; e2 = z[n] - 64;
        dd += (e1 < 0 ? -e1 : e1) - (e2 < 0 ? -e2 : e2);
        g = ((2 * e1 * e2 * (e1 + e2)) >>> 8) + ((4 * sgn(dd) * (sgn(e1) - sgn(e2))) <<< 10);
      end else if (mode == 2) begin
        // 2 q q' from the expanded polynomial, balance term with real weights
        zr = real'(z[n]) / 64.0;
        for (int i = 0; i < 4; i++) d4[i] += (zr*64.0 < real'(p4[i])) ? real'(p4[i])/64.0 - zr : zr - real'(p4[i])/64.0;
        lb = 0.0;
        sg = sgn_r(d4[0] - d4[3]);         lb += sg * (sgn_r(zr*64.0 - p4[0]) - sgn_r(zr*64.0 - p4[3]));
        sg = sgn_r(1.5*d4[1] - 1.5*d4[2]); lb += sg * 1.5 * (sgn_r(zr*64.0 - p4[1]) - sgn_r(zr*64.0 - p4[2]));
        sg = sgn_r(d4[0] - 1.5*d4[1]);     lb += sg * (sgn_r(zr*64.0 - p4[0]) - 1.5 * sgn_r(zr*64.0 - p4[1]));
        sg = sgn_r(d4[3] - 1.5*d4[2]);     lb += sg * (sgn_r(zr*64.0 - p4[3]) - 1.5 * sgn_r(zr*64.0 - p4[2]));
        if (z[n] > 200 || z[n] < -200) begin
          g = (z[n] > 0) ? 40000 : -40000;
        end else begin
          q24  = z[n]*z[n]*z[n]*z[n] - 10240*z[n]*z[n] + 9437184;
          qd18 = 4*z[n]*z[n]*z[n] - 20480*z[n];
          g = ((2 * q24 * qd18) >>> 32) + longint'(4.0 * lb * 1024.0);
        end
      end else begin
        g = (z[n] - xs[n]) * 32;
      end
      gs[2*n]   = sat(g, G_W);
      gs[2*n+1] = 0;
    end
    // layer 3 backward
    for (int c = 0; c < NCH; c++)
      for (int t = 0; t < L; t++) begin
        acc = 0;
        for (int k = 0; k < K; k++)
          if (t-k+P >= 0 && t-k+P < L) acc += wq(wm3[c][k]) * gs[t-k+P];
        d2[c][t] = (a2[c][t] > 0) ? sat(acc >>> W_F, G_W) : 0;
      end
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < K; k++) begin
        acc = 0;
        for (int t = 0; t < L; t++)
          if (t+k-P >= 0 && t+k-P < L) acc += gs[t] * a2[c][t+k-P];
        kg3[c][k] = acc;
      end
    // layer 2 backward
    for (int ci = 0; ci < NCH; ci++)
      for (int t = 0; t < L; t++) begin
        acc = 0;
        for (int co = 0; co < NCH; co++)
          for (int k = 0; k < K; k++)
            if (t-k+P >= 0 && t-k+P < L) acc += wq(wm2[co][ci][k]) * d2[co][t-k+P];
        d1[ci][t] = (a1[ci][t] > 0) ? sat(acc >>> W_F, G_W) : 0;
      end
    for (int co = 0; co < NCH; co++)
      for (int ci = 0; ci < NCH; ci++)
        for (int k = 0; k < K; k++) begin
          acc = 0;
          for (int t = 0; t < L; t++)
            if (t+k-P >= 0 && t+k-P < L) acc += d2[co][t] * a1[ci][t+k-P];
          kg2[co][ci][k] = acc;
        end
    // layer 1 kernel gradient
    for (int co = 0; co < NCH; co++)
      for (int k = 0; k < K; k++) begin
        acc = 0;
        for (int t = 0; t < L; t++) acc += d1[co][t] * yat(t+k-P, L);
        kg1[co][k] = acc;
      end
    if (train) begin
      for (int co = 0; co < NCH; co++)
        for (int k = 0; k < K; k++)
          wm1[co][k] = sat(wm1[co][k] - ((lrv * kg1[co][k]) >>> 15), WM_W);
      for (int co = 0; co < NCH; co++)
        for (int ci = 0; ci < NCH; ci++)
          for (int k = 0; k < K; k++)
            wm2[co][ci][k] = sat(wm2[co][ci][k] - ((lrv * kg2[co][ci][k]) >>> 15), WM_W);
      for (int ci = 0; ci < NCH; ci++)
        for (int k = 0; k < K; k++)
          wm3[ci][k] = sat(wm3[ci][k] - ((lrv * kg3[ci][k]) >>> 15), WM_W);
    end
  endtask

  // ------------------------------------------------------------- channel
  real chan [5] = '{0.15, 0.45, 0.8, 0.35, 0.1};

  task automatic make_sequence(int L, bit pam4);
    real up [LMAX];
    real v;
    for (int n = 0; n < L/2; n++) begin
      if (pam4) begin
        int s = int'($urandom_range(3));
        xs[n] = p4[s];
        up[2*n] = 0.2 + 0.8 * real'(s) / 3.0;  // intensity levels
      end else begin
        xs[n] = ($urandom_range(1) != 0) ? 64 : -64;
        up[2*n] = (xs[n] > 0) ? 1.0 : 0.2;
      end
      up[2*n+1] = 0.0;
    end
    for (int t = 0; t < L; t++) begin
      v = 0.0;
      for (int j = 0; j < 5; j++) if (t-j >= 0) v += chan[j] * up[t-j];
      v = v * v + (real'($urandom_range(200)) - 100.0) / 2000.0;
      y[t] = sat(longint'($rtoi(v * 64.0)), ACT_W);
    end
  endtask

  // ------------------------------------------------------------- DUT access
  task automatic write_w(int layer, int idx, longint v);
    @(negedge clk);
    wr_en = 1'b1; wr_layer = 2'(layer); wr_idx = 16'(idx); wr_data = wm_t'(v);
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic check_weights(string tag);
    int bad = 0;
    for (int l = 0; l < 3; l++) begin
      int n = (l == 1) ? NCH*NCH*K : NCH*K;
      for (int i = 0; i < n; i++) begin
        longint exp_v;
        rd_layer = 2'(l); rd_idx = 16'(i);
        #1;
        if (l == 0)      exp_v = wm1[i / K][i % K];
        else if (l == 1) exp_v = wm2[i / (NCH*K)][(i / K) % NCH][i % K];
        else             exp_v = wm3[i / K][i % K];
        checks++;
        if (longint'(rd_data) != exp_v) begin
          failures++; bad++;
          if (bad < 5) $display("%s: weight L%0d[%0d] = %0d, expected %0d", tag, l+1, i, rd_data, exp_v);
        end
      end
    end
  endtask

  // output monitor
  int     n_out, out_cyc [LMAX/2];
  act_t   got_z [LMAX/2];
  logic   got_s [LMAX/2];
  int     cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid && n_out < LMAX/2) begin
      got_z[n_out]   <= out_z;
      got_s[n_out]   <= out_sym;
      got_s4[n_out]  <= out_sym4;
      out_cyc[n_out] <= cyc;
      n_out          <= n_out + 1;
    end
  end

  int stall_beats = 0, n_sup = 0, n_unsup = 0, n_unsup4 = 0, n_infer = 0, n_updates = 0;
  int beat_cyc [LMAX];
  longint w3_before [K];
  int n_moved, n_nonzero;

  task automatic run_sequence(int L, bit train, int mode, bit stalls);
    longint wbefore;
    n_out = 0;
    train_en = train; loss_sel = 2'(mode);
    for (int t = 0; t < L; t++) begin
      @(negedge clk);
      while (stalls && $urandom_range(3) == 0) begin
        in_valid = 1'b0; stall_beats++;
        @(negedge clk);
      end
      in_valid = 1'b1; in_y = act_t'(y[t]);
      in_x = (t % 2 == 0) ? act_t'(xs[t/2]) : act_t'(0);
      in_last = (t == L-1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      beat_cyc[t] = cyc;
    end
    @(negedge clk);
    in_valid = 1'b0; in_last = 1'b0;
    // wait for flush and update
    do @(negedge clk); while (!in_ready);
    repeat (2) @(negedge clk);
    wbefore = wm2[1][1][3];
    for (int k = 0; k < K; k++) w3_before[k] = wm3[0][k];
    ref_sequence(L, train, mode, longint'(lr));
    n_moved = 0;
    for (int k = 0; k < K; k++) if (wm3[0][k] != w3_before[k]) n_moved++;
    n_nonzero = 0;
    for (int n = 0; n < L/2; n++) if (z[n] != 0 && z[n] != 511 && z[n] != -512) n_nonzero++;
    $display("sequence L=%0d train=%0d mode=%0d: %0d/%0d outputs unsaturated nonzero, %0d layer-3 weights moved, z[0..3]=%0d %0d %0d %0d",
             L, train, mode, n_nonzero, L/2, n_moved, z[0], z[1], z[2], z[3]);
    checks++;
    if (n_nonzero < L/4) begin failures++; $display("equalizer output mostly zero or saturated"); end
    if (train) begin
      checks++;
      if (n_moved == 0) begin failures++; $display("training step moved no weight"); end
    end
    // outputs
    checks++;
    if (n_out != L/2) begin
      failures++; $display("output count %0d, expected %0d", n_out, L/2);
    end
    for (int n = 0; n < L/2 && n < n_out; n++) begin
      checks += 3;
      if (longint'(got_s4[n]) != nearest4(z[n])) failures++;
      if (longint'(got_z[n]) != z[n]) begin
        failures++;
        if (n < 4) $display("z[%0d] = %0d, expected %0d", n, got_z[n], z[n]);
      end
      if (got_s[n] != (z[n] >= 0)) failures++;
    end
    // latency: output n appears 3*(P+1) beats after sample 2n; beats continue
    // during flush one per cycle, so check it for outputs whose source beat
    // plus latency falls into the flush when no stalls happen
    if (!stalls && L/2 > 0) begin
      checks++;
      if (out_cyc[0] - beat_cyc[0] != 3*(P+1)) begin
        failures++;
        $display("latency %0d cycles, expected %0d", out_cyc[0] - beat_cyc[0], 3*(P+1));
      end
    end
    check_weights(train ? $sformatf("mode %0d", mode) : "infer");
    if (train) begin
      n_updates++;
      if (mode == 1) n_unsup++; else if (mode == 2) n_unsup4++; else n_sup++;
    end else begin
      n_infer++;
      checks++;
      if (wm2[1][1][3] != wbefore) failures++;
    end
  endtask

  initial begin
    rst = 1'b1; train_en = 1'b0; loss_sel = 2'd0; lr = 16'd20;   // 0.02 divided by about 64 samples per sequence
    in_valid = 1'b0; in_last = 1'b0; in_y = '0; in_x = '0;
    wr_en = 1'b0; wr_layer = '0; wr_idx = '0; wr_data = '0;
    rd_layer = '0; rd_idx = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // initial weights: small random values, a centre tap on the main path
    for (int co = 0; co < NCH; co++)
      for (int k = 0; k < K; k++) begin
        wm1[co][k] = (longint'($urandom_range(4000)) - 2000) * 8 + ((k == P) ? 100000 : 0);
        write_w(0, co*K + k, wm1[co][k]);
      end
    for (int co = 0; co < NCH; co++)
      for (int ci = 0; ci < NCH; ci++)
        for (int k = 0; k < K; k++) begin
          wm2[co][ci][k] = (longint'($urandom_range(4000)) - 2000) * 8 + ((k == P && co == ci) ? 120000 : 0);
          write_w(1, (co*NCH + ci)*K + k, wm2[co][ci][k]);
        end
    for (int ci = 0; ci < NCH; ci++)
      for (int k = 0; k < K; k++) begin
        wm3[ci][k] = (longint'($urandom_range(4000)) - 2000) * 8 + ((k == P) ? 160000 : 0) - ((k == P-1) ? 40000 : 0) - 60000*(ci == 2 && k == P);
        write_w(2, ci*K + k, wm3[ci][k]);
      end
    check_weights("load");

    for (int s = 0; s < NSEQ; s++) begin
      int L;
      L = (s == NSEQ-1) ? LMAX : 2 * (20 + int'($urandom_range(40)));
      // the long sequence sums 60000 gradients: scale the step down with it
      if (s == NSEQ-1) lr = 16'd1;
      make_sequence(L, s == 6);
      case (s)
        0: run_sequence(L, 1'b1, 0, 1'b0);   // supervised
        1: run_sequence(L, 1'b1, 1, 1'b0);   // unsupervised PAM-2
        2: run_sequence(L, 1'b0, 1, 1'b1);   // inference only, stalls
        3: run_sequence(L, 1'b1, 1, 1'b1);   // unsupervised PAM-2, stalls
        4: run_sequence(L, 1'b1, 0, 1'b1);   // supervised, stalls
        5: run_sequence(L, 1'b1, 1, 1'b0);   // unsupervised PAM-2
        6: run_sequence(L, 1'b1, 2, 1'b1);   // unsupervised PAM-4, stalls
        default: run_sequence(L, 1'b1, 1, 1'b0);   // five Ethernet packets, unsupervised PAM-2
      endcase
    end

    checks++;
    if (int'(n_upd) != n_updates) begin
      failures++; $display("update counter %0d, expected %0d", n_upd, n_updates);
    end
    // every mechanism must have happened
    checks += 6;
    if (n_unsup4 == 0)    begin failures++; $display("no unsupervised PAM-4 sequence"); end
    if (n_sup == 0)       begin failures++; $display("no supervised sequence"); end
    if (n_unsup == 0)     begin failures++; $display("no unsupervised sequence"); end
    if (n_infer == 0)     begin failures++; $display("no inference-only sequence"); end
    if (stall_beats == 0) begin failures++; $display("no input stall"); end
    if (n_updates == 0)   begin failures++; $display("no weight update"); end
    $display("sup=%0d unsup=%0d unsup4=%0d infer=%0d updates=%0d stalls=%0d",
             n_sup, n_unsup, n_unsup4, n_infer, n_updates, stall_beats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
