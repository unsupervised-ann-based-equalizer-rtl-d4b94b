// eq_top: trainable CNN equalizer with on-chip backpropagation.
//
// Forward pass (FP): three 1-D convolution layers, kernel K = 21, padding
// P = 10, channels 1 -> 3 -> 3 -> 1, ReLU after the first two, stride 2 on the
// last, so that two received samples (2 samples per symbol) give one
// equalizer output z per symbol. z goes out together with its hard decision.
//
// Loss switch: z feeds a supervised MSE loss (needs the pilot symbol x) and
// the unsupervised losses for PAM-2 and PAM-4; loss_sel picks which gradient
// drives the backward pass (0 = supervised, 1 = unsupervised PAM-2,
// 2 = unsupervised PAM-4, 3 = supervised). The selected gradient is
// registered (one beat). The hard decision is given for both PAM-2 and
// PAM-4; the user reads the one that matches the link.
//
// Backward pass (BP): layer 3 has CalcKGrad and CalcInGrad, layer 2 the same,
// layer 1 only CalcKGrad (no gradient is needed for the received samples).
// The BP runs concurrently with the FP on the same stream, in the same time
// order; three feature-map buffers (received samples, layer-1 and layer-2
// activations) delay the FP feature maps by a fixed number of beats so that
// they meet the matching gradients. With lag L = P+1 beats per stage the
// delays are 5L+1-P (samples), 3L+1-P (layer 1) and L+1-P (layer 2), plus the
// K-tap window inside each CalcKGrad: a few dozen beats, whatever the
// sequence length.
//
// Training: CalcKGrad accumulates kernel gradients over one sequence; after
// the sequence's padding beats the controller applies one SGD step to all
// weights (when train_en) and clears the accumulators. Weights are loaded and
// read through a port (layer select 0..2, index (co*CIN+ci)*K+k).
//
// Stream protocol: in_valid/in_ready handshake, one received sample per
// beat; in_last marks the last sample of a sequence (an even number of
// samples is expected: two per symbol). in_x carries the pilot symbol value
// on even samples (symbol n on sample 2n) and is only used by the supervised
// loss. Output: out_valid pulses once per symbol with out_z, out_sym (PAM-2
// decision) and out_sym4 (PAM-4 decision), 3L beats after the sample it is
// centred on.
//
// Follows the paper: topology, layer parameters, FP/BP equations, the two
// losses and their switch, concurrent FP/BP with pipeline-depth buffers, SGD.
// This design's own: number formats, lock-step beat stream with pad/hole
// flags, per-sequence update, full parallelism per output sample (one
// output per beat in every layer), the weight port.
module eq_top
  import eq_pkg::*;
#(
  parameter int K   = 21,
  parameter int P   = 10,
  parameter int NCH = 3
) (
  input  logic            clk,
  input  logic            rst,
  // control
  input  logic            train_en,
  input  logic [1:0]      loss_sel,
  input  logic [LR_W-1:0] lr,
  // received samples
  input  logic            in_valid,
  output logic            in_ready,
  input  act_t            in_y,
  input  act_t            in_x,
  input  logic            in_last,
  // equalized output
  output logic            out_valid,
  output logic            out_first,
  output act_t            out_z,
  output logic            out_sym,
  output logic [1:0]      out_sym4,
  // weight port
  input  logic            wr_en,
  input  logic [1:0]      wr_layer,
  input  logic [15:0]     wr_idx,
  input  wm_t             wr_data,
  input  logic [1:0]      rd_layer,
  input  logic [15:0]     rd_idx,
  output wm_t             rd_data,
  // status
  output logic            busy,
  output logic [31:0]     n_upd
);

  localparam int LS        = P + 1;            // lag of one window stage
  localparam int LAG_Z     = 3 * LS;           // z index t on beat t+LAG_Z
  localparam int PAD_BEATS = 5 * LS + 1;       // until the last layer-1 delta
  localparam int D_Y       = 5 * LS + 1 - P;   // buffer delays
  localparam int D_A1      = 3 * LS + 1 - P;
  localparam int D_A2      = LS + 1 - P;
  localparam int N1        = NCH * K;
  localparam int N2        = NCH * NCH * K;
  localparam int N3        = NCH * K;
  localparam int IW1       = $clog2(N1);
  localparam int IW2       = $clog2(N2);
  localparam int IW3       = $clog2(N3);

  // ---------------------------------------------------------------- control
  logic   adv, upd, clr;
  flags_t beat_f;

  seq_ctrl #(.PAD_BEATS(PAD_BEATS)) u_ctrl (
    .clk(clk), .rst(rst), .train_en(train_en),
    .in_valid(in_valid), .in_last(in_last), .in_ready(in_ready),
    .adv(adv), .beat_f(beat_f), .upd(upd), .clr(clr),
    .busy(busy), .n_upd(n_upd)
  );

  // ---------------------------------------------------------------- weights
  w_t    w1 [NCH][1][K];
  w_t    w2 [NCH][NCH][K];
  w_t    w3 [1][NCH][K];
  kacc_t kg1 [NCH][1][K];
  kacc_t kg2 [NCH][NCH][K];
  kacc_t kg3 [1][NCH][K];
  wm_t   rd1, rd2, rd3;

  weight_sgd #(.CIN(1), .COUT(NCH), .K(K)) u_w1 (
    .clk(clk), .rst(rst),
    .wr_en(wr_en && wr_layer == 2'd0), .wr_idx(wr_idx[IW1-1:0]), .wr_data(wr_data),
    .rd_idx(rd_idx[IW1-1:0]), .rd_data(rd1),
    .upd(upd), .lr(lr), .kg(kg1), .w_fp(w1)
  );
  weight_sgd #(.CIN(NCH), .COUT(NCH), .K(K)) u_w2 (
    .clk(clk), .rst(rst),
    .wr_en(wr_en && wr_layer == 2'd1), .wr_idx(wr_idx[IW2-1:0]), .wr_data(wr_data),
    .rd_idx(rd_idx[IW2-1:0]), .rd_data(rd2),
    .upd(upd), .lr(lr), .kg(kg2), .w_fp(w2)
  );
  weight_sgd #(.CIN(NCH), .COUT(1), .K(K)) u_w3 (
    .clk(clk), .rst(rst),
    .wr_en(wr_en && wr_layer == 2'd2), .wr_idx(wr_idx[IW3-1:0]), .wr_data(wr_data),
    .rd_idx(rd_idx[IW3-1:0]), .rd_data(rd3),
    .upd(upd), .lr(lr), .kg(kg3), .w_fp(w3)
  );

  always_comb begin
    unique case (rd_layer)
      2'd0:    rd_data = rd1;
      2'd1:    rd_data = rd2;
      2'd2:    rd_data = rd3;
      default: rd_data = '0;
    endcase
  end

  // ----------------------------------------------------------- forward pass
  act_t   y_d [1];
  flags_t a1_f, a2_f, z_f;
  act_t   a1_d [NCH];
  act_t   a2_d [NCH];
  act_t   z_d  [1];

  assign y_d[0] = beat_f.pad ? act_t'(0) : in_y;

  conv_fwd #(.CIN(1), .COUT(NCH), .K(K), .P(P), .STRIDE(1), .RELU(1'b1)) u_conv1 (
    .clk(clk), .rst(rst), .adv(adv), .in_f(beat_f), .in_d(y_d), .w(w1),
    .out_f(a1_f), .out_d(a1_d)
  );
  conv_fwd #(.CIN(NCH), .COUT(NCH), .K(K), .P(P), .STRIDE(1), .RELU(1'b1)) u_conv2 (
    .clk(clk), .rst(rst), .adv(adv), .in_f(a1_f), .in_d(a1_d), .w(w2),
    .out_f(a2_f), .out_d(a2_d)
  );
  conv_fwd #(.CIN(NCH), .COUT(1), .K(K), .P(P), .STRIDE(2), .RELU(1'b0)) u_conv3 (
    .clk(clk), .rst(rst), .adv(adv), .in_f(a2_f), .in_d(a2_d), .w(w3),
    .out_f(z_f), .out_d(z_d)
  );

  assign out_valid = adv && z_f.vld && !z_f.pad && !z_f.hole;
  assign out_first = z_f.first;
  assign out_z     = z_d[0];

  decision u_dec (.z(z_d[0]), .sym(out_sym), .x_hat(), .sym4(out_sym4), .x_hat4());

  // ----------------------------------------------------- loss and its switch
  act_t  x_del;
  grad_t g_sup, g_uns, g_uns4;

  fm_buffer #(.DEPTH(LAG_Z), .W(ACT_W)) u_xbuf (
    .clk(clk), .rst(rst), .adv(adv), .in_d(in_x), .out_d(x_del)
  );

  sup_loss u_sup (.in_f(z_f), .z(z_d[0]), .x(x_del), .g(g_sup));

  unsup_loss u_uns (
    .clk(clk), .rst(rst), .adv(adv), .in_f(z_f), .z(z_d[0]), .g(g_uns)
  );

  unsup_loss4 u_uns4 (
    .clk(clk), .rst(rst), .adv(adv), .in_f(z_f), .z(z_d[0]), .g(g_uns4)
  );

  flags_t g_f;
  grad_t  g_d [1];

  always_ff @(posedge clk) begin
    if (rst) begin
      g_f    <= '0;
      g_d[0] <= '0;
    end else if (adv) begin
      g_f    <= z_f;
      unique case (loss_sel)
        2'd1:    g_d[0] <= g_uns;
        2'd2:    g_d[0] <= g_uns4;
        default: g_d[0] <= g_sup;
      endcase
    end
  end

  // -------------------------------------------------- feature-map buffers
  localparam int WY  = FLAGS_W + ACT_W;
  localparam int WA  = FLAGS_W + NCH * ACT_W;

  logic [WY-1:0] by_in, by_out;
  logic [WA-1:0] b1_in, b1_out, b2_in, b2_out;
  flags_t        yb_f, a1b_f, a2b_f;
  act_t          yb_d  [1];
  act_t          a1b_d [NCH];
  act_t          a2b_d [NCH];

  always_comb begin
    by_in = {beat_f, y_d[0]};
    b1_in[WA-1 -: FLAGS_W] = a1_f;
    b2_in[WA-1 -: FLAGS_W] = a2_f;
    for (int c = 0; c < NCH; c++) begin
      b1_in[c*ACT_W +: ACT_W] = a1_d[c];
      b2_in[c*ACT_W +: ACT_W] = a2_d[c];
    end
    yb_f     = flags_t'(by_out[WY-1 -: FLAGS_W]);
    yb_d[0]  = act_t'(by_out[ACT_W-1:0]);
    a1b_f    = flags_t'(b1_out[WA-1 -: FLAGS_W]);
    a2b_f    = flags_t'(b2_out[WA-1 -: FLAGS_W]);
    for (int c = 0; c < NCH; c++) begin
      a1b_d[c] = act_t'(b1_out[c*ACT_W +: ACT_W]);
      a2b_d[c] = act_t'(b2_out[c*ACT_W +: ACT_W]);
    end
  end

  fm_buffer #(.DEPTH(D_Y),  .W(WY)) u_buf_y  (.clk(clk), .rst(rst), .adv(adv), .in_d(by_in), .out_d(by_out));
  fm_buffer #(.DEPTH(D_A1), .W(WA)) u_buf_a1 (.clk(clk), .rst(rst), .adv(adv), .in_d(b1_in), .out_d(b1_out));
  fm_buffer #(.DEPTH(D_A2), .W(WA)) u_buf_a2 (.clk(clk), .rst(rst), .adv(adv), .in_d(b2_in), .out_d(b2_out));

  // ---------------------------------------------------------- backward pass
  act_t   old3 [NCH];
  act_t   old2 [NCH];
  act_t   old1 [1];
  logic   mask3 [NCH];
  logic   mask2 [NCH];
  flags_t d2_f, d1_f;
  grad_t  d2_d [NCH];
  grad_t  d1_d [NCH];

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      mask3[c] = old3[c] > 0;
      mask2[c] = old2[c] > 0;
    end
  end

  // layer 3 (stride 2: the gradient stream is zero-stuffed, i.e. dilation 2)
  calc_k_grad #(.CIN(NCH), .COUT(1), .K(K), .P(P)) u_kg3 (
    .clk(clk), .rst(rst), .adv(adv), .clr(clr),
    .g_f(g_f), .g(g_d), .a_f(a2b_f), .a(a2b_d), .kg(kg3), .oldest(old3)
  );
  calc_in_grad #(.CIN(NCH), .COUT(1), .K(K), .P(P)) u_ig3 (
    .clk(clk), .rst(rst), .adv(adv), .in_f(g_f), .in_g(g_d), .w(w3), .mask(mask3),
    .out_f(d2_f), .out_g(d2_d)
  );

  // layer 2
  calc_k_grad #(.CIN(NCH), .COUT(NCH), .K(K), .P(P)) u_kg2 (
    .clk(clk), .rst(rst), .adv(adv), .clr(clr),
    .g_f(d2_f), .g(d2_d), .a_f(a1b_f), .a(a1b_d), .kg(kg2), .oldest(old2)
  );
  calc_in_grad #(.CIN(NCH), .COUT(NCH), .K(K), .P(P)) u_ig2 (
    .clk(clk), .rst(rst), .adv(adv), .in_f(d2_f), .in_g(d2_d), .w(w2), .mask(mask2),
    .out_f(d1_f), .out_g(d1_d)
  );

  // layer 1: kernel gradient only
  calc_k_grad #(.CIN(1), .COUT(NCH), .K(K), .P(P)) u_kg1 (
    .clk(clk), .rst(rst), .adv(adv), .clr(clr),
    .g_f(d1_f), .g(d1_d), .a_f(yb_f), .a(yb_d), .kg(kg1), .oldest(old1)
  );

endmodule
