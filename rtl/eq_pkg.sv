// eq_pkg: number formats, stream flags and helper functions shared by the
// trainable CNN equalizer.
//
// All arithmetic is two's-complement fixed point. Activations (received
// samples, feature maps, equalizer output) use ACT_W bits with ACT_F
// fractional bits; the kernels seen by the forward and backward datapaths use
// W_W bits with W_F fractional bits; each layer keeps a wider master copy of
// its kernel (WM_W/WM_F) so that small SGD steps are not lost. Gradients
// travelling backwards use G_W/G_F. About ten bits for weights and
// activations follows the paper's quantisation result (10.1 bits on
// average); the individual integer/fraction splits are this design's choice.
//
// Every stream in the design moves one beat per "advance" (adv) pulse and
// carries a flags_t next to its data:
//   vld   - the beat belongs to a sequence (its index is >= 0)
//   first - the beat is index 0 of a sequence
//   pad   - the beat lies past the end of the sequence (index >= length);
//           its data is zero, it realises the right-hand zero padding
//   hole  - the beat is an odd position of a stride-2 output; its data is
//           zero, which turns the following gradient stream into the
//           zero-stuffed (dilation 2) stream the backward pass needs
package eq_pkg;

  localparam int ACT_W = 10;   // activation width
  localparam int ACT_F = 6;    // activation fraction bits
  localparam int W_W   = 10;   // kernel width used by FP and BP
  localparam int W_F   = 7;    // kernel fraction bits
  localparam int WM_W  = 20;   // master kernel width (SGD state)
  localparam int WM_F  = 17;   // master kernel fraction bits
  localparam int G_W   = 16;   // gradient width
  localparam int G_F   = 10;   // gradient fraction bits
  localparam int KG_W  = 48;   // kernel-gradient accumulator width
  localparam int KG_F  = ACT_F + G_F;  // its fraction bits (16)
  localparam int LR_W  = 16;   // learning-rate word width
  localparam int LR_F  = 16;   // learning-rate fraction bits

  // 0.02 * 2^16 = 1310.72 -> 1311
  localparam logic [LR_W-1:0] LR_DEFAULT = 16'd1311;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [W_W-1:0]   w_t;
  typedef logic signed [WM_W-1:0]  wm_t;
  typedef logic signed [G_W-1:0]   grad_t;
  typedef logic signed [KG_W-1:0]  kacc_t;

  typedef struct packed {
    logic vld;
    logic first;
    logic pad;
    logic hole;
  } flags_t;

  localparam int FLAGS_W = $bits(flags_t);

  // Saturate a wide signed value to an activation word.
  function automatic act_t sat_act(input logic signed [63:0] v);
    if (v > 64'sd511)       return act_t'(10'sh1FF);
    else if (v < -64'sd512) return act_t'(10'sh200);
    else                    return act_t'(v[ACT_W-1:0]);
  endfunction

  // Saturate a wide signed value to a gradient word.
  function automatic grad_t sat_grad(input logic signed [63:0] v);
    if (v > 64'sd32767)       return grad_t'(16'sh7FFF);
    else if (v < -64'sd32768) return grad_t'(16'sh8000);
    else                      return grad_t'(v[G_W-1:0]);
  endfunction

endpackage
