// seq_ctrl: sequence controller of the trainable equalizer.
//
// The whole datapath moves in lock step: every register of the forward and
// backward pipelines and every feature-map buffer advances on the single
// `adv` pulse this unit produces. A sequence is processed as
//   RUN   : one beat per accepted input sample (in_valid && in_ready); the
//           first accepted beat is flagged `first`; in_last ends the sequence;
//   FLUSH : PAD_BEATS beats of zero padding (`pad` flag) are generated with
//           in_ready low. They realise the right-hand padding of every layer
//           and carry the last gradients through the backward pipeline;
//   UPD   : one cycle without adv in which the kernel gradients of the
//           sequence are applied to the weights (upd, only when train_en)
//           and the accumulators are cleared (clr).
// Then the next sequence may start. Gaps in in_valid simply stall the whole
// pipeline. The number of updates done so far is counted in n_upd.
//
// The sequence-level weight update and this padding scheme are this design's
// choices: the paper states that the forward and backward passes run
// concurrently with buffers sized by the pipeline depth, and that the model is
// retrained with SGD, but not how sequences are delimited in hardware.
module seq_ctrl
  import eq_pkg::*;
#(
  parameter int PAD_BEATS = 56
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        train_en,
  input  logic        in_valid,
  input  logic        in_last,
  output logic        in_ready,
  output logic        adv,
  output flags_t      beat_f,
  output logic        upd,
  output logic        clr,
  output logic        busy,
  output logic [31:0] n_upd
);

  typedef enum logic [1:0] {S_RUN, S_FLUSH, S_UPD} state_t;

  state_t      state;
  logic        first_pend;
  logic [15:0] cnt;

  always_comb begin
    in_ready = (state == S_RUN);
    adv      = 1'b0;
    beat_f   = '0;
    upd      = 1'b0;
    clr      = 1'b0;
    unique case (state)
      S_RUN: begin
        adv          = in_valid;
        beat_f.vld   = 1'b1;
        beat_f.first = first_pend;
      end
      S_FLUSH: begin
        adv        = 1'b1;
        beat_f.vld = 1'b1;
        beat_f.pad = 1'b1;
      end
      S_UPD: begin
        upd = train_en;
        clr = 1'b1;
      end
      default: ;
    endcase
    busy = (state != S_RUN) || !first_pend;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_RUN;
      first_pend <= 1'b1;
      cnt        <= '0;
      n_upd      <= '0;
    end else begin
      unique case (state)
        S_RUN:
          if (in_valid) begin
            first_pend <= 1'b0;
            if (in_last) begin
              state <= S_FLUSH;
              cnt   <= '0;
            end
          end
        S_FLUSH:
          if (int'(cnt) == PAD_BEATS-1) state <= S_UPD;
          else cnt <= cnt + 1'b1;
        S_UPD: begin
          state      <= S_RUN;
          first_pend <= 1'b1;
          if (train_en) n_upd <= n_upd + 1;
        end
        default: state <= S_RUN;
      endcase
    end
  end

endmodule
