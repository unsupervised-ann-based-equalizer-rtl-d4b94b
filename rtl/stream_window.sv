// stream_window: K-tap sliding window over a beat stream.
//
// Holds the last K-1 beats in a shift register and presents them, together
// with the beat currently on the input, as taps 0 (oldest) .. K-1 (current
// input). The shift register moves one place per adv pulse. When the input
// beat carries the `first` flag, all older taps are shown as empty (flags and
// data zero), so a sequence never sees data of the previous one: this is the
// left-hand zero padding of the convolutions. Taps whose vld flag is clear
// read as zero data.
//
// Timing: taps are combinational from the input; the stored taps change on
// the clock edge on which adv is high. Used by the forward convolution, the
// input-gradient and the kernel-gradient units, which all read a window of
// 2P+1 beats around one position.
module stream_window
  import eq_pkg::*;
#(
  parameter int K = 21,   // number of taps
  parameter int W = 10    // data bits per beat
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         adv,
  input  flags_t       in_f,
  input  logic [W-1:0] in_d,
  output flags_t       tap_f [K],
  output logic [W-1:0] tap_d [K]
);

  flags_t       sf [K-1];
  logic [W-1:0] sd [K-1];

  always_comb begin
    for (int j = 0; j < K-1; j++) begin
      tap_f[j] = in_f.first ? '0 : sf[j];
      tap_d[j] = (in_f.first || !sf[j].vld) ? '0 : sd[j];
    end
    tap_f[K-1] = in_f;
    tap_d[K-1] = in_f.vld ? in_d : '0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int j = 0; j < K-1; j++) begin
        sf[j] <= '0;
        sd[j] <= '0;
      end
    end else if (adv) begin
      for (int j = 0; j < K-1; j++) begin
        sf[j] <= tap_f[j+1];
        sd[j] <= tap_d[j+1];
      end
    end
  end

endmodule
