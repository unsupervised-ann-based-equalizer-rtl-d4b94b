// fm_buffer: feature-map buffer between the forward and the backward pass.
//
// A fixed delay of DEPTH beats for a stream word (flags and data packed into
// W bits): the word presented on beat b is the one written on beat b-DEPTH.
// It is a circular buffer with one write and one read per adv pulse and a
// single pointer; the read is combinational (distributed-RAM style). Until
// DEPTH words have been written after reset the output is all zero, so the
// random contents of an uninitialised memory never leave the buffer.
//
// The paper's point is that, because the forward and backward passes run as
// concurrent pipeline stages with similar latency, these buffers only have
// to cover the pipeline depth, not the sequence length. DEPTH is therefore a
// small number set by the top level from the layer lags. The circular-buffer
// organisation is this design's choice.
module fm_buffer #(
  parameter int DEPTH = 2,
  parameter int W     = 10
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         adv,
  input  logic [W-1:0] in_d,
  output logic [W-1:0] out_d
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] ptr;
  logic          full;

  assign out_d = full ? mem[ptr] : '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr  <= '0;
      full <= 1'b0;
    end else if (adv) begin
      if (int'(ptr) == DEPTH-1) begin
        ptr  <= '0;
        full <= 1'b1;
      end else begin
        ptr <= ptr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (adv) mem[ptr] <= in_d;
  end

endmodule
