// relu: ReLU for asymmetric integer activations.
//
// Real zero is the integer ZERO (the zero point of the data it sits on), so
// ReLU becomes max(x, ZERO). It is purely combinational and sits on the read
// path between one layer's output buffer and the next layer's input, so it
// adds no clock and no storage. The paper places ReLU on the streaming path
// this way; the max-with-zero-point form follows from the asymmetric
// quantization it uses.
module relu #(
  parameter int unsigned DATA_W = 6,
  parameter int          ZERO   = 0
) (
  input  logic signed [DATA_W-1:0] din,
  output logic signed [DATA_W-1:0] dout
);
  localparam logic signed [DATA_W-1:0] ZQ = DATA_W'(ZERO);
  assign dout = (din < ZQ) ? ZQ : din;
endmodule
