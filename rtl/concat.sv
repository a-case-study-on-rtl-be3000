// concat: channel concatenation of two pixel streams of the same frame size,
// the join of skip connection and upsampled path in each U-Net decoder stage.
//
// The output pixel holds the CA channels of stream a (the skip connection) in
// channels 0..CA-1 and the CB channels of stream b (the upsampled path) in
// channels CA..CA+CB-1. The paper says the decoder concatenates the upsampled
// maps with the encoder activations; the channel order is this design's
// choice (skip first).
// Interface: two valid/ready input streams, one output; a beat leaves only
// when both inputs have one. Timing: combinational, no latency.
// Purely combinational: the data output is the two inputs wired side by side.
module concat #(
  parameter int unsigned CA = 4,
  parameter int unsigned CB = 4
) (
  input  logic                 a_valid,
  output logic                 a_ready,
  input  logic [CA*8-1:0]      a_data,
  input  logic                 b_valid,
  output logic                 b_ready,
  input  logic [CB*8-1:0]      b_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [(CA+CB)*8-1:0] out_data
);
  assign out_valid = a_valid && b_valid;
  assign a_ready   = out_ready && b_valid;
  assign b_ready   = out_ready && a_valid;
  assign out_data  = {b_data, a_data};

endmodule
