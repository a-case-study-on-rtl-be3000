// double_conv: the repeated two-convolution unit of every U-Net stage:
// 3x3 conv (pad 1) -> BN -> ReLU -> 3x3 conv (pad 1) -> BN -> ReLU, each
// layer a separate streaming instance (conv2d + bn_relu) so that both
// convolutions work concurrently on different pixels.
//
// Interface: valid/ready stream of CIN int8 channels in, COUT int8 channels
// out, W x H raster frames. Layer numbers on the configuration bus are
// LAYER0 (first conv and its bn_relu) and LAYER0 + 1 (second).
// Timing: throughput COUT/PE cycles per pixel; latency about one image row
// plus a few pixels per convolution.
module double_conv
  import unet_pkg::*;
#(
  parameter int unsigned CIN    = 3,
  parameter int unsigned COUT   = 4,
  parameter int unsigned W      = 256,
  parameter int unsigned H      = 256,
  parameter int unsigned PE     = 1,
  parameter int unsigned LAYER0 = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_wr_t          cfg,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [CIN*8-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [COUT*8-1:0] out_data
);
  logic                  a_valid, a_ready, b_valid, b_ready, c_valid, c_ready;
  logic [COUT*ACC_W-1:0] a_data, c_data;
  logic [COUT*8-1:0]     b_data;

  conv2d #(.CIN(CIN), .COUT(COUT), .W(W), .H(H), .K(3), .PE(PE), .LAYER_ID(LAYER0)) u_conv0 (
    .clk, .rst_n, .cfg,
    .in_valid, .in_ready, .in_data,
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data)
  );

  bn_relu #(.CH(COUT), .RELU(1'b1), .LAYER_ID(LAYER0)) u_bn0 (
    .clk, .rst_n, .cfg,
    .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data),
    .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data)
  );

  conv2d #(.CIN(COUT), .COUT(COUT), .W(W), .H(H), .K(3), .PE(PE), .LAYER_ID(LAYER0 + 1)) u_conv1 (
    .clk, .rst_n, .cfg,
    .in_valid(b_valid), .in_ready(b_ready), .in_data(b_data),
    .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data)
  );

  bn_relu #(.CH(COUT), .RELU(1'b1), .LAYER_ID(LAYER0 + 1)) u_bn1 (
    .clk, .rst_n, .cfg,
    .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
    .out_valid, .out_ready, .out_data
  );

endmodule
