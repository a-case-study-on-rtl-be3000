// bn_relu: folded batch normalisation, optional ReLU and requantisation of a
// layer's 32-bit accumulators back to int8 activations. With RELU = 1 it is
// the "BatchNorm + ReLU" that follows every 3x3 convolution of the U-Net;
// with RELU = 0 it applies only the scale and offset, which is how the
// learnable bias of a transposed convolution and the output scaling of the
// final classifier are applied.
//
// Per output channel c:  y = sat8( relu?( (acc * mult[c] + offset[c]) >>> shift ) )
// (see unet_pkg::requant). Batch norm folded into an integer multiplier and
// offset, floor rounding and saturation are this design's choices; the paper
// states only that weights and activations are int8 (post-training
// quantisation) and that each convolution is followed by BN and ReLU.
//
// The constants are written through the configuration bus at layer LAYER_ID
// with cfg_addr[CFG_ADDR_W-1] = 1 (layout in unet_pkg). After reset the
// multipliers are 1, offsets 0 and the shift 0.
//
// Interface: valid/ready stream of CH accumulators in, CH int8 out.
// Timing: one beat per cycle, one cycle of latency (registered output).
module bn_relu
  import unet_pkg::*;
#(
  parameter int unsigned CH       = 4,
  parameter bit          RELU     = 1'b1,
  parameter int unsigned LAYER_ID = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [CH*ACC_W-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [CH*8-1:0]     out_data
);
  logic signed [MULT_W-1:0] mult   [CH];
  logic signed [ACC_W-1:0]  offset [CH];
  logic [SHIFT_W-1:0]       shift;

  wire cfg_hit = cfg.we && cfg.layer == CFG_LAYER_W'(LAYER_ID) && cfg.addr[CFG_ADDR_W-1];
  wire [CFG_ADDR_W-2:0] cfg_off = cfg.addr[CFG_ADDR_W-2:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(CH); c++) begin
        mult[c]   <= MULT_W'(1);
        offset[c] <= '0;
      end
      shift <= '0;
    end else if (cfg_hit) begin
      if (int'(cfg_off) < int'(CH))
        mult[int'(cfg_off)] <= cfg.wdata[MULT_W-1:0];
      else if (int'(cfg_off) < 2 * int'(CH))
        offset[int'(cfg_off) - int'(CH)] <= cfg.wdata;
      else if (int'(cfg_off) == 2 * int'(CH))
        shift <= cfg.wdata[SHIFT_W-1:0];
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid)
        for (int c = 0; c < int'(CH); c++)
          out_data[c*8 +: 8] <= requant(acc_t'(in_data[c*ACC_W +: ACC_W]),
                                        mult[c], offset[c], shift, RELU);
    end
  end

endmodule
