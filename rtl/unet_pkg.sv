// unet_pkg: types, constants and helper functions shared by the streaming
// U-Net accelerator.
//
// Number formats follow the int8 post-training-quantised model: weights and
// activations are signed 8-bit, accumulators are signed 32-bit. The folded
// batch-norm / requantisation step (bn_relu) uses a signed 16-bit per-channel
// multiplier, a signed 32-bit per-channel offset and a per-layer right shift;
// those widths are this design's choice.
//
// Configuration bus: weights and requantisation constants are written into
// the on-chip memories of each layer through one shared write port
// (cfg_we / cfg_layer / cfg_addr / cfg_wdata). cfg_addr[CFG_ADDR_W-1] = 0
// addresses the weight memory of the convolution, = 1 addresses the
// requantisation registers of the bn_relu that follows it:
//   BN base + c              : multiplier of channel c   (wdata[15:0])
//   BN base + COUT + c       : offset of channel c       (wdata[31:0])
//   BN base + 2*COUT         : right shift of the layer  (wdata[5:0])
// Weight address layouts are given in each layer's header.
package unet_pkg;

  localparam int unsigned DATA_W     = 8;   // activation / weight width
  localparam int unsigned ACC_W      = 32;  // accumulator width
  localparam int unsigned MULT_W     = 16;  // requantisation multiplier width
  localparam int unsigned SHIFT_W    = 6;   // requantisation shift width
  localparam int unsigned CFG_LAYER_W = 6;
  localparam int unsigned CFG_ADDR_W = 24;
  localparam int unsigned CFG_DATA_W = 32;

  // U-Net layout: four pooling levels below full resolution.
  localparam int unsigned LEVELS = 4;

  // Layer numbering on the configuration bus.
  //   encoder level l (0..3) and bottleneck (l = 4): 3x3 convs 2l and 2l+1
  //   decoder level l (3..0): tconv 10+3*(3-l), 3x3 convs 11+3*(3-l), 12+3*(3-l)
  //   final 1x1 classifier: 22
  function automatic int unsigned enc_layer_id(int unsigned lvl, int unsigned idx);
    return 2 * lvl + idx;
  endfunction

  function automatic int unsigned dec_layer_id(int unsigned lvl, int unsigned idx);
    return 10 + 3 * (LEVELS - 1 - lvl) + idx;
  endfunction

  localparam int unsigned FINAL_LAYER_ID = 22;

  typedef logic signed [DATA_W-1:0] act_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // One write on the configuration bus.
  typedef struct packed {
    logic                   we;
    logic [CFG_LAYER_W-1:0] layer;
    logic [CFG_ADDR_W-1:0]  addr;
    logic [CFG_DATA_W-1:0]  wdata;
  } cfg_wr_t;

  // AXI4 burst type and response codes used by the masters.
  localparam logic [1:0] AXI_BURST_INCR = 2'b01;
  localparam logic [1:0] AXI_RESP_OKAY  = 2'b00;

  // Saturate a wide signed value to int8.
  function automatic act_t sat8(input logic signed [63:0] v);
    if (v > 64'sd127)       return act_t'(8'sd127);
    else if (v < -64'sd128) return act_t'(-8'sd128);
    else                    return act_t'(v[7:0]);
  endfunction

  // Folded batch norm + optional ReLU + requantisation, as done by bn_relu:
  //   y = sat8( relu?( (acc * mult + offset) >>> shift ) )
  function automatic act_t requant(input acc_t acc,
                                   input logic signed [MULT_W-1:0] mult,
                                   input logic signed [ACC_W-1:0] offset,
                                   input logic [SHIFT_W-1:0] shift,
                                   input logic relu);
    logic signed [63:0] p;
    p = (64'(acc) * 64'(mult)) + 64'(offset);
    p = p >>> shift;
    if (relu && p < 0) p = '0;
    return sat8(p);
  endfunction

endpackage
