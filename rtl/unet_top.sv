// unet_top: streaming (dataflow) int8 U-Net accelerator for binary crack
// segmentation. Every layer of the network is its own hardware instance and
// the instances are chained by valid/ready pixel streams, so all layers work
// at the same time on different parts of the image:
//
//   input_dma -> [double_conv -> fork -> maxpool] x4 -> double_conv (bottleneck)
//             -> [tconv2x2 -> bn -> concat(skip) -> double_conv] x4
//             -> conv1x1 -> bn -> output_dma
//
// Network (follows the paper): four pooling levels; level l works on
// (H>>l) x (W>>l) pixels with C<<l channels (C = channel scaling factor,
// 4 in the main configuration); every 3x3 convolution has padding 1, no bias
// and is followed by batch norm and ReLU; 2x2 max pooling; 2x2 stride-2
// transposed convolutions for upsampling; skip connections concatenated
// before the decoder convolutions; a final 1x1 convolution to NCLS = 2
// classes. Weights and activations are int8, weights are held on chip.
//
// Skip connections: with SKIP_OFFCHIP = 0 each skip map waits in an on-chip
// FIFO (stream_fifo) holding the whole map of its level; with SKIP_OFFCHIP = 1
// each skip map goes through its own AXI4 master port to external memory and
// back (skip_offchip). Both are configurations of the paper; the unused
// skip ports are tied off.
//
// Control: configuration writes (cfg, see unet_pkg) load weights and
// requantisation constants; a start pulse runs one frame: the input DMA
// reads H*W pixels (3 int8 channels per 32-bit word) from src_base, the
// output DMA writes H*W words (2 int8 class scores each) to dst_base; `done`
// pulses when the last write response has arrived. Frames may be started
// back to back once `busy` has dropped.
//
// Timing: the slowest layers are the full-resolution convolutions, which
// need C/PE cycles per pixel; the frame interval is therefore about
// H*W*C/PE cycles. PE and all buffer sizes are this design's choices.
// A single frame measured from start to done takes about 1.45x that
// (pipeline fill through 18 convolution layers plus memory wait states).
//
// Lint notes: with SKIP_OFFCHIP = 0 the sk_* inputs are not read and with
// SKIP_OFFCHIP = 1 the on-chip FIFOs do not exist; parts of the wide
// internal stream arrays are unused at levels narrower than MAXB; the input
// DMA's `done` and the FIFO `level` outputs are not needed here. rst_n is
// reported as used both synchronously and asynchronously only because the
// assertions in the sub-blocks use it in `disable iff`.
module unet_top
  import unet_pkg::*;
#(
  parameter int unsigned C            = 4,
  parameter int unsigned H            = 256,
  parameter int unsigned W            = 256,
  parameter int unsigned IN_CH        = 3,
  parameter int unsigned NCLS         = 2,
  parameter int unsigned PE           = 1,
  parameter bit          SKIP_OFFCHIP = 1'b0,
  parameter int unsigned ADDR_W       = 32,
  parameter int unsigned BURST        = 16,
  localparam int unsigned SKIP_DW     = (C << (LEVELS - 1)) * 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration writes
  input  cfg_wr_t           cfg,
  // control
  input  logic              start,
  input  logic [ADDR_W-1:0] src_base,
  input  logic [ADDR_W-1:0] dst_base,
  input  logic [ADDR_W-1:0] skip_base [LEVELS],
  output logic              busy,
  output logic              done,
  // input DMA: AXI4 read
  output logic              in_arvalid,
  input  logic              in_arready,
  output logic [ADDR_W-1:0] in_araddr,
  output logic [7:0]        in_arlen,
  output logic [2:0]        in_arsize,
  output logic [1:0]        in_arburst,
  input  logic              in_rvalid,
  output logic              in_rready,
  input  logic [31:0]       in_rdata,
  input  logic [1:0]        in_rresp,
  input  logic              in_rlast,
  // output DMA: AXI4 write
  output logic              out_awvalid,
  input  logic              out_awready,
  output logic [ADDR_W-1:0] out_awaddr,
  output logic [7:0]        out_awlen,
  output logic [2:0]        out_awsize,
  output logic [1:0]        out_awburst,
  output logic              out_wvalid,
  input  logic              out_wready,
  output logic [31:0]       out_wdata,
  output logic [3:0]        out_wstrb,
  output logic              out_wlast,
  input  logic              out_bvalid,
  output logic              out_bready,
  input  logic [1:0]        out_bresp,
  // skip connections: one AXI4 master per level (used when SKIP_OFFCHIP = 1;
  // level l uses the low (C<<l)*8 data bits)
  output logic              sk_awvalid [LEVELS],
  input  logic              sk_awready [LEVELS],
  output logic [ADDR_W-1:0] sk_awaddr  [LEVELS],
  output logic [7:0]        sk_awlen   [LEVELS],
  output logic [2:0]        sk_awsize  [LEVELS],
  output logic [1:0]        sk_awburst [LEVELS],
  output logic              sk_wvalid  [LEVELS],
  input  logic              sk_wready  [LEVELS],
  output logic [SKIP_DW-1:0] sk_wdata  [LEVELS],
  output logic [SKIP_DW/8-1:0] sk_wstrb [LEVELS],
  output logic              sk_wlast   [LEVELS],
  input  logic              sk_bvalid  [LEVELS],
  output logic              sk_bready  [LEVELS],
  input  logic [1:0]        sk_bresp   [LEVELS],
  output logic              sk_arvalid [LEVELS],
  input  logic              sk_arready [LEVELS],
  output logic [ADDR_W-1:0] sk_araddr  [LEVELS],
  output logic [7:0]        sk_arlen   [LEVELS],
  output logic [2:0]        sk_arsize  [LEVELS],
  output logic [1:0]        sk_arburst [LEVELS],
  input  logic              sk_rvalid  [LEVELS],
  output logic              sk_rready  [LEVELS],
  input  logic [SKIP_DW-1:0] sk_rdata  [LEVELS],
  input  logic [1:0]        sk_rresp   [LEVELS],
  input  logic              sk_rlast   [LEVELS]
);
  // Widest stream in the network: the concatenation at the lowest decoder level.
  localparam int unsigned MAXB = (C << LEVELS) * 8;

  // ---------------- stream wiring (low bits used per level) ----------------
  logic            enc_in_v  [LEVELS+1], enc_in_r  [LEVELS+1];
  logic [MAXB-1:0] enc_in_d  [LEVELS+1];
  logic            enc_out_v [LEVELS+1], enc_out_r [LEVELS+1];
  logic [MAXB-1:0] enc_out_d [LEVELS+1];
  logic            skw_v [LEVELS], skw_r [LEVELS];   // encoder -> skip store
  logic [MAXB-1:0] skw_d [LEVELS];
  logic            skr_v [LEVELS], skr_r [LEVELS];   // skip store -> decoder
  logic [MAXB-1:0] skr_d [LEVELS];
  logic            pin_v [LEVELS], pin_r [LEVELS];   // encoder -> pool
  logic [MAXB-1:0] pin_d [LEVELS];
  logic            up_in_v  [LEVELS], up_in_r  [LEVELS];
  logic [MAXB-1:0] up_in_d  [LEVELS];
  logic            dec_out_v [LEVELS], dec_out_r [LEVELS];
  logic [MAXB-1:0] dec_out_d [LEVELS];

  // ---------------- input DMA ----------------
  logic in_busy, in_done, out_busy, out_done;
  logic [IN_CH*8-1:0] px_data;

  input_dma #(.NPIX(H * W), .CH(IN_CH), .ADDR_W(ADDR_W), .BURST(BURST)) u_in_dma (
    .clk, .rst_n, .start, .src_base, .busy(in_busy), .done(in_done),
    .m_arvalid(in_arvalid), .m_arready(in_arready), .m_araddr(in_araddr),
    .m_arlen(in_arlen), .m_arsize(in_arsize), .m_arburst(in_arburst),
    .m_rvalid(in_rvalid), .m_rready(in_rready), .m_rdata(in_rdata),
    .m_rresp(in_rresp), .m_rlast(in_rlast),
    .out_valid(enc_in_v[0]), .out_ready(enc_in_r[0]), .out_data(px_data)
  );
  assign enc_in_d[0] = MAXB'(px_data);

  // ---------------- encoder and bottleneck ----------------
  for (genvar l = 0; l <= LEVELS; l++) begin : g_enc
    localparam int unsigned CI = (l == 0) ? IN_CH : (C << (l - 1));
    localparam int unsigned CO = C << l;
    logic [CO*8-1:0] o_d;

    double_conv #(.CIN(CI), .COUT(CO), .W(W >> l), .H(H >> l), .PE(PE),
                  .LAYER0(enc_layer_id(l, 0))) u_dconv (
      .clk, .rst_n, .cfg,
      .in_valid(enc_in_v[l]), .in_ready(enc_in_r[l]), .in_data(enc_in_d[l][CI*8-1:0]),
      .out_valid(enc_out_v[l]), .out_ready(enc_out_r[l]), .out_data(o_d)
    );
    assign enc_out_d[l] = MAXB'(o_d);

    if (l < LEVELS) begin : g_down
      logic [CO*8-1:0] pool_d;

      stream_fork #(.W(CO * 8)) u_fork (
        .clk, .rst_n,
        .in_valid(enc_out_v[l]), .in_ready(enc_out_r[l]), .in_data(o_d),
        .a_valid(pin_v[l]), .a_ready(pin_r[l]), .a_data(pin_d[l][CO*8-1:0]),
        .b_valid(skw_v[l]), .b_ready(skw_r[l]), .b_data(skw_d[l][CO*8-1:0])
      );
      assign pin_d[l][MAXB-1:CO*8] = '0;
      assign skw_d[l][MAXB-1:CO*8] = '0;

      maxpool2x2 #(.CH(CO), .W(W >> l), .H(H >> l)) u_pool (
        .clk, .rst_n,
        .in_valid(pin_v[l]), .in_ready(pin_r[l]), .in_data(pin_d[l][CO*8-1:0]),
        .out_valid(enc_in_v[l+1]), .out_ready(enc_in_r[l+1]), .out_data(pool_d)
      );
      assign enc_in_d[l+1] = MAXB'(pool_d);
    end
  end

  // ---------------- skip connections ----------------
  for (genvar l = 0; l < LEVELS; l++) begin : g_skip
    localparam int unsigned CO   = C << l;
    localparam int unsigned NPIX = (H >> l) * (W >> l);
    logic [CO*8-1:0] r_d;

    if (SKIP_OFFCHIP) begin : g_off
      logic [CO*8-1:0] wd;
      skip_offchip #(.CH(CO), .NPIX(NPIX), .ADDR_W(ADDR_W), .BURST(BURST)) u_skip (
        .clk, .rst_n, .base(skip_base[l]),
        .in_valid(skw_v[l]), .in_ready(skw_r[l]), .in_data(skw_d[l][CO*8-1:0]),
        .out_valid(skr_v[l]), .out_ready(skr_r[l]), .out_data(r_d),
        .m_awvalid(sk_awvalid[l]), .m_awready(sk_awready[l]), .m_awaddr(sk_awaddr[l]),
        .m_awlen(sk_awlen[l]), .m_awsize(sk_awsize[l]), .m_awburst(sk_awburst[l]),
        .m_wvalid(sk_wvalid[l]), .m_wready(sk_wready[l]), .m_wdata(wd),
        .m_wstrb(sk_wstrb[l][CO-1:0]), .m_wlast(sk_wlast[l]),
        .m_bvalid(sk_bvalid[l]), .m_bready(sk_bready[l]), .m_bresp(sk_bresp[l]),
        .m_arvalid(sk_arvalid[l]), .m_arready(sk_arready[l]), .m_araddr(sk_araddr[l]),
        .m_arlen(sk_arlen[l]), .m_arsize(sk_arsize[l]), .m_arburst(sk_arburst[l]),
        .m_rvalid(sk_rvalid[l]), .m_rready(sk_rready[l]), .m_rdata(sk_rdata[l][CO*8-1:0]),
        .m_rresp(sk_rresp[l]), .m_rlast(sk_rlast[l])
      );
      assign sk_wdata[l] = SKIP_DW'(wd);
      if (CO < SKIP_DW / 8) begin : g_strb_pad
        assign sk_wstrb[l][SKIP_DW/8-1:CO] = '0;
      end
    end else begin : g_on
      stream_fifo #(.W(CO * 8), .DEPTH(NPIX)) u_skip (
        .clk, .rst_n,
        .in_valid(skw_v[l]), .in_ready(skw_r[l]), .in_data(skw_d[l][CO*8-1:0]),
        .out_valid(skr_v[l]), .out_ready(skr_r[l]), .out_data(r_d),
        .level()
      );
      assign sk_awvalid[l] = 1'b0; assign sk_awaddr[l] = '0; assign sk_awlen[l] = '0;
      assign sk_awsize[l]  = '0;   assign sk_awburst[l] = '0;
      assign sk_wvalid[l]  = 1'b0; assign sk_wdata[l]  = '0; assign sk_wstrb[l] = '0;
      assign sk_wlast[l]   = 1'b0; assign sk_bready[l] = 1'b0;
      assign sk_arvalid[l] = 1'b0; assign sk_araddr[l] = '0; assign sk_arlen[l] = '0;
      assign sk_arsize[l]  = '0;   assign sk_arburst[l] = '0; assign sk_rready[l] = 1'b0;
    end
    assign skr_d[l] = MAXB'(r_d);
  end

  // ---------------- decoder ----------------
  for (genvar l = LEVELS - 1; l >= 0; l--) begin : g_dec
    localparam int unsigned CI = C << (l + 1);   // channels coming up
    localparam int unsigned CO = C << l;
    logic                  t_v, t_r, u_v, u_r, k_v, k_r;
    logic [CO*ACC_W-1:0]   t_d;
    logic [CO*8-1:0]       u_d, o_d;
    logic [2*CO*8-1:0]     k_d;

    if (l == LEVELS - 1) begin : g_from_bottleneck
      assign up_in_v[l] = enc_out_v[LEVELS];
      assign enc_out_r[LEVELS] = up_in_r[l];
      assign up_in_d[l] = enc_out_d[LEVELS];
    end else begin : g_from_below
      assign up_in_v[l] = dec_out_v[l+1];
      assign dec_out_r[l+1] = up_in_r[l];
      assign up_in_d[l] = dec_out_d[l+1];
    end

    tconv2x2 #(.CIN(CI), .COUT(CO), .W_IN(W >> (l + 1)), .PE(PE),
               .LAYER_ID(dec_layer_id(l, 0))) u_up (
      .clk, .rst_n, .cfg,
      .in_valid(up_in_v[l]), .in_ready(up_in_r[l]), .in_data(up_in_d[l][CI*8-1:0]),
      .out_valid(t_v), .out_ready(t_r), .out_data(t_d)
    );

    bn_relu #(.CH(CO), .RELU(1'b0), .LAYER_ID(dec_layer_id(l, 0))) u_up_bias (
      .clk, .rst_n, .cfg,
      .in_valid(t_v), .in_ready(t_r), .in_data(t_d),
      .out_valid(u_v), .out_ready(u_r), .out_data(u_d)
    );

    concat #(.CA(CO), .CB(CO)) u_cat (
      .a_valid(skr_v[l]), .a_ready(skr_r[l]), .a_data(skr_d[l][CO*8-1:0]),
      .b_valid(u_v), .b_ready(u_r), .b_data(u_d),
      .out_valid(k_v), .out_ready(k_r), .out_data(k_d)
    );

    double_conv #(.CIN(2 * CO), .COUT(CO), .W(W >> l), .H(H >> l), .PE(PE),
                  .LAYER0(dec_layer_id(l, 1))) u_dconv (
      .clk, .rst_n, .cfg,
      .in_valid(k_v), .in_ready(k_r), .in_data(k_d),
      .out_valid(dec_out_v[l]), .out_ready(dec_out_r[l]), .out_data(o_d)
    );
    assign dec_out_d[l] = MAXB'(o_d);
  end

  // ---------------- classifier and output DMA ----------------
  logic                  f_v, f_r, q_v, q_r;
  logic [NCLS*ACC_W-1:0] f_d;
  logic [NCLS*8-1:0]     q_d;

  conv1x1 #(.CIN(C), .NCLS(NCLS), .PE(1), .LAYER_ID(FINAL_LAYER_ID)) u_cls (
    .clk, .rst_n, .cfg,
    .in_valid(dec_out_v[0]), .in_ready(dec_out_r[0]), .in_data(dec_out_d[0][C*8-1:0]),
    .out_valid(f_v), .out_ready(f_r), .out_data(f_d)
  );

  bn_relu #(.CH(NCLS), .RELU(1'b0), .LAYER_ID(FINAL_LAYER_ID)) u_cls_scale (
    .clk, .rst_n, .cfg,
    .in_valid(f_v), .in_ready(f_r), .in_data(f_d),
    .out_valid(q_v), .out_ready(q_r), .out_data(q_d)
  );

  output_dma #(.NPIX(H * W), .NCLS(NCLS), .ADDR_W(ADDR_W), .BURST(BURST)) u_out_dma (
    .clk, .rst_n, .start, .dst_base, .busy(out_busy), .done(out_done),
    .m_awvalid(out_awvalid), .m_awready(out_awready), .m_awaddr(out_awaddr),
    .m_awlen(out_awlen), .m_awsize(out_awsize), .m_awburst(out_awburst),
    .m_wvalid(out_wvalid), .m_wready(out_wready), .m_wdata(out_wdata),
    .m_wstrb(out_wstrb), .m_wlast(out_wlast),
    .m_bvalid(out_bvalid), .m_bready(out_bready), .m_bresp(out_bresp),
    .in_valid(q_v), .in_ready(q_r), .in_data(q_d)
  );

  assign busy = in_busy || out_busy;
  assign done = out_done;

endmodule
