// conv2d: K x K convolution with stride 1 and zero padding (K-1)/2, no bias,
// int8 weights and activations, 32-bit accumulators. It is one "2D-CNN"
// layer instance of the streaming U-Net: the 3x3 convolutions of the encoder
// and decoder stages.
//
// How it works: a sliding_window turns the input pixel stream into K x K x CIN
// windows. For each window the layer computes the COUT output channels in
// COUT/PE steps of PE channels each, every step being PE parallel dot
// products of length K*K*CIN against rows of the on-chip weight memory. When
// the last step is done, all COUT accumulators leave as one output beat and
// the window is released. Batch norm, ReLU and requantisation follow in a
// separate bn_relu instance, as in the paper's layer-per-module structure.
//
// Weights live on chip, as in the paper. They are written through the
// configuration bus (see unet_pkg) when cfg_layer == LAYER_ID and
// cfg_addr[CFG_ADDR_W-1] == 0, one int8 weight (cfg_wdata[7:0]) per write, at
//   addr = co*K*K*CIN + (ky*K + kx)*CIN + ci.
//
// Interface: in = pixel of CIN int8 channels (channel c in [8c +: 8]);
// out = pixel of COUT int32 accumulators (channel c in [32c +: 32]);
// valid/ready on both sides.
// Timing: COUT/PE cycles per output pixel when neither side stalls; the
// output is registered. PE (output channels per cycle) is this design's
// choice; the paper gives no unrolling factors.
module conv2d
  import unet_pkg::*;
#(
  parameter int unsigned CIN      = 4,
  parameter int unsigned COUT     = 4,
  parameter int unsigned W        = 256,
  parameter int unsigned H        = 256,
  parameter int unsigned K        = 3,
  parameter int unsigned PE       = 1,
  parameter int unsigned LAYER_ID = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_wr_t               cfg,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [CIN*8-1:0]      in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [COUT*ACC_W-1:0] out_data
);
  localparam int unsigned NTAP   = K * K * CIN;
  localparam int unsigned STEPS  = COUT / PE;
  localparam int unsigned SW     = (STEPS > 1) ? $clog2(STEPS) : 1;

  initial begin
    assert (COUT % PE == 0) else $error("conv2d: PE must divide COUT");
  end

  // On-chip weight memory.
  act_t wmem [COUT][NTAP];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.layer == CFG_LAYER_W'(LAYER_ID) && !cfg.addr[CFG_ADDR_W-1]
        && int'(cfg.addr) < int'(COUT * NTAP))
      wmem[int'(cfg.addr) / NTAP][int'(cfg.addr) % NTAP] <= act_t'(cfg.wdata[7:0]);
  end

  logic                 win_valid, win_ready;
  logic [NTAP*8-1:0]    win_data;

  sliding_window #(.CH(CIN), .W(W), .H(H), .K(K)) u_win (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .win_valid, .win_ready, .win_data
  );

  logic [SW-1:0] step;
  acc_t          partial [COUT];   // results of earlier steps
  acc_t          dot     [PE];     // results of the current step

  always_comb begin
    for (int p = 0; p < int'(PE); p++) begin
      acc_t s;
      s = '0;
      for (int t = 0; t < int'(NTAP); t++)
        s += acc_t'(act_t'(win_data[t*8 +: 8])) * acc_t'(wmem[int'(step)*PE + p][t]);
      dot[p] = s;
    end
  end

  wire last_step = (int'(step) == int'(STEPS) - 1);
  wire can_emit  = !out_valid || out_ready;
  wire do_step   = win_valid && (!last_step || can_emit);
  assign win_ready = do_step && last_step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int c = 0; c < int'(COUT); c++) partial[c] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (do_step) begin
        for (int p = 0; p < int'(PE); p++) partial[int'(step)*PE + p] <= dot[p];
        if (last_step) begin
          step      <= '0;
          out_valid <= 1'b1;
          for (int c = 0; c < int'(COUT); c++) begin
            if (c >= int'(step)*int'(PE))
              out_data[c*ACC_W +: ACC_W] <= dot[c - int'(step)*int'(PE)];
            else
              out_data[c*ACC_W +: ACC_W] <= partial[c];
          end
        end else begin
          step <= step + 1'b1;
        end
      end
    end
  end

endmodule
