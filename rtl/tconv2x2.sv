// tconv2x2: 2 x 2 transposed convolution with stride 2, the learnable
// upsampling at the start of each U-Net decoder stage. An input map of
// W_IN x H_IN pixels with CIN channels becomes a map of 2W_IN x 2H_IN pixels
// with COUT channels:
//   out[2i+a][2j+b][co] = sum_ci in[i][j][ci] * w[a][b][co][ci]
// The layer's bias is added by the bn_relu (RELU = 0) that follows it.
//
// How it works: input rows are collected in two row buffers (ping-pong), so
// one row can arrive while the previous one is expanded. Each buffered input
// row i is read twice, once for output row 2i (a = 0) and once for 2i+1
// (a = 1); each input pixel j then yields output pixels 2j and 2j+1. Every
// output pixel takes COUT/PE cycles of PE parallel dot products of length CIN.
//
// Weights are written through the configuration bus at layer LAYER_ID,
// cfg_addr[CFG_ADDR_W-1] = 0, one int8 weight per write, at
//   addr = ((a*2 + b)*COUT + co)*CIN + ci.
// Interface: valid/ready stream of CIN int8 channels in, COUT int32
// accumulators out, raster order on both sides.
// Timing: COUT/PE cycles per output pixel, so 4*COUT/PE cycles per input
// pixel; registered output. Row buffering and PE are this design's choices.
module tconv2x2
  import unet_pkg::*;
#(
  parameter int unsigned CIN      = 8,
  parameter int unsigned COUT     = 4,
  parameter int unsigned W_IN     = 128,
  parameter int unsigned PE       = 1,
  parameter int unsigned LAYER_ID = 10
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
  localparam int unsigned STEPS = COUT / PE;
  localparam int unsigned SW    = (STEPS > 1) ? $clog2(STEPS) : 1;
  localparam int unsigned CW    = $clog2(W_IN + 1);
  localparam int unsigned NW    = 4 * COUT * CIN;

  initial begin
    assert (COUT % PE == 0) else $error("tconv2x2: PE must divide COUT");
  end

  act_t wmem [4][COUT][CIN];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.layer == CFG_LAYER_W'(LAYER_ID) && !cfg.addr[CFG_ADDR_W-1]
        && int'(cfg.addr) < int'(NW))
      wmem[int'(cfg.addr) / (COUT * CIN)][(int'(cfg.addr) / CIN) % COUT][int'(cfg.addr) % CIN]
        <= act_t'(cfg.wdata[7:0]);
  end

  // Ping-pong row buffers.
  logic [CIN*8-1:0] rowbuf [2][W_IN];
  logic [1:0]       full;
  logic             wsel, rsel;
  logic [CW-1:0]    icol;

  assign in_ready = !full[wsel];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) rowbuf[wsel][int'(icol)] <= in_data;
  end

  // Expansion counters.
  logic          a, b;
  logic [CW-1:0] j;
  logic [SW-1:0] step;
  acc_t          partial [COUT];
  acc_t          dot     [PE];

  always_comb begin
    for (int p = 0; p < int'(PE); p++) begin
      acc_t s;
      s = '0;
      for (int ci = 0; ci < int'(CIN); ci++)
        s += acc_t'(act_t'(rowbuf[rsel][int'(j)][ci*8 +: 8]))
           * acc_t'(wmem[{a, b}][int'(step)*PE + p][ci]);
      dot[p] = s;
    end
  end

  wire last_step = (int'(step) == int'(STEPS) - 1);
  wire can_emit  = !out_valid || out_ready;
  wire do_step   = full[rsel] && (!last_step || can_emit);
  wire row_done  = do_step && last_step && a && b && (j == CW'(W_IN - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wsel <= 1'b0; rsel <= 1'b0; icol <= '0;
      a <= 1'b0; b <= 1'b0; j <= '0; step <= '0;
      out_valid <= 1'b0; out_data <= '0;
      for (int c = 0; c < int'(COUT); c++) partial[c] <= '0;
    end else begin
      // Fill side.
      if (in_valid && in_ready) begin
        if (icol == CW'(W_IN - 1)) begin
          icol       <= '0;
          full[wsel] <= 1'b1;
          wsel       <= ~wsel;
        end else begin
          icol <= icol + 1'b1;
        end
      end
      // Expansion side.
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
          b <= ~b;
          if (b) begin
            if (j == CW'(W_IN - 1)) begin
              j <= '0;
              a <= ~a;
            end else begin
              j <= j + 1'b1;
            end
          end
        end else begin
          step <= step + 1'b1;
        end
      end
      if (row_done) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
      end
    end
  end

endmodule
