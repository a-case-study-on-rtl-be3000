// conv1x1: the final 1 x 1 convolution of the U-Net, a fully connected layer
// applied to every pixel that maps the CIN features to NCLS class scores
// (crack and background). It is the "Fully Connected" layer instance of the
// paper's block diagram, without bias as all of the paper's convolutions.
//
// How it works: each input pixel is held while the NCLS outputs are computed,
// PE of them per cycle, each a dot product of length CIN against a row of the
// on-chip weight memory; all NCLS accumulators then leave as one beat.
// Weights: configuration bus at layer LAYER_ID, cfg_addr[CFG_ADDR_W-1] = 0,
// addr = cls*CIN + ci, one int8 weight per write.
// Interface: valid/ready, CIN int8 channels in, NCLS int32 accumulators out.
// Timing: NCLS/PE cycles per pixel; registered output. PE is this design's
// choice.
module conv1x1
  import unet_pkg::*;
#(
  parameter int unsigned CIN      = 4,
  parameter int unsigned NCLS     = 2,
  parameter int unsigned PE       = 1,
  parameter int unsigned LAYER_ID = FINAL_LAYER_ID
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_wr_t               cfg,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [CIN*8-1:0]      in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [NCLS*ACC_W-1:0] out_data
);
  localparam int unsigned STEPS = NCLS / PE;
  localparam int unsigned SW    = (STEPS > 1) ? $clog2(STEPS) : 1;

  initial begin
    assert (NCLS % PE == 0) else $error("conv1x1: PE must divide NCLS");
  end

  act_t wmem [NCLS][CIN];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.layer == CFG_LAYER_W'(LAYER_ID) && !cfg.addr[CFG_ADDR_W-1]
        && int'(cfg.addr) < int'(NCLS * CIN))
      wmem[int'(cfg.addr) / CIN][int'(cfg.addr) % CIN] <= act_t'(cfg.wdata[7:0]);
  end

  logic [SW-1:0] step;
  acc_t          partial [NCLS];
  acc_t          dot     [PE];

  always_comb begin
    for (int p = 0; p < int'(PE); p++) begin
      acc_t s;
      s = '0;
      for (int ci = 0; ci < int'(CIN); ci++)
        s += acc_t'(act_t'(in_data[ci*8 +: 8])) * acc_t'(wmem[int'(step)*PE + p][ci]);
      dot[p] = s;
    end
  end

  wire last_step = (int'(step) == int'(STEPS) - 1);
  wire can_emit  = !out_valid || out_ready;
  wire do_step   = in_valid && (!last_step || can_emit);
  assign in_ready = do_step && last_step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step <= '0; out_valid <= 1'b0; out_data <= '0;
      for (int c = 0; c < int'(NCLS); c++) partial[c] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (do_step) begin
        for (int p = 0; p < int'(PE); p++) partial[int'(step)*PE + p] <= dot[p];
        if (last_step) begin
          step      <= '0;
          out_valid <= 1'b1;
          for (int c = 0; c < int'(NCLS); c++) begin
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
