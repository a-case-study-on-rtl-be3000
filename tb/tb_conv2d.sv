// tb_conv2d: self-checking test of conv2d (3x3, pad 1, no bias).
// Loads random int8 weights through the configuration bus, streams two small
// random frames with random input gaps and random output back-pressure, and
// compares every output accumulator with a direct convolution computed here.
// A third frame with no stalls checks the rate: COUT/PE cycles per pixel.
module tb_conv2d;
  import unet_pkg::*;
  localparam int CIN = 3, COUT = 4, W = 7, H = 5, K = 3, PE = 2, LID = 5;
  localparam int NTAP = K * K * CIN, NPIX = W * H, FRAMES = 3, STEPS = COUT / PE;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [CIN*8-1:0] in_data;
  logic [COUT*ACC_W-1:0] out_data;

  conv2d #(.CIN(CIN), .COUT(COUT), .W(W), .H(H), .K(K), .PE(PE), .LAYER_ID(LID)) dut (.*);

  act_t img [FRAMES][H][W][CIN];
  act_t wt  [COUT][NTAP];
  acc_t expv [FRAMES*NPIX][COUT];
  int checks = 0, failures = 0;
  int in_idx = 0, out_idx = 0;
  logic gate_in = 0, gate_out = 0;
  bit   free_run = 0;
  longint cyc = 0, first_fast = -1, last_fast = -1;

  always_comb begin
    in_valid = (in_idx < FRAMES * NPIX) && gate_in && rst_n;
    in_data  = '0;
    if (in_idx < FRAMES * NPIX)
      for (int c = 0; c < CIN; c++)
        in_data[c*8 +: 8] = img[in_idx / NPIX][(in_idx % NPIX) / W][in_idx % W][c];
    out_ready = gate_out;
  end

  always @(posedge clk) begin
    cyc++;
    free_run = in_idx >= 2 * NPIX;
    if (!(in_valid && !in_ready)) gate_in <= free_run || ($urandom_range(0, 3) != 0);
    gate_out <= free_run || ($urandom_range(0, 2) != 0);
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (out_valid && out_ready) begin
      for (int c = 0; c < COUT; c++) begin
        checks++;
        if (acc_t'(out_data[c*ACC_W +: ACC_W]) !== expv[out_idx][c]) begin
          failures++;
          if (failures < 10) $display("mismatch pixel %0d ch %0d: got %0d exp %0d",
                                      out_idx, c, acc_t'(out_data[c*ACC_W +: ACC_W]), expv[out_idx][c]);
        end
      end
      if (out_idx == 2 * NPIX) first_fast = cyc;
      if (out_idx == 3 * NPIX - 1) last_fast = cyc;
      out_idx++;
    end
  end

  initial begin
    cfg = '0;
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < CIN; c++) img[f][y][x][c] = act_t'($urandom);
    for (int co = 0; co < COUT; co++)
      for (int t = 0; t < NTAP; t++) wt[co][t] = act_t'($urandom);
    // Reference convolution.
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int co = 0; co < COUT; co++) begin
            acc_t s;
            s = 0;
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                for (int ci = 0; ci < CIN; ci++) begin
                  int yy, xx;
                  yy = y + ky - 1; xx = x + kx - 1;
                  if (yy >= 0 && yy < H && xx >= 0 && xx < W)
                    s += acc_t'(img[f][yy][xx][ci]) * acc_t'(wt[co][(ky*K + kx)*CIN + ci]);
                end
            expv[f*NPIX + y*W + x][co] = s;
          end
    repeat (3) @(posedge clk);
    // Weight load through the configuration bus (driven away from the clock edge).
    for (int co = 0; co < COUT; co++)
      for (int t = 0; t < NTAP; t++) begin
        @(negedge clk);
        cfg.we = 1'b1; cfg.layer = CFG_LAYER_W'(LID);
        cfg.addr = CFG_ADDR_W'(co * NTAP + t); cfg.wdata = CFG_DATA_W'(wt[co][t]);
      end
    @(negedge clk);
    // A write for another layer must not disturb this one.
    cfg.layer = CFG_LAYER_W'(LID + 1); cfg.addr = '0; cfg.wdata = 32'h7F;
    @(negedge clk);
    cfg.we = 1'b0;
    rst_n = 1;
    wait (out_idx == FRAMES * NPIX);
    repeat (2) @(posedge clk);
    // Rate: in the stall-free frame consecutive pixels are STEPS cycles apart.
    checks++;
    if (last_fast - first_fast != longint'((NPIX - 1) * STEPS)) begin
      failures++;
      $display("rate: %0d cycles for %0d pixels, expected %0d", last_fast - first_fast,
               NPIX - 1, (NPIX - 1) * STEPS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
