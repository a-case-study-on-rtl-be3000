// tb_tconv2x2: self-checking test of tconv2x2 (2x2, stride 2 transposed
// convolution). Loads random weights through the configuration bus, streams
// random input maps with random gaps and output back-pressure, and compares
// every output accumulator with out[2i+a][2j+b][co] = sum_ci in[i][j][ci] *
// w[a][b][co][ci] computed here, in raster order of the upsampled map. In the
// last, stall-free frame consecutive outputs must be COUT/PE cycles apart.
module tb_tconv2x2;
  import unet_pkg::*;
  localparam int CIN = 4, COUT = 4, WI = 5, HI = 3, PE = 2, LID = 13, FRAMES = 3;
  localparam int NIN = WI * HI, NOUT = 4 * NIN, STEPS = COUT / PE;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [CIN*8-1:0] in_data;
  logic [COUT*ACC_W-1:0] out_data;

  tconv2x2 #(.CIN(CIN), .COUT(COUT), .W_IN(WI), .PE(PE), .LAYER_ID(LID)) dut (.*);

  act_t img [FRAMES][HI][WI][CIN];
  act_t wt  [2][2][COUT][CIN];
  acc_t expv [FRAMES*NOUT][COUT];
  int checks = 0, failures = 0, in_idx = 0, out_idx = 0, bad_gaps = 0;
  logic gate_in = 0, gate_out = 0;
  bit go = 0;
  longint cyc = 0, t_prev = 0;

  always_comb begin
    in_valid = go && gate_in && (in_idx < FRAMES * NIN);
    in_data  = '0;
    if (in_idx < FRAMES * NIN)
      for (int c = 0; c < CIN; c++)
        in_data[c*8 +: 8] = img[in_idx / NIN][(in_idx % NIN) / WI][in_idx % WI][c];
    out_ready = gate_out;
  end

  always @(posedge clk) begin
    bit fast;
    cyc++;
    fast = out_idx >= (FRAMES - 1) * NOUT;
    if (!(in_valid && !in_ready)) gate_in <= fast || ($urandom_range(0, 3) != 0);
    gate_out <= fast || ($urandom_range(0, 2) != 0);
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (out_valid && out_ready) begin
      for (int c = 0; c < COUT; c++) begin
        checks++;
        if (acc_t'(out_data[c*ACC_W +: ACC_W]) !== expv[out_idx][c]) begin
          failures++;
          if (failures < 6) $display("pixel %0d ch %0d got %0d exp %0d", out_idx, c,
                                     acc_t'(out_data[c*ACC_W +: ACC_W]), expv[out_idx][c]);
        end
      end
      if (out_idx > (FRAMES - 1) * NOUT + 1 && cyc - t_prev != longint'(STEPS)) bad_gaps++;
      t_prev = cyc;
      out_idx++;
    end
  end

  initial begin
    cfg = '0;
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < HI; y++)
        for (int x = 0; x < WI; x++)
          for (int c = 0; c < CIN; c++) img[f][y][x][c] = act_t'($urandom);
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++)
        for (int co = 0; co < COUT; co++)
          for (int ci = 0; ci < CIN; ci++) wt[a][b][co][ci] = act_t'($urandom);
    for (int f = 0; f < FRAMES; f++)
      for (int oy = 0; oy < 2 * HI; oy++)
        for (int ox = 0; ox < 2 * WI; ox++)
          for (int co = 0; co < COUT; co++) begin
            acc_t s;
            s = 0;
            for (int ci = 0; ci < CIN; ci++)
              s += acc_t'(img[f][oy/2][ox/2][ci]) * acc_t'(wt[oy%2][ox%2][co][ci]);
            expv[f*NOUT + oy*2*WI + ox][co] = s;
          end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++)
        for (int co = 0; co < COUT; co++)
          for (int ci = 0; ci < CIN; ci++) begin
            @(negedge clk);
            cfg.we = 1'b1; cfg.layer = CFG_LAYER_W'(LID);
            cfg.addr = CFG_ADDR_W'(((a*2 + b)*COUT + co)*CIN + ci);
            cfg.wdata = CFG_DATA_W'(wt[a][b][co][ci]);
          end
    @(negedge clk);
    cfg.we = 1'b0;
    go = 1;
    wait (out_idx == FRAMES * NOUT);
    checks++;
    if (bad_gaps != 0) begin
      failures++;
      $display("rate: %0d output gaps differ from %0d cycles", bad_gaps, STEPS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
