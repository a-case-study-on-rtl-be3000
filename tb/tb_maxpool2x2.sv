// tb_maxpool2x2: self-checking test of maxpool2x2. Streams random signed
// frames with random input gaps and output back-pressure and compares every
// pooled pixel with the maximum of its 2x2 block computed here. The last
// frame runs without stalls and must be accepted at one pixel per cycle.
module tb_maxpool2x2;
  localparam int CH = 3, W = 8, H = 6, FRAMES = 3, NPIX = W * H, NOUT = NPIX / 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [CH*8-1:0] in_data, out_data;

  maxpool2x2 #(.CH(CH), .W(W), .H(H)) dut (.*);

  logic signed [7:0] img [FRAMES][H][W][CH];
  logic signed [7:0] expv [FRAMES*NOUT][CH];
  int checks = 0, failures = 0, in_idx = 0, out_idx = 0;
  logic gate_in = 0, gate_out = 0;
  longint cyc = 0, t0 = -1, t1 = -1;

  always_comb begin
    in_valid = rst_n && gate_in && (in_idx < FRAMES * NPIX);
    in_data  = '0;
    if (in_idx < FRAMES * NPIX)
      for (int c = 0; c < CH; c++)
        in_data[c*8 +: 8] = img[in_idx / NPIX][(in_idx % NPIX) / W][in_idx % W][c];
    out_ready = gate_out;
  end

  always @(posedge clk) begin
    cyc++;
    if (!(in_valid && !in_ready)) gate_in <= (in_idx >= (FRAMES - 1) * NPIX) || ($urandom_range(0, 3) != 0);
    gate_out <= (in_idx >= (FRAMES - 1) * NPIX) || ($urandom_range(0, 2) != 0);
    if (in_valid && in_ready) begin
      if (in_idx == (FRAMES - 1) * NPIX) t0 = cyc;
      if (in_idx == FRAMES * NPIX - 1) t1 = cyc;
      in_idx <= in_idx + 1;
    end
    if (out_valid && out_ready) begin
      for (int c = 0; c < CH; c++) begin
        checks++;
        if ($signed(out_data[c*8 +: 8]) != expv[out_idx][c]) begin
          failures++;
          if (failures < 6) $display("pixel %0d ch %0d got %0d exp %0d", out_idx, c,
                                     $signed(out_data[c*8 +: 8]), expv[out_idx][c]);
        end
      end
      out_idx++;
    end
  end

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int c = 0; c < CH; c++) img[f][y][x][c] = 8'($urandom);
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H / 2; y++)
        for (int x = 0; x < W / 2; x++)
          for (int c = 0; c < CH; c++) begin
            logic signed [7:0] m;
            m = img[f][2*y][2*x][c];
            if (img[f][2*y][2*x+1][c] > m) m = img[f][2*y][2*x+1][c];
            if (img[f][2*y+1][2*x][c] > m) m = img[f][2*y+1][2*x][c];
            if (img[f][2*y+1][2*x+1][c] > m) m = img[f][2*y+1][2*x+1][c];
            expv[f*NOUT + y*(W/2) + x][c] = m;
          end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (out_idx == FRAMES * NOUT);
    repeat (3) @(posedge clk);
    checks += 2;
    if (t1 - t0 != longint'(NPIX - 1)) begin
      failures++;
      $display("rate: %0d cycles for %0d pixels", t1 - t0, NPIX - 1);
    end
    if (out_valid) failures++;   // no extra output
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
