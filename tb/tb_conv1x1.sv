// tb_conv1x1: self-checking test of conv1x1, the per-pixel classifier.
// Random weights through the configuration bus, random pixels with random
// gaps and back-pressure; every class score is compared with the dot product
// computed here. Without stalls a pixel must take NCLS/PE cycles.
module tb_conv1x1;
  import unet_pkg::*;
  localparam int CIN = 8, NCLS = 2, PE = 1, LID = FINAL_LAYER_ID, N = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [CIN*8-1:0] in_data;
  logic [NCLS*ACC_W-1:0] out_data;

  conv1x1 #(.CIN(CIN), .NCLS(NCLS), .PE(PE), .LAYER_ID(LID)) dut (.*);

  act_t px [N][CIN];
  act_t wt [NCLS][CIN];
  int checks = 0, failures = 0, in_idx = 0, out_idx = 0;
  logic gate_in = 0, gate_out = 0;
  bit go = 0;
  longint cyc = 0, t0 = -1, t1 = -1;

  always_comb begin
    in_valid = go && gate_in && (in_idx < N);
    in_data  = '0;
    if (in_idx < N) for (int c = 0; c < CIN; c++) in_data[c*8 +: 8] = px[in_idx][c];
    out_ready = gate_out;
  end

  always @(posedge clk) begin
    cyc++;
    if (!(in_valid && !in_ready)) gate_in <= (in_idx >= N / 2) || ($urandom_range(0, 3) != 0);
    gate_out <= (in_idx >= N / 2) || ($urandom_range(0, 2) != 0);
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (out_valid && out_ready) begin
      for (int k = 0; k < NCLS; k++) begin
        acc_t s;
        s = 0;
        for (int c = 0; c < CIN; c++) s += acc_t'(px[out_idx][c]) * acc_t'(wt[k][c]);
        checks++;
        if (acc_t'(out_data[k*ACC_W +: ACC_W]) !== s) failures++;
      end
      if (out_idx == N / 2 + 10) t0 = cyc;
      if (out_idx == N - 1) t1 = cyc;
      out_idx++;
    end
  end

  initial begin
    cfg = '0;
    for (int i = 0; i < N; i++) for (int c = 0; c < CIN; c++) px[i][c] = act_t'($urandom);
    for (int k = 0; k < NCLS; k++) for (int c = 0; c < CIN; c++) wt[k][c] = act_t'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NCLS; k++)
      for (int c = 0; c < CIN; c++) begin
        @(negedge clk);
        cfg.we = 1'b1; cfg.layer = CFG_LAYER_W'(LID);
        cfg.addr = CFG_ADDR_W'(k * CIN + c); cfg.wdata = CFG_DATA_W'(wt[k][c]);
      end
    @(negedge clk);
    cfg.we = 1'b0;
    go = 1;
    wait (out_idx == N);
    checks++;
    if (t1 - t0 != longint'((N - 1 - (N / 2 + 10)) * NCLS / PE)) begin
      failures++;
      $display("rate: %0d cycles", t1 - t0);
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
