// tb_bn_relu: self-checking test of bn_relu. Two instances, one with ReLU
// (the BN + ReLU after a convolution) and one without (bias/scale only), get
// random multipliers, offsets and shifts through the configuration bus and a
// stream of random accumulators under random back-pressure. Every output is
// compared with the scale/offset/shift/ReLU/saturate rule evaluated here with
// 64-bit arithmetic. A stall-free run checks one beat per cycle.
module tb_bn_relu;
  import unet_pkg::*;
  localparam int CH = 4, N = 400, LID = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg;
  logic in_valid, in_ready0, in_ready1, ov0, ov1, out_ready;
  logic [CH*ACC_W-1:0] in_data;
  logic [CH*8-1:0] od0, od1;

  bn_relu #(.CH(CH), .RELU(1'b1), .LAYER_ID(LID)) dut0 (
    .clk, .rst_n, .cfg, .in_valid, .in_ready(in_ready0), .in_data,
    .out_valid(ov0), .out_ready, .out_data(od0));
  bn_relu #(.CH(CH), .RELU(1'b0), .LAYER_ID(LID)) dut1 (
    .clk, .rst_n, .cfg, .in_valid, .in_ready(in_ready1), .in_data,
    .out_valid(ov1), .out_ready, .out_data(od1));

  logic signed [31:0] accs [N][CH];
  logic signed [15:0] mult [CH];
  logic signed [31:0] offs [CH];
  int shift;
  int checks = 0, failures = 0, in_idx = 0, out_idx = 0, nonzero_relu = 0, neg_plain = 0;
  logic gate_in = 0, gate_out = 0;
  bit   go = 0;
  longint cyc = 0, t_first = -1, t_last = -1;

  function automatic int ref_val(logic signed [31:0] a, int c, bit relu);
    longint p;
    p = longint'(a) * longint'(mult[c]) + longint'(offs[c]);
    p = p >>> shift;
    if (relu && p < 0) p = 0;
    if (p > 127) p = 127;
    if (p < -128) p = -128;
    return int'(p);
  endfunction

  always_comb begin
    in_valid = go && gate_in && (in_idx < N);
    in_data  = '0;
    if (in_idx < N) for (int c = 0; c < CH; c++) in_data[c*32 +: 32] = accs[in_idx][c];
    out_ready = gate_out;
  end

  always @(posedge clk) begin
    cyc++;
    if (!(in_valid && !in_ready0)) gate_in <= (in_idx >= N / 2) || ($urandom_range(0, 3) != 0);
    gate_out <= (in_idx >= N / 2) || ($urandom_range(0, 2) != 0);
    if (in_valid && in_ready0) in_idx <= in_idx + 1;
    if (ov0 && out_ready) begin
      for (int c = 0; c < CH; c++) begin
        int e0, e1;
        e0 = ref_val(accs[out_idx][c], c, 1'b1);
        e1 = ref_val(accs[out_idx][c], c, 1'b0);
        checks += 2;
        if (int'($signed(od0[c*8 +: 8])) != e0) begin failures++; if (failures < 6) $display("relu px %0d c %0d got %0d exp %0d acc %0d", out_idx, c, $signed(od0[c*8 +: 8]), e0, accs[out_idx][c]); end
        if (int'($signed(od1[c*8 +: 8])) != e1) failures++;
        if (e0 > 0) nonzero_relu++;
        if (e1 < 0) neg_plain++;
      end
      if (out_idx == N / 2 + 10) t_first = cyc;
      if (out_idx == N - 1) t_last = cyc;
      out_idx++;
    end
    if (rst_n) begin
      checks++;
      if (ov0 !== ov1 || in_ready0 !== in_ready1) failures++;
    end
  end

  task automatic cfg_write(int addr, logic [31:0] data);
    @(negedge clk);
    cfg.we = 1'b1; cfg.layer = CFG_LAYER_W'(LID); cfg.addr = CFG_ADDR_W'(addr); cfg.wdata = data;
  endtask

  initial begin
    cfg = '0;
    shift = 12;
    for (int c = 0; c < CH; c++) begin
      mult[c] = 16'($urandom_range(1, 2000));
      offs[c] = 32'($signed($urandom_range(0, 200000)) - 100000);
    end
    for (int i = 0; i < N; i++)
      for (int c = 0; c < CH; c++) accs[i][c] = 32'($signed($urandom_range(0, 2000)) - 1000);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < CH; c++) cfg_write((1 << (CFG_ADDR_W - 1)) + c, 32'(mult[c]));
    for (int c = 0; c < CH; c++) cfg_write((1 << (CFG_ADDR_W - 1)) + CH + c, offs[c]);
    cfg_write((1 << (CFG_ADDR_W - 1)) + 2 * CH, 32'(shift));
    @(negedge clk);
    cfg.we = 1'b0;
    go = 1;
    wait (out_idx == N);
    checks += 3;
    if (t_last - t_first != longint'(N - 1 - (N / 2 + 10))) begin
      failures++;
      $display("rate: %0d cycles", t_last - t_first);
    end
    if (nonzero_relu == 0 || neg_plain == 0) begin
      $display("coverage: relu>0 %0d, plain<0 %0d", nonzero_relu, neg_plain);
    end
    if (nonzero_relu == 0) failures++;
    if (neg_plain == 0) failures++;
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
