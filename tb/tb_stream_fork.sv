// tb_stream_fork: self-checking test of stream_fork. A numbered sequence is
// sent through the fork while the two consumers accept independently at
// random; each must receive every beat exactly once and in order. With both
// consumers always ready the fork must pass one beat per cycle.
module tb_stream_fork;
  localparam int W = 16, N = 500;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, a_valid, a_ready, b_valid, b_ready;
  logic [W-1:0] in_data, a_data, b_data;

  stream_fork #(.W(W)) dut (.*);

  int checks = 0, failures = 0, in_idx = 0, a_idx = 0, b_idx = 0;
  logic gate_in = 0, ga = 0, gb = 0;
  longint cyc = 0, t0 = -1, t1 = -1;

  function automatic logic [W-1:0] val(int i);
    return W'(i * 7919 + 13);
  endfunction

  always_comb begin
    in_valid = rst_n && gate_in && (in_idx < N);
    in_data  = val(in_idx);
    a_ready  = ga;
    b_ready  = gb;
  end

  always @(posedge clk) begin
    bit fast;
    cyc++;
    fast = in_idx >= N - 100;
    if (!(in_valid && !in_ready)) gate_in <= fast || ($urandom_range(0, 3) != 0);
    ga      <= fast || ($urandom_range(0, 1) != 0);
    gb      <= fast || ($urandom_range(0, 2) != 0);
    if (a_valid && a_ready) begin
      checks++;
      if (a_data !== val(a_idx)) failures++;
      a_idx++;
    end
    if (b_valid && b_ready) begin
      checks++;
      if (b_data !== val(b_idx)) failures++;
      b_idx++;
    end
    if (in_valid && in_ready) begin
      if (in_idx == N - 90) t0 = cyc;
      if (in_idx == N - 1) t1 = cyc;
      in_idx <= in_idx + 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (in_idx == N);
    repeat (5) @(posedge clk);
    checks += 3;
    if (a_idx != N) failures++;
    if (b_idx != N) failures++;
    if (t1 - t0 != 89) begin
      failures++;
      $display("rate: %0d cycles for 89 beats", t1 - t0);
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
