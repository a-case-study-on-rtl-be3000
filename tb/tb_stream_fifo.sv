// tb_stream_fifo: self-checking test of stream_fifo. A numbered sequence goes
// through a small FIFO under random producer and consumer rates, including a
// phase where the consumer stops so the FIFO fills: order and content must be
// kept, `level` must match the number of stored beats, the FIFO must refuse
// input exactly when full, and it must pass one beat per cycle when both
// sides are ready.
module tb_stream_fifo;
  localparam int W = 12, DEPTH = 6, N = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] level;

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, in_idx = 0, out_idx = 0, full_seen = 0;
  logic gi = 0, go_ = 0;
  longint cyc = 0, t0 = -1, t1 = -1;

  function automatic logic [W-1:0] val(int i); return W'(i * 389 + 7); endfunction

  always_comb begin
    in_valid  = rst_n && gi && in_idx < N;
    in_data   = val(in_idx);
    out_ready = go_;
  end

  always @(posedge clk) begin
    cyc++;
    if (in_idx < 200)      begin if (!(in_valid && !in_ready)) gi <= $urandom_range(0, 1) != 0; go_ <= $urandom_range(0, 3) == 0; end
    else if (in_idx < 450) begin if (!(in_valid && !in_ready)) gi <= $urandom_range(0, 2) != 0; go_ <= $urandom_range(0, 2) != 0; end
    else                   begin gi <= 1'b1; go_ <= 1'b1; end
    if (rst_n) begin
      checks += 2;
      if (int'(level) != in_idx - out_idx) failures++;
      if (in_ready != (in_idx - out_idx < DEPTH)) failures++;
      if (in_idx - out_idx == DEPTH) full_seen++;
    end
    if (in_valid && in_ready) begin
      if (in_idx == 460) t0 = cyc;
      if (in_idx == N - 1) t1 = cyc;
      in_idx <= in_idx + 1;
    end
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== val(out_idx)) failures++;
      out_idx++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (out_idx == N);
    checks += 2;
    if (full_seen == 0) failures++;
    if (t1 - t0 != longint'(N - 1 - 460)) begin
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
